// tb_mono_counter -- self-checking testbench for mono_counter.
//
// Random increments against a model at full width, then a 4-bit instance
// driven into saturation: it must stop at all-ones and never wrap.
module tb_mono_counter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inc, inc4, sat, sat4;
  logic [63:0] value;
  logic [3:0]  value4;
  longint unsigned model = 0;
  int checks = 0, failures = 0;

  mono_counter #(.WIDTH(64)) dut  (.clk, .rst_n, .inc(inc),  .value(value),  .saturated(sat));
  mono_counter #(.WIDTH(4))  dut4 (.clk, .rst_n, .inc(inc4), .value(value4), .saturated(sat4));

  initial begin
    inc = 0; inc4 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (value != 0 || value4 != 0) begin failures++; $display("FAIL reset"); end
    for (int t = 0; t < 500; t++) begin
      inc = $urandom_range(0, 1);
      @(negedge clk);
      if (inc) model++;
      checks++;
      if (value != model) begin failures++; $display("FAIL value %0d exp %0d", value, model); end
    end
    inc = 0;
    for (int t = 0; t < 20; t++) begin
      inc4 = 1;
      @(negedge clk);
      checks++;
      if (value4 != 4'((t + 1 > 15) ? 15 : t + 1) || sat4 != (t + 1 >= 15)) begin
        failures++; $display("FAIL sat t=%0d value=%0d", t, value4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
