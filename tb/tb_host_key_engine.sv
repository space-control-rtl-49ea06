// tb_host_key_engine -- self-checking testbench for host_key_engine.
//
// The first provisioning write must load the key and lock; later writes
// must leave the key unchanged; a reset unlocks it again.
module tb_host_key_engine;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prov_wr, locked;
  logic [63:0] prov_key, k_host;
  int checks = 0, failures = 0;

  host_key_engine dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    prov_wr = 0; prov_key = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!locked && k_host == 0, "reset state");
    prov_wr = 1; prov_key = 64'hA5A5_0123_4567_89AB;
    @(negedge clk);
    chk(locked && k_host == 64'hA5A5_0123_4567_89AB, "first write loads");
    for (int i = 0; i < 10; i++) begin
      prov_key = {$urandom, $urandom};
      @(negedge clk);
      chk(locked && k_host == 64'hA5A5_0123_4567_89AB, "locked key unchanged");
    end
    prov_wr = 0;
    rst_n = 0; @(negedge clk); rst_n = 1;
    chk(!locked, "reset unlocks");
    prov_wr = 1; prov_key = 64'h1111_2222_3333_4444; @(negedge clk); prov_wr = 0;
    chk(locked && k_host == 64'h1111_2222_3333_4444, "re-provision after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
