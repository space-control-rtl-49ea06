// tb_label_mac -- self-checking testbench for label_mac.
//
// Checks two published SipHash-2-4 test vectors (key 00..0f; empty message
// and the 8-byte message 00..07), then random keys and messages of 0..4
// words against a behavioural SipHash written here from the algorithm's
// definition, and the latency 2*(nwords+1)+5 cycles from start to done.
module tb_label_mac;
  import spc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         start;
  logic [127:0] key;
  logic [2:0]   nwords;
  logic [63:0]  words [4];
  logic         busy, done;
  label_t       mac;
  int checks = 0, failures = 0;

  label_mac #(.MAX_WORDS(4)) dut (.*);

  function automatic logic [63:0] rl(logic [63:0] x, int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  function automatic logic [63:0] ref_sip(logic [63:0] k0, logic [63:0] k1,
                                          int n, logic [63:0] m [4]);
    logic [63:0] a, b, c, d, blk;
    a = k0 ^ 64'h736f6d6570736575; b = k1 ^ 64'h646f72616e646f6d;
    c = k0 ^ 64'h6c7967656e657261; d = k1 ^ 64'h7465646279746573;
    for (int i = 0; i <= n; i++) begin
      blk = (i < n) ? m[i] : (64'(8 * n) << 56);
      d ^= blk;
      repeat (2) begin
        a += b; b = rl(b,13); b ^= a; a = rl(a,32);
        c += d; d = rl(d,16); d ^= c;
        a += d; d = rl(d,21); d ^= a;
        c += b; b = rl(b,17); b ^= c; c = rl(c,32);
      end
      a ^= blk;
    end
    c ^= 64'hff;
    repeat (4) begin
      a += b; b = rl(b,13); b ^= a; a = rl(a,32);
      c += d; d = rl(d,16); d ^= c;
      a += d; d = rl(d,21); d ^= a;
      c += b; b = rl(b,17); b ^= c; c = rl(c,32);
    end
    return a ^ b ^ c ^ d;
  endfunction

  task automatic run(input logic [127:0] k, input int n, input logic [63:0] expect_mac);
    int cyc;
    @(negedge clk);
    key = k; nwords = 3'(n); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (mac !== expect_mac) begin
      failures++;
      $display("FAIL mac n=%0d got %h exp %h", n, mac, expect_mac);
    end
    checks++;
    if (cyc != 2 * (n + 1) + 5) begin
      failures++;
      $display("FAIL latency n=%0d got %0d exp %0d", n, cyc, 2 * (n + 1) + 5);
    end
  endtask

  initial begin
    start = 0; key = '0; nwords = '0;
    for (int i = 0; i < 4; i++) words[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // published vectors: key bytes 00..0f
    run({64'h0f0e0d0c0b0a0908, 64'h0706050403020100}, 0, 64'h726fdb47dd0e0e31);
    words[0] = 64'h0706050403020100;
    run({64'h0f0e0d0c0b0a0908, 64'h0706050403020100}, 1, 64'h93f5f5799a932462);
    // random
    for (int t = 0; t < 40; t++) begin
      logic [63:0] k0, k1;
      int n;
      k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom};
      n = $urandom_range(0, 4);
      for (int i = 0; i < 4; i++) words[i] = {$urandom, $urandom};
      run({k1, k0}, n, ref_sip(k0, k1, n, words));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
