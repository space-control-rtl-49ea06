// tb_workload_table -- the checker under the two permission-table shapes
// the evaluation uses, at the design's default sizes (32 PSHRs, 256-entry
// = 16 KiB permission cache).
//
//   1e : one entry grants the process a whole 64 MiB range;
//   wc : the worst case, one 64 B entry per 4 KiB page, here for 256 MiB
//        of shared memory, 65536 entries (the full 16 GiB case has 4 Mi
//        entries and a 256 MiB table, too large for a simulation model;
//        its search is six probes deeper).
//
// Each runs a graph-analytics-like access mix: half sequential 64-byte
// streaming (edge lists), half random references (vertex data), 70 %
// loads, from one authenticated process.  In wc every eighth page is
// read-only and every 16th is not granted, so refusals happen too.
// Checked: every access gets the permission a direct computation predicts,
// each lookup needs at most ceil(log2(entries)) + 1 table probes, and in
// 1e the table is read only once.  The cache miss ratio and
// the number of cycles are printed for each shape.
module tb_workload_table;
  import spc_pkg::*;
  import tb_ref_pkg::*;

  localparam int  HOST = 9;
  localparam pa_t DATA_BASE = TABLE_BASE + TABLE_BYTES;
  localparam int  NWC = 65536;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [HOST_W-1:0]    host_id = HOST;
  logic [NUM_HWPID-1:0] alloc_mask;
  logic creq_valid, creq_ready, cresp_valid, lreq_valid, lreq_ready = 1'b1;
  logic dreq_valid, dreq_ready, uresp_valid, bisnp_valid, lbl_wr, irq, rand_ready;
  core_req_t  creq;
  core_resp_t cresp;
  loc_req_t   lreq;
  dn_req_t    dreq;
  up_resp_t   uresp;
  pa_t        bisnp_addr;
  label_rec_t lbl_rec;
  chk_ev_t    ev;

  perm_checker dut (.*);
  sdm_model #(.MIN_LAT(10), .MAX_LAT(40)) u_sdm (
    .clk, .rst_n, .rand_ready, .dreq_valid, .dreq_ready, .dreq, .uresp_valid, .uresp);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  localparam hwpid_t PID = 7'd11;
  bit   wc_mode;
  bit   exp_q [$];
  int   misses = 0, hits = 0, lookups = 0, worst_probes = 0;
  int   probes [32];

  // permission of the wc table for page i: granted unless i % 16 == 15,
  // writable unless i % 8 == 3
  function automatic bit predict(pa_t a, cmd_e c);
    int i;
    if (!wc_mode) return 1'b1;
    i = int'((a - DATA_BASE) >> 12);
    if (i % 16 == 15) return 1'b0;
    return c == CMD_LD || (i % 8 != 3);
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (cresp_valid) begin
      if (exp_q.size() == 0) chk(0, "response with nothing outstanding");
      else chk(cresp.violation == !exp_q.pop_front(), "permission as predicted");
    end
    hits   += int'(ev.cache_hit);
    misses += int'(ev.cache_miss);
  end

  // probes per lookup: count the table reads issued while each slot searches
  always @(posedge clk) if (rst_n) begin
    if (dreq_valid && dreq_ready && dreq.tag == PERM_TAG && dreq.addr != SDM_BASE + CNT_LINE_OFF)
      probes[dut.pidx] <= probes[dut.pidx] + 1;
    if (creq_valid && creq_ready) probes[dut.tail] <= 0;
    if (cresp_valid) begin
      lookups++;
      if (probes[dut.head] > worst_probes) worst_probes = probes[dut.head];
    end
  end

  task automatic run(int n, int span_pages, output longint cycles);
    pa_t seq;
    longint t0;
    seq = DATA_BASE;
    t0 = cyc;
    for (int t = 0; t < n; t++) begin
      pa_t a; cmd_e c;
      if (t % 2 == 0) begin a = seq; seq = seq + 64; end
      else a = DATA_BASE + (pa_t'($urandom_range(span_pages - 1)) << 12) + pa_t'($urandom_range(4095));
      c = ($urandom_range(9) < 7) ? CMD_LD : CMD_ST;
      @(negedge clk);
      creq_valid = 1; creq.epa = {PID, a}; creq.cmd = c; creq.wdata = '0;
      #1;
      while (!creq_ready) begin @(negedge clk); #1; end
      exp_q.push_back(predict(a, c));
      @(posedge clk);
      #1 creq_valid = 0;
    end
    while (exp_q.size() != 0) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    #50ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint cyc1, cyc2;
    line_t h;
    int m1, rd1;
    creq_valid = 0; creq = '0; bisnp_valid = 0; bisnp_addr = '0; rand_ready = 0;
    alloc_mask = '0; alloc_mask[PID] = 1'b1;
    foreach (probes[i]) probes[i] = 0;

    // 1e: a single entry of 64 MiB
    wc_mode = 0;
    u_sdm.poke(TABLE_BASE, make_entry(64'(DATA_BASE), 61'(64'h400_0000), 1, 1,
                                      256'(1) << HOST, 128'(1) << PID));
    h = '0; h[CNT_BIT_LO +: 32] = 32'd1; u_sdm.poke(SDM_BASE + CNT_LINE_OFF, h);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3000, 16384, cyc1);
    m1 = misses; rd1 = u_sdm.rd_count;
    chk(misses == 1, $sformatf("1e: the single entry is read once (%0d)", misses));
    chk(worst_probes <= 1, $sformatf("1e: one probe per lookup (%0d)", worst_probes));
    $display("1e: %0d accesses in %0d cycles, cache hits %0d misses %0d", 3000, cyc1, hits, misses);

    // wc: one entry per 4 KiB page
    wc_mode = 1;
    for (int i = 0; i < NWC; i++)
      u_sdm.poke(TABLE_BASE + (pa_t'(i) << 6),
                 make_entry(64'(DATA_BASE) + (64'(i) << 12), 61'(4096), i % 16 != 15, i % 8 != 3,
                            256'(1) << HOST, 128'(1) << PID));
    h = '0; h[CNT_BIT_LO +: 32] = 32'(NWC); u_sdm.poke(SDM_BASE + CNT_LINE_OFF, h);
    @(negedge clk); bisnp_valid = 1; bisnp_addr = TABLE_BASE;          // entry 0 changed
    @(negedge clk); bisnp_addr = SDM_BASE + CNT_LINE_OFF;              // count changed
    @(negedge clk); bisnp_valid = 0;
    hits = 0; misses = 0; worst_probes = 0; lookups = 0;
    run(3000, NWC, cyc2);
    chk(worst_probes <= $clog2(NWC) + 1,
        $sformatf("wc: at most log2(N)+1 = %0d probes per lookup (%0d)", $clog2(NWC) + 1, worst_probes));
    chk(misses > 0 && hits > 0, "wc: both hits and misses");
    $display("wc: %0d accesses in %0d cycles, cache hits %0d misses %0d (miss ratio %0d%%), worst %0d probes",
             3000, cyc2, hits, misses, (100 * misses) / (hits + misses), worst_probes);
    chk(cyc2 > cyc1, "wc is slower than 1e");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
