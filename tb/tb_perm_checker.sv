// tb_perm_checker -- self-checking testbench for perm_checker.
//
// The checker (32 PSHRs as in the paper, a 16-entry permission cache so that
// lines get evicted) talks to sdm_model, which answers out of order with a
// random latency and random backpressure.  The SDM holds a sorted table of
// 40 permission entries with random masks and r/w bits, a Table Count in
// the header and public label records.  Random traffic mixes loads and
// stores of trusted (HWPID > 0) and untrusted (HWPID 0) processes to
// covered addresses, gaps between entries, the metadata section, the table
// window and local memory.  The expected outcome of each access comes from
// a linear scan of the table, independent of the checker's binary search.
// Checked:
//   * every remote access retires in program order with the right
//     violation flag and, for a permitted load, the data the SDM held after
//     all earlier permitted stores; a denied load returns zeros;
//   * a denied store never reaches the SDM (its contents are compared with
//     a shadow copy at the end); one irq pulse per violation;
//   * local accesses leave with HPA[42] = (HWPID > 0);
//   * a public label read is handed to SPACE with its contents;
//   * a table update committed by the FM (entry rewritten, entry appended,
//     count changed) takes effect after its BISnps;
//   * timing: with the permission path cached, a load leaves for the SDM one
//     cycle after it is accepted (the paper sends loads at once) and a store
//     only after its lookup, within 2 + probes cycles;
//   * every event of the checker occurs at least once.
module tb_perm_checker;
  import spc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NE    = 40;
  localparam int HOST  = 3;
  localparam pa_t DATA_BASE = TABLE_BASE + TABLE_BYTES;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [HOST_W-1:0]    host_id = HOST;
  logic [NUM_HWPID-1:0] alloc_mask;
  logic creq_valid, creq_ready, cresp_valid, lreq_valid, lreq_ready;
  logic dreq_valid, dreq_ready, uresp_valid, bisnp_valid, lbl_wr, irq, rand_ready;
  core_req_t  creq;
  core_resp_t cresp;
  loc_req_t   lreq;
  dn_req_t    dreq;
  up_resp_t   uresp;
  pa_t        bisnp_addr;
  label_rec_t lbl_rec;
  chk_ev_t    ev;

  perm_checker #(.N_PSHR(32), .CACHE_ENTRIES(16)) dut (.*);
  sdm_model #(.MIN_LAT(4), .MAX_LAT(24)) u_sdm (
    .clk, .rst_n, .rand_ready, .dreq_valid, .dreq_ready, .dreq, .uresp_valid, .uresp);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ------------------------------------------------------ reference table
  int ne;
  logic [63:0]  e_start [NE+1];
  logic [60:0]  e_size  [NE+1];
  bit           e_val   [NE+1], e_rw [NE+1];
  logic [255:0] e_hm    [NE+1];
  logic [127:0] e_pm    [NE+1];
  line_t        shadow  [logic [PA_W-7:0]];

  function automatic line_t sh_rd(pa_t a);
    return shadow.exists(a[PA_W-1:6]) ? shadow[a[PA_W-1:6]] : '0;
  endfunction
  task automatic put(pa_t a, line_t d);   // both SDM and shadow
    shadow[a[PA_W-1:6]] = d;
    u_sdm.poke(a, d);
  endtask
  task automatic write_entry(int i);
    put(TABLE_BASE + (pa_t'(i) << 6),
        make_entry(e_start[i], e_size[i], e_val[i], e_rw[i], e_hm[i], e_pm[i]));
  endtask
  task automatic write_count();
    line_t h;
    h = sh_rd(SDM_BASE + CNT_LINE_OFF);
    h[CNT_BIT_LO +: 32] = 32'(ne);
    put(SDM_BASE + CNT_LINE_OFF, h);
  endtask

  function automatic bit expect_ok(pa_t a, hwpid_t p, cmd_e c);
    if (in_range(a, SDM_BASE, META_BYTES)) return 1'b1;
    if (in_range(a, TABLE_BASE, TABLE_BYTES)) return 1'b0;
    if (p == '0) return 1'b0;
    for (int i = 0; i < ne; i++)
      if (64'(a) >= e_start[i] && 64'(a) - e_start[i] < 64'(e_size[i]))
        return e_val[i] && e_hm[i][HOST] && e_pm[i][p] && alloc_mask[p]
               && (c == CMD_LD || e_rw[i]);
    return 1'b0;
  endfunction

  // ------------------------------------------------------ request driver
  typedef struct { bit ok; cmd_e cmd; line_t data; pa_t a; } exp_t;
  exp_t exp_q [$];
  int   n_lbl_exp = 0, n_viol_exp = 0, n_local = 0;
  int   last_accept_cyc;

  function automatic line_t rnd_line();
    line_t d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
    return d;
  endfunction

  task automatic send(pa_t a, hwpid_t p, cmd_e c, line_t d);
    @(negedge clk);
    creq_valid = 1; creq.epa = {p, a}; creq.cmd = c; creq.wdata = d;
    #1;
    while (!creq_ready) begin @(negedge clk); #1; end
    last_accept_cyc = int'(cyc);
    if (in_range(a, SDM_BASE, SDM_SIZE)) begin
      exp_t e;
      e.ok = expect_ok(a, p, c); e.cmd = c; e.a = a;
      e.data = (c == CMD_LD && e.ok) ? sh_rd(a) : '0;
      if (c == CMD_ST && e.ok) shadow[a[PA_W-1:6]] = d;
      if (c == CMD_LD && e.ok && in_range(a, LABELS_BASE, LABELS_SIZE)) n_lbl_exp++;
      if (!e.ok) n_viol_exp++;
      exp_q.push_back(e);
    end else begin
      n_local++;
      chk(lreq_valid && lreq.addr == {p != 0, 1'b0, a} && lreq.cmd == c && lreq.wdata == d,
          "local request passed with HPA[42] = (HWPID > 0)");
    end
    @(posedge clk);
    #1 creq_valid = 0;
  endtask

  function automatic pa_t rnd_addr();
    int k, r;
    r = $urandom_range(99);
    k = $urandom_range(ne - 1);
    if (r < 60) return pa_t'(e_start[k] + 64'($urandom_range(32'(e_size[k]) - 1)));
    if (r < 70) return pa_t'(e_start[k] + 64'(e_size[k]) + 64'($urandom_range(4095)));
    if (r < 78) return LABELS_BASE + pa_t'($urandom_range(32'(LABELS_SIZE) - 1));
    if (r < 80) return SDM_BASE + pa_t'($urandom_range(63));
    if (r < 85) return TABLE_BASE + pa_t'($urandom_range(1 << 20));
    return pa_t'({$urandom, $urandom}) & 41'h0FF_FFFF_FFFF;   // local DRAM
  endfunction

  function automatic hwpid_t rnd_pid();
    return ($urandom_range(6) == 0) ? hwpid_t'(0) : hwpid_t'($urandom_range(1, 7));
  endfunction

  task automatic traffic(int n);
    for (int t = 0; t < n; t++) begin
      pa_t a; cmd_e c;
      a = rnd_addr();
      c = cmd_e'($urandom_range(1));
      if (c == CMD_ST && in_range(a, SDM_BASE, 64)) c = CMD_LD;   // keep the header intact
      if (in_range(a, SDM_BASE + CNT_LINE_OFF, 64)) c = CMD_LD;
      send(a, rnd_pid(), c, rnd_line());
      if ($urandom_range(3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
  endtask

  task automatic quiesce();
    int w;
    w = 0;
    while ((exp_q.size() != 0 || u_sdm.pend.size() != 0) && w < 5000) begin
      @(negedge clk); w++;
    end
    repeat (4) @(negedge clk);
  endtask

  // ------------------------------------------------------ monitors
  int n_irq = 0, n_lbl = 0;
  int evc [9];
  int data_fire_cyc = -1;
  pa_t data_fire_addr;
  cmd_e data_fire_cmd;

  always @(negedge clk) if (rst_n) begin
    if (cresp_valid) begin
      if (exp_q.size() == 0) chk(0, "response with nothing outstanding");
      else begin
        exp_t e;
        e = exp_q.pop_front();
        chk(cresp.violation == !e.ok && cresp.cmd == e.cmd,
            $sformatf("permission of %h (%s): got viol=%0b", e.a, e.cmd.name(), cresp.violation));
        if (e.cmd == CMD_LD) chk(cresp.rdata == e.data, $sformatf("load data of %h", e.a));
      end
    end
    if (irq) n_irq++;
    if (lbl_wr) begin
      n_lbl++;
      chk(lbl_rec == label_rec_t'(uresp.rdata) && in_range(uresp.addr, LABELS_BASE, LABELS_SIZE),
          "label record passed to SPACE");
    end
    if (dreq_valid && dreq_ready && dreq.tag != PERM_TAG) begin
      data_fire_cyc = int'(cyc); data_fire_addr = dreq.addr; data_fire_cmd = dreq.cmd;
    end
    evc[0] += int'(ev.cache_hit);   evc[1] += int'(ev.cache_miss);
    evc[2] += int'(ev.probe_merged); evc[3] += int'(ev.count_read);
    evc[4] += int'(ev.load_early);  evc[5] += int'(ev.store_stall);
    evc[6] += int'(ev.violation);   evc[7] += int'(ev.label_seen);
    evc[8] += int'(ev.local_enc);
  end

  // local DRAM side: random backpressure
  always @(negedge clk) lreq_ready = ($urandom_range(4) != 0);

  // watchdog
  initial begin
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] s;
    string names [9] = '{"cache_hit", "cache_miss", "probe_merged", "count_read",
                         "load_early", "store_stall", "violation", "label_seen", "local_enc"};
    creq_valid = 0; creq = '0; bisnp_valid = 0; bisnp_addr = '0; rand_ready = 1;
    alloc_mask = '0;
    for (int p = 1; p < 8; p++) alloc_mask[p] = (p != 6);   // HWPID 6 not on this host

    // table: sorted, disjoint ranges of 1..16 lines
    ne = NE;
    s = 64'(DATA_BASE) + 64'h1000;
    for (int i = 0; i < NE; i++) begin
      e_start[i] = s;
      e_size[i]  = 61'($urandom_range(1, 16) * 64);
      e_val[i]   = ($urandom_range(7) != 0);
      e_rw[i]    = 1'($urandom);
      e_hm[i]    = '0; e_hm[i][HOST] = ($urandom_range(3) != 0); e_hm[i][HOST + 1] = 1'b1;
      e_pm[i]    = '0;
      for (int p = 1; p < 8; p++) e_pm[i][p] = 1'($urandom);
      write_entry(i);
      s = s + 64'(e_size[i]) + 64'($urandom_range(1, 4) * 4096);
    end
    write_count();
    for (int i = 0; i < 64; i++)
      put(LABELS_BASE + pa_t'(i * 64),
          make_label({$urandom, $urandom}, i % 8, HOST, 64'(i) << 20, 64'h1000));
    for (int i = 0; i < 200; i++) begin    // some data in the covered ranges
      int k; k = $urandom_range(NE - 1);
      put(pa_t'(e_start[k] + 64'($urandom_range(32'(e_size[k]) - 1))), rnd_line());
    end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. random traffic
    traffic(3000);
    quiesce();

    // 2. the FM commits an update: entry 5 becomes read-only for everyone of
    //    this host, entry 7 invalid, and a new entry is appended
    e_val[5] = 1; e_rw[5] = 0; e_hm[5][HOST] = 1; e_pm[5] = '1; write_entry(5);
    e_val[7] = 0; write_entry(7);
    e_start[NE] = s; e_size[NE] = 61'(8 * 64); e_val[NE] = 1; e_rw[NE] = 1;
    e_hm[NE] = '0; e_hm[NE][HOST] = 1; e_pm[NE] = '1; write_entry(NE);
    ne = NE + 1; write_count();
    foreach (e_start[i]) begin
      if (i == 5 || i == 7 || i == NE) begin
        @(negedge clk); bisnp_valid = 1; bisnp_addr = TABLE_BASE + (pa_t'(i) << 6);
      end
    end
    @(negedge clk); bisnp_valid = 1; bisnp_addr = SDM_BASE + CNT_LINE_OFF;
    @(negedge clk); bisnp_valid = 0;
    send(pa_t'(e_start[5]), 7'd1, CMD_ST, rnd_line());     // now read-only
    send(pa_t'(e_start[5]), 7'd1, CMD_LD, '0);
    send(pa_t'(e_start[7]), 7'd1, CMD_LD, '0);             // now invalid
    send(pa_t'(e_start[NE] + 64), 7'd2, CMD_ST, rnd_line()); // new entry
    send(pa_t'(e_start[NE] + 64), 7'd2, CMD_LD, '0);
    quiesce();
    traffic(1500);
    quiesce();

    // 3. timing with the permission path cached and no backpressure
    rand_ready = 0;
    repeat (4) @(negedge clk);
    send(pa_t'(e_start[NE]), 7'd3, CMD_LD, '0);            // warm the path
    quiesce();
    send(pa_t'(e_start[NE]), 7'd3, CMD_LD, '0);
    repeat (3) @(negedge clk);
    chk(data_fire_addr == pa_t'(e_start[NE]) && data_fire_cmd == CMD_LD
        && data_fire_cyc - last_accept_cyc == 1,
        $sformatf("load leaves 1 cycle after acceptance (%0d)", data_fire_cyc - last_accept_cyc));
    quiesce();
    send(pa_t'(e_start[NE]) + 128, 7'd3, CMD_ST, rnd_line());
    repeat (12) @(negedge clk);
    chk(data_fire_addr == pa_t'(e_start[NE]) + 128 && data_fire_cmd == CMD_ST
        && data_fire_cyc - last_accept_cyc >= 2
        && data_fire_cyc - last_accept_cyc <= 2 + $clog2(NE + 2) + 1,
        $sformatf("store leaves after its lookup (%0d cycles)", data_fire_cyc - last_accept_cyc));
    quiesce();

    // 4. results
    chk(exp_q.size() == 0, "all remote accesses retired");
    chk(n_irq == n_viol_exp, $sformatf("one irq per violation (%0d/%0d)", n_irq, n_viol_exp));
    chk(n_lbl == n_lbl_exp, $sformatf("labels passed to SPACE (%0d/%0d)", n_lbl, n_lbl_exp));
    begin
      int bad; bad = 0;
      foreach (shadow[l]) if (shadow[l] != u_sdm.peek({l, 6'd0})) bad++;
      foreach (u_sdm.mem[l]) if (!shadow.exists(l)) bad++;
      chk(bad == 0, $sformatf("SDM contents match permitted stores only (%0d lines differ)", bad));
    end
    for (int i = 0; i < 9; i++)
      chk(evc[i] > 0, $sformatf("event %s occurred (%0d)", names[i], evc[i]));
    $display("events: hit %0d miss %0d merged %0d count %0d early-load %0d store-stall %0d viol %0d label %0d local-enc %0d",
             evc[0], evc[1], evc[2], evc[3], evc[4], evc[5], evc[6], evc[7], evc[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
