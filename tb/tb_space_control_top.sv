// tb_space_control_top -- end-to-end testbench of space_control_top.
//
// The top is instantiated with its default parameters (32 PSHRs, a
// 256-entry = 16 KiB permission cache), so this is also the full-size
// test.  Around it: sdm_model as the shared CXL memory (random latency,
// out-of-order responses, backpressure), a local DRAM model, and this
// testbench playing the fabric manager (it writes the permission table,
// the Table Count and the public labels into the SDM, and sends BISnps
// when it changes them), the OS (GET_NEXT_PID, context switches, ring
// changes) and the processes (ARM_LABEL, loads and stores).
//
// Scenario:
//   1. K_host is provisioned; the OS takes HWPIDs for processes A and B.
//   2. The FM grants A read/write on region RA and read on RB, B read on
//      RA; region RC belongs to another host.  It publishes L_exp of A
//      and B.  The OS reads the public labels (SPACE intercepts them).
//   3. Before ARM_LABEL, A's accesses carry HWPID 0 and are refused.
//   4. A and B arm their labels and are authenticated; an impostor with
//      A's HWPID but another page-table base is not.
//   5. Directed accesses: allowed and refused loads and stores, a local
//      page of A encrypted in DRAM and unreadable by another process.
//   6. The FM revokes A's write access to RA (table update + BISnp).
//   7. Random traffic of A, B and untrusted processes, checked against a
//      linear scan of the table and a shadow copy of memory.
// Every mechanism is counted (pipeline stall of a store, permission cache
// hit and miss, merged probe, count read, early load, violation and irq,
// BISnp invalidation followed by a re-fetch, label interception, local
// encryption, authentication success and refusal, ARM_LABEL refusal); a
// mechanism that never happened counts as a failure.  Timing checked: V is
// set 29 cycles after ARM_LABEL; local accesses add no cycle.
module tb_space_control_top;
  import spc_pkg::*;
  import tb_ref_pkg::*;

  localparam int  HOST = 5;
  localparam int  NE   = 64;
  localparam pa_t DATA_BASE = TABLE_BASE + TABLE_BYTES;
  localparam logic [63:0] KEY = 64'hC0FF_EE00_D15E_A5E5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [HOST_W-1:0] host_id = HOST;
  logic prov_wr, key_locked, mmio_valid, mmio_we, ctx_switch, v_bit, arm_reject;
  logic [KEY_W-1:0] prov_key;
  logic [7:0] mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata, cr3;
  logic [11:0] pcid;
  logic [1:0] ring;
  label_t label_reg;
  logic creq_valid, creq_ready, cresp_valid, lresp_valid;
  pa_t creq_pa;
  cmd_e creq_cmd;
  line_t creq_wdata;
  core_resp_t cresp;
  loc_resp_t lresp;
  logic mem_valid, mem_ready, mem_resp_valid;
  loc_req_t mem_req;
  loc_resp_t mem_resp;
  logic dreq_valid, dreq_ready, uresp_valid, bisnp_valid, irq, rand_ready;
  dn_req_t dreq;
  up_resp_t uresp;
  pa_t bisnp_addr;
  chk_ev_t ev;

  space_control_top dut (.*);
  sdm_model #(.MIN_LAT(6), .MAX_LAT(30)) u_sdm (
    .clk, .rst_n, .rand_ready, .dreq_valid, .dreq_ready, .dreq, .uresp_valid, .uresp);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 25) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ------------------------------------------------------------ local DRAM
  // in-order, 3 cycles, stores what it is given (ciphertext for tagged lines)
  line_t dram [logic [PA_W-7:0]];
  typedef struct { loc_resp_t r; longint due; } lpend_t;
  lpend_t lq [$];
  always @(posedge clk) begin
    if (mem_valid && mem_ready) begin
      if (mem_req.cmd == CMD_ST) dram[mem_req.addr[PA_W-1:6]] = mem_req.wdata;
      else begin
        lpend_t p;
        p.r.addr  = mem_req.addr;
        p.r.rdata = dram.exists(mem_req.addr[PA_W-1:6]) ? dram[mem_req.addr[PA_W-1:6]] : '0;
        p.due     = cyc + 3;
        lq.push_back(p);
      end
    end
    mem_resp_valid <= 1'b0;
    if (lq.size() != 0 && lq[0].due <= cyc) begin
      mem_resp_valid <= 1'b1;
      mem_resp       <= lq.pop_front().r;
    end
  end
  always @(negedge clk) mem_ready = ($urandom_range(5) != 0);

  // --------------------------------------------------- FM's view: the table
  int ne;
  logic [63:0]  e_start [NE], e_size [NE];
  bit           e_val [NE], e_rw [NE];
  logic [255:0] e_hm [NE];
  logic [127:0] e_pm [NE];
  line_t        shadow [logic [PA_W-7:0]];
  logic [NUM_HWPID-1:0] local_pids;

  function automatic line_t sh_rd(pa_t a);
    return shadow.exists(a[PA_W-1:6]) ? shadow[a[PA_W-1:6]] : '0;
  endfunction
  task automatic put(pa_t a, line_t d);
    shadow[a[PA_W-1:6]] = d;
    u_sdm.poke(a, d);
  endtask
  task automatic write_entry(int i);
    put(TABLE_BASE + (pa_t'(i) << 6),
        make_entry(e_start[i], 61'(e_size[i]), e_val[i], e_rw[i], e_hm[i], e_pm[i]));
  endtask
  task automatic bisnp(pa_t a);
    @(negedge clk); bisnp_valid = 1; bisnp_addr = a;
    @(negedge clk); bisnp_valid = 0;
  endtask

  function automatic bit expect_ok(pa_t a, hwpid_t p, cmd_e c);
    if (in_range(a, SDM_BASE, META_BYTES)) return 1'b1;
    if (in_range(a, TABLE_BASE, TABLE_BYTES)) return 1'b0;
    if (p == '0) return 1'b0;
    for (int i = 0; i < ne; i++)
      if (64'(a) >= e_start[i] && 64'(a) - e_start[i] < e_size[i])
        return e_val[i] && e_hm[i][HOST] && e_pm[i][p] && local_pids[p]
               && (c == CMD_LD || e_rw[i]);
    return 1'b0;
  endfunction

  // ------------------------------------------------------------ OS / core
  hwpid_t cur_pid;         // PCID of the running process (if reserved)
  int     n_auth_ok = 0, n_auth_fail = 0, n_arm_rej = 0, n_alloc = 0;

  task automatic mmio(bit we, logic [7:0] a, logic [63:0] d, output logic [63:0] rd);
    @(negedge clk); mmio_valid = 1; mmio_we = we; mmio_addr = a; mmio_wdata = d;
    #1 rd = mmio_rdata;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
  endtask
  task automatic switch_to(logic [63:0] base, int pid);
    @(negedge clk); ctx_switch = 1; cr3 = base; pcid = 12'(pid);
    @(negedge clk); ctx_switch = 0;
    cur_pid = (pid < 128) ? hwpid_t'(pid) : '0;
    chk(!v_bit, "context switch clears V");
  endtask
  task automatic arm_label(output bit ok);
    logic [63:0] rd;
    int t;
    mmio(1'b1, MMIO_ARM_LABEL, 0, rd);
    t = 1;
    while (!v_bit && t < 40) begin @(negedge clk); t++; end
    ok = v_bit;
    if (ok) begin
      n_auth_ok++;
      chk(t == 29, $sformatf("V set 29 cycles after ARM_LABEL (%0d)", t));
    end else n_auth_fail++;
  endtask

  // -------------------------------------------------------- memory accesses
  typedef struct { bit ok; cmd_e cmd; line_t data; pa_t a; } exp_t;
  exp_t  rq [$];            // remote, in order
  line_t lq_exp [$];        // local loads, in order
  int    n_viol_exp = 0, n_lbl_exp = 0;

  function automatic hwpid_t tag_now();
    return (v_bit && ring == RING_USER) ? cur_pid : '0;
  endfunction

  task automatic access(pa_t a, cmd_e c, line_t d, line_t local_exp = '0);
    hwpid_t p;
    @(negedge clk);
    creq_valid = 1; creq_pa = a; creq_cmd = c; creq_wdata = d;
    #1;
    while (!creq_ready) begin @(negedge clk); #1; end
    p = tag_now();
    if (in_range(a, SDM_BASE, SDM_SIZE)) begin
      exp_t e;
      e.ok = expect_ok(a, p, c); e.cmd = c; e.a = a;
      e.data = (c == CMD_LD && e.ok) ? sh_rd(a) : '0;
      if (c == CMD_ST && e.ok) shadow[a[PA_W-1:6]] = d;
      if (c == CMD_LD && e.ok && in_range(a, LABELS_BASE, LABELS_SIZE)) n_lbl_exp++;
      if (!e.ok) n_viol_exp++;
      rq.push_back(e);
    end else begin
      // local: same cycle, tagged when trusted
      chk(mem_valid && mem_req.addr[LADDR_W-1] == (p != '0) && mem_req.addr[PA_W-1:0] == a,
          "local access reaches DRAM in the same cycle, HPA[42] = HWPID > 0");
      if (c == CMD_LD) lq_exp.push_back(local_exp);
    end
    @(posedge clk);
    #1 creq_valid = 0;
  endtask

  task automatic drain();
    int w; w = 0;
    while ((rq.size() != 0 || lq_exp.size() != 0 || u_sdm.pend.size() != 0) && w < 20000) begin
      @(negedge clk); w++;
    end
    chk(w < 20000, "all accesses completed");
    repeat (3) @(negedge clk);
  endtask

  // ------------------------------------------------------------- monitors
  int n_irq = 0, n_lbl = 0, n_refetch = 0;
  int evc [9];
  pa_t snooped [$];
  always @(negedge clk) if (rst_n) begin
    if (cresp_valid) begin
      if (rq.size() == 0) chk(0, "remote response with nothing outstanding");
      else begin
        exp_t e;
        e = rq.pop_front();
        chk(cresp.violation == !e.ok && cresp.cmd == e.cmd,
            $sformatf("permission of %s %h: violation=%0b", e.cmd.name(), e.a, cresp.violation));
        if (e.cmd == CMD_LD) chk(cresp.rdata == e.data, $sformatf("load data %h", e.a));
      end
    end
    if (lresp_valid) begin
      if (lq_exp.size() == 0) chk(0, "local response with nothing outstanding");
      else chk(lresp.rdata == lq_exp.pop_front(), $sformatf("local load data %h", lresp.addr));
    end
    if (irq) n_irq++;
    if (arm_reject) n_arm_rej++;
    if (ev.label_seen) n_lbl++;
    if (dreq_valid && dreq_ready && dreq.tag == PERM_TAG)
      foreach (snooped[i]) if (snooped[i] == dreq.addr) begin n_refetch++; snooped.delete(i); break; end
    evc[0] += int'(ev.cache_hit);    evc[1] += int'(ev.cache_miss);
    evc[2] += int'(ev.probe_merged); evc[3] += int'(ev.count_read);
    evc[4] += int'(ev.load_early);   evc[5] += int'(ev.store_stall);
    evc[6] += int'(ev.violation);    evc[7] += int'(ev.label_seen);
    evc[8] += int'(ev.local_enc);
  end

  initial begin
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rnd_line();
    line_t d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
    return d;
  endfunction

  // ------------------------------------------------------------- scenario
  initial begin
    logic [63:0] rd, s;
    int pa_id, pb_id, ra, rb, rc;
    logic [63:0] base_a, base_b, base_x;
    bit ok;
    line_t d, secret;
    pa_t loc;
    string names [9] = '{"cache_hit", "cache_miss", "probe_merged", "count_read",
                         "load_early", "store_stall", "violation", "label_seen", "local_enc"};

    prov_wr = 0; prov_key = 0; mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    ctx_switch = 0; cr3 = 0; pcid = 0; ring = RING_USER; cur_pid = 0;
    creq_valid = 0; creq_pa = '0; creq_cmd = CMD_LD; creq_wdata = '0;
    bisnp_valid = 0; bisnp_addr = '0; rand_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. key and HWPIDs
    @(negedge clk); prov_wr = 1; prov_key = KEY;
    @(negedge clk); prov_wr = 0;
    chk(key_locked, "K_host provisioned");
    ring = 2'd0;                                   // the OS
    mmio(1'b0, MMIO_GET_NEXT_PID, 0, rd); pa_id = int'(rd);
    mmio(1'b0, MMIO_GET_NEXT_PID, 0, rd); pb_id = int'(rd);
    for (int i = 0; i < 5; i++) mmio(1'b0, MMIO_GET_NEXT_PID, 0, rd);   // other processes
    n_alloc = 7;
    chk(pa_id != 0 && pb_id != 0 && pa_id != pb_id, "two HWPIDs allocated");
    local_pids = dut.u_space.alloc_mask;

    // 2. FM: table of NE sorted entries; 0 = RA, 1 = RB, 2 = RC
    ne = NE;
    s = 64'(DATA_BASE) + 64'h10000;
    for (int i = 0; i < NE; i++) begin
      e_start[i] = s;
      e_size[i]  = 64'($urandom_range(1, 32)) * 64;
      e_val[i]   = ($urandom_range(7) != 0);
      e_rw[i]    = 1'($urandom);
      e_hm[i]    = '0; e_hm[i][HOST] = ($urandom_range(3) != 0); e_hm[i][200] = 1'b1;
      e_pm[i]    = '0;
      for (int p = 1; p < 10; p++) e_pm[i][p] = 1'($urandom);
      s = s + e_size[i] + 64'($urandom_range(1, 8)) * 4096;
    end
    ra = 0; rb = 1; rc = 2;
    e_val[ra] = 1; e_rw[ra] = 1; e_hm[ra][HOST] = 1; e_pm[ra] = '0; e_pm[ra][pa_id] = 1; e_pm[ra][pb_id] = 1;
    e_val[rb] = 1; e_rw[rb] = 0; e_hm[rb][HOST] = 1; e_pm[rb] = '0; e_pm[rb][pa_id] = 1; e_pm[rb][pb_id] = 1;
    e_val[rc] = 1; e_rw[rc] = 1; e_hm[rc] = '0; e_hm[rc][HOST + 1] = 1; e_pm[rc] = '1;
    for (int i = 0; i < NE; i++) write_entry(i);
    begin
      line_t h; h = '0; h[CNT_BIT_LO +: 32] = 32'(NE); put(SDM_BASE + CNT_LINE_OFF, h);
    end
    base_a = 64'h0000_0000_0AA0_0000;
    base_b = 64'h0000_0000_0BB0_0000;
    base_x = 64'h0000_0000_0DD0_0000;
    put(LABELS_BASE, make_label(ref_lexp(KEY, HOST, pa_id, base_a, e_start[ra], e_size[ra]),
                                pa_id, HOST, e_start[ra], e_size[ra]));
    put(LABELS_BASE + 64, make_label(ref_lexp(KEY, HOST, pb_id, base_b, e_start[rb], e_size[rb]),
                                     pb_id, HOST, e_start[rb], e_size[rb]));
    put(LABELS_BASE + 128, make_label(64'hBAD, pa_id, HOST + 1, 0, 0));   // other host's
    for (int i = 0; i < 300; i++) begin
      int k; k = $urandom_range(NE - 1);
      put(pa_t'(e_start[k] + 64'($urandom_range(32'(e_size[k]) - 1))), rnd_line());
    end

    // the OS reads the public labels; SPACE keeps those for this host
    ring = 2'd0;
    access(LABELS_BASE, CMD_LD, '0);
    access(LABELS_BASE + 64, CMD_LD, '0);
    access(LABELS_BASE + 128, CMD_LD, '0);
    drain();
    chk(n_lbl == 3, $sformatf("three label records intercepted (%0d)", n_lbl));

    // 3. process A before authentication: untagged, refused
    ring = RING_USER;
    switch_to(base_a, pa_id);
    access(pa_t'(e_start[ra]), CMD_LD, '0);
    drain();
    chk(n_irq == 1, "unauthenticated access refused with an interrupt");

    // 4. authentication
    arm_label(ok);
    chk(ok, "process A authenticated");
    switch_to(base_x, pa_id);                      // impostor reusing A's HWPID
    arm_label(ok);
    chk(!ok, "impostor with another page-table base refused");
    ring = 2'd0;
    mmio(1'b1, MMIO_ARM_LABEL, 0, rd);
    @(negedge clk);
    chk(n_arm_rej >= 1 && !v_bit, "ARM_LABEL from the kernel refused");
    ring = RING_USER;

    // 5. directed accesses by A
    switch_to(base_a, pa_id);
    arm_label(ok);
    chk(ok, "process A re-authenticated after a switch");
    d = rnd_line();
    access(pa_t'(e_start[ra]) + 64, CMD_ST, d);                     // allowed store
    access(pa_t'(e_start[ra]) + 64, CMD_LD, '0);                    // reads it back
    access(pa_t'(e_start[rb]), CMD_LD, '0);                         // read-only: load ok
    access(pa_t'(e_start[rb]), CMD_ST, rnd_line());                 // store refused
    access(pa_t'(e_start[rc]), CMD_LD, '0);                         // other host's
    access(TABLE_BASE, CMD_LD, '0);                                 // the table itself
    access(pa_t'(e_start[ra] + e_size[ra]) + 64, CMD_LD, '0);       // gap
    // local page of A: encrypted in DRAM
    loc = 41'h000_0123_4540;
    secret = rnd_line();
    access(loc, CMD_ST, secret);
    @(negedge clk);
    chk(dram.exists(loc[PA_W-1:6]) && dram[loc[PA_W-1:6]] != secret
        && dram[loc[PA_W-1:6]] == (secret ^ ref_keystream(KEY, loc)),
        "A's local line is stored encrypted");
    access(loc, CMD_LD, '0, secret);                                // decrypted for A
    drain();
    // an untrusted process aliasing the page sees ciphertext only
    switch_to(base_x, 300);
    access(loc, CMD_LD, '0, secret ^ ref_keystream(KEY, loc));
    drain();

    // 6. FM revokes A's write access to RA and removes B from it
    e_rw[ra] = 0; e_pm[ra][pb_id] = 0; write_entry(ra);
    snooped.push_back(TABLE_BASE + (pa_t'(ra) << 6));
    bisnp(TABLE_BASE + (pa_t'(ra) << 6));
    switch_to(base_a, pa_id);
    arm_label(ok);
    access(pa_t'(e_start[ra]) + 128, CMD_ST, rnd_line());           // refused now
    access(pa_t'(e_start[ra]) + 64, CMD_LD, '0);                    // still readable
    drain();
    chk(n_refetch >= 1, "BISnp made the checker fetch the updated entry");

    // 7. random traffic: A, B, untrusted; occasional FM updates
    for (int round = 0; round < 12; round++) begin
      int who; who = $urandom_range(2);
      case (who)
        0: begin switch_to(base_a, pa_id); arm_label(ok); end
        1: begin switch_to(base_b, pb_id); arm_label(ok); end
        default: switch_to(base_x, 200 + round);
      endcase
      for (int t = 0; t < 250; t++) begin
        int k, r; pa_t a; cmd_e c;
        r = $urandom_range(99); k = $urandom_range(NE - 1);
        if (r < 40) k = $urandom_range(1);                          // RA/RB mostly
        if (r < 75) a = pa_t'(e_start[k] + 64'($urandom_range(32'(e_size[k]) - 1)));
        else if (r < 85) a = pa_t'(e_start[k] + e_size[k]) + pa_t'($urandom_range(4095));
        else if (r < 90) a = LABELS_BASE + pa_t'($urandom_range(4095));
        else a = pa_t'($urandom_range(32'h0FFF_FFFF));               // local
        c = cmd_e'($urandom_range(1));
        if (in_range(a, LABELS_BASE, 192)) c = CMD_LD;              // keep the labels
        if (in_range(a, SDM_BASE, SDM_SIZE)) access(a, c, rnd_line());
        else begin
          line_t le;
          // local: predict what the core reads back
          le = dram.exists(a[PA_W-1:6]) ? dram[a[PA_W-1:6]] : '0;
          if (tag_now() != '0) le ^= ref_keystream(KEY, a);
          access(a, c, rnd_line(), le);
          @(negedge clk);
        end
        if ($urandom_range(7) == 0) @(negedge clk);
      end
      drain();
      if (round % 4 == 3) begin                                     // FM update
        int k; k = $urandom_range(3, NE - 1);
        e_rw[k] = !e_rw[k]; e_pm[k][pa_id] = 1'($urandom); write_entry(k);
        snooped.push_back(TABLE_BASE + (pa_t'(k) << 6));
        bisnp(TABLE_BASE + (pa_t'(k) << 6));
      end
    end
    drain();

    // results
    chk(n_irq == n_viol_exp, $sformatf("one irq per violation (%0d/%0d)", n_irq, n_viol_exp));
    chk(n_lbl == n_lbl_exp, $sformatf("labels intercepted (%0d/%0d)", n_lbl, n_lbl_exp));
    begin
      int bad; bad = 0;
      foreach (shadow[l]) if (shadow[l] != u_sdm.peek({l, 6'd0})) bad++;
      chk(bad == 0, $sformatf("SDM holds exactly the permitted stores (%0d lines differ)", bad));
    end
    for (int i = 0; i < 9; i++)
      chk(evc[i] > 0, $sformatf("mechanism %s happened (%0d)", names[i], evc[i]));
    chk(n_irq > 0, "mechanism irq happened");
    chk(n_refetch > 0, "mechanism BISnp invalidation happened");
    chk(n_auth_ok > 0, "mechanism authentication happened");
    chk(n_auth_fail > 0, "mechanism authentication refusal happened");
    chk(n_arm_rej > 0, "mechanism ARM_LABEL refusal happened");
    chk(n_alloc > 0, "mechanism HWPID allocation happened");
    $display("mechanisms: stall %0d hit %0d miss %0d merged %0d count %0d early-load %0d violation %0d irq %0d",
             evc[5], evc[0], evc[1], evc[2], evc[3], evc[4], evc[6], n_irq);
    $display("            bisnp-refetch %0d label %0d local-enc %0d auth %0d/%0d arm-reject %0d",
             n_refetch, evc[7], evc[8], n_auth_ok, n_auth_fail, n_arm_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
