// tb_space_engine -- self-checking testbench for space_engine (SPACE).
//
// Drives SPACE only through its external interfaces: key provisioning,
// the MMIO doorbells, the core context and the public-label records that
// the permission checker forwards.  Reference labels come from the
// SipHash model in tb_ref_pkg.  Checked:
//   * K_host is write-once;
//   * GET_NEXT_PID hands out 127 distinct HWPIDs 1..127, then 0;
//     RELEASE_PID returns one, a double or forged release is ignored;
//   * HWPID_local (alloc_mask) follows allocation and release;
//   * a process whose L_exp arrived for this host is authenticated after
//     ARM_LABEL: label register = MAC(BASE_P, HWPID, ctr) after 14 cycles,
//     V after 29 cycles;
//   * V stays clear for a label meant for another host, a label bound to a
//     different page-table base, a released HWPID, and ARM_LABEL from the
//     kernel (which is also reported by arm_reject);
//   * leaving user mode clears label and V; the counter counts switches.
module tb_space_engine;
  import spc_pkg::*;
  import tb_ref_pkg::*;

  localparam int HOST = 17;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [HOST_W-1:0] host_id = HOST;
  logic prov_wr, key_locked, mmio_valid, mmio_we, ctx_switch, lbl_wr;
  logic v_bit, arm_reject, busy;
  logic [KEY_W-1:0] prov_key, k_host;
  logic [7:0] mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata, cr3;
  logic [11:0] pcid;
  logic [1:0] ring;
  label_rec_t lbl_rec;
  label_t label_reg;
  hwpid_t cur_hwpid;
  logic [NUM_HWPID-1:0] alloc_mask;

  space_engine dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  localparam logic [63:0] KEY = 64'h5A17_C0DE_0BAD_F00D;
  int n_switch = 0;

  task automatic get_pid(output int id);
    @(negedge clk); mmio_valid = 1; mmio_we = 0; mmio_addr = MMIO_GET_NEXT_PID;
    #1 id = int'(mmio_rdata);
    @(negedge clk); mmio_valid = 0;
  endtask
  task automatic mmio_write(logic [7:0] a, logic [63:0] d);
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
  endtask
  task automatic deliver(int pid, int host, logic [63:0] base, logic [63:0] s, logic [63:0] z);
    @(negedge clk); lbl_wr = 1;
    lbl_rec = label_rec_t'(make_label(ref_lexp(KEY, host, pid, base, s, z), pid, host, s, z));
    @(negedge clk); lbl_wr = 0;
  endtask
  task automatic switch_to(logic [63:0] base, int pid);
    @(negedge clk); ctx_switch = 1; cr3 = base; pcid = 12'(pid);
    @(negedge clk); ctx_switch = 0; n_switch++;
    chk(label_reg == 0 && !v_bit && cur_hwpid == hwpid_t'(pid), "switch latches HWPID, clears label/V");
  endtask
  // ring ARM_LABEL; report the cycles until the label and V appear
  task automatic arm(output int tl, output int tv);
    tl = -1; tv = -1;
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = MMIO_ARM_LABEL;
    for (int c = 1; c <= 60; c++) begin
      @(negedge clk); mmio_valid = 0; mmio_we = 0;
      if (tl < 0 && label_reg != 0) tl = c;
      if (tv < 0 && v_bit) tv = c;
    end
  endtask

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int id, tl, tv, ids [$];
    bit seen [128];
    logic [63:0] base, s, z;
    prov_wr = 0; prov_key = 0; mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    ctx_switch = 0; cr3 = 0; pcid = 0; ring = RING_USER; lbl_wr = 0; lbl_rec = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // key provisioning is write-once
    @(negedge clk); prov_wr = 1; prov_key = KEY;
    @(negedge clk); prov_key = ~KEY;
    @(negedge clk); prov_wr = 0;
    chk(key_locked && k_host == KEY, "K_host written once and locked");

    // HWPID allocation
    for (int i = 0; i < 127; i++) begin
      get_pid(id);
      chk(id >= 1 && id <= 127 && !seen[id], $sformatf("GET_NEXT_PID gives a fresh HWPID (%0d)", id));
      seen[id] = 1; ids.push_back(id);
    end
    chk(alloc_mask == {{127{1'b1}}, 1'b0}, "HWPID_local has all 127 bits");
    get_pid(id);
    chk(id == 0, "no HWPID left: GET_NEXT_PID returns 0");
    mmio_write(MMIO_RELEASE_PID, 64'd0);       // HWPID 0 is never released
    get_pid(id);
    chk(id == 0, "releasing HWPID 0 is ignored");
    mmio_write(MMIO_RELEASE_PID, 64'd40);
    mmio_write(MMIO_RELEASE_PID, 64'd40);      // double release
    chk(!alloc_mask[40], "released HWPID leaves HWPID_local");
    get_pid(id);
    chk(id == 40, "released HWPID handed out again");
    get_pid(id);
    chk(id == 0, "double release did not duplicate the HWPID");
    for (int i = 1; i < 127; i++) if (i % 3 != 0) mmio_write(MMIO_RELEASE_PID, 64'(i));

    // authenticate HWPID 3 of process with base 0x1234000
    base = 64'h0000_0000_0123_4000; s = 64'h0000_0100_0010_0000; z = 64'h40_0000;
    deliver(3, HOST, base, s, z);
    switch_to(base, 3);
    arm(tl, tv);
    chk(label_reg == ref_lhost(KEY, base, 3, 64'(n_switch)), "label register = MAC(BASE_P, HWPID, ctr)");
    chk(v_bit, "V set for the authorised process");
    chk(tl == 14 && tv == 29, $sformatf("label after 14, V after 29 cycles (%0d, %0d)", tl, tv));

    // kernel entry clears; ARM from the kernel refused
    @(negedge clk); ring = 2'd0;
    @(negedge clk);
    chk(label_reg == 0 && !v_bit, "kernel mode clears label and V");
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = MMIO_ARM_LABEL;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
    chk(arm_reject, "ARM_LABEL from the kernel reported");
    repeat (40) @(negedge clk);
    chk(!v_bit && label_reg == 0, "ARM_LABEL from the kernel has no effect");
    ring = RING_USER;

    // same HWPID, another page-table base: V must stay clear
    switch_to(base + 64'h1000, 3);
    arm(tl, tv);
    chk(!v_bit && label_reg != 0, "other BASE_P: label computed, V clear");

    // label addressed to another host is not kept
    deliver(6, HOST + 1, base, s, z);
    switch_to(base, 6);
    arm(tl, tv);
    chk(!v_bit, "label for another host ignored");
    deliver(6, HOST, base, s, z);
    arm(tl, tv);
    chk(v_bit, "label for this host accepted");

    // release drops the binding and the HWPID
    mmio_write(MMIO_RELEASE_PID, 64'd6);
    chk(!alloc_mask[6], "released HWPID cleared in HWPID_local");
    switch_to(base, 6);
    arm(tl, tv);
    chk(!v_bit && label_reg == 0, "released HWPID cannot authenticate");
    // even when it is handed out again, the old L_exp is gone
    do get_pid(id); while (id != 6 && id != 0);
    chk(id == 6, "HWPID 6 reallocated");
    switch_to(base, 6);
    arm(tl, tv);
    chk(!v_bit, "stale L_exp not reused after release");

    // a PCID outside the reserved range is untrusted
    switch_to(base, 12'h0);
    arm(tl, tv);
    chk(!v_bit && label_reg == 0, "HWPID 0 never authenticated");
    chk(dut.ctr == 64'(n_switch), $sformatf("counter counts switches (%0d)", n_switch));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
