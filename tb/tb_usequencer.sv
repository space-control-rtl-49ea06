// tb_usequencer -- self-checking testbench for usequencer.
//
// The L_exp store and the counter are modelled here.  Checks: a context
// switch advances the counter and clears label and V; ARM_LABEL from user
// mode loads L_host = MAC(BASE_P, HWPID, ctr) (reference SipHash) after 14
// cycles and sets V 15 cycles later when L_exp matches; a wrong L_exp, a
// missing binding, an unallocated HWPID, a PCID outside the reserved range
// and ARM_LABEL from kernel mode leave V clear; leaving user mode or a
// context switch clears label and V, also in the middle of a computation.
module tb_usequencer;
  import spc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ctx_switch, arm_label, arm_reject, ctr_inc, lx_valid, v_bit, busy;
  logic [63:0] cr3, k_host, ctr, lx_start, lx_size;
  logic [11:0] pcid; logic [1:0] ring; logic [7:0] host_id;
  logic [127:0] alloc_mask;
  hwpid_t lx_id, cur_hwpid;
  label_t lx_lexp, label_reg;
  int checks = 0, failures = 0;
  bit b_v [128]; logic [63:0] b_l [128], b_s [128], b_z [128];

  usequencer dut (.*);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ctr <= 0; else if (ctr_inc) ctr <= ctr + 1;
  always_comb begin
    lx_valid = b_v[lx_id]; lx_lexp = b_l[lx_id]; lx_start = b_s[lx_id]; lx_size = b_z[lx_id];
  end

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s (t=%0t)", m, $time); end
  endtask

  task automatic switch_to(input logic [63:0] base, input int p);
    cr3 = base; pcid = 12'(p); ctx_switch = 1; @(negedge clk); ctx_switch = 0;
    chk(label_reg == 0 && !v_bit, "switch clears label and V");
  endtask

  task automatic bind_label(input int p, input logic [63:0] base, input bit good);
    b_v[p] = 1; b_s[p] = {$urandom, $urandom}; b_z[p] = {$urandom, $urandom};
    b_l[p] = ref_lexp(k_host, host_id, p, base, b_s[p], b_z[p]) ^ (good ? 64'd0 : 64'd1);
  endtask

  // arm and wait for the sequencer to finish; returns cycles to label and to V
  task automatic arm(output int t_label, output int t_v);
    int c; t_label = -1; t_v = -1;
    arm_label = 1; @(negedge clk); arm_label = 0; c = 1;
    while (c < 60) begin
      if (t_label < 0 && label_reg != 0) t_label = c;
      if (t_v < 0 && v_bit) t_v = c;
      @(negedge clk); c++;
    end
  endtask

  initial begin
    int tl, tv;
    logic [63:0] base;
    ctx_switch = 0; arm_label = 0; cr3 = 0; pcid = 0; ring = 3; host_id = 8'd9;
    k_host = 64'hFEDC_BA98_7654_3210;
    alloc_mask = '0; alloc_mask[5] = 1; alloc_mask[6] = 1; alloc_mask[7] = 1;
    repeat (2) @(negedge clk); rst_n = 1;

    // good process
    base = 64'h0000_0001_2345_6000;
    bind_label(5, base, 1);
    switch_to(base, 5);
    chk(ctr == 1 && cur_hwpid == 5, "counter advanced, HWPID latched");
    arm(tl, tv);
    chk(label_reg == ref_lhost(k_host, base, 5, 1), "L_host value");
    chk(tl == 14, $sformatf("L_host latency %0d", tl));
    chk(v_bit && tv == 29, $sformatf("V set, latency %0d", tv));
    // kernel entry clears
    ring = 0; @(negedge clk);
    chk(label_reg == 0 && !v_bit, "kernel mode clears");
    arm_label = 1; @(negedge clk); arm_label = 0;
    chk(arm_reject && !busy, "ARM_LABEL from kernel refused");
    @(negedge clk);
    ring = 3; @(negedge clk);
    chk(!v_bit, "V stays clear after return to user");
    arm(tl, tv);
    chk(v_bit && label_reg == ref_lhost(k_host, base, 5, 1), "re-arm after return");

    // forged / wrong label
    bind_label(6, base, 0);
    switch_to(base, 6);
    arm(tl, tv);
    chk(label_reg == ref_lhost(k_host, base, 6, 2) && !v_bit, "wrong L_exp: V clear");
    // right label but different page-table base (OS remapped the process)
    bind_label(7, 64'hDEAD_0000, 1);
    switch_to(base, 7);
    arm(tl, tv);
    chk(!v_bit, "other BASE_P: V clear");
    // no binding
    b_v[5] = 0;
    switch_to(base, 5);
    arm(tl, tv);
    chk(!v_bit && label_reg != 0, "no L_exp: label only");
    b_v[5] = 1;
    // unallocated HWPID and PCID outside the reserved range
    bind_label(9, base, 1);
    switch_to(base, 9);
    arm(tl, tv);
    chk(!v_bit && label_reg == 0, "unallocated HWPID refused");
    switch_to(base, 12'h105);
    chk(cur_hwpid == 0, "PCID >= 128 is not an HWPID");
    arm(tl, tv);
    chk(!v_bit && label_reg == 0, "non-reserved PCID refused");
    // context switch in the middle of a computation
    switch_to(base, 5);
    arm_label = 1; @(negedge clk); arm_label = 0;
    repeat (5) @(negedge clk);
    switch_to(base, 5);
    repeat (40) @(negedge clk);
    chk(!v_bit && label_reg == 0, "switch aborts computation");
    arm(tl, tv);
    chk(v_bit && label_reg == ref_lhost(k_host, base, 5, ctr), "fresh label after abort");
    chk(ctr == 8, $sformatf("counter counts switches (%0d)", ctr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
