// space_engine -- SPACE, the Secure Process Attribute Context Engine.
//
// SPACE is the host-side root of trust for process identity.  It hands out
// HWPIDs itself (so the OS cannot pick or reuse one), keeps the FM-issued
// public label L_exp of every trusted process, holds the host key and the
// monotonic counter, and on every context switch decides whether the
// process now running may issue identity-tagged (A-bit) accesses.
//
// It is built from: free_hwpid_list, lexp_store, host_key_engine,
// mono_counter and usequencer, plus the MMIO doorbell decoder here.
// Doorbells (byte offsets; the paper names them but gives no map):
//   0x00 GET_NEXT_PID  read : returns a free HWPID (1..127), 0 if none
//   0x08 RELEASE_PID   write: wdata[6:0] = HWPID to return; its L_exp is dropped
//   0x10 ARM_LABEL     write: arm the label of the running process
//                              (honoured only from user mode)
// `lbl_wr`/`lbl_rec` carry a public-label record that the permission checker
// saw go by on the upstream port; SPACE keeps it if it is for this host.
//
// Timing: MMIO reads answer combinationally in the cycle of the access;
// state changes at the next edge.  See usequencer for the label latency.
module space_engine
  import spc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [HOST_W-1:0]    host_id,
  // key provisioning
  input  logic                 prov_wr,
  input  logic [KEY_W-1:0]     prov_key,
  output logic                 key_locked,
  // MMIO doorbells
  input  logic                 mmio_valid,
  input  logic                 mmio_we,
  input  logic [7:0]           mmio_addr,
  input  logic [63:0]          mmio_wdata,
  output logic [63:0]          mmio_rdata,
  // core context
  input  logic                 ctx_switch,
  input  logic [63:0]          cr3,
  input  logic [11:0]          pcid,
  input  logic [1:0]           ring,
  // intercepted public label (from the permission checker)
  input  logic                 lbl_wr,
  input  label_rec_t           lbl_rec,
  // outputs
  output label_t               label_reg,
  output logic                 v_bit,
  output hwpid_t               cur_hwpid,
  output logic [NUM_HWPID-1:0] alloc_mask,
  output logic [KEY_W-1:0]     k_host,
  output logic                 arm_reject,
  output logic                 busy
);

  logic        get, get_ok, rel, rel_ok, arm;
  hwpid_t      get_id, rel_id;
  logic        ctr_inc, ctr_sat;
  logic [63:0] ctr;
  hwpid_t      lx_id;
  logic        lx_valid;
  label_t      lx_lexp;
  logic [63:0] lx_start, lx_size;

  // ------------------------------------------------------------- doorbells
  assign get    = mmio_valid && !mmio_we && mmio_addr == MMIO_GET_NEXT_PID;
  assign rel    = mmio_valid &&  mmio_we && mmio_addr == MMIO_RELEASE_PID;
  assign arm    = mmio_valid &&  mmio_we && mmio_addr == MMIO_ARM_LABEL;
  assign rel_id = mmio_wdata[HWPID_W-1:0];

  always_comb begin
    mmio_rdata = '0;
    if (get && get_ok) mmio_rdata = {57'd0, get_id};
  end

  free_hwpid_list u_free (
    .clk, .rst_n,
    .get, .get_ok, .get_id,
    .rel, .rel_id, .rel_ok,
    .alloc_mask
  );

  lexp_store u_lexp (
    .clk, .rst_n,
    .host_id, .alloc_mask,
    .wr     (lbl_wr),
    .wr_rec (lbl_rec),
    .wr_ok  (),
    .inv    (rel_ok),
    .inv_id (rel_id),
    .rd_id  (lx_id),
    .rd_valid(lx_valid),
    .rd_lexp (lx_lexp),
    .rd_start(lx_start),
    .rd_size (lx_size)
  );

  host_key_engine u_key (
    .clk, .rst_n, .prov_wr, .prov_key,
    .k_host, .locked(key_locked)
  );

  mono_counter #(.WIDTH(CTR_W)) u_ctr (
    .clk, .rst_n, .inc(ctr_inc), .value(ctr), .saturated(ctr_sat)
  );

  usequencer u_seq (
    .clk, .rst_n,
    .ctx_switch, .cr3, .pcid, .ring,
    .arm_label (arm),
    .arm_reject,
    .k_host, .ctr, .ctr_inc,
    .host_id, .alloc_mask,
    .lx_id, .lx_valid, .lx_lexp, .lx_start, .lx_size,
    .label_reg, .v_bit, .cur_hwpid, .busy
  );

  // a saturated counter would let L_host repeat; the sequencer keeps working
  // but the condition is flagged in simulation
  a_ctr: assert property (@(posedge clk) disable iff (!rst_n) ctr_inc |-> !ctr_sat)
    else $warning("space_engine: monotonic counter saturated");

endmodule
