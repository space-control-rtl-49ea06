// usequencer -- SPACE's micro-sequencer: context tracking and authentication.
//
// On every context switch the sequencer latches the new process context
// (BASE_P = CR3/SATP/TTBR and the PCID/ASID; a PCID below 128 is one of the
// reserved HWPIDs), advances the monotonic counter and clears the label
// register and the V (authentication result) bit.  When the running process
// rings ARM_LABEL from user space it:
//   1. computes L_host = MAC_K(BASE_P, HWPID, ctr) into the label register;
//   2. reads the L_exp bound to this HWPID and recomputes
//      MAC_K(host_id, HWPID, BASE_P, range_start, range_size);
//   3. sets V iff that equals L_exp, i.e. the FM authorised exactly this
//      process (same page-table base, same HWPID, same host).
// Whenever the core is not in user mode the label register and V are
// cleared at once, so the kernel can never run with a trusted identity.
//
// From the paper: inputs cr3 / pcid / K_host / counter (IN0..IN3 in Fig. 4),
// ARM_LABEL only from user space, the label register, SET/UNSET of V, the
// two label equations and clearing outside user mode.  The paper asks that
// L_host "matches" L_exp although the two are MACs over different fields
// under different keys; this design resolves it by treating K_host as the
// key the FM shares with this host's SPACE and checking L_exp against a MAC
// of its own fields (step 2), while L_host remains the fresh per-switch
// label of step 1.  The word layout of the MAC messages is also this
// design's own.
//
// Timing: L_host is in the label register 14 cycles after the ARM_LABEL
// edge (2*(3+1)+5 MAC cycles plus the start cycle) and V follows 15 cycles
// later, 29 in all (one label_mac instance, used twice in sequence).
module usequencer
  import spc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // core context (IN0, IN1) and privilege
  input  logic                 ctx_switch,
  input  logic [63:0]          cr3,
  input  logic [11:0]          pcid,
  input  logic [1:0]           ring,
  // doorbell
  input  logic                 arm_label,
  output logic                 arm_reject,     // pulse: ARM_LABEL not honoured
  // K_host (IN2), counter (IN3)
  input  logic [KEY_W-1:0]     k_host,
  input  logic [CTR_W-1:0]     ctr,
  output logic                 ctr_inc,
  input  logic [HOST_W-1:0]    host_id,
  input  logic [NUM_HWPID-1:0] alloc_mask,
  // L_exp store read port
  output hwpid_t               lx_id,
  input  logic                 lx_valid,
  input  label_t               lx_lexp,
  input  logic [63:0]          lx_start,
  input  logic [63:0]          lx_size,
  // shadow registers at the core
  output label_t               label_reg,
  output logic                 v_bit,
  output hwpid_t               cur_hwpid,
  output logic                 busy
);

  typedef enum logic [1:0] { Q_IDLE, Q_GEN, Q_CHK, Q_DRAIN } qstate_e;

  qstate_e      state;
  logic [63:0]  base_p;
  logic         mac_start, mac_busy, mac_done;
  logic [2:0]   mac_nwords;
  logic [63:0]  mac_words [4];
  label_t       mac_out;
  logic         user_mode, arm_ok;

  assign user_mode = (ring == RING_USER);
  assign arm_ok    = arm_label && user_mode && !ctx_switch && state == Q_IDLE
                     && cur_hwpid != '0 && alloc_mask[cur_hwpid];
  assign lx_id     = cur_hwpid;
  assign busy      = (state != Q_IDLE);
  assign ctr_inc   = ctx_switch;

  label_mac #(.MAX_WORDS(4)) u_mac (
    .clk, .rst_n,
    .start (mac_start),
    .key   ({k_host, k_host}),
    .nwords(mac_nwords),
    .words (mac_words),
    .busy  (mac_busy),
    .done  (mac_done),
    .mac   (mac_out)
  );

  // message for the current step
  always_comb begin
    mac_start  = 1'b0;
    mac_nwords = 3'd3;
    mac_words[0] = base_p;
    mac_words[1] = {57'd0, cur_hwpid};
    mac_words[2] = ctr;
    mac_words[3] = '0;
    if (state == Q_IDLE) begin
      mac_start = arm_ok;                       // L_host = MAC(BASE_P, HWPID, ctr)
    end else if (state == Q_GEN) begin
      mac_nwords   = 3'd4;                      // MAC(host_id, HWPID, BASE_P, range)
      mac_words[0] = {48'd0, host_id, 1'b0, cur_hwpid};
      mac_words[1] = base_p;
      mac_words[2] = lx_start;
      mac_words[3] = lx_size;
      mac_start    = mac_done && lx_valid && user_mode && !ctx_switch;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= Q_IDLE;
      base_p     <= '0;
      cur_hwpid  <= '0;
      label_reg  <= '0;
      v_bit      <= 1'b0;
      arm_reject <= 1'b0;
    end else begin
      arm_reject <= arm_label && !arm_ok;
      unique case (state)
        Q_IDLE:  if (arm_ok) state <= Q_GEN;
        Q_GEN:   if (mac_done) begin
                   label_reg <= mac_out;
                   state     <= mac_start ? Q_CHK : Q_IDLE;
                 end
        Q_CHK:   if (mac_done) begin
                   v_bit <= lx_valid && (mac_out == lx_lexp);
                   state <= Q_IDLE;
                 end
        Q_DRAIN: if (!mac_busy) state <= Q_IDLE;
        default: state <= Q_IDLE;
      endcase
      // a context switch or leaving user mode unsets everything and
      // abandons a label computation in flight
      if (ctx_switch || !user_mode) begin
        label_reg <= '0;
        v_bit     <= 1'b0;
        if (state != Q_IDLE) state <= Q_DRAIN;
      end
      if (ctx_switch) begin
        base_p    <= cr3;
        cur_hwpid <= (pcid[11:HWPID_W] == '0) ? pcid[HWPID_W-1:0] : '0;
      end
    end
  end

  // V is only ever set for an allocated, non-zero HWPID in user mode
  a_v_hwpid: assert property (@(posedge clk) disable iff (!rst_n)
                              v_bit |-> cur_hwpid != '0)
    else $error("usequencer: V set for HWPID 0");

endmodule
