// space_control_top -- host-side Space-Control hardware.
//
// Space-Control gives shared CXL memory process-level isolation across
// hosts.  On one host it consists of:
//   * SPACE (space_engine): hands out HWPIDs, keeps the FM-issued labels,
//     and on ARM_LABEL decides whether the running process is authenticated
//     (label register + V bit at the core);
//   * A-bit tagging (abit_tagger): an authenticated process' physical
//     addresses leave the core as {HWPID, PA};
//   * the permission checker (perm_checker, with its perm_cache): every SDM
//     access is checked against the permission table in the SDM, local
//     accesses of trusted processes are marked for encryption;
//   * the memory encryption engine (mem_encrypt_engine) in front of local
//     DRAM.
// The CPU core, caches, local DRAM, the CXL link and the fabric manager are
// outside; their signals are the ports of this module.
//
// Ports, grouped:
//   key provisioning    prov_wr / prov_key (write-once K_host)
//   core context        ctx_switch, cr3, pcid, ring; label_reg and v_bit
//                       back to the core's shadow registers
//   MMIO doorbells      mmio_* (GET_NEXT_PID, RELEASE_PID, ARM_LABEL)
//   core memory path    creq_* (PA from the LLC, before tagging);
//                       cresp_* in-order remote responses; lresp_* local
//   local DRAM          mem_* (addresses [40:0] plus the HPA[42] tag bit)
//   CXL                 dreq_* downstream, uresp_* upstream, bisnp_*
//   irq                 access-violation interrupt to the OS
//   ev                  event pulses of the checker, for counters
// Timing: the tagging and the local path are combinational; see the blocks.
module space_control_top
  import spc_pkg::*;
#(
  parameter int unsigned N_PSHR        = 32,
  parameter int unsigned CACHE_ENTRIES = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [HOST_W-1:0] host_id,
  // key provisioning
  input  logic              prov_wr,
  input  logic [KEY_W-1:0]  prov_key,
  output logic              key_locked,
  // MMIO
  input  logic              mmio_valid,
  input  logic              mmio_we,
  input  logic [7:0]        mmio_addr,
  input  logic [63:0]       mmio_wdata,
  output logic [63:0]       mmio_rdata,
  // core context
  input  logic              ctx_switch,
  input  logic [63:0]       cr3,
  input  logic [11:0]       pcid,
  input  logic [1:0]        ring,
  output label_t            label_reg,
  output logic              v_bit,
  output logic              arm_reject,
  // core memory path
  input  logic              creq_valid,
  output logic              creq_ready,
  input  pa_t               creq_pa,
  input  cmd_e              creq_cmd,
  input  line_t             creq_wdata,
  output logic              cresp_valid,
  output core_resp_t        cresp,
  output logic              lresp_valid,
  output loc_resp_t         lresp,
  // local DRAM
  output logic              mem_valid,
  input  logic              mem_ready,
  output loc_req_t          mem_req,
  input  logic              mem_resp_valid,
  input  loc_resp_t         mem_resp,
  // CXL
  output logic              dreq_valid,
  input  logic              dreq_ready,
  output dn_req_t           dreq,
  input  logic              uresp_valid,
  input  up_resp_t          uresp,
  input  logic              bisnp_valid,
  input  pa_t               bisnp_addr,
  // interrupt and events
  output logic              irq,
  output chk_ev_t           ev
);

  hwpid_t                 cur_hwpid;
  logic [NUM_HWPID-1:0]   alloc_mask;
  logic [KEY_W-1:0]       k_host;
  logic                   lbl_wr, seq_busy;
  label_rec_t             lbl_rec;
  core_req_t              creq;
  logic                   lreq_valid, lreq_ready;
  loc_req_t               lreq;

  space_engine u_space (
    .clk, .rst_n, .host_id,
    .prov_wr, .prov_key, .key_locked,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .ctx_switch, .cr3, .pcid, .ring,
    .lbl_wr, .lbl_rec,
    .label_reg, .v_bit, .cur_hwpid, .alloc_mask, .k_host,
    .arm_reject, .busy(seq_busy)
  );

  abit_tagger u_tag (
    .pa(creq_pa), .v_bit, .cur_hwpid, .ring, .epa(creq.epa)
  );
  assign creq.cmd   = creq_cmd;
  assign creq.wdata = creq_wdata;

  perm_checker #(.N_PSHR(N_PSHR), .CACHE_ENTRIES(CACHE_ENTRIES)) u_chk (
    .clk, .rst_n, .host_id, .alloc_mask,
    .creq_valid, .creq_ready, .creq,
    .cresp_valid, .cresp,
    .lreq_valid, .lreq_ready, .lreq,
    .dreq_valid, .dreq_ready, .dreq,
    .uresp_valid, .uresp,
    .bisnp_valid, .bisnp_addr,
    .lbl_wr, .lbl_rec,
    .irq, .ev
  );

  mem_encrypt_engine u_mee (
    .k_host,
    .in_valid(lreq_valid), .in_ready(lreq_ready), .in_req(lreq),
    .mem_valid, .mem_ready, .mem_req,
    .mem_resp_valid, .mem_resp,
    .out_resp_valid(lresp_valid), .out_resp(lresp)
  );

endmodule
