// spc_pkg -- shared types and constants of the Space-Control host hardware.
//
// Space-Control tags every physical address issued by an authenticated
// process with a 7-bit hardware process identifier (HWPID, the "A-bits")
// and checks each access to shared disaggregated memory (SDM) against a
// sorted permission table that lives in the SDM itself.  This package holds
// the widths that follow from that: a 41-bit physical address extended to
// 48 bits by the HWPID tag, 64-byte permission entries (entry_t) with the
// field widths of the published layout, the SDM metadata layout (a 128-byte
// header, a 4 KiB public-label section, then the table) and the memory
// request/response structs used between the blocks.
//
// Field widths of entry_t, the 128 B header, the 4 KiB label section, the
// 7-bit HWPID and 41-bit PA follow the paper.  The bit order inside a
// 64-byte line, the label record format, the address map (where the SDM
// sits in the physical address space) and the request/response structs are
// this design's own choices.
package spc_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned PA_W     = 41;          // physical address bits
  localparam int unsigned HWPID_W  = 7;           // A-bits: up to 127 processes + "untagged"
  localparam int unsigned EPA_W    = PA_W + HWPID_W;  // 48-bit extended PA
  localparam int unsigned LADDR_W  = 43;          // local address incl. HPA[42] encrypt flag
  localparam int unsigned HOST_W   = 8;           // up to 255 hosts (+FM)
  localparam int unsigned LINE_W   = 512;         // one 64-byte cache line / table entry
  localparam int unsigned LABEL_W  = 64;          // L_exp, L_host
  localparam int unsigned KEY_W    = 64;          // K_host
  localparam int unsigned CTR_W    = 64;          // monotonic counter
  localparam int unsigned TAG_W    = 6;           // downstream transaction tag
  localparam int unsigned NUM_HWPID = 1 << HWPID_W;   // 128 (HWPID 0 = not trusted)

  typedef logic [HWPID_W-1:0] hwpid_t;
  typedef logic [PA_W-1:0]    pa_t;
  typedef logic [EPA_W-1:0]   epa_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LABEL_W-1:0] label_t;

  // ------------------------------------------------- SDM address map (assumed)
  // The SDM window of the host physical address space; the access-control
  // metadata sits at its start (Fig. 1 shows it ahead of the shared memory).
  localparam logic [PA_W-1:0] SDM_BASE    = 41'h100_0000_0000;   // 1 TiB
  localparam logic [PA_W-1:0] SDM_SIZE    = 41'h004_0000_0000;   // 16 GiB
  localparam logic [PA_W-1:0] META_HDR    = 41'd128;             // header bytes
  localparam logic [PA_W-1:0] LABELS_SIZE = 41'd4096;            // public labels
  localparam logic [PA_W-1:0] LABELS_BASE = SDM_BASE + META_HDR;
  localparam logic [PA_W-1:0] TABLE_BASE  = LABELS_BASE + LABELS_SIZE;
  // window reserved for the table: one 64 B entry per 4 KiB of SDM, the
  // worst case the paper sizes (1.56 % of 16 GiB = 256 MiB)
  localparam logic [PA_W-1:0] TABLE_BYTES = SDM_SIZE >> 6;
  localparam logic [PA_W-1:0] META_BYTES  = META_HDR + LABELS_SIZE;
  // byte offset of the line holding "Table Count" (header bytes 84..87)
  localparam logic [PA_W-1:0] CNT_LINE_OFF = 41'd64;
  localparam int unsigned     CNT_BIT_LO   = (84 - 64) * 8;     // bit 160 of that line

  // ------------------------------------------------------ permission entry
  // 64 B = 512 bits: start 64, size 61, val 1, r/w 1, host_mask 256,
  // HWPID mask 128 (sum 511), one spare bit.  start sits at bit 0.
  typedef struct packed {
    logic         spare;
    logic [127:0] hwpid_mask;
    logic [255:0] host_mask;
    logic         rw;          // 1: loads and stores, 0: loads only
    logic         val;
    logic [60:0]  size;        // bytes
    logic [63:0]  start;       // PA of the first byte
  } entry_t;

  // ---------------------------------------- public label record (assumed)
  // One 64-byte record of the public-label section, as the FM writes it.
  typedef struct packed {
    logic [255:0] spare;
    logic [63:0]  range_size;
    logic [63:0]  range_start;
    logic [47:0]  rsvd;
    logic [HOST_W-1:0]  host_id;
    logic               rsvd1;
    logic [HWPID_W-1:0] hwpid;
    label_t             lexp;
  } label_rec_t;

  // --------------------------------------------------------- memory ports
  typedef enum logic { CMD_LD = 1'b0, CMD_ST = 1'b1 } cmd_e;

  // request from the core side (after the LLC), extended PA
  typedef struct packed {
    epa_t  epa;
    cmd_e  cmd;
    line_t wdata;
  } core_req_t;

  // response back to the core side
  typedef struct packed {
    line_t rdata;
    cmd_e  cmd;
    logic  violation;
  } core_resp_t;

  // request towards local DRAM (through the encryption engine)
  typedef struct packed {
    logic [LADDR_W-1:0] addr;   // bit 42 = encrypt (HPA[42] in Fig. 6)
    cmd_e  cmd;
    line_t wdata;
  } loc_req_t;

  typedef struct packed {
    logic [LADDR_W-1:0] addr;
    line_t rdata;
  } loc_resp_t;

  // request on the CXL downstream port (data or permission read)
  typedef struct packed {
    pa_t              addr;
    cmd_e             cmd;
    logic [TAG_W-1:0] tag;
    line_t            wdata;
  } dn_req_t;

  // response on the CXL upstream port
  typedef struct packed {
    pa_t              addr;
    logic [TAG_W-1:0] tag;
    line_t            rdata;
  } up_resp_t;

  // --------------------------------------------------------- SPACE MMIO
  localparam logic [7:0] MMIO_GET_NEXT_PID = 8'h00;   // read
  localparam logic [7:0] MMIO_RELEASE_PID  = 8'h08;   // write
  localparam logic [7:0] MMIO_ARM_LABEL    = 8'h10;   // write
  localparam logic [1:0] RING_USER         = 2'd3;

  // tag value the checker uses for its own (permission / count) reads;
  // data requests use the index of their tracking slot
  localparam logic [TAG_W-1:0] PERM_TAG = TAG_W'(1) << (TAG_W - 1);

  // per-cycle event pulses of the permission checker (for counters)
  typedef struct packed {
    logic cache_hit;       // a binary-search probe hit the permission cache
    logic cache_miss;      // a probe went to the table in remote memory
    logic probe_merged;    // a probe joined a table read already in flight
    logic count_read;      // the table count was (re)fetched
    logic load_early;      // a load left before its permission was known
    logic store_stall;     // a store waited for its permission
    logic violation;       // an access was denied at commit
    logic label_seen;      // a public-label record went to SPACE
    logic local_enc;       // a trusted local access was marked for encryption
  } chk_ev_t;

  // ----------------------------------------------------------- helpers
  function automatic logic in_range(pa_t a, pa_t base, pa_t size);
    return (a >= base) && ((a - base) < size);
  endfunction

endpackage
