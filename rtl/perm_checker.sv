// perm_checker -- the egress permission checker of Space-Control.
//
// Sits after the last-level cache, in front of the local DRAM controller
// and the CXL downstream port, and sees every LD/ST as a 48-bit extended
// physical address {HWPID[6:0], PA[40:0]}.
//
// Local addresses (outside the SDM window) go straight to the local memory
// port; an access with HWPID > 0 (a trusted process) leaves with HPA[42] = 1
// so that the memory encryption engine encrypts it, HWPID 0 with HPA[42] = 0.
//
// Remote (SDM) addresses each take one of N_PSHR tracking slots, allocated
// and retired in program order.  A slot is both a permission status holding
// register (PSHR: address, HWPID and the state of its permission lookup) and
// an entry of the in-order response buffer (the data line).  The rules:
//   * metadata section (128 B header + 4 KiB public labels): allowed for
//     everyone (hosts post proposed updates and read their labels there);
//   * permission-table window: denied (only the FM may touch it);
//   * everything else needs HWPID > 0 and a permission entry found by a
//     binary search of the sorted table: the entry whose
//     [start, start+size) holds the address must be valid, have this host's
//     bit in host_mask, the HWPID's bit in HWPID mask, the HWPID must be
//     allocated on this host (HWPID_local AND HWPID_global), and for a store
//     the r/w bit must be set.
// Every probe of the binary search first looks in the permission cache; on
// a miss the checker reads the 64-byte entry from remote memory (merging
// with a read of the same entry already in flight) and fills the cache.
// The number of table entries comes from the "Table Count" field of the
// metadata header, which the checker reads itself when it does not hold it
// (after reset and after a BISnp to that line).
//
// Loads are sent downstream at once, together with their permission lookup,
// and enforced when they come back (a denied load returns zeros).  Stores are
// held until their permission is known and never leave if denied.  Requests
// are issued downstream in program order, so a load behind a waiting store
// waits too.  Slots retire in order; a denied access retires with
// `violation` set and raises `irq` for one cycle.  A BISnp invalidates the
// matching permission-cache line.
//
// From the paper: the extended PA split (7 + 41 bits), the remote test, the
// HWPID > 0 encryption mark HPA[42], the permission packet generator, PSHRs
// holding (addr, HWPID), loads enforced at response time and stores at
// request time, the in-order response buffer, the sorted table searched by
// start address, 32 PSHRs and a 32-entry response buffer, the fully
// associative permission cache and BISnp invalidation, interception of
// public labels for SPACE, and an interrupt on violation.  Merging PSHRs
// with response slots, the per-slot binary search state, program-order
// issue, transaction tags, the reserved table window and the handling of
// the metadata section are this design's choices.  The paper counts five
// comparators; this implementation compares in parallel per slot.
//
// Interface timing: `creq_ready` is combinational; one request enters per
// cycle.  One downstream request leaves per cycle (valid/ready).  Upstream
// responses and BISnps are accepted every cycle.  `cresp_valid` pulses for
// each retiring remote access (the core is assumed always ready).  A probe
// that hits the cache resolves in the cycle it is chosen; one probe per
// cycle is served from the cache (or from a table line arriving that cycle).
// A BISnp does not cancel a table read already in flight; the line it
// returns is filled as read.
module perm_checker
  import spc_pkg::*;
#(
  parameter int unsigned N_PSHR        = 32,
  parameter int unsigned CACHE_ENTRIES = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [HOST_W-1:0]    host_id,
  input  logic [NUM_HWPID-1:0] alloc_mask,     // HWPID_local from SPACE
  // from the LLC
  input  logic                 creq_valid,
  output logic                 creq_ready,
  input  core_req_t            creq,
  // in-order responses for remote accesses
  output logic                 cresp_valid,
  output core_resp_t           cresp,
  // to the memory encryption engine / local DRAM
  output logic                 lreq_valid,
  input  logic                 lreq_ready,
  output loc_req_t             lreq,
  // CXL downstream (requests) and upstream (responses, BISnp)
  output logic                 dreq_valid,
  input  logic                 dreq_ready,
  output dn_req_t              dreq,
  input  logic                 uresp_valid,
  input  up_resp_t             uresp,
  input  logic                 bisnp_valid,
  input  pa_t                  bisnp_addr,
  // public labels seen going by, for SPACE
  output logic                 lbl_wr,
  output label_rec_t           lbl_rec,
  // access violation interrupt
  output logic                 irq,
  output chk_ev_t              ev
);

  localparam int unsigned IW = $clog2(N_PSHR);
  localparam pa_t CNT_LINE   = SDM_BASE + CNT_LINE_OFF;

  typedef enum logic [1:0] { L_DONE, L_INIT, L_PROBE, L_WAIT } lstate_e;

  typedef struct packed {
    logic        valid;
    pa_t         addr;
    hwpid_t      hwpid;
    cmd_e        cmd;
    lstate_e     ls;
    logic [31:0] lo, hi;      // binary search bounds, [lo, hi)
    pa_t         wait_addr;   // table entry being fetched
    logic        allowed;
    logic        iss_done;    // issued downstream, or skipped
    logic        issued;
    logic        got;         // load data returned
    line_t       data;        // store data, then load data
  } slot_t;

  typedef struct packed {
    lstate_e     ls;
    logic [31:0] lo, hi;
    logic        allowed;
  } step_t;

  slot_t         slots [N_PSHR];
  logic [IW-1:0] head, tail, iptr;
  logic [IW:0]   occ;
  logic          cnt_valid, cnt_pending;
  logic [31:0]   table_count;

  // ------------------------------------------------------------- helpers
  function automatic logic [31:0] mid_of(logic [31:0] lo, logic [31:0] hi);
    logic [32:0] s;
    s = {1'b0, lo} + {1'b0, hi};
    return s[32:1];
  endfunction

  function automatic pa_t entry_addr(logic [31:0] idx);
    return TABLE_BASE + (pa_t'(idx) << 6);
  endfunction

  // one binary-search step against table entry e read at index mid
  function automatic step_t search_step(slot_t s, entry_t e, logic [31:0] mid,
                                        logic [HOST_W-1:0] hid,
                                        logic [NUM_HWPID-1:0] amask);
    step_t       r;
    logic [63:0] a;
    a         = 64'(s.addr);
    r.ls      = L_PROBE;
    r.lo      = s.lo;
    r.hi      = s.hi;
    r.allowed = 1'b0;
    if (a < e.start) begin
      r.hi = mid;
    end else if ((a - e.start) >= 64'(e.size)) begin
      r.lo = mid + 32'd1;
    end else begin
      r.ls      = L_DONE;
      r.allowed = e.val && e.host_mask[hid] && e.hwpid_mask[s.hwpid]
                  && amask[s.hwpid] && (s.cmd == CMD_LD || e.rw);
    end
    if (r.ls != L_DONE && r.lo >= r.hi) r.ls = L_DONE;   // no entry: deny
    return r;
  endfunction

  // ---------------------------------------------------- request classification
  pa_t    c_pa;
  hwpid_t c_hwpid;
  logic   c_remote, c_meta, c_table, alloc;

  assign c_pa     = creq.epa[PA_W-1:0];
  assign c_hwpid  = creq.epa[EPA_W-1:PA_W];
  assign c_remote = in_range(c_pa, SDM_BASE, SDM_SIZE);
  assign c_meta   = in_range(c_pa, SDM_BASE, META_BYTES);
  assign c_table  = in_range(c_pa, TABLE_BASE, TABLE_BYTES);
  assign alloc    = creq_valid && c_remote && (occ != (IW+1)'(N_PSHR));

  assign creq_ready = c_remote ? (occ != (IW+1)'(N_PSHR)) : lreq_ready;
  assign lreq_valid = creq_valid && !c_remote;
  always_comb begin
    lreq.addr  = {(c_hwpid != '0), 1'b0, c_pa};      // HPA[42] = HWPID > 0
    lreq.cmd   = creq.cmd;
    lreq.wdata = creq.wdata;
  end

  // ------------------------------------------------------------- probe select
  logic          pv, p_hit, p_merge, any_init, c_hit, p_byp;
  logic [IW-1:0] pidx;
  logic [31:0]   p_mid;
  pa_t           p_addr;
  line_t         p_data;
  step_t         p_step;

  always_comb begin
    pv = 1'b0; pidx = '0; any_init = 1'b0;
    for (int i = N_PSHR - 1; i >= 0; i--) begin
      if (slots[i].valid && slots[i].ls == L_PROBE) begin pv = 1'b1; pidx = IW'(i); end
      if (slots[i].valid && slots[i].ls == L_INIT) any_init = 1'b1;
    end
    p_mid  = mid_of(slots[pidx].lo, slots[pidx].hi);
    p_addr = entry_addr(p_mid);
    p_merge = 1'b0;
    for (int i = 0; i < N_PSHR; i++)
      if (slots[i].valid && slots[i].ls == L_WAIT && slots[i].wait_addr == p_addr)
        p_merge = 1'b1;
  end

  perm_cache #(.ENTRIES(CACHE_ENTRIES)) u_cache (
    .clk, .rst_n,
    .lk_addr   (p_addr),
    .lk_hit    (c_hit),
    .lk_data   (p_data),
    .fill_valid(uresp_valid && uresp.tag == PERM_TAG && in_range(uresp.addr, TABLE_BASE, TABLE_BYTES)),
    .fill_addr (uresp.addr),
    .fill_data (uresp.rdata),
    .inv_valid (bisnp_valid),
    .inv_addr  (bisnp_addr)
  );

  // an entry arriving from remote memory in this very cycle is used at once
  // (otherwise a probe joining the read just as it completes would wait
  // for a response that has already gone by)
  assign p_byp  = uresp_valid && uresp.tag == PERM_TAG && uresp.addr == p_addr
                  && p_addr != CNT_LINE;
  assign p_hit  = c_hit || p_byp;
  assign p_step = search_step(slots[pidx], entry_t'(c_hit ? p_data : uresp.rdata),
                              p_mid, host_id, alloc_mask);

  // ------------------------------------------------------------- issue select
  slot_t is;
  logic  i_skip, i_want, i_stall;
  always_comb begin
    is      = slots[iptr];
    i_skip  = 1'b0;
    i_want  = 1'b0;
    i_stall = 1'b0;
    if (is.valid && !is.iss_done) begin
      if (is.ls == L_DONE && !is.allowed) i_skip = 1'b1;
      else if (is.cmd == CMD_LD)          i_want = 1'b1;
      else if (is.ls == L_DONE)           i_want = 1'b1;   // permitted store
      else                                i_stall = 1'b1;  // store waits
    end
  end

  // ------------------------------------------------------- downstream arbiter
  logic cnt_need, g_cnt, g_probe, g_data, fire;
  assign cnt_need = !cnt_valid && !cnt_pending && any_init;
  assign fire     = dreq_valid && dreq_ready;

  always_comb begin
    dreq_valid = 1'b0;
    dreq       = '0;
    g_cnt = 1'b0; g_probe = 1'b0; g_data = 1'b0;
    if (cnt_need) begin
      dreq_valid = 1'b1; g_cnt = 1'b1;
      dreq.addr = CNT_LINE; dreq.cmd = CMD_LD; dreq.tag = PERM_TAG;
    end else if (pv && !p_hit && !p_merge) begin
      dreq_valid = 1'b1; g_probe = 1'b1;
      dreq.addr = p_addr; dreq.cmd = CMD_LD; dreq.tag = PERM_TAG;
    end else if (i_want) begin
      dreq_valid = 1'b1; g_data = 1'b1;
      dreq.addr  = is.addr; dreq.cmd = is.cmd; dreq.tag = TAG_W'(iptr);
      dreq.wdata = is.data;
    end
  end

  // --------------------------------------------------------- upstream decode
  logic u_perm, u_cnt, u_data;
  assign u_perm = uresp_valid && uresp.tag == PERM_TAG;
  assign u_cnt  = u_perm && uresp.addr == CNT_LINE;
  assign u_data = uresp_valid && uresp.tag != PERM_TAG;

  assign lbl_wr  = u_data && in_range(uresp.addr, LABELS_BASE, LABELS_SIZE)
                   && slots[uresp.tag[IW-1:0]].valid && slots[uresp.tag[IW-1:0]].allowed;
  assign lbl_rec = label_rec_t'(uresp.rdata);

  // ------------------------------------------------------------------ commit
  slot_t hs;
  logic  commit;
  assign hs     = slots[head];
  assign commit = hs.valid && hs.ls == L_DONE && hs.iss_done
                  && (!(hs.issued && hs.cmd == CMD_LD) || hs.got);

  always_comb begin
    cresp_valid     = commit;
    cresp.cmd       = hs.cmd;
    cresp.violation = !hs.allowed;
    cresp.rdata     = (hs.cmd == CMD_LD && hs.allowed) ? hs.data : '0;
  end

  // ------------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; iptr <= '0; occ <= '0;
      cnt_valid <= 1'b0; cnt_pending <= 1'b0; table_count <= '0;
      irq <= 1'b0;
      for (int i = 0; i < N_PSHR; i++) begin
        slots[i].valid    <= 1'b0;
        slots[i].ls       <= L_DONE;
        slots[i].iss_done <= 1'b0;
        slots[i].issued   <= 1'b0;
        slots[i].got      <= 1'b0;
        slots[i].allowed  <= 1'b0;
      end
    end else begin
      irq <= commit && !hs.allowed;

      // table count
      if (g_cnt && fire) cnt_pending <= 1'b1;
      if (u_cnt) begin
        table_count <= uresp.rdata[CNT_BIT_LO +: 32];
        cnt_valid   <= 1'b1;
        cnt_pending <= 1'b0;
      end
      if (bisnp_valid && bisnp_addr[PA_W-1:6] == CNT_LINE[PA_W-1:6])
        cnt_valid <= 1'b0;

      // lookups that may start now
      for (int i = 0; i < N_PSHR; i++)
        if (slots[i].valid && slots[i].ls == L_INIT && cnt_valid) begin
          slots[i].lo <= '0;
          slots[i].hi <= table_count;
          slots[i].ls <= (table_count == '0) ? L_DONE : L_PROBE;
        end

      // the probe of this cycle
      if (pv) begin
        if (p_hit) begin
          slots[pidx].lo      <= p_step.lo;
          slots[pidx].hi      <= p_step.hi;
          slots[pidx].ls      <= p_step.ls;
          slots[pidx].allowed <= p_step.allowed;
        end else if (p_merge || (g_probe && fire)) begin
          slots[pidx].ls        <= L_WAIT;
          slots[pidx].wait_addr <= p_addr;
        end
      end

      // table entry returned: advance every slot waiting for it
      if (u_perm && !u_cnt)
        for (int i = 0; i < N_PSHR; i++)
          if (slots[i].valid && slots[i].ls == L_WAIT && slots[i].wait_addr == uresp.addr) begin
            step_t r;
            r = search_step(slots[i], entry_t'(uresp.rdata),
                            mid_of(slots[i].lo, slots[i].hi), host_id, alloc_mask);
            slots[i].lo      <= r.lo;
            slots[i].hi      <= r.hi;
            slots[i].ls      <= r.ls;
            slots[i].allowed <= r.allowed;
          end

      // data returned
      if (u_data) begin
        slots[uresp.tag[IW-1:0]].got  <= 1'b1;
        slots[uresp.tag[IW-1:0]].data <= uresp.rdata;
      end

      // program-order issue
      if (i_skip || (g_data && fire)) begin
        slots[iptr].iss_done <= 1'b1;
        slots[iptr].issued   <= g_data;
        iptr <= (iptr == IW'(N_PSHR - 1)) ? '0 : iptr + 1'b1;
      end

      // allocate
      if (alloc) begin
        slots[tail].valid    <= 1'b1;
        slots[tail].addr     <= c_pa;
        slots[tail].hwpid    <= c_hwpid;
        slots[tail].cmd      <= creq.cmd;
        slots[tail].data     <= creq.wdata;
        slots[tail].iss_done <= 1'b0;
        slots[tail].issued   <= 1'b0;
        slots[tail].got      <= 1'b0;
        slots[tail].lo       <= '0;
        slots[tail].hi       <= '0;
        if (c_meta) begin
          slots[tail].ls <= L_DONE; slots[tail].allowed <= 1'b1;
        end else if (c_table || c_hwpid == '0) begin
          slots[tail].ls <= L_DONE; slots[tail].allowed <= 1'b0;
        end else begin
          slots[tail].ls <= L_INIT; slots[tail].allowed <= 1'b0;
        end
        tail <= (tail == IW'(N_PSHR - 1)) ? '0 : tail + 1'b1;
      end

      // retire
      if (commit) begin
        slots[head].valid <= 1'b0;
        head <= (head == IW'(N_PSHR - 1)) ? '0 : head + 1'b1;
      end
      occ <= occ + (IW+1)'(alloc) - (IW+1)'(commit);
    end
  end

  // ------------------------------------------------------------------ events
  always_comb begin
    ev              = '0;
    ev.cache_hit    = pv && c_hit;
    ev.cache_miss   = g_probe && fire;
    ev.probe_merged = pv && !p_hit && p_merge;
    ev.count_read   = g_cnt && fire;
    ev.load_early   = g_data && fire && is.cmd == CMD_LD && is.ls != L_DONE;
    ev.store_stall  = i_stall;
    ev.violation    = commit && !hs.allowed;
    ev.label_seen   = lbl_wr;
    ev.local_enc    = lreq_valid && lreq_ready && lreq.addr[LADDR_W-1];
  end

  // ---------------------------------------------------------------- checks
  // a store never leaves before its permission is granted
  a_store: assert property (@(posedge clk) disable iff (!rst_n)
                            (g_data && fire && is.cmd == CMD_ST) |-> (is.ls == L_DONE && is.allowed))
    else $error("perm_checker: store issued without permission");
  // a data response always belongs to a live, issued slot
  a_resp: assert property (@(posedge clk) disable iff (!rst_n)
                           u_data |-> (slots[uresp.tag[IW-1:0]].valid && slots[uresp.tag[IW-1:0]].issued))
    else $error("perm_checker: data response for an idle slot");

endmodule
