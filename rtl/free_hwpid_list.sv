// free_hwpid_list -- SPACE's list of free hardware process IDs.
//
// SPACE, not the OS, hands out HWPIDs (the reserved PCID/ASID values that
// tag a trusted process' addresses).  The list is a 128-entry circular FIFO
// of 7-bit IDs, filled with 1..127 at reset (HWPID 0 means "not trusted"
// and is never handed out).  GET_NEXT_PID pops the head; RELEASE_PID pushes
// an ID back, but only one that is currently allocated, so a double release
// or a forged ID cannot duplicate an identity.  Alongside the FIFO a bit
// vector marks the allocated IDs; it is exported as HWPID_local, the host's
// own set of trusted processes that the permission checker intersects with
// the table's HWPID mask.
// From the paper: a free list of 128 entries, GET_NEXT_PID / RELEASE_PID,
// HWPID_local as a bit vector.  FIFO order, the reject rule on release and
// the combinational response are this design's choices.
//
// Interface: `get` pops in the cycle it is high; `get_ok`/`get_id` are
// combinational (get_ok low when empty).  `rel`/`rel_id` push back;
// `rel_ok` tells whether it was accepted.  Both may happen in one cycle.
module free_hwpid_list
  import spc_pkg::*;
#(
  parameter int unsigned DEPTH = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 get,
  output logic                 get_ok,
  output hwpid_t               get_id,
  input  logic                 rel,
  input  hwpid_t               rel_id,
  output logic                 rel_ok,
  output logic [NUM_HWPID-1:0] alloc_mask     // HWPID_local
);

  localparam int unsigned PW = $clog2(DEPTH);

  hwpid_t          fifo [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            do_get, do_rel;

  assign get_ok = (count != '0);
  assign get_id = fifo[rd_ptr];
  assign rel_ok = rel && (rel_id != '0) && alloc_mask[rel_id];
  assign do_get = get && get_ok;
  assign do_rel = rel_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) fifo[i] <= hwpid_t'((i + 1) % NUM_HWPID);
      rd_ptr     <= '0;
      wr_ptr     <= PW'(NUM_HWPID - 1);
      count      <= (PW+1)'(NUM_HWPID - 1);
      alloc_mask <= '0;
    end else begin
      if (do_get) begin
        rd_ptr             <= rd_ptr + 1'b1;
        alloc_mask[get_id] <= 1'b1;
      end
      if (do_rel) begin
        fifo[wr_ptr]       <= rel_id;
        wr_ptr             <= wr_ptr + 1'b1;
        alloc_mask[rel_id] <= 1'b0;
      end
      count <= count + (PW+1)'(do_rel) - (PW+1)'(do_get);
    end
  end

  // the list can never hold more IDs than exist
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
                            count <= (PW+1)'(NUM_HWPID - 1))
    else $error("free_hwpid_list: count overflow");

endmodule
