// lexp_store -- SPACE's binding map[HWPID] -> L_exp.
//
// When the fabric manager (FM) approves a process it writes a public label
// L_exp for it into the label section of the SDM metadata; the host reads it
// back and SPACE intercepts that read response.  This block keeps, per
// HWPID, the intercepted label and the memory range it binds, so the
// uSequencer can later verify the process.  A record is taken only if it
// names this host and an HWPID that SPACE has actually allocated; releasing
// an HWPID clears its binding.
// From the paper: the map from HWPID to L_exp (Fig. 4 "BINDING"), filled by
// intercepting the permission-table response (Fig. 4, Fig. 6 "STORE").
// Storing the range next to the label, the record format and the
// acceptance rule are this design's choices.
//
// Interface: `wr` with a label record; `inv`/`inv_id` clears one entry;
// `rd_id` reads combinationally.  Writes take effect at the next edge;
// `wr_ok` says whether the record was accepted.
module lexp_store
  import spc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [HOST_W-1:0]    host_id,
  input  logic [NUM_HWPID-1:0] alloc_mask,
  input  logic                 wr,
  input  label_rec_t           wr_rec,
  output logic                 wr_ok,
  input  logic                 inv,
  input  hwpid_t               inv_id,
  input  hwpid_t               rd_id,
  output logic                 rd_valid,
  output label_t               rd_lexp,
  output logic [63:0]          rd_start,
  output logic [63:0]          rd_size
);

  logic        vld   [NUM_HWPID];
  label_t      lexp  [NUM_HWPID];
  logic [63:0] start [NUM_HWPID];
  logic [63:0] size  [NUM_HWPID];

  assign wr_ok = wr && (wr_rec.host_id == host_id) && (wr_rec.hwpid != '0)
                 && alloc_mask[wr_rec.hwpid];

  assign rd_valid = vld[rd_id];
  assign rd_lexp  = lexp[rd_id];
  assign rd_start = start[rd_id];
  assign rd_size  = size[rd_id];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_HWPID; i++) vld[i] <= 1'b0;
    end else begin
      if (inv) vld[inv_id] <= 1'b0;
      if (wr_ok) vld[wr_rec.hwpid] <= 1'b1;
    end
  end

  // payload needs no reset: it is only read where vld is set
  always_ff @(posedge clk) begin
    if (wr_ok) begin
      lexp[wr_rec.hwpid]  <= wr_rec.lexp;
      start[wr_rec.hwpid] <= wr_rec.range_start;
      size[wr_rec.hwpid]  <= wr_rec.range_size;
    end
  end

endmodule
