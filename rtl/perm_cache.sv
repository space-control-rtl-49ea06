// perm_cache -- fully associative permission cache of the permission checker.
//
// Each permission lookup is a binary search over the sorted permission table
// in remote memory, and every probe would otherwise be a round trip over the
// CXL fabric.  This cache keeps recently read 64-byte table entries, tagged
// by the entry's own physical address, so the internal nodes a binary
// search keeps revisiting hit on chip and mostly only the leaf misses.  When
// the FM commits a table update, the CXL back-invalidate snoop (BISnp) for
// that line removes it here.
//
// From the paper: a small fully associative cache of 64-byte table entries
// (8 to 1024 entries studied; 16 KiB = 256 entries is the configuration with
// the headline 3.3% overhead), invalidated by BISnp.  The replacement policy
// (first free entry, otherwise round robin) and the single lookup port are
// this design's choices.
//
// Interface: lookup is combinational (`lk_hit`, `lk_data` in the same cycle
// as `lk_addr`).  Fill and invalidate act at the next edge; an invalidate of
// the line being filled in the same cycle wins.  A fill of a line that is
// already present overwrites it in place.
module perm_cache
  import spc_pkg::*;
#(
  parameter int unsigned ENTRIES = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  pa_t   lk_addr,
  output logic  lk_hit,
  output line_t lk_data,
  input  logic  fill_valid,
  input  pa_t   fill_addr,
  input  line_t fill_data,
  input  logic  inv_valid,
  input  pa_t   inv_addr
);

  localparam int unsigned TW = PA_W - 6;               // line address bits
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic          vld  [ENTRIES];
  logic [TW-1:0] tag  [ENTRIES];
  line_t         data [ENTRIES];
  logic [IW-1:0] rr;

  logic [TW-1:0] lk_tag, fill_tag, inv_tag;
  logic          fill_hit, have_free;
  logic [IW-1:0] lk_idx, fill_idx, free_idx, victim;

  assign lk_tag   = lk_addr[PA_W-1:6];
  assign fill_tag = fill_addr[PA_W-1:6];
  assign inv_tag  = inv_addr[PA_W-1:6];

  always_comb begin
    lk_hit = 1'b0;  lk_idx = '0;
    fill_hit = 1'b0; fill_idx = '0;
    have_free = 1'b0; free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (vld[i] && tag[i] == lk_tag)   begin lk_hit = 1'b1;   lk_idx = IW'(i);   end
      if (vld[i] && tag[i] == fill_tag) begin fill_hit = 1'b1; fill_idx = IW'(i); end
      if (!vld[i])                      begin have_free = 1'b1; free_idx = IW'(i); end
    end
    lk_data = data[lk_idx];
    victim  = fill_hit ? fill_idx : (have_free ? free_idx : rr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) vld[i] <= 1'b0;
      rr <= '0;
    end else begin
      if (fill_valid) begin
        vld[victim] <= 1'b1;
        if (!fill_hit && !have_free) rr <= (rr == IW'(ENTRIES - 1)) ? '0 : rr + 1'b1;
      end
      if (inv_valid)
        for (int i = 0; i < ENTRIES; i++)
          if (tag[i] == inv_tag && !(fill_valid && victim == IW'(i))) vld[i] <= 1'b0;
      if (inv_valid && fill_valid && inv_tag == fill_tag) vld[victim] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag[victim]  <= fill_tag;
      data[victim] <= fill_data;
    end
  end

endmodule
