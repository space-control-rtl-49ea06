// mono_counter -- SPACE's monotonic counter (ctr in L_host).
//
// L_host = MAC_K_host(BASE_P, HWPID, ctr) must be tied to exactly one
// context switch so that an old label cannot be replayed.  This counter
// advances by one on every context switch of the core and never goes back:
// it saturates at its all-ones value instead of wrapping, so a value is never
// issued twice.  Software cannot write it.
// From the paper: a 64-bit monotonic counter that advances on each context
// switch.  Saturation instead of wrap-around and the zero reset value are
// this design's choices.
//
// Interface: `inc` for one cycle per context switch; `value` changes at the
// next edge.  `saturated` is high once the counter can no longer advance.
module mono_counter #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inc,
  output logic [WIDTH-1:0] value,
  output logic             saturated
);

  assign saturated = &value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 value <= '0;
    else if (inc && !saturated) value <= value + 1'b1;
  end

endmodule
