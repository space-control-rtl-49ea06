// abit_tagger -- forms the identity-tagged (extended) physical address.
//
// A trusted process' accesses carry its HWPID in the top 7 bits of a 48-bit
// extended physical address, {HWPID[6:0], PA[40:0]}; these are the A-bits
// the permission checker keys on.  The tag is applied only while SPACE's V
// bit says the running process is authenticated and the core is in user
// mode; every other access (kernel, untrusted process, not yet armed) leaves
// with HWPID 0.  The OS therefore cannot make an access look trusted.
// From the paper: the HWPID (7 bits) in the most significant bits above a
// 41-bit PA, set only for authenticated processes.  Gating on the ring as
// well as on V is this design's choice (V is already cleared outside user
// mode; the gate also covers the cycle in which the ring changes).
//
// Purely combinational.
module abit_tagger
  import spc_pkg::*;
(
  input  pa_t     pa,
  input  logic    v_bit,
  input  hwpid_t  cur_hwpid,
  input  logic [1:0] ring,
  output epa_t    epa
);

  always_comb begin
    epa = {HWPID_W'(0), pa};
    if (v_bit && ring == RING_USER) epa = {cur_hwpid, pa};
  end

endmodule
