// mem_encrypt_engine -- encryption of a trusted process' local pages.
//
// Local DRAM is untrusted: a malicious kernel can alias a trusted process'
// local page into another process.  Every local access of a trusted process
// is marked by the permission checker with HPA[42] = 1; this engine encrypts
// the write data of such accesses with the host key before they reach DRAM
// and decrypts the read data on the way back, so an aliased page only ever
// shows ciphertext.  Untagged accesses (HPA[42] = 0) pass unchanged.
//
// Cipher: the paper only requires an engine "similar to prior works" that
// takes at most one cycle per cache line.  This design uses an
// address-tweaked keystream, XORed onto the line:
//   ks[i] = mix64(K_host ^ (line_address * 8 + i) ^ (i+1) * 0x9E3779B97F4A7C15)
// for the eight 64-bit words i of the line, where mix64 is the SplitMix64
// finaliser.  It is combinational (zero added cycles) and its own inverse.
// It is a placeholder with the right interface and timing, not a vetted
// cipher: it gives no integrity and a keystream reused on every write to the
// same line.
//
// Interface: request side valid/ready from the checker to DRAM; the DRAM
// response returns the 43-bit address it was given (bit 42 is carried back
// as a tag) with the data; the engine passes it on, decrypted, to the core.
// DRAM sees address bits [40:0] and the tag bit.
module mem_encrypt_engine
  import spc_pkg::*;
(
  input  logic [KEY_W-1:0] k_host,
  // from the permission checker
  input  logic       in_valid,
  output logic       in_ready,
  input  loc_req_t   in_req,
  // to local DRAM
  output logic       mem_valid,
  input  logic       mem_ready,
  output loc_req_t   mem_req,
  // from local DRAM
  input  logic       mem_resp_valid,
  input  loc_resp_t  mem_resp,
  // to the core
  output logic       out_resp_valid,
  output loc_resp_t  out_resp
);

  localparam int unsigned WORDS = LINE_W / 64;

  function automatic logic [63:0] mix64(logic [63:0] x);
    logic [63:0] z;
    z = x;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  function automatic line_t keystream(logic [KEY_W-1:0] k, logic [LADDR_W-1:0] a);
    line_t       ks;
    logic [63:0] word_idx;
    word_idx = {26'd0, a[PA_W-1:6], 3'b000};     // line address * 8
    for (int i = 0; i < WORDS; i++)
      ks[i*64 +: 64] = mix64(k ^ (word_idx + 64'(i))
                             ^ (64'(i + 1) * 64'h9E3779B97F4A7C15));
    return ks;
  endfunction

  assign in_ready  = mem_ready;
  assign mem_valid = in_valid;

  always_comb begin
    mem_req = in_req;
    if (in_req.addr[LADDR_W-1] && in_req.cmd == CMD_ST)
      mem_req.wdata = in_req.wdata ^ keystream(k_host, in_req.addr);
  end

  assign out_resp_valid = mem_resp_valid;
  always_comb begin
    out_resp = mem_resp;
    if (mem_resp.addr[LADDR_W-1])
      out_resp.rdata = mem_resp.rdata ^ keystream(k_host, mem_resp.addr);
  end

endmodule
