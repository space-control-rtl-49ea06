// label_mac -- keyed 64-bit MAC that SPACE uses to form process labels.
//
// The paper computes the labels L_exp = MAC_K(host_id, HWPID, BASE_P, range)
// and L_host = MAC_K(BASE_P, HWPID, ctr) with "a standard MAC primitive"
// (it names HMAC-SHA-256 and AES-CMAC as examples) but gives no circuit.
// This design uses SipHash-2-4, a published keyed PRF with a 64-bit tag,
// because it is small: one SipRound per clock on four 64-bit registers.
// The choice of SipHash, the iterative one-round-per-cycle datapath and the
// expansion of the 64-bit K_host into SipHash's 128-bit key are this
// design's own.
//
// Interface: pulse `start` with the key, `nwords` (0..MAX_WORDS) and the
// message as whole little-endian 64-bit words.  `busy` is high while it
// works; `done` pulses for one cycle with `mac` valid (mac holds its value
// until the next start).  A start while busy is ignored.
// Timing: done comes 2*(nwords+1)+5 cycles after start (one set-up cycle, two compression
// rounds per word and for the length block, four finalisation rounds).
module label_mac
  import spc_pkg::*;
#(
  parameter int unsigned MAX_WORDS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [127:0]         key,        // {k1, k0}
  input  logic [2:0]           nwords,
  input  logic [63:0]          words [MAX_WORDS],
  output logic                 busy,
  output logic                 done,
  output label_t               mac
);

  typedef struct packed {
    logic [63:0] v3, v2, v1, v0;
  } sip_state_t;

  function automatic logic [63:0] rotl(logic [63:0] x, int unsigned n);
    return (x << n) | (x >> (64 - n));
  endfunction

  function automatic sip_state_t sipround(sip_state_t s);
    sip_state_t r;
    r = s;
    r.v0 = r.v0 + r.v1; r.v1 = rotl(r.v1, 13); r.v1 = r.v1 ^ r.v0; r.v0 = rotl(r.v0, 32);
    r.v2 = r.v2 + r.v3; r.v3 = rotl(r.v3, 16); r.v3 = r.v3 ^ r.v2;
    r.v0 = r.v0 + r.v3; r.v3 = rotl(r.v3, 21); r.v3 = r.v3 ^ r.v0;
    r.v2 = r.v2 + r.v1; r.v1 = rotl(r.v1, 17); r.v1 = r.v1 ^ r.v2; r.v2 = rotl(r.v2, 32);
    return r;
  endfunction

  typedef enum logic [1:0] { S_IDLE, S_ABSORB, S_FINAL } state_e;

  state_e      state;
  sip_state_t  v;
  logic [2:0]  idx, nw;
  logic [2:0]  rnd;
  logic [63:0] msg [MAX_WORDS];
  logic [63:0] m_cur;
  sip_state_t  v_in, v_rnd;

  // current block: a message word, or the final length block b = len << 56
  always_comb begin
    m_cur = {5'd0, nw, 56'd0} << 3;                 // (8*nwords) << 56
    for (int i = 0; i < MAX_WORDS; i++)
      if (idx == 3'(i) && idx < nw) m_cur = msg[i];
    v_in = v;
    if (state == S_ABSORB && rnd == 3'd0) v_in.v3 = v.v3 ^ m_cur;
    v_rnd = sipround(v_in);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      v     <= '0;
      idx   <= '0;
      nw    <= '0;
      rnd   <= '0;
      done  <= 1'b0;
      mac   <= '0;
      for (int i = 0; i < MAX_WORDS; i++) msg[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          v.v0  <= key[63:0]   ^ 64'h736f6d6570736575;
          v.v1  <= key[127:64] ^ 64'h646f72616e646f6d;
          v.v2  <= key[63:0]   ^ 64'h6c7967656e657261;
          v.v3  <= key[127:64] ^ 64'h7465646279746573;
          nw    <= (nwords > 3'(MAX_WORDS)) ? 3'(MAX_WORDS) : nwords;
          for (int i = 0; i < MAX_WORDS; i++) msg[i] <= words[i];
          idx   <= '0;
          rnd   <= '0;
          state <= S_ABSORB;
        end
        S_ABSORB: begin
          if (rnd == 3'd0) begin
            v   <= v_rnd;
            rnd <= 3'd1;
          end else begin
            v     <= v_rnd;
            v.v0  <= v_rnd.v0 ^ m_cur;
            rnd   <= '0;
            if (idx == nw) begin
              v.v2  <= v_rnd.v2 ^ 64'hff;
              state <= S_FINAL;
            end else begin
              idx <= idx + 3'd1;
            end
          end
        end
        S_FINAL: begin
          v   <= v_rnd;
          rnd <= rnd + 3'd1;
          if (rnd == 3'd3) begin
            mac   <= v_rnd.v0 ^ v_rnd.v1 ^ v_rnd.v2 ^ v_rnd.v3;
            done  <= 1'b1;
            state <= S_IDLE;
            rnd   <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
