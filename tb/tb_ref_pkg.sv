// tb_ref_pkg -- reference functions shared by the testbenches.
//
// Written from the algorithms' definitions, independently of the RTL:
// SipHash-2-4 over whole 64-bit words, the local-memory keystream, and a
// helper that packs a permission-table entry.
package tb_ref_pkg;
  import spc_pkg::*;

  function automatic logic [63:0] rl(logic [63:0] x, int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  // SipHash-2-4 of n 64-bit words m[0..n-1] (n <= 4)
  function automatic logic [63:0] siphash(logic [63:0] k0, logic [63:0] k1,
                                          int n, logic [63:0] m [4]);
    logic [63:0] a, b, c, d, blk;
    a = k0 ^ 64'h736f6d6570736575; b = k1 ^ 64'h646f72616e646f6d;
    c = k0 ^ 64'h6c7967656e657261; d = k1 ^ 64'h7465646279746573;
    for (int i = 0; i <= n; i++) begin
      blk = (i < n) ? m[i] : (64'(8 * n) << 56);
      d ^= blk;
      repeat (2) begin
        a += b; b = rl(b,13); b ^= a; a = rl(a,32);
        c += d; d = rl(d,16); d ^= c;
        a += d; d = rl(d,21); d ^= a;
        c += b; b = rl(b,17); b ^= c; c = rl(c,32);
      end
      a ^= blk;
    end
    c ^= 64'hff;
    repeat (4) begin
      a += b; b = rl(b,13); b ^= a; a = rl(a,32);
      c += d; d = rl(d,16); d ^= c;
      a += d; d = rl(d,21); d ^= a;
      c += b; b = rl(b,17); b ^= c; c = rl(c,32);
    end
    return a ^ b ^ c ^ d;
  endfunction

  // L_host = MAC_K(BASE_P, HWPID, ctr)
  function automatic logic [63:0] ref_lhost(logic [63:0] k, logic [63:0] base_p,
                                            int hwpid, logic [63:0] ctr);
    logic [63:0] m [4];
    m[0] = base_p; m[1] = 64'(hwpid); m[2] = ctr; m[3] = 0;
    return siphash(k, k, 3, m);
  endfunction

  // L_exp = MAC_K(host_id, HWPID, BASE_P, range) as the FM computes it
  function automatic logic [63:0] ref_lexp(logic [63:0] k, int host, int hwpid,
                                           logic [63:0] base_p,
                                           logic [63:0] start, logic [63:0] size);
    logic [63:0] m [4];
    m[0] = (64'(host) << 8) | 64'(hwpid); m[1] = base_p; m[2] = start; m[3] = size;
    return siphash(k, k, 4, m);
  endfunction

  // SplitMix64 finaliser
  function automatic logic [63:0] ref_mix(logic [63:0] x);
    logic [63:0] z;
    z = x;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    z = z ^ (z >> 31);
    return z;
  endfunction

  // keystream of the local-memory encryption for the line holding addr:
  // word i = mix(K ^ (line_index*8 + i) ^ (i+1)*0x9E3779B97F4A7C15)
  function automatic logic [511:0] ref_keystream(logic [63:0] k, logic [40:0] addr);
    logic [511:0] ks;
    logic [63:0]  w, gi, la;
    ks = '0;
    la = {23'd0, addr};
    la = (la >> 6) << 3;
    w  = la;
    gi = 64'h9E3779B97F4A7C15;
    repeat (8) begin
      ks = {ref_mix(k ^ w ^ gi), ks[511:64]};
      w  = w + 64'd1;
      gi = gi + 64'h9E3779B97F4A7C15;
    end
    return ks;
  endfunction

  function automatic logic [511:0] make_entry(logic [63:0] start, logic [60:0] size,
                                              bit val, bit rw,
                                              logic [255:0] hmask, logic [127:0] pmask);
    logic [511:0] e;
    e = '0;
    e[63:0]    = start;
    e[124:64]  = size;
    e[125]     = val;
    e[126]     = rw;
    e[382:127] = hmask;
    e[510:383] = pmask;
    return e;
  endfunction

  // public label record: lexp [63:0], hwpid [70:64], host_id [79:72],
  // range_start [191:128], range_size [255:192]
  function automatic logic [511:0] make_label(logic [63:0] lexp, int hwpid, int host,
                                              logic [63:0] start, logic [63:0] size);
    logic [511:0] r;
    r = '0;
    r[63:0]    = lexp;
    r[70:64]   = 7'(hwpid);
    r[79:72]   = 8'(host);
    r[191:128] = start;
    r[255:192] = size;
    return r;
  endfunction
endpackage
