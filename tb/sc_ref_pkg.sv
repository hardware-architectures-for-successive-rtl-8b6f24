// sc_ref_pkg -- bit-exact software reference for the SC decoder testbenches.
//
// Written independently of the RTL: the decoder is the textbook recursion
// "LLR of bit i of a length-L code = LLR of bit i of the length-L/2 code
// obtained by f on pairs (2k, 2k+1) if i < L/2, or by g on those pairs with
// the re-encoded first half as partial sums otherwise", evaluated afresh for
// every bit. Encoding uses the matching recursion: enc(v) = interleave of
// enc(first half) XOR enc(second half) and enc(second half).
// Fixed point: W-bit LLRs, results saturated to +-(2^(W-1)-1); f is
// sign(a)sign(b)min(|a|,|b|) with 0 counted positive; g = b + a or b - a.
package sc_ref_pkg;

  function automatic int sat(input int v, input int w);
    int mx;
    mx = (1 << (w - 1)) - 1;
    if (v > mx)  return mx;
    if (v < -mx) return -mx;
    return v;
  endfunction

  function automatic int f_ref(input int a, input int b, input int w);
    int ma, mb, mn;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    mn = (ma < mb) ? ma : mb;
    return sat(((a < 0) != (b < 0)) ? -mn : mn, w);
  endfunction

  function automatic int g_ref(input int a, input int b, input bit us, input int w);
    return sat(us ? (b - a) : (b + a), w);
  endfunction

  // Polar encoding of v[0..L-1] (L = size of v), bottom-up form of the recursion.
  function automatic void encode(input bit v[], output bit c[]);
    bit cur[];
    bit nxt[];
    int L, s;
    L   = v.size();
    cur = v;
    nxt = new[L];
    for (s = 1; s < L; s = s * 2) begin
      for (int blk = 0; blk < L / (2 * s); blk++)
        for (int k = 0; k < s; k++) begin
          nxt[blk*2*s + 2*k]     = cur[2*blk*s + k] ^ cur[(2*blk+1)*s + k];
          nxt[blk*2*s + 2*k + 1] = cur[(2*blk+1)*s + k];
        end
      cur = nxt;
      nxt = new[L];
    end
    c = cur;
  endfunction

  // SC decoding of one codeword: decided bits and the LLR each was decided on.
  function automatic void sc_decode(input int lam[], input bit frozen[], input int w,
                                    output bit u[], output int llr[]);
    int n, L, half, base, li;
    int cur[];
    int nxt[];
    bit part[];
    bit p[];
    n   = lam.size();
    u   = new[n];
    llr = new[n];
    for (int i = 0; i < n; i++) begin
      cur  = lam;
      L    = n;
      base = 0;
      li   = i;
      while (L > 1) begin
        half = L / 2;
        nxt  = new[half];
        if (li < half) begin
          for (int k = 0; k < half; k++) nxt[k] = f_ref(cur[2*k], cur[2*k+1], w);
        end else begin
          part = new[half];
          for (int k = 0; k < half; k++) part[k] = u[base + k];
          encode(part, p);
          for (int k = 0; k < half; k++) nxt[k] = g_ref(cur[2*k], cur[2*k+1], p[k], w);
          base = base + half;
          li   = li - half;
        end
        cur = nxt;
        L   = half;
      end
      llr[i] = cur[0];
      u[i]   = frozen[i] ? 1'b0 : (cur[0] <= 0);
    end
  endfunction

endpackage
