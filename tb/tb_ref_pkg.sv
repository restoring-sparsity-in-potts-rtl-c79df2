// tb_ref_pkg: reference models shared by the testbenches, written
// independently of the RTL: the xorshift32 generator, the seed hash, the
// acceptance probability of a p-dit computed with real arithmetic, and a
// reference p-dit decision.
package tb_ref_pkg;

  function automatic int unsigned ref_xorshift(input int unsigned x);
    int unsigned y;
    y = x;
    y ^= y << 13;
    y ^= y >> 17;
    y ^= y << 5;
    return y;
  endfunction

  function automatic int unsigned ref_mix32(input int unsigned x);
    int unsigned y;
    y = x;
    y ^= y >> 16;
    y *= 32'h7feb352d;
    y ^= y >> 15;
    y *= 32'h846ca68b;
    y ^= y >> 16;
    return y;
  endfunction

  // Acceptance probability times 65536 for an energy given in 1/8 units.
  function automatic real ref_prob(input longint e8);
    real x;
    x = real'(e8) / 8.0;
    if (x > 15.875) x = 15.875;
    if (x < -16.0)  x = -16.0;
    return 65536.0 / (1.0 + $exp(-x));
  endfunction

  // Result of a reference p-dit decision.
  typedef struct {
    int     cand;
    longint e8;       // beta*E in 1/8 units
    int     verdict;  // 1 accept, 0 reject, -1 too close to the threshold to call
  } ref_dec_t;

  // s: current state, rng: generator value before the update, nbr/nv: the
  // neighbour states and validity, beta8/bl8: beta and beta*lambda in 1/8
  // units, bias8: the bias vector in 1/8 units.
  function automatic ref_dec_t ref_decide(input int q, input int s, input int unsigned rng,
                                          input int nbr[6], input bit nv[6],
                                          input longint beta8, input longint bl8,
                                          input longint bias8[8]);
    ref_dec_t d;
    real p;
    real r;
    d.cand = rng[16] ? (s + 1) % q : (s + q - 1) % q;
    d.e8 = 0;
    for (int j = 0; j < 6; j++)
      if (nv[j]) begin
        if (nbr[j] == s) d.e8 -= beta8;
        else if (nbr[j] == d.cand) d.e8 += beta8;
      end
    d.e8 += bias8[s] - bias8[d.cand] - bl8;
    p = ref_prob(d.e8);
    r = real'(rng & 32'hffff);
    if (r < p - 1.5)      d.verdict = 1;
    else if (r > p + 1.5) d.verdict = 0;
    else                  d.verdict = -1;
    return d;
  endfunction

endpackage
