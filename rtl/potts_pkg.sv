// potts_pkg: shared constants, fixed-point types and helper functions of the
// mean-field-constrained Potts machine.
//
// Number formats. Inverse temperature beta and the product beta*lambda are
// 10-bit signed fixed point with 3 fractional bits (Q6.3), as in the FPGA
// prototype the design follows. Every energy term in the update path
// (beta*E) is kept in the same 3-fractional-bit grid but on a wider signed
// word (ENERGY_W), so sums of up to six +-beta terms and of beta*lambda times
// a population count of up to 1000 never overflow. Filtered population counts
// are unsigned with NHAT_FRAC fractional bits (a choice of this design).
//
// The acceptance probability sigmoid(x) is a 256-entry table over
// x = -16 ... +15.875 in steps of 1/8 (the Q.3 grid), each entry the
// probability scaled to 16 bits. The table is computed at elaboration from
//   sigmoid(x) = 1 / (1 + exp(-x)),  exp(-k/8) = r^k,  r = exp(-1/8)
// with r held as round(r * 2^30) = 947573834 and integer arithmetic only.
// Outside +-16 the probability differs from 0 or 1 by less than 2^-23, so the
// clamp loses nothing at 16-bit resolution.
package potts_pkg;

  // Formats of the prototype (paper) and of this design's internal words.
  localparam int BETA_W      = 10;  // Q6.3 beta and beta*lambda
  localparam int BETA_FRAC   = 3;
  localparam int ENERGY_W    = 24;  // signed beta*E, 3 fractional bits
  localparam int NHAT_FRAC   = 8;   // fractional bits of filtered counts
  localparam int PROB_W      = 16;  // acceptance probability / random word
  localparam int SIG_IDX_W   = 8;   // sigmoid table index: x in Q4.3

  typedef logic signed [BETA_W-1:0]   beta_t;
  typedef logic signed [ENERGY_W-1:0] energy_t;
  typedef logic [PROB_W-1:0]          prob_t;

  // One schedule step: the two values the host supplies per staircase step.
  typedef struct packed {
    beta_t beta;
    beta_t beta_lambda;
  } sched_entry_t;

  localparam longint EXP_M1_8_Q30 = 64'd947573834;  // exp(-1/8) * 2^30

  // sigmoid(k/8) * 2^16 for k >= 0, saturated to 16 bits.
  function automatic logic [PROB_W-1:0] sigmoid_pos_q16(input int k);
    longint e;   // exp(-k/8) in Q2.30
    longint p;
    e = 64'd1 << 30;
    for (int i = 0; i < k; i++) e = (e * EXP_M1_8_Q30) >> 30;
    // 2^16 * 2^30 / (2^30 + e), rounded to nearest
    p = ((64'd1 << 46) + ((64'd1 << 30) + e) / 2) / ((64'd1 << 30) + e);
    if (p > 64'd65535) p = 64'd65535;
    return p[PROB_W-1:0];
  endfunction

  // Table entry i holds sigmoid(x) for x = (i - 128)/8.
  function automatic logic [255:0][PROB_W-1:0] build_sigmoid_lut();
    logic [255:0][PROB_W-1:0] t;
    for (int i = 0; i < 256; i++) begin
      int k;
      k = i - 128;
      if (k >= 0) t[i] = sigmoid_pos_q16(k);
      else        t[i] = PROB_W'(17'd65536 - 17'(sigmoid_pos_q16(-k)));
    end
    return t;
  endfunction

  localparam logic [255:0][PROB_W-1:0] SIGMOID_LUT = build_sigmoid_lut();

  // xorshift32 step (Marsaglia 13/17/5), the random source of every p-dit.
  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  // Integer hash (lowbias32) used to derive a distinct seed per p-dit.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x >> 16);
    y = y * 32'h7feb352d;
    y = y ^ (y >> 15);
    y = y * 32'h846ca68b;
    y = y ^ (y >> 16);
    return y;
  endfunction

endpackage
