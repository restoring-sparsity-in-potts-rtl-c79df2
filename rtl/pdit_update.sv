// pdit_update: one probabilistic digit (p-dit) of the Potts machine.
//
// A p-dit holds one of Q states arranged on a ring. When enabled it
//   1. picks a candidate c uniformly from the two ring neighbours of its state
//      s (s+1 or s-1 mod Q, chosen by one random bit),
//   2. forms the scaled energy difference
//        beta*E(s->c) = sum_j f(s,c,s_j) + B[s] - B[c] - beta*lambda
//      where f = -beta if neighbour j is in s, +beta if it is in c, 0 else,
//      and B[k] = beta*lambda*Nhat[k] is the broadcast mean-field bias,
//   3. accepts c with probability sigmoid(beta*E) by comparing a 16-bit
//      random number with a sigmoid table.
// The candidate rule, the cut term f, the balancing term and the Q6.3 beta
// follow the paper. The random source (a 32-bit xorshift per p-dit), the
// sigmoid table resolution (x clamped to +-16 in steps of 1/8, 16-bit
// probabilities) and the random initial state are this design's choices.
//
// Interface: neighbour states arrive as an array of MAX_DEG entries with a
// validity mask (boundary nodes have fewer neighbours). `init` loads the
// random generator with `seed` and sets a pseudo-random initial state;
// `en` performs one update. Timing: one update per enabled clock cycle; the
// new state is visible after the clock edge. `accept` and `cand` are the
// combinational decision for the current cycle (valid while `en` is high).
module pdit_update
  import potts_pkg::*;
#(
  parameter int Q       = 3,
  parameter int MAX_DEG = 6,
  localparam int SW     = (Q > 2) ? $clog2(Q) : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                init,
  input  logic [31:0]         seed,          // must be non-zero
  input  logic                en,
  input  logic [SW-1:0]       nbr     [MAX_DEG],
  input  logic [MAX_DEG-1:0]  nbr_valid,
  input  beta_t               beta,
  input  beta_t               beta_lambda,
  input  energy_t             bias    [Q],
  output logic [SW-1:0]       state,
  output logic [SW-1:0]       cand,
  output logic                accept
);

  logic [31:0] rng;
  energy_t     e_cut, e_bal, e_tot;
  logic [SIG_IDX_W-1:0] idx;
  prob_t       p_acc;

  // Candidate: ring neighbour selected by one random bit.
  always_comb begin
    if (rng[16]) cand = (32'(state) == Q - 1) ? '0 : SW'(state + 1'b1);
    else         cand = (state == '0) ? SW'(Q - 1) : SW'(state - 1'b1);
  end

  // Cut term: -beta for each neighbour sharing the current state,
  // +beta for each neighbour in the candidate state.
  always_comb begin
    e_cut = '0;
    for (int j = 0; j < MAX_DEG; j++) begin
      if (nbr_valid[j]) begin
        if (nbr[j] == state)     e_cut = e_cut - energy_t'(beta);
        else if (nbr[j] == cand) e_cut = e_cut + energy_t'(beta);
      end
    end
  end

  // Balancing term from the mean-field bias vector.
  assign e_bal = bias[state] - bias[cand] - energy_t'(beta_lambda);
  assign e_tot = e_cut + e_bal;

  // Clamp to the sigmoid table range [-16, 16) and look up.
  always_comb begin
    if (e_tot > energy_t'(127))       idx = 8'd255;
    else if (e_tot < energy_t'(-128)) idx = 8'd0;
    else                              idx = SIG_IDX_W'(e_tot + energy_t'(128));
  end
  assign p_acc  = SIGMOID_LUT[idx];
  assign accept = (rng[15:0] < p_acc);

  always_ff @(posedge clk) begin
    if (rst) begin
      rng   <= 32'h1;
      state <= '0;
    end else if (init) begin
      rng   <= seed;
      // Uniform-ish initial state: top of (16 random bits * Q) / 2^16.
      state <= SW'((32'(seed[31:16]) * Q) >> 16);
    end else if (en) begin
      rng <= xorshift32(rng);
      if (accept) state <= cand;
    end
  end

endmodule
