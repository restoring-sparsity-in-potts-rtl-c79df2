// mfc_controller: the classical half of the hybrid machine, the mean-field
// constraint (MFC) feedback controller.
//
// After every sweep of the p-dits it measures the global state and turns the
// balance error into a bias for the next sweep, in a 35-cycle pipeline:
//   cycles 0..CYCLES-1  batched population count N[k]    (32 cycles)
//   cycle  CYCLES       low-pass filter Nhat[k]
//   cycle  CYCLES+1     multiply beta*lambda * Nhat[k]
//   cycle  CYCLES+2     register and broadcast the bias B[k]
// The error of the paper, eps[k] = N[k] - N/Q, only enters the p-dits through
// differences B[s] - B[c], where the constant N/Q cancels, so the controller
// filters and scales the counts themselves, as the prototype does.
// The stage split (32 + 3 cycles) is the paper's; the controller sequences
// itself from a single `start` pulse (this design's choice).
//
// Interface: `start` begins the pipeline, `first` (sampled with `start`)
// makes the filter take Nhat = N instead of a filter step. `beta_lambda` is
// sampled in the multiply cycle. `done` pulses in the cycle after the bias
// register has been written, i.e. CYCLES+3 cycles after `start`; `bias`
// holds its value until the next run. The p-dit states must be held still
// for the first CYCLES cycles.
module mfc_controller
  import potts_pkg::*;
#(
  parameter int N      = 1000,
  parameter int Q      = 3,
  parameter int CYCLES = 32,
  parameter int SHIFT  = 3,
  localparam int SW    = (Q > 2) ? $clog2(Q) : 1,
  localparam int CW    = $clog2(N + 1),
  localparam int NW    = CW + NHAT_FRAC
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic          first,
  input  logic [SW-1:0] states [N],
  input  beta_t         beta_lambda,
  output logic [CW-1:0] counts [Q],
  output logic [NW-1:0] nhat   [Q],
  output energy_t       bias   [Q],
  output logic          busy,
  output logic          done
);

  logic pop_busy, pop_done;
  logic first_q, mul_q, dist_q;

  batched_popcount #(.N(N), .Q(Q), .CYCLES(CYCLES)) u_pop (
    .clk, .rst, .start, .states, .counts,
    .busy (pop_busy),
    .done (pop_done)
  );

  lowpass_filter #(.Q(Q), .CW(CW), .FRAC(NHAT_FRAC), .SHIFT(SHIFT)) u_lpf (
    .clk, .rst,
    .load   (pop_done && first_q),
    .update (pop_done && !first_q),
    .counts,
    .nhat
  );

  mfc_bias #(.Q(Q), .NW(NW), .FRAC(NHAT_FRAC)) u_bias (
    .clk, .rst,
    .mul_en  (mul_q),
    .dist_en (dist_q),
    .beta_lambda,
    .nhat,
    .bias
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      first_q <= 1'b0;
      mul_q   <= 1'b0;
      dist_q  <= 1'b0;
      done    <= 1'b0;
    end else begin
      if (start) first_q <= first;
      mul_q  <= pop_done;
      dist_q <= mul_q;
      done   <= dist_q;
    end
  end

  assign busy = start || pop_busy || pop_done || mul_q || dist_q;

endmodule
