// mfc_bias: turns the filtered population vector into the mean-field bias
// broadcast to the p-dits, B[k] = beta*lambda * Nhat[k].
//
// One multiplier per state (three for Q = 3, the three DSP slices of the
// prototype) forms the products in the `mul_en` cycle; the `dist_en` cycle
// rounds them down to the 3-fractional-bit energy grid and registers them in
// the broadcast register that feeds all p-dits. A p-dit then needs only
// B[s] - B[c] - beta*lambda, with no multiplication of its own, which is the
// point of precomputing beta*lambda on the host. Two cycles of the paper's
// three-cycle "calculate and distribute" stage are here, the third is the
// filter step. Widths and rounding are this design's choice.
module mfc_bias
  import potts_pkg::*;
#(
  parameter int Q    = 3,
  parameter int NW   = 18,        // width of Nhat
  parameter int FRAC = NHAT_FRAC, // fractional bits of Nhat
  localparam int PW  = BETA_W + NW + 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          mul_en,
  input  logic          dist_en,
  input  beta_t         beta_lambda,
  input  logic [NW-1:0] nhat [Q],
  output energy_t       bias [Q]
);

  logic signed [PW-1:0] prod [Q];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < Q; k++) begin
        prod[k] <= '0;
        bias[k] <= '0;
      end
    end else begin
      if (mul_en)
        for (int k = 0; k < Q; k++)
          prod[k] <= PW'(beta_lambda) * $signed({1'b0, nhat[k]});
      if (dist_en)
        for (int k = 0; k < Q; k++)
          bias[k] <= energy_t'(prod[k] >>> FRAC);
    end
  end

endmodule
