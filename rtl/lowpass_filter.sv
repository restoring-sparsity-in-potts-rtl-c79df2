// lowpass_filter: first-order IIR low-pass filter of the population vector,
//   Nhat <- alpha * N + (1 - alpha) * Nhat,   alpha = 2^-SHIFT,
// computed per state as Nhat <- Nhat + ((N << FRAC) - Nhat) >>> SHIFT, so the
// multiplication by alpha is a right shift (the paper chose alpha = 0.125 for
// exactly this reason). The filtered counts carry FRAC fractional bits (this
// design's choice; the paper gives no width). The shift truncates toward
// minus infinity.
//
// Interface and timing: `update` applies one filter step to `counts`; `load`
// (used for the first step after a start) sets Nhat = N instead, since the
// paper does not say how the filter starts. Both take effect at the clock
// edge; `nhat` is registered.
module lowpass_filter #(
  parameter int Q     = 3,
  parameter int CW    = 10,
  parameter int FRAC  = 8,
  parameter int SHIFT = 3,
  localparam int NW   = CW + FRAC
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          load,
  input  logic          update,
  input  logic [CW-1:0] counts [Q],
  output logic [NW-1:0] nhat   [Q]
);

  logic signed [NW+1:0] diff [Q];

  always_comb begin
    for (int k = 0; k < Q; k++)
      diff[k] = $signed({2'b00, counts[k], {FRAC{1'b0}}}) - $signed({2'b00, nhat[k]});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < Q; k++) nhat[k] <= '0;
    end else if (load) begin
      for (int k = 0; k < Q; k++) nhat[k] <= {counts[k], {FRAC{1'b0}}};
    end else if (update) begin
      for (int k = 0; k < Q; k++)
        nhat[k] <= NW'($signed({2'b00, nhat[k]}) + (diff[k] >>> SHIFT));
    end
  end

endmodule
