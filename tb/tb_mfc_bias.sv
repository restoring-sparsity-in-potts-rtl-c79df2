// tb_mfc_bias: random beta*lambda (Q6.3, both signs) and filtered counts;
// after the multiply and distribute cycles each bias must equal
// floor(beta_lambda * nhat / 2^8), and the register must hold otherwise.
module tb_mfc_bias;
  import potts_pkg::*;
  localparam int Q = 3, NW = 18;

  logic clk = 0, rst = 1, mul_en = 0, dist_en = 0;
  beta_t beta_lambda;
  logic [NW-1:0] nhat [Q];
  energy_t bias [Q];
  int checks = 0, failures = 0;

  mfc_bias #(.Q(Q), .NW(NW), .FRAC(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    longint e [Q];
    beta_lambda = '0;
    for (int k = 0; k < Q; k++) nhat[k] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int it = 0; it < 500; it++) begin
      int bl;
      bl = (it % 5 == 0) ? 511 : $urandom_range(0, 1023) - 512;
      beta_lambda = beta_t'(bl);
      for (int k = 0; k < Q; k++) nhat[k] = NW'((it % 5 == 0) ? 256000 : $urandom_range(0, 256000));
      for (int k = 0; k < Q; k++) begin
        longint p;
        p = longint'(bl) * longint'(nhat[k]);
        e[k] = (p >= 0) ? p / 256 : -((-p + 255) / 256);
      end
      @(negedge clk); mul_en = 1;
      @(negedge clk); mul_en = 0; dist_en = 1;
      // change inputs during distribute: must not matter
      beta_lambda = '0;
      @(negedge clk); dist_en = 0;
      for (int k = 0; k < Q; k++)
        check(longint'(bias[k]) == e[k], $sformatf("bias[%0d]=%0d exp %0d (bl=%0d)", k, bias[k], e[k], bl));
      @(negedge clk);
      for (int k = 0; k < Q; k++) check(longint'(bias[k]) == e[k], "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
