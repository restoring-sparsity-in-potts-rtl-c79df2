// tb_potts2d: the 2D Potts validation workload run on the p-dit cell.
// An L x L square lattice with periodic boundaries is built from pdit_update
// cells (four neighbours each, the two z slots masked off) with the balance
// term switched off (beta*lambda = 0, zero bias), which makes it the plain
// ferromagnetic Q-state Potts model H = -sum_<ij> delta(s_i, s_j). Three
// lattices with Q = 2, 3 and 4 run side by side. The two checkerboard colours
// are updated on alternate cycles, as in the cube.
//
// For a ladder of inverse temperatures (Q6.3 steps) the bench thermalises,
// then averages the fraction of unlike bonds u and the order parameter
// m = (Q * max_k n_k / N - 1) / (Q - 1). Checks:
//   * u falls monotonically as beta rises,
//   * far above Tc (beta = 0.25) u is near its high-temperature value
//     (2/3 at beta = 0): u > 0.5,
//     and m is small,
//   * well below Tc (beta = 2) the lattice orders: m > 0.8, u < 0.1,
//   * u interpolated linearly between ladder points to the exact
//     beta_c = ln(1 + sqrt(Q)) is within 0.06 of the exact critical value
//     1 - (1 + 1/sqrt(Q)) / 2 (Q=2: 0.881, 0.146; Q=3: 1.005, 0.211;
//     Q=4: 1.099, 0.25).
// Every sweep also checks that the lattice holds legal states only.
module tb_potts2d;
  import potts_pkg::*;

  localparam int L  = 16;
  localparam int N  = L * L;
  localparam int NQ = 3;             // lattices for Q = 2, 3, 4
  localparam int NB = 9;
  localparam int THERM = 1000;
  localparam int MEAS  = 3000;

  // beta in Q6.3 (value * 8)
  localparam int BETAS [NB] = '{2, 4, 6, 7, 8, 9, 10, 12, 16};
  // exact critical point and unlike-bond fraction there
  localparam real BC [NQ] = '{0.8814, 1.0051, 1.0986};
  localparam real UC [NQ] = '{0.1464, 0.2113, 0.25};

  logic clk = 0, rst = 1, init = 0;
  logic [1:0] en_color;
  beta_t beta;
  beta_t beta_lambda;
  logic [1:0] st [NQ][N];

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  assign beta_lambda = '0;
  for (genvar qi = 0; qi < NQ; qi++) begin : g_q
    localparam int Q  = qi + 2;
    localparam int SW = (Q > 2) ? $clog2(Q) : 1;
    energy_t bias [Q];
    always_comb for (int k = 0; k < Q; k++) bias[k] = '0;
    for (genvar y = 0; y < L; y++) begin : g_y
      for (genvar x = 0; x < L; x++) begin : g_x
        localparam int I = y * L + x;
        logic [SW-1:0] nbr [6];
        logic [SW-1:0] s_o, cand;
        logic acc;
        assign nbr[0] = SW'(st[qi][y * L + (x + L - 1) % L]);
        assign nbr[1] = SW'(st[qi][y * L + (x + 1) % L]);
        assign nbr[2] = SW'(st[qi][((y + L - 1) % L) * L + x]);
        assign nbr[3] = SW'(st[qi][((y + 1) % L) * L + x]);
        assign nbr[4] = '0;
        assign nbr[5] = '0;
        assign st[qi][I] = 2'(s_o);
        pdit_update #(.Q(Q), .MAX_DEG(6)) u_p (
          .clk, .rst, .init,
          .seed(mix32(32'hC0FFEE ^ 32'(I) ^ (32'(qi) << 16)) | 32'h1),
          .en(en_color[(x + y) % 2]),
          .nbr, .nbr_valid(6'b001111),
          .beta, .beta_lambda, .bias,
          .state(s_o), .cand, .accept(acc)
        );
      end
    end
  end

  initial begin
    repeat (2 * NB * (THERM + MEAS) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real unlike_frac(input int qi);
    int u = 0;
    for (int y = 0; y < L; y++)
      for (int x = 0; x < L; x++) begin
        if (st[qi][y * L + x] != st[qi][y * L + (x + 1) % L]) u++;
        if (st[qi][y * L + x] != st[qi][((y + 1) % L) * L + x]) u++;
      end
    return real'(u) / real'(2 * N);
  endfunction

  function automatic real order_param(input int qi);
    int n [4];
    int mx = 0;
    int q = qi + 2;
    for (int k = 0; k < 4; k++) n[k] = 0;
    for (int i = 0; i < N; i++) n[st[qi][i]]++;
    for (int k = 0; k < 4; k++) if (n[k] > mx) mx = n[k];
    return (real'(q) * real'(mx) / real'(N) - 1.0) / real'(q - 1);
  endfunction

  function automatic bit legal(input int qi);
    for (int i = 0; i < N; i++) if (32'(st[qi][i]) >= qi + 2) return 0;
    return 1;
  endfunction

  real u_avg [NQ][NB];
  real m_avg [NQ][NB];

  initial begin
    en_color = 2'b00;
    beta = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    init <= 1;
    @(posedge clk);
    init <= 0;
    for (int b = 0; b < NB; b++) begin
      real us [NQ], ms [NQ];
      for (int q = 0; q < NQ; q++) begin
        us[q] = 0.0;
        ms[q] = 0.0;
      end
      beta <= beta_t'(BETAS[b]);
      for (int s = 0; s < THERM + MEAS; s++) begin
        en_color <= 2'b01;
        @(posedge clk);
        en_color <= 2'b10;
        @(posedge clk);
        en_color <= 2'b00;
        #1;
        for (int q = 0; q < NQ; q++) begin
          if (s >= THERM) begin
            us[q] += unlike_frac(q);
            ms[q] += order_param(q);
          end
          if (s % 100 == 0)
            check(legal(q), $sformatf("Q=%0d: illegal state at beta=%0d/8", q + 2, BETAS[b]));
        end
      end
      for (int q = 0; q < NQ; q++) begin
        u_avg[q][b] = us[q] / MEAS;
        m_avg[q][b] = ms[q] / MEAS;
        $display("Q=%0d beta=%0.3f T=%0.3f unlike=%0.4f m=%0.4f", q + 2,
                 BETAS[b] / 8.0, 8.0 / BETAS[b], u_avg[q][b], m_avg[q][b]);
      end
    end

    for (int q = 0; q < NQ; q++) begin
      for (int b = 1; b < NB; b++)
        check(u_avg[q][b] < u_avg[q][b - 1],
              $sformatf("Q=%0d: unlike fraction not falling at beta=%0d/8", q + 2, BETAS[b]));
      check(u_avg[q][0] > 0.5 * (1.0 - 1.0 / (q + 2)), $sformatf("Q=%0d: beta=0.25 not disordered", q + 2));
      check(m_avg[q][0] < 0.2, $sformatf("Q=%0d: beta=0.25 order parameter too large", q + 2));
      check(u_avg[q][NB - 1] < 0.1, $sformatf("Q=%0d: beta=2 too many unlike bonds", q + 2));
      check(m_avg[q][NB - 1] > 0.8, $sformatf("Q=%0d: beta=2 not ordered", q + 2));
      for (int b = 0; b + 1 < NB; b++) begin
        real b0, b1, uc;
        b0 = BETAS[b] / 8.0;
        b1 = BETAS[b + 1] / 8.0;
        if (BC[q] >= b0 && BC[q] < b1) begin
          uc = u_avg[q][b] + (u_avg[q][b + 1] - u_avg[q][b]) * (BC[q] - b0) / (b1 - b0);
          $display("Q=%0d: unlike fraction at beta_c %0.4f, exact %0.4f", q + 2, uc, UC[q]);
          check(uc > UC[q] - 0.06 && uc < UC[q] + 0.06,
                $sformatf("Q=%0d: unlike fraction %0.3f at beta_c far from exact %0.3f",
                          q + 2, uc, UC[q]));
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
