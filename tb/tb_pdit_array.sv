// tb_pdit_array: a 4 x 4 x 4 array (64 p-dits, Q = 3) against a model of
// the whole lattice. The model builds the open-boundary cubic neighbour
// lists itself, seeds each node's generator from the hashed seed, and for
// every update cycle predicts every node's next state: nodes of the other
// colour must hold, nodes of the active colour follow the reference p-dit
// decision taken from the snapshot before the edge. Beta, beta*lambda and
// the bias vector are varied so both cut-dominated and balance-dominated
// moves occur. The `flips` output is checked against the model as well.
module tb_pdit_array;
  import potts_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 4, Q = 3, N = L * L * L;

  logic clk = 0, rst = 1, init = 0, upd_en = 0, upd_color = 0;
  logic [31:0] seed;
  beta_t beta, beta_lambda;
  energy_t bias [Q];
  logic [1:0] states [N];
  logic [6:0] flips;
  int checks = 0, failures = 0;

  pdit_array #(.L(L), .Q(Q)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  int unsigned m_rng [N];
  int m_st [N];
  int nb [N][6];
  bit nv [N][6];
  int col [N];

  initial begin
    int edges;
    int flips_total;
    edges = 0;
    for (int z = 0; z < L; z++)
      for (int y = 0; y < L; y++)
        for (int x = 0; x < L; x++) begin
          int i;
          i = x + L * y + L * L * z;
          col[i] = (x + y + z) % 2;
          nv[i][0] = x > 0;     nb[i][0] = i - 1;
          nv[i][1] = x < L - 1; nb[i][1] = i + 1;
          nv[i][2] = y > 0;     nb[i][2] = i - L;
          nv[i][3] = y < L - 1; nb[i][3] = i + L;
          nv[i][4] = z > 0;     nb[i][4] = i - L * L;
          nv[i][5] = z < L - 1; nb[i][5] = i + L * L;
          for (int j = 0; j < 6; j++) if (nv[i][j]) edges++;
        end
    check(edges / 2 == 3 * L * L * (L - 1), "edge count of the model lattice");

    seed = 32'hC0FFEE11;
    beta = '0; beta_lambda = '0;
    for (int k = 0; k < Q; k++) bias[k] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int i = 0; i < N; i++) begin
      m_rng[i] = ref_mix32(seed ^ i) | 1;
      m_st[i]  = int'((longint'(m_rng[i] >> 16) * Q) >> 16);
      check(int'(states[i]) == m_st[i], $sformatf("init state %0d", i));
    end

    flips_total = 0;
    for (int it = 0; it < 600; it++) begin
      int c;
      int exp_st [N];
      int unsure [N];
      int exp_flips;
      bit exact;
      c = it % 2;
      beta        = beta_t'((it < 300) ? $urandom_range(0, 20) : $urandom_range(20, 511));
      beta_lambda = beta_t'($urandom_range(0, 16));
      for (int k = 0; k < Q; k++) bias[k] = energy_t'($urandom_range(0, (it % 4 == 0) ? 2000 : 40));
      upd_en = 1; upd_color = c[0];
      exp_flips = 0;
      exact = 1;
      for (int i = 0; i < N; i++) begin
        exp_st[i] = m_st[i];
        unsure[i] = 0;
        if (col[i] == c) begin
          int nbs [6];
          longint b8 [8];
          ref_dec_t d;
          for (int j = 0; j < 6; j++) nbs[j] = nv[i][j] ? m_st[nb[i][j]] : 0;
          for (int k = 0; k < 8; k++) b8[k] = (k < Q) ? longint'(bias[k]) : 0;
          d = ref_decide(Q, m_st[i], m_rng[i], nbs, nv[i], longint'(beta), longint'(beta_lambda), b8);
          if (d.verdict == 1) begin exp_st[i] = d.cand; exp_flips++; end
          if (d.verdict == -1) begin unsure[i] = 1; exact = 0; end
          m_rng[i] = ref_xorshift(m_rng[i]);
        end
      end
      #1;
      if (exact) check(int'(flips) == exp_flips, $sformatf("flips %0d exp %0d", flips, exp_flips));
      @(negedge clk);
      upd_en = 0;
      for (int i = 0; i < N; i++) begin
        if (unsure[i]) m_st[i] = int'(states[i]);
        else begin
          check(int'(states[i]) == exp_st[i],
                $sformatf("it %0d node %0d state %0d exp %0d", it, i, states[i], exp_st[i]));
          m_st[i] = exp_st[i];
        end
      end
      flips_total += exp_flips;
    end
    check(flips_total > 100, $sformatf("enough moves happened (%0d)", flips_total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
