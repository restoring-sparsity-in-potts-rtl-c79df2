// tb_pdit_update: checks one p-dit against a reference model.
// The model mirrors the p-dit's xorshift32 generator, picks the same ring
// candidate, computes beta*E from the neighbour states and the bias vector
// and decides acceptance with a real-valued sigmoid. Every cycle the
// candidate, the acceptance and the next state are compared (decisions
// within 1.5/65536 of the threshold are not called). A second phase checks
// the acceptance frequency at several fixed energies against sigmoid(x).
module tb_pdit_update;
  import potts_pkg::*;
  import tb_ref_pkg::*;

  localparam int Q = 3;
  localparam int SW = 2;

  logic clk = 0, rst = 1, init = 0, en = 0;
  logic [31:0] seed;
  logic [SW-1:0] nbr [6];
  logic [5:0] nbr_valid;
  beta_t beta, beta_lambda;
  energy_t bias [Q];
  logic [SW-1:0] state, cand;
  logic accept;

  int checks = 0, failures = 0;

  pdit_update #(.Q(Q), .MAX_DEG(6)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  int unsigned m_rng;
  int m_state;

  task automatic randomize_inputs(input bit small_energy);
    for (int j = 0; j < 6; j++) nbr[j] = SW'($urandom_range(0, Q - 1));
    nbr_valid = 6'($urandom);
    beta = beta_t'(small_energy ? $urandom_range(0, 6) : $urandom_range(0, 511));
    beta_lambda = beta_t'($urandom_range(0, small_energy ? 3 : 60));
    for (int k = 0; k < Q; k++)
      bias[k] = energy_t'(small_energy ? $urandom_range(0, 40) : $urandom_range(0, 64000));
  endtask

  task automatic step_and_check();
    int nb[6];
    bit nv[6];
    longint b8[8];
    ref_dec_t d;
    for (int j = 0; j < 6; j++) begin nb[j] = int'(nbr[j]); nv[j] = nbr_valid[j]; end
    for (int k = 0; k < 8; k++) b8[k] = (k < Q) ? longint'(bias[k]) : 0;
    en = 1;
    #1;
    d = ref_decide(Q, m_state, m_rng, nb, nv, longint'(beta), longint'(beta_lambda), b8);
    check(int'(cand) == d.cand, $sformatf("cand %0d exp %0d", cand, d.cand));
    if (d.verdict >= 0)
      check(accept == d.verdict[0], $sformatf("accept %0d exp %0d (e8=%0d rng=%h)", accept, d.verdict, d.e8, m_rng));
    @(posedge clk);
    #1;
    if (d.verdict == 1) m_state = d.cand;
    else if (d.verdict == -1) m_state = int'(state);
    m_rng = ref_xorshift(m_rng);
    check(int'(state) == m_state, $sformatf("state %0d exp %0d", state, m_state));
    en = 0;
  endtask

  initial begin
    int accepts;
    int trials;
    seed = 32'h2468ace1;
    nbr_valid = '0;
    for (int j = 0; j < 6; j++) nbr[j] = '0;
    beta = '0; beta_lambda = '0;
    for (int k = 0; k < Q; k++) bias[k] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    init = 1;
    @(posedge clk);
    #1;
    init = 0;
    m_rng = seed;
    m_state = int'((longint'(seed[31:16]) * Q) >> 16);
    check(int'(state) == m_state, "initial state");

    // Phase 1: cycle-by-cycle comparison with the model.
    for (int it = 0; it < 4000; it++) begin
      randomize_inputs(it % 2 == 0);
      step_and_check();
    end

    // Hold still for a cycle: state must not change without en.
    begin
      int s0;
      s0 = int'(state);
      @(posedge clk); #1;
      check(int'(state) == s0, "state held without enable");
    end

    // Phase 2: acceptance frequency for fixed energies. All neighbours
    // invalid, bias = 0, so beta*E = -beta*lambda; we sweep beta*lambda.
    for (int bl = -24; bl <= 24; bl += 8) begin
      real p_exp;
      real f;
      accepts = 0;
      trials  = 4000;
      nbr_valid   = '0;
      beta        = '0;
      beta_lambda = beta_t'(bl);
      for (int k = 0; k < Q; k++) bias[k] = '0;
      for (int t = 0; t < trials; t++) begin
        en = 1;
        #1;
        if (accept) accepts++;
        @(posedge clk);
        #1;
        m_rng = ref_xorshift(m_rng);
      end
      en = 0;
      m_state = int'(state);
      p_exp = 1.0 / (1.0 + $exp(real'(bl) / 8.0));
      f = real'(accepts) / real'(trials);
      check(f > p_exp - 0.03 && f < p_exp + 0.03,
            $sformatf("acceptance freq %f exp %f at beta*E=%f", f, p_exp, -real'(bl) / 8.0));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
