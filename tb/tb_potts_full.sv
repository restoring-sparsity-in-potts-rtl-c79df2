// tb_potts_full: one complete annealing job at the full default size, the
// configuration of the paper's FPGA experiment: a 10 x 10 x 10 cube (1000
// p-dits, 2700 edges) split into Q = 3 parts, an 800-step staircase
// approximating the linear temperature drop T0 = 8 -> Tf = 0.01, ten sweeps
// per step (8000 sweeps), lambda = 0.1 and alpha = 1/8. The host model withholds two
// entries for a while to exercise the stall. Checked: 800 sweeps, 37 cycles
// per unstalled sweep, counts consistent with the state vector, a cut
// within 20% of the reference minimum balanced cut of 177, the paper's
// balance target (no part larger than 1.01 * N/Q), and that stall, step
// changes, moves in both colour groups, the mean-field bias and uphill
// moves all occurred. The run prints the final cut next to the reference
// cut of 177 for this instance.
module tb_potts_full;
  import potts_pkg::*;
  localparam int L = 10, Q = 3, N = L * L * L;
  localparam int N_STEPS = 800, SPP = 10;

  logic clk = 0, rst = 1, start = 0;
  logic [31:0] sweeps_per_step, seed;
  logic sched_valid, sched_ready;
  sched_entry_t sched_data;
  logic busy, done, stall;
  logic [31:0] sweep_count;
  logic [9:0] step;
  logic [1:0] states [N];
  logic [9:0] counts [Q];
  logic [17:0] nhat [Q];
  energy_t bias [Q];
  logic [9:0] flips;
  int checks = 0, failures = 0;

  potts_mfc_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog: step %0d sweeps %0d st %0d done %0d", step, sweep_count, dut.u_seq.st, done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int q63(input real v);
    int r;
    r = int'(v * 8.0);
    if (r > 511) r = 511;
    return r;
  endfunction

  function automatic int cut_of();
    int c;
    c = 0;
    for (int z = 0; z < L; z++)
      for (int y = 0; y < L; y++)
        for (int x = 0; x < L; x++) begin
          int i;
          i = x + L * y + L * L * z;
          if (x < L - 1 && states[i] != states[i + 1]) c++;
          if (y < L - 1 && states[i] != states[i + L]) c++;
          if (z < L - 1 && states[i] != states[i + L * L]) c++;
        end
    return c;
  endfunction

  // Host: staircase approximation of the linear temperature drop. Entries
  // 100 and 500 are offered only after a 1000-cycle pause.
  function automatic sched_entry_t entry(input int s);
    real t, b;
    sched_entry_t e;
    t = (0.01 - 8.0) * real'(s) / real'(N_STEPS) + 8.0;
    b = 1.0 / t;
    e.beta        = beta_t'(q63(b));
    e.beta_lambda = beta_t'(q63(b * 0.1));
    return e;
  endfunction

  int host_idx = 0, host_wait = 0;
  always @(posedge clk) begin
    if (rst) begin
      sched_valid <= 0;
      sched_data  <= '0;
    end else if (sched_valid) begin
      if (sched_ready) begin
        sched_valid <= 0;
        host_idx  <= host_idx + 1;
        host_wait <= (host_idx + 1 == 100 || host_idx + 1 == 500) ? 1000 : 0;
      end
    end else if (host_idx < N_STEPS) begin
      if (host_wait > 0) host_wait <= host_wait - 1;
      else begin
        sched_valid <= 1;
        sched_data  <= entry(host_idx);
      end
    end
  end

  // Mechanism counters.
  int n_stall = 0, n_step = 0, n_flip0 = 0, n_flip1 = 0, n_bias = 0, n_uphill = 0;
  int last_upd0 = -1, cyc = 0, bad_period = 0, periods = 0;
  int prev_step = 0;
  int cut_before;
  always @(negedge clk) if (!rst) begin
    cyc++;
    if (stall) n_stall++;
    if (int'(step) != prev_step) begin n_step++; prev_step = int'(step); end
    if (dut.upd_en) begin
      if (!dut.upd_color) begin
        if (last_upd0 >= 0 && !dut.u_seq.preamble) begin
          periods++;
          if (cyc - last_upd0 != 37 && n_stall_at_last == n_stall) bad_period++;
        end
        last_upd0 = cyc;
        n_stall_at_last = n_stall;
      end
      if (flips != 0) begin
        if (dut.upd_color) n_flip1++; else n_flip0++;
      end
      if (bias[0] != bias[1] || bias[1] != bias[2]) n_bias++;
      cut_before = cut_of();
    end
  end
  int n_stall_at_last = 0;
  always @(posedge clk) if (!rst && dut.upd_en) begin
    #1;
    if (cut_of() > cut_before) n_uphill++;
  end

  initial begin
    int cut0, cut1, maxdev, maxpart;
    int e [Q];
    sweeps_per_step = SPP;
    seed = 32'h13579bdf;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    cut0 = cut_of();
    while (!done) @(negedge clk);
    cut1 = cut_of();
    for (int k = 0; k < Q; k++) e[k] = 0;
    for (int i = 0; i < N; i++) e[states[i]]++;
    maxdev = 0;
    maxpart = 0;
    for (int k = 0; k < Q; k++) begin
      check(int'(counts[k]) == e[k], $sformatf("count[%0d] %0d exp %0d", k, counts[k], e[k]));
      if (e[k] * Q - N > maxdev) maxdev = e[k] * Q - N;
      if (e[k] > maxpart) maxpart = e[k];
      if (N - e[k] * Q > maxdev) maxdev = N - e[k] * Q;
    end
    $display("cut %0d -> %0d, counts %0d %0d %0d, cycles %0d", cut0, cut1, e[0], e[1], e[2], cyc);
    $display("stall %0d step %0d flip0 %0d flip1 %0d bias %0d uphill %0d periods %0d",
             n_stall, n_step, n_flip0, n_flip1, n_bias, n_uphill, periods);
    check(sweep_count == 32'(N_STEPS * SPP), $sformatf("sweep_count %0d", sweep_count));
    check(bad_period == 0, $sformatf("%0d sweeps not 37 cycles", bad_period));
    check(periods == N_STEPS * SPP - 1, $sformatf("periods %0d", periods));
    check(100 * Q * maxpart <= 101 * N, $sformatf("imbalance: largest |N_k - N/Q| = %0d/3", maxdev));
    check(cut1 * 3 < cut0, "cut reduced well below the random start");
    check(cut1 * 10 <= 177 * 12, $sformatf("cut %0d", cut1));
    $display("final cut %0d (reference minimum balanced cut 177)", cut1);
    check(n_stall > 0, "stall happened");
    check(n_step == N_STEPS - 1, $sformatf("step changes %0d", n_step));
    check(n_flip0 > 0 && n_flip1 > 0, "moves in both colour groups");
    check(n_bias > 0, "mean-field bias active");
    check(n_uphill > 0, "uphill move accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
