// tb_sweep_sequencer: drives the sequencer with a model controller (done 35
// cycles after start) and a host that offers schedule entries after random
// delays, some long enough to force stalls. Checks: the preamble (init,
// then one controller run marked `first`), two update cycles per sweep
// (colour 0 then 1) directly after each controller run, 37 cycles per sweep
// when not stalled, that every sweep uses the beta of its step and that the
// controller of the sweep before it saw that step's beta*lambda, the total
// number of sweeps, and `done`.
module tb_sweep_sequencer;
  import potts_pkg::*;
  localparam int N_STEPS = 6;
  localparam int SPP = 3;

  logic clk = 0, rst = 1, start = 0;
  logic [31:0] sweeps_per_step;
  logic sched_valid, sched_ready;
  sched_entry_t sched_data;
  logic pdit_init, upd_en, upd_color;
  beta_t beta, beta_lambda;
  logic ctrl_start, ctrl_first, ctrl_done;
  logic busy, done, stall;
  logic [31:0] sweep_count;
  logic [2:0] step;
  int checks = 0, failures = 0;

  sweep_sequencer #(.N_STEPS(N_STEPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Model controller: done exactly 35 cycles after start.
  int ctrl_timer = 0;
  always_ff @(posedge clk) begin
    if (ctrl_start) ctrl_timer <= 35;
    else if (ctrl_timer > 0) ctrl_timer <= ctrl_timer - 1;
  end
  assign ctrl_done = (ctrl_timer == 1);

  // Host: entry i has beta = 8*(i+1)+1, beta*lambda = i+2. Entries are
  // offered after random pauses; entries 2 and 4 after 300 cycles, which
  // forces stalls.
  int sent = 0, host_wait = 0;
  always @(posedge clk) begin
    if (rst) begin
      sched_valid <= 0;
      sched_data  <= '0;
    end else if (sched_valid) begin
      if (sched_ready) begin
        sched_valid <= 0;
        sent      <= sent + 1;
        host_wait <= (sent + 1 == 2 || sent + 1 == 4) ? 300 : $urandom_range(0, 20);
      end
    end else if (sent < N_STEPS) begin
      if (host_wait > 0) host_wait <= host_wait - 1;
      else begin
        sched_valid            <= 1;
        sched_data.beta        <= beta_t'(8 * (sent + 1) + 1);
        sched_data.beta_lambda <= beta_t'(sent + 2);
      end
    end
  end

  // Monitor.
  int cyc = 0, last_upd0 = -1, sweeps_seen = 0, stall_cycles = 0, ctrl_runs = 0;
  int inits = 0, firsts = 0;
  int upd_in_sweep = 0;
  int last_ctrl_bl = -1;
  always @(negedge clk) if (!rst) begin
    cyc++;
    if (stall) stall_cycles++;
    if (pdit_init) inits++;
    if (ctrl_start) begin
      ctrl_runs++;
      if (ctrl_first) firsts++;
    end
    // beta*lambda as the controller's multiply cycle (33 after start) sees it
    if (ctrl_timer == 3) last_ctrl_bl = int'(beta_lambda);
    if (upd_en && !upd_color) begin
      int st;
      st = sweeps_seen / SPP;
      check(ctrl_done, "colour 0 update in the cycle the controller finishes");
      check(int'(beta) == 8 * (st + 1) + 1, $sformatf("sweep %0d beta %0d", sweeps_seen, beta));
      check(last_ctrl_bl == st + 2, $sformatf("sweep %0d controller bl %0d", sweeps_seen, last_ctrl_bl));
      if (last_upd0 >= 0 && !(sweeps_seen % SPP == 0 && (st == 2 || st == 4)))
        check(cyc - last_upd0 == 37, $sformatf("sweep period %0d", cyc - last_upd0));
      last_upd0 = cyc;
    end
    if (upd_en && upd_color) begin
      check(cyc == last_upd0 + 1, "colour 1 right after colour 0");
      sweeps_seen++;
    end
  end

  initial begin
    sweeps_per_step = SPP;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(sweeps_seen == N_STEPS * SPP, $sformatf("sweeps %0d", sweeps_seen));
    check(sweep_count == 32'(N_STEPS * SPP), "sweep_count");
    check(inits == 1, "one init");
    check(firsts == 1, "one first controller run");
    check(ctrl_runs == N_STEPS * SPP + 1, $sformatf("controller runs %0d", ctrl_runs));
    check(stall_cycles > 0, "stalls happened");
    check(!busy, "not busy when done");
    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
