// potts_mfc_top: hybrid Potts machine with mean-field constraints for
// balanced Q-way partitioning of an L x L x L nearest-neighbour cube.
//
// The probabilistic subsystem (pdit_array) holds one Q-state p-dit per
// vertex and minimises the cut: a p-dit is drawn toward the state of its
// neighbours. The balance constraint, which written exactly would couple
// every vertex to every other, is replaced by a mean-field bias: the
// classical controller (mfc_controller) counts the population of each state
// after every sweep, low-pass filters it and broadcasts
// B[k] = beta*lambda * Nhat[k]; a p-dit in an over-full state is then pushed
// out of it. The sweep_sequencer alternates the two halves (2 + 35 = 37
// cycles per sweep) and steps through the host-supplied annealing staircase.
// Defaults are the paper's FPGA configuration: L = 10 (1000 p-dits,
// 2700 edges), Q = 3 partitions, a 32-cycle population count, alpha = 1/8 and
// an 800-step schedule.
//
// Ports: the schedule stream and the readout take the place of the host's
// PCIe link, which is outside this design. `start` begins a job,
// `sweeps_per_step` sets the sweeps per schedule step, `seed` seeds the
// random generators. After `done` rises, `states` is the partition found and
// `counts` the number of vertices in each part, `nhat` the filtered counts
// (NHAT_FRAC fractional bits) and `bias` the broadcast bias. `flips` is the number of
// p-dits that changed state in the current cycle, `stall` marks cycles spent
// waiting for a schedule entry.
module potts_mfc_top
  import potts_pkg::*;
#(
  parameter int L           = 10,
  parameter int Q           = 3,
  parameter int POP_CYCLES  = 32,
  parameter int ALPHA_SHIFT = 3,
  parameter int N_STEPS     = 800,
  localparam int N          = L * L * L,
  localparam int SW         = (Q > 2) ? $clog2(Q) : 1,
  localparam int CW         = $clog2(N + 1),
  localparam int STEP_W     = $clog2(N_STEPS + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [31:0]       sweeps_per_step,
  input  logic [31:0]       seed,
  input  logic              sched_valid,
  output logic              sched_ready,
  input  sched_entry_t      sched_data,
  output logic              busy,
  output logic              done,
  output logic              stall,
  output logic [31:0]       sweep_count,
  output logic [STEP_W-1:0] step,
  output logic [SW-1:0]     states [N],
  output logic [CW-1:0]     counts [Q],
  output logic [CW+NHAT_FRAC-1:0] nhat [Q],
  output energy_t           bias   [Q],
  output logic [CW-1:0]     flips
);

  logic  pdit_init, upd_en, upd_color, ctrl_start, ctrl_first, ctrl_done, ctrl_busy;
  beta_t beta, beta_lambda;

  sweep_sequencer #(.N_STEPS(N_STEPS)) u_seq (
    .clk, .rst, .start, .sweeps_per_step,
    .sched_valid, .sched_ready, .sched_data,
    .pdit_init, .upd_en, .upd_color, .beta, .beta_lambda,
    .ctrl_start, .ctrl_first, .ctrl_done,
    .busy, .done, .stall, .sweep_count, .step
  );

  pdit_array #(.L(L), .Q(Q)) u_array (
    .clk, .rst,
    .init (pdit_init),
    .seed,
    .upd_en, .upd_color, .beta, .beta_lambda, .bias,
    .states,
    .flips
  );

  mfc_controller #(.N(N), .Q(Q), .CYCLES(POP_CYCLES), .SHIFT(ALPHA_SHIFT)) u_ctrl (
    .clk, .rst,
    .start (ctrl_start),
    .first (ctrl_first),
    .states, .beta_lambda,
    .counts, .nhat, .bias,
    .busy  (ctrl_busy),
    .done  (ctrl_done)
  );

  // The p-dits must hold still while the controller counts them.
  a_no_update_while_counting: assert property (@(posedge clk) disable iff (rst)
    ctrl_busy |-> !upd_en);

endmodule
