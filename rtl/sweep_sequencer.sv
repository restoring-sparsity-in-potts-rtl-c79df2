// sweep_sequencer: runs a simulated-annealing job on the hybrid machine.
//
// The probabilistic subsystem and the feedback controller work one after the
// other. One Monte Carlo sweep is 37 cycles:
//   UPD0   update colour group 0 of the p-dits            (1 cycle)
//   UPD1   update colour group 1                          (1 cycle)
//   CTRL   controller: count, filter, multiply, broadcast (35 cycles)
// so the bias computed from the state at the end of sweep n is applied
// throughout sweep n+1. The annealing schedule is a staircase of N_STEPS
// steps (800 in the paper), each holding the same number of sweeps
// (`sweeps_per_step`, set by the host) and one pair (beta, beta*lambda).
// Before the first sweep the sequencer seeds and randomises the p-dits and
// runs the controller once, so the first sweep already sees a bias.
//
// Schedule input: the host offers entries on a valid/ready handshake
// (`sched_valid`, `sched_ready`, `sched_data`); the sequencer keeps one entry
// in a prefetch register. A new entry is taken when the controller starts
// after the last sweep of a step, so beta*lambda changes before the bias is
// recomputed and beta changes before the next sweep. If the next entry has
// not arrived by then, the sequencer stalls (`stall` high) with the p-dits
// and controller idle until it does. The 37-cycle sweep split and the
// staircase are the paper's; the handshake, the prefetch register, the
// stall and the preamble are this design's choices.
//
// Control: `start` (in IDLE or DONE) begins a job; `done` stays high after
// the controller has finished the final sweep, when `counts` of the
// controller hold the final population. `sweep_count` counts completed
// sweeps; `step` is the index of the schedule entry in use.
module sweep_sequencer
  import potts_pkg::*;
#(
  parameter int N_STEPS  = 800,
  localparam int STEP_W  = $clog2(N_STEPS + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [31:0]       sweeps_per_step,
  // schedule stream from the host
  input  logic              sched_valid,
  output logic              sched_ready,
  input  sched_entry_t      sched_data,
  // to the p-dit array
  output logic              pdit_init,
  output logic              upd_en,
  output logic              upd_color,
  output beta_t             beta,
  output beta_t             beta_lambda,
  // to the controller
  output logic              ctrl_start,
  output logic              ctrl_first,
  input  logic              ctrl_done,
  // status
  output logic              busy,
  output logic              done,
  output logic              stall,
  output logic [31:0]       sweep_count,
  output logic [STEP_W-1:0] step
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_CSTART, S_CWAIT, S_UPD1, S_DONE} seq_state_t;

  seq_state_t        st;
  sched_entry_t      cur, nxt;
  logic              nxt_valid;
  logic [STEP_W-1:0] fetched;
  logic [31:0]       sis;        // index of the current sweep within its step
  logic              preamble;   // controller run before the first sweep
  logic              final_sweep;
  logic [31:0]       spp;
  logic              last_of_step, need_swap;

  assign spp          = (sweeps_per_step == '0) ? 32'd1 : sweeps_per_step;
  assign last_of_step = (sis == spp - 1);
  assign need_swap    = preamble || (last_of_step && (32'(step) != N_STEPS - 1));

  assign sched_ready = busy && !nxt_valid && (32'(fetched) < N_STEPS);
  assign stall       = (st == S_CSTART) && need_swap && !nxt_valid;
  assign ctrl_start  = (st == S_CSTART) && !stall;
  assign ctrl_first  = preamble;
  assign pdit_init   = (st == S_INIT);
  assign upd_en      = ((st == S_CWAIT) && ctrl_done && !final_sweep) || (st == S_UPD1);
  assign upd_color   = (st == S_UPD1);
  assign beta        = cur.beta;
  assign beta_lambda = cur.beta_lambda;
  assign busy        = (st != S_IDLE) && (st != S_DONE);
  assign done        = (st == S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st          <= S_IDLE;
      cur         <= '0;
      nxt         <= '0;
      nxt_valid   <= 1'b0;
      fetched     <= '0;
      sis         <= '0;
      preamble    <= 1'b0;
      final_sweep <= 1'b0;
      sweep_count <= '0;
      step        <= '0;
    end else begin
      if (sched_valid && sched_ready) begin
        nxt       <= sched_data;
        nxt_valid <= 1'b1;
        fetched   <= fetched + 1'b1;
      end
      unique case (st)
        S_IDLE, S_DONE: begin
          if (start) begin
            st          <= S_INIT;
            nxt_valid   <= 1'b0;
            fetched     <= '0;
            sis         <= '0;
            step        <= '0;
            sweep_count <= '0;
            final_sweep <= 1'b0;
          end
        end
        S_INIT: begin
          preamble <= 1'b1;
          st       <= S_CSTART;
        end
        S_CSTART: begin
          if (!stall) begin
            st <= S_CWAIT;
            if (need_swap) begin
              cur       <= nxt;
              nxt_valid <= 1'b0;
            end
            if (preamble) begin
              preamble <= 1'b0;
            end else if (last_of_step) begin
              sis <= '0;
              if (32'(step) == N_STEPS - 1) final_sweep <= 1'b1;
              else                          step <= step + 1'b1;
            end else begin
              sis <= sis + 1;
            end
          end
        end
        S_CWAIT: begin
          if (ctrl_done) st <= final_sweep ? S_DONE : S_UPD1;
        end
        S_UPD1: begin
          sweep_count <= sweep_count + 1;
          st          <= S_CSTART;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Host handshake rule: an offered entry stays put until it is taken.
  a_sched_hold: assert property (@(posedge clk) disable iff (rst)
    sched_valid && !sched_ready && busy |=> sched_valid && $stable(sched_data));

endmodule
