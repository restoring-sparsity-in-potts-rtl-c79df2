// batched_popcount: counts how many p-dits sit in each of the Q states.
//
// The N states are split into CYCLES batches of BATCH = ceil(N/CYCLES)
// consecutive p-dits (the last batch padded with empty slots). Batch b is
// counted in the b-th cycle after `start` and added to Q accumulators, so a
// full count takes exactly CYCLES clock cycles (32 in the paper's prototype,
// which for N = 1000 means batches of 32 p-dits). The 32-cycle batched count
// is the paper's; the batch order and the accumulate-per-cycle structure are
// this design's choice.
//
// Timing: `start` is the cycle in which batch 0 is counted; batches
// 1..CYCLES-1 follow in the next CYCLES-1 cycles. `done` is high for one
// cycle right after the last batch, and `counts` holds the result from then
// until the next `start`. The states must not change while counting.
module batched_popcount #(
  parameter int N      = 1000,
  parameter int Q      = 3,
  parameter int CYCLES = 32,
  localparam int SW    = (Q > 2) ? $clog2(Q) : 1,
  localparam int CW    = $clog2(N + 1),
  localparam int BATCH = (N + CYCLES - 1) / CYCLES,
  localparam int BW    = (CYCLES > 1) ? $clog2(CYCLES) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [SW-1:0] states [N],
  output logic [CW-1:0] counts [Q],
  output logic          busy,
  output logic          done
);

  logic [BW-1:0] b;        // batch counted in this cycle
  logic [CW-1:0] part [Q]; // counts of the current batch
  logic          active;

  assign active = start || busy;

  always_comb begin
    for (int k = 0; k < Q; k++) part[k] = '0;
    for (int j = 0; j < BATCH; j++) begin
      int idx;
      idx = (start ? 0 : int'(b)) * BATCH + j;
      if (idx < N) begin
        for (int k = 0; k < Q; k++)
          if (32'(states[idx]) == k) part[k] = part[k] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      b    <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      for (int k = 0; k < Q; k++) counts[k] <= '0;
    end else begin
      done <= 1'b0;
      if (active) begin
        for (int k = 0; k < Q; k++)
          counts[k] <= (start ? '0 : counts[k]) + part[k];
        if (start) begin
          b    <= BW'(1);
          busy <= (CYCLES > 1);
          done <= (CYCLES == 1);
        end else if (32'(b) == CYCLES - 1) begin
          b    <= '0;
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          b <= b + 1'b1;
        end
      end
    end
  end

endmodule
