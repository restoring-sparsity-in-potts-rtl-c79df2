// pdit_array: the probabilistic subsystem, L x L x L p-dits wired as a
// nearest-neighbour cubic lattice with open boundaries.
//
// Node (x,y,z) has index i = x + L*y + L*L*z and is connected to its up to six
// lattice neighbours, giving 3*L*L*(L-1) edges (2700 for L = 10). The lattice
// is bipartite: nodes with even x+y+z form colour group 0, the others colour
// group 1. No two nodes of one group are neighbours, so a whole group can be
// updated in the same clock cycle from a consistent snapshot of the other
// group; a full Monte Carlo sweep is therefore two cycles (upd_en with
// upd_color = 0, then with upd_color = 1). The cube graph, its size and the
// two-cycle sweep of both colour groups follow the paper; the hard-wired
// (rather than memory-held) graph and the seeding scheme are this design's.
//
// Interface: `init` seeds every p-dit's generator with mix32(seed ^ index)
// and draws its random initial state. beta, beta*lambda and the bias vector
// are broadcast to all p-dits. `states` shows every p-dit's state;
// `flips` counts the p-dits that changed state in the current update cycle.
module pdit_array
  import potts_pkg::*;
#(
  parameter int L       = 10,
  parameter int Q       = 3,
  localparam int N      = L * L * L,
  localparam int SW     = (Q > 2) ? $clog2(Q) : 1,
  localparam int FLIP_W = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              init,
  input  logic [31:0]       seed,
  input  logic              upd_en,
  input  logic              upd_color,
  input  beta_t             beta,
  input  beta_t             beta_lambda,
  input  energy_t           bias   [Q],
  output logic [SW-1:0]     states [N],
  output logic [FLIP_W-1:0] flips
);

  logic [N-1:0] acc_flip;

  for (genvar z = 0; z < L; z++) begin : g_z
    for (genvar y = 0; y < L; y++) begin : g_y
      for (genvar x = 0; x < L; x++) begin : g_x
        localparam int I   = x + L * y + L * L * z;
        localparam bit COL = ((x + y + z) % 2) == 1;
        logic [SW-1:0] nbr [6];
        logic [5:0]    nv;
        logic [SW-1:0] cand;
        logic          acc;
        logic [31:0]   nseed;

        // Neighbour order: -x, +x, -y, +y, -z, +z.
        assign nbr[0] = (x > 0)     ? states[(x > 0     ? I - 1     : I)] : '0;
        assign nbr[1] = (x < L - 1) ? states[(x < L - 1 ? I + 1     : I)] : '0;
        assign nbr[2] = (y > 0)     ? states[(y > 0     ? I - L     : I)] : '0;
        assign nbr[3] = (y < L - 1) ? states[(y < L - 1 ? I + L     : I)] : '0;
        assign nbr[4] = (z > 0)     ? states[(z > 0     ? I - L * L : I)] : '0;
        assign nbr[5] = (z < L - 1) ? states[(z < L - 1 ? I + L * L : I)] : '0;
        assign nv = {z < L - 1, z > 0, y < L - 1, y > 0, x < L - 1, x > 0};

        assign nseed = mix32(seed ^ 32'(I)) | 32'h1;

        pdit_update #(.Q(Q), .MAX_DEG(6)) u_pdit (
          .clk, .rst, .init,
          .seed       (nseed),
          .en         (upd_en && (upd_color == COL)),
          .nbr        (nbr),
          .nbr_valid  (nv),
          .beta, .beta_lambda, .bias,
          .state      (states[I]),
          .cand       (cand),
          .accept     (acc)
        );

        assign acc_flip[I] = upd_en && (upd_color == COL) && acc && (cand != states[I]);
      end
    end
  end

  always_comb begin
    flips = '0;
    for (int i = 0; i < N; i++) flips = flips + FLIP_W'(acc_flip[i]);
  end

endmodule
