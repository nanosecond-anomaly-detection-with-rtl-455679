// distance_processor -- turns the T tree estimates into the anomaly score.
//
// For every tree t a distance_unit computes the L1 distance between the
// event x and that tree's estimate x_hat[t]; a distance_sum adds the T
// distances. The result is the anomaly score
//   score = sum over t, v of |x[v] - x_hat[t][v]|.
// The per-tree distances are also brought out, registered once more so
// that they belong to the same event as score, as a diagnostic of which
// trees find the event unusual (this output is this design's addition).
//
// x must be presented in the same clock as the estimates it belongs to;
// the processor top delays its copy of x to match the tree engines.
//
// Timing: score, tree_dist and out_valid follow the inputs by two clocks,
// one event per clock. The score width is exact for the worst case
// T * V * (2^N - 1).
module distance_processor #(
  parameter int unsigned T = ae_pkg::T_DEF,
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned N = ae_pkg::N_DEF,
  localparam int unsigned DW = ae_pkg::tree_dist_width(V, N),
  localparam int unsigned SW = $clog2(T * ((1 << DW) - 1) + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [V-1:0][N-1:0]           x,
  input  logic [T-1:0][V-1:0][N-1:0]    x_hat,
  output logic [T-1:0][DW-1:0]          tree_dist,
  output logic                          out_valid,
  output logic [SW-1:0]                 score
);

  logic [T-1:0]          dist_valid;
  logic [T-1:0][DW-1:0]  tdist;

  for (genvar t = 0; t < T; t++) begin : g_tree
    distance_unit #(.V(V), .N(N)) u_dist (
      .clk, .rst_n,
      .in_valid (in_valid),
      .x        (x),
      .x_hat    (x_hat[t]),
      .out_valid(dist_valid[t]),
      .distance (tdist[t])
    );
  end

  distance_sum #(.T(T), .DW(DW)) u_sum (
    .clk, .rst_n,
    .in_valid (&dist_valid),
    .tree_dist(tdist),
    .out_valid,
    .score
  );

  always_ff @(posedge clk) begin
    if (&dist_valid) tree_dist <= tdist;
  end

endmodule
