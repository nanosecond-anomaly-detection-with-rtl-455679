// autoencoder_processor -- decision-tree autoencoder used as an anomaly
// detector, top level.
//
// An event is a vector x of V signed N-bit variables. A forest of T deep
// decision trees, trained offline on known (background) events, maps x to
// one estimate per tree: the stored median of the training events in the
// bin of that tree that x falls in. The anomaly score is the total L1
// distance between x and those estimates,
//   score = sum over t < T, v < V of |x[v] - x_hat[t][v]|,
// small for events like the training sample and large for unusual ones.
//
// Structure: ae_bus_tap registers x and fans it out to T ddte instances
// (each a find-bin encoder and a return-estimate decoder working as one,
// with no explicit bin number) and, through a three-stage delay, to the
// distance_processor, which forms each tree's distance and their sum.
//
// Configuration: the trained forest is written through one port. cfg_we
// with cfg_tree = t writes tree t; cfg_is_leaf selects an internal node
// (cut cfg_var, cfg_thr: "x[cfg_var] < cfg_thr", signed) or a leaf
// (estimate vector cfg_est); cfg_idx is the heap index of the node or the
// leaf number (see ddte_find_bin). The tables are not reset: program every
// node and leaf of every tree before sending events. A write takes effect
// for events entering the trees on the following clock.
//
// Timing: a new event every clock; score/out_valid appear 6 clocks after
// x/in_valid (bus tap 1, find bin 2, return estimate 1, distance 1, sum 1),
// 30 ns at 200 MHz. The default sizes V = 8, T = 30, D = 6, N = 8 are the
// benchmark diphoton-plus-dijet configuration.
module autoencoder_processor #(
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned T = ae_pkg::T_DEF,
  parameter int unsigned D = ae_pkg::D_DEF,
  parameter int unsigned N = ae_pkg::N_DEF,
  localparam int unsigned VW = ae_pkg::idx_width(V),
  localparam int unsigned TW = ae_pkg::idx_width(T),
  localparam int unsigned DW = ae_pkg::tree_dist_width(V, N),
  localparam int unsigned SW = $clog2(T * ((1 << DW) - 1) + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // event in
  input  logic                 in_valid,
  input  logic [V-1:0][N-1:0]  x,
  // forest configuration
  input  logic                 cfg_we,
  input  logic [TW-1:0]        cfg_tree,
  input  logic                 cfg_is_leaf,
  input  logic [D-1:0]         cfg_idx,
  input  logic [VW-1:0]        cfg_var,
  input  logic [N-1:0]         cfg_thr,
  input  logic [V-1:0][N-1:0]  cfg_est,
  // anomaly score out
  output logic                 out_valid,
  output logic [SW-1:0]        score,
  output logic [T-1:0][DW-1:0] tree_dist
);

  localparam int unsigned DDTE_LATENCY = 3;

  logic                      tap_valid;
  logic [V-1:0][N-1:0]       x_tap;

  ae_bus_tap #(.V(V), .N(N)) u_bus_tap (
    .clk, .rst_n,
    .in_valid,
    .x,
    .out_valid(tap_valid),
    .x_q      (x_tap)
  );

  logic [T-1:0]                 est_valid;
  logic [T-1:0][V-1:0][N-1:0]   x_hat;

  for (genvar t = 0; t < T; t++) begin : g_tree
    ddte #(.V(V), .D(D), .N(N)) u_ddte (
      .clk, .rst_n,
      .in_valid   (tap_valid),
      .x          (x_tap),
      .cfg_we     (cfg_we && (32'(cfg_tree) == t)),
      .cfg_is_leaf,
      .cfg_idx,
      .cfg_var,
      .cfg_thr,
      .cfg_est,
      .out_valid  (est_valid[t]),
      .x_hat      (x_hat[t])
    );
  end

  // The event travels next to the trees to meet its estimates.
  logic [V-1:0][N-1:0] x_late;

  ae_pipe #(.W(V*N), .STAGES(DDTE_LATENCY)) u_x_delay (
    .clk,
    .d(x_tap),
    .q(x_late)
  );

  distance_processor #(.T(T), .V(V), .N(N)) u_distance (
    .clk, .rst_n,
    .in_valid (&est_valid),
    .x        (x_late),
    .x_hat    (x_hat),
    .tree_dist,
    .out_valid,
    .score
  );

  a_cfg_tree_range: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> (32'(cfg_tree) < T))
    else $error("autoencoder_processor: tree index %0d out of range", cfg_tree);

  a_cfg_var_range: assert property (@(posedge clk) disable iff (!rst_n)
    (cfg_we && !cfg_is_leaf) |-> (32'(cfg_var) < V))
    else $error("autoencoder_processor: variable index %0d out of range", cfg_var);

endmodule
