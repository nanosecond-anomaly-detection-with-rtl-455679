// ddte -- deep decision tree engine with a vector output (one tree).
//
// One tree of the forest, used as encoder and decoder at once: the event x
// goes through ddte_find_bin, which evaluates every cut and every parallel
// decision path of the tree and raises the flag of the one bin that x
// falls in, and ddte_return_est, which returns the stored estimate x-hat
// of that bin. The bin number, the tree's latent value, is never formed
// explicitly.
//
// Configuration: one write port serves both tables. cfg_is_leaf = 0 writes
// internal node cfg_idx (0 .. 2^D-2) with cut (cfg_var, cfg_thr);
// cfg_is_leaf = 1 writes leaf cfg_idx (0 .. 2^D-1) with estimate cfg_est.
//
// Timing: x_hat/out_valid follow x/in_valid by three clocks (two in the
// encoder, one in the decoder), one event per clock.
module ddte #(
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned D = ae_pkg::D_DEF,
  parameter int unsigned N = ae_pkg::N_DEF,
  localparam int unsigned VW = ae_pkg::idx_width(V)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [V-1:0][N-1:0]  x,
  input  logic                 cfg_we,
  input  logic                 cfg_is_leaf,
  input  logic [D-1:0]         cfg_idx,
  input  logic [VW-1:0]        cfg_var,
  input  logic [N-1:0]         cfg_thr,
  input  logic [V-1:0][N-1:0]  cfg_est,
  output logic                 out_valid,
  output logic [V-1:0][N-1:0]  x_hat
);

  logic               bin_valid;
  logic [(1<<D)-1:0]  path_hit;

  ddte_find_bin #(.V(V), .D(D), .N(N)) u_find_bin (
    .clk, .rst_n,
    .in_valid,
    .x,
    .cfg_we   (cfg_we && !cfg_is_leaf),
    .cfg_idx,
    .cfg_var,
    .cfg_thr,
    .out_valid(bin_valid),
    .path_hit
  );

  ddte_return_est #(.V(V), .D(D), .N(N)) u_return_est (
    .clk, .rst_n,
    .in_valid (bin_valid),
    .path_hit,
    .cfg_we   (cfg_we && cfg_is_leaf),
    .cfg_idx,
    .cfg_est,
    .out_valid,
    .x_hat
  );

endmodule
