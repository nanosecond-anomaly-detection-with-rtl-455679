// ddte_return_est -- decoder half of one deep decision tree engine.
//
// Every leaf (bin) of the tree stores an estimate vector x-hat of V signed
// N-bit values: for a trained tree, the dimension-wise median of the
// training events that fall into that bin. Given the one-hot path flags
// from ddte_find_bin, the estimate of the true path is selected by an
// AND-OR over all leaves. No binary bin number is formed: the latent value
// of the tree exists only as which flag is set, so encoding and decoding
// happen in one pass.
//
// Configuration: cfg_we writes leaf cfg_idx with the vector cfg_est. The
// leaf table has no reset; it must be written before events are sent.
//
// Timing: x_hat/out_valid follow path_hit/in_valid by one clock, one event
// per clock. That the estimate is the stored median of each bin follows
// the described autoencoder; the AND-OR selection and the register are
// this design's choice.
module ddte_return_est #(
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned D = ae_pkg::D_DEF,
  parameter int unsigned N = ae_pkg::N_DEF,
  localparam int unsigned LEAVES = 1 << D
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // one-hot bin flag in
  input  logic                 in_valid,
  input  logic [LEAVES-1:0]    path_hit,
  // leaf configuration
  input  logic                 cfg_we,
  input  logic [D-1:0]         cfg_idx,
  input  logic [V-1:0][N-1:0]  cfg_est,
  // estimate out
  output logic                 out_valid,
  output logic [V-1:0][N-1:0]  x_hat
);

  logic [V-1:0][N-1:0] leaf_est [LEAVES];

  always_ff @(posedge clk) begin
    if (cfg_we) leaf_est[cfg_idx] <= cfg_est;
  end

  logic [V-1:0][N-1:0] est_d;

  always_comb begin
    est_d = '0;
    for (int l = 0; l < LEAVES; l++) begin
      est_d |= leaf_est[l] & {(V*N){path_hit[l]}};
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) x_hat <= est_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
