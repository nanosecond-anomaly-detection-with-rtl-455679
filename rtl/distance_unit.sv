// distance_unit -- L1 distance between an event and one tree's estimate.
//
// distance = sum over v of |x[v] - x_hat[v]|, with x and x_hat signed N-bit
// integers. Each difference is formed N+1 bits wide so it cannot wrap, its
// magnitude fits N bits, and the sum of V of them fits DW bits
// (ae_pkg::tree_dist_width), so the result is exact. This is the per-tree
// term of the anomaly score, the Manhattan distance named for the median
// estimator.
//
// Timing: distance/out_valid follow the inputs by one clock, one event per
// clock. The metric follows the described design; the single register
// stage is this design's choice.
module distance_unit #(
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned N = ae_pkg::N_DEF,
  localparam int unsigned DW = ae_pkg::tree_dist_width(V, N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [V-1:0][N-1:0]  x,
  input  logic [V-1:0][N-1:0]  x_hat,
  output logic                 out_valid,
  output logic [DW-1:0]        distance
);

  logic [DW-1:0] distance_d;

  always_comb begin
    logic signed [N:0] diff;
    logic        [N-1:0] mag;   // |diff| <= 2^N - 1, unsigned
    distance_d = '0;
    for (int v = 0; v < V; v++) begin
      diff       = (N+1)'($signed(x[v])) - (N+1)'($signed(x_hat[v]));
      mag        = diff[N] ? N'(-diff) : N'(diff);
      distance_d = distance_d + DW'(mag);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) distance <= distance_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
