// distance_sum -- sums the per-tree distances into the anomaly score.
//
// score = sum over t of tree_dist[t]. The T inputs are DW bits each and the
// output is SW = DW + clog2(T) bits wide (rounded to what T * (2^DW - 1)
// needs), so the sum is exact. A large score marks an event that the
// forest, trained on known processes, reconstructs badly: an anomaly.
//
// Timing: score/out_valid follow the inputs by one clock, one event per
// clock. The sum follows the described design; doing it as one adder tree
// in one stage is this design's choice.
module distance_sum #(
  parameter int unsigned T  = ae_pkg::T_DEF,
  parameter int unsigned DW = ae_pkg::tree_dist_width(ae_pkg::V_DEF, ae_pkg::N_DEF),
  localparam int unsigned SW = $clog2(T * ((1 << DW) - 1) + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [T-1:0][DW-1:0] tree_dist,
  output logic                 out_valid,
  output logic [SW-1:0]        score
);

  logic [SW-1:0] score_d;

  always_comb begin
    score_d = '0;
    for (int t = 0; t < T; t++) score_d = score_d + SW'(tree_dist[t]);
  end

  always_ff @(posedge clk) begin
    if (in_valid) score <= score_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
