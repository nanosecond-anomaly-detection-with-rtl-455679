// ddte_find_bin -- encoder half of one deep decision tree engine.
//
// A tree of maximum depth D is stored as a full binary tree: internal
// nodes 0 .. 2^D-2 in heap order (children of node n are 2n+1 and 2n+2),
// each holding the variable index var and threshold thr of its cut
// g = (x[var] < thr), compared as signed N-bit integers. A path that
// reaches a leaf early in training is stored by giving all leaves below
// that point the same estimate, so any depth up to D is representable.
//
// The tree is not walked. Every cut of the tree is evaluated at once
// (stage 1, one comparator per node), then every one of the 2^D parallel
// decision paths ANDs the D cut results along its way (stage 2). Exactly
// one path is true; its one-hot flag is the output. Leaf l is reached
// through node (2^k - 1) + (l >> (D-k)) at level k, taking the "cut true"
// branch (child 2n+2) when bit D-1-k of l is 1.
//
// Configuration: cfg_we writes node cfg_idx with (cfg_var, cfg_thr). The
// node table has no reset; it must be written before events are sent.
//
// Timing: path_hit/out_valid follow x/in_valid by two clocks, one event
// per clock. The comparisons and the parallel decision paths follow the
// described engine; splitting them into two register stages is this
// design's choice.
module ddte_find_bin #(
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned D = ae_pkg::D_DEF,
  parameter int unsigned N = ae_pkg::N_DEF,
  localparam int unsigned NODES  = (1 << D) - 1,
  localparam int unsigned LEAVES = 1 << D,
  localparam int unsigned VW     = ae_pkg::idx_width(V)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // event in
  input  logic                 in_valid,
  input  logic [V-1:0][N-1:0]  x,
  // node configuration
  input  logic                 cfg_we,
  input  logic [D-1:0]         cfg_idx,
  input  logic [VW-1:0]        cfg_var,
  input  logic [N-1:0]         cfg_thr,
  // one-hot bin flag out
  output logic                 out_valid,
  output logic [LEAVES-1:0]    path_hit
);

  logic [VW-1:0] node_var [NODES];
  logic [N-1:0]  node_thr [NODES];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      node_var[cfg_idx] <= cfg_var;
      node_thr[cfg_idx] <= cfg_thr;
    end
  end

  // Stage 1: all cuts in parallel.
  logic [NODES-1:0] cut_d, cut_q;
  logic             valid_q;

  always_comb begin
    for (int n = 0; n < NODES; n++) begin
      cut_d[n] = $signed(x[node_var[n]]) < $signed(node_thr[n]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) cut_q <= cut_d;
  end

  // Stage 2: parallel decision paths, one AND per leaf.
  logic [LEAVES-1:0] hit_d;

  always_comb begin
    for (int l = 0; l < LEAVES; l++) begin
      hit_d[l] = 1'b1;
      for (int k = 0; k < D; k++) begin
        hit_d[l] &= (cut_q[(1 << k) - 1 + (l >> (D - k))] == l[D-1-k]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (valid_q) path_hit <= hit_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      valid_q   <= in_valid;
      out_valid <= valid_q;
    end
  end

  // Only internal nodes exist; a write beyond them would be lost.
  a_cfg_node_range: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> (32'(cfg_idx) < NODES))
    else $error("ddte_find_bin: node index %0d out of range", cfg_idx);

  // The parallel decision paths partition the input space: one bin each.
  a_one_bin: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (path_hit != '0 && (path_hit & (path_hit - 1'b1)) == '0))
    else $error("ddte_find_bin: path flags not one-hot");

endmodule
