// ae_workload_bench -- drives one autoencoder_processor of a given size
// with a random forest and a stream of random events, and checks every
// score and every per-tree distance against ae_ref_pkg, and the 6-clock
// latency. Used by tb_ae_workloads to run the processor at the sizes of
// the evaluated configurations. Raises done when finished and reports its
// own check and failure counts.
module ae_workload_bench #(
  parameter int unsigned V = 8,
  parameter int unsigned T = 30,
  parameter int unsigned D = 6,
  parameter int unsigned N = 8,
  parameter int unsigned EVENTS = 1000,
  parameter string       NAME = "workload"
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import ae_pkg::*;
  import ae_ref_pkg::*;

  localparam int unsigned VW = idx_width(V);
  localparam int unsigned TW = idx_width(T);
  localparam int unsigned DW = tree_dist_width(V, N);
  localparam int unsigned SW = score_width(T, V, N);

  logic                 in_valid = 1'b0;
  logic [V-1:0][N-1:0]  x = '0;
  logic                 cfg_we = 1'b0;
  logic [TW-1:0]        cfg_tree = '0;
  logic                 cfg_is_leaf = 1'b0;
  logic [D-1:0]         cfg_idx = '0;
  logic [VW-1:0]        cfg_var = '0;
  logic [N-1:0]         cfg_thr = '0;
  logic [V-1:0][N-1:0]  cfg_est = '0;
  logic                 out_valid;
  logic [SW-1:0]        score;
  logic [T-1:0][DW-1:0] tree_dist;

  autoencoder_processor #(.V(V), .T(T), .D(D), .N(N)) u_dut (
    .clk, .rst_n, .in_valid, .x,
    .cfg_we, .cfg_tree, .cfg_is_leaf, .cfg_idx, .cfg_var, .cfg_thr, .cfg_est,
    .out_valid, .score, .tree_dist
  );

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int score; int td [T]; int cyc; } exp_t;
  exp_t expq [$];
  forest_model m;

  initial begin checks = 0; failures = 0; done = 1'b0; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0d: %s", NAME, cyc, what);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      bit ok;
      if (expq.size() == 0) check(1'b0, "output with no event pending");
      else begin
        e = expq.pop_front();
        ok = 1'b1;
        for (int t = 0; t < int'(T); t++) ok &= (int'(tree_dist[t]) == e.td[t]);
        check(int'(score) == e.score, $sformatf("score %0d expected %0d", score, e.score));
        check(ok, "per-tree distances differ");
        check(cyc - e.cyc == int'(LATENCY), $sformatf("latency %0d", cyc - e.cyc));
      end
    end
  end

  initial begin
    int xv[];
    exp_t e;
    m = new(T, V, D, N);
    xv = new[V];
    @(posedge rst_n);
    m.random_forest(6);
    for (int t = 0; t < int'(T); t++) begin
      for (int n = 0; n < (1 << D) - 1; n++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_tree = TW'(t); cfg_is_leaf = 1'b0; cfg_idx = D'(n);
        cfg_var = VW'(m.node_var[t][n]); cfg_thr = N'(m.node_thr[t][n]);
      end
      for (int l = 0; l < (1 << D); l++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_tree = TW'(t); cfg_is_leaf = 1'b1; cfg_idx = D'(l);
        for (int v = 0; v < int'(V); v++) cfg_est[v] = N'(m.leaf_est[t][l][v]);
      end
    end
    @(negedge clk);
    cfg_we = 1'b0;
    for (int i = 0; i < int'(EVENTS); i++) begin
      @(negedge clk);
      foreach (xv[v]) xv[v] = m.rand_val();
      in_valid = 1'b1;
      for (int v = 0; v < int'(V); v++) x[v] = N'(xv[v]);
      e.score = m.score(xv);
      for (int t = 0; t < int'(T); t++) e.td[t] = m.tree_dist(t, xv);
      e.cyc = cyc;
      expq.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);
    check(expq.size() == 0, "events lost");
    $display("%s: V=%0d T=%0d D=%0d N=%0d events=%0d checks=%0d failures=%0d",
             NAME, V, T, D, N, EVENTS, checks, failures);
    done = 1'b1;
  end
endmodule
