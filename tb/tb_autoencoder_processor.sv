// tb_autoencoder_processor -- end-to-end test of the autoencoder processor
// at its default (benchmark) size: V = 8, T = 30, D = 6, N = 8.
//
// A random forest is written through the configuration port, then events
// are streamed and every score and every per-tree distance is compared
// with ae_ref_pkg's tree walk. Checked and counted:
//   * back-to-back events, one per clock (interval 1)
//   * bubbles (idle clocks) inside a stream
//   * latency of exactly 6 clocks from x/in_valid to score/out_valid
//   * cut ties (x equal to the threshold must take the "not less" branch)
//   * branches stopped early in training (shared estimates)
//   * reprogramming the whole forest between streams
//   * the largest possible score, T * V * (2^N - 1), without overflow
// Each mechanism that never happens counts as a failure.
module tb_autoencoder_processor;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  localparam int unsigned V  = V_DEF;
  localparam int unsigned T  = T_DEF;
  localparam int unsigned D  = D_DEF;
  localparam int unsigned N  = N_DEF;
  localparam int unsigned VW = idx_width(V);
  localparam int unsigned TW = idx_width(T);
  localparam int unsigned DW = tree_dist_width(V, N);
  localparam int unsigned SW = score_width(T, V, N);
  localparam int unsigned EVENTS = 3000;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
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

  autoencoder_processor u_dut (
    .clk, .rst_n, .in_valid, .x,
    .cfg_we, .cfg_tree, .cfg_is_leaf, .cfg_idx, .cfg_var, .cfg_thr, .cfg_est,
    .out_valid, .score, .tree_dist
  );

  always #5 clk = ~clk;   // one time unit per half period

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct {
    int score;
    int td [T];
    int cyc;
  } exp_t;
  exp_t expq [$];

  // mechanism counters
  int n_back_to_back = 0, n_bubble = 0, n_tie = 0, n_early = 0;
  int n_reprogram = 0, n_after_reprogram = 0, n_max_score = 0;
  int n_outputs = 0;
  int phase = 0;
  logic last_out_valid = 1'b0;

  forest_model m;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  task automatic cfg_write_forest();
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
  endtask

  // Drive one event in the current negedge slot and queue its expectation.
  task automatic send(int xv[]);
    exp_t e;
    in_valid = 1'b1;
    for (int v = 0; v < int'(V); v++) x[v] = N'(xv[v]);
    e.score = m.score(xv);
    for (int t = 0; t < int'(T); t++) begin
      int l;
      e.td[t] = m.tree_dist(t, xv);
      l = m.leaf_of(t, xv);
      // the sibling leaf holds the same estimate: branch stopped early
      if (m.leaf_est[t][l] == m.leaf_est[t][l ^ 1]) n_early++;
    end
    e.cyc = cyc;
    expq.push_back(e);
  endtask

  task automatic random_event(output int xv[]);
    xv = new[V];
    foreach (xv[v]) xv[v] = m.rand_val();
    // now and then put tree 0's root variable exactly on its threshold
    if ($urandom_range(9, 0) == 0) begin
      xv[m.node_var[0][0]] = m.node_thr[0][0];
      n_tie++;
    end
  endtask

  task automatic stream(int count, int gap_one_in);
    int xv[];
    for (int i = 0; i < count; i++) begin
      @(negedge clk);
      if (gap_one_in != 0 && $urandom_range(gap_one_in - 1, 0) == 0) begin
        in_valid = 1'b0;
        n_bubble++;
        @(negedge clk);
      end
      random_event(xv);
      send(xv);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);
  endtask

  // Output monitor.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      n_outputs++;
      if (last_out_valid) n_back_to_back++;
      if (expq.size() == 0) begin
        check(1'b0, "output with no event pending");
      end else begin
        exp_t e;
        bit td_ok;
        e = expq.pop_front();
        td_ok = 1'b1;
        for (int t = 0; t < int'(T); t++) td_ok &= (int'(tree_dist[t]) == e.td[t]);
        check(int'(score) == e.score,
              $sformatf("score %0d expected %0d", score, e.score));
        check(td_ok, "per-tree distances differ");
        check(cyc - e.cyc == int'(LATENCY),
              $sformatf("latency %0d expected %0d", cyc - e.cyc, LATENCY));
        if (phase >= 2) n_after_reprogram++;
        if (e.score == int'(T * V * ((1 << N) - 1))) n_max_score++;
      end
    end
    last_out_valid = rst_n && out_valid;
  end

  initial begin
    int xv[];
    m = new(T, V, D, N);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Phase 1: forest A, full-rate stream, then a stream with bubbles.
    phase = 1;
    m.random_forest(8);
    cfg_write_forest();
    stream(EVENTS, 0);
    stream(EVENTS / 2, 4);

    // Phase 2: reprogram with forest B (as when a newly trained model is
    // transferred) and stream again.
    phase = 2;
    m.random_forest(5);
    cfg_write_forest();
    n_reprogram++;
    stream(EVENTS, 6);

    // Phase 3: worst case score. Every estimate at the most positive
    // value, the event at the most negative one.
    phase = 3;
    for (int t = 0; t < int'(T); t++)
      for (int l = 0; l < (1 << D); l++)
        for (int v = 0; v < int'(V); v++) m.leaf_est[t][l][v] = m.max_val();
    cfg_write_forest();
    n_reprogram++;
    @(negedge clk);
    xv = new[V];
    foreach (xv[v]) xv[v] = m.min_val();
    send(xv);
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);

    check(expq.size() == 0, "events lost in the pipeline");
    check(n_outputs > 0, "no output at all");
    $display("mechanisms: back_to_back=%0d bubbles=%0d ties=%0d early_stop_hits=%0d reprograms=%0d after_reprogram=%0d max_score=%0d",
             n_back_to_back, n_bubble, n_tie, n_early, n_reprogram, n_after_reprogram, n_max_score);
    check(n_back_to_back > 0, "interval-1 streaming never happened");
    check(n_bubble > 0, "no bubble in a stream");
    check(n_tie > 0, "no threshold tie");
    check(n_early > 0, "no early-stopped branch reached");
    check(n_reprogram > 0 && n_after_reprogram > 0, "no reprogramming");
    check(n_max_score > 0, "largest score never produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
