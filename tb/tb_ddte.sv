// tb_ddte -- checks one deep decision tree engine, x in, estimate out.
//
// Part 1 is the two-variable, depth-2 example tree: root cut x1 < 65; its
// "false" side is cut again at x2 < 22. The bins hold the estimates
// (27,25) for x1 < 65, (112,11) for x1 >= 65 and x2 < 22, and (96,106) for
// x1 >= 65 and x2 >= 22. The event (55,70) must come out as (27,25).
// Points on both sides of both cuts and on the cuts themselves are tried.
// Part 2 runs random trees of the default size (V = 8, D = 6, N = 8)
// against the sequential tree walk. Latency is three clocks in both.
module tb_ddte;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------- part 1: example tree, V = 2, D = 2 ----------------
  logic s_in_valid = 1'b0, s_we = 1'b0, s_is_leaf = 1'b0, s_out_valid;
  logic [1:0][7:0] s_x = '0, s_est = '0, s_x_hat;
  logic [1:0] s_idx = '0;
  logic       s_var = 1'b0;
  logic [7:0] s_thr = '0;

  ddte #(.V(2), .D(2), .N(8)) u_small (
    .clk, .rst_n, .in_valid(s_in_valid), .x(s_x),
    .cfg_we(s_we), .cfg_is_leaf(s_is_leaf), .cfg_idx(s_idx), .cfg_var(s_var),
    .cfg_thr(s_thr), .cfg_est(s_est), .out_valid(s_out_valid), .x_hat(s_x_hat));

  task automatic small_node(int n, int var_, int thr);
    @(negedge clk);
    s_we = 1'b1; s_is_leaf = 1'b0; s_idx = 2'(n); s_var = 1'(var_); s_thr = 8'(thr);
  endtask

  task automatic small_leaf(int l, int e1, int e2);
    @(negedge clk);
    s_we = 1'b1; s_is_leaf = 1'b1; s_idx = 2'(l); s_est[0] = 8'(e1); s_est[1] = 8'(e2);
  endtask

  task automatic small_event(int x1, int x2, int e1, int e2);
    int c;
    @(negedge clk);
    s_in_valid = 1'b1; s_x[0] = 8'(x1); s_x[1] = 8'(x2);
    c = cyc;
    @(negedge clk);
    s_in_valid = 1'b0;
    while (!s_out_valid && cyc - c < 10) @(negedge clk);
    check(s_out_valid && cyc - c == 3, $sformatf("example latency %0d", cyc - c));
    check(s_x_hat[0] == 8'(e1) && s_x_hat[1] == 8'(e2),
          $sformatf("example (%0d,%0d) gave (%0d,%0d), expected (%0d,%0d)",
                    x1, x2, s_x_hat[0], s_x_hat[1], e1, e2));
  endtask

  // ---------------- part 2: default size, random ----------------
  localparam int unsigned V = V_DEF, D = D_DEF, N = N_DEF, VW = idx_width(V);
  logic in_valid = 1'b0, cfg_we = 1'b0, cfg_is_leaf = 1'b0, out_valid;
  logic [V-1:0][N-1:0] x = '0, cfg_est = '0, x_hat;
  logic [D-1:0] cfg_idx = '0;
  logic [VW-1:0] cfg_var = '0;
  logic [N-1:0] cfg_thr = '0;

  ddte u_dut (.clk, .rst_n, .in_valid, .x, .cfg_we, .cfg_is_leaf, .cfg_idx,
              .cfg_var, .cfg_thr, .cfg_est, .out_valid, .x_hat);

  forest_model m;
  int exp_leaf[$], exp_cyc[$];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int l, c;
      logic [V-1:0][N-1:0] e;
      if (exp_leaf.size() == 0) check(1'b0, "unexpected output");
      else begin
        l = exp_leaf.pop_front();
        c = exp_cyc.pop_front();
        for (int v = 0; v < int'(V); v++) e[v] = N'(m.leaf_est[0][l][v]);
        check(x_hat == e, $sformatf("leaf %0d estimate %h expected %h", l, x_hat, e));
        check(cyc - c == 3, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    int xv[];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // Example tree. Node 0: x1 < 65. Node 1 ("false" child): x2 < 22.
    // Node 2 ("true" child) is a stopped branch: both its leaves hold (27,25).
    small_node(0, 0, 65);
    small_node(1, 1, 22);
    small_node(2, 0, 0);
    small_leaf(0, 96, 106);   // x1 >= 65, x2 >= 22
    small_leaf(1, 112, 11);   // x1 >= 65, x2 <  22
    small_leaf(2, 27, 25);    // x1 <  65
    small_leaf(3, 27, 25);
    @(negedge clk);
    s_we = 1'b0;
    small_event(55, 70, 27, 25);    // the worked example
    small_event(64, 0, 27, 25);
    small_event(65, 21, 112, 11);   // on the x1 cut, below the x2 cut
    small_event(100, 22, 96, 106);  // on the x2 cut
    small_event(127, 127, 96, 106);
    small_event(0, 127, 27, 25);

    // Random trees at the default size.
    m = new(1, V, D, N);
    xv = new[V];
    for (int round = 0; round < 3; round++) begin
      m.random_forest(6);
      for (int n = 0; n < (1 << D) - 1; n++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_is_leaf = 1'b0; cfg_idx = D'(n);
        cfg_var = VW'(m.node_var[0][n]); cfg_thr = N'(m.node_thr[0][n]);
      end
      for (int l = 0; l < (1 << D); l++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_is_leaf = 1'b1; cfg_idx = D'(l);
        for (int v = 0; v < int'(V); v++) cfg_est[v] = N'(m.leaf_est[0][l][v]);
      end
      @(negedge clk);
      cfg_we = 1'b0;
      for (int i = 0; i < 1000; i++) begin
        foreach (xv[v]) xv[v] = m.rand_val();
        in_valid = ($urandom_range(4, 0) != 0);
        for (int v = 0; v < int'(V); v++) x[v] = N'(xv[v]);
        if (in_valid) begin
          exp_leaf.push_back(m.leaf_of(0, xv));
          exp_cyc.push_back(cyc);
        end
        @(negedge clk);
      end
      in_valid = 1'b0;
      repeat (5) @(negedge clk);
    end
    check(exp_leaf.size() == 0, "events lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
