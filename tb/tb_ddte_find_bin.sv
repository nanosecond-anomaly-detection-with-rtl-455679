// tb_ddte_find_bin -- checks the parallel decision paths of one tree at
// the default size (V = 8, D = 6, N = 8) against a sequential tree walk:
// for random trees and events, exactly the flag of the walked-to leaf must
// be set, two clocks after the event, at one event per clock.
module tb_ddte_find_bin;
  import ae_pkg::*;
  import ae_ref_pkg::*;
  localparam int unsigned V = V_DEF, D = D_DEF, N = N_DEF;
  localparam int unsigned VW = idx_width(V);
  localparam int unsigned LEAVES = 1 << D;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [V-1:0][N-1:0] x = '0;
  logic cfg_we = 1'b0;
  logic [D-1:0] cfg_idx = '0;
  logic [VW-1:0] cfg_var = '0;
  logic [N-1:0] cfg_thr = '0;
  logic [LEAVES-1:0] path_hit;

  ddte_find_bin u_dut (.clk, .rst_n, .in_valid, .x, .cfg_we, .cfg_idx,
                       .cfg_var, .cfg_thr, .out_valid, .path_hit);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int exp_leaf[$], exp_cyc[$];
  bit seen [LEAVES];
  forest_model m;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int l, c;
      if (exp_leaf.size() == 0) check(1'b0, "unexpected output");
      else begin
        l = exp_leaf.pop_front();
        c = exp_cyc.pop_front();
        check(path_hit == (LEAVES'(1) << l),
              $sformatf("path flags %h, expected leaf %0d", path_hit, l));
        check(cyc - c == 2, $sformatf("latency %0d", cyc - c));
        seen[l] = 1'b1;
      end
    end
  end

  initial begin
    int xv[];
    int nseen;
    m = new(1, V, D, N);
    xv = new[V];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      m.random_forest(0);
      // Narrow thresholds on a few variables so that many leaves are reachable.
      for (int n = 0; n < (1 << D) - 1; n++) m.node_thr[0][n] = int'($urandom_range(80, 0)) - 40;
      for (int n = 0; n < (1 << D) - 1; n++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_idx = D'(n);
        cfg_var = VW'(m.node_var[0][n]); cfg_thr = N'(m.node_thr[0][n]);
      end
      @(negedge clk);
      cfg_we = 1'b0;
      for (int i = 0; i < 1500; i++) begin
        for (int v = 0; v < int'(V); v++) xv[v] = int'($urandom_range(100, 0)) - 50;
        if (i % 7 == 0) xv[m.node_var[0][0]] = m.node_thr[0][0];  // tie at the root
        in_valid = 1'b1;
        for (int v = 0; v < int'(V); v++) x[v] = N'(xv[v]);
        exp_leaf.push_back(m.leaf_of(0, xv));
        exp_cyc.push_back(cyc);
        @(negedge clk);
      end
      in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    nseen = 0;
    foreach (seen[l]) nseen += seen[l];
    $display("leaves reached: %0d of %0d", nseen, LEAVES);
    check(nseen > int'(LEAVES) / 2, "too few leaves reached");
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
