// tb_distance_processor -- checks the distance processor at the default
// size (T = 30, V = 8, N = 8): for random events and random tree
// estimates, score must equal the sum over trees and variables of
// |x - x_hat| and tree_dist each tree's part of it, two clocks later, at
// one event per clock.
module tb_distance_processor;
  import ae_pkg::*;
  localparam int unsigned T = T_DEF, V = V_DEF, N = N_DEF;
  localparam int unsigned DW = tree_dist_width(V, N);
  localparam int unsigned SW = $clog2(T * ((1 << DW) - 1) + 1);

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [V-1:0][N-1:0] x = '0;
  logic [T-1:0][V-1:0][N-1:0] x_hat = '0;
  logic [T-1:0][DW-1:0] tree_dist;
  logic [SW-1:0] score;

  distance_processor u_dut (.clk, .rst_n, .in_valid, .x, .x_hat, .tree_dist,
                            .out_valid, .score);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int score; int td [T]; int cyc; } exp_t;
  exp_t expq[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      bit ok;
      if (expq.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = expq.pop_front();
        ok = 1'b1;
        for (int t = 0; t < int'(T); t++) ok &= (int'(tree_dist[t]) == e.td[t]);
        check(int'(score) == e.score, $sformatf("score %0d expected %0d", score, e.score));
        check(ok, "per-tree distances differ");
        check(cyc - e.cyc == 2, $sformatf("latency %0d", cyc - e.cyc));
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      exp_t e;
      int xv [V];
      for (int v = 0; v < int'(V); v++) begin
        xv[v] = int'($urandom_range(255, 0)) - 128;
        x[v] = N'(xv[v]);
      end
      e.score = 0;
      for (int t = 0; t < int'(T); t++) begin
        e.td[t] = 0;
        for (int v = 0; v < int'(V); v++) begin
          int h;
          h = int'($urandom_range(255, 0)) - 128;
          x_hat[t][v] = N'(h);
          e.td[t] += (xv[v] > h) ? xv[v] - h : h - xv[v];
        end
        e.score += e.td[t];
      end
      e.cyc = cyc;
      in_valid = (i % 9 != 4);
      if (in_valid) expq.push_back(e);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    check(expq.size() == 0, "events lost");
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
