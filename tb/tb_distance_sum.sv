// tb_distance_sum -- checks the sum of the T = 30 per-tree distances
// (11 bits each at the default size): random inputs, all inputs at their
// maximum (the widest possible score) and all zero, one clock latency,
// one sum per clock.
module tb_distance_sum;
  import ae_pkg::*;
  localparam int unsigned T = T_DEF;
  localparam int unsigned DW = tree_dist_width(V_DEF, N_DEF);
  localparam int unsigned SW = $clog2(T * ((1 << DW) - 1) + 1);

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [T-1:0][DW-1:0] tree_dist = '0;
  logic [SW-1:0] score;

  distance_sum u_dut (.clk, .rst_n, .in_valid, .tree_dist, .out_valid, .score);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int expq[$], cycq[$];
  int n_full = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int e, c;
      if (expq.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = expq.pop_front();
        c = cycq.pop_front();
        check(int'(score) == e, $sformatf("score %0d expected %0d", score, e));
        check(cyc - c == 1, $sformatf("latency %0d", cyc - c));
        if (e == int'(T) * ((1 << DW) - 1)) n_full++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      int s;
      s = 0;
      for (int t = 0; t < int'(T); t++) begin
        int d;
        d = (i % 50 == 0) ? (1 << DW) - 1 : (i % 50 == 1) ? 0 : int'($urandom_range((1 << DW) - 1, 0));
        tree_dist[t] = DW'(d);
        s += d;
      end
      in_valid = (i % 11 != 3);
      if (in_valid) begin expq.push_back(s); cycq.push_back(cyc); end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    check(n_full > 0, "full-scale sum not reached");
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
