// tb_distance_unit -- checks the per-tree L1 distance at the default size
// (V = 8, N = 8, signed): random vectors, the extreme corners (-128 against
// +127 in every variable gives 8 * 255) and equal vectors (distance 0),
// one clock latency, one pair per clock.
module tb_distance_unit;
  import ae_pkg::*;
  localparam int unsigned V = V_DEF, N = N_DEF;
  localparam int unsigned DW = tree_dist_width(V, N);

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [V-1:0][N-1:0] x = '0, x_hat = '0;
  logic [DW-1:0] distance;

  distance_unit u_dut (.clk, .rst_n, .in_valid, .x, .x_hat, .out_valid, .distance);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int expq[$], cycq[$];
  int n_max = 0, n_zero = 0;

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
        check(int'(distance) == e, $sformatf("distance %0d expected %0d", distance, e));
        check(cyc - c == 1, $sformatf("latency %0d", cyc - c));
        if (e == int'(V) * 255) n_max++;
        if (e == 0) n_zero++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      int a, b, s;
      s = 0;
      for (int v = 0; v < int'(V); v++) begin
        case (i % 10)
          0: begin a = -128; b = 127; end
          1: begin a = 127; b = -128; end
          2: begin a = int'($urandom_range(255, 0)) - 128; b = a; end
          default: begin a = int'($urandom_range(255, 0)) - 128; b = int'($urandom_range(255, 0)) - 128; end
        endcase
        x[v] = N'(a);
        x_hat[v] = N'(b);
        s += (a > b) ? a - b : b - a;
      end
      in_valid = (i % 13 != 5);
      if (in_valid) begin expq.push_back(s); cycq.push_back(cyc); end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    check(n_max > 0 && n_zero > 0, "corner cases not reached");
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
