// tb_ddte_return_est -- checks the estimate selection of one tree at the
// default size (V = 8, D = 6, N = 8): every leaf is written with a random
// estimate vector, then one-hot path flags select it, one clock later, one
// per clock, every leaf at least once.
module tb_ddte_return_est;
  import ae_pkg::*;
  localparam int unsigned V = V_DEF, D = D_DEF, N = N_DEF;
  localparam int unsigned LEAVES = 1 << D;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [LEAVES-1:0] path_hit = '0;
  logic cfg_we = 1'b0;
  logic [D-1:0] cfg_idx = '0;
  logic [V-1:0][N-1:0] cfg_est = '0, x_hat;

  ddte_return_est u_dut (.clk, .rst_n, .in_valid, .path_hit, .cfg_we, .cfg_idx,
                         .cfg_est, .out_valid, .x_hat);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [V-1:0][N-1:0] est [LEAVES];
  int exp_leaf[$], exp_cyc[$];

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
        check(x_hat == est[l], $sformatf("leaf %0d: got %h expected %h", l, x_hat, est[l]));
        check(cyc - c == 1, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3; round++) begin
      for (int l = 0; l < int'(LEAVES); l++) begin
        for (int v = 0; v < int'(V); v++) est[l][v] = N'($urandom);
        @(negedge clk);
        cfg_we = 1'b1; cfg_idx = D'(l); cfg_est = est[l];
      end
      @(negedge clk);
      cfg_we = 1'b0;
      for (int i = 0; i < 3 * int'(LEAVES); i++) begin
        int l;
        l = (i < int'(LEAVES)) ? i : int'($urandom_range(LEAVES - 1, 0));
        in_valid = 1'b1;
        path_hit = LEAVES'(1) << l;
        exp_leaf.push_back(l);
        exp_cyc.push_back(cyc);
        @(negedge clk);
      end
      in_valid = 1'b0;
      repeat (3) @(negedge clk);
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
