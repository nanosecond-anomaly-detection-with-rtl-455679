// tb_ae_workloads -- runs the processor at the sizes of the evaluated
// configurations other than the default one, each with a random forest
// standing in for the trained one and a stream of random events:
//   * the 56-variable anomaly-detection dataset: V = 56, T = 30, D = 4
//   * its 26-variable cross-check:               V = 26, T = 30, D = 4
//   * the two-variable toy at depth 8:           V = 2,  T = 1,  D = 8
// (the default V = 8, T = 30, D = 6 configuration is covered by
// tb_autoencoder_processor). Scores, per-tree distances and the 6-clock
// latency are checked against the tree-walk reference model.
module tb_ae_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done56, done26, done_toy;
  int   c56, f56, c26, f26, ctoy, ftoy;

  ae_workload_bench #(.V(56), .T(30), .D(4), .N(8), .EVENTS(1500), .NAME("lhc56"))
    u_lhc56 (.clk, .rst_n, .done(done56), .checks(c56), .failures(f56));
  ae_workload_bench #(.V(26), .T(30), .D(4), .N(8), .EVENTS(1500), .NAME("lhc26"))
    u_lhc26 (.clk, .rst_n, .done(done26), .checks(c26), .failures(f26));
  ae_workload_bench #(.V(2), .T(1), .D(8), .N(8), .EVENTS(1500), .NAME("toy_d8"))
    u_toy (.clk, .rst_n, .done(done_toy), .checks(ctoy), .failures(ftoy));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done56 && done26 && done_toy);
    $display("TB_RESULT checks=%0d failures=%0d", c56 + c26 + ctoy, f56 + f26 + ftoy);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c56 + c26 + ctoy, f56 + f26 + ftoy + 1);
    $finish;
  end
endmodule
