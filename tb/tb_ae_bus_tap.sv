// tb_ae_bus_tap -- checks the input register of the processor: out_valid
// follows in_valid by one clock, x_q takes x only with a valid event and
// holds it otherwise.
module tb_ae_bus_tap;
  localparam int unsigned V = 8, N = 8;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [V-1:0][N-1:0] x = '0, x_q;

  ae_bus_tap u_dut (.clk, .rst_n, .in_valid, .x, .out_valid, .x_q);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_hold = 0, n_load = 0;
  logic [V-1:0][N-1:0] held;
  logic                prev_valid;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check(out_valid == 1'b0, "out_valid not cleared by reset");
    rst_n = 1'b1;
    prev_valid = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // what the previous clock edge should have captured
      if (i > 0) begin
        check(out_valid == prev_valid, "out_valid is not in_valid delayed by one");
        check(x_q == held, prev_valid ? "x_q did not load the event"
                                      : "x_q changed without an event");
        if (prev_valid) n_load++; else n_hold++;
      end
      in_valid = (i == 0) || ($urandom_range(2, 0) != 0);
      for (int v = 0; v < int'(V); v++) x[v] = N'($urandom);
      if (in_valid) held = x;
      prev_valid = in_valid;
    end
    check(n_hold > 0 && n_load > 0, "hold and load not both exercised");
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
