// tb_reset_sync: self-checking test of the per-domain reset block.
//
// Checks, at the default hold time, that the domain reset:
//   - is held while the board reset or the clock generator's lock is bad;
//   - asserts at once, between clock edges, when either input goes bad;
//   - releases exactly HOLD_CYCLES + 3 rising edges after both are good
//     (two synchroniser stages, the hold count, the output register);
//   - restarts the full count after a short loss of lock.
module tb_reset_sync;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic ext_rst_n = 1'b0, locked = 1'b0, rst_n;

  reset_sync dut (.clk, .ext_rst_n, .locked, .rst_n);

  localparam int HOLD = 16;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Count rising edges from now until rst_n is high (sampled after each).
  task automatic edges_to_release(output int n);
    n = 0;
    while (!rst_n && n < 200) begin
      @(posedge clk); #1;
      n++;
    end
  endtask

  initial begin
    int n;
    repeat (3) @(posedge clk);
    #1 check(rst_n == 1'b0, "reset held while both inputs are bad");
    @(negedge clk) ext_rst_n = 1'b1;
    repeat (30) @(posedge clk);
    #1 check(rst_n == 1'b0, "reset held while the clock is not locked");

    for (int trial = 0; trial < 4; trial++) begin
      @(negedge clk) locked = 1'b1;
      edges_to_release(n);
      check(n == HOLD + 3, $sformatf("trial %0d: release after %0d edges, expected %0d", trial, n, HOLD + 3));
      repeat (5) @(posedge clk);
      #1 check(rst_n == 1'b1, "reset stays released");
      // Drop one input half way between edges: reset must assert at once.
      @(posedge clk); #2;
      if (trial % 2 == 0) locked = 1'b0; else ext_rst_n = 1'b0;
      #1 check(rst_n == 1'b0, "reset asserts without a clock edge");
      repeat (3) @(posedge clk);
      @(negedge clk) begin locked = 1'b0; ext_rst_n = 1'b1; end
    end

    // A short loss of lock part way through the count restarts it.
    @(negedge clk) locked = 1'b1;
    repeat (8) @(posedge clk);
    @(negedge clk) locked = 1'b0;
    @(negedge clk) locked = 1'b1;
    edges_to_release(n);
    check(n == HOLD + 3, $sformatf("count restarted: release after %0d edges", n));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
