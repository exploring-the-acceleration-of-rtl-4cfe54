// tb_pw_column_ram: self-checking test of the kernel's column buffer RAM at
// its default depth (66 columns of 64 levels).
//
// A reference array follows every write. Random writes and reads, often to
// the same address in the same cycle, check that read data appears exactly
// one cycle after the address, that a read in the cycle of a write to the
// same address returns the old word (read-first, as the kernel's schedule
// assumes), and that the first and last words of the range are reachable.
module tb_pw_column_ram;

  localparam int DEPTH = 66 * 64;
  localparam int AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          we;
  logic [AW-1:0] waddr, raddr;
  logic [63:0]   wdata, rdata;

  pw_column_ram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  int checks = 0, failures = 0;
  logic [63:0] ref_mem [DEPTH];
  logic [63:0] expect_q;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    // Fill every word first.
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      // Read-first: the word a read sees is the one before this cycle's write.
      raddr = (t % 5 == 0) ? waddr : AW'($urandom_range(DEPTH - 1));
      if (t == 10) raddr = '0;
      if (t == 11) raddr = AW'(DEPTH - 1);
      expect_q = ref_mem[raddr];
      we = ($urandom_range(1) == 1);
      waddr = (t % 5 == 4) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = {$urandom, $urandom};
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk);
      #1;
      check(rdata == expect_q, $sformatf("t=%0d read of %0d: %h vs %h", t, raddr, rdata, expect_q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
