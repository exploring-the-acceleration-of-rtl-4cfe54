// tb_fp64_add: self-checking test of the double precision adder and subtractor.
//
// Streams one operand pair per cycle: 2000 random normal operands (results
// stay in the normal range) and a list of special cases (signed zeros,
// infinities, NaN, overflow). Each result must equal, bit for bit, the
// simulator's own double precision sum or difference and must appear exactly LATENCY
// cycles after its operands, which checks the pipeline depth and the
// one-per-cycle rate together.
module tb_fp64_add;
  localparam int LAT = 8;
  localparam int N   = 2000;
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;
  localparam logic [63:0] PINF = 64'h7FF0_0000_0000_0000;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic [63:0] a, b, y;
  logic sub;
  fp64_add #(.LATENCY(LAT)) dut (.clk, .a, .b, .sub, .y);

  int checks = 0, failures = 0;
  logic [63:0] ea [$], eb [$];
  bit es [$];

  function automatic logic [63:0] rnd(int lo, int hi);
    return {1'($urandom_range(1)), 11'($urandom_range(hi, lo)), $urandom(), 20'($urandom())};
  endfunction

  function automatic logic [63:0] expect_of(logic [63:0] x, logic [63:0] z, bit s);
    real r;
    logic [63:0] bits;
    r = s ? $bitstoreal(x) - $bitstoreal(z) : $bitstoreal(x) + $bitstoreal(z);
    // Any NaN is expected as the one quiet NaN the unit produces.
    bits = $realtobits(r);
    if (bits[62:52] == 11'h7FF && bits[51:0] != 52'd0) return QNAN;
    return bits;
  endfunction

  initial begin
    logic [63:0] sa [$], sb [$];
    sa = '{64'h0, 64'h8000_0000_0000_0000, PINF, PINF, QNAN, 64'h3FF0_0000_0000_0000,
           64'h7FE0_0000_0000_0000, 64'hC000_0000_0000_0000, 64'h3FF8_0000_0000_0000};
    sb = '{64'h4008_0000_0000_0000, 64'h4008_0000_0000_0000, 64'hBFF0_0000_0000_0000, 64'h0,
           64'h3FF0_0000_0000_0000, 64'h3FF0_0000_0000_0001, 64'h4010_0000_0000_0000,
           64'h8000_0000_0000_0000, 64'h3FF8_0000_0000_0000};
    // Near cancellation: equal operands, and operands with close exponents.
    sa.push_back(64'h4011_2345_6789_ABCD); sb.push_back(64'h4011_2345_6789_ABCD);
    sa.push_back(64'h7FEF_FFFF_FFFF_FFFF); sb.push_back(64'h7FEF_FFFF_FFFF_FFFF);
    for (int n = 0; n < N; n++) begin
      int e;
      e = int'($urandom_range(1100, 900));
      sa.push_back(rnd(e - 3, e + 3));
      sb.push_back((n % 4 == 0) ? rnd(e - 60, e + 60) : rnd(e - 3, e + 3));
    end
    a = '0; b = '0; sub = 1'b0;
    for (int n = 0; n < sa.size() + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        logic [63:0] e;
        e = expect_of(ea[0], eb[0], es[0]);
        checks++;
        if (y !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %h +- %h = %h, expected %h", ea[0], eb[0], y, e);
        end
        void'(ea.pop_front()); void'(eb.pop_front()); void'(es.pop_front());
      end
      if (n < sa.size()) begin
        a = sa[n]; b = sb[n]; sub = (n % 2 == 1);
      end
      ea.push_back(a); eb.push_back(b); es.push_back(sub);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 2 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
