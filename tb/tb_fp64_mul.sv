// tb_fp64_mul: self-checking test of the double precision multiplier.
//
// Streams one operand pair per cycle: 2000 random normal operands (results
// stay in the normal range) and a list of special cases (signed zeros,
// infinities, NaN, overflow). Each result must equal, bit for bit, the
// simulator's own double precision product and must appear exactly LATENCY
// cycles after its operands, which checks the pipeline depth and the
// one-per-cycle rate together.
module tb_fp64_mul;
  localparam int LAT = 14;
  localparam int N   = 2000;
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;
  localparam logic [63:0] PINF = 64'h7FF0_0000_0000_0000;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic [63:0] a, b, y;
  fp64_mul #(.LATENCY(LAT)) dut (.clk, .a, .b, .y);

  int checks = 0, failures = 0;
  logic [63:0] ea [$], eb [$];

  function automatic logic [63:0] rnd(int lo, int hi);
    return {1'($urandom_range(1)), 11'($urandom_range(hi, lo)), $urandom(), 20'($urandom())};
  endfunction

  function automatic logic [63:0] expect_of(logic [63:0] x, logic [63:0] z);
    real r;
    logic [63:0] bits;
    r = $bitstoreal(x) * $bitstoreal(z);
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
    for (int n = 0; n < N; n++) begin
      sa.push_back(rnd(700, 1300));
      sb.push_back(rnd(700, 1300));
    end
    a = '0; b = '0;
    for (int n = 0; n < sa.size() + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        logic [63:0] e;
        e = expect_of(ea[0], eb[0]);
        checks++;
        if (y !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %h * %h = %h, expected %h", ea[0], eb[0], y, e);
        end
        void'(ea.pop_front()); void'(eb.pop_front());
      end
      if (n < sa.size()) begin
        a = sa[n]; b = sb[n];
      end
      ea.push_back(a); eb.push_back(b);
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
