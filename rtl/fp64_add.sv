// fp64_add: pipelined IEEE-754 binary64 adder/subtractor.
//
// Computes a + b, or a - b when sub is set, rounded to nearest even. The
// operands are aligned with guard, round and sticky bits, added or
// subtracted, renormalised with a leading-zero count and rounded in one
// combinational step, then carried through LATENCY register stages so that a
// new operation can start every cycle. Each addition or subtraction of the
// stencil datapath is one instance (33 per grid point for su, sv and sw
// together; the paper counts 53 double precision operations of both kinds). The paper states that
// addition uses the vendor's "full DSP" core but gives no latency for it; the
// default of 8 is this design's choice, as is the arithmetic.
//
// Like fp64_mul, subnormal inputs are read as zero, subnormal results are
// flushed to zero and NaN results are the quiet NaN 0x7FF8_0000_0000_0000.
// An exact zero difference is +0, as round to nearest even requires.
//
// Interface: a, b, sub in; y out LATENCY cycles later.
module fp64_add #(
  parameter int unsigned LATENCY = 8
) (
  input  logic         clk,
  input  logic [63:0]  a,
  input  logic [63:0]  b,
  input  logic         sub,
  output logic [63:0]  y
);

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic [63:0] res;

  always_comb begin
    logic        sa, sb, sx, sy;
    logic [10:0] ea, eb, ex, ey;
    logic [51:0] fa, fb, fx, fy;
    logic        a_inf, b_inf, a_nan, b_nan, a_zero, b_zero;
    logic [10:0] d;
    logic [55:0] mx, my, my_sh;   // 1 + 52 + guard/round/sticky
    logic        st;
    logic [56:0] sum;
    logic [5:0]  lz;
    logic signed [12:0] exp;
    logic [53:0] rm;              // rounded significand, spare carry bit
    logic        eff_sub;
    logic        found;

    res = '0;
    lz = '0;
    found = 1'b0;

    sa = a[63]; sb = b[63] ^ sub;
    ea = a[62:52]; eb = b[62:52];
    fa = a[51:0];  fb = b[51:0];
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (fa == 52'd0);
    b_inf  = (eb == 11'h7FF) && (fb == 52'd0);
    a_nan  = (ea == 11'h7FF) && (fa != 52'd0);
    b_nan  = (eb == 11'h7FF) && (fb != 52'd0);

    // x is the operand of larger magnitude.
    if ({ea, fa} >= {eb, fb}) begin
      sx = sa; ex = ea; fx = fa; sy = sb; ey = eb; fy = fb;
    end else begin
      sx = sb; ex = eb; fx = fb; sy = sa; ey = ea; fy = fa;
    end
    eff_sub = sx ^ sy;
    d  = ex - ey;
    mx = {1'b1, fx, 3'b000};
    my = {1'b1, fy, 3'b000};
    if (d > 11'd55) begin
      my_sh = 56'd0;
      st    = 1'b1;
    end else begin
      my_sh = my >> d;
      st    = |(my & ((56'd1 << d) - 56'd1));
    end
    my_sh[0] = my_sh[0] | st;

    if (eff_sub) sum = {1'b0, mx} - {1'b0, my_sh};
    else         sum = {1'b0, mx} + {1'b0, my_sh};

    exp = 13'(ex);
    if (sum[56]) begin
      sum = {1'b0, sum[56:2], sum[1] | sum[0]};
      exp = exp + 13'sd1;
    end else begin
      lz = 6'd0;
      found = 1'b0;
      for (int i = 55; i >= 0; i--) begin
        if (sum[i]) found = 1'b1;
        else if (!found) lz = lz + 6'd1;
      end
      if (lz != 6'd0 && sum[55:0] != 56'd0) begin
        sum = sum << lz;
        exp = exp - 13'(lz);
      end
    end
    // sum[55] is the hidden bit, sum[54:3] the fraction, sum[2] guard,
    // sum[1:0] round and sticky.
    rm = {1'b0, sum[55:3]};
    if (sum[2] && (sum[1] || sum[0] || sum[3])) rm = rm + 54'd1;
    if (rm[53]) begin
      rm  = rm >> 1;
      exp = exp + 13'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) res = QNAN;
    else if (a_inf)                     res = {sa, 11'h7FF, 52'd0};
    else if (b_inf)                     res = {sb, 11'h7FF, 52'd0};
    else if (a_zero && b_zero)          res = {sa & sb, 63'd0};
    else if (b_zero)                    res = {sa, ea, fa};
    else if (a_zero)                    res = {sb, eb, fb};
    else if (sum[55:0] == 56'd0)        res = 64'd0;
    else if (exp >= 13'sd2047)          res = {sx, 11'h7FF, 52'd0};
    else if (exp <= 13'sd0)             res = {sx, 63'd0};
    else                                res = {sx, exp[10:0], rm[51:0]};
  end

  logic [63:0] pipe [LATENCY];

  always_ff @(posedge clk) begin
    pipe[0] <= res;
    for (int unsigned s = 1; s < LATENCY; s++) pipe[s] <= pipe[s-1];
  end

  assign y = pipe[LATENCY-1];

endmodule
