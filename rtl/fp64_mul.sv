// fp64_mul: pipelined IEEE-754 binary64 multiplier.
//
// Each multiplication of the stencil datapath uses one of these (30 per grid
// point for su, sv and sw together). The
// product is computed in one combinational step (53x53-bit significand
// product, round to nearest even) and then carried through LATENCY register
// stages, so a new operand pair can enter every cycle (initiation interval 1)
// and its result leaves LATENCY cycles later. A synthesis tool with register
// retiming spreads the logic across those stages, which is how the vendor
// core's pipeline depth trades against clock period. The default latency of
// 14 is the multiplier latency the paper configures to reach 310 MHz; the
// arithmetic itself is this design's own.
//
// Departures from full IEEE-754, chosen here for size: subnormal inputs are
// read as zero and results that would be subnormal are flushed to a signed
// zero; every NaN result is the quiet NaN 0x7FF8_0000_0000_0000. Infinities
// and signed zeros follow the standard.
//
// Interface: a, b in; y out, LATENCY cycles after a and b were sampled.
module fp64_mul #(
  parameter int unsigned LATENCY = 14
) (
  input  logic         clk,
  input  logic [63:0]  a,
  input  logic [63:0]  b,
  output logic [63:0]  y
);

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic [63:0] res;

  always_comb begin
    logic        sa, sb, sy;
    logic [10:0] ea, eb;
    logic [51:0] fa, fb;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [105:0] prod;
    logic [53:0]  mant;      // one spare bit for the rounding carry
    logic         guard, sticky;
    logic signed [13:0] exp;

    sa = a[63]; sb = b[63]; sy = sa ^ sb;
    ea = a[62:52]; eb = b[62:52];
    fa = a[51:0];  fb = b[51:0];
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (fa == 52'd0);
    b_inf  = (eb == 11'h7FF) && (fb == 52'd0);
    a_nan  = (ea == 11'h7FF) && (fa != 52'd0);
    b_nan  = (eb == 11'h7FF) && (fb != 52'd0);

    prod = {1'b1, fa} * {1'b1, fb};
    if (prod[105]) begin
      mant   = {1'b0, prod[105:53]};
      guard  = prod[52];
      sticky = |prod[51:0];
      exp    = 14'(ea) + 14'(eb) - 14'sd1022;
    end else begin
      mant   = {1'b0, prod[104:52]};
      guard  = prod[51];
      sticky = |prod[50:0];
      exp    = 14'(ea) + 14'(eb) - 14'sd1023;
    end
    if (guard && (sticky || mant[0])) mant = mant + 54'd1;
    if (mant[53]) begin
      mant = mant >> 1;
      exp  = exp + 14'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) res = QNAN;
    else if (a_inf || b_inf)       res = {sy, 11'h7FF, 52'd0};
    else if (a_zero || b_zero)     res = {sy, 63'd0};
    else if (exp >= 14'sd2047)     res = {sy, 11'h7FF, 52'd0};
    else if (exp <= 14'sd0)        res = {sy, 63'd0};
    else                           res = {sy, exp[10:0], mant[51:0]};
  end

  logic [63:0] pipe [LATENCY];

  always_ff @(posedge clk) begin
    pipe[0] <= res;
    for (int unsigned s = 1; s < LATENCY; s++) pipe[s] <= pipe[s-1];
  end

  assign y = pipe[LATENCY-1];

endmodule
