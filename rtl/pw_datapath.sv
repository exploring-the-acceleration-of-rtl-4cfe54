// pw_datapath: the pipelined PW advection arithmetic for one grid point.
//
// Takes the 3x3x3 neighbourhoods of u, v and w around grid point (k, j, i)
// and produces the three source terms su, sv and sw, accepting a new point
// every cycle (initiation interval 1) as the paper's pipelined inner loop
// does. Each source term is one pw_field_pipe. The u term is the paper's
// listing:
//   su = tcx*(u(i-1)*(u+u(i-1)) - u(i+1)*(u+u(i+1)))
//      + tcy*(u(j-1)*(v(j-1)+v(j-1,i+1)) - u(j+1)*(v+v(i+1)))
//      + tzc1(k)*u(k-1)*(w(k-1)+w(k-1,i+1)) - tzc2(k)*u(k+1)*(w+w(i+1))
// The paper omits v and w as "very similar"; here they follow the same
// staggered-grid pattern with the roles of the directions exchanged, as in
// the open-source model the kernel comes from, and sw uses the tzd1/tzd2
// coefficients in Z.
//
// Boundary levels. On the top level (is_top) the paper drops the tzc2 term;
// here this is done by forcing the second vertical coefficient and the k+1
// operands to zero, and sw, which has no value on the top level, is output
// as zero. The bottom level (is_zero) is not computed by the scheme and all
// three outputs are zero there. The tag travels alongside and comes out with
// the result.
//
// Timing: in_valid/operands in; out_valid, su, sv, sw and out_tag LATENCY
// cycles later. No stall.
module pw_datapath
  import monc_pkg::*;
#(
  parameter int unsigned LAT_ADD = 8,
  parameter int unsigned LAT_MUL = 14,
  parameter int unsigned TAG_W   = 16,
  localparam int unsigned L1 = (LAT_ADD > LAT_MUL) ? LAT_ADD : LAT_MUL,
  localparam int unsigned LATENCY = L1 + LAT_MUL + LAT_ADD + LAT_MUL + 2*LAT_ADD
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             is_top,
  input  logic             is_zero,
  input  logic [TAG_W-1:0] in_tag,
  input  stencil_t         u,
  input  stencil_t         v,
  input  stencil_t         w,
  input  fp64_t            tcx,
  input  fp64_t            tcy,
  input  fp64_t            tzc1,
  input  fp64_t            tzc2,
  input  fp64_t            tzd1,
  input  fp64_t            tzd2,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fp64_t            su,
  output fp64_t            sv,
  output fp64_t            sw
);

  // Upper level (dk = +1) is zeroed on the top level.
  stencil_t uu, vv, ww;
  always_comb begin
    uu = u; vv = v; ww = w;
    if (is_top) begin
      uu[2] = '0; vv[2] = '0; ww[2] = '0;
    end
  end

  // f(dk, dj, di) with offsets -1..+1.
  `define PW_U(dk, dj, di) uu[(dk)+1][(dj)+1][(di)+1]
  `define PW_V(dk, dj, di) vv[(dk)+1][(dj)+1][(di)+1]
  `define PW_W(dk, dj, di) ww[(dk)+1][(dj)+1][(di)+1]

  fp64_t z2_u, z2_w;
  assign z2_u = is_top ? '0 : tzc2;
  assign z2_w = is_top ? '0 : tzd2;

  fp64_t su_raw, sv_raw, sw_raw;

  pw_field_pipe #(.LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_su (
    .clk,
    .ax1(`PW_U(0,0,-1)), .bx1(`PW_U(0,0,0)),  .cx1(`PW_U(0,0,-1)),
    .ax2(`PW_U(0,0,1)),  .bx2(`PW_U(0,0,0)),  .cx2(`PW_U(0,0,1)),
    .ay1(`PW_U(0,-1,0)), .by1(`PW_V(0,-1,0)), .cy1(`PW_V(0,-1,1)),
    .ay2(`PW_U(0,1,0)),  .by2(`PW_V(0,0,0)),  .cy2(`PW_V(0,0,1)),
    .az1(`PW_U(-1,0,0)), .bz1(`PW_W(-1,0,0)), .cz1(`PW_W(-1,0,1)),
    .az2(`PW_U(1,0,0)),  .bz2(`PW_W(0,0,0)),  .cz2(`PW_W(0,0,1)),
    .cx(tcx), .cy(tcy), .z1(tzc1), .z2(z2_u), .result(su_raw));

  pw_field_pipe #(.LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_sv (
    .clk,
    .ax1(`PW_V(0,0,-1)), .bx1(`PW_U(0,0,-1)), .cx1(`PW_U(0,1,-1)),
    .ax2(`PW_V(0,0,1)),  .bx2(`PW_U(0,0,0)),  .cx2(`PW_U(0,1,0)),
    .ay1(`PW_V(0,-1,0)), .by1(`PW_V(0,0,0)),  .cy1(`PW_V(0,-1,0)),
    .ay2(`PW_V(0,1,0)),  .by2(`PW_V(0,0,0)),  .cy2(`PW_V(0,1,0)),
    .az1(`PW_V(-1,0,0)), .bz1(`PW_W(-1,0,0)), .cz1(`PW_W(-1,1,0)),
    .az2(`PW_V(1,0,0)),  .bz2(`PW_W(0,0,0)),  .cz2(`PW_W(0,1,0)),
    .cx(tcx), .cy(tcy), .z1(tzc1), .z2(z2_u), .result(sv_raw));

  pw_field_pipe #(.LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_sw (
    .clk,
    .ax1(`PW_W(0,0,-1)), .bx1(`PW_U(0,0,-1)), .cx1(`PW_U(1,0,-1)),
    .ax2(`PW_W(0,0,1)),  .bx2(`PW_U(0,0,0)),  .cx2(`PW_U(1,0,0)),
    .ay1(`PW_W(0,-1,0)), .by1(`PW_V(0,-1,0)), .cy1(`PW_V(1,-1,0)),
    .ay2(`PW_W(0,1,0)),  .by2(`PW_V(0,0,0)),  .cy2(`PW_V(1,0,0)),
    .az1(`PW_W(-1,0,0)), .bz1(`PW_W(0,0,0)),  .cz1(`PW_W(-1,0,0)),
    .az2(`PW_W(1,0,0)),  .bz2(`PW_W(0,0,0)),  .cz2(`PW_W(1,0,0)),
    .cx(tcx), .cy(tcy), .z1(tzd1), .z2(z2_w), .result(sw_raw));

  `undef PW_U
  `undef PW_V
  `undef PW_W

  // Control travels beside the arithmetic.
  logic             v_d, top_d, zero_d;
  logic [TAG_W-1:0] tag_d;
  delay_line #(.WIDTH(TAG_W + 2), .DEPTH(LATENCY)) u_dctl (
    .clk, .d({in_tag, is_top, is_zero}), .q({tag_d, top_d, zero_d}));

  // The valid flag is reset so that no result appears before the first point.
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], in_valid};
  end
  assign v_d = vpipe[LATENCY-1];

  assign out_valid = v_d;
  assign out_tag   = tag_d;
  assign su = zero_d ? '0 : su_raw;
  assign sv = zero_d ? '0 : sv_raw;
  assign sw = (zero_d || top_d) ? '0 : sw_raw;

endmodule
