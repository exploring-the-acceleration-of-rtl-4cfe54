// pw_field_pipe: the source term of one flow field at one grid point.
//
// Every field of the Piacsek-Williams scheme has the same shape: in each of
// the three directions an advected value on one side is multiplied by the sum
// of two advecting velocities on that face, and the same is done on the
// opposite side and subtracted:
//
//   result = ( cx*(ax1*(bx1+cx1) - ax2*(bx2+cx2))
//            + cy*(ay1*(by1+cy1) - ay2*(by2+cy2)) )
//            + ( (z1*az1)*(bz1+cz1) - (z2*az2)*(bz2+cz2) )
//
// cx and cy are the horizontal coefficients tcx, tcy and z1, z2 the
// per-level vertical ones (tzc1/tzc2, or tzd1/tzd2 for w). The operations are
// laid out as six layers of floating point units, each fed every cycle:
//   1: the six face sums, and z1*az1, z2*az2      (max(LAT_ADD, LAT_MUL))
//   2: the six face products                       (LAT_MUL)
//   3: the three differences                       (LAT_ADD)
//   4: times cx and cy                             (LAT_MUL)
//   5: x term + y term                             (LAT_ADD)
//   6: + z term                                    (LAT_ADD)
// Operands a layer does not use travel in delay lines beside it. The order of
// summation, and which term is subtracted, follows the paper's listing of the
// u field; the grouping of the last two additions is this design's choice.
// That is 11 additions/subtractions and 10 multiplications per field.
//
// Timing: operands in one cycle, result LATENCY cycles later, a new point
// every cycle.
module pw_field_pipe #(
  parameter int unsigned LAT_ADD = 8,
  parameter int unsigned LAT_MUL = 14,
  localparam int unsigned L1 = (LAT_ADD > LAT_MUL) ? LAT_ADD : LAT_MUL,
  localparam int unsigned LATENCY = L1 + LAT_MUL + LAT_ADD + LAT_MUL + 2*LAT_ADD
) (
  input  logic        clk,
  input  logic [63:0] ax1, bx1, cx1, ax2, bx2, cx2,
  input  logic [63:0] ay1, by1, cy1, ay2, by2, cy2,
  input  logic [63:0] az1, bz1, cz1, az2, bz2, cz2,
  input  logic [63:0] cx, cy, z1, z2,
  output logic [63:0] result
);

  // Layer 1: face sums and scaled vertical operands.
  logic [63:0] s_raw [6];
  logic [63:0] s     [6];
  logic [63:0] bb    [6];
  logic [63:0] cc    [6];
  assign bb = '{bx1, bx2, by1, by2, bz1, bz2};
  assign cc = '{cx1, cx2, cy1, cy2, cz1, cz2};

  for (genvar n = 0; n < 6; n++) begin : g_sum
    fp64_add #(.LATENCY(LAT_ADD)) u_add (.clk, .a(bb[n]), .b(cc[n]), .sub(1'b0), .y(s_raw[n]));
    delay_line #(.WIDTH(64), .DEPTH(L1 - LAT_ADD)) u_al (.clk, .d(s_raw[n]), .q(s[n]));
  end

  logic [63:0] zz_raw [2];
  logic [63:0] zz     [2];
  fp64_mul #(.LATENCY(LAT_MUL)) u_z1 (.clk, .a(z1), .b(az1), .y(zz_raw[0]));
  fp64_mul #(.LATENCY(LAT_MUL)) u_z2 (.clk, .a(z2), .b(az2), .y(zz_raw[1]));
  for (genvar n = 0; n < 2; n++) begin : g_zal
    delay_line #(.WIDTH(64), .DEPTH(L1 - LAT_MUL)) u_al (.clk, .d(zz_raw[n]), .q(zz[n]));
  end

  logic [63:0] a_d [4];
  delay_line #(.WIDTH(64), .DEPTH(L1)) u_dax1 (.clk, .d(ax1), .q(a_d[0]));
  delay_line #(.WIDTH(64), .DEPTH(L1)) u_dax2 (.clk, .d(ax2), .q(a_d[1]));
  delay_line #(.WIDTH(64), .DEPTH(L1)) u_day1 (.clk, .d(ay1), .q(a_d[2]));
  delay_line #(.WIDTH(64), .DEPTH(L1)) u_day2 (.clk, .d(ay2), .q(a_d[3]));

  logic [63:0] cx_d, cy_d;
  delay_line #(.WIDTH(64), .DEPTH(L1 + LAT_MUL + LAT_ADD)) u_dcx (.clk, .d(cx), .q(cx_d));
  delay_line #(.WIDTH(64), .DEPTH(L1 + LAT_MUL + LAT_ADD)) u_dcy (.clk, .d(cy), .q(cy_d));

  // Layer 2: face products.
  logic [63:0] p [6];
  for (genvar n = 0; n < 4; n++) begin : g_prod_xy
    fp64_mul #(.LATENCY(LAT_MUL)) u_mul (.clk, .a(a_d[n]), .b(s[n]), .y(p[n]));
  end
  fp64_mul #(.LATENCY(LAT_MUL)) u_pz1 (.clk, .a(zz[0]), .b(s[4]), .y(p[4]));
  fp64_mul #(.LATENCY(LAT_MUL)) u_pz2 (.clk, .a(zz[1]), .b(s[5]), .y(p[5]));

  // Layer 3: differences.
  logic [63:0] dx, dy, dz;
  fp64_add #(.LATENCY(LAT_ADD)) u_dx (.clk, .a(p[0]), .b(p[1]), .sub(1'b1), .y(dx));
  fp64_add #(.LATENCY(LAT_ADD)) u_dy (.clk, .a(p[2]), .b(p[3]), .sub(1'b1), .y(dy));
  fp64_add #(.LATENCY(LAT_ADD)) u_dz (.clk, .a(p[4]), .b(p[5]), .sub(1'b1), .y(dz));

  // Layer 4: horizontal coefficients; the z term waits.
  logic [63:0] ex, ey, dz_d;
  fp64_mul #(.LATENCY(LAT_MUL)) u_ex (.clk, .a(cx_d), .b(dx), .y(ex));
  fp64_mul #(.LATENCY(LAT_MUL)) u_ey (.clk, .a(cy_d), .b(dy), .y(ey));
  delay_line #(.WIDTH(64), .DEPTH(LAT_MUL + LAT_ADD)) u_ddz (.clk, .d(dz), .q(dz_d));

  // Layers 5 and 6: accumulate.
  logic [63:0] fxy;
  fp64_add #(.LATENCY(LAT_ADD)) u_fxy (.clk, .a(ex), .b(ey), .sub(1'b0), .y(fxy));
  fp64_add #(.LATENCY(LAT_ADD)) u_sum (.clk, .a(fxy), .b(dz_d), .sub(1'b0), .y(result));

endmodule
