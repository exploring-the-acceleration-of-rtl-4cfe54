// pw_ref_pkg: reference model of the PW advection source terms, for the
// testbenches.
//
// Written directly from the advection formulas with the simulator's own
// double precision arithmetic (round to nearest even), independently of the
// RTL floating point units. The operations are grouped in the order the
// hardware evaluates them, so results must match bit for bit:
//   field = (cx*(a1*(b1+c1) - a2*(b2+c2)) + cy*(a3*(b3+c3) - a4*(b4+c4)))
//           + ((z1*a5)*(b5+c5) - (z2*a6)*(b6+c6))
// On the top level the k+1 operands and z2 are zero and sw is zero; on level
// 0 all three terms are zero. Also provides a generator of test values and
// the memory layout of the fields.
package pw_ref_pkg;

  typedef real rst_t [3][3][3];   // [dk+1][dj+1][di+1]

  function automatic real term(real a1, b1, c1, a2, b2, c2, a3, b3, c3, a4, b4, c4,
                               real a5, b5, c5, a6, b6, c6, real cx, cy, z1, z2);
    real ex, ey, dz;
    ex = cx * (a1 * (b1 + c1) - a2 * (b2 + c2));
    ey = cy * (a3 * (b3 + c3) - a4 * (b4 + c4));
    dz = (z1 * a5) * (b5 + c5) - (z2 * a6) * (b6 + c6);
    return (ex + ey) + dz;
  endfunction

  function automatic void pw_point(rst_t u_in, rst_t v_in, rst_t w_in,
                                   real tcx, tcy, tzc1, tzc2, tzd1, tzd2,
                                   bit top, bit zero,
                                   output real su, output real sv, output real sw);
    rst_t u, v, w;
    real z2u, z2w;
    u = u_in; v = v_in; w = w_in;
    z2u = tzc2; z2w = tzd2;
    if (top) begin
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < 3; b++) begin
          u[2][a][b] = 0.0; v[2][a][b] = 0.0; w[2][a][b] = 0.0;
        end
      z2u = 0.0; z2w = 0.0;
    end
    // f[dk+1][dj+1][di+1]
    su = term(u[1][1][0], u[1][1][1], u[1][1][0],  u[1][1][2], u[1][1][1], u[1][1][2],
              u[1][0][1], v[1][0][1], v[1][0][2],  u[1][2][1], v[1][1][1], v[1][1][2],
              u[0][1][1], w[0][1][1], w[0][1][2],  u[2][1][1], w[1][1][1], w[1][1][2],
              tcx, tcy, tzc1, z2u);
    sv = term(v[1][1][0], u[1][1][0], u[1][2][0],  v[1][1][2], u[1][1][1], u[1][2][1],
              v[1][0][1], v[1][1][1], v[1][0][1],  v[1][2][1], v[1][1][1], v[1][2][1],
              v[0][1][1], w[0][1][1], w[0][2][1],  v[2][1][1], w[1][1][1], w[1][2][1],
              tcx, tcy, tzc1, z2u);
    sw = term(w[1][1][0], u[1][1][0], u[2][1][0],  w[1][1][2], u[1][1][1], u[2][1][1],
              w[1][0][1], v[1][0][1], v[2][0][1],  w[1][2][1], v[1][1][1], v[2][1][1],
              w[0][1][1], w[1][1][1], w[0][1][1],  w[2][1][1], w[1][1][1], w[2][1][1],
              tcx, tcy, tzd1, z2w);
    if (top) sw = 0.0;
    if (zero) begin su = 0.0; sv = 0.0; sw = 0.0; end
  endfunction

  // A test value: a multiple of 1/64 in -8..+8, never zero.
  function automatic real rand_val();
    int r;
    r = int'($urandom_range(1023)) - 512;
    if (r == 0) r = 1;
    return real'(r) / 64.0 + real'($urandom_range(1000)) * 1.0e-6;
  endfunction

  // Word index of point (i, j, k) of a field stored from word 'base' on.
  function automatic longint unsigned widx(longint unsigned base, int i, int j, int k,
                                           int sy, int sz);
    return base + longint'((i * (sy + 2) + j) * sz + k);
  endfunction

endpackage
