// pw_ref_pkg: reference model of the advection source terms, in plain real arithmetic.
//
// pw_cell() evaluates SU, SV and SW for one cell from its three 3x3x3
// neighbourhoods ([x][y][z], 1 = centre), using the same association of
// operations as the hardware: (x term + y term) + z term, with
// x term = tcx*(Pa*(a1+a2) - Pb*(a3+a4)) and so on. Host double arithmetic
// rounds to nearest even, so results must match the hardware bit for bit.
package pw_ref_pkg;
  typedef real cube_t [3][3][3];

  function automatic real term(real tc, real pa, real a1, real a2, real pb, real a3, real a4);
    return tc * (pa * (a1 + a2) - pb * (a3 + a4));
  endfunction

  // one field: returns (x+y)+z, or (x+y)+zlow when top
  function automatic real field(real tx, real ty, real c1, real ra, real e1, real e2,
                                real c2, real rb, real e3, real e4, bit top);
    real zl, zh;
    zl = (c1 * ra) * (e1 + e2);
    zh = (c2 * rb) * (e3 + e4);
    if (top) return (tx + ty) + zl;
    return (tx + ty) + (zl - zh);
  endfunction

  // res[0..2] = SU, SV, SW
  function automatic void pw_cell(input cube_t U, input cube_t V, input cube_t W,
                                  input real tcx, input real tcy,
                                  input real tzc1, input real tzc2, input real tzd1, input real tzd2,
                                  input bit valid, input bit top, output real res [3]);
    real tx, ty;
    if (!valid) begin
      res = '{0.0, 0.0, 0.0};
      return;
    end
    // SU
    tx = term(tcx, U[0][1][1], U[1][1][1], U[0][1][1], U[2][1][1], U[1][1][1], U[2][1][1]);
    ty = term(tcy, U[1][0][1], V[1][0][1], V[2][0][1], U[1][2][1], V[1][1][1], V[2][1][1]);
    res[0] = field(tx, ty, tzc1, U[1][1][0], W[1][1][0], W[2][1][0], tzc2, U[1][1][2], W[1][1][1], W[2][1][1], top);
    // SV
    tx = term(tcx, V[0][1][1], U[0][1][1], U[0][2][1], V[2][1][1], U[1][1][1], U[1][2][1]);
    ty = term(tcy, V[1][0][1], V[1][1][1], V[1][0][1], V[1][2][1], V[1][1][1], V[1][2][1]);
    res[1] = field(tx, ty, tzc1, V[1][1][0], W[1][1][0], W[1][2][0], tzc2, V[1][1][2], W[1][1][1], W[1][2][1], top);
    // SW
    if (top) res[2] = 0.0;
    else begin
      tx = term(tcx, W[0][1][1], U[0][1][1], U[0][1][2], W[2][1][1], U[1][1][1], U[1][1][2]);
      ty = term(tcy, W[1][0][1], V[1][0][1], V[1][0][2], W[1][2][1], V[1][1][1], V[1][1][2]);
      res[2] = field(tx, ty, tzd1, W[1][1][0], W[1][1][1], W[1][1][0], tzd2, W[1][1][2], W[1][1][1], W[1][1][2], 1'b0);
    end
  endfunction

  // a random double in [-8, 8) with a short mantissa mix
  function automatic real rnd();
    return ($urandom() / 4294967296.0) * 16.0 - 8.0;
  endfunction
endpackage
