// fp64_unit: IEEE-754 binary64 add, subtract or multiply with one register stage.
//
// This is the arithmetic core of the compute stage; every one of the per-cell
// double precision operations is one instance. The operation is chosen by `op`
// (0 add, 1 subtract, 2 multiply). Results are rounded to nearest, ties to even,
// like the floating point cores the HLS tools generate. To stay small the unit
// flushes subnormal inputs and results to zero; infinities and NaNs propagate
// (a NaN result is the canonical quiet NaN). Those simplifications are this
// design's choice; the atmospheric fields never come near the subnormal range.
//
// Timing: when `en` is high the result of (a op b) appears on `y` one clock
// later; with `en` low `y` holds. Reset clears `y` to +0.
module fp64_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [1:0]  op,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  function automatic logic [63:0] pack_round(input logic s, input int e, input logic [55:0] m);
    // m[55] is the leading one, m[2:0] are guard, round and sticky
    logic [53:0] r;
    logic        up;
    int          ee;
    up = m[2] & (m[1] | m[0] | m[3]);
    r  = {1'b0, m[55:3]} + 54'(up);
    ee = e;
    if (r[53]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 2047) return {s, 11'h7FF, 52'd0};
    if (ee <= 0)    return {s, 63'd0};
    return {s, 11'(ee), r[51:0]};
  endfunction

  function automatic logic [63:0] fadd(input logic [63:0] x, input logic [63:0] z);
    logic        sx, sz, sr;
    logic [10:0] ex, ez;
    logic [52:0] mx, mz;
    logic [55:0] fx, fz, dm;
    logic [56:0] sum;
    logic [119:0] sh;
    int          d, lz, e;
    sx = x[63]; sz = z[63]; ex = x[62:52]; ez = z[62:52];
    if ((ex == 11'h7FF && x[51:0] != 0) || (ez == 11'h7FF && z[51:0] != 0)) return QNAN;
    if (ex == 11'h7FF && ez == 11'h7FF) return (sx == sz) ? x : QNAN;
    if (ex == 11'h7FF) return x;
    if (ez == 11'h7FF) return z;
    if (ex == 0 && ez == 0) return {sx & sz, 63'd0};
    if (ex == 0) return z;
    if (ez == 0) return x;
    mx = {1'b1, x[51:0]};
    mz = {1'b1, z[51:0]};
    // make x the larger magnitude
    if ({ez, mz} > {ex, mx}) begin
      {sx, ex, mx, sz, ez, mz} = {sz, ez, mz, sx, ex, mx};
    end
    d  = int'(ex) - int'(ez);
    fx = {mx, 3'b000};
    if (d > 60) d = 60;
    sh = {mz, 67'd0} >> d;
    fz = sh[119:64];
    fz[0] = fz[0] | (|sh[63:0]);
    sr = sx;
    if (sx == sz) begin
      sum = {1'b0, fx} + {1'b0, fz};
      if (sum[56]) begin
        dm = sum[56:1];
        dm[0] = dm[0] | sum[0];
        e  = int'(ex) + 1;
      end else begin
        dm = sum[55:0];
        e  = int'(ex);
      end
    end else begin
      dm = fx - fz;
      if (dm == 0) return 64'd0;
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (dm[i]) break;
        lz++;
      end
      dm = dm << lz;
      e  = int'(ex) - lz;
    end
    return pack_round(sr, e, dm);
  endfunction

  function automatic logic [63:0] fmul(input logic [63:0] x, input logic [63:0] z);
    logic         s;
    logic [10:0]  ex, ez;
    logic [105:0] p;
    logic [55:0]  m;
    int           e;
    s  = x[63] ^ z[63];
    ex = x[62:52]; ez = z[62:52];
    if ((ex == 11'h7FF && x[51:0] != 0) || (ez == 11'h7FF && z[51:0] != 0)) return QNAN;
    if (ex == 11'h7FF || ez == 11'h7FF) begin
      if (ex == 0 || ez == 0) return QNAN;   // inf * 0
      return {s, 11'h7FF, 52'd0};
    end
    if (ex == 0 || ez == 0) return {s, 63'd0};
    p = {1'b1, x[51:0]} * {1'b1, z[51:0]};
    e = int'(ex) + int'(ez) - 1023;
    if (p[105]) begin
      m = {p[105:51], |p[50:0]};
      e = e + 1;
    end else begin
      m = {p[104:50], |p[49:0]};
    end
    return pack_round(s, e, m);
  endfunction

  logic [63:0] res;
  always_comb begin
    unique case (op)
      2'd0:    res = fadd(a, b);
      2'd1:    res = fadd(a, {~b[63], b[62:0]});
      default: res = fmul(a, b);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= res;
  end
endmodule
