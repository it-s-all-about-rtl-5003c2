// compute_results: stage 3 of the dataflow pipeline, the Piacsek-Williams source terms.
//
// For every stencil triple (U, V and W neighbourhoods of one cell) the stage
// computes SU, SV and SW. Each of the three has the same shape,
//   s = ( tcx*(Pa*(a1+a2) - Pb*(a3+a4)) + tcy*(Qa*(b1+b2) - Qb*(b3+b4)) )
//       + ( (c1*Ra)*(e1+e2) - (c2*Rb)*(e3+e4) ),
// the x, y and z advection terms summed as su_x+su_y+su_z. The operands,
// taken from the MONC pw_advection formulation, are
//   SU: Pa,Pb = u(i-1),u(i+1)  a = u(i)+u(i-1), u(i)+u(i+1)
//       Qa,Qb = u(j-1),u(j+1)  b = v(j-1)+v(j-1,i+1), v+v(i+1)
//       Ra,Rb = u(k-1),u(k+1)  e = w(k-1)+w(k-1,i+1), w+w(i+1)   c = tzc1(k),tzc2(k)
//   SV: Pa,Pb = v(i-1),v(i+1)  a = u(i-1)+u(j+1,i-1), u+u(j+1)
//       Qa,Qb = v(j-1),v(j+1)  b = v+v(j-1), v+v(j+1)
//       Ra,Rb = v(k-1),v(k+1)  e = w(k-1)+w(k-1,j+1), w+w(j+1)   c = tzc1(k),tzc2(k)
//   SW: Pa,Pb = w(i-1),w(i+1)  a = u(i-1)+u(k+1,i-1), u+u(k+1)
//       Qa,Qb = w(j-1),w(j+1)  b = v(j-1)+v(k+1,j-1), v+v(k+1)
//       Ra,Rb = w(k-1),w(k+1)  e = w+w(k-1), w+w(k+1)            c = tzd1(k),tzd2(k)
// At the top level (k = NZ-1) SU and SV drop the c2 term and SW is zero;
// invalid (boundary) cells give zero for all three.
//
// The operations are laid out in space, 21 fp64_unit instances per field in
// six levels (adds; products; differences and z products; scaling by tcx, tcy
// and the z difference; x+y; final sum), so a new cell enters every clock and
// leaves six clocks later. The pipeline holds while its output cannot be
// written. Results go round-robin to four output streams per field.
//
// The formula and the vertical coefficient tables follow MONC's advection
// code, which the paper names but does not print; the paper counts 53
// operations per cell (21 add/sub, 32 mul) where this formulation has 63
// (33 add/sub, 30 mul). The level arrangement is this design's choice.
// tcx, tcy and the four coefficient tables are written through the cf_* port.
module compute_results
  import pw_pkg::*;
#(
  parameter int unsigned NZ = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dbl_t                 tcx,
  input  dbl_t                 tcy,
  input  logic                 cf_we,
  input  logic [1:0]           cf_sel,     // 0 tzc1, 1 tzc2, 2 tzd1, 3 tzd2
  input  logic [15:0]          cf_idx,
  input  dbl_t                 cf_data,
  input  logic [2:0]           in_valid,
  output logic [2:0]           in_ready,
  input  stencil_t [2:0]       in_data,
  output logic [2:0][LANES-1:0] o_valid,
  input  logic [2:0][LANES-1:0] o_ready,
  output logic [2:0][LANES-1:0][DW-1:0] o_data,
  output logic [31:0]          cells       // cells produced since reset
);
  localparam int unsigned L = 6;
  localparam logic [1:0] ADD = 2'd0, SUB = 2'd1, MUL = 2'd2;

  dbl_t tz [4][NZ];
  always_ff @(posedge clk) begin
    if (cf_we) tz[cf_sel][cf_idx[$clog2(NZ)-1:0]] <= cf_data;
  end

  logic [L:1] v;
  cell_meta_t meta [L+1];
  logic       adv, in_fire, out_fire;
  logic [1:0] orr;

  assign out_fire = v[L] && (&{o_ready[0][orr], o_ready[1][orr], o_ready[2][orr]});
  assign adv      = !v[L] || out_fire;
  assign in_fire  = adv && (&in_valid);
  assign in_ready = {3{in_fire}};
  assign meta[0]  = in_data[0].meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v     <= '0;
      orr   <= '0;
      cells <= '0;
    end else begin
      if (adv) v <= {v[L-1:1], in_fire};
      if (out_fire) begin
        orr   <= orr + 1'b1;
        cells <= cells + 1'b1;
      end
    end
  end

  for (genvar s = 1; s <= L; s++) begin : g_meta
    always_ff @(posedge clk) if (adv) meta[s] <= meta[s-1];
  end

  for (genvar f = 0; f < 3; f++) begin : g_field
    // stencil taps: [x][y][z], 1 = centre
    dbl_t [2:0][2:0][2:0] U, V, W;
    assign U = in_data[0].c;
    assign V = in_data[1].c;
    assign W = in_data[2].c;

    dbl_t a1 [6], b1 [6], y1 [6];          // level 1: six adds
    dbl_t pa, pb, qa, qb, ra, rb, c1, c2;  // multiplicands
    dbl_t p1 [8];                          // their level-1 copies
    dbl_t a2 [6], b2 [6], y2 [6];          // level 2: six products
    dbl_t p2 [2];                          // e sums carried to level 3
    dbl_t a3 [4], b3 [4], y3 [4];
    logic [1:0] op3 [4];
    dbl_t a4 [3], b4 [3], y4 [3];
    logic [1:0] op4 [3];
    dbl_t p4;                              // rr1 carried to level 5
    dbl_t y5, dz5, y6;

    always_comb begin
      unique case (f)
        0: begin
          a1 = '{U[1][1][1], U[1][1][1], V[1][0][1], V[1][1][1], W[1][1][0], W[1][1][1]};
          b1 = '{U[0][1][1], U[2][1][1], V[2][0][1], V[2][1][1], W[2][1][0], W[2][1][1]};
          {pa, pb, qa, qb, ra, rb} = {U[0][1][1], U[2][1][1], U[1][0][1], U[1][2][1], U[1][1][0], U[1][1][2]};
        end
        1: begin
          a1 = '{U[0][1][1], U[1][1][1], V[1][1][1], V[1][1][1], W[1][1][0], W[1][1][1]};
          b1 = '{U[0][2][1], U[1][2][1], V[1][0][1], V[1][2][1], W[1][2][0], W[1][2][1]};
          {pa, pb, qa, qb, ra, rb} = {V[0][1][1], V[2][1][1], V[1][0][1], V[1][2][1], V[1][1][0], V[1][1][2]};
        end
        default: begin
          a1 = '{U[0][1][1], U[1][1][1], V[1][0][1], V[1][1][1], W[1][1][1], W[1][1][1]};
          b1 = '{U[0][1][2], U[1][1][2], V[1][0][2], V[1][1][2], W[1][1][0], W[1][1][2]};
          {pa, pb, qa, qb, ra, rb} = {W[0][1][1], W[2][1][1], W[1][0][1], W[1][2][1], W[1][1][0], W[1][1][2]};
        end
      endcase
      c1 = (f == 2) ? tz[2][meta[0].k[$clog2(NZ)-1:0]] : tz[0][meta[0].k[$clog2(NZ)-1:0]];
      c2 = (f == 2) ? tz[3][meta[0].k[$clog2(NZ)-1:0]] : tz[1][meta[0].k[$clog2(NZ)-1:0]];
    end

    // level 1
    for (genvar n = 0; n < 6; n++) begin : g_l1
      fp64_unit u_fp (.clk, .rst_n, .en(adv), .op(ADD), .a(a1[n]), .b(b1[n]), .y(y1[n]));
    end
    always_ff @(posedge clk) if (adv) p1 <= '{pa, pb, qa, qb, ra, rb, c1, c2};

    // level 2: Pa*a, Pb*a', Qa*b, Qb*b', c1*Ra, c2*Rb
    assign a2 = '{p1[0], p1[1], p1[2], p1[3], p1[6], p1[7]};
    assign b2 = '{y1[0], y1[1], y1[2], y1[3], p1[4], p1[5]};
    for (genvar n = 0; n < 6; n++) begin : g_l2
      fp64_unit u_fp (.clk, .rst_n, .en(adv), .op(MUL), .a(a2[n]), .b(b2[n]), .y(y2[n]));
    end
    always_ff @(posedge clk) if (adv) p2 <= '{y1[4], y1[5]};

    // level 3: x difference, y difference, the two z products
    assign a3  = '{y2[0], y2[2], y2[4], y2[5]};
    assign b3  = '{y2[1], y2[3], p2[0], p2[1]};
    assign op3 = '{SUB, SUB, MUL, MUL};
    for (genvar n = 0; n < 4; n++) begin : g_l3
      fp64_unit u_fp (.clk, .rst_n, .en(adv), .op(op3[n]), .a(a3[n]), .b(b3[n]), .y(y3[n]));
    end

    // level 4: tcx*dx, tcy*dy, z difference
    assign a4  = '{tcx, tcy, y3[2]};
    assign b4  = '{y3[0], y3[1], y3[3]};
    assign op4 = '{MUL, MUL, SUB};
    for (genvar n = 0; n < 3; n++) begin : g_l4
      fp64_unit u_fp (.clk, .rst_n, .en(adv), .op(op4[n]), .a(a4[n]), .b(b4[n]), .y(y4[n]));
    end
    always_ff @(posedge clk) if (adv) p4 <= y3[2];

    // level 5: x + y, with the z term chosen for the top level
    fp64_unit u_l5 (.clk, .rst_n, .en(adv), .op(ADD), .a(y4[0]), .b(y4[1]), .y(y5));
    always_ff @(posedge clk) if (adv) dz5 <= meta[4].top ? p4 : y4[2];

    // level 6: (x + y) + z
    fp64_unit u_l6 (.clk, .rst_n, .en(adv), .op(ADD), .a(y5), .b(dz5), .y(y6));

    for (genvar l = 0; l < LANES; l++) begin : g_out
      assign o_valid[f][l] = out_fire && (orr == 2'(l));
      assign o_data[f][l]  = (!meta[L].valid || (f == 2 && meta[L].top)) ? '0 : y6;
    end
  end
endmodule
