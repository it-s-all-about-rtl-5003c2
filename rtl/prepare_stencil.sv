// prepare_stencil: stage 2 of the dataflow pipeline, building the stencils.
//
// Values of the newest x slice (called i+1 below) arrive on four streams per
// field, taken round-robin, one value per field per step, z fastest then y.
// The two slices before it (i and i-1) are held on chip: per field there are
// three slice buffers used in rotation, so the buffer that held slice i-2 is
// overwritten by slice i+1 as it arrives. This is the "shift slices down by one
// in x" of the original kernel done without copying; it is safe because at
// step q a buffer is only read at address q, the same address being written
// into the other one. Each step reads slices i and i-1 at the position being
// written and feeds the three values of each field through three
// stencil_window instances. The windows give the 3x3x3 neighbourhood of the
// cell NZ+2 steps behind the newest input, and that neighbourhood is pushed as
// one stencil struct per field, together with the cell's z index and flags.
//
// One block of nx slices yields (nx-2)*NY*NZ stencils, for x = 1..nx-2, in
// z-fastest order; cells with y = 0, y = NY-1 or z = 0 are marked invalid and
// cells at z = NZ-1 are marked top. After the last input the stage runs NZ+2
// extra steps without input to flush the windows.
//
// Interface: pulse `start` with `nx`; `busy` until the last stencil is pushed,
// then `done` for one clock. A step happens in a cycle in which every needed
// input stream holds a value and all three output streams have room, so the
// stage runs at one cell per clock unless a neighbour stalls. The rotation of
// three buffers and the window arrangement are this design's choices; the
// paper gives the slice buffers, the shift and the stencil structs.
module prepare_stencil
  import pw_pkg::*;
#(
  parameter int unsigned NY = 64,
  parameter int unsigned NZ = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [15:0]           nx,
  output logic                  busy,
  output logic                  done,
  input  logic [2:0][LANES-1:0] s_valid,
  output logic [2:0][LANES-1:0] s_ready,
  input  logic [2:0][LANES-1:0][DW-1:0] s_data,
  output logic [2:0]            o_valid,
  input  logic [2:0]            o_ready,
  output stencil_t [2:0]        o_data
);
  localparam int unsigned S  = NY * NZ;
  localparam int unsigned QW = $clog2(S);

  logic [31:0] g, total, n_in, e_first;
  logic [QW-1:0] q;                 // position within the incoming slice
  logic [1:0]  slot_w, slot_i, slot_im1;
  logic [1:0]  rr;                  // input lane
  logic        in_step, emit, have_in, adv;
  logic [2:0][DW-1:0] x_in;

  // emission counters (cell being emitted)
  logic [15:0] ej, ek;

  assign in_step = (g < n_in);
  assign emit    = (g >= e_first) && (g < total);

  always_comb begin
    have_in = 1'b1;
    for (int f = 0; f < 3; f++) begin
      x_in[f] = s_data[f][rr];
      if (!s_valid[f][rr]) have_in = 1'b0;
    end
  end

  assign adv = busy && (!in_step || have_in) && (!emit || (&o_ready));

  always_comb begin
    s_ready = '0;
    for (int f = 0; f < 3; f++) s_ready[f][rr] = adv && in_step;
  end

  // step, position, rotation and lane bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      g <= '0; total <= '0; n_in <= '0; e_first <= '0;
      q <= '0; slot_w <= 2'd0; slot_i <= 2'd2; slot_im1 <= 2'd1; rr <= '0;
      ej <= '0; ek <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        g       <= '0;
        n_in    <= 32'(nx) * S;
        total   <= 32'(nx) * S + NZ + 2;
        e_first <= 2 * S + NZ + 2;
        q <= '0; slot_w <= 2'd0; slot_i <= 2'd2; slot_im1 <= 2'd1; rr <= '0;
        ej <= '0; ek <= '0;
      end else if (adv) begin
        g <= g + 1'b1;
        if (g + 1 == total) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        if (in_step) begin
          rr <= rr + 1'b1;
          if (q == QW'(S - 1)) begin
            q        <= '0;
            slot_w   <= (slot_w == 2'd2) ? 2'd0 : slot_w + 1'b1;
            slot_i   <= slot_w;
            slot_im1 <= slot_i;
          end else begin
            q <= q + 1'b1;
          end
        end
        if (emit) begin
          if (ek == 16'(NZ - 1)) begin
            ek <= '0;
            ej <= (ej == 16'(NY - 1)) ? '0 : ej + 1'b1;
          end else begin
            ek <= ek + 1'b1;
          end
        end
      end
    end
  end

  // slice buffers: three per field, read at q (registered) and written at q
  logic [1:0] slot_i_q, slot_im1_q;
  logic [2:0][DW-1:0] x_q;
  logic [2:0][2:0][DW-1:0] rd;      // [field][buffer]

  always_ff @(posedge clk) begin
    if (adv) begin
      slot_i_q   <= slot_i;
      slot_im1_q <= slot_im1;
      x_q        <= x_in;
    end
  end

  for (genvar f = 0; f < 3; f++) begin : g_field
    for (genvar b = 0; b < 3; b++) begin : g_buf
      logic [DW-1:0] mem [S];
      always_ff @(posedge clk) begin
        if (adv) begin
          rd[f][b] <= mem[q];
          if (in_step && slot_w == 2'(b)) mem[q] <= x_in[f];
        end
      end
    end

    logic [2:0][DW-1:0] win_in;      // [role] 0: slice i-1, 1: slice i, 2: slice i+1
    logic [2:0][2:0][2:0][DW-1:0] tap;
    assign win_in[0] = rd[f][slot_im1_q];
    assign win_in[1] = rd[f][slot_i_q];
    assign win_in[2] = x_q[f];

    for (genvar r = 0; r < 3; r++) begin : g_role
      stencil_window #(.NZ(NZ)) u_win (
        .clk   (clk),
        .rst_n (rst_n),
        .shift (adv && (g != 0)),
        .din   (win_in[r]),
        .tap   (tap[r])
      );
    end

    assign o_valid[f]          = busy && emit && adv;
    assign o_data[f].c         = tap;
    assign o_data[f].meta.k    = ek;
    assign o_data[f].meta.top  = (ek == 16'(NZ - 1));
    assign o_data[f].meta.valid = (ej != 0) && (ej != 16'(NY - 1)) && (ek != 0);
  end
endmodule
