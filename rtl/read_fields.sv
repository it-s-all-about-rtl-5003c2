// read_fields: stage 1 of the dataflow pipeline, reading U, V and W from DRAM.
//
// Each field has its own 256-bit AXI4 read port, so the three fields are read in
// the same clock cycle. For every x slice of the block the stage issues
// burst read requests that cover the slice, which is contiguous in DRAM (z
// fastest, then y). A slice starts at base + x*slice_stride. Requests go out as
// soon as the port accepts them, independently of returning data, so the
// request latency of the memory is paid once per burst and not per value.
// Each returning beat carries four doubles; they are written in the same cycle
// into the four streams of that field (lane l gets the double at bits
// 64*l+63:64*l, the lowest z first). A beat is accepted only when all four
// streams of its field have room.
//
// Interface: pulse `start` with `nx` and the base addresses stable; `busy`
// stays high until every beat of all nx slices has been pushed; `done` pulses
// for one clock at the end. Burst length and the 256-bit width follow the paper
// (256-bit ports); the burst size of MAX_BURST beats and slice_stride are this
// design's choices.
module read_fields
  import pw_pkg::*;
#(
  parameter int unsigned NY = 64,
  parameter int unsigned NZ = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [15:0]           nx,
  input  logic [2:0][ADDR_W-1:0] base,          // U, V, W
  input  logic [ADDR_W-1:0]     slice_stride,   // bytes between x slices
  output logic                  busy,
  output logic                  done,
  // read address / data channels, one per field
  output logic [2:0]            ar_valid,
  input  logic [2:0]            ar_ready,
  output axi_a_t [2:0]          ar,
  input  logic [2:0]            r_valid,
  output logic [2:0]            r_ready,
  input  axi_d_t [2:0]          r,
  // four double precision streams per field
  output logic [2:0][LANES-1:0] s_valid,
  input  logic [2:0][LANES-1:0] s_ready,
  output logic [2:0][LANES-1:0][DW-1:0] s_data
);
  localparam int unsigned SLICE_WORDS = NY * NZ / LANES;
  localparam int unsigned BURSTS      = (SLICE_WORDS + MAX_BURST - 1) / MAX_BURST;
  localparam int unsigned LAST_LEN    = SLICE_WORDS - (BURSTS - 1) * MAX_BURST;

  logic [2:0] f_done;
  logic [15:0] nx_q;
  logic [2:0][ADDR_W-1:0] base_q;
  logic [ADDR_W-1:0] stride_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      nx_q <= '0;
      base_q <= '0;
      stride_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        nx_q     <= nx;
        base_q   <= base;
        stride_q <= slice_stride;
      end else if (busy && (&f_done)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  for (genvar f = 0; f < 3; f++) begin : g_field
    logic [15:0] ax;                    // slice of the next request
    logic [$clog2(BURSTS+1)-1:0] ab;    // burst within that slice
    logic        a_more;
    logic [31:0] beats_left;
    logic        beat;

    assign a_more      = busy && (ax < nx_q);
    assign ar_valid[f] = a_more;
    assign ar[f].addr  = base_q[f] + ADDR_W'(ax) * stride_q
                         + ADDR_W'(ab) * ADDR_W'(MAX_BURST * MEM_DW / 8);
    assign ar[f].len   = (ab == $bits(ab)'(BURSTS - 1)) ? 8'(LAST_LEN - 1) : 8'(MAX_BURST - 1);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ax <= '0;
        ab <= '0;
      end else if (start && !busy) begin
        ax <= '0;
        ab <= '0;
      end else if (ar_valid[f] && ar_ready[f]) begin
        if (ab == $bits(ab)'(BURSTS - 1)) begin
          ab <= '0;
          ax <= ax + 1'b1;
        end else begin
          ab <= ab + 1'b1;
        end
      end
    end

    assign r_ready[f] = busy && (beats_left != 0) && (&s_ready[f]);
    assign beat       = r_valid[f] && r_ready[f];
    assign f_done[f]  = (beats_left == 0);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                beats_left <= '0;
      else if (start && !busy)   beats_left <= 32'(nx) * SLICE_WORDS;
      else if (beat)             beats_left <= beats_left - 1'b1;
    end

    for (genvar l = 0; l < LANES; l++) begin : g_lane
      assign s_valid[f][l] = beat;
      assign s_data[f][l]  = r[f].data[DW*l +: DW];
    end
  end
endmodule
