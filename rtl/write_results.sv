// write_results: stage 4 of the dataflow pipeline, writing SU, SV and SW to DRAM.
//
// Each result field arrives on four streams, one double each per clock, and
// leaves on its own 256-bit AXI4 write port: the four stream heads become one
// beat (lane l in bits 64*l+63:64*l). Output slices x = 1..nx-2 of the block
// are written, each as a run of bursts starting at base + x*slice_stride, the
// same layout as the inputs. Write requests for a slice are issued ahead of the
// data; a data beat is offered once the request of its burst has been
// accepted. The stage counts write responses and finishes when every burst of
// every field has been acknowledged, since only then is the block safely in
// memory.
//
// Interface: pulse `start` with `nx`, addresses and stride stable; `busy`
// until the last response, then `done` for one clock. One beat per field per
// clock when the streams and port allow. Bursts of MAX_BURST beats and
// slice_stride are this design's choices; the 256-bit port, the packing of
// four doubles and the four streams per field follow the paper.
module write_results
  import pw_pkg::*;
#(
  parameter int unsigned NY = 64,
  parameter int unsigned NZ = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [15:0]            nx,
  input  logic [2:0][ADDR_W-1:0] base,          // SU, SV, SW
  input  logic [ADDR_W-1:0]      slice_stride,
  output logic                   busy,
  output logic                   done,
  input  logic [2:0][LANES-1:0]  s_valid,
  output logic [2:0][LANES-1:0]  s_ready,
  input  logic [2:0][LANES-1:0][DW-1:0] s_data,
  output logic [2:0]             aw_valid,
  input  logic [2:0]             aw_ready,
  output axi_a_t [2:0]           aw,
  output logic [2:0]             w_valid,
  input  logic [2:0]             w_ready,
  output axi_d_t [2:0]           w,
  input  logic [2:0]             b_valid,
  output logic [2:0]             b_ready
);
  localparam int unsigned SLICE_WORDS = NY * NZ / LANES;
  localparam int unsigned BURSTS      = (SLICE_WORDS + MAX_BURST - 1) / MAX_BURST;
  localparam int unsigned LAST_LEN    = SLICE_WORDS - (BURSTS - 1) * MAX_BURST;

  logic [2:0] f_done;
  logic [15:0] nslices;
  logic [2:0][ADDR_W-1:0] base_q;
  logic [ADDR_W-1:0] stride_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; nslices <= '0; base_q <= '0; stride_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        nslices  <= (nx > 16'd2) ? nx - 16'd2 : 16'd0;
        base_q   <= base;
        stride_q <= slice_stride;
      end else if (busy && (&f_done)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  for (genvar f = 0; f < 3; f++) begin : g_field
    logic [15:0] ax;                    // output slice (0-based) of the next request
    logic [$clog2(BURSTS+1)-1:0] ab;
    logic [31:0] aw_issued, w_bursts, b_left;
    logic [8:0]  wbeat;                 // beat within the current data burst
    logic [$clog2(BURSTS+1)-1:0] wb;    // burst within the slice, data side
    logic        lanes_ok, wfire;

    assign aw_valid[f] = busy && (ax < nslices);
    assign aw[f].addr  = base_q[f] + ADDR_W'(ax + 16'd1) * stride_q
                         + ADDR_W'(ab) * ADDR_W'(MAX_BURST * MEM_DW / 8);
    assign aw[f].len   = (ab == $bits(ab)'(BURSTS - 1)) ? 8'(LAST_LEN - 1) : 8'(MAX_BURST - 1);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ax <= '0; ab <= '0; aw_issued <= '0;
      end else if (start && !busy) begin
        ax <= '0; ab <= '0; aw_issued <= '0;
      end else if (aw_valid[f] && aw_ready[f]) begin
        aw_issued <= aw_issued + 1'b1;
        if (ab == $bits(ab)'(BURSTS - 1)) begin
          ab <= '0;
          ax <= ax + 1'b1;
        end else begin
          ab <= ab + 1'b1;
        end
      end
    end

    assign lanes_ok    = &s_valid[f];
    assign w_valid[f]  = busy && lanes_ok && (w_bursts < aw_issued);
    assign wfire       = w_valid[f] && w_ready[f];
    assign s_ready[f]  = {LANES{wfire}};
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      assign w[f].data[DW*l +: DW] = s_data[f][l];
    end
    assign w[f].last = (wb == $bits(wb)'(BURSTS - 1)) ? (wbeat == 9'(LAST_LEN - 1))
                                                      : (wbeat == 9'(MAX_BURST - 1));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        w_bursts <= '0; wbeat <= '0; wb <= '0;
      end else if (start && !busy) begin
        w_bursts <= '0; wbeat <= '0; wb <= '0;
      end else if (wfire) begin
        if (w[f].last) begin
          wbeat    <= '0;
          w_bursts <= w_bursts + 1'b1;
          wb       <= (wb == $bits(wb)'(BURSTS - 1)) ? '0 : wb + 1'b1;
        end else begin
          wbeat <= wbeat + 1'b1;
        end
      end
    end

    assign b_ready[f] = busy && (b_left != 0);
    assign f_done[f]  = (b_left == 0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                        b_left <= '0;
      else if (start && !busy)           b_left <= ((nx > 16'd2) ? 32'(nx) - 32'd2 : 32'd0) * BURSTS;
      else if (b_valid[f] && b_ready[f]) b_left <= b_left - 1'b1;
    end
  end
endmodule
