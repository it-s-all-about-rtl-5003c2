// pw_advection: one Piacsek-Williams advection kernel, a four-stage dataflow pipeline.
//
// The kernel computes the advection source terms SU, SV, SW of the wind fields
// U, V, W for one block of the grid: nx slices in x, each slice NY (y) by NZ
// (z) doubles, stored slice after slice with z fastest. The four stages run
// concurrently and are joined by streams of depth 16:
//   read_fields  --4 streams per field-->  prepare_stencil  --1 stencil stream
//   per field-->  compute_results  --4 streams per field-->  write_results.
// Reading and writing go through six separate 256-bit memory ports, one per
// array (U, V, W read; SU, SV, SW write), so loads, computation and stores
// overlap across the whole block instead of alternating slice by slice.
// Results are produced for x = 1..nx-2; every result slice is written in full,
// with zeros at the y, z boundary cells.
//
// Control is a simple register port (ctrl_*), 64-bit words at byte addresses:
//   0x00 write bit 0: start; read: bit 0 busy, bit 1 done (cleared by start)
//   0x08 nx   0x10 U  0x18 V  0x20 W  0x28 SU  0x30 SV  0x38 SW  (byte bases)
//   0x40 slice stride in bytes   0x48 tcx   0x50 tcy
//   0x80 + 8*n  profiled cycles of code block n (0 whole run, 1 load,
//               2 prepare stencil and compute, 3 write)
//   0x8000 | sel<<13 | k<<3  vertical coefficient k of table sel
//               (0 tzc1, 1 tzc2, 2 tzd1, 3 tzd2)
// `interrupt` is the done bit. The registers stand in for the AXI4-Lite slave
// that HLS generates; that wrapper is not part of this RTL.
//
// Profiling: at start the kernel sends INIT and START for the four code blocks
// to the profiler stream; each END goes out when its stage reports done, the
// whole-run END after the write stage, then REPORT. The totals that come back
// on the profiler value stream are stored in the 0x80 registers, and only then
// is the run done. Commands are queued in a pending mask and sent lowest first,
// so a start or end is stamped a few cycles after the event it marks.
//
// rst_n is the asynchronous reset of every flop; it is also sampled by the
// assertions (disable iff), which is why a linter reports it as used both
// asynchronously and synchronously. No logic uses it synchronously.
module pw_advection
  import pw_pkg::*;
#(
  parameter int unsigned NY    = 64,
  parameter int unsigned NZ    = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control registers
  input  logic                  ctrl_we,
  input  logic [15:0]           ctrl_addr,
  input  logic [63:0]           ctrl_wdata,
  output logic [63:0]           ctrl_rdata,
  output logic                  interrupt,
  // U, V, W read ports
  output logic [2:0]            ar_valid,
  input  logic [2:0]            ar_ready,
  output axi_a_t [2:0]          ar,
  input  logic [2:0]            r_valid,
  output logic [2:0]            r_ready,
  input  axi_d_t [2:0]          r,
  // SU, SV, SW write ports
  output logic [2:0]            aw_valid,
  input  logic [2:0]            aw_ready,
  output axi_a_t [2:0]          aw,
  output logic [2:0]            w_valid,
  input  logic [2:0]            w_ready,
  output axi_d_t [2:0]          w,
  input  logic [2:0]            b_valid,
  output logic [2:0]            b_ready,
  // profiler streams
  output logic                  prof_cmd_valid,
  input  logic                  prof_cmd_ready,
  output logic [31:0]           prof_cmd,
  input  logic                  prof_val_valid,
  output logic                  prof_val_ready,
  input  logic [63:0]           prof_val
);
  // ---------------- control registers
  logic [15:0] nx;
  logic [5:0][ADDR_W-1:0] base;
  logic [ADDR_W-1:0] stride;
  dbl_t tcx, tcy;
  logic busy, done_r, start;
  logic [63:0] prof_tot [PROF_BLOCKS];

  assign start     = ctrl_we && (ctrl_addr == 16'h0000) && ctrl_wdata[0] && !busy;
  assign interrupt = done_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nx <= '0; base <= '0; stride <= '0; tcx <= '0; tcy <= '0;
    end else if (ctrl_we && !ctrl_addr[15]) begin
      unique case (ctrl_addr)
        16'h08: nx <= ctrl_wdata[15:0];
        16'h10: base[0] <= ctrl_wdata;
        16'h18: base[1] <= ctrl_wdata;
        16'h20: base[2] <= ctrl_wdata;
        16'h28: base[3] <= ctrl_wdata;
        16'h30: base[4] <= ctrl_wdata;
        16'h38: base[5] <= ctrl_wdata;
        16'h40: stride  <= ctrl_wdata;
        16'h48: tcx     <= ctrl_wdata;
        16'h50: tcy     <= ctrl_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    ctrl_rdata = '0;
    unique case (ctrl_addr)
      16'h00: ctrl_rdata = {62'd0, done_r, busy};
      16'h08: ctrl_rdata = 64'(nx);
      16'h10: ctrl_rdata = base[0];
      16'h18: ctrl_rdata = base[1];
      16'h20: ctrl_rdata = base[2];
      16'h28: ctrl_rdata = base[3];
      16'h30: ctrl_rdata = base[4];
      16'h38: ctrl_rdata = base[5];
      16'h40: ctrl_rdata = stride;
      16'h48: ctrl_rdata = tcx;
      16'h50: ctrl_rdata = tcy;
      16'h80: ctrl_rdata = prof_tot[0];
      16'h88: ctrl_rdata = prof_tot[1];
      16'h90: ctrl_rdata = prof_tot[2];
      16'h98: ctrl_rdata = prof_tot[3];
      default: ;
    endcase
  end

  // ---------------- the four stages
  logic rd_done, ps_done, wr_done;
  logic rd_busy, ps_busy, wr_busy;

  logic [2:0][LANES-1:0]         a_valid, a_ready, b_valid_s, b_ready_s;
  logic [2:0][LANES-1:0][DW-1:0] a_data, b_data;
  logic [2:0][LANES-1:0]         c_valid, c_ready, d_valid, d_ready;
  logic [2:0][LANES-1:0][DW-1:0] c_data, d_data;
  logic [2:0]                    st_in_valid, st_in_ready, st_out_valid, st_out_ready;
  stencil_t [2:0]                st_in, st_out;
  logic [31:0]                   cells;

  read_fields #(.NY(NY), .NZ(NZ)) u_read (
    .clk, .rst_n, .start, .nx,
    .base({base[2], base[1], base[0]}), .slice_stride(stride),
    .busy(rd_busy), .done(rd_done),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .s_valid(a_valid), .s_ready(a_ready), .s_data(a_data)
  );

  for (genvar f = 0; f < 3; f++) begin : g_streams
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      stream_fifo #(.WIDTH(DW), .DEPTH(DEPTH)) u_in_fifo (
        .clk, .rst_n,
        .in_valid(a_valid[f][l]), .in_ready(a_ready[f][l]), .in_data(a_data[f][l]),
        .out_valid(b_valid_s[f][l]), .out_ready(b_ready_s[f][l]), .out_data(b_data[f][l]),
        .count()
      );
      stream_fifo #(.WIDTH(DW), .DEPTH(DEPTH)) u_out_fifo (
        .clk, .rst_n,
        .in_valid(c_valid[f][l]), .in_ready(c_ready[f][l]), .in_data(c_data[f][l]),
        .out_valid(d_valid[f][l]), .out_ready(d_ready[f][l]), .out_data(d_data[f][l]),
        .count()
      );
    end
    stream_fifo #(.WIDTH($bits(stencil_t)), .DEPTH(DEPTH)) u_st_fifo (
      .clk, .rst_n,
      .in_valid(st_in_valid[f]), .in_ready(st_in_ready[f]), .in_data(st_in[f]),
      .out_valid(st_out_valid[f]), .out_ready(st_out_ready[f]), .out_data(st_out[f]),
      .count()
    );
  end

  prepare_stencil #(.NY(NY), .NZ(NZ)) u_prep (
    .clk, .rst_n, .start, .nx, .busy(ps_busy), .done(ps_done),
    .s_valid(b_valid_s), .s_ready(b_ready_s), .s_data(b_data),
    .o_valid(st_in_valid), .o_ready(st_in_ready), .o_data(st_in)
  );

  compute_results #(.NZ(NZ)) u_comp (
    .clk, .rst_n, .tcx, .tcy,
    .cf_we(ctrl_we && ctrl_addr[15]), .cf_sel(ctrl_addr[14:13]),
    .cf_idx({6'd0, ctrl_addr[12:3]}), .cf_data(ctrl_wdata),
    .in_valid(st_out_valid), .in_ready(st_out_ready), .in_data(st_out),
    .o_valid(c_valid), .o_ready(c_ready), .o_data(c_data), .cells
  );

  write_results #(.NY(NY), .NZ(NZ)) u_write (
    .clk, .rst_n, .start, .nx,
    .base({base[5], base[4], base[3]}), .slice_stride(stride),
    .busy(wr_busy), .done(wr_done),
    .s_valid(d_valid), .s_ready(d_ready), .s_data(d_data),
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready
  );

  // ---------------- run control and profiler commands
  typedef enum logic [1:0] {K_IDLE, K_RUN, K_REPORT} kstate_e;
  kstate_e kst;
  localparam int unsigned NEV = 10;
  // 0 INIT, 1..4 START block 0..3, 5 END load, 6 END compute, 7 END write, 8 END total, 9 REPORT
  logic [NEV-1:0] pend, set_ev;
  logic [3:0]     ev;           // lowest pending event
  logic [2:0]     nval;         // totals received

  always_comb begin
    ev = 4'd0;
    for (int i = NEV - 1; i >= 0; i--) if (pend[i]) ev = 4'(i);
  end

  always_comb begin
    unique case (ev)
      4'd0:    prof_cmd = prof_word(PROF_INIT, 0);
      4'd1:    prof_cmd = prof_word(PROF_START, PROF_BLK_TOTAL);
      4'd2:    prof_cmd = prof_word(PROF_START, PROF_BLK_LOAD);
      4'd3:    prof_cmd = prof_word(PROF_START, PROF_BLK_COMPUTE);
      4'd4:    prof_cmd = prof_word(PROF_START, PROF_BLK_WRITE);
      4'd5:    prof_cmd = prof_word(PROF_END, PROF_BLK_LOAD);
      4'd6:    prof_cmd = prof_word(PROF_END, PROF_BLK_COMPUTE);
      4'd7:    prof_cmd = prof_word(PROF_END, PROF_BLK_WRITE);
      4'd8:    prof_cmd = prof_word(PROF_END, PROF_BLK_TOTAL);
      default: prof_cmd = prof_word(PROF_REPORT, 0);
    endcase
  end
  assign prof_cmd_valid = |pend;
  assign prof_val_ready = (kst == K_REPORT);

  always_comb begin
    set_ev = '0;
    if (start)   set_ev[4:0] = 5'b11111;
    if (rd_done) set_ev[5] = 1'b1;
    if (ps_done) set_ev[6] = 1'b1;
    if (wr_done) set_ev[9:7] = 3'b111;
  end

  assign busy = (kst != K_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kst    <= K_IDLE;
      done_r <= 1'b0;
      pend   <= '0;
      nval   <= '0;
      for (int b = 0; b < PROF_BLOCKS; b++) prof_tot[b] <= '0;
    end else begin
      pend <= (pend & ~((prof_cmd_valid && prof_cmd_ready) ? (NEV'(1) << ev) : '0)) | set_ev;
      unique case (kst)
        K_IDLE: if (start) begin
          kst    <= K_RUN;
          done_r <= 1'b0;
        end
        K_RUN: if (wr_done) begin
          kst  <= K_REPORT;
          nval <= '0;
        end
        K_REPORT: if (prof_val_valid) begin
          prof_tot[nval[1:0]] <= prof_val;
          nval <= nval + 1'b1;
          if (nval == 3'(PROF_BLOCKS - 1)) begin
            kst    <= K_IDLE;
            done_r <= 1'b1;
          end
        end
        default: kst <= K_IDLE;
      endcase
    end
  end

  // every stage finishes within the run
  a_stage_done: assert property (@(posedge clk) disable iff (!rst_n)
                                 (kst == K_IDLE) |-> !(rd_busy || ps_busy || wr_busy));
endmodule
