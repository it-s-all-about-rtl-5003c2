// profiler: cycle-accurate timing of code blocks inside the advection kernel.
//
// The kernel sends 32-bit command words on a stream: INIT clears all totals,
// START n and END n bracket one execution of code block n, and REPORT asks for
// every total. For START and END the profiler pulses `capture` towards a
// free-running 64-bit timer that is in capture mode, then reads the captured
// value back over an AXI4-Lite read port, low word first (two 32-bit reads at
// CAP_LO and CAP_HI). START keeps that value as the block's start time; END
// adds (end - start) to the block's running total. REPORT sends the NBLOCKS
// totals, block 0 first, on the 64-bit output stream. Commands are handled one
// at a time; a command is taken from the stream only when the profiler is
// idle, so the stream buffers commands issued while a timer read is under way.
//
// The paper gives the command stream, the capture interface, the AXI4-Lite
// read-back and the per-block running totals. The command encoding (opcode in
// bits 31:30, block in bits 7:0), the register offsets (those of a cascaded
// AXI Timer: load registers 0x04 and 0x14) and the report format are this
// design's choices. The timer itself is vendor IP and is not part of this RTL.
module profiler
  import pw_pkg::*;
#(
  parameter int unsigned NBLOCKS = PROF_BLOCKS,
  parameter logic [31:0] CAP_LO  = 32'h04,
  parameter logic [31:0] CAP_HI  = 32'h14
) (
  input  logic        clk,
  input  logic        rst_n,
  // command stream from the kernel
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [31:0] cmd,
  // totals stream back to the kernel
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data,
  // timer capture trigger and AXI4-Lite read port
  output logic        capture,
  output logic        arvalid,
  input  logic        arready,
  output logic [31:0] araddr,
  input  logic        rvalid,
  output logic        rready,
  input  logic [31:0] rdata
);
  typedef enum logic [2:0] {IDLE, CAPTURE, AR_LO, R_LO, AR_HI, R_HI, REPORT} state_e;
  localparam int unsigned BW = (NBLOCKS > 1) ? $clog2(NBLOCKS) : 1;

  state_e      state;
  prof_op_e    op;
  logic [BW-1:0] blk, rep;
  logic [31:0] lo;
  logic [63:0] start_t [NBLOCKS];
  logic [63:0] total   [NBLOCKS];
  logic [63:0] now;

  assign cmd_ready = (state == IDLE);
  assign capture   = (state == CAPTURE);
  assign arvalid   = (state == AR_LO) || (state == AR_HI);
  assign araddr    = (state == AR_HI) ? CAP_HI : CAP_LO;
  assign rready    = (state == R_LO) || (state == R_HI);
  assign out_valid = (state == REPORT);
  assign out_data  = total[rep];
  assign now       = {rdata, lo};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      op    <= PROF_INIT;
      blk   <= '0;
      rep   <= '0;
      lo    <= '0;
      for (int b = 0; b < NBLOCKS; b++) begin
        start_t[b] <= '0;
        total[b]   <= '0;
      end
    end else begin
      unique case (state)
        IDLE: if (cmd_valid) begin
          op  <= prof_op_e'(cmd[31:30]);
          blk <= BW'(cmd[7:0]);
          unique case (prof_op_e'(cmd[31:30]))
            PROF_INIT: for (int b = 0; b < NBLOCKS; b++) total[b] <= '0;
            PROF_REPORT: begin
              rep   <= '0;
              state <= REPORT;
            end
            default: state <= CAPTURE;
          endcase
        end
        CAPTURE: state <= AR_LO;
        AR_LO:   if (arready) state <= R_LO;
        R_LO:    if (rvalid) begin
          lo    <= rdata;
          state <= AR_HI;
        end
        AR_HI:   if (arready) state <= R_HI;
        R_HI:    if (rvalid) begin
          if (op == PROF_START) start_t[blk] <= now;
          else                  total[blk]   <= total[blk] + (now - start_t[blk]);
          state <= IDLE;
        end
        REPORT:  if (out_ready) begin
          if (rep == BW'(NBLOCKS - 1)) state <= IDLE;
          else                         rep   <= rep + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
