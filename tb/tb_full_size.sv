// tb_full_size: the accelerator at its default, full size.
//
// pw_advection_system is instantiated with no parameter overrides: eight
// kernels, 64 x 64 (y, z) slices. Eight chunks of three slices each (one
// computed output slice of 4096 cells per field) arrive 500 cycles apart, one
// per kernel, so all eight kernels run together. Memory stalls 5% of cycles.
// All 8 x 3 x 4096 results are checked bit for bit against the reference, and
// the mechanism counters of host_model must be non-zero (no chunk queueing is
// expected, since there are as many chunks as kernels).
module tb_full_size;
  import pw_pkg::*;
  localparam int K = 8, NY = 64, NZ = 64;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, finished;
  int checks, failures;
  logic [K-1:0] ctrl_we, interrupt, tmr_capture, tmr_arvalid, tmr_arready, tmr_rvalid, tmr_rready;
  logic [K-1:0][15:0] ctrl_addr;
  logic [K-1:0][63:0] ctrl_wdata, ctrl_rdata;
  logic [K-1:0][31:0] tmr_araddr, tmr_rdata;
  logic [K-1:0][2:0] ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_a_t [K-1:0][2:0] ar, aw;
  axi_d_t [K-1:0][2:0] r, w;

  pw_advection_system dut (.*);
  host_model #(.K(K), .NY(NY), .NZ(NZ), .NX(3), .NCHUNK(8), .DMA_GAP(500), .STALL_PCT(5),
               .EXPECT_QUEUE(0)) host (.*);

  initial begin
    #2 wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
