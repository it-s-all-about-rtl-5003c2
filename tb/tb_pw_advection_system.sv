// tb_pw_advection_system: end-to-end test of the accelerator at reduced size.
//
// Four kernels with 8 x 8 slices process six chunks of six slices each.
// Chunks arrive 60 cycles apart, so the first kernels compute while later
// chunks are still in transit, and with six chunks on four kernels some
// chunks wait and kernels are reused. Memory stalls 10% of cycles. All results
// are checked bit for bit and every mechanism counter must be non-zero
// (see host_model).
module tb_pw_advection_system;
  import pw_pkg::*;
  localparam int K = 4, NY = 8, NZ = 8;

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

  pw_advection_system #(.NUM_KERNELS(K), .NY(NY), .NZ(NZ)) dut (.*);
  host_model #(.K(K), .NY(NY), .NZ(NZ), .NX(6), .NCHUNK(6), .DMA_GAP(60), .STALL_PCT(10)) host (.*);

  initial begin
    #2 wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
