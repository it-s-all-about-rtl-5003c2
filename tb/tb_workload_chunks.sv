// tb_workload_chunks: part of the 512 x 512 x 64 (16.7M cell) workload on the full-size accelerator.
//
// That domain, in 64 x 64 (y, z) columns, is 8 columns of 512 x slices. Cut
// into chunks of 16 computed slices (18 slices with the two halo slices), it
// is 256 chunks. This testbench runs 16 of them, 1/16 of the workload and
// about one million cells, on the accelerator at its default size (eight
// kernels, 64 x 64 slices, no parameter overrides). Chunks arrive 2000 cycles
// apart, twice as many as there are kernels, so chunks queue for a kernel and
// every kernel is reused, while the later chunks' transfers overlap earlier
// chunks' computation. Memory stalls 5% of cycles. Every result is checked bit
// for bit, and host_model's mechanism counters must all be non-zero. The
// field values are synthetic (a hash), not the cloud test case.
module tb_workload_chunks;
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
  host_model #(.K(K), .NY(NY), .NZ(NZ), .NX(18), .NCHUNK(16), .DMA_GAP(2000), .STALL_PCT(5)) host (.*);

  initial begin
    #2 wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
