// pw_advection_system: the accelerator, NUM_KERNELS advection kernels each with its own profiler.
//
// Each kernel is paired with a profiler as one hierarchical block: the kernel's
// command stream drives the profiler and the profiler's totals come back to
// the kernel. Kernels are independent: the host gives each one a block
// (chunk) of the grid through its control registers as soon as that chunk has
// arrived in card memory, and collects results when the kernel's interrupt
// rises, so transfers of other chunks overlap with computation. Eight kernels
// is the number that fit the target FPGA with this kernel design.
//
// Everything the kernels connect to that is not designed here is a port:
// per kernel, the control register port and interrupt, the six 256-bit memory
// ports (U, V, W read, SU, SV, SW write; in the board design an AXI crossbar
// joins them to the two DRAM controllers), and the profiler's capture pulse
// and AXI4-Lite read port towards its 64-bit capture timer.
// All outputs and inputs are arrays indexed by kernel.
//
// rst_n is the asynchronous reset of every flop; it is also sampled by the
// assertions (disable iff), which is why a linter reports it as used both
// asynchronously and synchronously. No logic uses it synchronously.
module pw_advection_system
  import pw_pkg::*;
#(
  parameter int unsigned NUM_KERNELS = 8,
  parameter int unsigned NY          = 64,
  parameter int unsigned NZ          = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic  [NUM_KERNELS-1:0]     ctrl_we,
  input  logic  [NUM_KERNELS-1:0][15:0] ctrl_addr,
  input  logic  [NUM_KERNELS-1:0][63:0] ctrl_wdata,
  output logic  [NUM_KERNELS-1:0][63:0] ctrl_rdata,
  output logic  [NUM_KERNELS-1:0]     interrupt,
  output logic  [NUM_KERNELS-1:0][2:0] ar_valid,
  input  logic  [NUM_KERNELS-1:0][2:0] ar_ready,
  output axi_a_t [NUM_KERNELS-1:0][2:0] ar,
  input  logic  [NUM_KERNELS-1:0][2:0] r_valid,
  output logic  [NUM_KERNELS-1:0][2:0] r_ready,
  input  axi_d_t [NUM_KERNELS-1:0][2:0] r,
  output logic  [NUM_KERNELS-1:0][2:0] aw_valid,
  input  logic  [NUM_KERNELS-1:0][2:0] aw_ready,
  output axi_a_t [NUM_KERNELS-1:0][2:0] aw,
  output logic  [NUM_KERNELS-1:0][2:0] w_valid,
  input  logic  [NUM_KERNELS-1:0][2:0] w_ready,
  output axi_d_t [NUM_KERNELS-1:0][2:0] w,
  input  logic  [NUM_KERNELS-1:0][2:0] b_valid,
  output logic  [NUM_KERNELS-1:0][2:0] b_ready,
  output logic  [NUM_KERNELS-1:0]     tmr_capture,
  output logic  [NUM_KERNELS-1:0]     tmr_arvalid,
  input  logic  [NUM_KERNELS-1:0]     tmr_arready,
  output logic  [NUM_KERNELS-1:0][31:0] tmr_araddr,
  input  logic  [NUM_KERNELS-1:0]     tmr_rvalid,
  output logic  [NUM_KERNELS-1:0]     tmr_rready,
  input  logic  [NUM_KERNELS-1:0][31:0] tmr_rdata
);
  for (genvar n = 0; n < NUM_KERNELS; n++) begin : g_kernel
    logic        cmd_valid, cmd_ready, val_valid, val_ready;
    logic [31:0] cmd;
    logic [63:0] val;

    pw_advection #(.NY(NY), .NZ(NZ)) u_kernel (
      .clk, .rst_n,
      .ctrl_we(ctrl_we[n]), .ctrl_addr(ctrl_addr[n]), .ctrl_wdata(ctrl_wdata[n]),
      .ctrl_rdata(ctrl_rdata[n]), .interrupt(interrupt[n]),
      .ar_valid(ar_valid[n]), .ar_ready(ar_ready[n]), .ar(ar[n]),
      .r_valid(r_valid[n]), .r_ready(r_ready[n]), .r(r[n]),
      .aw_valid(aw_valid[n]), .aw_ready(aw_ready[n]), .aw(aw[n]),
      .w_valid(w_valid[n]), .w_ready(w_ready[n]), .w(w[n]),
      .b_valid(b_valid[n]), .b_ready(b_ready[n]),
      .prof_cmd_valid(cmd_valid), .prof_cmd_ready(cmd_ready), .prof_cmd(cmd),
      .prof_val_valid(val_valid), .prof_val_ready(val_ready), .prof_val(val)
    );

    profiler u_profiler (
      .clk, .rst_n,
      .cmd_valid, .cmd_ready, .cmd,
      .out_valid(val_valid), .out_ready(val_ready), .out_data(val),
      .capture(tmr_capture[n]),
      .arvalid(tmr_arvalid[n]), .arready(tmr_arready[n]), .araddr(tmr_araddr[n]),
      .rvalid(tmr_rvalid[n]), .rready(tmr_rready[n]), .rdata(tmr_rdata[n])
    );
  end
endmodule
