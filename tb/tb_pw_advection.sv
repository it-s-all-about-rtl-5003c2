// tb_pw_advection: end-to-end test of one advection kernel with its profiler.
//
// An 8 x 8 slice (NY x NZ) block of nx = 5 slices of random wind fields is put
// in the memory model, the kernel is configured through its registers and
// started, and every result double of the three output arrays (slices 1..3) is
// compared bit for bit with the real-arithmetic reference. Run 1 has no memory
// stalls and checks the rate: one cell per clock, so the run may take little
// more than nx*NY*NZ cycles. Run 2 adds random memory stalls on every port and
// checks the results again. The profiled code-block totals read back from the
// kernel must be consistent with the measured run time.
module tb_pw_advection;
  import pw_pkg::*;
  import pw_ref_pkg::*;

  localparam int NY = 8, NZ = 8, NX = 5, S = NY * NZ;
  localparam longint BASE [6] = '{64'h10_0000, 64'h20_0000, 64'h30_0000, 64'h40_0000, 64'h50_0000, 64'h60_0000};

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic ctrl_we = 0; logic [15:0] ctrl_addr = 0; logic [63:0] ctrl_wdata = 0, ctrl_rdata;
  logic interrupt;
  logic [2:0] ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_a_t [2:0] ar, aw; axi_d_t [2:0] r, w;
  logic cmd_valid, cmd_ready, val_valid, val_ready; logic [31:0] cmd; logic [63:0] val;
  logic capture, tarvalid, tarready, trvalid, trready; logic [31:0] taraddr, trdata;

  pw_advection #(.NY(NY), .NZ(NZ)) dut (
    .clk, .rst_n, .ctrl_we, .ctrl_addr, .ctrl_wdata, .ctrl_rdata, .interrupt,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready,
    .prof_cmd_valid(cmd_valid), .prof_cmd_ready(cmd_ready), .prof_cmd(cmd),
    .prof_val_valid(val_valid), .prof_val_ready(val_ready), .prof_val(val));
  profiler u_prof (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .out_valid(val_valid), .out_ready(val_ready), .out_data(val),
    .capture, .arvalid(tarvalid), .arready(tarready), .araddr(taraddr),
    .rvalid(trvalid), .rready(trready), .rdata(trdata));
  axi_timer_model u_tmr (.clk, .rst_n, .capture, .arvalid(tarvalid), .arready(tarready),
    .araddr(taraddr), .rvalid(trvalid), .rready(trready), .rdata(trdata));
  axi_mem_model #(.NP(3), .LAT(25)) mem (.clk, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready);

  int checks = 0, failures = 0;
  real gu [NX][NY][NZ], gv [NX][NY][NZ], gw [NX][NY][NZ];
  real tz [4][NZ];
  real tcx, tcy;

  task automatic wr(input logic [15:0] a, input logic [63:0] d);
    @(negedge clk); ctrl_we = 1; ctrl_addr = a; ctrl_wdata = d;
    @(negedge clk); ctrl_we = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [63:0] d);
    @(negedge clk); ctrl_addr = a; #1 d = ctrl_rdata;
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic real at(int f, int i, int j, int k);
    if (f == 0) return gu[i][j][k];
    if (f == 1) return gv[i][j][k];
    return gw[i][j][k];
  endfunction

  task automatic load_fields();
    for (int f = 0; f < 3; f++)
      for (int i = 0; i < NX; i++)
        for (int wd = 0; wd < S / 4; wd++) begin
          logic [255:0] d;
          int e;
          for (int l = 0; l < 4; l++) begin
            e = 4 * wd + l;
            d[64*l +: 64] = $realtobits(at(f, i, e / NZ, e % NZ));
          end
          mem.put(BASE[f] + i * S * 8 + wd * 32, d);
        end
  endtask

  task automatic run_and_check(input int run, output int cycles);
    int t0;
    logic [63:0] st, p [4];
    // clear results
    for (int f = 0; f < 3; f++)
      for (int wd = 0; wd < NX * S / 4; wd++) mem.put(BASE[3+f] + wd * 32, '1);
    wr(16'h00, 64'd1);
    t0 = 0;
    while (!interrupt) begin @(posedge clk); t0++; end
    cycles = t0;
    rd(16'h00, st);
    check(st[1:0] == 2'b10, $sformatf("run %0d status %b", run, st[1:0]));
    for (int b = 0; b < 4; b++) rd(16'h80 + 8 * b, p[b]);
    $display("run %0d: %0d cycles, profiled total %0d load %0d compute %0d write %0d", run, cycles, p[0], p[1], p[2], p[3]);
    check(p[1] > 0 && p[2] > 0 && p[3] > 0, "profiled blocks nonzero");
    check(p[0] >= p[3] && p[0] >= p[1] && p[0] <= cycles, "profiled total consistent with run time");
    for (int i = 1; i < NX - 1; i++)
      for (int j = 0; j < NY; j++)
        for (int k = 0; k < NZ; k++) begin
          cube_t U, V, W;
          real res [3];
          bit valid, top;
          for (int di = 0; di < 3; di++) for (int dj = 0; dj < 3; dj++) for (int dk = 0; dk < 3; dk++) begin
            int jj, kk;
            bit inb;
            jj = j + dj - 1; kk = k + dk - 1;
            inb = (jj >= 0 && jj < NY && kk >= 0 && kk < NZ);
            U[di][dj][dk] = inb ? gu[i+di-1][jj][kk] : 0.0;
            V[di][dj][dk] = inb ? gv[i+di-1][jj][kk] : 0.0;
            W[di][dj][dk] = inb ? gw[i+di-1][jj][kk] : 0.0;
          end
          valid = (j >= 1 && j <= NY - 2 && k >= 1);
          top   = (k == NZ - 1);
          pw_cell(U, V, W, tcx, tcy, tz[0][k], tz[1][k], tz[2][k], tz[3][k], valid, top, res);
          for (int f = 0; f < 3; f++) begin
            int e;
            logic [255:0] d;
            logic [63:0] got;
            e   = j * NZ + k;
            d   = mem.get(BASE[3+f] + i * S * 8 + (e / 4) * 32);
            got = d[64*(e%4) +: 64];
            check(got == $realtobits(res[f]),
                  $sformatf("run %0d field %0d (i%0d j%0d k%0d) got %h exp %h", run, f, i, j, k, got, $realtobits(res[f])));
          end
        end
  endtask

  initial begin
    int cyc1, cyc2;
    for (int i = 0; i < NX; i++) for (int j = 0; j < NY; j++) for (int k = 0; k < NZ; k++) begin
      gu[i][j][k] = rnd(); gv[i][j][k] = rnd(); gw[i][j][k] = rnd();
    end
    for (int c = 0; c < 4; c++) for (int k = 0; k < NZ; k++) tz[c][k] = rnd() * 0.25;
    tcx = 0.125 + rnd() * 0.01; tcy = 0.25 + rnd() * 0.01;
    load_fields();
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(16'h08, NX);
    for (int f = 0; f < 6; f++) wr(16'h10 + 8 * f, BASE[f]);
    wr(16'h40, S * 8);
    wr(16'h48, $realtobits(tcx));
    wr(16'h50, $realtobits(tcy));
    for (int c = 0; c < 4; c++) for (int k = 0; k < NZ; k++)
      wr(16'h8000 | (c << 13) | (k << 3), $realtobits(tz[c][k]));

    run_and_check(1, cyc1);
    check(cyc1 <= NX * S + 3 * NZ + 120, $sformatf("rate: %0d cycles for %0d cells", cyc1, NX * S));
    mem.stall_pct = 30;
    run_and_check(2, cyc2);
    check(mem.stalls > 0, "memory stalls happened");
    check(cyc2 > cyc1, "stalls slowed the run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
