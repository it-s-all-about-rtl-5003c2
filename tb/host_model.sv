// host_model: testbench harness for pw_advection_system, playing the host, the card memory and the timers.
//
// The host side follows the chunked scheme: the wind fields are split into
// NCHUNK blocks of NX slices; chunk c "arrives" in card memory at cycle
// 100 + c*DMA_GAP (the harness writes it into the memory model then), and is
// handed to the first idle kernel, or queued until one becomes idle. Kernels
// are programmed through their register ports; when a kernel's interrupt rises
// its result slices are checked bit for bit against the real-arithmetic
// reference, its profiled totals are read, and it returns to the pool.
// One behavioural memory serves all 3*K read and 3*K write ports, with
// stall_pct percent random stall cycles; each kernel has its own timer model.
//
// Field values are a fixed hash of (chunk, field, x, y, z), so no tables are
// stored. Mechanism counters (queued chunks, reused kernels, concurrently busy
// kernels, transfer/compute overlap, memory stalls, stream back-pressure on the
// read channel, load/store overlap: a kernel moved both a read and a write
// beat within the last 8 cycles, profiler captures) are reported and each
// must have happened at least once; `finished` rises when all chunks are done.
module host_model
  import pw_pkg::*;
  import pw_ref_pkg::*;
#(
  parameter int K = 4, NY = 8, NZ = 8, NX = 4, NCHUNK = 6, DMA_GAP = 200, STALL_PCT = 10,
  parameter bit EXPECT_QUEUE = 1
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic [K-1:0]         ctrl_we,
  output logic [K-1:0][15:0]   ctrl_addr,
  output logic [K-1:0][63:0]   ctrl_wdata,
  input  logic [K-1:0][63:0]   ctrl_rdata,
  input  logic [K-1:0]         interrupt,
  input  logic [K-1:0][2:0]    ar_valid,
  output logic [K-1:0][2:0]    ar_ready,
  input  axi_a_t [K-1:0][2:0]  ar,
  output logic [K-1:0][2:0]    r_valid,
  input  logic [K-1:0][2:0]    r_ready,
  output axi_d_t [K-1:0][2:0]  r,
  input  logic [K-1:0][2:0]    aw_valid,
  output logic [K-1:0][2:0]    aw_ready,
  input  axi_a_t [K-1:0][2:0]  aw,
  input  logic [K-1:0][2:0]    w_valid,
  output logic [K-1:0][2:0]    w_ready,
  input  axi_d_t [K-1:0][2:0]  w,
  output logic [K-1:0][2:0]    b_valid,
  input  logic [K-1:0][2:0]    b_ready,
  input  logic [K-1:0]         tmr_capture,
  input  logic [K-1:0]         tmr_arvalid,
  output logic [K-1:0]         tmr_arready,
  input  logic [K-1:0][31:0]   tmr_araddr,
  output logic [K-1:0]         tmr_rvalid,
  input  logic [K-1:0]         tmr_rready,
  output logic [K-1:0][31:0]   tmr_rdata,
  output logic                 finished,
  output int                   checks,
  output int                   failures
);
  localparam int S = NY * NZ;
  localparam longint CHUNK_BYTES = 64'h100_0000;

  axi_mem_model #(.NP(3 * K), .LAT(25)) mem (.clk,
    .ar_valid(ar_valid), .ar_ready(ar_ready), .ar(ar), .r_valid(r_valid), .r_ready(r_ready), .r(r),
    .aw_valid(aw_valid), .aw_ready(aw_ready), .aw(aw), .w_valid(w_valid), .w_ready(w_ready), .w(w),
    .b_valid(b_valid), .b_ready(b_ready));

  for (genvar n = 0; n < K; n++) begin : g_tmr
    axi_timer_model u_tmr (.clk, .rst_n, .capture(tmr_capture[n]), .arvalid(tmr_arvalid[n]),
      .arready(tmr_arready[n]), .araddr(tmr_araddr[n]), .rvalid(tmr_rvalid[n]),
      .rready(tmr_rready[n]), .rdata(tmr_rdata[n]));
  end

  real tcx = 0.125, tcy = 0.0625;
  real tz [4][NZ];
  longint cyc = 0;
  int  queued = 0, reused = 0, max_busy = 0, overlap_xfer = 0, rd_backpressure = 0,
       ldst_overlap = 0, captures = 0, arrived = 0, completed = 0, wall = 0;
  int  kernel_runs [K];
  int  chunk_of [K];
  longint last_rd [K], last_wr [K];

  function automatic real fval(int c, int f, int i, int j, int k);
    int unsigned h;
    h = 32'(c) * 32'd73856093 ^ 32'(f) * 32'd19349663 ^ 32'(i) * 32'd83492791
        ^ 32'(j) * 32'd2654435761 ^ 32'(k) * 32'd40503 ^ 32'h9E3779B9;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return real'(h % 32'd1000003) / 62500.0 - 8.0;
  endfunction

  function automatic longint fbase(int c, int f);
    return c * CHUNK_BYTES + f * (CHUNK_BYTES / 8);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic arrive(int c);
    for (int f = 0; f < 3; f++)
      for (int i = 0; i < NX; i++)
        for (int wd = 0; wd < S / 4; wd++) begin
          logic [255:0] d;
          int e;
          for (int l = 0; l < 4; l++) begin
            e = 4 * wd + l;
            d[64*l +: 64] = $realtobits(fval(c, f, i, e / NZ, e % NZ));
          end
          mem.put(fbase(c, f) + i * S * 8 + wd * 32, d);
        end
  endtask

  task automatic wr(int n, logic [15:0] a, logic [63:0] d);
    @(negedge clk); ctrl_we[n] = 1; ctrl_addr[n] = a; ctrl_wdata[n] = d;
    @(negedge clk); ctrl_we[n] = 0;
  endtask

  task automatic launch(int n, int c);
    wr(n, 16'h08, 64'(NX));
    for (int f = 0; f < 6; f++) wr(n, 16'h10 + 16'(8 * f), 64'(fbase(c, f)));
    wr(n, 16'h40, 64'(S * 8));
    wr(n, 16'h00, 64'd1);
  endtask

  task automatic collect(int n, int c);
    logic [63:0] p [4];
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); ctrl_addr[n] = 16'h80 + 16'(8 * b); #1 p[b] = ctrl_rdata[n];
    end
    check(p[0] > 0 && p[1] > 0 && p[2] > 0 && p[3] > 0 && p[0] >= p[3],
          $sformatf("kernel %0d profile %0d %0d %0d %0d", n, p[0], p[1], p[2], p[3]));
    for (int i = 1; i < NX - 1; i++)
      for (int j = 0; j < NY; j++)
        for (int k = 0; k < NZ; k++) begin
          cube_t U, V, W;
          real res [3];
          int jj, kk, e;
          logic [255:0] d;
          for (int di = 0; di < 3; di++) for (int dj = 0; dj < 3; dj++) for (int dk = 0; dk < 3; dk++) begin
            jj = j + dj - 1; kk = k + dk - 1;
            if (jj >= 0 && jj < NY && kk >= 0 && kk < NZ) begin
              U[di][dj][dk] = fval(c, 0, i + di - 1, jj, kk);
              V[di][dj][dk] = fval(c, 1, i + di - 1, jj, kk);
              W[di][dj][dk] = fval(c, 2, i + di - 1, jj, kk);
            end else begin
              U[di][dj][dk] = 0.0; V[di][dj][dk] = 0.0; W[di][dj][dk] = 0.0;
            end
          end
          pw_cell(U, V, W, tcx, tcy, tz[0][k], tz[1][k], tz[2][k], tz[3][k],
                  j >= 1 && j <= NY - 2 && k >= 1, k == NZ - 1, res);
          e = j * NZ + k;
          for (int f = 0; f < 3; f++) begin
            d = mem.get(fbase(c, 3 + f) + i * S * 8 + (e / 4) * 32);
            check(d[64*(e%4) +: 64] == $realtobits(res[f]),
                  $sformatf("chunk %0d field %0d (i%0d j%0d k%0d) got %h exp %h", c, f, i, j, k,
                            d[64*(e%4) +: 64], $realtobits(res[f])));
          end
        end
  endtask

  // mechanism counters
  always @(posedge clk) begin
    int nb;
    cyc++;
    nb = 0;
    for (int n = 0; n < K; n++) begin
      if (chunk_of[n] >= 0) nb++;
      if (|(r_valid[n] & ~r_ready[n])) rd_backpressure++;
      if (|(r_valid[n] & r_ready[n])) last_rd[n] = cyc;
      if (|(w_valid[n] & w_ready[n])) last_wr[n] = cyc;
      if (last_rd[n] > 0 && last_wr[n] > 0 && cyc - last_rd[n] < 8 && cyc - last_wr[n] < 8) ldst_overlap++;
      if (tmr_capture[n]) captures++;
    end
    if (nb > max_busy) max_busy = nb;
    if (nb > 0 && arrived < NCHUNK) overlap_xfer++;
  end

  initial begin
    int next_chunk, pending [$];
    rst_n = 1;
    ctrl_we = '0; ctrl_addr = '0; ctrl_wdata = '0;
    checks = 0; failures = 0; finished = 0;
    for (int n = 0; n < K; n++) begin chunk_of[n] = -1; kernel_runs[n] = 0; last_rd[n] = 0; last_wr[n] = 0; end
    for (int c = 0; c < 4; c++) for (int k = 0; k < NZ; k++) tz[c][k] = 0.01 * real'((c + 1) * (k + 3) % 17) - 0.05;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    mem.stall_pct = STALL_PCT;
    for (int n = 0; n < K; n++) begin
      wr(n, 16'h48, $realtobits(tcx));
      wr(n, 16'h50, $realtobits(tcy));
      for (int c = 0; c < 4; c++) for (int k = 0; k < NZ; k++)
        wr(n, 16'h8000 | 16'(c << 13) | 16'(k << 3), $realtobits(tz[c][k]));
    end
    next_chunk = 0;
    while (completed < NCHUNK) begin
      @(posedge clk);
      wall++;
      // chunks arrive over the (modelled) transfer link
      if (next_chunk < NCHUNK && cyc >= longint'(100 + next_chunk * DMA_GAP)) begin
        arrive(next_chunk);
        pending.push_back(next_chunk);
        arrived++;
        next_chunk++;
      end
      // finished kernels: check results, return to the pool
      for (int n = 0; n < K; n++)
        if (chunk_of[n] >= 0 && interrupt[n]) begin
          collect(n, chunk_of[n]);
          chunk_of[n] = -1;
          completed++;
        end
      // start idle kernels on waiting chunks
      if (pending.size() > 0) begin
        int idle;
        idle = -1;
        for (int n = K - 1; n >= 0; n--) if (chunk_of[n] < 0) idle = n;
        if (idle >= 0) begin
          int c;
          c = pending.pop_front();
          if (kernel_runs[idle] > 0) reused++;
          kernel_runs[idle]++;
          chunk_of[idle] = c;
          launch(idle, c);
        end else if (pending.size() == 1) queued++;
      end
    end
    $display("%0d chunks on %0d kernels: %0d cycles; queued %0d, reused %0d, max busy %0d, transfer overlap %0d cycles",
             NCHUNK, K, cyc, queued, reused, max_busy, overlap_xfer);
    $display("memory stalls %0d, read back-pressure %0d, load/store overlap %0d, timer captures %0d",
             mem.stalls, rd_backpressure, ldst_overlap, captures);
    check(max_busy > 1, "kernels ran concurrently");
    check(overlap_xfer > 0, "transfer overlapped with compute");
    check(!EXPECT_QUEUE || queued > 0, "a chunk waited for a free kernel");
    check(!EXPECT_QUEUE || reused > 0, "a kernel was reused from the pool");
    check(STALL_PCT == 0 || mem.stalls > 0, "memory stalls");
    check(rd_backpressure > 0, "read streams filled up and held the memory");
    check(ldst_overlap > 0, "a kernel loading and storing at the same time");
    check(captures >= 8 * NCHUNK, "profiler captured the timer");
    finished = 1;
  end
endmodule
