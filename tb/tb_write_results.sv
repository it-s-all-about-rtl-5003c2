// tb_write_results: checks stage 4, the packer and burst writer for SU, SV, SW.
//
// Numbered doubles are fed into the four streams of each field, in z order
// round-robin over the lanes, for nx = 4 (two output slices of 64 x 32, two
// bursts each) with random gaps on the streams and, in a second run, random
// memory stalls. Every word of the output slices must land at its address with
// the four doubles in lane order; slice 0 must stay untouched; `done` may only
// come after the last write response. Run 1 also checks the rate: one beat per
// clock once data flows.
module tb_write_results;
  import pw_pkg::*;
  localparam int NY = 64, NZ = 32, NX = 4, WORDS = NY * NZ / 4, NOUT = NX - 2;
  localparam longint STRIDE = 64'h1_0000;
  localparam longint BASE [3] = '{64'h400_0000, 64'h500_0000, 64'h600_0000};
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [2:0] ar_valid = 0, r_ready = 0, ar_ready, r_valid;
  axi_a_t [2:0] ar = '0; axi_d_t [2:0] r;
  logic [2:0] aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_a_t [2:0] aw; axi_d_t [2:0] w;
  logic [2:0][3:0] s_valid, s_ready;
  logic [2:0][3:0][63:0] s_data;

  write_results #(.NY(NY), .NZ(NZ)) dut (.clk, .rst_n, .start, .nx(16'(NX)),
    .base({64'(BASE[2]), 64'(BASE[1]), 64'(BASE[0])}), .slice_stride(64'(STRIDE)),
    .busy, .done, .s_valid, .s_ready, .s_data, .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready);
  axi_mem_model #(.NP(3), .LAT(25)) mem (.clk, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready);

  int checks = 0, failures = 0;
  int sent [3];
  int gap_pct = 0, bresp = 0;

  function automatic logic [63:0] val(int f, int n);
    return {8'hB0 + 8'(f), 24'h0, 32'(n)};
  endfunction

  // stream sources: each field pushes its next four doubles when not gapping
  always @(negedge clk) begin
    for (int f = 0; f < 3; f++) begin
      for (int l = 0; l < 4; l++) s_data[f][l] = val(f, sent[f] + l);
      s_valid[f] = (sent[f] < NOUT * WORDS * 4 && $urandom_range(99) >= gap_pct) ? 4'hF : 4'h0;
    end
  end
  always @(posedge clk) begin
    for (int f = 0; f < 3; f++) if (&s_valid[f] && &s_ready[f]) sent[f] += 4;
    for (int f = 0; f < 3; f++) if (b_valid[f] && b_ready[f]) bresp++;
  end

  task automatic run(int r, output int cycles);
    int first;
    sent = '{0, 0, 0};
    bresp = 0;
    for (int f = 0; f < 3; f++) for (int x = 0; x < NX; x++) for (int wd = 0; wd < WORDS; wd++)
      mem.put(BASE[f] + x * STRIDE + wd * 32, '1);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); cycles++; end
    checks++;
    if (bresp != 3 * NOUT * 2) begin failures++; $display("FAIL run %0d: done after %0d responses", r, bresp); end
    for (int f = 0; f < 3; f++) for (int x = 0; x < NX; x++) for (int wd = 0; wd < WORDS; wd++) begin
      logic [255:0] d, e;
      d = mem.get(BASE[f] + x * STRIDE + wd * 32);
      if (x == 0 || x == NX - 1) e = '1;
      else for (int l = 0; l < 4; l++) e[64*l +: 64] = val(f, ((x - 1) * WORDS + wd) * 4 + l);
      checks++;
      if (d !== e) begin
        failures++;
        if (failures < 10) $display("FAIL run %0d f%0d x%0d wd%0d got %h exp %h", r, f, x, wd, d, e);
      end
    end
  endtask

  initial begin
    int c1, c2;
    sent = '{0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, c1);
    $display("run 1: %0d cycles for %0d beats per field", c1, NOUT * WORDS);
    checks++;
    if (c1 > NOUT * WORDS + 20) begin failures++; $display("FAIL rate %0d", c1); end
    gap_pct = 25;
    mem.stall_pct = 20;
    run(2, c2);
    $display("run 2: %0d cycles, %0d memory stalls", c2, mem.stalls);
    checks++;
    if (c2 <= c1 || mem.stalls == 0) begin failures++; $display("FAIL stalls not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
