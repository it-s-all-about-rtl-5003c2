// tb_read_fields: checks stage 1, the burst reader for U, V, W.
//
// Slices of 64 x 32 doubles (512 beats, two bursts each) with a slice stride
// larger than a slice are read for nx = 3. Every double popped from each of the
// twelve streams must be the word the layout puts there, in order. Phase 1
// drains the streams every cycle with no memory stalls and checks the rate
// (one beat per field per clock after the 25-cycle request latency); phase 2
// adds random stream back-pressure and memory stalls.
module tb_read_fields;
  import pw_pkg::*;
  localparam int NY = 64, NZ = 32, NX = 3, WORDS = NY * NZ / 4;
  localparam longint STRIDE = 64'h1_0000;
  localparam longint BASE [3] = '{64'h100_0000, 64'h200_0000, 64'h300_0000};
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [2:0] ar_valid, ar_ready, r_valid, r_ready;
  axi_a_t [2:0] ar; axi_d_t [2:0] r;
  logic [2:0][3:0] s_valid, s_ready;
  logic [2:0][3:0][63:0] s_data;
  logic [2:0] aw_valid = 0, w_valid = 0, b_ready = 0, aw_ready, w_ready, b_valid;
  axi_a_t [2:0] aw = '0; axi_d_t [2:0] w = '0;

  read_fields #(.NY(NY), .NZ(NZ)) dut (.clk, .rst_n, .start, .nx(16'(NX)),
    .base({64'(BASE[2]), 64'(BASE[1]), 64'(BASE[0])}), .slice_stride(64'(STRIDE)),
    .busy, .done, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r, .s_valid, .s_ready, .s_data);
  axi_mem_model #(.NP(3), .LAT(25)) mem (.clk, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready);

  int checks = 0, failures = 0, popped [3][4];
  int backpress = 0;

  function automatic logic [63:0] val(int f, int x, int wd, int l);
    return {8'hA0 + 8'(f), 8'(x), 16'(wd), 8'(l), 24'h5A5A5A};
  endfunction

  always @(posedge clk) begin
    for (int f = 0; f < 3; f++)
      for (int l = 0; l < 4; l++)
        if (s_valid[f][l] && s_ready[f][l]) begin
          int n, x, wd;
          n = popped[f][l];
          x = n / WORDS; wd = n % WORDS;
          checks++;
          if (s_data[f][l] !== val(f, x, wd, l)) begin
            failures++;
            if (failures < 10) $display("FAIL f%0d lane%0d n%0d got %h exp %h", f, l, n, s_data[f][l], val(f, x, wd, l));
          end
          popped[f][l]++;
        end
  end

  logic bp = 0;
  always @(negedge clk) begin
    bp = bp ? ($urandom_range(3) != 0) : ($urandom_range(9) == 0);
    s_ready = (mem.stall_pct > 0 && bp) ? '0 : '1;
    if (mem.stall_pct > 0 && bp) backpress++;
  end

  task automatic run(output int cycles);
    for (int f = 0; f < 3; f++) for (int l = 0; l < 4; l++) popped[f][l] = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); cycles++; end
    @(negedge clk);
    for (int f = 0; f < 3; f++) for (int l = 0; l < 4; l++) begin
      checks++;
      if (popped[f][l] != NX * WORDS) begin failures++; $display("FAIL count f%0d l%0d %0d", f, l, popped[f][l]); end
    end
  endtask

  initial begin
    int c1, c2;
    for (int f = 0; f < 3; f++) for (int x = 0; x < NX; x++) for (int wd = 0; wd < WORDS; wd++)
      mem.put(BASE[f] + x * STRIDE + wd * 32, {val(f, x, wd, 3), val(f, x, wd, 2), val(f, x, wd, 1), val(f, x, wd, 0)});
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(c1);
    $display("phase 1: %0d cycles for %0d beats per field", c1, NX * WORDS);
    checks++;
    if (c1 > NX * WORDS + 25 + 12) begin failures++; $display("FAIL rate %0d", c1); end
    mem.stall_pct = 20;
    run(c2);
    $display("phase 2: %0d cycles, %0d back-pressure cycles, %0d memory stalls", c2, backpress, mem.stalls);
    checks++;
    if (backpress == 0 || mem.stalls == 0 || c2 <= c1) begin failures++; $display("FAIL stalls not exercised"); end
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
