// tb_prepare_stencil: checks stage 2, slice buffering and stencil assembly.
//
// nx = 5 slices of 6 x 8 (NY x NZ) values per field are fed on the four lane
// streams (value = field, x, y, z packed into the double's bits) with random
// gaps, and the output is drained with random back-pressure. Each of the
// (nx-2)*NY*NZ stencils must carry the right z index and flags, and for valid
// cells every tap whose z lies inside the column must hold the neighbour the
// [x][y][z] index names. The emitted count and a clean finish are checked too;
// both gaps and back-pressure must have occurred.
module tb_prepare_stencil;
  import pw_pkg::*;
  localparam int NY = 6, NZ = 8, NX = 5, S = NY * NZ;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [2:0][3:0] s_valid, s_ready;
  logic [2:0][3:0][63:0] s_data;
  logic [2:0] o_valid, o_ready;
  stencil_t [2:0] o_data;

  prepare_stencil #(.NY(NY), .NZ(NZ)) dut (.clk, .rst_n, .start, .nx(16'(NX)), .busy, .done,
    .s_valid, .s_ready, .s_data, .o_valid, .o_ready, .o_data);

  int checks = 0, failures = 0, emitted = 0, gaps = 0, bps = 0;
  int nxt [3][4];

  function automatic logic [63:0] val(int f, int x, int j, int k);
    return {8'hC0 + 8'(f), 8'(x), 16'(j), 16'(k), 16'h7777};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    for (int f = 0; f < 3; f++)
      for (int l = 0; l < 4; l++) begin
        int n;
        n = nxt[f][l] * 4 + l;
        s_data[f][l]  = val(f, n / S, (n % S) / NZ, n % NZ);
        s_valid[f][l] = (n < NX * S) && ($urandom_range(9) != 0);
        if (n < NX * S && !s_valid[f][l]) gaps++;
      end
    o_ready = ($urandom_range(7) != 0) ? 3'b111 : 3'b000;
    if (o_ready == 0) bps++;
  end

  always @(posedge clk) begin
    for (int f = 0; f < 3; f++)
      for (int l = 0; l < 4; l++)
        if (s_valid[f][l] && s_ready[f][l]) nxt[f][l]++;
    if (o_valid[0] && o_ready[0]) begin
      int x, j, k;
      bit valid;
      x = emitted / S + 1; j = (emitted % S) / NZ; k = emitted % NZ;
      valid = (j >= 1 && j <= NY - 2 && k >= 1);
      check(o_valid == 3'b111, "all three stencils together");
      for (int f = 0; f < 3; f++) begin
        check(o_data[f].meta.k == 16'(k) && o_data[f].meta.valid == valid && o_data[f].meta.top == (k == NZ - 1),
              $sformatf("meta of cell %0d field %0d", emitted, f));
        if (valid)
          for (int dx = 0; dx < 3; dx++) for (int dy = 0; dy < 3; dy++) for (int dz = 0; dz < 3; dz++)
            if (k + dz - 1 < NZ)
              check(o_data[f].c[dx][dy][dz] == val(f, x + dx - 1, j + dy - 1, k + dz - 1),
                    $sformatf("cell x%0d j%0d k%0d f%0d tap %0d%0d%0d = %h", x, j, k, f, dx, dy, dz, o_data[f].c[dx][dy][dz]));
      end
      emitted++;
    end
  end

  initial begin
    nxt = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    check(emitted == (NX - 2) * S, $sformatf("emitted %0d", emitted));
    check(!busy, "idle after done");
    check(gaps > 0 && bps > 0, "gaps and back-pressure exercised");
    $display("emitted %0d stencils, %0d input gaps, %0d back-pressure cycles", emitted, gaps, bps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
