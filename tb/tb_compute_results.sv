// tb_compute_results: checks stage 3, the source-term pipeline, against the real-arithmetic reference.
//
// Random stencil triples with random z index and flags (valid, top, invalid)
// are fed every cycle. Phase 1 drains the outputs every cycle and checks the
// timing: the first result leaves 6 clocks after its stencil is accepted and
// one result follows per clock. Phase 2 adds random gaps on the input and
// back-pressure on the output lanes. Every SU, SV, SW must match pw_cell() bit
// for bit and come out on lanes 0,1,2,3,0,... in order.
module tb_compute_results;
  import pw_pkg::*;
  import pw_ref_pkg::*;
  localparam int NZ = 16, N1 = 200, N2 = 400;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  dbl_t tcx, tcy, cf_data;
  logic cf_we = 0; logic [1:0] cf_sel; logic [15:0] cf_idx;
  logic [2:0] in_valid = 0, in_ready;
  stencil_t [2:0] in_data;
  logic [2:0][3:0] o_valid, o_ready;
  logic [2:0][3:0][63:0] o_data;
  logic [31:0] cells;

  compute_results #(.NZ(NZ)) dut (.*);

  int checks = 0, failures = 0, sent = 0, got = 0, bps = 0, t_first_in = -1, t_first_out = -1, cyc = 0;
  int last_out_cyc;
  real tz [4][NZ];
  real exp_q [$];
  int  gap_pct = 0, bp_pct = 0;
  bit  accepted = 0, go = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic new_stencil();
    cube_t U, V, W;
    real res [3];
    int k;
    bit valid, top;
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int c = 0; c < 3; c++) begin
      U[a][b][c] = rnd(); V[a][b][c] = rnd(); W[a][b][c] = rnd();
      in_data[0].c[a][b][c] = $realtobits(U[a][b][c]);
      in_data[1].c[a][b][c] = $realtobits(V[a][b][c]);
      in_data[2].c[a][b][c] = $realtobits(W[a][b][c]);
    end
    k = $urandom_range(NZ - 1);
    top = ($urandom_range(3) == 0);
    if (top) k = NZ - 1;
    valid = ($urandom_range(4) != 0);
    for (int f = 0; f < 3; f++) begin
      in_data[f].meta.k = 16'(k); in_data[f].meta.valid = valid; in_data[f].meta.top = (k == NZ - 1);
    end
    pw_cell(U, V, W, $bitstoreal(tcx), $bitstoreal(tcy), tz[0][k], tz[1][k], tz[2][k], tz[3][k], valid, k == NZ - 1, res);
    for (int f = 0; f < 3; f++) exp_q.push_back(res[f]);
  endtask

  always @(posedge clk) begin
    cyc++;
    if (in_valid[0] && in_ready[0]) begin
      sent++;
      accepted = 1;
      if (t_first_in < 0) t_first_in = cyc;
    end
    for (int l = 0; l < 4; l++)
      if (o_valid[0][l] && o_ready[0][l]) begin
        if (t_first_out < 0) t_first_out = cyc;
        last_out_cyc = cyc;
        check(l == got % 4, $sformatf("lane %0d for result %0d", l, got));
        check(o_valid[1][l] && o_valid[2][l], "fields leave together");
        for (int f = 0; f < 3; f++) begin
          real e;
          e = exp_q.pop_front();
          check(o_data[f][l] == $realtobits(e), $sformatf("result %0d field %0d got %h exp %h", got, f, o_data[f][l], $realtobits(e)));
        end
        got++;
      end
  end

  // input driver: present a new stencil after each accepted one
  always @(negedge clk) begin
    if (go && (in_valid == 0 || accepted) && sent < N1 + N2) begin
      in_valid = 0;
      accepted = 0;
      if ($urandom_range(99) >= gap_pct) begin
        new_stencil();
        in_valid = 3'b111;
      end
    end else if (sent >= N1 + N2) in_valid = 0;
    o_ready = ($urandom_range(99) >= bp_pct) ? '1 : '0;
    if (o_ready == 0) bps++;
  end

  initial begin
    tcx = $realtobits(0.3 + rnd() * 0.01);
    tcy = $realtobits(0.2 + rnd() * 0.01);
    o_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4; c++) for (int k = 0; k < NZ; k++) begin
      tz[c][k] = rnd() * 0.1;
      @(negedge clk); cf_we = 1; cf_sel = 2'(c); cf_idx = 16'(k); cf_data = $realtobits(tz[c][k]);
    end
    @(negedge clk); cf_we = 0;
    go = 1;
    while (got < N1) @(posedge clk);
    check(t_first_out - t_first_in == 6, $sformatf("latency %0d", t_first_out - t_first_in));
    check(last_out_cyc - t_first_out == N1 - 1 || sent > N1, "one result per clock");
    gap_pct = 20; bp_pct = 20;
    while (got < N1 + N2) @(posedge clk);
    check(bps > 0 && cells == 32'(N1 + N2), "back-pressure exercised, cell count");
    $display("%0d cells, latency %0d, %0d back-pressure cycles", got, t_first_out - t_first_in, bps);
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
