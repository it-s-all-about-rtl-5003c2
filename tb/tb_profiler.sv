// tb_profiler: checks the profiler against a 64-bit capture timer model.
//
// The testbench plays the kernel: it sends INIT, nested and repeated START/END
// pairs for code blocks 0..2 with random waits (block 3 is never used), then
// REPORT, and reads the four totals from the output stream with some
// back-pressure. It records its own cycle count at every capture pulse, so the
// expected total of a block is the sum of (end capture - start capture) over
// its pairs. A second round after INIT checks that the totals were cleared.
// The timer starts at a large value so that the high word matters.
module tb_profiler;
  import pw_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, out_valid, out_ready = 0, capture;
  logic [31:0] cmd = 0;
  logic [63:0] out_data;
  logic arvalid, arready, rvalid, rready; logic [31:0] araddr, rdata;

  profiler dut (.*);
  axi_timer_model tmr (.clk, .rst_n, .capture, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata);

  int checks = 0, failures = 0;
  longint cyc = 0, caps [$];
  longint exp_tot [4];

  always @(posedge clk) begin
    cyc++;
    if (capture) caps.push_back(tmr.count);
  end

  task automatic send(prof_op_e op, int blk);
    @(negedge clk); cmd_valid = 1; cmd = prof_word(op, blk);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic settle();
    while (dut.state != 0 || cmd_valid) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic timed(int blk, int wait_n);
    longint t0;
    send(PROF_START, blk);
    settle();
    t0 = caps[$];
    repeat (wait_n) @(posedge clk);
    send(PROF_END, blk);
    settle();
    exp_tot[blk] += caps[$] - t0;
  endtask

  task automatic report_and_check(string tag);
    int n;
    send(PROF_REPORT, 0);
    n = 0;
    while (n < 4) begin
      @(negedge clk); out_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != 64'(exp_tot[n])) begin
          failures++;
          $display("FAIL %s block %0d total %0d exp %0d", tag, n, out_data, exp_tot[n]);
        end
        n++;
      end
    end
    @(negedge clk); out_ready = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    tmr.count = 64'h0000_0001_FFFF_FF00;    // cross a 32-bit boundary during the test
    send(PROF_INIT, 0);
    exp_tot = '{0, 0, 0, 0};
    // block 0 brackets two timings of block 1 and one of block 2
    begin
      longint t0;
      send(PROF_START, 0); settle(); t0 = caps[$];
      timed(1, $urandom_range(20, 200));
      timed(2, $urandom_range(20, 200));
      timed(1, $urandom_range(20, 200));
      send(PROF_END, 0); settle(); exp_tot[0] += caps[$] - t0;
    end
    report_and_check("round 1");
    checks++;
    if (!(exp_tot[0] > exp_tot[1] + exp_tot[2])) begin failures++; $display("FAIL nesting"); end
    send(PROF_INIT, 0);
    exp_tot = '{0, 0, 0, 0};
    timed(2, 37);
    report_and_check("round 2");
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
