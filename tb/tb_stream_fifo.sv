// tb_stream_fifo: checks the stream FIFO against a queue model.
//
// Random pushes and pops (with phases that fill the FIFO to its depth and
// drain it) are compared word for word with a SystemVerilog queue; the
// occupancy count, full (in_ready low at DEPTH) and empty flags are checked
// every cycle.
module tb_stream_fifo;
  localparam int W = 16, D = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [$clog2(D+1)-1:0] count;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL t=%0t %s", $time, what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int pin, pout;
      @(negedge clk);
      check(count == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      check(in_ready == (q.size() < D), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_data == q[0], "head data");
      if (q.size() == D) fulls++;
      pin  = (n / 500) % 2 == 0 ? 80 : 20;    // fill phases and drain phases
      pout = 100 - pin;
      in_valid  = ($urandom_range(99) < pin);
      out_ready = ($urandom_range(99) < pout);
      in_data   = W'($urandom());
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(fulls > 0, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
