// tb_stencil_window: checks the 3x3 line-buffered window on a numbered stream.
//
// Element n of the stream carries the value n. After each shift with input n
// (shifts interleaved with idle cycles), every tap [dy][dz] must show
// n - (2-dy)*NZ - (2-dz) once that index is not negative.
module tb_stencil_window;
  localparam int NZ = 8;
  logic clk = 0, rst_n = 1, shift = 0;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  logic [63:0] din = 0;
  logic [2:0][2:0][63:0] tap;

  stencil_window #(.NZ(NZ)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6 * NZ * NZ; n++) begin
      @(negedge clk);
      shift = 0;
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
      end
      shift = 1;
      din = 64'(n);
      #1;
      for (int dy = 0; dy < 3; dy++)
        for (int dz = 0; dz < 3; dz++) begin
          int idx;
          idx = n - (2 - dy) * NZ - (2 - dz);
          if (idx >= 0) begin
            checks++;
            if (tap[dy][dz] != 64'(idx)) begin
              failures++;
              if (failures < 10) $display("FAIL n=%0d tap[%0d][%0d]=%0d exp %0d", n, dy, dz, tap[dy][dz], idx);
            end
          end
        end
    end
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
