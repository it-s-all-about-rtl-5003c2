// tb_fp64_unit: checks the double precision unit against host real arithmetic.
//
// Random operands over a wide exponent range (results kept in the normal
// range) are applied for add, subtract and multiply, and each result one clock
// later must equal the host's correctly rounded result bit for bit. Directed
// cases cover exact cancellation, zeros, an infinity, a NaN, rounding ties
// and the hold behaviour with `en` low.
module tb_fp64_unit;
  logic clk = 0, rst_n = 1, en = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  logic [1:0] op;
  logic [63:0] a, b, y;
  always #5 clk = ~clk;

  fp64_unit dut (.clk, .rst_n, .en, .op, .a, .b, .y);

  int checks = 0, failures = 0;

  function automatic real rnd_wide();
    real m, v;
    int  e;
    m = 1.0 + $urandom() / 4294967296.0 + $urandom() / 18446744073709551616.0;
    e = int'($urandom_range(80)) - 40;
    v = m * (2.0 ** e);
    return ($urandom_range(1) == 1) ? -v : v;
  endfunction

  function automatic logic [63:0] ref_op(logic [1:0] o, logic [63:0] x, logic [63:0] z);
    real rx = $bitstoreal(x), rz = $bitstoreal(z);
    case (o)
      2'd0:    return $realtobits(rx + rz);
      2'd1:    return $realtobits(rx - rz);
      default: return $realtobits(rx * rz);
    endcase
  endfunction

  task automatic apply(logic [1:0] o, logic [63:0] x, logic [63:0] z, logic [63:0] exp_v, string what);
    @(negedge clk); op = o; a = x; b = z;
    @(negedge clk);
    checks++;
    if (y !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: op%0d %h %h -> %h exp %h", what, o, x, z, y, exp_v);
    end
  endtask

  initial begin
    op = 0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [63:0] x, z;
      logic [1:0]  o;
      x = $realtobits(rnd_wide());
      z = (n % 7 == 0) ? {~x[63], x[62:20], 20'($urandom())} : $realtobits(rnd_wide());
      o = 2'(n % 3);
      apply(o, x, z, ref_op(o, x, z), "random");
    end
    apply(0, $realtobits(1.5), $realtobits(-1.5), 64'd0, "cancel");
    apply(2, $realtobits(0.0), $realtobits(3.0), 64'd0, "zero mul");
    apply(0, $realtobits(0.0), $realtobits(-2.25), $realtobits(-2.25), "zero add");
    apply(0, 64'h7FF0_0000_0000_0000, $realtobits(1.0), 64'h7FF0_0000_0000_0000, "inf");
    apply(2, 64'h7FF8_0000_0000_0001, $realtobits(1.0), 64'h7FF8_0000_0000_0000, "nan");
    apply(0, $realtobits(1.0), 64'h3CA0_0000_0000_0000, $realtobits(1.0), "tie to even");
    apply(0, 64'h3FF0_0000_0000_0001, 64'h3CA0_0000_0000_0000, 64'h3FF0_0000_0000_0002, "tie up");
    apply(1, $realtobits(1.0), 64'h3C90_0000_0000_0000, $realtobits(1.0), "borrow tie to even");
    apply(1, $realtobits(1.0), 64'h3C91_0000_0000_0000, 64'h3FEF_FFFF_FFFF_FFFF, "borrow");
    // hold with en low
    @(negedge clk); op = 2; a = $realtobits(3.0); b = $realtobits(5.0);
    @(negedge clk); en = 0; a = $realtobits(7.0);
    @(negedge clk); @(negedge clk);
    checks++;
    if (y !== $realtobits(15.0)) begin failures++; $display("FAIL hold %h", y); end
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
