// stencil_window: 3x3 (y,z) neighbourhood of a z-by-y slice that is streamed in z-fastest order.
//
// A slice of NY rows of NZ doubles arrives one value per `shift`. Two line
// buffers, each a circular RAM of NZ entries read before written, delay the
// stream by one and two rows; three short shift registers give the z
// neighbours. After a shift with input x(n) the window holds, at tap[dy][dz]
// (dy, dz = 0,1,2 for offsets -1,0,+1), the element n - (2-dy)*NZ - (2-dz):
// the centre tap[1][1] is the element NZ+1 places behind the newest. The taps
// are shown combinationally for the shift about to happen, that is with `din`
// already counted in, so a stage that calls `shift` and reads `tap` in the same
// cycle sees the window centred on element n-NZ-1. Taps at row or slice edges
// wrap into neighbouring rows; the consumer marks such cells invalid.
// Line buffers and shift registers are not reset: every tap that feeds a valid
// cell has been written before it is read.
module stencil_window #(
  parameter int unsigned NZ = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              shift,
  input  logic [63:0]       din,
  output logic [2:0][2:0][63:0] tap   // [dy][dz]
);
  logic [63:0] lb1 [NZ];
  logic [63:0] lb2 [NZ];
  logic [$clog2(NZ)-1:0] ptr;
  logic [63:0] r2a, r2b, r1a, r1b, r0a, r0b;
  logic [63:0] lb1_out, lb2_out;

  assign lb1_out = lb1[ptr];
  assign lb2_out = lb2[ptr];

  // newest row (dy = 2) from the input, middle row from line buffer 1, oldest from line buffer 2
  assign tap[2][2] = din;
  assign tap[2][1] = r2a;
  assign tap[2][0] = r2b;
  assign tap[1][2] = lb1_out;
  assign tap[1][1] = r1a;
  assign tap[1][0] = r1b;
  assign tap[0][2] = lb2_out;
  assign tap[0][1] = r0a;
  assign tap[0][0] = r0b;

  always_ff @(posedge clk) begin
    if (shift) begin
      lb1[ptr] <= din;
      lb2[ptr] <= lb1_out;
      r2a <= din;     r2b <= r2a;
      r1a <= lb1_out; r1b <= r1a;
      r0a <= lb2_out; r0b <= r0a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ptr <= '0;
    else if (shift) ptr <= (ptr == $bits(ptr)'(NZ - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
