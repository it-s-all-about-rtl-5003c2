// stream_fifo: synchronous first-in first-out queue, the hardware form of an HLS stream.
//
// The dataflow stages of the kernel are joined by streams of depth 16 so that a
// stage that stalls for a while does not at once stop its neighbours. This FIFO
// is a circular buffer with a write pointer, a read pointer and an occupancy
// count. Interface: valid/ready on both sides (a word moves when both are high).
// The head word is shown combinationally on `out_data` whenever `out_valid` is
// high, so a push into an empty FIFO can be popped on the next clock. A full
// FIFO does not accept a push in the same cycle as a pop (ready is simply
// "not full"), the usual behaviour of a generated stream. Reset empties it.
// The overflow assertion is disabled during reset by sampling rst_n, so a
// linter sees rst_n used both as the asynchronous reset and as a synchronous
// input; the second use is only in that assertion and makes no logic.
module stream_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH;
  endproperty
  a_no_overflow: assert property (p_no_overflow);
endmodule
