// axi_timer_model: behavioural model of a 64-bit capture timer with an AXI4-Lite read port (not synthesizable).
//
// Stands in for the vendor AXI timer in cascade capture mode: a 64-bit count
// that rises by one every clock, copied into the capture register when
// `capture` is high. The low word reads at 0x04, the high word at 0x14; a read
// answers two cycles after its address is accepted.
module axi_timer_model (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        capture,
  input  logic        arvalid,
  output logic        arready,
  input  logic [31:0] araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata
);
  logic [63:0] count, cap;
  int          wait_n;
  logic [31:0] addr_q;
  logic        pend;

  assign arready = !pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; cap <= '0; pend <= 0; rvalid <= 0; rdata <= '0; wait_n <= 0; addr_q <= '0;
    end else begin
      count <= count + 1;
      if (capture) cap <= count;
      if (arvalid && arready) begin
        pend <= 1; addr_q <= araddr; wait_n <= 2;
      end else if (pend && !rvalid) begin
        if (wait_n > 1) wait_n <= wait_n - 1;
        else begin
          rvalid <= 1;
          rdata  <= (addr_q == 32'h14) ? cap[63:32] : cap[31:0];
        end
      end else if (rvalid && rready) begin
        rvalid <= 0; pend <= 0;
      end
    end
  end
endmodule
