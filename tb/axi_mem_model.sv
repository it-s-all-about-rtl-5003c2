// axi_mem_model: behavioural model of card DRAM behind NP read and NP write ports (not synthesizable).
//
// Stands in for the DDR4 banks, their controllers and the crossbar. Memory is a
// sparse array of 256-bit words addressed by byte address / 32. Each read port
// accepts up to 4 outstanding burst requests; the first beat of a burst comes
// LAT cycles after its request, then one beat per cycle, with a random idle
// cycle in stall_pct percent of cycles. Write ports take the request, then the
// data beats (with the same random stalls on w_ready), and answer each burst
// with a response 4 cycles after its last beat. The testbench reaches the
// contents with put()/get() and counts stalls through `stalls`.
module axi_mem_model
  import pw_pkg::*;
#(
  parameter int NP        = 3,
  parameter int LAT       = 25
) (
  input  logic              clk,
  input  logic [NP-1:0]     ar_valid,
  output logic [NP-1:0]     ar_ready,
  input  axi_a_t [NP-1:0]   ar,
  output logic [NP-1:0]     r_valid,
  input  logic [NP-1:0]     r_ready,
  output axi_d_t [NP-1:0]   r,
  input  logic [NP-1:0]     aw_valid,
  output logic [NP-1:0]     aw_ready,
  input  axi_a_t [NP-1:0]   aw,
  input  logic [NP-1:0]     w_valid,
  output logic [NP-1:0]     w_ready,
  input  axi_d_t [NP-1:0]   w,
  output logic [NP-1:0]     b_valid,
  input  logic [NP-1:0]     b_ready
);
  logic [255:0] mem [longint];
  int unsigned stalls = 0;
  int          stall_pct = 0;   // set by the testbench
  longint cyc = 0;

  function automatic void put(longint byte_addr, logic [255:0] d);
    mem[byte_addr >>> 5] = d;
  endfunction
  function automatic logic [255:0] get(longint byte_addr);
    if (mem.exists(byte_addr >>> 5)) return mem[byte_addr >>> 5];
    return '0;
  endfunction

  typedef struct { longint addr; int len; longint t; } req_t;

  always @(posedge clk) cyc <= cyc + 1;

  for (genvar p = 0; p < NP; p++) begin : g_port
    req_t rq[$], wq[$];
    int   rbeat = 0, wbeat = 0;
    longint bq[$];
    logic rstall, wstall;

    initial begin
      r_valid[p] = 0; r[p] = '0; ar_ready[p] = 1; aw_ready[p] = 1; w_ready[p] = 0; b_valid[p] = 0;
    end

    always @(posedge clk) begin
      // read requests
      if (ar_valid[p] && ar_ready[p]) rq.push_back('{longint'(ar[p].addr), int'(ar[p].len) + 1, cyc + LAT});
      // read data
      if (r_valid[p] && r_ready[p]) begin
        rbeat++;
        if (rbeat == rq[0].len) begin
          void'(rq.pop_front());
          rbeat = 0;
        end
      end
      rstall = !(r_valid[p] && !r_ready[p]) && ($urandom_range(99) < stall_pct);
      if (rstall) stalls++;
      r_valid[p] <= (rq.size() > 0) && (rq[0].t <= cyc) && !rstall;
      if (rq.size() > 0) begin
        r[p].data <= get(rq[0].addr + 32 * rbeat);
        r[p].last <= (rbeat == rq[0].len - 1);
      end
      ar_ready[p] <= (rq.size() < 4);

      // write requests and data
      if (aw_valid[p] && aw_ready[p]) wq.push_back('{longint'(aw[p].addr), int'(aw[p].len) + 1, cyc});
      if (w_valid[p] && w_ready[p]) begin
        put(wq[0].addr + 32 * wbeat, w[p].data);
        if (w[p].last !== (wbeat == wq[0].len - 1)) $display("MEM: wlast mismatch port %0d", p);
        wbeat++;
        if (wbeat == wq[0].len) begin
          void'(wq.pop_front());
          wbeat = 0;
          bq.push_back(cyc + 4);
        end
      end
      wstall = ($urandom_range(99) < stall_pct);
      if (wstall) stalls++;
      w_ready[p]  <= (wq.size() > 0) && !wstall;
      aw_ready[p] <= (wq.size() < 4);
      if (b_valid[p] && b_ready[p]) void'(bq.pop_front());
      b_valid[p] <= (bq.size() > 0) && (bq[0] <= cyc);
    end
  end
endmodule
