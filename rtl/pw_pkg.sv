// pw_pkg: types and constants shared by the Piacsek-Williams advection kernel.
//
// The kernel moves IEEE-754 doubles. Memory ports are 256 bits wide, so one beat
// carries four doubles that are consecutive in z. The AXI4 channel payloads are
// reduced to the fields this design drives (address, burst length, data, last);
// ids, cache/prot bits and a write strobe of all ones are left to the interconnect.
// A stencil struct holds the 3x3x3 neighbourhood of one grid cell for one field,
// indexed [x][y][z] with 0/1/2 meaning -1/0/+1.
package pw_pkg;
  localparam int unsigned DW        = 64;   // one double
  localparam int unsigned MEM_DW    = 256;  // DRAM port width (four doubles)
  localparam int unsigned LANES     = MEM_DW / DW;
  localparam int unsigned ADDR_W    = 64;   // byte address
  localparam int unsigned MAX_BURST = 256;  // AXI4 maximum beats per burst

  typedef logic [DW-1:0] dbl_t;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;   // byte address, 32-byte aligned
    logic [7:0]        len;    // beats - 1
  } axi_a_t;

  typedef struct packed {
    logic [MEM_DW-1:0] data;
    logic              last;
  } axi_d_t;

  // Per-cell metadata carried alongside each stencil.
  typedef struct packed {
    logic        valid;   // interior cell: results are computed
    logic        top;     // topmost z level (k = NZ-1)
    logic [15:0] k;       // z index, selects the vertical coefficients
  } cell_meta_t;

  typedef struct packed {
    dbl_t [2:0][2:0][2:0] c;   // [x][y][z]
    cell_meta_t           meta;
  } stencil_t;

  // Profiler command word: [31:30] opcode, [7:0] code-block number.
  typedef enum logic [1:0] {
    PROF_INIT   = 2'd0,   // clear all totals
    PROF_START  = 2'd1,   // a code block starts
    PROF_END    = 2'd2,   // a code block ends
    PROF_REPORT = 2'd3    // stream every total out
  } prof_op_e;

  // Code blocks timed by the kernel (columns of the profiling table).
  localparam int unsigned PROF_BLK_TOTAL   = 0;
  localparam int unsigned PROF_BLK_LOAD    = 1;
  localparam int unsigned PROF_BLK_COMPUTE = 2;
  localparam int unsigned PROF_BLK_WRITE   = 3;
  localparam int unsigned PROF_BLOCKS      = 4;

  function automatic logic [31:0] prof_word(prof_op_e op, int unsigned blk);
    return {op, 22'd0, 8'(blk)};
  endfunction
endpackage
