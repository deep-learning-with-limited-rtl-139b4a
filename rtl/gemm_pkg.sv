// gemm_pkg: types and constants shared by the fixed-point matrix multiplier.
//
// Number format: every matrix element is a 16-bit two's-complement fixed-point
// word (word length 16, as in the training experiments this accelerator serves).
// Products and sums are kept in a 48-bit accumulator, the width of an FPGA DSP
// accumulator. The step descriptor step_t is what the top controller hands to the
// READ, L2-to-SA and WRITE engines; cfg_t is the GEMM descriptor the host writes.
// Widths of addresses and counters are this design's own choices.
package gemm_pkg;

  localparam int unsigned ADDR_W = 33;   // 8 GB of DDR3 is byte-addressed by 33 bits
  localparam int unsigned DIM_W  = 16;   // l, k, m up to 65535
  localparam int unsigned SUB_W  = 8;    // sub-blocks per step (p), up to 255

  // AXI4 incrementing burst.
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;

  // Tag that travels with the A word through a row of the array.
  typedef struct packed {
    logic valid;   // a and b carry a product to accumulate
    logic first;   // first product of an operation: accumulator restarts
    logic last;    // last product: result goes to the local register
  } tag_t;

  // GEMM descriptor. A is l x k row-major, B is stored column by column
  // (m x k, row-major B transposed), C is l x m row-major. Addresses in bytes.
  typedef struct packed {
    logic [ADDR_W-1:0] a_base;
    logic [ADDR_W-1:0] b_base;
    logic [ADDR_W-1:0] c_base;
    logic [DIM_W-1:0]  l;
    logic [DIM_W-1:0]  k;
    logic [DIM_W-1:0]  m;
  } cfg_t;

  // One step: a block of nsub*n rows of A against n columns of B.
  typedef struct packed {
    logic [DIM_W-1:0] row0;    // first row of A (and of C)
    logic [DIM_W-1:0] col0;    // first column of B (and of C)
    logic [SUB_W-1:0] nsub;    // number of n-row sub-blocks, 1..p
    logic             load_a;  // first step of a row block: A must be fetched
    logic             abuf;    // L2 half holding this step's A rows
    logic             bbuf;    // L2 half holding this step's B columns
  } step_t;

  // Event counters of the whole accelerator.
  typedef struct packed {
    logic [31:0] steps;          // steps written back
    logic [31:0] a_loads;        // row blocks of A fetched
    logic [31:0] overlap;        // cycles READ and the array were busy together
    logic [31:0] spacing_stall;  // cycles a last element waited for the cascade
    logic [31:0] credit_stall;   // cycles an operation waited for output FIFO room
    logic [31:0] bubble;         // busy cycles the array had no input data
    logic [31:0] saturations;    // results clipped to max/min
  } stat_t;

endpackage
