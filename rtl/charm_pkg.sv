// charm_pkg: types and helpers shared by the CHARM matrix-multiply system.
//
// Data words are 32 bits wide, matching the 32-bit operands of the
// accelerators. Arithmetic on them is two's-complement integer (products and
// sums wrap modulo 2^32); the floating-point format of the AI Engine vector
// unit is not modelled. Streams between the PL and the AIE array carry one
// word per beat with a `last` flag that closes a packet. Off-chip memory is
// word addressed.
package charm_pkg;

  localparam int unsigned DATA_W = 32;
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DIM_W  = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [DIM_W-1:0]         dim_t;

  // One beat of an AXI-Stream-like channel. For packet-switched channels the
  // first beat of each packet carries the destination (scatter) or source
  // (gather) ID in the low bits of `data`.
  typedef struct packed {
    data_t data;
    logic  last;
  } beat_t;

  // Command of one MM layer: BATCH independent products C = A * B where A is
  // M x K, B is K x N, C is M x N, all row-major. Matrix b of a batch sits at
  // base + b * (rows * cols).
  typedef struct packed {
    dim_t  m;
    dim_t  k;
    dim_t  n;
    dim_t  batch;
    addr_t addr_a;
    addr_t addr_b;
    addr_t addr_c;
  } mm_cmd_t;

  // Command of a non-MM accelerator working row by row on an R x C matrix.
  typedef struct packed {
    dim_t  rows;
    dim_t  cols;
    addr_t addr_in;
    addr_t addr_out;
  } vec_cmd_t;

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
