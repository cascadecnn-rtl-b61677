// cascade_pkg: types and constants shared by the two-stage CNN cascade.
//
// The memory word is 64 bits wide: low-precision values are packed into
// 64-bit chunks so that narrow wordlengths still use the full port width
// (for example sixteen 4-bit values per word). Element i of a word sits in
// bits [i*WL +: WL]; that lane order is this design's own choice.
// A layer is cast as an R x P by P x C matrix product; the host describes one
// such product with an mm_cmd_t. Addresses count 64-bit words.
package cascade_pkg;

  localparam int unsigned MEM_W  = 64;  // memory port width (bits)
  localparam int unsigned ADDR_W = 32;  // word address width
  localparam int unsigned DIM_W  = 16;  // width of R, P, C fields
  localparam int unsigned SH_W   = 6;   // width of a rescaling shift

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [MEM_W-1:0]  word_t;

  // One matrix product (one CNN layer after im2col, or an FC layer with
  // batching). R, P and C must be multiples of the unit's T_R, T_P, T_C.
  typedef struct packed {
    addr_t            a_base;   // R x P activations, row-major, WL-bit packed
    addr_t            w_base;   // C x P weights (one kernel per row), W_SRC_WL-bit packed
    addr_t            o_base;   // R x C outputs, row-major, WL-bit packed
    logic [DIM_W-1:0] r;
    logic [DIM_W-1:0] p;
    logic [DIM_W-1:0] c;
    logic [SH_W-1:0]  w_shift;  // weight rescale shift (source -> unit precision)
    logic [SH_W-1:0]  o_shift;  // accumulator -> output activation shift
  } mm_cmd_t;

  // Read request / write request bundles of the off-chip memory ports.
  typedef struct packed {
    addr_t addr;
  } rd_req_t;

  typedef struct packed {
    addr_t addr;
    word_t data;
  } wr_req_t;

  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,
    PH_LPU  = 2'd1,
    PH_HPU  = 2'd2,
    PH_DONE = 2'd3
  } phase_e;

endpackage
