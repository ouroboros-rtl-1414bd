// ouro_pkg: types and constants shared across the wafer-scale SRAM CIM design.
// The numbers follow the architecture description (1024x1024-bit crossbars holding
// 1024x128 int8 weights, 32 crossbars per core on a 1024-bit H-tree, 256-bit core
// links, 13x17 cores per die, 9x7 dies per wafer). Encodings of modes and the
// network flit header are this design's own choice.
package ouro_pkg;

  // crossbar operating modes: FFN keeps static weights; in attention mode the
  // array is split into 128-row logical blocks that hold K (one token per column)
  // or V (one token per row).
  typedef enum logic [1:0] {
    XB_FFN    = 2'd0,
    XB_ATTN_K = 2'd1,
    XB_ATTN_V = 2'd2
  } xb_mode_e;

  // H-tree convergence node behaviour chosen by the intra-core mapping
  typedef enum logic {
    NODE_REDUCE = 1'b0,
    NODE_CONCAT = 1'b1
  } node_mode_e;

  // SFU operations
  typedef enum logic [2:0] {
    SFU_PASS    = 3'd0,  // y = x
    SFU_ADD     = 3'd1,  // y = x + scalar
    SFU_MUL     = 3'd2,  // y = x * scalar (Q16.16)
    SFU_EXP_ACC = 3'd3,  // y = exp(x) stored in buffer, sum reduced into accumulator
    SFU_NORM    = 3'd4,  // y = buffer / accumulator (reciprocal * x)
    SFU_SQACC   = 3'd5,  // accumulator += sum(x*x) (for RMS / layer norm)
    SFU_SQRT    = 3'd6   // scalar = sqrt(accumulator)
  } sfu_op_e;

  // mesh router ports
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4
  } port_e;

  localparam int LINK_W  = 256;   // core-to-core link and buffer width
  localparam int COORD_W = 8;     // wafer coordinate width (91 x 153 cores fit)

  // network flit: 256-bit payload plus a destination header and a tail flag
  typedef struct packed {
    logic [COORD_W-1:0] dx;
    logic [COORD_W-1:0] dy;
    logic               last;
    logic [LINK_W-1:0]  data;
  } flit_t;

  localparam int FLIT_W = $bits(flit_t);

endpackage
