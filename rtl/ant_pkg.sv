// ant_pkg: types and constants shared by the ANT (adaptive numerical type)
// accelerator.
//
// A tensor is stored as fixed-length 4-bit codes of one primitive type chosen
// per tensor: int, PoT (power of two) or flint (first-one encoded
// float/int hybrid). The int-based datapath decodes every code to a pair
// <base integer, exponent> whose value is base << exponent; an 8-bit int is
// carried as two such pairs (high nibble with exponent 4, low nibble with
// exponent 0). Float is not a primitive of the int-based design.
//
// Own choices: the base integer is carried as a 5-bit two's-complement number
// so that unsigned 4-bit values (up to 15) and signed ones share one
// multiplier; the exponent is 4 bits as in the paper's decoder figure.
package ant_pkg;

  localparam int unsigned CODE_W = 4;   // width of one stored ANT code
  localparam int unsigned BASE_W = 5;   // decoded base integer, two's complement
  localparam int unsigned EXP_W  = 4;   // decoded exponent
  localparam int unsigned ACC_W  = 16;  // accumulator width

  // Primitive type of a tensor (int-based ANT: int, PoT, flint).
  typedef enum logic [1:0] {
    T_INT   = 2'd0,
    T_POT   = 2'd1,
    T_FLINT = 2'd2
  } ant_type_e;

  // Per-tensor type configuration, the "type extension" of a MAC instruction.
  typedef struct packed {
    ant_type_e dtype;
    logic      is_signed;
  } ant_cfg_t;

  // Decoded operand: value = base <<< exp.
  typedef struct packed {
    logic signed [BASE_W-1:0] base;
    logic        [EXP_W-1:0]  exp;
  } ant_dec_t;

  // Fixed-point requantization scale: y = round(|x| * mult / 2^shift).
  typedef struct packed {
    logic [15:0] mult;
    logic [4:0]  shift;
  } ant_scale_t;

  // One tile command: C = W x X over k_len reduction steps.
  //   weights : rows wbuf_base .. wbuf_base+k_len-1, lane r = W[r][k]
  //   inputs  : rows ibuf_base .. ibuf_base+k_len-1, lane c = X[k][c]
  //   results : rows obuf_base .. obuf_base+N-1 (16-bit per lane)
  //   preload : start the accumulators from those output rows instead of 0
  //   quant_en: also write the requantized results, one code row per output
  //             row, to the input buffer from qbuf_base (next layer's input)
  typedef struct packed {
    logic [15:0] k_len;
    logic [15:0] ibuf_base;
    logic [15:0] wbuf_base;
    logic [15:0] obuf_base;
    logic [15:0] qbuf_base;
    logic        preload;
    logic        quant_en;
    logic        mode8;
    ant_cfg_t    w_cfg;
    ant_cfg_t    x_cfg;
    ant_cfg_t    q_cfg;
  } ant_cmd_t;

  typedef enum logic [2:0] {
    S_IDLE    = 3'd0,
    S_PRELOAD = 3'd1,
    S_COMPUTE = 3'd2,
    S_DRAIN   = 3'd3,
    S_DONE    = 3'd4
  } ant_state_e;

endpackage
