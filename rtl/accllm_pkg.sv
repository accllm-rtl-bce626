// accllm_pkg: types and constants shared by the accelerator.
//
// The accelerator computes the linear layers and the attention of a compressed
// (2:4-pruned, W2A8KV4-quantised) decoder-only language model. Its compute array,
// the RCE, has T tiles of M PE blocks of R multipliers; the defaults below are the
// (R x M) x T = (32 x 16) x 16 configuration evaluated on the Alveo U280.
// The command format, widths and opcodes here are this design's own choices.
package accllm_pkg;

  // Default array size (R multipliers per block, M blocks per tile, T tiles)
  localparam int unsigned R_DEF   = 32;
  localparam int unsigned M_DEF   = 16;
  localparam int unsigned T_DEF   = 16;

  // Operand and accumulator widths
  localparam int unsigned XW      = 8;   // activation / Q / S width
  localparam int unsigned WW      = 8;   // weight container (8b LoRA, 4b K/V, 2b weights)
  localparam int unsigned PW      = 16;  // product width
  localparam int unsigned ACC_W   = 32;  // block accumulator width

  // Lambda-shaped attention: attention-sink tokens plus a rolling window
  localparam int unsigned KV_SINK = 4;
  localparam int unsigned KV_WIN  = 2044;

  // RCE operating mode
  typedef enum logic {
    MODE_MM = 1'b0,   // matrix-matrix (prefill): tiles = tokens, blocks = out channels
    MODE_VM = 1'b1    // vector-matrix (decode): all T*M blocks = out channels
  } mode_e;

  // Multiplier precision (activation x weight)
  typedef enum logic [1:0] {
    P8X8 = 2'd0,      // 8b activation x 8b LoRA weight
    P8X4 = 2'd1,      // 8b Q/S x 4b K/V
    P8X2 = 2'd2       // 8b activation x 2b pruned weight
  } prec_e;

  // Controller operations
  typedef enum logic [2:0] {
    OP_LINEAR = 3'd0, // stream input/weight words through the RCE, drain accumulators
    OP_EXP    = 3'd1, // NPE: exp of output-buffer scores into the input buffer, sum
    OP_DIV    = 3'd2, // NPE: divide output-buffer words by the exp sum, in place
    OP_SILU   = 3'd3, // NPE: SiLU of output-buffer words, in place
    OP_NORM   = 3'd4  // NPE: divide output-buffer words by their root mean square, in place
  } op_e;

  // What the drain of an OP_LINEAR does with the accumulators
  typedef enum logic [1:0] {
    DR_STORE   = 2'd0, // overwrite output buffer
    DR_ACCUM   = 2'd1, // add into output buffer (attention stage 5)
    DR_REQUANT = 2'd2  // shift, saturate to uint8, write input buffer bank 0 (layer fusion)
  } drain_e;

  typedef struct packed {
    op_e           op;
    mode_e         mode;
    prec_e         prec;
    logic          sparse;     // 2:4 sparse selector on
    drain_e        drain;
    logic [15:0]   n_chunks;   // input chunks per output group (OP_LINEAR)
    logic [15:0]   n_groups;   // output groups (OP_LINEAR) / words (OP_EXP, OP_DIV, OP_SILU, OP_NORM)
    logic [15:0]   ib_base;    // input buffer word base
    logic [15:0]   wb_base;    // weight buffer word base
    logic [15:0]   ob_base;    // output buffer word base
    logic [15:0]   ob_stride;  // MM: output word stride between tokens
    logic [15:0]   el_base;    // element index written by REQUANT / EXP into the input buffer
    logic [15:0]   key_base;   // EXP: key index of the first score (Lambda-attention mask)
    logic [4:0]    shift;      // REQUANT shift / EXP 1/sqrt(dk) shift / NORM log2(elements)
    logic signed [15:0] bias;  // EXP reference level (quarter-octave units)
    logic          sum_clr;    // EXP: clear the exp sum first
  } cmd_t;

  // Saturate a signed accumulator value to an unsigned 8-bit activation.
  // Activations enter the multipliers zero-extended (unsigned), weights signed.
  function automatic logic [7:0] satu8(input logic signed [ACC_W-1:0] v);
    if (v > 255)    return 8'd255;
    else if (v < 0) return 8'd0;
    else            return v[7:0];
  endfunction

endpackage
