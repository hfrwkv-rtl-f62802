// hfrwkv_pkg: number formats, operand types and the command format shared by
// the accelerator's blocks.
//
// Activations are 9-bit two's-complement fixed point with ACT_FRAC fractional
// bits (the 9-bit width is the paper's; the binary point is this design's
// choice). Matrix and element-wise multiplier weights use the 9-bit Delta-PoT
// code decoded by dpot_mult. Division, exponential and sigmoid run at 16 bits
// with CU_FRAC fractional bits (Q8.8), the width the paper gives for its
// complex units. The command format (cmd_t) and its opcodes are this design's
// own: the paper names a controller but does not describe its interface.
package hfrwkv_pkg;

  localparam int unsigned ACT_W    = 9;   // activation width (paper)
  localparam int unsigned ACT_FRAC = 4;   // activation fractional bits (chosen)
  localparam int unsigned WGT_W    = 9;   // Delta-PoT weight width (paper)
  localparam int unsigned ACC_W    = 16;  // PMAC accumulator width (paper)
  localparam int unsigned CU_W     = 16;  // complex-unit internal width (paper)
  localparam int unsigned CU_FRAC  = 8;   // complex-unit fractional bits (chosen)
  localparam int unsigned ADDR_W   = 32;  // external word address width (chosen)

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic        [WGT_W-1:0] wgt_t;

  localparam act_t ACT_MAX = act_t'(2**(ACT_W-1) - 1);
  localparam act_t ACT_MIN = act_t'(-(2**(ACT_W-1) - 1));  // symmetric range

  // Modes of the matrix-vector processing array
  typedef enum logic [1:0] {
    MODE_MV  = 2'd0,  // accumulators on: matrix-vector product
    MODE_EW  = 2'd1,  // accumulators off: element-wise Delta-PoT product
    MODE_ADD = 2'd2   // addition array: element-wise sum
  } mv_mode_e;

  // Operations of the complex computing units
  typedef enum logic [1:0] {
    CU_EXP = 2'd0,
    CU_SIG = 2'd1,
    CU_DIV = 2'd2
  } cu_op_e;

  // Controller opcodes
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_LOADW   = 4'd1,   // external memory -> weight buffer bank (non-blocking)
    OP_LOADV   = 4'd2,   // external memory -> vector BRAM rows
    OP_MV      = 4'd3,   // act[dst..] = W(bank) x act[src_a..]
    OP_EW      = 4'd4,   // act[dst+r] = act[src_a+r] (*) bram[src_b+r]  (Delta-PoT)
    OP_ADD     = 4'd5,   // act[dst+r] = act[src_a+r] + (b_act ? act : bram)[src_b+r]
    OP_EXP     = 4'd6,   // act[dst+r] = exp(act[src_a+r])
    OP_SIG     = 4'd7,   // act[dst+r] = sigmoid(act[src_a+r])
    OP_DIV     = 4'd8,   // act[dst+r] = act[src_a+r] / act[src_b+r]
    OP_LN      = 4'd9,   // act[dst..] = LayerNorm(act[src_a..])
    OP_SAVE    = 4'd10,  // bram[dst+r] = act[src_a+r]
    OP_RESTORE = 4'd11   // act[dst+r] = bram[src_a+r]
  } op_e;

  typedef struct packed {
    op_e         op;
    logic        bank;     // weight-buffer bank (LOADW, MV)
    logic        b_act;    // ADD: second operand from the activation buffer
    logic [15:0] len;      // rows to process; LOADW/LOADV: words to move
    logic [15:0] len_out;  // MV: output rows (chunks of LANES results)
    logic [15:0] src_a;
    logic [15:0] src_b;
    logic [15:0] dst;
    logic [ADDR_W-1:0] ext_addr;
  } cmd_t;

  // Saturate a wide signed value to the symmetric activation range
  function automatic act_t sat_act(input logic signed [31:0] v);
    if (v > 32'sd255)       return ACT_MAX;
    else if (v < -32'sd255) return ACT_MIN;
    else                    return act_t'(v);
  endfunction

endpackage
