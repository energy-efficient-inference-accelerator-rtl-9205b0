// mann_pkg -- types and constants shared by the memory-network accelerator.
//
// Number format: every activation and weight is a signed fixed-point word of
// DATA_W bits with FRAC fractional bits (Q8.8 by default).  Products are kept
// at full width, summed in ACC_W bits and brought back to Q8.8 with an
// arithmetic shift and saturation (sat_q).  The exponential unit produces an
// unsigned Q16.16 value (EXP_W bits) so that the softmax sum keeps precision.
//
// Host stream: the host and the accelerator exchange 32-bit words.  Bit 31
// marks a control word (opcode in [30:24], argument in [15:0]); otherwise
// the word is data with its payload in [15:0].  Control words embedded in the
// data stream are how the host steers the accelerator; the word format and
// the opcode set are this design's own choice, the paper only says control
// signals are embedded in the data.
//
// Default sizes (embedding 20, 50 memory slots, 177-word vocabulary, 3 hops)
// are the usual end-to-end memory network settings for the bAbI tasks; the
// paper does not print them.
package mann_pkg;

  localparam int unsigned DATA_W = 16;   // Q8.8 activations and weights
  localparam int unsigned FRAC   = 8;
  localparam int unsigned ACC_W  = 40;   // dot-product accumulator width
  localparam int unsigned EXP_W  = 32;   // exp output, unsigned Q16.16
  localparam int unsigned EXP_FRAC = 16;

  localparam int unsigned DEF_EMB   = 20;    // |E|
  localparam int unsigned DEF_SLOTS = 50;    // L
  localparam int unsigned DEF_VOCAB = 177;  // |I|, also the input vocabulary
  localparam int unsigned DEF_HOPS  = 3;

  localparam int unsigned WORD_W = 32;      // host stream word
  localparam int unsigned ROW_W  = 16;      // row field of a weight write
  localparam int unsigned COL_W  = 8;       // column field of a weight write

  typedef logic [WORD_W-1:0] word_t;

  // Opcodes of control words
  typedef enum logic [6:0] {
    OP_NOP         = 7'h00,
    OP_LOAD_EMB_A  = 7'h01,  // VOCAB x EMB_DIM words, row = word index
    OP_LOAD_EMB_C  = 7'h02,
    OP_LOAD_EMB_Q  = 7'h03,
    OP_LOAD_WR     = 7'h04,  // EMB_DIM x EMB_DIM words, row-major
    OP_LOAD_WO     = 7'h05,  // VOCAB x EMB_DIM words, row = label
    OP_LOAD_THETA  = 7'h06,  // VOCAB words, theta_i in Q8.8
    OP_LOAD_ORDER  = 7'h07,  // VOCAB words, index order A
    OP_NEW_STORY   = 7'h10,  // forget all memory slots
    OP_SENTENCE    = 7'h11,  // arg = number of word indices that follow
    OP_QUESTION    = 7'h12,  // arg = number of word indices that follow
    OP_INFER       = 7'h13   // arg[0] = enable inference thresholding
  } opcode_e;

  // Targets of the weight-load bus
  typedef enum logic [2:0] {
    T_NONE  = 3'd0,
    T_EMB_A = 3'd1,
    T_EMB_C = 3'd2,
    T_EMB_Q = 3'd3,
    T_WR    = 3'd4,
    T_WO    = 3'd5,
    T_THETA = 3'd6,
    T_ORDER = 3'd7
  } wtarget_e;

  // One element write of a trained-model table, broadcast to all modules.
  typedef struct packed {
    logic                     valid;
    wtarget_e                 target;
    logic [ROW_W-1:0]         row;
    logic [COL_W-1:0]         col;
    logic signed [DATA_W-1:0] data;
  } wload_t;

  function automatic word_t ctrl_word(opcode_e op, logic [15:0] arg);
    return {1'b1, op, 8'h00, arg};
  endfunction

  function automatic word_t data_word(logic [15:0] v);
    return {16'h0000, v};
  endfunction

  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((64'sd1 <<< (DATA_W-1)) - 64'sd1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(64'sd1 <<< (DATA_W-1));

  // Saturate an ACC_W value (no shift) to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat_w(input logic signed [ACC_W-1:0] v);
    if (v > QMAX)      return QMAX[DATA_W-1:0];
    else if (v < QMIN) return QMIN[DATA_W-1:0];
    else               return v[DATA_W-1:0];
  endfunction

  // Arithmetic shift right by FRAC, then saturate to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat_q(input logic signed [ACC_W-1:0] acc);
    return sat_w(acc >>> FRAC);
  endfunction

endpackage
