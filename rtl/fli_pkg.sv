// fli_pkg -- types, number formats and weight-memory layout shared by the
// GRU sequence-to-sequence lifetime-imaging accelerator.
//
// Number formats (all two's complement, 8-bit values as in the 8-bit
// quantisation-aware-trained model):
//   activations, hidden states, gate values, TPSF samples : Q1.7  (ACT_FRAC = 7)
//   weights and biases                                      : Q2.5  (W_FRAC   = 5)
//   accumulator                                             : 24 bit, 12 fraction bits
//   network output y (SDF sample)                           : 16 bit, 8 fraction bits
// The 8-bit width follows the paper's quantised model; the split of integer
// and fraction bits is this design's choice.
//
// Constant-memory layout. Each GRU cell (phase enc/dec, layer l) stores three
// gate blocks in the order z, r, h. A gate block holds H rows; a row is
//   [ b_j , W_j[0 .. IN-1] , U_j[0 .. H-1] ]
// with IN = 1 for layer 0 (scalar TPSF input) and IN = H for deeper layers.
// Encoder cells come first (layer 0 upwards), then decoder cells, then the
// dense output layer [ b_o , W_o[0 .. H-1] ]. The decoder's first layer keeps
// its W column in memory although its input is always zero.
package fli_pkg;

  localparam int DATA_W   = 8;
  localparam int ACT_FRAC = 7;
  localparam int W_FRAC   = 5;
  localparam int ACC_W    = 24;
  localparam int ACC_FRAC = ACT_FRAC + W_FRAC;   // 12
  localparam int Y_W      = 16;
  localparam int Y_FRAC   = 8;
  localparam int ADDR_W   = 16;                  // lane-memory address field
  localparam int CMEM_AW  = 20;                  // constant-memory address
  localparam int TAU_W    = 32;
  localparam int TAU_FRAC = 8;

  typedef logic signed [DATA_W-1:0] q8_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [Y_W-1:0]    y_t;

  // Operation a lane performs in the cycle after the command is issued
  // (when the memory read data it asked for has arrived).
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_CLR   = 3'd1,   // hidden state word <- 0
    OP_BIAS  = 3'd2,   // acc <- bias
    OP_MAC   = 3'd3,   // acc <- acc + w * operand
    OP_FIN_Z = 3'd4,   // z_j  <- sigmoid(acc)
    OP_FIN_R = 3'd5,   // rh_j <- sigmoid(acc) * h_j
    OP_FIN_C = 3'd6,   // h_j  <- (1 - z_j) h_j + z_j tanh(acc)
    OP_FIN_Y = 3'd7    // y    <- acc (dense output), to SDF buffer and lifetime unit
  } lane_op_e;

  typedef enum logic [1:0] {
    SRC_X  = 2'd0,     // TPSF sample of the pixel
    SRC_H  = 2'd1,     // hidden state word (shared memory)
    SRC_RH = 2'd2      // r (.) h word (data memory)
  } src_e;

  // One command, broadcast to every lane in the same cycle.
  typedef struct packed {
    lane_op_e            op;
    src_e                src;
    logic [ADDR_W-1:0]   sh_addr;   // shared-memory word
    logic [ADDR_W-1:0]   dm_addr;   // data-memory word
    logic [ADDR_W-1:0]   pb_addr;   // pixel-buffer word (group * T + gate)
    logic [7:0]          grp;       // pixel group served by the lane
    logic                first;     // first time gate of the sequence
  } lane_cmd_t;

  // ---- constant-memory layout helpers --------------------------------------
  function automatic int in_dim(input int l, input int h);
    return (l == 0) ? 1 : h;
  endfunction

  function automatic int row_len(input int l, input int h);
    return 1 + in_dim(l, h) + h;
  endfunction

  function automatic int cell_words(input int l, input int h);
    return 3 * h * row_len(l, h);
  endfunction

  // Base address of cell (phase: 0 encoder, 1 decoder; layer l).
  function automatic int cell_base(input int phase, input int l, input int h, input int layers);
    int b;
    b = 0;
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < layers; i++)
        if (p < phase || (p == phase && i < l)) b += cell_words(i, h);
    return b;
  endfunction

  function automatic int dense_base(input int h, input int layers);
    return cell_base(1, layers, h, layers);
  endfunction

  function automatic int cmem_depth(input int h, input int layers);
    return dense_base(h, layers) + 1 + h;
  endfunction

endpackage
