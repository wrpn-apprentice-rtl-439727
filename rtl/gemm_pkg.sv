// gemm_pkg: widths and types shared by the ternary-weight GEMM accelerator.
//
// The accelerator multiplies 8-bit unsigned activations (matrix A) by 2-bit
// ternary weights (matrix B, values -1, 0, +1) and accumulates into 32-bit
// signed integers. These widths, the 9-bit product term and the 8x8 array
// size are the paper's numbers; the bit encoding of the weight and the
// signed-magnitude layout of the product term are this design's choices.
package gemm_pkg;

  localparam int unsigned A_W   = 8;   // activation width (unsigned, post-ReLU)
  localparam int unsigned B_W   = 2;   // weight width (ternary)
  localparam int unsigned P_W   = A_W + 1; // product term: sign bit + magnitude
  localparam int unsigned ACC_W = 32;  // accumulator width (signed)
  localparam int unsigned ARRAY_ROWS = 8; // PE rows
  localparam int unsigned ARRAY_COLS = 8; // PE columns

  typedef logic [A_W-1:0]          act_t;
  typedef logic [B_W-1:0]          wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Ternary weight codes (two's complement). 2'b10 is not produced by
  // quantisation; hardware treats it as -1 (sign set, not zero).
  localparam wgt_t W_ZERO = 2'b00;
  localparam wgt_t W_POS  = 2'b01;
  localparam wgt_t W_NEG  = 2'b11;

  // Product term leaving the comparator: the weight's sign appended to the
  // activation magnitude.
  typedef struct packed {
    logic          neg;
    logic [A_W-1:0] mag;
  } term_t;

endpackage
