// systolic_array: ROWS x COLS grid of processing engines (8 x 8 by default).
//
// Activations enter at the left end of each row and move one engine to the
// right per cycle; weights enter at the top of each column and move one
// engine down per cycle. Each engine keeps its own accumulator, so engine
// (i,j) builds C[i][j] (output-stationary). For the products to meet, the
// caller must present row i and column j staggered by i and j cycles with
// zeros in the gaps (see skew_delay).
//
// Interface: a_left[i] feeds row i, b_top[j] feeds column j, c[i][j] is the
// accumulator of engine (i,j), read out in parallel. clr empties all
// engines in one cycle. Timing: an operand pair that enters at edge t
// through row i and column j reaches engine (i,j) at edge t+i+j (counted
// in the engine's input registers) and is in c[i][j] one edge later.
//
// The 8x8 size and the dataflow of A to the right and B downward follow the
// paper. The parallel read-out of all accumulators is this design's choice:
// the paper does not say how C leaves the array.
module systolic_array
  import gemm_pkg::*;
#(
  parameter int unsigned ROWS = gemm_pkg::ARRAY_ROWS,
  parameter int unsigned COLS = gemm_pkg::ARRAY_COLS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  act_t a_left [ROWS],
  input  wgt_t b_top  [COLS],
  output acc_t c      [ROWS][COLS]
);

  // a_h[i][j] is the activation entering engine (i,j) from the left;
  // b_v[i][j] is the weight entering engine (i,j) from above.
  act_t a_h [ROWS][COLS+1];
  wgt_t b_v [ROWS+1][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_left
    assign a_h[i][0] = a_left[i];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_top
    assign b_v[0][j] = b_top[j];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      pe u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .a_in  (a_h[i][j]),
        .b_in  (b_v[i][j]),
        .a_out (a_h[i][j+1]),
        .b_out (b_v[i+1][j]),
        .c     (c[i][j])
      );
    end
  end

endmodule
