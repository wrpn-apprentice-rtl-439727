// gemm_accel: low-precision GEMM tile engine (8-bit activations x ternary weights).
//
// Computes one ROWS x COLS tile C = A * B, where A is ROWS x K of 8-bit
// unsigned activations and B is K x COLS of 2-bit ternary weights, with
// 32-bit signed accumulation. K is open-ended: the caller streams column k
// of A (a_col) and row k of B (b_row) together, one step per cycle with
// in_valid, and marks the final step with in_last. Two skew_delay blocks
// stagger the lanes so that A[i][k] and B[k][j] meet in engine (i,j) of the
// systolic_array. Cycles without in_valid put zeros into the array, which
// add nothing, so the stream may pause at any time without flow control.
//
// Sequence: start (accepted when not busy) clears the skew registers and all
// accumulators in that cycle; from the next cycle steps are accepted. After
// the in_last step the array drains for ROWS+COLS-1 cycles, then done pulses
// for one cycle and c holds the finished tile until the next start.
// Latency from the edge that accepts the last step to the cycle done is
// high: ROWS+COLS-1 edges (15 at 8x8).
//
// The array, the engine and the widths are the paper's. The start / last /
// done control, the zero-fill on idle cycles and the parallel C read-out are
// this design's own choices: the paper does not describe control, memories
// or how operands arrive.
module gemm_accel
  import gemm_pkg::*;
#(
  parameter int unsigned ROWS = gemm_pkg::ARRAY_ROWS,
  parameter int unsigned COLS = gemm_pkg::ARRAY_COLS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic in_valid,
  input  logic in_last,
  input  act_t a_col [ROWS],
  input  wgt_t b_row [COLS],
  output logic busy,
  output logic done,
  output acc_t c     [ROWS][COLS]
);

  localparam int unsigned DRAIN = ROWS + COLS - 1;
  localparam int unsigned CNT_W = $clog2(DRAIN + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;

  state_e           state_q;
  logic [CNT_W-1:0] cnt_q;
  logic             accept;
  logic             clr;

  act_t a_in   [ROWS];
  wgt_t b_in   [COLS];
  act_t a_skew [ROWS];
  wgt_t b_skew [COLS];

  assign busy   = (state_q == S_RUN) || (state_q == S_DRAIN);
  assign done   = (state_q == S_DONE);
  assign clr    = start && !busy;
  assign accept = in_valid && (state_q == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE, S_DONE: begin
          state_q <= start ? S_RUN : S_IDLE;
        end
        S_RUN: begin
          if (accept && in_last) begin
            state_q <= S_DRAIN;
            cnt_q   <= CNT_W'(DRAIN);
          end
        end
        S_DRAIN: begin
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == CNT_W'(1)) state_q <= S_DONE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Idle cycles feed zeros.
  always_comb begin
    for (int i = 0; i < ROWS; i++) a_in[i] = accept ? a_col[i] : '0;
    for (int j = 0; j < COLS; j++) b_in[j] = accept ? b_row[j] : '0;
  end

  skew_delay #(.LANES(ROWS), .W(A_W)) u_skew_a (
    .clk(clk), .rst_n(rst_n), .clr(clr), .din(a_in), .dout(a_skew)
  );

  skew_delay #(.LANES(COLS), .W(B_W)) u_skew_b (
    .clk(clk), .rst_n(rst_n), .clr(clr), .din(b_in), .dout(b_skew)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk(clk), .rst_n(rst_n), .clr(clr),
    .a_left(a_skew), .b_top(b_skew), .c(c)
  );

  // Steps are only meaningful while a tile is running.
  a_step_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (state_q == S_RUN))
    else $error("gemm_accel: in_valid outside a running tile");

endmodule
