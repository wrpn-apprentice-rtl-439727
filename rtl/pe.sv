// pe: one processing engine (systolic cross-point) of the GEMM array.
//
// Each engine holds an activation register A, a weight register B and a
// 32-bit signed accumulator C. Every cycle it latches the activation coming
// from its left neighbour and the weight coming from above, and passes the
// latched values on to the right and down. The comparator (ternary_cmp)
// turns the latched pair into a 9-bit signed-magnitude term, which is added
// to or subtracted from C on the next edge: C stays in place
// (output-stationary), so after a full pass C = sum_k A[i][k]*B[k][j].
//
// Timing: a_in/b_in sampled at edge t appear on a_out/b_out after edge t and
// their product is in c after edge t+1. Zero operands add nothing, which is
// how the array's zero padding works.
//
// Follows the paper: the register / comparator / adder / accumulator
// structure and its 2b, 8b, 9b and 32b widths. This design's choices: the
// asynchronous active-low reset, the synchronous clr that empties the
// engine before a new tile, and two's-complement wrap on overflow.
module pe
  import gemm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  act_t a_in,
  input  wgt_t b_in,
  output act_t a_out,
  output wgt_t b_out,
  output acc_t c
);

  act_t  a_q;
  wgt_t  b_q;
  acc_t  acc_q;
  term_t term;
  acc_t  addend;

  ternary_cmp u_cmp (.a(a_q), .b(b_q), .p(term));

  // Adder input: the magnitude zero-extended to 32 bits, negated for a
  // negative weight.
  always_comb begin
    addend = acc_t'({{(ACC_W-A_W){1'b0}}, term.mag});
    if (term.neg) addend = -addend;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      acc_q <= '0;
    end else if (clr) begin
      a_q   <= '0;
      b_q   <= '0;
      acc_q <= '0;
    end else begin
      a_q   <= a_in;
      b_q   <= b_in;
      acc_q <= acc_q + addend;
    end
  end

  assign a_out = a_q;
  assign b_out = b_q;
  assign c     = acc_q;

endmodule
