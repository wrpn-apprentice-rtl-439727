// ternary_cmp: the multiplier-free product of a processing engine.
//
// With weights restricted to {-1, 0, +1} no multiplier is needed. The block
// looks at the 2-bit weight: if it is zero the product is zero; otherwise
// the weight's sign bit is appended to the 8-bit unsigned activation, giving
// a 9-bit signed-magnitude term {neg, mag}. The downstream adder then adds
// or subtracts mag. This follows the paper ("compare the sign of B and append
// this to A or make it zero", 2b and 8b in, 9b out). The two's-complement
// weight code and the choice that a zero term carries neg=0 are this
// design's own.
//
// Interface: a (8b unsigned), b (2b weight), p (term_t, 9b). Purely
// combinational, no clock.
module ternary_cmp
  import gemm_pkg::*;
(
  input  act_t  a,
  input  wgt_t  b,
  output term_t p
);

  always_comb begin
    if (b == W_ZERO) begin
      p = '0;
    end else begin
      p.neg = b[B_W-1];
      p.mag = a;
    end
  end

endmodule
