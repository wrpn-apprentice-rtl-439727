// ternary_cmp_tb: exhaustive check of the ternary product term.
//
// Applies all 256 activations against all four weight codes and compares
// the 9-bit term, read back as a signed integer (neg ? -mag : mag), with
// the integer product a * w, where w is the weight decoded independently
// from its two's-complement code (2'b10 decoded as -1, as the design
// specifies). Also checks that a zero weight yields an all-zero term.
module ternary_cmp_tb;
  import gemm_pkg::*;

  act_t  a;
  wgt_t  b;
  term_t p;
  int    checks = 0;
  int    failures = 0;

  ternary_cmp dut (.a(a), .b(b), .p(p));

  function automatic int weight_value(input logic [1:0] code);
    case (code)
      2'b00:   return 0;
      2'b01:   return 1;
      default: return -1;
    endcase
  endfunction

  initial begin
    int expect_v;
    int got_v;
    for (int wi = 0; wi < 4; wi++) begin
      for (int ai = 0; ai < 256; ai++) begin
        a = act_t'(ai);
        b = wgt_t'(wi);
        #1;
        expect_v = ai * weight_value(2'(wi));
        got_v    = p.neg ? -int'(p.mag) : int'(p.mag);
        checks++;
        if (got_v !== expect_v) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%b got %0d expect %0d", ai, b, got_v, expect_v);
        end
        if (wi == 0) begin
          checks++;
          if (p !== '0) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
