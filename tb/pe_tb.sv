// pe_tb: self-checking testbench for one processing engine.
//
// Drives random activation / ternary-weight pairs and keeps a reference sum
// in the testbench. Checks each cycle that the operands come out one cycle
// later on a_out / b_out, and that c equals the reference sum of all pairs
// sampled up to two edges before (one edge into the operand registers, one
// into the accumulator). Also checks synchronous clear, and the
// two's-complement wrap of the 32-bit accumulator by running a long stream
// of +255 terms past 2^31.
module pe_tb;
  import gemm_pkg::*;

  logic clk = 0;
  logic rst_n = 0;
  logic clr = 0;
  act_t a_in;
  wgt_t b_in;
  act_t a_out;
  wgt_t b_out;
  acc_t c;
  int   checks = 0;
  int   failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  function automatic int wval(input logic [1:0] code);
    return (code == 2'b00) ? 0 : (code[1] ? -1 : 1);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  longint ref_sum;      // reference, updated with the product registered one edge earlier
  act_t   a_prev;
  wgt_t   b_prev;
  logic   wrapped;

  initial begin
    a_in = '0; b_in = '0;
    ref_sum = 0; a_prev = '0; b_prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(c == 0, "reset value");

    // Random stream.
    for (int n = 0; n < 2000; n++) begin
      a_in = act_t'($urandom);
      b_in = wgt_t'($urandom);
      @(posedge clk);
      // At this edge the accumulator added the pair registered last edge.
      ref_sum = ref_sum + longint'(a_prev) * wval(b_prev);
      a_prev  = a_in;
      b_prev  = b_in;
      @(negedge clk);
      // Change the inputs: the outputs must still show the registered pair.
      a_in = ~a_prev;
      b_in = ~b_prev;
      #1;
      check(a_out == a_prev && b_out == b_prev, "operand pass-through");
      check(c == acc_t'(ref_sum), "accumulate");
    end

    // Synchronous clear.
    clr = 1;
    @(posedge clk);
    @(negedge clk);
    clr = 0;
    check(c == 0 && a_out == 0 && b_out == 0, "clear");

    // Wrap past 2^31 - 1 with a constant +255 stream.
    a_in = 8'd255; b_in = W_POS;
    wrapped = 0;
    for (int n = 0; n < 8421506; n++) begin
      @(posedge clk);
    end
    @(negedge clk);
    // 8421506 edges: the first only loads the registers, so 8421505 terms.
    check(c == acc_t'(longint'(8421505) * 255), "wrap value");
    check(c < 0, "wrap sign");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
