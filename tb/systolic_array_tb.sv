// systolic_array_tb: the 8x8 array computes C = A * B from skewed streams.
//
// The testbench itself builds the staggered, zero-padded operand streams:
// at cycle t row i receives A[i][t-i] and column j receives B[t-j][j]
// (zero outside 0..K-1). After the last operands have travelled through, it
// compares every accumulator with a reference product computed in the
// testbench. It also checks the latency: C[i][j] is final exactly
// K + i + j edges after the first operands are applied, and not one edge
// earlier for the far corner. Several random tiles, separated by clr, with
// different reduction lengths K.
module systolic_array_tb;
  import gemm_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 8;
  localparam int unsigned KMAX = 64;

  logic clk = 0;
  logic rst_n = 0;
  logic clr = 0;
  act_t a_left [ROWS];
  wgt_t b_top  [COLS];
  acc_t c      [ROWS][COLS];
  int checks = 0;
  int failures = 0;

  act_t    am [ROWS][KMAX];
  wgt_t    bm [KMAX][COLS];
  longint  cref [ROWS][COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  function automatic int wval(input logic [1:0] code);
    return (code == 2'b00) ? 0 : (code[1] ? -1 : 1);
  endfunction

  task automatic run_tile(input int k_len);
    int t;
    int cycles;
    for (int i = 0; i < ROWS; i++) for (int k = 0; k < k_len; k++) am[i][k] = act_t'($urandom);
    for (int k = 0; k < k_len; k++) for (int j = 0; j < COLS; j++) bm[k][j] = wgt_t'($urandom);
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      cref[i][j] = 0;
      for (int k = 0; k < k_len; k++) cref[i][j] += longint'(am[i][k]) * wval(bm[k][j]);
    end
    // Clear, then stream. Cycle t drives the inputs sampled at edge t+1.
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    cycles = k_len + ROWS + COLS - 2;
    for (t = 0; t <= cycles; t++) begin
      for (int i = 0; i < ROWS; i++)
        a_left[i] = (t - i >= 0 && t - i < k_len) ? am[i][t-i] : '0;
      for (int j = 0; j < COLS; j++)
        b_top[j] = (t - j >= 0 && t - j < k_len) ? bm[t-j][j] : '0;
      @(negedge clk);
      // After edge number t+1 engine (i,j) has added the pairs with
      // k <= t - i - j - 1. The far corner is complete after K+ROWS+COLS-2
      // edges: check it is not complete one edge earlier.
      if (t == cycles - 1 && k_len > 0) begin
        longint partial;
        partial = 0;
        for (int k = 0; k < k_len - 1; k++)
          partial += longint'(am[ROWS-1][k]) * wval(bm[k][COLS-1]);
        checks++;
        if (c[ROWS-1][COLS-1] != acc_t'(partial)) begin
          failures++;
          $display("FAIL latency: corner early value %0d exp %0d", c[ROWS-1][COLS-1], partial);
        end
      end
    end
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      checks++;
      if (c[i][j] != acc_t'(cref[i][j])) begin
        failures++;
        if (failures < 10) $display("FAIL K=%0d C[%0d][%0d] got %0d exp %0d", k_len, i, j, c[i][j], cref[i][j]);
      end
    end
  endtask

  initial begin
    foreach (a_left[i]) a_left[i] = '0;
    foreach (b_top[j]) b_top[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_tile(1);
    run_tile(3);
    run_tile(16);
    run_tile(KMAX);
    for (int n = 0; n < 10; n++) run_tile(1 + int'($urandom_range(KMAX - 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
