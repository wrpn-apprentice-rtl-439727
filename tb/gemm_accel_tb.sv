// gemm_accel_tb: end-to-end test of the GEMM tile engine at its default
// 8x8 size.
//
// Each tile draws a random 8xK activation matrix and a Kx8 ternary weight
// matrix, streams them one step per cycle (optionally with random idle
// cycles), waits for done and compares all 64 accumulators with a product
// computed in the testbench. It also checks the drain latency (done exactly
// ROWS+COLS-1 = 15 edges after the edge that accepts the last step) and that
// done is a single-cycle pulse.
//
// Mechanisms exercised and counted (a failure is counted for any that never
// happens): positive, negative and zero weights; idle cycles inside a
// stream; a start while busy (must be ignored); a new tile started in the
// done cycle (back-to-back); the extreme sums of all-255 activations with
// all +1 and all -1 weights.
module gemm_accel_tb;
  import gemm_pkg::*;
  localparam int unsigned ROWS = ARRAY_ROWS;
  localparam int unsigned COLS = ARRAY_COLS;
  localparam int unsigned KMAX = 300;

  logic clk = 0;
  logic rst_n = 0;
  logic start = 0;
  logic in_valid = 0;
  logic in_last = 0;
  act_t a_col [ROWS];
  wgt_t b_row [COLS];
  logic busy;
  logic done;
  acc_t c [ROWS][COLS];

  int checks = 0;
  int failures = 0;
  int n_pos = 0, n_neg = 0, n_zero = 0, n_gap = 0, n_busy_start = 0;
  int n_back_to_back = 0, n_extreme = 0, n_tiles = 0;

  act_t   am [ROWS][KMAX];
  wgt_t   bm [KMAX][COLS];
  longint cref [ROWS][COLS];

  gemm_accel dut (.*);

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

  // mode 0: random, 1: all 255 x +1, 2: all 255 x -1
  task automatic make_tile(input int k_len, input int mode);
    for (int i = 0; i < ROWS; i++) for (int k = 0; k < k_len; k++)
      am[i][k] = (mode == 0) ? act_t'($urandom) : act_t'(255);
    for (int k = 0; k < k_len; k++) for (int j = 0; j < COLS; j++) begin
      case (mode)
        0: begin
          // Mostly legal ternary codes, occasionally the spare code 2'b10.
          int r = int'($urandom_range(99));
          bm[k][j] = (r < 33) ? W_ZERO : (r < 66) ? W_POS : (r < 97) ? W_NEG : wgt_t'(2'b10);
        end
        1: bm[k][j] = W_POS;
        default: bm[k][j] = W_NEG;
      endcase
      if (bm[k][j] == W_ZERO) n_zero++;
      else if (bm[k][j][1]) n_neg++;
      else n_pos++;
    end
    if (mode != 0) n_extreme++;
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      cref[i][j] = 0;
      for (int k = 0; k < k_len; k++) cref[i][j] += longint'(am[i][k]) * wval(bm[k][j]);
    end
  endtask

  // Streams a tile made by make_tile. The start pulse is driven in the
  // cycle this task is entered (the caller has already waited for idle or
  // done). gap_pct: chance of an idle cycle before each step.
  task automatic run_tile(input int k_len, input int gap_pct, input bit poke_busy);
    int lat;
    if (done) n_back_to_back++;
    start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    for (int k = 0; k < k_len; k++) begin
      while (gap_pct > 0 && int'($urandom_range(99)) < gap_pct) begin
        in_valid = 0;
        n_gap++;
        @(negedge clk);
      end
      in_valid = 1;
      in_last  = (k == k_len - 1);
      for (int i = 0; i < ROWS; i++) a_col[i] = am[i][k];
      for (int j = 0; j < COLS; j++) b_row[j] = bm[k][j];
      @(negedge clk);
    end
    in_valid = 0;
    in_last  = 0;
    foreach (a_col[i]) a_col[i] = act_t'($urandom);   // garbage while idle
    foreach (b_row[j]) b_row[j] = wgt_t'($urandom);
    // Drain: count edges after the accepting edge until done is seen.
    lat = 0;
    while (!done) begin
      if (poke_busy && lat == 2) begin
        start = 1;           // must be ignored: the tile is still draining
        n_busy_start++;
      end else begin
        start = 0;
      end
      @(negedge clk);
      lat++;
      if (lat > 100) break;
    end
    start = 0;
    check(lat == int'(ROWS + COLS - 1), "drain latency");
    if (lat != int'(ROWS + COLS - 1)) $display("  latency %0d", lat);
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      checks++;
      if (c[i][j] != acc_t'(cref[i][j])) begin
        failures++;
        if (failures < 10) $display("FAIL K=%0d C[%0d][%0d] got %0d exp %0d", k_len, i, j, c[i][j], cref[i][j]);
      end
    end
    n_tiles++;
  endtask

  initial begin
    foreach (a_col[i]) a_col[i] = '0;
    foreach (b_row[j]) b_row[j] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    check(!busy && !done, "idle after reset");
    @(negedge clk);

    make_tile(1, 0);   run_tile(1, 0, 0);
    @(negedge clk);
    check(!done && !busy, "done is a pulse");
    make_tile(40, 0);  run_tile(40, 30, 1);
    @(negedge clk);
    make_tile(KMAX, 1); run_tile(KMAX, 0, 0);
    // Back-to-back: start in the done cycle.
    make_tile(KMAX, 2); run_tile(KMAX, 10, 0);
    for (int n = 0; n < 8; n++) begin
      int k_len = 1 + int'($urandom_range(KMAX - 1));
      make_tile(k_len, 0);
      run_tile(k_len, (n % 2) * 20, 0);
    end
    check(n_pos > 0, "positive weights seen");
    check(n_neg > 0, "negative weights seen");
    check(n_zero > 0, "zero weights seen");
    check(n_gap > 0, "idle cycles inside a stream seen");
    check(n_busy_start > 0, "start while busy seen");
    check(n_back_to_back > 0, "back-to-back tile seen");
    check(n_extreme == 2, "extreme tiles run");
    $display("mechanisms: tiles=%0d pos=%0d neg=%0d zero=%0d gaps=%0d busy_starts=%0d back_to_back=%0d extreme=%0d",
             n_tiles, n_pos, n_neg, n_zero, n_gap, n_busy_start, n_back_to_back, n_extreme);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
