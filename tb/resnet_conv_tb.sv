// resnet_conv_tb: runs whole 3x3 convolution layers of a CIFAR-10 ResNet
// through the GEMM tile engine, at its default 8x8 size.
//
// A convolution with C_in input channels, C_out filters, an H x H feature
// map, stride 1 and zero padding 1 becomes the GEMM
//   C[p][f] = sum_k A[p][k] * B[k][f],  k = (c, dy, dx), K = 9 * C_in,
// where row p of A is the 3x3xC_in window around output pixel p (im2col)
// and column f of B is filter f. The testbench cuts this into 8-pixel x
// 8-filter tiles, streams each tile's K steps into the engine, and compares
// every output with a direct convolution computed separately in the
// testbench (not through im2col). Activations are random 8-bit unsigned
// values (post-ReLU) and weights random ternary values.
//
// Layers run: one 3x3 layer of each stage of ResNet-44/56 for CIFAR-10
// (16 filters on 32x32, 32 on 16x16, 64 on 8x8), and the last stage with
// its filters doubled as in the wide reduced-precision variant (128 filters
// on 8x8, K = 1152).
module resnet_conv_tb;
  import gemm_pkg::*;
  localparam int unsigned ROWS = ARRAY_ROWS;
  localparam int unsigned COLS = ARRAY_COLS;
  localparam int MAXH = 32;
  localparam int MAXC = 128;

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
  int tiles = 0;

  // Feature map [channel][y][x] and filters [filter][channel][dy][dx].
  act_t fmap [MAXC][MAXH][MAXH];
  wgt_t filt [MAXC][MAXC][3][3];

  gemm_accel dut (.*);

  always #5 clk = ~clk;

  function automatic int wval(input logic [1:0] code);
    return (code == 2'b00) ? 0 : (code[1] ? -1 : 1);
  endfunction

  function automatic act_t pix(input int ch, input int y, input int x, input int h);
    if (y < 0 || y >= h || x < 0 || x >= h) return '0;
    return fmap[ch][y][x];
  endfunction

  task automatic conv_layer(input int h, input int cin, input int cout);
    int kk = 9 * cin;
    int npix = h * h;
    for (int ch = 0; ch < cin; ch++) for (int y = 0; y < h; y++) for (int x = 0; x < h; x++)
      fmap[ch][y][x] = act_t'($urandom);
    for (int f = 0; f < cout; f++) for (int ch = 0; ch < cin; ch++)
      for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++)
        filt[f][ch][dy][dx] = wgt_t'(($urandom_range(2) == 0) ? 2'b00 : ($urandom_range(1) ? 2'b01 : 2'b11));

    for (int p0 = 0; p0 < npix; p0 += ROWS) begin
      for (int f0 = 0; f0 < cout; f0 += COLS) begin
        start = 1;
        @(negedge clk);
        start = 0;
        for (int k = 0; k < kk; k++) begin
          int ch = k / 9;
          int dy = (k % 9) / 3;
          int dx = k % 3;
          in_valid = 1;
          in_last  = (k == kk - 1);
          for (int i = 0; i < ROWS; i++) begin
            int p = p0 + i;
            a_col[i] = (p < npix) ? pix(ch, p / h + dy - 1, p % h + dx - 1, h) : '0;
          end
          for (int j = 0; j < COLS; j++)
            b_row[j] = (f0 + j < cout) ? filt[f0 + j][ch][dy][dx] : W_ZERO;
          @(negedge clk);
        end
        in_valid = 0;
        in_last  = 0;
        while (!done) @(negedge clk);
        // Direct convolution for the tile's outputs.
        for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
          int p = p0 + i;
          int f = f0 + j;
          if (p < npix && f < cout) begin
            int y = p / h;
            int x = p % h;
            int sum = 0;
            for (int ch = 0; ch < cin; ch++)
              for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
                sum += int'(pix(ch, y + dy, x + dx, h)) * wval(filt[f][ch][dy+1][dx+1]);
            checks++;
            if (c[i][j] != acc_t'(sum)) begin
              failures++;
              if (failures < 10) $display("FAIL layer h=%0d pixel %0d filter %0d got %0d exp %0d", h, p, f, c[i][j], sum);
            end
          end
        end
        tiles++;
      end
    end
  endtask

  initial begin
    foreach (a_col[i]) a_col[i] = '0;
    foreach (b_row[j]) b_row[j] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    conv_layer(32, 16, 16);    // ResNet-44/56 CIFAR-10, stage 1
    conv_layer(16, 32, 32);    // stage 2
    conv_layer(8, 64, 64);     // stage 3
    conv_layer(8, 128, 128);   // stage 3 with doubled filters (64 -> 128)
    $display("tiles=%0d", tiles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
