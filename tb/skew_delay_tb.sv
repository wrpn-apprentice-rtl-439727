// skew_delay_tb: checks that lane i of the skew buffer is delayed by
// exactly i cycles, that clear flushes every stage to zero, and that reset
// leaves zeros. Random data are pushed every cycle and a history of inputs
// kept in the testbench gives the expected output of each lane.
module skew_delay_tb;
  localparam int unsigned LANES = 8;
  localparam int unsigned W = 8;

  logic         clk = 0;
  logic         rst_n = 0;
  logic         clr = 0;
  logic [W-1:0] din  [LANES];
  logic [W-1:0] dout [LANES];
  int checks = 0;
  int failures = 0;

  // hist[d][i]: value driven on lane i, d cycles ago (0 = now).
  logic [W-1:0] hist [LANES][LANES];

  skew_delay #(.LANES(LANES), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    foreach (din[i]) din[i] = '0;
    foreach (hist[d, i]) hist[d][i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (dout[i] != 0) failures++;
    end
    for (int n = 0; n < 500; n++) begin
      // Mid-run clear.
      clr = (n == 250);
      for (int i = 0; i < LANES; i++) din[i] = W'($urandom);
      // Shift the history (entry 0 is the current input).
      for (int d = LANES - 1; d > 0; d--) hist[d] = hist[d-1];
      for (int i = 0; i < LANES; i++) hist[0][i] = din[i];
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (dout[i] != hist[i][i]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d n=%0d got %h exp %h", i, n, dout[i], hist[i][i]);
        end
      end
      @(posedge clk);
      if (clr) begin
        for (int d = 0; d < LANES; d++) for (int i = 0; i < LANES; i++) hist[d][i] = '0;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
