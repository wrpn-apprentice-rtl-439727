// skew_delay: staggers a vector of operand lanes for the systolic array.
//
// Lane i is delayed by i clock cycles through a chain of i registers
// (lane 0 passes straight through). Fed with one column of A (or one row of
// B) per cycle, and zeros when idle, it produces the diagonal wavefront with
// leading zeros that the array needs: row i of A and column j of B start i
// and j cycles late. The staggered, zero-padded streams are the paper's;
// the register-chain circuit that makes them is this design's choice.
//
// Interface: din[i] -> dout[i] after i edges. clr flushes every register to
// zero in one cycle. W is the lane width (8 for activations, 2 for weights).
module skew_delay #(
  parameter int unsigned LANES = 8,
  parameter int unsigned W     = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic [W-1:0] din  [LANES],
  output logic [W-1:0] dout [LANES]
);

  assign dout[0] = din[0];

  for (genvar i = 1; i < LANES; i++) begin : g_lane
    logic [W-1:0] stage [i];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < i; s++) stage[s] <= '0;
      end else if (clr) begin
        for (int s = 0; s < i; s++) stage[s] <= '0;
      end else begin
        stage[0] <= din[i];
        for (int s = 1; s < i; s++) stage[s] <= stage[s-1];
      end
    end
    assign dout[i] = stage[i-1];
  end

endmodule
