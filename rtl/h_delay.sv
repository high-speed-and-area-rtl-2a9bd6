// h_delay: delay line for the high-pass coefficient stream.
//
// The filter emits L(n) and H(n) of a line on the same cycle, and both
// would be written to the same memory bank. Holding H back by exactly one
// line of outputs (len = half the line length: 32 cycles for a 64-pixel
// line, as in the paper; 16 cycles at the second level) makes every H write
// coincide with an L write of the next line, which always lands in the
// other bank.
//
// Implementation: a DEPTH-stage shift register that shifts every cycle; the
// output is tapped at stage len-1, so out(t + len) = in(t) for 1 <= len <=
// DEPTH. len may change between phases; the first len outputs after a
// change are stale and the controller does not write them.
module h_delay #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 32        // largest delay, N/2
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH+1)-1:0] len,  // delay in cycles, 1..DEPTH
  input  logic signed [W-1:0]      din,
  output logic signed [W-1:0]      dout
);

  logic signed [W-1:0] sr [DEPTH];

  always_ff @(posedge clk) begin
    sr[0] <= din;
    for (int unsigned i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
  end

  always_comb begin
    dout = sr[0];
    for (int unsigned i = 0; i < DEPTH; i++)
      if (len == ($clog2(DEPTH+1))'(i + 1)) dout = sr[i];
  end

endmodule
