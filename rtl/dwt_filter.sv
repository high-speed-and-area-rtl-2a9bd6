// dwt_filter: pipelined 1-D 5/3 lifting filter, two samples per cycle.
//
// Each cycle one sample pair of a line enters: in_even = X(2n), in_odd =
// X(2n+1). The filter computes the integer 5/3 lifting steps
//   H(n) = X(2n+1) - floor((X(2n) + X(2n+2)) / 2)          (predict)
//   L(n) = X(2n)   + floor((H(n-1) + H(n) + 2) / 4)          (update)
// and emits one L(n) and one H(n) per cycle. Lines are framed by in_sol on
// the first pair and in_eol on the last pair. At the line ends the line is
// extended symmetrically: X(2n+2) is replaced by X(2n) on the eol pair, and
// H(n-1) is replaced by H(n) on the sol pair (the usual whole-sample
// symmetric extension of the 5/3 wavelet).
//
// Timing: fixed latency of dwt_pkg::FILTER_LAT = 3 cycles from a pair on
// the inputs to its L/H pair on the outputs; sol/eol/valid travel with it.
// Within a line the pairs must arrive on consecutive cycles, because H(n)
// is formed from the pair held in stage 1 and the even sample of the pair
// that is on the inputs at that moment. Lines may follow each other back to
// back or with gaps.
//
// The two lifting equations and sol/eol framing follow the paper; the
// two-samples-per-cycle organisation, the symmetric extension, the word
// width and the pipeline cut are this design's choices.
module dwt_filter #(
  parameter int unsigned W = 16            // signed sample / coefficient width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_sol,
  input  logic                in_eol,
  input  logic signed [W-1:0] in_even,
  input  logic signed [W-1:0] in_odd,
  output logic                out_valid,
  output logic                out_sol,
  output logic                out_eol,
  output logic signed [W-1:0] out_l,
  output logic signed [W-1:0] out_h
);

  // Stage 1: the pair whose H is being formed.
  logic                s1_valid, s1_sol, s1_eol;
  logic signed [W-1:0] s1_even, s1_odd;
  // Stage 2: H(n) ready, previous H(n-1) kept for the update step.
  logic                s2_valid, s2_sol, s2_eol;
  logic signed [W-1:0] s2_even, s2_h, s2_h_prev;

  logic signed [W-1:0] next_even;
  logic signed [W:0]   pred_sum;
  logic signed [W-1:0] h_comb;
  logic signed [W-1:0] h_left;
  logic signed [W+1:0] upd_sum;
  logic signed [W-1:0] l_comb;

  // Predict: X(2n+2) is the even sample now at the inputs, or the mirror
  // X(2n) at the end of a line.
  always_comb begin
    next_even = s1_eol ? s1_even : in_even;
    pred_sum  = (W+1)'(s1_even) + (W+1)'(next_even);
    h_comb    = W'(s1_odd - W'(pred_sum >>> 1));
  end

  // Update: H(n-1) is mirrored to H(n) at the start of a line.
  always_comb begin
    h_left  = s2_sol ? s2_h : s2_h_prev;
    upd_sum = (W+2)'(h_left) + (W+2)'(s2_h) + (W+2)'(2);
    l_comb  = W'(s2_even + W'(upd_sum >>> 2));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_sol    <= 1'b0;
      s1_eol    <= 1'b0;
      s1_even   <= '0;
      s1_odd    <= '0;
      s2_valid  <= 1'b0;
      s2_sol    <= 1'b0;
      s2_eol    <= 1'b0;
      s2_even   <= '0;
      s2_h      <= '0;
      s2_h_prev <= '0;
      out_valid <= 1'b0;
      out_sol   <= 1'b0;
      out_eol   <= 1'b0;
      out_l     <= '0;
      out_h     <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_sol   <= in_valid & in_sol;
      s1_eol   <= in_valid & in_eol;
      if (in_valid) begin
        s1_even <= in_even;
        s1_odd  <= in_odd;
      end

      s2_valid <= s1_valid;
      s2_sol   <= s1_sol;
      s2_eol   <= s1_eol;
      if (s1_valid) begin
        s2_even   <= s1_even;
        s2_h      <= h_comb;
        s2_h_prev <= s2_h;
      end

      out_valid <= s2_valid;
      out_sol   <= s2_sol;
      out_eol   <= s2_eol;
      if (s2_valid) begin
        out_l <= l_comb;
        out_h <= s2_h;
      end
    end
  end

  // Inside a line the next pair must follow on the very next cycle.
  a_line_contiguous: assert property (@(posedge clk) disable iff (!rst_n)
    (s1_valid && !s1_eol) |-> (in_valid && !in_sol));

endmodule
