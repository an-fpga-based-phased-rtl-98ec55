// fir_tap: one tap (stage) of the demux-by-4 pipelined FIR filter.
//
// Each stage holds four multipliers by its coefficient and four adders, one
// per lane. The partial sums arriving from the previous stage are first
// reordered, rotated by one lane (lane L takes lane L-1, lane 0 takes lane 3),
// because the sample a partial sum needs next is one position newer. The
// samples handed on to the next stage are pipeline-adjusted: every lane gets a
// register except lane STAGE mod 4, whose sample is passed on unregistered, so
// that the partial sum that wrapped from lane 3 to lane 0 meets the next word.
//
//   p_out[L] <= rot(p_in)[L] + c * s_in[L]        (registered)
//   s_out[L]  = (L == STAGE mod 4) ? s_in[L] : s_in[L] delayed one clock
//
// Following the paper: 4 multiplies and 4 partial sums per tap, the Reorder
// and Pipeline Adjust boxes of its tap figure and the diagonal flow of its
// 5-tap pipeline figure. Which lane is passed unregistered and the one-lane
// rotation are this design's working-out of that flow. Partial sums are
// carried at full precision (PSUM_W bits).
module fir_tap
  import pa_pkg::*;
#(
  parameter int unsigned STAGE  = 0,
  parameter int unsigned PSUM_W = SAMPLE_W + COEF_W + 4
) (
  input  logic                              clk,
  input  coef_t                             c,
  input  word_t                             s_in,
  input  logic signed [LANES-1:0][PSUM_W-1:0] p_in,
  output word_t                             s_out,
  output logic signed [LANES-1:0][PSUM_W-1:0] p_out
);

  localparam int unsigned PASS_LANE = STAGE % LANES;

  word_t s_reg;

  always_ff @(posedge clk) begin
    s_reg <= s_in;
    for (int l = 0; l < LANES; l++)
      p_out[l] <= p_in[(l + LANES - 1) % LANES] + PSUM_W'(c * s_in[l]);
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      s_out[l] = (l == int'(PASS_LANE)) ? s_in[l] : s_reg[l];
  end

endmodule
