// dbe_sum: adds the two partial phased sums that reach the digital back end.
//
// Each Beamform board sends the average of its four antennas over its link.
// The back end adds the two streams lane by lane and halves the result, so
// that the 8-antenna phased sum keeps the 8-bit sample format expected by the
// back end's channelizer (polyphase filter bank, 32-point FFT, per-bin gain,
// VSI output), which is outside this design.
//
// Following the paper: the back end is modified to receive the two partial
// sums and add them. The halving (arithmetic shift, truncating) is this
// design's choice. Both inputs must be word-aligned.
//
// Timing: one register.
module dbe_sum
  import pa_pkg::*;
(
  input  logic  clk,
  input  word_t a,
  input  word_t b,
  output word_t dout
);

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      dout[l] <= sample_t'((SAMPLE_W+1)'(a[l]) + (SAMPLE_W+1)'(b[l]) >>> 1);
  end

endmodule
