// fir_demux4: TAPS-tap FIR filter on a demux-by-4 stream (4 samples/clock).
//
// Computes, for every sample n,  y[n] = sum_{k=1..TAPS} C_k * x[n-k+1],
// i.e. C_1 weighs the newest sample, as in the paper's worked example
// o_1 = s_1 C_5 + s_2 C_4 + s_3 C_3 + s_4 C_2 + s_5 C_1. The filter is a chain of
// fir_tap stages; stage i applies coefficient C_{TAPS-i}, so a partial sum
// starts with its oldest sample and ends with C_1 times the newest. Partial
// sums move one lane per stage and wrap from lane 3 to lane 0, which lands
// some output lanes one clock early; those lanes (lane < (TAPS-1) mod 4) get
// one more register so that each output word holds four consecutive outputs.
//
// Following the paper: 10 taps, four multiplies and four adds per tap,
// reordered partial sums and pipeline-adjusted samples. Widths are this
// design's choice: full-precision outputs of SAMPLE_W+COEF_W+4 bits.
//
// Timing: output word in cycle t holds y for input word t - LATENCY, where
// LATENCY = TAPS - floor((TAPS-1)/4) (8 for 10 taps). coefs[k-1] is C_k and
// may change in any cycle; the change takes effect per stage. LATENCY is
// exported for users of the block and is not needed inside it.
module fir_demux4
  import pa_pkg::*;
#(
  parameter int unsigned TAPS   = FIR_TAPS,
  localparam int unsigned PSUM_W = SAMPLE_W + COEF_W + 4,
  localparam int unsigned LATENCY = TAPS - (TAPS - 1) / LANES
) (
  input  logic                                clk,
  input  coef_t [TAPS-1:0]                    coefs,   // [k-1] = C_k
  input  word_t                               din,
  output logic signed [LANES-1:0][PSUM_W-1:0] dout
);

  word_t                               s [TAPS+1];
  logic signed [LANES-1:0][PSUM_W-1:0] p [TAPS+1];

  assign s[0] = din;
  assign p[0] = '0;

  for (genvar i = 0; i < TAPS; i++) begin : g_tap
    fir_tap #(.STAGE(i), .PSUM_W(PSUM_W)) u_tap (
      .clk   (clk),
      .c     (coefs[TAPS-1-i]),
      .s_in  (s[i]),
      .p_in  (p[i]),
      .s_out (s[i+1]),
      .p_out (p[i+1])
    );
  end

  // Output alignment of the lanes that arrive one clock early.
  localparam int unsigned LAST_R = (TAPS - 1) % LANES;
  logic signed [LANES-1:0][PSUM_W-1:0] p_late;

  always_ff @(posedge clk) p_late <= p[TAPS];

  always_comb begin
    for (int l = 0; l < LANES; l++)
      dout[l] = (l < int'(LAST_R)) ? p_late[l] : p[TAPS][l];
  end

endmodule
