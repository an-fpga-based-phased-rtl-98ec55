// fine_delay: whole-sample (1 ns) delay of 0..3 samples by barrel selection.
//
// The incoming 4-sample word passes through two registers; the older word
// (samples 1-4) and the newer word (samples 5-8) are concatenated into eight
// samples and a 4:1 selector picks the four consecutive samples starting at
// position SELECT: 0 gives 1-2-3-4, 1 gives 2-3-4-5, 2 gives 3-4-5-6, 3 gives
// 4-5-6-7. SELECT is a phase advance, so the desired delay d is applied as
// SELECT = 3 - d; this module takes d directly and forms SELECT itself.
//
// Following the paper (its barrel selector figure): two z^-1 registers, the
// 64-bit concatenation, the four selector inputs and the S = 3 - d rule. The
// selector output is combinational, as drawn.
//
// Timing: after the clock edge that samples input word w, output lane j holds
// input sample 4w + j - 1 - d (samples numbered 4w + lane): a delay of d + 1
// samples, one word of register latency less the phase advance of 3.
module fine_delay
  import pa_pkg::*;
(
  input  logic       clk,
  input  word_t      din,
  input  logic [1:0] d,      // desired delay in samples
  output word_t      dout
);

  word_t              r_new, r_old;      // samples 5-8 and 1-4
  sample_t [2*LANES-1:0] cat;
  logic [1:0]         sel;

  always_ff @(posedge clk) begin
    r_new <= din;
    r_old <= r_new;
  end

  always_comb begin
    cat = {r_new, r_old};                // cat[0] = oldest sample
    sel = 2'd3 - d;
    for (int j = 0; j < LANES; j++) dout[j] = cat[int'(sel) + j];
  end

endmodule
