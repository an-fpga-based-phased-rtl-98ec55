// delay_line: programmable delay of one antenna's sample stream.
//
// The delay is applied in three steps in series: coarse_delay moves the
// stream by whole 4-sample words (4 ns), fine_delay by 0..3 samples (1 ns)
// and superfine_delay by tenths of a sample (0.1 ns). The delay field of
// pa_pkg::delay_t is split the same way. All antennas carry the same fixed
// pipeline latency, so only differences of programmed delay matter.
//
// Following the paper: the three-step structure and the step sizes. The
// order coarse, fine, super-fine and the separate fields for the three steps
// are this design's choice (the paper says the delays come from the control
// computer, not in what form).
//
// Timing: sample k of the input appears at output position
//   k + 4*coarse + fine + frac/10 + LATENCY_SAMPLES,
// LATENCY_SAMPLES = 4 (coarse output register) + 1 (fine delay) + 36 (FIR
// and its output register) + 3 (centre of the sinc filter) = 44, once the
// coarse FIFO has settled and the coefficient set is loaded. Exactly: after
// the edge that samples word w, output lane j is
//   sat8(round(sum_k C_k(frac) * x[4w + j - 40 - 4*coarse - fine - k] / 2^16)).
// coef_busy is brought out for the control computer, which must not change
// the fraction again before a load has finished. The coarse FIFO's occupancy
// output is left open here; the dup_read / skip_read flags report its moves.
module delay_line
  import pa_pkg::*;
#(
  parameter int unsigned DEPTH = 1000,
  localparam int unsigned CAW  = $clog2(DEPTH),
  localparam int unsigned AW   = $clog2(FIR_TAPS * FRAC_SETS)
) (
  input  logic          clk,
  input  logic          rst,
  input  word_t         din,
  input  delay_t        delay,
  input  logic          coef_load,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  coef_t         host_wdata,
  output word_t         dout,
  output logic          dup_read,
  output logic          skip_read,
  output logic          coef_update,
  output logic          coef_busy
);

  word_t         w_coarse, w_fine;
  logic [CAW-1:0] occupancy;

  coarse_delay #(.DEPTH(DEPTH), .MIN_DELAY(3)) u_coarse (
    .clk       (clk),
    .rst       (rst),
    .din       (din),
    .delay     (CAW'(delay.coarse)),
    .dout      (w_coarse),
    .occupancy (occupancy),
    .dup_read  (dup_read),
    .skip_read (skip_read)
  );

  fine_delay u_fine (
    .clk  (clk),
    .din  (w_coarse),
    .d    (delay.fine),
    .dout (w_fine)
  );

  superfine_delay u_superfine (
    .clk         (clk),
    .rst         (rst),
    .din         (w_fine),
    .frac        (delay.frac),
    .coef_load   (coef_load),
    .host_we     (host_we),
    .host_addr   (host_addr),
    .host_wdata  (host_wdata),
    .dout        (dout),
    .coef_update (coef_update),
    .coef_busy   (coef_busy)
  );

endmodule
