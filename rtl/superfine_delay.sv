// superfine_delay: fractional delay in tenths of a sample (0.1 ns steps).
//
// A fractional delay is a filter with the resampled, shifted sinc impulse
// response h_D(n) = sin(pi(n-D)) / (pi(n-D)). A 10-tap demux-by-4 FIR
// (fir_demux4) runs on the sample stream; its coefficients come from the
// double-buffered coefficient store (coef_buffer), whose set f is the filter
// for D = 3 + f/10 (set 0 is the plain 3-sample delay of three flip-flops).
// The full-precision filter output is rounded to the nearest integer after
// dropping COEF_FRAC fraction bits and saturated back to 8-bit samples.
//
// Following the paper: 10-tap filter, coefficient sets for D = x.0 .. x.9
// loaded on demand through the double buffer, and D = 3 as the integer
// reference. The paper counts "10 such filters corresponding to delays of
// D=0.1 to D=0.9"; this design reads that as ten sets for fractions
// 0.0 .. 0.9. Rounding and saturation are this design's choice. The
// coefficient values themselves are written by the control computer.
//
// Timing: output word in cycle t belongs to input word t - 9 (8 for the FIR,
// 1 for the output register), delayed further by 3 + frac/10 samples through
// the filter response.
module superfine_delay
  import pa_pkg::*;
#(
  localparam int unsigned AW     = $clog2(FIR_TAPS * FRAC_SETS),
  localparam int unsigned PSUM_W = SAMPLE_W + COEF_W + 4
) (
  input  logic          clk,
  input  logic          rst,
  input  word_t         din,
  input  logic [3:0]    frac,        // tenths of a sample, 0..9
  input  logic          coef_load,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  coef_t         host_wdata,
  output word_t         dout,
  output logic          coef_update,
  output logic          coef_busy
);

  coef_t [FIR_TAPS-1:0]                coefs;
  logic signed [LANES-1:0][PSUM_W-1:0] y;
  logic [3:0]                          set_sel;

  always_comb set_sel = (frac > 4'(FRAC_SETS - 1)) ? 4'(FRAC_SETS - 1) : frac;

  coef_buffer #(.TAPS(FIR_TAPS), .NSETS(FRAC_SETS)) u_coef (
    .clk        (clk),
    .rst        (rst),
    .host_we    (host_we),
    .host_addr  (host_addr),
    .host_wdata (host_wdata),
    .set        (set_sel),
    .load       (coef_load),
    .coefs      (coefs),
    .update     (coef_update),
    .busy       (coef_busy)
  );

  fir_demux4 #(.TAPS(FIR_TAPS)) u_fir (
    .clk   (clk),
    .coefs (coefs),
    .din   (din),
    .dout  (y)
  );

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      dout[l] <= sat_sample((48'($signed(y[l])) + (48'sd1 <<< (COEF_FRAC - 1))) >>> COEF_FRAC);
  end

endmodule
