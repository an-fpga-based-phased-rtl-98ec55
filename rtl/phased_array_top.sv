// phased_array_top: 8-antenna time-domain phased array processor.
//
// Eight antennas are sampled at 1024 Msample/s, 8 bits, and arrive as four
// samples per 256 MHz clock. Two Beamform boards (beamform_ibob) each delay
// four antennas through programmable delay lines (4 ns, 1 ns and 0.1 ns
// steps, up to 4000 ns), undo the 180-degree Walsh phase switching and form a
// 4-antenna phased sum. The digital back end adds the two partial sums
// (dbe_sum) into the 8-antenna phased sum, which leaves this design on
// dbe_out towards the back end's channelizer and the VSI recorder interface.
// Each board's second link sends one selected delayed antenna to the
// calibration correlator; those two streams leave on corr_a / corr_b towards
// the correlator's polyphase filter bank and FFT, whose spectra come back on
// the fft_* ports into the X stage (cal_correlator). All control registers
// (delays, Walsh states, coefficient RAMs, link selection, scopes,
// integration length and result read-out) are plain ports, standing for the
// registers the control computer writes over the serial port.
//
// Following the paper: 2 boards x 4 antennas, phased sums over 8 Gbit/s
// links, summation in the back end, a single-baseline correlator fed by the
// iBand2 links. The links are modelled as direct wires in one 256 MHz clock
// domain: the serial link cores, ADC interfaces, FFTs, channelizer and VSI
// interface are outside this design.
//
// Timing: dbe_out is three registers behind the delay line outputs; corr_a
// and corr_b one register.
module phased_array_top
  import pa_pkg::*;
#(
  parameter int unsigned DEPTH       = 1000,
  parameter int unsigned SCOPE_DEPTH = 2048,
  parameter int unsigned NCHAN       = 32,
  parameter int unsigned FFT_LANES   = 2,
  parameter int unsigned FFT_W       = 18,
  localparam int unsigned CAW   = $clog2(FIR_TAPS * FRAC_SETS),
  localparam int unsigned SAW   = $clog2(SCOPE_DEPTH),
  localparam int unsigned HAW   = $clog2(NCHAN),
  localparam int unsigned ACC_W = 2 * FFT_W + 1 + 28
) (
  input  logic                                clk,
  input  logic                                rst,
  input  word_t  [NANT-1:0]                   adc,
  input  delay_t [NANT-1:0]                   delay,
  input  logic   [NANT-1:0]                   walsh,
  input  logic                                coef_we,
  input  logic   [2:0]                        coef_ant,
  input  logic   [CAW-1:0]                    coef_addr,
  input  coef_t                               coef_wdata,
  input  logic   [NANT-1:0]                   coef_load,
  input  logic   [NBOARDS-1:0][1:0]           iband2_sel,
  input  logic   [NBOARDS-1:0]                scope_arm,
  output logic   [NBOARDS-1:0]                scope_done,
  input  logic                                scope_board,
  input  logic   [2:0]                        scope_sel,
  input  logic   [SAW-1:0]                    scope_addr,
  output word_t                               scope_rdata,
  output word_t                               dbe_out,
  output word_t                               corr_a,
  output word_t                               corr_b,
  input  logic                                fft_valid,
  input  logic                                fft_sync,
  input  logic signed [FFT_LANES-1:0][FFT_W-1:0] fft_a_re,
  input  logic signed [FFT_LANES-1:0][FFT_W-1:0] fft_a_im,
  input  logic signed [FFT_LANES-1:0][FFT_W-1:0] fft_b_re,
  input  logic signed [FFT_LANES-1:0][FFT_W-1:0] fft_b_im,
  input  logic [31:0]                         int_len,
  input  logic [HAW-1:0]                      corr_addr,
  output logic signed [ACC_W-1:0]             corr_re,
  output logic signed [ACC_W-1:0]             corr_im,
  output logic [31:0]                         dump_count,
  output logic                                dump,
  output logic   [NANT-1:0]                   dup_read,
  output logic   [NANT-1:0]                   skip_read,
  output logic   [NANT-1:0]                   coef_update,
  output logic   [NANT-1:0]                   coef_busy
);

  word_t [NBOARDS-1:0] iband1, iband2, s_rdata;

  for (genvar b = 0; b < NBOARDS; b++) begin : g_board
    beamform_ibob #(.DEPTH(DEPTH), .SCOPE_DEPTH(SCOPE_DEPTH)) u_board (
      .clk         (clk),
      .rst         (rst),
      .adc         (adc[b*BOARD_CH +: BOARD_CH]),
      .delay       (delay[b*BOARD_CH +: BOARD_CH]),
      .walsh       (walsh[b*BOARD_CH +: BOARD_CH]),
      .coef_we     (coef_we && coef_ant[2] == 1'(b)),
      .coef_ch     (coef_ant[1:0]),
      .coef_addr   (coef_addr),
      .coef_wdata  (coef_wdata),
      .coef_load   (coef_load[b*BOARD_CH +: BOARD_CH]),
      .iband2_sel  (iband2_sel[b]),
      .iband1      (iband1[b]),
      .iband2      (iband2[b]),
      .scope_arm   (scope_arm[b]),
      .scope_done  (scope_done[b]),
      .scope_sel   (scope_sel),
      .scope_addr  (scope_addr),
      .scope_rdata (s_rdata[b]),
      .dup_read    (dup_read[b*BOARD_CH +: BOARD_CH]),
      .skip_read   (skip_read[b*BOARD_CH +: BOARD_CH]),
      .coef_update (coef_update[b*BOARD_CH +: BOARD_CH]),
      .coef_busy   (coef_busy[b*BOARD_CH +: BOARD_CH])
    );
  end

  assign scope_rdata = s_rdata[scope_board];
  assign corr_a      = iband2[0];
  assign corr_b      = iband2[1];

  dbe_sum u_dbe (
    .clk  (clk),
    .a    (iband1[0]),
    .b    (iband1[1]),
    .dout (dbe_out)
  );

  cal_correlator #(.NCHAN(NCHAN), .LANES(FFT_LANES), .W(FFT_W)) u_corr (
    .clk        (clk),
    .rst        (rst),
    .fft_valid  (fft_valid),
    .fft_sync   (fft_sync),
    .a_re       (fft_a_re),
    .a_im       (fft_a_im),
    .b_re       (fft_b_re),
    .b_im       (fft_b_im),
    .int_len    (int_len),
    .host_addr  (corr_addr),
    .host_re    (corr_re),
    .host_im    (corr_im),
    .dump_count (dump_count),
    .dump       (dump)
  );

endmodule
