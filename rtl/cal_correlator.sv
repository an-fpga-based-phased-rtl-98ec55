// cal_correlator: X stage of the single-baseline FX calibration correlator.
//
// Two antenna streams are channelized by a polyphase filter bank and FFT
// (library blocks outside this design, 32 frequency channels of real data).
// Their outputs enter here, LANES bins per clock per stream. Each bin of
// stream A is multiplied by the complex conjugate of the same bin of stream B
// (cmult_conj) and the cross-power spectrum is integrated per bin for int_len
// spectra (vector_accumulator). The control computer reads the integrated
// spectrum by bin number and derives the relative delay of the two antennas
// from the phase slope across the band. The seven baselines to the reference
// antenna are measured one after another by selecting which delayed channel
// each Beamform board sends to the correlator.
//
// Following the paper: FX structure, conjugate multiply, vector accumulation
// in block RAM for up to about 16 s, result read by the control computer,
// 32 channels, time multiplexing of the baselines. FFT output width (18 bits),
// LANES = 2 (32 bins every 16 clocks at 4 samples per clock) and the sync
// marker are this design's choices.
//
// Timing: one register in the multiplier, then the accumulator; see
// vector_accumulator for the result and host read timing. All lanes share
// one valid, so only lane 0's out_valid is used; the others are left open.
module cal_correlator #(
  parameter int unsigned NCHAN = 32,
  parameter int unsigned LANES = 2,
  parameter int unsigned W     = 18,
  localparam int unsigned PW   = 2 * W + 1,
  localparam int unsigned ACC_W = PW + 28,
  localparam int unsigned HAW  = $clog2(NCHAN)
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           fft_valid,
  input  logic                           fft_sync,
  input  logic signed [LANES-1:0][W-1:0] a_re,
  input  logic signed [LANES-1:0][W-1:0] a_im,
  input  logic signed [LANES-1:0][W-1:0] b_re,
  input  logic signed [LANES-1:0][W-1:0] b_im,
  input  logic [31:0]                    int_len,
  input  logic [HAW-1:0]                 host_addr,
  output logic signed [ACC_W-1:0]        host_re,
  output logic signed [ACC_W-1:0]        host_im,
  output logic [31:0]                    dump_count,
  output logic                           dump
);

  logic signed [LANES-1:0][PW-1:0] x_re, x_im;
  logic [LANES-1:0]                x_valid;
  logic                            x_sync;

  for (genvar l = 0; l < LANES; l++) begin : g_x
    cmult_conj #(.W(W)) u_x (
      .clk       (clk),
      .in_valid  (fft_valid),
      .a_re      (a_re[l]),
      .a_im      (a_im[l]),
      .b_re      (b_re[l]),
      .b_im      (b_im[l]),
      .out_valid (x_valid[l]),
      .p_re      (x_re[l]),
      .p_im      (x_im[l])
    );
  end

  always_ff @(posedge clk) x_sync <= fft_sync & fft_valid;

  vector_accumulator #(.NCHAN(NCHAN), .LANES(LANES), .IN_W(PW), .ACC_W(ACC_W)) u_avg (
    .clk        (clk),
    .rst        (rst),
    .in_valid   (x_valid[0]),
    .in_sync    (x_sync),
    .in_re      (x_re),
    .in_im      (x_im),
    .int_len    (int_len),
    .host_addr  (host_addr),
    .host_re    (host_re),
    .host_im    (host_im),
    .dump_count (dump_count),
    .dump       (dump)
  );

endmodule
