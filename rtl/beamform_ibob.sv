// beamform_ibob: one Beamform board, four antennas of the phased array.
//
// Four delay lines (one per ADC channel, two iADCs of two channels each)
// align the antennas' sample streams. The phased adder sums them, undoing the
// 180-degree Walsh switching by add/subtract, and the 8-bit average goes out
// on the first link (iBand1) to the digital back end at 8 Gbit/s (32 bits per
// 256 MHz clock). The second link (iBand2) carries one delayed channel,
// chosen by iband2_sel, to the calibration correlator; changing the selection
// over time steps the correlator through the baselines. Five snapshot scopes,
// armed together, record the four delayed channels and their sum for the
// control computer.
//
// Following the paper: 4 delay lines per board, phased sum on iBand1, the
// time-multiplexed single channel on iBand2 under "iBand2 data select"
// control, snapshot RAMs on the processor bus, all registers set by the
// control computer. The register interface is reduced to plain ports here
// (the processor and serial link are outside this design); the scope set and
// the alignment registers are this design's choices.
//
// Timing: iband1, iband2 and the scope inputs are each one register behind
// the delay line outputs and aligned with one another.
module beamform_ibob
  import pa_pkg::*;
#(
  parameter int unsigned DEPTH      = 1000,   // coarse FIFO words
  parameter int unsigned SCOPE_DEPTH = 2048,  // snapshot words
  localparam int unsigned CAW  = $clog2(FIR_TAPS * FRAC_SETS),
  localparam int unsigned SAW  = $clog2(SCOPE_DEPTH),
  localparam int unsigned NSCOPE = BOARD_CH + 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  word_t  [BOARD_CH-1:0]   adc,          // from the two iADCs
  input  delay_t [BOARD_CH-1:0]   delay,
  input  logic   [BOARD_CH-1:0]   walsh,
  // coefficient RAM host port
  input  logic                    coef_we,
  input  logic   [1:0]            coef_ch,
  input  logic   [CAW-1:0]        coef_addr,
  input  coef_t                   coef_wdata,
  input  logic   [BOARD_CH-1:0]   coef_load,
  // links
  input  logic   [1:0]            iband2_sel,
  output word_t                   iband1,       // phased sum to the DBE
  output word_t                   iband2,       // one channel to the correlator
  // snapshot scopes
  input  logic                    scope_arm,
  output logic                    scope_done,
  input  logic   [2:0]            scope_sel,    // 0..3 channels, 4 sum
  input  logic   [SAW-1:0]        scope_addr,
  output word_t                   scope_rdata,
  // status
  output logic   [BOARD_CH-1:0]   dup_read,
  output logic   [BOARD_CH-1:0]   skip_read,
  output logic   [BOARD_CH-1:0]   coef_update,
  output logic   [BOARD_CH-1:0]   coef_busy
);

  word_t [BOARD_CH-1:0] dl_out, dl_q;
  word_t [NSCOPE-1:0]   scope_in, scope_q;
  logic  [NSCOPE-1:0]   done_v;

  for (genvar c = 0; c < BOARD_CH; c++) begin : g_ch
    delay_line #(.DEPTH(DEPTH)) u_dl (
      .clk         (clk),
      .rst         (rst),
      .din         (adc[c]),
      .delay       (delay[c]),
      .coef_load   (coef_load[c]),
      .host_we     (coef_we && coef_ch == 2'(c)),
      .host_addr   (coef_addr),
      .host_wdata  (coef_wdata),
      .dout        (dl_out[c]),
      .dup_read    (dup_read[c]),
      .skip_read   (skip_read[c]),
      .coef_update (coef_update[c]),
      .coef_busy   (coef_busy[c])
    );
  end

  phased_adder #(.NCH(BOARD_CH)) u_sum (
    .clk   (clk),
    .din   (dl_out),
    .walsh (walsh),
    .dout  (iband1)
  );

  always_ff @(posedge clk) begin
    dl_q   <= dl_out;
    iband2 <= dl_out[iband2_sel];
  end

  always_comb begin
    for (int c = 0; c < int'(BOARD_CH); c++) scope_in[c] = dl_q[c];
    scope_in[BOARD_CH] = iband1;
  end

  for (genvar s = 0; s < NSCOPE; s++) begin : g_scope
    ibobscope #(.DEPTH(SCOPE_DEPTH)) u_scope (
      .clk        (clk),
      .rst        (rst),
      .din        (scope_in[s]),
      .arm        (scope_arm),
      .done       (done_v[s]),
      .host_addr  (scope_addr),
      .host_rdata (scope_q[s])
    );
  end

  assign scope_done  = &done_v;
  assign scope_rdata = (scope_sel < 3'(NSCOPE)) ? scope_q[scope_sel] : '0;

endmodule
