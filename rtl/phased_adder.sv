// phased_adder: phased sum of the delayed channels of one board.
//
// Adds NCH aligned channels lane by lane. The 180-degree (Dicke) Walsh phase
// switching of each antenna's LO is undone here by switching that channel
// between addition and subtraction: walsh[i] = 1 subtracts channel i. The sum
// is divided by NCH (arithmetic shift, NCH a power of two), so the output is
// the average and keeps the 8-bit sample format of the links.
//
// Following the paper: summing the phase-aligned channels, add/subtract on
// the Walsh state, the output being the average in 8 bits. The walsh inputs
// must be aligned with the delayed data by whoever drives them; division by
// truncation is this design's choice.
//
// Timing: one register; the output word in cycle t is the sum of the inputs
// of cycle t-1.
module phased_adder
  import pa_pkg::*;
#(
  parameter int unsigned NCH = BOARD_CH,
  localparam int unsigned SHIFT = $clog2(NCH),
  localparam int unsigned SUM_W = SAMPLE_W + SHIFT + 1
) (
  input  logic              clk,
  input  word_t [NCH-1:0]   din,
  input  logic  [NCH-1:0]   walsh,   // 1: subtract this channel
  output word_t             dout
);

  logic signed [SUM_W-1:0] acc [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      acc[l] = '0;
      for (int c = 0; c < int'(NCH); c++)
        acc[l] = walsh[c] ? acc[l] - SUM_W'($signed(din[c][l])) : acc[l] + SUM_W'($signed(din[c][l]));
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      dout[l] <= sat_sample(48'(acc[l] >>> SHIFT));
  end

endmodule
