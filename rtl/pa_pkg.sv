// pa_pkg: types and constants shared by the phased array processor.
//
// The datapath runs at 256 MHz on a demux-by-4 stream: each clock carries four
// consecutive 8-bit ADC samples of one antenna (1024 Msample/s). Lane 0 of a
// word is the oldest sample, lane 3 the newest. The delay of one antenna is
// programmed in three fields, as the delay line applies it in three steps:
// coarse (whole 4-sample words), fine (0..3 samples) and super-fine (tenths of
// a sample). Sample width, 4 lanes, 1000-word coarse FIFO, 10 taps and 10
// coefficient sets follow the paper; the coefficient format is this design's
// own choice (signed 18-bit with 16 fraction bits, sized for the FPGA's
// 18x18 multipliers).
package pa_pkg;

  localparam int unsigned SAMPLE_W  = 8;    // ADC sample width
  localparam int unsigned LANES     = 4;    // samples per clock (demux-by-4)
  localparam int unsigned WORD_W    = SAMPLE_W * LANES;  // 32-bit word
  localparam int unsigned COEF_W    = 18;   // FIR coefficient width
  localparam int unsigned COEF_FRAC = 16;   // fraction bits of a coefficient
  localparam int unsigned FIR_TAPS  = 10;   // super-fine delay FIR taps
  localparam int unsigned FRAC_SETS = 10;   // coefficient sets: 0.0 .. 0.9 sample
  localparam int unsigned COARSE_W  = 10;   // coarse delay field, words
  localparam int unsigned BOARD_CH  = 4;    // antennas per Beamform board
  localparam int unsigned NBOARDS   = 2;    // Beamform boards
  localparam int unsigned NANT      = BOARD_CH * NBOARDS;  // 8 antennas

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef sample_t [LANES-1:0]        word_t;     // [0] = oldest sample
  typedef logic signed [COEF_W-1:0]   coef_t;

  // Programmed delay of one antenna.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;  // words of 4 samples (4 ns), minimum 3
    logic [1:0]          fine;    // whole samples 0..3 (1 ns)
    logic [3:0]          frac;    // tenths of a sample 0..9 (0.1 ns)
  } delay_t;

  // Saturate a wide signed value to one sample.
  function automatic sample_t sat_sample(input logic signed [47:0] v);
    if (v > 48'sd127)       return sample_t'(8'sd127);
    else if (v < -48'sd128) return sample_t'(-8'sd128);
    else                    return sample_t'(v[SAMPLE_W-1:0]);
  endfunction

endpackage
