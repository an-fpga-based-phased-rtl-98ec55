// cmult_conj: complex multiply by the conjugate, the cross-power of one bin.
//
// p = a * conj(b):  re = ar*br + ai*bi,  im = ai*br - ar*bi.
// a and b are one frequency bin of the two FFT streams of the calibration
// correlator; p is accumulated per bin by the vector accumulator.
//
// Following the paper: the CONJ and X blocks of its correlator figure (the
// conjugate is taken on the second stream). Input width and the single
// register are this design's choice; the result is exact (2*W+1 bits).
//
// Timing: one register; valid is delayed with the data.
module cmult_conj #(
  parameter int unsigned W = 18,
  localparam int unsigned PW = 2 * W + 1
) (
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  a_re,
  input  logic signed [W-1:0]  a_im,
  input  logic signed [W-1:0]  b_re,
  input  logic signed [W-1:0]  b_im,
  output logic                 out_valid,
  output logic signed [PW-1:0] p_re,
  output logic signed [PW-1:0] p_im
);

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    p_re <= PW'(a_re * b_re) + PW'(a_im * b_im);
    p_im <= PW'(a_im * b_re) - PW'(a_re * b_im);
  end

endmodule
