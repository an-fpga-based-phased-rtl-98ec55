// coarse_delay: whole-word (4-sample, 4 ns) programmable delay.
//
// The four samples of a clock are handled as one 32-bit word and written every
// clock into a RAM FIFO of DEPTH words whose read and write pointers live in
// flip-flops. Control logic compares the FIFO occupancy with the programmed
// delay C and moves it by one word per clock towards C: to grow the delay the
// read pointer is held for a clock (the same word is output twice), to shrink
// it the read pointer advances by two (one word is skipped). In steady state
// both pointers advance by one and the occupancy equals C.
//
// Following the paper: 1000-word FIFO (4000 samples), pointer control that
// keeps the occupancy at C, minimum delay 3 (smaller values are raised to 3).
// The paper's own text ties "output the same word twice" to a smaller delay
// and a write-pointer jump to a larger one; both would move the delay the
// wrong way or expose an unwritten word, so this design moves only the read
// pointer (hold = +1 word, double step = -1 word). Largest delay DEPTH-1.
//
// Timing: the word sampled at clock edge t is on dout after edge t+1+C (C
// words in the FIFO plus the output register) once the occupancy has
// settled; a change of C settles at one word per clock. dup_read / skip_read flag the cycles in which
// the control logic repeats or drops a word. Synchronous active-high reset
// empties the FIFO; the first outputs after reset are not valid data.
module coarse_delay
  import pa_pkg::*;
#(
  parameter int unsigned DEPTH     = 1000,
  parameter int unsigned MIN_DELAY = 3,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst,
  input  word_t           din,
  input  logic [AW-1:0]   delay,      // programmed coarse delay C in words
  output word_t           dout,
  output logic [AW-1:0]   occupancy,  // current delay in words
  output logic            dup_read,   // this cycle's read repeats a word
  output logic            skip_read   // this cycle's read drops a word
);

  word_t         mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr, occ, target;

  function automatic logic [AW-1:0] ptr_add(input logic [AW-1:0] p, input int unsigned n);
    logic [AW:0] s;
    s = {1'b0, p} + (AW+1)'(n);
    if (s >= (AW+1)'(DEPTH)) s = s - (AW+1)'(DEPTH);
    return s[AW-1:0];
  endfunction

  always_comb begin
    if (delay < AW'(MIN_DELAY))      target = AW'(MIN_DELAY);
    else if (delay > AW'(DEPTH - 1)) target = AW'(DEPTH - 1);
    else                             target = delay;
    dup_read  = (occ < target);
    skip_read = (occ > target);
  end

  always_ff @(posedge clk) begin
    mem[wr_ptr] <= din;
    dout        <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      occ    <= '0;
    end else begin
      wr_ptr <= ptr_add(wr_ptr, 1);
      if (dup_read) begin
        occ <= occ + 1'b1;
      end else if (skip_read) begin
        rd_ptr <= ptr_add(rd_ptr, 2);
        occ    <= occ - 1'b1;
      end else begin
        rd_ptr <= ptr_add(rd_ptr, 1);
      end
    end
  end

  assign occupancy = occ;

  // The read pointer never overtakes the write pointer.
  a_occ_range: assert property (@(posedge clk) disable iff (rst) occ < AW'(DEPTH));

endmodule
