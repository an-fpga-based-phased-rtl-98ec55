// tb_phased_adder: self-checking test of the Walsh-switched phased adder.
//
// Random samples and random Walsh states on four channels; after each edge
// the output must be floor((sum of +-x_i) / 4) for every lane, the sign of
// channel i being minus when its Walsh bit is set. Also checks the extreme
// values (all channels -128 added, all subtracted).
`timescale 1ns/1ps
module tb_phased_adder;
  import pa_pkg::*;

  logic clk = 0;
  word_t [3:0] din;
  logic [3:0] walsh;
  word_t dout;
  int checks = 0, failures = 0;

  phased_adder #(.NCH(4)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int floordiv4(input int v);
    return (v >= 0) ? v / 4 : -((-v + 3) / 4);
  endfunction

  word_t expw;
  initial begin
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      for (int c = 0; c < 4; c++)
        for (int l = 0; l < 4; l++)
          din[c][l] = (it < 2) ? sample_t'(-128) : sample_t'($urandom);
      walsh = (it == 0) ? 4'b0000 : (it == 1) ? 4'b1111 : 4'($urandom);
      for (int l = 0; l < 4; l++) begin
        int s;
        s = 0;
        for (int c = 0; c < 4; c++) s += walsh[c] ? -int'($signed(din[c][l])) : int'($signed(din[c][l]));
        s = floordiv4(s);
        if (s > 127) s = 127;
        expw[l] = sample_t'(s);
      end
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (dout[l] !== expw[l]) begin
          failures++;
          if (failures < 10) $display("it %0d lane %0d: got %0d want %0d", it, l, dout[l], expw[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
