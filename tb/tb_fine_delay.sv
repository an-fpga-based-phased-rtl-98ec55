// tb_fine_delay: self-checking test of the barrel-selector fine delay.
//
// Streams consecutive sample numbers (sample k has value k mod 256). After
// the clock edge that samples word w (samples 4w..4w+3), output lane j must
// hold sample 4w + j - 1 - d, for each fine delay d = 0..3; d is changed on
// the fly and takes effect in the same clock (the selector is combinational).
`timescale 1ns/1ps
module tb_fine_delay;
  import pa_pkg::*;

  logic clk = 0;
  word_t din, dout;
  logic [1:0] d;
  int checks = 0, failures = 0;
  int w = 0;

  fine_delay dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t mkword(input int wi);
    word_t r;
    for (int j = 0; j < 4; j++) r[j] = sample_t'(4 * wi + j);
    return r;
  endfunction

  initial begin
    d = 0; din = mkword(0);
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      if (it >= 2) begin
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (dout[j] !== sample_t'(4 * w + j - 1 - int'(d))) begin
            failures++;
            if (failures < 10) $display("w=%0d d=%0d lane %0d: got %0d", w, d, j, dout[j]);
          end
        end
      end
      if (it % 37 == 36) d = 2'($urandom_range(0, 3));
      w++;
      din = mkword(w);
      // a change of d between edges shows at once
      if (it % 50 == 25) begin
        #0.5;
        d = d + 2'd1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
