// tb_dbe_sum: self-checking test of the back end's partial-sum adder.
//
// Random partial sums from the two boards; after each edge every output lane
// must be floor((a + b) / 2), including the extremes -128 + -128 and 127 + 127.
`timescale 1ns/1ps
module tb_dbe_sum;
  import pa_pkg::*;

  logic clk = 0;
  word_t a, b, dout;
  int checks = 0, failures = 0;

  dbe_sum dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      int e [4];
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        a[l] = (it == 0) ? -8'sd128 : (it == 1) ? 8'sd127 : sample_t'($urandom);
        b[l] = (it == 0) ? -8'sd128 : (it == 1) ? 8'sd127 : sample_t'($urandom);
        e[l] = int'(a[l]) + int'(b[l]);
        e[l] = (e[l] >= 0) ? e[l] / 2 : -((-e[l] + 1) / 2);
      end
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (int'(dout[l]) != e[l]) begin
          failures++;
          if (failures < 10) $display("lane %0d: got %0d want %0d", l, dout[l], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
