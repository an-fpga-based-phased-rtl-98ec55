// tb_fir_tap: self-checking test of one demux-by-4 FIR stage.
//
// Drives random samples, partial sums and coefficients into a stage with
// STAGE = 1 and one with STAGE = 6 and checks, clock by clock, that
//   p_out[L] = p_in[L-1 mod 4] + c * s_in[L]      (registered)
//   s_out[L] = s_in[L] for L = STAGE mod 4, else s_in[L] of the last clock.
`timescale 1ns/1ps
module tb_fir_tap;
  import pa_pkg::*;

  localparam int PW = SAMPLE_W + COEF_W + 4;
  logic clk = 0;
  coef_t c;
  word_t s_in, s_out1, s_out6;
  logic signed [3:0][PW-1:0] p_in, p_out1, p_out6;
  int checks = 0, failures = 0;

  fir_tap #(.STAGE(1), .PSUM_W(PW)) dut1 (.clk, .c, .s_in, .p_in, .s_out(s_out1), .p_out(p_out1));
  fir_tap #(.STAGE(6), .PSUM_W(PW)) dut6 (.clk, .c, .s_in, .p_in, .s_out(s_out6), .p_out(p_out6));

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t s_prev;
  logic signed [3:0][PW-1:0] p_exp;

  initial begin
    c = '0; s_in = '0; p_in = '0;
    @(negedge clk);
    for (int it = 0; it < 300; it++) begin
      c = coef_t'($urandom);
      for (int l = 0; l < 4; l++) begin
        s_in[l] = sample_t'($urandom);
        p_in[l] = PW'($signed($urandom) >>> 4);
      end
      for (int l = 0; l < 4; l++)
        p_exp[l] = p_in[(l + 3) % 4] + PW'(longint'(c) * longint'(s_in[l]));
      #0.1;
      if (it > 0) begin
        for (int l = 0; l < 4; l++) begin
          checks += 2;
          if (s_out1[l] !== ((l == 1) ? s_in[l] : s_prev[l])) failures++;
          if (s_out6[l] !== ((l == 2) ? s_in[l] : s_prev[l])) failures++;
        end
      end
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        checks += 2;
        if (p_out1[l] !== p_exp[l]) begin
          failures++;
          if (failures < 10) $display("it %0d lane %0d: got %0d want %0d", it, l, p_out1[l], p_exp[l]);
        end
        if (p_out6[l] !== p_exp[l]) failures++;
      end
      s_prev = s_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
