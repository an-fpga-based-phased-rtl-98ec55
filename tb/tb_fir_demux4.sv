// tb_fir_demux4: self-checking test of the demux-by-4 pipelined FIR.
//
// Two filters, 10 taps (the design's size) and 5 taps (the size of the
// worked example, o_1 = s_1 C_5 + ... + s_5 C_1), run on the same random
// 4-sample-per-clock stream with random coefficients. A plain tapped-delay-
// line reference y[n] = sum_k C_k x[n-k+1] is computed in the testbench from
// the sample history. After the edge that samples word w the output must
// hold y for word w + 1 - LATENCY, LATENCY = TAPS - floor((TAPS-1)/4), i.e.
// 8 clocks for 10 taps and 4 for 5 taps. Coefficients are changed twice.
`timescale 1ns/1ps
module tb_fir_demux4;
  import pa_pkg::*;

  localparam int PW = SAMPLE_W + COEF_W + 4;
  localparam int NW = 600;
  logic clk = 0;
  coef_t [9:0] coefs10;
  coef_t [4:0] coefs5;
  word_t din;
  logic signed [3:0][PW-1:0] y10, y5;
  int checks = 0, failures = 0;
  int x [4*NW];

  fir_demux4 #(.TAPS(10)) dut10 (.clk, .coefs(coefs10), .din, .dout(y10));
  fir_demux4 #(.TAPS(5))  dut5  (.clk, .coefs(coefs5),  .din, .dout(y5));

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_y(input int n, input int taps, input coef_t [9:0] c);
    longint s = 0;
    for (int k = 1; k <= taps; k++)
      if (n - k + 1 >= 0) s += longint'(c[k-1]) * longint'(x[n - k + 1]);
    return s;
  endfunction

  coef_t [9:0] c10, c5;
  int since_change;

  task automatic new_coefs();
    for (int k = 0; k < 10; k++) begin
      c10[k] = coef_t'($urandom);
      c5[k]  = (k < 5) ? coef_t'($urandom) : coef_t'(0);
    end
    coefs10 = c10;
    for (int k = 0; k < 5; k++) coefs5[k] = c5[k];
    since_change = 0;
  endtask

  initial begin
    for (int n = 0; n < 4 * NW; n++) x[n] = $signed(8'($urandom));
    new_coefs();
    din = '0;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      // the word on din was sampled by the edge just before
      if (w > 0 && since_change > 12) begin
        int ow10, ow5;
        ow10 = (w - 1) + 1 - 8;
        ow5  = (w - 1) + 1 - 4;
        for (int l = 0; l < 4; l++) begin
          if (ow10 >= 3) begin
            checks++;
            if (y10[l] !== PW'(ref_y(4 * ow10 + l, 10, c10))) begin
              failures++;
              if (failures < 10) $display("10-tap word %0d lane %0d: got %0d want %0d",
                                          ow10, l, y10[l], ref_y(4 * ow10 + l, 10, c10));
            end
          end
          if (ow5 >= 2) begin
            checks++;
            if (y5[l] !== PW'(ref_y(4 * ow5 + l, 5, c5))) begin
              failures++;
              if (failures < 10) $display("5-tap word %0d lane %0d: got %0d want %0d",
                                          ow5, l, y5[l], ref_y(4 * ow5 + l, 5, c5));
            end
          end
        end
      end
      if (w == 200 || w == 400) new_coefs();
      since_change++;
      for (int l = 0; l < 4; l++) din[l] = sample_t'(x[4 * w + l]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
