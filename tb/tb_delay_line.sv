// tb_delay_line: self-checking test of one antenna's complete delay line.
//
// Loads the fractional-delay coefficient sets and runs a random sample
// stream through coarse, fine and super-fine delay for a series of
// programmed delays (coarse up and down, every fine value, several
// fractions). The reference is computed in the testbench from the sample
// history: after the edge that samples input word w, output lane j must be
//   sat8( (sum_k C_k(f) * x[4w + j - 40 - 4*coarse - fine - k] + 2^15) >> 16 )
// with C_k(f) = round(2^16 sinc(k - 4 - f/10)), i.e. for f = 0 exactly
// x[4w + j - 44 - 4*coarse - fine]: a fixed 44-sample latency plus the
// programmed delay. Changes of coarse delay must settle at one word per clock.
`timescale 1ns/1ps
module tb_delay_line;
  import pa_pkg::*;

  localparam int NW = 8000;
  logic clk = 0, rst = 1;
  word_t din, dout;
  delay_t delay;
  logic coef_load = 0, host_we = 0;
  logic [6:0] host_addr = 0;
  coef_t host_wdata = 0;
  logic dup_read, skip_read, coef_update, coef_busy;
  int checks = 0, failures = 0;
  int dups = 0, skips = 0, updates = 0;
  int x [4*NW];

  delay_line #(.DEPTH(1000)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    dups += int'(dup_read); skips += int'(skip_read); updates += int'(coef_update);
  end

  function automatic coef_t cval(input int f, input int k);
    real a, h;
    a = real'(k - 4) - real'(f) / 10.0;
    h = (a == 0.0) ? 1.0 : $sin(3.14159265358979 * a) / (3.14159265358979 * a);
    return coef_t'($rtoi(h * 65536.0 + (h >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic sample_t ref_out(input int w, input int j, input delay_t dl);
    longint s = 0;
    for (int k = 1; k <= 10; k++) begin
      int n = 4 * w + j - 40 - 4 * int'(dl.coarse) - int'(dl.fine) - k;
      if (n >= 0) s += longint'(cval(int'(dl.frac), k)) * longint'(x[n]);
    end
    s = (s + 32768) >>> 16;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return sample_t'(s);
  endfunction

  int w = 0;
  task automatic run(input int nwords, input bit check);
    for (int i = 0; i < nwords; i++) begin
      @(negedge clk);
      if (check) begin
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (dout[j] !== ref_out(w, j, delay)) begin
            failures++;
            if (failures < 10) $display("C=%0d d=%0d f=%0d w=%0d lane %0d: got %0d want %0d",
                                        delay.coarse, delay.fine, delay.frac, w, j,
                                        dout[j], ref_out(w, j, delay));
          end
        end
      end
      w++;
      for (int j = 0; j < 4; j++) din[j] = sample_t'(x[4 * w + j]);
    end
  endtask

  task automatic set_delay(input int c, input int d, input int f);
    int oldc;
    oldc = int'(delay.coarse);
    delay = '{coarse: 10'(c), fine: 2'(d), frac: 4'(f)};
    // settle: coarse moves one word per clock, then the pipeline refills
    run((c > oldc ? c - oldc : oldc - c) + 30, 0);
    run(120, 1);
  endtask

  initial begin
    for (int n = 0; n < 4 * NW; n++) x[n] = $signed(8'($urandom)) / 2;
    delay = '{coarse: 10'd3, fine: 2'd0, frac: 4'd0};
    din = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 10; f++)
      for (int k = 1; k <= 10; k++) begin
        @(negedge clk);
        host_we = 1; host_addr = 7'(f * 10 + k - 1); host_wdata = cval(f, k);
      end
    @(negedge clk);
    host_we = 0; coef_load = 1;
    @(negedge clk);
    coef_load = 0;
    run(40, 0);
    run(100, 1);
    set_delay(3, 1, 0);
    set_delay(3, 2, 0);
    set_delay(3, 3, 0);
    set_delay(50, 0, 0);
    set_delay(47, 2, 5);
    set_delay(250, 1, 3);
    set_delay(120, 3, 9);
    set_delay(999, 0, 0);
    set_delay(10, 0, 7);
    $display("dup reads %0d, skipped reads %0d, coefficient updates %0d", dups, skips, updates);
    checks++;
    if (dups != 3 + 47 + 203 + 879 || skips != 3 + 130 + 989) begin
      failures++; $display("pointer adjustments do not match the delay steps");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
