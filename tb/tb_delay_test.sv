// tb_delay_test: the delay-line experiment on one Beamform board.
//
// Two channels receive the same band-limited noise (white noise through a
// 41-tap windowed-sinc low-pass of 100 MHz at 1024 Msample/s), as if fed
// through equal cables; the other two channels are idle. Snapshots of 8192
// samples of both channels and of the board's sum are taken through the
// scopes and analysed here:
//   1. equal delays: the cross-correlation of the two channels peaks at lag 0
//      and the average has the full power of one channel;
//   2. channel 1 delayed by 26.5 ns (coarse 6, fine 2, frac 5 on top of the
//      common delay): the peak moves to lag 26 or 27 with the two lags nearly
//      equal, and the power of the average drops to about one half.
// The board's sum scope holds (ch0 + ch1) / 4, so twice it is the average.
`timescale 1ns/1ps
module tb_delay_test;
  import pa_pkg::*;

  localparam int NS = 8192;
  logic clk = 0, rst = 1;
  word_t  [3:0] adc;
  delay_t [3:0] delay;
  logic   [3:0] walsh = 0;
  logic coef_we = 0;
  logic [1:0] coef_ch = 0;
  logic [6:0] coef_addr = 0;
  coef_t coef_wdata = 0;
  logic [3:0] coef_load = 0;
  logic [1:0] iband2_sel = 0;
  word_t iband1, iband2, scope_rdata;
  logic scope_arm = 0, scope_done;
  logic [2:0] scope_sel = 0;
  logic [10:0] scope_addr = 0;
  logic [3:0] dup_read, skip_read, coef_update, coef_busy;
  int checks = 0, failures = 0;
  real hlp [41];
  int white [64];
  int wpos = 0;
  int c0 [NS], c1 [NS], sm [NS];

  beamform_ibob dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic coef_t cval(input int f, input int k);
    real r, h;
    r = real'(k - 4) - real'(f) / 10.0;
    h = (r == 0.0) ? 1.0 : $sin(3.14159265358979 * r) / (3.14159265358979 * r);
    return coef_t'($rtoi(h * 65536.0 + (h >= 0 ? 0.5 : -0.5)));
  endfunction

  // next band-limited noise sample
  function automatic int noise();
    real s;
    int v;
    white[wpos] = int'($signed(8'($urandom)));
    s = 0.0;
    for (int k = 0; k < 41; k++) s += hlp[k] * real'(white[(wpos - k + 64) % 64]);
    wpos = (wpos + 1) % 64;
    v = $rtoi(s * 1.6);
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  // free-running input: the same noise on channels 0 and 1
  always @(negedge clk) begin
    for (int j = 0; j < 4; j++) begin
      int v;
      v = noise();
      adc[0][j] = sample_t'(v);
      adc[1][j] = sample_t'(v);
      adc[2][j] = '0;
      adc[3][j] = '0;
    end
  end

  task automatic snapshot();
    @(negedge clk);
    scope_arm = 1;
    @(negedge clk);
    scope_arm = 0;
    repeat (2100) @(negedge clk);
    checks++;
    if (!scope_done) begin failures++; $display("scope not done"); end
    for (int s = 0; s < 3; s++)
      for (int a = 0; a < NS / 4; a++) begin
        scope_sel = (s == 2) ? 3'd4 : 3'(s);
        scope_addr = 11'(a);
        @(negedge clk);
        @(negedge clk);
        for (int j = 0; j < 4; j++) begin
          if (s == 0) c0[4 * a + j] = int'(scope_rdata[j]);
          else if (s == 1) c1[4 * a + j] = int'(scope_rdata[j]);
          else sm[4 * a + j] = int'(scope_rdata[j]);
        end
      end
  endtask

  // lag of the cross-correlation peak (c1 against c0) and the power ratio
  task automatic analyse(output int peak, output real r_pk, output real r_nb, output real pwr);
    real best, p0, ps;
    real r [81];
    best = -1.0e30;
    peak = 0;
    for (int lag = -40; lag <= 40; lag++) begin
      real acc;
      acc = 0.0;
      for (int n = 64; n < NS - 64; n++) acc += real'(c0[n]) * real'(c1[n + lag]);
      r[lag + 40] = acc;
      if (acc > best) begin best = acc; peak = lag; end
    end
    r_pk = r[peak + 40];
    r_nb = (r[peak + 39] > r[peak + 41]) ? r[peak + 39] : r[peak + 41];
    p0 = 0.0; ps = 0.0;
    for (int n = 0; n < NS; n++) begin
      p0 += real'(c0[n]) * real'(c0[n]);
      ps += 4.0 * real'(sm[n]) * real'(sm[n]);
    end
    pwr = ps / p0;
  endtask

  initial begin
    int peak;
    real rpk, rnb, pwr;
    // low-pass: cutoff 100 MHz of 1024 Msample/s, Hamming window
    for (int k = 0; k < 41; k++) begin
      real t, h;
      t = real'(k - 20);
      h = (t == 0.0) ? 2.0 * 0.0977 : $sin(2.0 * 3.14159265358979 * 0.0977 * t) / (3.14159265358979 * t);
      hlp[k] = h * (0.54 - 0.46 * $cos(2.0 * 3.14159265358979 * k / 40.0));
    end
    for (int i = 0; i < 64; i++) white[i] = 0;
    for (int c = 0; c < 4; c++) begin
      delay[c].coarse = 10'd10; delay[c].fine = 2'd0; delay[c].frac = 4'd0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 4; c++)
      for (int f = 0; f < 10; f++)
        for (int k = 1; k <= 10; k++) begin
          @(negedge clk);
          coef_we = 1; coef_ch = 2'(c); coef_addr = 7'(f * 10 + k - 1); coef_wdata = cval(f, k);
        end
    @(negedge clk);
    coef_we = 0; coef_load = 4'hf;
    @(negedge clk);
    coef_load = 0;
    repeat (100) @(negedge clk);

    // 1. aligned channels
    snapshot();
    analyse(peak, rpk, rnb, pwr);
    $display("aligned: peak lag %0d, sum power / channel power %f", peak, pwr);
    checks += 2;
    if (peak != 0) failures++;
    if (pwr < 0.95 || pwr > 1.05) failures++;

    // 2. channel 1 delayed by 26.5 samples
    delay[1].coarse = 10'd16; delay[1].fine = 2'd2; delay[1].frac = 4'd5;
    repeat (100) @(negedge clk);
    snapshot();
    analyse(peak, rpk, rnb, pwr);
    $display("26.5 ns: peak lag %0d, neighbour/peak %f, sum power / channel power %f", peak, rnb / rpk, pwr);
    checks += 3;
    if (peak != 26 && peak != 27) failures++;
    if (rnb / rpk < 0.9) failures++;
    if (pwr > 0.75) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
