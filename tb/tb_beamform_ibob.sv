// tb_beamform_ibob: self-checking test of one Beamform board.
//
// One random "sky" signal x reaches the four antennas with different
// geometric delays g_c (whole and fractional samples are exercised). The
// delay lines are programmed to compensate, D_c = D0 - g_c. Checked after
// every clock edge w, against references computed in the testbench from each
// channel's own input history (dl_c(w) = the delay line formula of
// tb_delay_line):
//   iband1(w) = floor( sum_c (+-) dl_c(w-1) / 4 ), sign from the Walsh bit,
//   iband2(w) = dl_sel(w-1).
// With integer compensation and no Walsh switching, iband1 must also equal
// the sky signal itself, delayed by 44 + 4*D0... samples: the beam is phased.
// Then the Walsh states, the iBand2 selection and the delays are changed,
// and a snapshot of all four channels and the sum is captured and read back.
`timescale 1ns/1ps
module tb_beamform_ibob;
  import pa_pkg::*;

  localparam int NW = 6000;
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
  int x [4*NW];
  int a [4][4*NW];
  int g [4] = '{0, 37, 130, 257};     // geometric delays in samples

  beamform_ibob #(.DEPTH(1000), .SCOPE_DEPTH(2048)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
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

  // delay line output of channel c after the edge that samples word w
  function automatic int dl_ref(input int c, input int w, input int j);
    longint s = 0;
    for (int k = 1; k <= 10; k++) begin
      int n = 4 * w + j - 40 - 4 * int'(delay[c].coarse) - int'(delay[c].fine) - k;
      if (n >= 0) s += longint'(cval(int'(delay[c].frac), k)) * longint'(a[c][n]);
    end
    s = (s + 32768) >>> 16;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return int'(s);
  endfunction

  function automatic int floordiv(input int v, input int d);
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  int w = 0;
  int coherent = 0;
  task automatic run(input int nwords, input bit check, input bit expect_sky);
    for (int i = 0; i < nwords; i++) begin
      @(negedge clk);
      if (check) begin
        for (int j = 0; j < 4; j++) begin
          int s;
          s = 0;
          for (int c = 0; c < 4; c++) s += walsh[c] ? -dl_ref(c, w - 1, j) : dl_ref(c, w - 1, j);
          s = floordiv(s, 4);
          checks += 2;
          if (int'(iband1[j]) != s) begin
            failures++;
            if (failures < 10) $display("w=%0d lane %0d iband1 %0d want %0d", w, j, iband1[j], s);
          end
          if (int'(iband2[j]) != dl_ref(int'(iband2_sel), w - 1, j)) begin
            failures++;
            if (failures < 10) $display("w=%0d lane %0d iband2 %0d", w, j, iband2[j]);
          end
          if (expect_sky) begin
            checks++;
            if (int'(iband1[j]) != x[4 * (w - 1) + j - 44 - 4 * 100]) failures++;
            else coherent++;
          end
        end
      end
      w++;
      for (int c = 0; c < 4; c++)
        for (int j = 0; j < 4; j++) adc[c][j] = sample_t'(a[c][4 * w + j]);
    end
  endtask

  // total compensation D0 = 400 samples; channel delay = D0 - g_c (+ frac)
  task automatic set_delays(input int extra_frac);
    for (int c = 0; c < 4; c++) begin
      int dtot = 400 - g[c];
      delay[c].coarse = 10'(dtot / 4);
      delay[c].fine   = 2'(dtot % 4);
      delay[c].frac   = 4'((c == 2) ? extra_frac : 0);
    end
  endtask

  initial begin
    for (int n = 0; n < 4 * NW; n++) x[n] = $signed(8'($urandom)) / 3;
    for (int c = 0; c < 4; c++)
      for (int n = 0; n < 4 * NW; n++) a[c][n] = (n >= g[c]) ? x[n - g[c]] : 0;
    set_delays(0);
    adc = '0;
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
    run(200, 0, 0);
    run(200, 1, 1);                         // phased: the sum is the sky signal
    $display("coherent lanes %0d", coherent);
    walsh = 4'b0101;
    run(100, 1, 0);
    iband2_sel = 2;
    run(100, 1, 0);
    set_delays(6);                          // fractional delay on channel 2
    run(60, 0, 0);
    run(100, 1, 0);
    iband2_sel = 3;
    walsh = 4'b1000;
    run(50, 1, 0);
    // snapshot: arm is sampled at edge wa; scope word s holds the outputs after edge wa-1+s
    begin
      int wa;
      int bad;
      wa = w;
      scope_arm = 1;
      run(1, 1, 0);
      scope_arm = 0;
      run(2100, 1, 0);
      checks++;
      if (!scope_done) begin failures++; $display("scope not done"); end
      bad = 0;
      for (int s = 0; s < 2048; s += 61) begin
        for (int c = 0; c <= 4; c++) begin
          @(negedge clk);
          scope_sel = 3'(c); scope_addr = 11'(s);
          @(negedge clk);
          for (int j = 0; j < 4; j++) begin
            int e;
            if (c < 4) e = dl_ref(c, wa - 1 + s, j);
            else begin
              e = 0;
              for (int q = 0; q < 4; q++) e += walsh[q] ? -dl_ref(q, wa - 1 + s, j) : dl_ref(q, wa - 1 + s, j);
              e = floordiv(e, 4);
            end
            checks++;
            if (int'(scope_rdata[j]) != e) begin failures++; bad++; end
          end
        end
      end
      if (bad) $display("scope mismatches %0d", bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
