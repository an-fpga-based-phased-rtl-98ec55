// tb_phased_array_top: end-to-end test of the 8-antenna phased array at its
// full size (1000-word delay FIFOs, 2048-word scopes, 32-channel correlator).
//
// One random sky signal x reaches antenna c with a geometric delay g_c of up
// to 3100 samples (about 3 us). The delays are programmed to compensate,
// D_c = 3200 - g_c samples. A reference model in this testbench computes the
// output of every delay line after each clock edge from that antenna's own
// input history (coarse, fine and fractional delay with the sinc
// coefficients), then the board sums with the Walsh signs, the back end sum
// and the two iBand2 streams. Checked bit-exact after every edge while the
// delays are settled:
//   dbe_out(w) = floor((ib1_0(w-1) + ib1_1(w-1)) / 2),
//   ib1_b(w)   = floor(sum_c (+-) dl_c(w-1) / 4),
//   corr_a(w)  = dl_sel0(w-1), corr_b(w) = dl_(4+sel1)(w-1).
// With integer compensation and no Walsh switching the phased sum must be the
// sky signal itself. Then: Walsh sign flips, fractional delays (coefficient
// reloads), a large coarse increase (read-pointer holds) and decrease
// (double steps), iBand2 selection changes, a scope snapshot on board 1, and
// the calibration correlator: 64-sample blocks of corr_a / corr_b are
// transformed by a behavioural 64-point DFT standing in for the FFT, fed
// back two bins per clock, integrated over 8 spectra and read out. With both
// streams taken from aligned antennas the cross power must have zero phase.
// Every mechanism is counted and one that never happens is a failure.
`timescale 1ns/1ps
module tb_phased_array_top;
  import pa_pkg::*;

  localparam int NW = 10000;
  localparam int D0 = 3200;
  localparam int ACC_W = 2 * 18 + 1 + 28;
  logic clk = 0, rst = 1;
  word_t  [7:0] adc;
  delay_t [7:0] delay;
  logic   [7:0] walsh = 0;
  logic coef_we = 0;
  logic [2:0] coef_ant = 0;
  logic [6:0] coef_addr = 0;
  coef_t coef_wdata = 0;
  logic [7:0] coef_load = 0;
  logic [1:0][1:0] iband2_sel = 0;
  logic [1:0] scope_arm = 0, scope_done;
  logic scope_board = 0;
  logic [2:0] scope_sel = 0;
  logic [10:0] scope_addr = 0;
  word_t scope_rdata, dbe_out, corr_a, corr_b;
  logic fft_valid = 0, fft_sync = 0;
  logic signed [1:0][17:0] fft_a_re, fft_a_im, fft_b_re, fft_b_im;
  logic [31:0] int_len = 8;
  logic [4:0] corr_addr = 0;
  logic signed [ACC_W-1:0] corr_re, corr_im;
  logic [31:0] dump_count;
  logic dump;
  logic [7:0] dup_read, skip_read, coef_update, coef_busy;

  int checks = 0, failures = 0;
  int x [4*NW];
  int a [8][4*NW];
  int g [8] = '{0, 211, 530, 1024, 1500, 2003, 2600, 3100};
  coef_t ctab [10][11];
  int dlh [8][NW][4];
  int ib1h [2][NW][4];
  logic [7:0] walh [NW];
  logic [1:0][1:0] selh [NW];

  // mechanism counters
  int n_dup = 0, n_skip = 0, n_update = 0, n_walsh = 0, n_fine = 0, n_frac = 0;
  int n_sel = 0, n_scope = 0, n_dump = 0, n_coherent = 0, n_zero_phase = 0;

  phased_array_top dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst) begin
    n_dup    += $countones(dup_read);
    n_skip   += $countones(skip_read);
    n_update += $countones(coef_update);
    if (dump) n_dump++;
  end

  function automatic coef_t cval(input int f, input int k);
    real r, h;
    r = real'(k - 4) - real'(f) / 10.0;
    h = (r == 0.0) ? 1.0 : $sin(3.14159265358979 * r) / (3.14159265358979 * r);
    return coef_t'($rtoi(h * 65536.0 + (h >= 0 ? 0.5 : -0.5)));
  endfunction

  // delay line output of antenna c after the edge that samples word w
  function automatic int dl_ref(input int c, input int w, input int j);
    longint s;
    s = 0;
    for (int k = 1; k <= 10; k++) begin
      int n;
      n = 4 * w + j - 40 - 4 * int'(delay[c].coarse) - int'(delay[c].fine) - k;
      if (n >= 0) s += longint'(ctab[delay[c].frac][k]) * longint'(a[c][n]);
    end
    s = (s + 32768) >>> 16;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return int'(s);
  endfunction

  function automatic int floordiv(input int v, input int d);
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  // ---------------------------------------------------------------- FFT model
  typedef struct { int re [32]; int im [32]; } spec_t;
  int cap_a [64], cap_b [64];
  int ncap = 0;
  bit capture = 0;
  spec_t qa [$], qb [$];
  int feed_pos = 0;
  bit first_sync = 1;
  int nspec_fed = 0;
  longint exp_re [32], exp_im [32];

  function automatic spec_t dft(input int s [64]);
    spec_t r;
    for (int k = 0; k < 32; k++) begin
      real re, im;
      re = 0.0; im = 0.0;
      for (int n = 0; n < 64; n++) begin
        re += real'(s[n]) * $cos(2.0 * 3.14159265358979 * k * n / 64.0);
        im -= real'(s[n]) * $sin(2.0 * 3.14159265358979 * k * n / 64.0);
      end
      r.re[k] = $rtoi(re + (re >= 0 ? 0.5 : -0.5));
      r.im[k] = $rtoi(im + (im >= 0 ? 0.5 : -0.5));
    end
    return r;
  endfunction

  int w = 0;
  task automatic run(input int nwords, input bit check);
    for (int i = 0; i < nwords; i++) begin
      @(negedge clk);
      walh[w] = walsh;
      selh[w] = iband2_sel;
      for (int c = 0; c < 8; c++)
        for (int j = 0; j < 4; j++) dlh[c][w][j] = dl_ref(c, w, j);
      if (w >= 2) begin
        for (int b = 0; b < 2; b++)
          for (int j = 0; j < 4; j++) begin
            int s;
            s = 0;
            for (int q = 0; q < 4; q++)
              s += walh[w][4*b+q] ? -dlh[4*b+q][w-1][j] : dlh[4*b+q][w-1][j];
            ib1h[b][w][j] = floordiv(s, 4);
          end
        if (check) begin
          if (walh[w] != 0) n_walsh++;
          for (int c = 0; c < 8; c++) begin
            if (delay[c].fine != 0) n_fine++;
            if (delay[c].frac != 0) n_frac++;
          end
          for (int j = 0; j < 4; j++) begin
            int e;
            e = floordiv(ib1h[0][w-1][j] + ib1h[1][w-1][j], 2);
            checks += 3;
            if (int'(dbe_out[j]) != e) begin
              failures++;
              if (failures < 10) $display("w=%0d lane %0d dbe_out %0d want %0d", w, j, dbe_out[j], e);
            end
            if (int'(corr_a[j]) != dlh[int'(selh[w][0])][w-1][j]) failures++;
            if (int'(corr_b[j]) != dlh[4 + int'(selh[w][1])][w-1][j]) failures++;
          end
        end
      end
      // correlator: collect 64-sample blocks, transform, queue the spectra
      if (capture) begin
        for (int j = 0; j < 4; j++) begin
          cap_a[4 * ncap + j] = int'(corr_a[j]);
          cap_b[4 * ncap + j] = int'(corr_b[j]);
        end
        ncap++;
        if (ncap == 16) begin
          qa.push_back(dft(cap_a));
          qb.push_back(dft(cap_b));
          ncap = 0;
        end
      end
      fft_valid = 0; fft_sync = 0;
      if (qa.size() > 0) begin
        fft_valid = 1;
        fft_sync  = first_sync && feed_pos == 0;
        for (int l = 0; l < 2; l++) begin
          int bin, ar, ai, br, bi;
          bin = 2 * feed_pos + l;
          ar = qa[0].re[bin]; ai = qa[0].im[bin];
          br = qb[0].re[bin]; bi = qb[0].im[bin];
          fft_a_re[l] = 18'(ar); fft_a_im[l] = 18'(ai);
          fft_b_re[l] = 18'(br); fft_b_im[l] = 18'(bi);
          if (nspec_fed % 8 == 0 && feed_pos == 0) begin
            exp_re[bin] = 0; exp_im[bin] = 0;
            if (l == 0) for (int q = 0; q < 32; q++) begin exp_re[q] = 0; exp_im[q] = 0; end
          end
          exp_re[bin] += longint'(ar) * br + longint'(ai) * bi;
          exp_im[bin] += longint'(ai) * br - longint'(ar) * bi;
        end
        feed_pos++;
        if (feed_pos == 16) begin
          feed_pos = 0; first_sync = 0; nspec_fed++;
          void'(qa.pop_front()); void'(qb.pop_front());
        end
      end
      w++;
      if (w >= NW) begin
        failures++;
        $display("input exhausted");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
      for (int c = 0; c < 8; c++)
        for (int j = 0; j < 4; j++) adc[c][j] = sample_t'(a[c][4 * w + j]);
    end
  endtask

  task automatic set_delay(input int c, input int dtot, input int frac);
    delay[c].coarse = 10'(dtot / 4);
    delay[c].fine   = 2'(dtot % 4);
    delay[c].frac   = 4'(frac);
  endtask

  initial begin
    for (int f = 0; f < 10; f++) for (int k = 1; k <= 10; k++) ctab[f][k] = cval(f, k);
    for (int n = 0; n < 4 * NW; n++) x[n] = $signed(8'($urandom)) / 3;
    for (int c = 0; c < 8; c++)
      for (int n = 0; n < 4 * NW; n++) a[c][n] = (n >= g[c]) ? x[n - g[c]] : 0;
    for (int c = 0; c < 8; c++) set_delay(c, D0 - g[c], 0);
    adc = '0;
    fft_a_re = '0; fft_a_im = '0; fft_b_re = '0; fft_b_im = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    // control computer: write the coefficient RAMs of all antennas
    for (int c = 0; c < 8; c++)
      for (int f = 0; f < 10; f++)
        for (int k = 1; k <= 10; k++) begin
          @(negedge clk);
          coef_we = 1; coef_ant = 3'(c); coef_addr = 7'(f * 10 + k - 1); coef_wdata = ctab[f][k];
        end
    @(negedge clk);
    coef_we = 0; coef_load = 8'hff;
    @(negedge clk);
    coef_load = 0;
    n_dup = 0; n_update = 0;
    // pointers settle after reset (up to 800 words), then check the beam
    run(900, 0);
    run(300, 1);
    // coherence: the phased sum is the sky signal, delayed 44 + D0 samples
    // plus the two adder registers
    for (int i = 0; i < 50; i++) begin
      run(1, 1);
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (int'(dbe_out[j]) != x[4 * (w - 3) + j - 44 - D0]) failures++;
        else n_coherent++;
      end
    end
    // Walsh 180-degree states and iBand2 selection
    walsh = 8'b1010_0101;
    run(100, 1);
    iband2_sel = {2'd3, 2'd1}; n_sel++;
    walsh = 8'b0001_1000;
    run(100, 1);
    // fractional delays on two antennas (coefficient sets reload)
    begin
      int u0;
      u0 = n_update;
      set_delay(2, D0 - g[2], 3);
      set_delay(6, D0 - g[6], 9);
      run(40, 0);
      run(100, 1);
      checks++;
      if (n_update - u0 != 2) begin failures++; $display("coef updates %0d", n_update - u0); end
    end
    // near-maximum coarse delay on antenna 7: the read pointer holds
    begin
      int d0, s0;
      d0 = n_dup;
      set_delay(7, 3996 + 2, 0);
      run(1000, 0);
      run(100, 1);
      checks++;
      if (n_dup - d0 != 999 - (D0 - g[7]) / 4) begin failures++; $display("dups %0d", n_dup - d0); end
      s0 = n_skip;
      set_delay(7, D0 - g[7], 0);
      run(1000, 0);
      run(100, 1);
      checks++;
      if (n_skip - s0 != 999 - (D0 - g[7]) / 4) begin failures++; $display("skips %0d", n_skip - s0); end
    end
    // snapshot of board 1; scope word s holds the outputs after edge wa-1+s
    begin
      int wa, bad;
      wa = w;
      scope_arm = 2'b10;
      run(1, 1);
      scope_arm = 0;
      run(2060, 1);
      checks++;
      if (scope_done != 2'b10) begin failures++; $display("scope_done %b", scope_done); end
      else n_scope++;
      bad = 0;
      scope_board = 1;
      for (int s = 0; s < 2048; s += 97)
        for (int c = 0; c <= 4; c++) begin
          scope_sel = 3'(c); scope_addr = 11'(s);
          run(1, 1);
          for (int j = 0; j < 4; j++) begin
            int e;
            e = (c < 4) ? dlh[4 + c][wa - 1 + s][j] : ib1h[1][wa + s][j];
            checks++;
            if (int'(scope_rdata[j]) != e) begin failures++; bad++; end
          end
        end
      if (bad) $display("scope mismatches %0d", bad);
    end
    // calibration correlator on antennas 0 and 4, both aligned and integer:
    // identical streams, so the integrated cross power has zero phase
    iband2_sel = {2'd0, 2'd0}; n_sel++;
    set_delay(2, D0 - g[2], 0);
    set_delay(6, D0 - g[6], 0);
    run(40, 0);
    capture = 1;
    run(16 * 16, 1);
    capture = 0;
    run(40, 1);
    checks++;
    if (dump_count != 2 || nspec_fed != 16) begin
      failures++; $display("dump_count %0d spectra %0d", dump_count, nspec_fed);
    end
    for (int b = 0; b < 32; b++) begin
      @(negedge clk);
      corr_addr = 5'(b);
      @(negedge clk);
      checks += 2;
      if (longint'(corr_re) != exp_re[b] || longint'(corr_im) != exp_im[b]) begin
        failures++;
        if (failures < 10) $display("bin %0d: %0d %0d want %0d %0d", b, corr_re, corr_im, exp_re[b], exp_im[b]);
      end
      if (corr_im != 0 || corr_re < 0) failures++;
      else n_zero_phase++;
    end
    $display("mechanisms: dup=%0d skip=%0d coef_update=%0d walsh=%0d fine=%0d frac=%0d sel=%0d scope=%0d dump=%0d coherent=%0d zero_phase=%0d",
             n_dup, n_skip, n_update, n_walsh, n_fine, n_frac, n_sel, n_scope, n_dump, n_coherent, n_zero_phase);
    if (n_dup == 0)  begin failures++; $display("no coarse hold"); end
    if (n_skip == 0) begin failures++; $display("no coarse double step"); end
    if (n_update == 0) begin failures++; $display("no coefficient update"); end
    if (n_walsh == 0) begin failures++; $display("no Walsh subtraction"); end
    if (n_fine == 0) begin failures++; $display("no fine delay"); end
    if (n_frac == 0) begin failures++; $display("no fractional delay"); end
    if (n_sel == 0) begin failures++; $display("no iBand2 selection change"); end
    if (n_scope == 0) begin failures++; $display("no snapshot"); end
    if (n_dump == 0) begin failures++; $display("no correlator dump"); end
    if (n_coherent == 0) begin failures++; $display("no coherent sum"); end
    if (n_zero_phase == 0) begin failures++; $display("no zero-phase cross power"); end
    checks += 11;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
