// tb_corr_delay: calibration correlator measuring a delay from the phase
// slope of the cross spectrum, through the whole processor at default size.
//
// Antennas 0 and 4 receive a common white-noise component plus noise of
// their own; antenna 4 gets the common part 3 samples late, as if its cable
// were longer. Both boards send these antennas on their iBand2 links; a
// behavioural 64-point DFT stands in for the FFT and feeds the correlator,
// which integrates 128 spectra. From the read-out R[k] the delay is
//   tau = angle( sum_k R[k+1] * conj(R[k]) ) * 64 / (2*pi)   samples.
// Cases: equal SNR with the cable difference (tau ~ 3), the same after the
// delay line of antenna 0 is set 3 samples longer (tau ~ 0, flat phase), and
// a correlated component 9 dB below the noise, integrated over 1024 spectra
// (tau ~ 3 still found).
`timescale 1ns/1ps
module tb_corr_delay;
  import pa_pkg::*;

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
  logic [31:0] int_len = 128;
  logic [4:0] corr_addr = 0;
  logic signed [ACC_W-1:0] corr_re, corr_im;
  logic [31:0] dump_count;
  logic dump;
  logic [7:0] dup_read, skip_read, coef_update, coef_busy;
  int checks = 0, failures = 0;

  phased_array_top dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (90000) @(posedge clk);
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

  // ------------------------------------------------------------ sky and ADCs
  real camp = 40.0, namp = 40.0;
  real chist [8];
  int  hpos = 0;
  function automatic real urand();
    return real'($signed(16'($urandom))) / 32768.0;
  endfunction
  function automatic int q8(input real v);
    int i;
    i = $rtoi(v + (v >= 0 ? 0.5 : -0.5));
    return (i > 127) ? 127 : (i < -128) ? -128 : i;
  endfunction
  always @(negedge clk) begin
    adc = '0;
    for (int j = 0; j < 4; j++) begin
      chist[hpos] = camp * urand();
      adc[0][j] = sample_t'(q8(chist[hpos] + namp * urand()));
      adc[4][j] = sample_t'(q8(chist[(hpos + 5) % 8] + namp * urand()));   // 3 samples late
      hpos = (hpos + 1) % 8;
    end
  end

  // ------------------------------------------------------------- FFT model
  real cs [64], sn [64];
  int cap_a [64], cap_b [64];
  int ncap = 0;
  int qre_a [$], qim_a [$], qre_b [$], qim_b [$];
  bit first = 1;
  int fpos = 0;
  always @(negedge clk) if (!rst) begin
    for (int j = 0; j < 4; j++) begin
      cap_a[4 * ncap + j] = int'(corr_a[j]);
      cap_b[4 * ncap + j] = int'(corr_b[j]);
    end
    ncap++;
    if (ncap == 16) begin
      ncap = 0;
      for (int k = 0; k < 32; k++) begin
        real ar, ai, br, bi;
        ar = 0; ai = 0; br = 0; bi = 0;
        for (int n = 0; n < 64; n++) begin
          ar += cap_a[n] * cs[(k * n) % 64]; ai -= cap_a[n] * sn[(k * n) % 64];
          br += cap_b[n] * cs[(k * n) % 64]; bi -= cap_b[n] * sn[(k * n) % 64];
        end
        qre_a.push_back($rtoi(ar)); qim_a.push_back($rtoi(ai));
        qre_b.push_back($rtoi(br)); qim_b.push_back($rtoi(bi));
      end
    end
    fft_valid = 0; fft_sync = 0;
    if (qre_a.size() >= 2) begin
      fft_valid = 1;
      fft_sync = first && fpos == 0;
      for (int l = 0; l < 2; l++) begin
        fft_a_re[l] = 18'(qre_a.pop_front()); fft_a_im[l] = 18'(qim_a.pop_front());
        fft_b_re[l] = 18'(qre_b.pop_front()); fft_b_im[l] = 18'(qim_b.pop_front());
      end
      fpos = (fpos + 1) % 16;
      if (fpos == 0) first = 0;
    end
  end

  // wait for two fresh integrations, read the second one, estimate the delay
  task automatic measure(output real tau);
    int d0;
    real sr, si;
    real rr [32], ri [32];
    d0 = dump_count;
    while (dump_count < d0 + 2) @(negedge clk);
    for (int b = 0; b < 32; b++) begin
      corr_addr = 5'(b);
      @(negedge clk);
      @(negedge clk);
      rr[b] = real'(corr_re); ri[b] = real'(corr_im);
    end
    sr = 0; si = 0;
    for (int b = 1; b < 31; b++) begin
      sr += rr[b + 1] * rr[b] + ri[b + 1] * ri[b];
      si += ri[b + 1] * rr[b] - rr[b + 1] * ri[b];
    end
    tau = $atan2(si, sr) * 64.0 / (2.0 * 3.14159265358979);
  endtask

  initial begin
    real tau;
    for (int n = 0; n < 64; n++) begin
      cs[n] = $cos(2.0 * 3.14159265358979 * n / 64.0);
      sn[n] = $sin(2.0 * 3.14159265358979 * n / 64.0);
    end
    for (int c = 0; c < 8; c++) begin
      delay[c].coarse = 10'd10; delay[c].fine = 2'd0; delay[c].frac = 4'd0;
    end
    fft_a_re = '0; fft_a_im = '0; fft_b_re = '0; fft_b_im = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 8; c += 4)
      for (int f = 0; f < 10; f++)
        for (int k = 1; k <= 10; k++) begin
          @(negedge clk);
          coef_we = 1; coef_ant = 3'(c); coef_addr = 7'(f * 10 + k - 1); coef_wdata = cval(f, k);
        end
    @(negedge clk);
    coef_we = 0; coef_load = 8'h11;
    @(negedge clk);
    coef_load = 0;

    measure(tau);
    $display("cable difference 3 samples, 0 dB: tau = %f", tau);
    checks++;
    if (tau < 2.5 || tau > 3.5) failures++;

    delay[0].fine = 2'd3;                    // compensate: antenna 0 three samples later
    measure(tau);
    $display("compensated: tau = %f", tau);
    checks++;
    if (tau < -0.5 || tau > 0.5) failures++;

    delay[0].fine = 2'd0;
    camp = 40.0 * 0.355; namp = 40.0;        // correlated part 9 dB below the noise
    int_len = 1024;                          // and a longer integration
    measure(tau);
    $display("cable difference 3 samples, -9 dB: tau = %f", tau);
    checks++;
    if (tau < 2.25 || tau > 3.75) failures++;   // statistical: wider bound
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
