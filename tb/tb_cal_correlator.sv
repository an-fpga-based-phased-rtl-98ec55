// tb_cal_correlator: self-checking test of the correlator's X stage.
//
// Feeds random 18-bit complex spectra of 32 bins (two bins per clock) for
// both streams, integrates int_len = 4 spectra and compares every bin read
// back through the host port with sum over spectra of A * conj(B), computed
// in the testbench. Runs two integrations and checks the dump counter.
`timescale 1ns/1ps
module tb_cal_correlator;
  localparam int NCHAN = 32, LANES = 2, W = 18, ACC_W = 2 * W + 1 + 28;
  logic clk = 0, rst = 1;
  logic fft_valid = 0, fft_sync = 0;
  logic signed [LANES-1:0][W-1:0] a_re, a_im, b_re, b_im;
  logic [31:0] int_len = 4;
  logic [4:0] host_addr = 0;
  logic signed [ACC_W-1:0] host_re, host_im;
  logic [31:0] dump_count;
  logic dump;
  int checks = 0, failures = 0;
  longint sum_re [NCHAN], sum_im [NCHAN];

  cal_correlator #(.NCHAN(NCHAN), .LANES(LANES), .W(W)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic spectrum(input bit with_sync);
    for (int a = 0; a < NCHAN / LANES; a++) begin
      @(negedge clk);
      fft_valid = 1;
      fft_sync  = with_sync && (a == 0);
      for (int l = 0; l < LANES; l++) begin
        longint ar, ai, br, bi;
        ar = $signed(W'($urandom)); ai = $signed(W'($urandom));
        br = $signed(W'($urandom)); bi = $signed(W'($urandom));
        a_re[l] = W'(ar); a_im[l] = W'(ai); b_re[l] = W'(br); b_im[l] = W'(bi);
        sum_re[a * LANES + l] += ar * br + ai * bi;
        sum_im[a * LANES + l] += ai * br - ar * bi;
      end
    end
    @(negedge clk);
    fft_valid = 0; fft_sync = 0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    a_re = '0; a_im = '0; b_re = '0; b_im = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int it = 1; it <= 2; it++) begin
      for (int b = 0; b < NCHAN; b++) begin sum_re[b] = 0; sum_im[b] = 0; end
      spectrum(1);
      repeat (3) spectrum(0);
      repeat (3) @(negedge clk);
      checks++;
      if (dump_count != 32'(it)) begin failures++; $display("dump_count %0d", dump_count); end
      for (int b = 0; b < NCHAN; b++) begin
        @(negedge clk);
        host_addr = 5'(b);
        @(negedge clk);
        checks++;
        if (longint'(host_re) != sum_re[b] || longint'(host_im) != sum_im[b]) begin
          failures++;
          if (failures < 10) $display("bin %0d: got %0d %0d want %0d %0d", b, host_re, host_im, sum_re[b], sum_im[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
