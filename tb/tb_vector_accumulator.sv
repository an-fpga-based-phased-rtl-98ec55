// tb_vector_accumulator: self-checking test of the spectral integrator.
//
// Streams random 37-bit complex spectra of 32 bins, two bins per clock with
// idle gaps between spectra, marked by in_sync. With int_len = 5 it checks,
// after each of three integrations, the dump pulse, the dump counter and all
// 32 integrated bins read back through the host port against sums kept by
// the testbench; then it changes int_len to 1 and checks a single-spectrum
// dump. The first integration starts after a spectrum fed without in_sync,
// which must be ignored.
`timescale 1ns/1ps
module tb_vector_accumulator;
  localparam int NCHAN = 32, LANES = 2, IN_W = 37, ACC_W = IN_W + 28;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_sync = 0;
  logic signed [LANES-1:0][IN_W-1:0] in_re, in_im;
  logic [31:0] int_len = 5;
  logic [4:0] host_addr = 0;
  logic signed [ACC_W-1:0] host_re, host_im;
  logic [31:0] dump_count;
  logic dump;
  int checks = 0, failures = 0, dumps = 0;
  longint sum_re [NCHAN], sum_im [NCHAN];

  vector_accumulator #(.NCHAN(NCHAN), .LANES(LANES), .IN_W(IN_W), .ACC_W(ACC_W)) dut (.*);

  always #2 clk = ~clk;
  always @(negedge clk) if (dump) dumps++;   // sampled away from the active edge

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic spectrum(input bit with_sync, input bit count);
    for (int a = 0; a < NCHAN / LANES; a++) begin
      @(negedge clk);
      in_valid = 1;
      in_sync  = with_sync && (a == 0);
      for (int l = 0; l < LANES; l++) begin
        longint vr, vi;
        vr = longint'($signed($urandom)) * 16 + longint'($urandom_range(0, 15));
        vi = longint'($signed($urandom)) * 16 - longint'($urandom_range(0, 15));
        in_re[l] = IN_W'(vr);
        in_im[l] = IN_W'(vi);
        if (count) begin
          sum_re[a * LANES + l] += vr;
          sum_im[a * LANES + l] += vi;
        end
      end
    end
    @(negedge clk);
    in_valid = 0; in_sync = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic check_result(input int want_dumps);
    checks += 2;
    if (dumps != want_dumps) begin failures++; $display("dumps %0d want %0d", dumps, want_dumps); end
    if (dump_count != 32'(want_dumps)) failures++;
    for (int b = 0; b < NCHAN; b++) begin
      @(negedge clk);
      host_addr = 5'(b);
      @(negedge clk);
      checks += 2;
      if (longint'(host_re) != sum_re[b] || longint'(host_im) != sum_im[b]) begin
        failures++;
        if (failures < 10) $display("bin %0d: got %0d %0d want %0d %0d", b, host_re, host_im, sum_re[b], sum_im[b]);
      end
      if (dump) failures++;   // no dump while idle
    end
    for (int b = 0; b < NCHAN; b++) begin sum_re[b] = 0; sum_im[b] = 0; end
  endtask

  initial begin
    for (int b = 0; b < NCHAN; b++) begin sum_re[b] = 0; sum_im[b] = 0; end
    in_re = '0; in_im = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    spectrum(0, 0);                       // not yet synchronised: ignored
    for (int i = 1; i <= 3; i++) begin
      spectrum(1, 1);
      for (int s = 1; s < 5; s++) spectrum(0, 1);
      check_result(i);
    end
    int_len = 1;
    spectrum(1, 1);
    check_result(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
