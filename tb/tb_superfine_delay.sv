// tb_superfine_delay: self-checking test of the fractional-delay filter.
//
// Loads the ten fractional-delay coefficient sets, C_k(f) = round(2^16 *
// sinc(k - 4 - f/10)) for k = 1..10 and f = 0..9, through the host port and
// runs a random sample stream through the filter for several fractions. The
// reference is a plain FIR computed in the testbench: after the edge that
// samples word w, output lane j must equal
//   sat8( (sum_k C_k(f) * x[4w + j - 31 - k] + 2^15) >> 16 ).
// For f = 0 this is x[4w + j - 35] exactly, the 3-sample reference delay.
// Each change of fraction must produce one coefficient update pulse.
`timescale 1ns/1ps
module tb_superfine_delay;
  import pa_pkg::*;

  localparam int NW = 1500;
  logic clk = 0, rst = 1;
  word_t din, dout;
  logic [3:0] frac = 0;
  logic coef_load = 0, host_we = 0;
  logic [6:0] host_addr = 0;
  coef_t host_wdata = 0;
  logic coef_update, coef_busy;
  int checks = 0, failures = 0, updates = 0;
  int x [4*NW];

  superfine_delay dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && coef_update) updates++;

  function automatic coef_t cval(input int f, input int k);
    real a, h;
    a = real'(k - 4) - real'(f) / 10.0;
    h = (a == 0.0) ? 1.0 : $sin(3.14159265358979 * a) / (3.14159265358979 * a);
    return coef_t'($rtoi(h * 65536.0 + (h >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic sample_t ref_out(input int w, input int j, input int f);
    longint s = 0;
    for (int k = 1; k <= 10; k++) begin
      int n = 4 * w + j - 31 - k;
      if (n >= 0) s += longint'(cval(f, k)) * longint'(x[n]);
    end
    s = (s + 32768) >>> 16;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return sample_t'(s);
  endfunction

  int w = 0;
  task automatic run(input int nwords, input int f, input bit check);
    for (int i = 0; i < nwords; i++) begin
      @(negedge clk);
      if (check && w > 12) begin
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (dout[j] !== ref_out(w, j, f)) begin
            failures++;
            if (failures < 10) $display("f=%0d w=%0d lane %0d: got %0d want %0d",
                                        f, w, j, dout[j], ref_out(w, j, f));
          end
        end
      end
      w++;
      for (int j = 0; j < 4; j++) din[j] = sample_t'(x[4 * w + j]);
    end
  endtask

  task automatic change(input int f);
    int u0;
    u0 = updates;
    frac = 4'(f);
    while (updates == u0) run(1, f, 0);
    run(14, f, 0);             // the pipeline still holds mixed outputs
    checks++;
    if (updates != u0 + 1) begin failures++; $display("updates %0d", updates - u0); end
    run(150, f, 1);
  endtask

  initial begin
    for (int n = 0; n < 4 * NW; n++) x[n] = $signed(8'($urandom)) / 2;
    din = '0;
    for (int j = 0; j < 4; j++) din[j] = sample_t'(x[j]);
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 10; f++)
      for (int k = 1; k <= 10; k++) begin
        @(negedge clk);
        host_we = 1; host_addr = 7'(f * 10 + k - 1); host_wdata = cval(f, k);
      end
    @(negedge clk);
    host_we = 0;
    coef_load = 1;
    @(negedge clk);
    coef_load = 0;
    run(30, 0, 0);
    run(150, 0, 1);
    change(3);
    change(5);
    change(9);
    change(1);
    change(0);
    $display("coefficient updates: %0d", updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
