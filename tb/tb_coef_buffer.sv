// tb_coef_buffer: self-checking test of the double-buffered coefficient store.
//
// Writes 10 random sets of 10 coefficients through the host port, then for a
// sequence of set selections checks that (a) the active coefficients do not
// change while a new set is being read out, (b) the update pulse comes
// TAPS+3 = 13 clocks after the edge that samples the request and lasts one
// clock, (c) the active coefficients change in the clock after it and equal
// RAM words set*10 + k, and (d) the load strobe reloads a rewritten set.
`timescale 1ns/1ps
module tb_coef_buffer;
  import pa_pkg::*;

  logic clk = 0, rst = 1;
  logic host_we = 0;
  logic [6:0] host_addr = '0;
  coef_t host_wdata = '0;
  logic [3:0] set = '0;
  logic load = 0;
  coef_t [9:0] coefs;
  logic update, busy;
  int checks = 0, failures = 0;
  coef_t model [100];

  coef_buffer #(.TAPS(10), .NSETS(10)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input coef_t v);
    @(negedge clk);
    host_we = 1; host_addr = 7'(a); host_wdata = v;
    model[a] = v;
    @(negedge clk);
    host_we = 0;
  endtask

  // Apply a request in the current cycle and follow it to the update.
  task automatic request(input int s, input bit use_load);
    coef_t [9:0] prev_coefs;
    int n;
    @(negedge clk);
    prev_coefs = coefs;
    if (use_load) load = 1; else set = 4'(s);
    @(negedge clk);            // the request was sampled at the edge prev_coefs
    load = 0;
    n = 1;
    while (!update && n < 40) begin
      checks++;
      if (coefs !== prev_coefs) begin failures++; $display("coefs changed early"); end
      @(negedge clk);
      n++;
    end
    checks++;
    if (n - 1 != 13) begin failures++; $display("update %0d edges after the request edge, want 13", n - 1); end
    @(negedge clk);
    checks++;
    if (update) begin failures++; $display("update longer than one clock"); end
    for (int k = 0; k < 10; k++) begin
      checks++;
      if (coefs[k] !== model[s * 10 + k]) begin
        failures++;
        $display("set %0d C%0d: got %0d want %0d", s, k + 1, coefs[k], model[s * 10 + k]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int a = 0; a < 100; a++) wr(a, coef_t'($urandom));
    request(3, 0);
    request(9, 0);
    request(0, 0);
    request(5, 0);
    for (int k = 0; k < 10; k++) wr(50 + k, coef_t'($urandom));
    request(5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
