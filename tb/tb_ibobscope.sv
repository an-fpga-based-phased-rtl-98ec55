// tb_ibobscope: self-checking test of the snapshot memory.
//
// Streams a word counter, arms the scope, waits for done and reads back all
// 2048 words through the host port: word a must be the input word presented
// a clocks after the arm pulse, and done must rise 2048 clocks after arm.
// A second capture must overwrite the first.
`timescale 1ns/1ps
module tb_ibobscope;
  import pa_pkg::*;

  logic clk = 0, rst = 1;
  word_t din, host_rdata;
  logic arm = 0, done;
  logic [10:0] host_addr = 0;
  int checks = 0, failures = 0;
  int unsigned cnt = 0;

  ibobscope #(.DEPTH(2048)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    cnt <= cnt + 1;
    din <= word_t'(cnt * 7 + 3);
  end

  task automatic capture();
    int unsigned first;
    int n;
    @(negedge clk);
    arm = 1;
    @(negedge clk);
    arm = 0;
    #0.1 first = din;           // the word presented in the clock after arm
    n = 0;
    while (!done && n < 5000) begin @(negedge clk); n++; end
    checks++;
    if (n != 2048) begin failures++; $display("done after %0d clocks", n); end
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk);
      host_addr = 11'(a);
      @(negedge clk);
      checks++;
      if (host_rdata !== word_t'(first + 7 * a)) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %0d want %0d", a, host_rdata, first + 7 * a);
      end
    end
  endtask

  initial begin
    din = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    capture();
    capture();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
