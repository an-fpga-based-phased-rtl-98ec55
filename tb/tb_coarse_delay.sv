// tb_coarse_delay: self-checking test of the coarse (whole-word) delay FIFO.
//
// Feeds a word counter and checks, once the occupancy has settled, that the
// output after every clock edge is the input word from exactly C edges
// earlier. Steps the delay up (read holds), down (read skips), below the
// minimum of 3 (clamped) and to the largest value, and checks that the FIFO
// settles at one word per clock: a change of k words takes k clocks.
`timescale 1ns/1ps
module tb_coarse_delay;
  import pa_pkg::*;

  localparam int unsigned DEPTH = 1000;
  logic clk = 0, rst = 1;
  word_t din, dout;
  logic [9:0] delay, occupancy;
  logic dup_read, skip_read;
  int checks = 0, failures = 0;
  int unsigned cnt = 0;
  int dups = 0, skips = 0;

  coarse_delay #(.DEPTH(DEPTH), .MIN_DELAY(3)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    dups  += int'(dup_read);
    skips += int'(skip_read);
  end

  // One clock: check (optionally), then present the next counter word.
  task automatic step(input bit check, input int unsigned c);
    @(negedge clk);
    if (check) begin
      checks++;
      if (dout !== word_t'(din - c)) begin
        failures++;
        if (failures < 10) $display("mismatch: din=%0d dout=%0d C=%0d", din, dout, c);
      end
    end
    cnt++;
    din = word_t'(cnt);
  endtask

  task automatic run_delay(input int unsigned prog, input int unsigned eff);
    int d0, s0, settle;
    d0 = dups; s0 = skips;
    delay = 10'(prog);
    settle = 0;
    // wait until the occupancy reaches the target, counting clocks
    while (occupancy != 10'(eff)) begin
      step(0, eff);
      settle++;
      if (settle > 2000) break;
    end
    checks++;
    if (occupancy != 10'(eff)) failures++;
    repeat (40) step(1, eff);
    $display("delay %0d (effective %0d): settled in %0d clocks, dups %0d skips %0d",
             prog, eff, settle, dups - d0, skips - s0);
  endtask

  int unsigned prev;
  initial begin
    din = '0; delay = 10'd10;
    repeat (3) @(negedge clk);
    rst = 0;
    prev = 0;
    // from reset the occupancy grows from 0 to 10, one word per clock
    run_delay(10, 10);
    checks++; if (dups != 10) begin failures++; $display("dups from reset %0d", dups); end
    begin
      int d0;
      d0 = dups;
      run_delay(13, 13);
      checks++; if (dups - d0 != 3) failures++;
    end
    begin
      int s0;
      s0 = skips;
      run_delay(5, 5);
      checks++; if (skips - s0 != 8) failures++;
    end
    run_delay(1, 3);          // below the minimum: clamped to 3
    run_delay(999, 999);      // largest delay of a 1000-word FIFO
    begin
      int s0;
      s0 = skips;
      run_delay(400, 400);
      checks++; if (skips - s0 != 599) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
