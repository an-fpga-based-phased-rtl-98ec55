// tb_cmult_conj: self-checking test of the conjugate complex multiplier.
//
// Random 18-bit complex inputs, plus full-scale corners; one clock later the
// output must be a * conj(b) = (ar*br + ai*bi) + j (ai*br - ar*bi), exactly,
// and out_valid must follow in_valid.
`timescale 1ns/1ps
module tb_cmult_conj;
  logic clk = 0;
  logic in_valid, out_valid;
  logic signed [17:0] a_re, a_im, b_re, b_im;
  logic signed [36:0] p_re, p_im;
  int checks = 0, failures = 0;

  cmult_conj #(.W(18)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      longint er, ei;
      @(negedge clk);
      in_valid = it[0];
      if (it < 2) begin
        a_re = -18'sd131072; a_im = -18'sd131072; b_re = -18'sd131072;
        b_im = (it == 0) ? -18'sd131072 : 18'sd131071;
      end else begin
        a_re = 18'($urandom); a_im = 18'($urandom); b_re = 18'($urandom); b_im = 18'($urandom);
      end
      er = longint'(a_re) * b_re + longint'(a_im) * b_im;
      ei = longint'(a_im) * b_re - longint'(a_re) * b_im;
      @(negedge clk);
      checks += 3;
      if (longint'(p_re) != er) failures++;
      if (longint'(p_im) != ei) failures++;
      if (out_valid != it[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
