// ibobscope: snapshot memory for looking at a sample stream from the host.
//
// On an arm pulse the scope writes the next DEPTH words of its input (four
// samples each) into a block RAM, then stops and raises done. The control
// computer reads the snapshot back by word address through the processor
// bus; with DEPTH = 2048 a snapshot holds 8192 samples, 8 us of data.
//
// Following the paper: a block RAM mapped to the processor bus, control logic
// driving its address and write enable, about 8000 samples per channel. The
// arm/done handshake and DEPTH = 2048 are this design's choices.
//
// Timing: the word presented in the clock after arm is stored at address 0;
// done rises in the clock after the last write. Host reads return data one
// clock after host_addr. Re-arming during a capture restarts it.
module ibobscope
  import pa_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  word_t         din,
  input  logic          arm,
  output logic          done,
  input  logic [AW-1:0] host_addr,
  output word_t         host_rdata
);

  word_t         mem [DEPTH];
  logic [AW-1:0] waddr;
  logic          capturing;

  always_ff @(posedge clk) begin
    if (rst) begin
      capturing <= 1'b0;
      done      <= 1'b0;
      waddr     <= '0;
    end else if (arm) begin
      capturing <= 1'b1;
      done      <= 1'b0;
      waddr     <= '0;
    end else if (capturing) begin
      waddr <= waddr + 1'b1;
      if (waddr == AW'(DEPTH - 1)) begin
        capturing <= 1'b0;
        done      <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (capturing && !arm) mem[waddr] <= din;
    host_rdata <= mem[host_addr];
  end

endmodule
