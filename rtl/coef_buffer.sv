// coef_buffer: coefficient RAM and double buffer of the super-fine delay FIR.
//
// The RAM holds NSETS sets of TAPS coefficients, set f being the fractional
// delay filter for f/10 of a sample; word f*TAPS + (k-1) is C_k of set f. The
// control computer writes the RAM through the host port. When the selected
// set changes, or on a load strobe, the control logic reads the TAPS words of
// the set out of the RAM one per clock into a serial-load shift register,
// last coefficient first. When the shift register is full it sends a one-clock
// update pulse that parallel-loads all TAPS active coefficient registers, so
// the filter switches to the new set in a single clock while the old set
// stays in use during the load.
//
// Following the paper: RAM, control, serial shift register, update pulse and
// parallel-loaded active registers (its double buffering figure); 10 sets of
// 10 taps. The RAM's host write port, the 1-clock RAM read, the load strobe
// and the reload after reset are this design's choices.
//
// Timing: update rises TAPS+3 clock edges after the edge that samples the
// request (a change of `set`, or `load`) and lasts one clock; `coefs` takes
// the new set at the following edge. A request
// made during a load is served after it. Synchronous active-high reset clears
// the active coefficients and requests a load of the current set.
module coef_buffer
  import pa_pkg::*;
#(
  parameter int unsigned TAPS  = FIR_TAPS,
  parameter int unsigned NSETS = FRAC_SETS,
  localparam int unsigned DEPTH = TAPS * NSETS,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = $clog2(NSETS),
  localparam int unsigned CW    = $clog2(TAPS + 1)
) (
  input  logic             clk,
  input  logic             rst,
  // host (control computer) write port
  input  logic             host_we,
  input  logic [AW-1:0]    host_addr,
  input  coef_t            host_wdata,
  // selection
  input  logic [SW-1:0]    set,       // coefficient set (fraction in tenths)
  input  logic             load,      // reload the selected set
  output coef_t [TAPS-1:0] coefs,     // active coefficients, [k-1] = C_k
  output logic             update,    // parallel load pulse
  output logic             busy
);

  typedef enum logic [1:0] {IDLE, READ, UPDATE} state_t;

  coef_t            ram [DEPTH];
  coef_t            rdata;
  coef_t [TAPS-1:0] shreg;
  state_t           state;
  logic [CW-1:0]    cnt;        // words requested
  logic [CW-1:0]    got;        // words shifted in
  logic [SW-1:0]    cur_set, last_set;
  logic             pending;
  logic             rd_valid;
  logic [AW-1:0]    rd_addr;

  always_ff @(posedge clk) begin
    if (host_we) ram[host_addr] <= host_wdata;
    rdata <= ram[rd_addr];
  end

  always_comb rd_addr = AW'(cur_set) * AW'(TAPS) + AW'(TAPS - 1) - AW'(cnt);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= IDLE;
      pending  <= 1'b1;
      last_set <= set;
      cur_set  <= '0;
      cnt      <= '0;
      got      <= '0;
      rd_valid <= 1'b0;
      coefs    <= '0;
      update   <= 1'b0;
      shreg    <= '0;
    end else begin
      update   <= 1'b0;
      last_set <= set;
      if (load || set != last_set) pending <= 1'b1;
      rd_valid <= 1'b0;
      if (rd_valid) begin
        shreg[0] <= rdata;
        for (int k = 1; k < int'(TAPS); k++) shreg[k] <= shreg[k-1];
        got <= got + 1'b1;
      end
      unique case (state)
        IDLE: if (pending && !(load || set != last_set)) begin
          pending <= 1'b0;
          cur_set <= set;
          cnt     <= '0;
          got     <= '0;
          state   <= READ;
        end
        READ: begin
          if (cnt < CW'(TAPS)) begin
            cnt      <= cnt + 1'b1;
            rd_valid <= 1'b1;
          end
          if (got == CW'(TAPS)) begin
            update <= 1'b1;
            state  <= UPDATE;
          end
        end
        UPDATE: begin
          coefs <= shreg;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE) || pending;

  a_update_onehot: assert property (@(posedge clk) disable iff (rst)
    update |-> state == UPDATE);

endmodule
