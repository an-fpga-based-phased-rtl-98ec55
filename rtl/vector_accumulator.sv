// vector_accumulator: integrates cross-power spectra bin by bin.
//
// Spectra of NCHAN frequency channels arrive as LANES bins per clock, bins
// l, l+LANES, l+2*LANES ... on lane l, marked by in_valid; in_sync marks the
// clock that carries bins 0..LANES-1 of a spectrum. Each bin is added into an
// accumulation memory. After int_len spectra the completed sums are written
// into a result memory that the control computer reads by address, the
// dump counter is incremented, and the next integration starts from zero in
// the same clock, so no spectrum is lost. Up to 2^32-1 spectra can be
// integrated; with a spectrum every 16 clocks at 256 MHz, 16 s is 2.56e8.
//
// Following the paper: a vector accumulator integrating spectra in block RAM
// for up to about 16 s, with the result in CPU-mapped memory. The sync
// marker, the dump counter, the lane arrangement and the widths are this
// design's choices. Accumulator width ACC_W = IN_W + 28 holds 2^28 full
// scale products.
//
// Timing: a spectrum is accumulated as it streams; the result memory holds
// the last completed integration from the clock after its last bin. Host
// reads return data one clock after host_addr. Synchronous active-high reset
// restarts the integration (in_sync must then precede the next spectrum).
module vector_accumulator #(
  parameter int unsigned NCHAN = 32,
  parameter int unsigned LANES = 2,
  parameter int unsigned IN_W  = 37,
  parameter int unsigned ACC_W = IN_W + 28,
  localparam int unsigned DEPTH = NCHAN / LANES,
  localparam int unsigned DAW   = $clog2(DEPTH),
  localparam int unsigned HAW   = $clog2(NCHAN)
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              in_valid,
  input  logic                              in_sync,
  input  logic signed [LANES-1:0][IN_W-1:0] in_re,
  input  logic signed [LANES-1:0][IN_W-1:0] in_im,
  input  logic [31:0]                       int_len,   // spectra per dump
  input  logic [HAW-1:0]                    host_addr, // bin number
  output logic signed [ACC_W-1:0]           host_re,
  output logic signed [ACC_W-1:0]           host_im,
  output logic [31:0]                       dump_count,
  output logic                              dump       // pulse: result updated
);

  logic signed [ACC_W-1:0] acc_re [LANES][DEPTH];
  logic signed [ACC_W-1:0] acc_im [LANES][DEPTH];
  logic signed [ACC_W-1:0] res_re [NCHAN];
  logic signed [ACC_W-1:0] res_im [NCHAN];

  logic [DAW-1:0] addr;       // word within the spectrum
  logic [31:0]    spec;       // spectra completed in this integration
  logic           started;
  logic [DAW-1:0] waddr;
  logic           first, last;

  always_comb begin
    waddr = in_sync ? '0 : addr;
    first = (spec == 32'd0);
    last  = (spec + 32'd1 >= int_len);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      addr       <= '0;
      spec       <= '0;
      started    <= 1'b0;
      dump_count <= '0;
      dump       <= 1'b0;
    end else begin
      dump <= 1'b0;
      if (in_valid && (started || in_sync)) begin
        started <= 1'b1;
        if (waddr == DAW'(DEPTH - 1)) begin
          addr <= '0;
          if (last) begin
            spec       <= '0;
            dump_count <= dump_count + 1'b1;
            dump       <= 1'b1;
          end else begin
            spec <= spec + 1'b1;
          end
        end else begin
          addr <= waddr + 1'b1;
        end
      end
    end
  end

  // Accumulation and result memories (no reset: cleared by the first spectrum).
  always_ff @(posedge clk) begin
    if (!rst && in_valid && (started || in_sync)) begin
      for (int l = 0; l < int'(LANES); l++) begin
        logic signed [ACC_W-1:0] s_re, s_im;
        s_re = (first ? ACC_W'(0) : acc_re[l][waddr]) + ACC_W'($signed(in_re[l]));
        s_im = (first ? ACC_W'(0) : acc_im[l][waddr]) + ACC_W'($signed(in_im[l]));
        acc_re[l][waddr] <= s_re;
        acc_im[l][waddr] <= s_im;
        if (last) begin
          res_re[int'(waddr) * int'(LANES) + l] <= s_re;
          res_im[int'(waddr) * int'(LANES) + l] <= s_im;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    host_re <= res_re[host_addr];
    host_im <= res_im[host_addr];
  end

endmodule
