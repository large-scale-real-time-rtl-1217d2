// delay_unit: delays the link data streams and the time info stream by a
// fixed number of clock cycles so that the samples of a time-bin reach the
// pedestal cores together with the common-mode value computed from them.
//
// Implementation: a circular buffer in one simple dual-port memory (an
// embedded-memory FIFO held at a constant fill level). Every cycle the
// input word is written at wr_ptr and the word written DELAY-1 cycles
// earlier is read into the output register, so dout follows din by exactly
// DELAY cycles. The memory depth is the next power of two >= DELAY.
// The memory is not reset; instead the time info output is held at zero
// (no valid cycle) until DELAY cycles after reset, when the first word
// written after reset reaches the output.
//
// From the paper: the unit runs in parallel with the common-mode correction
// and uses compact embedded FIFOs. This design's choice: the constant-fill
// circular-buffer form and the default DELAY = 64, derived from the
// common-mode latency of this design (result ready 20 cycles after the last
// valid cycle of a time-bin; see the top module).
module delay_unit
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS = 20,
  parameter int unsigned DELAY  = 64
) (
  input  logic       clk,
  input  logic       rst,
  input  link_data_t ldata_in  [NLINKS],
  input  time_info_t tinfo_in,
  output link_data_t ldata_out [NLINKS],
  output time_info_t tinfo_out
);
  localparam int unsigned AW = (DELAY <= 2) ? 1 : $clog2(DELAY);
  localparam int unsigned LW = $bits(link_data_t);
  localparam int unsigned TW = $bits(time_info_t);
  localparam int unsigned W  = NLINKS * LW + TW;

  initial assert (DELAY >= 2) else $error("delay_unit: DELAY must be at least 2");

  logic [W-1:0]  mem [2**AW];
  logic [W-1:0]  din, dout;
  logic [AW-1:0] wr_ptr;
  logic [AW-1:0] rd_ptr;
  logic [AW:0]   fill;      // cycles since reset, saturating at DELAY
  logic          primed;

  always_comb begin
    din[TW-1:0] = tinfo_in;
    for (int l = 0; l < int'(NLINKS); l++)
      din[TW + l*LW +: LW] = ldata_in[l];
  end

  assign rd_ptr = wr_ptr - AW'(DELAY - 1);

  always_ff @(posedge clk) begin
    mem[wr_ptr] <= din;
    dout        <= mem[rd_ptr];
    wr_ptr      <= wr_ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fill   <= '0;
      primed <= 1'b0;
    end else begin
      if (fill != (AW+1)'(DELAY)) fill <= fill + 1'b1;
      primed <= (fill == (AW+1)'(DELAY));
    end
  end

  always_comb begin
    tinfo_out = primed ? time_info_t'(dout[TW-1:0]) : '0;
    for (int l = 0; l < int'(NLINKS); l++)
      ldata_out[l] = dout[TW + l*LW +: LW];
  end
endmodule
