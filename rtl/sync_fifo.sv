// sync_fifo: single-clock first-in first-out buffer on a memory array.
//
// Write when wr_en and not full, read when rd_en and not empty; rd_data
// shows the oldest entry (first-word fall-through, registered memory read is
// left to synthesis as the array is read combinationally). `clear` empties
// the buffer in one cycle. count gives the fill level. A write to a full or
// a read from an empty buffer is ignored and flagged on overflow/underflow
// for one cycle. Used as the inter-stage buffer of several blocks; its
// structure is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count,
  output logic             overflow,
  output logic             underflow
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      wp        <= '0;
      rp        <= '0;
      count     <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else begin
      overflow  <= wr_en && full;
      underflow <= rd_en && empty;
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end
endmodule
