// resync_controller: sequences a re-synchronisation of the front-end
// streams.
//
// A request (from the Common Logic pattern player, which at the same moment
// sends RESET/SYNC to the front-end cards) starts the sequence: the aligner
// is told immediately (align_start, the reference time of t_align), and
// after t_wait clock cycles, chosen slightly below the minimum round-trip
// time, the GBT frame decoders are restarted (dec_reset, one cycle) so that
// they search for the new SYNC pattern. busy is high from the request to
// dec_reset; a request while busy restarts the wait. n_resync counts the
// completed sequences.
//
// From the paper: the request source, the programmable t_wait and the
// decoder reset. This design's choices: the one-cycle pulse interface and
// the restart rule.
module resync_controller (
  input  logic        clk,
  input  logic        rst,
  input  logic        resync_req,
  input  logic [15:0] t_wait,
  output logic        align_start,
  output logic        dec_reset,
  output logic        busy,
  output logic [15:0] n_resync
);
  logic [15:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt         <= '0;
      busy        <= 1'b0;
      align_start <= 1'b0;
      dec_reset   <= 1'b0;
      n_resync    <= '0;
    end else begin
      align_start <= resync_req;
      dec_reset   <= 1'b0;
      if (resync_req) begin
        busy <= 1'b1;
        cnt  <= t_wait;
      end else if (busy) begin
        if (cnt == 0) begin
          busy      <= 1'b0;
          dec_reset <= 1'b1;
          n_resync  <= n_resync + 16'd1;
        end else begin
          cnt <= cnt - 16'd1;
        end
      end
    end
  end
endmodule
