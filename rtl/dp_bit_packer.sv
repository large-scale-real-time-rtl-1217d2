// dp_bit_packer: joins variable-length bit items into a continuous bit
// stream and cuts it into 256-bit words for the dense packing unit.
//
// Item bits are taken from bit 0 upwards; stream bit i lands in bit
// (i mod 256) of a word, so items are packed without any alignment. One item
// (1..256 bits) is accepted per cycle when `ready`; an item completes at most
// one word. A flush item pads the current partial word with zeros, emits it
// (if it holds any bit) and requests the packet builder to close the packet
// (w_close, with w_last = end of heartbeat frame). Latency: 1 cycle.
//
// This design's choice (the paper gives only the property that samples are
// not byte aligned).
module dp_bit_packer (
  input  logic         clk,
  input  logic         rst,
  input  logic         item_valid,
  input  logic [255:0] item_data,
  input  logic [8:0]   item_len,      // 1..256, ignored for flush
  input  logic         item_flush,
  input  logic         item_last,     // with flush: heartbeat frame ends
  output logic         ready,
  input  logic         out_ready,
  output logic         w_valid,
  output logic [255:0] w_data,
  output logic         w_close,
  output logic         w_last
);
  logic [511:0] acc;
  logic [8:0]   fill;               // 0..255 bits waiting

  assign ready = out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc     <= '0;
      fill    <= '0;
      w_valid <= 1'b0;
      w_data  <= '0;
      w_close <= 1'b0;
      w_last  <= 1'b0;
    end else begin
      w_valid <= 1'b0;
      w_close <= 1'b0;
      w_last  <= 1'b0;
      if (item_valid && out_ready) begin
        if (item_flush) begin
          w_valid <= fill != 0;
          w_data  <= acc[255:0];
          w_close <= 1'b1;
          w_last  <= item_last;
          acc     <= '0;
          fill    <= '0;
        end else begin
          logic [511:0] a;
          logic [9:0]   f;
          logic [511:0] mask;
          mask = ({256'd0, 256'hFFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF_FFFF} >> (9'd256 - item_len));
          a = acc | (({256'd0, item_data} & mask) << fill);
          f = 10'(fill) + 10'(item_len);
          if (f >= 10'd256) begin
            w_valid <= 1'b1;
            w_data  <= a[255:0];
            acc     <= a >> 256;
            fill    <= 9'(f - 10'd256);
          end else begin
            acc     <= a;
            fill    <= 9'(f);
          end
        end
      end
    end
  end
endmodule
