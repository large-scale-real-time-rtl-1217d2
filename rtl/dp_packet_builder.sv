// dp_packet_builder: cuts the dense-packing word stream into packets of at
// most 8 KiB (256 words of 256 bits) and sends them with their header.
//
// Packet layout (256-bit words):
//   word 0, 1   Raw Data Header (RDH, 64 bytes), fields of word 0:
//               [7:0] version 7, [15:8] header size 64, [31:16] FEE id,
//               [47:32] offset to the next packet (bytes), [63:48] memory
//               size (bytes), [71:64] packet counter, [103:72] heartbeat
//               frame number, [115:104] bunch-crossing of the heartbeat
//               frame start, [147:116] trigger type, [163:148] page count
//               in the heartbeat frame, [171:164] stop bit (last packet of
//               the frame); word 1: [15:0] payload words.
//   words 2..   payload words (at most MAX_PAYLOAD)
//   last word   [127:0] meta word: [15:0] payload words, [31:16] packet
//               counter, [63:32] frame number, [127:124] 4'hE marker;
//               [255:128] trigger word: [31:0] trigger type, [43:32]
//               bunch-crossing of the frame start, [127] valid. The trigger
//               word is only filled in the last packet of a heartbeat frame.
// A packet is closed when MAX_PAYLOAD words are collected or when the bit
// packer requests it (heartbeat frame end). A frame without data still
// produces one packet (header and trailer only). Two packet buffers are
// used alternately: one fills while the other is sent; in_ready drops
// when both are busy. The RDH needs the packet size, so a packet is sent
// only after it is closed.
//
// From the paper: packets of at most 8 KiB starting with an RDH, detector
// data of one heartbeat frame in one or more contiguous packets, trigger and
// meta words. This design's choices: the reduced RDH field set, positions of
// trigger and meta word, double buffering.
module dp_packet_builder #(
  parameter int unsigned MAX_PAYLOAD = 253,   // 2 RDH + 253 + 1 trailer = 256 words = 8 KiB
  parameter logic [15:0] FEE_ID      = 16'd0
) (
  input  logic         clk,
  input  logic         rst,
  // heartbeat frame information, valid at hbf_start
  input  logic         hbf_start,
  input  logic [11:0]  hbf_bc,
  input  logic [31:0]  hbf_trig,
  // word stream from the bit packer
  output logic         in_ready,
  input  logic         w_valid,
  input  logic [255:0] w_data,
  input  logic         w_close,
  input  logic         w_last,
  // packet output
  output logic         out_valid,
  output logic [255:0] out_data,
  output logic         out_sop,
  output logic         out_eop,
  output logic [31:0]  n_packets
);
  logic [255:0] buf_mem [2][MAX_PAYLOAD];
  logic [8:0]   wc      [2];
  logic [1:0]   full;
  logic [1:0]   last_f;
  logic [31:0]  bframe  [2];
  logic [11:0]  bbc     [2];
  logic [31:0]  btrig   [2];
  logic [15:0]  bpage   [2];
  logic         fb, sb;              // filling bank, sending bank

  logic [31:0]  frame_cnt;
  logic [11:0]  cur_bc;
  logic [31:0]  cur_trig;
  logic [15:0]  page;
  logic [7:0]   pkt_cnt;

  // a word accepted now reaches the buffer one cycle later: when that word
  // may close the filling buffer, the other buffer must already be free
  assign in_ready = !full[fb] && (!full[~fb] || (wc[fb] < 9'(MAX_PAYLOAD - 2) && !w_close));

  // filling side
  always_ff @(posedge clk) begin
    if (w_valid && !full[fb]) buf_mem[fb][8'(wc[fb])] <= w_data;
  end

  // sending side
  typedef enum logic [1:0] {T_IDLE, T_RDH1, T_DATA, T_TRAIL} tx_e;
  tx_e         tx;
  logic [8:0]  rd;

  always_ff @(posedge clk) begin
    if (rst) begin
      wc        <= '{default: '0};
      full      <= '0;
      last_f    <= '0;
      fb        <= 1'b0;
      sb        <= 1'b0;
      frame_cnt <= '0;
      cur_bc    <= '0;
      cur_trig  <= '0;
      page      <= '0;
      pkt_cnt   <= '0;
      tx        <= T_IDLE;
      rd        <= '0;
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_eop   <= 1'b0;
      out_data  <= '0;
      n_packets <= '0;
      bframe    <= '{default: '0};
      bbc       <= '{default: '0};
      btrig     <= '{default: '0};
      bpage     <= '{default: '0};
    end else begin
      logic [1:0] free;
      logic [8:0] n;
      free = '0;
      // ---- fill
      if (hbf_start) begin
        frame_cnt <= frame_cnt + 1;
        cur_bc    <= hbf_bc;
        cur_trig  <= hbf_trig;
      end
      if (!full[fb]) begin
        n = wc[fb] + 9'(w_valid);
        if (w_valid) wc[fb] <= n;
        if ((w_close && (n != 0 || w_last)) || n == 9'(MAX_PAYLOAD)) begin
          full[fb]   <= 1'b1;
          last_f[fb] <= w_close && w_last;
          bframe[fb] <= frame_cnt;
          bbc[fb]    <= cur_bc;
          btrig[fb]  <= cur_trig;
          bpage[fb]  <= page;
          page       <= (w_close && w_last) ? 16'd0 : page + 16'd1;
          fb         <= ~fb;
        end
      end
      // ---- send
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_eop   <= 1'b0;
      case (tx)
        T_IDLE: if (full[sb]) begin
          logic [15:0] bytes;
          bytes     = 16'((32'(wc[sb]) + 3) * 32);
          out_valid <= 1'b1;
          out_sop   <= 1'b1;
          out_data  <= {84'd0, 8'(last_f[sb]), bpage[sb], btrig[sb], bbc[sb], bframe[sb], pkt_cnt,
                        bytes, bytes, FEE_ID, 8'd64, 8'd7};
          tx        <= T_RDH1;
        end
        T_RDH1: begin
          out_valid <= 1'b1;
          out_data  <= {240'd0, 7'd0, wc[sb]};
          rd        <= '0;
          tx        <= (wc[sb] == 0) ? T_TRAIL : T_DATA;
        end
        T_DATA: begin
          out_valid <= 1'b1;
          out_data  <= buf_mem[sb][8'(rd)];
          rd        <= rd + 9'd1;
          if (rd + 9'd1 == wc[sb]) tx <= T_TRAIL;
        end
        T_TRAIL: begin
          out_valid <= 1'b1;
          out_eop   <= 1'b1;
          out_data  <= {last_f[sb], 83'd0, last_f[sb] ? bbc[sb] : 12'd0, last_f[sb] ? btrig[sb] : 32'd0,
                        4'hE, 60'd0, bframe[sb], 8'd0, pkt_cnt, 7'd0, wc[sb]};
          pkt_cnt   <= pkt_cnt + 8'd1;
          n_packets <= n_packets + 1;
          free[sb]  = 1'b1;
          sb        <= ~sb;
          tx        <= T_IDLE;
        end
        default: tx <= T_IDLE;
      endcase
      for (int b = 0; b < 2; b++)
        if (free[b]) begin
          full[b] <= 1'b0;
          wc[b]   <= '0;
        end
    end
  end

  initial assert (MAX_PAYLOAD + 3 <= 256) else $error("packet exceeds 8 KiB");
endmodule
