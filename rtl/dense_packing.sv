// dense_packing: zero-suppressed dense output format for NL links.
//
// Capture: during the 40 valid cycles of a time-bin every sample not flagged
// Zero is appended to its link's list (at most two per link and cycle) and
// its bit is set in the link's 80-bit mask. Two capture banks alternate:
// one fills while the serializer works on the other. If the serializer has
// not finished the previous time-bin when a new one is complete, the new
// one is dropped and `overflow` pulses.
// Serializer: for each time-bin with at least one sample a block is built
// as a sequence of bit items for the bit packer:
//   block header, 16 bits: [11:0] bunch-crossing, [15:12] contributing links
//   link headers (each byte aligned, for every contributing link in link
//   order): bit 0 static flag, bits [5:1] link id, then either the 80-bit
//   mask (static) or the 10-bit group mask followed by one 8-bit mask per
//   non-empty group of 8 channels (dynamic); the shorter form is chosen
//   unless force_static is set. Size 3..11 bytes.
//   payloads: the 12-bit samples of each contributing link in channel order,
//   without byte alignment, up to 20 samples (240 bits) per item;
//   4 zero bits at the end if needed to close the block on a byte boundary.
// A time-bin whose trigger word carries the heartbeat bit starts a new
// heartbeat frame: the packer is flushed first (closing the last packet of
// the previous frame) and the packet builder is told the frame's
// bunch-crossing and trigger type. Time-bins without samples produce no
// block.
// Throughput: one item per cycle; a full time-bin of 10 links (800 samples)
// needs 1 + 10 + 40 + 1 = 52 cycles plus packet overhead, so sustained
// fully occupied input overflows (a few percent above the 48-cycle budget).
//
// From the paper: 10 links per instance, blocks with byte-aligned 2-byte
// header (number of links, bunch-crossing), link headers with static or
// dynamic two-level masks, 12-bit samples without byte alignment, packets
// of at most 8 KiB per heartbeat frame. This design's choices: exact bit
// layout, link id in the header (hence 3..11 instead of 3..10 bytes),
// automatic choice of the mask form, dropping of empty time-bins.
module dense_packing
  import tpc_pkg::*;
#(
  parameter int unsigned NL        = 10,
  parameter int unsigned LINK_BASE = 0,
  parameter logic [15:0] FEE_ID    = 16'd0
) (
  input  logic         clk,
  input  logic         rst,
  input  link_data_t   ldata [NL],
  input  time_info_t   tinfo,
  input  logic         enable,
  input  logic         force_static,
  output logic         out_valid,
  output logic [255:0] out_data,
  output logic         out_sop,
  output logic         out_eop,
  output logic         overflow,
  output logic [31:0]  n_blocks,
  output logic [31:0]  n_packets
);
  initial assert (NL >= 1 && NL <= 15) else $error("dense_packing: 1..15 links");

  // ---------------- capture
  logic [11:0] smp   [2][NL][CH_PER_LINK];
  logic [6:0]  cnt   [2][NL];
  logic [79:0] mask  [2][NL];
  logic [11:0] tb_bc [2];
  logic [31:0] tb_tr [2];
  logic [1:0]  rdy;
  logic        wb, rb;
  logic        free_rb;
  logic        taking, take;

  // a time-bin is captured only if a bank is free at its start
  assign take = tinfo.tb_start ? (enable && !rdy[wb]) : taking;

  always_ff @(posedge clk) begin
    if (rst) begin
      rdy      <= '0;
      wb       <= 1'b0;
      taking   <= 1'b0;
      overflow <= 1'b0;
      cnt      <= '{default: '0};
      mask     <= '{default: '0};
    end else begin
      overflow <= 1'b0;
      if (free_rb) rdy[rb] <= 1'b0;
      if (tinfo.tb_start) taking <= enable && !rdy[wb];
      if (tinfo.adc_valid && take) begin
        for (int l = 0; l < int'(NL); l++) begin
          logic [6:0] c;
          c = tinfo.tb_start ? 7'd0 : cnt[wb][l];
          if (tinfo.tb_start) mask[wb][l] <= '0;
          for (int j = 0; j < 2; j++)
            if (!ldata[l][j].zero) begin
              smp[wb][l][c] <= ldata[l][j].sample;
              c = c + 7'd1;
            end
          cnt[wb][l] <= c;
          mask[wb][l][2*tinfo.channel_id]     <= !ldata[l][0].zero;
          mask[wb][l][2*tinfo.channel_id + 1] <= !ldata[l][1].zero;
        end
        if (tinfo.tb_end) begin
          rdy[wb]   <= 1'b1;
          tb_bc[wb] <= tinfo.bunch_crossing;
          tb_tr[wb] <= tinfo.trigger_type;
          wb        <= ~wb;
        end
      end else if (enable && tinfo.tb_start && rdy[wb]) begin
        overflow <= 1'b1;
      end
    end
  end

  // ---------------- link header of each link of the read bank
  logic [95:0]  lh_data [NL];
  logic [8:0]   lh_len  [NL];
  logic [NL-1:0] lnz;

  always_comb begin
    for (int l = 0; l < int'(NL); l++) begin
      logic [9:0]  gm;
      logic [95:0] dyn;
      int          ng, pos;
      gm  = '0;
      dyn = '0;
      ng  = 0;
      for (int g = 0; g < 10; g++) gm[g] = mask[rb][l][8*g +: 8] != 0;
      dyn[5:1]   = 5'(LINK_BASE + l);
      dyn[15:6]  = gm;
      pos = 16;
      for (int g = 0; g < 10; g++)
        if (gm[g]) begin
          dyn[pos +: 8] = mask[rb][l][8*g +: 8];
          pos += 8;
          ng++;
        end
      lnz[l] = cnt[rb][l] != 0;
      if (force_static || ng > 8) begin
        lh_data[l] = {10'd0, mask[rb][l], 5'(LINK_BASE + l), 1'b1};
        lh_len[l]  = 9'd88;
      end else begin
        lh_data[l] = dyn;
        lh_len[l]  = 9'(16 + 8 * ng);
      end
    end
  end

  // ---------------- serializer
  typedef enum logic [2:0] {S_IDLE, S_HBF, S_BH, S_LH, S_PL, S_PAD, S_DONE} st_e;
  st_e         st;
  logic [3:0]  li;
  logic [6:0]  si;
  logic        odd_total;
  logic        hbf_open;

  logic         it_valid, it_flush, it_last, pk_ready;
  logic [255:0] it_data;
  logic [8:0]   it_len;
  logic         hbf_start;

  // next contributing link at or after index i
  function automatic logic [4:0] next_link(input logic [NL-1:0] nz, input int i);
    logic [4:0] r;
    r = 5'(NL);
    for (int k = int'(NL) - 1; k >= 0; k--) if (k >= i && nz[k]) r = 5'(k);
    return r;
  endfunction

  int pl_n;
  always_comb begin
    pl_n = int'(cnt[rb][li]) - int'(si);
    if (pl_n > 20) pl_n = 20;
    it_valid = 1'b0;
    it_flush = 1'b0;
    it_last  = 1'b0;
    it_data  = '0;
    it_len   = 9'd1;
    case (st)
      S_HBF: begin it_valid = 1'b1; it_flush = 1'b1; it_last = 1'b1; end
      S_BH:  begin it_valid = 1'b1; it_data = 256'({4'($countones(lnz)), tb_bc[rb]}); it_len = 9'd16; end
      S_LH:  begin it_valid = 1'b1; it_data = 256'(lh_data[li]); it_len = lh_len[li]; end
      S_PL: begin
        it_valid = 1'b1;
        for (int k = 0; k < 20; k++)
          if (k < pl_n) it_data[12*k +: 12] = smp[rb][li][7'(int'(si) + k)];
        it_len = 9'(12 * pl_n);
      end
      S_PAD: begin it_valid = 1'b1; it_len = 9'd4; end
      default: ;
    endcase
  end

  // the frame information reaches the packet builder after the flush that
  // closes the previous frame
  always_ff @(posedge clk) begin
    if (rst) hbf_start <= 1'b0;
    else     hbf_start <= (st == S_HBF && pk_ready) ||
                          (st == S_IDLE && rdy[rb] && tb_tr[rb][TRG_HB] && !hbf_open);
  end
  assign free_rb   = (st == S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= S_IDLE;
      rb        <= 1'b0;
      li        <= '0;
      si        <= '0;
      odd_total <= 1'b0;
      hbf_open  <= 1'b0;
      n_blocks  <= '0;
    end else begin
      case (st)
        S_IDLE: if (rdy[rb]) begin
          odd_total <= 1'b0;
          if (tb_tr[rb][TRG_HB]) begin
            st       <= hbf_open ? S_HBF : (lnz != 0 ? S_BH : S_DONE);
            hbf_open <= 1'b1;
          end else if (lnz != 0) st <= S_BH;
          else                   st <= S_DONE;
        end
        S_HBF: if (pk_ready) st <= (lnz != 0) ? S_BH : S_DONE;
        S_BH: if (pk_ready) begin
          li <= 4'(next_link(lnz, 0));
          st <= S_LH;
        end
        S_LH: if (pk_ready) begin
          logic [4:0] nx;
          nx = next_link(lnz, int'(li) + 1);
          if (nx == 5'(NL)) begin
            li <= 4'(next_link(lnz, 0));
            si <= '0;
            st <= S_PL;
          end else li <= 4'(nx);
        end
        S_PL: if (pk_ready) begin
          if (int'(cnt[rb][li]) - int'(si) > 20) si <= si + 7'd20;
          else begin
            logic [4:0] nx;
            odd_total <= odd_total ^ cnt[rb][li][0];
            nx = next_link(lnz, int'(li) + 1);
            si <= '0;
            if (nx == 5'(NL)) st <= (odd_total ^ cnt[rb][li][0]) ? S_PAD : S_DONE;
            else li <= 4'(nx);
          end
        end
        S_PAD: if (pk_ready) st <= S_DONE;
        S_DONE: begin
          if (lnz != 0) n_blocks <= n_blocks + 1;
          rb <= ~rb;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- bit packer and packet builder
  logic         w_valid, w_close, w_last, pb_ready;
  logic [255:0] w_data;

  dp_bit_packer u_bp (
    .clk, .rst, .item_valid(it_valid), .item_data(it_data), .item_len(it_len), .item_flush(it_flush),
    .item_last(it_last), .ready(pk_ready), .out_ready(pb_ready), .w_valid, .w_data, .w_close, .w_last);

  dp_packet_builder #(.FEE_ID(FEE_ID)) u_pb (
    .clk, .rst, .hbf_start, .hbf_bc(tb_bc[rb]), .hbf_trig(tb_tr[rb]), .in_ready(pb_ready),
    .w_valid, .w_data, .w_close, .w_last, .out_valid, .out_data, .out_sop, .out_eop, .n_packets);
endmodule
