// idc_packetizer: reads the finished IDC window of NL links and sends it as
// one packet of 256-bit words on a dedicated DMA stream.
//
// Packet: one header word followed by NL*80/8 data words. Header word
// (bits): [255:240] 16'h1DC0 marker, [239:232] packetizer id, [231:224]
// number of links, [223:192] window number, [191:180] bunch-crossing at the
// window start, [179:164] window length in time-bins, rest zero. Data word
// k holds eight sums in 32-bit slots, slot i in bits [32i+31:32i], in the
// order link 0 channel 0, 1, ... 79, link 1 channel 0 ... (SUM_W-bit sums,
// zero-extended). Readout: one address (two sums, both parities) per
// cycle, so a packet takes NL*40 + 3 cycles; sop marks the header, eop the
// last word. The stream has no back-pressure: the DMA path is assumed to
// accept one word per cycle (it is a separate channel with its own FIFO).
//
// From the paper: a dedicated packet format and transmission channel and a
// packetizer formatting the sums read out sequentially. Everything about
// the format is this design's choice.
module idc_packetizer #(
  parameter int unsigned NL    = 10,
  parameter int unsigned SUM_W = 24,
  parameter int unsigned PK_ID = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [31:0]      win_id,
  input  logic [11:0]      win_bc,
  input  logic [15:0]      win_ntb,
  output logic [5:0]       ro_addr,
  input  logic [SUM_W-1:0] ro_sum [NL][2],
  output logic             busy,
  output logic             dma_valid,
  output logic [255:0]     dma_data,
  output logic             dma_sop,
  output logic             dma_eop
);
  localparam int unsigned LW = (NL <= 1) ? 1 : $clog2(NL);

  logic          issuing, got;
  logic [LW-1:0] l_cnt, l_q;
  logic          last_q;
  logic [1:0]    slot;
  logic [255:0]  acc;

  assign busy = issuing || got || start;

  always_ff @(posedge clk) begin
    if (rst) begin
      issuing   <= 1'b0;
      got       <= 1'b0;
      l_cnt     <= '0;
      l_q       <= '0;
      last_q    <= 1'b0;
      ro_addr   <= '0;
      slot      <= '0;
      acc       <= '0;
      dma_valid <= 1'b0;
      dma_data  <= '0;
      dma_sop   <= 1'b0;
      dma_eop   <= 1'b0;
    end else begin
      dma_valid <= 1'b0;
      dma_sop   <= 1'b0;
      dma_eop   <= 1'b0;
      // address generation
      if (start && !issuing) begin
        issuing   <= 1'b1;
        l_cnt     <= '0;
        ro_addr   <= '0;
        slot      <= '0;
        dma_valid <= 1'b1;
        dma_sop   <= 1'b1;
        dma_data  <= {16'h1DC0, 8'(PK_ID), 8'(NL), win_id, win_bc, win_ntb, 164'd0};
      end else if (issuing) begin
        if (ro_addr == 6'd39) begin
          ro_addr <= '0;
          if (l_cnt == LW'(NL - 1)) issuing <= 1'b0;
          else                      l_cnt   <= l_cnt + 1'b1;
        end else begin
          ro_addr <= ro_addr + 6'd1;
        end
      end
      got    <= issuing;
      l_q    <= l_cnt;
      last_q <= issuing && ro_addr == 6'd39 && l_cnt == LW'(NL - 1);
      // collection: data of the address issued in the previous cycle
      if (got) begin
        logic [255:0] a;
        a = acc;
        a[64*slot +: 32]      = 32'(ro_sum[l_q][0]);
        a[64*slot + 32 +: 32] = 32'(ro_sum[l_q][1]);
        acc  <= a;
        slot <= slot + 2'd1;
        if (slot == 2'd3) begin
          dma_valid <= 1'b1;
          dma_data  <= a;
          dma_eop   <= last_q;
        end
      end
    end
  end
endmodule
