// cmc_scaler: scaler unit of the common-mode correction, one per link.
//
// For the two samples of a link per cycle it subtracts the pedestal (I10F2),
// multiplies by the per-pad factor 1/k_pad (I2F6, from a 40-word memory per
// channel parity addressed by Channel-ID) and adds a fixed offset (I12F8)
// that moves the baseline into the positive range. The I12F8 result is
// compared with thresh_1 and thresh_2 (flags set when the value is at or
// below the threshold) and clipped to the 7-bit integer range 0..127.996 of
// the comparator stage (I7F8). Latency: 3 cycles; `valid` follows ADC valid
// of the input (and StreamActive), tb_end follows TB End.
//
// From the paper: the three operations, the formats I10F2, I2F6, I12F8 and
// I7F8, the clipping and both flags. The "=<" comparisons follow Fig. 10;
// the text says "Samples below the threshold are flagged" (thresh_1) and
// that thresh_2 flags a sample outside the valid range, while the match unit
// ANDs thresh_2_B as a "valid" condition: the flag is therefore set for
// samples at or below T2, i.e. inside the range. Clipping of negative
// results to 0 is this design's choice.
module cmc_scaler
  import tpc_pkg::*;
#(
  parameter int unsigned LINK = 0
) (
  input  logic              clk,
  input  logic              rst,
  input  cfg_wr_t           cfg,
  input  link_data_t        ldata,
  input  time_info_t        tinfo,
  input  logic [19:0]       offset,      // I12F8
  input  logic signed [20:0] thresh_1,   // I12F8, offset domain
  input  logic signed [20:0] thresh_2,   // I12F8, offset domain
  output logic [14:0]       q      [2],  // I7F8
  output logic [1:0]        t1,
  output logic [1:0]        t2,
  output logic              valid,
  output logic              tb_end
);
  logic [7:0] invk_mem [2][VALID_CYCLES];
  logic [7:0] invk_q [2];

  always_ff @(posedge clk) begin
    for (int j = 0; j < 2; j++)
      if (cfg.we && cfg.target == CFG_INV_K && cfg.link == 5'(LINK) && cfg.odd == 1'(j) &&
          cfg.addr < 6'(VALID_CYCLES))
        invk_mem[j][cfg.addr] <= cfg.data[7:0];
  end

  logic signed [12:0] diff [2];
  logic signed [21:0] prod [2];
  logic [2:0] v_sr, e_sr;

  always_ff @(posedge clk) begin
    for (int j = 0; j < 2; j++) begin
      // stage 1: memory read, pedestal subtraction
      invk_q[j] <= invk_mem[j][tinfo.channel_id];
      diff[j]   <= $signed({1'b0, ldata[j].sample}) - $signed({1'b0, ldata[j].pedestal});
      // stage 2: scale by 1/k (I10F2 * I2F6 = F8)
      prod[j]   <= diff[j] * $signed({1'b0, invk_q[j]});
    end
  end

  // stage 3: offset, thresholds, clipping
  always_ff @(posedge clk) begin
    for (int j = 0; j < 2; j++) begin
      logic signed [22:0] v;
      v = 23'(prod[j]) + $signed({3'b0, offset});
      t1[j] <= v <= 23'(thresh_1);
      t2[j] <= v <= 23'(thresh_2);
      if (v < 0)                 q[j] <= 15'd0;
      else if (v > 23'sh7FFF)    q[j] <= 15'h7FFF;
      else                       q[j] <= v[14:0];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v_sr <= '0;
      e_sr <= '0;
    end else begin
      v_sr <= {v_sr[1:0], tinfo.adc_valid && ldata[0].stream_active};
      e_sr <= {e_sr[1:0], tinfo.tb_end};
    end
  end
  assign valid  = v_sr[2];
  assign tb_end = e_sr[2];
endmodule
