// pedestal_core: pedestal subtraction, common-mode correction and zero
// flag for one link data stream (two samples per cycle).
//
// Pipeline (latency 3 cycles, all fields of the link data stream and the
// time info stream are delayed alongside):
//  1. k_pad (I2F6) of both samples is read from a 40-word memory per channel
//     parity addressed by Channel-ID; the inputs are registered.
//  2. k_pad * CM (I2F6 * I8F8 = I10F14) is rounded to the I10F2 sample
//     format.
//  3. sample + sample_offset - pedestal -/+ k_pad*CM (the correction is
//     subtracted for a positive and added for a negative common mode),
//     bypass multiplexer (raw sample), clamp to 0..4095 (the 10-bit ADC range
//     in I10F2), debug multiplexer (the selected channel carries the
//     common-mode value instead of the sample), Zero flag = value at or
//     below the channel threshold.
// The common-mode value is latched when cm_valid pulses and is used for all
// samples that follow until the next one; the delay unit in front of the
// core places the samples of a time-bin between the CM of that time-bin and
// the next. cm_enable = 0 applies no correction.
//
// From the paper (Fig. 18): the k_pad lookup by Channel-ID in the first
// stage, the order common mode, pedestal, threshold, the range protection,
// the debug mode. This design's choices: rounding to nearest, the debug
// channel selection by one link channel number, the 3-stage split.
module pedestal_core
  import tpc_pkg::*;
#(
  parameter int unsigned LINK = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  cfg_wr_t     cfg,
  input  link_data_t  ldata_in,
  input  time_info_t  tinfo_in,
  input  logic [15:0] cm_value,       // I8F8 magnitude
  input  logic        cm_sign,        // 1 = negative
  input  logic        cm_valid,
  input  logic        cm_enable,
  input  logic        bypass,         // pass raw samples (Zero flag still set)
  input  logic [11:0] sample_offset,  // I10F2, added before the clamp
  input  logic        debug_en,
  input  logic [6:0]  debug_channel,  // link channel 0..79
  output link_data_t  ldata_out,
  output time_info_t  tinfo_out
);
  logic [7:0]  k_mem [2][VALID_CYCLES];
  logic [15:0] cm_q;
  logic        cm_neg;

  always_ff @(posedge clk) begin
    for (int j = 0; j < 2; j++)
      if (cfg.we && cfg.target == CFG_K && cfg.link == 5'(LINK) && cfg.odd == 1'(j) &&
          cfg.addr < 6'(VALID_CYCLES))
        k_mem[j][cfg.addr] <= cfg.data[7:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cm_q   <= '0;
      cm_neg <= 1'b0;
    end else if (cm_valid) begin
      cm_q   <= cm_value;
      cm_neg <= cm_sign;
    end
  end

  // stage 1
  link_data_t d1, d2;
  time_info_t t1, t2;
  logic [7:0] k1 [2];
  always_ff @(posedge clk) begin
    d1 <= ldata_in;
    t1 <= tinfo_in;
    for (int j = 0; j < 2; j++) k1[j] <= k_mem[j][tinfo_in.channel_id];
  end

  // stage 2: k * CM rounded to I10F2
  logic [13:0] corr [2];
  logic        neg2;
  logic [15:0] cm2;
  always_ff @(posedge clk) begin
    d2   <= d1;
    t2   <= t1;
    neg2 <= cm_neg;
    cm2  <= cm_q;
    for (int j = 0; j < 2; j++) begin
      logic [23:0] p;
      p = (cm_enable ? 24'(cm_q) : 24'd0) * 24'(k1[j]);
      corr[j] <= 14'((p + 24'd2048) >> 12);
    end
  end

  // stage 3
  always_ff @(posedge clk) begin
    tinfo_out <= t2;
    for (int j = 0; j < 2; j++) begin
      logic signed [15:0] v;
      logic [11:0]        r;
      v = $signed({4'd0, d2[j].sample}) + $signed({4'd0, sample_offset})
        - $signed({4'd0, d2[j].pedestal});
      v = neg2 ? v + $signed({2'd0, corr[j]}) : v - $signed({2'd0, corr[j]});
      if (bypass)            r = d2[j].sample;
      else if (v < 0)        r = 12'd0;
      else if (v > 16'sd4095) r = 12'd4095;
      else                   r = v[11:0];
      if (debug_en && {t2.channel_id, 1'(j)} == debug_channel)
        r = cm2[15:4] | (neg2 ? 12'h800 : 12'h000);
      ldata_out[j]           <= d2[j];
      ldata_out[j].sample    <= r;
      ldata_out[j].zero      <= r <= d2[j].threshold;
    end
  end
endmodule
