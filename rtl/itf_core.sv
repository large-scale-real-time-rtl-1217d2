// itf_core: ion-tail filter core for the 40 channels of one parity (even or
// odd) of one link.
//
// Recursive IIR filter in IEEE-754 single precision:
//   q_out = q_in - k_x * q_cor          (correction, Eq. 3.4)
//   q_cor = k_2 * (q_in + q_cor)        (update, Eq. 3.5)
// Timing (cycle 0 = sample at the input, Channel-ID addresses the memories):
//   c0->c1  q_cor (dual-port RAM) and k_x read
//   c0->c4  conversion of the I10F2 sample to float (4 cycles)
//   c1->c4  k_x * q_cor (3 cycles), forced to 0 when First TB (delayed 4)
//   c4->c7  q_in - k_x*q_cor; c7->c10 + offset; c10->c13 to fixed point
//   update: q_cor delayed 3 (c4); c4->c7 q_in + q_cor; k_2 read with the
//   Channel-ID delayed 6; c7->c10 * k_2; written back at c10 to the
//   Channel-ID delayed 10, only when ADC valid (delayed 10) is set.
//   On First TB the q_cor read value is replaced by 0.
// Fixed latency 13. The output is clamped to 0..4095 (I10F2). bypass passes
// the input sample with the same latency (bypass travels with the sample). Each operation is computed in
// the first cycle of its slot and then registered through the remaining
// slot cycles (to be retimed by synthesis).
//
// From the paper (Fig. 19, 20): 40 cores per link pair, formats, memory
// organisation, all latencies, the address-delay scheme for k_2, First TB
// and ADC valid handling, the offset. This design's choices: rounding rules
// of the float operators (see tpc_fp_pkg), the clamp, the bypass.
module itf_core
  import tpc_pkg::*;
  import tpc_fp_pkg::*;
#(
  parameter int unsigned LINK = 0,
  parameter bit          ODD  = 1'b0
) (
  input  logic        clk,
  input  logic        rst,
  input  cfg_wr_t     cfg,
  input  logic [11:0] sample_in,
  input  logic [5:0]  channel_id,
  input  logic        first_tb,
  input  logic        adc_valid,
  input  fp32_t       offset,
  input  logic        bypass,
  output logic [11:0] sample_out
);
  fp32_t qcor_mem [VALID_CYCLES];
  fp32_t kx_mem   [VALID_CYCLES];
  fp32_t k2_mem   [VALID_CYCLES];

  logic cfg_hit;
  assign cfg_hit = cfg.we && cfg.link == 5'(LINK) && cfg.odd == ODD && cfg.addr < 6'(VALID_CYCLES);

  always_ff @(posedge clk) begin
    if (cfg_hit && cfg.target == CFG_ITF_KX) kx_mem[cfg.addr] <= cfg.data;
    if (cfg_hit && cfg.target == CFG_ITF_K2) k2_mem[cfg.addr] <= cfg.data;
  end

  // delay lines for control and the raw sample
  logic [5:0]  ch_d   [11];
  logic [9:0]  first_d, valid_d;
  logic [12:0] byp_d;
  logic [11:0] raw_d  [14];
  always_comb begin
    ch_d[0]  = channel_id;
    raw_d[0] = sample_in;
  end
  always_ff @(posedge clk) begin
    for (int i = 1; i < 11; i++) ch_d[i] <= ch_d[i-1];
    for (int i = 1; i < 14; i++) raw_d[i] <= raw_d[i-1];
    if (rst) begin
      first_d <= '0;
      valid_d <= '0;
      byp_d   <= '0;
    end else begin
      byp_d   <= {byp_d[11:0], bypass};
      first_d <= {first_d[8:0], first_tb};
      valid_d <= {valid_d[8:0], adc_valid};
    end
  end

  // c1: memory reads
  fp32_t qcor_rd, kx_rd;
  always_ff @(posedge clk) begin
    qcor_rd <= qcor_mem[channel_id];
    kx_rd   <= kx_mem[channel_id];
  end
  fp32_t qcor_c1;
  assign qcor_c1 = first_d[0] ? FP_ZERO : qcor_rd;

  // c1..c4: float conversion (started at c0) and k_x * q_cor, q_cor delay
  fp32_t qin  [5];
  fp32_t prod [4];
  fp32_t qcd  [4];
  always_comb begin
    qin[0]  = fp_from_fixed(32'(sample_in), 2);
    prod[0] = fp_mul(kx_rd, qcor_c1);
    qcd[0]  = qcor_c1;
  end
  always_ff @(posedge clk) begin
    for (int i = 1; i < 5; i++) qin[i] <= qin[i-1];
    for (int i = 1; i < 4; i++) begin
      prod[i] <= prod[i-1];
      qcd[i]  <= qcd[i-1];
    end
  end

  // c4: correction path
  fp32_t corr4;
  assign corr4 = first_d[3] ? FP_ZERO : prod[3];
  fp32_t diff [4], offs [4];
  logic signed [31:0] fix [4];
  always_comb begin
    diff[0] = fp_add(qin[4], fp_neg(corr4));
    offs[0] = fp_add(diff[3], offset);
    fix[0]  = fp_to_fixed(offs[3], 2);
  end
  always_ff @(posedge clk) begin
    for (int i = 1; i < 4; i++) begin
      diff[i] <= diff[i-1];
      offs[i] <= offs[i-1];
      fix[i]  <= fix[i-1];
    end
  end

  always_comb begin
    if (byp_d[12])                sample_out = raw_d[13];
    else if (fix[3] < 0)          sample_out = 12'd0;
    else if (fix[3] > 32'sd4095)  sample_out = 12'd4095;
    else                          sample_out = fix[3][11:0];
  end

  // c4: update path
  fp32_t sum [4], upd [4];
  fp32_t k2_rd;
  always_comb begin
    sum[0] = fp_add(qin[4], qcd[3]);
    upd[0] = fp_mul(sum[3], k2_rd);
  end
  always_ff @(posedge clk) begin
    k2_rd <= k2_mem[ch_d[6]];
    for (int i = 1; i < 4; i++) begin
      sum[i] <= sum[i-1];
      upd[i] <= upd[i-1];
    end
    if (valid_d[9]) qcor_mem[ch_d[10]] <= upd[3];
  end
endmodule
