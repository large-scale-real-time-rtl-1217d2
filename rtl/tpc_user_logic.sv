// tpc_user_logic: data-processing user logic of one readout card.
//
// Data path (Fig. 5): 20 GBT frame decoders -> global aligner (with the
// resync controller) -> pattern generator -> pedestal/threshold memory ->
// common-mode correction in parallel with the delay unit -> 20 pedestal
// correction cores -> 40 ion-tail filter cores -> threshold check -> two
// dense packing units (links 0..9 and 10..19), each with its own packet
// output. The IDC processor integrates the raw samples after the
// parameter memory in parallel with the processing chain and has two
// packet outputs of its own.
//
// Interface: per link a GBT wide-mode frame (112 bits) with a valid strobe
// (one frame per 40 MHz bunch clock, i.e. every sixth 240 MHz cycle), the
// bunch-crossing counter and trigger word of the timing system, a resync
// request, a configuration write bus for the per-channel parameters
// (pedestal, threshold, 1/k_pad, k_pad, ion-tail k_x and k_2), static
// control registers (ul_ctrl_t), and status outputs. Everything runs on one
// 240 MHz clock with a synchronous active-high reset.
//
// Timing: a time-bin is 48 cycles, samples arrive on the first 40. The
// common-mode value of a time-bin is ready 20 cycles after the last of its
// samples entered the common-mode unit; the delay unit (CM_DELAY = 64
// cycles) makes the samples of that time-bin reach the pedestal cores
// after the value and before the value of the next time-bin (window 60..67).
// The ion-tail filter has a latency of 13 cycles; the other link data
// fields and the time info stream are delayed by a second delay unit of the
// same length.
//
// From the paper: the block structure, counts, formats and latencies given
// there. This design's choices: the control/status interface, CM_DELAY, the
// placement of the IDC tap (after the parameter memory, before any
// correction).
module tpc_user_logic
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS   = NUM_LINKS,
  parameter int unsigned CM_DELAY = 64
) (
  input  logic              clk,
  input  logic              rst,
  // optical links
  input  logic [NLINKS-1:0] frame_valid,
  input  logic [111:0]      frame [NLINKS],
  // timing system
  input  logic [11:0]       bc,
  input  logic              trg_valid,
  input  logic [31:0]       trg_type,
  input  logic              resync_req,
  // configuration
  input  cfg_wr_t           cfg,
  input  ul_ctrl_t          ctrl,
  // dense packing outputs
  output logic [1:0]        dp_valid,
  output logic [255:0]      dp_data [2],
  output logic [1:0]        dp_sop,
  output logic [1:0]        dp_eop,
  // IDC outputs
  output logic [1:0]        idc_valid,
  output logic [255:0]      idc_data [2],
  output logic [1:0]        idc_sop,
  output logic [1:0]        idc_eop,
  // status
  output logic [NLINKS-1:0] dec_locked,
  output logic [NLINKS-1:0] dec_align_err,
  output logic [NLINKS-1:0] dec_clk_mismatch,
  output logic [4:0]        adc_clk_phase [NLINKS],
  output logic [NLINKS-1:0] fifo_overflow,
  output logic [15:0]       n_resync,
  output logic              resync_busy,
  output logic [15:0]       cm_value,
  output logic              cm_sign,
  output logic              cm_valid,
  output logic [10:0]       cm_n_empty,
  output logic [1:0]        dp_overflow,
  output logic [31:0]       dp_blocks [2],
  output logic [31:0]       dp_packets [2],
  output logic [31:0]       n_above [NLINKS],
  output logic              idc_overrun,
  output logic [31:0]       idc_windows
);
  localparam int unsigned NA = NLINKS / 2;
  localparam int unsigned NB = NLINKS - NA;

  // ---------------- decoders, resync, aligner
  dec_stream_t       dec [NLINKS];
  logic [NLINKS-1:0] sync_seen;
  logic              align_start, dec_reset;

  for (genvar l = 0; l < NLINKS; l++) begin : g_dec
    gbt_frame_decoder u_dec (
      .clk, .rst, .dec_reset, .frame_valid(frame_valid[l]), .frame(frame[l]), .dout(dec[l]),
      .locked(dec_locked[l]), .sync_seen(sync_seen[l]), .align_err(dec_align_err[l]),
      .clk_mismatch(dec_clk_mismatch[l]), .adc_clk_phase(adc_clk_phase[l]));
  end

  resync_controller u_resync (
    .clk, .rst, .resync_req, .t_wait(ctrl.t_wait), .align_start, .dec_reset, .busy(resync_busy),
    .n_resync);

  link_data_t a_ld [NLINKS];
  time_info_t a_ti;
  global_aligner #(.NLINKS(NLINKS)) u_align (
    .clk, .rst, .din(dec), .sync_seen, .resync_start(align_start), .dec_reset,
    .t_align(ctrl.t_align), .bc, .trg_valid, .trg_type, .ldata(a_ld), .tinfo(a_ti), .fifo_overflow);

  // ---------------- pattern generator, parameter memory
  link_data_t p_ld [NLINKS], m_ld [NLINKS];
  time_info_t p_ti, m_ti;
  pattern_generator #(.NLINKS(NLINKS)) u_pg (
    .clk, .rst, .enable(ctrl.pg_enable), .mode(ctrl.pg_mode), .const_value(ctrl.pg_const),
    .lfsr_thresh(ctrl.pg_lfsr_thresh), .ldata_in(a_ld), .tinfo_in(a_ti), .ldata_out(p_ld),
    .tinfo_out(p_ti));

  ped_thr_memory #(.NLINKS(NLINKS)) u_mem (
    .clk, .rst, .cfg, .ldata_in(p_ld), .tinfo_in(p_ti), .ldata_out(m_ld), .tinfo_out(m_ti));

  // ---------------- common-mode correction and delay unit
  cmc_top #(.NLINKS(NLINKS)) u_cmc (
    .clk, .rst, .cfg, .ldata(m_ld), .tinfo(m_ti), .offset(ctrl.cmc_offset),
    .t1($signed(ctrl.cmc_t1)), .t2($signed(ctrl.cmc_t2)), .match_dist(ctrl.cmc_match_dist),
    .n_min(ctrl.cmc_n_min), .cm_value, .cm_sign, .cm_valid, .n_empty(cm_n_empty));

  link_data_t d_ld [NLINKS];
  time_info_t d_ti;
  delay_unit #(.NLINKS(NLINKS), .DELAY(CM_DELAY)) u_delay (
    .clk, .rst, .ldata_in(m_ld), .tinfo_in(m_ti), .ldata_out(d_ld), .tinfo_out(d_ti));

  // ---------------- pedestal correction cores
  link_data_t c_ld [NLINKS];
  time_info_t c_ti_l [NLINKS];
  for (genvar l = 0; l < NLINKS; l++) begin : g_ped
    pedestal_core #(.LINK(l)) u_ped (
      .clk, .rst, .cfg, .ldata_in(d_ld[l]), .tinfo_in(d_ti), .cm_value, .cm_sign, .cm_valid,
      .cm_enable(ctrl.cm_enable), .bypass(ctrl.ped_bypass), .sample_offset(ctrl.sample_offset),
      .debug_en(ctrl.debug_en), .debug_channel(ctrl.debug_channel), .ldata_out(c_ld[l]),
      .tinfo_out(c_ti_l[l]));
  end
  time_info_t c_ti;
  assign c_ti = c_ti_l[0];

  // ---------------- ion-tail filter cores
  link_data_t f_ld [NLINKS], f_dl [NLINKS];
  time_info_t f_ti;
  delay_unit #(.NLINKS(NLINKS), .DELAY(13)) u_itf_delay (
    .clk, .rst, .ldata_in(c_ld), .tinfo_in(c_ti), .ldata_out(f_dl), .tinfo_out(f_ti));

  for (genvar l = 0; l < NLINKS; l++) begin : g_itf
    for (genvar j = 0; j < 2; j++) begin : g_par
      logic [11:0] s_out;
      itf_core #(.LINK(l), .ODD(j)) u_itf (
        .clk, .rst, .cfg, .sample_in(c_ld[l][j].sample), .channel_id(c_ti.channel_id),
        .first_tb(c_ti.first_tb), .adc_valid(c_ti.adc_valid), .offset(ctrl.itf_offset),
        .bypass(ctrl.itf_bypass), .sample_out(s_out));
      always_comb begin
        f_ld[l][j]        = f_dl[l][j];
        f_ld[l][j].sample = s_out;
      end
    end
  end

  // ---------------- threshold check
  link_data_t z_ld [NLINKS];
  time_info_t z_ti;
  threshold_check #(.NLINKS(NLINKS)) u_thr (
    .clk, .rst, .zs_enable(ctrl.zs_enable), .ldata_in(f_ld), .tinfo_in(f_ti), .ldata_out(z_ld),
    .tinfo_out(z_ti), .n_above);

  // ---------------- dense packing
  link_data_t z_a [NA], z_b [NB];
  always_comb begin
    for (int l = 0; l < int'(NA); l++) z_a[l] = z_ld[l];
    for (int l = 0; l < int'(NB); l++) z_b[l] = z_ld[NA + l];
  end

  dense_packing #(.NL(NA), .LINK_BASE(0), .FEE_ID(16'd0)) u_dp0 (
    .clk, .rst, .ldata(z_a), .tinfo(z_ti), .enable(ctrl.dp_enable), .force_static(ctrl.dp_force_static),
    .out_valid(dp_valid[0]), .out_data(dp_data[0]), .out_sop(dp_sop[0]), .out_eop(dp_eop[0]),
    .overflow(dp_overflow[0]), .n_blocks(dp_blocks[0]), .n_packets(dp_packets[0]));
  dense_packing #(.NL(NB), .LINK_BASE(NA), .FEE_ID(16'd1)) u_dp1 (
    .clk, .rst, .ldata(z_b), .tinfo(z_ti), .enable(ctrl.dp_enable), .force_static(ctrl.dp_force_static),
    .out_valid(dp_valid[1]), .out_data(dp_data[1]), .out_sop(dp_sop[1]), .out_eop(dp_eop[1]),
    .overflow(dp_overflow[1]), .n_blocks(dp_blocks[1]), .n_packets(dp_packets[1]));

  // ---------------- IDC processor
  logic [1:0] idc_v;
  idc_processor #(.NLINKS(NLINKS)) u_idc (
    .clk, .rst, .ldata(m_ld), .tinfo(m_ti), .enable(ctrl.idc_enable), .trig_mode(ctrl.idc_trig_mode),
    .n_orbits(ctrl.idc_n_orbits), .trig_mask(ctrl.idc_trig_mask), .dma_valid(idc_v),
    .dma_data(idc_data), .dma_sop(idc_sop), .dma_eop(idc_eop), .overrun(idc_overrun),
    .n_windows(idc_windows));
  assign idc_valid = idc_v;
endmodule
