// cmc_top: common-mode correction estimator for all links.
//
// The common-mode value of a time-bin is the mean of the scaled samples
// q/k_pad of the "empty" pads: pads whose scaled sample is below T1 and
// which agree within d_match with more than N of ten reference pads. The
// unit is built from one scaler per link (pedestal, 1/k_pad, offset,
// thresholds), a randomizer that routes to every sample its ten reference
// samples with a fixed pattern, one compare-and-match unit per link (400
// comparators for 20 links) and the calculator (adder tree, divider, offset
// removal). Result: cm_value (I8F8 magnitude) and cm_sign once per time-bin,
// 3 + 2 + 1 + 14 = 20 cycles after the cycle that carried TB End. The
// correction itself (q - k_pad * CM) is applied in the pedestal cores.
//
// Configuration: offset (I12F8, default 100.0 so that the range -100..+28
// maps to 0..128), T1 and T2 (ADC counts, compared in the offset domain),
// match_dist (I7F4) and n_min (N). 1/k_pad is written on the configuration
// bus (CFG_INV_K).
//
// From the paper: the structure, the formats and the range -100..+28. This
// design's choice: the fixed randomizer pattern, reference n of sample
// a = 2*link + parity is sample (a + 2n + 3) mod (2*NLINKS) (an odd
// distance, so never the sample itself; distinct references for 20 links).
module cmc_top
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS = 20
) (
  input  logic              clk,
  input  logic              rst,
  input  cfg_wr_t           cfg,
  input  link_data_t        ldata [NLINKS],
  input  time_info_t        tinfo,
  input  logic [19:0]       offset,
  input  logic signed [7:0] t1,
  input  logic signed [7:0] t2,
  input  logic [10:0]       match_dist,
  input  logic [3:0]        n_min,
  output logic [15:0]       cm_value,
  output logic              cm_sign,
  output logic              cm_valid,
  output logic [10:0]       n_empty
);
  localparam int unsigned NS = 2 * NLINKS;

  logic signed [20:0] th1, th2;
  always_ff @(posedge clk) begin
    th1 <= 21'($signed({t1, 8'd0})) + $signed({1'b0, offset});
    th2 <= 21'($signed({t2, 8'd0})) + $signed({1'b0, offset});
  end

  logic [14:0] q  [NLINKS][2];
  logic [1:0]  f1 [NLINKS];
  logic [1:0]  f2 [NLINKS];
  logic [NLINKS-1:0] sv, se;

  for (genvar l = 0; l < NLINKS; l++) begin : g_scaler
    logic [14:0] qq [2];
    cmc_scaler #(.LINK(l)) u_sc (
      .clk, .rst, .cfg, .ldata(ldata[l]), .tinfo, .offset,
      .thresh_1(th1), .thresh_2(th2),
      .q(qq), .t1(f1[l]), .t2(f2[l]), .valid(sv[l]), .tb_end(se[l]));
    assign q[l][0] = qq[0];
    assign q[l][1] = qq[1];
  end

  // randomizer: fixed reference pattern
  function automatic int ref_index(input int a, input int n);
    return (a + 2 * n + 3) % int'(NS);
  endfunction

  logic [25:0] sums [NLINKS];
  logic [10:0] nums [NLINKS];
  logic [NLINKS-1:0] cv;

  for (genvar l = 0; l < NLINKS; l++) begin : g_cmp
    logic [14:0] qb  [2][10];
    logic [1:0]  t2b [10];
    logic [14:0] qa  [2];
    always_comb begin
      for (int j = 0; j < 2; j++) begin
        qa[j] = q[l][j];
        for (int n = 0; n < 10; n++) begin
          int r;
          r = ref_index(2 * l + j, n);
          qb[j][n]     = q[r / 2][r % 2];
          t2b[n][j]    = f2[r / 2][r % 2];
        end
      end
    end
    cmc_compare u_cmp (
      .clk, .rst, .qa, .t1a(f1[l]), .qb, .t2b, .valid(sv[l]), .tb_end(se[l]),
      .match_dist, .n_min, .sum_a(sums[l]), .num_a(nums[l]), .out_valid(cv[l]));
  end

  cmc_calculator #(.NLINKS(NLINKS)) u_calc (
    .clk, .rst, .sum_a(sums), .num_a(nums), .in_valid(cv[0]), .offset,
    .cm_value, .cm_sign, .cm_valid, .n_empty);
endmodule
