// cmc_compare: compare-and-match unit of the common-mode correction, one
// per link.
//
// Each of the link's two samples q_A is compared with its ten reference
// samples q_B[n] chosen by the randomizer. A match unit reports a match when
// |q_A - q_B| < match_dist at reduced precision (I7F4: the four lowest bits
// are dropped), q_A passed the empty-pad pre-selection (thresh_1_A) and q_B
// lies in the valid range (thresh_2_B). A sample with more than n_min
// matches is an empty pad: its I7F8 value is added to Sum_A (I18F8, 26 bits)
// and Num_A (11 bits) is incremented. The sums cover the valid cycles of one
// time-bin and are presented with out_valid for one cycle after the cycle
// that carried TB End, then cleared. Latency: 2 cycles after the inputs.
//
// From the paper: ten parallel match units, the three conditions, the I7F4
// match precision, "> N", the accumulator widths. The exact registering is
// this design's choice.
module cmc_compare (
  input  logic        clk,
  input  logic        rst,
  input  logic [14:0] qa   [2],
  input  logic [1:0]  t1a,
  input  logic [14:0] qb   [2][10],
  input  logic [1:0]  t2b  [10],
  input  logic        valid,
  input  logic        tb_end,
  input  logic [10:0] match_dist,   // I7F4
  input  logic [3:0]  n_min,
  output logic [25:0] sum_a,
  output logic [10:0] num_a,
  output logic        out_valid
);
  logic [1:0]  add;
  logic [14:0] qa_d [2];
  logic        valid_d, end_d;
  logic [25:0] acc;
  logic [10:0] cnt;

  always_ff @(posedge clk) begin
    for (int j = 0; j < 2; j++) begin
      int unsigned m;
      m = 0;
      for (int n = 0; n < 10; n++) begin
        logic [10:0] a, b, d;
        a = qa[j][14:4];
        b = qb[j][n][14:4];
        d = (a > b) ? a - b : b - a;
        if (d < match_dist && t1a[j] && t2b[n][j]) m++;
      end
      add[j]  <= (m > int'(n_min));
      qa_d[j] <= qa[j];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_d   <= 1'b0;
      end_d     <= 1'b0;
      acc       <= '0;
      cnt       <= '0;
      sum_a     <= '0;
      num_a     <= '0;
      out_valid <= 1'b0;
    end else begin
      logic [25:0] acc_n;
      logic [10:0] cnt_n;
      valid_d <= valid;
      end_d   <= tb_end;
      acc_n = acc;
      cnt_n = cnt;
      if (valid_d) begin
        for (int j = 0; j < 2; j++)
          if (add[j]) begin
            acc_n = acc_n + 26'(qa_d[j]);
            cnt_n = cnt_n + 11'd1;
          end
      end
      out_valid <= end_d;
      if (end_d) begin
        sum_a <= acc_n;
        num_a <= cnt_n;
        acc   <= '0;
        cnt   <= '0;
      end else begin
        acc <= acc_n;
        cnt <= cnt_n;
      end
    end
  end
endmodule
