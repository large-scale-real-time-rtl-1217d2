// cmc_calculator: common-mode calculator.
//
// Adds the per-link partial sums (Sum_A, I18F8) and empty-pad counts (Num_A)
// of all compare-and-match units in a five-stage registered adder tree
// (32 inputs, unused inputs are zero, so the tree for 20 links reduces to
// adders and pass-through registers), divides the total sum by the total
// count in a pipelined fixed-point divider (result I18F20, 8 cycles),
// subtracts the scaler offset and returns the common-mode value as a
// magnitude in I8F8 (saturated) with a sign flag (1 = negative). With no
// empty pad in the time-bin the value is 0. Latency from in_valid to
// cm_valid: 5 + 8 + 1 = 14 cycles; one result per time-bin.
//
// From the paper: five-stage adder tree, divider latency 8, offset
// subtraction, magnitude plus sign output, the formats I18F8, I18F20 and
// I8F8. This design's choices: the zero-count rule, saturation and the
// generic tree layout.
module cmc_calculator #(
  parameter int unsigned NLINKS = 20
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [25:0] sum_a [NLINKS],
  input  logic [10:0] num_a [NLINKS],
  input  logic        in_valid,
  input  logic [19:0] offset,         // I12F8, as in the scaler
  output logic [15:0] cm_value,       // I8F8 magnitude
  output logic        cm_sign,
  output logic        cm_valid,
  output logic [10:0] n_empty         // total number of empty pads of the result
);
  localparam int unsigned LEAVES = 32;

  logic [25:0] s_lvl [6][LEAVES];
  logic [10:0] c_lvl [6][LEAVES];
  logic [5:0]  v_lvl;

  always_comb begin
    for (int i = 0; i < int'(LEAVES); i++) begin
      s_lvl[0][i] = (i < int'(NLINKS)) ? sum_a[i] : '0;
      c_lvl[0][i] = (i < int'(NLINKS)) ? num_a[i] : '0;
    end
  end
  assign v_lvl[0] = in_valid;

  for (genvar st = 0; st < 5; st++) begin : g_tree
    always_ff @(posedge clk) begin
      for (int i = 0; i < int'(LEAVES >> (st + 1)); i++) begin
        s_lvl[st+1][i] <= s_lvl[st][2*i] + s_lvl[st][2*i+1];
        c_lvl[st+1][i] <= c_lvl[st][2*i] + c_lvl[st][2*i+1];
      end
      for (int i = int'(LEAVES >> (st + 1)); i < int'(LEAVES); i++) begin
        s_lvl[st+1][i] <= '0;
        c_lvl[st+1][i] <= '0;
      end
    end
    always_ff @(posedge clk) begin
      if (rst) v_lvl[st+1] <= 1'b0;
      else     v_lvl[st+1] <= v_lvl[st];
    end
  end

  // mean in I18F20 = (sum I18F8 << 12) / count
  logic        dv_valid;
  logic [31:0] mean;
  logic [10:0] cnt_q;
  pipe_divider #(.DW(38), .VW(11), .QW(32), .STAGES(8), .TW(11)) u_div (
    .clk, .rst,
    .in_valid(v_lvl[5]),
    .dividend({s_lvl[5][0], 12'd0}),
    .divisor(c_lvl[5][0]),
    .in_tag(c_lvl[5][0]),
    .out_valid(dv_valid),
    .quotient(mean),
    .out_tag(cnt_q)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      cm_valid <= 1'b0;
      cm_value <= '0;
      cm_sign  <= 1'b0;
      n_empty  <= '0;
    end else begin
      cm_valid <= dv_valid;
      if (dv_valid) begin
        logic signed [39:0] d;
        logic [39:0]        mag;
        d   = $signed({8'd0, mean}) - $signed({8'd0, offset, 12'd0});
        mag = d[39] ? 40'(-d) : 40'(d);
        n_empty <= cnt_q;
        if (cnt_q == 0) begin
          cm_value <= '0;
          cm_sign  <= 1'b0;
        end else begin
          cm_sign  <= d[39];
          cm_value <= (mag[39:12] > 28'hFFFF) ? 16'hFFFF : mag[27:12];
        end
      end
    end
  end
endmodule
