// pipe_divider: fully pipelined unsigned integer divider.
//
// quotient = dividend / divisor, truncated, for quotients below 2^QW (the
// caller guarantees the range). Restoring long division; each of the STAGES
// register stages resolves QW/STAGES quotient bits, so a new division can
// start every cycle and the result appears STAGES cycles later, with
// `valid` and the `tag` travelling alongside. A zero divisor gives an
// all-ones quotient. The common-mode calculator uses it with 8 stages,
// the latency given in the paper; the algorithm is this design's choice.
module pipe_divider #(
  parameter int unsigned DW     = 38,
  parameter int unsigned VW     = 11,
  parameter int unsigned QW     = 32,
  parameter int unsigned STAGES = 8,
  parameter int unsigned TW     = 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output logic [QW-1:0] quotient,
  output logic [TW-1:0] out_tag
);
  localparam int unsigned BPS = (QW + STAGES - 1) / STAGES;
  localparam int unsigned RW  = DW + QW;

  logic [RW-1:0] rem [STAGES+1];
  logic [VW-1:0] dv  [STAGES+1];
  logic [QW-1:0] q   [STAGES+1];
  logic [TW-1:0] tg  [STAGES+1];
  logic [STAGES:0] vl;

  assign rem[0] = RW'(dividend);
  assign dv[0]  = divisor;
  assign q[0]   = '0;
  assign tg[0]  = in_tag;
  assign vl[0]  = in_valid;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    always_ff @(posedge clk) begin
      logic [RW-1:0] r;
      logic [QW-1:0] qq;
      r  = rem[s];
      qq = q[s];
      for (int b = 0; b < int'(BPS); b++) begin
        int bit_i;
        bit_i = int'(QW) - 1 - (s * int'(BPS) + b);
        if (bit_i >= 0) begin
          logic [RW-1:0] sub;
          sub = RW'(dv[s]) << bit_i;
          if (r >= sub) begin
            r = r - sub;
            qq[bit_i] = 1'b1;
          end
        end
      end
      rem[s+1] <= r;
      q[s+1]   <= qq;
      dv[s+1]  <= dv[s];
      tg[s+1]  <= tg[s];
    end
    always_ff @(posedge clk) begin
      if (rst) vl[s+1] <= 1'b0;
      else     vl[s+1] <= vl[s];
    end
  end

  assign out_valid = vl[STAGES];
  assign quotient  = q[STAGES];
  assign out_tag   = tg[STAGES];
endmodule
