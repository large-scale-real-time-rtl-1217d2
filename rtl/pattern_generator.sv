// pattern_generator: deterministic test stream for the processing chain,
// with the input multiplexer in front of the processing stage.
//
// When `enable` is low the aligned link data streams pass unchanged (one
// register stage). When high, every sample is replaced, with StreamActive
// set and Rejected cleared, by one of these patterns (mode):
//   PG_LFSR      a 32-bit LFSR value: each link runs its own LFSR (Galois
//                form, polynomial x^32+x^22+x^2+x+1, seeded with the link
//                number), stepped twice per valid cycle; the sample is the
//                LFSR's low 12 bits if the 32-bit value is below lfsr_thresh
//                and 0 otherwise, so lfsr_thresh / 2^32 sets the occupancy
//   PG_CONST     the constant const_value
//   PG_CHANNEL   the link channel number 0..79
//   PG_TIMEBIN   the number of time-bins since First TB (12 bits)
//   PG_COMBINED  {time-bin[4:0], channel[6:0]}
// The time info stream is delayed by the same register stage. The LFSRs are
// re-seeded on First TB so a run is reproducible.
//
// From the paper: a 32-bit LFSR with configurable threshold and the
// constant, channel-ID, time-bin and combined modes. This design's choices:
// polynomial, seeding, the threshold rule and the pattern encodings.
module pattern_generator
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS = 20
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic [2:0]  mode,
  input  logic [11:0] const_value,
  input  logic [31:0] lfsr_thresh,
  input  link_data_t  ldata_in  [NLINKS],
  input  time_info_t  tinfo_in,
  output link_data_t  ldata_out [NLINKS],
  output time_info_t  tinfo_out
);
  localparam logic [2:0] PG_LFSR = 3'd0, PG_CONST = 3'd1, PG_CHANNEL = 3'd2,
                         PG_TIMEBIN = 3'd3, PG_COMBINED = 3'd4;

  function automatic logic [31:0] lfsr_step(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'hA000_0003) : (s >> 1);
  endfunction

  logic [31:0] lfsr [NLINKS];
  logic [11:0] tb_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      tb_cnt <= '0;
      for (int l = 0; l < NLINKS; l++) lfsr[l] <= 32'(l + 1);
    end else begin
      if (tinfo_in.first_tb && tinfo_in.tb_start) tb_cnt <= '0;
      else if (tinfo_in.tb_end) tb_cnt <= tb_cnt + 12'd1;
      for (int l = 0; l < NLINKS; l++) begin
        if (tinfo_in.first_tb && tinfo_in.tb_start)
          lfsr[l] <= lfsr_step(lfsr_step(32'(l + 1)));
        else if (tinfo_in.adc_valid)
          lfsr[l] <= lfsr_step(lfsr_step(lfsr[l]));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tinfo_out <= '0;
      for (int l = 0; l < NLINKS; l++) ldata_out[l] <= '0;
    end else begin
      tinfo_out <= tinfo_in;
      for (int l = 0; l < NLINKS; l++) begin
        ldata_out[l] <= ldata_in[l];
        if (enable) begin
          logic [31:0] r [2];
          logic [11:0] tbv;
          r[0] = (tinfo_in.first_tb && tinfo_in.tb_start) ? 32'(l + 1) : lfsr[l];
          r[1] = lfsr_step(r[0]);
          tbv  = (tinfo_in.first_tb && tinfo_in.tb_start) ? 12'd0 : tb_cnt;
          for (int j = 0; j < 2; j++) begin
            logic [6:0]  ch;
            logic [11:0] v;
            ch = {tinfo_in.channel_id, 1'b0} + 7'(j);
            case (mode)
              PG_LFSR:     v = (r[j] < lfsr_thresh) ? r[j][11:0] : 12'd0;
              PG_CONST:    v = const_value;
              PG_CHANNEL:  v = 12'(ch);
              PG_TIMEBIN:  v = tbv;
              PG_COMBINED: v = {tbv[4:0], ch};
              default:     v = 12'd0;
            endcase
            ldata_out[l][j].sample        <= tinfo_in.adc_valid ? v : 12'd0;
            ldata_out[l][j].stream_active <= 1'b1;
            ldata_out[l][j].rejected      <= 1'b0;
            ldata_out[l][j].zero          <= 1'b0;
          end
        end
      end
    end
  end
endmodule
