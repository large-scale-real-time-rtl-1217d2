// threshold_check: final zero-suppression decision for the link data
// streams after the ion-tail filter.
//
// The ion-tail filter changes the sample values, so the Zero flag set in the
// pedestal cores is re-evaluated: a sample is flagged Zero when its value is
// at or below the channel threshold carried in the link data stream, or when
// its stream is not active or was rejected. zs_enable = 0 clears all Zero
// flags (zero suppression off, full raw data). Latency: 1 cycle, time info
// delayed alongside. Per link a counter of samples above threshold is kept
// for monitoring.
//
// From the paper: the block name and position in Fig. 5 and the threshold
// comparison of Sec. 3.5.2. This design's choices: the comparison "at or
// below", the handling of inactive/rejected streams and the counters.
module threshold_check
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS = 20
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        zs_enable,
  input  link_data_t  ldata_in  [NLINKS],
  input  time_info_t  tinfo_in,
  output link_data_t  ldata_out [NLINKS],
  output time_info_t  tinfo_out,
  output logic [31:0] n_above   [NLINKS]
);
  always_ff @(posedge clk) begin
    tinfo_out <= tinfo_in;
    for (int l = 0; l < int'(NLINKS); l++)
      for (int j = 0; j < 2; j++) begin
        ldata_out[l][j]      <= ldata_in[l][j];
        ldata_out[l][j].zero <= zs_enable &&
          (ldata_in[l][j].sample <= ldata_in[l][j].threshold ||
           !ldata_in[l][j].stream_active || ldata_in[l][j].rejected);
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int l = 0; l < int'(NLINKS); l++) n_above[l] <= '0;
    end else if (tinfo_in.adc_valid) begin
      for (int l = 0; l < int'(NLINKS); l++)
        n_above[l] <= n_above[l]
          + 32'(ldata_in[l][0].sample > ldata_in[l][0].threshold)
          + 32'(ldata_in[l][1].sample > ldata_in[l][1].threshold);
    end
  end
endmodule
