// ped_thr_memory: per-channel pedestal and threshold memory that fills the
// Pedestal and Threshold fields of the link data streams.
//
// For every link there are two small memories (even and odd channel) of 40
// words, addressed by the Channel-ID of the time info stream; each word holds
// a 12-bit pedestal and a 12-bit threshold (I10F2). Configuration writes
// arrive on the shared configuration bus (targets CFG_PEDESTAL and
// CFG_THRESHOLD). The read is synchronous, so the streams leave one cycle
// later with the parameters attached; all other fields pass unchanged.
//
// From the paper: per-channel pedestal and threshold values travel with
// each sample in the link data stream, and a pedestal/threshold memory
// exists (resource table). This design's choices: organisation, the bus and
// the one-cycle latency. Memory contents are undefined until written, as in
// a block RAM.
module ped_thr_memory
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS = 20
) (
  input  logic        clk,
  input  logic        rst,
  input  cfg_wr_t     cfg,
  input  link_data_t  ldata_in  [NLINKS],
  input  time_info_t  tinfo_in,
  output link_data_t  ldata_out [NLINKS],
  output time_info_t  tinfo_out
);
  for (genvar l = 0; l < NLINKS; l++) begin : g_link
    for (genvar j = 0; j < 2; j++) begin : g_par
      logic [11:0] ped_mem [VALID_CYCLES];
      logic [11:0] thr_mem [VALID_CYCLES];
      logic [11:0] ped_q, thr_q;
      always_ff @(posedge clk) begin
        if (cfg.we && cfg.link == 5'(l) && cfg.odd == 1'(j) && cfg.addr < 6'(VALID_CYCLES)) begin
          if (cfg.target == CFG_PEDESTAL)  ped_mem[cfg.addr] <= cfg.data[11:0];
          if (cfg.target == CFG_THRESHOLD) thr_mem[cfg.addr] <= cfg.data[11:0];
        end
      end
      always_ff @(posedge clk) begin
        ped_q <= ped_mem[tinfo_in.channel_id];
        thr_q <= thr_mem[tinfo_in.channel_id];
      end
      chan_data_t d_q;
      always_ff @(posedge clk) begin
        if (rst) d_q <= '0;
        else     d_q <= ldata_in[l][j];
      end
      always_comb begin
        ldata_out[l][j]           = d_q;
        ldata_out[l][j].pedestal  = ped_q;
        ldata_out[l][j].threshold = thr_q;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) tinfo_out <= '0;
    else     tinfo_out <= tinfo_in;
  end
endmodule
