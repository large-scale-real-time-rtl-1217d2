// stream_source: testbench source of link data streams and a time info
// stream in the pipeline format: 48-cycle time-bins with 40 valid cycles,
// Channel-ID = cycle, TB Start/End, First TB on the first time-bin after
// `start`, Bunch-Crossing advancing by 8 per time-bin. Samples come from
// the `samples` array written by the testbench, indexed
// [time-bin % 4][link][channel]; pedestal and threshold from ped/thr.
module stream_source
  import tpc_pkg::*;
#(parameter int NL = 2) (
  input  logic       clk,
  input  logic       start,
  output link_data_t ldata [NL],
  output time_info_t ti,
  output int         tb_count
);
  logic [11:0] samples [4][NL][80];
  logic [11:0] ped [NL][80];
  logic [11:0] thr [NL][80];
  logic [31:0] trig [4];
  bit running = 0;
  int slot = 0;

  initial begin
    ti = '0;
    tb_count = -1;
    for (int l = 0; l < NL; l++) ldata[l] = '0;
    for (int i = 0; i < 4; i++) trig[i] = 0;
  end

  always @(posedge clk) begin
    if (start) begin
      running <= 1;
      slot    <= 0;
    end
    if (running) begin
      int tbn;
      if (slot == 0) tb_count <= tb_count + 1;
      tbn = (slot == 0) ? tb_count + 1 : tb_count;
      ti.channel_id     <= (slot < 40) ? 6'(slot) : 6'd0;
      ti.tb_start       <= slot == 0;
      ti.tb_end         <= slot == 39;
      ti.adc_valid      <= slot < 40;
      ti.first_tb       <= tbn == 0;
      ti.resync         <= 0;
      ti.bunch_crossing <= 12'((tbn * 8) % 3564);
      ti.trigger_type   <= trig[tbn % 4];
      for (int l = 0; l < NL; l++)
        for (int j = 0; j < 2; j++) begin
          ldata[l][j].sample        <= (slot < 40) ? samples[tbn % 4][l][2*slot+j] : 12'd0;
          ldata[l][j].pedestal      <= (slot < 40) ? ped[l][2*slot+j] : 12'd0;
          ldata[l][j].threshold     <= (slot < 40) ? thr[l][2*slot+j] : 12'd0;
          ldata[l][j].stream_active <= 1;
          ldata[l][j].rejected      <= 0;
          ldata[l][j].zero          <= 0;
        end
      slot <= (slot == 47) ? 0 : slot + 1;
    end
  end
endmodule
