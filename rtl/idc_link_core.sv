// idc_link_core: integrated digital current sums of the 80 channels of one
// link.
//
// Per channel parity there are two memory banks of 40 sums (SUM_W bits).
// The controller selects the integrating bank; the other bank is read out
// by the packetizer while integration continues ("interleaved" operation).
// Integration pipeline (Fig. 22): the Channel-ID addresses the read port of
// the integrating bank; sample, write address, valid and init flag are
// registered; in the next cycle read data + sample (or the sample alone
// when init marks the first time-bin of a window) is written back to the
// registered address. Consecutive accesses to one channel are 48 cycles
// apart, so no read-after-write forwarding is needed. Sums saturate at
// 2^SUM_W - 1. Readout: ro_addr (0..39) is applied to the other bank;
// ro_sum (both parities) follows one cycle later.
//
// From the paper: dual-port memory, add-and-write-back in the next cycle,
// integration continuing during readout, 80 sums per core. This design's
// choices: the bank pair, the init multiplexer replacing a clear, SUM_W = 24
// (enough for 4096 time-bins, about 9 orbits), saturation.
module idc_link_core
  import tpc_pkg::*;
#(
  parameter int unsigned SUM_W = 24
) (
  input  logic             clk,
  input  logic             rst,
  input  link_data_t       ldata,
  input  logic [5:0]       channel_id,
  input  logic             valid,       // ADC valid and integration enabled
  input  logic             bank,        // integrating bank
  input  logic             init,        // first time-bin of a window
  input  logic [5:0]       ro_addr,
  output logic [SUM_W-1:0] ro_sum [2]
);
  logic [SUM_W-1:0] mem [2][2][VALID_CYCLES];   // [bank][parity][channel]
  logic [SUM_W-1:0] rd [2];
  logic [11:0]      smp_q [2];
  logic [5:0]       wa_q;
  logic             wv_q, init_q, bank_q;

  always_ff @(posedge clk) begin
    for (int j = 0; j < 2; j++) begin
      rd[j]     <= mem[bank][j][channel_id];
      smp_q[j]  <= ldata[j].sample;
      ro_sum[j] <= mem[~bank][j][ro_addr];
    end
    wa_q   <= channel_id;
    init_q <= init;
    bank_q <= bank;
  end

  always_ff @(posedge clk) begin
    if (rst) wv_q <= 1'b0;
    else     wv_q <= valid && channel_id < 6'(VALID_CYCLES);
  end

  always_ff @(posedge clk) begin
    if (wv_q)
      for (int j = 0; j < 2; j++) begin
        logic [SUM_W:0] s;
        s = {1'b0, rd[j]} + (SUM_W+1)'(smp_q[j]);
        if (init_q)        mem[bank_q][j][wa_q] <= SUM_W'(smp_q[j]);
        else if (s[SUM_W]) mem[bank_q][j][wa_q] <= '1;
        else               mem[bank_q][j][wa_q] <= s[SUM_W-1:0];
      end
  end
endmodule
