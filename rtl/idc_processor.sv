// idc_processor: integrated digital currents (IDCs) of all links.
//
// Integrates the raw samples of every channel over windows defined by the
// controller (orbits or triggers) in NLINKS link cores and sends each
// finished window through two packetizers (links 0..NLINKS/2-1 and the
// rest) as IDC packets on two dedicated 256-bit DMA streams, while the next
// window is integrated in the other memory bank. The input streams are
// registered once so that they line up with the registered controller
// outputs.
//
// From the paper: link cores, controller, packetizer; 20 cores with 80
// sums each; operation in parallel with the main pipeline; readout during
// integration. This design's choices: see the submodules; the split of the
// links over two packetizers mirrors the two dense-packing instances.
module idc_processor
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS = 20,
  parameter int unsigned SUM_W  = 24
) (
  input  logic         clk,
  input  logic         rst,
  input  link_data_t   ldata [NLINKS],
  input  time_info_t   tinfo,
  input  logic         enable,
  input  logic         trig_mode,
  input  logic [7:0]   n_orbits,
  input  logic [31:0]  trig_mask,
  output logic [1:0]   dma_valid,
  output logic [255:0] dma_data [2],
  output logic [1:0]   dma_sop,
  output logic [1:0]   dma_eop,
  output logic         overrun,
  output logic [31:0]  n_windows
);
  localparam int unsigned NA = NLINKS / 2;
  localparam int unsigned NB = NLINKS - NA;

  link_data_t ld_q [NLINKS];
  logic [5:0] ch_q;
  always_ff @(posedge clk) begin
    ld_q <= ldata;
    ch_q <= tinfo.channel_id;
  end

  logic        int_valid, bank, init, done;
  logic [31:0] win_id;
  logic [11:0] win_bc;
  logic [15:0] win_ntb;
  logic [1:0]  busy;

  idc_controller u_ctrl (
    .clk, .rst, .enable, .trig_mode, .n_orbits, .trig_mask, .tinfo,
    .pk_busy(|busy), .int_valid, .bank, .init, .done, .win_id, .win_bc, .win_ntb, .overrun);

  logic [5:0]       ro_addr [2];
  logic [SUM_W-1:0] ro_sum  [NLINKS][2];

  for (genvar l = 0; l < NLINKS; l++) begin : g_core
    logic [SUM_W-1:0] s [2];
    idc_link_core #(.SUM_W(SUM_W)) u_core (
      .clk, .rst, .ldata(ld_q[l]), .channel_id(ch_q), .valid(int_valid),
      .bank, .init, .ro_addr(ro_addr[l < NA ? 0 : 1]), .ro_sum(s));
    assign ro_sum[l][0] = s[0];
    assign ro_sum[l][1] = s[1];
  end

  logic [SUM_W-1:0] sum_a [NA][2];
  logic [SUM_W-1:0] sum_b [NB][2];
  always_comb begin
    for (int l = 0; l < int'(NA); l++) sum_a[l] = ro_sum[l];
    for (int l = 0; l < int'(NB); l++) sum_b[l] = ro_sum[NA + l];
  end

  idc_packetizer #(.NL(NA), .SUM_W(SUM_W), .PK_ID(0)) u_pk0 (
    .clk, .rst, .start(done), .win_id, .win_bc, .win_ntb, .ro_addr(ro_addr[0]), .ro_sum(sum_a),
    .busy(busy[0]), .dma_valid(dma_valid[0]), .dma_data(dma_data[0]), .dma_sop(dma_sop[0]),
    .dma_eop(dma_eop[0]));
  idc_packetizer #(.NL(NB), .SUM_W(SUM_W), .PK_ID(1)) u_pk1 (
    .clk, .rst, .start(done), .win_id, .win_bc, .win_ntb, .ro_addr(ro_addr[1]), .ro_sum(sum_b),
    .busy(busy[1]), .dma_valid(dma_valid[1]), .dma_data(dma_data[1]), .dma_sop(dma_sop[1]),
    .dma_eop(dma_eop[1]));

  always_ff @(posedge clk) begin
    if (rst)       n_windows <= '0;
    else if (done) n_windows <= n_windows + 1;
  end
endmodule
