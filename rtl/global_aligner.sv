// global_aligner: aligns the decoded streams of all links in time and
// produces the link data streams and the time info stream.
//
// Each link's decoder output (sample pairs, SYNC removed, starting with
// time-bin 0) is written into its own FIFO. The FIFOs are cleared by
// dec_reset (the moment the decoders are restarted) and a link starts
// writing with the first pair flagged as a time-bin start. A resync_start
// pulse marks the reference time: from then on the outputs carry zeros with
// valid timing (Resync = 1) and a counter runs for t_align cycles. At the
// next time-bin boundary after it expires all FIFOs are read together, one
// pair per link per cycle, and the first time-bin read is flagged First TB.
//
// Timing: a free-running slot counter divides the clock into time-bins of
// 48 cycles; cycles 0..39 carry channel pairs (ADC valid, Channel-ID = cycle)
// with TB Start on cycle 0 and TB End on cycle 39; cycles 40..47 are empty.
// Bunch-Crossing is the bc input sampled at cycle 0, Trigger-Type the OR of
// the triggers seen during the previous time-bin, Sync-BC the bc at the last
// SYNC of any link. A link whose FIFO runs empty, or whose first pair of a
// time-bin is not a time-bin start, loses StreamActive until the next resync.
// Outputs are registered (one cycle after the read).
//
// From the paper: per-link FIFOs reset before buffering, simultaneous read
// at t_align, zero-filled but well-formed output during resync, the flags.
// This design's choices: FIFO depth 512 (one 20-kbit memory block per link,
// as in the resource table), field widths, the loss rules and the moment the
// output switches to zeros (at the resync request).
module global_aligner
  import tpc_pkg::*;
#(
  parameter int unsigned NLINKS     = 20,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst,
  input  dec_stream_t      din        [NLINKS],
  input  logic [NLINKS-1:0] sync_seen,
  input  logic             resync_start,   // reference time of a (re)synchronisation
  input  logic             dec_reset,      // decoders restarted: clear FIFOs
  input  logic [15:0]      t_align,        // cycles from resync_start to read-out
  input  logic [11:0]      bc,             // current bunch crossing
  input  logic             trg_valid,
  input  logic [31:0]      trg_type,
  output link_data_t       ldata      [NLINKS],
  output time_info_t       tinfo,
  output logic [NLINKS-1:0] fifo_overflow
);
  localparam int unsigned AWC = $clog2(FIFO_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN} state_e;
  state_e state;

  logic [5:0]  slot;
  logic [15:0] timer;
  logic        first_pending;
  logic [31:0] trg_acc, trg_tb;
  logic [11:0] bc_tb, sync_bc;
  logic [NLINKS-1:0] armed, active;

  logic [20:0] rd_data [NLINKS];
  logic [NLINKS-1:0] empty;
  logic [NLINKS-1:0] unused_full, unused_underflow;
  logic [AWC:0]      unused_count [NLINKS];
  logic rd;

  assign rd = (state == S_RUN) && (slot < 6'(VALID_CYCLES));

  for (genvar l = 0; l < NLINKS; l++) begin : g_fifo
    logic wr;
    assign wr = din[l].valid && (armed[l] || din[l].tb_first);
    sync_fifo #(.WIDTH(21), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst, .clear(dec_reset),
      .wr_en(wr), .wr_data({din[l].tb_first, din[l].s1, din[l].s0}),
      .rd_en(rd), .rd_data(rd_data[l]), .empty(empty[l]), .full(unused_full[l]),
      .count(unused_count[l]), .overflow(fifo_overflow[l]), .underflow(unused_underflow[l]));
  end

  always_ff @(posedge clk) begin
    if (rst || dec_reset) armed <= '0;
    else for (int l = 0; l < NLINKS; l++)
      if (din[l].valid && din[l].tb_first) armed[l] <= 1'b1;
  end

  // slot counter, timing fields
  always_ff @(posedge clk) begin
    if (rst) begin
      slot    <= '0;
      trg_acc <= '0;
      trg_tb  <= '0;
      bc_tb   <= '0;
      sync_bc <= '0;
    end else begin
      slot <= (slot == 6'(TB_CYCLES - 1)) ? '0 : slot + 6'd1;
      if (slot == 6'(TB_CYCLES - 1)) begin
        trg_tb  <= trg_acc | (trg_valid ? trg_type : '0);
        trg_acc <= '0;
      end else if (trg_valid) begin
        trg_acc <= trg_acc | trg_type;
      end
      if (slot == 6'd0) bc_tb <= bc;
      if (|sync_seen) sync_bc <= bc;
    end
  end

  // resync state machine
  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= S_IDLE;
      timer         <= '0;
      first_pending <= 1'b0;
      active        <= '0;
    end else begin
      if (resync_start) begin
        state <= S_WAIT;
        timer <= t_align;
      end else begin
        case (state)
          S_IDLE: ;
          S_WAIT: begin
            if (timer != 0) timer <= timer - 16'd1;
            else if (slot == 6'(TB_CYCLES - 1)) begin
              state         <= S_RUN;
              first_pending <= 1'b1;
              active        <= '1;
            end
          end
          S_RUN: begin
            if (slot == 6'(TB_CYCLES - 1)) first_pending <= 1'b0;
            for (int l = 0; l < NLINKS; l++)
              if (rd && (empty[l] || (rd_data[l][20] != (slot == 6'd0)))) active[l] <= 1'b0;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // registered outputs
  always_ff @(posedge clk) begin
    if (rst) begin
      tinfo <= '0;
      for (int l = 0; l < NLINKS; l++) ldata[l] <= '0;
    end else begin
      tinfo.channel_id     <= (slot < 6'(VALID_CYCLES)) ? slot : 6'd0;
      tinfo.bunch_crossing <= (slot == 6'd0) ? bc : bc_tb;
      tinfo.sync_bc        <= sync_bc;
      tinfo.trigger_type   <= trg_tb;
      tinfo.tb_start       <= (slot == 6'd0);
      tinfo.tb_end         <= (slot == 6'(VALID_CYCLES - 1));
      tinfo.adc_valid      <= (slot < 6'(VALID_CYCLES));
      tinfo.first_tb       <= (state == S_RUN) && first_pending;
      tinfo.resync         <= (state != S_RUN);
      for (int l = 0; l < NLINKS; l++) begin
        logic ok;
        ok = rd && !empty[l] && active[l] && (rd_data[l][20] == (slot == 6'd0));
        for (int j = 0; j < 2; j++) begin
          ldata[l][j].sample        <= ok ? {rd_data[l][10*j +: 10], 2'b00} : 12'd0;
          ldata[l][j].pedestal      <= '0;
          ldata[l][j].threshold     <= '0;
          ldata[l][j].zero          <= 1'b0;
          ldata[l][j].stream_active <= ok;
          ldata[l][j].rejected      <= !ok;
        end
      end
    end
  end
endmodule
