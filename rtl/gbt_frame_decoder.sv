// gbt_frame_decoder: extracts the ADC samples of one optical link from its
// GBT frames.
//
// A link carries five SAMPA half-streams (2.5 SAMPA chips, 80 channels) and
// three ADC-clock E-links in the 112 user bits of a wide-mode GBT frame.
// Every E-link contributes four consecutive bits per frame. A half-stream
// uses five E-links in parallel, so it delivers four 5-bit nibbles per frame;
// the low and then the high nibble form one 10-bit sample, and the 16
// channels of the half-stream follow each other in order.
//
// After reset (rst, or dec_reset from the resync controller) every
// half-stream searches its nibble stream for the SYNC pattern at each of the
// four nibble positions of a frame. Once found, the samples that follow are
// assigned to channels by position. When all five half-streams are locked
// the decoder emits, for each frame, five pairs of samples on consecutive
// clock cycles (two samples per cycle). Pair k of a time-bin (k = 0..39)
// holds link channels 2k and 2k+1, where link channel 2k+j is channel
// 2*(k/5)+j of half-stream k%5. The frames must arrive at most every fifth
// cycle (every sixth in the 240 MHz / 40 MHz system); output latency is two
// frames plus one cycle.
//
// The three ADC-clock E-links are monitored: clk_mismatch is raised when
// they differ, and adc_clk_phase reports the nibble position (0..31 within
// the time-bin) of the last rising edge of the first one.
//
// From the paper: per-link decoder, SYNC search after reset, channel
// assignment by stream position, two samples per clock, ADC-clock
// monitoring, the E-link counts. This design's choices: which frame bits
// belong to which E-link (E-link e = bits 4e+3..4e, oldest bit at 4e;
// half-stream h = E-links 5h..5h+4, E-link 5h+b = nibble bit b; clock
// E-links 25..27), the SYNC pattern (parameter SYNC_PATTERN, SYNC_NIB nibbles,
// oldest nibble in the most significant bits), the link channel numbering,
// and the requirement that all five half-streams lock in the same frame
// (align_err otherwise).
module gbt_frame_decoder
  import tpc_pkg::*;
#(
  parameter int unsigned             SYNC_NIB     = 8,
  parameter logic [SYNC_NIB*5-1:0]   SYNC_PATTERN = 40'h15_A5_3C_96
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          dec_reset,       // restart SYNC search
  input  logic          frame_valid,
  input  logic [111:0]  frame,
  output dec_stream_t   dout,
  output logic          locked,          // all half-streams locked and emitting
  output logic          sync_seen,       // one-cycle pulse: SYNC found on half-stream 0
  output logic          align_err,       // half-streams started in different frames
  output logic          clk_mismatch,    // the three clock E-links disagreed
  output logic [4:0]    adc_clk_phase
);

  localparam int unsigned NHS = 5;
  localparam int unsigned WIN = SYNC_NIB - 1 + 4;

  typedef logic [4:0] nib_t;

  nib_t cur   [NHS][4];
  nib_t prev  [NHS][4];
  nib_t hist  [NHS][SYNC_NIB-1];          // nibbles before the current frame, [0] = newest

  logic [NHS-1:0] searching, started;
  logic [2:0]     phase    [NHS];
  logic [2:0]     paircnt  [NHS];

  // nibble extraction
  always_comb begin
    for (int h = 0; h < NHS; h++)
      for (int k = 0; k < 4; k++)
        for (int b = 0; b < 5; b++)
          cur[h][k][b] = frame[4*(5*h+b) + k];
  end

  // SYNC search: match ending at nibble k of the current frame
  logic [NHS-1:0] found;
  logic [1:0]     found_k [NHS];
  always_comb begin
    for (int h = 0; h < NHS; h++) begin
      nib_t seq [WIN];   // seq[0] oldest
      found[h]   = 1'b0;
      found_k[h] = 2'd0;
      for (int i = 0; i < int'(SYNC_NIB) - 1; i++) seq[i] = hist[h][SYNC_NIB-2-i];
      for (int k = 0; k < 4; k++) seq[SYNC_NIB-1+k] = cur[h][k];
      for (int k = 0; k < 4; k++) begin
        logic m;
        m = 1'b1;
        for (int i = 0; i < int'(SYNC_NIB); i++)
          if (seq[k+i] != SYNC_PATTERN[5*(SYNC_NIB-1-i) +: 5]) m = 1'b0;
        if (m && !found[h]) begin
          found[h]   = 1'b1;
          found_k[h] = 2'(k);
        end
      end
    end
  end

  // samples of the frame: window {prev, cur} at the locked phase
  logic [9:0] smp [NHS][2];
  always_comb begin
    for (int h = 0; h < NHS; h++) begin
      nib_t w [8];
      for (int k = 0; k < 4; k++) begin
        w[k]   = prev[h][k];
        w[k+4] = cur[h][k];
      end
      for (int j = 0; j < 2; j++)
        smp[h][j] = {w[int'(phase[h]) + 2*j + 1], w[int'(phase[h]) + 2*j]};
    end
  end

  // serializer of the five pairs of a frame
  logic [9:0]  obuf   [NHS][2];
  logic [2:0]  ocnt;         // pairs still to send
  logic        obuf_first;
  logic [2:0]  ohs;

  always_ff @(posedge clk) begin
    if (rst || dec_reset) begin
      searching  <= '1;
      started    <= '0;
      locked     <= 1'b0;
      align_err  <= 1'b0;
      ocnt       <= '0;
      ohs        <= '0;
      obuf_first <= 1'b0;
      for (int h = 0; h < NHS; h++) begin
        phase[h]    <= '0;
        paircnt[h]  <= '0;
        for (int i = 0; i < int'(SYNC_NIB) - 1; i++) hist[h][i] <= '0;
        for (int k = 0; k < 4; k++) prev[h][k] <= '0;
      end
    end else begin
      if (frame_valid) begin
        for (int h = 0; h < NHS; h++) begin
          // history of nibbles
          for (int i = int'(SYNC_NIB) - 2; i >= 4; i--) hist[h][i] <= hist[h][i-4];
          for (int i = 0; i < 4 && i < int'(SYNC_NIB) - 1; i++) hist[h][i] <= cur[h][3-i];
          for (int k = 0; k < 4; k++) prev[h][k] <= cur[h][k];
          if (searching[h] && found[h]) begin
            searching[h] <= 1'b0;
            // the first sample starts right after the SYNC: position k+1 of
            // the {previous, current} window of the next frame
            phase[h]     <= 3'(found_k[h]) + 3'd1;
            started[h]   <= 1'b1;
          end
          if (started[h]) paircnt[h] <= paircnt[h] + 3'd1;
        end
        if (&started) begin
          locked <= 1'b1;
          for (int h = 0; h < NHS; h++) begin
            obuf[h][0] <= smp[h][0];
            obuf[h][1] <= smp[h][1];
            if (paircnt[h] != paircnt[0]) align_err <= 1'b1;
          end
          obuf_first <= (paircnt[0] == 3'd0);
          ocnt       <= 3'd5;
          ohs        <= '0;
        end
      end else if (ocnt != 0) begin
        ocnt       <= ocnt - 3'd1;
        ohs        <= ohs + 3'd1;
        obuf_first <= 1'b0;
      end
    end
  end

  always_comb begin
    dout.valid    = (ocnt != 0) && !frame_valid;
    dout.tb_first = obuf_first && (ohs == 3'd0);
    dout.s0       = obuf[ohs][0];
    dout.s1       = obuf[ohs][1];
  end

  // sync seen pulse (half-stream 0)
  always_ff @(posedge clk) begin
    if (rst || dec_reset) sync_seen <= 1'b0;
    else                  sync_seen <= frame_valid && searching[0] && found[0];
  end

  // ADC clock monitoring
  logic [4:0] nibpos;      // nibble position in the time-bin of cur[0]
  logic [4:0] nibpos_cur;
  logic       clk_last;
  // in a frame that emits pair 0, channel 0's low nibble is prev nibble `phase`
  assign nibpos_cur = (started[0] && paircnt[0] == 3'd0) ? 5'd4 - 5'(phase[0]) : nibpos;
  always_ff @(posedge clk) begin
    if (rst || dec_reset) begin
      clk_mismatch  <= 1'b0;
      adc_clk_phase <= '0;
      nibpos        <= '0;
      clk_last      <= 1'b0;
    end else if (frame_valid) begin
      for (int k = 0; k < 4; k++) begin
        logic c0, c1, c2;
        c0 = frame[4*25 + k];
        c1 = frame[4*26 + k];
        c2 = frame[4*27 + k];
        if (c0 != c1 || c0 != c2) clk_mismatch <= 1'b1;
        if (c0 && ((k == 0) ? !clk_last : !frame[4*25 + k - 1]))
          adc_clk_phase <= nibpos_cur + 5'(k);
      end
      clk_last <= frame[4*25 + 3];
      nibpos   <= nibpos_cur + 5'd4;
    end
  end

endmodule
