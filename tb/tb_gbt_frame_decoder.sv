// tb_gbt_frame_decoder: self-checking test of the GBT frame decoder.
//
// A front-end link model sends SYNC at each of the four nibble positions of
// a frame in turn (the decoder is restarted with dec_reset between runs).
// Every emitted pair is compared with the reference sample function, the
// time-bin start flag is checked, the rate (40 pairs per 48 cycles), the
// ADC-clock phase report and the clock-mismatch detection are checked.
module tb_gbt_frame_decoder;
  import tpc_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst = 1, dec_reset = 0;
  always #1 clk = ~clk;

  logic         start = 0, glitch = 0;
  int           offset = 0, cshift = 0;
  logic         fv;
  logic [111:0] frame;
  dec_stream_t  dout;
  logic locked, sync_seen, align_err, clk_mismatch;
  logic [4:0] phase;

  fec_link_model #(.LINK(3)) fem (.clk, .start, .offset, .clk_shift(cshift), .glitch_clk(glitch),
                                  .frame_valid(fv), .frame);
  gbt_frame_decoder dut (.clk, .rst, .dec_reset, .frame_valid(fv), .frame, .dout, .locked,
                         .sync_seen, .align_err, .clk_mismatch, .adc_clk_phase(phase));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", msg, $time);
    end
  endtask

  int pair_idx;      // pairs received since lock
  int seen_sync;
  int first_cycle, last_cycle, ncyc;
  always @(posedge clk) begin
    ncyc++;
    if (sync_seen) seen_sync++;
    if (dout.valid) begin
      int k, tbn;
      k   = pair_idx % 40;
      tbn = pair_idx / 40;
      check(dout.tb_first == (k == 0), $sformatf("tb_first at pair %0d", pair_idx));
      check(dout.s0 == sample_value(3, hs_of(2*k), sampa_ch_of(2*k), tbn),
            $sformatf("s0 pair %0d got %0d exp %0d", pair_idx, dout.s0, sample_value(3, hs_of(2*k), sampa_ch_of(2*k), tbn)));
      check(dout.s1 == sample_value(3, hs_of(2*k+1), sampa_ch_of(2*k+1), tbn),
            $sformatf("s1 pair %0d", pair_idx));
      if (pair_idx == 0) first_cycle = ncyc;
      if (pair_idx == 400) last_cycle = ncyc;
      pair_idx++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int run = 0; run < 5; run++) begin
      offset = (run == 4) ? 7 : run;
      cshift = 3 * run + 1;
      glitch = 0;
      dec_reset = 1;
      @(posedge clk);
      dec_reset = 0;
      pair_idx = 0;
      seen_sync = 0;
      start = 1;
      @(posedge clk);
      start = 0;
      wait (pair_idx >= 410);
      check(locked && !align_err, "locked without alignment error");
      check(seen_sync == 1, "one sync pulse");
      check(last_cycle - first_cycle == 480, $sformatf("rate: 400 pairs in %0d cycles", last_cycle - first_cycle));
      check(!clk_mismatch, "no clock mismatch");
      check(phase == 5'(cshift), $sformatf("adc clock phase %0d exp %0d", phase, cshift));
      glitch = 1;
      repeat (20) @(posedge clk);
      check(clk_mismatch, "clock mismatch detected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
