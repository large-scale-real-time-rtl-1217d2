// tb_global_aligner: self-checking test of the global aligner with three
// links whose front-end models start at different times (different link
// latencies). Checks that after t_align all links deliver the same
// time-bin in the same cycle, the time-bin framing (48 cycles, 40 valid,
// TB Start/End, Channel-ID), First TB, Resync with zero samples during a
// resync, Trigger-Type accumulation, and loss of StreamActive for a link
// whose data arrive later than t_align.
module tb_global_aligner;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 3;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic [NL-1:0] start = '0;
  logic          fv [NL];
  logic [111:0]  frame [NL];
  dec_stream_t   dout [NL];
  logic [NL-1:0] sync_seen, locked;
  logic          resync_start = 0, dec_reset = 0, trg_valid = 0;
  logic [31:0]   trg_type = 0;
  logic [11:0]  bc = 0;
  link_data_t    ldata [NL];
  time_info_t    ti;
  logic [NL-1:0] ovf;

  for (genvar l = 0; l < NL; l++) begin : g_l
    fec_link_model #(.LINK(l)) fem (.clk, .start(start[l]), .offset(l), .clk_shift(0), .glitch_clk(1'b0),
                                    .frame_valid(fv[l]), .frame(frame[l]));
    gbt_frame_decoder dec (.clk, .rst, .dec_reset, .frame_valid(fv[l]), .frame(frame[l]), .dout(dout[l]),
                           .locked(locked[l]), .sync_seen(sync_seen[l]), .align_err(), .clk_mismatch(),
                           .adc_clk_phase());
  end

  global_aligner #(.NLINKS(NL)) dut (.clk, .rst, .din(dout), .sync_seen, .resync_start, .dec_reset,
    .t_align(16'd600), .bc, .trg_valid, .trg_type, .ldata, .tinfo(ti), .fifo_overflow(ovf));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", msg, $time);
    end
  endtask

  int cyc = 0, t_req = 0, t_first = -1, tbn = -1, first_count = 0, resync_cycles = 0, trig_seen = 0;
  bit late_link = 0;
  always @(posedge clk) begin
    cyc++;
    bc <= (cyc / 6) % 3564;
    if (!rst) begin
      if (ti.resync) begin
        resync_cycles++;
        for (int l = 0; l < NL; l++) check(ldata[l][0].sample == 0 && ldata[l][1].sample == 0, "zeros in resync");
      end
      if (ti.first_tb && ti.tb_start) begin
        first_count++;
        t_first = cyc;
        tbn     = -1;
      end
      if (ti.tb_start && t_first >= 0) tbn++;
      if (t_first >= 0 && !ti.resync) begin
        int k;
        k = (cyc - t_first) % 48;
        check(ti.adc_valid == (k < 40), "adc_valid framing");
        check(ti.tb_start == (k == 0) && ti.tb_end == (k == 39), "tb start/end");
        if (k < 40) begin
          check(ti.channel_id == 6'(k), "channel id");
          for (int l = 0; l < NL; l++) begin
            if (late_link && l == 2) begin
              check(!ldata[l][0].stream_active, "late link inactive");
            end else begin
              check(ldata[l][0].stream_active, $sformatf("link %0d active", l));
              for (int j = 0; j < 2; j++)
                check(ldata[l][j].sample == {sample_value(l, hs_of(2*k+j), sampa_ch_of(2*k+j), tbn), 2'b00},
                      $sformatf("link %0d ch %0d tb %0d", l, 2*k+j, tbn));
            end
          end
        end
        if (ti.trigger_type == 32'h10) trig_seen++;
      end
    end
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_resync(input int d0, input int d1, input int d2);
    int d[NL];
    d = '{d0, d1, d2};
    @(posedge clk);
    resync_start <= 1;
    t_req = cyc + 1;
    @(posedge clk);
    resync_start <= 0;
    repeat (20) @(posedge clk);
    dec_reset <= 1;
    @(posedge clk);
    dec_reset <= 0;
    t_first = -1;
    fork
      for (int l = 0; l < NL; l++) begin
        automatic int ll = l;
        fork
          begin
            repeat (d[ll]) @(posedge clk);
            start[ll] <= 1;
            @(posedge clk);
            start[ll] <= 0;
          end
        join_none
      end
    join
  endtask

  initial begin
    repeat (10) @(posedge clk);
    rst = 0;
    repeat (17) @(posedge clk);
    do_resync(5, 120, 300);
    wait (t_first >= 0);
    // read-out starts at the first time-bin boundary at least t_align after the request
    check(t_first - t_req >= 600 && t_first - t_req < 600 + 48 + 4, $sformatf("t_align respected: %0d", t_first - t_req));
    repeat (300) @(posedge clk);
    trg_type <= 32'h10; trg_valid <= 1;
    @(posedge clk);
    trg_valid <= 0;
    repeat (48 * 30) @(posedge clk);
    check(trig_seen == 48, $sformatf("trigger type shown for one time-bin (%0d)", trig_seen));
    // second resync, link 2 arrives too late for t_align
    do_resync(40, 10, 900);
    late_link = 1;
    wait (t_first >= 0);
    repeat (48 * 40) @(posedge clk);
    check(first_count == 2, "two First TB");
    check(resync_cycles > 1000, "resync periods");
    check(ovf == 0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
