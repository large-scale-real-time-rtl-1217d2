// tb_pedestal_core: drives random samples, pedestals, thresholds and
// common-mode values into one pedestal core and compares its output, three
// cycles later, with a behavioural model; covers positive and negative
// common mode, clamping at both ends, bypass, debug channel and CM disable.
module tb_pedestal_core;
  import tpc_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  cfg_wr_t cfg = '0;
  link_data_t din = '0, dout;
  time_info_t tin = '0, tout;
  logic [15:0] cmv = 0; logic cms = 0, cmvld = 0, cmen = 1, byp = 0, dbg = 0;
  logic [11:0] soff = 0; logic [6:0] dch = 0;
  pedestal_core #(.LINK(2)) dut (.clk, .rst, .cfg, .ldata_in(din), .tinfo_in(tin), .cm_value(cmv),
    .cm_sign(cms), .cm_valid(cmvld), .cm_enable(cmen), .bypass(byp), .sample_offset(soff),
    .debug_en(dbg), .debug_channel(dch), .ldata_out(dout), .tinfo_out(tout));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  logic [7:0] kv [80];
  int n_clamp_lo = 0, n_clamp_hi = 0, n_dbg = 0, n_neg = 0;
  typedef struct { link_data_t d; time_info_t t; logic [15:0] cm; logic s; logic en, byp, dbg;
                   logic [11:0] off; logic [6:0] dch; } in_t;
  in_t hist [$];
  logic [15:0] cm_lat = 0; logic cms_lat = 0;

  function automatic logic [11:0] model(in_t x, int j, output bit zero);
    int v, corr, r;
    corr = x.en ? ((int'(x.cm) * int'(kv[2 * x.t.channel_id + j]) + 2048) >>> 12) : 0;
    v = int'(x.d[j].sample) + int'(x.off) - int'(x.d[j].pedestal) + (x.s ? corr : -corr);
    r = x.byp ? int'(x.d[j].sample) : (v < 0 ? 0 : (v > 4095 ? 4095 : v));
    if (x.dbg && 2 * x.t.channel_id + j == int'(x.dch)) r = int'(x.cm >> 4) | (x.s ? 2048 : 0);
    zero = r <= int'(x.d[j].threshold);
    return 12'(r);
  endfunction

  int cyc = 0;
  always @(posedge clk) if (!rst) begin
    in_t x;
    x.d = din; x.t = tin; x.en = cmen; x.byp = byp; x.dbg = dbg; x.off = soff; x.dch = dch;
    x.cm = cm_lat; x.s = cms_lat;       // latched value used from the next cycle on
    if (cmvld) begin cm_lat = cmv; cms_lat = cms; end
    hist.push_front(x);
    if (hist.size() > 4) void'(hist.pop_back());
    if (hist.size() == 4) begin
      in_t y;
      y = hist[3];
      // the CM register is read in stage 2: use the value latched one cycle later
      y.cm = hist[2].cm; y.s = hist[2].s; y.en = hist[2].en;
      // bypass, offset and debug settings act in stage 3
      y.byp = hist[1].byp; y.off = hist[1].off; y.dbg = hist[1].dbg; y.dch = hist[1].dch;
      check(tout == y.t, "time info delayed");
      for (int j = 0; j < 2; j++) begin
        bit z; logic [11:0] e;
        e = model(y, j, z);
        check(dout[j].sample == e && dout[j].zero == z && dout[j].pedestal == y.d[j].pedestal,
              $sformatf("sample ch%0d j%0d got %0d exp %0d", y.t.channel_id, j, dout[j].sample, e));
        if (e == 0) n_clamp_lo++;
        if (e == 4095) n_clamp_hi++;
        if (y.dbg && 2 * y.t.channel_id + j == int'(y.dch)) n_dbg++;
        if (y.s && y.en && y.cm != 0) n_neg++;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int c = 0; c < 80; c++) kv[c] = 8'($urandom_range(32, 100));
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < 80; c++) begin
      cfg.we <= 1; cfg.target <= CFG_K; cfg.link <= 5'd2; cfg.addr <= 6'(c / 2); cfg.odd <= 1'(c % 2);
      cfg.data <= 32'(kv[c]);
      @(posedge clk);
    end
    // a write to another link must not change this core's memory
    cfg.link <= 5'd3; cfg.data <= 32'd255; cfg.addr <= 6'd0; cfg.odd <= 0; @(posedge clk);
    cfg.we <= 0;
    for (int i = 0; i < 6000; i++) begin
      tin.channel_id <= 6'($urandom_range(0, 39));
      tin.adc_valid <= 1;
      tin.bunch_crossing <= 12'(i);
      for (int j = 0; j < 2; j++) begin
        din[j].sample <= 12'($urandom_range(0, 4095));
        din[j].pedestal <= 12'($urandom_range(0, 4095));
        din[j].threshold <= 12'($urandom_range(0, 300));
        din[j].stream_active <= 1;
      end
      cmvld <= ($urandom_range(0, 20) == 0);
      cmv <= 16'($urandom_range(0, 65535) >> $urandom_range(0, 12));
      cms <= 1'($urandom_range(0, 1));
      cmen <= ($urandom_range(0, 9) != 0);
      byp <= ($urandom_range(0, 19) == 0);
      dbg <= ($urandom_range(0, 9) == 0);
      dch <= 7'($urandom_range(0, 79));
      soff <= ($urandom_range(0, 3) == 0) ? 12'($urandom_range(0, 400)) : 12'd0;
      @(posedge clk);
    end
    check(n_clamp_lo > 0 && n_clamp_hi > 0 && n_dbg > 0 && n_neg > 0, "all cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
