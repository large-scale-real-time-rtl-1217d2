// tb_cmc_top: checks the common-mode estimator bit-exactly against a
// behavioural model of scaler, randomizer, compare-and-match and calculator.
// Four time-bin patterns repeat: common-mode shifts of -5, +3 and -12 ADC
// counts with noise, 1/k_pad factors other than 1 on some pads and signal
// pads that must be excluded; the fourth time-bin holds only signal so that
// no empty pad exists (expected CM = 0). The same stimulus also checks that
// the estimate is within one ADC count of the injected shift.
module tb_cmc_top;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 20;
  localparam int NS = 2 * NL;
  logic clk = 0, rst = 1, start = 0;
  always #1 clk = ~clk;
  link_data_t src [NL];
  time_info_t ti;
  int tbc;
  cfg_wr_t cfg = '0;
  logic [19:0] offset = 20'(100 << 8);
  logic signed [7:0] t1 = 8'sd12, t2 = 8'sd27;
  logic [10:0] md = 11'(3 << 4);
  logic [3:0] nmin = 4'd5;
  logic [15:0] cm_value;
  logic cm_sign, cm_valid;
  logic [10:0] n_empty;
  stream_source #(.NL(NL)) s (.clk, .start, .ldata(src), .ti, .tb_count(tbc));
  cmc_top #(.NLINKS(NL)) dut (.clk, .rst, .cfg, .ldata(src), .tinfo(ti), .offset, .t1, .t2,
    .match_dist(md), .n_min(nmin), .cm_value, .cm_sign, .cm_valid, .n_empty);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  logic [7:0] invk [NL][80];
  int shift_adc [4] = '{-5, 3, -12, 0};
  logic [15:0] exp_val [4];
  logic        exp_sign [4];
  int          exp_cnt [4];

  // model of one time-bin: 40 cycles, each with all links
  task automatic model(input int t);
    longint sum; int cnt;
    sum = 0; cnt = 0;
    for (int c = 0; c < 40; c++) begin
      int q [NS]; bit f1 [NS]; bit f2 [NS];
      for (int a = 0; a < NS; a++) begin
        int l, ch, v;
        l = a / 2; ch = 2 * c + a % 2;
        v = (int'(s.samples[t][l][ch]) - int'(s.ped[l][ch])) * int'(invk[l][ch]) + int'(offset);
        f1[a] = v <= (int'(t1) * 256 + int'(offset));
        f2[a] = v <= (int'(t2) * 256 + int'(offset));
        q[a]  = v < 0 ? 0 : (v > 32767 ? 32767 : v);
      end
      for (int a = 0; a < NS; a++) begin
        int m; m = 0;
        for (int n = 0; n < 10; n++) begin
          int r, d;
          r = (a + 2 * n + 3) % NS;
          d = (q[a] >> 4) - (q[r] >> 4);
          if (d < 0) d = -d;
          if (d < int'(md) && f1[a] && f2[r]) m++;
        end
        if (m > int'(nmin)) begin sum += q[a]; cnt++; end
      end
    end
    exp_cnt[t] = cnt;
    if (cnt == 0) begin exp_val[t] = 0; exp_sign[t] = 0; end
    else begin
      longint mean, d, mag;
      mean = (sum << 12) / cnt;
      d = mean - (longint'(offset) << 12);
      mag = d < 0 ? -d : d;
      exp_sign[t] = d < 0;
      exp_val[t] = (mag >> 12) > 65535 ? 16'hFFFF : 16'(mag >> 12);
    end
  endtask

  int nres = 0;
  always @(posedge clk) begin
    if (cm_valid) begin
      int t;
      t = nres % 4;
      check(cm_value == exp_val[t] && cm_sign == exp_sign[t] && n_empty == 11'(exp_cnt[t]),
            $sformatf("TB %0d cm=%0d/%0d n=%0d exp %0d/%0d n=%0d", nres, cm_value, cm_sign, n_empty,
                      exp_val[t], exp_sign[t], exp_cnt[t]));
      if (t != 3) begin
        int est;
        est = cm_sign ? -int'(cm_value) : int'(cm_value);
        check(est > shift_adc[t] * 256 - 256 && est < shift_adc[t] * 256 + 256, "estimate near shift");
      end else check(n_empty == 0, "no empty pad in signal-only time-bin");
      nres++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin
      s.ped[l][c] = 12'(400 + 4 * ((l * 7 + c) % 9));
      s.thr[l][c] = 0;
      invk[l][c] = ((l + c) % 5 == 0) ? 8'd72 : (((l + c) % 7 == 0) ? 8'd58 : 8'd64);
    end
    for (int t = 0; t < 4; t++) for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin
      int noise, sig, v, h;
      h = int'(test_sample(l, c, t, 9));
      noise = (h % 9) - 4;                    // -1..+1 ADC in I10F2 units
      sig = (t == 3 || h % 10 == 0) ? 4 * (60 + h % 40) : 0;
      // the pad sees the common mode divided by 1/k (so that q/k_pad... is flat)
      v = int'(s.ped[l][c]) + (shift_adc[t] * 4 * 64) / int'(invk[l][c]) + noise + sig;
      s.samples[t][l][c] = 12'(v);
    end
    for (int t = 0; t < 4; t++) model(t);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin
      cfg.we <= 1; cfg.link <= 5'(l); cfg.addr <= 6'(c / 2); cfg.odd <= 1'(c % 2);
      cfg.target <= CFG_INV_K; cfg.data <= 32'(invk[l][c]);
      @(posedge clk);
    end
    cfg.we <= 0;
    start <= 1; @(posedge clk); start <= 0;
    repeat (48 * 10) @(posedge clk);
    check(nres >= 8, "results for all time-bins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
