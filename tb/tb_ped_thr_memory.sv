// tb_ped_thr_memory: writes pedestal and threshold of every channel through
// the configuration bus and checks that each sample leaves one cycle later
// with its own channel's values and otherwise unchanged.
module tb_ped_thr_memory;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 3;
  logic clk = 0, rst = 1, start = 0;
  always #1 clk = ~clk;
  link_data_t src [NL], out [NL], src_d [NL];
  time_info_t ti, to, ti_d;
  int tbc;
  cfg_wr_t cfg = '0;
  stream_source #(.NL(NL)) s (.clk, .start, .ldata(src), .ti, .tb_count(tbc));
  ped_thr_memory #(.NLINKS(NL)) dut (.clk, .rst, .cfg, .ldata_in(src), .tinfo_in(ti), .ldata_out(out), .tinfo_out(to));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask
  function automatic logic [11:0] pv(input int l, input int c); return 12'(100 + 13 * l + 7 * c); endfunction
  function automatic logic [11:0] tv(input int l, input int c); return 12'(3000 - 11 * l - 5 * c); endfunction

  bit go = 0;
  always @(posedge clk) begin
    src_d <= src; ti_d <= ti;
    if (go && ti_d.adc_valid) begin
      check(to == ti_d, "time info delayed by one cycle");
      for (int l = 0; l < NL; l++) for (int j = 0; j < 2; j++) begin
        int c;
        c = 2 * ti_d.channel_id + j;
        check(out[l][j].pedestal == pv(l, c) && out[l][j].threshold == tv(l, c), $sformatf("params l%0d c%0d", l, c));
        check(out[l][j].sample == src_d[l][j].sample, "sample unchanged");
      end
    end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 4; t++) for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin
      s.samples[t][l][c] = test_sample(l, c, t, 2);
      s.ped[l][c] = 0; s.thr[l][c] = 0;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) for (int t = 0; t < 2; t++) begin
      cfg.we <= 1; cfg.link <= 5'(l); cfg.addr <= 6'(c / 2); cfg.odd <= 1'(c % 2);
      cfg.target <= t ? CFG_THRESHOLD : CFG_PEDESTAL;
      cfg.data <= t ? 32'(tv(l, c)) : 32'(pv(l, c));
      @(posedge clk);
    end
    cfg.we <= 0;
    start <= 1; @(posedge clk); start <= 0;
    repeat (10) @(posedge clk);
    go = 1;
    repeat (48 * 6) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
