// tb_idc_processor: integrates stream-source data in the IDC processor, in
// orbit mode (orbit bit every 4 time-bins, windows of 2 orbits) and then in
// trigger mode (a trigger bit every 4 time-bins), decodes the packets of
// both packetizers and compares header fields and every sum with sums
// computed from the stimulus.
module tb_idc_processor;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 4;
  logic clk = 0, rst = 1, start = 0;
  always #1 clk = ~clk;
  link_data_t src [NL];
  time_info_t ti;
  int tbc;
  logic en = 0, tmode = 0;
  logic [7:0] norb = 8'd2;
  logic [31:0] tmask = 32'h20;
  logic [1:0] dv, dsop, deop;
  logic [255:0] dd [2];
  logic ovr;
  logic [31:0] nwin;
  stream_source #(.NL(NL)) s (.clk, .start, .ldata(src), .ti, .tb_count(tbc));
  idc_processor #(.NLINKS(NL)) dut (.clk, .rst, .ldata(src), .tinfo(ti), .enable(en), .trig_mode(tmode),
    .n_orbits(norb), .trig_mask(tmask), .dma_valid(dv), .dma_data(dd), .dma_sop(dsop), .dma_eop(deop),
    .overrun(ovr), .n_windows(nwin));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  // expected windows: first time-bin and length, recorded by the stimulus
  int win_first [$], win_len [$];
  int n_pk [2] = '{0, 0};
  int n_orbit_win = 0, n_trig_win = 0;
  int cur_first [2], cur_len [2], cur_id [2], widx [2] = '{0, 0};
  int word [2] = '{0, 0};

  function automatic longint exp_sum(int first, int len, int l, int c);
    longint sm; sm = 0;
    for (int t = first; t < first + len; t++) sm += s.samples[t % 4][l][c];
    return sm;
  endfunction

  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) if (dv[p]) begin
      if (dsop[p]) begin
        check(dd[p][255:240] == 16'h1DC0 && dd[p][239:232] == 8'(p) && dd[p][231:224] == 8'(NL / 2), "header marker");
        check(widx[p] < win_first.size(), "packet expected");
        if (widx[p] < win_first.size()) begin
          cur_first[p] = win_first[widx[p]]; cur_len[p] = win_len[widx[p]];
          check(dd[p][191:180] == 12'((cur_first[p] * 8) % 3564) && dd[p][179:164] == 16'(cur_len[p]),
                $sformatf("header bc/ntb %0d %0d exp %0d %0d", dd[p][191:180], dd[p][179:164], cur_first[p] * 8, cur_len[p]));
          check(dd[p][223:192] == 32'(widx[p] + 1), "window number");
        end
        widx[p]++;
        word[p] = 0;
      end else begin
        for (int i = 0; i < 8; i++) begin
          int idx, l, c;
          idx = 8 * word[p] + i;
          l = p * (NL / 2) + idx / 80; c = idx % 80;
          check(longint'(dd[p][32*i +: 32]) == exp_sum(cur_first[p], cur_len[p], l, c),
                $sformatf("sum p%0d l%0d c%0d got %0d exp %0d", p, l, c, dd[p][32*i +: 32],
                          exp_sum(cur_first[p], cur_len[p], l, c)));
        end
        word[p]++;
        if (deop[p]) begin
          check(word[p] == NL / 2 * 10, "packet length");
          n_pk[p]++;
        end
      end
    end
    if (!rst) check(!ovr, "no overrun");
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 4; t++) for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++)
      s.samples[t][l][c] = test_sample(l, c, t, 5);
    for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin s.ped[l][c] = 0; s.thr[l][c] = 0; end
    s.trig[0] = 32'(1 << TRG_ORBIT);
    s.trig[1] = 0; s.trig[2] = 32'h20; s.trig[3] = 0;
    repeat (3) @(posedge clk);
    rst <= 0; en <= 1;
    start <= 1; @(posedge clk); start <= 0;
    // orbit mode: windows of 8 time-bins starting at time-bin 0
    for (int k = 0; k < 5; k++) begin win_first.push_back(8 * k); win_len.push_back(8); end
    n_orbit_win = 5;
    wait (tbc == 41);
    // switch to trigger mode between the window boundaries: the window
    // open since time-bin 40 closes at time-bin 42, then every 4 time-bins
    tmode <= 1;
    win_first.push_back(40); win_len.push_back(2);
    for (int k = 0; k < 5; k++) begin win_first.push_back(42 + 4 * k); win_len.push_back(4); end
    n_trig_win = 6;
    wait (tbc == 62);
    repeat (150) @(posedge clk);
    check(n_pk[0] == 11 && n_pk[1] == 11, $sformatf("packets %0d %0d", n_pk[0], n_pk[1]));
    check(nwin == 32'd11, "window counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
