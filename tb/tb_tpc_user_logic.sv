// tb_tpc_user_logic: end-to-end test of the user logic at its default size
// (20 links, no parameter overrides).
//
// Twenty front-end link models send GBT frames. The test configures all
// per-channel parameters, runs two resynchronisations and passes through
// phases with link data, the pattern generator (constant pattern, which
// gives the common-mode unit empty pads and a non-zero common mode), the
// pedestal bypass and the debug channel. A heartbeat trigger every 32
// time-bins and an orbit trigger every 16 time-bins drive the dense packing
// and the IDC windows.
// Checks:
//  - front end: every sample after the parameter memory equals the value
//    the link model sent (or the pattern), with its channel's pedestal and
//    threshold attached;
//  - common mode: the value applied to a time-bin in the pedestal cores is
//    the one computed from that same time-bin;
//  - back end: a model of pedestal core, ion-tail filter (float operators,
//    First TB handling) and threshold check, fed from the pedestal-core
//    input, predicts every sample and Zero flag; the packets of both dense
//    packing outputs are decoded and every block compared with it;
//  - IDC: windows and packets of both packetizers.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_tpc_user_logic;
  import tpc_pkg::*;
  import tpc_fp_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = NUM_LINKS;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic [NL-1:0] frame_valid;
  logic [111:0]  frame [NL];
  logic [11:0]   bc = 0;
  logic          trg_valid = 0, resync_req = 0;
  logic [31:0]   trg_type = 0;
  cfg_wr_t       cfg = '0;
  ul_ctrl_t      ctrl;
  logic [1:0]    dp_valid, dp_sop, dp_eop, idc_valid, idc_sop, idc_eop, dp_overflow;
  logic [255:0]  dp_data [2], idc_data [2];
  logic [NL-1:0] dec_locked, dec_align_err, dec_clk_mismatch, fifo_overflow;
  logic [4:0]    adc_clk_phase [NL];
  logic [15:0]   n_resync, cm_value;
  logic          resync_busy, cm_sign, cm_valid, idc_overrun;
  logic [10:0]   cm_n_empty;
  logic [31:0]   dp_blocks [2], dp_packets [2], n_above [NL], idc_windows;
  logic [NL-1:0] fstart;

  for (genvar l = 0; l < NL; l++) begin : g_fe
    fec_link_model #(.LINK(l)) fem (.clk, .start(fstart[l]), .offset(l % 7), .clk_shift(0),
      .glitch_clk(1'b0), .frame_valid(frame_valid[l]), .frame(frame[l]));
  end

  tpc_user_logic dut (.*);

  int checks = 0, failures = 0;
  int nfail [string];
  int cyc = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      string k;
      k = msg.substr(0, 5);
      failures++;
      if (!nfail.exists(k)) nfail[k] = 0;
      nfail[k]++;
      if (nfail[k] <= 3 || (k == "front " && nfail[k] < 400 && nfail[k] % 20 == 0)) $display("FAIL %s t=%0t", msg, $time);
    end
  endtask

  // ------------------------------------------------------------ parameters
  function automatic logic [11:0] ped_of(int l, int c);  return 12'(4 * (50 + (l + c) % 4)); endfunction
  function automatic logic [11:0] thr_of(int l, int c);  return 12'(4 * (250 + (3 * l + c) % 40)); endfunction
  function automatic logic [7:0]  k_of(int l, int c);    return 8'(56 + (l * 5 + c) % 17); endfunction
  function automatic logic [7:0]  ik_of(int l, int c);   return 8'(4096 / int'(k_of(l, c))); endfunction
  fp32_t kx [NL][80], k2 [NL][80];
  function automatic fp32_t sp(real r);   // double -> single bits, truncated
    logic [63:0] d;
    d = $realtobits(r);
    if (r == 0.0) return FP_ZERO;
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  // ------------------------------------------------------------ mechanisms
  int m_resync = 0, m_pg = 0, m_cm_nonzero = 0, m_cm_aligned = 0, m_first_tb = 0, m_idc_win = 0,
      m_idc_pk = 0, m_split = 0, m_static = 0, m_dynamic = 0, m_bypass = 0, m_debug = 0,
      m_hbf = 0, m_itf_tail = 0, m_blocks = 0, m_zero = 0;

  // ------------------------------------------------------------ front-end check at the parameter memory output
  int tbn = -1;            // time-bin number since the last First TB
  bit pg_on = 0;           // pattern generator active for the time-bin being checked
  int pg_skip = 0;
  always @(posedge clk) if (!rst) begin
    time_info_t t;
    t = dut.m_ti;
    if (t.adc_valid) begin
      if (t.tb_start) begin
        tbn = t.first_tb ? 0 : (tbn >= 0 ? tbn + 1 : -1);
        if (pg_skip > 0) pg_skip--;
      end
      if (!t.resync && tbn >= 0 && pg_skip == 0) begin
        for (int l = 0; l < NL; l++) for (int j = 0; j < 2; j++) begin
          int c; logic [11:0] e;
          c = 2 * t.channel_id + j;
          e = ctrl.pg_enable ? ctrl.pg_const : {sample_value(l, hs_of(c), sampa_ch_of(c), tbn), 2'b00};
          check(dut.m_ld[l][j].sample == e && dut.m_ld[l][j].pedestal == ped_of(l, c) &&
                dut.m_ld[l][j].threshold == thr_of(l, c) && dut.m_ld[l][j].stream_active,
                $sformatf("front end l%0d c%0d tb%0d got %0d exp %0d", l, c, tbn, dut.m_ld[l][j].sample, e));
        end
        if (ctrl.pg_enable && t.tb_start) m_pg++;
      end
    end
  end

  // ------------------------------------------------------------ common mode per time-bin (by bunch crossing)
  int cm_bc_q [$];
  int cm_of_bc [int];
  bit cm_seen = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.m_ti.tb_end) cm_bc_q.push_back(int'(dut.m_ti.bunch_crossing));
    if (cm_valid) begin
      int b;
      b = cm_bc_q.pop_front();
      cm_seen = 1;
      cm_of_bc[b] = cm_sign ? -int'(cm_value) : int'(cm_value);
      if (cm_value != 0) m_cm_nonzero++;
    end
  end

  // ------------------------------------------------------------ back-end model from the pedestal-core input
  typedef struct { int v; bit z; } exp_t;
  exp_t  expv [int][NL][80];         // [bc][link][channel]
  bit    exp_any [int];
  int    exp_p [int];              // [bc*2+output] -> cycle, blocks that must appear
  int    last_hb_cyc = 0, n_ovf = 0;
  fp32_t qc [NL][80];
  int    cur_cm; bit cur_first, cur_byp, cur_dbg;
  always @(posedge clk) if (!rst) begin
    time_info_t t;
    t = dut.d_ti;
    if (t.adc_valid) begin
      int b;
      b = int'(t.bunch_crossing);
      if (t.tb_start) begin
        cur_first = t.first_tb;
        cur_byp = ctrl.ped_bypass;
        cur_dbg = ctrl.debug_en;
        if (cm_of_bc.exists(b)) begin cur_cm = cm_of_bc[b]; m_cm_aligned++; end
        else begin cur_cm = 0; check(!ctrl.cm_enable || t.resync || !dut.d_ld[0][0].stream_active || !cm_seen, $sformatf("common mode of bc %0d ready", b)); end
        if (t.first_tb) m_first_tb++;
        if (t.trigger_type[TRG_HB]) last_hb_cyc = cyc;
        if (cur_byp) m_bypass++;
        exp_any[b] = 0;
      end
      for (int l = 0; l < NL; l++) for (int j = 0; j < 2; j++) begin
        int c, v, corr, mag; fp32_t qin, q; logic signed [31:0] o; bit z; chan_data_t d;
        c = 2 * t.channel_id + j;
        d = dut.d_ld[l][j];
        mag = cur_cm < 0 ? -cur_cm : cur_cm;
        corr = ctrl.cm_enable ? (mag * int'(k_of(l, c)) + 2048) >>> 12 : 0;
        v = int'(d.sample) + int'(ctrl.sample_offset) - int'(d.pedestal) + (cur_cm < 0 ? corr : -corr);
        v = cur_byp ? int'(d.sample) : (v < 0 ? 0 : (v > 4095 ? 4095 : v));
        if (cur_dbg && c == int'(ctrl.debug_channel)) begin
          v = (mag >> 4) | (cur_cm < 0 ? 2048 : 0);
          m_debug++;
        end
        // ion-tail filter
        qin = fp_from_fixed(32'(v), 2);
        q = cur_first ? FP_ZERO : qc[l][c];
        o = fp_to_fixed(fp_add(fp_add(qin, fp_neg(fp_mul(kx[l][c], q))), ctrl.itf_offset), 2);
        qc[l][c] = fp_mul(fp_add(qin, q), k2[l][c]);
        if (!ctrl.itf_bypass) v = o < 0 ? 0 : (o > 4095 ? 4095 : int'(o));
        if (!cur_first && q != FP_ZERO) m_itf_tail++;
        z = ctrl.zs_enable && (v <= int'(d.threshold) || !d.stream_active || d.rejected);
        expv[b][l][c] = '{v, z};
        if (!z) begin exp_any[b] = 1; exp_p[b * 2 + l / 10] = cyc; end else m_zero++;
      end
    end
  end

  // ------------------------------------------------------------ dense packing decoders
  bit hbits [2][$];
  int pk_word [2], pk_n [2], pgc [2] = '{0, 0}, npk [2] = '{0, 0};
  logic [255:0] rdh0 [2];
  bit seen [int];

  function automatic int take(int p, int n);
    int v; v = 0;
    for (int i = 0; i < n; i++) v |= int'(hbits[p].pop_front()) << i;
    return v;
  endfunction

  task automatic parse_hbf(int p);
    while (hbits[p].size() >= 16) begin
      int b, nlk, start, used;
      int lid [$]; bit [79:0] msk [$];
      start = hbits[p].size();
      b = take(p, 12); nlk = take(p, 4);
      if (nlk == 0) break;
      m_blocks++;
      check(exp_any.exists(b) && exp_any[b], $sformatf("block bc %0d expected", b));
      check(!seen.exists(b * 2 + p), "block once");
      seen[b * 2 + p] = 1;
      for (int k = 0; k < nlk; k++) begin
        int hs, st, id; bit [79:0] m;
        hs = hbits[p].size();
        st = take(p, 1); id = take(p, 5); m = '0;
        if (st) begin
          for (int c = 0; c < 80; c++) m[c] = 1'(take(p, 1));
          m_static++;
        end else begin
          int gm;
          gm = take(p, 10);
          for (int g = 0; g < 10; g++) if (gm[g]) for (int x = 0; x < 8; x++) m[8*g+x] = 1'(take(p, 1));
          m_dynamic++;
        end
        used = hs - hbits[p].size();
        if (used % 8 != 0) void'(take(p, 8 - used % 8));
        lid.push_back(id); msk.push_back(m);
      end
      for (int k = 0; k < nlk; k++)
        for (int c = 0; c < 80; c++) begin
          bit ok;
          ok = exp_any.exists(b) && lid[k] / 10 == p;
          if (ok) begin
            exp_t e;
            e = expv[b][lid[k]][c];
            check(msk[k][c] == !e.z, $sformatf("mask bc%0d l%0d c%0d", b, lid[k], c));
            if (msk[k][c]) begin
              int s;
              s = take(p, 12);
              check(s == e.v, $sformatf("sample bc%0d l%0d c%0d got %0d exp %0d", b, lid[k], c, s, e.v));
            end
          end else if (msk[k][c]) void'(take(p, 12));
        end
      used = start - hbits[p].size();
      if (used % 8 != 0) void'(take(p, 8 - used % 8));
    end
    hbits[p].delete();
  endtask

  always @(posedge clk) if (!rst) begin
    for (int p = 0; p < 2; p++) if (dp_valid[p]) begin
      if (dp_sop[p]) begin
        pk_word[p] = 0; rdh0[p] = dp_data[p];
        check(dp_data[p][63:48] <= 16'd8192 && dp_data[p][31:16] == 16'(p), "RDH size and FEE id");
        check(dp_data[p][163:148] == 16'(pgc[p]), "page counter");
      end else if (pk_word[p] == 1) begin
        pk_n[p] = int'(dp_data[p][15:0]);
        check((pk_n[p] + 3) * 32 == int'(rdh0[p][63:48]), "memory size");
      end else if (dp_eop[p]) begin
        bit last;
        last = rdh0[p][164];
        check(dp_data[p][255] == last && pk_word[p] == pk_n[p] + 2, "trailer");
        if (!last) m_split++;
        pgc[p] = last ? 0 : pgc[p] + 1;
        npk[p]++;
        if (last) begin m_hbf++; parse_hbf(p); end
      end else begin
        for (int i = 0; i < 256; i++) hbits[p].push_back(dp_data[p][i]);
      end
      pk_word[p]++;
    end
    for (int p = 0; p < 2; p++) if (idc_valid[p] && idc_sop[p]) begin
      check(idc_data[p][255:240] == 16'h1DC0 && idc_data[p][179:164] == 16'd32, "IDC header, 2-orbit window");
      m_idc_pk++;
    end
    if (dp_overflow[0]) n_ovf++;
    if (dp_overflow[1]) n_ovf++;
    check(!idc_overrun, "no IDC overrun");
  end

  // ------------------------------------------------------------ stimulus

  always @(posedge clk) begin
    cyc++;
    bc <= 12'((cyc / 6) % 3564);
  end
  // heartbeat every 32 time-bins, orbit every 16 time-bins (a shortened orbit)
  always @(posedge clk) begin
    trg_valid <= 0;
    trg_type  <= 0;
    if (cyc % 48 == 20) begin
      int n; n = cyc / 48;
      if (n % 16 == 0) begin
        trg_valid <= 1;
        trg_type  <= 32'((1 << TRG_ORBIT) | ((n % 32 == 0) ? (1 << TRG_HB) : 0));
      end
    end
  end

  task automatic resync();
    @(posedge clk);
    resync_req <= 1;
    @(posedge clk);
    resync_req <= 0;
    wait (dut.dec_reset);
    @(posedge clk);
    for (int l = 0; l < NL; l++) fstart[l] <= 1;
    @(posedge clk);
    fstart <= '0;
    m_resync++;
  endtask

  task automatic ped_gap();   // between two time-bins at the pedestal cores
    @(posedge clk iff dut.d_ti.tb_end);
    repeat (4) @(posedge clk);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fstart = '0;
    ctrl = '0;
    ctrl.t_wait = 16'd20;
    ctrl.t_align = 16'd600;
    ctrl.pg_const = 12'd224;
    ctrl.cmc_offset = 20'(100 << 8);
    ctrl.cmc_t1 = 8'd12;
    ctrl.cmc_t2 = 8'd27;
    ctrl.cmc_match_dist = 11'(3 << 4);
    ctrl.cmc_n_min = 4'd5;
    ctrl.cm_enable = 1;
    ctrl.debug_channel = 7'd5;
    ctrl.itf_offset = FP_ZERO;
    ctrl.zs_enable = 1;
    ctrl.idc_enable = 1;
    ctrl.idc_n_orbits = 8'd2;
    ctrl.dp_enable = 1;
    for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin
      kx[l][c] = sp(0.02 + 0.001 * ((l + c) % 10));
      k2[l][c] = sp(0.5 + 0.01 * (c % 20));
    end
    repeat (5) @(posedge clk);
    rst <= 0;
    for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) for (int t = 0; t < 6; t++) begin
      cfg.we <= 1; cfg.link <= 5'(l); cfg.addr <= 6'(c / 2); cfg.odd <= 1'(c % 2);
      cfg.target <= cfg_target_e'(t);
      case (t)
        0: cfg.data <= 32'(ped_of(l, c));
        1: cfg.data <= 32'(thr_of(l, c));
        2: cfg.data <= 32'(ik_of(l, c));
        3: cfg.data <= 32'(k_of(l, c));
        4: cfg.data <= kx[l][c];
        default: cfg.data <= k2[l][c];
      endcase
      @(posedge clk);
    end
    cfg.we <= 0;
    // first synchronisation and link data
    resync();
    wait (tbn == 40);
    // pattern generator with a constant: flat baseline, non-zero common mode
    @(posedge clk iff dut.m_ti.tb_end);
    ctrl.pg_enable = 1; ctrl.pg_mode = 3'd1; pg_skip = 1;
    wait (tbn == 52);
    @(posedge clk iff dut.m_ti.tb_end);
    ctrl.pg_enable = 0; pg_skip = 1;
    // debug channel and pedestal bypass at the pedestal cores
    wait (tbn == 58);
    ped_gap(); ctrl.debug_en = 1;
    repeat (48 * 2) @(posedge clk);
    ped_gap(); ctrl.debug_en = 0; ctrl.ped_bypass = 1;
    repeat (48 * 2) @(posedge clk);
    ped_gap(); ctrl.ped_bypass = 0;
    // second synchronisation
    wait (tbn == 70);
    resync();
    wait (tbn == 40);
    repeat (48 * 4) @(posedge clk);
    // end of the last heartbeat frame
    wait (cyc % (48 * 32) == 48 * 2);
    repeat (48 * 32) @(posedge clk);
    begin
      int missing; missing = 0;
      foreach (exp_p[k]) if (exp_p[k] < last_hb_cyc && !seen.exists(k)) missing++;
      $display("blocks expected %0d, missing %0d, dropped on overflow %0d", exp_p.size(), missing, n_ovf);
      check(missing <= n_ovf, "every block with data sent or dropped with overflow");
    end
    $display("mechanisms: resync %0d pattern %0d cm_nonzero %0d cm_aligned %0d first_tb %0d itf_tail %0d",
             m_resync, m_pg, m_cm_nonzero, m_cm_aligned, m_first_tb, m_itf_tail);
    $display("  bypass %0d debug %0d zero %0d blocks %0d static %0d dynamic %0d split %0d frames %0d idc_win %0d idc_pk %0d",
             m_bypass, m_debug, m_zero, m_blocks, m_static, m_dynamic, m_split, m_hbf, idc_windows, m_idc_pk);
    check(m_resync == 2 && n_resync == 16'd2, "resync");
    check(dec_locked == '1 && dec_align_err == '0 && fifo_overflow == '0, "decoders locked");
    check(m_pg > 0, "pattern generator");
    check(m_cm_nonzero > 0, "non-zero common mode");
    check(m_cm_aligned > 0, "common mode aligned with its time-bin");
    check(m_first_tb >= 2, "ion-tail filter First TB");
    check(m_itf_tail > 0, "ion-tail correction active");
    check(m_bypass > 0, "pedestal bypass");
    check(m_debug > 0, "debug channel");
    check(m_zero > 0 && m_blocks > 0, "zero suppression and blocks");
    check(m_static > 0 && m_dynamic > 0, "static and dynamic masks");
    check(m_split > 0, "packet split inside a heartbeat frame");
    check(m_hbf >= 4, "heartbeat frames");
    check(idc_windows >= 3 && m_idc_pk >= 6, "IDC windows and packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
