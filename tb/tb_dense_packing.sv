// tb_dense_packing: drives ten links of zero-flagged samples into one dense
// packing unit and decodes its packets with an independent decoder: RDH
// fields and packet size (at most 8 KiB), payload length, meta and trigger
// words, then the bit stream of each heartbeat frame (block headers, link
// headers in static and dynamic form, 12-bit samples, byte padding). Every
// decoded sample is compared with the stimulus. Occupancy varies from empty
// time-bins to fully occupied ones, so that packets are split inside a
// heartbeat frame, static masks are used, and at the end a long run of full
// time-bins makes the unit drop time-bins (overflow).
module tb_dense_packing;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 10;
  localparam int HBF_TB = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  link_data_t din [NL];
  time_info_t ti = '0;
  logic ov, ov_seen = 0;
  logic [31:0] nb, np;
  logic ovalid, osop, oeop;
  logic [255:0] odata;
  dense_packing #(.NL(NL), .LINK_BASE(0), .FEE_ID(16'h0A)) dut (.clk, .rst, .ldata(din), .tinfo(ti),
    .enable(1'b1), .force_static(1'b0), .out_valid(ovalid), .out_data(odata), .out_sop(osop),
    .out_eop(oeop), .overflow(ov), .n_blocks(nb), .n_packets(np));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  // stimulus: occupancy per time-bin in percent
  function automatic int occ(int tb);
    if (tb % HBF_TB == 5) return 0;
    if (tb >= 2 && tb < 9) return 100;
    if (tb >= 40) return 100;
    return (tb * 37) % 30;
  endfunction
  function automatic bit present(int tb, int l, int c);
    return int'(test_sample(l, c, tb, 11)) % 100 < occ(tb);
  endfunction
  function automatic logic [11:0] value(int tb, int l, int c);
    return test_sample(l, c, tb, 12) | 12'h001;
  endfunction

  int n_tb_sent = 0;
  int n_static = 0, n_dynamic = 0, n_split = 0, n_pad = 0, n_blocks_dec = 0, n_pkts = 0;
  int n_hbf_pkts = 0;
  bit seen_tb [int];

  // ------------------------------------------------------------ decoder
  bit hbf_bits [$];
  int pk_word, pk_n;
  logic [255:0] rdh0;
  bit in_pkt = 0;
  int page = 0;

  function automatic int take(int n);
    int v; v = 0;
    for (int i = 0; i < n; i++) v |= int'(hbf_bits.pop_front()) << i;
    return v;
  endfunction

  task automatic parse_hbf();
    while (hbf_bits.size() >= 16) begin
      int bc, nlk, start, tb, used;
      int lid [$]; bit [79:0] msk [$];
      start = hbf_bits.size();
      bc = take(12); nlk = take(4);
      if (nlk == 0) break;                    // padding at the end of the frame
      tb = bc / 8;
      n_blocks_dec++;
      check(!seen_tb.exists(tb), "block decoded once");
      seen_tb[tb] = 1;
      for (int k = 0; k < nlk; k++) begin
        int hs, st, id; bit [79:0] m;
        hs = hbf_bits.size();
        st = take(1); id = take(5); m = '0;
        if (st) begin
          for (int c = 0; c < 80; c++) m[c] = 1'(take(1));
          n_static++;
        end else begin
          int gm;
          gm = take(10);
          for (int g = 0; g < 10; g++) if (gm[g]) for (int b = 0; b < 8; b++) m[8*g+b] = 1'(take(1));
          n_dynamic++;
        end
        used = hs - hbf_bits.size();
        if (used % 8 != 0) void'(take(8 - used % 8));
        lid.push_back(id); msk.push_back(m);
      end
      // link list must equal the links with data, in order
      begin
        int e; e = 0;
        for (int l = 0; l < NL; l++) begin
          bit any; any = 0;
          for (int c = 0; c < 80; c++) any |= present(tb, l, c);
          if (any) begin
            check(e < lid.size() && lid[e] == l, $sformatf("link id tb%0d l%0d", tb, l));
            e++;
          end
        end
        check(e == nlk, "number of links");
      end
      for (int k = 0; k < nlk; k++)
        for (int c = 0; c < 80; c++) begin
          check(msk[k][c] == present(tb, lid[k], c), "mask bit");
          if (msk[k][c]) check(take(12) == int'(value(tb, lid[k], c)), $sformatf("sample tb%0d l%0d c%0d", tb, lid[k], c));
        end
      used = start - hbf_bits.size();
      if (used % 8 != 0) begin void'(take(8 - used % 8)); n_pad++; end
    end
    hbf_bits.delete();
  endtask

  always @(posedge clk) if (ovalid && !rst) begin
    if (osop) begin
      check(!in_pkt, "sop inside packet");
      in_pkt = 1; pk_word = 0; rdh0 = odata;
      check(odata[7:0] == 8'd7 && odata[15:8] == 8'd64 && odata[31:16] == 16'h0A, "RDH version/size/fee");
      check(odata[63:48] <= 16'd8192 && odata[47:32] == odata[63:48], "packet at most 8 KiB");
      check(odata[71:64] == 8'(n_pkts), "packet counter");
      check(odata[163:148] == 16'(page), "page counter within the frame");
    end else if (pk_word == 1) begin
      pk_n = int'(odata[15:0]);
      check((pk_n + 3) * 32 == int'(rdh0[63:48]), "memory size = words");
    end else if (oeop) begin
      bit last;
      last = rdh0[164];
      check(odata[127:124] == 4'hE && int'(odata[15:0]) == pk_n, "meta word");
      check(odata[255] == last, "trigger word only in the last packet of a frame");
      check(pk_word == pk_n + 2, "packet length");
      if (!last) n_split++;
      page = last ? 0 : page + 1;
      in_pkt = 0; n_pkts++;
      if (last) begin n_hbf_pkts++; parse_hbf(); end
    end else begin
      for (int i = 0; i < 256; i++) hbf_bits.push_back(odata[i]);
    end
    pk_word++;
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int n_ov = 0;
  always @(posedge clk) if (ov && !rst) begin ov_seen <= 1; n_ov++; end
  initial begin
    for (int l = 0; l < NL; l++) din[l] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    for (int tb = 0; tb < 3 * HBF_TB + 1; tb++) begin
      for (int slot = 0; slot < 48; slot++) begin
        ti.channel_id <= (slot < 40) ? 6'(slot) : 6'd0;
        ti.adc_valid <= slot < 40;
        ti.tb_start <= slot == 0;
        ti.tb_end <= slot == 39;
        ti.bunch_crossing <= 12'(tb * 8);
        ti.trigger_type <= (tb % HBF_TB == 0) ? 32'(1 << TRG_HB) : 32'd0;
        for (int l = 0; l < NL; l++) for (int j = 0; j < 2; j++) begin
          int c;
          c = 2 * slot + j;
          din[l][j].sample <= (slot < 40) ? value(tb, l, c) : 12'd0;
          din[l][j].zero <= !(slot < 40 && present(tb, l, c));
          din[l][j].stream_active <= 1;
        end
        @(posedge clk);
      end
    end
    ti <= '0;
    repeat (3000) @(posedge clk);
    // every time-bin with data must have been decoded or counted as dropped
    begin
      int missing; missing = 0;
      for (int tb = 0; tb < 3 * HBF_TB; tb++) begin
        bit any; any = 0;
        for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) any |= present(tb, l, c);
        if (any && !seen_tb.exists(tb)) missing++;
      end
      check(missing <= n_ov, $sformatf("missing time-bins %0d, overflows %0d", missing, n_ov));
      check(missing < 10, "most time-bins decoded");
    end
    check(!seen_tb.exists(5) && !seen_tb.exists(21), "empty time-bins give no block");
    $display("blocks %0d static %0d dynamic %0d split %0d pad %0d frames %0d overflow %0d", n_blocks_dec,
             n_static, n_dynamic, n_split, n_pad, n_hbf_pkts, ov_seen);
    check(n_static > 0 && n_dynamic > 0 && n_split > 0 && n_pad > 0 && ov_seen && n_hbf_pkts >= 3, "coverage");
    check(int'(nb) >= n_blocks_dec, "block counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
