// tb_pattern_generator: checks pass-through when disabled and every pattern
// mode when enabled, including a reference LFSR model and the occupancy set
// by the LFSR threshold.
module tb_pattern_generator;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 3;
  logic clk = 0, rst = 1, start = 0;
  always #1 clk = ~clk;
  link_data_t src [NL], out [NL];
  time_info_t ti, to;
  int tbc;
  logic enable = 0;
  logic [2:0] mode = 0;
  logic [31:0] thr = 32'h4000_0000;
  stream_source #(.NL(NL)) s (.clk, .start, .ldata(src), .ti, .tb_count(tbc));
  pattern_generator #(.NLINKS(NL)) dut (.clk, .rst, .enable, .mode, .const_value(12'hABC), .lfsr_thresh(thr),
    .ldata_in(src), .tinfo_in(ti), .ldata_out(out), .tinfo_out(to));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  // reference model
  function automatic logic [31:0] step(input logic [31:0] x);
    logic fb;
    fb = x[0];
    x = x >> 1;
    if (fb) begin x[31] = ~x[31]; x[29] = ~x[29]; x[1] = ~x[1]; x[0] = ~x[0]; end
    return x;
  endfunction
  logic [31:0] ref_lfsr [NL];
  link_data_t src_d [NL];
  time_info_t ti_d;
  int tb_rel = 0, nz = 0, nall = 0;
  logic en_d = 0;
  logic [2:0] mode_d = 0;
  always @(posedge clk) begin
    src_d  <= src;
    ti_d   <= ti;
    en_d   <= enable;
    mode_d <= mode;
    if (!rst && ti_d.adc_valid) begin
      if (ti_d.first_tb && ti_d.tb_start) tb_rel = 0;
      for (int l = 0; l < NL; l++) begin
        logic [31:0] r0, r1;
        if (ti_d.first_tb && ti_d.tb_start) ref_lfsr[l] = 32'(l + 1);
        r0 = ref_lfsr[l];
        r1 = step(r0);
        ref_lfsr[l] = step(r1);
        for (int j = 0; j < 2; j++) begin
          int ch;
          logic [11:0] e;
          logic [31:0] r;
          ch = 2 * ti_d.channel_id + j;
          r  = j ? r1 : r0;
          case (mode_d)
            0: e = (r < thr) ? r[11:0] : 0;
            1: e = 12'hABC;
            2: e = 12'(ch);
            3: e = 12'(tb_rel);
            4: e = {5'(tb_rel), 7'(ch)};
            default: e = 0;
          endcase
          if (!en_d) e = src_d[l][j].sample;
          check(out[l][j].sample == e, $sformatf("mode %0d en %0d link %0d ch %0d got %h exp %h", mode_d, en_d, l, ch, out[l][j].sample, e));
          if (en_d && mode_d == 0) begin nall++; if (e != 0) nz++; end
        end
      end
      if (ti_d.tb_end) tb_rel++;
    end
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 4; t++) for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++)
      s.samples[t][l][c] = test_sample(l, c, t, 1);
    repeat (3) @(posedge clk);
    rst <= 0;
    start <= 1; @(posedge clk); start <= 0;
    repeat (48 * 3) @(posedge clk);
    for (int m = 0; m < 5; m++) begin
      @(posedge clk iff ti.tb_end);
      mode <= 3'(m); enable <= 1;
      repeat (48 * 20) @(posedge clk);
      @(posedge clk iff ti.tb_end);
      enable <= 0;
      repeat (48) @(posedge clk);
    end
    check(nz > nall / 4 - nall / 20 && nz < nall / 4 + nall / 20, $sformatf("occupancy %0d of %0d", nz, nall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
