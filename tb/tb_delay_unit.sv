// tb_delay_unit: feeds the stream source through two delay units (the
// default delay and a short one) and compares every output cycle with the
// input recorded DELAY cycles earlier. After reset the time info output
// must stay idle until the buffer holds data written after reset.
module tb_delay_unit;
  import tpc_pkg::*;
  import tb_util_pkg::*;
  localparam int NL = 3;
  logic clk = 0, start = 0, rst = 1;
  always #1 clk = ~clk;
  link_data_t src [NL], o64 [NL], o5 [NL];
  time_info_t ti, t64, t5;
  int tbc;
  stream_source #(.NL(NL)) s (.clk, .start, .ldata(src), .ti, .tb_count(tbc));
  delay_unit #(.NLINKS(NL)) dut (.clk, .rst, .ldata_in(src), .tinfo_in(ti), .ldata_out(o64), .tinfo_out(t64));
  delay_unit #(.NLINKS(NL), .DELAY(5)) dut5 (.clk, .rst, .ldata_in(src), .tinfo_in(ti), .ldata_out(o5), .tinfo_out(t5));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  link_data_t hl [128][NL];
  time_info_t ht [128];
  int cyc = 0;
  always @(posedge clk) begin
    bit ok64, ok5;
    hl[cyc % 128] = src;
    ht[cyc % 128] = ti;
    if (cyc > 3 && cyc < 60) check(t64 == '0, "no output before the buffer is filled");
    if (cyc > 70) begin
      ok64 = t64 == ht[(cyc - 64) % 128];
      ok5  = t5 == ht[(cyc - 5) % 128];
      for (int l = 0; l < NL; l++) begin
        ok64 &= o64[l] == hl[(cyc - 64) % 128][l];
        ok5  &= o5[l] == hl[(cyc - 5) % 128][l];
      end
      check(ok64, "delay 64");
      check(ok5, "delay 5");
    end
    cyc++;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 4; t++) for (int l = 0; l < NL; l++) for (int c = 0; c < 80; c++) begin
      s.samples[t][l][c] = test_sample(l, c, t, 3);
      s.ped[l][c] = 12'(c); s.thr[l][c] = 12'(l);
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    start <= 1; @(posedge clk); start <= 0;
    repeat (48 * 8) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
