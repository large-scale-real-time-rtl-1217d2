// tb_threshold_check: random samples, thresholds and stream flags through
// the threshold check; compares the Zero flag and the monitoring counters
// with a model, with zero suppression on and off.
module tb_threshold_check;
  import tpc_pkg::*;
  localparam int NL = 4;
  logic clk = 0, rst = 1, zs = 1;
  always #1 clk = ~clk;
  link_data_t din [NL], dout [NL];
  time_info_t tin = '0, tout;
  logic [31:0] nab [NL];
  threshold_check #(.NLINKS(NL)) dut (.clk, .rst, .zs_enable(zs), .ldata_in(din), .tinfo_in(tin),
    .ldata_out(dout), .tinfo_out(tout), .n_above(nab));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  link_data_t pd [NL];
  time_info_t pt;
  logic pz;
  int cnt [NL];
  bit go = 0;
  always @(posedge clk) begin
    if (go) begin
      check(tout == pt, "time info");
      for (int l = 0; l < NL; l++) begin
        for (int j = 0; j < 2; j++) begin
          bit z;
          z = pz && (pd[l][j].sample <= pd[l][j].threshold || !pd[l][j].stream_active || pd[l][j].rejected);
          check(dout[l][j].zero == z && dout[l][j].sample == pd[l][j].sample, "zero flag");
        end
        check(nab[l] == 32'(cnt[l]), "counter");
      end
    end
    if (!rst && tin.adc_valid)
      for (int l = 0; l < NL; l++) for (int j = 0; j < 2; j++) cnt[l] += int'(din[l][j].sample > din[l][j].threshold);
    pd = din; pt = tin; pz = zs;
    go = !rst;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < NL; l++) begin din[l] = '0; cnt[l] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 3000; i++) begin
      for (int l = 0; l < NL; l++) for (int j = 0; j < 2; j++) begin
        din[l][j].sample <= 12'($urandom_range(0, 200));
        din[l][j].threshold <= 12'($urandom_range(0, 200));
        din[l][j].stream_active <= $urandom_range(0, 15) != 0;
        din[l][j].rejected <= $urandom_range(0, 15) == 0;
      end
      tin.adc_valid <= $urandom_range(0, 5) != 0;
      tin.channel_id <= 6'(i % 40);
      zs <= i < 2500;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
