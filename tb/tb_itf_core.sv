// tb_itf_core: runs one ion-tail filter core over time-bins of 40 channels
// (48-cycle slots, 8 idle cycles with ADC valid low) and compares every
// output, 13 cycles after its input, with two models: a bit-exact model
// built from the same float operators, and a double-precision model of
// Eq. 3.4/3.5 (allowed difference: 1 LSB). Covers First TB (no correction,
// q_cor restarted), pulses with tails, the offset and the bypass.
module tb_itf_core;
  import tpc_pkg::*;
  import tpc_fp_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic [11:0] sin = 0, sout;
  logic [5:0] ch = 0;
  logic first = 0, vld = 0, byp = 0;
  fp32_t offset = FP_ZERO;
  itf_core #(.LINK(4), .ODD(1)) dut (.clk, .rst, .cfg, .sample_in(sin), .channel_id(ch), .first_tb(first),
    .adc_valid(vld), .offset, .bypass(byp), .sample_out(sout));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  fp32_t kx [40], k2 [40], qc [40];
  real   kxr [40], k2r [40], qcr [40];
  int exp_q [$], exp_r [$];
  int n_first = 0, n_tail = 0;

  // double -> single precision bits (truncated) and back, without shortreal
  function automatic fp32_t to_sp(input real r);
    logic [63:0] d;
    d = $realtobits(r);
    if (r == 0.0) return FP_ZERO;
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction
  function automatic real from_sp(input fp32_t f);
    if (f[30:23] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  task automatic model(input int s, input int c, input bit f, input bit b, input real offr);
    fp32_t qin, q, o; int e; real qr, orr; int er;
    qin = fp_from_fixed(32'(s), 2);
    q = f ? FP_ZERO : qc[c];
    o = fp_add(fp_add(qin, fp_neg(fp_mul(kx[c], q))), to_sp(offr));
    e = fp_to_fixed(o, 2);
    e = b ? s : (e < 0 ? 0 : (e > 4095 ? 4095 : e));
    qc[c] = fp_mul(fp_add(qin, q), k2[c]);
    qr = f ? 0.0 : qcr[c];
    orr = s / 4.0 - kxr[c] * qr + offr;
    er = int'(orr * 4.0);
    er = b ? s : (er < 0 ? 0 : (er > 4095 ? 4095 : er));
    qcr[c] = k2r[c] * (s / 4.0 + qr);
    exp_q.push_back(e); exp_r.push_back(er);
    if (f) n_first++;
    if (!b && !f && e < s - 4) n_tail++;
  endtask

  logic [12:0] v_sr = 0;
  always @(posedge clk) begin
    v_sr <= {v_sr[11:0], vld};
    if (v_sr[12]) begin
      int e, er;
      e = exp_q.pop_front(); er = exp_r.pop_front();
      check(int'(sout) == e, $sformatf("bit-exact got %0d exp %0d", sout, e));
      check(int'(sout) - er <= 1 && er - int'(sout) <= 1, $sformatf("real model got %0d exp %0d", sout, er));
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real offr;
    for (int c = 0; c < 40; c++) begin
      k2r[c] = 0.80 + 0.004 * c;
      kxr[c] = (0.05 + 0.002 * c) * (1.0 - k2r[c]) * 10.0;
      kx[c] = to_sp(kxr[c]); k2[c] = to_sp(k2r[c]);
      kxr[c] = from_sp(kx[c]); k2r[c] = from_sp(k2[c]);
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < 40; c++) for (int t = 0; t < 2; t++) begin
      cfg.we <= 1; cfg.link <= 5'd4; cfg.odd <= 1; cfg.addr <= 6'(c);
      cfg.target <= t ? CFG_ITF_K2 : CFG_ITF_KX; cfg.data <= t ? k2[c] : kx[c];
      @(posedge clk);
    end
    // writes to the other parity must not reach this core
    cfg.odd <= 0; cfg.data <= 32'h4000_0000; @(posedge clk);
    cfg.we <= 0;
    for (int tb = 0; tb < 40; tb++) begin
      bit f, b;
      f = (tb == 0 || tb == 25);
      b = (tb >= 36);
      offr = (tb >= 20 && tb < 24) ? 2.5 : 0.0;
      for (int slot = 0; slot < 48; slot++) begin
        int s;
        s = 400 + 4 * ((slot * 7 + tb) % 3);
        if ((tb % 10 == 2 || tb == 25) && slot % 3 == 0) s = 3000;      // pulse, tail follows
        if (slot < 40) model(s, slot, f, b, offr);
        sin <= (slot < 40) ? 12'(s) : 12'd999;
        ch  <= (slot < 40) ? 6'(slot) : 6'd0;
        vld <= slot < 40;
        first <= f && slot < 40;
        byp <= b;
        offset <= to_sp(offr);
        @(posedge clk);
      end
    end
    vld <= 0;
    repeat (20) @(posedge clk);
    check(n_first > 0 && n_tail > 0 && exp_q.size() == 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
