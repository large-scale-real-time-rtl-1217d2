// tb_resync_controller: checks the resync sequence timing: align_start one
// cycle after the request, dec_reset t_wait+2 cycles after it, busy in
// between, restart of the wait by a second request, and the counter.
module tb_resync_controller;
  logic clk = 0, rst = 1, req = 0;
  always #1 clk = ~clk;
  logic [15:0] t_wait = 16'd37;
  logic align_start, dec_reset, busy;
  logic [15:0] n;
  resync_controller dut (.clk, .rst, .resync_req(req), .t_wait, .align_start, .dec_reset, .busy, .n_resync(n));

  int checks = 0, failures = 0, cyc = 0, t_req = 0, t_as = -1, t_dr = -1, n_dr = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  always @(posedge clk) begin
    cyc++;
    if (align_start) t_as = cyc;
    if (dec_reset) begin t_dr = cyc; n_dr++; end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int r = 0; r < 4; r++) begin
      t_wait <= 16'(10 + 17 * r);
      repeat (5) @(posedge clk);
      req <= 1; t_req = cyc + 2;
      @(posedge clk);
      req <= 0;
      @(posedge clk);
      check(busy, "busy after request");
      wait (t_dr > t_req);
      check(t_as - t_req == 1, $sformatf("align_start delay %0d", t_as - t_req));
      check(t_dr - t_req == 10 + 17 * r + 2, $sformatf("dec_reset delay %0d", t_dr - t_req));
      @(posedge clk);
      check(!busy, "idle after dec_reset");
    end
    // a second request during the wait restarts it
    t_wait <= 16'd50;
    @(posedge clk);
    req <= 1; @(posedge clk); req <= 0;
    repeat (20) @(posedge clk);
    req <= 1; t_req = cyc + 2; @(posedge clk); req <= 0;
    wait (t_dr > t_req);
    check(t_dr - t_req == 52, "restarted wait");
    check(n == 16'd5 && n_dr == 5, "count of sequences");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
