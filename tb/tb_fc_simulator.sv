// tb_fc_simulator -- self-checking test of the standalone Fast Control
// generator.
//
// With a period of 20 BESIII clocks (fc_ce one clock in four) it checks:
// every L1 pulse lasts exactly 8 BESIII clocks (32 clocks); consecutive
// triggers start 80 clocks apart; check is raised with the 256th and 512th
// trigger only; n_sent counts the pulses; no trigger starts while full_in
// is high, and triggers resume when it falls.
module tb_fc_simulator;
  logic clk = 1'b0;
  logic rst = 1'b1;
  logic fc_ce;
  logic [1:0] div = '0;
  logic enable = 1'b0;
  logic [15:0] period = 16'd20;
  logic full_in = 1'b0;
  logic l1, check;
  logic [31:0] n_sent;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) div <= div + 1'b1;
  assign fc_ce = (div == 2'd3);

  fc_simulator dut (.*);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int   n_rise = 0, n_check = 0, hi_len = 0;
  int   last_rise = -1, now = 0;
  logic l1_q = 1'b0, chk_q = 1'b0;
  bit   in_full = 1'b0;
  int   rise_in_full = 0;

  always @(posedge clk) if (!rst) begin
    now++;
    l1_q  <= l1;
    chk_q <= check;
    if (l1) hi_len++;
    if (l1 && !l1_q) begin
      n_rise++;
      if (in_full) rise_in_full++;
      if (last_rise >= 0 && !in_full && n_rise < 300)
        chk(now - last_rise == 80, $sformatf("trigger spacing %0d", now - last_rise));
      last_rise = now;
    end
    if (!l1 && l1_q) begin
      chk(hi_len == 32, $sformatf("L1 length %0d clocks", hi_len));
      hi_len = 0;
    end
    if (check && !chk_q) begin
      n_check++;
      chk(n_rise == 256 * n_check, $sformatf("check with trigger %0d", n_rise));
      chk(l1, "check coincides with L1");
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    enable = 1'b1;
    while (n_rise < 520) @(posedge clk);
    chk(n_check == 2, $sformatf("two checks in 520 triggers, got %0d", n_check));
    // FULL holds triggers back
    repeat (40) @(posedge clk);
    @(negedge clk) begin
      full_in = 1'b1;
      in_full = 1'b1;
    end
    repeat (50) @(posedge clk);   // a trigger already started may finish
    rise_in_full = 0;
    repeat (800) @(posedge clk);
    chk(rise_in_full == 0, "no trigger while FULL");
    @(negedge clk) begin
      full_in = 1'b0;
      in_full = 1'b0;
    end
    begin
      int n_before;
      n_before = n_rise;
      repeat (200) @(posedge clk);
      chk(n_rise > n_before, "triggers resume after FULL");
    end
    repeat (4) @(posedge clk);
    chk(n_sent == 32'(n_rise), $sformatf("n_sent %0d vs %0d", n_sent, n_rise));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
