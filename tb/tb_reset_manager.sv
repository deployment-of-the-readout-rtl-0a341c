// tb_reset_manager -- self-checking test of the reset generator.
//
// Checks: rst is high while por_n is low and for RST_LEN (16) to RST_LEN+4
// clocks after its release; a manual_rst pulse gives a reset of the same
// length; with auto_en the first l1_accept after a reset gives exactly one
// ts_rst pulse and later triggers none; manual_ts_rst always gives one; a
// new data-path reset re-arms the automatic time-base reset; without
// auto_en triggers give no ts_rst.
module tb_reset_manager;
  logic clk = 1'b0;
  logic por_n = 1'b0;
  logic manual_rst = 1'b0, manual_ts_rst = 1'b0, auto_en = 1'b1, l1_accept = 1'b0;
  logic rst, ts_rst, armed;
  int checks = 0, failures = 0;
  int n_ts = 0;

  always #5 clk = ~clk;

  reset_manager dut (.*);

  always @(posedge clk) if (ts_rst) n_ts++;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pulse_l1();
    @(negedge clk) l1_accept = 1'b1;
    @(negedge clk) l1_accept = 1'b0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    repeat (5) @(posedge clk);
    chk(rst == 1'b1, "reset during power-on");
    @(negedge clk) por_n = 1'b1;
    len = 0;
    while (rst) begin
      @(posedge clk);
      #1 len++;
    end
    chk(len >= 16 && len <= 20, $sformatf("power-on reset length %0d", len));
    repeat (5) @(posedge clk);
    chk(rst == 1'b0, "reset released");

    // automatic time-base reset on the first trigger only
    n_ts = 0;
    pulse_l1();
    chk(n_ts == 1, "ts_rst on first trigger");
    chk(armed == 1'b0, "disarmed after first trigger");
    pulse_l1();
    pulse_l1();
    chk(n_ts == 1, "no ts_rst on later triggers");

    // manual time-base reset
    @(negedge clk) manual_ts_rst = 1'b1;
    @(negedge clk) manual_ts_rst = 1'b0;
    repeat (2) @(posedge clk);
    chk(n_ts == 2, "manual ts_rst");

    // manual data-path reset re-arms
    @(negedge clk) manual_rst = 1'b1;
    @(negedge clk) manual_rst = 1'b0;
    chk(rst == 1'b1, "manual reset asserted");
    len = 0;
    while (rst) begin
      @(posedge clk);
      #1 len++;
    end
    chk(len >= 15 && len <= 18, $sformatf("manual reset length %0d", len));
    chk(armed == 1'b1, "re-armed");
    pulse_l1();
    chk(n_ts == 3, "ts_rst after re-arm");

    // automatic mode off
    @(negedge clk) begin
      manual_rst = 1'b1;
      auto_en = 1'b0;
    end
    @(negedge clk) manual_rst = 1'b0;
    while (rst) @(posedge clk);
    pulse_l1();
    chk(n_ts == 3, "no ts_rst with auto off");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
