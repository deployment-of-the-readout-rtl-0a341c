// tb_l1_distributor -- self-checking test of trigger acceptance and release.
//
// Pulses of 8 and 7 BESIII clocks must be accepted, pulses of 3 and 6 must
// be rejected and counted as glitches. In trigger-matched mode each
// accepted trigger must be released (trig_go) no earlier than `delay`
// clocks after its stamp and at most 3 clocks later; stamp = time base at
// the first high sample; window start = stamp - latency. A trigger arriving
// while the previous one is in process must wait for tm_done. With six
// triggers queued full_out must be high. A trigger marked sync_only is not
// queued. In trigger-less mode nothing is queued.
module tb_l1_distributor;
  logic clk = 1'b0;
  logic rst = 1'b1;
  logic ts_rst = 1'b0;
  logic fc_ce;
  logic [1:0] div = '0;
  logic l1_in = 1'b0;
  logic tm_mode = 1'b1;
  logic sync_only = 1'b0;
  logic [15:0] latency = 16'd1433, window = 16'd283, delay = 16'd200;
  logic tm_done = 1'b0;
  logic [31:0] ts;
  logic l1_accept;
  logic [22:0] l1_count, trig_num;
  logic [15:0] n_glitch, n_lost, win_start, win_len;
  logic trig_go, busy, full_out;
  logic [31:0] trig_ts;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) div <= div + 1'b1;
  assign fc_ce = (div == 2'd3);

  l1_distributor dut (.*);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // L1 pulse of n BESIII clocks; returns the expected stamp
  task automatic pulse(input int n, output logic [31:0] stamp);
    while (!(fc_ce)) @(negedge clk);
    l1_in = 1'b1;
    stamp = ts;
    repeat (4 * n) @(negedge clk);
    l1_in = 1'b0;
    repeat (12) @(negedge clk);
  endtask

  // trig_go monitor
  int          n_go = 0;
  logic [31:0] go_time [$];
  logic [31:0] go_ts [$];
  logic [15:0] go_ws [$];
  always @(posedge clk) if (!rst && trig_go) begin
    n_go++;
    go_time.push_back(ts);
    go_ts.push_back(trig_ts);
    go_ws.push_back(win_start);
    chk(win_len == 16'd283, "window length");
  end

  initial begin
    logic [31:0] s1, s2, s3, sx;
    repeat (6) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (10) @(negedge clk);

    // glitch filter
    pulse(3, sx);
    pulse(6, sx);
    chk(n_glitch == 16'd2, $sformatf("two glitches, got %0d", n_glitch));
    chk(l1_count == 23'd0, "glitches not counted as triggers");
    pulse(8, s1);
    chk(l1_count == 23'd1, "8-clock pulse accepted");
    pulse(7, s2);
    chk(l1_count == 23'd2, "7-clock pulse accepted");

    // first release after delay
    while (n_go < 1) @(negedge clk);
    chk(go_ts[0] == s1, $sformatf("stamp %0d exp %0d", go_ts[0], s1));
    chk(go_time[0] - s1 >= 32'(delay) && go_time[0] - s1 <= 32'(delay) + 3,
        $sformatf("released %0d clocks after stamp", go_time[0] - s1));
    chk(go_ws[0] == 16'(s1 - 32'(latency)), "window start");
    chk(trig_num == 23'd1, "trigger number 1");
    // second trigger waits for tm_done
    repeat (400) @(negedge clk);
    chk(n_go == 1, "held while previous trigger in process");
    tm_done = 1'b1;
    @(negedge clk) tm_done = 1'b0;
    repeat (5) @(negedge clk);
    chk(n_go == 2, "released after tm_done");
    chk(go_ts[1] == s2 && trig_num == 23'd2, "second trigger stamp/number");
    tm_done = 1'b1;
    @(negedge clk) tm_done = 1'b0;

    // fill the queue: 6 triggers while the first of them is in process
    for (int i = 0; i < 7; i++) pulse(8, s3);
    repeat (300) @(negedge clk);
    chk(full_out == 1'b1, "FULL with six queued triggers");
    for (int i = 0; i < 7; i++) begin
      tm_done = 1'b1;
      @(negedge clk) tm_done = 1'b0;
      repeat (4) @(negedge clk);
    end
    chk(n_go == 9, $sformatf("all queued triggers released, %0d", n_go));
    chk(full_out == 1'b0, "FULL released");

    // sync-only and trigger-less triggers are not queued
    sync_only = 1'b1;
    pulse(8, sx);
    sync_only = 1'b0;
    tm_mode = 1'b0;
    pulse(8, sx);
    repeat (400) @(negedge clk);
    chk(n_go == 9, "sync-only / trigger-less not released");
    chk(l1_count == 23'd11, $sformatf("all triggers counted, %0d", l1_count));
    chk(n_lost == 16'd0, "none lost");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
