// tb_four_feb_merger_tm -- self-checking test of the trigger-matched
// packet builder.
//
// Six triggers. For each, every FEB source delivers a random number of hits
// (0..40, one trigger with 100 on FEB 0 to exceed a pair FIFO) and an end
// marker, with random gaps; the start of pair 0 or of pair 1 is delayed by
// up to 300 clocks so that either pair can finish first. The output is
// checked word by word against: header {id, trigger number, stamp}, the
// hits of FEB 0, 1, 2, 3 in order, trailer {id, number, total hits,
// status, overflow flags}, with pkt_last on the trailer only, under random
// back-pressure. tm_done must pulse once per packet, after the trailer.
module tb_four_feb_merger_tm;
  import gemroc_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic trig_go = 1'b0;
  logic [22:0] trig_num = '0;
  logic [31:0] trig_ts = '0;
  logic [4:0] roc_id = 5'd13;
  logic [9:0] status_in = 10'h2A5;
  logic [3:0] in_valid;
  word_t in_word [4];
  logic [3:0] in_ready;
  logic pkt_valid, pkt_last, pkt_ready, tm_done, busy;
  word_t pkt_word;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  four_feb_merger_tm dut (.*);

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

  // FEB sources
  word_t src [4][$];
  int    hold [4];
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      in_valid[k] = (src[k].size() > 0) && (hold[k] == 0);
      in_word[k]  = (src[k].size() > 0) ? src[k][0] : '0;
    end
  end
  always @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      if (in_valid[k] && in_ready[k]) begin
        void'(src[k].pop_front());
        hold[k] <= $urandom_range(0, 2);
      end else if (hold[k] > 0) hold[k] <= hold[k] - 1;
    end
  end

  always @(negedge clk) pkt_ready <= ($urandom_range(0, 4) != 0);

  word_t exp_q[$];
  int    n_done = 0, n_last = 0, n_words = 0;
  always @(posedge clk) if (!rst) begin
    if (tm_done) begin
      n_done++;
      chk(exp_q.size() == 0, "tm_done after the whole packet");
    end
    if (pkt_valid && pkt_ready) begin
      n_words++;
      if (exp_q.size() == 0) chk(1'b0, "unexpected packet word");
      else begin
        word_t e;
        e = exp_q.pop_front();
        chk(pkt_word == e, $sformatf("packet word %0d: got %h exp %h", n_words, pkt_word, e));
        chk(pkt_last == (exp_q.size() == 0), "pkt_last only on trailer");
      end
      if (pkt_last) n_last++;
    end
  end

  initial begin
    for (int k = 0; k < 4; k++) hold[k] = 0;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 1; t <= 6; t++) begin
      word_t hits [4][$];
      logic [1:0] ovf;
      int total;
      int late;
      total = 0;
      ovf   = '0;
      for (int k = 0; k < 4; k++) hits[k].delete();
      late  = $urandom_range(0, 1);
      for (int k = 0; k < 4; k++) begin
        int n;
        n = (t == 3 && k == 0) ? 100 : $urandom_range(0, 40);
        for (int i = 0; i < n; i++) hits[k].push_back({2'b00, 62'({$urandom, $urandom})});
        total += n;
      end
      // expected packet
      exp_q.push_back({K_GEMROC, G_HEADER, roc_id, 23'(t), 32'(1000 * t)});
      for (int k = 0; k < 4; k++) foreach (hits[k][i]) exp_q.push_back(hits[k][i]);
      ovf = 2'(t);
      exp_q.push_back({K_GEMROC, G_TRAILER, roc_id, 23'(t), 16'(total),
                       status_in, 2'(t >> 1), 2'b00, ovf});
      @(negedge clk);
      trig_go  = 1'b1;
      trig_num = 23'(t);
      trig_ts  = 32'(1000 * t);
      @(negedge clk) trig_go = 1'b0;
      // sources: the late pair starts up to 300 clocks later
      for (int k = 0; k < 4; k++) begin
        if ((k / 2) == late) hold[k] = $urandom_range(50, 300);
        foreach (hits[k][i]) src[k].push_back(hits[k][i]);
        // end marker: FEB overflow flag in bit 0 (pair 0 from t>>1, pair 1 from t)
        src[k].push_back({K_GEMROC, G_END, 5'd0, 23'd0, 16'(hits[k].size()), 15'd0,
                          (k < 2) ? 1'(t >> (1 + k)) : 1'(t >> (k - 2))});
      end
      while (n_done < t) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    chk(n_done == 6, "six tm_done pulses");
    chk(n_last == 6, "six packets");
    chk(exp_q.size() == 0, "all words seen");
    chk(busy == 1'b0, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
