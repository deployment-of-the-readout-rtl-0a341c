// tb_feb_merger -- self-checking test of the per-FEB merger and latency
// buffer.
//
// 1. Trigger-less: words arriving on both links (also in the same clock)
//    must leave the tl port complete and in order (A before B), under random
//    back-pressure.
// 2. Trigger-matched: about 120 hits with coarse times a few clocks behind
//    the time base are written; a window of 283 clocks (1.7 us at 166.6 MHz)
//    spanning two or three pages is searched. The hits that come out must be
//    exactly those inside the window (each hit carries a unique tag), then
//    one end marker with the right count. The search time must not exceed
//    the page reads plus a few clocks per page.
// 3. A full page: exactly 32 hits in one page, all in the window, must all
//    come out (the last location of a page must be read).
// 4. Overflow: 40 hits in one page; 32 come out, n_overflow = 8, end marker
//    overflow bit set.
module tb_feb_merger;
  import gemroc_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic tm_mode = 1'b0;
  logic [31:0] ts = '0;
  logic in_a_valid = 1'b0, in_b_valid = 1'b0;
  word_t in_a_word = '0, in_b_word = '0;
  logic tl_valid, tl_ready;
  word_t tl_word;
  logic trig_go = 1'b0;
  logic [15:0] win_start = '0, win_len = '0;
  logic tm_valid, tm_ready;
  word_t tm_word;
  logic searching, in_full;
  logic [15:0] n_overflow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) ts <= rst ? 32'd0 : ts + 1'b1;

  feb_merger dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random back-pressure
  always @(negedge clk) begin
    tl_ready <= ($urandom_range(0, 3) != 0);
    tm_ready <= ($urandom_range(0, 3) != 0);
  end

  word_t tl_exp[$];
  word_t tm_got[$];
  always @(posedge clk) begin
    if (!rst && tl_valid && tl_ready) begin
      if (tl_exp.size() == 0) check(1'b0, "unexpected TL word");
      else check(tl_word == tl_exp.pop_front(), "TL word order/content");
    end
    if (!rst && tm_valid && tm_ready) tm_got.push_back(tm_word);
  end

  function automatic word_t mkhit(logic [15:0] tc, logic [15:0] tag);
    hit_t h;
    h = '0;
    h.kind    = K_HIT;
    h.ch      = 6'(tag);
    h.tcoarse = tc;
    h.efine   = 10'(tag);
    h.tfine   = 10'(tag >> 10);
    return word_t'(h);
  endfunction

  // search one window, return matched hits (end marker removed)
  task automatic search(input logic [15:0] ws, input logic [15:0] wl,
                        output word_t hits[$], output word_t endw,
                        output int cycles);
    int t0;
    tm_got.delete();
    @(negedge clk);
    win_start = ws;
    win_len   = wl;
    trig_go   = 1'b1;
    @(negedge clk) trig_go = 1'b0;
    t0 = int'(ts);
    while (searching) @(posedge clk);
    cycles = int'(ts) - t0;
    while (tm_valid) @(posedge clk);
    repeat (3) @(posedge clk);
    hits = {};
    endw = '0;
    foreach (tm_got[i]) begin
      if (is_end(tm_got[i])) endw = tm_got[i];
      else hits.push_back(tm_got[i]);
    end
    check(tm_got.size() > 0 && is_end(tm_got[tm_got.size()-1]), "end marker last");
  endtask

  initial begin
    word_t sent[$];
    word_t hits[$];
    word_t endw;
    int cycles, nexp, tag;
    logic [15:0] ws;

    repeat (5) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // ---------------------------------------------------- 1. trigger-less
    for (int i = 0; i < 40; i++) begin
      word_t a, b;
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      @(negedge clk);
      in_a_valid = ($urandom_range(0, 1) == 1);
      in_b_valid = ($urandom_range(0, 1) == 1);
      in_a_word = a;
      in_b_word = b;
      if (in_a_valid) tl_exp.push_back(a);
      if (in_b_valid) tl_exp.push_back(b);
      @(negedge clk);
      in_a_valid = 1'b0;
      in_b_valid = 1'b0;
      repeat (6) @(negedge clk);
    end
    repeat (40) @(posedge clk);
    check(tl_exp.size() == 0, "all TL words delivered");

    // ---------------------------------------------------- 2. trigger-matched
    @(negedge clk) tm_mode = 1'b1;
    tag = 1;
    for (int i = 0; i < 120; i++) begin
      word_t h;
      repeat ($urandom_range(6, 12)) @(negedge clk);
      h = mkhit(16'(ts - 32'($urandom_range(0, 20))), 16'(tag++));
      sent.push_back(h);
      if (i % 2 == 0) begin in_a_valid = 1'b1; in_a_word = h; end
      else            begin in_b_valid = 1'b1; in_b_word = h; end
      @(negedge clk);
      in_a_valid = 1'b0;
      in_b_valid = 1'b0;
    end
    repeat (20) @(posedge clk);
    ws = 16'(ts - 32'd700);
    search(ws, 16'd283, hits, endw, cycles);
    nexp = 0;
    foreach (sent[i]) begin
      hit_t s;
      s = hit_t'(sent[i]);
      if (16'(s.tcoarse - ws) < 16'd283) begin
        nexp++;
        check(sent[i] inside {hits}, $sformatf("hit tag %0d in window found", s.efine));
      end
    end
    foreach (hits[i]) begin
      hit_t s;
      s = hit_t'(hits[i]);
      check(16'(s.tcoarse - ws) < 16'd283, "output hit inside window");
    end
    check(hits.size() == nexp, $sformatf("matched %0d exp %0d", hits.size(), nexp));
    check(endw[31:16] == 16'(nexp), "end marker count");
    check(endw[0] == 1'b0, "no overflow flagged");
    // three pages at most, each read once: pages*32 reads + overhead
    check(cycles <= 3 * 32 * 2 + 20, $sformatf("search took %0d clocks", cycles));

    // ------------------------------------------------- 3. exactly full page
    // wait for the start of a fresh page, then 32 hits in it
    while (ts[7:0] != 8'd2) @(posedge clk);
    sent.delete();
    for (int i = 0; i < 32; i++) begin
      word_t h;
      @(negedge clk);
      h = mkhit(16'(ts), 16'(tag++));
      sent.push_back(h);
      in_a_valid = 1'b1;
      in_a_word  = h;
      @(negedge clk) in_a_valid = 1'b0;
      @(negedge clk);
    end
    repeat (10) @(posedge clk);
    ws = {sent[0][53:46], 8'd0};
    search(ws, 16'd256, hits, endw, cycles);
    check(hits.size() == 32, $sformatf("full page: %0d of 32", hits.size()));
    check(sent[31] inside {hits}, "last location of the page read");
    check(n_overflow == 16'd0, "no overflow yet");

    // --------------------------------------------------------- 4. overflow
    while (ts[7:0] != 8'd2) @(posedge clk);
    sent.delete();
    for (int i = 0; i < 40; i++) begin
      word_t h;
      @(negedge clk);
      h = mkhit(16'(ts), 16'(tag++));
      sent.push_back(h);
      in_b_valid = 1'b1;
      in_b_word  = h;
      @(negedge clk) in_b_valid = 1'b0;
    end
    repeat (10) @(posedge clk);
    ws = {sent[0][53:46], 8'd0};
    search(ws, 16'd256, hits, endw, cycles);
    check(hits.size() == 32, $sformatf("overflow: %0d of 32 kept", hits.size()));
    check(n_overflow == 16'd8, $sformatf("overflow count %0d", n_overflow));
    check(endw[0] == 1'b1, "overflow flagged in end marker");
    foreach (hits[i]) check(hits[i] inside {sent[0:31]}, "kept hits are the first 32");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
