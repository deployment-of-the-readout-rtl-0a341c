// tb_four_feb_merger_tl -- self-checking test of the trigger-less packet
// builder.
//
// Four FEB sources send tagged words under random back-pressure:
//  A. dense hits, no frame words: every packet must carry exactly 180 data
//     words (1448 bytes with the header);
//  B. hits mixed with frame words of all TIGERs: a packet must close on the
//     eighth frame word of TIGER 0, or earlier at 180 words.
// Always: each packet starts with a header {id, packet number}, pkt_last
// marks only the last word, and the words of each FEB come out complete and
// in their order.
module tb_four_feb_merger_tl;
  import gemroc_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic [4:0] roc_id = 5'd7;
  logic [3:0] in_valid;
  word_t in_word [4];
  logic [3:0] in_ready;
  logic pkt_valid, pkt_last, pkt_ready;
  word_t pkt_word;
  logic [22:0] n_pkts;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  four_feb_merger_tl dut (.*);

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

  word_t src [4][$];
  word_t exp [4][$];
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      in_valid[k] = (src[k].size() > 0);
      in_word[k]  = (src[k].size() > 0) ? src[k][0] : '0;
    end
  end
  always @(posedge clk) begin
    for (int k = 0; k < 4; k++)
      if (in_valid[k] && in_ready[k]) void'(src[k].pop_front());
  end
  always @(negedge clk) pkt_ready <= ($urandom_range(0, 5) != 0);

  // packet checker
  int  pos = 0;          // word index inside the packet, 0 = header
  int  frames = 0;
  int  n_pk = 0;
  int  n_full = 0, n_frame_close = 0;
  always @(posedge clk) if (!rst && pkt_valid && pkt_ready) begin
    if (pos == 0) begin
      chk(pkt_word == {K_GEMROC, G_TLHEAD, roc_id, 23'(n_pk), 32'd0}, "packet header");
      chk(!pkt_last, "header is not last");
      frames = 0;
    end else begin
      int k;
      k = int'(pkt_word[5:4]);  // FEB tag of the test words
      if (pkt_word[63:62] == K_FRAME && pkt_word[2:0] == 3'd0) frames++;
      if (exp[k].size() == 0) chk(1'b0, "word from an empty source");
      else chk(pkt_word == exp[k].pop_front(), $sformatf("FEB %0d order", k));
      if (pkt_last) begin
        if (pos == 180) n_full++;
        else begin
          chk(frames == 8 && pkt_word[63:62] == K_FRAME && pkt_word[2:0] == 3'd0,
              $sformatf("early close at %0d words with %0d frames", pos, frames));
          n_frame_close++;
        end
      end else begin
        chk(pos < 180, "packet over 180 words");
        chk(frames < 8, "packet not closed at 8th frame");
      end
    end
    if (pkt_last) begin
      pos = 0;
      n_pk++;
    end else pos++;
  end

  function automatic word_t mk(int k, bit frame, logic [2:0] tiger);
    word_t w;
    w = {$urandom, $urandom};
    w[63:62] = frame ? K_FRAME : K_HIT;
    w[5:4]   = 2'(k);
    w[2:0]   = tiger;
    return w;
  endfunction

  initial begin
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // A: dense hits
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < 270; i++) begin
        word_t w;
        w = mk(k, 1'b0, 3'(2 * k + 1));
        src[k].push_back(w);
        exp[k].push_back(w);
      end
    while (n_pk < 6) @(posedge clk);
    chk(n_full == 6, $sformatf("six full packets, %0d", n_full));
    // B: frames; TIGER 0 frame every 2nd word on FEB 0
    for (int i = 0; i < 200; i++) begin
      for (int k = 0; k < 4; k++) begin
        word_t w;
        bit fr;
        fr = (k == 0) ? (i % 2 == 1) : (i % 10 == 9);
        w = mk(k, fr, 3'(2 * k + (i % 2)));
        if (k == 0 && fr) w[2:0] = 3'd0;
        src[k].push_back(w);
        exp[k].push_back(w);
      end
      repeat (3) @(negedge clk);
    end
    while (n_frame_close < 2) @(posedge clk);
    chk(n_frame_close >= 2, "packets closed by frame count");
    chk(n_pkts == 23'(n_pk), "packet counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
