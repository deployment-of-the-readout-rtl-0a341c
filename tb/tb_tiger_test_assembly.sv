// tb_tiger_test_assembly -- self-checking test of the TIGER link receiver.
//
// A link model sends 60 random words (hit, frame and counter kinds). The
// comma before word 20 is corrupted: the receiver must count exactly one
// 8b/10b error and drop that word only. Every other word must come out in
// order, with bits [2:0] replaced by the TIGER number; the hit counter must
// equal the number of hit words delivered. With enable low, nothing may come
// out. The 8b/10b encoder is checked first against known code groups.
module tb_tiger_test_assembly;
  import gemroc_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic enable = 1'b1;
  logic [9:0] sym;
  logic sym_valid;
  logic out_valid;
  word_t out_word;
  logic [15:0] n_err;
  logic [31:0] n_hits;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tiger_link_model #(.SYM_DIV(1)) u_link (.clk, .sym, .sym_valid);

  tiger_test_assembly dut (
    .clk, .rst, .enable, .tiger_id(3'd5), .sym, .sym_valid,
    .out_valid, .out_word, .n_err, .n_hits
  );

  word_t exp_q[$];
  int    got = 0;
  int    exp_hits = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      got++;
      if (exp_q.size() == 0) check(1'b0, "unexpected word");
      else begin
        word_t e;
        e = exp_q.pop_front();
        check(out_word == e, $sformatf("word %0d: got %h exp %h", got, out_word, e));
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // known code groups: K28.5 RD-, D21.5 and D0.0 RD-
    check(enc8b10b(8'h00, 1'b1, 1'b0) == {1'b1, 10'b0011111010}, "K28.5 RD-");
    check(enc8b10b(8'hB5, 1'b0, 1'b0) == {1'b0, 10'b1010101010}, "D21.5");
    check(enc8b10b(8'h00, 1'b0, 1'b0) == {1'b0, 10'b1001110100}, "D0.0 RD-");
    check(enc8b10b(8'h00, 1'b0, 1'b1) == {1'b1, 10'b0110001011}, "D0.0 RD+");

    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 60; i++) begin
      word_t w;
      w = {$urandom, $urandom};
      w[63:62] = 2'($urandom_range(0, 2));
      while (u_link.pending() != 0) @(posedge clk);
      @(negedge clk);
      if (i == 20) u_link.corrupt_next();
      else begin
        exp_q.push_back({w[63:3], 3'd5});
        if (w[63:62] == K_HIT) exp_hits++;
      end
      u_link.send(w);
    end
    while (u_link.pending() != 0) @(posedge clk);
    repeat (30) @(posedge clk);
    check(exp_q.size() == 0, "all words received");
    check(got == 59, $sformatf("59 words out, got %0d", got));
    check(n_err == 16'd1, $sformatf("one error counted, got %0d", n_err));
    check(n_hits == 32'(exp_hits), $sformatf("hits %0d exp %0d", n_hits, exp_hits));

    // disabled: nothing comes out
    @(negedge clk) enable = 1'b0;
    for (int i = 0; i < 3; i++) u_link.send(64'h0123_4567_89AB_CDEF);
    while (u_link.pending() != 0) @(posedge clk);
    repeat (30) @(posedge clk);
    check(got == 59, "no output while disabled");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
