// tb_gemroc_rate -- the board at its operating point, trigger-matched mode.
//
// Every TIGER sends hits at the rate of 64 channels x 60 kHz (one hit per
// about 43 clocks on average, random arrival), the required peak rate of the
// innermost layer with its safety factor. External L1 triggers arrive at
// random with a 4 kHz mean (mean spacing 41 650 clocks) and never closer
// than the 3 us BESIII dead time, with latency 8.6 us and window 1.7 us.
// The Ethernet and optical sinks accept 3 words in 4.
//
// For each of N_TRIG triggers the packet must hold exactly the hits whose
// coarse time falls into the window (trigger-matching efficiency 100 %, no
// extra hits), the trailer must report no page overflow, and the whole
// packet must have left within 2000 clocks (12 us) of the end of the
// search delay. FULL must never rise, no trigger may be lost.
module tb_gemroc_rate;
  import gemroc_pkg::*;

  localparam int          N_TRIG = 40;
  localparam int          HIT_DIV = 43;       // 166.6 MHz / (64 x 60 kHz)
  localparam logic [15:0] LAT = 16'd1433;     // 8.6 us
  localparam logic [15:0] WIN = 16'd283;      // 1.7 us
  localparam logic [15:0] DLY = 16'd64;

  logic clk = 1'b0;
  logic por_n = 1'b0;
  logic [9:0] tiger_sym [N_TIGER];
  logic [N_TIGER-1:0] tiger_sym_valid;
  logic tiger_rst;
  logic l1_ext = 1'b0, check_ext = 1'b0, full_out;
  logic standalone = 1'b0, tm_mode = 1'b1;
  logic [N_TIGER-1:0] tiger_en = '1;
  logic [4:0] roc_id = 5'd3;
  logic [15:0] cfg_latency = LAT, cfg_window = WIN, cfg_delay = DLY;
  logic [15:0] cfg_fc_period = 16'd10000;
  logic cfg_auto_ts_rst = 1'b1;
  logic manual_rst = 1'b0, manual_ts_rst = 1'b0;
  logic [1:0] pll_locked = 2'b11;
  logic eth_valid, eth_last, eth_ready;
  logic opt_valid, opt_last, opt_ready;
  word_t eth_word, opt_word;
  logic [4:0] cpu_addr = '0;
  logic cpu_clr_sticky = 1'b0;
  logic [31:0] cpu_rdata;

  int checks = 0, failures = 0;
  longint cyc = 0;

  always #3 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  gemroc_top dut (.*);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  initial begin
    #60000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    eth_ready <= ($urandom_range(0, 3) != 0);
    opt_ready <= ($urandom_range(0, 3) != 0);
  end

  // ------------------------------------------------------------ hit sources
  logic gen_on = 1'b0;
  typedef struct {
    longint t;
    word_t  w;
  } sent_t;
  sent_t sent[$];
  int    n_sent = 0;

  for (genvar i = 0; i < N_TIGER; i++) begin : g_link
    tiger_link_model #(.SYM_DIV(1)) u_link (
      .clk, .sym(tiger_sym[i]), .sym_valid(tiger_sym_valid[i])
    );
    always @(negedge clk) begin
      if (gen_on && $urandom_range(1, HIT_DIV) == 1) begin
        word_t w;
        w = {$urandom, $urandom};
        w[63:62] = K_HIT;
        w[53:38] = dut.ts[15:0];
        w[2:0]   = 3'(i);
        u_link.send(w);
        sent.push_back('{cyc, w});
        n_sent++;
      end
    end
  end

  // forget hits older than the latency buffer can hold
  always @(posedge clk) begin
    while (sent.size() > 0 && cyc - sent[0].t > 6000) void'(sent.pop_front());
  end

  // ------------------------------------------------------------ packet check
  int    n_pk = 0, n_hits_total = 0, n_full = 0;
  bit    in_pk = 1'b0;
  int    n_hits = 0, n_exp = 0;
  logic [15:0] ws;
  logic [31:0] stamp;
  bit    exp_set[word_t];
  int    max_lat = 0;

  always @(posedge clk) begin
    if (full_out) n_full++;
    if (!dut.rst && eth_valid && eth_ready) begin
      chk(opt_valid && opt_word == eth_word, "optical and Ethernet carry the same word");
      if (!in_pk) begin
        chk(eth_word[63:60] == {K_GEMROC, G_HEADER}, "packet starts with a header");
        in_pk = 1'b1;
        stamp = eth_word[31:0];
        ws    = stamp[15:0] - LAT;
        n_hits = 0;
        exp_set.delete();
        foreach (sent[j])
          if ((sent[j].w[53:38] - ws) < WIN) exp_set[sent[j].w] = 1'b1;
        n_exp = exp_set.size();
      end else if (eth_word[63:60] == {K_GEMROC, G_TRAILER}) begin
        int lat;
        lat = int'(dut.ts - stamp) - int'(DLY);
        if (lat > max_lat) max_lat = lat;
        chk(eth_last, "trailer is last");
        chk(n_hits == n_exp, $sformatf("trigger %0d: %0d hits of %0d", eth_word[54:32], n_hits, n_exp));
        chk(eth_word[31:16] == 16'(n_hits), "trailer hit count");
        chk(eth_word[5:4] == 2'b00 && eth_word[1:0] == 2'b00, "no page overflow");
        chk(lat <= 2000, $sformatf("packet finished %0d clocks after the delay", lat));
        n_hits_total += n_hits;
        n_pk++;
        in_pk = 1'b0;
      end else begin
        chk(exp_set.exists(eth_word), "hit belongs to the window");
        if (exp_set.exists(eth_word)) exp_set.delete(eth_word);
        n_hits++;
      end
    end
  end

  // ------------------------------------------------------------ triggers
  task automatic l1_pulse();
    @(negedge clk);
    l1_ext = 1'b1;
    repeat (32) @(negedge clk);
    l1_ext = 1'b0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (10) @(negedge clk);
    por_n = 1'b1;
    while (dut.rst) @(negedge clk);
    repeat (20) @(negedge clk);
    l1_pulse();                       // first trigger: time-base reset
    repeat (40) @(negedge clk);
    gen_on = 1'b1;
    repeat (5000) @(negedge clk);     // fill the latency buffer
    for (int k = 0; k < N_TRIG; k++) begin
      int gap;
      // exponential spacing, mean 41 650 clocks, at least 500 (3 us)
      gap = int'(-41650.0 * $ln((real'($urandom_range(1, 1000000))) / 1000000.0));
      if (gap < 500) gap = 500;
      l1_pulse();
      repeat (gap) @(negedge clk);
    end
    while (n_pk < N_TRIG || in_pk) @(negedge clk);
    repeat (3000) @(negedge clk);
    chk(n_pk == N_TRIG, $sformatf("%0d packets of %0d", n_pk, N_TRIG));
    chk(n_full == 0, "FULL never raised");
    @(negedge clk) cpu_addr = 5'd2 + 5'd22;
    @(negedge clk) d = cpu_rdata;
    chk(d == 32'd0, "no trigger lost");
    $display("%0d triggers, %0d hits sent, %0d matched, longest packet %0d clocks after the delay",
             n_pk, n_sent, n_hits_total, max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
