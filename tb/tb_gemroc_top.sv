// tb_gemroc_top -- end-to-end test of the GEMROC readout at its default
// size: eight TIGER link models, four FEB paths, both packet builders.
//
// Sequence:
//  1. Trigger-less mode. One L1 resets the time base (first trigger after a
//     reset). Every TIGER sends hits, then frame words; one word of TIGER 3
//     is sent behind a corrupted comma. Packets are checked: header, at most
//     180 data words, close at the 8th frame word of TIGER 0, every word of
//     every TIGER delivered once and in order (except the corrupted one).
//  2. Mode switch to trigger-matched with a data-path reset. Background
//     hits at a random rate on all TIGERs, stamped with the time base.
//     External L1 triggers (8 BESIII clocks), one glitch (3 BESIII clocks),
//     three check pulses. Each packet is checked against the hits sent:
//     header {id, number, stamp}, exactly the hits whose coarse time falls
//     into the window [stamp - latency, stamp - latency + window), trailer
//     hit count, stamp no more than 2 BESIII clocks after the L1 edge,
//     header leaving no earlier than the programmed delay after the stamp.
//     Ethernet and optical streams must carry the same words.
//  3. A burst of 80 hits on FEB 0 inside one page: the trailer of the
//     trigger covering it must report the page overflow.
//  4. Eight triggers 48 clocks apart with the output stalled: FULL must
//     rise, triggers must wait for the packet in process, none may be lost.
//  5. Standalone mode: the internal Fast Control simulator triggers.
//  6. The diagnostic memory is read through the processor port.
// Every mechanism is counted; one that never happened is a failure.
module tb_gemroc_top;
  import gemroc_pkg::*;

  localparam logic [15:0] LAT = 16'd1433;   // 8.6 us
  localparam logic [15:0] WIN = 16'd283;    // 1.7 us
  localparam logic [15:0] DLY = 16'd64;

  logic clk = 1'b0;
  logic por_n = 1'b0;
  logic [9:0] tiger_sym [N_TIGER];
  logic [N_TIGER-1:0] tiger_sym_valid;
  logic tiger_rst;
  logic l1_ext = 1'b0, check_ext = 1'b0, full_out;
  logic standalone = 1'b0, tm_mode = 1'b0;
  logic [N_TIGER-1:0] tiger_en = '1;
  logic [4:0] roc_id = 5'd9;
  logic [15:0] cfg_latency = LAT, cfg_window = WIN, cfg_delay = DLY;
  logic [15:0] cfg_fc_period = 16'd600;
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

  // ------------------------------------------------------------ mechanisms
  int m_stall = 0, m_tl_size = 0, m_tl_frames = 0, m_err = 0, m_switch = 0;
  int m_ts_rst = 0, m_glitch = 0, m_ovf = 0, m_full = 0, m_hold = 0;
  int m_standalone = 0, m_check = 0;

  always @(posedge clk) begin
    if (eth_valid && !eth_ready) m_stall++;
    if (tiger_rst && !dut.rst) m_ts_rst++;
    if (full_out) m_full++;
    if (dut.l1_accept && dut.l1_busy) m_hold++;
  end

  // ------------------------------------------------------------ TIGER links
  logic gen_on = 1'b0;
  int   gen_rate = 100;                 // one hit per gen_rate clocks per TIGER
  typedef struct {
    longint t;
    word_t  w;
  } sent_t;
  sent_t tm_sent[$];
  bit    sent_set[word_t];

  function automatic word_t mk_hit(int tiger, logic [15:0] tc);
    word_t w;
    w = {$urandom, $urandom};
    w[63:62] = K_HIT;
    w[53:38] = tc;
    w[2:0]   = 3'(tiger);
    return w;
  endfunction

  for (genvar i = 0; i < N_TIGER; i++) begin : g_link
    tiger_link_model #(.SYM_DIV(1)) u_link (
      .clk, .sym(tiger_sym[i]), .sym_valid(tiger_sym_valid[i])
    );
    // background hit generator, coarse time = the TIGER time base
    always @(negedge clk) begin
      if (gen_on && u_link.pending() < 2 && $urandom_range(1, gen_rate) == 1) begin
        word_t w;
        w = mk_hit(i, dut.ts[15:0]);
        u_link.send(w);
        tm_sent.push_back('{cyc, w});
        sent_set[w] = 1'b1;
      end
    end
  end

  task automatic send_word(int i, word_t w);
    case (i)
      0: g_link[0].u_link.send(w);
      1: g_link[1].u_link.send(w);
      2: g_link[2].u_link.send(w);
      3: g_link[3].u_link.send(w);
      4: g_link[4].u_link.send(w);
      5: g_link[5].u_link.send(w);
      6: g_link[6].u_link.send(w);
      default: g_link[7].u_link.send(w);
    endcase
  endtask

  function automatic int pend(int i);
    case (i)
      0: return g_link[0].u_link.pending();
      1: return g_link[1].u_link.pending();
      2: return g_link[2].u_link.pending();
      3: return g_link[3].u_link.pending();
      4: return g_link[4].u_link.pending();
      5: return g_link[5].u_link.pending();
      6: return g_link[6].u_link.pending();
      default: return g_link[7].u_link.pending();
    endcase
  endfunction

  // ----------------------------------------------------- output back-pressure
  int stall_mode = 1;   // 0: always ready, 1: random, 2: stalled
  always @(negedge clk) begin
    eth_ready <= (stall_mode == 0) ? 1'b1 : (stall_mode == 2) ? 1'b0 : ($urandom_range(0, 3) != 0);
    opt_ready <= (stall_mode == 0) ? 1'b1 : (stall_mode == 2) ? 1'b0 : ($urandom_range(0, 7) != 0);
  end

  // ------------------------------------------------------------ packet checks
  word_t tl_exp [N_TIGER][$];
  int    tl_pos = 0, tl_frames = 0, tl_pk = 0;
  bit    in_tm = 1'b0;            // inside a trigger-matched packet
  word_t tm_head;
  int    tm_nhits = 0, tm_exp = 0, n_tm_pk = 0, n_ovf_pk = 0;
  bit    tm_exact = 1'b1;
  logic [22:0] last_num = '0;
  bit    first_tm = 1'b1;
  logic [31:0] rise_q[$];
  logic [15:0] ws;

  always @(posedge clk) if (dut.rst) begin
    tl_pos = 0;
    in_tm  = 1'b0;
  end else begin
    if (opt_valid && opt_ready && eth_ready) begin
      chk(tm_mode, "optical output only in trigger-matched mode");
      chk(opt_word == eth_word && opt_last == eth_last, "optical word equals Ethernet word");
    end
    if (eth_valid && eth_ready) begin
      word_t w;
      w = eth_word;
      if (!in_tm && tl_pos == 0 && w[63:60] == {K_GEMROC, G_HEADER}) begin
        // trigger-matched header
        in_tm    = 1'b1;
        tm_head  = w;
        tm_nhits = 0;
        if (first_tm) begin
          first_tm = 1'b0;
          m_switch++;
        end else chk(w[54:32] == last_num + 1'b1, "consecutive trigger numbers");
        last_num = w[54:32];
        chk(w[59:55] == roc_id, "header board id");
        chk(dut.ts - w[31:0] >= 32'(DLY), $sformatf("header %0d clocks after stamp", dut.ts - w[31:0]));
        if (!standalone) begin
          if (rise_q.size() == 0) chk(1'b0, "packet without a trigger");
          else begin
            logic [31:0] r;
            r = rise_q.pop_front();
            chk(w[31:0] - r <= 32'd8, $sformatf("stamp %0d clocks after L1 edge", w[31:0] - r));
          end
        end else m_standalone++;
        ws = w[15:0] - LAT;
        tm_exp = 0;
        foreach (tm_sent[j])
          if (cyc - tm_sent[j].t < 4000 && (tm_sent[j].w[53:38] - ws) < WIN) tm_exp++;
        chk(!eth_last, "header not last");
      end else if (in_tm) begin
        if (w[63:60] == {K_GEMROC, G_TRAILER}) begin
          bit ovf;
          ovf = (w[5:4] != 2'b00) || (w[1:0] != 2'b00);
          chk(eth_last, "trailer is last");
          chk(w[54:32] == tm_head[54:32], "trailer number");
          chk(w[31:16] == 16'(tm_nhits), "trailer hit count");
          chk(w[15:6] == {4'd0, 4'd0, pll_locked}, "trailer status");
          if (tm_exact) chk(tm_nhits == tm_exp && !ovf,
                            $sformatf("trigger %0d: %0d hits, expected %0d", w[54:32], tm_nhits, tm_exp));
          else begin
            chk(ovf && tm_nhits < tm_exp, $sformatf("overflow trigger: %0d of %0d hits", tm_nhits, tm_exp));
            if (ovf) m_ovf++;
            tm_exact = 1'b1;
          end
          n_tm_pk++;
          in_tm = 1'b0;
        end else begin
          tm_nhits++;
          chk(w[63:62] == K_HIT, "only hits inside a trigger packet");
          chk(sent_set.exists(w), "hit was sent");
          chk((w[53:38] - ws) < WIN, "hit inside the window");
          chk(!eth_last, "hit not last");
        end
      end else begin
        // trigger-less packet
        if (tl_pos == 0) begin
          chk(w == {K_GEMROC, G_TLHEAD, roc_id, 23'(tl_pk), 32'd0}, "UDP packet header");
          tl_frames = 0;
        end else begin
          int t;
          t = int'(w[2:0]);
          if (w[63:62] == K_FRAME && t == 0) tl_frames++;
          if (tl_exp[t].size() == 0) chk(1'b0, $sformatf("unexpected word of TIGER %0d", t));
          else chk(w == tl_exp[t].pop_front(), $sformatf("TIGER %0d word order", t));
          if (eth_last) begin
            if (tl_pos == 180) m_tl_size++;
            else begin
              chk(tl_frames == 8, $sformatf("packet closed at %0d words, %0d frames", tl_pos, tl_frames));
              m_tl_frames++;
            end
          end else chk(tl_pos < 180 && tl_frames < 8, "packet exceeds its limits");
        end
        if (eth_last) begin
          tl_pos = 0;
          tl_pk++;
        end else tl_pos++;
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  task automatic wait_clk(int n);
    repeat (n) @(negedge clk);
  endtask

  // L1 pulse of n BESIII clocks on the external line
  task automatic l1_pulse(int n, bit expect_pkt);
    @(negedge clk);
    l1_ext = 1'b1;
    if (expect_pkt) rise_q.push_back(dut.ts);
    wait_clk(4 * n);
    l1_ext = 1'b0;
  endtask

  task automatic cpu_read(logic [4:0] a, output logic [31:0] d);
    @(negedge clk) cpu_addr = a;
    @(negedge clk) d = cpu_rdata;
  endtask

  task automatic wait_pkts(int n);
    int guard;
    guard = 0;
    while (n_tm_pk < n && guard < 200000) begin
      @(negedge clk);
      guard++;
    end
    chk(n_tm_pk >= n, $sformatf("%0d packets, expected %0d", n_tm_pk, n));
  endtask

  initial begin
    logic [31:0] d;
    int n_tl_words, pk0;
    wait_clk(10);
    por_n = 1'b1;
    while (dut.rst) @(negedge clk);
    wait_clk(20);

    // ---------------------------------------------- 1. trigger-less
    stall_mode = 1;
    l1_pulse(8, 1'b0);        // first trigger after reset: time-base reset
    wait_clk(50);
    chk(m_ts_rst == 1, $sformatf("time base reset by the first trigger, %0d", m_ts_rst));
    chk(dut.ts < 32'd100, "time base restarted");
    // dense hits: 60 per TIGER
    n_tl_words = 0;
    for (int r = 0; r < 60; r++) begin
      for (int i = 0; i < N_TIGER; i++) begin
        word_t w;
        w = mk_hit(i, 16'($urandom));
        send_word(i, w);
        tl_exp[i].push_back(w);
        n_tl_words++;
      end
      wait_clk(18);
    end
    // hits and frame words; TIGER 0 sends a frame word every second word
    for (int r = 0; r < 40; r++) begin
      for (int i = 0; i < N_TIGER; i++) begin
        word_t w;
        w = mk_hit(i, 16'($urandom));
        if ((i == 0 && r % 2 == 1) || (r % 10 == 9)) w[63:62] = K_FRAME;
        send_word(i, w);
        tl_exp[i].push_back(w);
      end
      wait_clk(18);
    end
    // one word of TIGER 3 behind a corrupted comma
    while (pend(3) != 0) @(negedge clk);
    wait_clk(1);
    g_link[3].u_link.corrupt_next();
    send_word(3, mk_hit(3, 16'h1234));
    wait_clk(40);
    // flush: TIGER 0 frame words until everything has been delivered
    for (int r = 0; r < 60; r++) begin
      bit left;
      left = 1'b0;
      for (int i = 0; i < N_TIGER; i++) if (tl_exp[i].size() != 0) left = 1'b1;
      if (!left && tl_pos == 0) break;
      begin
        word_t w;
        w = mk_hit(0, 16'($urandom));
        w[63:62] = K_FRAME;
        send_word(0, w);
        tl_exp[0].push_back(w);
      end
      wait_clk(200);
    end
    for (int i = 0; i < N_TIGER; i++)
      chk(tl_exp[i].size() == 0, $sformatf("TIGER %0d: %0d words not delivered", i, tl_exp[i].size()));
    chk(dut.n_tl_pkts == 23'(tl_pk), "packet counter");
    cpu_read(5'd2 + 5'd3, d);
    chk(d == 32'd1, $sformatf("one 8b/10b error on TIGER 3, read %0d", d));
    if (d != 0) m_err++;
    cpu_read(5'd2, d);
    chk(d == 32'd0, "no error on TIGER 0");

    // ---------------------------------------------- 2. trigger-matched
    tm_mode = 1'b1;
    @(negedge clk) manual_rst = 1'b1;
    @(negedge clk) manual_rst = 1'b0;
    while (dut.rst) @(negedge clk);
    wait_clk(20);
    l1_pulse(8, 1'b0);        // time-base reset, no packet
    wait_clk(40);
    chk(m_ts_rst == 2, $sformatf("time base reset after the data-path reset, %0d", m_ts_rst));
    gen_on = 1'b1;
    wait_clk(5000);
    l1_pulse(3, 1'b0);        // glitch
    wait_clk(100);
    for (int k = 0; k < 6; k++) begin
      l1_pulse(8, 1'b1);
      wait_clk($urandom_range(1500, 3000));
      if (k < 3) begin
        @(negedge clk) check_ext = 1'b1;
        wait_clk(32);
        check_ext = 1'b0;
      end
    end
    wait_pkts(6);

    // ---------------------------------------------- 3. page overflow
    begin
      longint t0;
      while (pend(0) != 0 || pend(1) != 0 || dut.ts[7:0] != 8'd16) @(negedge clk);
      t0 = dut.ts;
      for (int r = 0; r < 40; r++)
        for (int i = 0; i < 2; i++) begin
          word_t w;
          w = mk_hit(i, 16'(t0) + 16'(r));
          send_word(i, w);
          tm_sent.push_back('{cyc, w});
          sent_set[w] = 1'b1;
        end
      // trigger whose window starts 16 clocks before the burst page
      while (dut.ts != 32'(t0) + 32'(LAT) - 32'd32) @(negedge clk);
      tm_exact = 1'b0;
      l1_pulse(8, 1'b1);
      wait_pkts(7);
    end

    // ---------------------------------------------- 4. FULL and trigger hold
    wait_clk(2000);
    stall_mode = 2;
    for (int k = 0; k < 8; k++) begin
      l1_pulse(8, 1'b1);
      wait_clk(16);
    end
    wait_clk(500);
    chk(full_out, "FULL while eight triggers wait");
    stall_mode = 1;
    wait_pkts(15);
    wait_clk(100);
    chk(!full_out, "FULL released");

    // ---------------------------------------------- 5. standalone
    wait_clk(2000);
    pk0 = n_tm_pk;
    standalone = 1'b1;
    wait_pkts(pk0 + 3);
    standalone = 1'b0;
    wait_clk(3000);
    chk(!in_tm, "no packet left open");
    gen_on = 1'b0;

    // ---------------------------------------------- 6. diagnostic memory
    cpu_read(5'd2 + 5'd21, d);
    chk(d == 32'd1, $sformatf("one glitch counted, read %0d", d));
    if (d != 0) m_glitch++;
    cpu_read(5'd2 + 5'd22, d);
    chk(d == 32'd0, "no trigger lost");
    cpu_read(5'd2 + 5'd24, d);
    chk(d == 32'd3, $sformatf("three check pulses, read %0d", d));
    if (d != 0) m_check++;
    cpu_read(5'd2 + 5'd16, d);
    chk(d != 32'd0, "overflow counted on FEB 0");
    cpu_read(5'd2 + 5'd25, d);
    chk(d >= 32'd3, "simulator triggers counted");
    cpu_read(5'd0, d);
    chk(d[11], "FULL recorded in the sticky flags");
    @(negedge clk) cpu_clr_sticky = 1'b1;
    @(negedge clk) cpu_clr_sticky = 1'b0;
    wait_clk(40);
    cpu_read(5'd0, d);
    chk(!d[11], "sticky flags cleared");

    // ---------------------------------------------- mechanisms
    $display("mechanisms: stall=%0d tl_size_close=%0d tl_frame_close=%0d 8b10b_err=%0d",
             m_stall, m_tl_size, m_tl_frames, m_err);
    $display("            mode_switch=%0d ts_reset=%0d glitch=%0d overflow=%0d full=%0d",
             m_switch, m_ts_rst, m_glitch, m_ovf, m_full);
    $display("            trigger_hold=%0d standalone=%0d check=%0d packets tl=%0d tm=%0d",
             m_hold, m_standalone, m_check, tl_pk, n_tm_pk);
    chk(m_stall > 0, "mechanism: output stall");
    chk(m_tl_size > 0, "mechanism: UDP packet closed at 180 words");
    chk(m_tl_frames > 0, "mechanism: UDP packet closed at 8 frames");
    chk(m_err > 0, "mechanism: 8b/10b error");
    chk(m_switch > 0, "mechanism: mode switch");
    chk(m_ts_rst > 0, "mechanism: automatic time-base reset");
    chk(m_glitch > 0, "mechanism: L1 glitch rejected");
    chk(m_ovf > 0, "mechanism: latency buffer page overflow");
    chk(m_full > 0, "mechanism: FULL");
    chk(m_hold > 0, "mechanism: trigger held until the previous packet is done");
    chk(m_standalone > 0, "mechanism: standalone triggers");
    chk(m_check > 0, "mechanism: check line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
