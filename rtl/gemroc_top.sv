// gemroc_top -- readout firmware of one GEMROC board (eight TIGER ASICs on
// four front-end boards, FEB 0..3 = TIGER 0/1, 2/3, 4/5, 6/7).
//
// Data path:
//   TIGER link i -> tiger_test_assembly i (8b/10b, words, counters)
//   TIGER 2k, 2k+1 -> feb_merger k (input FIFO; latency buffer in
//                     trigger-matched mode)
//   trigger-less:    feb_merger x4 -> four_feb_merger_tl -> eth_*
//   trigger-matched: feb_merger x4 -> four_feb_merger_tm -> eth_* and opt_*
// Control:
//   L1 source = fc_simulator (standalone = 1) or the external l1_ext line;
//   l1_distributor filters, stamps and queues the triggers and releases one
//   trigger window at a time to the four feb_mergers and the packet
//   builder; the builder's tm_done releases the next. FULL (full_out) is
//   raised when the trigger queue fills up.
//   reset_manager makes the data-path reset and the time-base reset, which
//   also goes to the TIGERs (tiger_rst).
//   diag_dpram exposes counters and flags to the soft processor (cpu_*).
//
// Everything runs on one clock, the TIGER clock (4 x the 41.65 MHz BESIII
// clock, i.e. 166.6 MHz); the BESIII clock is represented by fc_ce, one
// clock in four, derived here. The PLL that makes this clock from the
// BESIII clock, the LVDS deserialisers, the soft processor, the Ethernet
// MAC and the optical link are outside this module: their signals are
// ports. In trigger-matched mode a packet is handed to the Ethernet and the
// optical port together: a word moves only when both are ready.
module gemroc_top
  import gemroc_pkg::*;
(
  input  logic        clk,
  input  logic        por_n,
  // TIGER links, deserialised 10-bit symbols
  input  logic [9:0]  tiger_sym [N_TIGER],
  input  logic [N_TIGER-1:0] tiger_sym_valid,
  output logic        tiger_rst,
  // BESIII fast control
  input  logic        l1_ext,
  input  logic        check_ext,
  output logic        full_out,
  // configuration (from the slow control)
  input  logic        standalone,
  input  logic        tm_mode,
  input  logic [N_TIGER-1:0] tiger_en,
  input  logic [4:0]  roc_id,
  input  logic [15:0] cfg_latency,
  input  logic [15:0] cfg_window,
  input  logic [15:0] cfg_delay,
  input  logic [15:0] cfg_fc_period,
  input  logic        cfg_auto_ts_rst,
  input  logic        manual_rst,
  input  logic        manual_ts_rst,
  input  logic [1:0]  pll_locked,
  // Ethernet (UDP payload) stream
  output logic        eth_valid,
  output word_t       eth_word,
  output logic        eth_last,
  input  logic        eth_ready,
  // optical link stream (trigger-matched packets)
  output logic        opt_valid,
  output word_t       opt_word,
  output logic        opt_last,
  input  logic        opt_ready,
  // soft processor access to the diagnostic memory
  input  logic [4:0]  cpu_addr,
  input  logic        cpu_clr_sticky,
  output logic [31:0] cpu_rdata
);
  localparam int unsigned N_DIAG = 26;

  logic rst, ts_rst, armed;

  // ----------------------------------------------------- BESIII clock enable
  logic [1:0] ce_div;
  logic       fc_ce;
  always_ff @(posedge clk) begin
    if (rst) ce_div <= '0;
    else     ce_div <= ce_div + 1'b1;
  end
  assign fc_ce = (ce_div == 2'(CLK_RATIO - 1));

  // ------------------------------------------------------- fast control
  logic        sim_l1, sim_check, l1, chk;
  logic [31:0] sim_sent;
  logic        l1_accept;

  fc_simulator u_fcsim (
    .clk, .rst, .fc_ce, .enable(standalone), .period(cfg_fc_period),
    .full_in(full_out), .l1(sim_l1), .check(sim_check), .n_sent(sim_sent)
  );

  assign l1  = standalone ? sim_l1 : l1_ext;
  assign chk = standalone ? sim_check : check_ext;

  reset_manager u_rst (
    .clk, .por_n, .manual_rst, .manual_ts_rst, .auto_en(cfg_auto_ts_rst),
    .l1_accept, .rst, .ts_rst, .armed
  );
  assign tiger_rst = ts_rst;

  logic [31:0] ts;
  logic [22:0] l1_count, trig_num;
  logic [15:0] n_glitch, n_lost, win_start, win_len;
  logic        trig_go, tm_done, l1_busy;
  logic [31:0] trig_ts;

  l1_distributor u_l1 (
    .clk, .rst, .ts_rst, .fc_ce, .l1_in(l1), .tm_mode,
    .sync_only(armed && cfg_auto_ts_rst),
    .latency(cfg_latency), .window(cfg_window), .delay(cfg_delay),
    .tm_done, .ts, .l1_accept, .l1_count, .n_glitch, .n_lost,
    .trig_go, .trig_num, .trig_ts, .win_start, .win_len,
    .busy(l1_busy), .full_out
  );

  // check line: counted and compared with the trigger count
  logic        chk_q;
  logic [15:0] n_check;
  always_ff @(posedge clk) begin
    if (rst) begin
      chk_q   <= 1'b0;
      n_check <= '0;
    end else if (fc_ce) begin
      chk_q <= chk;
      if (chk && !chk_q) n_check <= n_check + 1'b1;
    end
  end

  // ----------------------------------------------------------- TIGER links
  logic [N_TIGER-1:0] t_valid;
  word_t              t_word  [N_TIGER];
  logic [15:0]        t_err   [N_TIGER];
  logic [31:0]        t_hits  [N_TIGER];

  for (genvar i = 0; i < N_TIGER; i++) begin : g_tiger
    tiger_test_assembly u_ta (
      .clk, .rst, .enable(tiger_en[i]), .tiger_id(3'(i)),
      .sym(tiger_sym[i]), .sym_valid(tiger_sym_valid[i]),
      .out_valid(t_valid[i]), .out_word(t_word[i]),
      .n_err(t_err[i]), .n_hits(t_hits[i])
    );
  end

  // ------------------------------------------------------------ FEB mergers
  logic [N_FEB-1:0] tl_valid, tl_ready, tm_valid, tm_ready, searching, in_full;
  word_t            tl_word [N_FEB];
  word_t            tm_word [N_FEB];
  logic [15:0]      n_ovf   [N_FEB];

  for (genvar k = 0; k < N_FEB; k++) begin : g_feb
    feb_merger u_fm (
      .clk, .rst, .tm_mode, .ts,
      .in_a_valid(t_valid[2*k]),   .in_a_word(t_word[2*k]),
      .in_b_valid(t_valid[2*k+1]), .in_b_word(t_word[2*k+1]),
      .tl_valid(tl_valid[k]), .tl_word(tl_word[k]), .tl_ready(tl_ready[k]),
      .trig_go, .win_start, .win_len,
      .tm_valid(tm_valid[k]), .tm_word(tm_word[k]), .tm_ready(tm_ready[k]),
      .searching(searching[k]), .in_full(in_full[k]), .n_overflow(n_ovf[k])
    );
  end

  // ---------------------------------------------------------- packet builders
  logic        tl_pvalid, tl_plast, tl_pready;
  word_t       tl_pword;
  logic [22:0] n_tl_pkts;

  four_feb_merger_tl u_tl (
    .clk, .rst, .roc_id, .in_valid(tl_valid), .in_word(tl_word),
    .in_ready(tl_ready), .pkt_valid(tl_pvalid), .pkt_word(tl_pword),
    .pkt_last(tl_plast), .pkt_ready(tl_pready), .n_pkts(n_tl_pkts)
  );

  logic  tm_pvalid, tm_plast, tm_pready, tm_busy;
  word_t tm_pword;

  four_feb_merger_tm u_tm (
    .clk, .rst, .trig_go, .trig_num, .trig_ts, .roc_id,
    .status_in({4'd0, in_full, pll_locked}),
    .in_valid(tm_valid), .in_word(tm_word), .in_ready(tm_ready),
    .pkt_valid(tm_pvalid), .pkt_word(tm_pword), .pkt_last(tm_plast),
    .pkt_ready(tm_pready), .tm_done, .busy(tm_busy)
  );

  // ------------------------------------------------------- output routing
  always_comb begin
    if (tm_mode) begin
      eth_valid = tm_pvalid && opt_ready;
      opt_valid = tm_pvalid && eth_ready;
      eth_word  = tm_pword;
      eth_last  = tm_plast;
      tm_pready = eth_ready && opt_ready;
      tl_pready = 1'b0;
    end else begin
      eth_valid = tl_pvalid;
      opt_valid = 1'b0;
      eth_word  = tl_pword;
      eth_last  = tl_plast;
      tm_pready = 1'b0;
      tl_pready = eth_ready;
    end
  end
  assign opt_word = tm_pword;
  assign opt_last = tm_plast;

  // ----------------------------------------------------------- diagnostics
  logic [31:0] flags;
  logic [31:0] diag [N_DIAG];

  assign flags = {15'd0, 3'd0, tm_busy, l1_busy, full_out, ~pll_locked,
                  searching, in_full, 1'b0};

  for (genvar i = 0; i < N_TIGER; i++) begin : g_diag_t
    assign diag[i]           = {16'd0, t_err[i]};
    assign diag[N_TIGER + i] = t_hits[i];
  end
  for (genvar k = 0; k < N_FEB; k++) begin : g_diag_f
    assign diag[2*N_TIGER + k] = {16'd0, n_ovf[k]};
  end
  assign diag[2*N_TIGER + N_FEB + 0] = {9'd0, l1_count};
  assign diag[2*N_TIGER + N_FEB + 1] = {16'd0, n_glitch};
  assign diag[2*N_TIGER + N_FEB + 2] = {16'd0, n_lost};
  assign diag[2*N_TIGER + N_FEB + 3] = {9'd0, n_tl_pkts};
  assign diag[2*N_TIGER + N_FEB + 4] = {16'd0, n_check};
  assign diag[2*N_TIGER + N_FEB + 5] = sim_sent;

  diag_dpram #(.N_DIAG(N_DIAG), .DEPTH(32)) u_diag (
    .clk, .rst, .flags_in(flags), .diag_in(diag), .clr_sticky(cpu_clr_sticky),
    .cpu_addr, .cpu_rdata
  );
endmodule
