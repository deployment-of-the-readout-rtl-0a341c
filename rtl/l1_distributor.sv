// l1_distributor -- accepts the BESIII L1 trigger and hands trigger windows
// to the trigger-matching logic, one trigger at a time.
//
// Steps:
//  1. Glitch filter. The L1 line is sampled once per BESIII clock (fc_ce).
//     A pulse is accepted as a trigger only when it stays high for MIN_LEN
//     consecutive samples (the nominal pulse is eight). Shorter pulses are
//     counted in n_glitch and otherwise ignored.
//  2. Time stamp. ts is the free-running 32-bit time base in TIGER clocks;
//     the trigger is stamped with the value of ts at the first high sample.
//     The trigger number counts accepted triggers.
//  3. Trigger buffer. In trigger-matched mode each trigger {number, stamp}
//     is written to a FIFO. full_out is raised when the FIFO holds FULL_THR
//     or more triggers (it drives the FULL line towards the Fast Control).
//  4. Release. The oldest trigger is released (trig_go) when at least
//     `delay` clocks have passed since its stamp, which leaves time for the
//     hits to arrive over the serial links, and when the packet builder has
//     finished the previous trigger (tm_done). The window handed on starts
//     `latency` clocks before the stamp and is `window` clocks long.
//
// As published: the minimum length of seven BESIII clocks, the 32-bit
// time stamp, the programmable delay, the window computed here, and holding
// triggers in a buffer until the previous one is fully processed.
// Own choices: FIFO depth, the FULL threshold, the window start being
// stamp - latency, and that the trigger used for the automatic time-base
// reset (sync_only) is not queued.
module l1_distributor #(
  parameter int unsigned MIN_LEN    = 7,
  parameter int unsigned TRIG_DEPTH = 8,
  parameter int unsigned FULL_THR   = 6
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        ts_rst,
  input  logic        fc_ce,
  input  logic        l1_in,
  input  logic        tm_mode,
  input  logic        sync_only,   // this trigger only resets the time base
  input  logic [15:0] latency,     // TIGER clocks from event to L1 arrival
  input  logic [15:0] window,      // trigger window length, TIGER clocks
  input  logic [15:0] delay,       // wait before searching, TIGER clocks
  input  logic        tm_done,     // previous trigger packet completed
  output logic [31:0] ts,
  output logic        l1_accept,
  output logic [22:0] l1_count,
  output logic [15:0] n_glitch,
  output logic [15:0] n_lost,
  output logic        trig_go,
  output logic [22:0] trig_num,
  output logic [31:0] trig_ts,
  output logic [15:0] win_start,
  output logic [15:0] win_len,
  output logic        busy,
  output logic        full_out
);
  localparam int unsigned CW = $clog2(TRIG_DEPTH);

  // ------------------------------------------------------- glitch filter
  logic [3:0]  run;
  logic [31:0] edge_ts;

  always_ff @(posedge clk) begin
    if (rst) begin
      run       <= '0;
      edge_ts   <= '0;
      l1_accept <= 1'b0;
      l1_count  <= '0;
      n_glitch  <= '0;
    end else begin
      l1_accept <= 1'b0;
      if (fc_ce) begin
        if (l1_in) begin
          if (run == 0) edge_ts <= ts;
          if (run != 4'hF) run <= run + 1'b1;
          if (run == 4'(MIN_LEN - 1)) begin
            l1_accept <= 1'b1;
            l1_count  <= l1_count + 1'b1;
          end
        end else begin
          if (run != 0 && run < 4'(MIN_LEN)) n_glitch <= n_glitch + 1'b1;
          run <= '0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || ts_rst) ts <= '0;
    else               ts <= ts + 1'b1;
  end

  // ------------------------------------------------------ trigger buffer
  logic          q_wr, q_rd, q_empty, q_full;
  logic [54:0]   q_din, q_dout;
  logic [CW:0]   q_count;

  // l1_count has already been incremented when l1_accept is seen
  assign q_din = {l1_count, edge_ts};
  assign q_wr  = l1_accept && tm_mode && !sync_only && !q_full;

  sync_fifo #(.WIDTH(55), .DEPTH(TRIG_DEPTH)) u_q (
    .clk, .rst, .wr_en(q_wr), .wr_data(q_din), .rd_en(q_rd),
    .rd_data(q_dout), .empty(q_empty), .full(q_full), .count(q_count)
  );

  always_ff @(posedge clk) begin
    if (rst) n_lost <= '0;
    else if (l1_accept && tm_mode && !sync_only && q_full) n_lost <= n_lost + 1'b1;
  end

  assign full_out = (q_count >= (CW+1)'(FULL_THR));

  // -------------------------------------------------------------- release
  logic [31:0] age;
  assign age  = ts - q_dout[31:0];
  assign q_rd = !busy && !q_empty && (age >= {16'd0, delay});

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      trig_go   <= 1'b0;
      trig_num  <= '0;
      trig_ts   <= '0;
      win_start <= '0;
      win_len   <= '0;
    end else begin
      trig_go <= 1'b0;
      if (q_rd) begin
        busy      <= 1'b1;
        trig_go   <= 1'b1;
        trig_num  <= q_dout[54:32];
        trig_ts   <= q_dout[31:0];
        win_start <= q_dout[15:0] - latency;
        win_len   <= window;
      end else if (tm_done) begin
        busy <= 1'b0;
      end
    end
  end

  a_done_when_busy: assert property (@(posedge clk) disable iff (rst) tm_done |-> busy);
endmodule
