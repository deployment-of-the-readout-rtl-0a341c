// feb_merger -- data path of one front-end board (a pair of TIGERs).
//
// The words of the two TIGER links are merged into one input FIFO (link A
// has priority; a word of link B that collides is held one clock). What
// happens next depends on the acquisition mode:
//
//  * Trigger-less (tm_mode = 0): the FIFO is streamed out unchanged on the
//    tl_* port (valid/ready) towards the four-FEB packet builder.
//
//  * Trigger-matched (tm_mode = 1): hit words are written into the latency
//    buffer, a circular bucket memory of BUCKETS pages of BUCKET_DEPTH
//    locations. The page of a hit is bits [BUCKET_LOG2+3:BUCKET_LOG2] of
//    its coarse time stamp, so one page holds the hits of 2^BUCKET_LOG2
//    TIGER clocks and the memory spans BUCKETS * 2^BUCKET_LOG2 clocks before
//    it wraps. A page is emptied when the local time base enters it; hits
//    beyond BUCKET_DEPTH in one page are dropped and counted (n_overflow).
//    Frame and counter words are not stored in this mode.
//    On trig_go the search starts: every page from the one holding
//    win_start to the one holding win_start + win_len - 1 is read (only its
//    filled locations), and each hit with
//        (tcoarse - win_start) mod 2^16 < win_len
//    is pushed into the output FIFO. After the last page an end marker
//    (kind GEMROC/END, number of matched hits in bits [31:16], bit 0 set if
//    a page overflowed since the previous marker) closes the trigger.
//    Reads are issued only while the output FIFO has room, so a slow
//    consumer stalls the search but loses nothing.
//
// As published: the FIFO, the two modes, pages of 32 locations holding
// 2^8 TIGER clocks, wrap after 24.6 us (16 pages), the page-wise search
// started by the trigger, and accounting for the one-clock read latency of
// the memory (its omission was the bug that lost the last location of a
// page). Own choices: page clearing by the local time base, the overflow
// policy, the end marker, FIFO depths, and that the low 16 bits of the local
// time base equal the TIGER coarse time (both restarted by the same reset).
//
// Lint notes: only the page bits of the time base and of the window end,
// and only the coarse time of a stored hit, are used here; the fill level
// of the input FIFO is not needed. Those unused bits are expected.
module feb_merger
  import gemroc_pkg::*;
#(
  parameter int unsigned BUCKETS      = 16,
  parameter int unsigned BUCKET_DEPTH = 32,
  parameter int unsigned BUCKET_LOG2  = 8,
  parameter int unsigned IN_DEPTH     = 16,
  parameter int unsigned OUT_DEPTH    = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        tm_mode,
  input  logic [31:0] ts,
  input  logic        in_a_valid,
  input  word_t       in_a_word,
  input  logic        in_b_valid,
  input  word_t       in_b_word,
  // trigger-less stream
  output logic        tl_valid,
  output word_t       tl_word,
  input  logic        tl_ready,
  // trigger window
  input  logic        trig_go,
  input  logic [15:0] win_start,
  input  logic [15:0] win_len,
  // trigger-matched stream (hits, then one end marker per trigger)
  output logic        tm_valid,
  output word_t       tm_word,
  input  logic        tm_ready,
  output logic        searching,
  output logic        in_full,
  output logic [15:0] n_overflow
);
  localparam int unsigned BW = $clog2(BUCKETS);
  localparam int unsigned LW = $clog2(BUCKET_DEPTH);
  localparam int unsigned OW = $clog2(OUT_DEPTH);

  // ------------------------------------------------------------ input stage
  logic  pend;
  word_t pend_w;
  logic  f_wr;
  word_t f_din;

  always_comb begin
    f_wr  = 1'b0;
    f_din = in_a_word;
    if (in_a_valid) begin
      f_wr = 1'b1;
    end else if (pend) begin
      f_wr  = 1'b1;
      f_din = pend_w;
    end else if (in_b_valid) begin
      f_wr  = 1'b1;
      f_din = in_b_word;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pend   <= 1'b0;
      pend_w <= '0;
    end else if (in_b_valid && (in_a_valid || pend)) begin
      pend   <= 1'b1;
      pend_w <= in_b_word;
    end else if (!in_a_valid) begin
      pend   <= 1'b0;
    end
  end

  logic  f_rd, f_empty, f_full;
  word_t f_dout;
  logic [$clog2(IN_DEPTH):0] f_count;

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst, .wr_en(f_wr && !f_full), .wr_data(f_din), .rd_en(f_rd),
    .rd_data(f_dout), .empty(f_empty), .full(f_full), .count(f_count)
  );
  assign in_full = f_full;

  assign tl_valid = !tm_mode && !f_empty;
  assign tl_word  = f_dout;
  assign f_rd     = !f_empty && (tm_mode || tl_ready);

  // ------------------------------------------------- latency buffer write
  hit_t          f_hit;
  logic [BW-1:0] w_page, t_page, t_page_q;
  logic [LW:0]   fill [BUCKETS];
  logic          b_we;
  logic [BW+LW-1:0] b_waddr, b_raddr;
  word_t         b_rdata;
  logic          ovf_flag;

  assign f_hit  = hit_t'(f_dout);
  assign w_page = f_hit.tcoarse[BUCKET_LOG2 +: BW];
  assign t_page = ts[BUCKET_LOG2 +: BW];
  assign b_we   = tm_mode && !f_empty && (f_hit.kind == K_HIT) &&
                  (fill[w_page] != (LW+1)'(BUCKET_DEPTH));
  assign b_waddr = {w_page, fill[w_page][LW-1:0]};

  logic end_push;   // end marker written this cycle

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < BUCKETS; i++) fill[i] <= '0;
      t_page_q   <= '0;
      n_overflow <= '0;
      ovf_flag   <= 1'b0;
    end else begin
      t_page_q <= t_page;
      if (b_we) fill[w_page] <= fill[w_page] + 1'b1;
      if (tm_mode && !f_empty && f_hit.kind == K_HIT && !b_we) begin
        n_overflow <= n_overflow + 1'b1;
        ovf_flag   <= 1'b1;
      end else if (end_push) begin
        ovf_flag   <= 1'b0;
      end
      if (t_page != t_page_q) fill[t_page] <= '0;
    end
  end

  dpram #(.WIDTH(WORD_W), .DEPTH(BUCKETS * BUCKET_DEPTH)) u_bucket (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(f_dout),
    .raddr(b_raddr), .rdata(b_rdata)
  );

  // --------------------------------------------------------------- search
  typedef enum logic [1:0] {S_IDLE, S_PAGE, S_READ, S_END} sstate_t;
  sstate_t       st;
  logic [15:0]   ws, wl;
  logic [BW-1:0] page, last_page;
  logic [LW:0]   n_in_page, loc;
  logic          rd_v;          // a read was issued last clock
  logic [15:0]   n_match;

  logic          o_wr, o_rd, o_empty, o_full;
  word_t         o_din, o_dout;
  logic [OW:0]   o_count;
  logic          room;
  hit_t          r_hit;
  logic [15:0]   dt;
  logic [15:0]   w_end;

  assign w_end   = win_start + win_len - 16'd1;

  assign room    = (o_count < (OW+1)'(OUT_DEPTH - 2));
  assign r_hit   = hit_t'(b_rdata);
  assign dt      = r_hit.tcoarse - ws;
  assign b_raddr = {page, loc[LW-1:0]};
  assign searching = (st != S_IDLE);

  wire issue = (st == S_READ) && (loc < n_in_page) && room;
  wire match = rd_v && (dt < wl);

  assign end_push = (st == S_END) && !rd_v && room;
  assign o_wr  = match || end_push;
  assign o_din = end_push ? word_t'({K_GEMROC, G_END, 5'd0, 23'd0,
                                     n_match, 15'd0, ovf_flag})
                          : b_rdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= S_IDLE;
      ws        <= '0;
      wl        <= '0;
      page      <= '0;
      last_page <= '0;
      n_in_page <= '0;
      loc       <= '0;
      rd_v      <= 1'b0;
      n_match   <= '0;
    end else begin
      rd_v <= issue;
      if (match) n_match <= n_match + 1'b1;
      case (st)
        S_IDLE: if (trig_go) begin
          ws        <= win_start;
          wl        <= win_len;
          page      <= win_start[BUCKET_LOG2 +: BW];
          last_page <= w_end[BUCKET_LOG2 +: BW];
          n_match   <= '0;
          st        <= S_PAGE;
        end
        S_PAGE: begin
          n_in_page <= fill[page];
          loc       <= '0;
          st        <= S_READ;
        end
        S_READ: begin
          if (issue) loc <= loc + 1'b1;
          else if (loc >= n_in_page) begin
            if (page == last_page) st <= S_END;
            else begin
              page <= page + 1'b1;
              st   <= S_PAGE;
            end
          end
        end
        S_END: if (end_push) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst, .wr_en(o_wr), .wr_data(o_din), .rd_en(o_rd),
    .rd_data(o_dout), .empty(o_empty), .full(o_full), .count(o_count)
  );

  assign tm_valid = !o_empty;
  assign tm_word  = o_dout;
  assign o_rd     = tm_valid && tm_ready;

  a_no_out_overflow: assert property (@(posedge clk) disable iff (rst) !(o_wr && o_full));
endmodule
