// four_feb_merger_tl -- builds the trigger-less UDP payloads of one board.
//
// The four FEB streams are served round robin, one word at a time. A packet
// opens, when any FEB has data, with a header word {kind GEMROC/TLHEAD,
// GEMROC id, packet number}, followed by the TIGER words in arrival order.
// The packet is closed (pkt_last on its final word) when either
//   * it holds MAX_WORDS TIGER words, or
//   * it holds FRAMES_PER_PKT frame words of the reference TIGER
//     (REF_TIGER), i.e. the data of that many TIGER time frames.
// Words left over go into the next packet. 180 words of eight bytes plus the
// header is 1448 bytes, inside the 1500-byte UDP size.
//
// Output is registered (pkt_* valid/ready): the word, once valid, stays
// until it is taken.
//
// As published: 180 words and eight time frames as closing
// conditions, the 1500-byte limit. The description also says "every four frame
// words"; the eight-frame rule, given with the packet size, is the one
// used, as a parameter. Own choices: round-robin order, header layout,
// counting frames of one reference TIGER.
module four_feb_merger_tl
  import gemroc_pkg::*;
#(
  parameter int unsigned MAX_WORDS      = 180,
  parameter int unsigned FRAMES_PER_PKT = 8,
  parameter int unsigned REF_TIGER      = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  roc_id,
  input  logic [3:0]  in_valid,
  input  word_t       in_word [4],
  output logic [3:0]  in_ready,
  output logic        pkt_valid,
  output word_t       pkt_word,
  output logic        pkt_last,
  input  logic        pkt_ready,
  output logic [22:0] n_pkts
);
  typedef enum logic [1:0] {T_IDLE, T_HEAD, T_DATA} tstate_t;
  tstate_t     st;
  logic [1:0]  rr;
  logic [7:0]  nwords;
  logic [7:0]  nframes;
  logic        load;
  logic        any;
  logic [1:0]  sel;
  word_t       w;
  logic        ref_frame;

  assign load = !pkt_valid || pkt_ready;
  assign any  = |in_valid;

  always_comb begin
    sel = rr;
    for (int i = 3; i >= 0; i--) begin
      if (in_valid[2'(rr + 2'(i))]) sel = 2'(rr + 2'(i));
    end
  end

  assign w         = in_word[sel];
  assign ref_frame = (w[63:62] == K_FRAME) && (w[2:0] == 3'(REF_TIGER));

  always_comb begin
    in_ready = '0;
    if (st == T_DATA && load && any) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= T_IDLE;
      rr        <= '0;
      nwords    <= '0;
      nframes   <= '0;
      n_pkts    <= '0;
      pkt_valid <= 1'b0;
      pkt_word  <= '0;
      pkt_last  <= 1'b0;
    end else begin
      if (pkt_ready) pkt_valid <= 1'b0;
      case (st)
        T_IDLE: if (any) st <= T_HEAD;
        T_HEAD: if (load) begin
          pkt_valid <= 1'b1;
          pkt_word  <= {K_GEMROC, G_TLHEAD, roc_id, n_pkts, 32'd0};
          pkt_last  <= 1'b0;
          nwords    <= '0;
          nframes   <= '0;
          st        <= T_DATA;
        end
        T_DATA: if (load && any) begin
          pkt_valid <= 1'b1;
          pkt_word  <= w;
          rr        <= sel + 1'b1;
          nwords    <= nwords + 1'b1;
          if (ref_frame) nframes <= nframes + 1'b1;
          if (nwords == 8'(MAX_WORDS - 1) ||
              (ref_frame && nframes == 8'(FRAMES_PER_PKT - 1))) begin
            pkt_last <= 1'b1;
            n_pkts   <= n_pkts + 1'b1;
            st       <= T_IDLE;
          end else begin
            pkt_last <= 1'b0;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (rst)
    pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt_word));
endmodule
