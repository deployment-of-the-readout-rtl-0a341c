// four_feb_merger_tm -- builds the trigger-matched event packet of one
// board from the matched hits of its four FEBs.
//
// Structure (three state machines):
//  * pair 0 collector: FEB 0 then FEB 1 -> pair FIFO 0, preceded by the
//    header {GEMROC id, trigger number, trigger time stamp} and followed by
//    an internal end marker;
//  * pair 1 collector: FEB 2 then FEB 3 -> pair FIFO 1, followed by the
//    trailer {GEMROC id, trigger number, hit count, status}; the trailer is
//    written only after pair 0 has completed;
//  * assembler: copies pair FIFO 0 up to its end marker (dropped), then pair
//    FIFO 1 up to and including the trailer, to the output (pkt_* valid /
//    ready, pkt_last on the trailer). After the trailer has left and both
//    pairs have reported completion it pulses tm_done, which lets the L1
//    distributor release the next trigger.
// Each FEB stream must deliver, per trigger, its matched hits followed by
// one end marker (see feb_merger).
//
// Packet = header, hits of FEB0, FEB1, FEB2, FEB3, trailer. Status in the
// trailer: bits [11:2] from status_in, [1:0] the overflow flags of FEB 0/1;
// the last two bits of the trailer word are the overflow flags of FEB 2/3.
//
// Follows the description of the firmware: two pair machines feeding FIFOs, a
// third machine assembling, header from the first pair, trailer from the
// second, completion required from both pairs. Word layouts and FIFO
// depths are this design's own.
//
// Lint note: the fill level of the two pair FIFOs is left unused.
module four_feb_merger_tm
  import gemroc_pkg::*;
#(
  parameter int unsigned PAIR_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        trig_go,
  input  logic [22:0] trig_num,
  input  logic [31:0] trig_ts,
  input  logic [4:0]  roc_id,
  input  logic [9:0]  status_in,
  input  logic [3:0]  in_valid,
  input  word_t       in_word [4],
  output logic [3:0]  in_ready,
  output logic        pkt_valid,
  output word_t       pkt_word,
  output logic        pkt_last,
  input  logic        pkt_ready,
  output logic        tm_done,
  output logic        busy
);
  localparam int unsigned PW = $clog2(PAIR_DEPTH);

  logic [22:0] num_q;
  logic [31:0] ts_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      num_q <= '0;
      ts_q  <= '0;
    end else if (trig_go) begin
      num_q <= trig_num;
      ts_q  <= trig_ts;
    end
  end

  // ----------------------------------------------------------- pair FSMs
  logic [1:0]  f_wr, f_rd, f_empty, f_full, p_done;
  word_t       f_din [2];
  word_t       f_dout [2];
  logic [15:0] p_hits [2];
  logic [1:0]  p_ovf [2];
  logic        start_q, clear;
  word_t       w01 [2];
  word_t       w23 [2];

  assign w01[0] = in_word[0];
  assign w01[1] = in_word[1];
  assign w23[0] = in_word[2];
  assign w23[1] = in_word[3];

  // the collectors start one clock after trig_go, when num_q/ts_q hold
  always_ff @(posedge clk) begin
    if (rst) start_q <= 1'b0;
    else     start_q <= trig_go;
  end

  tm_pair_collector #(.FIRST(1'b1)) u_p0 (
    .clk, .rst, .start(start_q), .clear, .roc_id, .trig_num(num_q),
    .trig_ts(ts_q), .status(12'd0),
    .in_valid(in_valid[1:0]), .in_word(w01), .in_ready(in_ready[1:0]),
    .f_wr(f_wr[0]), .f_din(f_din[0]), .f_full(f_full[0]),
    .other_done(p_done[1]), .other_hits(p_hits[1]),
    .done(p_done[0]), .hits(p_hits[0]), .ovf(p_ovf[0])
  );

  tm_pair_collector #(.FIRST(1'b0)) u_p1 (
    .clk, .rst, .start(start_q), .clear, .roc_id, .trig_num(num_q),
    .trig_ts(ts_q), .status({status_in, p_ovf[0]}),
    .in_valid(in_valid[3:2]), .in_word(w23), .in_ready(in_ready[3:2]),
    .f_wr(f_wr[1]), .f_din(f_din[1]), .f_full(f_full[1]),
    .other_done(p_done[0]), .other_hits(p_hits[0]),
    .done(p_done[1]), .hits(p_hits[1]), .ovf(p_ovf[1])
  );

  for (genvar p = 0; p < 2; p++) begin : g_fifo
    logic [PW:0] cnt;
    sync_fifo #(.WIDTH(WORD_W), .DEPTH(PAIR_DEPTH)) u_f (
      .clk, .rst, .wr_en(f_wr[p]), .wr_data(f_din[p]), .rd_en(f_rd[p]),
      .rd_data(f_dout[p]), .empty(f_empty[p]), .full(f_full[p]), .count(cnt)
    );
  end

  // ------------------------------------------------------------ assembler
  typedef enum logic [1:0] {A_IDLE, A_P0, A_P1, A_DONE} astate_t;
  astate_t ast;
  word_t   head0, head1;
  logic    head1_trailer;

  assign head0 = f_dout[0];
  assign head1 = f_dout[1];
  assign head1_trailer = (head1[63:62] == K_GEMROC) && (head1[61:60] == G_TRAILER);

  always_comb begin
    pkt_valid = 1'b0;
    pkt_word  = head0;
    pkt_last  = 1'b0;
    f_rd      = 2'b00;
    if (ast == A_P0 && !f_empty[0]) begin
      if (is_end(head0)) begin
        f_rd[0] = 1'b1;
      end else begin
        pkt_valid = 1'b1;
        f_rd[0]   = pkt_ready;
      end
    end else if (ast == A_P1 && !f_empty[1]) begin
      pkt_valid = 1'b1;
      pkt_word  = head1;
      pkt_last  = head1_trailer;
      f_rd[1]   = pkt_ready;
    end
  end

  assign clear = (ast == A_DONE) && (p_done == 2'b11);
  assign busy  = (ast != A_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      ast     <= A_IDLE;
      tm_done <= 1'b0;
    end else begin
      tm_done <= 1'b0;
      case (ast)
        A_IDLE: if (trig_go) ast <= A_P0;
        A_P0:   if (f_rd[0] && is_end(head0)) ast <= A_P1;
        A_P1:   if (f_rd[1] && head1_trailer) ast <= A_DONE;
        A_DONE: if (clear) begin
          tm_done <= 1'b1;
          ast     <= A_IDLE;
        end
        default: ast <= A_IDLE;
      endcase
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (rst)
    pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt_word));
endmodule
