// tm_pair_collector -- one of the two pair state machines of the
// trigger-matched packet builder (helper of four_feb_merger_tm).
//
// After `start` it copies the matched hits of its first FEB, up to that
// FEB's end marker, then those of its second FEB, into its pair FIFO. The
// first pair (FIRST = 1) writes the packet header before its hits and an
// end marker after them. The second pair writes the trailer after its hits,
// but only once the first pair has signalled completion (other_done): the
// packet is closed only when both pairs are complete, so the two halves of
// a packet always belong to the same trigger. The trailer carries the
// total hit count of the packet (own_hits + other_hits) and the status
// word. `done` stays high from completion until `clear`.
//
// Header and trailer layouts are this design's own; the split of the work
// between two pair machines, header from the first pair and trailer from
// the second, and the completion flags required from both pairs follow the
// description of the firmware and of its packet-shift fix.
module tm_pair_collector
  import gemroc_pkg::*;
#(
  parameter bit FIRST = 1'b1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic        clear,
  input  logic [4:0]  roc_id,
  input  logic [22:0] trig_num,
  input  logic [31:0] trig_ts,
  input  logic [11:0] status,
  // two FEB streams
  input  logic [1:0]  in_valid,
  input  word_t       in_word [2],
  output logic [1:0]  in_ready,
  // pair FIFO write side
  output logic        f_wr,
  output word_t       f_din,
  input  logic        f_full,
  // completion
  input  logic        other_done,
  input  logic [15:0] other_hits,
  output logic        done,
  output logic [15:0] hits,
  output logic [1:0]  ovf
);
  typedef enum logic [2:0] {P_IDLE, P_HEAD, P_A, P_B, P_FIN, P_DONE} pstate_t;
  pstate_t st;
  logic    sel;    // FEB being read

  wire   take    = (st == P_A || st == P_B) && in_valid[sel] && !f_full;
  word_t cur;
  assign cur = in_word[sel];

  always_comb begin
    in_ready = 2'b00;
    if (st == P_A || st == P_B) in_ready[sel] = !f_full;
  end

  always_comb begin
    f_wr  = 1'b0;
    f_din = cur;
    case (st)
      P_HEAD: begin
        f_wr  = !f_full;
        f_din = {K_GEMROC, G_HEADER, roc_id, trig_num, trig_ts};
      end
      P_A, P_B: f_wr = take && !is_end(cur);
      P_FIN: begin
        if (FIRST) begin
          f_wr  = !f_full;
          f_din = {K_GEMROC, G_END, 5'd0, 23'd0, hits, 16'd0};
        end else begin
          f_wr  = !f_full && other_done;
          f_din = {K_GEMROC, G_TRAILER, roc_id, trig_num,
                   16'(hits + other_hits), status, 2'b00, ovf};
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= P_IDLE;
      sel  <= 1'b0;
      hits <= '0;
      ovf  <= '0;
      done <= 1'b0;
    end else begin
      case (st)
        P_IDLE: if (start) begin
          hits <= '0;
          ovf  <= '0;
          sel  <= 1'b0;
          st   <= FIRST ? P_HEAD : P_A;
        end
        P_HEAD: if (!f_full) st <= P_A;
        P_A, P_B: if (take) begin
          if (is_end(cur)) begin
            ovf[sel] <= cur[0];
            if (st == P_A) begin
              sel <= 1'b1;
              st  <= P_B;
            end else begin
              st  <= P_FIN;
            end
          end else begin
            hits <= hits + 1'b1;
          end
        end
        P_FIN: if (f_wr) begin
          done <= 1'b1;
          st   <= P_DONE;
        end
        P_DONE: if (clear) begin
          done <= 1'b0;
          st   <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
