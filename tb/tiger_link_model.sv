// tiger_link_model -- behavioural model of the data output of one TIGER,
// already deserialised into 10-bit symbols (testbench only, not
// synthesizable).
//
// Words queued with send() are transmitted as a K28.5 comma followed by
// their eight bytes, most significant first, 8b/10b coded with a running
// disparity. Between words the model sends idle commas. One symbol is sent
// every SYM_DIV clocks. corrupt_next() flips the first bit of the next comma,
// which makes it invalid code; the receiver counts an error and loses the
// word that comma introduces.
module tiger_link_model
  import gemroc_pkg::*;
#(
  parameter int unsigned SYM_DIV = 1
) (
  input  logic       clk,
  output logic [9:0] sym,
  output logic       sym_valid
);
  word_t q[$];
  logic  rd = 1'b0;
  int    pos = -1;      // -1: next is comma; 0..7 byte index
  word_t cur;
  int    div = 0;
  bit    corrupt = 1'b0;
  int    sent_words = 0;

  initial begin
    sym = '0;
    sym_valid = 1'b0;
  end

  function automatic void send(word_t w);
    q.push_back(w);
  endfunction

  function automatic void corrupt_next();
    corrupt = 1'b1;
  endfunction

  function automatic int pending();
    return q.size() + ((pos >= 0) ? 1 : 0);
  endfunction

  always @(posedge clk) begin
    logic [10:0] e;
    sym_valid <= 1'b0;
    if (div == int'(SYM_DIV) - 1) begin
      div = 0;
      if (pos < 0) begin
        e = enc8b10b(8'h00, 1'b1, rd);
        if (q.size() > 0) begin
          cur = q.pop_front();
          pos = 0;
        end
      end else begin
        e = enc8b10b(cur[63 - 8*pos -: 8], 1'b0, rd);
        pos++;
        if (pos == 8) begin
          pos = -1;
          sent_words++;
        end
      end
      rd = e[10];
      if (corrupt && e[9:4] != enc6(5'd28, 1'b1, 1'b0) && e[9:4] != enc6(5'd28, 1'b1, 1'b1)) begin
        sym <= e[9:0];
      end else begin
        sym <= corrupt ? (e[9:0] ^ 10'b1000000000) : e[9:0];
        corrupt = 1'b0;
      end
      sym_valid <= 1'b1;
    end else begin
      div++;
    end
  end
endmodule
