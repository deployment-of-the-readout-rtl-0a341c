// tiger_test_assembly -- receiver for the serial data link of one TIGER.
//
// The TIGER sends its words 8b/10b coded. This block takes the link already
// deserialised and aligned to 10-bit symbols (sym, sym_valid, done by the
// FPGA's LVDS receiver), decodes each symbol against the running disparity,
// and rebuilds the 64-bit words: a K28.5 comma starts a word, the next eight
// data bytes are its bytes, most significant first. The TIGER number of this
// link is written into bits [2:0] of every word. Words are passed on only
// while `enable` is set.
//
// Two monitors are kept: n_err counts symbols that are not valid 8b/10b
// code for the current running disparity (used to tune the link delays;
// a K28.5 comma is accepted in either disparity and re-aligns it),
// and n_hits counts hit words received. An erroneous symbol also drops the
// word being assembled.
//
// As published: one such block per TIGER, the 8b/10b error counter and
// the per-TIGER hit counter. Own choices: the framing with a comma before
// each word and the byte order. The TIGER configuration link (SPI-like,
// 10 MHz) also handled by this block in the original firmware is not
// included, since its protocol is not described.
//
// Timing: out_valid is a one-clock pulse, one clock after the eighth data
// symbol of a word.
module tiger_test_assembly
  import gemroc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic [2:0]  tiger_id,
  input  logic [9:0]  sym,
  input  logic        sym_valid,
  output logic        out_valid,
  output word_t       out_word,
  output logic [15:0] n_err,
  output logic [31:0] n_hits
);
  // ------------------------------------------------------------ decoder
  logic       rd;
  logic       d_k, d_err, d_rd;
  logic [7:0] d_byte;

  always_comb begin
    logic [5:0] c6;
    logic [3:0] c4;
    logic       f6, f4, r1;
    logic [4:0] x5;
    logic [2:0] y3;
    c6 = sym[9:4];
    c4 = sym[3:0];
    f6 = 1'b0;
    f4 = 1'b0;
    x5 = '0;
    y3 = '0;
    // a comma is accepted in either disparity and re-synchronises rd
    d_k = (c6 == enc6(5'd28, 1'b1, 1'b0)) || (c6 == enc6(5'd28, 1'b1, 1'b1));
    for (int x = 0; x < 32; x++) begin
      if (!d_k && c6 == enc6(5'(x), 1'b0, rd)) begin
        f6 = 1'b1;
        x5 = 5'(x);
      end
    end
    r1 = rd_next6(c6, rd);
    if (d_k) begin
      f4 = (c4 == enc4(3'd5, 5'd28, r1));
      y3 = 3'd5;
    end else begin
      for (int y = 0; y < 8; y++) begin
        if (c4 == enc4(3'(y), x5, r1)) begin
          f4 = 1'b1;
          y3 = 3'(y);
        end
      end
    end
    d_err  = !(f6 || d_k) || !f4;
    d_byte = {y3, x5};
    d_rd   = rd_next4(c4, r1);
  end

  // ------------------------------------------------------ word assembly
  logic [3:0]  bi;      // bytes of the current word received; 8 = idle
  logic [55:0] sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd        <= 1'b0;
      bi        <= 4'd8;
      sh        <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
      n_err     <= '0;
      n_hits    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (sym_valid) begin
        rd <= d_rd;
        if (d_err) begin
          if (n_err != 16'hFFFF) n_err <= n_err + 1'b1;
          bi <= 4'd8;
        end else if (d_k) begin
          bi <= 4'd0;
        end else if (bi < 4'd8) begin
          bi <= bi + 1'b1;
          sh <= {sh[47:0], d_byte};
          if (bi == 4'd7) begin
            out_word  <= {sh, d_byte[7:3], tiger_id};
            out_valid <= enable;
            if (enable && sh[55:54] == K_HIT) n_hits <= n_hits + 1'b1;
          end
        end
      end
    end
  end
endmodule
