// gemroc_pkg -- shared constants, word layouts and 8b/10b coding for the
// GEMROC readout firmware.
//
// Every data item that moves through the firmware is one 64-bit word, the
// unit in which the output packets are written (eight bytes per word).
// The TIGER ASIC emits three kinds of words: hit words (54 bits of hit
// information), counter words and frame words (one every 2^15 TIGER clocks).
// The GEMROC adds packet header and trailer words and an internal
// end-of-trigger marker.
//
// As published: 54-bit hit information, frame words every 2^15
// clocks, 8-byte words, 16 pages (buckets) of 32 locations, 2^8 clocks per
// bucket, 32-bit trigger timestamp, 180 words per trigger-less packet, 8
// frames per packet, L1 of 8 BESIII clocks, glitch filter of 7, check every
// 256 triggers, TIGER clock = 4 x BESIII clock.
// This design's own choices: the bit positions of every field below (the
// split of the 54 hit bits into channel/TAC/coarse/fine fields follows the
// usual TIGER hit layout, not a printed table), the kind codes, and the
// 8b/10b framing (one K28.5 comma before each 8-byte word, MSB byte first).
// Lint note: some constants are read only by the top or the testbenches,
// and the kind-test functions look at the top bits of a word only, so a
// lint run of a single user reports them as unused.
package gemroc_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WORD_W        = 64;
  localparam int unsigned TS_W          = 32;   // trigger timestamp counter
  localparam int unsigned TIGERS_PER_FEB = 2;
  localparam int unsigned N_FEB         = 4;
  localparam int unsigned N_TIGER       = N_FEB * TIGERS_PER_FEB;
  localparam int unsigned CLK_RATIO     = 4;    // TIGER clock / BESIII clock
  localparam int unsigned FRAME_LOG2    = 15;   // frame word every 2^15 clocks

  typedef logic [WORD_W-1:0] word_t;

  // ----------------------------------------------------------- word kinds
  typedef enum logic [1:0] {
    K_HIT   = 2'b00,
    K_FRAME = 2'b01,
    K_CNT   = 2'b10,
    K_GEMROC = 2'b11           // generated by the GEMROC itself
  } kind_t;

  typedef enum logic [1:0] {
    G_HEADER  = 2'b00,
    G_TRAILER = 2'b01,
    G_TLHEAD  = 2'b10,         // trigger-less UDP packet header
    G_END     = 2'b11          // internal end-of-trigger marker
  } gkind_t;

  // TIGER hit word: 2 + 54 information bits, then the TIGER number added by
  // the receiving GEMROC.
  typedef struct packed {
    kind_t       kind;     // [63:62]
    logic [5:0]  ch;       // [61:56] channel 0..63
    logic [1:0]  tac;      // [55:54]
    logic [15:0] tcoarse;  // [53:38] coarse time of the T branch
    logic [9:0]  ecoarse;  // [37:28]
    logic [9:0]  tfine;    // [27:18]
    logic [9:0]  efine;    // [17:8]
    logic [4:0]  rsvd;     // [7:3]
    logic [2:0]  tiger;    // [2:0] TIGER number inside the GEMROC
  } hit_t;

  typedef struct packed {
    kind_t       kind;     // [63:62]
    logic [15:0] frame;    // [61:46] frame counter
    logic [42:0] rsvd;     // [45:3]
    logic [2:0]  tiger;    // [2:0]
  } frame_t;

  typedef struct packed {
    kind_t       kind;     // [63:62]
    gkind_t      gkind;    // [61:60]
    logic [4:0]  roc;      // [59:55] GEMROC id (up to 22 boards)
    logic [22:0] l1_num;   // [54:32] trigger number
    logic [31:0] info;     // [31:0] header: L1 timestamp; trailer: {hits,status}
  } gword_t;

  function automatic kind_t word_kind(word_t w);
    return kind_t'(w[63:62]);
  endfunction

  function automatic logic is_end(word_t w);
    return (w[63:62] == K_GEMROC) && (w[61:60] == G_END);
  endfunction

  // --------------------------------------------------------- 8b/10b coding
  // Symbols are written {a,b,c,d,e,i,f,g,h,j} with a in bit 9, the first bit
  // on the line. rd = 1 means positive running disparity.
  localparam logic [9:0] K28_5_RDN = 10'b001111_1010;

  function automatic logic [5:0] enc6_rdn(logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  function automatic logic [3:0] enc4_rdn(logic [2:0] y, logic alt);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return alt ? 4'b0111 : 4'b1110;
    endcase
  endfunction

  function automatic logic [5:0] enc6(logic [4:0] x, logic k28, logic rd);
    logic [5:0] c;
    c = k28 ? 6'b001111 : enc6_rdn(x);
    if (rd && (($countones(c) != 3) || (!k28 && x == 5'd7))) c = ~c;
    return c;
  endfunction

  function automatic logic [3:0] enc4(logic [2:0] y, logic [4:0] x, logic rd);
    logic [3:0] c;
    logic alt;
    alt = (!rd && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
          ( rd && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    c = enc4_rdn(y, alt);
    if (rd && (($countones(c) != 2) || y == 3'd3)) c = ~c;
    return c;
  endfunction

  // Disparity after a sub-block: flips when the sub-block is unbalanced.
  function automatic logic rd_next6(logic [5:0] c, logic rd);
    return ($countones(c) == 3) ? rd : ($countones(c) > 3);
  endfunction

  function automatic logic rd_next4(logic [3:0] c, logic rd);
    return ($countones(c) == 2) ? rd : ($countones(c) > 2);
  endfunction

  // Encode one byte (k = 1 only for K28.5). Returns {new_rd, symbol}.
  function automatic logic [10:0] enc8b10b(logic [7:0] d, logic k, logic rd);
    logic [5:0] c6;
    logic [3:0] c4;
    logic r1;
    c6 = enc6(k ? 5'd28 : d[4:0], k, rd);
    r1 = rd_next6(c6, rd);
    c4 = enc4(k ? 3'd5 : d[7:5], k ? 5'd28 : d[4:0], r1);
    return {rd_next4(c4, r1), c6, c4};
  endfunction

endpackage
