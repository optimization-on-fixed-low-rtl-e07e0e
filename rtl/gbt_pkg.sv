// gbt_pkg: constants, types and helper functions shared by the GBT link core.
//
// The GBT frame is 120 bits: a 4-bit header in bits 119..116, an 84-bit data
// field in bits 115..32 and a 32-bit field in bits 31..0 that carries either
// the forward error correction (FEC mode) or 32 more data bits (wide mode).
// The frame travels as six 20-bit words W1..W6 at 240 MHz.  W1 carries frame
// bits 119..100, W6 frame bits 19..0.  Inside a word the bit order is reversed
// (word bit j = frame bit 119-20(k-1)-j for word Wk), so that a transceiver
// that sends word bit 0 first puts the frame on the line MSB first and the
// header lands on word bits 3..0, as the receiver expects.
//
// The FEC is two interleaved Reed-Solomon RS(15,11) codes over GF(16)
// (primitive polynomial x^4+x+1, generator roots alpha^1..alpha^4).  The 29
// nibbles of frame bits 115..0 alternate between the two code words, so any
// four consecutive nibbles hold two symbols of each code word and a burst of
// 16 bits that starts on a nibble boundary is corrected.  The data field has
// 21 nibbles, so code word 1 is shortened by one (always zero) symbol.
package gbt_pkg;

  localparam int unsigned FRAME_W  = 120;
  localparam int unsigned WORD_W   = 20;
  localparam int unsigned NWORDS   = FRAME_W / WORD_W;  // 6 words per frame
  localparam int unsigned DATA21_W = 84;                // 4 x 21-bit scramblers
  localparam int unsigned FEC_W    = 32;                // 2 x 16-bit field

  // Header values as printed in the text (frame bits 119..116).
  localparam logic [3:0] HDR_DATA = 4'b0101;
  localparam logic [3:0] HDR_IDLE = 4'b0110;

  typedef logic [FRAME_W-1:0] frame_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [3:0]         sym_t;

  // Coding mode of one direction of a link.
  typedef enum logic {MODE_WIDE = 1'b0, MODE_FEC = 1'b1} gbt_mode_e;

  // ---------------------------------------------------------------- words --
  // Word k (0 = W1 .. 5 = W6) of a frame, bit-reversed as described above.
  function automatic word_t frame_word(frame_t f, int unsigned k);
    word_t w;
    for (int unsigned j = 0; j < WORD_W; j++) w[j] = f[FRAME_W-1-WORD_W*k-j];
    return w;
  endfunction

  // Header of a frame as seen in bits 3..0 of its first word.
  function automatic logic header_ok(word_t w);
    logic [3:0] h;
    for (int unsigned j = 0; j < 4; j++) h[3-j] = w[j];
    return (h == HDR_DATA) || (h == HDR_IDLE);
  endfunction

  // ---------------------------------------------------------- GF(16) math --
  function automatic sym_t gf_mul(sym_t a, sym_t b);
    logic [6:0] p;
    p = '0;
    for (int i = 0; i < 4; i++) if (b[i]) p ^= 7'(a) << i;
    for (int i = 6; i >= 4; i--) if (p[i]) p ^= 7'b0010011 << (i - 4);
    return p[3:0];
  endfunction

  // alpha^e, e taken modulo 15 (table of the powers of alpha = 2).
  function automatic sym_t gf_exp(int unsigned e);
    case (e % 15)
       0: return 4'd1;
       1: return 4'd2;
       2: return 4'd4;
       3: return 4'd8;
       4: return 4'd3;
       5: return 4'd6;
       6: return 4'd12;
       7: return 4'd11;
       8: return 4'd5;
       9: return 4'd10;
      10: return 4'd7;
      11: return 4'd14;
      12: return 4'd15;
      13: return 4'd13;
      default: return 4'd9;
    endcase
  endfunction

  // Multiplicative inverse (inverse of 0 is returned as 0).
  function automatic sym_t gf_inv(sym_t a);
    case (a)
      4'd1: return 4'd1;
      4'd2: return 4'd9;
      4'd3: return 4'd14;
      4'd4: return 4'd13;
      4'd5: return 4'd11;
      4'd6: return 4'd7;
      4'd7: return 4'd6;
      4'd8: return 4'd15;
      4'd9: return 4'd2;
      4'd10: return 4'd12;
      4'd11: return 4'd5;
      4'd12: return 4'd10;
      4'd13: return 4'd4;
      4'd14: return 4'd3;
      4'd15: return 4'd8;
      default: return 4'd0;
    endcase
  endfunction

  // Generator polynomial g(x) = (x+a)(x+a^2)(x+a^3)(x+a^4), coefficients
  // g[0..3] of x^0..x^3 (g4 = 1).
  function automatic logic [15:0] rs_gen();
    sym_t g [5];
    sym_t root;
    g[0] = 4'd1; g[1] = '0; g[2] = '0; g[3] = '0; g[4] = '0;
    for (int r = 1; r <= 4; r++) begin
      root = gf_exp(r);
      for (int i = 4; i >= 1; i--) g[i] = g[i-1] ^ gf_mul(g[i], root);
      g[0] = gf_mul(g[0], root);
    end
    return {g[3], g[2], g[1], g[0]};
  endfunction

  // Information symbol i (0..10) of code word cw (0 or 1) from the data field.
  function automatic sym_t rs_info_sym(logic [DATA21_W-1:0] d, int unsigned cw, int unsigned i);
    int unsigned k;
    k = 2 * i + cw;
    if (k > 20) return '0;  // shortened position of code word 1
    return d[4*k +: 4];
  endfunction

endpackage
