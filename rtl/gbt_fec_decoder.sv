// gbt_fec_decoder: corrects the 84-bit data field with the 32-bit FEC field.
//
// It decodes the two interleaved RS(15,11) code words built by
// gbt_fec_encoder.  For each code word it computes the syndromes S1..S4,
// solves the error-locator polynomial directly (Peterson's method for at most
// two errors), finds the error positions by trying all 15 positions and
// obtains the error values with Forney's formula.  Up to two wrong nibbles per
// code word are corrected, i.e. any burst of up to 16 bits that starts on a
// nibble boundary, or up to 13 bits anywhere.  When a code word has more
// errors than it can correct (the locator has the wrong number of roots, or a
// root falls on the shortened position) its data is passed on unchanged and
// uncorrectable_o is raised.
//
// The source text gives the function and its timing, not the algorithm: the
// decoder takes about 2.5 RxWordClk cycles, so it is purely combinational here
// and the descramblers sample its output 3 cycles (programmable) after the
// RX gearbox latches its input, which a multi-cycle path constraint covers.
module gbt_fec_decoder
  import gbt_pkg::*;
(
  input  logic [DATA21_W-1:0] data_i,          // received frame bits 115..32
  input  logic [FEC_W-1:0]    fec_i,           // received frame bits 31..0
  output logic [DATA21_W-1:0] data_o,          // corrected data field
  output logic [1:0]          corrected_o,     // per code word: errors fixed
  output logic [1:0]          uncorrectable_o  // per code word: too many errors
);

  // Symbol at polynomial position p (0..14) of code word cw.
  function automatic sym_t cw_sym(logic [DATA21_W-1:0] d, logic [FEC_W-1:0] f,
                                  int unsigned cw, int unsigned p);
    if (p < 4) return f[4*(2*p+cw) +: 4];
    return rs_info_sym(d, cw, p - 4);
  endfunction

  always_comb begin
    sym_t s [5];
    sym_t c [15];
    sym_t e [15];
    sym_t det, l1, l2, om0, om1, xinv;
    logic two, one, fail;
    int   nroots;
    data_o          = data_i;
    corrected_o     = '0;
    uncorrectable_o = '0;
    for (int unsigned cw = 0; cw < 2; cw++) begin
      for (int unsigned p = 0; p < 15; p++) begin
        c[p] = cw_sym(data_i, fec_i, cw, p);
        e[p] = '0;
      end
      // Syndromes S_j = c(alpha^j).
      s[0] = '0;
      for (int unsigned j = 1; j <= 4; j++) begin
        s[j] = '0;
        for (int unsigned p = 0; p < 15; p++) s[j] ^= gf_mul(c[p], gf_exp(j * p));
      end
      det  = gf_mul(s[1], s[3]) ^ gf_mul(s[2], s[2]);
      two  = (det != 0);
      one  = !two && (s[1] != 0);
      fail = 1'b0;
      l1 = '0;
      l2 = '0;
      if (two) begin
        l1 = gf_mul(gf_mul(s[2], s[3]) ^ gf_mul(s[1], s[4]), gf_inv(det));
        l2 = gf_mul(gf_mul(s[2], s[4]) ^ gf_mul(s[3], s[3]), gf_inv(det));
      end else if (one) begin
        l1 = gf_mul(s[2], gf_inv(s[1]));
        if (s[3] != gf_mul(l1, s[2]) || s[4] != gf_mul(l1, s[3])) fail = 1'b1;
      end else if ((s[2] | s[3] | s[4]) != 0) begin
        fail = 1'b1;
      end
      // Error evaluator Omega(x) = S(x) Lambda(x) mod x^2; the error value at
      // position p is Omega(alpha^-p) / Lambda'(alpha^-p), with Lambda' = l1.
      om0 = s[1];
      om1 = s[2] ^ gf_mul(s[1], l1);
      nroots = 0;
      xinv   = '0;
      if ((two || one) && !fail) begin
        for (int unsigned p = 0; p < 15; p++) begin
          xinv = gf_exp(15 - p);
          if ((4'd1 ^ gf_mul(l1, xinv) ^ gf_mul(l2, gf_mul(xinv, xinv))) == 0) begin
            nroots++;
            e[p] = gf_mul(om0 ^ gf_mul(om1, xinv), gf_inv(l1));
            if (cw == 1 && p == 14) fail = 1'b1;
          end
        end
        if (nroots != (two ? 2 : 1)) fail = 1'b1;
      end
      if (fail) begin
        uncorrectable_o[cw] = 1'b1;
      end else if (two || one) begin
        corrected_o[cw] = 1'b1;
        for (int unsigned i = 0; i < 11; i++)
          if (2*i + cw <= 20) data_o[4*(2*i+cw) +: 4] = c[i+4] ^ e[i+4];
      end
    end
  end

endmodule
