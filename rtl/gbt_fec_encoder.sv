// gbt_fec_encoder: the two "FEC16" units that compute the 32-bit FEC field.
//
// Input is the 84-bit scrambled data field (frame bits 115..32, the outputs of
// the four 21-bit scramblers), output the 32-bit field for frame bits 31..0.
// Each unit is a systematic RS(15,11) encoder over GF(16): the 11 information
// nibbles are divided by the generator polynomial and the 4 remainder nibbles
// are the parity.  Data nibble k (frame bits 32+4k+3..32+4k) belongs to code
// word k mod 2; parity nibble j (frame bits 4j+3..4j) to code word j mod 2, so
// the whole 116-bit field is nibble-interleaved.  Code word 1 has only 10 data
// nibbles and is shortened by one zero symbol.  The header is not covered, as
// in the block diagram, where it bypasses the encoder.
//
// The source text gives the function (two FEC16 modules, 32-bit field, up to
// 16 consecutive error bits corrected); the Reed-Solomon parameters and the
// interleaving are this design's choice, modelled on the CERN GBT code.
//
// Timing: purely combinational.  In the TX path it starts from the scrambler
// register and only has to settle before W5 is loaded into the gearbox, four
// TxWordClk cycles later.
module gbt_fec_encoder
  import gbt_pkg::*;
(
  input  logic [DATA21_W-1:0] data_i,
  output logic [FEC_W-1:0]    fec_o
);

  localparam logic [15:0] G = rs_gen();

  always_comb begin
    sym_t r [4];
    sym_t fb;
    fec_o = '0;
    for (int unsigned cw = 0; cw < 2; cw++) begin
      for (int q = 0; q < 4; q++) r[q] = '0;
      for (int i = 10; i >= 0; i--) begin
        fb   = rs_info_sym(data_i, cw, i) ^ r[3];
        r[3] = r[2] ^ gf_mul(fb, G[15:12]);
        r[2] = r[1] ^ gf_mul(fb, G[11:8]);
        r[1] = r[0] ^ gf_mul(fb, G[7:4]);
        r[0] = gf_mul(fb, G[3:0]);
      end
      for (int unsigned q = 0; q < 4; q++) fec_o[4*(2*q+cw) +: 4] = r[q];
    end
  end

endmodule
