// gbt_rx_bitshift_mux: 40-to-20 bit selector in front of the RX gearbox.
//
// It keeps the previous received word and forms the 40-bit vector
// {word_i, previous word_i} (word_i in bits 39..20).  sel_i picks 20 bits:
//   00 -> bits 39..20 (the word as received)
//   01 -> bits 38..19 (one bit earlier in the stream)
//   10 -> bits 29..10 (ten bits earlier)
//   11 -> bits 28..9  (eleven bits earlier)
// Bit 0 of sel_i gives the one-bit shift used when a receiver reset cannot
// move the recovered clock by one unit interval; bit 1 compensates the
// ten-bit shift of the five bitslips that move the recovered clock by half a
// word cycle for a safe crossing into the shared RxWordClk.  The selection
// table is taken from the source's multiplexer figure.
//
// Timing: the output is combinational from word_i (so the gearbox can latch
// the last word of a frame without an extra cycle); the previous word is a
// register in the RxWordClk domain.
module gbt_rx_bitshift_mux
  import gbt_pkg::*;
(
  input  logic       clk,     // RxWordClk
  input  logic       rst,
  input  word_t      word_i,  // RxWordData from the receiver
  input  logic [1:0] sel_i,
  output word_t      word_o   // to the RX gearbox
);

  word_t             prev;
  logic [2*WORD_W-1:0] both;

  always_ff @(posedge clk) begin
    if (rst) prev <= '0;
    else     prev <= word_i;
  end

  assign both = {word_i, prev};

  always_comb begin
    unique case (sel_i)
      2'b00:   word_o = both[39:20];
      2'b01:   word_o = both[38:19];
      2'b10:   word_o = both[29:10];
      default: word_o = both[28:9];
    endcase
  end

endmodule
