// gbt_tx_gearbox: sends a 120-bit GBT frame as six 20-bit words.
//
// On the edge that closes a cycle with start_i high it registers W1 of
// frame_i on word_o, then W2..W6 on the five following edges; word k holds
// frame bits 119-20(k-1) down to 100-20(k-1), bit-reversed so that the
// transceiver, which sends bit 0 first, puts the frame MSB first on the line
// and the header into bits 3..0 of W1.  frame_i is read combinationally on
// every one of those edges and is not buffered: its upper 88 bits must hold
// from the start and its FEC bits (in W5 and W6) only from the fifth edge,
// which is what lets the FEC encoder overlap with sending W1..W4.
//
// The six-cycle shift, the start two cycles after ScrEn and the word order
// W1..W6 follow the source text; the bit reversal is this design's choice,
// made so that the header lands on bits 3..0 as the text requires.
module gbt_tx_gearbox
  import gbt_pkg::*;
(
  input  logic   clk,      // TxWordClk
  input  logic   rst,
  input  logic   start_i,  // from the TX FSM
  input  frame_t frame_i,
  output word_t  word_o,   // TxWordData to the transmitter
  output logic   w1_o      // word_o holds W1 of a frame
);

  logic [2:0] idx;     // index of the next word to send
  logic       active;

  always_ff @(posedge clk) begin
    if (rst) begin
      idx    <= '0;
      active <= 1'b0;
      word_o <= '0;
      w1_o   <= 1'b0;
    end else if (start_i) begin
      word_o <= frame_word(frame_i, 0);
      idx    <= 3'd1;
      active <= 1'b1;
      w1_o   <= 1'b1;
    end else begin
      w1_o <= 1'b0;
      if (active) begin
        word_o <= frame_word(frame_i, 32'(idx));
        if (idx == 3'd5) active <= 1'b0;
        idx <= idx + 3'd1;
      end else begin
        word_o <= '0;
      end
    end
  end

endmodule
