// gbt_rx_gearbox: assembles six 20-bit words into the 120-bit RxGbData.
//
// A six-value counter runs with RxWordClk; count 0 marks the word expected
// to be W1, the one carrying the header in bits 3..0.  Words W1..W5 are kept
// in registers, and on the edge that closes the W6 cycle the whole frame is
// latched into gb_data_o (the "latched RxGearboxOut").  slip_i holds the
// counter for one cycle, moving the assumed frame boundary by one word; the
// RX FSM uses it while hunting for the header.  At count 0 the gearbox
// reports whether the word has a valid header (hdr_strobe_o, hdr_ok_o).
//
// The counter also produces DescrEn.  In wide mode it is high in the cycle
// after the latch, so the descramblers take RxGbData one cycle after it
// changed.  In FEC mode it is fec_margin_i cycles later (default 3), which
// leaves the combinational FEC decoder that many cycles (multi-cycle path).
// Both modes use the latched data, as the source text settles on for
// run-time mode switching; the margin in steps of one cycle is also from the
// text.  Legal margins are 1..6; larger values are clipped to 6 because the
// next frame is latched six cycles later.
module gbt_rx_gearbox
  import gbt_pkg::*;
(
  input  logic       clk,          // RxWordClk
  input  logic       rst,
  input  word_t      word_i,       // from the bit-shift multiplexer
  input  logic       slip_i,       // hold the word counter for one cycle
  input  gbt_mode_e  mode_i,
  input  logic [2:0] fec_margin_i, // DescrEn delay in FEC mode, cycles
  output frame_t     gb_data_o,    // RxGbData
  output logic       gb_valid_o,   // gb_data_o was latched on the last edge
  output logic       descr_en_o,   // DescrEn
  output logic       hdr_strobe_o, // the W1 position was checked on the last edge
  output logic       hdr_ok_o      // ... and held a valid header
);

  logic [2:0] cnt;
  word_t      w [5];
  logic [5:0] vsr;                 // gb_valid delayed by 0..5 cycles
  logic [2:0] margin;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt          <= '0;
      gb_data_o    <= '0;
      gb_valid_o   <= 1'b0;
      hdr_strobe_o <= 1'b0;
      hdr_ok_o     <= 1'b0;
      vsr          <= '0;
      for (int i = 0; i < 5; i++) w[i] <= '0;
    end else begin
      vsr          <= {vsr[4:0], gb_valid_o};
      gb_valid_o   <= 1'b0;
      hdr_strobe_o <= 1'b0;
      if (!slip_i) cnt <= (cnt == 3'd5) ? 3'd0 : cnt + 3'd1;
      if (cnt < 3'd5) begin
        w[cnt] <= word_i;
      end else begin
        for (int k = 0; k < 5; k++)
          for (int j = 0; j < WORD_W; j++) gb_data_o[FRAME_W-1-WORD_W*k-j] <= w[k][j];
        for (int j = 0; j < WORD_W; j++) gb_data_o[WORD_W-1-j] <= word_i[j];
        gb_valid_o <= 1'b1;
      end
      if (cnt == 3'd0) begin
        hdr_strobe_o <= 1'b1;
        hdr_ok_o     <= header_ok(word_i);
      end
    end
  end

  always_comb begin
    margin = (fec_margin_i == 3'd0) ? 3'd1 : (fec_margin_i > 3'd6) ? 3'd6 : fec_margin_i;
    if (mode_i == MODE_FEC) descr_en_o = (margin == 3'd1) ? gb_valid_o : vsr[margin - 3'd2];
    else                    descr_en_o = gb_valid_o;
  end

endmodule
