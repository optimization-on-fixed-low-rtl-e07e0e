// gbt_tx: GBT encoding path of one link, entirely in the 240 MHz TxWordClk.
//
// The 120-bit TxFrameData from the 40 MHz TxFrameClk domain is sampled once
// per frame, on the edge closing the ScrEn cycle chosen by the TX FSM: the
// header (bits 119..116) into a register, bits 115..32 into four 21-bit
// scramblers and bits 31..0 into two 16-bit scramblers.  The FEC encoder
// works on the 84 scrambled bits.  A multiplexer chooses the low 32 bits of
// the frame handed to the gearbox: the FEC field in FEC mode, the 16-bit
// scramblers in wide mode.  The mode input is sampled with the frame, so the
// mode can be changed at run time and takes effect on a frame boundary.  The
// gearbox then sends W1..W6 starting two cycles after ScrEn.
//
// Encoding latency, from the TxFrameClk edge at the end of a frame to the
// change of word_o from W6 to the next W1, is 1..2 TxWordClk cycles with
// scr_phase_i = 5, depending on the phase between the two clocks.
// The block structure (clock-domain crossing in front of the scramblers, the
// enable, the FEC/wide multiplexer, all encoding at 240 MHz) follows the
// source text; scrambler taps and seeds are this design's choice.
module gbt_tx
  import gbt_pkg::*;
(
  input  logic       clk,           // TxWordClk
  input  logic       rst,
  input  logic       frame_clk_i,   // TxFrameClk
  input  frame_t     frame_i,       // TxFrameData (TxFrameClk domain)
  input  gbt_mode_e  mode_i,        // MODE_FEC or MODE_WIDE
  input  logic [2:0] scr_phase_i,   // ScrEn position, default 5
  output word_t      word_o,        // TxWordData to the transmitter
  output logic       w1_o,          // word_o holds W1
  output logic       scr_en_o,      // ScrEn, for observation
  output logic       locked_o
);

  logic                scr_en, gb_start;
  logic [3:0]          hdr_q;
  gbt_mode_e           mode_q;
  logic [DATA21_W-1:0] scr84;
  logic [FEC_W-1:0]    scr32, fec;
  frame_t              gb_frame;

  gbt_tx_fsm u_fsm (
    .clk, .rst, .frame_clk_i, .scr_phase_i,
    .scr_en_o(scr_en), .gb_start_o(gb_start), .locked_o
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      hdr_q  <= HDR_IDLE;
      mode_q <= MODE_FEC;
    end else if (scr_en) begin
      hdr_q  <= frame_i[119:116];
      mode_q <= mode_i;
    end
  end

  for (genvar i = 0; i < 4; i++) begin : g_scr21
    gbt_scrambler #(.WIDTH(21), .TAP(2), .SEED(21'(32'h1A5F3 + 7 * i))) u_scr (
      .clk, .rst, .en(scr_en),
      .din(frame_i[32+21*i +: 21]), .dout(scr84[21*i +: 21])
    );
  end

  for (genvar i = 0; i < 2; i++) begin : g_scr16
    gbt_scrambler #(.WIDTH(16), .TAP(3), .SEED(16'(32'hB37C + 5 * i))) u_scr (
      .clk, .rst, .en(scr_en),
      .din(frame_i[16*i +: 16]), .dout(scr32[16*i +: 16])
    );
  end

  gbt_fec_encoder u_enc (.data_i(scr84), .fec_o(fec));

  // FEC / wide multiplexer in front of the gearbox.
  assign gb_frame = {hdr_q, scr84, (mode_q == MODE_FEC) ? fec : scr32};

  gbt_tx_gearbox u_gb (
    .clk, .rst, .start_i(gb_start), .frame_i(gb_frame), .word_o, .w1_o
  );

  assign scr_en_o = scr_en;

endmodule
