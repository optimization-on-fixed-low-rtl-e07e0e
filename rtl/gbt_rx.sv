// gbt_rx: GBT decoding path of one link, in the shared 240 MHz RxWordClk.
//
// RxWordData from the receiver goes through the bit-shift multiplexer into
// the RX gearbox, which latches a whole frame (RxGbData) once every six
// cycles.  In FEC mode the 84-bit data field goes through the FEC decoder; in
// wide mode the decoder is bypassed.  Four 21-bit descramblers take the
// selected 84 bits and two 16-bit descramblers the raw 32-bit field, all
// enabled by the gearbox's DescrEn.  The descrambled frame (frame_word_o, held
// for six cycles) is finally sampled by the 40 MHz RxFrameClk (frame_o).
// The RX FSM drives transceiver reset, bitslip, word slip and Sel.
//
// Latency, from the change of RxWordData from W5 to W6 to the RxFrameClk edge
// that samples the frame, is 3 cycles in wide mode and 2 + fec_margin_i
// cycles in FEC mode (5 with the default margin of 3), provided RxFrameClk
// rises one cycle after frame_strobe_o goes high.  RxFrameClk comes from
// outside (a PLL on the master channel's recovered clock); frame_strobe_o is
// the reference for its phase.  In FEC mode frame_o bits 31..0 carry the
// descrambled FEC field and have no meaning.
//
// The structure (descramblers and decoder at 240 MHz, bypass multiplexer,
// latched gearbox output for both modes, crossing after the descramblers)
// follows the source text.
module gbt_rx
  import gbt_pkg::*;
(
  input  logic       clk,             // RxWordClk (shared)
  input  logic       rst,
  input  logic       frame_clk_i,     // RxFrameClk (shared)
  input  word_t      word_i,          // RxWordData (this channel's RxOutClk)
  input  logic       rx_out_clk_i,    // this channel's RxOutClk
  input  logic       rx_ready_i,
  input  gbt_mode_e  mode_i,
  input  logic [2:0] fec_margin_i,
  input  logic       is_master_i,
  input  logic       sel1_preset_en_i,
  input  logic       sel1_preset_i,
  output logic       rx_reset_o,
  output logic       bitslip_o,
  output frame_t     frame_o,         // RxFrameData, RxFrameClk domain
  output frame_t     frame_word_o,    // descrambled frame, RxWordClk domain
  output logic       frame_strobe_o,  // frame_word_o changed on the last edge
  output logic       locked_o,
  output logic [1:0] sel_o,
  output logic [9:0] phase_o,
  output logic [7:0] resets_o,
  output logic [7:0] bitslips_o,
  output logic [1:0] corrected_o,     // with frame_word_o
  output logic [1:0] uncorrectable_o
);

  word_t               mux_word;
  logic                slip, descr_en, gb_valid, hdr_strobe, hdr_ok;
  frame_t              gb_data;
  logic [DATA21_W-1:0] dec_data, d84_in, d84;
  logic [FEC_W-1:0]    d32;
  logic [1:0]          corr, uncorr;
  logic [3:0]          hdr_q;
  gbt_mode_e           mode_q;

  gbt_rx_bitshift_mux u_mux (
    .clk, .rst, .word_i, .sel_i(sel_o), .word_o(mux_word)
  );

  gbt_rx_gearbox u_gb (
    .clk, .rst, .word_i(mux_word), .slip_i(slip), .mode_i(mode_q), .fec_margin_i,
    .gb_data_o(gb_data), .gb_valid_o(gb_valid), .descr_en_o(descr_en),
    .hdr_strobe_o(hdr_strobe), .hdr_ok_o(hdr_ok)
  );

  gbt_rx_fsm u_fsm (
    .clk, .rst, .is_master_i, .sel1_preset_en_i, .sel1_preset_i, .rx_ready_i,
    .rx_out_clk_i, .hdr_strobe_i(hdr_strobe), .hdr_ok_i(hdr_ok),
    .rx_reset_o, .bitslip_o, .slip_o(slip), .sel_o, .locked_o, .phase_o,
    .resets_o, .bitslips_o
  );

  gbt_fec_decoder u_dec (
    .data_i(gb_data[115:32]), .fec_i(gb_data[31:0]), .data_o(dec_data),
    .corrected_o(corr), .uncorrectable_o(uncorr)
  );

  // The mode changes only on a frame boundary.
  always_ff @(posedge clk) begin
    if (rst)           mode_q <= MODE_FEC;
    else if (gb_valid) mode_q <= mode_i;
  end

  // FEC bypass multiplexer.
  assign d84_in = (mode_q == MODE_FEC) ? dec_data : gb_data[115:32];

  for (genvar i = 0; i < 4; i++) begin : g_dscr21
    gbt_descrambler #(.WIDTH(21), .TAP(2)) u_dscr (
      .clk, .rst, .en(descr_en), .din(d84_in[21*i +: 21]), .dout(d84[21*i +: 21])
    );
  end

  for (genvar i = 0; i < 2; i++) begin : g_dscr16
    gbt_descrambler #(.WIDTH(16), .TAP(3)) u_dscr (
      .clk, .rst, .en(descr_en), .din(gb_data[16*i +: 16]), .dout(d32[16*i +: 16])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hdr_q           <= '0;
      frame_strobe_o  <= 1'b0;
      corrected_o     <= '0;
      uncorrectable_o <= '0;
    end else begin
      frame_strobe_o <= descr_en;
      if (descr_en) begin
        hdr_q           <= gb_data[119:116];
        corrected_o     <= (mode_q == MODE_FEC) ? corr : 2'b00;
        uncorrectable_o <= (mode_q == MODE_FEC) ? uncorr : 2'b00;
      end
    end
  end

  assign frame_word_o = {hdr_q, d84, d32};

  // Clock-domain crossing into RxFrameClk.
  always_ff @(posedge frame_clk_i) frame_o <= frame_word_o;

endmodule
