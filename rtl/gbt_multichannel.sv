// gbt_multichannel: NUM_CH low-latency GBT links sharing their clocks.
//
// Each channel has a TX encoding path (gbt_tx) and an RX decoding path
// (gbt_rx).  All TX paths run on one TxWordClk and sample one TxFrameClk;
// all RX paths run on one RxWordClk and deliver their frames on one
// RxFrameClk.  RxWordClk is the recovered clock of the master channel
// MASTER_CH (or a clock synchronous with it); the other, slave channels cross
// from their own RxOutClk into it and let their RX FSM pick a safe phase.
// The clock sources and their multiplexers, and the transceivers themselves,
// are outside this module: their clocks and parallel data are ports.
//
// Per channel, the TX and RX coding modes (FEC or wide) are separate inputs
// that can change at run time.  tx_scr_phase_i and rx_fec_margin_i are the
// shared timing settings (ScrEn position, default 5; FEC decoder margin,
// default 3 cycles).  rst_tx_i and rst_rx_i are synchronous to TxWordClk and
// RxWordClk respectively.
//
// The sharing scheme (one TxWordClk, one RxWordClk and RxFrameClk, master and
// slave channels) follows the source text, which names 24 to 40 links per
// card; the default NUM_CH = 24 is the lower end of that range.
module gbt_multichannel
  import gbt_pkg::*;
#(
  parameter int unsigned NUM_CH    = 24,
  parameter int unsigned MASTER_CH = 0
) (
  input  logic              tx_word_clk_i,    // TxWordClk, 240 MHz
  input  logic              tx_frame_clk_i,   // TxFrameClk, 40 MHz
  input  logic              rx_word_clk_i,    // RxWordClk, 240 MHz
  input  logic              rx_frame_clk_i,   // RxFrameClk, 40 MHz
  input  logic              rst_tx_i,
  input  logic              rst_rx_i,
  input  logic [2:0]        tx_scr_phase_i,
  input  logic [2:0]        rx_fec_margin_i,
  // user side
  input  frame_t            tx_frame_i       [NUM_CH],
  input  gbt_mode_e         tx_mode_i        [NUM_CH],
  input  gbt_mode_e         rx_mode_i        [NUM_CH],
  input  logic              sel1_preset_en_i [NUM_CH],
  input  logic              sel1_preset_i    [NUM_CH],
  output frame_t            rx_frame_o       [NUM_CH],
  output frame_t            rx_frame_word_o  [NUM_CH],
  output logic              rx_frame_strobe_o[NUM_CH],
  output logic              rx_locked_o      [NUM_CH],
  output logic [1:0]        rx_sel_o         [NUM_CH],
  output logic [1:0]        rx_corrected_o   [NUM_CH],
  output logic [1:0]        rx_uncorrectable_o[NUM_CH],
  output logic              tx_locked_o,
  // transceiver side
  output word_t             tx_word_o        [NUM_CH],
  output logic              tx_w1_o          [NUM_CH],
  input  word_t             rx_word_i        [NUM_CH],
  input  logic              rx_out_clk_i     [NUM_CH],
  input  logic              rx_ready_i       [NUM_CH],
  output logic              rx_reset_o       [NUM_CH],
  output logic              rx_bitslip_o     [NUM_CH]
);

  logic tx_lock [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic       scr_en_unused;
    logic [9:0] phase_unused;
    logic [7:0] resets_unused, bitslips_unused;

    gbt_tx u_tx (
      .clk(tx_word_clk_i), .rst(rst_tx_i), .frame_clk_i(tx_frame_clk_i),
      .frame_i(tx_frame_i[c]), .mode_i(tx_mode_i[c]), .scr_phase_i(tx_scr_phase_i),
      .word_o(tx_word_o[c]), .w1_o(tx_w1_o[c]), .scr_en_o(scr_en_unused),
      .locked_o(tx_lock[c])
    );

    gbt_rx u_rx (
      .clk(rx_word_clk_i), .rst(rst_rx_i), .frame_clk_i(rx_frame_clk_i),
      .word_i(rx_word_i[c]), .rx_out_clk_i(rx_out_clk_i[c]), .rx_ready_i(rx_ready_i[c]),
      .mode_i(rx_mode_i[c]), .fec_margin_i(rx_fec_margin_i),
      .is_master_i(c == MASTER_CH),
      .sel1_preset_en_i(sel1_preset_en_i[c]), .sel1_preset_i(sel1_preset_i[c]),
      .rx_reset_o(rx_reset_o[c]), .bitslip_o(rx_bitslip_o[c]),
      .frame_o(rx_frame_o[c]), .frame_word_o(rx_frame_word_o[c]),
      .frame_strobe_o(rx_frame_strobe_o[c]), .locked_o(rx_locked_o[c]),
      .sel_o(rx_sel_o[c]), .phase_o(phase_unused), .resets_o(resets_unused),
      .bitslips_o(bitslips_unused), .corrected_o(rx_corrected_o[c]),
      .uncorrectable_o(rx_uncorrectable_o[c])
    );
  end

  assign tx_locked_o = tx_lock[MASTER_CH];

endmodule
