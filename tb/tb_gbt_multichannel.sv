// tb_gbt_multichannel: end-to-end test of the multi-channel core at its
// default size (24 links), each link looped back through a word-level model of
// a transceiver.
//
// Transceiver model: every TxWordClk edge appends the 20-bit TX word to a bit
// stream (bit 0 first); every RxWordClk edge presents the next 20 bits of that
// stream from a read pointer.  The pointer starts at a random bit offset; a
// bitslip moves it by two bits, a receiver reset by zero or one bit (channel 2
// never moves on reset, so it needs the one-bit multiplexer shift).  Slave
// channels get an RxOutClk whose phase against RxWordClk starts at a random
// value and moves by 2 UI per bitslip.  Channel 3 starts with its RxOutClk
// edge on top of the RxWordClk edge, so its RX FSM must take the half-cycle
// shift; channel 4 loads that choice from a stored value instead.
//
// TX frames carry a per-channel frame counter in bits 115..84 and a hash of
// (channel, counter) elsewhere; the RX side checks every received frame.
// Channels alternate FEC and wide mode and switch mode half way through;
// channel 5 gets 16-bit error bursts on the line in FEC mode.  Every mechanism
// (bitslip, word slip via lock, receiver reset, Sel bit 0, Sel bit 1 by scan
// and by preset, FEC correction, mode switch, both modes) must occur.
`timescale 1ps/1ps
module tb_gbt_multichannel;
  import gbt_pkg::*;
  localparam int N  = 24;
  localparam int UI = 208;
  localparam int SB = 8192;   // stream buffer bits per channel

  logic txw = 0, txf = 0, rxw = 0, rxf = 0, rst_tx = 1, rst_rx = 1;
  frame_t    tx_frame [N];
  gbt_mode_e tx_mode [N], rx_mode [N];
  logic      pre_en [N], pre_v [N];
  frame_t    rx_frame [N], rx_fw [N];
  logic      rx_strobe [N], rx_locked [N];
  logic [1:0] rx_sel [N], rx_corr [N], rx_unc [N];
  logic      tx_locked;
  word_t     tx_word [N], rx_word [N];
  logic      tx_w1 [N], rx_oc [N], rx_ready [N], rx_reset [N], rx_bs [N];

  gbt_multichannel dut (
    .tx_word_clk_i(txw), .tx_frame_clk_i(txf), .rx_word_clk_i(rxw), .rx_frame_clk_i(rxf),
    .rst_tx_i(rst_tx), .rst_rx_i(rst_rx), .tx_scr_phase_i(3'd5), .rx_fec_margin_i(3'd3),
    .tx_frame_i(tx_frame), .tx_mode_i(tx_mode), .rx_mode_i(rx_mode),
    .sel1_preset_en_i(pre_en), .sel1_preset_i(pre_v),
    .rx_frame_o(rx_frame), .rx_frame_word_o(rx_fw), .rx_frame_strobe_o(rx_strobe),
    .rx_locked_o(rx_locked), .rx_sel_o(rx_sel), .rx_corrected_o(rx_corr),
    .rx_uncorrectable_o(rx_unc), .tx_locked_o(tx_locked),
    .tx_word_o(tx_word), .tx_w1_o(tx_w1), .rx_word_i(rx_word), .rx_out_clk_i(rx_oc),
    .rx_ready_i(rx_ready), .rx_reset_o(rx_reset), .rx_bitslip_o(rx_bs)
  );

  int checks = 0, failures = 0;
  int n_bitslip = 0, n_reset = 0, n_sel0 = 0, n_sel1_scan = 0, n_sel1_pre = 0;
  int n_corr = 0, n_switch = 0, n_wide = 0, n_fec = 0, n_burst = 0;
  longint tick = 0;
  bit     stream [N][SB];
  int     wp [N], rp [N], ph [N], rdy_cnt [N];
  int     tx_cnt [N], last_cnt [N], skip [N];
  bit     switched = 0;

  // --------------------------------------------------------------- clocks --
  // UI tick; RxWordClk is TxWordClk shifted by 5 UI (the master's recovered
  // clock); TxFrameClk rises 3 UI after a TxWordClk edge.
  initial forever begin
    #UI tick++;
    if (tick % 20 == 0) txw = 1; else if (tick % 20 == 10) txw = 0;
    if (tick % 120 == 3) txf = 1; else if (tick % 120 == 63) txf = 0;
    if (tick % 20 == 5) rxw = 1; else if (tick % 20 == 15) rxw = 0;
  end

  // RxFrameClk: divided RxWordClk, rising 1 UI after the RxWordClk edge that
  // follows the master's frame strobe.
  logic strobe_seen = 0;
  always @(posedge rxw) begin
    strobe_seen <= rx_strobe[0];
    if (strobe_seen) begin
      #(UI) rxf = 1;
      #(60*UI) rxf = 0;
    end
  end

  function automatic frame_t make_frame(int c, int cnt, gbt_mode_e m);
    frame_t f;
    logic [31:0] h;
    h = 32'(c) * 32'h9E3779B1 ^ 32'(cnt) * 32'h85EBCA77;
    f = {HDR_DATA, 32'(cnt), h[19:0], h ^ 32'h5A5A5A5A, h * 32'd3};
    return f;
  endfunction

  // --------------------------------------------------------------- TX side --
  always @(posedge txf) begin
    for (int c = 0; c < N; c++) begin
      tx_cnt[c]++;
      tx_frame[c] <= make_frame(c, tx_cnt[c], tx_mode[c]);
    end
  end

  // ---------------------------------------------------- transceiver model --
  bit w2 [N];
  // W2 of a frame (frame bits 99..84 in word bits 0..15) takes the bursts.
  always @(posedge txw) begin
    for (int c = 0; c < N; c++) begin
      for (int j = 0; j < 20; j++) begin
        bit b;
        b = tx_word[c][j];
        // error bursts on channel 5 in FEC mode, aligned to a 4-bit symbol
        if (c == 5 && tx_mode[c] == MODE_FEC && rx_locked[c] && (tx_cnt[c] % 7 == 0)
            && w2[c] && j < 16) begin
          b = ~b;
          if (j == 0) n_burst++;
        end
        stream[c][(wp[c] + j) % SB] = b;
      end
      w2[c] = tx_w1[c];   // the next word is W2
      wp[c] += 20;
    end
  end

  always @(posedge rxw) begin
    for (int c = 0; c < N; c++) begin
      word_t w;
      for (int j = 0; j < 20; j++) w[j] = stream[c][(rp[c] + j) % SB];
      rx_word[c] <= w;
      rp[c] += 20;
      if (rx_bs[c]) begin
        rp[c] += 2; n_bitslip++;
        if (c != 0) ph[c] = (ph[c] + 2) % 20;
      end
      if (rx_reset[c]) begin
        rx_ready[c] <= 0;
        rdy_cnt[c] = 20;
      end else if (rdy_cnt[c] > 0) begin
        rdy_cnt[c]--;
        if (rdy_cnt[c] == 0) begin
          rx_ready[c] <= 1;
          n_reset++;
          if (c != 2) rp[c] += ($urandom % 2);
        end
      end
      // keep the read pointer a fixed window behind the write pointer; whole
      // words only, so the bit alignment is unchanged
      if (rp[c] > wp[c] - 200) rp[c] -= 20;
    end
  end

  // RxOutClk of slaves: same frequency as RxWordClk, phase ph[c] UI later.
  always @(tick) begin
    rx_oc[0] = rxw;
    for (int c = 1; c < N; c++) rx_oc[c] = ((tick - 5 - ph[c]) % 20 + 20) % 20 < 10;
  end

  // ------------------------------------------------------------- RX check --
  always @(posedge rxw) begin
    for (int c = 0; c < N; c++) begin
      if (rx_strobe[c] && rx_locked[c] && skip[c] > 0) skip[c]--;
      else if (rx_strobe[c] && rx_locked[c]) begin
        frame_t e;
        int cnt;
        cnt = int'(rx_fw[c][115:84]);
        e = make_frame(c, cnt, rx_mode[c]);
        checks++;
        if (rx_fw[c][119:32] !== e[119:32] || (rx_mode[c] == MODE_WIDE && rx_fw[c][31:0] !== e[31:0])
            || (last_cnt[c] != 0 && cnt != last_cnt[c] + 1)) begin
          failures++;
          if (failures < 10) $display("ch%0d frame mismatch cnt=%0d last=%0d got=%h exp=%h", c, cnt, last_cnt[c], rx_fw[c], e);
        end
        last_cnt[c] = cnt;
        if (rx_mode[c] == MODE_WIDE) n_wide++; else n_fec++;
        if (rx_corr[c] != 0) n_corr++;
      end
    end
  end

  // -------------------------------------------------------------- control --
  initial begin
    #(2000*UI*1000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int all;
    for (int c = 0; c < N; c++) begin
      tx_mode[c] = (c % 2 == 0) ? MODE_FEC : MODE_WIDE;
      if (c == 5) tx_mode[c] = MODE_FEC;
      rx_mode[c] = tx_mode[c];
      pre_en[c] = (c == 4); pre_v[c] = (c == 4);
      wp[c] = 400; rp[c] = $urandom % 20; ph[c] = 2 * ($urandom % 10);
      if (c == 2) rp[c] = 2 * ($urandom % 10) + 1;   // odd offset, fixed parity
      tx_cnt[c] = 0; last_cnt[c] = 0; skip[c] = 2; rdy_cnt[c] = 0; rx_ready[c] = 1;
      tx_frame[c] = '0; rx_word[c] = '0;
    end
    ph[3] = 19;  // RxOutClk edge 1 UI before the RxWordClk edge
    repeat (10) @(posedge rxw);
    rst_tx = 0; rst_rx = 0;
    // wait for every channel to lock
    for (int t = 0; t < 60000; t++) begin
      @(posedge rxw);
      all = 1;
      for (int c = 0; c < N; c++) if (!rx_locked[c]) all = 0;
      if (all) break;
    end
    for (int c = 0; c < N; c++) begin
      checks++;
      if (!rx_locked[c]) begin failures++; $display("ch%0d did not lock", c); end
    end
    for (int c = 0; c < N; c++) begin
      if (rx_sel[c][0]) n_sel0++;
      if (rx_sel[c][1] && c != 4) n_sel1_scan++;
      if (rx_sel[c][1] && c == 4) n_sel1_pre++;
      // the chosen slave phase keeps the RxOutClk edge >= 4 UI from RxWordClk
      if (c != 0 && c != 4) begin
        checks++;
        if (ph[c] < 4 || ph[c] > 16) begin failures++; $display("ch%0d unsafe phase %0d", c, ph[c]); end
      end
    end
    repeat (600) @(posedge rxw);
    // run-time mode switch on all channels except the burst channel
    for (int c = 0; c < N; c++) if (c != 5) begin
      @(posedge txf);
      tx_mode[c] = (tx_mode[c] == MODE_FEC) ? MODE_WIDE : MODE_FEC;
      repeat (2) @(posedge rxw);
      rx_mode[c] = tx_mode[c];
      last_cnt[c] = 0;
      skip[c] = 8;   // frames in flight while TX and RX modes differ
      n_switch++;
    end
    repeat (600) @(posedge rxw);
    $display("bitslips=%0d resets=%0d sel0=%0d sel1_scan=%0d sel1_preset=%0d corrected=%0d bursts=%0d switches=%0d wide=%0d fec=%0d",
             n_bitslip, n_reset, n_sel0, n_sel1_scan, n_sel1_pre, n_corr, n_burst, n_switch, n_wide, n_fec);
    if (n_bitslip == 0)   begin failures++; $display("no bitslip"); end
    if (n_reset == 0)     begin failures++; $display("no receiver reset"); end
    if (n_sel0 == 0)      begin failures++; $display("no Sel bit 0"); end
    if (n_sel1_scan == 0) begin failures++; $display("no Sel bit 1 from scan"); end
    if (n_sel1_pre == 0)  begin failures++; $display("no Sel bit 1 preset"); end
    if (n_corr == 0)      begin failures++; $display("no FEC correction"); end
    if (n_switch == 0 || n_wide == 0 || n_fec == 0) begin failures++; $display("modes not exercised"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
