// tb_gbt_rx: the RX decoding path fed word by word from a TX encoding path on
// the same clock (master channel).  After lock the decoded frames must equal
// the sent ones in wide and FEC mode, a 16-bit burst in FEC mode must be
// corrected, and the latency from W6 appearing on the RX word input to the
// RxFrameClk sample must be 3 cycles in wide mode and 5 in FEC mode.
`timescale 1ns/1ps
module tb_gbt_rx;
  import gbt_pkg::*;
  logic clk = 0, fclk = 0, rst = 1;
  frame_t txf, rxf, rxw;
  gbt_mode_e mode;
  word_t tw, rw;
  logic tw1, scr, tlock, rreset, bslip, strobe, locked;
  logic [1:0] sel, corr, unc;
  logic [9:0] phase;
  logic [7:0] nres, nbs;
  int checks = 0, failures = 0, cnt = 0, w6_cyc = -100, cyc = 0, n_corr = 0;
  bit burst = 0;

  gbt_tx utx (.clk, .rst, .frame_clk_i(fclk), .frame_i(txf), .mode_i(mode), .scr_phase_i(3'd5),
              .word_o(tw), .w1_o(tw1), .scr_en_o(scr), .locked_o(tlock));
  gbt_rx dut (.clk, .rst, .frame_clk_i(fclk), .word_i(rw), .rx_out_clk_i(clk), .rx_ready_i(1'b1),
              .mode_i(mode), .fec_margin_i(3'd3), .is_master_i(1'b1), .sel1_preset_en_i(1'b0),
              .sel1_preset_i(1'b0), .rx_reset_o(rreset), .bitslip_o(bslip), .frame_o(rxf),
              .frame_word_o(rxw), .frame_strobe_o(strobe), .locked_o(locked), .sel_o(sel),
              .phase_o(phase), .resets_o(nres), .bitslips_o(nbs), .corrected_o(corr),
              .uncorrectable_o(unc));

  always #2 clk = ~clk;                       // word clock, period 4
  always @(posedge clk) begin
    cyc++;
    if (cyc % 6 == 0) begin #0.5 fclk = 1; end
    if (cyc % 6 == 3) begin #0.5 fclk = 0; end
  end
  // loopback; flip a 16-bit symbol-aligned burst in W2 when asked
  logic w2;
  always_comb rw = (burst && w2) ? tw ^ 20'h0FFFF : tw;
  always @(posedge clk) w2 <= tw1;
  always @(posedge fclk) begin cnt++; txf <= {HDR_DATA, 20'(cnt), 32'(cnt * 7), 32'(cnt * 13), 32'(cnt * 31)}; end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // W6 is on the RX input five cycles after W1 was
  int w1_cyc = -100;
  always @(posedge clk) if (tw1) w1_cyc <= cyc;

  task automatic check_frames(input int n, input int exp_lat);
    int got = 0;
    while (got < n) begin
      @(posedge clk);
      if (strobe) begin
        int c, lat;
        c = int'(rxw[115:96]);
        checks++;
        if (rxw[119:32] !== {HDR_DATA, 20'(c), 32'(c * 7), 32'(c * 13)} ||
            (mode == MODE_WIDE && rxw[31:0] !== 32'(c * 31))) begin
          failures++; $display("frame mismatch %h", rxw);
        end
        // strobe rose (cyc - 1); RxFrameClk samples one cycle later
        checks++;
        // In this loop, w1_cyc still holds the value from before the current
        // edge and strobe is seen one edge after it rose; together they read
        // two cycles short of the W5->W6 to RxFrameClk latency.
        lat = (cyc - w1_cyc - 5 + 12) % 6 + 2;
        if (lat != exp_lat) begin
          failures++; $display("latency %0d, expected %0d", lat, exp_lat);
        end
        if (corr != 0) n_corr++;
        got++;
      end
    end
  endtask

  initial begin
    mode = MODE_WIDE; txf = '0;
    repeat (5) @(posedge clk); rst = 0;
    wait (locked);
    repeat (30) @(posedge clk);
    check_frames(20, 3);
    mode = MODE_FEC;
    repeat (60) @(posedge clk);
    check_frames(20, 5);
    burst = 1;
    check_frames(20, 5);
    burst = 0;
    checks++;
    if (n_corr == 0) begin failures++; $display("no correction"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
