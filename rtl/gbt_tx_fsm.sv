// gbt_tx_fsm: TX frame timing in the 240 MHz TxWordClk domain.
//
// The 40 MHz TxFrameClk is sampled as data by TxWordClk (two flip-flops).  A
// rising edge seen in the samples restarts a six-value phase counter, which
// then free-runs (one count per word).  scr_en_o (ScrEn) is high in the one
// cycle of six in which the counter equals scr_phase_i; that cycle's closing
// edge samples the frame data crossing from the TxFrameClk domain and advances
// the scramblers.  gb_start_o is ScrEn delayed by one cycle: the TX gearbox
// loads W1 at the end of that cycle, i.e. W1 leaves in the second cycle after
// the ScrEn pulse, W5 and W6 follow four and five cycles later.
//
// The sampling of TxFrameClk, the ScrEn pulse, its adjustment in steps of one
// cycle and the gearbox start two cycles after ScrEn follow the source text.
// The two-flip-flop sampler and the phase-select input are this design's
// choice.  With scr_phase_i = 5 the frame is sampled in the second word cycle
// after the TxFrameClk edge, which gives the 1..2 cycle encoding latency; a
// smaller latency means less setup margin for the crossing.
module gbt_tx_fsm (
  input  logic       clk,          // TxWordClk, 240 MHz
  input  logic       rst,
  input  logic       frame_clk_i,  // TxFrameClk, sampled as data
  input  logic [2:0] scr_phase_i,  // ScrEn position 0..5 after the detected edge
  output logic       scr_en_o,     // ScrEn
  output logic       gb_start_o,   // gearbox control: load W1 on this edge
  output logic       locked_o      // a TxFrameClk edge has been seen
);

  logic       s1, s2;
  logic [2:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1         <= 1'b0;
      s2         <= 1'b0;
      cnt        <= '0;
      locked_o   <= 1'b0;
      gb_start_o <= 1'b0;
    end else begin
      s1         <= frame_clk_i;
      s2         <= s1;
      gb_start_o <= scr_en_o;
      if (s1 && !s2) begin
        cnt      <= '0;
        locked_o <= 1'b1;
      end else begin
        cnt <= (cnt == 3'd5) ? 3'd0 : cnt + 3'd1;
      end
    end
  end

  assign scr_en_o = locked_o && (cnt == scr_phase_i);

endmodule
