// tb_gbt_tx_fsm: TxFrameClk is a divide-by-6 of TxWordClk; ScrEn must pulse
// once every six cycles at the chosen distance from the TxFrameClk edge, and
// the gearbox start must follow one cycle after ScrEn.
module tb_gbt_tx_fsm;
  logic clk = 0, rst = 1, fclk = 0, scr_en, gb_start, locked;
  logic [2:0] ph;
  int checks = 0, failures = 0;
  int cyc = 0, last_edge = 0, last_en = -1;
  logic prev_en = 0;
  localparam int OFS = 2;  // two-flop sampler plus edge detect
  gbt_tx_fsm dut (.clk, .rst, .frame_clk_i(fclk), .scr_phase_i(ph), .scr_en_o(scr_en),
                  .gb_start_o(gb_start), .locked_o(locked));
  always #5 clk = ~clk;
  // frame clock rises 2 time units after a word clock edge, every 6 cycles
  always @(posedge clk) begin
    cyc++;
    if (cyc % 6 == 0) begin #2 fclk = 1; last_edge = cyc; end
    if (cyc % 6 == 3) #2 fclk = 0;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(negedge clk) if (!rst && locked) begin
    if (gb_start !== prev_en) begin failures++; $display("gb_start not one cycle after ScrEn"); end
    checks++;
    if (scr_en) begin
      // ScrEn cycle index relative to the frame-clock edge: 2 + phase
      if (((cyc - last_edge + 6) % 6) != ((OFS + ph) % 6)) begin
        failures++; $display("ScrEn at %0d cycles after edge, phase %0d", cyc - last_edge, ph);
      end
      if (last_en >= 0 && cyc - last_en != 6) begin failures++; $display("ScrEn period %0d", cyc - last_en); end
      last_en = cyc;
    end
    prev_en = scr_en;
  end
  initial begin
    ph = 3'd5;
    repeat (3) @(negedge clk); rst = 0;
    repeat (60) @(negedge clk);
    ph = 3'd2; last_en = -1;
    repeat (60) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
