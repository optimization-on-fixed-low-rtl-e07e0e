// gbt_rx_fsm: receiver reset, header locking and RxOutClk phase selection.
//
// After reset the FSM pulses the transceiver reset and waits for rx_ready_i.
// It then hunts for the GBT header in bits 3..0 of the word the gearbox
// treats as W1.  On a bad header it first moves the frame boundary one word
// (slip_o, up to five times), then asks the transceiver for a bitslip
// (bitslip_o: two bits of data, 2 UI of recovered clock), up to nine times.
// Ten bitslips cover the even bit offsets; when none works the header sits at
// an odd offset and the FSM resets the receiver, which may move the recovered
// clock by 1 UI.  After MAX_RESETS such resets it toggles bit 0 of sel_o
// instead, a one-bit shift in the bit-shift multiplexer.  LOCK_FRAMES valid
// headers in a row declare the header found.
//
// A slave channel (is_master_i = 0) crosses from its own RxOutClk into the
// shared RxWordClk.  Once its header is found it measures the phase between
// them: ten times it samples rx_out_clk_i with RxWordClk and issues a bitslip,
// collecting a 10-bit picture of RxOutClk over one full cycle (phase_o).  The
// 1->0 step in that picture is where the RxOutClk rising edge meets the
// RxWordClk edge.  If it lies within two steps of the working phase, the FSM
// sets bit 1 of sel_o and issues five bitslips: the recovered clock moves by
// 10 UI, half a cycle, and the multiplexer undoes the ten-bit data shift.  The
// header is then checked again.  A stored value (sel1_preset_en_i) replaces
// the measurement, for systems that keep the chosen value in a database.
// After lock, LOSS_FRAMES bad headers in a row restart the hunt.
//
// The sequence of reset, bitslip, Sel bit 0, the ten-sample scan and the
// Sel bit 1 switch with its bitslips follows the source text.  The order of
// trials, the counts, the wait times and the decision rule are this design's.
module gbt_rx_fsm #(
  parameter int unsigned LOCK_FRAMES = 16,
  parameter int unsigned LOSS_FRAMES = 4,
  parameter int unsigned MAX_RESETS  = 3,
  parameter int unsigned WAIT_CYC    = 48,  // settle time after a bitslip/reset
  parameter int unsigned RST_CYC     = 8
) (
  input  logic       clk,               // RxWordClk
  input  logic       rst,
  input  logic       is_master_i,       // RxWordClk is this channel's RxOutClk
  input  logic       sel1_preset_en_i,  // use sel1_preset_i instead of a scan
  input  logic       sel1_preset_i,
  input  logic       rx_ready_i,        // transceiver reset done
  input  logic       rx_out_clk_i,      // this channel's RxOutClk, as data
  input  logic       hdr_strobe_i,
  input  logic       hdr_ok_i,
  output logic       rx_reset_o,
  output logic       bitslip_o,
  output logic       slip_o,            // word slip to the gearbox
  output logic [1:0] sel_o,
  output logic       locked_o,
  output logic [9:0] phase_o,           // last RxOutClk phase picture
  output logic [7:0] resets_o,          // receiver resets issued (saturating)
  output logic [7:0] bitslips_o         // bitslips issued (saturating)
);

  typedef enum logic [2:0] {
    S_RESET, S_READY, S_SEARCH, S_WAIT, S_SCAN, S_SHIFT, S_LOCKED
  } state_e;

  state_e      state, after_wait;
  logic [15:0] timer;
  logic [7:0]  good;
  logic [2:0]  wtry;
  logic [3:0]  bs_cnt;
  logic [3:0]  scan_k;
  logic [2:0]  shift_k;
  logic [3:0]  n_resets;
  logic        scanned;

  // Position of the 1->0 step in the phase picture; 1 when the RxOutClk
  // rising edge lies within two bitslip steps of the current phase.
  function automatic logic need_half_shift(logic [9:0] p);
    logic need;
    need = 1'b0;
    for (int a = 0; a < 10; a++)
      if (p[a] && !p[(a + 1) % 10] && (a >= 8 || a <= 1)) need = 1'b1;
    return need;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_RESET;
      after_wait <= S_SEARCH;
      timer      <= '0;
      good       <= '0;
      wtry       <= '0;
      bs_cnt     <= '0;
      scan_k     <= '0;
      shift_k    <= '0;
      n_resets   <= '0;
      scanned    <= 1'b0;
      sel_o      <= '0;
      phase_o    <= '0;
      rx_reset_o <= 1'b0;
      bitslip_o  <= 1'b0;
      slip_o     <= 1'b0;
      locked_o   <= 1'b0;
      resets_o   <= '0;
      bitslips_o <= '0;
    end else begin
      bitslip_o <= 1'b0;
      slip_o    <= 1'b0;
      if (bitslip_o && bitslips_o != 8'hFF) bitslips_o <= bitslips_o + 8'd1;
      unique case (state)
        S_RESET: begin
          rx_reset_o <= 1'b1;
          locked_o   <= 1'b0;
          timer      <= timer + 16'd1;
          if (timer == 16'(RST_CYC)) begin
            rx_reset_o <= 1'b0;
            timer      <= '0;
            if (resets_o != 8'hFF) resets_o <= resets_o + 8'd1;
            state      <= S_READY;
          end
        end
        S_READY: if (rx_ready_i) begin
          timer      <= '0;
          good       <= '0;
          after_wait <= S_SEARCH;
          state      <= S_WAIT;
        end
        S_WAIT: begin
          timer <= timer + 16'd1;
          if (timer == 16'(WAIT_CYC)) begin
            timer <= '0;
            state <= after_wait;
          end
        end
        S_SEARCH: if (hdr_strobe_i) begin
          if (hdr_ok_i) begin
            good <= good + 8'd1;
            if (good + 8'd1 == 8'(LOCK_FRAMES)) begin
              good <= '0;
              if (is_master_i || scanned) begin
                state <= S_LOCKED;
              end else if (sel1_preset_en_i) begin
                scanned <= 1'b1;
                if (sel1_preset_i) begin
                  sel_o[1] <= ~sel_o[1];
                  shift_k  <= '0;
                  state    <= S_SHIFT;
                end else begin
                  state <= S_LOCKED;
                end
              end else begin
                scan_k     <= '0;
                after_wait <= S_SCAN;
                state      <= S_WAIT;
              end
            end
          end else begin
            good <= '0;
            after_wait <= S_SEARCH;
            if (wtry < 3'd5) begin
              wtry   <= wtry + 3'd1;
              slip_o <= 1'b1;
            end else begin
              wtry <= '0;
              if (bs_cnt < 4'd9) begin
                bs_cnt    <= bs_cnt + 4'd1;
                bitslip_o <= 1'b1;
                state     <= S_WAIT;
              end else begin
                bs_cnt <= '0;
                if (n_resets < 4'(MAX_RESETS)) begin
                  n_resets <= n_resets + 4'd1;
                  state    <= S_RESET;
                end else begin
                  n_resets <= '0;
                  sel_o[0] <= ~sel_o[0];
                  state    <= S_WAIT;
                end
              end
            end
          end
        end
        S_SCAN: begin
          // Sample RxOutClk, then slip by 2 UI; ten steps span one cycle.
          phase_o[scan_k] <= rx_out_clk_i;
          bitslip_o       <= 1'b1;
          scan_k          <= scan_k + 4'd1;
          after_wait      <= S_SCAN;
          state           <= S_WAIT;
          if (scan_k == 4'd9) begin
            scanned <= 1'b1;
            shift_k <= '0;
            if (need_half_shift({rx_out_clk_i, phase_o[8:0]})) begin
              sel_o[1]   <= ~sel_o[1];
              after_wait <= S_SHIFT;
            end else begin
              after_wait <= S_SEARCH;
            end
          end
        end
        S_SHIFT: begin
          // Five bitslips: 10 UI of clock, compensated by Sel bit 1.
          bitslip_o  <= 1'b1;
          shift_k    <= shift_k + 3'd1;
          after_wait <= (shift_k == 3'd4) ? S_SEARCH : S_SHIFT;
          state      <= S_WAIT;
        end
        S_LOCKED: begin
          locked_o <= 1'b1;
          if (hdr_strobe_i) begin
            if (hdr_ok_i) good <= '0;
            else begin
              good <= good + 8'd1;
              if (good + 8'd1 == 8'(LOSS_FRAMES)) begin
                good     <= '0;
                locked_o <= 1'b0;
                state    <= S_SEARCH;
              end
            end
          end
        end
        default: state <= S_RESET;
      endcase
    end
  end

endmodule
