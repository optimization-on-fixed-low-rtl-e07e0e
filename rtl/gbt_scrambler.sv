// gbt_scrambler: word-parallel self-synchronising scrambler with an enable.
//
// One instance scrambles WIDTH bits per enabled cycle.  The TX side uses four
// 21-bit instances on the 84-bit data field and two 16-bit instances on the
// 32-bit wide-mode field.  The core runs in the 240 MHz TxWordClk domain, so
// the register only advances in the one cycle of six in which the TX FSM
// raises en (ScrEn); in that cycle din is also the sample of the frame data
// coming from the 40 MHz TxFrameClk domain.
//
// The scrambled stream obeys s[n] = d[n] ^ s[n-TAP] ^ s[n-WIDTH], where bit 0
// of a word precedes bit WIDTH-1 and all of the previous word precedes it.
// The feedback taps are this design's choice: the source text does not give
// the polynomials, only that the scramblers are XOR networks finishing in one
// cycle.  The same taps must be used in gbt_descrambler.
//
// Timing: dout is registered and changes on the clock edge that samples en=1
// (the ScrData change one cycle after the ScrEn pulse in the TX timing).
// Reset loads SEED, so TX and RX agree after the first frame.
module gbt_scrambler #(
  parameter int unsigned WIDTH = 21,
  parameter int unsigned TAP   = 2,
  parameter logic [WIDTH-1:0] SEED = '1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  function automatic logic [WIDTH-1:0] scramble(logic [WIDTH-1:0] d, logic [WIDTH-1:0] prev);
    logic [WIDTH-1:0] s;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      if (i >= TAP) s[i] = d[i] ^ prev[i] ^ s[i-TAP];
      else          s[i] = d[i] ^ prev[i] ^ prev[WIDTH+i-TAP];
    end
    return s;
  endfunction

  always_ff @(posedge clk) begin
    if (rst)     dout <= SEED;
    else if (en) dout <= scramble(din, dout);
  end

endmodule
