// gbt_descrambler: word-parallel self-synchronising descrambler with enable.
//
// Inverse of gbt_scrambler with the same WIDTH and TAP: with r the received
// scrambled stream, d[n] = r[n] ^ r[n-TAP] ^ r[n-WIDTH].  It keeps the last
// received scrambled word; since the recovered data depend only on received
// bits, it is correct from the second enabled word after reset whatever the
// transmitter's seed.  Four 21-bit and two 16-bit instances sit in the
// 240 MHz RxWordClk domain.  They advance only when en (DescrEn) is high: the
// RX gearbox raises it one cycle after the frame is latched in wide mode and
// a programmable number of cycles later in FEC mode, so the FEC decoder has a
// multi-cycle path.  The taps are this design's choice (not given in the
// source text).
//
// Timing: dout is registered and changes on the edge that samples en=1.
module gbt_descrambler #(
  parameter int unsigned WIDTH = 21,
  parameter int unsigned TAP   = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  logic [WIDTH-1:0] prev;

  function automatic logic [WIDTH-1:0] descramble(logic [WIDTH-1:0] r, logic [WIDTH-1:0] p);
    logic [WIDTH-1:0] d;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      if (i >= TAP) d[i] = r[i] ^ p[i] ^ r[i-TAP];
      else          d[i] = r[i] ^ p[i] ^ p[WIDTH+i-TAP];
    end
    return d;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      prev <= '0;
      dout <= '0;
    end else if (en) begin
      prev <= din;
      dout <= descramble(din, prev);
    end
  end

endmodule
