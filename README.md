# Fixed low-latency GBT link core

The GBT protocol carries a 120-bit frame every 25 ns bunch-crossing period (40 MHz) over a
4.8 Gb/s serial link. A standard FPGA implementation buffers whole frames at 40 MHz in both
directions, which costs several bunch crossings of latency. The latency also changes after each
reset, because the frame clock and the word clock come up in an unknown phase. This core keeps
the whole encoding and decoding path in the 240 MHz word-clock domain and controls the frame
boundary with small state machines. The latency is therefore short and the same after every
reset:

| path | logic latency (240 MHz cycles, 4.167 ns each) |
|---|---|
| TX, TxFrameClk edge to first word W1 leaving the gearbox | 1 to 2 |
| RX wide mode, W6 arriving to the RxFrameClk sample | 3 |
| RX FEC mode, same | 2 + FEC margin (5 by default) |

The serializer and deserializer delays of the transceiver add to these numbers. They are not part
of the RTL.

## Frame and words

A frame is 120 bits:

| bits | content |
|---|---|
| 119:116 | header: `0101` for data, `0110` for idle |
| 115:32 | 84-bit data field, scrambled by four 21-bit scramblers |
| 31:0 | FEC mode: 32-bit FEC field. Wide mode: 32 more data bits, scrambled by two 16-bit scramblers |

The frame travels as six 20-bit words, W1 to W6, one per 240 MHz cycle. Word *k* (0-based)
holds frame bits 119-20k down to 100-20k in reversed order. Bit 0 of the word is the most
significant bit of its slice, so the header ends up in W1 bits 3:0 and goes out first on an
LSB-first serializer.

## TX path (`gbt_tx`)

`gbt_tx_fsm` samples the 40 MHz TxFrameClk with two flip-flops in TxWordClk and runs a
six-value counter that restarts on each detected rising edge. `ScrEn` is high for one cycle per
frame, at counter value `scr_phase_i` (default 5). In that cycle the scramblers take the user
frame, so their outputs change on the following edge. The FEC encoder (`gbt_fec_encoder`) is
combinational on the scrambler outputs. `gbt_tx_gearbox` loads W1 one cycle after `ScrEn`. It
reads W2 to W6 straight from the scrambler and encoder outputs over the next five cycles. There
is no frame buffer, because those outputs stay still for a whole frame.

The 32-bit field is chosen per frame: FEC parity in FEC mode, 16-bit scramblers in wide mode.
The mode and the header are taken with `ScrEn`, so a mode change always falls on a frame
boundary.

## RX path (`gbt_rx`)

1. **Bit-shift multiplexer** (`gbt_rx_bitshift_mux`). It keeps the previous word and selects 20
   bits out of {current, previous} with the 2-bit `Sel`:

   | Sel | bits |
   |---|---|
   | 00 | 39:20 |
   | 01 | 38:19 |
   | 10 | 29:10 |
   | 11 | 28:9 |

   Sel[0] gives a 1-bit shift. Sel[1] gives a 10-bit shift.
2. **Gearbox** (`gbt_rx_gearbox`). It collects five words and latches the whole frame (RxGbData)
   on the edge that ends W6. Both modes use the latched frame. This makes a run-time mode switch
   safe, at the price of one cycle in wide mode.
3. **DescrEn timing.** The gearbox's counter produces DescrEn:
   - wide mode: one cycle after the latch;
   - FEC mode: `fec_margin_i` cycles after it (1 to 6, default 3).

   The combinational FEC decoder is therefore a multi-cycle path. A synthesis flow must carry a
   matching multicycle constraint from RxGbData to the descramblers.
4. **FEC decoder and bypass.** `gbt_fec_decoder` is bypassed in wide mode.
5. **Descramblers.** Four 21-bit and two 16-bit descramblers.
6. **RxFrameClk register.** It takes the descrambled frame into the 40 MHz domain. `frame_strobe_o`
   marks the cycle after the descramblers update. RxFrameClk should rise one cycle after it, and
   that is where the 3 and 5 cycle figures come from.

## Header locking and phase selection (`gbt_rx_fsm`)

This is the part of the design with the most moving pieces. After a transceiver reset the FSM
looks for the header at the position the gearbox treats as W1. On a bad header it escalates in
four steps:

1. **Word slip.** Hold the gearbox counter for one cycle. It tries this up to 5 times.
2. **Bitslip.** Request a transceiver bitslip: 2 bits of data, 2 UI of recovered clock. It tries
   this up to 9 times, which covers the even bit offsets.
3. **Receiver reset.** An odd offset needs the recovered clock to land elsewhere, so the FSM
   resets the receiver. It tries this up to `MAX_RESETS` times.
4. **Sel[0].** Toggle the 1-bit shift in the multiplexer.

`LOCK_FRAMES` good headers in a row mean lock. `LOSS_FRAMES` bad ones in a row restart the
search.

All RX channels of a card share one RxWordClk. That clock is the recovered clock of the master
channel. A slave channel's data is launched by its own RxOutClk, whose phase relative to
RxWordClk is unknown. If the two edges are close, the crossing is unsafe. Once a slave has found
its header, the FSM measures this phase:

1. It samples its own RxOutClk with RxWordClk ten times, with a bitslip between samples. Ten
   bitslips of 2 UI each cover one clock period. The ten samples are kept in `phase_o`.
2. If the 1→0 step in that picture lies within two steps of the working position, the FSM
   toggles Sel[1] and issues five bitslips. This moves the recovered clock by 10 UI, half a
   period. The 10-bit shift of the multiplexer undoes the matching 10-bit data shift.
3. The header is then checked again.

A stored result can replace the scan, so a finished system need not repeat it:
`sel1_preset_en_i` and `sel1_preset_i`. The search order, the counts and the decision window are
this design's choices.

## Coding

- **Scramblers** (`gbt_scrambler`, `gbt_descrambler`). Self-synchronizing:
  `s[n] = d[n] ^ s[n-TAP] ^ s[n-WIDTH]`, advanced one frame per enable. TAP is 2 for the
  21-bit units and 3 for the 16-bit units.
- **FEC.** Two Reed-Solomon RS(15,11) codes over GF(16):
  - primitive polynomial x^4+x+1, generator roots α^1..α^4;
  - the 21 data nibbles are interleaved over the two codes (nibble *k* goes to code *k* mod 2),
    and the second code is shortened by one symbol;
  - each code corrects two 4-bit symbols, so any burst of up to 16 bits starting on a nibble
    boundary (or up to 13 bits anywhere) is corrected;
  - the header is not protected.
- **Decoder.** Syndromes, a direct solution of the locator for up to two errors (Peterson), Chien search and
  Forney, all combinational.

These polynomials and this code are choices of this design. Replace them with the
GBT-standard ones to talk to a real GBTX.

## Multi-channel top (`gbt_multichannel`)

`NUM_CH` channels (default 24; a card carries 24 to 40) share TxWordClk and TxFrameClk, and
RxWordClk and RxFrameClk. `MASTER_CH` marks the channel whose recovered clock is RxWordClk. The
following are outside the RTL:
- the clock sources and global clock multiplexers;
- the transceivers;
- the front-end ASIC.

Their signals are ports: transmit words, receive words, RxOutClk per channel, receiver
reset/ready and bitslip.

## Departures and limits

- The scrambler polynomials, the FEC code, the header values and the RX FSM's search order are
  stand-ins: the source design names these parts but does not define them.
- A frame lost around a run-time mode switch is expected. TX and RX change mode at different
  frames, so up to a few frames around a switch are decoded in the wrong mode.
- Clock multiplexing for the TX clock source is not modelled.
- The end-to-end testbench models each transceiver at word level:
  - a bit stream per channel;
  - a random bit offset after each reset;
  - a 2-bit slip per bitslip;
  - a 10-position RxOutClk phase.

  It does not model jitter, metastability or analog behaviour. The phase check in the FSM is
  exercised only logically.

## Simulating

All files are plain SystemVerilog. Each testbench prints `TB_RESULT checks=N failures=M`. For
example:

    verilator --binary --timing -Irtl -y rtl rtl/gbt_pkg.sv tb/tb_gbt_multichannel.sv \
        --top-module tb_gbt_multichannel && ./obj_dir/Vtb_gbt_multichannel

| testbench | what it checks |
|---|---|
| `tb_gbt_scrambler` | scramblers against a model |
| `tb_gbt_descrambler` | descramblers against a model |
| `tb_gbt_fec_encoder` | code words against a model |
| `tb_gbt_fec_decoder` | up to two wrong nibbles per code, 16-bit bursts, and three wrong nibbles not passed as clean |
| `tb_gbt_rx_bitshift_mux` | the Sel table |
| `tb_gbt_tx_fsm` | ScrEn position for every frame-clock phase |
| `tb_gbt_tx_gearbox` | word order and bit order |
| `tb_gbt_rx` | TX-to-RX loopback in both modes, burst correction, and the 3/5-cycle latency |
| `tb_gbt_multichannel` | see below |

`tb_gbt_multichannel` runs all 24 channels at their default parameters. It covers:
- random bit offsets;
- receiver resets;
- bitslips;
- Sel[0] and Sel[1] by scan and by preset;
- FEC correction of bursts;
- run-time mode switches.

It counts each of these and checks every decoded frame.
