# A 4.8 Gb/s optical data link with two-bit-per-codeword error correction

Detector front ends in high-energy physics send data over optical fibre in
places where radiation and noise flip bits. This design is the FPGA logic at
both ends of such a link, and the hand-over of received data to a PC through
DMA/PCIe. Every 25 ns (40 MHz frame clock) it packs one 120-bit frame. In the
standard mode a frame holds 4 slow-control bits and 48 data bits. These are
scrambled for DC balance and protected by eight BCH(15,7) codes, each of which
corrects two errors. The frame is then interleaved so that a burst of line
errors is spread over several codewords. The frame goes out as three 40-bit
words at 120 MHz, 4.8 Gb/s on the fibre. The receiver finds the frame
boundary in the raw bit stream, rebuilds the frames, corrects the errors,
descrambles them, and writes one record per frame into a FIFO read by the DMA
engine.

A second "extra wide bus" mode drops the error correction. It carries 116
payload bits per frame (4.64 Gb/s) instead of 52 (2.08 Gb/s). The mode is
chosen per frame and is marked by the frame header.

```
 sender (daq_tx)                                 receiver (daq_rx)
 SC,D --> scrambler --> 8 x BCH enc --> interleaver --> tx_gearbox (120->3x40, 40->120 MHz)
                    \-> (wide: no FEC, no interleave) -/        |
                                                        serialiser / fibre / deserialiser
                                                                 |
 record <- descrambler <- 8 x BCH dec <- deinterleaver <- rx_gearbox <- frame_aligner
    |
  toggle hand-over -> async_fifo (128 bits x 512) -> DMA read port       (daq_top)
```

## Frame formats

| bits      | standard frame (header `1010`)      | wide-bus frame (header `0101`)          |
|-----------|-------------------------------------|-----------------------------------------|
| 119:116   | header, never moved                 | header                                  |
| 115:64    | message bits of the 8 codewords     | scrambled {SC, D[47:0]} (52 bits)       |
| 63:0      | parity bits of the 8 codewords      | scrambled D[111:48] (64 bits)           |

In a standard frame, the header and the scrambled 52 bits form a 56-bit
message `msg = {1010, scr[51:0]}`. Codeword *e* (0..7) encodes
`msg[7e+6 : 7e]`, so codeword 7 carries the header and three payload bits.
Each codeword is systematic: `{m[6:0], parity[7:0]}`, with the generator
polynomial g(x) = x^8 + x^7 + x^6 + x^4 + 1. All decoder arithmetic works in
GF(16) built on x^4 + x + 1.

The receiver decides the mode from the header before decoding. A header
within one bit of `0101` is taken as wide bus; anything else is decoded as
standard. A flipped bit in a standard header is then repaired by codeword 7
like any other bit.

## Interleaving: where each codeword bit goes

The interleaver is pure wiring (zero latency). It uses the table `IL_MAP` in
`daq_pkg`, which the package computes with a function at elaboration time.
The header bits stay at 119:116. All other bits are laid out column by column:

* Frame bits 115:64 take the message bits. The order is bit position j = 6
  down to 0, and within each j codeword e = 7 down to 0. Codeword 7 is skipped
  for j >= 3, because those bits are the header.
* Frame bits 63:0 take the parity bits. The order is j = 7 down to 0, with
  e = 7 down to 0 within each j.

Neighbouring line bits therefore belong to different codewords. Outside the
header, a burst of up to 7 bits hits each codeword at most once, and a burst
of up to 14 bits hits each codeword at most twice. Both kinds are fully
corrected. The deinterleaver is the inverse wiring.

## Scrambling

Each lane computes `s = d ^ s_prev ^ rotr1(s_prev)` once per frame, where
`s_prev` is the lane's previous scrambled word. Because the feedback uses only
what was sent, the descrambler `d = s ^ s_prev ^ rotr1(s_prev)` needs no
synchronisation. It is right one frame after it starts, and a line error
spoils at most two frames. The lanes are:

* four 13-bit lanes for {SC, D[47:0]}, used in both modes;
* in wide mode, four 16-bit lanes for D[111:48], which are clocked only on
  wide frames.

The scrambler has a latency of one clock and adds no redundancy. Each lane
starts from a different non-zero seed. The feedback rule is this design's
own, because the source gives no polynomial.

## Finding the frame boundary (frame_aligner)

This is the subtle part. The deserialiser delivers 40-bit words starting at
an arbitrary bit. The aligner has two parts.

1. **Right shifter.** It keeps the previous word and outputs the 40 bits of
   the 80-bit window {previous, current} that start `shift` bits in
   (0..39).
2. **Pattern search.** A word counter (0, 1, 2) marks which shifted word
   should start with a header. At each word 0 the top four bits are compared
   with `1010` and `0101`.
   * **SEARCH:** a mismatch issues a one-clock bit slip (`shift + 1`). When
     `shift` wraps from 39 to 0 the word counter is held for one clock. Each
     slip therefore moves the examined position exactly one bit along the
     120-bit frame, and at most 120 slips visit every position.
   * **CONFIRM:** a match moves here. The header must then be seen at 32
     further word-0 checks in a row, otherwise the aligner slips and
     searches again. After the last slip, lock comes exactly 33 matching
     checks later.
   * **LOCKED:** `header_lock` rises, and aligned words flow to the RX
     gearbox with their word index. Lock is held until reset.

A random data word can imitate a header for a few checks, but 33 in a row is
very unlikely. `bs_count` counts the slips, wrapping at 128.

## Clock-domain crossings

* **TX gearbox, 40 to 120 MHz.** A 4-entry, 3-lane dual-port RAM
  (`dp_ram`) is written with one frame every frame clock. A "started" flag
  crosses through two flops. From then on, the 120 MHz reader steps through
  the entries, sending the header word first. This is safe because the
  clocks come from one PLL at a 3:1 ratio, so both sides run at exactly
  4.8 Gb/s and the read address trails the write address by a fixed amount.
* **RX gearbox, 120 to 40 MHz.** The aligned words are written into the
  lane given by their word index. The count of complete frames crosses to
  the frame clock in Gray code. The reader takes one entry whenever it is
  behind. Depth is 8.
* **Record hand-over, 40 to 120 MHz.** Each new record toggles a flag. The
  MGT clock writes the record into the FIFO on the clock after it sees the
  toggle. The record register is stable for three MGT clocks, which is
  enough.
* **FIFO, 120 to 125 MHz.** `async_fifo` is a standard design with Gray
  pointers: 128-bit words, 512 deep, registered read data. A record that
  arrives while the FIFO is full is dropped and counted in `cnt_dropped`.

The record (`rx_rec_t`, 128 bits) is:

```
{wide, uncorrectable, 6'b0, header[3:0], sc[3:0], data[111:0]}
```

Standard records use `data[47:0]`.

## Decoder

Decoding is a pipeline of two frame clocks.

* **Stage 1** registers the syndromes S1 = c(alpha) and S3 = c(alpha^3).
* **Stage 2** solves the error locator directly (Peterson, t = 2):
  sigma1 = S1 and sigma2 = (S3 + S1^3)/S1. It then tests all 15 positions in
  parallel (Chien search) and flips the message bits in error.

A codeword is flagged uncorrectable in two cases:

* S1 = 0 while S3 != 0;
* the number of roots found differs from the degree of sigma.

Three errors are then usually, but not always, detected. A BCH code with
t = 2 cannot guarantee this. Per-codeword `corrected` and `uncorrectable`
flags go with each record; `daq_top` counts them.

## Start-up

`init_ctrl` waits for RESET to go low and PLL_Locked to go high. It then
raises BUSY_O for 16 frame clocks, and then DONE_O. The datapath is held in
reset until DONE_O. `reset_sync` cuts this reset into the MGT and PCIe
domains: the reset asserts asynchronously and releases synchronously.

## Where this design departs from, or goes beyond, the source description

* **Header values.** The text gives `1010` (standard) and `0101` (wide bus),
  while the signal diagram prints `0110 or 1010`. The text is followed.
* **Scrambler.** The feedback rule, the seeds, and the scrambling of the
  wide-bus fields in extra 16-bit lanes are this design's own.
* **Codeword mapping.** The generator polynomial, the split of the 56-bit
  message over the 8 codewords, and the interleaving map are this design's
  own. The split agrees with the bit counts printed in the frame-generation
  flow.
* **Wide-bus frames** are neither encoded nor interleaved, because the
  source says they carry no error correction.
* **Frame aligner.** The 32-check confirmation count and the holding of lock
  until reset are this design's own. The source does not describe losing
  lock.
* **Gearbox control.** The control of both gearboxes, the RAM depths, the
  FIFO depth, the toggle hand-over and the record format are this design's
  own. The FIFO is written on the 120 MHz MGT clock, as described.
* **Not built.** The transceiver's serialiser/deserialiser, the PLL and
  jitter cleaner, the PCIe core and scatter-gather DMA, and the host
  software are off-the-shelf parts. Their signals are the ports of
  `daq_top`. The test-pattern generator is represented by the `tx_*` inputs.
* **Clock relationship.** The 40 and 120 MHz clocks are assumed
  phase-locked, as from one PLL. Verilator reports the frame reset driving
  both synchronous and asynchronous logic (`SYNCASYNCNET`); this is
  intended, because that reset feeds the reset synchronisers.

## Files

* `rtl/daq_pkg.sv`: widths, headers, the record type, GF(16) and BCH
  functions, and `IL_MAP`.
* Datapath: `scrambler`, `descrambler`, `bch_encoder`, `bch_decoder`,
  `interleaver`, `deinterleaver`.
* Clock crossing: `dp_ram`, `tx_gearbox`, `rx_gearbox`, `async_fifo`,
  `sync2`, `reset_sync`.
* Control: `frame_aligner`, `init_ctrl`.
* Chains: `daq_tx`, `daq_rx`, and the top `daq_top`.
* `tb/`: one self-checking testbench per block, `tb_<module>.sv`. They check
  against independent reference models in `tb_ref_pkg.sv`: a brute-force
  BCH table, a formula for the interleave position, and a reference sender.
  `tb/mgt_link_model.sv` is a behavioural model of serialiser, fibre and
  deserialiser. It applies a bit offset and injects bit errors.

`tb_daq_top` runs the whole design at its default sizes, over these phases:

1. start-up;
2. alignment from a 57-bit offset;
3. clean traffic with random mode switches;
4. single, double, 12-bit burst and uncorrectable error patterns;
5. a DMA stall long enough to overflow the 512-deep FIFO;
6. recovery.

It counts each mechanism and compares every record with what was sent.

## Simulating

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/daq_pkg.sv tb/tb_ref_pkg.sv tb/tb_daq_top.sv --top-module tb_daq_top
./obj_dir/Vtb_daq_top
```

Replace `daq_top` with any block name to run its own testbench. Each
testbench ends by printing `TB_RESULT checks=N failures=M`. The end-to-end
run takes a few seconds.
