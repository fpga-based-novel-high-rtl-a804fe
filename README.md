# Error-correcting 4.8 Gb/s DAQ link: SystemVerilog RTL

This is the digital part of a point-to-point data-acquisition link. A
detector-side FPGA sends sensor data over one optical fibre to a
receiver-side FPGA, which hands the data to a host PC over PCIe. The link
runs at 4.8 Gb/s: one 120-bit frame per cycle of a 40 MHz fabric clock,
sent as three 40-bit words per frame at 120 MHz. The link has to keep
working where radiation flips bits (single and multiple event upsets), so
it does not use 8b/10b line coding. Three cheaper mechanisms do that job
instead:

* a **scrambler**, for DC balance and enough transitions for clock recovery
  (it adds no bits);
* **eight BCH(15,7,2) codes in parallel**, correcting up to two wrong bits
  in each 15-bit codeword, so up to 16 bits per frame in a single clock;
* a **block interleaver**, which spreads a burst of neighbouring wrong bits
  over several codewords so that each codeword still gets at most two.

The receiver also has to find frame boundaries in a raw bit stream. A
**frame aligner** slips the received bit stream one bit at a time until it
sees the frame header regularly.

There are two frame formats. The first carries error-corrected data. The
second trades the protection for 2.2 times the payload:

| format                  | header | content                                               | user data rate  |
|-------------------------|--------|-------------------------------------------------------|-----------------|
| standard                | `1010` | 52 scrambled data bits + 64 BCH parity bits           | 52 × 40 MHz = 2.08 Gb/s |
| without FEC (raw)       | `0101` | 116 raw data bits                                     | 116 × 40 MHz = 4.64 Gb/s |

In both formats, 4 of the data bits are meant for slow control (commands
that configure the DAQ chain). This RTL treats them as ordinary data bits;
they are the top 4 data bits (`tx_data[51:48]` or `tx_data[115:112]`).

## Data path at a glance

```
 SENDER  (clk40)                                       (clk120)
 tx_data[51:0] -> scrambler -> bch_encoder -> interleaver -> tx_mux -> tx_word[39:0]
                  (1 clk)      hdr 1010       (0 clk)      RAM 8x120    to serialiser
                               (1 clk)                      120 -> 3x40
 tx_data[115:0], tx_fec=0 ---- hdr 0101, 2-clk delay ------^

 RECEIVER (clk120)                              (clk40)
 rx_word[39:0] -> frame_aligner -> rx_demux -> header class -> deinterleaver -> bch_decoder -> descrambler -> rx_*
 from deserialiser  slip / lock    RAM 8x120                   (0 clk)          (2 clk)        (1 clk)     -> pcie_fifo
                    wr_addr 0..23  3x40 -> 120       \-- raw (0101): 3-clk delay --------------------------/   (clk125 read)
```

`reset_ctrl` sequences start-up: it keeps the fabric in reset until RESET
is low and the PLL has locked, then holds BUSY_O high for 8 clocks, then
raises DONE_O. Synchronised copies of that reset drive the 120 MHz and
125 MHz domains.

The modules (one per file in `rtl/`):

| module          | role |
|-----------------|------|
| `daq_pkg`       | widths, header codes, polynomials, GF(16) arithmetic, the BCH encode function |
| `scrambler`, `descrambler` | 4 × 13-bit self-synchronising scrambler lanes |
| `bch_encoder`   | header + 52 bits → eight systematic BCH(15,7) codewords (120 bits) |
| `bch15_dec`     | one BCH(15,7,2) decoder: syndromes, Peterson locator, parallel Chien search |
| `bch_decoder`   | eight `bch15_dec` in parallel, plus the header/data unmapping |
| `interleaver`, `deinterleaver` | 4 × 15 block (de)interleaver on each 60-bit half; pure wiring |
| `tx_mux`        | dual-clock RAM: 120 bits at 40 MHz in, 40 bits at 120 MHz out |
| `frame_aligner` | bit-slip right shifter + header pattern search + RAM write address |
| `rx_demux`      | dual-clock RAM: 40 bits at 120 MHz in, 120 bits at 40 MHz out |
| `pcie_fifo`     | asynchronous FIFO, 117 × 16, written at 40 MHz and read at 125 MHz |
| `reset_ctrl`    | RESET / PLL_Locked → rst, BUSY_O, DONE_O |
| `sync2`         | two-flip-flop synchroniser (Gray pointers and resets) |
| `daq_top`       | the whole link, sender and receiver, with the two frame formats |

The transceiver (serialiser/deserialiser), the PLL, the PCIe core, the DMA
engine and the host software are vendor IP or software. They are not part
of this RTL; `daq_top` ends at their ports.

## The standard frame: where every bit goes

The least obvious part of the design is how 4 header bits and 52 data bits
pass through eight encoders and an interleaver so that the header shows up
as a contiguous `1010` at the top of the transmitted frame. The frame
aligner relies on that.

**Messages.** The 56 bits are cut into eight 7-bit messages `m0..m7`.
Messages 0–3 each carry one header bit as their most significant bit:

```
m[k] = { hdr[3-k], data[51-6k -: 6] }      k = 0..3   (hdr = 4'b1010)
m[k] = data[27-7(k-4) -: 7]                k = 4..7
```

**Codewords.** Each message is encoded systematically:
`c = { m, (m·x^8) mod g(x) }` with `g(x) = x^8+x^7+x^6+x^4+1` (`0x1D1`). This
is the standard generator of the binary double-error-correcting BCH code of
length 15. It is the product of the minimal polynomials of α and α³ in
GF(16) built on `p(x) = x^4+x+1`. Codeword `k` occupies frame bits
`119-15k downto 105-15k`, message first.

**Interleaving.** Each 60-bit half (codewords 0–3 and 4–7) is a 4 × 15
matrix, one codeword per row. Bits are written by rows and read by
columns. Counting from the half's MSB, bit `p = 15r + c` moves to
`q = 4c + r`. Column 0 holds the MSBs of the four codewords of the first
half, which are the four header bits. So the transmitted frame starts with
`1010`, and the 40-bit word carrying it is the first of the three words on
the fibre. Consecutive bits on the fibre cycle through the four codewords
of a half. A burst of up to 8 wrong bits inside a half therefore leaves at
most two errors in any codeword, which the code corrects. A burst that
crosses the boundary between the two halves hits the two halves separately.

**Without FEC.** The frame is `{4'b0101, tx_data[115:0]}`. It is neither
scrambled, encoded nor interleaved.

**Choosing the format on reception.** After the DEMUX the receiver looks at
the four top bits of each frame:

| top bits                         | action |
|----------------------------------|--------|
| within 1 bit of `1010`           | standard frame: deinterleave, decode, descramble |
| within 1 bit of `0101`           | raw frame: 116 bits passed through, 3 clocks of delay |
| anything else                    | dropped, `rx_bad_hdr` pulses |

The two headers differ in all four bits, so the two "within 1 bit" sets do
not overlap. A single flipped header bit is tolerated. In a standard frame,
the BCH decoder then corrects that bit like any other. After decoding,
`rx_fail` is raised if any codeword was uncorrectable or if the decoded
header is not `1010`.

**Keeping order across a mode switch.** The standard path takes 2 clocks on
the sender (scrambler + encoder) and 3 on the receiver (decoder +
descrambler). Raw frames are delayed by the same amounts. Frames therefore
leave the sender and the receiver in the order they were offered, even
when consecutive frames use different formats.

## BCH(15,7,2) decoding

Each `bch15_dec` is two pipeline stages:

1. **Syndromes and error locator.** `S1 = c(α)` and `S3 = c(α³)` are sums of
   fixed GF(16) constants selected by the received bits, i.e. XOR trees. For
   two errors at most, Peterson's direct solution gives the locator
   `σ(X) = X² + S1·X + (S3 + S1³)/S1`. `S1 = 0, S3 = 0` means no error.
   `S3 = S1³` means one error (`σ` has degree 1).
2. **Chien search, in parallel.** All 15 positions are tested at once. In
   this form of the locator the roots are the error locations themselves:
   the bit of weight `x^i` is wrong if `α^i` is a root of `σ`. Only the 7
   message bits are corrected, because the
   parity bits are not needed after decoding. All 15 positions are still
   counted: if the number of roots differs from the degree of `σ`, or if
   `S1 = 0` while `S3 ≠ 0`, more than two bits are wrong. The message is
   then passed on uncorrected and `fail` is set.

`bch_decoder` sums the corrections of the eight decoders into `rx_nerr`
(0–16) and ORs their fail flags. With three or more errors a BCH(15,7,2)
decoder can also land on a different valid codeword and report it as
corrected. The code cannot tell these cases apart; the fail flag is a
detection aid, not a guarantee.

## Scrambler

Each of the four 13-bit lanes is a multiplicative (self-synchronising)
scrambler with polynomial `1 + x + x³ + x⁴ + x¹³`. In time order, with the
lane MSB first, every output bit is the input bit XORed with the lane's
own output 1, 3, 4 and 13 bit-times earlier. A lane produces 13 bits per
clock, so its whole state is its previous output word. That word is also
the registered output, and the latency is one clock. The descrambler XORs
each received bit with the received bits 1, 3, 4 and 13 bit-times earlier.
It has no feedback, needs no seed and recovers after one word. A single
wrong bit reaching it becomes at most 5 wrong output bits, in the same and
the next word. The BCH decoder sits before the descrambler, so normally no
wrong bits reach it.

Limitation: like every multiplicative scrambler, a lane whose state is zero
keeps sending zeros while its input is zero. Long runs of all-zero data
right after reset therefore go out unscrambled. Only the header and the
parity of zero messages, which is also zero, break them up.

## MUX / DEMUX and the clock crossing

Both directions use a dual-port RAM of 8 frames × 120 bits with binary
frame pointers. Each pointer is passed to the other clock domain in Gray
code through two flip-flops.

* **`tx_mux`** writes one whole frame per 40 MHz cycle and reads it as three
  words at 120 MHz, the header word first. The reader starts once 2 frames
  are stored, which covers the synchroniser delay. Since
  40 MHz × 120 = 120 MHz × 40, it then never runs dry while the sender
  offers a frame every cycle. If it does run dry, it sends zero words with
  `tx_word_valid` low and pulses `tx_underflow`. A frame offered while the
  RAM is full is dropped and `tx_overflow` pulses.
* **`rx_demux`** is written one 40-bit word at a time, at the address the
  frame aligner gives (`3·frame + word`, 24 addresses). Writing word 2
  completes a frame and advances the write pointer. The 40 MHz side reads
  one complete 120-bit frame per cycle whenever one is waiting.

## Frame aligner and pattern search

The 40-bit words from the deserialiser start at an arbitrary bit of the
frame. The **right shifter** keeps the last two received words (80 bits) and
cuts out a 40-bit window that lies `slip` bits (0–39) later in the stream.
The **pattern search** is a three-state machine that looks at the top four
bits of the window:

* **SEARCH.** If they are neither `1010` nor `0101`, it increments `slip` (a
  bit slip) and `bs_count`, then examines the next word at the new offset.
  40 and 3 have no common factor, so within 120 words every bit offset is
  tried against every word of the frame. Lock is found within a few hundred
  120 MHz cycles.
* **VERIFY.** A header candidate was seen. The header must now appear again
  in every third word, 32 times in a row. One miss means a bit slip and a
  return to SEARCH. Random data mimics a header for a while, but not 32
  times in a row.
* **LOCKED.** `header_lock` rises and stays high until reset; the search
  does not resume. From the word holding the header on, every window is
  written to the DEMUX RAM (`wr_en`, `wr_addr` = 0, 1, 2, …, 23, 0, …), so
  each frame occupies three consecutive addresses.

`shift_word`, `pattern` and `bs_count` are brought out for observation
(`fa_shift_o`, `fa_pattern_o`, `bs_count`). `bs_count` is 6 bits wide so
that it can count all 40 slip positions.

Consequence of the permanent lock: if the link loses bit alignment after
lock, the receiver does not re-align by itself. Frames then arrive with bad
headers (`rx_bad_hdr`) until the next reset.

## Reset, start-up and the PCIe side

`reset_ctrl` samples RESET and PLL_Locked through a synchroniser. RESET
also acts directly, so the fabric is in reset from the first clock on.
After both inputs are released, BUSY_O is high for 8 fabric clocks, then
BUSY_O falls, DONE_O rises and the fabric reset is released. The 120 MHz
and 125 MHz domains get the same reset through `sync2` instances that
RESET itself also clears.

Every received frame is written into `pcie_fifo` as `{rx_fec, rx_data}`
(117 bits). The FIFO is written in the 40 MHz clock and read in the 125 MHz
PCIe clock through a show-ahead port (`pcie_rd_data` valid while
`pcie_empty` is low; `pcie_rd_en` pops it). The FIFO is the hand-off point
to a PCIe DMA engine. Reading 117 bits at 125 MHz is far faster than
writing them at 40 MHz.

## Top-level interface (`daq_top`)

| port | dir | clock | meaning |
|------|-----|-------|---------|
| `clk40`, `clk120`, `clk125` | in | – | fabric, transceiver and PCIe clocks |
| `reset`, `pll_locked` | in | async | RESET and PLL_Locked |
| `busy_o`, `done_o` | out | 40 | start-up status |
| `tx_valid`, `tx_fec`, `tx_data[115:0]` | in | 40 | one frame per cycle; `tx_fec`=1: standard, data in `[51:0]` |
| `tx_overflow` | out | 40 | sender RAM full, frame dropped |
| `tx_word[39:0]`, `tx_word_valid`, `tx_underflow` | out | 120 | to the serialiser |
| `rx_word[39:0]` | in | 120 | from the deserialiser |
| `header_lock_o`, `bs_count[5:0]`, `fa_shift_o[39:0]`, `fa_pattern_o[3:0]`, `rx_overflow` | out | 120 | frame aligner status |
| `rx_valid`, `rx_fec`, `rx_data[115:0]`, `rx_nerr[4:0]`, `rx_fail`, `rx_bad_hdr` | out | 40 | received frames (standard: data in `[51:0]`) |
| `pcie_rd_en` | in | 125 | pop one word |
| `pcie_rd_data[116:0]`, `pcie_empty`, `pcie_full` | out | 125/40 | FIFO towards PCIe |

Latency, not counting the channel: 2 fabric clocks on the sender before
`tx_mux`. On the receiver, 3 fabric clocks after `rx_demux` for standard
frames and 3 for raw frames. The two RAMs add a few clocks each for
synchronisation.

## Where this design departs from, or fills in, the source description

The chain, the widths (52/56/120/40 bits), the 40/120/125 MHz clocks, both
frame formats, the BCH(15,7,2) × 8 structure, the split into two 60-bit
interleaver blocks, the 32-header lock and the signal set
(BUSY_O, DONE_O, Header_LOCK_O, bit-slip counter, RAM write address) are as
originally described. The following were not specified and are choices
made here:

* the scrambler polynomial and type, the BCH generator polynomial, the
  GF(16) polynomial and the decoder algorithm (Peterson + parallel Chien);
* the bit mapping of header and data onto the eight codewords, and the
  4 × 15 interleaver matrix;
* the receiver's header classification with one-bit tolerance, the
  `rx_bad_hdr`, `rx_nerr` and `rx_fail` outputs, and the delays that keep
  frames in order when the mode changes;
* the RAM depths (8 frames), the tx start level (2 frames), the FIFO depth
  (16), and the 8-clock busy phase;
* the frame aligner checks every third word, slips one bit per failed word,
  and never leaves the locked state.

Points where the description is ambiguous or self-contradictory, and what
was done:

* **Header values.** The text gives `1010` for standard frames and `0101`
  for frames without FEC; some diagrams show `0110` or `1010` in other
  places. The text is followed.
* **Header position.** The description says the header position is never
  changed by interleaving. Here the header bits are spread over four
  codewords before interleaving, and the interleaver gathers them into the
  top four bits of the transmitted frame. The header is thus fixed where it
  matters, on the fibre, but not in the encoder output.
* **PCIe FIFO write clock.** The description says the FIFO is written at
  120 MHz. The decoded frames exist in the 40 MHz fabric domain, so the FIFO
  is written at 40 MHz. The read side runs at 125 MHz as described.
* **Fabric clock.** A timing diagram labels the fabric clock 156 MHz; the
  text says 40 MHz, which matches the 4.8 Gb/s arithmetic. 40 MHz is used.
* **Bit-slip counter width.** It is listed as 5 bits. 40 slip positions
  need 6, so it is 6 bits.
* **Resource figures.** The reported Kintex-7 utilisation can be compared
  on flip-flops only. The other numbers here are generic gate counts from
  synthesis, not LUTs.

  | block | reported flip-flops | here |
  |-------|---------------------|------|
  | scrambler | 52 | 53 (52 state/output + valid) |
  | descrambler | 104 | 105 |
  | frame aligner | 115 | 187 (two 40-bit input words, registered 40-bit window and RAM write word, pattern, counters) |
  | interleaver / deinterleaver | 44 / 201 | 0 / 0 (pure wiring) |

  The interleaver is also described as adding no clock latency, which is
  what the wiring-only version does. The reported decoder uses block RAM,
  probably for GF(16) tables. Here the syndromes, the division and the
  Chien search are all plain logic, so the decoder needs no memory.
* **Frame layout and PCIe set-up drawings.** These were not available. The
  frame mapping above is this design's own.
* **Not in this RTL:** the transceiver (SerDes and optical SFP), the PLL,
  the PCIe gen2 ×8 core, the scatter-gather DMA, the host capture program,
  the test-pattern generator used to drive the prototype, and the AES and
  RSA blocks mentioned in a resource comparison. The BER-versus-Eb/N0
  curves are a channel simulation, not something the RTL reproduces.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog timer:

| testbench | what it checks |
|-----------|----------------|
| `tb_scrambler` | against a bit-serial model, with random gaps in `in_valid`; one-clock latency; a zero run comes out with ones |
| `tb_descrambler` | recovers a serially scrambled stream; one wrong bit disturbs at most 5 output bits, then recovery |
| `tb_bch_encoder` | every codeword against an LFSR divider by `g(x)`; divisibility; header placement; latency |
| `tb_bch_decoder` | 0, 1 or 2 random errors per codeword are corrected and counted; 3 errors are never reported clean; one frame per clock |
| `tb_interleaver` | one-hot sweep of all 120 bits; header in bits 119..116; any 8 consecutive bits of a half hold ≤ 2 bits of a codeword |
| `tb_deinterleaver` | undoes an independently written interleaving; is a permutation |
| `tb_tx_mux` | overflow with the reader held; word order; underflow idle words; gap-free streaming at 40/120 MHz |
| `tb_rx_demux` | frames delivered whole and in order at the writer's pace; overflow with the reader held |
| `tb_frame_aligner` | lock from several random bit offsets, only after 32 confirmations and within a bound; written words and addresses; lock kept across a corrupted header |
| `tb_pcie_fifo` | full after 16 words with no loss; random reads and writes at 40/125 MHz against a queue model |
| `tb_reset_ctrl` | BUSY_O/DONE_O sequence and its exact length; restart after loss of PLL lock |
| `tb_daq_top` | the whole link at default parameters (below) |

`tb_daq_top` runs the full link over a bit-level channel model. The channel
drops a random 1–39 bits at the start, so the receiver sees arbitrary word
boundaries. The test sends 250 standard frames, then 100 raw frames, then
250 standard frames. From frame 150 on it injects errors:

* random bit errors, at most 2 per codeword;
* bursts of up to 8 bits;
* two frames with exactly 16 errors;
* every 50th frame, a codeword with 3 errors.

It checks:

* every frame after lock is received in order, in the right format and with
  the right data;
* frames arrive once per 40 MHz clock, without gaps, i.e. at 2.08 and
  4.64 Gb/s of user data;
* `rx_nerr` and `rx_fail` are right;
* the PCIe FIFO returns exactly the received frames.

It also counts each mechanism and requires every one to occur: bit slips,
lock, both formats, the mode switch, random and burst corrections,
detected uncorrectable words, PCIe read-out and BUSY_O.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -Irtl -Itb \
    rtl/daq_pkg.sv rtl/daq_top.sv tb/tb_daq_top.sv --top-module tb_daq_top -Mdir obj_daq_top
./obj_daq_top/Vtb_daq_top            # add +verilator+seed+N for other random runs
```

Replace `daq_top` by any module name for its unit testbench. All
testbenches pass. `tb_daq_top` has also been run with 20 random seeds and
randomised initial register values. The RTL is synthesisable; everything
is plain `always_ff`/`always_comb`, and the RAMs are inferred arrays.

### How far to trust it

* The coding, interleaving, scrambling, framing and clock-crossing logic
  is checked bit-exactly against independent models. The clocks have the
  40/120/125 MHz ratios but arbitrary phases.
* Not checked: behaviour with real transceiver IP, clock jitter,
  metastability, or loss of alignment after lock. After lock the aligner
  does not recover, by design.
* The BCH code detects many, but not all, 3-error patterns, as explained
  above.
* No timing closure or resource figures for a real FPGA come with this
  RTL.
