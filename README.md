# LuLIS uplink: distributed MIMO processing in a chain of antenna panels

A base station with 256 antennas normally has to move every antenna's samples to
one central processor. This design does not. The antennas sit on J = 16 panels of
M = 16 antennas. Each panel turns its own 16 streams into two small per-subcarrier
results, and the panels are daisy-chained so that each adds its results to the
running total from the panel before it:

    z = sum_j H_j^H y_j        (MRC vector, K values per subcarrier)
    G = sum_j H_j^H H_j        (Gram matrix, K x K per subcarrier)

Here y_j is what panel j's antennas received and H_j is its channel estimate
towards the K = 4 single-antenna users. Both sums depend on K only, not on the
number of antennas. So every link in the chain carries the same load, wherever it
sits, and every middle panel is identical. The last panel (the *central* panel)
holds the totals. A processor can use z directly (maximum-ratio combining), or
solve G x = z for zero-forcing. That solve is software, outside this RTL.

The RTL covers the digital logic of one panel, the whole chain, and the user
board that sends the test frames. The RF converters, the 25G Ethernet MAC/PHY,
the DMA engine, the processor system and the clock hardware are vendor parts or
analog parts. They are ports of the top.

## Air interface the logic assumes

| quantity | value | source |
|---|---|---|
| baseband rate | 61.44 MS/s | paper |
| fabric clock | 153.6 MHz (one sample every 2.5 clocks) | paper |
| FFT size / cyclic prefix | 1024 / 144 samples | paper |
| frame | 7 symbols: UL pilot, UL data, UL data, guard, DL pilot, DL data, guard | paper |
| users K | 4 | paper |
| active subcarriers | 792 (66 blocks of 12), centred, DC bin empty | own choice |
| sample and result format | 16-bit I and 16-bit Q, two's complement | own choice |

**Pilots (own choice).** In the pilot symbol, subcarrier s carries a QPSK pilot
of user s mod 4 only, so the four users' pilots are interleaved in frequency. The
sign pattern is `h = s * 40503 mod 2^16`: the real part is negative if h[15] is
set, the imaginary part if h[12] is set (`lulis_pkg::pilot_bits`). The four
subcarriers 4g .. 4g+3 make up group g. They share one channel estimate: column k
of H_g comes from subcarrier 4g+k. Because a pilot is ±1 ± j, the estimate
y·conj(p)/2 needs only additions.

## Data path of one panel

```
 16 x ADC ──► timing_sync_ofdm ─┐     (x16: CP removal, FFT, reorder, guard removal)
 sync_in ─► sync_delay ─► frame_timer (shared tag for all 16 chains) ──► tdd_tx
                                ▼
                         local_ce_mrc  ── local beats ──► matrix_aggregate ──► fh_packetizer ──► to next panel
 from previous panel ─► fh_depacketizer ── upstream beats ──┘          (central: ──► rate_reduction ──► DMA)
```

Everything moves as *beats*. A beat is one subcarrier's K complex values with a
tag (frame number, symbol index, subcarrier index): 128 data bits plus 29 tag
bits (`lulis_pkg::beat_t`). In a data symbol, beat s holds z(s). In the pilot
symbol, beat 4g+r holds column r of G_g. So a frame gives 3 x 792 beats.

### Timing: sync_delay and frame_timer

The user board raises a GPIO pulse each time it sends sample 0 of a frame. Panel 0
receives it. Every panel resynchronises it with two flops, passes it on to the next
panel, and starts a software-set down-counter (`cfg.sync_delay`). When the counter
runs out, it raises `frame_start`. This is the only timing synchronisation: there
is no preamble correlator. Software has to set the delay so that frame_start lands
on the first sample of the frame, as seen through that panel's air and converter
delay. In the testbench the air delay is 250 clocks, and each hop of the sync
chain adds 2 clocks, so panel j uses `250 - 4 - 2j`.

`frame_timer` counts samples (paced by ADC 0's strobe), symbols and frames. For
each sample it gives combinationally `active`, `keep` (outside the cyclic prefix),
`first` (first FFT sample), `sym` and `frame`. All 16 chains share one timer.
`tdd_tx` is high during the two downlink symbols. That choice is mine: the uplink
datapath ignores those symbols, and the guard symbols around them leave time to
switch.

### One receive chain: timing_sync_ofdm

- **CP removal:** samples with `keep = 0` are not fed to the FFT.
- **FFT (`fft_r2sdf`, `fft_sdf_stage`):** radix-2 single-path delay feedback,
  decimation in frequency, one sample per clock at most. It has ten stages with
  delay lines of 512 down to 1 words, and the word width grows by one bit per
  stage. Twiddles are Q15 values that `$cos`/`$sin` compute at elaboration; the
  multiply by twiddle index 0 is skipped. Each stage rounds and saturates. The
  output is X/32, in 16 bits. A block's bins come out in bit-reversed order while
  the next block's samples go in. So bin position p of block b leaves together with
  input sample N-1+p of block b+1. The chain therefore delivers a symbol only after
  the next symbol's window has arrived, about 5,850 clocks after the symbol's CP
  began. The paper measured 6,357 clocks for its version of this block.
- **Reorder and guard removal (`subcarrier_demap`):** a ping-pong buffer of
  2 x 1024 words collects one block in bit-reversed order. When the block is
  complete, the buffer reads it out in subcarrier order, 792 words at one per
  clock: subcarrier s < 396 is bin 1024-396+s, and the rest are bins 1..396. The
  frame/symbol tag of each block travels through a four-entry queue beside the
  FFT.

### local_ce_mrc

This block joins the 16 chain outputs into one vector y. If the chains' valids or
tags are not all equal, it counts a misalignment. Then:

- **Pilot symbol.** Estimate `h[m][k] = y[m]·conj(p(s))/2` and collect the four
  users of group g. The finished group goes into a 198-word channel memory. At the
  same time a sequencer sends the group's four Gram columns, one per clock.
- **Data symbols.** Read H_g for g = s/4 and form z = H_g^H y.

Both products run on one array of 4 x 16 complex multipliers. The array computes
`out[l] = sum_m conj(A[m][l])·b[m]`, with b either y or one column of H_g. Sums are
exact, in 37 bits. The result is rounded, shifted right by `cfg.out_shift` and
saturated to 16 bits. The shift is how software trades range against resolution
as the number of panels grows: the testbenches use 12 for 16 antennas and 14 for
256. The latency is 4 clocks; the paper measured 21.

### matrix_aggregate: where the chain adds up

All panels start a frame within a few clocks of each other. So a panel's own beats
are always ready long before the matching running sums arrive from upstream,
because those have crossed j fronthaul hops. The local beats therefore wait in a
FIFO of 4096 beats (first word fall-through). Each upstream beat is added to the
FIFO head, element by element with saturation, and goes out one clock later on
an AXI4-Stream register.

- Beats are paired by arrival order. If the two tags differ, the panel counts a
  mismatch and still produces the sum.
- Local input cannot stall: the chains are real-time. If the FIFO is full, the
  beat is lost and an overflow is counted.
- A stall on the output backs up into the upstream link, and from there into the
  FIFO.
- The first panel (`cfg.is_first`) has no upstream. Its local beats go straight
  out.

At 256 antennas the central panel's FIFO peaked at 1,584 beats in simulation,
against 4,096 provided.

### Fronthaul packets: fh_packetizer and fh_depacketizer

Each symbol's 792 beats leave as 12 packets of 66 beats. Each packet has one
128-bit header word in front and tlast on its last word. The header layout is:

| bits | field |
|---|---|
| 127:112 | magic `16'h4C55` |
| 111:96 | frame |
| 95:88 | symbol |
| 87:72 | first subcarrier |
| 71:64 | payload words |
| 63:56 | sending panel |

The receiver does three things:

- It checks the magic. A packet with a bad magic is dropped up to its tlast and
  counted.
- It rebuilds each beat's tag from the header plus the word's position.
- It counts length errors.

The packetizer counts input that breaks subcarrier order. At 153.6 MHz the 128-bit
stream can move 19.7 Gb/s, and the 25G MAC sits outside. The load this format puts
on a link is 2,412 words of 128 bits per 133 µs frame, 2.32 Gb/s. The paper quotes
1.73 Gb/s. That figure equals 792 subcarriers x 4 users x 2 data symbols x 32
bits over 7 x 16.67 µs: the MRC vectors alone, without the Gram matrix, the
headers or the cyclic prefix. The paper does not give its subcarrier count, so this
match is only a reconstruction.

### Central panel: rate_reduction

The last panel feeds a DMA, which cannot take every frame. `rate_reduction` passes
one frame in `cfg.keep_every` (the first frame after reset is kept) and drops the
rest. It finds frame boundaries from the tags: a frame starts at the pilot symbol,
subcarrier 0, and ends at the second data symbol, subcarrier 791, where tlast is
set. A passed frame is 3 x 792 words: 792 Gram columns, then 792 z vectors of each
data symbol.

### User board: ue_tx

Four memories, one per user, each hold one frame of 8,176 samples. Software writes
them, one address for all users at a time. With `run` set, they play in a loop, one
sample each time the DAC asks (`dac_ready`). When sample 0 is taken, `sync_out`
goes high for 16 clocks. That is the GPIO pulse that starts the panels.

## Top level: lulis_testbed

`lulis_testbed` holds one `ue_tx` and J `panel_node`s. Panel J-1 is central; panel
0 is wired as first through `cfg`. The sync chain runs from the user board
through the panels in order. Everything vendor-made is a port:

- the ADC streams of every panel (`adc_valid/adc_data[J][M]`);
- each panel's Ethernet transmit and receive streams (`fh_tx_*`, `fh_rx_*`). The
  board, or a testbench, connects `fh_tx[j]` to `fh_rx[j+1]` through a MAC;
- the DMA stream (`dma_*`);
- the software registers (`cfg[J]`, status counters `status[J]`);
- the TDD switch lines (`tdd_tx`).

Everything runs on one clock and one active-low reset. In the testbed the boards
share a 10 MHz reference, so one clock is a fair model; cables become wires.

## Verification

Every block has its own self-checking testbench in `tb/`, each against an
independent model:

- the FFT against a floating-point DFT;
- the chain against frames built by an inverse DFT;
- channel estimation and MRC against exact integer arithmetic;
- the packet blocks and the FIFO against queues.

The latencies noted above are checked cycle for cycle.

`tb_lulis_testbed` runs the full uplink at J = 4 and M = 4. `tb_lulis_full` runs
the same test at the default size, 16 x 16 antennas. The test:

- builds four users' frames (interleaved pilots, two random QPSK data symbols,
  empty downlink) with an inverse DFT;
- sends them through a random flat channel and a 100-sample air delay;
- links the panels with `eth_link_model`, a behavioural Ethernet link with 350
  clocks of latency, random back-pressure and one injected bad packet;
- applies random back-pressure to the DMA;
- plays three frames with keep_every = 2.

Frames 0 and 2 must reach the DMA. Every beat is compared with floating-point sums
over all 256 antennas, with a tolerance of 2 + J LSB plus 2 %; the largest error
seen was 15 LSB. The test also counts each mechanism and fails if one never
happened:

- Gram and MRC beats;
- passed and dropped frames;
- link and DMA stalls;
- FIFO waiting;
- the bad packet being dropped;
- TDD switching in every panel.

It also checks that the misalignment, overflow, mismatch, sequence, length and
missed-sync counters stay at zero.

To run a test with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/lulis_pkg.sv tb/tb_lulis_testbed.sv --top-module tb_lulis_testbed
./obj_dir/Vtb_lulis_testbed
```

Building the full-size test takes several minutes because it holds 256 FFTs. It
then simulates three frames in under 20 seconds.

## Where this departs from the paper, and what to trust

- Only the uplink is built. The downlink symbols exist only in the frame timing,
  which drives the TDD switch.
- These parts are this design's own choices: the pilot layout, the estimator, the
  number of subcarriers, all word widths and scalings, the beat and packet
  formats, and the aggregation FIFO. Only the equations, the block order and the
  numerology come from the paper.
- Latency differs from the paper's table: about 5,850 clocks for the chain (paper
  6,357) and 4 for local CE and MRC (paper 21). The Ethernet hop latency lies in
  the MAC, outside the RTL.
- Zero-forcing, visualisation and configuration are software. The RTL delivers z
  and G to the DMA port.
- The 16-bit results saturate if `out_shift` is set too small for the number of
  antennas and the signal level. Software must choose it.
- Lint warnings that remain are width extensions and unused bits in the tag and
  status structs. One more is the reset net feeding both the asynchronous-reset
  flops and the synchronous checks of the assertions.
