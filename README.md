# Compressed shaping: RTL of a source-sensitive shaping transmitter and receiver

Optical transceivers usually assume that the payload bits are uniform: a
scrambler forces half of them to ones, and a probabilistic-shaping (PS) encoder
then shapes the constellation for a uniform input. Real traffic is often far
from uniform. Idle frames are mostly zeros, and alarm indication signals are
mostly ones. *Compressed shaping* uses that redundancy instead of destroying it:

* only the **sign bits** are scrambled, since they alone set the DC level and
  carry clock information;
* the **amplitude bits** are *bit-flipped*: a word with more ones than zeros
  is inverted and a parity bit records this. They then go through a
  distribution matcher (DM) that sends frequent, zero-heavy words to
  low-energy amplitudes.

With a uniform source this is ordinary PS. With a skewed source the
transmitted symbols become lower in entropy and energy, which saves SNR and
power. The code is fixed-length to fixed-length, so the frame structure does
not change.

The RTL here is a complete datapath of the kind used for a hardware
demonstration, with a data clock and a separate control clock. It contains:

* a test source with a settable mark ratio;
* the bit-flip encoder and sign scrambler;
* a hierarchical, LUT-based DM encoder;
* an error insertion stage that stands in for the residual errors of an FEC;
* the DM decoder, bit-flip decoder and descrambler;
* monitors for the amplitude histogram and two bit error rates;
* a control-clock block that keeps the DM's lookup RAMs loaded and refreshes
  them against soft errors.

## 1. Data path at a glance

```
          640 bits/clk                    373            404
source_gen ──┬─ S_a[371:0] ─ bitflip_enc ─────── hidm_enc ────┬──── tx_ba (to FEC/mapper)
 (PRBS31,    │                                                │
  mask)      │                                            pmf_monitor
             │                                                │
             │                                   err_insert ──┴─ ber_monitor ("post-FEC")
             │                                        │ 404
             │                                    hidm_dec ── bitflip_dec ── S_a^ ┐
             │                                        373          372            ├─ rx_s, ber_monitor ("system")
             └─ S_s[639:372] ─ bit_scrambler ─ delay ─ tx_us ─ delay ─ descrambler ─ S_s^ ┘
                      268
```

| quantity | value |
|---|---|
| source bits per clock | 640 (20 groups of 32) |
| amplitude bits per codeword | 372, plus 1 flip parity bit, so 373 into the DM |
| DM output per codeword | 404 bits: 101 2D 64-QAM amplitudes (4 bits each) or 202 2D 16-QAM amplitudes (2 bits each) |
| sign bits per codeword | 268 (16-QAM) or 101 (64-QAM) |
| rate k/n | 372/101 (64-QAM) or 372/202 (16-QAM) |
| throughput | one codeword per clock: 640 or 473 source bits per clock, i.e. 153.6 or 113.5 Gb/s at 240 MHz and 57.6 or 42.6 Gb/s at 90 MHz |
| latency | 5 clocks from source word to `tx_*`, 11 clocks to `rx_*` |

The sign-bit counts follow from a rate-5/6 FEC:

* 64-QAM carries 606 coded bits per codeword. 101 are parity, which leaves
  202 − 101 = 101 sign bits for data.
* 16-QAM carries 808 coded bits. About 135 are parity, which leaves 268 sign
  bits.

Those 268 sign bits fill the 640-bit source word exactly. In 64-QAM mode the
top forces sign bits 101..267 to zero, so they carry nothing and do not count
in the system BER. The FEC itself, the QAM mapper and demapper and the channel
are not part of this RTL. `tx_us` and `tx_ba` are where an FEC encoder would
connect. In the receiver, the error insertion stage takes the place of FEC
decoding in a back-to-back test.

## 2. The test source and its mask window (`source_gen`, `mask_gen`, `prbs31_gen`)

Every source bit is one of three things: a constant 0, a PRBS31 bit
(x^31 + x^28 + 1), or a constant 1. A 2-bit *mask* code (0, 1 or 2) per
32-bit group makes the choice. The user sets `ratio`, and P_S(1) = ratio/40:

* for P_S(1) ≤ 0.5, Z = 20 − ratio groups are forced to 0 and the rest take
  PRBS bits;
* for P_S(1) > 0.5, Z = ratio − 20 groups are forced to 1 instead.

The forced groups form a window that moves by one group each clock. Group
*g* at clock index *c* is forced when (g + c) mod 20 ≥ 20 − Z.

Over 20 clocks every group is therefore forced equally often. Within one word,
exactly Z of the 20 groups are forced. For example, ratio = 16 (P_S(1) = 0.4)
forces 4 groups, so on average 20 % + 80 %/2 = 60 % of the bits are zeros.
The index c counts 0..19 and advances only when the source runs. The PRBS
slice is 640 bits wide and produced by an unrolled recurrence.

Two points are this design's own choices: the mapping from the ratio to Z,
and the direction in which the window moves.

## 3. Bit flipping (`bitflip_enc`, `bitflip_dec`)

The encoder counts the ones of the 372 amplitude bits. If there are more than
186, it inverts all of them and sets parity bit F[372] = 1. Otherwise the
parity bit is 0. A tie is not flipped.

This is what makes the scheme symmetric about P_S(1) = 0.5. After flipping,
the DM always sees at least as many zeros as ones, so a source of 90 % ones
is shaped as well as a source of 90 % zeros. The decoder inverts bits
[371:0] when bit 372 is set and drops the parity bit. Each side takes one
clock.

## 4. The hierarchical distribution matcher (`hidm_enc`, `hidm_dec`, `cs_pkg`)

This is the core of the design and the least obvious part.

### 4.1 Structure

A single LUT cannot map 373 bits to 404. A hierarchical DM splits the job
into many small LUTs arranged in layers. Each LUT in layer ℓ reads an address
made of two parts:

* r_ℓ bits handed down from its parent LUT in layer ℓ+1;
* s_ℓ bits taken directly from the input word F.

It outputs one r bit for each of its children in layer ℓ−1, or, in layer 1,
one amplitude word. The hierarchy used here has four layers:

| layer | LUTs | address | output | source bits used |
|---|---|---|---|---|
| 4 (top) | 1 | {s4} (1 bit) | 4 bits, one r bit per layer-3 LUT | F[372] |
| 3 | 4 | {r3, s3[1:0]} (3 bits) | 5 bits, one r bit per layer-2 LUT | F[371:364] |
| 2 | 20 | {r2, s2[2:0]} (4 bits) | 5 bits, one r bit per layer-1 LUT | F[363:304] |
| 1 | 101 | {r1, s1[2:0]} (4 bits); LUT 100 uses s1[3:0] and has no r bit | 4 bits = one 2D amplitude | F[303:0] |

The source bits add up as 1 + 4·2 + 20·3 + 100·3 + 4 = 373.

Parent–child wiring follows the index:

* layer-3 LUT j feeds layer-2 LUTs 5j..5j+4;
* layer-2 LUT j feeds layer-1 LUTs 5j..5j+4, through bit b of its output for
  child 5j+b.

Layer-1 LUT j reads F[3j+2:3j]. LUT 100 has no parent and reads F[303:300].
Amplitude j comes out at `a[4j+3:4j]`.

The flip parity bit F[372] enters at the top LUT. A decoding error there
reaches the most amplitudes, so it is the bit most worth protecting.

### 4.2 What goes into each LUT

The contents come from a single sorting rule. Sort the input (address) words
by **decreasing number of zeros**, breaking ties by increasing value. Sort the
output words by **increasing energy**, again breaking ties by value. Input
number *i* in this order maps to output number *i*.

Because input bits are mostly zeros after bit flipping, the most probable
addresses get the cheapest outputs. For layer 1 the energy is that of the
amplitude word:

* **64-QAM**: the 4 bits are {aQ[1:0], aI[1:0]} with amplitude A = 2a + 1 per
  axis, so the energy is A_I² + A_Q². In (A_I, A_Q) the outputs
  run (1,1); (3,1), (1,3); (3,3); (5,1), (1,5); … up to (7,7). Words of
  equal energy go in order of their 4-bit value.
* **16-QAM**: the 4 bits are two 2D amplitudes of 2 bits each. Each bit
  selects 1 (bit 0) or 3 (bit 1) on one axis. The energy therefore grows with
  the number of ones, and the map is the identity.

Upper layers output r bits rather than amplitudes. An r bit of 1 moves the
child to its higher-energy half, so the number of ones serves as the energy
there. Layer-2 and layer-3 LUTs map 16 or 8 addresses into 32 possible
outputs, so the encoder uses only the lightest 16 or 8 of them. The whole
hierarchy is thus an injective map from 373 bits to 404 bits.

All tables are computed in `cs_pkg` by constant functions (`enc_table`,
`dec_table`). No table files are needed. Only the layer-1 tables differ
between 64- and 16-QAM. All LUTs of one layer hold the same contents.

### 4.3 Decoding and error behaviour

The decoder runs the hierarchy upward, one layer per clock:

1. Each layer-1 inverse LUT turns an amplitude word back into {r1, s1}.
2. The r1 bits of five neighbouring LUTs form the address of the layer-2
   inverse LUT, which returns {r2, s2}.
3. The same happens for layer 3, and finally the top LUT returns F[372].
4. The s bits of each layer are delayed so that all 373 bits of F̂ leave
   together.

In 64-QAM every 4-bit amplitude word is a valid codeword. The upper layers,
however, receive words that the encoder never sends whenever an error has
corrupted an r bit below. Those entries decode to the **nearest codeword in
Hamming distance**, with ties going to the more probable input. An error in
one amplitude therefore mostly stays local, which keeps error multiplication
small:

* a single amplitude-bit error costs 1.4 source bits on average (5 at most);
* with sparse inserted errors, the system output has about 5.6 times as many
  bit errors as were inserted (error-insertion step of `tb_cs_top`);
* in the BER sweep of `tb_cs_workloads` (50 inserted errors per point, BER
  1e-4 and 1e-5, P_S(1) = 0.3/0.5/0.7), the system output BER is 0.9 to 29
  times the assumed post-FEC BER. The spread comes mostly from the few
  errors that hit the flip parity bit.

The bit flip multiplies errors further when the parity bit itself is hit. If
the decoded F[372] is wrong, all 372 bits are inverted. This is rare because
F[372] sits at the top of the tree.

### 4.4 Pipeline and memories

Each layer is one synchronous-read RAM stage (`dm_lut_ram`), so the encoder
and decoder each take 4 clocks and accept one codeword per clock. The source
bits of the lower layers pass through delay registers so that they meet their
parent's r bits.

Memory per direction:

* encoder: 101·16·4 + 20·16·5 + 4·8·5 + 2·4 = 8232 bits;
* decoder: 9424 bits.

### 4.5 How good the shaping is

The testbench measures the entropy H(A_c) of the 2D amplitude histogram for
64-QAM:

| P_S(1) | 0.1 | 0.3 | 0.5 | 0.7 | 0.9 |
|---|---|---|---|---|---|
| H(A_c), bits | 1.47 | 3.11 | 3.83 | 3.12 | 1.51 |

For 16-QAM it measures 1.95 at P_S(1) = 0.5 and 1.32 at 0.2.

The entropy falls as the source leaves 0.5, symmetrically, as intended. At
P_S(1) = 0.5 the rate loss H(A_c) − k/n is 3.83 − 3.68 = 0.15 bit for 64-QAM
and 1.95 − 1.84 = 0.11 bit for 16-QAM. The hierarchy of the original FPGA
demonstration reaches 0.064 and 0.034 bit. The layer sizes in 4.1 were chosen
only to hit 373 → 404 bits exactly with small LUTs. A layout with wider
upper-layer LUTs would shape better. Only `cs_pkg` and the address wiring in
`hidm_enc`/`hidm_dec` depend on it.

## 5. Keeping the LUTs alive (`dm_ctrl`, `dm_lut_ram`)

LUT RAM is vulnerable to radiation-induced soft errors. `dm_ctrl` therefore
works as follows:

* It runs on its own control clock `cclk`, so that its wide selection logic
  does not limit the data clock.
* It holds a register ("golden") copy of every encoder and decoder table. The
  copy is loaded with the defaults at reset, and with the other modulation's
  defaults whenever `qam16` changes.
* It sweeps through the tables over and over, rewriting the RAMs. One step
  writes one entry, layer by layer and address by address (4 × 32 steps per
  sweep). It is broadcast to all LUTs of that layer in both the encoder and
  the decoder.
* After a reset or a modulation change, the first sweep runs at full speed and
  then raises `ready`. After that there is one step every `REFRESH_DIV`
  (default 16) control clocks.

An upset RAM bit therefore survives for at most one sweep. The testbench
plants an upset in an encoder RAM and sees it repaired.

`cfg_we/cfg_addr/cfg_data` rewrites one layer-1 entry of the golden copy:
input `cfg_addr` maps to output `cfg_data`. It updates the encoder table and
the inverse decoder table together. The next sweep carries the change into
the RAMs, so the mapping can be changed in the field without larger RAMs. The
caller must keep layer 1 a permutation, for example by swapping two entries as
the testbench does. Stop traffic while changing it.

`ready` crosses into the data domain through two flip-flops, and the source
runs only while it is set. This is the start-up stall: no codeword is
produced from RAMs that have not been loaded.

## 6. Sign bits (`bit_scrambler`)

The scrambler is additive. It XORs the sign bits with the next 268 bits of a
PRBS31 and advances only on valid words. The descrambler is the same module
with the same seed. It sees the scrambled bits after a delay line that matches
the amplitude path, so both halves of the recovered source leave on the same
clock. An assertion in `cs_top` checks this.

## 7. Error insertion and monitors (`err_insert`, `ber_monitor`, `pmf_monitor`)

`err_insert` models the residual errors after an FEC as sparse,
evenly spaced single-bit errors on the 404 amplitude bits. One bit is flipped
every `err_interval` bits (BER = 1/`err_interval`), and the counter carries
over across words. Sparse errors are the worst case for a hierarchical DM at a
given BER. `err_interval` is 64 bits wide, so the full range down to a BER of
1e-15 and below can be set. It must be at least 404, and an assertion checks
this.

`ber_monitor` is used twice:

* between the DM encoder output and the errored word, giving the *assumed
  post-FEC BER*;
* between the source and the recovered source, giving the *system output
  BER*.

It counts bit errors, compared bits and errored words. Its `nbits` input
gives the number of bits in use per word: 640 in 16-QAM and 473 in 64-QAM for
the system monitor.

`pmf_monitor` counts each 2D amplitude label per clock into 16 bins: 4-bit
labels in 64-QAM, and bins 0..3 for the 2-bit labels in 16-QAM. The PMF and
its entropy follow directly from the bins.

## 8. Top-level interface (`cs_top`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst | in | 1 | data clock, synchronous active-high reset |
| cclk, crst | in | 1 | control clock and its reset |
| src_en | in | 1 | run the source (also gated by `lut_ready`) |
| ratio | in | 6 | P_S(1) = ratio/40, 0..40 |
| qam16 | in | 1 | 1 = 16-QAM, 0 = 64-QAM (reloads the LUTs) |
| err_en, err_interval | in | 1, 64 | error insertion on; bits between errors |
| mon_clr | in | 1 | clear all monitors |
| cfg_we, cfg_addr, cfg_data | in | 1, 4, 4 | layer-1 table write (cclk domain) |
| tx_valid, tx_ba, tx_us | out | 1, 404, 268 | shaped amplitude bits and scrambled sign bits |
| rx_valid, rx_s | out | 1, 640 | recovered source {S_s, S_a} |
| lut_ready, refresh_sweeps | out | 1, 32 | LUTs loaded; completed refresh sweeps |
| pmf_hist | out | 16×48 | amplitude histogram |
| fec_errs, fec_bits | out | 64 each | assumed post-FEC BER counters |
| sys_errs, sys_bits, sys_err_words | out | 64 each | system output BER counters |
| ins_errs | out | 64 | inserted errors |

`ratio`, `qam16`, `err_en` and `err_interval` are quasi-static. Change them
with the source stopped (`src_en` = 0) and the pipeline drained, which takes
about 12 clocks.

## 9. Where this design departs from the original description, and what it lacks

* **Layer structure of the DM** (section 4.1) is this design's own. The
  original gives only the 373 → 404 totals. It shapes somewhat worse, as
  described in 4.5.
* **Inverse-LUT contents for invalid words** use nearest-codeword decoding,
  which is this design's own choice.
* **16-QAM amplitude labelling** (one bit per axis) and the **64-QAM
  labelling** {aQ, aI} are this design's own.
* **Mask window**: only the P_S(1) = 0.4 example is given in the original.
  The general rule (Z groups, window moving one group per clock) and the
  1/40 step are this design's own.
* **Sign-bit counts** of 268 and 101 are derived from a rate-5/6 FEC and the
  stated throughputs, not given directly.
* **PRBS polynomial and seeds** are this design's own (standard PRBS31).
* **Error insertion** places errors at a fixed spacing rather than at random.
* **Sign scrambling in the demonstrator**: the functional diagram of the
  original hardware shows no sign-bit path. The scrambler and descrambler
  here come from the system-level description of the scheme. They run next to
  the amplitude path so that the system BER covers the whole source word.
* **Control blocks**: the original hardware has separate transmit, receive and
  shared control blocks. Here a single `dm_ctrl` holds the tables of both
  sides and writes them over two broadcast buses.
* **Refresh schedule**, the cfg port and reloading on a modulation change are
  this design's own.
* **Error multiplication**: the system-to-post-FEC BER ratio measured here
  is 0.9 to 29, typically 2 to 10. The original hardware showed about 10.
* **Not built**: the FEC encoder and decoder, the QAM mapper and demapper,
  the channel, and clock generation. The simulation-only studies of 8- to
  128-QAM with other codeword lengths need different DM sizes and are not
  covered. Only the 404-bit DM with 64- and 16-QAM contents exists.

## 10. Simulating it

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Some testbenches share
the reference model `tb/tb_cs_model_pkg.sv`. It is an independent
re-implementation of the table rule (insertion sort instead of rank counting)
and of the DM encoder and decoder bit assignment. `tb_cs_top` runs the whole
chip at its full default sizes. It checks:

* every transmitted word and every received word against the model;
* the start-up stall;
* the entropy falling symmetrically at five mark ratios;
* bounded error multiplication under error insertion;
* repair of a planted soft error;
* a switch to 16-QAM, including the 640-bit system word;
* a reprogrammed layer-1 table.

`tb_cs_workloads` repeats the two measurements of the hardware demonstration
on the full chip:

* H(A_c) for P_S(1) = 0.05, 0.15, …, 0.95 in both modulations, checked for a
  peak at 0.5, monotonic fall and symmetry, with its own histogram checked
  against the PMF monitor. 64-QAM runs from 0.90 to 3.75 bits and 16-QAM from
  0.51 to 1.92 bits.
* The BER sweep above, with its own system error count checked against the
  system BER monitor.

With Verilator 5, from the directory that holds `rtl/` and `tb/` (the two
packages first; `-y` finds the modules):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cs_pkg.sv tb/tb_cs_model_pkg.sv tb/tb_cs_top.sv --top-module tb_cs_top -o sim
./obj_dir/sim
```

The end-to-end run builds in about 15 s and runs in under a second. Substitute another `tb_<module>` for the
block tests. `tb_dm_ctrl` overrides `REFRESH_DIV` to 4 to keep its run short.
All other testbenches use the defaults.

## 11. Changing it

* **Another hierarchy**: change the layer constants and `enc_aw`/`enc_dw` in
  `cs_pkg`, and the address wiring in the `generate` loops of `hidm_enc` and
  `hidm_dec`. Keep the decoder's s-bit delay lines in step with the number of
  layers. The table functions adapt on their own as long as every LUT has at
  most 5 address and data bits (the write bus and `lut_table_t` are 5 bits
  wide).
* **Another labelling or constellation**: change `amp_energy` in `cs_pkg` and
  the matching `energy` in the testbench model.
* **Refresh rate**: `REFRESH_DIV` on `cs_top`.
