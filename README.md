# LS-code BPSK transmitter for a 2x2 CDM MIMO channel sounder

A MIMO channel sounder measures the channel between every transmit and every
receive antenna. In a code-division (CDM) sounder all transmit antennas send at
the same time, each with its own code. The receiver then separates the paths by
correlating against each code. This works only if every code correlates to zero
with delayed copies of itself and of the other codes, at least over the delays
the channel can produce.

Loosely synchronous (LS) codes do this inside a window around zero delay,
called the interference-free window (IFW). This RTL is the transmitter side of
such a sounder. It has two antennas (TX1 and TX2). Each one sends one LS code
of 8190 chips at 7.68 Mchip/s, as a BPSK signal that is pulse-shaped and
up-converted digitally. The outputs are two 16-bit DAC sample streams at
30.72 MHz.

The design follows a published FPGA implementation of such a transmitter. The
block structure, the code length, the rates, the up-sampling factor, the
filter coefficients, the 16-bit output and the `resetn`/`data_out_scaled`
names come from that description. Several details were not given there and
are this design's own choices. They are listed in
[Departures and choices](#departures-and-choices).

## The LS codes

### Layout of one code

An LS code is built from a Golay complementary pair (C, S). C and S are two
±1 sequences of length N. Their aperiodic autocorrelations add to zero at
every non-zero shift. The LS code puts a run of zeros in front of each half:

```
 | ZEROS (Z) |     C (N)     | ZEROS (Z) |     S (N)     |      length 2(N+Z)
```

The zeros keep C from overlapping S at small shifts. For any shift smaller
than Z+1 chips, the correlation of the whole code is therefore just
R_CC + R_SS. By the Golay property this sum is zero at every shift except
zero. The defaults are N = 2048 and Z = 2047, which gives a code of 8190 chips
and a peak autocorrelation of 2N = 4096.

The published design gives only the 8190-chip length and an IFW of "about
4000 chips". The split into N = 2048 and Z = 2047 is inferred from its
correlation plots. It gives an aperiodic IFW of |τ| ≤ 2047, which is
4095 chips wide. With continuous (periodic) transmission the zero zone of
these particular codes is wider still: |τ| ≤ 3071.

### The Golay pair

The pair comes from the usual doubling recursion, starting with a = b = (+1):

    a' = a | b        b' = a | -b         (| = concatenation)

After m = 11 steps there are 2048 chips per half. The RTL does not store the
pair as a table. It computes element n directly from the bits of n
(`ls_tx_pkg::golay_chip`), going from the most significant bit down. A 0 bit
means "first half", and the first half of both a and b is the previous a. A 1
bit means "second half": for a that is the previous b, and for b it is the
negated previous b. The sign flips each time a 1 bit is met while in b.

### Two codes from one node

TX1 sends code 0, which uses (C, S) = (a, b). TX2 sends code 1, which uses the
complementary mate of that pair, (C, S) = (reverse(b), −reverse(a)). A Golay
pair and its mate have an aperiodic cross-correlation sum of zero at every
shift. In the LS code tree they are the two codes of one node, the closest
pair the tree offers. Their cross-correlation is zero over the same window as
the autocorrelation side lobes.

This has one operational consequence: the two codes must stay chip-aligned.
Both channels leave reset together and share one chip strobe, and the top
level asserts that they do.

### Delay range

One chip lasts 4 clocks, which is 130.2 ns at 30.72 MHz. An echo delayed by
1 to 2047 chips (0.13 µs to 266 µs) leaves no residue in either correlation.
The IFW is 4095 chips, or 533 µs, counting both signs of delay. The code
repeats every 32,760 clocks (1.066 ms).

## Signal chain

```
            +--> upsampler x4 --> rrc_filter --> (x cos) --+
ls_code_gen |                                              (+) --> sat, <<6 --> 16-bit DAC sample
            +--> upsampler x4 --> rrc_filter --> (x sin) --+
                      |                             nco (fs/4)
                      +-- chip_en (every 4th clock) --> ls_code_gen
```

`bpsk_tx` is one such channel. `ls_tx_top` holds two of them, with code 0
and code 1. Everything runs on one clock at the DAC rate, 30.72 MHz, and uses
a synchronous active-low reset.

| module | role |
|---|---|
| `ls_tx_pkg` | chip type (2-bit, 00 = 0, 01 = +1, 11 = −1), sizes, RRC coefficients, Golay/LS functions |
| `ls_code_rom` | 8190 × 2-bit ROM holding one code; filled at initialisation from `ls_chip()`; registered read with synchronous clear |
| `ls_code_gen` | 13-bit address counter with clock enable and wrap at 8189, the ROM, and a `code_start` marker |
| `upsampler` | modulo-4 phase counter; makes `chip_en` and passes each chip followed by three zeros |
| `rrc_filter` | 11-tap FIR: register chain, constant multipliers, adder tree, output register |
| `nco` | 2-bit phase accumulator; at fs/4 it gives cos, sin ∈ {+1, 0, −1} exactly |
| `duc` | I·cos + Q·sin, shift left by 6, saturate to 16 bits |
| `bpsk_tx` | one channel, as drawn above |
| `ls_tx_top` | two channels and the 32-bit DAC word |

### Timing of one channel

Count clock edges t from reset release, so that t = 0 is the first edge with
`resetn` high. Then:

* `chip_en` is high before edges 3, 7, 11, …. Edge 4k+3 loads chip k onto
  `chip`.
* At edge 4k+4 the up-sampler output carries chip k. It is zero at every
  other edge.
* The RRC output after edge t is Σₖ h[k]·up[t−2−k]: one cycle in the tap
  chain, one in the output register.
* The NCO phase after edge t is (t+1) mod 4.
* The DAC sample after edge t is sat16((y·cos + y·sin)·64), where y is the RRC
  output and the carrier phase after edge t−1.
* A chip therefore first reaches `data_out_scaled` 4 edges after the strobe
  that loads it.

### RRC filter

The 11 coefficients of the published filter are printed as 0.03808, 0.06738,
0.09766, 0.124, 0.1426, 0.1484, … (symmetric). They are exactly
39, 69, 100, 127, 146, 152, 146, 127, 100, 69 and 39 divided by 1024, so the
filter works on integers. Its input is one 2-bit chip per tap, and its output
is 12 bits in units of 2⁻¹⁰: the sum of |h| is 1115, which fits.

Because the input is zero-stuffed, at most three taps are non-zero at any time
(taps 1, 5 and 9 give 69 + 152 + 69 = 290). That is why the DUC can shift by 6
(290·64 = 18,560) and still leave about 5 dB of headroom below 16-bit full
scale.

### Carrier frequency

The DAC runs at 30.72 MHz, and the RF board expects a 70 MHz IF through a
16 MHz SAW filter. The digital carrier sits at 7.68 MHz = fs/4. Its DAC image
at 2·30.72 + 7.68 = 69.12 MHz is the one the SAW filter passes. At fs/4 the
carrier values are exactly 1, 0, −1 and 0, so the NCO needs no sine table and
the mixers need no multipliers.

## Top-level interface (`ls_tx_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | 30.72 MHz sample clock |
| `resetn` | in | 1 | synchronous, active low |
| `tx1_data_out_scaled` | out | 16 | DAC A sample, TX1, code 0, two's complement |
| `tx2_data_out_scaled` | out | 16 | DAC B sample, TX2, code 1 |
| `dac_word` | out | 32 | `{DAC B, DAC A}` for a 32-bit DAC channel |
| `chip_en` | out | 1 | chip strobe (a chip is loaded on this edge) |
| `tx1_chip`, `tx2_chip` | out | 2 | current chips |
| `code_start` | out | 1 | high while chip 0 of the code is current |

The DAC converters, the RF up-converter (70 MHz → 2.45 GHz), the board's
control firmware and the host software lie outside this RTL.

## Departures and choices

These points follow the original description:

* The block diagram.
* The 8190-chip code in a lookup ROM, read by an address counter with clock
  enable and synchronous clear, with a registered output.
* Up-sampling by 4.
* The 11 RRC coefficients.
* An NCO, two mixers and an adder.
* A 16-bit output named `data_out_scaled`.
* Two sub-channels under one top with inputs `clk` and `resetn`.

These points are this design's own:

* **Code layout N = 2048, Z = 2047, and the code pair.** The original's codes
  are not published. The layout is inferred from the 8190 length and the
  correlation plots. The pair is a Golay pair and its mate.
* **ROM size.** The original's schematics show a 4096 × 2 ROM with a 12-bit
  counter for one channel and a 14-bit address for the other. Neither holds an
  8190-chip code at 4096 entries, and they disagree with each other. This
  design uses 8190 × 2 with a 13-bit counter.
* **ROM word.** The text says the code was converted to a 16-bit format, but
  the schematics show 2-bit ROM words. This design uses 2-bit words.
* **RRC tap count and rates.** The text speaks of a "32 order" filter, but the
  printed filter has 11 taps. This design uses 11. The text gives the filter's
  sampling rate as 7.68 MHz, but that is the chip rate. Here the filter runs
  after the up-sampler, at 30.72 MHz. The text gives the roll-off as 0.25 in
  one place and 0.2 in another. The logic takes its coefficients from the
  printed filter and is not affected.
* **Up-sampler.** It inserts zeros rather than repeating samples.
* **Q branch.** It carries the same code as I, because the diagram splits the
  generator output into both branches. The I/Q filter outputs are available
  on `bpsk_tx` as `tx_i_filtered` and `tx_q_filtered`.
* **NCO.** The frequency fs/4 comes from the spectrum plan. The published
  design only names the NCO.
* **Output scaling and number format.** The shift of 6, the saturation, two's
  complement, and the packing with DAC A in the low half are this design's
  choices.
* **Output ports.** The original text lists a single 16-bit output. Two
  transmitters need two samples, so both are brought out and also packed into
  `dac_word`.
* **Reset.** Synchronous and active low everywhere.
* **Code tree.** Only the one node used by a 2x2 sounder is built. The rest of
  the LS code tree, which gives larger code sets with smaller IFWs, is not.

## Simulation

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=N failures=M`. Reference values come from `tb/ls_ref_pkg.sv`.
That package builds the Golay pair by explicit concatenation, lays out the
codes, and models the whole channel cycle by cycle. It shares no code with
the RTL.

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ls_tx_pkg.sv tb/ls_ref_pkg.sv tb/tb_ls_tx_top.sv --top-module tb_ls_tx_top
./obj_dir/Vtb_ls_tx_top
```

Replace `tb_ls_tx_top` with any other testbench name. The RTL sources are
found through `-Irtl`.

| testbench | what it shows |
|---|---|
| `tb_ls_code_rom` | both 8190-word ROMs against the reference codes, hold and clear |
| `tb_ls_code_gen` | random chip strobes over two code periods: chip order, hold, wrap at 8189, `code_start` |
| `tb_upsampler` | strobe every 4th (and, with L = 2, every 2nd) cycle; chip then zeros |
| `tb_rrc_filter` | impulse response equals the coefficients; random inputs against direct convolution |
| `tb_nco` | carrier values for +fs/4, −fs/4 and fs/2 |
| `tb_duc` | mixing, scaling, saturation in both directions |
| `tb_bpsk_tx` | one channel with 22-chip codes over 5 periods, every sample against the reference |
| `tb_ls_tx_top` | full size, default parameters. Both DAC streams over one full period plus margin, checked sample by sample. Code period of 32,760 clocks. Correlation of the transmitted chips: peaks 4096, aperiodic zero zone of 2047, so the IFW is 4095 chips. It also counts each mechanism: strobes, inserted zeros, zero/+1/−1 chips, wrap-around, carrier phases. |

`tb_ls_tx_top` runs in a few seconds.

To change the code length, set `GOLAY_LOG2` and `ZERO_LEN` on `bpsk_tx` /
`ls_code_gen`. The IFW is 2·ZERO_LEN + 1 chips, provided ZERO_LEN < 2^GOLAY_LOG2.
To change the filter, pass `COEF` and `NTAPS` to `rrc_filter`, and widen
`RRC_OUT_W` if the sum of |coefficients| needs it.
