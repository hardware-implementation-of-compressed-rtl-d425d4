# A compressed-sensing video encoder built from a 3-D lifting DWT

Hybrid video coders such as H.264 put most of their complexity in the
encoder: motion estimation, block transforms and a deblocking filter. This
encoder is meant for the opposite case, a camera or a satellite that has
little power and a receiver that can afford the work. It uses no motion search.
It transforms each pair of frames with a one-level three-dimensional wavelet:

* a 9/7 lifting DWT in space, on each frame;
* a Haar step in time, between the two frames.

Wavelet coefficients are nearly sparse, except for the low-pass band of the
low-pass frame (LLL). So every band but LLL is compressed by projecting it
onto a random ±1 (Bernoulli) matrix: y = Φx. That takes M = N/4 sums of
N coefficients each. LLL is sent as it is, as the base layer. A decoder
recovers the sparse bands from y (for example with approximate message
passing) and inverts the DWT. The decoder and the entropy coder after the
encoder are not part of this RTL.

The RTL here is the encoder core: two spatial processors, four temporal
processors, one shared Bernoulli ROM and seven CS modules. Its defaults are
N = 256 (256×256 frames), P = 2 processing units per pass and M = 64
measurements per vector.

```
 frame n   ──► spatial processor 0 ──LL,LH,HL,HH──┐      ┌─► LLL (base layer, out)
 (strip rows)                                     ├─► 4 temporal ──► 7 CS modules ──► y_out[7]
 frame n+1 ──► spatial processor 1 ──LL,LH,HL,HH──┘  processors   (shared Bern ROM)
```

## Numbers at a glance

| quantity | value in this RTL |
|---|---|
| frame size | N×N, N = 256 (parameter; any multiple of 4) |
| parallel PUs per pass | P = 2 (the re-arrange unit is written for 2) |
| input rate | one strip row of 2P+1 = 5 pixels per frame per clock |
| output rate | 8 wavelet coefficients per clock (4 sub-bands × 2 frames) |
| time per frame pair | N²/(2P) = N²/4 clocks (16 384 at N = 256) |
| 2-D latency | 10 clocks for HL/HH, 11 for LL/LH, counted from the row that completes the first row pair |
| 3-D latency | 12 clocks (bands from HL/HH), 13 (bands from LL/LH) |
| on-chip row memory | 3N words per spatial processor (6N in all), plus pipeline registers |
| CS vector | N coefficients: one strip of a band, 2 columns × N/2 rows |
| measurements | M = N/4 per vector, 16 bits each, 7 bands |
| coefficient width | 15 bits; the internal lifting word is 24 bits |

## Strip scanning: how a frame goes through the row processor

This is the part that is hardest to see from the code. The frame is not read
row by row across its full width. It is read in vertical strips 2P+1 = 5
pixels wide, and each strip overlaps the next by one column:

```
strip 0: columns 0..4     strip 1: columns 4..8     ...    strip N/4-1: columns N-4..N
```

Column N does not exist in the frame. The pixel source supplies it as a
symmetric extension, X(r, N) = X(r, N-2). The source streams one strip at a
time, rows 0..N-1, one row per clock. The two frames of a pair are streamed
in lockstep, on `pix0` and `pix1`.

Inside a strip row, processing unit (PU) p takes columns 2p, 2p+1 and 2p+2 as
X[2n-2], X[2n-1] and X[2n]. So PU 0 and PU 1 share column 2. A lifting step
also needs the partial results of the position to its left:

* PU 1 takes H1[n-1], L1[n-1] and H2[n-1] from PU 0 in the same clock.
* PU 0 needs them from the last PU of the previous strip, for the same row.
  The previous strip processed that row exactly N clocks earlier.

The last PU therefore writes its three partials into three N-word row
memories (Memory_alpha, Memory_beta, Memory_gama), addressed by row. PU 0
reads them back one strip later. Each memory is read and written at the same
row address in the same clock. The combinational read returns the previous
strip's word, and the write lands at the clock edge. During strip 0, PU 0
takes zeros in place of the memory words.

Every pipeline stage uses its own partial at its own time. So the three
memories are addressed by the row tag of three different stages (2, 3 and
4). A small tag pipeline carries the row number and the strip-0 flag along
with the data.

## The processing unit

One PU is five register stages of shift-and-add arithmetic (`dwt_pu`). In the
flipped lifting form, the multiplications move out of the critical path, and
each constant becomes a few shifts:

| stage | computes | constant as built |
|---|---|---|
| 1 shift_PE | X' = X[2n-1]>>7, X'' = X[2n-1]>>1 + X[2n-1]>>3 | |
| 2 PE_alpha | H1 = (X[2n] + X[2n-2]) − (X' + X''); b'X[2n] = 4X + 8X | a' = −0.6328, b' = 12 |
| 3 PE_beta | L1 = (H1[n] + H1[n−1]) + b'X[2n]; H'1 = H1 + 16H1 + 4H1; H''1 = H1/4 + H1/8 | c' = −21.375 |
| 4 PE_gama | H2 = (L1[n] + L1[n−1]) − (H'1 + H''1); L'1 = 2L1 + L1/2 + L1/16; H = H2>>4 | d' = 2.5625 |
| 5 PE_delta | L = (L'1 + H2[n] + H2[n−1]) >> 5 | K0 ≈ 1/16, K1 ≈ 1/32 |

No stage has more than two adders in series. Right shifts are arithmetic,
which means floor division.

The PU does not decide where the "[n−1]" inputs come from. In the row
processor they come from the neighbouring PU or from a row memory. In the
column processor they come from length-2 shift registers.

Caveat: the equations pair the update of X[2n] with H1[n] and H1[n−1], that
is, with the predictions at 2n−1 and 2n−3. This RTL reproduces that pairing
exactly. The transform is still a chain of lifting steps, so it can be
inverted. But its filters are not the textbook CDF 9/7 bank, and a standard
9/7 inverse will not reconstruct the frame. A decoder has to invert these
exact steps. To get the standard 9/7, update X[2n−2] instead: in `dwt_pu`,
form `s2_bx` from `s1_m2`. That change has not been verified here.

## Column pass: transpose, interleave and two-clock partials

For each row, every row-processor PU produces one H and one L value. That
gives two columns per PU, a row-high column and a row-low column.

The transpose register (`transpose_reg`) holds the even row. In the clock
the odd row arrives, it sends the two H values of rows 2k and 2k+1. In the
next clock it sends the two L values. Its outputs therefore alternate
H pair, L pair at the input rate.

Each column-processor PU handles both columns of its row-processor PU,
taking them in alternate clocks. A stage's partial result for one column is
needed again two clocks later, by the same stage, for the next pair of that
column. So the partials H1, L1 and H2 go through length-2 shift registers.
The odd input sample also goes through a 2-deep register, because it serves
as X[2n−2] of the next pair. The column mapping is:

* X[2n] = row 2k+1
* X[2n−1] = row 2k
* X[2n−2] = row 2k−1

At the top of each strip, X[2n−2] is taken as row 1 (a mirror) and the
partials as zero.

Each column-processor PU emits (HL, HH) after an H pair and (LL, LH) after
an L pair. The first letter is the horizontal filter, the second the
vertical one.

## Re-arranging into sub-band streams

The re-arrange unit has two registers and four 2:1 multiplexers. It turns the
interleaved outputs of the two column PUs into four streams: LL, LH, HL and
HH. Each stream carries one coefficient per clock, alternating column 0
(from PU 0, direct) and column 1 (from PU 1, one clock late). The streams
are not aligned with each other:

* HL and HH start in the clock of the H pair.
* LL and LH start one clock later.

Each stream therefore has its own valid and a column flag. Within a frame,
a stream runs for N²/4 clocks without a gap, in this order: strip, row pair,
column 0 then column 1.

## Temporal step and band names

Four temporal processors take the same sub-band from both spatial
processors: x0 from frame n and x1 from frame n+1. They compute

* L = (x0 + x1)/√2
* H = (x1 − x0)/√2

with 1/√2 ≈ 1/2 + 1/8 + 1/16 + 1/64 = 0.703. Each takes two stages and
needs no frame buffer. The band index is (temporal band, spatial sub-band):

* L frame: LLL, LLH, LHL, LHH
* H frame: HLL, HLH, HHL, HHH

This is `band_e` in the package.

## The CS modules and the shared Bernoulli ROM

A CS vector x is one strip of a band: N coefficients, arriving one per
clock. Row i of Φ gives measurement y_i. For coefficient k, the module adds
+x_k to y_i where Φ(i,k) is 0, and −x_k where Φ(i,k) is 1. All M sums are
updated in the same clock, by M adders into the register bank Y_msr1.

On the N-th coefficient, the finished sums move to Y_msr2 and Y_msr1 starts
again from zero. Over the next M clocks, Y_msr2 shifts the measurements out
on `y_out`, y_0 first, with `output_ready` high. M = N/4 < N, so the
shifting always ends before the next vector is complete. Sums are 16 bits
and wrap on overflow. `start` clears the module at the beginning of a frame
pair.

Column k of Φ sits at ROM address k as M bits, and one ROM serves all seven
modules. The bands derived from HL/HH arrive one clock before those from
LL/LH (see the re-arrange unit). So the ROM is addressed by the sample
counter of a leading band, and its output is registered once for the
trailing bands.

The matrix itself is fixed at elaboration by a 32-bit Galois LFSR (mask
0x80200003, `SEED` parameter). Entry (i, k) is the LFSR's low bit after
k·M + i + 1 steps. Between 45 % and 55 % of the entries are −1, which
the ROM's testbench checks. A decoder must regenerate the same matrix.

## Top-level interface (`cs_video_encoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of the control state |
| `in_valid` | in | a strip row is on `pix0`/`pix1`; it must stay high for a whole frame pair |
| `pix0[0:4]`, `pix1[0:4]` | in | 8-bit pixels of columns 4s..4s+4 of row r, frame n and n+1 |
| `lll`, `lll_valid` | out | LLL base-layer coefficients, stream order as above |
| `y_out[0:6]` | out | 16-bit measurements of LLH, LHL, LHH, HLL, HLH, HHL, HHH |
| `y_ready[0:6]`, `y_index[0:6]` | out | Output_Ready and measurement number i per band |

Gaps in `in_valid` are allowed only between frame pairs. The spatial
processor asserts this. Each frame pair gives (N/2)² LLL coefficients and
7 × (N/4) × M measurements.

## Where this RTL follows its source and where it chooses

These follow the source architecture:

* the strip scan, with one column of overlap and the symmetric extension;
* the five-stage PU, with every shift and adder of its drawing;
* the three N-word row memories;
* the transpose registers;
* the column PUs with length-2 shift registers;
* the re-arrange multiplexers;
* the two-stage Haar processors;
* the CS module: M adders, Y_msr1, then Y_msr2 shifted out 16 bits per clock;
* one shared ROM;
* 15-bit CS inputs and 16-bit measurements;
* M = N/4 and P = 2.

These are this design's choices:

* **Subtractor polarity.** The drawing does not say which operand each
  subtractor subtracts. The lifting equations with negative a' and c' were
  used.
* **d' value.** d' is built as 2.5625, which is what the drawn shifts give.
  The source's table lists the shift-and-add value as 2.565.
* **Widths.** Pixels are 8 bits and the internal word is 24 bits. Stage
  outputs are wrapped to 15 bits.
* **Boundaries.** Zero partials are used in strip 0 and at the top of every
  column, and row 1 is mirrored as row −1. The source describes one extension
  column and does not say more.
* **Transpose register.** It has three registers. The drawing shows two,
  which cannot hold the even L value until it is sent.
* **Valid signalling.** Each sub-band has its own valid and column flag. The
  ROM output is registered once for the trailing bands.
* **CS control.** The meaning of `start` is this design's, and so is the
  16-bit wrap. The last coefficient is added during the transfer into Y_msr2.
* **Bernoulli matrix.** An LFSR generates it in place of an offline random
  draw.
* **Frame size.** Only square N×N frames are handled. The default N = 256
  matches the 256×256 test sequences.

Not built:

* the entropy coder (Golomb–Rice and run-length), for which no architecture
  is given;
* multi-level decomposition, which would reuse this core on the LL band
  through an external frame buffer;
* the decoder.

At its defaults the RTL holds 256×256 sequences. 512×512 and 1024×1024 need
the parameter N changed. UHD frames are not square and would need a
rectangular scan.

## How far it has been checked

Every module has a self-checking testbench in `tb/`. Each one compares the
RTL, in stream order, with a golden model in `tb/enc_ref_pkg.sv`. That model
is written separately from the RTL. It works on whole rows and columns with
64-bit integers and explicit floor division. It follows the same reading of
the architecture, so it catches implementation errors, not misreadings. The
testbenches also check latencies and gap-free streaming.

`tb_cs_video_encoder` runs the whole encoder at its default size, N = 256.
It streams two frame pairs (random, then a ramp and a checkerboard) with an
idle gap between them. It checks:

* all 32 768 LLL coefficients;
* all 57 344 measurements;
* the 12/13-clock latency;
* the 16 384-clock pair time.

It also counts the strip changes, the CS start pulses and the 896
vector completions, and it finishes in a few seconds. Each testbench was
also run against a deliberately broken copy of its module and failed, so
the checks can tell a wrong module from a right one.

No comparison has been made with the source's own software model. The
transform's fidelity (PSNR, compression ratio) has not been evaluated here.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cs_enc_pkg.sv tb/enc_ref_pkg.sv tb/tb_cs_video_encoder.sv \
    --top-module tb_cs_video_encoder -Mdir obj
./obj/Vtb_cs_video_encoder
```

Replace the testbench name to run any other test (`tb_dwt_pu`,
`tb_row_processor`, `tb_column_processor`, `tb_spatial_processor`,
`tb_dwt3d`, `tb_cs_module`, ...). Each prints
`TB_RESULT checks=<n> failures=<m>`. The block testbenches run at N = 16 to
stay short. To change the frame size, set `N` on `cs_video_encoder`; M
follows as N/4.

## Files

| file | content |
|---|---|
| `rtl/cs_enc_pkg.sv` | widths, coefficient and band types |
| `rtl/dwt_pu.sv` | five-stage lifting processing unit |
| `rtl/row_mem.sv` | N-word row memory |
| `rtl/row_processor.sv` | row pass: P PUs and three row memories |
| `rtl/transpose_reg.sv` | one transpose register |
| `rtl/column_processor.sv` | column pass: P time-shared PUs |
| `rtl/rearrange_unit.sv` | interleaved pairs to four sub-band streams |
| `rtl/spatial_processor.sv` | 2-D DWT of one frame, scan counters |
| `rtl/temporal_processor.sv` | Haar step between two frames |
| `rtl/dwt3d.sv` | two spatial and four temporal processors |
| `rtl/bern_rom.sv` | Bernoulli matrix ROM |
| `rtl/cs_module.sv` | y = Φx for one band |
| `rtl/cs_video_encoder.sv` | top level |
| `tb/enc_ref_pkg.sv` | golden model used by the testbenches |
| `tb/tb_*.sv` | one testbench per module |
