# OTFS modulator and demodulator in SystemVerilog

Orthogonal time frequency space (OTFS) modulation places data symbols on a
grid of *delay* and *Doppler* bins instead of on OFDM's grid of time slots
and subcarriers. A doubly dispersive channel, such as one between fast
vehicles, looks nearly constant and sparse on the delay-Doppler grid. So
every symbol sees about the same channel, where OFDM subcarriers would be
smeared by Doppler spread.

This RTL is a complete baseband OTFS transmitter and receiver for one
64 x 64 delay-Doppler frame (4096 symbols). It includes its own test source:

```
 LFSR bit source -> QAM mapper -> 64x64 reshape -> ISFFT -> Heisenberg -> x g_tx --> tx_*
                                                                                     |
                                                                     (channel, or loop-back)
                                                                                     |
 out_bit <- QAM demapper <- SFFT <- Wigner <- x conj(g_rx) <------------------------ rx_*
```

It follows the architecture of *FPGA Implementation of OTFS Modulation for
6G Communication Systems* (Isik, Nkomo, Das, Dandekar). That design uses a
16-bit LFSR source, table-driven 4/8/16/32-QAM in 2.10 fixed point, and an
ISFFT built from column IFFTs, a corner turn through a 4096-word block RAM
and column FFTs. Its main configuration is 32-QAM, or 20480 bits per frame.
The paper builds its transforms from a vendor FFT core. Here that core is
replaced by a small FFT engine of this design's own (`fft_core`). The
section "Departures and open points" lists what else was chosen here.

Everything runs on one clock. All streams use valid/ready handshakes, and
in a loop-back test the output bits equal the LFSR bits exactly.

## Number formats and stream order

| where | format |
|---|---|
| QAM symbols (`sym12_t`) | 12-bit two's complement, 2.10 fixed point (1024 = 1.0), re and im |
| all sample streams (`cplx16_t`) | 16-bit two's complement re and im, packed `{im, re}` in 32 bits; same scale as the symbols |
| twiddle factors, pulse coefficients | Q1.14 (16384 = 1.0) |
| inside `fft_core` | 24-bit re and im, unscaled |

A frame is streamed as 64 *columns* of 64 samples. Every block marks the
last sample of a column with `*_last`, and the stream out of each transform
also marks the last sample of the frame with `*_frame_last`. What a column
holds depends on where the stream is in the chain:

| stream | column index | sample index within a column |
|---|---|---|
| reshape output, demodulator input (delay-Doppler) | q (0..63) | p (0..63) |
| ISFFT output, Wigner output (time-frequency) | time slot n | subcarrier m |
| Heisenberg output, `tx_*`, `rx_*` (time domain) | time slot n | sample t within the slot |

Symbol k of the frame sits at p = k mod 64, q = k / 64: the matrix is filled
column by column.

## Bit source (`prn_generator`)

The source is a 16-bit Fibonacci LFSR with feedback polynomial
1 + x^11 + x^13 + x^14 + x^16, seeded with all ones. The output bit is the
XOR of register bits 0, 2, 3 and 5. The same bit is shifted in at bit 15
while the register moves towards bit 0. Written as a sequence:

    b[t] = b[t-16] ^ b[t-14] ^ b[t-13] ^ b[t-11],   b[-16..-1] = 1

After `start` the source emits 4096 x log2(M) bits: 8192, 12288, 16384 or
20480 bits. It then goes idle. Each `start` reseeds the register, so every
frame carries the same bits. The register advances only on an accepted
bit. With a ready sink that is one bit per clock.

## Constellations (`otfs_pkg::qam_point`, `qam_modulator`)

Each symbol takes log2(M) bits, first bit = most significant bit of the
label. The label indexes a table of amplitude levels. Each level is scaled
so that the constellation has unit average power, then rounded to 2.10:

| order | levels | one level unit (2.10) | labelling |
|---|---|---|---|
| 4-QAM | I, Q in {-1,+1} | 724 | bit 1 -> I (0:-1, 1:+1), bit 0 -> Q (0:+1, 1:-1) |
| 8-QAM | I in {-3,-1,1,3}, Q in {-1,1} | 418 | bits 2:1 Gray -> I, bit 0 -> Q |
| 16-QAM | I, Q in {-3,-1,1,3} | 324 | bits 3:2 Gray -> I, bits 1:0 Gray -> -Q |
| 32-QAM | 6 x 6 cross, corners removed | 229 | column by column: I from -5 to +5, Q from high to low |

In this table "Gray" means 00:-3, 01:-1, 11:+1, 10:+3. The exact values are
round(1024 * level / sqrt(E)), where E = 2, 6, 10, 20 is the average energy
in level units. This gives, for example, 724, 418/1254, 324/971 and
229/687/1145. The mapper registers its output: a symbol appears one clock
after its last bit.

## The symplectic transforms (`symplectic_fft`)

This is the heart of the design and the part that takes most care to read.

The ISFFT maps the delay-Doppler frame x[p,q] to the time-frequency frame:

    X[n,m] = 1/sqrt(NM) * sum_p sum_q x[p,q] * exp(+j2pi*np/N) * exp(-j2pi*mq/M)

The transform separates into an inverse DFT over p and a forward DFT over q.
The engine does the two one after the other, with a transpose in between:

1. **Column transforms.** Each incoming column (fixed q, all p) goes through
   a 64-point IFFT (core 1). This turns p into n.
2. **Record.** The results are written to the corner-turn RAM
   (`transpose_ram`, 4096 x 32) in arrival order. Column c goes to
   addresses 64c .. 64c+63. This is state `RECORD_IFFT_DATA`.
3. **Transposed read-out.** When the whole frame is stored, the RAM is read
   as addresses j, j+64, j+128, ... for j = 0..63. Each of these is a row of
   the stored matrix: a fixed n, all q. This is state `OUTPUT_OTFS_DATA`.
4. **Second transforms.** Each read-out column goes through a 64-point FFT
   (core 2). This turns q into m.

The output is then one column per time slot n, holding the 64 subcarriers
m. That is the order the Heisenberg transform needs.

The receiver's SFFT is the inverse:

    x[p,q] = 1/sqrt(NM) * sum_n sum_m X[n,m] * exp(-j2pi*np/N) * exp(+j2pi*mq/M)

It arrives in slot-major order, one column per slot n. An IFFT down each
column turns m into q. After the transpose, an FFT turns n into p. So the
**same engine, with the same IFFT-then-FFT setting, serves as ISFFT and as
SFFT**. The SFFT's output comes back in the column-major delay-Doppler order
in which the transmitter took its input. Because each core scales by
1/sqrt(64), each 2-D transform scales by 1/sqrt(NM), and the pair is an
exact inverse up to rounding.

The RAM's read port is registered and has an enable, like a block RAM. The
engine therefore keeps a one-entry "pending" flag for the word on the RAM
output, and reads the next address only when core 2 takes that word. There
is a single frame buffer. While the read-out of frame k runs, core 1 may
finish a column of frame k+1, but it holds that column and stalls its input
until recording resumes.

## Heisenberg and Wigner transforms (`isfft_heisenberg`, `wigner_sfft`)

Without a cyclic prefix, the discrete Heisenberg transform of time slot n
is a 64-point IFFT over its subcarriers, followed by multiplication of the
64 time samples by the transmit pulse g_tx[t]. The Wigner transform is the
reverse: multiplication by the conjugate receive pulse, then a 64-point FFT
divided by sqrt(64). `isfft_heisenberg` is the ISFFT followed by one more
IFFT core. `wigner_sfft` is an FFT core followed by the SFFT.

The pulse multiplications are done by two instances of `pulse_mult` in the
top level, one on each side of the `tx_*`/`rx_*` ports. Each holds 64
complex coefficients in Q1.14 (16384 = 1.0). Sample t of every slot is
multiplied by coefficient t (conjugated on the receive side), rounded back
to the sample scale and saturated. One register stage, one sample per
clock. After reset every coefficient is 1.0: the rectangular pulse, for
which the multipliers change nothing. Other pulses are written through the
top's `pulse_we_tx`/`pulse_we_rx`, `pulse_addr` and `pulse_coef` ports
between frames. The receiver recovers the data whenever g_tx[t] *
conj(g_rx[t]) is close to 1 for every t, for example with the same
unit-magnitude pulse on both sides. The two-dimensional time-frequency
windows W_tx[n,m] and W_rx[n,m] of OTFS theory are not built. They are
rectangular, which needs no logic.

## FFT engine (`fft_core`)

`fft_core` is an N-point radix-2 decimation-in-time FFT with a single
in-place buffer (N = 64):

* **LOAD**: takes N samples at bit-reversed addresses (64 clocks).
* **COMPUTE**: runs log2(N) stages of N/2 butterflies, one butterfly per
  clock (192 clocks). Each twiddle product is rounded back to the 24-bit
  word.
* **UNLOAD**: sends the results in natural order, each shifted right by
  log2(N)/2 = 3 bits (rounded, saturated to 16 bits). This is the 1/sqrt(N)
  scaling (64 clocks).

One transform takes 320 clocks with a ready sink. `s_ready` is low during
COMPUTE and UNLOAD. That back-pressure sets the pace of the whole chain.
`INVERSE` selects exp(+j...). The twiddles come from a quarter-wave table
QW[k] = round(16384 cos(2 pi k / 64)), k = 0..16. Sines and the other
quadrants are derived from it.

## Demapper (`qam_demodulator`)

The demapper compares every received sample with all M points of the
modulator's own table, in one clock. It keeps the label with the smallest
squared Euclidean distance, and sends the label out bit-serially, MSB
first. It takes the next sample together with the last bit of the current
one, so a ready sink gets one bit per clock.

## Top level (`otfs_top`) and timing

| port | meaning |
|---|---|
| `start`, `order` | start a frame; `order` (`QAM4`..`QAM32`) is latched. `start` is ignored while `busy` |
| `pulse_we_tx`, `pulse_we_rx`, `pulse_addr`, `pulse_coef` | write coefficient `pulse_addr` of the transmit or receive pulse (Q1.14 `{im, re}`); use between frames |
| `tx_*` | time-domain samples to the channel; `tx_last` every 64, `tx_frame_last` at 4096 |
| `rx_*` | time-domain samples from the channel, same framing (`rx_last` every 64) |
| `out_bit/out_valid/out_ready` | demodulated bits, in the order the source produced them |
| `frame_done` | pulses with the last bit of the frame; `busy` then falls |

`busy` stays high from `start` until the last bit has been demodulated, so
only one frame is in the chain at a time. Measured with a loop-back and no
stalls, the time from `start` to `frame_done` is:

| order | bits | clocks |
|---|---|---|
| 4-QAM | 8192 | 70218 |
| 8-QAM | 12288 | 78221 |
| 16-QAM | 16384 | 86224 |
| 32-QAM | 20480 | 94227 |

Most of that time is spent in the six serial FFT passes: 64 transforms of
320 clocks each, partly overlapped. For 32-QAM the first IFFT also waits
320 clocks for the LFSR to fill each column.

## Departures and open points

* **FFT core.** The published design uses a vendor FFT core; `fft_core` is
  this design's own, small and slow (320 clocks per 64 points). A pipelined
  streaming FFT could replace it behind the same ports.
* **Rounding.** The published design scales the core output by taking bits
  [18:3], which truncates. Here the shift rounds. With truncation the
  -1/2 LSB bias of every sample piles up in the zero-frequency bin: it grew
  to about 33 LSB after the receiver's four transforms.
* **Performance figures not reached.** The published design reports 12.17 us
  latency and 503.31 Gbit/s at 400 MHz. This design needs 94227 clocks per
  32-QAM frame (235.6 us at 400 MHz), and its bit source and sink move one
  bit per clock. The published numbers could not be related to any
  architecture described, so they were not targeted.
* **Clocks.** The published text names 400, 250, 100 and 61.44 MHz for
  different parts without describing the clock domains. This RTL uses one
  clock and no clock generator.
* **Modulation order.** The published text calls the mapper 4-QAM in one
  place and 32-QAM in another, and its bit-budget formula assumes 32-QAM.
  Here all four orders are built and selected per frame; 32-QAM is the
  main configuration.
* **Constellation labelling.** The 4/8/16-QAM tables are the Gray
  labellings of the standard rectangular constellations. The 4-QAM table
  matches the values printed in the published design's waveform. The
  32-QAM cross labelling (column by column) is this design's own choice and
  is not Gray coded.
* **SFFT normalisation.** The published text gives both 1/sqrt(NM) and
  sqrt(N/M). The unitary 1/sqrt(NM) is used.
* **Not built:** pilot symbols and channel estimation, two-dimensional
  time-frequency windows other than rectangular, a cyclic prefix, and the
  channel and RF front end. The `tx_*`/`rx_*` ports are where a
  channel model or front end attaches.
* **No second frame buffer after the ISFFT.** The published design also
  stores the ISFFT's FFT output in block RAM. Here it streams straight
  into the Heisenberg IFFT, one slot at a time. That is the order the
  Heisenberg transform needs, so no buffer is required.
* **Demapper output.** The published demapper also converts the symbols
  back to floating point, for comparison with a software model. Here the
  decisions are made in fixed point, and only bits come out.
* **Pulse values.** The published text says the signal is pulse shaped
  and that the Wigner side multiplies by a conjugate, but gives no pulse.
  The coefficient tables and their write port are this design's own, and
  the reset value is the rectangular pulse.
* **Flow control.** The valid/ready handshakes, the single frame in flight
  and the reseeding on every start are this design's own choices.

## Files

| file | contents |
|---|---|
| `rtl/otfs_pkg.sv` | sample and symbol types, order enum, constellation and twiddle tables |
| `rtl/prn_generator.sv` | LFSR bit source |
| `rtl/qam_modulator.sv` | bit-to-symbol mapper |
| `rtl/array_reshape.sv` | 64 x 64 column framing, 12 -> 16-bit extension |
| `rtl/fft_core.sv` | 64-point FFT/IFFT |
| `rtl/transpose_ram.sv` | 4096 x 32 corner-turn RAM |
| `rtl/symplectic_fft.sv` | 2-D ISFFT/SFFT engine |
| `rtl/isfft_heisenberg.sv` | transmitter transforms |
| `rtl/wigner_sfft.sv` | receiver transforms |
| `rtl/pulse_mult.sv` | transmit / conjugate receive pulse multiplier |
| `rtl/qam_demodulator.sv` | nearest-point demapper |
| `rtl/otfs_top.sv` | the complete chain |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_dft_pkg.sv` holds the floating-point DFT reference |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. A
watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_otfs_top \
    rtl/otfs_pkg.sv rtl/*.sv tb/tb_otfs_top.sv -o sim
./obj_dir/sim
```

For another block, swap in its testbench. The transform testbenches also
need `tb/tb_dft_pkg.sv` on the command line, ahead of the testbench.

What the testbenches establish:

* **`tb_otfs_top`** runs the whole chain at full size with a loop-back. It
  sends five frames: 32-, 4-, 8-, 16-QAM, then 32-QAM with random stalls on
  the link and on the bit sink. Every output bit must equal the LFSR
  recurrence above. Before the last frame a phase-ramp pulse,
  exp(j 2 pi 3t/64), is loaded on both sides. Every transmitted sample
  must then equal the same sample of the first frame times the pulse. It
  also checks the bit count, the mean transmitted power (unitary transforms
  keep it at 1.0), the latency budget, an ignored mid-frame `start`, and
  that every flow-control mechanism occurred.
* **`tb_fft_core`, `tb_symplectic_fft`, `tb_isfft_heisenberg`,
  `tb_wigner_sfft`** compare against a double-precision DFT computed
  directly from its definition. Observed errors are at most 2, 2 and 6
  LSB, against tolerances of 6 to 10 LSB.
* **`tb_qam_modulator` and `tb_qam_demodulator`** use independently written
  level tables. They check every label of every order, decisions under
  noise up to 40% of half the spacing, and the move to the neighbouring
  point at 60%.
* **`tb_pulse_mult`** runs a transmit and a receive multiplier side by
  side. It checks the reset pass-through, then random full-range
  coefficients against a floating-point product, with saturation and
  stalls.
* **`tb_prn_generator`, `tb_array_reshape`, `tb_transpose_ram`** check bit
  sequences and budgets, the bit source's autocorrelation (below 0.028 at
  lags 1 to 256 for the 20480-bit frame), framing markers, and RAM read latency and
  read-during-write.

## Changing the design

`N` and `M` (top, transforms) and `ROWS`/`COLS` (reshape, engine) set the
grid. `fft_core` supports N = 4, 16 and 64: its twiddle table covers 64
points, and the unitary shift needs an even log2(N). The transform
testbenches (`tb_symplectic_fft`, `tb_isfft_heisenberg`, `tb_wigner_sfft`)
take the grid from their `ROWS`/`COLS` localparams and have also passed at
16 x 16, 16 x 64 and 64 x 16. The complete chain and `tb_otfs_top` have
only been run at 64 x 64; that testbench assumes 64-sample columns. To change a constellation, edit `qam_point` and `qam_level` in
`otfs_pkg`. The mapper and demapper both read that table, so they stay
consistent.
