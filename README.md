# Wishbone DSP cores: FIR, IIR and radix-2² FFT

Three fixed-point signal-processing accelerators that a small RISC processor
drives over a Wishbone bus, as memory-mapped slaves:

* a **FIR filter** in transposed form (50 taps by default),
* an **IIR filter** built as a cascade of second-order sections (6 sections,
  i.e. up to 12th order),
* a **1024-point FFT** in the pipelined radix-2² single-delay-feedback
  (R2²SDF) structure.

Each core is split the same way: a *processing unit* that does the
arithmetic, and a *slave interface* that holds the registers the processor
writes and reads and turns register writes into pulses for the unit. The
processor works one sample at a time: it writes a sample, writes a control
register, polls a status register, and reads the result (or, for the FFT,
writes a whole frame and then reads the spectrum out of a result RAM).

The SystemVerilog here follows the structure, sizes, port names and register
maps of the published cores (originally written in VHDL for an
OpenRISC/MinSoC system on an Altera Stratix II). Arithmetic details the
publication leaves open — rounding, overflow, latencies, reset values,
the bus handshake, base addresses, FFT sequencing — are this design's own,
and are listed in the "Departures and own choices" section below.

## Top level and address map

`dsp_top` puts the three cores behind one Wishbone slave port through a small
decoder (`wb_decode`). Bits 14:13 of the address choose the core:

| window            | core | registers (byte offset in window)                                  |
|-------------------|------|--------------------------------------------------------------------|
| `0x0000-0x1FFF`   | FIR  | 0 CONTROL (W), 4 DATA (RW), 8 STATUS (R), 12 Q (W), 16+4k h[k] (W)   |
| `0x2000-0x3FFF`   | IIR  | 0 CONTROL (W), 4 DATA (RW), 8 STATUS (RW), 12 NSECT (W), 16 GAIN (W), 20+4(6s+j) coefficient (W) |
| `0x4000-0x5FFF`   | FFT  | 0 CONTROL (W), 4 DATA (W), 8 STATUS (R), 12+4k X[k] (R)              |
| `0x6000-0x7FFF`   | none | acknowledged, reads 0                                                |

Address bits above 14 are left to the system interconnect. Constants for the
maps are in `dsp_pkg`.

**Bus handshake.** Only the signals of a basic Wishbone point-to-point link
are used: `stb_i` (acts as chip select; there is no separate CYC), `we_i`,
`adr[31:0]`, `dat_i[31:0]`, `dat_o[31:0]`, `ack_o`, plus `clk` and an
active-high synchronous `reset`. The master raises `stb_i` and holds it with
address and data; the slave raises `ack_o` for exactly one clock, on the
clock edge after it sees the strobe, and read data is valid while `ack_o` is
high. Every access therefore takes two clocks; an assertion in each slave
checks that `ack_o` never stays high for two clocks.

## FIR core (`fir_core` = `fir_pu` + `fir_wb`)

`fir_pu` computes y[n] = Σ h[k]·x[n−k] in the **transposed form**: the new
sample is multiplied by every coefficient at once, and product k is added to
the partial sum held in the register below it, so partial sums ripple towards
the output one register per sample. There are N−1 partial-sum registers, and
the critical path is one multiplier and one adder whatever N is.

Word widths: coefficients are M = 16 bits, data are M+G = 24 bits (G = 8 bits
of growth). `Q` (4 bits, register FIR_Q) gives the number of fractional
coefficient bits. Each product is formed at full 40-bit precision, shifted
right arithmetically by Q, and truncated to 24 bits; the adders wrap at 24
bits. One consequence of the transposed form: a partial sum already in the
chain keeps the Q that applied when its sample entered, so change Q only
between independent signals.

Per sample the host writes FIR_DATA, writes 1 to FIR_CONTROL, polls
FIR_STATUS and reads FIR_DATA. The control write gives the unit a one-clock
`enable`; the result and the status bit are there two clocks after the
control write is acknowledged, so the first status poll already reads 1.

## IIR core (`iir_core` = `iir_pu` + `iir_wb`, section `iir_sos`)

Each second-order section is a biquad in **transposed direct form II**, with
the section gain on the output:

```
w  = b0·x + s1
s1 ← b1·x − a1·w + s2
s2 ← b2·x − a2·w
y  = gain·w
```

The feedback taps use w before the gain. a0 is taken as 1 (its register
exists in the map, because the map stores six words per section, but the
arithmetic does not use it). Coefficients and the gain are 16-bit with Q = 13
fractional bits; states and outputs are 24 bits. Products are shifted right
by Q and truncated; sums wrap. The same gain register serves all sections, so
a filter with total gain G is loaded with the NSECT-th root of G in each.

`iir_pu` chains NSECT = 6 sections, each with one output register, so a
sample moves one section per clock. IIR_NSECT holds "sections in use minus
one": the unit's output and its done flag are taken from that section, so
with n sections the result appears n clocks after the start pulse. Unused
sections keep running but are ignored.

The coefficient space holds, for section s (counting from 0), the words a2,
a1, a0, b2, b1, b0 at 20 + 4·(6s + 0..5). IIR_STATUS is set by the done flag
and cleared by writing to it (or by starting a new sample). The unit takes the
low 16 bits of IIR_DATA as input; results are 24 bits, read back sign-extended.

## FFT core (`fft_core` = `fft_pu` + `fft_wb`)

This is the part that needs the most explanation.

### Dataflow

The R2²SDF pipeline handles N = 4^L points with log₂N = 10 butterfly stages
(`fft_bf2`). Stage i owns a feedback shift register of N/2^(i+1) complex
words: 512, 256, …, 2, 1. Each stage alternates between two phases, chosen
by one control bit s:

* **s = 0 (fill):** the input goes into the shift register; what falls out of
  the shift register (results held from the previous half) goes on.
* **s = 1 (combine):** with f the word leaving the register and x the input,
  f + x goes on and f − x goes into the register, to be sent on during the
  next fill phase.

So every stage is a radix-2 butterfly whose two operands are D samples apart
in time, using one adder pair and D words of storage. Stages work in pairs.
The second stage of a pair also multiplies its input by −j (swap real and
imaginary parts and negate the new imaginary part) when its controls s and t
are both 1; this is the "trivial" twiddle that makes two radix-2 stages as
cheap as one radix-4 stage. Between pairs a complex multiplier (`fft_twmul`)
applies the remaining twiddle factors; the last pair needs none, so the
1024-point pipeline has 4 multipliers.

### Control

All controls come from one step counter. It is log₂N + 2 bits wide rather
than log₂N: the stage controls use only its low log₂N bits, and the two extra
bits let the same counter tell when the flushed results are leaving. Every butterfly and multiplier has
one output register, so stage i sees the data stream late by the feedback
delays and registers in front of it; each stage reads its control bits from
its *local time* n = (step count) − (delays before it) − (registers before
it). With Np = N/4^p the length of the sub-transform handled by pair p:

* first stage of the pair: s = bit (log₂Np − 1) of n;
* second stage: s = bit (log₂Np − 2), t = bit (log₂Np − 1), and −j when s·t;
* multiplier after the pair: with q the top two bits of (n mod Np) and
  r = n mod (Np/4), the factor is W_N^(r · bitrev₂(q) · 4^p), where
  W_N^e = cos(2πe/N) − j·sin(2πe/N) and bitrev₂ swaps the two bits of q.

The twiddle table is computed during elaboration from that formula, scaled
by 2^15 − 1 and rounded, so no table file is needed and N can be changed
freely (as a power of 4).

Results leave in bit-reversed order. The unit counts its outputs and reverses
the bits of the count; the result is `index`, the natural frequency bin,
which the slave interface uses as the RAM write address. The host therefore
reads X[k] from FFT_MEMORY + 4k in natural order.

### Frame sequencing

Writing FFT_CONTROL clears the unit (counters and flags) and FFT_STATUS. Each
write to FFT_DATA (real part in bits 15:0, imaginary part in bits 31:16)
gives the unit one step. The last result needs the whole pipeline to drain,
so after the N-th sample the unit keeps stepping on its own, feeding zeros,
for N − 1 + 14 more clocks (at N = 1024). `enable_out` pulses with each
result, `frame_ready` rises with the last one and stays high until the next
clear, and its rising edge sets FFT_STATUS. Samples written after the N-th
are ignored until the next clear.

### Scaling and rounding

Data stay 16 bits with 15 fractional bits throughout. To keep the transform
within range the first four butterfly stages halve their results
(`SCALE_MASK`, default stages 0-3), giving a total gain of 2^-4: the core
returns X[k]/16. Halving rounds half away from zero; unscaled stages
saturate instead of wrapping; the twiddle multiplier rounds to nearest.
Rounding matters here: with plain truncation the bias of the four halving
stages is summed by the six stages after them and shows up as tens of LSB in
the bins near 0.

Measured against a double-precision DFT divided by 16 (in `tb_fft_core`), the
two-sample test signal x = {−69, 64, 0, …} (≈ −0.0021 and 0.00195) is
reproduced within 3 LSB per bin with a mean squared error below 1 LSB² per
bin; random input of amplitude 2^10 is within 40 LSB per bin.

## Departures and own choices

* **FIR structure.** The published text calls the FIR core "symmetrical" in
  its summary but describes and draws the transposed form for the processing
  unit; the transposed form is built. It does not use coefficient symmetry.
* **IIR input width.** The text gives the input port as M+G bits, the block
  diagram as 16 bits; the unit takes 16 bits, the register keeps 24. The IIR
  data register is given as `[M+G:0]` in the register table but as M+G bits in
  the text; 24 bits are used.
* **Completion wire of the FIR core.** The FIR block diagram shows no signal
  from the unit to the interface for "finished", yet the status register is
  set when filtering finishes; `fir_pu.valid_out` → `fir_wb.done_i` is added.
* **Fixed-point rules** (all cores): shift-and-truncate products in the
  filters, wrap-around sums; FFT rounding and saturation as above. None of
  this is specified.
* **FFT sequencing** (automatic flush, status on the rising edge of
  `frame_ready`, which four stages halve) is this design's own.
* **Reset values:** FIR_Q = 15, IIR_NSECT = 5, IIR_GAIN = 1.0, all data and
  coefficients 0. The result RAM is not reset.
* **Decoder and window layout** of `dsp_top` are this design's own; the
  cores' bases in the original system are not known.
* The processor and the rest of the original system-on-chip (bus
  interconnect, memory, UART, debug unit) are not included; `dsp_top`'s port
  is where a Wishbone master connects.

## The published test cases

The cores were originally characterised with one filter or signal each, and
the default sizes are exactly large enough for them. The error measure is
the squared difference between the core's frequency response and a
double-precision one, summed over the DFT bins.

* **FIR:** a 50-tap (49th-order) low-pass, pass band to 0.375π, stop band
  from 0.5π, Q = 15. The original equiripple coefficients are not
  reproduced; `tb_fir_lowpass` uses a Hamming-windowed sinc with its cut-off
  at 0.4375π instead. Its impulse response through the core equals the
  16-bit coefficients exactly, the summed squared error of a 512-point
  response is 2.1·10⁻⁶, and a pass-band tone keeps its amplitude while a
  0.75π tone is attenuated by about 58 dB.
* **IIR:** a 12th-order Butterworth band-pass as six sections, Q = 13.
  `tb_iir_bandpass` designs it in double precision (analog prototype,
  low-pass to band-pass mapping, bilinear transform, band edges taken as
  0.10625π and 0.11875π), loads it over the bus and measures 1024 samples
  of the response to a full-scale impulse. Every sample matches the bit-true
  model; the summed squared error of the 1024-point response is 6.3·10⁻⁴
  (6.1·10⁻⁷ per bin), about half of it from coefficient quantisation and
  half from arithmetic round-off; the gain at the band centre is 0.999. The
  poles sit at radius up to 0.995, so a smaller test impulse makes the
  round-off share grow quickly.
* **FFT:** 1024 points of x = {−0.0021, 0.00195, 0, …}, total gain 2^-4
  (`tb_fft_core`, `tb_dsp_top`). The first value is not a multiple of 2^-15;
  −69·2^-15 is used. Each bin is within 3 LSB of the exact value; the summed
  squared error is about 800 LSB², of which about 170 LSB² is the unavoidable
  rounding of results that are only a few LSB large.

## Parameters

| module     | parameter   | default | meaning                                   |
|------------|-------------|---------|-------------------------------------------|
| `fir_*`    | `N`,`M`,`G` | 50, 16, 8 | taps, coefficient width, data growth    |
| `iir_*`    | `NSECT`,`M`,`G`,`Q` | 6, 16, 8, 13 | sections, widths, fractional bits |
| `fft_*`    | `N`,`M`,`Q` | 1024, 16, 15 | points (power of 4), width, fractional bits |
| `fft_pu`   | `SCALE_MASK`| `4'b1111` | stages whose results are halved          |
| `dsp_top`  | `FIR_N`, `IIR_NS`, `FFT_N` | 50, 6, 1024 | core sizes                   |

IIR_NSECT is 4 bits wide, so NSECT may be at most 16. In `dsp_top` each core
has an 8 KB window, which holds up to 2044 FIR taps and an FFT of up to 1024
points (the result space takes 12 + 4N bytes); a 4096-point FFT needs a
larger `CORE_WIN_BITS` in `dsp_pkg`. Assertions in `dsp_top` stop elaboration
when a size does not fit.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`; all pass.

| testbench     | what it checks |
|---------------|----------------|
| `tb_fir_pu`   | 50-tap unit against a bit-true convolution, one-clock latency, Q change |
| `tb_fir_wb`, `tb_iir_wb`, `tb_fft_wb` | every register, pulses, status set/clear, RAM read-back |
| `tb_fir_core` | impulse response equals the coefficients; random samples over the bus |
| `tb_iir_sos`  | one biquad against its equations, one-clock latency |
| `tb_iir_pu`   | 6 random stable sections, every section count 1..6, latency n clocks |
| `tb_iir_core` | 12th-order resonator cascade over the bus, with 6 and 3 sections |
| `tb_fft_pu`   | 64-point unit: impulse, pair, random frames vs. floating-point DFT; exact drain time |
| `tb_fft_core` | full 1024-point core over the bus, test signal and random frame |
| `tb_dsp_top`  | all three cores through the top at default sizes, including an IIR section-count switch, FFT saturation and an access to the empty window; counts each |
| `tb_fir_lowpass` | the FIR test case below |
| `tb_iir_bandpass` | the IIR test case below |

The bit-true filter models shared by the IIR testbenches are in
`tb/tb_iir_model.svh`; the bus-master tasks in `tb/tb_wb_master.svh`.

To run one, e.g. the full system test, with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/dsp_pkg.sv tb/tb_dsp_top.sv --top-module tb_dsp_top
./obj_dir/Vtb_dsp_top
```

`tb_dsp_top` takes about ten seconds; the others a second or less.
