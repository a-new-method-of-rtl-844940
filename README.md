# Real-time mismatch correction for a 1 Gsps time-interleaved waveform digitizer

A 12-bit digitizer can run at 1 Gsps by interleaving four 250 Msps ADC cores
that sample the same input a quarter period apart. Real cores are not
identical, though. Each has its own gain, its own offset and a small error in
its sampling instant (time skew), and these differences leave spurs in the
spectrum. Gain and offset are cheap to correct. Time skew needs a bank of
reconstruction filters running at the full 1 Gsps rate, which an FPGA cannot
clock directly.

This RTL implements the FPGA side of the digitizer described in *"A new method
of waveform digitization based on time-interleaved A/D conversion"* (Ye, Zhao,
Feng, Liu, An). Its main idea is a **fully parallel** correction. Each core's
250 Msps stream is split four ways, so the whole 1 Gsps stream becomes 16
lanes at 62.5 Msps. The reconstruction filter bank is rewritten as a
**16 x 16 matrix of 5-tap FIR cells**, and every cell runs at the slow rate. The
RTL is a reconstruction from that paper's description. It is not the authors'
code. Choices the paper leaves open are stated below and in each file's
header.

## Data path and clocks

| stage | module | clock | width per cycle |
|---|---|---|---|
| ADC reset sequencing | `adc_sync_reset` | ADC sample clocks (500 MHz, 0/180 deg) | - |
| 1:2 capture of each ADC bus | `adc_receiver` (x2) | 500 MHz in, 250 MHz out | 2 x 16 bit per ADC |
| 4 -> 16 lane deserializer | `deserializer` | 250 MHz | 16 x 16 bit every 4th cycle |
| gain / offset correction | `gain_offset_corr` | 62.5 MHz | 16 x 16 bit |
| time-skew correction | `filter_matrix` + `fir_cell` | 187.5 MHz (3 x 62.5) | 16 x 16 bit every 3rd cycle |
| 16 -> 4 lane multiplexer | `output_mux` | 250 MHz | 64 bit (4 samples) |
| buffer to PCI Express | `async_fifo` | 250 MHz write, PCIe user clock read | 64 bit |

`wfd_top` connects them. `wfd_pkg` holds the shared constants, the sample
type and the index functions of the matrix.

Clock domains. `clk_500`, `clk_250`, `clk_62m5` and `clk_187m5` are assumed
to come from one clock manager, with rising edges that line up every 16 ns.
Data crosses between them synchronously. A vector is always held for a whole
period of the slower clock. Where the receiving side must know when a vector
is new, a toggle bit travels with the data. The receiver acts on the first
edge that sees the toggle change. That edge is exact whatever the order of
two coincident edges. Only the PCI Express user clock is asynchronous. The
Gray-pointer FIFO is the single real clock-domain crossing.

## Getting the four cores in a fixed order

Each ADC chip divides its 500 MHz clock by two to clock its two cores. The
divider leaves reset in an arbitrary phase. Two interleavings are therefore
possible:

- sequence I: ADC1 core1, ADC2 core1, ADC1 core2, ADC2 core2
- sequence II: the two cores of ADC2 swapped

The filters are designed for one order. `adc_sync_reset` fixes the order to
sequence I with two flip-flops. The first releases ADC1's reset on ADC1's
clock. Its inverted output holds the second flip-flop clear, and the second
then releases ADC2's reset on ADC2's clock, which is 180 degrees later. The
flip-flops are clocked on the falling edge and cleared asynchronously. The
paper's schematic suggests both, but does not state them.

On the data side each ADC multiplexes its two cores onto one bus. Its output
clock is high while core 1's word is on the bus. `adc_receiver` captures that
level as a 13th data bit and pairs the words by it. The order of the lanes
handed to the deserializer is the sampling order of sequence I. A 12-bit code
is left-justified into the 16-bit sample (`code << 4`). Samples are therefore
16-bit two's complement with 4 fractional bits below the ADC LSB.

## The poly-phase filter matrix

This is the part that needs the most explanation.

**Reconstruction filters.** Sample `n` of the 1 Gsps stream belongs to lane
`p = n mod 16`. Its actual sampling instant is `(n + skew[p mod 4]) * 1 ns`.
Lane `p` gets its own 80-tap filter `f_p`, from the perfect-reconstruction
formula (Eq. 2 of the paper, with `M = 16` and `d_i = i + skew[i mod 4]`):

    f_m[j] = (M/pi) * prod_i sin((j-D-d_i)*pi/M)
             / ((j-D-d_m) * prod_{i!=m} sin((d_m-d_i)*pi/M)) * w(j-D-d_m)

Here `w` is a Kaiser window over `[-L, L]` and `L = 40`. The taps are taken as
`j` in `[D+m-L, D+m+L)`, which is exactly 80 integers. With
`x_p[k] = x[16k + p]`, the corrected stream is

    y[n] = sum_p sum_k f_p[n - 16k] * x_p[k]

**Matrix form.** Write the output in lanes too, `y_q[l] = y[16l + q]`. Then

    y_q[l] = sum_p sum_t f_p[16*(i0+t) + q] * x_p[l - i0 - t],   t = 0..4
    i0(q,p) = ceil((D + p - L - q) / 16)

Each (row q, column p) pair is thus a 5-tap FIR cell. An 80-wide window always
holds exactly 5 points of a stride-16 grid, so each cell has exactly 5 taps.
`i0` is 0, 1 or 2, so every column keeps the last 7 input samples
(`hist_depth` in `wfd_pkg`).

**Delay rows.** Lanes 0, 4, 8 and 12 come from the reference core, whose skew
is 0 by definition. Consider an output instant `n` with `(n - D) mod 16` equal
to one of those lanes. There the sine factor of that lane vanishes in every
other filter, and that lane's own filter is exactly 1. Such a row is only a
delayed copy of one input. The paper says rows 4, 8, 12 and 16 (counting from
1) are of this kind. That holds exactly when `D mod 4 = 3`. The design uses
`D = 43`, the smallest such value with `D >= L`, so that all taps are causal.
Each delay row has one delay cell (column `(q-D) mod 16`, lag `(D+p-q)/16`)
and no other cells. That leaves 12 x 16 = 192 filter cells plus 4 delay
cells. This matches the paper's count of about 196 cells and 392 multipliers.

**Multiplier sharing.** A filter cell has 2 multipliers, not 5. They are
reused over the 3 cycles of the 187.5 MHz clock that fall in each 62.5 MHz
sample period:

- slot 0: taps 0 and 1
- slot 1: taps 2 and 3
- slot 2: tap 4

The 16 cell results of a row go to a two-stage pipelined adder: groups of 4,
then the group sums. Full precision is kept up to the end. The last stage
rounds (`+2^15`, arithmetic shift right by 16) and saturates to 16 bits.
Delay rows bypass the arithmetic, but their timing matches the filter rows.
A new 16-sample output vector appears every 16 ns. It appears 8 fast cycles
(42.7 ns) after the input vector's 62.5 MHz edge.

**Coefficients.** Coefficients are signed Q2.16 (18 bits), written at run
time in the 62.5 MHz domain. The address is `{q[3:0], p[3:0], t[2:0]}`, and
the value for that address is `f_p[16*(cell_i0(q,p)+t) + q]`. Writes to empty
and delay cells are ignored. The filters depend only on the measured skews,
so they are computed offline and loaded once. `tb/tb_signal_pkg.sv` contains
a complete design routine (`design_filters`) with a Kaiser `beta = 8`.

## Gain and offset

Each lane `p` is corrected with the constants of channel `p mod 4`:

    y = sat16(((x - offset) * gain + 2^15) >>> 16)

The gain is unsigned Q2.16: load `round(65536 / measured_gain)`. The offset
is in sample units, 1/16 of an ADC LSB: load `round(16 * measured_offset)`.

## Output and buffering

`output_mux` takes each 16-sample vector and sends it as four 64-bit words on
consecutive 250 MHz cycles. The earliest sample is in bits 15:0. This gives
1 Gsps x 16 bit with no gaps. `async_fifo` (1024 x 64 by default) carries the
words to the PCI Express user clock. A word written while the FIFO is full is
dropped, and this sets the sticky `fifo_overflow` flag.

## Not in the RTL

These parts have ports or models instead of RTL:

- The analog front end, the transformers that split the input between the two
  ADCs.
- The LMK04031-based clock synthesizer, which makes the 500 MHz clocks 180
  degrees apart.
- The ADC chips. `tb/kad5512_model.sv` is a behavioural model of their
  divider, core multiplexing and output clock.
- The FPGA's PCI Express endpoint. The FIFO read port is the top's interface
  to it.
- The sine-fit measurement of gain, offset and skew. The paper does it on the
  PC.

## Departures and open choices

- The paper captures the ADC buses as DDR with ISERDES primitives. Here the
  capture is plain registers on a 500 MHz clock, one word per cycle. Board-
  and IDELAY-level alignment of the buses is outside the RTL.
- These are this design's choices, because the paper does not specify them:
  - the delay `D = 43`, the tap window and the Kaiser `beta`
  - the coefficient, gain and offset formats
  - rounding and saturation
  - the slot schedule
  - FIFO depth and overflow policy
  - how configuration reaches the FPGA
- The paper's 980-multiplier variant (5 multipliers per cell at 62.5 MHz) and
  its 4 Gsps outlook are not built. `NMULT` is a parameter of `filter_matrix`
  and `fir_cell`, but only the default of 2 has been simulated.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The end-to-end testbenches run `wfd_top` at
its default parameters and compare every output sample exactly against a
reference computed independently in the testbench. That reference applies
the full-rate reconstruction sum to the recorded ADC codes. The testbenches
also check:

- that the cores sample in sequence I
- that delay and filter rows both occur
- that the FIFO overflows when reads stop

Measured over about 3000 samples:

| testbench | input and mismatches | SNR before | SNR after |
|---|---|---|---|
| `tb_wfd_top` | 4 tones at fs/15..4fs/15; gains 1/1.02/0.97/1.03, offsets 0/-2/1/3 LSB, skews 0/-0.04/0.02/-0.01 Ts | 29.0 dB | 67.7 dB |
| `tb_wfd_measured` | 40.13 MHz; skews 0/-0.0076/-0.0046/-0.0089 Ts | 49.6 dB | 73.1 dB |
| `tb_wfd_200mhz` | 200 MHz, same skews | 41.6 dB | 74.3 dB |
| `tb_wfd_pmt` | photomultiplier-like pulses (3.10 ns rise, 9.90 ns fall), same skews | 48.1 dB | 70.4 dB |

The first row uses the scenario of the paper's own simulation. The others
use the skews the paper measured on its board. The pulse shape is a
raised-cosine edge with an exponential tail, sized to the stated rise and
fall times. Their small gain and
offset mismatches are assumed. The SNR figures include the 12-bit
quantization of the model.

Not verified: timing closure at 187.5 MHz on a real device, and behaviour
with truly asynchronous or drifting clocks on the 62.5/187.5/250 MHz
crossings.

## Simulating

With Verilator 5, each testbench is built from the package, the RTL and the
testbench's own files. The package goes first. The default timescale is set
for the RTL files, which have none. For example:

    verilator --binary --timing --timescale 1ps/1ps -Irtl -Itb \
      rtl/wfd_pkg.sv $(ls rtl/*.sv | grep -v wfd_pkg) \
      tb/tb_signal_pkg.sv tb/kad5512_model.sv tb/wfd_e2e.sv tb/tb_wfd_top.sv \
      --top-module tb_wfd_top -o sim && obj_dir/sim

`tb_wfd_measured`, `tb_wfd_200mhz` and `tb_wfd_pmt` are built the same way.
A block testbench needs only the package, its module(s) and the testbench,
for example:

    verilator --binary --timing --timescale 1ps/1ps rtl/wfd_pkg.sv rtl/fir_cell.sv \
      rtl/filter_matrix.sv tb/tb_filter_matrix.sv --top-module tb_filter_matrix \
      -o sim && obj_dir/sim

The end-to-end run simulates about 30 us of device time. It takes well under
a second.

To change the configuration, edit the constants in `wfd_pkg`:

- `M`, `N`: channels and split factor
- `TAPS`, `NMULT`: taps per cell and multipliers per cell
- `L`, `D`: filter half-length and delay
- widths

The matrix layout, the delay rows and the history depth all follow from the
functions in the package. The end-to-end testbenches take `MN`, `L` and `D`
from the package, but their ADC models and mismatch tables assume four cores
(`M = 4`). The delay-row test in them assumes `D mod 4 = 3`.
