# On-the-fly compressed-sensing compressor for physiological signals

A wearable ECG or EEG monitor spends most of its energy on the radio, so the
samples are compressed before they are sent. With compressed sensing (CS) the
sensor does almost nothing: it multiplies each packet of N samples `x` by a
fixed M x N sensing matrix `Phi` (M < N) and transmits the M measurements
`y = Phi * x`. All the hard work, recovering `x` from `y` (for example with
block sparse Bayesian learning), happens at the receiving end, which is not
part of this RTL.

The compressor here uses a *sparse binary* `Phi` with exactly two ones in
every column. Column `i` of `Phi` then touches only two measurements, the rows
`p1(i)` and `p2(i)` where its ones are, and the whole product reduces to

    for each incoming sample x_i:
        y[p1(i)] += x_i
        y[p2(i)] += x_i

Two adders and two memory words per sample: no multipliers, no buffering of
the packet, and the packet is compressed two clock cycles after its last
sample arrives. The defaults are a packet of N = 512 16-bit samples
compressed to M = 256 measurements, a compression ratio
CR = (N - M) / N = 0.5.

## Block structure

```
             x_valid/x_ready/x_data
                     |
   +-----------------v--------------------------------------------+
   | cscore                                                       |
   |   sample index i --> U0 (cs_loc_rom) --p1--> U1 port a --+    |
   |                                      --p2--> U1 port b --+--> y stream
   |                     U1 (cs_meas_ram): d_o + x_i -> d_i   |    |
   |   controller: accumulate / drain / unload / clear        |    |
   +--------------------------------------------------------------+
```

| file | block | what it is |
|---|---|---|
| `rtl/cs_pkg.sv` | - | default sizes, the sensing-matrix formula, controller state type |
| `rtl/cs_loc_rom.sv` | U0 | ROM, N words of `{p1, p2}`, synchronous read |
| `rtl/cs_meas_ram.sv` | U1 | true dual-port RAM, M words of YW bits, read-first |
| `rtl/cscore.sv` | cscore | the compressor (top): U0, U1, two adders, controller |

**U0, location ROM.** Instead of the N x M bit matrix it stores, for each
column, the two row indexes: 512 words of 16 bits at the defaults. Its
contents are computed at elaboration time (see *The sensing matrix*).

**U1, measurement RAM.** Holds the M running sums. Port a serves the row
`p1(i)`, port b the row `p2(i)`; both read and write. Because the two ones of
a column are in different rows, the ports never write the same word in one
cycle (an assertion checks this). A word is XW + log2(N) = 25 bits wide: even
a row holding all N ones cannot overflow, whatever the matrix.

**Controller.** Counts the samples of a packet, sequences the U1 accesses,
and after the last sample streams `y` out and clears U1.

## Timing of one sample

A sample is taken in the cycle where `x_valid && x_ready` (call it cycle t):

| cycle | U0 | U1 port a | U1 port b |
|---|---|---|---|
| t   | read word i | - | - |
| t+1 | - | read y[p1] | read y[p2] |
| t+2 | - | write y[p1] + x_i | write y[p2] + x_i |

A single read/not-write line drives both ports, so each port spends one cycle
reading and one writing per sample. `x_ready` is therefore low in cycle t+1
and the next sample is taken at t+2 at the earliest; its read (t+3) always
sees the completed write, and no forwarding logic is needed. One sample every
two clocks is many orders of magnitude above physiological sampling rates
(250–256 Hz), so the gap costs nothing in practice.

`done` is high in cycle t+2 of the last sample of a packet: the compression
latency is two clock cycles, the time of the last read-modify-write.

## Unload and clear

From the cycle after `done`, the controller reads U1 through port b at
addresses 0, 1, ..., M-1, one per cycle. Each word appears on `y_data`, with
`y_valid` and `y_index`, the cycle after its read; `y_last` flags index M-1.
In that same cycle port a writes zero to the word just read, so when the
last measurement leaves, U1 is all zero and ready for the next packet. Unload
plus clear takes M + 1 cycles, during which `x_ready` is low; a sample that
arrives then is held by its source (`x_valid` and `x_data` must stay stable
until taken, which an assertion checks).

Block RAM is not reset, so after reset the controller runs the same sequence
with the output suppressed, clearing U1 in M + 1 cycles before it raises
`x_ready` for the first time.

Whole packet at the defaults, samples offered continuously: 2 x 512 cycles of
sampling, 2 cycles to `done`, then 257 cycles of unload.

## Interface of `cscore`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous reset, active low |
| `x_valid` | in | 1 | a sample is offered |
| `x_ready` | out | 1 | the sample is taken in this cycle if `x_valid` |
| `x_data` | in | XW | sample, two's complement |
| `y_valid` | out | 1 | a measurement is on `y_data` |
| `y_index` | out | log2(M) | its row index, 0 .. M-1 in order |
| `y_data` | out | YW | the measurement, two's complement |
| `y_last` | out | 1 | last measurement of the packet |
| `done` | out | 1 | last write-back of the packet |

The output stream has no back-pressure: a consumer must take one word per
cycle during unload (a FIFO in front of a radio would do).

| parameter | default | meaning |
|---|---|---|
| `N` | 512 | samples per packet |
| `M` | 256 | measurements per packet; CR = (N - M) / N |
| `XW` | 16 | sample width |
| `YW` | XW + log2(N) = 25 | measurement width |

Other compression ratios only need `M`: 205 for CR = 0.6, 154 for 0.7, 102
for 0.8 and 51 for 0.9 (N = 512, rounded). M must be at least 2.

## The sensing matrix

Any binary matrix with two ones per column works, as long as the receiver
uses the same one. The positions used here come from a fixed 32-bit hash of
the column index (multiply and xor-shift rounds, `cs_pkg::loc_hash`):

    h     = hash(i)
    p1(i) = h mod M
    p2(i) = (p1(i) + 1 + ((h >> 16) mod (M - 1))) mod M

This always yields two different rows in 0 .. M-1. At the defaults every row
receives between 1 and 10 of the 1024 ones (4 on average); 250 of the 256
rows are used. A receiver rebuilds `Phi` from the same three lines. To use
another matrix, replace `loc_p1`/`loc_p2` in `cs_pkg.sv` or the `ROM`
initialiser in `cs_loc_rom.sv`; nothing else depends on the contents.

## Resources

After generic synthesis the default `cscore` has 83 flip-flop bits, two
memories (U0 8,192 bits, U1 6,400 bits), two 25-bit adders, two counters and
comparators. Each memory fits one 9-kbit FPGA block RAM. For comparison, an
FPGA implementation of this architecture has been reported at 73 flip-flops,
119 LUTs and 3 block RAMs with a compression latency of 2 cycles, against
223 flip-flops, 359 LUTs and 4 block RAMs for a 4-stage CDF 5/3 wavelet
compressor doing the same job (about 23.7 % of its energy per packet).

## What follows the published architecture and what is this design's own

Follows it: the split into a location ROM (U0) and a synchronous dual-port
measurement RAM (U1), one port per location, two adders feeding the RAM
inputs from its outputs, a read/not-write line shared by the ports,
read-accumulate-write-back per sample, the output taken from port b, U1
cleared after unload, k = 2 ones per column, N = 512, CR = 0.5, 16-bit
samples and a two-cycle compression latency.

This design's own choices, where no detail was available: the matrix
formula; the valid/ready sample handshake and the two-cycle sample spacing;
the output stream format and the absence of back-pressure; refusing samples
during unload; clearing each word in the cycle after it is read; the clear
after reset; the 25-bit measurement width; synchronous reset; two's
complement samples; U0 and U1 read timing (registered, read-first).

Not included: the ADC, the radio, the sample source (on the evaluation board
a ROM of recorded EEG packets), the logic analyzer used to capture `y`, and
the receiver's reconstruction algorithm, which is floating-point software.

## Testbenches

All are self-checking and print `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it runs |
|---|---|
| `tb/tb_cs_loc_rom.sv` | U0 at 512 x 256 and 512 x 13: every word against the formula, seven words against hand-computed values, range, p1 != p2, read latency and hold |
| `tb/tb_cs_meas_ram.sv` | U1: random two-port traffic against a model, read-first, hold while disabled |
| `tb/tb_cscore.sv` | the whole compressor at its default parameters, 20 packets (synthetic EEG-like, full-scale positive, full-scale negative, random) and a final all-zero packet; every measurement against `Phi * x`; `done` latency of 2 cycles; unload start, order, length; sample spacing; clears shown by correct results from random power-up RAM contents and by the all-zero packet; counts that input stalls, back-to-back samples, unloads and both kinds of clear each happen |
| `tb/tb_cscore_cr_sweep.sv` | five compressors side by side at CR = 0.5, 0.6, 0.7, 0.8, 0.9 (M = 256, 205, 154, 102, 51), four packets each, through `tb/tb_cs_harness.sv` |

Run one with Verilator 5 from the top folder, for example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/cs_pkg.sv tb/tb_cscore.sv --top-module tb_cscore
    ./obj_dir/Vtb_cscore +verilator+rand+reset+2

Each finishes in well under a second. `+verilator+rand+reset+2` starts every
uninitialised variable at a random value, which is how the tests model the
unknown power-up contents of the RAM.
