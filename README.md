# Approximate compressed-sensing acquisition for wearable ECG

A wearable ECG node spends most of its energy on the radio. Compressed sensing
(CS) cuts the amount of data sent: a window of N samples **x** is replaced by
M < N linear measurements **y** = Φ**x**. A receiver with more resources
reconstructs the signal from **y**. This RTL is the sensor-side half of such a
system, with one more saving on top. Φ is a sparse Bernoulli matrix, so
computing **y** needs only additions. Part of every addition is done with
*approximate* one-bit full adders. These use less energy but are sometimes wrong
in low-order bits. ECG signals are noisy to begin with, and the receiver
tolerates small errors in the low-order bits of **y**. The cost is a small,
controlled loss of signal quality.

The default configuration:

| quantity | value | origin |
|---|---|---|
| window length N | 256 samples | paper |
| measurements M | 128 per window | paper |
| ones per row of Φ, R | 2 | paper |
| fractional bits of x and y | 33 | paper |
| integer bits (sign included) | 3 | this design |
| approximated share of adder bits | 40 % → 14 of 36 bits | paper (percentage); rounding is this design's |
| approximate cell | carry exact, sum = NOT carry | this design (see below) |

## The sparse multiplier: y = Φx with additions only

Each row of Φ has exactly R ones at random columns. Φ is therefore never stored
or built. The unit keeps only the *index vector* z, which holds the column of
each one, R entries per row and sorted within the row:

    y_m = x[z(m,0)] + x[z(m,1)] + ... + x[z(m,R-1)]      m = 0 .. M-1

The full window must be available before any row can be summed, because a row
may pick samples from anywhere in it. The unit therefore works in two phases per
window:

1. **Capture.** N samples stream in and are written to `sample_buffer` in
   arrival order.
2. **Compute.** For every row, `sparse_multiplier` reads each z entry from
   `index_memory`, reads the addressed sample and accumulates it. The first
   sample of a row is loaded into the accumulator as is. Each further sample is
   added with `approx_adder`. With R = 2, a measurement costs exactly one
   approximate addition.

There is one window buffer. While a window is being computed, new samples are
refused (`x_ready` low) and z cannot be rewritten (`cfg_ready` low).

## Where the approximation sits

`approx_adder` is a plain ripple-carry adder built from 36 one-bit cells
(`lpaa_cell`). The lowest `APPROX_BITS` cells are approximate and the upper
ones exact. The final carry is dropped, so the sum wraps like any two's-complement
adder. With 3 integer bits the sum of two samples in [-1, 1) cannot overflow.

An approximate cell is defined by two 8-bit truth tables, `SUM_TT` and
`COUT_TT`. Bit *i* of each table is the output for the input combination
*i* = {a, b, cin}. For example, the exact full adder is `SUM_TT = 8'h96`,
`COUT_TT = 8'hE8`. Any published one-bit approximate adder can be dropped in by
its truth table, without touching the structure.

The paper studies seven such cells (LPAA 1 to 7) taken from earlier work. It
prints their truth tables only in a figure that was not available for this RTL,
so none of them is reproduced here. The default cell is this design's choice:

| a b cin | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|---|---|---|---|---|---|---|---|---|
| cout (exact majority) | 0 | 0 | 0 | 1 | 0 | 1 | 1 | 1 |
| sum = NOT cout | 1 | 1 | 1 | 0 | 1 | 0 | 0 | 0 |

Only the sum is wrong, and only for inputs 000 and 111. The carry chain stays
exact, so the error stays confined to the approximate positions plus whatever
carry they pass upward. The paper names an unbroken carry chain as the reason it
prefers ripple-carry LPAAs over faster adders with split chains. Replace the two
table parameters to study a specific LPAA.

How much is approximated is set by `APPROX_PCT` at the top. It is converted to
bits as `APPROX_BITS = (INT_BITS + FRAC_BITS) * APPROX_PCT / 100`, rounded down.
The low-order bits are the approximate ones. The paper evaluates 10 % to 80 %.
It reports that up to 40 % costs little signal quality, while 80 % makes the
signal unrecoverable.

## Number format

Samples and measurements are two's-complement fixed point: 3 integer bits
(sign included) and 33 fractional bits, 36 bits in all. The input is expected
to be already normalized, roughly to [-1, 1), and quantized to this format. The
11-bit ADC code of the front end is not scaled on chip. The measurement has the
same format as the samples. No quantization or entropy coding follows; the
measurements go straight to the transmitter interface.

## Interface and timing (`approxcs_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_we`, `cfg_addr`, `cfg_idx` | in | 1, log2(M·R), log2(N) | write z entry `m*R+q` |
| `cfg_ready` | out | 1 | z writes are taken (low while computing) |
| `x_valid`, `x_ready`, `x_data` | in/out/in | 1, 1, 36 | sample stream, valid/ready |
| `y_valid`, `y_ready`, `y_data` | out/in/out | 1, 1, 36 | measurement stream, valid/ready |
| `y_row`, `y_last` | out | log2(M), 1 | row of the measurement, last of the window |

A transfer happens on a rising edge with valid and ready both high. Sequence:

1. After reset, write all M·R z entries (row by row, each row sorted). z stays
   in place for any number of windows and may be rewritten between windows.
2. Send N samples. The edge that accepts the N-th sample starts the window.
3. The compute phase takes 3 cycles per term (read index, read sample,
   accumulate). Each finished row is held on `y_*` until it is accepted, and
   `y_ready` low stalls the whole computation. A held measurement does not change
   (an assertion in `sparse_multiplier` checks this). A second assertion checks
   that the z entries of every row arrive strictly increasing.
4. After the last row is accepted, `x_ready` rises again.

With `y_ready` held high, the last measurement is accepted 1 + M·(3R + 1) = 897
cycles after the last sample. A whole window, with one sample per cycle, then takes about N + 897 = 1153 cycles.
The unit has no double buffering, so it drops no sample at 360 Hz only if it
finishes within one sample period: 897 cycles in 2.78 ms, a clock of at least
about 323 kHz.

## Files

| file | content |
|---|---|
| `rtl/approxcs_pkg.sv` | default sizes, exact and default-approximate truth tables, `approx_bits()` |
| `rtl/lpaa_cell.sv` | one-bit full adder given by truth tables |
| `rtl/approx_adder.sv` | ripple-carry adder, low positions approximate |
| `rtl/sample_buffer.sv` | N × 36 window memory, one write and one synchronous read port |
| `rtl/index_memory.sv` | M·R × log2(N) memory for z |
| `rtl/sparse_multiplier.sv` | row/term sequencer, accumulator, output handshake |
| `rtl/approxcs_top.sv` | capture logic and the three blocks above |
| `tb/tb_ref_pkg.sv` | bit-level reference model of the approximate adder |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_ecg_workload` |

The memories are plain arrays and map to SRAM or register files in synthesis.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with
a watchdog.

- `tb_lpaa_cell`: all eight inputs for the default, exact and an asymmetric table.
- `tb_approx_adder`: the 36-bit default and an exact instance on random and
  corner operands, and an 8-bit, 4-approximate-bit instance on all 65536 operand
  pairs. All are compared with the reference model.
- `tb_sample_buffer`, `tb_index_memory`: read-after-write, one-cycle read latency
  and read data holding between reads.
- `tb_sparse_multiplier`: both memories modelled in the testbench; two full
  windows; every measurement, the row order and `y_last`; 896 cycles from start
  to the last measurement; data held under random back-pressure.
- `tb_approxcs_top`: the whole unit at its default size over three windows. Each
  window has fresh z and random samples. It checks every measurement and the
  897-cycle latency. It also requires that each mechanism happens at least once:
  input stall, output back-pressure, a z write refused while computing, z
  reprogramming, input gaps, and measurements that the approximation changed.
- `tb_ecg_workload`: one minute of synthetic ECG (72 bpm P-QRS-T waves plus
  baseline wander, 360 Hz, 84 windows). The same input goes through nine units
  approximated at 0 %, 10 %, … 80 %. Every measurement is checked against the
  model. The 0 % unit must be exact, and the error must not fall as the
  approximated share grows. It prints the measurement-domain SNR per setting. For
  this input and the default cell the SNR falls from about 178 dB at 10 % to 112 dB
  at 40 % and 27 dB at 80 %. These numbers say nothing about reconstructed ECG
  quality, which depends on the receiver.

Run one with plain Verilator, from the folder holding `rtl/` and `tb/`:

    verilator --binary --timing --assert --top-module tb_approxcs_top \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/approxcs_pkg.sv tb/tb_ref_pkg.sv \
        tb/tb_approxcs_top.sv
    ./obj_dir/Vtb_approxcs_top

All parameters of `approxcs_top` have defaults, so it can also be linted or
synthesized on its own.

## Departures and gaps

- **LPAA truth tables.** The seven cells the paper evaluates are not reproduced,
  because their tables were not available. The default cell is a stand-in.
  Energy results (the paper reports about 59 % savings with its LPAA 7) can
  therefore not be reproduced with this RTL as delivered.
- **Summation order.** The paper writes the measurement as a running sum over
  the entries of z, with two index ranges for q. The ranges depend on an index p
  that it does not explain. Here every row is treated alike: first term loaded,
  the rest added through the approximate adder.
- **Integer width, handshakes, reset, memory organisation, z loading, cycle
  schedule** are not given by the paper and are this design's choices, as stated
  above.
- **Not part of this RTL:** the ECG front end and ADC, the radio, and the
  receiver-side reconstruction (an lp-norm second-difference RLS solver,
  optionally with dictionary learning). The quantization, redundancy-removal and
  entropy-coding stages of a full digital-CS chain are also left out. The
  measurement stream is the interface to whatever follows.
