# Real-time Toeplitz extraction for a 3.2 Gbps laser-phase-noise QRNG

A laser run just above threshold has a phase that wanders randomly, driven by
spontaneous emission. An unbalanced interferometer turns that phase noise into
intensity noise. A fast photodetector and an 8-bit ADC running at 1 GSa/s then
turn it into a stream of raw samples. The raw samples are not uniformly random:
they carry classical noise and a Gaussian bias, and neighbouring samples are
correlated. A seeded *randomness extractor* compresses them into fewer bits that
are close to uniform.

This RTL implements the digital side of such a generator. The main part is an
extractor that keeps up with the ADC in real time. Each hash multiplies
**n = 1520** raw bits by a fixed binary **1024 × 1520 Toeplitz matrix** (m = 1024)
over GF(2). It does this on one 62.5 MHz clock and produces 3.37 Gbps of final
random bits. Smaller parts deliver the output to a transmit link and keep the
interferometer locked.

## Data path at a glance

```
 ADC (1 GSa/s, 8 bit) --16 samples/clk--> raw_bit_selector --80 bits/clk (5 Gbps)-->
   toeplitz_extractor:  matrix_building -> submatrix_multiplication -> vector_accumulation
   --1024 bits every 19 clk (3.37 Gbps)--> output_rate_adapter --64-bit words--> transmitter

 power meter --> pid_controller --> DAC --> high-voltage amplifier --> phase shifter
```

All of the post-processing runs on one 62.5 MHz clock (`clk`). The
phase-stabilization loop has its own clock (`stab_clk`). In the reference system
it lives in a second FPGA on another board. The two parts share no signals.

## Why 80 bits per clock

The entropy budget sets the bit selection:

* Each 8-bit sample carries about 6.5 bits of min-entropy. The extractor logic is
  limited to 5 Gbps, so three bits of every sample are thrown away: the LSB and the
  two MSBs. Bits [5:1] remain. In the worst case, 3.5 bits of entropy stay in
  those 5 bits (0.7 bits per raw bit).
* 1 GSa/s ÷ 62.5 MHz = 16 samples per clock, and 16 × 5 = **80 bits per clock**.
  That is exactly the k = 80 columns the extractor consumes per clock.
* A compression ratio of m/n = 1024/1520 = 0.67 stays below the 0.7 bits of entropy
  per raw bit. By the leftover hash lemma, the output is then within ε = 2⁻²⁰ of
  uniform.

`raw_bit_selector` does the bit selection. Sample *s* of a beat (s = 0 is the
earliest) provides raw bits `[5s+4 : 5s]`, with their order kept.

## The pipelined Toeplitz hash (the core of the design)

A Toeplitz matrix is constant along every descending diagonal, so m + n − 1 = 2543
seed bits `s[]` define it completely. This design uses

```
T[i][j] = s[i − j + n − 1]        0 ≤ i < 1024, 0 ≤ j < 1520
y[i]    = XOR over j of ( T[i][j] AND x[j] )
```

Raw bit `x[j]` of a hash is bit `j mod 80` of beat `j / 80`. A full
1024 × 1520 product in one step is far too large. The matrix is instead cut into
n/k = **19 submatrices of 1024 × 80** and processed one per clock:

1. **matrix_building** presents the submatrix of the current beat,
   `T[i][b·80 + c]`. The key observation is that moving from beat b to beat b+1
   moves the needed seed window by exactly k = 80 positions. The block therefore
   keeps a working copy of the seed and shifts it up by 80 bits per beat. The
   submatrix is then a fixed view of the top 1103 (= m + k − 1) bits of that
   register. Row *i* is the bit-reversed slice `work[n−k+i +: k]`. The matrix costs wiring only, apart
   from a 2:1 selection of those 1103 bits on the beat where a new seed takes effect. After the 19th beat the
   working register is reloaded from the seed.
2. **submatrix_multiplication** ANDs each of the 1024 rows with the 80 raw bits and
   XOR-reduces the result. This is a 1024 × 80 AND array with 1024 XOR trees. The
   output is one 1024-bit *temporary vector* per clock, registered.
3. **vector_accumulation** XORs the 19 temporary vectors of a hash. The first
   vector loads the accumulator and the last one completes the hash. The final
   1024 bits are registered, and `out_valid` pulses for one clock.

The first and last beats of a hash are marked by a beat counter in
`matrix_building`. The markers travel down the pipeline with the data, so idle
clocks (`raw_valid` low) are allowed anywhere.

**Timing.** The final bits of a hash appear 2 clocks after its last raw beat, or 3
clocks after its last ADC beat when counted from the top-level input. With a beat
on every clock, one 1024-bit block leaves every 19 clocks:
1024 × 62.5 MHz / 19 = 3.368 Gbps. The extractor never stalls its input.

**Seed refresh.** The seed can be replaced while the generator runs: present 2543
bits on `seed` with a one-clock `seed_load`. The seed is held in a second register
(`seed_pending` high) and takes effect from the first beat of the next hash. A
hash therefore never mixes two matrices. Where fresh seeds come from is outside
this RTL. Reset clears the seed to all zeros, and the output is all zeros until
the first seed is loaded.

## Matching the output to the link

The extractor makes 3.37 Gbps. The optical (SFP) link carries 3.2 Gbps, and the
optional Gigabit Ethernet and USB 2.0 ports carry much less (about 969 and
260 Mbps were measured on the reference system). `output_rate_adapter` buffers up
to 4 complete blocks in a small memory and sends each one as 16 words of 64 bits,
bits 0..63 first. It uses a valid/ready handshake, and a word stays on the bus
until it is taken (an assertion checks this). A block that finds all 4 slots
occupied is **dropped whole** and counted in `drop_count`. Dropping whole extracted
blocks keeps the delivered bits uniform. The delivered rate settles at whatever
the link takes, and the 64-bit port at 62.5 MHz (4 Gbps) is fast enough for
3.2 Gbps.

## Interferometer phase lock

A power meter on the second interferometer output sees the interference drift
with the arm phase. `pid_controller` runs a positional PID on each new reading:

```
e = setpoint − reading
I = clamp(I + e, ±(2^22 − 1))
u = (kp·e + ki·I + kd·(e − e_prev)) >>> 8
dac = clamp(32768 + u, 0, 65535)
```

It uses a 12-bit reading and a 16-bit DAC code. The gains are signed 16-bit
numbers with 8 fraction bits, so the loop sign can be chosen to suit the phase
shifter. `dac_data` updates one clock after `pm_valid`. The DAC drives a
high-voltage module, which drives the phase shifter in one arm.

## Files

| file | contents |
|---|---|
| `rtl/qrng_pkg.sv` | shared sizes: ADC width, bits dropped, m, n, k, word width |
| `rtl/raw_bit_selector.sv` | 16 × 8-bit samples → 80 raw bits, one register |
| `rtl/matrix_building.sv` | seed registers, sliding window, submatrix view, seed refresh |
| `rtl/submatrix_multiplication.sv` | 1024 × 80 GF(2) matrix-vector product, registered |
| `rtl/vector_accumulation.sv` | XOR accumulation of 19 vectors per hash |
| `rtl/toeplitz_extractor.sv` | the three stages above, wired as a pipeline |
| `rtl/output_rate_adapter.sv` | block buffer, 64-bit word handshake, drop on overflow |
| `rtl/pid_controller.sv` | phase-lock PID |
| `rtl/qrng_top.sv` | top: both clock domains, ports to ADC, link, power meter and DAC |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_link_rates` |

Top-level ports: `adc_valid`, `adc_samples[16][8]`, `seed[2543]`, `seed_load`,
`seed_pending`, `tx_valid`, `tx_data[64]`, `tx_ready`, `drop_count[32]` on `clk`
and `rst_n`, plus `pm_valid`, `pm_data[12]`, `setpoint[12]`, `kp`, `ki`, `kd`,
`dac_valid` and `dac_data[16]` on `stab_clk` and `stab_rst_n`. All resets are
asynchronous and active low.

The parameter defaults are the reference sizes (M = 1024, N = 1520, K = 80). For
experiments they can be reduced as long as N is a multiple of K, K is a multiple
of 5 at the top level, and M is a multiple of the output word width.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/qrng_pkg.sv tb/tb_qrng_top.sv \
          --top-module tb_qrng_top -o sim && obj_dir/sim
```

`tb_qrng_top` runs the whole design at its default sizes. It streams 36 hashes of
random ADC samples and compares every transmitted word with a reference model
written directly from the Toeplitz definition above. It runs at full speed, then
refreshes the seed in the middle of a hash, then slows the receiver so that blocks
are dropped. It also checks that `drop_count` equals the number of blocks missing
from the output, and that the phase-lock PID settles a drifting model
interferometer. The run takes a few seconds. `tb_toeplitz_extractor` does the
same for the extractor alone and also checks the 2-clock latency and the
19-clock block interval. `tb_link_rates` drives the top at the three link rates
(3.2 Gbps, 968.7 Mbps, 259.5 Mbps). It checks the delivered rate to within 1%,
checks the fraction of dropped blocks (5%, 71% and 92%), and checks every
delivered block against the reference hash. The other testbenches check each
stage against an independent computation.

## What follows the reference design and what does not

Taken from the reference system:
* 8-bit samples at 1 GSa/s, with the LSB and the two MSBs dropped.
* m = 1024, n = 1520, k = 80, and 2543 seed bits.
* The three-stage split (matrix building, submatrix multiplication, vector
  accumulation) on one 62.5 MHz clock.
* AND/XOR arithmetic.
* Refreshable seeds.
* An output rate adjusted to the interface.
* A PID loop from the power meter to the DAC.

Choices made here, because the reference leaves them open:
* 16 samples per clock, and the order in which they are packed.
* The diagonal convention `s[i − j + n − 1]`.
* The shifting-window way of building submatrices.
* When a refreshed seed takes effect.
* Pipeline register placement and latency.
* Rate matching by dropping whole blocks, with a 4-block buffer and 64-bit words.
* The whole PID controller: its form, widths, clamps and gain format.

Not included:
* The analog and optical parts (laser, TEC, interferometer, photodetectors, ADCs,
  DAC, high-voltage module).
* The FPGA I/O logic that deserializes the ADC's output into 16-sample beats.
* The SFP serial transceiver, the Ethernet MAC and the USB controller. The
  design ends at the 64-bit word handshake.

The two FPGAs of the reference system are shown under one top for convenience.

## Resource notes

The extractor's state is three 2543-bit seed registers (seed, pending seed,
working copy), one 1024-bit temporary vector, the 1024-bit accumulator and the
1024-bit result. The output buffer is 4 × 1024 bits of memory. The arithmetic is
81,920 two-input ANDs feeding 1024 80-input XOR trees. All of this grows with
M × K, which is why K, and not n, is the knob that trades area against clock
rate.
