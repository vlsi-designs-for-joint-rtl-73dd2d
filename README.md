# PrOX: a systolic-ring array for joint channel estimation and data detection

A single-antenna user sends K+1 symbols over a block-fading channel to a
receiver with B antennas. The received block is `Y = h s^H + N`, where both
the channel vector `h` and the symbols `s` are unknown. The exception is the
first symbol, which is a known value `s_check`. Joint channel estimation and
data detection (JED) looks for the constant-modulus vector `s` that
maximises `||Y s||`. The channel estimate then follows as `Y s / ||s||^2`.

The exact problem is combinatorial. PrOX ("projection onto convex hull")
relaxes it and solves the relaxed problem by alternating minimisation. After
rescaling, each iteration comes down to two steps:

```
q~      = G-hat * s^(t-1)                 (N x N complex matrix-vector product)
s^(t)   = clip(rho * q~, -1, +1)          (per real and imaginary part)
s_1^(t) = s_check
```

Here `N = K+1`. `G-hat` is either `(I - G/alpha)^-1 / gamma` (PrOX) or its
cheap first-order approximation `(I + G/alpha) / gamma` (APrOX), with
`G = Y^H Y`. The iteration starts from `s^(0) = s_check * G(:,1) / G(1,1)`.
After `t_max` iterations, the signs of `s` are the hard BPSK/QPSK decisions.

The RTL here implements the iteration engine. It is a linear array of N
processing elements (PEs) that runs at one complex multiply-accumulate per PE
per cycle. `G-hat`, `s^(0)` and the final channel estimate are computed
outside the array: in this design they are inputs, and the testbench
`tb_prox_jed` computes them in floating point.

## The input-cyclic matrix-vector product

This is the part that needs the most explanation.

The usual way to form `G-hat * s` with N MAC units is column by column. In
that scheme one `s` entry is broadcast to all N units each cycle, so the fan-out
grows with N. This array avoids the broadcast:

* Each PE k owns one `s` register. The registers form a ring: every cycle,
  PE k passes its value to PE k-1, and PE 1 passes its value to PE N. After
  c shifts, PE k holds `s_(k+c)`, with indices taken modulo N. Each register
  drives only its neighbour and its own MAC.
* For this to work, PE k must see row k of `G-hat` in the order
  `G(k,k), G(k,k+1), ..., G(k,k-1)`. The row is therefore stored
  pre-rotated: word `a` of PE k's memory holds `G-hat(k, ((k-1+a) mod N)+1)`.
  All PEs then read the same address 0, 1, ..., N-1 at the same time, so one
  counter drives every memory.
* After N cycles each accumulator holds its entry of `q~`. The ring has also
  shifted through one full turn and is back where it started.

Example for N = 3: PE 2 stores `{G(2,2), G(2,3), G(2,1)}`. Over three cycles
it sees `s_2`, `s_3` and then `s_1`, which it receives from PE 3, which got
it from PE 1.

**Whoever writes the memories must apply this rotation.** Through the port
`mem_pe = k`, `mem_waddr = a` (0-based `k`), write
`G-hat[k][(k + a) mod N]` (0-based indices).

PE 1 (0-based index 0) corresponds to the known symbol. It has no memory,
MAC or projection. It holds `s_check` in flip-flops and feeds it into the
ring. At the end of each iteration it resets its ring register to `s_check`,
which is the step `s_1 = s_check`. It still needs a ring register, because
the other PEs' values pass through it.

## Processing element datapath

Number formats (two's complement), from `prox_pkg`:

| quantity | bits | fraction bits |
|---|---|---|
| `s` entries | 6 | 3 (+1.0 = 8) |
| `G-hat` entries | 12 | 11 |
| multiplier outputs | 18 | 14 |
| adders, accumulators, `q~` | 15 | 11 |
| `1/rho` | 12 | 11 |
| `rho` | 4-bit shift, `rho = 2^rho_shift` | |

MAC unit (`prox_cmac`), three pipeline stages:

1. A register captures the `G-hat` word read from the memory. The `s` operand
   comes straight from the PE's ring register.
2. Four 12x6 multipliers form the products. Each 18-bit product is
   registered as 15 bits: the three lowest bits are truncated.
3. `Re = rr - ii` and `Im = ri + ir`. These 15-bit adders wrap around on
   overflow and their results are registered.

The accumulator adds these partial sums with 15-bit saturation.

Projection (`prox_proj`, one instance each for the real and imaginary part):
the unit computes `q - 1/rho` and `q + 1/rho` with saturating 15-bit
adders. In parallel, it shifts `q` left by `rho_shift`, which gives `rho*q`.
The two sign bits select the output:

* `+1` if `q - 1/rho >= 0`
* `-1` if `q + 1/rho < 0`
* otherwise bits `[13:8]` of the shifted value, which is `rho*q` in the 6-bit
  `s` format

The output goes straight back into the PE's ring register. After the last
iteration, the same sign bits are captured as the hard decisions.

## Schedule and throughput

One iteration takes N+3 = K+4 cycles. The cycle index `cyc` runs from 0 to
N+2:

| cyc | ring | memory address | accumulator |
|---|---|---|---|
| 0 .. N-1 | shift | cyc+1 (word 0 is read in the cycle before) | |
| 2 | | | load first partial sum |
| 3 .. N+1 | | | add (N, N+1 flush the pipeline) |
| N+2 | load projection result | 0 | hold |

Cycle N+2 of the last iteration is special:

* The hard outputs are captured, and `done` pulses in the next cycle.
* `ready` is high. If `start` is also high, this cycle loads the next
  problem's `s^(0)` instead of a projection result.

Problems can therefore follow each other with no gap, at `t_max*(K+4)`
cycles per problem. For QPSK the throughput is `f_clk * 2K / (t_max*(K+4))`
bits per second. For BPSK it is half that.

A start from idle adds one load cycle. `t_max` (1..31; 0 counts as 1),
`rho_shift` and `bpsk` are sampled at start. So is `s_check`, which is taken
into PE 1. The `G-hat` memories must be written while `busy` is low. They
keep their contents, so several problems can share one `G-hat`.

## Files

| file | contents |
|---|---|
| `rtl/prox_pkg.sv` | widths, types, control word, saturation function |
| `rtl/prox_ghat_mem.sv` | per-PE `G-hat` row memory (N words of 24 bits) |
| `rtl/prox_cmac.sv` | complex MAC unit |
| `rtl/prox_proj.sv` | one real projection module |
| `rtl/prox_pe.sv` | PE 2..N (0-based 1..N-1) |
| `rtl/prox_pe1.sv` | PE 1 (known symbol) |
| `rtl/prox_ctrl.sv` | controller, schedule and handshake |
| `rtl/prox_top.sv` | the array; parameter `N` (default 17, i.e. K = 16) |
| `tb/prox_ref_pkg.sv` | bit-exact integer reference model |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_prox_jed` and `tb_prox_sizes` |
| `tb/prox_size_run.sv` | driver used by `tb_prox_sizes` for one array size |

`tb_prox_top` runs 26 random problems at N = 17. Some are back to back, some
start from idle. They cover BPSK and QPSK, clipping both ways, the linear
branch and accumulator saturation. The test checks every hard decision
against the reference model and checks the exact completion cycle.

`tb_prox_jed` simulates transmissions over Rayleigh channels and does the
APrOX preprocessing. It covers B = 16, K = 16 with QPSK and BPSK, and
B = 128, K = 8 with QPSK. The K = 8 case runs on the 17-PE array by padding
with zeros, which works because padded entries stay at 0. For B = 16, K = 16
QPSK it also runs exact PrOX preprocessing, with `alpha = 2 trace(G)` and the
inverse computed by Gauss-Jordan elimination. The test checks the array
bit-exactly against the model. It also checks that the symbol error rate is
below 2 % and no worse than the initial guess `s^(0)`; in practice it comes
out several times lower.

`tb_prox_sizes` builds the array at N = 5, 9, 17 and 33 side by side and
checks each one bit-exactly. It also checks that a one-iteration problem takes
K+4 cycles: 8, 12, 20 and 36.

Simulation with Verilator, for example:

```
verilator --binary --timing -Irtl -Itb rtl/prox_pkg.sv tb/prox_ref_pkg.sv \
    rtl/*.sv tb/tb_prox_top.sv --top-module tb_prox_top
./obj_dir/Vtb_prox_top
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.

## What follows the published design and what does not

These parts follow the published architecture:

* the ring of N PEs with a reduced first PE
* the rotated row storage
* the MAC and projection structure, all number widths, and the wrap/saturate
  choices
* `rho` as a power of two applied by shifting
* hard decisions from sign bits
* K+4 cycles per iteration

These are choices of this implementation:

* **Memories.** They are flip-flop arrays with one write port each; the
  published ASIC uses latch arrays.
* **Product bits.** The three product bits that are dropped are truncated.
* **Accumulator.** It is loaded with its first partial sum rather than
  cleared. The accumulator and the MAC output register are one register.
* **`1/rho`.** It is derived from `rho_shift` and not loaded separately. For
  `rho_shift >= 12` it becomes 0 in 12 bits.
* **Projection output bits.** They are taken as bits `[13:8]`, which keeps 3
  fraction bits. The description speaks of "the 6 most significant bits",
  and in a 15-bit value those would carry only 2.
* **BPSK.** It is a run-time mode: the imaginary part of `s` is forced to
  zero. A BPSK-only array would leave out the imaginary datapath instead.
* **Interface.** The start/ready/done handshake, back-to-back overlap,
  configuration sampled at start, the load port, the `acc_sat` monitor
  output and the active-low asynchronous reset are all choices of this design.
* **Default size.** The default is N = 17. Other published sizes (5, 9, 33)
  are values of the parameter `N`. Smaller problems also run on a larger
  array with zero padding, but take N+3 cycles per iteration.

Not included are the preprocessing (`G = Y^H Y`, the scaling and, for exact
PrOX, the matrix inverse), the initial vector `s^(0)`, and the channel
estimate `Y s / ||s||^2`.
