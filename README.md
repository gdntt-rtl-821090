# GDNTT — a bit-serial, row-parallel NTT engine built into an SRAM array

Lattice-based post-quantum schemes spend most of their time multiplying
polynomials modulo a small prime. The number-theoretic transform (NTT) cuts
that to O(N log N). It is still a memory-bound workload, because every
butterfly stage reads and rewrites every coefficient.

This design keeps each polynomial inside an SRAM array, one 14-bit
coefficient per row. Each row gets a tiny arithmetic unit of its own, placed
next to the array. A butterfly stage then runs on all rows at once, one bit
per clock cycle, least significant bit first. A 1024-point transform is ten
such stages. With 14-bit words every stage takes 145 cycles, whatever N is,
so a 1024-point NTT finishes 1450 cycles after `start`.

Two such arrays ("cores") run side by side under one controller. Each core
holds one operand. The point-wise product of the two spectra goes over a
direct row-to-row link between the cores. NTT on both, then point-wise
product, then inverse NTT, gives the product `a*b mod (x^N - 1, q)` with
q = 12289.

The hard part of the design is moving butterfly partners together. Rows i
and i+h must meet, with h changing from stage to stage, and that happens
through bit lines that only ever connect a row to its own unit. The
section "One butterfly stage, cycle by cycle" explains how.

## The array and its two access paths

Every row stores 28 bits: sub-array **A** is columns 0..13, which hold the
coefficient (LSB in column 0). Sub-array **B** is columns 14..27, scratch
space for a copy of the butterfly partner's word. Each cell (a 10T cell in
silicon, modelled logically in `sram10t_array`) can connect to one of two
bit-line pairs:

* **CBL/CBLB** are per row and lead to the row's near-memory unit. A column
  word line (CWL) picks which cells of the row drive them. When one cell is
  selected, CBL/CBLB carry the bit and its complement. When bit k of A and
  bit k of B are selected together, the shared lines compute
  `CBL = A AND B` and `CBLB = NOR(A, B)`. Those two values are the inputs of
  the adder. **A CBL read is destructive.** The model leaves the cells that
  were read at 0, so the schedule writes back every word it still needs.
* **VBL/VBLB** are per column and lead through a 28:1 column mux to the I/O
  port. They are used only to load and unload coefficients, one bit per
  cycle, while the engine is idle.

Two write enables per row (WEN1, WEN2) stand for the two write pulses in
one clock cycle. In the same cycle, one group of rows can rewrite column k
of A while another group writes column 14+k of B.

## One butterfly stage, cycle by cycle

In a stage with span h (`span_log = log2 h`), row i pairs with row `i ^ h`.
The row with bit `span_log` clear is the **upper** row, holding operand
`t`. The row with that bit set is the **lower** row, holding `u` and
receiving the twiddle factor. Partners swap words bit by bit over an
exchange network between their units. The network is a fixed XOR-partner
permutation chosen by `span_log`. A stage has three steps (L = 14):

| step | phases (length) | upper row (t) | lower row (u) |
|---|---|---|---|
| 1: place t | S1_RD (L), S1_WR (L) | reads t, rewrites it to A, sends it to the partner | writes the received t into B |
| 2: multiply | S2_RD (L), S2_MUL (16), S2_WR (L) | writes the received `u*w` into B | reads u, computes `u*w mod q`, rewrites A, sends it |
| 3: add/sub | S3_INV_RD (L), S3_INV_WR (L), S3_ADD (L), S3_FIX (17), S3_WR (L) | computes `A + B = t + uw` | inverts `uw` in A, then computes `B + ~A + 1 = t - uw` |

That is 2L + (2L+16) + (4L+17) = 145 cycles. After step 2 every row holds
both operands of its butterfly, one in A and one in B. Step 3 is then a
purely local bit-serial addition. In S3_ADD both sub-arrays are read
together, and the AND/NOR pair from the bit lines feeds a full adder
(`basic_arith`). Upper rows start with carry 0. Lower rows start with
carry 1, so the same adder subtracts, because their A word was inverted in
place first.

**Modular correction (S3_FIX, 17 cycles).** The 15-bit raw sum
`s = {carry, x}` is copied into a second register. Then a constant K is
added to it, again bit-serially through the same adder, over 15 cycles.
The last cycle picks the result:

* Upper rows use `K = 2^15 - q`. If that addition carries, then s ≥ q and
  `s - q` is taken.
* Lower rows use `K = q`. The corrected value is taken when the
  subtraction's own carry was 0, which means `t < uw` and the difference
  was negative.

Every result is below q again and written to A in S3_WR.

## Near-memory unit

`near_mem_unit` (one per row) contains the following:

* `x_q`, a 14-bit shift register holding the row's word. It fills from the
  bit lines LSB first. In write phases it rotates, so `x_q[0]` is both the
  bit written and the bit offered to the partner.
* `y_q`, which receives the other core's word during a point-wise product.
* `basic_arith`, the bit-serial full adder with its carry latch. A mux
  loads the initial carry (0 for add, 1 for subtract) in the bit-0 cycle.
* `barrett_modmul`, a 16-cycle multiplier: 14 shift-and-add steps, one
  Barrett estimate `t = floor(p * floor(2^28/q) / 2^28)`, and one cycle
  holding `p - t*q` reduced by at most two subtractions of q. The unit
  loads its result into `x_q` in the cycle the multiplier signals done.
  This choice between adder result and multiplier result is the second mux
  of the arithmetic block.
* The two correction registers of S3_FIX.

## Twiddle factors and data order

`twiddle_factors` builds the table `TW[e] = w^e mod q`. Here `w = 11^((q-1)/N)`
is a primitive N-th root of unity; 11 generates the multiplicative group
mod 12289. The table is computed at elaboration time, so no data file
exists. Each lower row gets its factor combinationally from `span_log`:

* Forward (Cooley–Tukey, spans N/2 … 1): row i gets `w^(brv(i >> (span_log+1)) * h)`,
  where brv reverses the `log2(N) - 1 - span_log` block-index bits.
  Input is in natural order and the spectrum comes out in **bit-reversed**
  row order.
* Inverse (spans 1 … N/2, applied to the bit-reversed spectrum): row i gets
  `w^-(k * N/(2h))` with `k = i mod h`. Output is in natural order. A final
  pass SC_RD / SC_MUL / SC_WR (L+16+L cycles) multiplies every row by
  `N^-1 mod q`.

Because the point-wise product works row by row, the bit-reversed order
between the NTT and the INTT never needs undoing.

## Two cores and the point-wise product

`gdntt_top` instantiates the controller, two `ntt_core`s and the pulse
generator model. During PW_RD each core exposes the bits it senses on its
CBLs (`sensed`). The other core's unit in the same row shifts those bits
into `y_q`. Both cores then multiply (PW_MUL, 16 cycles) and write back
(PW_WR), so after 44 cycles both arrays hold the product spectrum.

## Control, commands and interface

`top_controller` broadcasts one registered control word to both cores:
phase, count within the phase, `span_log`, and the inverse flag. Each core
decodes this word locally. `row_controller` derives each row's word lines
and write enables from the row's upper/lower role. `column_controller`
raises the column word lines for bit `cnt` of A, of B, or both.

| op | sequence | cycles (N = 1024) |
|---|---|---|
| `OP_NTT` | log2 N stages, spans N/2 … 1 | 1450 |
| `OP_INTT` | log2 N stages, spans 1 … N/2, then scaling by N^-1 | 1494 |
| `OP_PWM` | PW_RD, PW_MUL, PW_WR | 44 |

Top-level ports:

* `start` and `op` issue a command. A start while the controller is busy
  is ignored.
* `busy` is high while a command runs, and `done` pulses once in the cycle
  after its last phase.
* `phase` shows the controller's current phase.
* The host port is `host_en`, `host_core`, `host_row`, `host_col`,
  `host_we`, `host_wdata` and `host_rdata`. Each access moves one bit
  through the column mux of the selected core. Columns 0..13 are the
  coefficient bits. A write takes effect at the clock edge; the read is
  combinational. Use the port only while the controller is idle.
* `glitch[4:0]` shows the pulse generator's outputs, described in the next
  section.

## The pulse generator

In the silicon design, a generator of narrow pulses, each as wide as a
gate delay, lets one clock cycle contain a whole sequence of steps:
precharge, word-line pulse, sense, latch, write. The RTL keeps the
cycle-level behaviour and models each such sequence as one clock edge.
`glitch_generator` is a **behavioural model**: it is not synthesizable
and drives nothing inside the design. It emits the five pulses in order
after every rising clock edge, each `T_PULSE` time units wide, for
observation and for timing studies.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` (gdntt_top, ntt_core, …) | 1024 | coefficients per polynomial = rows per array; power of two, ≥ 4 |
| `L` | 14 | coefficient width; the array has 2L columns |
| `Q` | 12289 | modulus, prime, with N dividing q−1 |
| `GEN` | 11 | generator of the multiplicative group mod q |
| `T_PULSE` | 1 | pulse width of the behavioural pulse model |

Shared constants, the phase enum `phase_t`, the command enum `op_t` and the
control word struct `ctrl_t` live in `gdntt_pkg`.

## Where this RTL departs from, or adds to, the published design

* The modulus and the root of unity are not given by the source. q = 12289
  is a common 14-bit NTT prime, and it supports every transform size up to
  N = 4096.
* Bit-cell transistors, sense amplifiers, write drivers and the pulse
  timing are analog. They are represented only by their logical effect in
  `sram10t_array`: sensing as AND/NOR, a destructive read, and two write
  enables per cycle.
* The split of the 4L+17-cycle step 3 into phases, the correction method,
  the 1+15+1 layout of the 17 correction cycles, and the register
  organisation of the unit are this design's choices. So are the exchange
  network (a fixed partner permutation per span), the command interface,
  the INTT scaling pass, and the point-wise pass timing.
* The transform length is fixed by the parameter N. A build for N = 1024
  cannot run a 256- or 512-point transform; build with `N = 256` or
  `N = 512` instead.
* The published latency figures (14.9 / 19.4 / 26.8 µs for N = 256 / 512 /
  1024) are longer than this schedule gives: 1160 / 1305 / 1450 cycles,
  6.6 / 8.0 / 9.8 µs at the stated clock rates. The source does not say
  what its figure includes, so loading and unloading may account for the
  difference.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=… failures=…` and stops itself with a watchdog. For
example, with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_gdntt_top \
    rtl/gdntt_pkg.sv rtl/*.sv tb/tb_gdntt_top.sv && ./obj_dir/Vtb_gdntt_top
```

What the testbenches cover:

* `tb_gdntt_top` (N = 16) multiplies two random polynomials end to end:
  it loads them, runs NTT, PWM and INTT, and compares the result with a
  schoolbook cyclic convolution. It checks the cycle counts (145 per
  stage). It also counts how often each mechanism fired: exchanges, both
  corrections, scaling, point-wise product and I/O. A mechanism that never
  fires counts as a failure.
* `tb_gdntt_full` runs the same flow on the default build (N = 1024) and
  checks all 8201 results. The intermediate results are read straight from
  the arrays, because the bit-serial port would need 15 cycles per word.
  Even so, most of the simulated time is loading and unloading. The run
  takes a few minutes of simulation.
* `tb_ntt_core` checks one core against a direct DFT evaluation.
* The remaining testbenches check the array against a shadow model, the
  multiplier on random and extreme operands, and the twiddle table
  against modular powers. They also check the controller's exact phase
  sequence and the unit's result for every phase and row role.

All testbenches override `N` downwards except `tb_gdntt_full`.

## How far to trust it

Every block's testbench compares against values computed independently
inside the testbench: modular arithmetic on 64-bit integers, and direct
O(N²) transforms. Each testbench also fails when one deliberate error is
put into its block. The arithmetic, the data movement and the
cycle-level schedule are checked end to end.

What is not checked:

* Anything electrical: pulse widths, sense margins, and whether two writes
  fit in one cycle.
* Behaviour when the host port is used while a command runs. This is not
  allowed and is not guarded.
