# A chaotic-amplitude-control Ising solver in SystemVerilog

This is the RTL of a digital Ising machine. It searches for low-energy spin configurations
σ ∈ {−1, +1}^N of

    H(σ) = −½ Σ_ij w_ij σ_i σ_j,      w_ij ∈ {−1, 0, +1}

(equivalently, large cuts of a graph) with *chaotic amplitude control* (CAC). CAC
integrates a set of analog amplitudes x_i, one per spin. Each x_i has its own error
variable e_i, which pushes |x_i| toward a target amplitude a. Unlike gradient descent or
annealing, these dynamics never settle: an amplitude that strays is pulled back, and a
configuration the system lingers in is pushed away again. The machine therefore keeps
visiting new low-energy states, and the hardware remembers the best one seen. The
architecture follows a published FPGA implementation of CAC (a Kintex UltraScale board with a
5 W budget). That design handles more than 2000 sparsely connected spins and at least 1100
fully connected ones, processing the coupling matrix in 100 × 100 blocks.

## The dynamics, as the hardware computes them

One *iteration* of the machine is built around one matrix–vector product (MVM):

1. `m_i = Σ_j w_ij (β x_j)` over all spins. The energy `H` of the signs `σ_j = sign(x_j)` is
   computed in the same pass.
2. If `H < H_opt`, the signs are copied to the best-configuration memory.
3. `n_x` Euler steps of the amplitudes, all using the same `m`:
   `x_i ← x_i + dt_x · [ (p − 1) x_i − x_i³ + e_i m_i ]`.
4. `n_e` Euler steps of the error variables:
   `e_i ← clamp( e_i − dt_e · ξ e_i (x_i² − a), ±e_max )`.
5. Modulation update (once per MVM):
   * `a ← α + ρ tanh(δ (H − H_opt))`;
   * `ξ ← ξ + γ`;
   * if `τ` MVMs have passed without improvement, `ξ ← 0`;
   * if `H < H_opt`, record `H_opt`, the MVM index `ν_opt` at which it was found, and
     restart the `τ` count.

Doing several cheap x and e steps per expensive MVM (`n_x = 6`, `n_e = 3` or `4` in the
published settings) is what makes the machine fast. The product is the bottleneck, and the
nonlinear terms need only one multiply-accumulate pipeline per spin.

All state and parameters are 18-bit two's complement with 12 fraction bits (1 sign bit,
5 integer bits), written Q5.12 below. Products are rescaled by an arithmetic shift of
12 and saturate to the 18-bit range. `dt_x` and `dt_e` are powers of two and are applied
by shifts (`dtx_sh`, `dte_sh`; 6 and 4 by default, i.e. 2⁻⁶ and 2⁻⁴). ξ must represent
rates as small as γ = 0.00011. It is therefore kept in an unsigned 32-bit accumulator
with 28 fraction bits, and its top 20 bits (Q4.16) enter the e pipeline. The 32-bit
product sums and the energy accumulator are wide enough for 2000 spins.

## Block decomposition and memory layout

The spins are handled in blocks of `U = 100`. For a problem of `n` spins there are
`nb = ⌈n/U⌉` blocks (20 at most, `N_MAX = 2000`). Lane `l` of block `b` holds spin
`b·U + l`. Every per-spin quantity lives in a *lane RAM* (`lane_ram`): U narrow RAMs
sharing one address, so a whole block of U values is read or written per cycle.

| memory | lanes × width | depth | contents |
|---|---|---|---|
| J | 100 × 200 bits | nb² ≤ 400 | lane r, address br·nb + bc: row r of coupling block (br, bc), 2 bits per coupling |
| X, XROW | 100 × 18 | 20 | x_i; XROW is a copy written with X, read by block row |
| E | 100 × 18 | 20 | e_i |
| MV | 100 × 32 | 20 | coupling sums m_i of the last MVM |
| X2 | 100 × 18 | 20 | x_i² from the x lanes, read by the e lanes |
| BEST | 1 × 100 | 20 | sign bits of the best configuration (1 = σ = −1) |

A coupling is coded in two bits `{w1, w0}`: `01` is +1, `11` is −1, and `00` or `10` is 0.
With this code, negation is an XOR with `w1` and masking is an AND with `w0`. Those two
gates are what the product and energy circuits are built from. The couplings are stored
densely, so a sparse graph costs as much memory as a dense one of the same size. The J
memory for `N_MAX = 2000` holds 400 × 100 × 200 bits = 8 Mbit.

Padding lanes of the last block, when U does not divide n, must have zero couplings. Their
x and e then evolve on their own and never reach the real spins or the energy.

## The coupling product (the hard part)

The product core (`coupling_mvm`) takes one 100 × 100 coupling block and one block of
x per cycle. It produces 100 partial dot products per block. The ingredients are described
below.

**β first.** x is multiplied by β once per block, before the product (`x̃ = βx`). This
shrinks the range of the values that go through the adder tree.

**Multiplication without multipliers** (`pair_mult`). A ternary product needs no
multiplier. The cell handles two neighbouring columns at once:

* Even column `2j`, one LUT3 per bit: `r = w0 & (x̃ ⊕ w1)`. This gives x̃, 0, or the
  bitwise complement of x̃. The complement is `−x̃ − 1`, so a −1 coupling has an error
  of one LSB (2⁻¹²). The published design accepts this error so that the product fits in
  a single three-input LUT per bit.
* Odd column `2j+1`: a multiplexer selects x̃ or 0 by the LSB of the coupling.
* The carry chain then adds or subtracts the multiplexer output, chosen by the MSB of
  the odd coupling. This path is exact.

One cell therefore does two products and one addition. 50 cells per row and 100 rows give
the 10 000 products of a block in one cycle.

**Adder tree** (`coupling_dot`, one per row):

* a second carry-chain stage adds pairs of cell outputs, reducing 50 terms to 25 (one
  cycle in total for both carry stages);
* a tree of 5-input adders follows, built from cascaded DSP slices, each level
  `DSP_LAT = 5` cycles deep. 25 → 5 → 1 takes two levels.

The latency of a row is therefore `2 + 5·⌈log₅⌈U/4⌉⌉ = 12` cycles for U = 100. A 1-bit
valid and a tag travel with the data.

**Block accumulation.** Block columns are issued fastest: (br, 0), (br, 1), … (br, nb−1),
then the next block row. Each row's accumulator restarts on the first block column of a
block row. When the last one arrives, it writes the U finished sums of block row `br` into
the MV memory. One MVM therefore takes `nb² + 16` cycles: one block per cycle plus the
pipeline drain. This matches the published `K + (N/u)²`, with `K ≈ 2 + 5 log(N−4)/log 5`.

**Energy in the same pass** (`ising_energy`). While a block flows through the product, the
energy circuit reads the same coupling words and the signs of the column block and the row
block. The signs are the MSBs of x, taken from X and XROW. The product `w_ij σ_j` is again
two gates: `S1 = (w1 ⊕ σ_j) & w0`, `S0 = w0`. The result is summed per row, multiplied by
`σ_i` and summed over the rows. The energy of a partitioned matrix is the sum of its
blocks' energies, so a running accumulator cleared at the start of each MVM gives
`H = −acc/2`. It is ready 3 cycles after the last block, which is inside the product's
drain.

## The x and e lanes

Each of the 100 lanes has an x pipeline (`x_unit`) and an e pipeline (`e_unit`). Blocks are
fed through them in sweeps, one block per cycle, with a tag that carries the block address
to the write-back.

* **x lane**, 8 stages. It computes x², `e·m` (the product's result scaled by the error
  term), `p − 1`, `g = (p−1) − x²`, `g·x`, the sum with the injection term, the shift by
  `dt_x`, then `x + step`. It writes the new x to X and the x² *of the input x* to X2.
  A sweep over nb blocks takes `nb + 8` cycles.
* **e lane**, 9 stages. It computes `x² − a`, `−ξe`, their product, the shift by `dt_e`
  and the addition to e, then clamps to ±`e_max` (the "overflow" limit of the published
  circuit). A sweep takes `nb + 9` cycles.

The e update uses the x² that the x lanes wrote during their last sweep, i.e. the square of
the amplitude *before* the last x step. The published circuit passes x² from the x circuit
to the e circuit through a dual-port RAM in exactly this way. Its simplified pseudocode
instead squares the amplitude saved at the start of the iteration (the same thing when
`n_x = 1`). The RAM version is the one built here.

`dtx_sh` and `e_max` travel down the pipelines with the data, so changing them between runs
is safe at any time.

## Amplitude control

`amp_control` runs once per MVM, in the cycle after the x and e sweeps. It applies step 5
above in the order of the published pseudocode: the new `a` uses `H_opt` from *before*
this MVM's improvement.

tanh is a 17-point piecewise-linear table, `round(4096·tanh(k/4))` for k = 0…16, with linear
interpolation between the points. Its largest error is about 0.01. Beyond |z| = 4 the
output is tanh(4), and negative arguments use odd symmetry. The argument `δ·(H − H_opt)` is
formed in 40 bits and saturated, because `H_opt` starts at the largest 32-bit value.

At the start of a run, `a = α`, `ξ = 0`, `H_opt` is the largest value, and `ν = ν_opt = 0`.

## One iteration, cycle by cycle

`cac_control` is a single FSM:

| phase | cycles |
|---|---|
| start of MVM (clears the energy accumulator) | 1 |
| MVM: nb² block issues, then drain | nb² + 16 |
| copy of the signs to BEST, only after an improvement | nb + 2 |
| `n_x` x sweeps | n_x (nb + 8) |
| `n_e` e sweeps | n_e (nb + 9) |
| modulation update | 1 |

With 2000 spins (nb = 20), n_x = 6 and n_e = 3, an iteration without an improvement takes
1 + 416 + 168 + 87 + 1 = 673 cycles.

## Host link

The published machine loads x, e and the couplings over a UART and returns its results the
same way. `uart_rx`/`uart_tx` are 8N1, `CLKS_PER_BIT = 434` (115 200 baud at 50 MHz).
`host_if` speaks this byte protocol, with all multi-byte values little endian:

| bytes | meaning |
|---|---|
| `01 id v0 v1 v2 v3` | set parameter `id` (0 n, 1 MVMs per run, 2 β, 3 p, 4 α, 5 ρ, 6 δ, 7 γ as Q4.28, 8 τ, 9 n_x, 10 n_e, 11 dt_x shift, 12 dt_e shift, 13 e_max) |
| `02` + n × 3 bytes | initial x_0 … x_{n−1} (18-bit values) |
| `03` + n × 3 bytes | initial e |
| `04` + nb²·U·U/4 bytes | couplings: for each block row, block column and row, U/4 bytes; byte k holds columns 4k…4k+3, lowest column in bits 1:0 |
| `05` | run; on completion the reply is H_opt (4 bytes), ν_opt (4 bytes), then ⌈U/8⌉ bytes of best signs per block |

Set `n` before loading. After reset, n_x = 6, n_e = 3, the shifts are 6 and 4, e_max is the
largest value and one MVM is done per run. A run continues from the x and e left by the
previous one, and only the modulation state restarts. `cac_top` also brings out `busy_o`
and three event pulses (an improvement, a ξ reset, an e clamp) for indicators.

## Where this design departs from the published one

* **One clock.** The published design derives 50, 300 and 100 MHz clocks (global, x, e) from
  a 250 MHz board clock with a PLL, and gates them with clock-enable buffers. These are
  vendor primitives and are not built here. Everything runs on `clk_i`; idle units simply
  receive no valid data.
* **Phases in sequence.** The published design overlaps the x and e sweeps with the
  product. Here they follow one another. The arithmetic per MVM is identical, but an
  iteration takes the sum of the phase times rather than roughly the product time.
* **Memories.** One x, e, x², product-sum and best-sign memory are used, with no
  per-phase copies. The x memory is duplicated to give the energy circuit its own read
  port.
* **Own choices where the source is silent:** the UART rate and protocol, the ξ
  accumulator format, the tanh table, saturation in every arithmetic stage, the e clamp
  as a run parameter, the reset values, and the cycle-exact control sequence.

## Capacity

At the defaults (U = 100, N_MAX = 2000), the design holds:

* every SK instance size the published machine was benchmarked on (up to 1100 spins, i.e.
  11 block rows);
* the GSET graphs G22–G42 (2000 spins, 20 block rows, 400 coupling blocks). Their ±1
  weights fit the ternary code.

The published SK parameters (β = 0.25, α = 3, ρ = 3, dt = 2⁻⁶ / 2⁻⁴, γ = 0.00011,
τ = 1000) are representable. For the GSET setting δ = 2.6/N at N = 2000 (0.0013), Q5.12
gives 5/4096, about 4 % coarse.

## Verification

Every module has a self-checking testbench in `tb/`. The common reference is
`tb/cac_ref_pkg.sv`: a bit-exact software model of one iteration, including the
one-LSB approximation of the −1 product, the saturation points, the tanh table and the ξ
accumulator. The testbenches are:

* `tb_pair_mult`, `tb_coupling_dot`, `tb_coupling_mvm`, `tb_ising_energy`, `tb_x_unit`,
  `tb_e_unit`, `tb_amp_control`, `tb_lane_ram`: random stimulus against the model, with the
  pipeline latencies checked (12 cycles for a U = 100 row).
* `tb_cac_control`: issue order and the per-phase cycle counts of the table above.
* `tb_uart_rx`, `tb_uart_tx`, `tb_host_if`: framing, byte order, dropped frames and the
  protocol.
* `tb_cac_circuit` (U = 8, 20 spins): final x and e, H_opt, ν_opt and the best signs bit for
  bit, and the exact run length in cycles.
* `tb_cac_top` (U = 8, 4 clocks per bit): the whole chip driven only through its serial
  pins, over two consecutive runs. It counts every mechanism: serial bytes, loads, block
  products, x and e sweeps, best-sign copies, improvements, ξ resets and e clamps.
* `tb_cac_top_full`: the chip at its default parameters, with 250 spins in 3 × 3 blocks
  and a 48-MVM run. Parameters, the run command and the reply go through the UART at
  434 clocks per bit. The couplings and the initial x and e are written straight into the
  memories, because loading 20 000 bytes serially would take about 10⁸ simulated cycles.
  The serial load path is covered at reduced size.

To run one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
        rtl/cac_pkg.sv tb/cac_ref_pkg.sv tb/tb_cac_top.sv --top-module tb_cac_top
    ./obj_dir/Vtb_cac_top +verilator+rand+reset+2

Each prints `TB_RESULT checks=N failures=M`. The full-size testbench takes a few minutes
to compile: the 100 product rows of 100 columns each make a large model.
