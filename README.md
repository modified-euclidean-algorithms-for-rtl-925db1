# A fixed-iteration Euclidean key-equation solver and the Reed-Solomon decoder around it

A Reed-Solomon decoder spends most of its logic and control on one step: solving the
*key equation*

    Lambda(z) S(z) = Omega(z)  (mod z^2t)

for the errata locator `Lambda(z)` and the errata evaluator `Omega(z)`, given the `2t`
syndromes `S_0..S_{2t-1}` of the received word. The textbook way is the extended Euclidean
algorithm (EEA): divide polynomials repeatedly and stop as soon as the remainder's degree
drops below `t`. In hardware that stopping rule is awkward. Finding a polynomial's degree
means collecting information from every coefficient register. The number of iterations also
varies with the number of errors, so the controller must deal with a variable latency.

The solver here uses a modified EEA. It runs exactly `2t` iterations whatever the error
pattern, and it never looks at a degree. Two observations make this possible:

* Long division can be done one leading coefficient at a time ("partial division"). Scaling
  the operands crosswise (`V <- U_lead * V - V_lead * U`) removes the field division.
* When there are fewer errors than the worst case, the iterations left over only multiply
  the answer by `z` and by a nonzero constant. Both factors cancel in the later correction
  steps, so nothing has to notice that the real work is already finished.

With erasures (symbols marked unreliable by the channel), the same loop first spends one
iteration per erasure. Each of these iterations multiplies the working polynomials by
`(1 - X z)`, where `X` is the erasure location. This builds the erasure locator and the
modified syndrome in the same registers, with the same multipliers. The remaining
iterations then solve the modified key equation. A separate erasure-locator unit and a
separate polynomial multiplier are not needed, and the total count stays at exactly `2t`.

The algorithm is the one published by D. V. Sarwate and Z. Yan in "Modified Euclidean
Algorithms for Decoding Reed-Solomon Codes". This repository gives synthesizable SystemVerilog for the solver and for a complete,
simple errors-and-erasures decoder built around it. The default code is RS(255,239) over
GF(2^8), so `t = 8`.

## The solver loop in register terms

The solver (`rs_kes`) holds four polynomials of `2t+1` coefficients each (`U`, `V`, `W`,
`X`), a small signed counter `delta`, and a shift register `psi` of erasure locations.

Initial values:

    delta = -1,  U = z^2t,  V = S(z),  W = 0,  X = 1,  psi = (X_e1, X_e2, ..., 0, 0)

In each of the `2t` iterations, in one clock and all from the old values:

    FIRST = (psi_0 != 0)                              -- an erasure is waiting
    SWAP  = !FIRST && V_{2t-1} != 0 && delta < 0
    (gamma, xi) = FIRST ? (psi_0, 1) : (U_2t, V_{2t-1})

    V <- gamma * zV - xi * (FIRST ? V : U)
    X <- gamma * zX - xi * (FIRST ? X : W)
    U <- SWAP ? zV : U
    W <- SWAP ? zX : W
    delta <- SWAP ? -delta-1 : (FIRST ? delta : delta-1)
    psi   <- psi shifted down by one place (psi_0 is dropped)

How to read this:

* **Errors step (`FIRST = 0`).** `V` always holds the current remainder. It is shifted up
  by one place, so its leading coefficient sits at `z^2t`, where `U`'s leading coefficient
  sits. The cross-multiplication then cancels that coefficient. `delta` tracks the degree
  difference between `U` and `V` without anyone computing a degree. When `delta < 0` and
  `V` really has a term in that place, the roles of divisor and dividend change. That is
  the `SWAP`, which is also the point where the classical EEA would start its next
  division. `X` and `W` follow the same updates and produce the locator.
* **Erasure step (`FIRST = 1`).** With `gamma = psi_0` and `xi = 1`, the update becomes
  `V <- V(psi_0 z - 1)` and `X <- X(psi_0 z - 1)`. This is one factor of the erasure
  locator applied to both `V` and `X`. There is never a swap, and `delta` does not change.
  After `mu` such steps `psi_0` is zero and the loop continues as the errors-only
  algorithm. With no erasures the block is the plain errors-only variant.
* **Coefficient slices.** Coefficient `i` of `zV` is `V_{i-1}`. Each coefficient therefore
  needs only its lower neighbour plus four broadcast values: `gamma`, `xi`, `FIRST` and
  `SWAP`. `kes_cell` is one such slice, with four GF multipliers and two multiplexers.
  `rs_kes` is a column of `2t+1` slices plus the controller, which computes `FIRST`,
  `SWAP`, `gamma` and `xi` from three register values (`psi_0`, `U_2t`, `V_{2t-1}`) and
  the sign of `delta`. No signal has to gather data from all the cells.

### What comes out

Suppose `nu` errors and `mu` erasures occurred with `2 nu + mu <= 2t`, and write
`eta = nu + mu`. After the `2t` iterations:

    X_{2t-eta+i} = beta * Lambda_i   (i = 0..eta),   X_j = 0 below that
    V_{2t-eta+i} = beta * Omega_i    (i = 0..eta-1), V_j = 0 below that, V_2t = 0
    delta = 2 nu + mu - 2t - 1 < 0,  psi_0 = 0

Here `beta` is some nonzero constant. In other words, `X = beta z^(2t-eta) Lambda(z)` and
`V = beta z^(2t-eta) Omega(z)`. The testbench checks every coefficient against `Lambda`
and `Omega` computed straight from their definitions.

The factor `beta z^k` is harmless. The nonzero roots of `X` are the roots of `Lambda`.
At such a root, the formal derivative gives `z X'(z) = beta z^k z Lambda'(z)`, so the
factor cancels in Forney's formula. The correction stage therefore uses `X` and `V` as
they come, without locating their lowest nonzero coefficient.

`rs_kes` also outputs `eta`, computed as `(delta + 2t + 1 + mu)/2`, where `mu` is the
number of erasure steps it counted. This is the locator degree, recovered without a
degree search.

### Detecting an uncorrectable word

The solver sets `fail` when `delta >= 0` or `psi_0 != 0` at the end. The second case means
more than `2t` erasures; `psi` has `2t+1` places, so that the `(2t+1)`-th erasure is still
there after `2t` shifts. These two conditions are sufficient for failure but not
necessary. With `t+1` random errors and no erasures, the loop typically swaps on every
other step and ends with `delta = -1`. It then delivers a degree-`t` "locator" whose roots
mostly do not lie at code positions. For this reason the correction stage counts the roots
it finds during the Chien search. It reports the word as uncorrectable when that count
differs from `eta`. The only errors that escape are patterns close enough to another
codeword to be decoded into it, which no decoder can tell apart.

## The decoder

`rs_decoder` chains three stages and a buffer. It works on one word at a time:

| stage | module | cycles | what it does |
|---|---|---|---|
| syndrome | `rs_syndrome` | `N` (one per input symbol) | Horner accumulation of `S_j = R(alpha^(B0+j))`, `j = 0..2t-1`; stores the location `alpha^i` of every symbol marked `in_erase` into `psi`, in arrival order |
| buffer | `rs_buffer` | — | stores the received word while the other stages work |
| key equation | `rs_kes` | `2t` iterations + 1 load | the loop above |
| correction | `rs_chien_forney` | `N` (one per output symbol) | Chien search `X(alpha^-j) = 0` and Forney value `e_j = z^B0 V(z) / (z X'(z))` at `z = alpha^-j`; adds `e_j` at roots; counts roots |

Symbols travel highest degree first (`R_{N-1}` first), both in and out. The erasure
location of the symbol of degree `i` is `alpha^i`. A register starts at `alpha^(N-1)` and
steps by `alpha^-1` per symbol. The Chien search keeps one register per coefficient,
`X_i z^i`, loaded with `X_i alpha^(-(N-1) i)` and multiplied by the constant `alpha^i` for
each symbol. `z X'(z)` is the XOR of the odd-indexed terms, which costs nothing extra in
characteristic 2. The division in Forney's formula uses a combinational inverter,
`a^(2^m - 2)`, built from multiplications.

### Timing

Take edge `A` as the clock edge that accepts the last input symbol:

* `A+1`: syndromes ready, and the solver loads.
* `A+2 .. A+2t+1`: the `2t` iterations. `done` is high in the cycle after `A+2t+1`.
* `A+2t+2`: the correction stage loads `X`, `V`, `eta` and `fail`.
* `A+2t+3 .. A+2t+2+N`: the buffer is read. Each corrected symbol appears two cycles after
  its read.
* `A+2t+3+N`: `in_ready` is high again.

One word therefore takes `2N + 2t + 2` cycles from its first input to the first input of
the next word. That is 528 cycles for RS(255,239). The solver latency is fixed. The
testbenches check that `done` follows `start` by exactly `2t+1` clocks for every pattern.

### Ports of `rs_decoder`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `in_valid`, `in_ready` | in/out | input handshake; a symbol is taken when both are high |
| `in_sym[7:0]`, `in_erase` | in | received symbol, and whether it is an erasure |
| `out_valid`, `out_sym[7:0]` | out | corrected symbol stream; there is no output backpressure |
| `out_err` | out | this position was found as an errata location |
| `out_last` | out | last symbol of the word |
| `out_fail` | out | valid with `out_last`: the word was uncorrectable. If the solver failed, the word was passed through unchanged. If only the root count disagreed, the output is not a codeword. |

### Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 255 | code length, at most `2^m - 1`; shortened codes either set `N` or send leading zeros |
| `T` | 8 | correction capability; `2T` parity symbols |
| `B0` | 0 | first root exponent: the generator roots are `alpha^B0 .. alpha^(B0+2T-1)` |
| `GF_M`, `GF_POLY` (in `gf_pkg`) | 8, `0x11D` | symbol field GF(2^m) and its primitive polynomial; `alpha = x` |

The source algorithm fixes none of these numbers. The defaults are one common choice.

### Size

After generic synthesis (yosys, word-level cells), the default decoder has about 3.7k
cells, 1288 flip-flop bits and one 255 x 8 memory. Most of it is in the solver (68
GF(2^8) multipliers across 17 slices, 682 flip-flop bits) and in the correction stage
(34 Chien registers and their constant multipliers, plus the inverter).

## Files

| file | contents |
|---|---|
| `rtl/gf_pkg.sv` | field constants, `gf_t`, multiplication / power / inverse functions |
| `rtl/gf_mul.sv` | combinational GF(2^8) multiplier |
| `rtl/kes_cell.sv` | one coefficient slice of the solver |
| `rtl/rs_kes.sv` | the fixed-iteration solver: slices plus controller |
| `rtl/rs_syndrome.sv` | syndrome stage and erasure-location capture |
| `rtl/rs_buffer.sv` | received-word memory |
| `rtl/rs_chien_forney.sv` | Chien search, Forney correction, root count |
| `rtl/rs_decoder.sv` | top level |
| `tb/tb_gf_pkg.sv` | reference field arithmetic (log/antilog tables) and polynomial helpers |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_rs_workloads` |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. For example, to
build and run the end-to-end test with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/gf_pkg.sv tb/tb_gf_pkg.sv \
              tb/tb_rs_decoder.sv --top-module tb_rs_decoder
    ./obj_dir/Vtb_rs_decoder

Any other testbench runs the same way. Only the `--top-module` name and the testbench file
change. All of them run in well under a second.

What each testbench checks:

* `tb_gf_mul`: all 65,536 products against log/antilog tables.
* `tb_kes_cell`: load, one update step and hold, for random coefficients and controls.
* `tb_rs_kes`: 600 random patterns with 0 to 16 erasures and errors up to the limit. For
  each one it checks every coefficient of `X` and `V` against `Lambda` and `Omega` from
  their definitions (with one common `beta`), plus `delta`, `eta`, `fail` and the fixed
  latency. It also covers more than `2t` erasures, and `t+1` errors, which must be flagged
  or leave a root-count mismatch.
* `tb_rs_syndrome`, `tb_rs_chien_forney`, `tb_rs_buffer`: each stage against direct
  evaluation. This includes an instance with `B0 = 3`, gaps in the input stream and
  pass-through on failure.
* `tb_rs_decoder`: 60 words at the default size: clean, errors only, erasures only (16),
  mixed, 17 or more erasures, `t` errors plus 1 erasure, and `t+1` errors. It checks the
  corrected words, `out_err` positions and `out_fail`. It also counts `SWAP`s, erasure
  steps, each failure cause, input gaps and held-off input, and counts a failure for any
  of these that never happened.
* `tb_rs_workloads`: a shortened RS(208,192) code on the default decoder (47 leading zero
  symbols), and RS(32,28) on a decoder built with `N = 32, T = 2`, both with random errors
  and erasures.

The field functions in `gf_pkg` are ordinary constant functions. To change the field,
change `GF_M` and `GF_POLY` there. Then change the tables in `tb_gf_pkg` (built from the
same polynomial) and the 8-bit symbol widths in the testbenches.

## Where this design departs from, or adds to, the published algorithm

* **Scheduling is this design's own.** The algorithm gives the register updates but no
  circuit. Here one full iteration runs per clock, over all coefficients in parallel. A
  serial or systolic schedule would trade those 68 multipliers for more cycles.
* **Syndrome and correction stages are conventional.** Stage sequencing, symbol order,
  the buffer and the handshakes are also simple choices of this design. Consecutive words
  are not overlapped. A pipelined decoder would need a second buffer and a second set of
  `X`/`V` holding registers.
* **`V_2t` is not output.** The published statement of the result gives `V_2t = 0`. When
  the very last iteration is an erasure step (exactly `2t` erasures), the register instead
  holds the `z^2t` term of `V(z)(1 - X z)`. That term lies outside the modified syndrome,
  which is defined modulo `z^2t`. In every other case the next iteration shifts it out.
  The solver outputs `V_2t = 0`.
* **Evaluator degree.** The published result writes the evaluator coefficients of the
  errors-and-erasures case as `Omega_{nu-1} .. Omega_0`. The evaluator there has degree
  below `eta = nu + mu`, and the coefficients up to `Omega_{eta-1}` are what the solver
  produces and what is checked.
* **Failure detection goes further.** The published text states that more than `t` errors
  always end with `delta > 0`. Its theorem claims only the converse, and simulation shows
  that `t+1` errors usually end with `delta = -1`. The root-count check described above
  was added for this case, together with the `eta` output that feeds it. The relation
  `delta = 2 nu + mu - 2t - 1` behind `eta` is observed on this RTL for every tested
  pattern. It extends the errors-only relation `delta = 2 nu - 2t - 1` but is not stated
  for the erasure case.
* **The swap condition has slack.** Replacing `delta < 0` by `delta <= 0` in `SWAP` still
  decoded every test pattern correctly, with the same final `delta`, because with equal
  degrees either operand can serve as the divisor. The RTL keeps the published `< 0`.
