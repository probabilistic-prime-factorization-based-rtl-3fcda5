# A probabilistic factoring machine in SystemVerilog

This design factors a semiprime N = P·Q of up to 64 bits. It does not divide its way
through candidates. It treats the bits of two trial factors X and Y as the spins of a
Boltzmann machine whose energy is E = E0·(XY − N)², with E0 = 2^(3−2n) and n the bit
count of N. The energy is lowest, at zero, when XY = N. Probabilistic bits (p-bits)
resample the bits of X and then of Y, each with a probability that favours lower energy,
so the pair drifts towards the factorization. Two small digital helpers shorten the
search:
- a *candidate sieve* moves each sample to a nearby number with no factor 3, 5 or 7;
- a *decision block* divides N by that candidate and stops as soon as the remainder is zero.

The architecture is the one described in "Probabilistic Prime Factorization based on
Virtually Connected Boltzmann Machine and Probabilistic Annealing" (H. Jung, H. Kim,
C. Kim et al., Korea University), a 64-bit machine built on an Artix-7 FPGA. This RTL was written from
that description. It is not the authors' code. Where the description leaves something
open, the choice made here is marked below and in the opening comment of each file.

## Why "virtually connected"

A Boltzmann machine for factoring normally needs weights between every pair of spins,
and 3- and 4-body terms or hidden spins, because (XY − N)² is a polynomial of degree four
in the bits. In this design no weight matrix exists. The input of a p-bit follows from
the Boltzmann distribution:
P(s_k = 1) = 1 / (1 + exp(−I_k)), with I_k = E(s_k = 0) − E(s_k = 1).
An *energy calculator* computes this I_k directly from N, X and Y. For bit k of X,
while Y is held:

    I_k = 2^(3+k−2n) · (N − XY)·Y  ±  2^(1+2k−2n) · Y²      (+ when X_k = 1, − when X_k = 0)

The two products (N − XY)·Y and Y² are computed once per clock. Each I_k then takes
only shifts and one add or subtract. Updating Y uses the same formula with X and Y
swapped. Every spin thus sees all the others ("fully connected"), but the connections
exist only as arithmetic ("virtual"). Changing N requires no reprogramming.

A note on the formula. The exact difference of the energy is
2^(4+k−2n)(N − XY)Y ± 2^(3+2k−2n)Y². That is twice the value above in both terms, and
the intermediate line of the published derivation is consistent with neither. This RTL
uses the published final form, because the description says the hardware scales the two
products by exactly 2^(3+k−2n) and 2^(1+2k−2n). The annealing shift below multiplies the
whole input by 1 to 8 anyway.

### Number format

The products are kept exact: (N − XY)·Y is about 98 bits wide for a 64-bit N. The
calculator forms

    16·I_k = (4·(N − XY)·Y ± 2^k·Y²) · 2^(5+k+s−2n)

where s is the annealing shift. The power of two is always negative for the supported
sizes, so it becomes an arithmetic right shift by 2n − 5 − k − s. The result is saturated
to a signed 8-bit value with 4 fraction bits (s3.4, −8 to +7.94). Rounding is by the
shift itself, that is, towards minus infinity.

## The p-bit

Each p-bit (`pbit`) is a 256 × 16-bit sigmoid table (`sigmoid_lut`), a 48-bit LFSR
(`lfsr48`) and a comparator:
- The table holds P = min(65535, ⌊65536 / (1 + e^(−I/16))⌋). It is computed at
  elaboration by a constant function, so no data file is needed.
- The LFSR uses x^48 + x^47 + x^21 + x^20 + 1 and is stepped 16 times per clock, giving
  a new 16-bit random word R every cycle.
- The sample is 1 when P > R.

All 31 LFSRs are seeded from one 32-bit host seed by `seed_gen`. Seed k is
{k+1 (16 bits), seed XOR 0x9E3779B9·(k+1) (32 bits)}, which is non-zero and different
for every p-bit.

There are 31 p-bits, and X and Y share them. A prime factor is odd, so bit 0 of X and Y
is fixed at 1. The p-bits sample bits 31..1: X in one clock, Y in the next. For a smaller
N only bits [⌈n/2⌉−1 : 1] are sampled and the bits above are held at 0. One 64-bit build
therefore factors anything from about 10 to 64 bits. X and Y start at 2^(⌈n/2⌉−1) + 1.

## Probabilistic annealing

Why shifting helps: a p-bit whose |I_k| is large is frozen at 0 or 1. A p-bit whose I_k
is near zero is a coin flip. Only the few bits in between steer the search; call them the
*significant* p-bits. Because (XY − N)² is dominated by its most significant bits, at
any moment only a few bits of X and Y are significant, which keeps a parallel update from
scattering the state. Doubling the energy pushes the high bits into saturation and brings
the next lower bits into the useful range. The significant bits thus sweep from MSB to
LSB.

Every clock is one *sampling*: all active bits of one factor are redrawn at once
(parallel update). The clocks alternate X, Y, X, Y, …. After each X/Y pair the cost
function is shifted left by one bit (E << 1). Every I_k doubles. After four
pairs the shift returns to zero. One search iteration is therefore 8 samplings at
s = 0,0,1,1,2,2,3,3, and then the system starts again from a higher energy. There is no
temperature schedule and no weight update. `anneal_ctrl` holds this schedule in a 2-bit
counter that wraps.

| clock            | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | … |
|------------------|---|---|---|---|---|---|---|---|---|---|
| factor updated   | X | Y | X | Y | X | Y | X | Y | X | … |
| shift s          | 0 | 0 | 1 | 1 | 2 | 2 | 3 | 3 | 0 | … |
| `iter_end`       |   |   |   |   |   |   |   | 1 |   |   |

## Candidate sieve and decision block

In the clock after a factor is sampled, `candidate_sieve` tests X, X+2, X−2 and X+4 in
that order and takes the first one that 3, 5 and 7 all fail to divide. If all four are
divisible, it passes X−4 without testing it. That is safe: going through all odd residues
modulo 3·5·7 = 210 shows that whenever X, X+2, X−2 and X+4 all have a factor 3, 5 or 7,
X−4 has none. Twelve small remainder chains run in parallel, each
computing r ← (2r + bit) mod m from the MSB down. The chosen candidate enters one of
the two `modulo_operator`s of `decision_block`: the X operator for X candidates and the
Y operator for Y candidates. Each is a restoring divider cut into two pipeline stages.
A remainder of zero, for a divisor with 1 < D < N, stops the machine two clocks after the candidate entered the divider.

Sampling does not wait for the division; it goes on while the divider works:

| clock | sampling | sieve on | X modulo stage 1/2 | Y modulo stage 1/2 |
|-------|----------|----------|--------------------|--------------------|
| t     | X        | Y(t−1)   |                    | Y(t−1) / –         |
| t+1   | Y        | X(t)     | X(t) / –           | – / Y(t−1)         |
| t+2   | X        | Y(t+1)   | – / X(t)           | Y(t+1) / –         |
| t+3   | stop if X(t) divides N |  |                 |                    |

When the machine stops, it latches the divisor and N / divisor. The divisor goes to the
output on its own side: x_out for a hit on the X side, y_out for a hit on the Y side.
If both sides hit in the same clock, the X side wins. In the X·Y = N mode the two
factor registers are latched as they are. `op_time` holds the number of samplings. The samplings made while the last
division was in flight are included.

Two reference modes from the original measurements are kept as control bits:
- `sieve_en = 0` sends X and Y to the dividers unchanged;
- `decision_en = 0` ignores the dividers and stops only when the energy calculator sees
  X·Y = N.

Both bits are 1 after reset; that is the main configuration.

## Blocks and interfaces

```
 host ──AXI4-Lite──► axi_input_regs ──N, seed, start, modes──► vcbm_factorizer
                                                                 ├─ anneal_ctrl        (schedule, op_time)
                                                                 ├─ energy_calculator  (31 × I_k)
                                                                 ├─ seed_gen
                                                                 ├─ 31 × pbit ─ sigmoid_lut, lfsr48
                                                                 ├─ candidate_sieve
                                                                 └─ decision_block ─ 2 × modulo_operator
                                     x_out, y_out, op_time, done ◄┘  (plain output ports)
```

`pfm_top` is the top. Its AXI4-Lite slave uses 32-bit data and a 5-bit byte address:

| address | register  | contents |
|---------|-----------|----------|
| 0x00    | N[31:0]   | read/write |
| 0x04    | N[63:32]  | read/write |
| 0x08    | seed      | read/write |
| 0x0C    | control   | bit 0: write 1 to start (reads 0); bit 1: sieve on; bit 2: decision block on |
| 0x10    | status    | bit 0: done; bit 1: busy (read only) |

A write needs AWVALID and WVALID together and is answered one cycle later. Byte
strobes are honoured. Writing start while a run is busy restarts the run with the
current registers.

The results appear on plain output ports: `x_out`, `y_out` (64 bits each), `op_time`
(64 bits), `done` and `busy`. The original system reads them with a logic-analyzer
core, which reads the raw 31-bit X and Y and the 64-bit operation time. Here `x_state` and
`y_state` carry the raw factor registers, bit 0 included. Further observation ports show the phase, the shift, `iter_end`
and the sieve's choice.

Timing: everything is one clock domain, reset by an asynchronous active-low `rst_n`.
The original machine ran at 5 MHz behind a 25 MHz processor system. The clock crossing
between the two is not part of this RTL. No timing was run. The longest
path is expected to be one sampling: two wide multipliers, the shifts and the p-bit
compare. The dividers are split in two stages.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `NW` (pfm_top, vcbm_factorizer) | 64 | bits of N |
| `FW` | 32 | bits of a factor register |
| `NPB` | FW−1 = 31 | p-bits (bits FW−1..1) |

The defaults are the published 64-bit machine. The LFSR length (48), the random word
width (16), the s3.4 input format and the 8-sampling schedule are fixed. Synthesized
with yosys, the whole machine is about 6,800 word-level cells, 2,300 flip-flops and 31
ROMs of 4 kbit each.

## How it behaves

Sampling counts measured in simulation on the default 64-bit build (testbench
`factor_sweep_tb`). Each N is the product of the largest primes below 13/16 and 11/16
of 2^(n/2). The table gives the median of 15 seeds, the number of samplings by which
half of the runs finished:

| n (bits) | sieve + decision | decision only | X·Y = N only |
|---------:|-----------------:|--------------:|-------------:|
| 10 | 4 | 7 | 317 |
| 16 | 18 | 27 | 4,823 |
| 20 | 10 | 137 | 21,423 |
| 24 | 95 | 600 | – |
| 28 | 827 | 8,585 | – |
| 32 | 7,334 | 16,951 | – |
| 36 | 9,030 | – | – |
| 40 | 45,324 | – | – |
| 44 | 377,582 | – | – |

Comparison with the published figures:
- With sieve and decision block, the published FPGA curve is about 30 samplings at 20
  bits, 110 at 24 and 1,700 at 32, with about 10^8 at 64 bits. These results follow the
  same exponential trend but are noisier: about the same up to 24 bits, and 2 to 4 times
  higher from 28 to 32 bits.
- The X·Y = N mode does clearly worse here than published at small n: 317 against
  about 13 at 10 bits. With E0 = 2^(3−2n), the solution is only weakly held at small n.
  For N = 437 = 23·19 sitting exactly at the solution, the input of the top X bit is
  I = 361·2^(s−11), so about 0.18 at s = 0 and 1.4 at s = 3. The bit stays at 1 only
  with probability 0.54 to 0.80, so the search keeps leaving the answer. The p-bit count
  may also explain part of the gap. One sentence of the description gives n/2 − 2 p-bits
  per factor. That would fix the top bit of each factor as well as bit 0, and cut the
  pairs to search by four at every size. It conflicts with the 31 p-bits stated for
  64 bits, which is what is built.
- At 64 bits, about 10^8 samplings, one run is beyond what a simulation can show in
  minutes. The simulation runs about 200,000 samplings per second. Factorization was
  simulated up to 44 bits. The full-size testbench runs the default 64-bit build on
  12- to 36-bit N. For a 64-bit N made of two primes just below 2^32
  (4294967291·4294967279 and others), six runs of 3 million samplings each did not
  finish.

The counts cluster at a few repeated values. This is a property of the number format,
not of the random source. Most p-bit inputs saturate at ±8, where the sigmoid is
0.9997, so most samples are decided, and runs with different seeds often merge into the
same deterministic orbit of the 8-sampling schedule. Semiprimes whose factors are just
below a power of two (all ones) are found especially fast, for the same reason.

Four machines with different seeds and no connection between them (`multichip_tb`) cut
the mean time for a 32-bit N by 2.2×, 2.9× and 3.3× with 2, 3 and 4 chips. The published
figures are about 2×, 3× and 4×.

## Departures from the original description

- Formula: the published final form of I_k is used (see above). The exact energy
  difference is twice as large.
- p-bit count: the text gives 31 p-bits for 64 bits in two places and n/2 − 2 = 30 in
  another. 31 is used, with bit 0 fixed at 1, so both factors of a 64-bit semiprime fit.
- Clock and critical path: the machine is described as running at 5 MHz for 64 bits,
  while the flowchart's timing diagram is labelled 10 MHz. One passage names the
  decision block as the critical path, another the candidate sieve. Neither changes
  the RTL, which has no clock constraint. Here the sieve and the first divider stage
  form one path, and that path is cut by the divider's pipeline register.
- Annealing reset: the flowchart prints the reset as "E(S) >> 4". The text says the
  shifted energy is restored to its original value after 8 samplings. The text is
  followed: a shift back by 3 after shifts 0..3.
- This design's own choices, which the description does not give: the start value of X
  and Y; the exact active-bit rule; the LFSR polynomial and seed mixing; the sigmoid
  rounding; saturation of I_k; the restoring divider; the 1 < D < N check; the AXI
  register map and the control and status bits; reporting divisor and cofactor as
  64-bit values instead of the raw 31-bit X and Y; counting `op_time` in samplings.
- Not included: the processor system and host software, the logic-analyzer core, and
  the clock generation (5 MHz and 25 MHz). The host side is replaced by the AXI port
  and the result ports.

## Simulating

Every module is in `rtl/<name>.sv`. The package `rtl/pf_pkg.sv` must be read first.
Each testbench in `tb/` is self-checking and ends with a `TB_RESULT checks=… failures=…`
line. For example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv rtl/pf_pkg.sv tb/pfm_top_tb.sv \
          --top-module pfm_top_tb -o sim && ./obj_dir/sim
```

| testbench | what it shows | run time |
|-----------|---------------|----------|
| `lfsr48_tb`, `seed_gen_tb`, `sigmoid_lut_tb`, `pbit_tb` | random source, seeds, sigmoid table, p-bit statistics | < 1 s |
| `energy_calculator_tb` | every I_k against the formula in floating point | < 1 s |
| `candidate_sieve_tb`, `modulo_operator_tb`, `decision_block_tb` | sieve order and fallback, 2-cycle division, hit logic | < 1 s |
| `anneal_ctrl_tb`, `axi_input_regs_tb` | schedule and counters, register map and handshakes | < 1 s |
| `vcbm_factorizer_tb` | 10- to 32-bit semiprimes in all three modes; every mechanism must occur | seconds |
| `pfm_top_tb` | end to end through AXI at the default size, 12 to 36 bits, with a mode switch and a restart | seconds |
| `factor_sweep_tb` | the sampling-count sweep above | about 1 min |
| `multichip_tb` | four independent machines | seconds |

Verilator is a two-state simulator. All state the design reads is reset, and the
testbenches pass with random initial values (`+verilator+rand+reset+2`).
`factor_sweep_tb` and `multichip_tb` are workload tests. They report sampling counts
and check them against wide bounds.
