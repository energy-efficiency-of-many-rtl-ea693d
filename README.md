# A trial-division custom instruction for an 8-core soft-processor prime counter

This RTL implements the custom hardware of a many-soft-core system that counts
prime numbers by brute-force trial division. The idea behind the system is
that a soft processor on an FPGA is slow and inefficient on its own, but it can
be given a small application-specific instruction that does the hot loop of a
program in parallel hardware. Replicating the augmented processor then adds
thread-level parallelism on top. The loop here is the inner loop of

```
isPrime(v):  for i = 2, 3, ... while i*i <= v:  if v % i == 0: v is composite
```

and the custom instruction takes `v` and returns whether a divisor was found.
Inside it, ten divider units try ten divisors per block. The dividers are
pipelined, and a new block enters them every clock cycle. Eight processor cores
each carry one copy of the instruction and test different candidates in
parallel.

The processors, their floating-point units, the on-chip memory and the bus
are vendor components, so they are not in this RTL. The top level
(`manycore_top`) holds the eight custom instructions and brings each core's
custom-instruction port out as a port.

## The iteration unit

One loop iteration is a small data-flow graph with three inputs: the candidate
`v`, the trial divisor `i` and a step `inc`. It has three outputs:

| output     | function        | meaning                                   |
|------------|-----------------|-------------------------------------------|
| `is_prime` | `v % i == 0`    | **a factor was found** (despite the name) |
| `loop`     | `v >= i*i`      | a further iteration is needed             |
| `i_next`   | `i + inc`       | the divisor for the next iteration        |

The output names are the ones of the original design. Note that `is_prime`
is raised when `i` *divides* `v`.

`iter` is the full unit. `opt_iter` is the same unit without the multiplier and
comparator. Only one unit per block needs the bound test, so this saves logic.
In both units the remainder comes from the pipelined divider `mod_pipe`. That
makes `is_prime` arrive `STAGES` cycles after its operands. `loop` and
`i_next` are combinational.

## Searching in blocks

With `M = UNITS` units, the registers of the units start at these values:

| unit                | module     | first divisor |
|---------------------|------------|---------------|
| 0                   | `iter`     | `M+1`         |
| 1                   | `opt_iter` | `M`           |
| ...                 | `opt_iter` | ...           |
| `M-1`               | `opt_iter` | `2`           |

Every issue adds `M` to each divisor. Block `k` therefore covers the divisors
`(k-1)M+2 ... kM+1`, and unit 0 always holds the largest one. The bound test
is made only on that largest divisor. Blocks keep being issued while the block
just issued still satisfies `(kM+1)^2 <= v`. The search stops after the first
block `K` with `(KM+1)^2 > v`. So every divisor up to `sqrt(v)` is tried, plus
a few more in the last block.

Trying these extra divisors does no harm. A divisor `d` with
`sqrt(v) < d < v` can only divide a composite `v`. The one exception is
`d = v`, which can happen only in the first block. So a prime
`v <= M+1` (2, 3, 5, 7 and 11 at `M = 10`) finds itself as a divisor and is
reported composite. The host software already handles `v <= 3` and even `v`
before it calls the instruction. It must also handle odd `v <= M+1` itself.
The testbenches model the software that way.

With `M = 1`, the one unit starts at 2 and steps by 1. This is the original
single-unit instruction, and the same RTL covers it.

## Pipelined issue and the controller

`ci_fsm` has four states:

- `IDLE`: on `start`, it loads `v` into every unit's `v` register and the first
  divisors into the `i` registers.
- `ISSUE`: the block in the registers enters the dividers, and the registers
  step to `i + M`.
- `WAIT`: used only when `PIPELINED = 0`. It waits `STAGES` cycles for the
  block's remainders.
- `DRAIN`: used only when `PIPELINED = 1`. The bound has been reached, and it
  waits `STAGES` cycles for the last remainders.

The units' valid zero-remainder flags are ORed into `found`. As soon as
`found` is raised, the operation ends with result 1, whatever the state. When
the drain or wait ends without a factor, the result is 0. At the end, the
controller pulses `done`, registers the result and flushes the dividers. The
flush clears the valid bits of every remainder still in flight, so none of
them is seen by the next operation.

With `PIPELINED = 1` (the default), one block is issued per cycle. The
controller does not wait for earlier remainders, because it does not matter
which divisor gave the zero or how late it was detected. Let `j` be the block
of the smallest divisor, or `K` if there is none. At `STAGES = 5`, the time
from `start` to `done` is

```
PIPELINED = 1:  min(j, K) + STAGES + 1   =  min(j,K) + 6 cycles
PIPELINED = 0:  min(j, K) * (STAGES + 1) + 1 = 6*min(j,K) + 1 cycles
```

For long searches, the two modes differ by a factor that approaches 6. Short
searches gain less (see the measurements below). The testbenches check both
formulas exactly.

## The divider

`mod_pipe` computes the remainder only, by restoring division. Each step
shifts one dividend bit into the partial remainder and subtracts the divisor
if the result fits. There are `W` steps, split over `STAGES` register stages
with `ceil(W/STAGES)` steps per stage (7 at W = 32, STAGES = 5). A new
operand pair is accepted every cycle, and a valid bit travels with it. Raising
the depth (the original design considers up to 35 stages, for clock rate) is
a parameter change.

## Interface and timing

Each core's port follows the soft-core's multi-cycle custom-instruction
convention:

| signal   | dir | width | meaning                                                     |
|----------|-----|-------|-------------------------------------------------------------|
| `start`  | in  | 1     | one-cycle pulse with the operand                            |
| `n`      | in  | 8     | extension field; accepted, unused                           |
| `a`      | in  | 32    | candidate `v` (unsigned)                                    |
| `done`   | out | 1     | one-cycle pulse when the result is ready                    |
| `result` | out | 32    | bit 0 = 1: a factor was found; bit 0 = 0: no factor. Held until the next `done` |

`clk` and `rst` are shared by all cores. `rst` is synchronous and active
high. A `start` while the instruction is busy is not allowed, and an
assertion in `ci_fsm` reports it. Because only bit 0 of `result` carries
information, synthesis reports the other 31 bits of each result word as
constant.

## Parameters

| parameter   | default | where                                | meaning                               |
|-------------|---------|--------------------------------------|---------------------------------------|
| `CORES`     | 8       | `manycore_top`                       | cores, each with one custom instruction |
| `UNITS`     | 10      | `manycore_top`, `prime_ci`           | divider units (`M`) per instruction   |
| `STAGES`    | 5       | all                                  | divider pipeline depth                |
| `PIPELINED` | 1       | `manycore_top`, `prime_ci`, `ci_fsm` | issue one block per cycle             |
| `W`         | 32      | `mod_pipe`, `iter`, `opt_iter`       | operand width                         |

The shared constants and the controller's state type are in `prime_pkg`.

The original work went through three versions of the single-processor
instruction before building the multiprocessor. All three are parameter
settings of `prime_ci`:

- single unit: `UNITS=1, PIPELINED=0`
- ten units: `UNITS=10, PIPELINED=0`
- pipelined: the defaults

## What follows the original design and what does not

These points are taken from the original design:

- the iteration graph: its operators, its constant 0 and its output names;
- the optimised unit without the bound test;
- the starting divisors `M+1, M, ..., 2` and the step `M`;
- the step 1 and the start at 2 of the single-unit version;
- a separate `i` and `v` register per unit;
- 10 units, 5-stage dividers, one block issued per cycle, and 8 cores.

The following are choices of this implementation:

- **Bound test.** It is `v >= i*i`, as in the iteration graph. The reference C
  loop uses `i*i < v`, which never tries `i = sqrt(v)` and would call 9, 25
  and 49 prime. The hardware tries it.
- **Result polarity.** 1 means "factor found". The result is taken straight
  from the zero-remainder flag.
- **Combining gate.** The units' flags are combined with an OR, gated by each
  unit's valid bit.
- **Controller.** The state machine, the valid bits, the flush, the registered
  `done` and the handshake were not specified and are this design's choices.
- **Divider.** The algorithm (restoring division) and how its steps are split
  over the stages are this design's choices.
- **Widths and reset.** The 32-bit unsigned operand, the 8-bit `n` (which is
  ignored) and the synchronous reset are this design's choices.
- **Small candidates.** Primes `v <= M+1` come back as composite, as described
  above.

## Simulating

Each testbench in `tb/` checks its own results and ends with a line
`TB_RESULT checks=N failures=F`. To build and run one with Verilator, from the
folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/prime_pkg.sv \
          tb/tb_manycore_top.sv --top-module tb_manycore_top -Mdir obj -o sim
./obj/sim
```

| testbench         | what it checks                                                                 |
|-------------------|--------------------------------------------------------------------------------|
| `tb_mod_pipe`     | random remainders against `%`, the 5-cycle latency, and a flush in mid-stream  |
| `tb_iter`         | `i_next` and `loop` every cycle against a 64-bit product; `is_prime` 5 cycles later |
| `tb_opt_iter`     | the same, without `loop`                                                       |
| `tb_ci_fsm`       | both issue modes against a scripted data path: result, exact cycle counts, load/flush, single-cycle `done` |
| `tb_prime_ci`     | pipelined, non-pipelined and single-unit instructions on 0..399, squares, large primes and random candidates: result and exact latency, and primality against the testbench's own trial division |
| `tb_ci_speedup`   | the single-unit, ten-unit and pipelined instructions each counting the primes below 10^5; prime counts against a sieve, and the speed-ups between them |
| `tb_manycore_top` | the full system at its defaults, counting the primes below 10^6 on 8 modelled threads |

`tb_manycore_top` runs the full workload in about 15 s. It finds 78498 primes
below 10^6, which matches a sieve run inside the testbench and the known value.
It makes 499994 instruction calls and takes 1.56 million clock cycles. During
the run, the testbench counts four events and requires each to occur at least
once:

- an early exit on a factor (421188 times);
- an exit on the bound after draining (78806 times);
- searches of several blocks with remainders in flight (207766 times);
- cycles with all eight cores busy.

`tb_ci_speedup` compares the three single-processor versions on the primes
below 10^5. It counts the clock cycles spent inside the instruction:

| version    | settings                     | cycles     | gain over the previous row |
|------------|------------------------------|------------|----------------------------|
| single unit | `UNITS=1, PIPELINED=0`      | 16 281 708 | -                          |
| ten units  | `UNITS=10, PIPELINED=0`      | 1 840 886  | 8.8                        |
| pipelined  | defaults                     | 598 446    | 3.1                        |

The ten-unit gain is close to the factor of about 10 reported for the
original hardware. The pipelining gain is smaller than the factor of almost 6
reported there. This controller pays a fixed 6 cycles per call to start and
drain the dividers. Most composite candidates also end in the first block,
where pipelining gains nothing. Only long searches approach the factor 6,
which is set by the 1 + `STAGES` cycles per block of the non-pipelined mode.
The original controller is not described in enough detail to tell where its
overhead lay.

These cycle counts cover only the custom instructions. They do not include
the software loop, thread handling or call overhead of the processors, so
they say nothing about the run times measured on the original hardware.
