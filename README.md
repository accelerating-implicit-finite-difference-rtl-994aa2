# A multi-threaded pipelined Thomas solver for tridiagonal systems

Implicit finite-difference schemes, such as the implicit Euler step of the
Black-Scholes equation for option prices, turn every time step into a
tridiagonal linear system

    a_n x_{n-1} + b_n x_n + c_n x_{n+1} = y_n ,   n = 0 .. N

The Thomas algorithm solves such a system in O(N). It has a forward sweep
that eliminates the sub-diagonal and a backward sweep that substitutes back.
It is inherently serial: each row of the forward sweep needs the result of
the row before it, and that result comes out of a divider. A pipelined
fixed-point divider takes dozens of cycles, so a single system keeps a
deep pipeline almost empty.

This RTL applies two ideas to that problem:

1. **Interleave independent systems.** Option pricing produces many
   unrelated systems, one per contract or scenario. The forward pipeline
   carries rows of up to `M_MAX` systems ("threads") at once. Each row is
   tagged with its thread id, and each thread keeps its own recurrence
   state. While one thread waits for its division, the others fill the
   pipeline.
2. **Take the divisions out of the backward loop.** The backward step is
   rewritten as

       x_n = (z_n / d_n) - (c_n / d_n) * x_{n+1}

   Both quotients are known as soon as the forward sweep has produced
   `d_n` and `z_n`. A separate pair of dividers (the *d-divider*) computes
   them on the way into storage. The backward recurrence is left with only
   a multiplier and a subtractor, 8 cycles per row instead of about 70.

The arithmetic is signed fixed point, Q2.30 by default: 2 integer bits
including the sign, and 30 fraction bits. The host side of the top module
speaks IEEE-754 single precision.

## Data flow

```
 host rows (float a,b,c,y, id, last)
        |
   input FIFO (64) -> 4 x float-to-fixed -> register
        |
   +----v-------------------- thomas_core -----------------------------+
   |  forward core  --d,z,c-->  d-divider  --c/d, z/d-->  stack array  |
   |  (thread table,            (2 dividers)             (one LIFO per |
   |   1 div, 2 mul, 2 sub)          |                     thread)     |
   |      ^                          | last row of a system     |      |
   |      | release id               v                          |      |
   |      |                    problem queue (ids) --->  backward core |
   |      +-------------------------------------------- (1 mul, 1 sub, |
   |                                                    8 time slots)  |
   +--------------------------------------------------------|----------+
                                                            v
                        fixed-to-float -> register -> output FIFO (64)
                                                            |
                                       host results (float x, id, row, last)
```

## Forward core (`thomas_forward`)

Each accepted row `(a_n, b_n, c_n, y_n, id, last)` computes

    l   = a_n / d_{n-1}
    d_n = b_n - l * c_{n-1}
    z_n = y_n - l * z_{n-1}

using one divider, then two multipliers in parallel, then two subtractors
in parallel. The previous row's `d`, `z` and `c` come from a per-thread
table indexed by `id`.

**The loop period.** A row can only start when its thread's previous row
has written back. That takes divider + multiplier + subtractor = 61 + 6 + 2
= 69 cycles, plus 3 cycles of bookkeeping: an issue register, a result
register and the table write. So one thread issues at most one row every
**72 cycles**. Other threads may issue in the cycles between. A row whose
thread is still in flight is refused (`in_ready` low, `fwd_stall` high).
Because rows arrive in one stream, a refused row also blocks rows of other
threads behind it. The host gets full use of the pipeline by writing rows
of different systems round-robin.

**First row of a system.** A thread that is idle has no `d_{-1}`. Its first
row goes through the same datapath as numerator 0 over divisor 1, so that
`l = 0`, `d_0 = b_0` and `z_0 = y_0`. This needs no bypass path.

**End of a system and id reuse.** Each row carries a `last` flag. After the
last row, the thread stays *busy*: its stack still holds data the backward
core has not consumed. A new system on that id is refused until the
backward core reports, with a release, that the old one is done.

## d-divider (`d_divider`)

This block has two dividers side by side. They compute `c_n/d_n` and
`z_n/d_n` for every row leaving the forward core, 61 cycles later, with the
id and last flag travelling alongside. Nothing feeds back through these
dividers, so they never limit the rate.

## Stack array (`stack_array`)

The forward sweep produces rows 0..N, and the backward sweep needs them in
the order N..0. The stack array therefore holds one LIFO per thread, all
in a single memory of `M_MAX * N_MAX` words of `2W` bits: 10 x 512 x 64 bit
= 327,680 bits at the defaults. Thread `k` owns addresses
`k*N_MAX .. k*N_MAX + N_MAX-1`, with its own stack pointer.

- Push writes `{c/d, z/d}` at the pointer.
- Pop reads the top word into a register one cycle later. It also returns
  the row index, which is the stack depth minus one, so row 0 marks the end
  of a system.
- A push and a pop may happen in the same cycle when they are on
  different threads. The id-reuse rule above guarantees that.

## Problem queue and backward core (`thomas_backward`)

When the last row of a system has been pushed, its id enters the problem
queue, a FIFO of `M_MAX` entries that can never overflow. The backward
core computes

    x_n = zd_n - cd_n * x_{n+1},    with x_{N+1} = 0

Its loop consists of the multiplier and the subtractor, 6 + 2 = 8 cycles.
The core is organised as **8 time slots** that repeat every 8 cycles:

- A phase counter names the slot whose turn is next. If that slot is free
  and a system waits in the queue, the slot takes the system.
- A slot that holds a system pops that system's next row in the cycle
  before its turn. The registered stack read then delivers `(cd, zd)`
  exactly when the slot issues. The `x_{n+1}` coming out of the
  subtractor at that moment is that slot's own previous result.
- On a system's first issue the fed-back value is replaced by 0.
- When row 0 issues, the slot becomes free again. When that result leaves
  the pipeline, `release` tells the forward core that the id may be reused.

Up to 8 systems are solved at once, each producing one `x` every 8 cycles.
A ninth system waits in the queue (`bwd_q_wait`) until a slot frees up.
Results of different systems leave interleaved, each tagged with id and
row.

**Back-pressure.** If the output side cannot accept a result, the whole
backward core stops: pipeline registers, phase counter and stack reads
freeze together, so the slot timing stays correct. The forward core and the
d-divider keep running. Their results only go into the stack, which has
room for every row of every thread.

## Top level (`thomas_wrapper`) and number formats

The top adds an input FIFO, float-to-fixed converters for the four
coefficients, and a fixed-to-float converter plus output FIFO for the
result. Each converter stage is followed by a one-entry valid/ready
register.

- **Float to fixed** rounds to nearest, with ties away from zero.
  Out-of-range values, infinities and NaN saturate to ±(2^(W-1)-1).
  Denormals become 0.
- **Fixed to float** is exact up to 24 significant bits. Beyond that it
  rounds to nearest even.

Inside the core:

| unit | rule |
|---|---|
| divider | radix-2 restoring, one quotient bit per pipeline stage (W-1+F = 61 stages), quotient truncated toward zero, saturated to ±(2^(W-1)-1); division by zero saturates |
| multiplier | full 2W-bit product, arithmetic shift right by F (rounds toward minus infinity), saturated |
| subtractor | W+1-bit difference, saturated |

Q2.30 holds values in [-2, 2). For a diagonally dominant system whose
coefficients and solution stay below 2 in magnitude, every intermediate
value stays in range and saturation never happens. The Black-Scholes test
systems are scaled that way: the call payoff `max(S-1, 0)` on the grid
S = 0..2 is multiplied by 0.9 (0.45·Z with Z = 2). The accuracy against a double-precision solver is better than
1e-6 on all test systems.

### Ports of `thomas_wrapper` (defaults)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; active-low synchronous reset |
| `in_valid`, `in_ready` | in/out | 1 | row handshake |
| `in_a`, `in_b`, `in_c`, `in_y` | in | 32 | row coefficients, IEEE-754 single bit patterns |
| `in_id` | in | 4 | system (thread) id, 0..M_MAX-1 |
| `in_last` | in | 1 | high on the last row of a system |
| `out_valid`, `out_ready` | out/in | 1 | result handshake |
| `out_x` | out | 32 | x_n as IEEE-754 single |
| `out_id`, `out_row` | out | 4, 9 | id and row index n of `out_x` |
| `out_last` | out | 1 | high with row 0, the last result of a system |
| `fwd_stall` | out | 1 | a row waits for its thread's previous row |
| `bwd_q_wait` | out | 1 | a finished forward sweep waits for a backward slot |
| `thread_busy` | out | 10 | ids currently in use |

Rules for the host:

- Write the rows of a system in order n = 0..N, with `in_last` on row N.
  `a_0` and `c_N` are ignored.
- N+1 must not exceed `N_MAX`. An assertion reports a stack overflow.
- Rows of different ids may be mixed freely.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `W`, `F` | 32, 30 | word width and fraction bits (Q2.30) |
| `M_MAX` | 10 | threads (systems in flight) |
| `N_MAX` | 512 | rows per system |
| `DIV_LAT` | 61 | divider latency, at least W-1+F |
| `MUL_LAT`, `SUB_LAT` | 6, 2 | multiplier and subtractor latency; their sum is the number of backward slots |
| `ADMIN_LAT` | 3 | forward bookkeeping cycles, at least 2 |
| `FIFO_DEPTH` | 64 | input and output FIFO depth |

The reduced formats Q2.22 (`W=24, F=22, DIV_LAT=52`) and Q2.14
(`W=16, F=14, DIV_LAT=36`) are selected by parameters. The multiplier and
subtractor latencies are the same in all three. `tb_thomas_formats` runs
the core at both reduced formats. The results are bit-exact, and the error
against double precision is about 2 units in the last place.

## Timing

For one system of N+1 = n rows alone in the solver, the time from the first
row entering the core to the last result leaving it is

    (61 + 6 + 2 + 3) * n + 61 + 8 * n + 1  =  80 n + 62  cycles

The published cost model is (C_F + C_A) n + C_div + C_B n = 80 n + 61. The
extra cycle is the registered stack read. For n = 100 this is 8062 cycles,
40.3 µs at 200 MHz. The wrapper's FIFOs and registers add 4 cycles.

For a block of m systems written round-robin:

- With m ≤ 8, every system gets a backward slot at once. The block ends
  about 2(m-1) cycles after a single system would: 8069 cycles for eight
  100-row systems.
- With m = 10, two systems wait for a slot: 8863 cycles.

The sustained rate is set by the forward loop: 10 threads x 1 row per 72
cycles, about 720 cycles per 100-row system (3.6 µs at 200 MHz).

**Known discrepancy.** The publication's throughput figure for 100-row
systems (0.00055 ms, about 110 cycles per system at 200 MHz) would need
about 72 systems in flight, one forward issue every cycle. The ten threads
it specifies cannot give that. This design keeps ten threads. `M_MAX` can
be raised, and the stack memory grows linearly with it.

The same formula gives 35.8 µs for Q2.22 and 27.7 µs for Q2.14 at
200 MHz, because their dividers are shorter.

## Size

A generic synthesis of the default top gives about 17,000 flip-flop bits
and 345 kbit of memory.

- Most flip-flops sit in the three 61-stage dividers. Each stage carries
  a remainder, a partial quotient and the divisor.
- The stack array accounts for 327,680 of the memory bits.

The published FPGA build reports about 15,000 flip-flops, 8,683 memory
LUTs and 3 block RAMs.

## What follows the publication and what does not

Taken from the publication:

- the factorised backward step
- the four components: forward core, d-divider, stack array and backward
  core, with a queue between the sweeps
- thread ids on rows
- radix-2 division
- the latencies 61/6/2, forward 69, backward 8 and administration 3
- Q2.30 with N_MAX = 512 and M_MAX = 10
- the FIFO and float-conversion wrapper

This design's own choices:

- The `last` flag that ends a system. The publication lists only a, b,
  c, y and id as inputs.
- The way the first row enters the pipeline (0 / 1).
- Blocking id reuse until the backward core has finished.
- The slot scheme that realises "space in the backward pipeline".
- All rounding and saturation rules.
- The FIFO depths.
- Output back-pressure and how it freezes the backward core.
- The output format: x with id and row, in order N..0.

Other departures:

- **Backward loop length.** One formula in the publication counts a
  division in the backward iteration. Its latency table and the
  factorised scheme do not: 8 cycles, multiplier plus subtractor. The
  design follows the table.

- **Black-Scholes coefficients.** The test systems use
  `a_n = -½(n²σ² - n r)dt`, `b_n = 1 + (n²σ² + r)dt` and
  `c_n = -½(n²σ² + n r)dt`. The publication prints them without the ½.
  With those coefficients the solution exceeds 2 and leaves the Q2.30
  range, which contradicts the publication's own range argument. The
  standard implicit scheme, with ½, is therefore used.
- **Not built.** The host processor, the AXI transport and the clock
  buffer of the FPGA system are outside this RTL: the top exposes plain
  valid/ready streams where they would attach. The floating-point
  variant of the core, built from vendor floating-point operators, is an
  alternative the publication compares against and is not part of this
  design.

## Files

| file | content |
|---|---|
| `rtl/thomas_pkg.sv` | default constants |
| `rtl/thomas_wrapper.sv` | top level |
| `rtl/thomas_core.sv` | forward core, d-divider, stack, queue and backward core wired together |
| `rtl/thomas_forward.sv`, `rtl/d_divider.sv`, `rtl/stack_array.sv`, `rtl/thomas_backward.sv` | the four components |
| `rtl/fx_div.sv`, `rtl/fx_mul.sv`, `rtl/fx_sub.sv` | pipelined fixed-point operators |
| `rtl/flt2fix.sv`, `rtl/fix2flt.sv` | format converters |
| `rtl/sync_fifo.sv`, `rtl/pipe_reg.sv`, `rtl/delay_line.sv`, `rtl/valid_delay.sv` | helpers |
| `tb/tb_fx_ref.sv` | reference arithmetic, bit-exact fixed-point Thomas model, double-precision solver, Black-Scholes rows, float helpers |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench compares the design against an independent model in
`tb_fx_ref`. It prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

- Unit tests cover the operators (random and extreme operands, random
  pipeline freezes), the FIFO, the converters and the stack. The stack is
  filled to 512 rows per thread.
- The forward-core test checks the 72-cycle period and a busy thread
  refusing a new system.
- The backward-core test checks the 8-cycle row period, queue waits and
  freezes.
- `tb_thomas_core` and `tb_thomas_wrapper` run the whole solver at its
  default size. They send:
  - a single 100-row Black-Scholes system, checking the latency above
  - blocks of 8 and 10 systems
  - 30 systems of random sizes (one of 512 rows) with random input gaps
    and output back-pressure

  Every result is checked bit for bit against the fixed-point model and to
  1e-6 against double precision.
- `tb_thomas_formats` uses the helper `tb_format_run` to run the core at
  Q2.22 and Q2.14 side by side. It checks their latencies and results. Both tests count stalls, queue waits,
  back-pressure and forward/backward overlap, and fail if any of them
  never happened.

To run one with Verilator (about a second each):

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/thomas_pkg.sv tb/tb_fx_ref.sv tb/tb_thomas_wrapper.sv \
        --top-module tb_thomas_wrapper
    ./obj_dir/Vtb_thomas_wrapper

The full test set of the publication, 5000 random Black-Scholes systems,
has not been simulated. The testbenches check 49 systems per run.
