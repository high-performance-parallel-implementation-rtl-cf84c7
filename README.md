# A fully parallel genetic algorithm in one clock-synchronous array

This design runs a genetic algorithm (GA) with every operation done in
parallel. Each of the N chromosomes has its own register, its own fitness
evaluator and its own selection unit. Each pair of selected chromosomes has
its own crossover unit. A new population is produced every three clock
cycles, whatever N is. Nothing is sequenced by a processor or a state machine.
The only control is a 2-bit counter that says when the population registers
may load.

The architecture follows a published FPGA design, "High-Performance Parallel
Implementation of Genetic Algorithm on FPGA" (Torquato and Fernandes). That
publication gives the block structure, the operators and the timing. Word
widths, table sizes, seeds, reset behaviour and several small rules are not
given there; this RTL chooses them. Every such choice is listed in
[What is this design's own choice](#what-is-this-designs-own-choice).

## One generation, end to end

```
            +-----+    +------+  y_1..y_N   +-----+  w_j   +-----+  z  +----+
 RX_j  x_j  |     |    | FFM_j|------------>| SM_j|------->| CM_i|---->| MM |--> RX_j
 (M b) ---->|     |--->|      |   (to all   |     |        | (per|     |(1st|
            +-----+    +------+    SMs)     +-----+        | pair)     | P) |
               ^ load                 x_1..x_N also go to every SM      +----+
               |
            SyncM: count 0,1,2,0,... ; gen_en = (count == 2)
```

- **RX_j** (`ga_rx`) holds chromosome x_j, which is M bits wide. It loads only
  while `gen_en` is high.
- **FFM_j** (`ga_ffm`) computes the fitness y_j of x_j in two registered table
  look-ups.
- **SM_j** (`ga_sm`) runs a tournament between two randomly chosen members of
  the whole population. Its output w_j is a copy of the winner.
- **CM_i** (`ga_cm`) takes the pair w_{2i-1}, w_{2i} and produces two children
  by single-point crossover. There are N/2 of these.
- **MM_j** (`ga_mm`) flips random bits of the first P children (XOR with a
  random word). The other N-P children go back to their registers unchanged.
- **SyncM** (`ga_syncm`) decides when the registers load.

Selection, crossover and mutation are purely combinational. Only two things
have registers: the fitness ROMs, and the random generators, which step once
per generation. So the whole of a generation is one combinational cone that
settles while the ROM pipeline runs.

### Timing

| clock after a load | what is valid                                            |
|--------------------|----------------------------------------------------------|
| 0                  | RX holds generation k; `sync_count` = 0                  |
| 1                  | alpha(px), beta(qx) in the first ROM stage; count = 1    |
| 2                  | y = gamma(...) for generation k; count = 2, `gen_en` = 1 |
| 3 (= next 0)       | RX holds generation k+1; all random generators stepped   |

After reset the first `gen_en` comes at clock 2, and then one comes every 3
clocks. The generation rate is therefore f_clk / 3. The source reports 48.5 MHz
for N = 32, m = 20 on a Virtex-7, which is about 16 million generations per
second, or 6.2 us for 100 generations. (The source's synthesis table labels this
column "generations per second x 1000", but its entries are exactly the clock
in MHz divided by 3, so they are millions per second, consistent with the
87 ns per generation it quotes for N = 64.) `y` is valid, and belongs to the
current `x`, only while `gen_en` is high.

The counter restarts at 0 when it matches. If it simply wrapped, a 2-bit
counter would match only every four clocks.

## The chromosome and the table-driven fitness function

The hardest part of the design to understand is that the fitness function is
not arithmetic. It is three look-up tables with one adder between them:

    x = px || qx        (px = x[M-1:M/2], qx = x[M/2-1:0])
    y = gamma( alpha(px) + beta(qx) )

Any function of this separable form can be optimised by changing only the
table contents. That includes one-variable functions: make alpha zero and use
only qx. A product term such as px*qx cannot be expressed.

`ga_ffm` is built like this:

1. Two splitters take px and qx from x.
2. `ga_rom` instances hold alpha and beta. Each has an M/2-bit address, a
   C-bit signed word and a registered read.
3. An adder forms delta. It is D = C+1 bits wide and combinational.
4. A third `ga_rom` holds gamma. Its address is the top GW = min(D, 16) bits
   of delta.

Each entry of the gamma table holds gamma evaluated at the lower edge of its
bucket of delta values. A full gamma table over D bits would need 2^22 words
per chromosome for F3 at m = 20. That is why the table is addressed this way.
The bucketing only coarsens the fitness. For F2 at m = 20 it is exact. For F3
at m = 20, delta is bucketed in steps of 64. For F1 at m = 20 the step is 2^15.

A synthesis front end that evaluates the table initialisation as a constant
may hit its evaluation-step limit on the 65,536-entry gamma table. Simulators
have no such limit. Lowering `GAMMA_AW_MAX` in `ga_pkg` shrinks the table.

The tables are not read from files. They are computed at start-up by
`ga_pkg::rom_entry` from the parameter `FUNC`, which picks one of three
benchmark functions:

| `FUNC`   | function                 | alpha(px) | beta(qx)           | gamma       | px, qx read as |
|----------|--------------------------|-----------|--------------------|-------------|----------------|
| `FIT_F1` | x^3 - 15x^2 + 50         | 0         | qx^3 - 15qx^2 + 50 | identity    | signed         |
| `FIT_F2` | 8x - 4y + 1020           | 8px       | 1020 - 4qx         | identity    | unsigned       |
| `FIT_F3` | sqrt(x^2 + y^2)          | px^2      | qx^2               | floor(sqrt) | signed         |

The widths depend on the function and on h = M/2:

- C = 3h for F1, h+5 for F2 and 2h+1 for F3.
- D = C+1.
- The fitness width A equals D.

`ga_pkg::c_width`, `d_width` and `a_width` compute them. All values are
signed, so the comparator in selection compares signed numbers.

To add a function, extend `fitness_e` and give `alpha_fn`, `beta_fn`,
`gamma_fn`, `var_value` and `c_width` a case for it. The rest of the design
does not change.

## Random numbers

Every random choice comes from its own 32-bit LFSR (`ga_lfsr`):

- two per selection unit;
- two per crossover unit, one for each half;
- one per mutation unit.

Each LFSR is a Fibonacci register for r^32 + r^22 + r^2 + 1. The new bit is
r[31]^r[21]^r[1], shifted in at bit 0. Every generator shifts once per
generation, on `gen_en`. The value a unit uses is the top bits of the
register.

Seeds are per-instance constants from `ga_pkg::lfsr_seed(kind, index, 0)`, an
integer hash. The initial population is made the same way: register j resets
to `lfsr_seed(SEED_RX, j, 0)`. A run is therefore fully reproducible from
reset. To get a different run, change the hash.

The polynomial has an even number of terms, so it is not primitive: its
period depends on the seed and is shorter than 2^32-1. Nothing in the design
relies on a particular period.

## Tournament selection (`ga_sm`)

1. Indices i1 and i2 are the top log2(N) bits of SMLFSR1 and SMLFSR2.
2. The comparator evaluates y[i1] > y[i2].
3. One multiplexer keeps the index of the larger fitness. Another keeps the
   index of the smaller.
4. `maxmin` picks between them: 0 keeps the larger (maximise), 1 keeps the
   smaller (minimise).
5. The final N-input multiplexer outputs x[winner].

Ties go to i2 when maximising and to i1 when minimising. N must be a power of
two.

Every selection unit has N-input multiplexers for both fitness and
chromosomes. So area grows as N^2, and the critical path grows with N. This is
the part that limits large populations.

## Single-point crossover with a shifted mask (`ga_cmpq`, `ga_cm`)

A crossover unit never crosses px with qx. The px halves of the two parents
are crossed in one submodule (CMPQ1), and the qx halves in another (CMPQ2).
Each submodule has its own cut point.

In a submodule, the mask s is the all-ones h-bit constant shifted right by
1 ... h places. Ones mark the tail and zeros the head:

    z_a = (~s & p_a) | (s & p_b)      head of a, tail of b
    z_b = (~s & p_b) | (s & p_a)      head of b, tail of a

For example, with h = 10 and a shift of 3, s = 0001111111.

The shift is chosen by the top ceil(log2(h+1)) bits of the LFSR: code c gives
a shift of c+1. That field can hold codes beyond h-1. All of them give the
largest shift, h, which is an all-zero mask: the pair passes through
uncrossed. For h = 10 this happens for 6 of the 16 codes, so about 38% of
half-pairs are not crossed.

## Mutation (`ga_mm`)

x = z XOR r, where r is the top M bits of the mutation LFSR. Every 1 bit of
r flips a chromosome bit, so on average half the bits of a mutated chromosome
change.

Only the first P children are mutated. P = ceil(N x MR). The default is P = 1,
which is MR = 2% at N = 32.

## Top-level interface (`ga_top`)

| parameter | default  | meaning                                            |
|-----------|----------|----------------------------------------------------|
| `N`       | 32       | population size, an even power of two              |
| `M`       | 20       | chromosome width, even, at most 32                 |
| `FUNC`    | `FIT_F3` | which fitness tables to build                      |
| `P`       | 1        | number of mutation units (first P chromosomes)     |
| `A`       | derived  | fitness width, `a_width(FUNC, M/2)`                |

| port         | dir | width    | meaning                                          |
|--------------|-----|----------|--------------------------------------------------|
| `clk`        | in  | 1        | clock                                            |
| `rst_n`      | in  | 1        | synchronous active-low reset                     |
| `maxmin`     | in  | 1        | 0 maximise, 1 minimise (`ga_pkg::maxmin_e`)      |
| `x`          | out | M x N    | current population                               |
| `y`          | out | A x N    | fitness of `x`, valid while `gen_en` = 1         |
| `gen_en`     | out | 1        | one pulse per generation                         |
| `sync_count` | out | 2        | generation phase counter                         |

There is no generation counter and no "best individual" output. The array
evolves for as long as it is clocked. The user counts `gen_en` pulses and
reads the population and its fitness whenever `gen_en` is high. The k-th
pulse comes 3k - 1 clocks after reset is released. At that pulse the outputs
hold the initial population after k - 1 rounds of selection, crossover and
mutation.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares against a
model written from the formulas, not from the RTL (`tb/ga_ref_pkg.sv`), and
each has a watchdog. The end-to-end benches share `tb/tb_ga_top_body.svh`,
which runs a complete model of the GA beside the design. That model has its
own copies of the population and of every generator. Each generation the
bench checks:

- every chromosome and every fitness value;
- the three-clock rate.

It also counts the mechanisms and fails if one never occurs:

- both comparator outcomes;
- minimising and maximising tournaments;
- real cuts and uncrossed pairs;
- mutations.

| bench            | configuration                 | result                                                     |
|------------------|-------------------------------|------------------------------------------------------------|
| `tb_ga_top`      | N = 8, m = 20, F3             | 80 generations minimising, then 20 maximising              |
| `tb_ga_top_full` | defaults: N = 32, m = 20, F3  | reaches F3 = 0 in generation 86; 120 generations, 360 clocks |
| `tb_ga_wl_f1`    | N = 32, m = 26, F1            | reaches the range minimum f(-4096) in generation 13        |
| `tb_ga_wl_f2`    | N = 32, m = 20, F2            | reaches the range minimum -3072 in generation 96           |
| `tb_ga_wl_f3`    | N = 64, m = 20, F3            | reaches 0 in generation 12                                 |
| `tb_ga_sizes`    | N = 4 ... 64 at m = 20; m = 22 ... 28 at N = 32, F3 | 40 generations each; fitness and rate checked |

Each bench prints the generation in which its target was first reached.
These are single runs from the fixed reset seeds, not averages. The source
reports, as averages over runs, that F1 (N = 32, m = 26) converges in about
half of 100 generations and F3 (N = 64, m = 20) in a little over 20.

To run a bench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/ga_pkg.sv tb/ga_ref_pkg.sv tb/tb_ga_top_full.sv --top-module tb_ga_top_full
    ./obj_dir/Vtb_ga_top_full

Each bench ends with a line `TB_RESULT checks=<n> failures=<n>`. All benches
finish in about a second.

## What is this design's own choice

The published description leaves these points open. This design decides
them as follows:

- **Word widths.** c, d and a are given only as symbols there. The widths
  chosen here are in `ga_pkg`.
- **Number formats.** The tables use integer values. px and qx are read as
  signed for F1 and F3 and as unsigned for F2.
- **F1 constant.** The source writes F1 once with a constant of +500 and
  elsewhere with +50. The tables use +50, the form given for the beta table.
- **Gamma table.** The table is addressed by the top 16 bits of delta. Entries
  are bucket lower edges.
- **LFSR details.** The Fibonacci form, one shift per generation and the seed
  hash are this design's own.
- **Initial population.** The initial population is pseudo-random constants
  loaded by reset, rather than a run-time random fill.
- **Reset.** Reset is synchronous and active low everywhere.
- **SyncM counter.** The counter restarts on a match, to give the stated
  three-clock generation.
- **SMMAXMIN.** 0 means maximise.
- **Selection multiplexers.** The larger-index multiplexer feeds input 0 of
  the max/min multiplexer.
- **Ties.** A tie leaves A > B false, so it goes to the second candidate when
  maximising and to the first when minimising.
- **Cut codes.** Crossover codes beyond h-1 mean "no cut".
- **Mutation word.** The mutation word is the top M bits of its generator.
- **One shared `maxmin`.** A single `maxmin` input drives all selection units.

The published design is also synthesised with vendor tools on a Virtex-7.
The numbers reported there depend on that flow: about 48.5 MHz for N = 32 and
34.6 MHz for N = 64 at m = 20, with LUT use growing as N^2. Nothing here
reproduces them. The RTL is generic, with no device primitives.

## Files

- `rtl/ga_pkg.sv`: types, widths, table generators, LFSR step, seed hash.
- `rtl/ga_lfsr.sv`, `ga_rx.sv`, `ga_rom.sv`, `ga_ffm.sv`, `ga_sm.sv`,
  `ga_cmpq.sv`, `ga_cm.sv`, `ga_mm.sv`, `ga_syncm.sv`: the blocks.
- `rtl/ga_top.sv`: the array.
- `tb/`: one bench per block, the end-to-end and workload benches, and the
  reference package.
