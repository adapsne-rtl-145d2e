# AdapSNE sampling accelerator — SystemVerilog RTL

Training a network on an edge device is cheaper when it sees a small,
representative subset of its data set instead of all of it. This design picks
that subset in hardware. The data are embedded in two dimensions with t-SNE.
A grid is laid over the embedding, and a fixed number of points is kept from
every cell. Whether this gives an even sample depends on the t-SNE
perplexity: too low and the embedding breaks into tight islands, too high and
the islands merge. The accelerator closes a loop around that choice. It
measures how evenly the embedding fills the grid (the entropy of the cell
histogram) and moves the target perplexity Π_t until the entropy passes a
threshold. Inside each pass, the per-point Gaussian widths σ_i that give each
point the target perplexity are found by a fireworks search (FWA), a
population-based random search, rather than by the usual bisection.

The RTL covers the fireworks search with its Evaluate Module, the grid
entropy unit, the perplexity controller and grid sampling. Two parts stay
outside and are reached through ports on the top:

* the t-SNE engine itself (gradient descent on the embedding), and
* the external memories: squared distances d_ij, and the embedding Y.

A behavioural stand-in for both is in `tb/tsne_acc_model.sv`.

## Block map

```
                     cfg, start
                         |
                  +--------------+   sig_valid/index/value   +-----------+
                  | adapsne_ctrl |-------------------------->|  t-SNE    |
                  |  (Pi_t loop) |--tsne_start / tsne_done-->|  engine   |
                  +--------------+                           | (outside) |
                 fwa_start |  ^ best sigma_i*                +-----------+
                           v  |                                    | Y
   +---------------------------------------+                       v
   | fwa_engine                            |            +-------------------+
   |  fwa_rand -> fwa_add_mul -> SPK RAM   |            | embedding memory  |
   |  arg min / arg max -> POP RAM         |            |   (outside)       |
   |  fwa_mutate -> MUT RAM                |            +-------------------+
   |  arg min (select) -> NPOP RAM         |              y_rd (4 points/cycle)
   +---------------------------------------+                 |        |
        POP OUT |     ^ REWD IN                               v        v
                v     |                              +--------------+ +--------------+
          +-------------+  dist_rd   +-----------+   | entropy_unit | | grid_sampler |
          | eval_module |<---------->| distance  |   |  H of grid   | |  exemplars   |
          |  8 lanes    |            | memory    |   +--------------+ +--------------+
          +-------------+            | (outside) |        ent_h ->ctrl    ex_valid/ex_index
                                     +-----------+
```

| File | Block |
|---|---|
| `rtl/adapsne_pkg.sv` | number formats, `cfg_t`, table generators |
| `rtl/adapsne_top.sv` | the whole accelerator |
| `rtl/adapsne_ctrl.sv` | perplexity retuning loop |
| `rtl/fwa_engine.sv` | fireworks search sequencer with its four RAMs and three arg-min/max units |
| `rtl/fwa_rand.sv` | RAND, one xorshift32 per lane |
| `rtl/fwa_add_mul.sv` | spark generation / random initialisation |
| `rtl/fwa_ram.sv` | 8-bank population RAM (SPK, POP, MUT, NPOP) |
| `rtl/fwa_argext.sv` | streaming per-lane arg min / arg max |
| `rtl/fwa_mutate.sv` | δ register and mutant adder row |
| `rtl/eval_module.sv` | Evaluate Module, 8 lanes sharing one distance stream |
| `rtl/perp_eval.sv` | one Evaluate lane: perplexity of one σ |
| `rtl/entropy_unit.sv` | grid entropy, 4 points per cycle |
| `rtl/grid_locate.sv` | coordinate → grid cell |
| `rtl/grid_sampler.sv` | per-cell quota sampling |
| `rtl/seq_div.sv`, `rtl/exp2_fx.sv`, `rtl/log2_fx.sv` | divider, 2^-u and log2 units |

## Number formats

The formats are this design's own choice:

| Quantity | Format |
|---|---|
| σ, perplexity Π, fitness | unsigned Q8.8, 16 bit (Π_t from 1.0 to 255.996) |
| squared distance d_ij | unsigned integer, 16 bit |
| embedding coordinate | signed Q8.8, 16 bit |
| entropy | unsigned Q8.16, in bits (log base 2), 24 bit |
| point index, counts | 21 bit (up to 2,097,151 points) |
| population word | `{σ, fitness}`, 32 bit |

The distance memory must hold squared distances already scaled into 16 bits.
The σ search range `[sigma_lo, sigma_hi]` is given in the same units.

## The Evaluate Module: perplexity of a candidate σ

This is the arithmetic core. It is also where most of the design's own
choices are. For point i and a candidate σ, the fitness is

    f(σ) = | R_i(σ) − Π_t |,   R_i = 2^H,   H = −Σ_j p_j|i log2 p_j|i,
    p_j|i = exp(−d_ij / 2σ²) / Σ_k exp(−d_ik / 2σ²).

Each lane (`perp_eval`) evaluates it without a logarithm per neighbour:

1. k = log2(e) / (2σ²). This takes one pass of a bit-serial divider, about
   58 cycles.
2. For each neighbour: u = d·k (Q8.8, saturating), then e = 2^−u. The
   integer part of u is a shift and the fraction goes through a 256-entry
   table. Two sums are kept: S += e and T += e·u.
3. Then H = log2 S + T/S. This follows from log2 p_j = −u_j − log2 S. Next
   R = 2^H and fit = |R − Π_t|. T/S takes one more divider pass.

The eight lanes score eight candidates of the **same** point. So the module
reads the distance row d_i0 … d_i(N−1) once and broadcasts each word to all
lanes, one word per cycle. The diagonal is skipped.

**Row-minimum shift.** For a point far from all others and a small σ, every
2^−u would underflow to zero. Each distance is therefore reduced by the
row's smallest distance before use. That multiplies every kernel of the row
by the same factor, so p_j|i and R are unchanged, but the nearest neighbour's
kernel is exactly 1. Finding the minimum costs one extra read of the row.
This is done in the first round for a point. The minimum is kept together
with the row number and N, and later rounds for the same point reuse it.

Timing: one round takes about N + 120 cycles, plus N − 1 cycles for the
first round of a point. The handshakes are `pop_valid/pop_ready` in and a
one-cycle `rewd_valid` pulse out.

The tables are computed at elaboration by integer-only constant functions in
`adapsne_pkg`:

* 2^(−i/256) by repeated multiplication with round(2^(−1/256)·2^32);
* log2(1 + m/256) by the bit-by-bit squaring method.

No table file is needed.

## Fireworks search for σ_i* (`fwa_engine`)

Eight fireworks are searched side by side, one per bank of the four
population RAMs. Each RAM has 8 banks; each bank is one 32-bit word wide:

| RAM | size | holds |
|---|---|---|
| SPK | 8 × 4 Kbit (128 words/bank) | sparks of the current generation |
| POP | 8 × 1 Kbit (32 words/bank) | elite spark of each generation |
| MUT | 8 × 1 Kbit | mutant of each generation |
| NPOP | 8 × 4 Kbit | fireworks of generation t (t = 0 … T) |

One search, for m sparks per firework and T generations:

1. **init**: the fireworks are set to σ = lo + rnd·(hi − lo) and evaluated
   once.
2. For each generation:
   * **explode**: in m rounds each firework throws a spark
     s = clip(σ + A·bias). The bias is a random word read as a signed
     fraction in [−1, 1). The amplitude A = max(fitness, A_MIN), so a worse
     firework searches wider. Sparks are evaluated and stored in SPK RAM.
   * **spark count**: a worse firework also gets fewer sparks. The
     fireworks are ranked by fitness (rank 0 = best). Lane l keeps
     m_l = m − ⌊rank·m/8⌋ sparks. The lanes still run in lock step, so
     every lane fills all m rounds, but only its first m_l entries count.
   * **elite**: SPK RAM is read through an arg-min and an arg-max unit. Both
     see only each lane's own m_l sparks. The best spark goes to POP RAM,
     and δ = f_max − f_min is latched.
   * **mutate**: mutant = clip(elite + δ). It is evaluated and stored in
     MUT RAM.
   * **select**: per lane, the best of firework, elite and mutant becomes
     the next firework in NPOP RAM.
3. Finally the best lane of NPOP RAM[T] is returned as σ_i*.

A search takes 1 + T(m+1) evaluation rounds. At the default RAM sizes the
valid ranges are m ≤ 128 and T ≤ 127 (the NPOP depth). POP and MUT RAM wrap
every 32 generations. The sparks are clipped
to the search range as the mutants are.

## Perplexity loop (`adapsne_ctrl`)

A *pass* at perplexity P does three things in order:

1. It searches σ_i* for every point. Each result goes to the t-SNE engine on
   `sig_valid/sig_index/sig_value`.
2. It starts the t-SNE engine (`tsne_start` … `tsne_done`).
3. It measures the entropy H of the new embedding.

The loop:

```
base pass at Pi^0                         -> H_b
H_max = log2(g*g) = 4 bits;  H0 = H_b + 0.8 (H_max - H_b)
k = 0:  Pi^1 = Pi^0 + ceil(dPi)
k > 0:  probe pass at Pi^k + dPi          -> slope s = (H(Pi^k+dPi) - H(Pi^k)) / dPi
        Pi^(k+1) = Pi^k + ceil((H(Pi^k) - H(Pi^(k-1))) / (s + eps))
main pass at Pi^(k+1) -> H;  repeat while H < H0 and k < max_iters
grid sampling of the last embedding, then done
```

Parameter defaults: dΠ = 0.5 (`DPERP`), ε = 1/256 (`EPS`) and α = 0.8
(`ALPHA_Q16`). Two choices here are this design's own:

* The slope comes from an extra *probe* pass.
* An iteration cap `max_iters` stops a loop that never reaches H0.

Π_t is clamped to [1, 255.996]. The Newton step is one signed division
through the shared bit-serial divider.

## Grid entropy (`entropy_unit`) and sampling (`grid_sampler`)

The grid is g × g with g = 4 (`GRID_LOG2 = 2`). The cell address is
i + 4·j. Four points are handled per cycle, in four phases:

1. **scan**: min and max of each axis.
2. **recip**: 1/gs per axis and 1/N, by the divider.
3. **count**: each of the four lanes computes its cell. A shared counter
   array takes all four increments per cycle.
4. **sum**: the counters are read four at a time. Each gives p = n/N and
   −p·log2 p, and an adder tree accumulates the results.

This takes about 2·⌈N/4⌉ + 165 cycles. The grid set-up (ymin, 1/gs) is
passed to the sampler.

The sampler streams the points again in index order. It keeps a point while
its cell has given fewer than `quota` exemplars. Lanes within one cycle are
resolved in lane order. Up to four exemplar indices leave per cycle on
`ex_valid/ex_index`. The entropy unit and the sampler share the embedding
memory port through a multiplexer, and never run at the same time.

## Top-level interface (`adapsne_top`)

| Parameter | Default | Meaning |
|---|---|---|
| `LANES` | 8 | fireworks lanes = RAM banks = Evaluate lanes |
| `WAYS` | 4 | points per cycle in entropy and sampling |
| `GRID_LOG2` | 2 | grid g = 4 |
| `INV_W` | 19 | width of 1/gs |

`cfg_t` fields:

| Field | Meaning |
|---|---|
| `n_points` | N |
| `perp0` | Π^0 |
| `num_sparks` | m |
| `num_gens` | T |
| `sigma_lo`, `sigma_hi` | σ search range |
| `max_iters` | iteration cap |
| `quota` | exemplars per cell |

Memory ports:

* Distance memory: `dist_rd_en/row/col`, with the data on `dist_rd_data`
  one cycle later.
* Embedding memory: `y_rd_en/grp`, where group k means points 4k … 4k+3.
  The data arrive on `y_rd_data` one cycle later.

`done` pulses at the end of a run. The results are then in:

| Output | Meaning |
|---|---|
| `final_perp` | final Π_t |
| `h_base` | H_b |
| `h_thresh` | H0 |
| `h_last` | last measured H |
| `iters` | iterations |
| `passes` | t-SNE passes run |
| `num_exemplars` | exemplar count |

Reset is synchronous and active low.

## Where this departs from, or adds to, the published design

* The t-SNE engine and the memories are outside the RTL. The σ hand-over
  and start/done handshake are this design's interface.
* Number formats, the RNG type (xorshift32), the amplitude rule
  A = max(fitness, A_MIN) and the spark-count rule m − ⌊rank·m/8⌋ are
  chosen here. The published method only says that poorer fireworks make
  fewer sparks over a wider range.
* One search runs per point, with all eight fireworks on that point's σ.
  The method is also described as varying all σ_i of a data set at once,
  but its search algorithm is written per point; the per-point form is
  built.
* Selection is per lane: each lane keeps the best of its own firework, elite
  and mutant. It is not a global top-n over all candidates.
* Mutation adds δ to the elite spark read from POP RAM. This follows the
  datapath drawing; the algorithm text adds δ to the firework.
* The Evaluate Module's internals are this design's, including the
  log-free entropy identity and the row-minimum shift.
* The entropy counters take four increments per cycle in one array,
  instead of a skewed per-lane pipeline. ymin, 1/gs and 1/N are computed on
  chip.
* The slope dH/dΠ is measured with a probe pass. The loop has an iteration
  cap, and Π_t is clamped.
* Grid sampling keeps the first `quota` points of each cell.

## Data-set sizes

All per-point counters are 21 bits, so N up to 2,097,151 fits. This covers
the image training sets usually used with this method, from CIFAR-10
(50,000) up to ImageNet-1K (1,281,167), and an instruction set of about 52K
pairs. The FWA RAMs hold only one point's search, so their size does not
depend on N.

Time grows as N²: every evaluation round streams a full distance row. For
m = T = 4, one pass is about N·(21·(N + 120) + N) cycles. That is about
5.5·10^10 cycles for 50,000 points and 3.6·10^13 for ImageNet-1K. The
N² distances are expected in external memory.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=<n> failures=<n>`.

`tb/tb_adapsne_top.sv` runs the whole accelerator at its default parameters
on a 32-point, four-cluster data set, with `tsne_acc_model` standing in for
the t-SNE engine and the memories. It checks:

* each σ_i* against a floating-point perplexity;
* the entropy of every pass;
* the exemplar list;
* the exit condition.

It also counts that every mechanism occurred: explosions, fireworks with
fewer sparks, clipping,
mutation, mutant and elite wins, minimum scans and cached rounds,
base/probe/main passes, the k = 0 step, Newton steps and full cells.

`tb/tb_adapsne_workload.sv` runs the same checks on a larger job shaped
like the image-set workloads. It uses 256 points in ten classes with a 10%
keeping ratio. That gives a quota of ⌈0.1·N/16⌉ = 2 per cell, and 28 points
are kept. The real data-set sizes change only N and the quota. Their N²
distance streaming is far too long to simulate.

Run a testbench with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_adapsne_top \
    -y rtl -y tb +libext+.sv rtl/adapsne_pkg.sv tb/tb_adapsne_top.sv
./obj_dir/Vtb_adapsne_top
```

Replace the top-module name and file to run another testbench.

The simulations are two-state; everything that is read is reset first. The
testbenches use only `$urandom`, so any simulator without a constraint
solver works.
