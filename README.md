# WalkSAT-XNF: an in-memory solver for hybrid XOR–CNF satisfiability

Many satisfiability problems from cryptanalysis, coding and circuit design
are built from parity constraints. Written as plain CNF, every XOR of k
variables costs 2^(k-1) OR-clauses, so the instance grows large. A hybrid
"XNF" formula keeps two kinds of clause side by side:

* a **CNF clause** (`x1 | ~x2 | ~x3`) is satisfied when at least one literal is true;
* an **XOR clause** (`x1 ^ x2 ^ x3`) is satisfied when an odd number of literals is true.

This RTL implements an accelerator that solves XNF formulas directly, without
translating them to CNF. Both clause types are stored in the same binary
crossbar array. One array operation counts the true literals of every clause
at once. A second, transposed array then turns the per-clause verdicts into a
gain for every variable. Every iteration of the local search takes three
clock cycles, whatever the size of the problem.

The architecture comes from a published in-memory computing (IMC) design,
where the crossbars are analog RRAM arrays with ADCs, comparators, noise DACs
and a time-domain winner-takes-all circuit. Here every block is written as
synthesizable digital logic that computes the same values the analog circuit
would compute without noise or device variation. The sections below mark
where this RTL follows the published architecture and where it makes its own
choices.

## 1. The search: WalkSAT-XNF

The solver keeps one full assignment `x` and repeats:

1. Evaluate every clause.
2. For every variable `v` that appears in at least one violated clause
   (the candidate set U), compute
   `gain(v) = make(v) - break(v)`:
   * `make(v)` counts the violated clauses that flipping `v` would satisfy.
     For both clause types this is simply "violated clauses that contain `v`".
     A violated CNF clause has no true literal, so flipping any member fixes
     it. A violated XOR clause has even parity, so flipping any member makes
     it odd.
   * `break(v)` counts the satisfied clauses that flipping `v` would violate.
     For a CNF clause this happens only when it has exactly one true literal
     and that literal belongs to `v`. For an XOR clause, every satisfied
     clause containing `v` breaks.
3. Add Gaussian noise of standard deviation sigma to every gain, and flip
   the candidate with the highest noisy gain.
4. Stop when all clauses are satisfied or an iteration limit is reached.

Unlike classic WalkSAT, which looks at one random violated clause at a time,
the gain is computed for **all** candidates in every iteration. The crossbars
make this full-neighbourhood evaluation cost a single array operation.

## 2. How the arrays compute the gain

### 2.1 Literal encoding

Variable `j` owns two columns: column `2j` is the literal `x_j` and column
`2j+1` is `~x_j`. A clause is one row, with a 1 in the column of each of its
literals. The variable register drives column `2j` with `x_j` and column
`2j+1` with `~x_j`. Row `i` of the product `B * columns` is then the number of
true literals `n_i` of clause `i`. In the analog array this product is a
summed current. In `clause_crossbar` it is `$countones(row & columns)`.

### 2.2 Clause evaluation: one bit per clause and per direction

`clause_eval` turns each count into two bits:

| clause | make input (clause violated)     | break input                      |
|--------|----------------------------------|----------------------------------|
| XOR    | `~LSB` of the ADC code (even)    | `LSB` of the ADC code (odd)      |
| CNF    | `n == 0` comparator              | `n == 1` comparator              |

An XOR row needs only the parity of `n`, so the least-significant bit of an ADC
is enough. The ADC has `ADC_LEVELS` codes (16 by default, 4 bits). A count
above `ADC_LEVELS-1` clips to the top code and so gives a wrong parity,
exactly as a real converter would. With 4 bits, XOR clauses of up to 15
literals are always evaluated correctly. Longer clauses are correct only
while at most 15 of their literals are true. The `adc_clipped` output flags
the rows where this happens. `ADC_LEVELS` can be lowered to study
coarser converters.

The make input is 1 exactly when the clause is violated, so the OR of all
make inputs is the "not yet solved" signal.

### 2.3 The transposed array and the pass transistors

`makebreak_crossbar` holds the same clause matrix a second time, transposed.
The clauses drive the rows and the literal columns are summed:

```
make(j)  = sum over clauses i of make_in(i)  * (b[i][2j] + b[i][2j+1])
break(j) = sum over XOR clauses of break_in(i) * (b[i][2j] + b[i][2j+1])
         + x_j  * sum over CNF clauses of break_in(i) * b[i][2j]
         + ~x_j * sum over CNF clauses of break_in(i) * b[i][2j+1]
```

The make value needs no gating. The XOR break needs none either, because every
member of a satisfied XOR clause breaks it. The CNF break is gated by the
value of the literal (the "pass transistor" on the column output). A CNF
clause with one true literal is broken only by flipping the variable that
owns that true literal. In this case the published text and the worked
example count the break only for the owner of the true literal. The published
pseudocode counts it for every member. The RTL follows the text and the
worked example.

### 2.4 Worked example

The formula `(x1^x2^x3) & (x3^x4) & (~x2|x3) & (x1|x3) & (x1|~x2|~x3)` with
`x = 1,1,0,1` (x1 is bit 0). Every testbench uses these values.

| clause        | n | make/break in |
|---------------|---|---------------|
| x1 ^ x2 ^ x3  | 2 | 1 / 0         |
| x3 ^ x4       | 1 | 0 / 1         |
| ~x2 \| x3     | 0 | 1 / 0         |
| x1 \| x3      | 1 | 0 / 1         |
| x1\|~x2\|~x3  | 2 | 0 / 0         |

| variable | make | break | gain | candidate |
|----------|------|-------|------|-----------|
| x1       | 1    | 1     | 0    | yes       |
| x2       | 2    | 0     | +2   | yes       |
| x3       | 2    | 1     | +1   | yes       |
| x4       | 0    | 1     | -1   | no        |

x3 gets no break from `x1|x3`, because its literal there is false. Without
noise, x2 wins. The XOR array turns `1,1,0,1` into `1,0,0,1`, which
satisfies all five clauses.

## 3. Noise

The noise must be Gaussian, and a fresh sample is needed for every variable
in every iteration. `noise_gen` builds it from xorshift64 generators and the
alias method:

* `ceil(N_VARS/4)` xorshift64 generators (`s ^= s<<13; s ^= s>>7; s ^= s<<17`).
  Each 64-bit state is cut into four 16-bit words, and variable `j` takes word
  `j mod 4` of generator `j / 4`. All generators step once per iteration.
  `start` reseeds them: generator `g` starts at
  `seed ^ (0x9E3779B97F4A7C15 * (g+1))`, or at a fixed constant if that is zero.
* Alias sampling over 64 bins. Bin `b` stands for the standard-normal value
  `(2b-63)/16`, the centre of the interval `[(b-32)/8, (b-31)/8)`. From a word
  `r`, the column is `k = r[5:0]` and the uniform draw is `u = r[13:6]`. The
  bin is `k` if `u < thresh[k]`, else `alias[k]`.
* Scaling: `noise = ((2b-63) * sigma) >>> 4`. `sigma` is unsigned Q4.4, so the
  noise has the same 1/16 LSB as the gradients. `sigma = 0` switches the
  noise off and makes the search greedy and deterministic.

The table is loaded through the `alias_*` port. To obtain a normal
distribution, take `p_b ∝ exp(-v_b²/2)` with `v_b = (2b-63)/16`, normalise,
and run Vose's alias construction on `64·p_b`. Store
`thresh[k] = floor(256·q_k)` (256 means "always keep k") together with the
alias index. The testbenches contain this construction. After reset,
every column keeps its own bin, which gives a uniform distribution over
[-4, 4).

The published design uses sigma 1.0 to 3.0 depending on the problem class
(2.5 for the MDP parity problems, 3.0 for McEliece in XNF form, 1.5 for AES).

## 4. Timing

```
cycle      EVAL                    MB                       WTA
           x -> clause array ->    make/break array ->      WTA -> XOR flip
           eval circuits           noise + gradient         -> x register
registers  make_in/break_in  <=    grad/cand         <=     x <= x ^ winner,
                                                            PRNG steps, iter++
```

* One iteration takes exactly **three cycles**. The published design uses the
  same three-step split and quotes 6 ns per iteration at 28 nm. Placing the
  noise and subtraction in the second cycle is this design's choice.
* The stop test is made in EVAL. If no clause is violated, the run ends with
  `sat = 1`. If `iter_count == max_iter`, it ends with `sat = 0`. A run of
  `k` flips therefore takes `3k + 1` cycles from `start` to `done`, and the
  final assignment has always been evaluated.
* `iteration_ctrl` has five states: IDLE, EVAL, MB, WTA and DONE. `busy` is
  high in EVAL, MB and WTA. `done` stays high until the next `start`.

## 5. Using the top level (`walksat_xnf_top`)

| port | use |
|------|-----|
| `prog_we, prog_addr, prog_lits[2N], prog_is_xor, prog_valid` | Write clause `prog_addr` into both arrays and set its type. Bit `2j` of `prog_lits` is literal `x_j` and bit `2j+1` is `~x_j`. Rows with `prog_valid = 0` are ignored. |
| `alias_we, alias_addr, alias_thresh[9], alias_idx[6]` | Write the noise table (section 3). |
| `sigma[8]` | Noise standard deviation, Q4.4. |
| `init_we, init_x[N]` | Load the start assignment. |
| `seed[64], max_iter[32], start` | Seed the PRNG, set the flip limit, and run. |
| `busy, done, sat, iter_count, x, last_flip` | Status, flips made, and the current or final assignment. |

Sequence: reset, write the clauses (only the rows you use), write the alias
table, load `init_x`, set `sigma`, `seed` and `max_iter`, pulse `start`, then
wait for `done`. Programming and `init_we` must not be used while `busy`.
The crossbar cells model non-volatile memory and are not reset. Only the
per-row valid bits are cleared, so a row that is never written does nothing.

## 6. Sizes

| parameter | default | origin |
|-----------|---------|--------|
| `N_VARS` | 250 | the capacity the published work gives for one dense IMC array |
| `N_CLAUSES` | 500 | same |
| `ADC_BITS` / `ADC_LEVELS` | 4 / 16 | published: 4 bits for up to 15 literals |
| gradient | signed, 4 fraction bits, 16 bits at the default size | this design |
| `ITER_W` | 32 | this design (the published runs are capped at 10^9 flips) |

At these sizes the arrays hold every XNF and preprocessed XNF benchmark of the
published evaluation:

* McEliece: 32 variables, 96 clauses.
* MDP parity, 16-bit: about 87 variables and 330 clauses.
* AES: about 88 variables and 350 clauses, or 180 variables and 430 clauses
  without preprocessing.

The plain-CNF versions of McEliece, 16-bit MDP and AES do not fit, with up to
659, 1392 and 1056 clauses. The published work sized the ADC for XOR clauses
of up to 15 literals in the XNF forms. A longer XOR clause still runs, but a
count above 15 saturates and its parity can be read wrongly (section 2.2).

## 7. What this RTL does not model, and its own choices

* **Analog behaviour.** The RRAM cells, transimpedance amplifiers, comparators,
  ADCs, R2R noise DACs and the delay-line WTA are replaced by exact digital
  equivalents. Conductance variation and read-out noise, which the published
  sensitivity study adds to the array outputs, are absent. The WTA is a
  compare-and-select tree, and ties go to the lowest index.
* **Candidate set.** Only variables with `make > 0` may win. This is exactly
  the set "variables in violated clauses", but the published hardware
  description does not say how it is formed.
* **Per-row type and valid bits.** These are written together with the clause.
  Without a valid bit, an unused all-zero row would read as an empty, violated
  CNF clause.
* **Programming ports.** The write ports of the arrays and the noise table,
  the start/done handshake, the reset values and the seeding scheme are this
  design's own choices.
* **Make and break in one cycle.** Both sums are formed in the same cycle from
  one stored copy of the transposed matrix. The published prototype applied
  them one after the other.
* **CNF break.** This follows the text and the worked example, not the
  pseudocode (section 2.3).

## 8. Files and simulation

`rtl/`:

* `walksat_pkg.sv`: constants, phase enum, xorshift function.
* `var_register.sv`
* `clause_crossbar.sv`
* `clause_eval.sv`
* `makebreak_crossbar.sv`
* `noise_gen.sv`
* `gradient_unit.sv`
* `wta.sv`
* `variable_flip.sv`
* `iteration_ctrl.sv`
* `walksat_xnf_top.sv`

`tb/` has one self-checking testbench per module, `<module>_tb.sv`. Each
testbench prints `TB_RESULT checks=N failures=M`.

`walksat_xnf_top_tb` runs the whole solver at the default size (250 × 500)
beside a reference model of the algorithm that includes the noise source. It
compares the flipped variable in every iteration and the cycle count at the
end of every run. It runs the worked example and planted-solution instances
of the McEliece XNF-PP size (32 variables, 96 clauses) and the 16-bit MDP
size (87 variables, 331 clauses, with an 18-literal XOR clause that makes the
ADC clip). It also covers a run stopped by the iteration limit and a run that
starts at a solution. The whole test runs in a few seconds.

`walksat_workloads_tb` also runs at the default size. It builds MDP and
McEliece instances in XOR–CNF form, each with a planted solution:

* MDP: an 8-bit secret, 16 samples and at most 2 errors.
* McEliece: a non-zero codeword of length 16 and weight at most 4.
* Random 3-SAT: 20 and 50 variables at 4.26 clauses per variable, the sizes
  used in the published comparison with other SAT accelerators. These
  instances have a planted solution, so they are easier than uniformly drawn
  ones.

The "at most" limits are sequential-counter CNF constraints. Each instance is
solved from three random starts with noise 2.5, 3.0 or 2.0. The testbench checks
every reported solution against all clauses and also checks the cycle count.
The published AES instances cannot be rebuilt from the published description,
so they are not tested. This test runs for under a minute.

```
verilator --binary --timing --assert -Irtl rtl/walksat_pkg.sv tb/walksat_xnf_top_tb.sv \
          --top-module walksat_xnf_top_tb -o sim && obj_dir/sim
```

Use the same command with any other `tb/<module>_tb.sv`. The testbenches use
`$urandom` only. They set the state they read, so the run does not depend on
the simulator's random initial values.
