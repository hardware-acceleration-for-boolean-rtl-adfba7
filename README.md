# BPA-SAT: a belief-propagation engine for Boolean satisfiability

Decoding an LDPC code and solving a CNF formula are the same kind of problem.
In both, binary variables must satisfy a set of local constraints. For LDPC,
each constraint is a parity check. For SAT, each constraint is a clause, an OR
of literals. LDPC decoders solve their problem with belief propagation (BP),
and BP maps well onto parallel hardware. This engine runs the same message
passing on the graph of a CNF formula. Each clause tells each of its literals
how likely the clause is to be satisfied without it. Each variable gathers
those messages into a belief. After every iteration the beliefs are rounded
to an assignment, and the assignment is tested against the formula. If BP has
not converged after a set number of iterations, the engine restarts from
random beliefs, up to a set number of restarts.

BP is not a complete solver. It cannot prove a formula unsatisfiable, and it
may miss a solution that exists. The engine reports either a verified
satisfying assignment or "not found".

## The algorithm in one page

Take clause *c* with literals l1..lK. Each variable *j* holds a belief
Q_j(1) : Q_j(0). One iteration does four things:

1. **Variable to clause (q).** Variable *j* sends clause *c* its belief built
   from every *other* clause it appears in. This is the "extrinsic" belief. The
   variable's own starting bias is ignored, so a variable that appears in no
   clause stays at 0.5.
2. **Clause to variable (r).** Clause *c* tells literal l_k how likely the clause
   is to be satisfied given each value of l_k's variable. If that value makes l_k
   true, the answer is 1. If it makes l_k false, the answer is
   `r = 1 - prod over the other literals of P(literal false)`.
3. **Belief (Q).** Each variable multiplies the r messages of all its clauses.
4. **Hard decision and test.** A variable is 0 if Q(0) > Q(1), and 1 otherwise.
   If every clause is satisfied, the run stops.

On the first attempt all beliefs start at 0.5. The attempt ends after
`max_iter` iterations. The engine then restarts from random beliefs, until
`max_restart` restarts have been used.

### The same thing in the log domain

Products of probabilities underflow in fixed point, and the normalisation
needs a divider. So the engine keeps everything as natural logarithms. For a
clause, only the value that falsifies a literal is penalised, so one
unsigned number per edge is enough:

| symbol | meaning | stored as |
|---|---|---|
| `lam_j = ln(Q_j(1)/Q_j(0))` | belief of variable *j* | signed, 16 bit |
| `a_e = -ln r_e` | penalty that clause sends through edge *e* to the value falsifying its literal | unsigned, 8 bit |
| `b_e = -ln P(literal e false)` | literal-to-clause message | unsigned, 8 bit, not stored |

With these:

* belief: `lam_j = sum(+a_e over positive literals of j) - sum(+a_e over negated literals of j)`
* extrinsic log-odds on edge *e*: `mu_e = lam_j - (+/-a_e)`, which removes the edge's own contribution
* literal message: `b_e = ln(1 + e^t)`, where `t = mu_e` for a positive literal and `-mu_e` for a negated one
* clause message: `a_e = f(B_e)`, where `f(B) = -ln(1 - e^-B)` and `B_e` is the sum of `b` over the clause's other literals
* decision: variable *j* is 1 when `lam_j >= 0`

The normalisation constants of the probability form cancel, so no division
is needed. The extrinsic "all but one" product becomes a subtraction from a
running sum, which also means the engine stores no q messages at all. It only
keeps the previous iteration's clause messages `a`.

## Number format and the two tables

All log-domain values use 4 fraction bits, so 1 LSB = 1/16 nat. Messages
saturate at 255, which is about 15.9 nat. A saturated message means the
probability is 1.2e-7 or smaller.

Two nonlinear functions are read from tables. The tables are built during
elaboration from `$exp`/`$ln` in `bpsat_pkg`, so no data files are needed.

* Softplus, `ln(1+e^t) = max(t,0) + c(|t|)`. The correction `c(x) = ln(1+e^-x)`
  has 64 entries, covering x < 4 nat. Beyond that it is 0, which costs less
  than 0.3 LSB.
* Clause penalty, `f(B) = -ln(1 - e^-B)`, has 128 entries, covering B < 8 nat.
  Beyond that it is 0, which costs less than 0.01 LSB. The entry for B = 0 is
  saturated. It only occurs when every other literal of the clause is surely
  false, which also covers a one-literal clause. In that case the clause
  forces its literal.

Each table entry is rounded to the nearest LSB. The unit testbenches compare
both message units with real arithmetic and accept an error of at most 1 LSB.

## Microarchitecture

By default the engine handles one clause per clock, with that clause's K
edges in parallel. The parameter `P` widens this to a word of P clauses per
clock. Every unit below is then replicated P times, and the variable array
gets P*K lanes. The drawing shows P = 1:

```
            +-----------+  lits   +-------------------+
 load  ---> | clause_mem|-------->| var_belief_array  |  lam_cur (K read ports)
            +-----------+    |    |  lam_cur, lam_new |<------ +/-a_new (K add lanes)
            +------------+   |    +-------------------+
            |edge_msg_mem|---+---> K x q_msg_unit ---> b ---> clause_node_unit ---> a_new
            +------------+  a_old                                                    |
                  ^-------------------------------------------------------------------+
   bpsat_ctrl: INIT -> SWEEP -> SWEEP_END -> COMMIT -> CHECK -> (SWEEP | INIT | DONE)
   clause_check_unit: clause literals + decisions -> clause satisfied?
   restart_lfsr: random starting beliefs
```

* **Stage 1.** A word's clauses and their old messages are read from two
  synchronous memories, P clauses and P*K messages per word.
* **Stage 2.** Each literal looks up its variable's belief `lam_cur`. A
  `q_msg_unit` subtracts the old message and produces `b`. The
  `clause_node_unit` turns the K values of `b` into K new messages `a`. These
  are written back over the old ones, and `+a` or `-a` is added to the
  variable's `lam_new`. Lanes that name the same variable, in one clause or in
  different clauses of a word, are merged before the add. Clause slots past
  the formula's last clause are masked.
* **Commit.** After the last clause, one cycle copies `lam_new` into `lam_cur`
  and clears `lam_new`. The hard decisions then come straight from the sign
  bits.
* **Check.** The words are read again, one per cycle, and evaluated under the
  decisions. The first word with a false clause ends the check.

The two belief registers per variable mean every message of an iteration is
computed from the previous iteration's beliefs. This is the "flooding"
schedule of an LDPC decoder. A random restart writes one variable per cycle.
It also sets a flag so that the first sweep of the attempt treats all old
messages as 0, so the message buffer never needs clearing.

**Timing.** Take n clauses, v variables and w = ceil(n/P) words. A sweep takes
w+1 cycles and a commit takes 1. A check takes between 2 and w+1 cycles: w+1
when the formula is satisfied, and fewer when a false clause is found early.
Each attempt begins with v cycles of initialisation. So one iteration takes at
most 2w+3 cycles. For 1065 clauses at P = 1 that is at most 2133 cycles. The
end-to-end testbenches check every run's cycle count against this model.

## Interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `load_we`, `load_addr`, `load_lits` | in | 1, clog2(NC), K x 17 | write clause `load_addr`: per literal `{neg, idx[15:0]}`, 0-based variable index; ignored while `busy` |
| `cfg_num_vars` | in | 16 | variables in the formula, at most NV |
| `cfg_num_clauses` | in | clog2(NC)+1 | clauses in the formula, 1..NC |
| `cfg_max_iter` | in | 16 | iterations per attempt (0 acts as 1) |
| `cfg_max_restart` | in | 16 | random restarts allowed |
| `seed` | in | 32 | generator seed, taken at `start` (0 selects a fixed seed) |
| `start` | in | 1 | one-cycle pulse while idle or done |
| `busy`, `done`, `found` | out | 1 | run in progress; run ended (held until the next start); solution valid |
| `solution` | out | NV | hard decisions; when `found`, satisfies every loaded clause |
| `iter_count`, `restart_count` | out | 16 | iterations of the last attempt; restarts used |

The `cfg_*` inputs must stay steady while a run is in progress. Assertions in
`bpsat_top` flag a clause write or a start pulse while `busy`. Every clause
has exactly K literal slots. A formula with shorter clauses can repeat a
literal to fill the slots, because repeated variables are merged. A variable
index at or above NV is treated as an always-false literal that receives no
messages.

Parameters of `bpsat_top`:

| parameter | default | meaning |
|---|---|---|
| `NV` | 250 | variables |
| `NC` | 1065 | clauses |
| `K` | 3 | literals per clause |
| `P` | 1 | clauses processed per cycle |

The defaults fit the largest standard random 3-SAT benchmark size, uf250-1065.
Widths and table sizes live in `bpsat_pkg`: `FRAC`, `W_MSG`, `W_LLR`, `W_IDX`,
`SP_ENTRIES` and `CP_ENTRIES`. If you change `FRAC`, resize the tables to match.

## Where this design departs from the algorithm's original description

The algorithm follows its published form: the modified BP for OR clauses with
the prior dropped, hard decisions, the satisfiability test after every
iteration, and the two loops of iteration and random restart. The hardware
around it is this design's own. The original proposal only argues that an
LDPC-decoder-like circuit could run the algorithm. It estimates the speed
from a published LDPC decoder, and it gives no circuit. In particular:

* **Loadable rather than instance-specific.** The original proposal suggests
  building one circuit per formula. Here the formula lives in memories, so one
  build serves any formula up to NV/NC/K.
* **Word-serial rather than fully parallel.** The engine processes P clauses
  per cycle, not all of them at once. An iteration therefore costs O(n/P)
  cycles rather than a constant. The iteration count, which is what the
  original speed estimate rests on, is unchanged, and so is every message,
  whatever P is. The merge network grows with (P*K)^2, which makes a fully
  parallel loadable engine (P = NC) impractical.
* **The clause message for the satisfying value is 1.** The general BP
  description sets r(1) = 1 - r(0). That holds for parity checks but not for OR
  clauses. This design uses the definition of r, "probability that the clause
  is satisfied given the variable's value", for both values.
* **Log domain and fixed point.** These are used instead of normalised
  floating-point probabilities.
* **Starting beliefs after a restart** are uniform log-odds in [-2, 2) nat.
  That puts q(1) between 0.12 and 0.88. The generator is a 32-bit xorshift.
* Negated literals, merging of repeated variables, saturation, and the early
  end of the check are all this design's own choices.

## Behaviour seen in simulation

`tb_bpsat_workloads` generates random 3-SAT formulas with a planted solution.
It uses the ten benchmark sizes of the uf family, from uf20-91 to uf250-1065,
and runs each one twice with `max_iter` = 150: once without restarts, and
once with `max_restart` = 2. With the default seeds, 20 of the 30 formulas
were solved without a restart and 21 with restarts. Every reported solution
was checked clause by clause. As with the original software results, the
restarts add little. Solved runs at every size needed roughly 3 to 66
iterations on average, counting the iterations of failed attempts. The count
does not grow with formula size, as one would expect from BP.

Planted formulas are easier than the filtered uniform benchmarks. These
numbers therefore say nothing about the solve rate on those benchmarks.

## Files

| file | content |
|---|---|
| `rtl/bpsat_pkg.sv` | widths, literal type, message tables |
| `rtl/clause_mem.sv` | clause store |
| `rtl/edge_msg_mem.sv` | previous clause messages |
| `rtl/q_msg_unit.sv` | literal-to-clause message |
| `rtl/clause_node_unit.sv` | clause-to-literal messages |
| `rtl/var_belief_array.sv` | beliefs, accumulation, commit, decisions |
| `rtl/clause_check_unit.sv` | clause evaluation |
| `rtl/restart_lfsr.sv` | random restart source |
| `rtl/bpsat_ctrl.sv` | loop sequencer |
| `rtl/bpsat_top.sv` | the engine |
| `tb/tb_<module>.sv` | self-checking unit testbenches |
| `tb/tb_bpsat_top.sv` | end-to-end test: found, not found, restarts, early check end, merged lanes, cycle count |
| `tb/tb_bpsat_top_par.sv` | the same test with P = 4 |
| `tb/tb_bpsat_workloads.sv` | the ten uf sizes |
| `tb/tb_bpsat_full.sv` | one full-size run, 250 variables and 1065 clauses |

Every testbench prints `TB_RESULT checks=N failures=M` and then stops.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/bpsat_pkg.sv tb/tb_bpsat_top.sv --top-module tb_bpsat_top -o sim
./obj_dir/sim
```

To run another testbench, replace `tb_bpsat_top` with its name. The package
must come first on the command line. The testbenches draw their random data
with `$urandom`, so a different simulator seed gives different formulas. All
runs take seconds.
