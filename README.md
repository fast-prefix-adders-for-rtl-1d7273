# Prefix adders shaped by input arrival times

An adder inside a larger circuit rarely sees all of its operand bits at once.
At the end of a multiplier, for example, the middle columns of the partial-product
tree settle last and the outer columns first. A textbook parallel prefix adder
(Kogge-Stone, Sklansky, ...) ignores this: it is balanced for inputs that all
arrive at time 0. This RTL builds the carry network *for a given arrival-time
profile*: you pass the arrival time of every bit position as a parameter, and
elaboration produces a different prefix structure for each profile, one that
lets late bits reach the carry outputs through few gates and routes early bits
through the deeper parts of the network.

Two ideas drive the construction.

1. **Count logic gates, not prefix gates.** A prefix gate
   `(g, p) o (g', p') = (g | p & g', p & p')` is three 2-input gates. Its
   generate output is **one** gate level behind the left (higher) operand's
   generate but **two** levels behind the right (lower) operand. An optimal tree
   therefore is not balanced: it is a *Fibonacci tree*, in which the left subtree
   of a node of depth `k` has depth `k-1` and the right one depth `k-2`. A
   Fibonacci tree of index `k` has `F(k)` leaves and gate depth `k-1`.
2. **Replace leaves by inputs.** An input that arrives at time `t` is given
   `F(t+3) - 1` consecutive leaves of one big Fibonacci tree. The tree is then
   cut recursively exactly where the Fibonacci tree is cut, and every input ends
   up at the root of a subtree that is at least as deep as the input is late.

The result is a carry circuit whose delay is within a small additive constant of
the best possible for that arrival profile, and an adder built on top of it by a
square-root decomposition. The construction is the one described by S. Held and
S. T. Spirkl in "Fast Prefix Adders for Non-Uniform Input Arrival Times"; this
RTL is an independent implementation of it as an elaboration-time generator.

## Delay model

Every 2-input gate costs one time unit; bit `i` of both operands is valid at
its arrival time `t_i` (an integer, 0 to 255 here). For a prefix gate with
operand delays `(g_l, p_l)` (left, higher bits) and `(g_r, p_r)`:

```
p_out = max(p_l, p_r) + 1                      gate A: p & p'
g_out = max(g_l + 1, max(p_l, g_r) + 2)        gate B: p & g',  gate C: g | B
```

This is the exact longest-path delay through the gadget. The RTL itself is
zero-delay synthesizable logic; the delays are computed at elaboration by the
same functions that choose the structure (`pfx_pkg`), and exposed as
localparams so that testbenches and users can read them.

## The carry tree (`carry_tree`, `carry_tree_node`)

`carry_tree #(N, T, GAMMA)` computes `y = z[N-1] o ... o z[0]`: `y.g` is the
carry out of the `N` positions (carry in 0), `y.p` their group propagate. It
uses `N-1` prefix gates (`3N-3` logic gates) and every signal has fan-out at
most two.

**Construction.**

1. *Rounding.* Arrival times earlier than `max(t) - GAMMA * ceil(log_phi N)`
   are raised to that value, then all times are shifted so the earliest is 0. This keeps the
   Fibonacci numbers below 2^64. `GAMMA = 3` costs at most `2.1 * N^-2` in the
   delay bound.
2. *Leaves.* Input `i` owns `c_i = F(t_i + 3) - 1` leaves. `K` is the smallest
   index with `F(K) >= sum c_i`.
3. *Split.* A subtree of index `k` sends `F(k-2)` leaves right (low positions)
   and `F(k-1)` left. Walking up from the lowest input, `j` is the first input
   at which the owned leaves reach `F(k-2)`; `f` of its leaves fall right. Input
   `j` goes right when `f >= F(t_j + 1)` (it then keeps `f` leaves), otherwise
   left (keeping the rest). The two sides recurse with indices `k-2` and `k-1`;
   a side with one input is that input. `carry_tree_node` is this recursion,
   written as a module that instantiates itself twice and joins the halves with
   one `prefix_gate`.

**Worked example** (the default parameters). Arrival times `t_1..t_5 = 3, 2, 3,
1, 0` give leaf counts `7, 4, 7, 2, 1`, total 21 = F(8), so `K = 8`. The first
split sends 8 leaves right: input 1 owns 7, input 2 would contribute only 1 of
its 4 leaves, fewer than `F(3) = 2`, so input 2 goes left and input 1 alone
forms the right subtree. Continuing, the circuit becomes the chain
`(((z5 o z4) o z3) o z2) o z1`, with gate delay 7 (bound: `K = 8`).

**Guarantee.** Delay `<= K <= floor(log_phi(sum_i phi^t_i)) + 4`, and no prefix
tree can beat `log_phi(sum_i phi^t_i) - 1`; in base 2, the delay is at most
`1.441 log2(sum_i 2^t_i) + 2.674`. `carry_tree` exposes `K`, `KBOUND` (`K` plus
the common shift, i.e. the bound in original time units) and `DELAY` (the exact
gate delay of the built tree).

The algorithm is near-optimal, not optimal. For five inputs with arrival times
`4, 3, 2, 1, 0` the best tree has delay 6 and this one has 8; for `0, 1, 2, 3,
4` the best has 7 and this one 9; for five inputs at time 0 both have 4. Both
stay within the `K = 9` bound.

## The parallel prefix graph (`prefix_graph`)

An adder needs every prefix `z_i o ... o z_1`, not only the last. Building one
carry tree per output would cost a quadratic number of gates, so
`prefix_graph #(N, T, GAMMA)` uses a recursive square-root scheme:

```
                 group L-1 (top)              ...   group 1              group 0
 inputs          z[..] -> carry_tree -> Z_{L-1}      z[..] -> Z_1         z[..] -> Z_0
                 z[..] minus top -> local prefixes (recursive prefix_graph), each group
 Z recursion                    prefix_graph over Z_0 .. Z_{L-2}  ->  Q_0 .. Q_{L-2}
                                (Q_g = Z_g o ... o Z_0)
 outputs, top    Z_{L-1} o Q_{L-2}                   Q_1                  Q_0
 outputs, rest   local_i o Q_{L-2}                   local_i o Q_0        local_i
```

* `L = ceil(sqrt(N))` groups of consecutive positions; sizes differ by at most
  one, larger groups at the low end (`N = 25`: five groups of five).
* Each group's total `Z_g` comes from a `carry_tree` built for that group's
  arrival times ("best" circuit for the group).
* A recursive `prefix_graph` over each group without its top position gives the
  prefixes inside the group; another one over `Z_0 .. Z_{L-2}` gives the
  prefixes of the group totals. The arrival time of `Z_g` fed to that
  recursion is the gate delay of the `carry_tree` that produced it.
* Output: positions of group 0 come straight from its local recursion. In
  group `g >= 1` each local prefix is joined with `Q_{g-1}` by one prefix gate.
  The top position of group `g < L-1` is `Q_g` itself; the top of the last
  group is `Z_{L-1} o Q_{L-2}`.

**Guarantee.** Delay at most `log_phi(sum_i phi^t_i) + 5 log2 log2 N + 4.5` and
at most `2 N log2 log2 N` prefix gates (`6 N log2 log2 N` logic gates).
`prefix_graph` exposes `DELAY` (slowest output, see below) and `GATES`. For the
default 25 positions with uniform arrival the graph has 61 prefix gates
(bound 110) and delay 10 (bound 22.3); a 64-position graph with a hill-shaped
(multiplier-like) profile uses 187 prefix gates with delay 23 (bound 32.9).

**Fan-out.** The Z-prefix signals drive up to about `sqrt(N)` gates each. No
repeater trees are inserted; a physical implementation would buffer these nets
(fan-out 2 repeater trees add about `ceil(log2 N)/2 + 1` levels).

## The adder (`prefix_adder`, top)

`prefix_adder #(N = 25, T = 0, GAMMA = 3)` with ports `a[N-1:0]`, `b[N-1:0]`,
`s[N:0]`. Per bit `g = a & b`, `p = a ^ b`; the prefix graph gives carries
`c_{i+1}`; `s_i = p_i ^ c_i` with `c_1 = 0`, and `s[N]` is the last carry. It is
purely combinational: no clock, no reset, outputs settle within
`prefix_graph.DELAY + 1` gate delays after the latest input.

## Specifying arrival times

All modules take arrival times as one flat parameter of type
`pfx_pkg::at_vec_t`: 8 bits per position, position 0 in bits `[7:0]`, up to
`MAXN = 256` positions. For example, a 16-bit adder whose middle bits arrive
late:

```systemverilog
import pfx_pkg::*;
function automatic at_vec_t hill16();
  at_vec_t t = '0;
  for (int i = 0; i < 16; i++) t[i*TW +: TW] = 8'((i < 15 - i ? i : 15 - i) / 2);
  return t;
endfunction
prefix_adder #(.N(16), .T(hill16())) u_add (.a(a), .b(b), .s(s));
```

Only differences between arrival times matter for the structure (within the
rounding window), so times can be given in any unit that is a whole number of
gate delays.

## How the generator is written

The structure is decided entirely during elaboration:

* `pfx_pkg` holds `gp_t` (the `{g, p}` pair), the arrival-time vector type and
  constant functions: Fibonacci numbers, rounding, `split()` (one cut of the
  recursion), `tree_delay()` (delay of the tree that the splits produce),
  grouping functions for the prefix graph, `graph_delay()` and
  `graph_gates()`.
* `carry_tree_node` and `prefix_graph` instantiate themselves with smaller
  parameters until one input is left. Each instance of `carry_tree_node`
  re-derives its own split from its parameters (`N`, `K`, the normalised times
  and the leaf counts still owned by its lowest and highest input).

`DELAY` of `carry_tree` is exact for the built tree. `DELAY` of `prefix_graph`
is an upper bound: the group totals enter the upper recursion with one arrival
time for both `g` and `p`, although `p` may be ready earlier.

## Verification

Each module has a self-checking testbench (`tb/`), all of them combinational
stimulus with one time unit per vector and a watchdog:

| testbench | what it checks |
|---|---|
| `tb_prefix_gate` | all 16 operand combinations against the operator's truth table; a two-gate chain against ripple evaluation |
| `tb_carry_tree` | 10 profiles (N = 3 to 64, uniform, ramps, hill, one very late input, a 190-unit spread): random or exhaustive vectors against a ripple carry; `DELAY <= KBOUND <= floor(log_phi w) + 4 + 2.1 N^-2` and `DELAY >= log_phi w - 1`; the worked examples (`K = 8`, delay 7 for `3,2,3,1,0`; `K = 5`, delay 5 for `0,1,0`); delays never below the known optima of the 5-input profiles |
| `tb_prefix_graph` | N = 1, 2, 3, 4, 10, 25, 26, 64 with uniform and non-uniform profiles: every output against ripple prefixes; delay and gate-count bounds above; carries that cross a group boundary must occur |
| `tb_prefix_adder` | 25-bit uniform, 25-bit and 64-bit hill profiles, 8-bit exhaustive, 256-bit irregular profile (the widest the parameters allow; 959 prefix gates): `s == a + b`; carry-out, a full-length ripple and a group-crossing carry must each occur |
| `tb_prefix_adder_full` | the top exactly as delivered (25 bits, no overrides): directed worst cases and 50 000 random pairs |

Each testbench was also run against a deliberately broken copy of its module
(gate A as OR, a wrong Fibonacci index, swapped combining operands, sums taken
from the propagate instead of the carry) and failed in every case.

Simulate with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/pfx_pkg.sv tb/tb_prefix_adder.sv \
          --top-module tb_prefix_adder -y rtl && ./obj_dir/Vtb_prefix_adder
```

Any testbench works the same way; each prints one
`TB_RESULT checks=N failures=M` line. Elaboration of the larger profiles takes
seconds (under a minute for `tb_prefix_adder` with its 256-bit adder) because
the constant functions run in the compiler.

## Departures and choices of this implementation

* **Group sizes.** The construction asks for `ceil(sqrt N)` groups of
  `ceil(sqrt N)` or `ceil(sqrt N) - 1` positions, which is impossible for some
  `N` (e.g. 10). Here group sizes differ by at most one.
* **Degenerate splits.** When the splitting rule would put every remaining
  input on one side, the boundary input is moved to the empty side. An input
  whose leaves all fell on the other side continues with zero leaves.
* **No gate sharing.** In some cases a group's carry tree and its local
  prefixes could share gates; here they are built separately (synthesis may
  merge identical logic).
* **Arrival times** are 8-bit integers; the rounding step with `GAMMA = 3` is
  always applied.
* **No fan-out buffering** (see above) and no carry input.
* **Lint.** When `prefix_graph` or `carry_tree_node` is itself elaborated as
  the top, `verilator -Wall` reports `zp`/`lp` (respectively
  `y_right`/`y_left`) as undriven. They are driven by the output port of the
  recursive instance; the linter reports this for any module that
  instantiates itself and assigns a local signal from the recursive
  instance. The report does not appear under `prefix_adder`, and the
  simulations check every output.

## Files

| file | contents |
|---|---|
| `rtl/pfx_pkg.sv` | types and elaboration-time construction functions |
| `rtl/prefix_gate.sv` | the three-gate prefix operator |
| `rtl/carry_tree_node.sv` | recursive Fibonacci-split subtree |
| `rtl/carry_tree.sv` | carry circuit for one carry bit |
| `rtl/prefix_graph.sv` | square-root recursive parallel prefix graph |
| `rtl/prefix_adder.sv` | the adder (top) |
| `tb/*.sv` | testbenches listed above |
