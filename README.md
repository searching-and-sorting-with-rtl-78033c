# Constant-time sorting and searching on a 1D-Crosspoint Array

This RTL sorts n numbers in a fixed number of clock cycles, whatever n is, and
answers search and order queries from the result. It is an enumeration sort:
every element is compared with every other element at the same time, and each
element's rank is the number of elements smaller than it. The comparisons need
n(n-1)/2 comparators that can each see a pair of elements. The design gets
them from a single straight line of about n²/2 small processing elements
(PEs). Each PE talks only to its two physical neighbours. The line is ordered
so that every pair of elements meets at one pair of neighbouring PEs. No long
wires, shared buses or reconfigurable meshes are needed for the comparisons.

The comparison results go into an n × n bit matrix T. Plain combinational
logic then reads off the rank of every element, the index of the minimum and
maximum, the element of a given rank and the position of a search key. The
rank logic uses threshold gates, so the whole path from the stored elements to
the ranks has constant depth when a threshold gate counts as one gate.

This follows the construction and algorithm of An and Oruç, "Searching and
Sorting With O(n²) Processors in O(1) Time". Where the paper leaves something
open, the choice made here is stated below and in each file's header.

## The array: classes, replicates and the line layout

Each of the n input elements A[i] has a *class* i. A class is served by
several PEs, its *replicates*; all of them hold the same value A[i]. The PE
C_{i,j} is replicate j of class i. Between every two neighbouring PEs there is
a *crosspoint*, a switch that connects the two PEs during the compare cycle.
It is the only wiring between PEs.

The trick is the order of classes along the line. Write m = n for even n and
m = n − 1 for odd n, and let p be the rotation i → i+1 (mod m). For every power
p^j, j = 1 … m/2, split 0 … m−1 into the cycles of p^j and write each cycle
starting from its smallest member. For example, the cycles of p² for m = 4 are
(0 2) and (1 3). Group the cycles by their first member into sets
Q_0 … Q_{m/2−1}. Then lay the sets out one after the other, each set's cycles
in increasing j. Walking along a cycle of p^j visits pairs of classes at
distance j, and the grouping makes the boundary between two consecutive cycles
form one more useful pair.

For odd n, class n−1 is not part of the cycles. It is slotted in between
consecutive sets Q_i, and the line ends with n−1, 0. The result:

| n   | PEs              | pairs of classes that meet       |
|-----|------------------|----------------------------------|
| odd | n(n−1)/2 + 1     | every pair exactly once          |
| even| n²/2             | every pair, n/2 − 1 pairs twice  |

Examples (class of each PE, left to right):

    n = 5 : 0 1 2 3 0 2 4 1 3 4 0
    n = 7 : 0 1 2 3 4 5 0 2 4 0 3 6 1 3 5 1 4 6 2 5 6 0
    n = 4 : 0 1 2 3 0 2 1 3            (classes 1 and 2 meet twice)

The construction only says "pick any cycle" inside a set Q_i. Taking them in
increasing j reproduces the paper's printed n = 7 and n = 12 lines. The
paper's drawing of the n = 5 line shows 0 1 2 3 4 0 2 4 1 3 0, a different
line that also pairs every two classes once. This RTL uses the line its
construction produces (above). Since both lines make the same comparisons, T
and every result are the same.

The layout is computed at elaboration time by constant functions in
`xpa_pkg` (`pe_class`, `pe_replicate`, `num_pes`). `crosspoint_array`
generates one `xpa_pe` per position and one `crosspoint_switch` per gap, each
given its own and its neighbours' classes as parameters.

## One operation: load, compare, read out

`xpa_ctrl` steps through three phases after a start pulse:

1. **LOAD** (1 cycle). The element memory drives all n elements in parallel
   on a load bus, and every replicate of class i latches A[i]. In the same
   cycle every row of T, and the search vector, is cleared. Row i belongs to
   class i, so a clear per row is enough.
2. **CMP** (1 cycle). All crosspoints close. At each crosspoint the PE of the
   higher class sends its element to the PE of the lower class. The
   lower-class PE compares it with its own element:
   * if the received element is smaller, it sets its own bit T[lo][hi] and
     returns 0;
   * otherwise it returns 1, and the higher-class PE sets T[hi][lo].

   Exactly one of the two bits is set. Equal elements are ordered by class:
   the higher index counts as the larger, so the ranks are always a
   permutation of 0 … n−1. T is written at the end of the cycle. Every PE has
   at most two neighbours, and for odd n every cell of T has exactly one
   possible writer, so no write arbitration exists.
3. **DONE** (1 cycle). `done_o` pulses. From here on, and until the next
   start, `valid_o` is high and all outputs below are combinational functions
   of T.

`done_o` therefore comes 3 cycles after the start edge for every N. A start
while busy is ignored. A start in the DONE cycle begins the next operation
at once.

For A = 8, 6, 9, 5, 7 the result is (row i = T[i][0..4]):

    T = 01011    rank(A) = 3 1 4 0 2
        00010    minimum at index 3, maximum at index 2
        11011
        00000
        01010

## From T to answers

Row i of T holds one 1 for every element smaller than A[i]. So T already is
the sorted order, in unary. Everything else is decoding:

* **Rank** (`rank_unit`). For each row, a 1's counter produces a one-hot
  count e_0 … e_{n−1}, and an n-input OR encoder turns it into a binary rank
  (0 = smallest). The counter is built of n circuits Δ(m). Each Δ(m) has two
  threshold gates on the same row, "at least m+1 ones" (inverted) and "at
  least m ones", joined by an AND gate. So Δ(m) fires for exactly m ones. The
  fan-out from the row to all Δ circuits is plain wiring. Threshold gates are
  not standard cells: `threshold_gate` is written as a population count and a
  compare, and so synthesises to an adder tree. The constant-depth argument
  holds only for a technology that has threshold gates.
* **Rank, bounded fan-in** (`rank_adder_tree`, top parameter
  `RANK_TREE = 1`). Each row is summed in a binary tree of lg n-bit
  Brent-Kung adders (`bk_adder`). Depth is O(lg n · lg lg n) with gates of
  constant fan-in. The results are the same; both paths are tested.
* **Minimum / maximum** (`minmax_unit`). The minimum's row is all zeros, so a
  NOR per row marks it. The maximum's row is all ones except its diagonal,
  so an AND per row, with the diagonal input inverted, marks it. An encoder
  gives the index.
* **Element of rank r** (`rank_query`). Every row subtracts r from its rank.
  The row whose difference is zero is flagged, and the flags are encoded into
  `sel_idx_o`; `sel_found_o` is low when r ≥ n.
* **Rank test, exact** (`rank_query`). `ge_o` says whether element
  `q_elem_i` has rank ≥ `q_j_i`, by comparing its binary rank with j.
* **Rank test, grouped** (`rank_ge_est`, output `ge_est_o`). This is a much
  cheaper test that never needs the rank. The row of T is cut into groups
  of `EST_K` bits (default 2), and the answer is "yes" if any one group
  holds j or more ones. A "yes" is always right. A "no" can be wrong when
  the row's ones are spread thinly over the groups. For K = 2 and j = 2 this
  is one two-input AND per pair of bits and one OR. For j ≤ 1 it is exact.
  For random data a wrong "no" becomes exponentially unlikely as n grows,
  but for small n it is common. At n = 5 the row 01010 has rank 2 and is
  still answered "no" for j = 2. Use `ge_o` where the answer must be exact.
* **Search** (`search_unit`). During CMP, replicate 0 of every class also
  compares its element with a key stored beside the elements. The n result
  bits are latched in an n × 1 vector and encoded. `srch_found_o` tells
  whether the key occurs, and `srch_hit_o` gives every match. With
  duplicates, `srch_idx_o` is the OR of the matching indices. Sorting and
  searching happen in the same operation.

## Top-level interface (`xpa_top`)

| Parameter   | Default | Meaning |
|-------------|---------|---------|
| `N`         | 5       | number of elements = classes (odd N is the main configuration) |
| `W`         | 8       | element width in bits |
| `RW`        | ⌈lg N⌉  | width of an index or rank |
| `RANK_TREE` | 0       | 0: threshold-gate rank path, 1: Brent-Kung adder trees |
| `EST_K`     | 2       | group size of the grouped rank test |

| Port | Dir | Meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (clears all state) |
| `a_we_i`, `a_addr_i`, `a_wdata_i` | in | write A[addr]; addresses ≥ N are ignored |
| `key_we_i`, `key_i` | in | write the search key |
| `start_i` | in | start one operation (sampled when idle or done) |
| `busy_o`, `done_o`, `valid_o` | out | in LOAD/CMP; one-cycle end pulse; results valid |
| `t_o` | out | T, `t_o[i][k]` = 1 iff A[k] ranks below A[i] |
| `rank_o[i]` | out | rank of A[i], 0 = smallest |
| `min_idx_o`, `max_idx_o` | out | indices of the minimum and maximum |
| `q_rank_i` → `sel_idx_o`, `sel_found_o` | in/out | index of the element of rank `q_rank_i` |
| `q_elem_i`, `q_j_i` → `ge_o` | in/out | rank(A[q_elem_i]) ≥ q_j_i, exact |
| `q_elem_i`, `q_j_i` → `ge_est_o` | in/out | the same by the grouped test (1 is certain, 0 is probable) |
| `srch_idx_o`, `srch_found_o`, `srch_hit_o` | out | search result |

The query inputs are combinational: change them at any time while `valid_o`
is high and read the answer in the same cycle. Writing the memory during an
operation is allowed; the PEs copy the elements in the LOAD cycle.

## Size and cost

The PE count grows as n²/2: 11 PEs for n = 5, 22 for n = 7, 79 for n = 13.
Each PE holds one W-bit register, a magnitude comparator for each side whose
neighbour has a higher class, and an equality comparator for the search. T adds n² flip-flops.
The threshold rank path has n² threshold gates, each as wide as a row. Coarse
synthesis of the default top (N = 5, W = 8) with yosys gives about 530 cells
and 123 flip-flop bits, with no latches and no memories.

For even N the design still works. The pairs that meet twice produce the same
bit twice, and the write requests are ORed. The source's remedy for even n is
to add one more class. To sort an even number of elements on an odd array,
pad the list with one element at least as large as all others, placed last.

## Where this RTL makes its own choices

* **Clocking and handshake.** The source describes the algorithm as parallel
  loops without a clock. Here it is one cycle per loop, with a start / busy /
  done / valid handshake and an asynchronous reset.
* **Element width** W = 8. The source leaves it open, and only assumes that
  one comparison takes constant time.
* **Loading replicates.** The source's algorithm loads A[i] into C_{i,0},
  yet the compare step uses A[i] in every replicate. Here every replicate
  reads lane i of the load bus directly.
* **Element memory.** The source assumes a bus that lets all PEs read the
  memory at once. Here that is a register file with one write port, one
  read lane per class and a key register.
* **Crosspoints.** Modelled as gated one-way word paths plus a one-bit
  return path. The direction is fixed by which neighbour has the higher
  class.
* **Queries.** "The i-th element" is selected by rank counted from the
  smallest, starting at 0. The source words this as "i-th largest" but
  defines it by a row sum of i, which is what is built. Both rank tests
  use the same run-time j.
* **Search.** It runs in the same operation as the sort. Duplicate keys
  are reported as a hit vector.
* **The n = 5 line** differs from the source's drawing (see above).

## Files

| Module | Role |
|--------|------|
| `xpa_pkg` | phase enum, layout functions |
| `a_memory` | element and key storage, parallel load bus |
| `xpa_pe` | one PE: element register, compare-and-exchange per side, key compare |
| `crosspoint_switch` | switch between two neighbouring PEs |
| `crosspoint_array` | the line of PEs and crosspoints; merges T write requests |
| `t_matrix` | n × n result flip-flops with per-row clear |
| `threshold_gate`, `delta_circuit`, `ones_counter`, `onehot_encoder`, `rank_unit` | threshold rank path |
| `bk_adder`, `rank_adder_tree` | bounded-fan-in rank path |
| `minmax_unit`, `rank_query`, `rank_ge_est`, `search_unit` | read-out logic |
| `xpa_ctrl` | phase sequencer |
| `xpa_top` | everything wired together |

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv` that compares
against a model written independently in the testbench. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Highlights:

* `tb_xpa_pkg`: the n = 7 and n = 12 layouts against the printed ones. For
  n = 3 … 16, the PE count, that every pair of classes meets, and the number
  of repeated pairs.
* `tb_crosspoint_array`: N = 5, 7 and 6 against a software enumeration sort,
  including ties.
* `tb_xpa_top`: the full design at its default parameters. It runs the
  n = 5 example above, checks the 3-cycle latency, then runs 400 random
  operations with random queries. It counts ties, search hits and misses,
  back-to-back starts, ignored starts, clears, held results, and both a
  certain "yes" and a wrong "no" of the grouped rank test. It fails if any
  of them never happens.
* `tb_xpa_top_scaled`: N = 9, W = 4 with the adder-tree rank path.
* `tb_xpa_top_even`: N = 4 on A = 6, 7, 8, 5 (T = 0001 / 1001 / 1101 /
  0000, ranks 1 2 3 0). It checks that the doubly compared pair writes the
  same cell twice without harm.
* `tb_xpa_top_sizes`: the whole design at N = 7 (22 PEs), N = 12 (72 PEs,
  five doubly compared pairs) and N = 13 sorting 12 elements plus one
  padding element. It reads the sorted order back through the
  select-by-rank query. The per-size driver is `tb/xpa_sort_runner.sv`.

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/xpa_pkg.sv tb/tb_xpa_top.sv --top-module tb_xpa_top
    ./obj_dir/Vtb_xpa_top

Assertions in the RTL check the invariants: no two PEs ever target the same
cell of T for odd N, the diagonal of T stays 0, the clear and compare phases
never overlap, and exactly one row is flagged as minimum and as maximum when
done.
