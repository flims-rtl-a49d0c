# FLiMS: a w-wide merger of two sorted streams

FLiMS merges two sorted lists and emits **w elements per clock cycle**. Each list
comes in through w memory banks. A single *w*-input half of a bitonic merger
does the merging. Earlier streaming mergers need a barrel shifter in the feedback
loop, or a second merger, to line their inputs up. FLiMS needs neither, for two
reasons:

* the w selector cells each compare one fixed pair of banks, and each cell
  dequeues only the element it forwards, so the feedback loop is a single
  comparator deep;
* whatever rotation the banks drift into, the w elements selected in a cycle
  are always the top w of the 2w candidates, and they always form a bitonic
  sequence. A butterfly of CAS (compare-and-swap) units can therefore sort them
  without first rotating them back.

This RTL implements the basic merger and the three variations: skew-balanced
tie breaking, stable merging, and FLiMSj, which dequeues whole rows. It also
includes the banked queues around the merger, and an option to merge
ascending lists. Everything is parameterised by
the lane count `W`, a power of two, and the element width `DATA_W`. Lists are
in **descending** order, except where `ASCENDING=1` is set on the top level
(section 7).

## 1. Data layout and the fixed pairing

A list is stored round-robin over w banks: element k goes to bank `k mod w`.
A row write of w elements puts element j into bank j. Call the banks of list A
`A_0 … A_{w-1}` and those of list B `B_0 … B_{w-1}`.

Selector cell `MAX_i` always compares the head of `A_i` with the head of
`B_{w-1-i}`. Both lists are consumed in order, so one cycle removes k elements
from A and w−k from B. A's bank offset then moves forward by k and B's by w−k.
The two offsets start at 0, so their sum stays 0 mod w for ever. With the
offsets tied together this way, the fixed pairs are exactly the pairs a
half-cleaner compares on the *rotated* top-w of each list:
`(Ta_j, Tb_{w-1-j})`. The greater element of each pair belongs to the top w of
all 2w candidates, and those w winners form a rotated bitonic sequence.

Worked example for w=4. The heads are shown in dequeue order.

```
A = 29 26 26 17 16 11 5 4 3 3      B = 22 21 19 18 15 12 9 8 7 0
out rows (one per cycle, out[0] first):
  29 26 26 22 | 21 19 18 17 | 16 15 12 11 | 9 8 7 5 | 4 3 3 0
```

`tb_flims_top_full` and `tb_flims_merger` check this example.

## 2. Selector stage: `max_unit`

Each cell holds two registers with valid bits:

* `cA` holds the last head taken from bank `A_i`;
* `cB` holds the last head taken from bank `B_{w-1-i}`.

When the merger fires, the cell copies the greater into its output register
`in_i` and reloads only that register from its bank. The other register keeps
its element for the next comparison. An empty `cA` or `cB` is refilled as soon
as its bank has data. All cells fire together. The merger fires when every cell
holds two valid heads and the output side is ready: one w-input AND gate, so
the w outputs of a cycle always form one chunk.

`VARIANT` (type `flims_pkg::variant_e`) sets the tie rule:

| VARIANT | A wins when | purpose |
|---|---|---|
| `FLIMS_BASIC` | `key(cA) > key(cB)` | plain merge |
| `FLIMS_SKEW` | `{key(cA),dir} > {key(cB),!dir}` | `dir` records which side won last. On runs of equal keys the winner alternates, so both lists drain at a similar rate. This helps a merge tree on skewed data. `dir` resets to 0. |
| `FLIMS_STABLE` | `key(cA) >= key(cB)` | stable merge: A's duplicates come before B's, each in its original order |

**Stable tags.** A bitonic network is not stable, so in the stable variant each
element carries a tag through the network:

* A elements get `{src=1, orderA, port=w-1-i}`;
* B elements get `{src=0, orderB, port=i}`.

`orderA` and `orderB` are per-cell 2-bit counters. They start at 0 and count
**down** on each dequeue, so an earlier element has the higher order value,
modulo the wrap. Two elements of one list that are in flight together are at
most one batch apart. That is why two bits are enough, and why the CAS unit
needs a single special case: `00` beats `11`. The tag is laid out as
`{data, src, order[1:0], port[log2 w-1:0]}` and is used only to break ties
between **equal keys**. In the other variants the tag is zero and costs nothing
after synthesis.

**Keys and payloads.** Only the upper `KEY_W` bits of an element are compared.
The bits below them are payload that travels with its key, as in key-value
records. The default is `KEY_W = DATA_W`. The merger never drops or duplicates
a payload on equal keys. The testbenches check this for every variant.

## 3. CAS network: `butterfly_net`, `cas_unit`

This is a bitonic partial merger without its first column. It has log2(w)
columns. Column s compares wires j and j+d, with d = w/2^(s+1), and the greater
goes to the lower index. For w=4 the pairs are (0,2),(1,3), then (0,1),(2,3).
Each column ends in a register. The network sorts only bitonic input, and that
is all it ever receives. `out[0]` is the largest element.

## 4. FLiMSj: one dequeue signal per list (`flimsj_merger`, `maxj_unit`)

In basic FLiMS every bank has its own dequeue signal. FLiMSj reads whole rows
instead, which suits a wide memory with one read port per list. For that, each
cell gets two more pieces of state:

* `cR_i`, a buffer register;
* `src_i`, one bit that says which list `cR_i` holds (1 = B, 0 = A).

The cell's candidates are:

```
A side = src_i ? cA_i : cR_i          B side = src_i ? cR_i : cB_i
```

Each cycle:

1. Every cell forwards the greater of its two candidates. `dir_i` = 1 when the B
   side won.
2. A cell whose winner came from `cR_i` (`src_i == dir_i`) refills `cR_i` from
   the row register that cell 0's decision names: `cB_i` if `dir0` is 1,
   otherwise `cA_i`. It also sets `src_i = dir0`.
3. Exactly one row is fetched: from B into `cB` if `dir0` is 1, otherwise from
   A into `cA`.

So `cR` keeps the unconsumed part of a partly used row, still in its natural
rotation. Together with `cA` and `cB`, each list always has its next w elements
present. A cell takes an element straight from `cA` or `cB` only on the side
that `dir0` names, so that side is always the one being refilled.

**Start-up** is this design's choice. `cR` takes the first B row (src = B),
`cA` the first A row, and `cB` the second B row. From this state the rule
above holds from the first cycle. If MAX_0 picks B, B's smallest top element
beat A's largest, so every cell picks B, from `cR`.

**Latency.** FLiMSj has one cycle more latency than FLiMS. Here that cycle is a
register between the selector and the butterfly, which separates the `dir0`
fan-out from the CAS columns. Where the extra cycle sits is this design's
choice.

`tb_maxj_unit` replays a w=4 state, cA = 9 11 13 14, cR = 16 17 16 13 (src
A B B B), cB = 12 12 10 8. It expects:

* selection 16 17 16 14;
* cR afterwards = 9 11 13 13;
* after the next A row (1 3 5 7), selection 12 12 13 13.

## 5. Queues, flow control and list ends

`banked_fifo` models the banked input queues A and B and the output queue O.
It takes one row write per cycle over a valid/ready handshake and has one head,
`avail` flag and `deq` per bank. Each bank is a `DEPTH`-entry circular buffer,
and the default depth of 2 matches the FPGA evaluation this design follows.

A full bank that is being dequeued in the same cycle still accepts the row.
Without this pass-through, 2-deep queues lose about one cycle in twelve: the
banks of a list are consumed round-robin and drift one element apart. With it,
the merger sustains one row per cycle. `tb_flims_top_full` measures 875 rows in
875 cycles. The cost is a combinational path from the merger's dequeue decision
to `wr_ready`.

Flow control is this design's choice:

* the selector fires only when every cell has both heads valid;
* the whole pipeline holds while the output queue is full.

**End of list.** The merger does not detect the end of a list. After its data,
each list must be followed by sentinel elements that sort below every real
element, for example zeros when the keys are positive. At least two rows of
sentinels are needed, and the testbenches use three. Sentinels push the last
real elements out. The reader discards whatever follows the expected element
count, and the last real row is padded with sentinels.

## 6. Timing

| | latency (fire → merger output) | throughput | dequeue signals |
|---|---|---|---|
| FLiMS (`ROW_DEQ=0`) | log2(w)+1 cycles | w elements / cycle | 2w (one per bank) |
| FLiMSj (`ROW_DEQ=1`) | log2(w)+2 cycles | w elements / cycle | 2 (one per list) |

The feedback loop is one cycle: compare the registers, choose, reload. Through
`flims_top`, the queues add one cycle in and one cycle out. At the defaults the
first merged row appears 7 cycles after the first row writes are accepted.

## 7. Top level: `flims_top`

| parameter | default | meaning |
|---|---|---|
| `W` | 4 | lanes, power of two ≥ 2 (4 … 512 in the FPGA evaluation) |
| `DATA_W` | 64 | element width |
| `KEY_W` | `DATA_W` | compared upper bits |
| `VARIANT` | `FLIMS_BASIC` | `FLIMS_SKEW`, `FLIMS_STABLE` |
| `ROW_DEQ` | 0 | 1 selects FLiMSj (only the basic tie rule) |
| `ASCENDING` | 0 | 1 merges ascending lists |
| `IN_DEPTH`, `OUT_DEPTH` | 2 | queue depth per bank |

Ports: `a_wr_valid/a_wr_ready/a_wr_data[W]` and the same for B write rows of
each list. `o_rd_valid/o_rd_ready/o_rd_data[W]` reads merged rows, with
`o_rd_data[0]` the largest. Reset is active-low and synchronous (`rst_n`). It
clears valid bits, queue pointers and the `dir`/`order`/`src` state. Data
registers are not reset.

`ASCENDING=1` makes all three ports carry ascending lists. Inside, the queues
and the merger still see descending keys, because the key field is
complemented at the ports. The sentinels then must carry the largest key
rather than zero.

## 8. Departures and open points

* **Tag position in the stable variant.** One description puts the source and
  port bits above the data ("appended to the MSB"). Read that way, the network
  would sort all of A ahead of all of B. Here the tags sit below the key and
  act only as tie-breakers, which is what they exist for.
* **Ascending order.** The design description gets it by turning every
  comparator around, and the stable order rule with them. Here the merger is
  left as it is. `flims_top` complements the key bits of each element on the
  way into the queues and again on the way out. This is the same ordering and
  costs one XOR layer per side. Ties still go to A, so the stable variant
  stays stable. For ascending lists the end sentinels need the all-ones key.
* **End-of-list logic, stall handling, start-up of FLiMSj, queue handshakes and
  reset** are left open by the design description. The choices above are this
  implementation's own.
* **Evaluation harness not built.** It was an AXI peripheral with on-chip
  memories and a host that loads the lists. Its interface is not specified, so
  the queue ports are the top-level interface instead.
* **Skew and stable cannot be combined**, since they break ties differently.
  FLiMSj is built with the basic tie rule only.

## 9. Verification

Each testbench prints `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_cas_unit` | plain and stable CAS against an explicit ordering, incl. the 00/11 rule |
| `tb_butterfly_net` | w=8 rotated bitonic chunks sorted, latency 3, hold on `en` low |
| `tb_max_unit` | all three variants on tie-heavy streams, stable tags, random gaps |
| `tb_banked_fifo` | per-bank queue model, full/pass-through, depth 3 wrap and depth 2 |
| `tb_maxj_unit` | the w=4 FLiMSj state of section 4 |
| `tb_flims_merger` | worked example; w=8/16 random; skew and stable with duplicates; stalls; latency and rate |
| `tb_flimsj_merger` | the same for FLiMSj at w=4/8/16 |
| `tb_flims_top` | end to end, five configurations (the fifth: stable, ascending) with stalls, and it counts each mechanism (mixed firings, input stalls, backpressure, full queues, ties, A/B row fetches); a mechanism that never happens counts as a failure |
| `tb_flims_top_full` | defaults only: worked example plus 2000+1500 random 64-bit elements at one row per cycle |
| `tb_flims_widths` | FLiMS and FLiMSj at w=32 and w=64, 64-bit |

Widths up to 512 elaborate and lint cleanly in Verilator and in slang. Beyond
w=64 nothing was simulated, because the C++ build of the simulation model
becomes slow.

Run a testbench with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/flims_pkg.sv tb/tb_flims_top_full.sv --top-module tb_flims_top_full
./obj_dir/Vtb_flims_top_full
```

## 10. Files

`rtl/`: `flims_pkg` (variant enum), `cas_unit`, `butterfly_net`, `max_unit`,
`flims_merger`, `maxj_unit`, `flimsj_merger`, `banked_fifo`, `flims_top`.

`tb/`: the testbenches above, plus three reusable harnesses: `merger_check`,
`max_unit_check` and `top_check`.
