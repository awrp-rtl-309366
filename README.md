# AWRP: a cache buffer replaced by weight ranking

When a cache is full and a reference misses, some block must go. LRU throws out
the block unused for longest and ignores how often blocks are used; LFU throws
out the least used block and ignores how long ago that use was. The adaptive
weight ranking policy (AWRP) combines both in one number per block:

    W_i = F_i / (N - R_i)

- `F_i` is the frequency index: how many times block *i* has been referenced
  since it was loaded.
- `R_i` is the recency index: the value of the access clock at the last
  reference to block *i*.
- `N` is the access clock: the number of references made so far.

`N - R_i` is the age of the block in references. Blocks used often and lately
weigh most. On a miss the block with the smallest weight is replaced. A block
used once, long ago, is the first to go. A block used many times survives a
while without use, though less and less as it ages. The policy needs two
counters and one weight per block. It recomputes the weights only on a miss,
which keeps the work on hits small.

This RTL builds a buffer managed by AWRP. It holds block addresses only. It
decides hit or miss and which block to displace. Moving the data is left to
the memory system around it.

## The rules, as built

After reset every `F`, `R` and `W` is 0 and every block is empty.

**Hit.** The referenced block's `F` goes up by one and its `R` takes the
current `N`. No weight changes.

**Miss.** Every block of the set is weighed with the formula, and each weight
is stored. The lightest block is replaced by the referenced one. The new
block gets `R = N`, `F = 1` and `W = 0`.

Four details are this design's own choices. The policy description does not
settle them:

- **Empty blocks weigh 0.** An empty block has `F = 0`, so it is always
  lightest. A cold buffer therefore fills its empty blocks in order, lowest
  way first, and evicts nothing until it is full.
- **Ties go to the lowest way.** The search keeps the first block of smallest
  weight.
- **Age 0 is skipped.** The policy weighs only blocks with `N != R_i`. Here the
  clock wraps modulo 2^NW, so a block can show age 0 only after exactly 2^NW
  references without a hit (65536 at the default width). Such a block is not
  a candidate on that miss.
- **F saturates** at 2^FW − 1 instead of wrapping.

## Weight arithmetic

The policy treats weights as real numbers. The hardware uses unsigned fixed
point with `FRAC` fraction bits:

    W = floor(F * 2^FRAC / ((N - R) mod 2^NW))

One divider (`awrp_weight_unit`) computes this for one block per cycle.
Because `FRAC >= NW` by default (16 and 16), a loaded block (`F >= 1`) always
weighs at least 1. Only an empty block weighs 0. The ordering of weights is the
real quotient's ordering, except that truncation can make two nearly equal
weights equal; the lowest-way rule then decides.

The age is taken modulo 2^NW, like the clock. It is correct for any block
younger than 2^NW references. An older block that has never been hit
since appears younger than it is. With 16 bits this needs more than 65535
references between two uses of a resident block.

## How a reference moves through the hardware

```
 req (valid/ready) ──> awrp_cache ──> access clock N (awrp_access_clock)
                          │
                          └─ set index = low address bits ──> awrp_set[s]
                                                                │
            IDLE ──req──> LOOKUP ──hit──> update F, R; respond ─┘
                            │
                            miss
                            v
                          SCAN: way 0 .. WAYS-1, one per cycle
                            awrp_weight_unit:   W = F / (N - R)
                            store W; awrp_victim_select keeps the minimum
                            │
                            v
                          FILL: replace the lightest block; respond
```

- `awrp_cache` is the top. It owns the access clock, picks the set and
  returns the answer of the set that served the reference. Only one
  reference is in flight at a time: `req_ready` is low from acceptance until
  the response.
- `awrp_set` holds, per block, the valid bit, the block address, `F`, `R` and
  the stored `W`. Its controller walks through the four states above.
- `awrp_tag_match` compares the address with all blocks of the set at once.
- `awrp_weight_unit` is the divider.
- `awrp_victim_select` keeps the running minimum during the scan.
- `awrp_pkg` holds the default sizes and the controller's state type.

### Timing

Take a reference accepted at clock edge *e* (`req_valid` and `req_ready` both
high). `resp_valid` is high for one cycle:

- after edge *e*+1 on a hit;
- after edge *e*+WAYS+2 on a miss: one lookup cycle, WAYS weighing cycles and
  one fill cycle. WAYS = BLOCKS/SETS.

`req_ready` returns at the edge that ends the response cycle, so the next
reference is accepted one edge later at the earliest. A stream of hits thus
runs at one reference every three cycles. At the default of 210 blocks in one
set, a miss answers 212 cycles after acceptance.
The miss cost is the price of one divider. A design that needs faster misses
could weigh several blocks per cycle. That would change only the scan,
because the policy's result does not depend on the order of weighing, except
for the tie rule.

`access_count` is `N`. It is advanced on the accepting edge, so the first
reference after reset is reference 1.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `BLOCKS` | 210 | blocks (frames) in the buffer; the policy was evaluated at 30, 60, 90, 120, 150, 180 and 210 |
| `SETS` | 1 | sets; a power of two dividing `BLOCKS`; 1 is fully associative |
| `ADDR_W` | 32 | block-address width; the whole address is stored as tag |
| `NW` | 16 | width of `N` and of each `R` |
| `FW` | 16 | width of each `F` |
| `FRAC` | 16 | fraction bits of each `W` (weights are `FW+FRAC` bits wide) |

Only `BLOCKS` comes from the policy's evaluation; it is the largest buffer
evaluated there. The evaluation used a set-associative cache, but the number
of sets is not given, so `SETS` defaults to 1. All widths are this design's
own choice.

At the default size, synthesis gives about 20,500 flip-flops: 210 × (32 + 16
+ 16 + 32 + 1) bits of block state, plus the controller. The logic is small
beside them: one 32-by-16-bit divider, one comparator, 210 address
comparators and the multiplexers that select a block.

## Interface of the top, `awrp_cache`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `req_valid` / `req_ready` | in / out | 1 | valid/ready handshake for one reference |
| `req_addr` | in | `ADDR_W` | block address |
| `resp_valid` | out | 1 | one-cycle pulse with the outcome |
| `resp_hit` | out | 1 | hit |
| `resp_set`, `resp_way` | out | | where the block is now |
| `resp_evict`, `resp_evict_addr` | out | 1, `ADDR_W` | a miss displaced this valid block |
| `access_count` | out | `NW` | the access clock `N` |
| `peek_set`, `peek_way` | in | | selects one block to observe |
| `peek_valid`, `peek_addr`, `peek_f`, `peek_r`, `peek_w` | out | | that block's valid bit, address, `F`, `R` and last computed `W` |

`resp_set` is constant 0 when `SETS = 1`. The `peek_*` port is combinational
and is this design's own addition. The policy itself never reads a stored
weight again, because every miss recomputes all of them. Without a port that
reads them, synthesis would remove the `W` registers. The port keeps the
ranking observable, for debugging and for the testbenches.

## Where the policy description leaves room

The policy was published as an algorithm with a software simulation. The
following points were open or inconsistent there. Each is settled here as
stated:

- **What `N` is.** It is described both as "the total number of accesses to
  be made" and, through `R_i`, as a clock of accesses. Here `N` is the
  running count of references, including the one being served. A fixed trace
  length would rank blocks differently and could not be known in hardware.
- **Which `F` a hit increments.** One rule says the referenced block's `F`
  goes up; another says "`F_i + 1` for every `i`". Only the referenced block
  is incremented here, as the first rule reads.
- **Floating-point weights.** Replaced by fixed point, see above.
- **Set-associative mapping.** The evaluation used it without giving the
  number of sets. `SETS` is a parameter; one access clock serves all sets.
- **Cache sizes.** The text speaks of eight sizes; the results list seven,
  30 to 210 blocks. The default is the largest listed.
- **No timing or structure** is given for weighing or searching; one block per
  cycle is the simplest hardware that follows the rules.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_awrp_access_clock` | counting, holding, wrap-around, reset |
| `tb_awrp_tag_match` | random contents, matches on invalid ways, lowest-way choice |
| `tb_awrp_weight_unit` | corner cases (empty block, age 1, age 0, wrap) and 5000 random operands |
| `tb_awrp_victim_select` | random weight streams with ties and gaps |
| `tb_awrp_set` | 1200 references; every response, its latency, and every block's `F`, `R`, `W` after each one; clock wrap and `F` saturation |
| `tb_awrp_cache` | end to end at 16 blocks in 2 sets, 3000 references: every response and its latency, one random block's state per response; back-pressure, clock wrap, saturation and both sets must occur |
| `tb_awrp_cache_full` | the default 210-block buffer on a 1000-reference trace; every response and latency, and all 210 blocks' state every 10th reference |
| `tb_awrp_workloads` | one 1000-reference trace through buffers of 30 to 210 blocks |

The expected values come from `tb/awrp_ref_pkg.sv`. It holds a behavioural
model of one set, written from the rules above with 64-bit integers. The same
package generates the traces. The published evaluation used a
1000-address data trace of a real program, which is not available. The traces
here are synthetic instead: 45 % of references go to 8 hot blocks, 35 % to a
working set of 180 blocks, and 20 % to blocks seen only once (a scan).

The hit ratios printed by `tb_awrp_workloads` belong to that synthetic trace.
They range from 47 % at 30 blocks to 62 % at 210 blocks. They cannot be
compared with the published ratios (about 42 % to 75 %), which belong to a
different trace. They show only that the hardware follows the policy and
behaves sensibly as the buffer grows. The baseline policies (LRU, FIFO, CAR)
the policy was compared against are not built.

## Simulating

All files are plain SystemVerilog 2017. The package must come first. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/awrp_pkg.sv tb/awrp_ref_pkg.sv tb/tb_awrp_cache.sv \
    --top-module tb_awrp_cache -Mdir obj -o sim
./obj/sim
```

Any other testbench runs the same way with its name in place of
`tb_awrp_cache`. Every run ends within a few seconds.

To try another size, override `BLOCKS`, `SETS` or the widths on
`awrp_cache`. To try another trace, change `awrp_trace_addr` in
`tb/awrp_ref_pkg.sv` or feed addresses from a file.
