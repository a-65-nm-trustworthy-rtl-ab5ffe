# Hypoglycemia-forecasting PDT engine: a sampling accelerator for probabilistic decision trees

A probabilistic (soft) decision tree does not route an input down one path. Each internal node
sends it to one child with probability `p` and to the other with `1 - p`, and the prediction is
the probability mass that reaches each leaf. Computing that exactly costs work that grows as
`2^depth`. This design estimates it instead. Samples are dropped into the tree, each internal node
flips a biased coin to send a sample left or right, and every leaf counts the samples that reach
it. With `N` samples the cost is `O(N * depth)` and there is no floating-point arithmetic.

The chip is meant for forecasting low blood glucose from a continuous glucose monitor. It
combines two methods:

* **The top of the tree is solved exactly.** This is the root and its two children, three levels
  when the sub-roots are counted. A small *statistical solver* multiplies the branch probabilities
  down to the four nodes at depth 3, the *sub-roots*. It then divides a total sampling budget
  `N` among them in proportion to those probabilities.
* **Each sub-tree below a sub-root is sampled in hardware.** There are four *tiles* of
  24 x 24 *pNodes*. A pNode is a tiny cell with a 4-bit probability, an 8-bit LFSR and an 8-bit
  counter. Each tile holds one sub-tree. The tile's pulse generator injects that sub-tree's
  budget as a train of one-clock pulses. The pulses hop from node to node and are counted at the
  leaves.

An RV32I core supervises the engine: it sequences the configuration, polls for completion and
reads out and normalises the counts. An SPI port lets a host load programs and trees and read
the results.

```
 SPI host ──► spi_slave ─┐                    ┌────────────── pdt_engine ─────────────────┐
                         ├─► shared 32-bit ──►│ engine_regs ─► conf queue (6 words) ─┐     │
 rv32i_core ─────────────┘   data bus         │             ─► prob queue (3 words) ─┼─► pnode_tile x4
   │  (stalls while SPI owns the bus)         │ stat_solver                          │   (24x24 pNodes +
   ├─ instruction sram (4 KiB)                │ output_buffer ◄── counter row ◄──────┘    sub-root sampler)
   └─ data sram (4 KiB)                       └───────────────────────────────────────────┘
```

## The pNode

Every pNode has eight links, one to each neighbour (N, NE, E, … clockwise, numbered 0 to 7). A
sample is a single-clock pulse on one link. A pulse arriving on any input is handled according
to the node's configuration byte:

| bit | 7 | 6:4 | 3:1 | 0 |
|---|---|---|---|---|
| field | `is_bypass` | `child_1` | `child_0` | `is_leaf` |

The node also has a separate 4-bit probability `p`. The byte gives the node one of three roles:

* **Branch** (`is_leaf = 0`, `is_bypass = 0`). The node compares the low nibble `rn` of its LFSR
  with `p`. If `rn < p` the pulse goes out on direction `child_1`, otherwise on `child_0`. The
  LFSR then steps, so `P(child_1) = p/16` over the LFSR's 255-state cycle (to within the one
  missing zero state). A sub-root is simply the branch that the injected pulses reach first.
* **Bypass** (`is_bypass = 1`). The pulse goes out on `child_0` with no random draw. Bypass
  nodes are wires through the array. They let a parent reach a child that is not its neighbour,
  and they carry the injected pulses from the tile edge to the sub-root.
* **Leaf** (`is_leaf = 1`). The node increments its 8-bit counter, which stops at 255, and
  forwards nothing.

The LFSR uses `x^8 + x^6 + x^5 + x^4 + 1`. It moves only when a branch node receives a pulse,
which models the node's clock gate. Each node starts from its own non-zero seed,
`((tile*576 + row*24 + col)*97 + 13) mod 255 + 1`, so neighbouring nodes do not make correlated
choices.

The output is registered, so every hop costs one clock. The paths of different samples can
differ in length, but a given node always sees samples in the order they were injected. The
pulse train is therefore a pipeline: the generator injects one pulse per clock and pulses never
collide in a correctly mapped tree.

## Mapping a sub-tree onto a tile

A tile is written a row at a time. A configuration row is 24 bytes (192 bits, node `c` in bits
`8c+7..8c`). A probability row is 24 nibbles (96 bits, node `c` in bits `4c+3..4c`).

The pulse generator feeds the **west input of column 0 in row `inject_row`**. The node there
must be a bypass or branch node whose `child_0` leads towards the sub-root. Every node that a
path passes through must point, with its child field, at the next node on the path. Nodes that
are not used can be left in their reset state: they are never reached, so their contents do not
matter.

Example: a sub-root at row 10, column 1, entered from a bypass at (10, 0). The bypass at (10, 0)
has `child_0 = E(2)`, giving the byte `8'h84`. The sub-root has `child_0 = NE(1)`, `child_1 = SE(3)`
and `p = 6`, giving the byte `8'h32`. The two children of the sub-root are then at (9, 2) and
(11, 2), and so on down to leaves, whose byte is `8'h01`.

The tree must not make two paths meet at one node in the same clock. Pulses that arrive together
are merged into one, and such a collision means the tree is wrongly mapped.

A tile finishes when its down-counter reaches zero and no pulse is left in the array. `done`
then rises `N + H + 2` clocks after `start`, where `H` is the number of forwarding nodes (bypass
and branch) on the longest path. A start clears all leaf counters.

## Registers and the configuration flow

The engine is a 32-bit register slave at bus address `0x2000`. The core and the SPI host use the
same map. Offsets:

| offset | name | contents |
|---|---|---|
| 0x00 | CTRL | `[3:0]` tile_en, `[12:8]` row_sel, `[16]` load_conf, `[17]` load_prob, `[18]` load_sample |
| 0x04 | COMPUTE | write `[3:0]`: start tiles; read `[3:0]`: busy |
| 0x08 | DONE | read `[3:0]` done_flag; writing a 1 clears that flag |
| 0x0C | DATA | data word, steered by the load_* mode |
| 0x10 | IRQ_EN | `[3:0]` interrupt enable per tile (`irq` = any enabled done flag) |
| 0x14 | OUT_SEL | write `[1:0]` = tile: copies row row_sel of that tile's counters into the output buffer |
| 0x20–0x34 | OUTBUF | six words of the output buffer; word `k` holds counters `4k..4k+3`, node `4k` in the low byte |
| 0x40 | SOLVER_P | `[3:0]` p_root, `[7:4]` p_a (root's child_0), `[11:8]` p_b (root's child_1) |
| 0x44 | SOLVER_N | `[15:0]` N, `[31:16]` N_min |
| 0x48–0x54 | SOLVER_R | per sub-root k: `[15:0]` N_k, `[24:16]` P_k (in 1/256) |
| 0x58 | SOLVER_S | sum of the N_k |

What a word written to DATA does depends on the mode set in CTRL:

* **load_conf**: the word goes into the configuration queue. After six words, the 192-bit row is
  written into row `row_sel` of **every tile whose tile_en bit is set**.
* **load_prob**: the same, through the probability queue, three words per row.
* **load_sample**: the word sets the budget (`[15:0]`) and the injection row (`[20:16]`) of every
  enabled tile.

Any write to CTRL empties both queues, so a half-written row is never committed. The first word
of a row is its least significant word.

Writing one row to several tiles at once is how parallel sampling works. A sub-tree whose budget
is large is loaded into two or more tiles, each with part of the budget, and the host adds up
their counts. The done flags are set on the rising edge of a tile's `done`. A flag is cleared by
writing 1 to it, or when the tile is started again.

A typical inference goes like this:

1. Write `SOLVER_P` and `SOLVER_N` and read the four `N_k`.
2. For each tile, set CTRL to that tile with `load_conf` and a row, write six words, and repeat
   per row. Do the same with `load_prob` and three words.
3. With `load_sample`, write the budget and injection row.
4. Write COMPUTE.
5. Poll DONE, or wait for `irq`.
6. For each row with leaves, write OUT_SEL and read OUTBUF.
7. Divide each leaf count by the total to get the leaf probability.

## Statistical solver

The solver uses the pNode convention, in which `p/16` is the probability of `child_1`. With
`pr`, `pa` and `pb` the probabilities of the root and its two children, the sub-roots are reached
with these probabilities:

```
P0 = (1-pr)(1-pa)   P1 = (1-pr) pa   P2 = pr (1-pb)   P3 = pr pb
```

They are exact with 8 fractional bits. The budgets are `N_k = max(N_min, floor(N * P_k))`. The
clamp to `N_min` keeps an unlikely branch from getting almost no samples. Because of the clamp
and the rounding down, the number of samples actually taken, `SOLVER_S`, can differ from `N`.
Results are ready one clock after the inputs are written. Computing the node probabilities from
the glucose features (`sigma(w·x - b)` per node) is left to software.

## SoC, bus and SPI

The core and the SPI slave share one single-cycle 32-bit data bus, and SPI has priority. A core
load or store that meets an SPI access waits, holding its PC, until it is granted.

| address | target |
|---|---|
| `0x0000–0x0FFF` | instruction memory (also writable from the bus, to load code) |
| `0x1000–0x1FFF` | data memory |
| `0x2000–0x20FF` | engine |
| `0x3000` | system register; bit 0 = run. The core is held at PC 0 while it is 0 |

The core is a single-cycle RV32I with combinational-read memories. It has no CSRs, interrupts or
exceptions. FENCE, ECALL and EBREAK do nothing, so it finds out that tiles are done by polling.
The engine's `irq`, `tile_busy` and `tile_done` are also top-level pins.

SPI is mode 0, MSB first, with SS active low. A frame is 72 bits:

* an 8-bit command: `0x02` write, `0x03` read;
* a 32-bit byte address;
* 32 data bits. For a read, these are driven on MISO.

The pins are sampled with the system clock through synchronisers, so SCX must be at most
`clk/16`.

## Parameters

| parameter | default | where |
|---|---|---|
| tiles x rows x columns | 4 x 24 x 24 | `pdt_pkg`, `pdt_engine.DIM/NT`, `hypo_soc.DIM` |
| probability / random number | 4 bits | `pdt_pkg::PROB_W` |
| LFSR | 8 bits | `pdt_pkg::LFSR_W` |
| leaf counter | 8 bits, saturating | `pdt_pkg::CNT_W` |
| configuration per node | 8 bits | `pdt_pkg::CFG_W` |
| sampling budget | 16 bits | `pdt_pkg::BUDGET_W` |
| queue depth | 6 words (conf), 3 words (prob) | `row_queue.WORDS` |
| instruction / data memory | 1024 words each | `hypo_soc.IMEM_WORDS/DMEM_WORDS` |

`DIM` may be reduced to simulate faster; `tb_pnode_tile` uses 12. The address fields and the
count of 4 tiles are fixed by the register map.

## How far it follows the original design

These parts follow the published description:

* the two-part method (top levels solved exactly, deeper sub-trees sampled);
* 4 tiles of 24 x 24 pNodes;
* the pNode register fields (4-bit probability, leaf and bypass flags, two 3-bit child
  indices), the 8-bit LFSR of which 4 bits are used, the rule that `rn < p` selects child 1, the
  3-to-8 output decoder, the 8-bit leaf counter and the gating of the LFSR;
* the 192-bit configuration and 96-bit probability rows, built from 6 and 3 words by separate
  queues;
* the control-register field names and widths: tile_en, compute, row_sel, load_conf, load_prob,
  load_sample and done_flag;
* the 24 x 8-bit output buffer, the RV32I supervisor, the SPI pin names and per-tile done
  flags that are polled or interrupt.

These are this implementation's own choices, because the description does not give them:

* the LFSR polynomial and seeds;
* the bit layout of the configuration byte and the direction numbering;
* where pulses enter a tile;
* one hop per clock and one injected pulse per clock;
* counter saturation and clearing;
* the register addresses and the meaning of the load_* modes;
* broadcasting a committed row to all enabled tiles;
* the solver as a hardware unit, with its fixed-point format;
* the bus, its arbitration and the address map;
* the SPI frame;
* the memory sizes;
* the single-cycle core.

Known departures and gaps:

* **Tiles are independent.** A sub-tree must fit into one 576-node tile. The description does
  not say whether pulses can cross tile borders.
* **The solver covers exactly one fixed shape**: the root, two children and four sub-roots, one
  per tile. Trees whose top levels are shaped differently need the host to compute the budgets.
* **The sub-roots are not separately flagged in the configuration.** They are ordinary branch
  nodes fed by the pulse generator. The node's register file has only leaf and bypass flags.
* **No clock gating cells.** The gated LFSR clock is an enable, and there are no
  power-management, voltage or clock-generation parts.
* **The core has no interrupt input.** The engine interrupt goes to a pin.
* **A collision is not detected.** Two pulses reaching one node in the same clock are merged
  into one sample.

## Files

* `rtl/pdt_pkg.sv`: sizes, register map, configuration-byte struct, direction helpers and seeds.
* `rtl/pnode_lfsr.sv`, `rtl/pnode.sv`: the cell.
* `rtl/subroot_sampler.sv`: the down-counter and pulse generator.
* `rtl/pnode_tile.sv`: the array with its row selector.
* `rtl/row_queue.sv`, `rtl/output_buffer.sv`, `rtl/stat_solver.sv`, `rtl/engine_regs.sv`,
  `rtl/pdt_engine.sv`: the engine.
* `rtl/rv32i_core.sv`, `rtl/sram.sv`, `rtl/spi_slave.sv`, `rtl/hypo_soc.sv`: the chip top.

Every block has a self-checking testbench `tb/tb_<module>.sv` that ends by printing
`TB_RESULT checks=<n> failures=<m>`. They are supported by `tb/pdt_ref_pkg.sv` and
`tb/rv_asm_pkg.sv`:

* `pdt_ref_pkg` is a reference model of the tiles. It replays every sample node by node with
  each node's own LFSR, so the leaf counts must match the hardware exactly, not just
  statistically.
* `rv_asm_pkg` has RV32I instruction encoders for building test programs.

`tb_pdt_engine` and `tb_hypo_soc` run at the full 4 x 24 x 24 size. `tb_hypo_soc` is the
end-to-end test:

1. An SPI host loads a polling and read-out program.
2. It writes four sub-trees, one of them broadcast into two tiles.
3. It takes the budgets from the solver and starts all tiles.
4. It checks every leaf count the program copied into data memory against the model.

It also checks that each mechanism (bypass, both branch directions, leaf counting, counter
saturation, queue commits, broadcast, parallel sampling, the `N_min` clamp, interrupt, core
stall, SPI reads and writes) happened at least once.

`tb_tree_depth12` maps the deepest kind of sub-tree the engine targets onto a full-size tile.
A tree of depth 12 leaves nine branch levels below a sub-root. The test builds a spine of nine
branch nodes, each with its own leaf, and checks the counts against the model, including a
saturated counter.

To simulate a testbench with Verilator 5, run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/pdt_pkg.sv tb/pdt_ref_pkg.sv tb/rv_asm_pkg.sv tb/tb_hypo_soc.sv \
    --top-module tb_hypo_soc -o sim
obj_dir/sim
```

Replace `tb_hypo_soc` with any other testbench name. The full-size builds take a few minutes
because the four tiles hold 2304 pNodes.
