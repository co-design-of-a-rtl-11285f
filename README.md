# NV-1 node array: SystemVerilog model

The NV-1 is a low-power neural-network accelerator built from thousands of identical, very
small processor-memory nodes: 3200 on one die, and up to 64k when dies are chained. A node does
not fetch instructions at run time. At boot it gets one instruction and a table of the nodes
whose outputs it listens to. After that, the array runs in **epochs**. In each epoch every node
takes the previous results of the nodes in its table, applies its instruction, and offers the
new result to the next epoch. At run time no address travels between nodes, only data. Each
node decides locally which words are meant for it.

This repository gives synthesizable RTL for that organisation: node, chip and chip-to-chip
chaining. It also gives self-checking testbenches, including one that runs the full 3200-node
chip. The published description of the NV-1 is at block-diagram level. It names the four parts
of a node and says what each does. It gives the table size (256 entries of 16 bits), the node
count, and the fact that there is no address bus. It does not give the bus protocol, the
instruction set, the word width or the programming format. Those parts of the RTL are this
design's own choices. Each is listed in [Departures and choices](#departures-and-choices) and in
the header comment of the file where it is made.

## How a node knows what is meant for it

This mechanism is the heart of the design and the least obvious part.

During an epoch, one stream of words passes every node. A word is a node's 8-bit result from the
previous epoch. The words come in order of the sender's node ID: word 0 is node 0's result,
word 1 is node 1's, and so on. After the last node come any words the host appends, such as
sensor inputs. The word carries no address. Its position in the stream, its *slot*, is the
sender's ID.

Each node counts the valid words it sees since the start of the epoch. It keeps its table of
sender IDs in its SRAM, **sorted in ascending order**. The Memory Handler holds a pointer to the
next table entry it expects, and the SRAM always has that entry read out:

```
slot of the word on the bus:   0   1   2   3   4   5   6   7 ...
table (sorted):               [1,  4,  5,  9, ...]
pointer -> entry:              1   1   4   4   4   5   9   9
match:                         .   X   .   .   X   X   .   .
```

When the slot number equals the pre-read entry, the word is accepted and the pointer moves on.
The SRAM address for the next clock is the pointer's *next* value, so the following entry is
ready one clock later. This holds even when two listed senders are adjacent, as slots 4 and 5
are above. Each node therefore does exactly one 16-bit table read per clock, whatever its
fan-in. That matches the NV-1's quoted memory-bandwidth arithmetic: one 16-bit read plus one
8-bit word per node per clock.

Consequences to keep in mind:

- A table must be sorted and free of duplicates. An assertion in `nv1_mem_handler` flags an
  entry that is skipped because the table was out of order.
- A node can listen to any 256 of the up to 65,536 IDs (16-bit slot counter).
- Entries at or above `count`, and IDs that the stream never reaches, are ignored.

## Inside a node

`nv1_node` is made of four blocks, as in the NV-1 node diagram:

| Block | File | Role here |
|---|---|---|
| Message Handler | `nv1_msg_handler.sv` | Decodes configuration writes for this node. Holds the entry count, opcode and immediate. Numbers the broadcast words (slot counter). Holds the node's stage of the output shift chain. (Clock and control reach all blocks directly.) |
| Memory Handler | `nv1_mem_handler.sv` | Pointer matching against the table (above). Owns the SRAM port for table writes. |
| SRAM | `nv1_sram.sv` | 256 x 16-bit single-port memory with registered read. |
| IPU | `nv1_ipu.sv` | Adds up the accepted words in a 16-bit signed accumulator. Applies the instruction at epoch end and keeps the result. |

### Instructions

The IPU applies one instruction to the **sum** of the node's accepted inputs. The result is
saturated to a signed 8-bit word:

| opcode | name | result |
|---|---|---|
| 0 | `OP_SUM` | sum |
| 1 | `OP_MUL` | sum x imm (imm signed, -128..127) |
| 2 | `OP_SHIFT` | imm[7] = 0: sum << imm[3:0]; imm[7] = 1: sum >>> imm[3:0] (arithmetic) |
| 3 | reserved | behaves as `OP_SUM` |

Take a node with a single input. Then `OP_MUL` with imm = 2 is the published example's
`MUL(input, 2)`, and a node with opcode `OP_SUM` is its `SUM(inputs)`. The NV-1 has further
instructions that the description names only as "other". They are not modelled.

## The chip and chains of chips

`nv1_chip` holds `N_NODES` nodes (default 3200). Their output registers form one shift chain:

```
 chain_in --> node N-1 --> ... --> node 1 --> node 0 --> data_out, data_out_valid
 (next chip                                                   |
  or host)                                                    |
 bcast_in, bcast_valid  <-------- first chip's data_out ------+  (to every chip)
```

- **epoch_start** loads each node's last result into its chain stage. It also clears the
  accumulators, slot counters and table pointers.
- Each **shift** moves the chain one place. So `data_out` produces node 0's result, then node
  1's, and so on. After the last node come the words that entered at `chain_in`.
- The stream that leaves the first chip is fed back, outside the chip, to the `bcast_in` of
  every chip. The nodes listen there.
- **Several chips**: chip *k* gets `chip_base = k * N_NODES`. Its `chain_in` takes the
  `data_out` of chip *k+1*. The last chip's `chain_in` is free for host words. The system stream
  is then all nodes of all chips in global ID order, then the host words.
- **One chip**: tie `chain_in` to the host and loop `data_out`/`data_out_valid` back to
  `bcast_in`/`bcast_valid`.

The results of an epoch are read by the host from the same stream during the next epoch.

### Programming

Configuration writes use the `cfg` port (`nv1_pkg::cfg_t`). A write carries:

- `node`: the global node ID;
- `sel`: `CFG_TABLE`, `CFG_COUNT` or `CFG_OP`;
- `addr`: the table entry;
- `data`: 16 bits.

`CFG_TABLE` writes table entry `addr`. `CFG_COUNT` sets the number of valid entries (0..256).
`CFG_OP` sets the opcode from `data[1:0]` and the immediate from `data[15:8]`. Each chip
subtracts its `chip_base` from the ID, so only the node that owns the ID responds. Program
between epochs only: an assertion flags a table write while words are arriving.

### Control and timing

`ctrl` (`nv1_pkg::ctrl_t`) has three bits: `epoch_start`, `shift` and `epoch_end`. At most one
may be set in any clock (asserted). The chip registers `ctrl`, `cfg` and `bcast_*` once at its
pins. One epoch over a stream of *T* words is driven like this:

1. Pulse `epoch_start` for one clock.
2. Set `shift` for *T* clocks. Gaps are allowed.
3. Wait `END_GAP` = 4 clocks after the last shift. This is asserted.
4. Pulse `epoch_end` for one clock.

Latencies, with the loop-back wired straight through:

| Event (clock *t* = the clock `shift` is set at the pins) | clock |
|---|---|
| word on `data_out` with `data_out_valid` | *t*+1 |
| word registered into the chip from `bcast_in` | *t*+2 |
| word numbered by the Message Handler, matched, added at the clock edge that ends the clock | *t*+3 |
| earliest `epoch_end` at the pins | *t*+5 |

A full epoch therefore takes *T* + 6 clocks. On one full chip with two host words that is
3208 clocks, which the full-size testbench checks.

## Departures and choices

These are taken from the NV-1 description:

- Four-block node.
- 256-entry, 16-bit address table per node.
- 16-bit node IDs (64k nodes).
- 3200 nodes per chip.
- One instruction per node set at boot.
- Epoch semantics.
- No run-time address bus.
- Results shifted out through the chip output.
- Chips that chain into a larger array.

These are this design's own choices:

- **Sender identification by slot** and the **sorted table with one read per clock**. The
  description says only that matching is local and that only data moves.
- **8-bit signed data words.** This is inferred from the NV-1 bandwidth arithmetic, which counts
  16 + 8 bits per node read. The description's cross-device comparison metric assumes 16-bit
  operands instead. That metric is a comparison assumption, not an NV-1 figure, so it was not
  followed.
- **Instruction set and encoding.** The published example shows MUL and SUM. The current
  measurements name shift, sum and "other". The choice to apply the instruction to the sum of
  the inputs, the 16-bit accumulator and the saturation are all assumptions.
- **Output shift chain, broadcast return path, chip pins, `chip_base` strap.** The published
  chip has a pin named DIN whose width and protocol are not given. Here the data pins are 8-bit
  parallel.
- **Configuration bus format.** The boot-time programming format is not published.
- **Epoch sequencing comes from the `ctrl` pins.** There is no on-chip sequencer.
- **Asynchronous active-low reset.** It clears every register but not the SRAM contents.
- **The SRAM is written as an array.** The silicon uses an SRAM macro.

Not modelled:

- the "other" instructions;
- the host, FPGA or SoC interface and the hub the description mentions;
- the pads and package;
- anything about power. The NV-1's low power is a property of its circuits and process, which
  RTL does not capture.

## Files

| File | Contents |
|---|---|
| `rtl/nv1_pkg.sv` | widths, opcode and cfg enums, `ctrl_t`, `cfg_t`, `END_GAP` |
| `rtl/nv1_sram.sv` | address-table memory |
| `rtl/nv1_mem_handler.sv` | table matching |
| `rtl/nv1_ipu.sv` | accumulator and instruction |
| `rtl/nv1_msg_handler.sv` | node interface, config registers, slot counter, chain stage |
| `rtl/nv1_node.sv` | one node |
| `rtl/nv1_chip.sv` | the chip (top) |
| `tb/nv1_ref_pkg.sv` | reference arithmetic used by the testbenches |
| `tb/tb_nv1_*.sv` | one self-checking testbench per block; `tb_nv1_chip_full` runs the default 3200-node chip |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A watchdog ends it with
a failure if it hangs. For example, the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/nv1_pkg.sv tb/nv1_ref_pkg.sv rtl/nv1_sram.sv rtl/nv1_ipu.sv \
  rtl/nv1_mem_handler.sv rtl/nv1_msg_handler.sv rtl/nv1_node.sv rtl/nv1_chip.sv \
  tb/tb_nv1_chip.sv --top-module tb_nv1_chip -Mdir obj -o sim
./obj/sim
```

Swap in another `tb/tb_nv1_*.sv` and its top module to run other tests. The block tests need
only the files below their block.

What the tests cover:

- **`tb_nv1_chip`** uses two 12-node chips.
  - It runs the published two-layer example, c = 2x + 3y: two multiply nodes feeding a sum node,
    with x and y supplied by the host. It then runs random networks for several epochs, on one
    chip and on two chained chips.
  - It compares every word of every stream with a reference model.
  - It requires each of the following to happen at least once: accepted words, every
    instruction, saturation, host words, second-chip words, a full 256-entry table, gaps in the
    shift stream, and writes meant for the other chip.
- **`tb_nv1_chip_full`** uses the 3200-node default. It programs the example, gives 16 nodes a
  full 256-entry table and every other node a random table of up to 8 entries. It then runs three
  epochs and checks the 3208-clock epoch length. It takes about 5 minutes to build and run,
  mostly in the build.

## Changing it

- **Node count:** `nv1_chip #(.N_NODES(n))`.
- **Table depth, ID width, data width, accumulator width:** the package constants.
  `COUNT_W`/`TABLE_AW` follow from the depth. If you change `DATA_W`, the saturation limits in
  `nv1_ipu` follow from it.
- **New instruction:** add a value to `opcode_e` (widen it if needed) and a case to
  `nv1_ipu`, then add the same arithmetic to `tb/nv1_ref_pkg.sv`.
