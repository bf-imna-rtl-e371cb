# BF-IMNA in SystemVerilog: a bit-fluid associative-processor accelerator

A neural-network layer stored in a content-addressable memory (CAM) can be computed where it is
stored. The CAM compares a key against every row at once. It can then write a value into all the
rows that matched. With these two primitives, any arithmetic can be done **bit-serially** (one bit
position per pass) and **word-parallel** (all rows at once), by following a look-up table (LUT).
The LUT lists, for each combination of input bits, what to write back.

Because the precision of an operation is only the number of bit steps it runs, the same hardware
runs 2-, 4- or 8-bit layers. The precision can change from one instruction to the next with no
reconfiguration. This "bit fluidity" is what makes the design suit mixed-precision networks, where
every layer has its own bitwidth.

This repository holds synthesizable RTL for such an accelerator:

- **The chip** is 8 × 8 **clusters** behind an off-chip interconnect.
- **Each cluster** has one **memory AP** (MAP) and 8 × 8 **computation APs** (CAPs), joined by an
  on-chip mesh.
- **Every AP** (associative processor) is a 4800-row × 16-column CAM. Each row holds two 8-bit
  words. Next to the CAM sit key and mask registers, tag registers, a controller, an instruction
  cache and an interconnection interface.

CAPs are *2D* APs: they search and write along rows or along columns. The MAP is a *1D* AP and
works along rows only.

```
 host (im2col, off-chip memory)
        │ host_cmd_t
 ┌──────▼────────────── bf_imna ───────────────────────────────┐
 │ offchip_ic  ── unicast / broadcast commands to clusters     │
 │   ┌──────────── cluster (x64) ───────────────────────────┐  │
 │   │ MAP (ap, TWO_D=0) ◄─ host word port                  │  │
 │   │   │ node 0                                           │  │
 │   │ cluster_mesh (1024-bit transfers) ◄─► xfer_engine    │  │
 │   │   │ nodes 1..64                                      │  │
 │   │ CAP (ap, TWO_D=1) x 64, same program (SIMD)          │  │
 │   └──────────────────────────────────────────────────────┘  │
 └─────────────────────────────────────────────────────────────┘

 ap = ap_icache → ap_ctrl → ap_keymask → ap_cam (tags) ; ap_ifc ↔ mesh
```

## 1. The CAM and its micro-operations (`ap_cam`, `ap_keymask`)

The CAM stores `ROWS` words of `COLS` bits. Each row has a row tag, and each column has a column
tag. Every clock it performs at most one micro-operation:

| micro-op   | effect                                                                 |
|------------|------------------------------------------------------------------------|
| `CMP_H`    | row tag[r] = (row r equals the horizontal key in every masked column)  |
| `CMP_V`    | column tag[c] = (column c equals the vertical key in every masked row) |
| `WR_H`     | in rows chosen (tagged, or all), masked columns ← horizontal key        |
| `WR_V`     | in columns chosen (tagged, all, or an external select), masked rows ← vertical key |
| `WT_H`     | masked columns of every row ← that row's tag                            |
| `WT_V`     | masked rows of every column ← that column's tag                         |

The precharge and sense-amplifier chain of a real CAM is modelled here by its logical result: a
line matches when all its unmasked cells equal the key.

The key and mask registers are loaded by the controller in the same clock the micro-op is
issued. Each direction has one key/mask pair, and the command sets up to four single positions
plus one contiguous range.

- **Word-sequential reading.** Mask one row and use a key of all ones. A vertical compare then
  leaves that row's bits in the column tags.
- **Word-sequential writing.** This takes two clocks: write the ones, then the zeros. That
  matches the two-cycle write per row or column that is the cost basis of this architecture.

Storage cells are not reset, because a CAM's content is undefined at power-up. The tags are reset.

## 2. Programs, LUT passes and operand layout (`ap_ctrl`, `ap_icache`)

The controller fetches 60-bit instructions (`ap_instr_t`) from its instruction cache. The cache
has 64 entries and a one-clock read. The controller expands each instruction into compare/write
micro-ops.

Instruction fields:

- `op`: the operation.
- `dir`: 0 = horizontal mode, 1 = vertical mode.
- `m`: the precision, 1..8 (0 means 8).
- `a b c d`: the first bit position of each operand field.

In **horizontal mode** every row is a SIMD lane and a field is a run of columns. In **vertical
mode** every column is a lane and a field is a run of rows. Vertical mode is legal only on a 2D AP
(`TWO_D=1`). On the MAP a vertical arithmetic instruction is skipped and sets the sticky `err`.

| op        | meaning (fields are LSB positions)                 | CAM micro-ops |
|-----------|----------------------------------------------------|---------------|
| `OP_ADD`  | B += A in place; carry-out at c, which is the result MSB | 1 + 8m |
| `OP_MUL`  | C (2m bits) = A × B; d is a carry scratch bit     | 1 + 8m² + 2m  |
| `OP_RELU` | A = max(A, 0), A being m-bit two's complement; flag at c | 3 + 2(m−1) |
| `OP_MAX`  | B = max(A, B), unsigned; flags at c, c+1           | 1 + 8m        |
| `OP_COPY` | B = A, m bits                                      | 2m            |
| `OP_MOVE` | word transfer: m-bit field of row a at column b → row c at column d | 3 |
| `OP_HALT` | end of program, `done` pulses                      | 0             |

The controller also spends two clocks per instruction on fetch and decode.

### The passes

Each bit step runs a fixed set of *passes*. A pass is one compare (key = the bit pattern sought in
the participating columns) followed by one write (the new bit values, into the tagged lanes only).
Pass order matters: a lane rewritten by one pass must not match a later pass of the same step.

**Addition.** A full adder over (A, B, carry). Only four of the eight input patterns change
anything, so each bit takes four passes:

| pass | A B C → | write   |
|------|---------|---------|
| 1    | 1 1 0   | B=0 C=1 |
| 2    | 1 0 0   | B=1     |
| 3    | 0 0 1   | B=1 C=0 |
| 4    | 0 1 1   | B=0     |

This gives 8 micro-ops per bit. One extra write clears the carry column first, and the carry left
at the end becomes the result's MSB.

**Multiplication.** Shift-and-add. For multiplier bit i, the add LUT is applied to
C[i .. i+m−1] += A, with the multiplier bit added to every compare key. Only lanes whose
multiplier bit is 1 therefore add. A final two-micro-op pass writes the carry into C[i+m] and
clears it.

**ReLU.** Three steps:

1. Compare the sign bit.
2. Write the match into the flag column.
3. Clear the sign bit.

Then, for each remaining bit, compare (bit = 1, flag = 1) and write 0.

**Max.** Runs from MSB to LSB with two flags. F1 means "already decided" and F2 means "A won".
Each bit uses four passes over (A, B, F1, F2):

| pass | A B F1 F2 → | write        |
|------|-------------|--------------|
| 1    | 1 0 0 0     | B=1, F2=1    |
| 2    | 0 1 0 0     | F1=1, F2=1   |
| 3    | 1 0 0 1     | B=1          |
| 4    | 0 1 0 1     | B=0          |

In pass 2, B is already 1 and F1 is written to 1. The effect is "B wins, decided".

**Copy.** One compare of A=1 and a tag write-back per bit.

**Move.** Three steps:

1. A vertical compare reads the source row's word into the column tags.
2. A write of ones puts it into the destination row's columns, using the tags as external select.
3. A write of zeros fills the remaining columns of the destination field.

This is how values are moved between rows, for example to gather partial products before a
horizontal add. It is how reductions are done in this design.

### CNN functions as programs

There are no dedicated instructions for whole CNN functions. Each is written as a short program
from the operations above.

- **Convolution / GEMM.** Broadcast the im2col input columns to the CAPs and unicast the stationary
  weights. Align each weight with its input in one row using `OP_MOVE`. Multiply with `OP_MUL`.
  Sum the products pairwise: `OP_MOVE` brings a partner's product into the row, then one `OP_ADD`
  adds all pairs at once. Repeat for log2(n) levels.
- **ReLU.** `OP_RELU`.
- **Max pooling.** `OP_MAX` on pairs, with `OP_MOVE`s between the levels of the pairwise tree.
- **Average pooling.** The same tree built with `OP_ADD`. The division by a window of S = 2^J
  needs no operation: the result is read starting at bit J, because the fields are addressed by
  their first bit position.

### Operand layout constraints

A row has only 16 columns. A horizontal operation must fit all its fields plus its scratch
columns into those 16:

- ADD needs 2m+1 columns, so m ≤ 7 in place. m = 8 works if the sum may overwrite the carry
  column of a neighbouring field.
- MUL needs A, B, 2m product columns and one carry column, so m ≤ 3.
- MAX needs 2m+2 columns.

4- and 8-bit multiplication therefore runs in **vertical mode**: the operand bits lie down the
4800 rows and each of the 16 columns is a lane. The testbench checks 8 × 8 → 16-bit vertical
multiplication.

The paper's own cost model assumes two m-bit words per row, and never counts the product and
carry columns.

## 3. Moving data: interface, mesh, transfer engine

**Packets (`pkt_t`).** A packet is one 1024-bit transfer, up to 64 words of 16 bits, plus a header.
There are two kinds:

- **`PK_WDATA`** writes `nwords` words into consecutive rows, starting at `row`.
- **`PK_RDREQ`** asks the receiver to read `nwords` rows starting at `row`. The receiver sends them
  back as a `PK_WDATA` to `reply_node` / `reply_row`. It may broadcast them.

**`ap_ifc`.** The AP's interconnection interface. It turns packets into word-port requests to its
controller, and read data into a reply packet. Word accesses from the interface wait while a
program runs; they are served between programs. `wr_done` pulses once a whole data packet is
written.

**`cluster_mesh`.** A model of the on-chip mesh. Node 0 is the MAP and nodes 1..64 are the CAPs.
CAP n sits at grid point ((n−1) mod 8, (n−1) div 8), and the MAP sits at point (4, 4).

- One transfer is in flight at a time, granted round-robin among the injecting nodes.
- It takes **2 clocks per hop**, because the mesh runs at half the AP clock. Hops are the
  Manhattan distance, with a minimum of 1.
- A broadcast is delivered to every CAP after the latency of the farthest one.
- A destination that is not ready holds the packet.

With this placement the average distance from the MAP to the 64 CAPs is 4.0 hops. The reference
configuration reports 3.815.

**`xfer_engine`.** It performs one transfer command of the cluster:

- **MAP → CAP (Read stage).** It hands the MAP a read request whose reply goes to one CAP or to all
  of them. It finishes when every addressed CAP has written the data.
- **CAP → MAP (Write stage).** It injects a read request to the CAP, with the reply addressed to
  the MAP. It finishes when the MAP has written it.

**`cluster`** executes host commands (`host_cmd_t`) one at a time:

- `HC_MAP_WR` / `HC_MAP_RD`: one MAP row, through the MAP's external word port.
- `HC_IMEM_WR`: one instruction, written into every CAP's cache at once. All CAPs run the same
  program.
- `HC_XFER`: one transfer, as above.
- `HC_RUN`: starts all CAPs at an address. The command completes when every CAP has reached
  `OP_HALT`.

A weight-stationary layer step is a sequence of these commands:

1. Write the MAP.
2. Transfer inputs and weights (broadcast or unicast): the Read stage.
3. RUN: the Compute stage.
4. Gather outputs back into the MAP: the Write stage.

**`offchip_ic` and `bf_imna`.** The off-chip interconnect passes each host command to one cluster,
or to all of them when `bcast` is set. It returns MAP read data. Clusters run independently and in
parallel.

## 4. Timing summary

| action                                | clocks                                      |
|---------------------------------------|---------------------------------------------|
| CAM micro-op                          | 1                                           |
| word write into a row (word port)     | 2 CAM writes + handshake                    |
| word read of a row                    | 1 CAM compare + handshake                   |
| instruction overhead                  | 2 (fetch, decode)                           |
| ADD / MUL / RELU / MAX / COPY / MOVE  | see the table in section 2                  |
| mesh transfer                         | 2 × hops, then ejection handshake           |
| MAP → CAP transfer of n words         | n word reads in the MAP + mesh + n word writes in the CAP(s) |

## 5. Where this design departs from the reference description

- **Addition LUT.** The reference cites the add LUT but does not print it. The pass table above,
  its order and the extra carry-clear write are this design's own.
- **Multiplication.** It adds one carry-flush pass per multiplier bit (2m micro-ops) and one clear
  on top of the 8m² passes.
- **Vertical reduction.** The reference costs a 2D-AP reduction at 4 compares + 4 writes per row
  pair. A bit-serial add with carries cannot be done that cheaply, so it is not built. Reductions
  use `OP_MOVE` to bring partial results into one row, followed by a horizontal `OP_ADD`. That is
  the 1D-AP reduction scheme.
- **Max pooling is unsigned.** Table-driven max on two's-complement values would need a sign-bit
  pass first. Max pooling normally follows ReLU, so its inputs are non-negative.
- **Column budget.** As explained in section 2, 4- and 8-bit multiplication uses vertical mode.
- **The mesh is a timing model.** It is a single shared transfer path with hop-based latency, not
  a network of routers. Concurrent transfers on disjoint links are therefore serialised. The MAP's
  position (grid centre) is assumed.
- **Off-chip interconnect.** Its cost and structure are not specified. This is a one-command
  router with broadcast.
- **Own choices.** The instruction encoding, instruction cache depth (64), packet format, host
  command set and all handshakes are this design's own.
- **Left out.** The transistor-level SRAM/ReRAM CAM cells, the precharge/sense amplifiers, the
  off-chip DRAM and the host (which performs im2col) have no RTL here. The CAM array models their
  logical behaviour; the host command port stands for the other two.
- **On-chip storage.** 64 MAPs of 4800 × 16 bits hold 0.6 MB. The evaluated networks (AlexNet,
  VGG16, ResNet18/50) have far more weights than that, so at this configuration weights are
  streamed from off-chip memory layer by layer.

## 6. Files, simulation and verification

`rtl/bf_pkg.sv` holds the sizes and shared types. Each other module is in `rtl/<module>.sv`:

- `ap_cam`, `ap_keymask`, `ap_icache`, `ap_ctrl`, `ap_ifc`
- `ap`: one AP, used as both CAP and MAP
- `cluster_mesh`, `xfer_engine`, `cluster`, `offchip_ic`
- `bf_imna`: the top

All parameter defaults are the reference configuration: 8 × 8 clusters, 8 × 8 CAPs per cluster,
4800 × 16 APs and 1024-bit transfers.

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line:

| testbench            | what it checks                                                       |
|----------------------|----------------------------------------------------------------------|
| `tb_ap_cam`          | random micro-ops against a reference model; every bit read back both ways |
| `tb_ap_keymask`      | random key/mask loads                                                |
| `tb_ap_icache`       | write/read, one-clock latency                                        |
| `tb_ap_ctrl`         | results and exact micro-op counts of every instruction for m = 1..8; the 2-clock word write; multi-instruction programs; `err` on a 1D AP |
| `tb_ap_ifc`          | data packets and read-request replies under random back-pressure     |
| `tb_cap`             | every operation on a 2D AP in both modes, including 8-bit vertical multiply |
| `tb_map`             | the MAP's packet traffic, word port and horizontal MAX               |
| `tb_cluster_mesh`    | routing, latency = 2 × hops, broadcast, stalls, arbitration fairness |
| `tb_xfer_engine`     | request contents and completion conditions                           |
| `tb_offchip_ic`      | unicast/broadcast delivery, read responses                           |
| `tb_cluster`         | a small convolution-like step: broadcast inputs, unicast weights, 16 MOVEs to align them, MUL, ReLU, MOVE + ADD pairwise reduction, COPY, MAX, gather, read back |
| `tb_bf_imna`         | the same step on two clusters through the top, with host broadcast commands; counts 15 mechanisms and fails if any never occurs |
| `tb_bf_imna_cluster` | the top with one cluster at full size: 64 CAPs and a MAP of 4800 × 16 |

Most testbenches reduce the array sizes to keep simulation short. The largest configuration
simulated is one full-size cluster (`tb_bf_imna_cluster`). The full 64-cluster chip, 4160 APs of
76,800 bits each, has not been simulated: building it needs more memory and time than a
workstation run allows. At the paper's sizes the 4800-row loops of the CAM array exceed the
default loop-unroll limit of some synthesis front ends (4000 iterations), and synthesis of the
larger blocks takes more than ten minutes; the lint and simulation flows accept the full sizes.
The 64-cluster top needs more memory to lint than a 15 GB machine has.

To simulate a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bf_pkg.sv tb/tb_cluster.sv \
          --top-module tb_cluster -o sim && obj_dir/sim
```

To change the precision of a layer, change the `m` field of its instructions; nothing else
changes. To change the array sizes, override `CX`, `CY`, `X`, `Y`, `ROWS` and `DEPTH` on
`bf_imna`. `COLS` is fixed at 16 by the packet and host-command formats.
