# PIM-DRAM in SystemVerilog: multiply-accumulate inside DRAM subarrays

Neural-network inference spends most of its time on multiply-accumulate (MAC)
operations, and most of its energy on moving weights and activations between
DRAM and a processor. PIM-DRAM does the multiplications where the data already
sits: inside the DRAM subarrays, by opening several word lines at once, so that
the bit lines and sense amplifiers of thousands of columns compute in parallel.
Only the sums leave the array. A small amount of logic next to each bank does
the rest:

- an adder tree;
- shift-and-add accumulators;
- ReLU, batch normalisation, quantisation and pooling;
- a transpose buffer that puts results back into the layout the next layer
  needs.

Each network layer lives in its own bank. Banks pass activations to each other
over the DRAM's internal bus.

This repository is a register-transfer model of that architecture. It follows
the PIM-DRAM paper ("PIM-DRAM: Accelerating Machine Learning Workloads using
Processing in Commodity DRAM") and is meant to be simulated with Verilator. It
is not the authors' code. Where the paper leaves something open, the choice
made here is stated below and in each file's header.

## 1. Data layout: one operand pair per column

A subarray has 4096 rows of 4096 bits. Operands are stored **bit-transposed**:

- Column `c` holds one activation/weight pair.
- Bit `k` of the activation sits in row `a_base + k`.
- Bit `k` of the weight sits in row `b_base + k`.

A row-wide operation therefore works on 4096 independent pairs at once. The
2n-bit product of column `c` ends up in rows `p_base .. p_base+2n-1`, again one
bit per row.

Besides the data rows, every subarray has nine **compute rows**. The row
operations act only on them:

| row | use |
|---|---|
| A, A-1 | first AND operand pair; first majority inputs |
| B, B-1 | second pair; majority inputs |
| Cin, Cin-1 | carry in |
| Cout, Cout-1 | dual-contact cells, read through their negated port (they give ~Cout) |
| row0 | constant zeros |

## 2. Row operations (AAPs)

Every in-array step is one ACTIVATE-ACTIVATE-PRECHARGE (AAP). `pim_subarray`
models an AAP as one clock that applies its digital result to all columns. The
AAP kinds are:

| AAP | rows opened | result (per column) | result is restored into |
|---|---|---|---|
| COPY (RowClone) | source row | source | destination data row and/or compute rows |
| AND_A | A, A-1 via the AND word line | A & A-1 | A, A-1 |
| AND_B | B, B-1 | B & B-1 | B, B-1 |
| MAJ3 | A, B, Cin | Maj(A, B, Cin) = carry | A, B, Cin (and Cout, Cout-1 on request) |
| MAJ5 | A-1, B-1, Cin-1, ~Cout, ~Cout-1 | Maj5 = sum bit | A-1, B-1, Cin-1, a data row; Cout/Cout-1 get the complement |

The sum follows from the carry: Sum = Maj(A, B, Cin, ~Cout, ~Cout). This
holds because when Cout = Maj(A, B, Cin), the five-input majority equals
A xor B xor Cin.

A majority activation is destructive: every opened row is left holding the
result. That fact drives most of the sequencing below.

Charge sharing, sense margins, process variation and DRAM timing are not
modelled. The model reproduces the digital outcome of each AAP and nothing
else.

## 3. Multiplication sequence

`pim_mul_seq` issues the AAP stream that multiplies two n-bit numbers in every
column. The stream is broadcast to all subarrays of a bank, so a single
sequencer drives the whole bank.

### 3.1 Schoolbook columns

Product bit `c` is the sum of the partial products `A_i AND B_j` with
`i + j = c`, plus the carries from column `c-1`. For n > 2 the carries of a
column can span several bits. A running column sum is therefore kept in `IW`
scratch rows I (`i_base ..`). For each partial product the sequencer issues:

1. `COPY A_i -> A`, `COPY B_j -> A-1`, then `AND_A`. Now A and A-1 both hold
   the partial product.
2. `COPY row0 -> Cin, Cin-1`, which clears the carry.
3. A bit-serial ripple add of that single bit into I. For each bit k of I:
   - if k > 0, `COPY row0 -> A, A-1`, because the operand is one bit wide;
   - `COPY I_k -> B, B-1`;
   - `MAJ3`, which leaves the carry in Cin and the Cout rows;
   - `MAJ5 -> I_k`, which writes the sum bit back;
   - `COPY Cin -> Cin-1`, unless this is the last bit.

When a column is complete:

- I's lowest bit is copied to `P_c`;
- that I row is cleared;
- the running sum is not shifted down. Instead, the base of I advances by one
  row, circularly. This saves IW copies per column.

After the last column, the remaining carry goes to `P_{2n-1}`.

### 3.2 Width and cost

- **Width.** IW = max(n-1, clog2(2n)). This is 3 for n = 4, the n-1 rows the
  paper uses. For n = 3, n-1 rows would overflow: a column of 7×7 sums to 4.
- **Multiplication cost.** IW + n²(5·IW + 2) + 2(2n-1) + 1 AAPs. That is
  **290 AAPs** for 4-bit operands.
  - The paper's count is lower (168 for n = 4).
  - Its step list does not include the re-copies that a destructive majority
    activation forces when a value is needed again. An example is reloading
    Cin-1 from Cin between bits.
  - The testbenches check 290.
- **Addition cost.** In-array addition (`SEQ_ADD`, used for residual
  connections) takes 5n + 1 AAPs, where the paper quotes 4n + 1. The extra AAP
  per bit is the same Cin → Cin-1 copy.

## 4. Reduction: configurable adder tree and accumulators

After multiplication, each column holds a 2n-bit product. A MAC of size m must
add m products that sit in m different columns. Columns do not share bit
lines, so the sum is formed outside the array.

### 4.1 Adder tree

`pim_bank` senses one product-bit row at a time through the column decoder
into a **4096-input binary adder tree** (`pim_adder_tree`). The tree has 12
levels of add units, and each unit can either add its two inputs or forward
its left input.

The bank configures the tree from two command fields:

- `tap_level = L`: MACs are aligned to blocks of 2^L columns.
- `mac_size = m`: the first m columns of each block belong to the MAC.

From these it derives the configuration:

- Leaves at block offsets ≥ m are masked to zero.
- Every unit at level ≤ L whose right subtree lies entirely in the masked part
  of its block forwards its left input instead of adding.
- The outputs of level L are then exactly one MAC bit-sum per block.

The accumulators take `N_TAP` (16) consecutive units of level L at a time; this
set is a "group". A subarray has 4096 / 2^L blocks, which need
(4096 / 2^L) / 16 groups.

A MAC command reduces a range of subarrays and groups. When a layer has more
results than the 256-entry transpose unit holds, the bank reduces part of the
groups, sends and transfers those results, and then reduces the remaining
groups. The products stay in the array, so no new multiplication is needed.

### 4.2 Accumulators

For one group, the bank senses product rows bit 0 to bit 2n-1 on successive
clocks. Each `pim_accumulator` adds the tree sum shifted left by the bit index.
After 2n sums it holds the exact MAC.

Example: 4-bit operands and MACs of 6 in blocks of 8. Leaves 6 and 7 of every
block are masked. The level-1 unit over columns (6, 7) and the level-2 unit over
(4..7) forward. The level-3 unit over (0..7) adds. The tap at level 3 then
carries Σ_{c<6} bit_k(P_c).

Aligning MACs to power-of-two blocks is this model's choice. The paper says
only that the tree's inputs and nodes are reconfigurable.

## 5. Special functions, transpose and global buffer

MAC results leave the accumulators one per clock. They pass through a chain of
one-clock stages in this order:

1. `pim_relu`: negative values become 0.
2. `pim_batchnorm`: `((x - mean) · scale) >>> shift + beta`, with per-layer
   constants. The paper says only "subtract, divide, scale by constants". The
   division is a shift here.
3. `pim_quantize`: `clamp(x >>> q_shift, 0, 2^n - 1)` gives the next layer's
   n-bit activation. The paper only names this unit.
4. `pim_pool`: max pooling over `pool_window` consecutive values, or
   pass-through for layers without pooling.

With unsigned 4-bit operands, MACs are never negative, so ReLU only matters for
signed data.

Results are then written horizontally, one n-bit value per entry, into the
**transpose unit** (`pim_transpose`, 256 × 8). A SEND command reads it
vertically: bit plane b is a 256-bit row holding bit b of all 256 results. The
planes go into the **global buffer** (`pim_global_buffer`, a small FIFO of
256-bit rows).

Written into another bank's subarray at rows `r .. r+n-1`, these planes are
again bit-transposed operands: the result with index i becomes the operand of
column `seg·256 + i`.

## 6. Banks, bus and the layer pipeline

The top level (`pim_dram`) has `N_BANKS` banks on one internal bus
(`pim_dram_bus`).

Each bank runs a fixed sequence, given as commands:

- `BK_MUL` (or `BK_ADD`): broadcast the AAP stream to all subarrays.
- `BK_MAC`: for every subarray and group, sense 2n rows, reduce and
  accumulate, then push the group's results through the SFUs into the
  transpose unit.
- `BK_SEND`: move the bit planes into the global buffer.

All banks may run these at the same time, each on its own layer.

A transfer (`xfer_start`) then moves every enabled bank's global buffer over
the bus:

- Bank by bank, highest index first. In a chain of layers, bank k-1 sends to
  bank k only after bank k has sent its own results onward.
- One row per clock.
- Each row goes to the configured destination bank, subarray, row (advancing
  per bit plane) and column segment.

The same bus carries host writes that load weights and inputs. These are
refused while a transfer runs.

**Residual connections.** A bank is reserved to receive the shortcut
activations and the layer output. It adds them in-array with `BK_ADD` and
forwards the sum.

**What the host does.** The host decides which bank holds which layer, where
operands go (the paper's mapping algorithm) and which commands to issue. None
of this is in the RTL. The top exposes bank commands, SFU constants, transfer
descriptors and host writes as ports.

## 7. Programming interface

| field | meaning |
|---|---|
| `bank_cmd_t.op` | `BK_MUL`, `BK_ADD`, `BK_MAC`, `BK_SEND` |
| `a_base`, `b_base` | rows of bit 0 of the two operands |
| `p_base` | rows of the product (MUL/ADD); the rows reduced (MAC) |
| `i_base` | IW scratch rows for MUL |
| `sub_first`, `n_sub` | first and last subarray reduced by MAC |
| `grp_first`, `n_groups` | first and last accumulator group of each subarray |
| `tap_level`, `mac_size` | MAC blocks of 2^tap_level columns, first mac_size used |
| `sfu_cfg_t` | `bn_mean`, `bn_scale`, `bn_shift`, `bn_beta`, `q_shift`, `pool_en`, `pool_window` |
| `xfer_cfg_t` (per source bank) | `en`, `dst_bank`, `dst_sub`, `dst_row`, `dst_seg` |

Handshakes and timing:

- A bank takes a command when `bank_ready` is high, and pulses `bank_done`
  when the command has finished.
- `aap_count` reports the AAPs of the last MUL/ADD.
- `results` counts the values written into the transpose unit since the last
  SEND.
- `forwards` counts the tree units in forward mode under the current
  configuration.

Timing, in clocks:

- MUL: 290 (one AAP per clock).
- MAC: per group, 2n + 2 clocks plus one clock per valid tap, then a few clocks
  for the SFU pipeline to drain.
- SEND: about 2n.
- Transfer: one row per clock plus one clock per bank visited.

## 8. Parameters

| parameter | default | origin |
|---|---|---|
| `ROWS` × `COLS` per subarray | 4096 × 4096 | paper |
| `N_BITS` | 4 | paper (4-bit weights and activations) |
| adder-tree inputs | 4096 (= `COLS`) | paper |
| `TR_DEPTH` × `TR_WIDTH` | 256 × 8 | paper (example SRAM size) |
| `N_BANKS` | 8 | assumed (a DDR3 device has 8 banks) |
| `N_SUB` subarrays per bank | 8 | assumed |
| `N_TAP` accumulators per bank | 16 | assumed |
| `GB_DEPTH` global buffer rows | 8 | assumed |
| SFU data width | 24 bits | assumed |

**Capacity at these sizes.** A 4-bit multiplication set takes 19 rows (4 + 4
operand rows, 8 product rows, 3 scratch rows). A bank therefore holds
8 × ⌊4096/19⌋ × 4096 ≈ 7.0 M operand pairs at a time.

With one layer per bank, 8 banks cannot hold VGG-16 (16 layers) or ResNet-18
(18 layers plus reserved banks) in one pass. AlexNet's 8 layers match the bank
count, but its first fully connected layer (37.7 M weights) exceeds one bank and
needs several reload passes. The RTL leaves those passes to the host.

## 9. Where this model departs from the paper

- **AAP counts** are 290 for a 4-bit multiplication and 5n + 1 for an
  addition. The paper gives lower counts, 168 and 4n + 1 (Section 3).
- **The scratch sum** uses max(n-1, clog2(2n)) rows and is kept as a circular
  buffer.
- **Which operand a forwarding tree unit passes** (the left one), the
  power-of-two MAC alignment, the accumulator count and the tap selection are
  this model's choices.
- **Quantisation** uses a shift and clamp. Batch normalisation divides by a
  shift.
- **Bus width and timing** are assumed: one 256-bit row per clock, with host
  writes in 256-bit segments.
- **The pooling window** is consecutive values in arrival order. Arranging a
  2-D window's elements consecutively is the job of the operand mapping.
- **Not modelled:**
  - analog behaviour;
  - DRAM timing parameters, refresh and the command protocol;
  - the host memory controller;
  - the offline mapping algorithm.

## 10. Verification

Every module has a self-checking testbench in `tb/` that compares against an
independent model and prints `TB_RESULT checks=N failures=M`. Each one has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_pim_subarray` | every AAP kind, restore rules, row writes and reads |
| `tb_pim_mul_seq` | all 4-bit products and sums on a small subarray, and the AAP counts |
| `tb_pim_adder_tree` | random leaves, masks, forward patterns and taps against a software tree |
| `tb_pim_accumulator`, `tb_pim_relu`, `tb_pim_batchnorm`, `tb_pim_quantize`, `tb_pim_pool` | arithmetic against reference functions |
| `tb_pim_transpose` | horizontal/vertical writes and reads |
| `tb_pim_global_buffer` | FIFO against a queue model, including full and empty |
| `tb_pim_bank` | a small bank: MUL, MAC with masked leaves and forwarding, the SFU chain, pooling, SEND, ADD; raw MACs and bit planes checked |
| `tb_pim_dram_bus` | host writes, transfer order, addressing, refusal during transfers |
| `tb_pim_dram` | 3-bank end-to-end run, described below |

**End-to-end test (`tb_pim_dram`).** The design is reduced to 3 banks of
2 subarrays of 64 × 64. The test runs two layers in parallel, transfers their
results (checking the order), runs a second layer on the received
activations, and does a residual addition. It counts each mechanism and fails
if one never occurs:

- multiplication, addition and reduction;
- sequential transfer;
- tree forwarding;
- pooling and pass-through;
- both quantiser clamps;
- multiple subarrays and groups;
- a held-off host write.

**Sizes simulated.** No simulation uses the top at its default sizes (8 banks
of 8 subarrays of 4096 × 4096, about 1 Gbit of array state). At those sizes
the top lints and elaborates. Verilator, however, turns the 64 full-width
subarrays into well over a gigabyte of C++, which does not compile in useful
time. The largest configuration simulated is the end-to-end test above:
3 banks × 2 subarrays × 64 × 64 with a 64-input tree. Every module is written
for the default sizes, and the test sizes differ only in parameters.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/pim_pkg.sv rtl/pim_*.sv \
          tb/tb_pim_dram.sv --top-module tb_pim_dram -Mdir obj -o sim
./obj/sim
```

Replace the testbench file and top name to run another test.

## 11. Files

- `rtl/pim_pkg.sv`: shared types (AAP command, bank command, SFU and transfer
  configuration).
- `rtl/pim_subarray.sv`, `rtl/pim_mul_seq.sv`: in-array computation.
- `rtl/pim_adder_tree.sv`, `rtl/pim_accumulator.sv`, `rtl/pim_relu.sv`,
  `rtl/pim_batchnorm.sv`, `rtl/pim_quantize.sv`, `rtl/pim_pool.sv`,
  `rtl/pim_transpose.sv`, `rtl/pim_global_buffer.sv`: bank periphery.
- `rtl/pim_bank.sv`, `rtl/pim_dram_bus.sv`, `rtl/pim_dram.sv`: bank, bus, top.
- `tb/`: one testbench per module; `tb_pim_dram` is the end-to-end test.
