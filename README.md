# StepStone PIM: GEMM next to DRAM banks, under the CPU's own address mapping

Small-batch inference spends most of its time in fully-connected layers. Each of these
multiplies a large weight matrix `A` (M x K) by a thin activation matrix `B` (K x N), where N
is often 1 to 32. Every weight is fetched from main memory and used only N times, so the CPU
is limited by memory bandwidth. A processing-in-memory (PIM) unit at every DRAM bank group can
read far more bandwidth than the memory channel carries.

The difficulty is where the weights live. The CPU spreads consecutive cache blocks over
channels, ranks and bank groups with an XOR hash of the physical address bits. The weight
matrix should stay in that ordinary CPU layout, so the CPU can keep using it and nothing has
to be copied. As a result, each PIM sees a scattered, irregular subset of `A`.

StepStone accepts that layout. Every PIM walks its own share of `A` in place and computes a
partial `C = A x B` from it. The host does two things around the PIM work:

- Before the GEMM, it copies to each PIM exactly the parts of `B` that its blocks of `A` need.
- After the GEMM, it adds up the partial `C` rows that several PIMs produced.

This RTL is the StepStone-BG configuration: 16 PIM units, one per bank group of a memory with
2 channels, 2 ranks and 4 bank groups. It also contains the host-side PIM controller with its
copy engine. The DRAM devices and the CPU's memory controller are not included; their
connections are top-level ports.

## 1. The address mapping and the "stones"

A physical address `pa` selects a 64-byte cache block, `ba = pa[31:6]`. The Skylake-style
mapping used here forms each ID bit as the XOR of a fixed set of address bits:

| ID bit | address bits XORed |
|---|---|
| BG0 (PIM ID bit 0) | a7, a14 |
| BG1 (bit 1) | a15, a19 |
| RK (bit 2) | a16, a20 |
| CH (bit 3) | a8, a9, a12, a13, a18, a19 |

`pim_id = {CH, RK, BG1, BG0}` names the bank group that stores the block, and so the PIM that
can read it without using the channel (`rtl/pim_id_map.sv`, `stepstone_pkg::pim_id_of`).

`A` is stored row-major with a power-of-two row pitch. Some address bits therefore number the
column block within a row; these are the MCOL bits, and each column block is 16 fp32 words.
The bits above them number the row; these are the MROW bits.

The blocks of `A` that one PIM can read are its **stones**. A stone is one row of `A` and 16
consecutive columns. For a stone at row `r` and column block `c`, the PIM needs:

- `B` rows `16c .. 16c+15`;
- the `C` row `r`.

### Block groups

An ID bit may XOR both a row bit and a column bit. When it does, the rows a PIM owns and the
column blocks it owns are not independent. For example, BG0 = a7 ^ a14 in a 16 x 512 matrix,
where a7 is a column bit and a14 a row bit. PIM 0 then holds even column blocks of even rows
and odd column blocks of odd rows.

The stones of a PIM split into **block groups**:

- All stones in a group share the same `B` rows and the same `C` rows.
- A group is selected by pinning the parity of one more combination of address bits.

In the 16 x 512 example, the group bits are GP0 = a14 and GP1 = a12^a13^a18^a19.

The PIM processes one group at a time. Before each group, the `B` rows that group needs are
loaded into the PIM's scratchpad.

### Partitions

A group can need more `B` or `C` than the scratchpad holds. It is then cut once more:

- **Row partitions** come from splitting the address range. Each kernel gets its own
  `A_START` / `A_END`.
- **Column partitions** come from pinning one more free column bit by parity. This halves the
  `B` rows the kernel needs.

Both group bits and partition bits use the same mechanism: one more parity row in the address
generator. The generator holds 4 PIM-ID rows and 4 spare rows.

## 2. The address generator (`stepstone_agen`)

Each PIM must list, in ascending order, the block addresses `ba` in a range that meet every
constraint row:

    parity(ba & mask[i]) == tgt[i]      for i = 0 .. 7

Rows 0 to 3 are the PIM-ID bits, with this PIM's ID as the target. Rows 4 to 7 pin the group
and partition.

Stepping `ba` by one and testing each address would waste about 15 of every 16 cycles with 16
PIMs, and more once a group is pinned. The source design fixes this with two rules:

- **Instant correction.** When incrementing one bit of an ID disturbs the parity, the next bit
  of the same ID is fixed directly.
- **Carry forwarding.** A chain of ID-affecting bits is skipped by sending the carry straight
  past it.

This generator computes the same next address in closed form, one address per cycle:

1. **Echelon form on load.** The constraint rows are brought to reduced row-echelon form over
   GF(2), with the least significant bit as the first column (`stepstone_pkg::gj_reduce`).
   - Each row then owns one **pivot bit**, its lowest, and no other row contains that bit.
   - Every other address bit is **free**.
   - A valid address is any setting of the free bits, with each pivot set to the parity its
     row needs.
   - Valid addresses are ordered exactly as their free bits are, because each pivot is below
     all the free bits of its row.
   - Contradictory rows raise `cfg_error`.
2. **Next address.** Start from the current valid address:
   1. Force all pivot bits to 1.
   2. Add 1. The carry runs through the pivots as if they were absent, which is carry
      forwarding.
   3. Recompute every pivot from its row's parity, which is instant correction.

   There is no loop: the step is one adder plus one parity tree per row.
3. **First address.** The start address need not be valid, so the ordering argument does not
   hold there. `first_valid` tries each bit `j` that is 0 in `start_ba` and free:
   - keep the start's bits above `j`;
   - raise bit `j`;
   - clear the free bits below `j`;
   - fix the pivots.

   It keeps the smallest candidate that is valid and not below the start. The start address
   itself is also a candidate if it is valid.

**Timing:** from `load` to the first `out_valid` is 2 cycles (one to reduce, one to find the
first address). After that, one address is produced in every cycle that `out_ready` is high.
`done` pulses after the last address ≤ `end_ba` has been taken.

The reduced rows (`red_cons`) and the free-bit mask also serve the PIM unit. A stone's row
index within the group is the bit-extract (`pext`) of the address's free MROW bits. Its
column-block index is the bit-extract of its free MCOL bits. Both are dense and start at 0, so
they index the scratchpad directly.

## 3. One PIM unit (`pim_unit`)

A PIM unit contains:

- memory-mapped control and status registers, reached by the host through the controller;
- the address generator;
- the DRAM operand buffer (`operand_fifo`, 4 cache blocks, plus a matching queue of indices);
- the vector unit (`simd_unit`, 8 fp32 multiply-accumulate lanes);
- an 8 KB scratchpad (`scratchpad`, 256 lines of 8 words);
- one memory port to its bank group.

### Kernels

| CMD | kernel | what it does |
|---|---|---|
| 1 | FILL | reads `COUNT` local blocks from `A_START` upward (PIM-ID rows only) into the scratchpad at word `SP_BASE` |
| 2 | DRAIN | writes `COUNT` scratchpad blocks back to local blocks the same way |
| 3 | GEMM | walks every stone in `[A_START, A_END]` of this PIM and of the group/partition set by `XMASK0..3` / `XTGT`, and accumulates its products into `C` in the scratchpad |

FILL and DRAIN are how the host's copies of `B` and `C` reach and leave the scratchpad. The
host places them at PIM-local addresses, which need not be contiguous.

### Scratchpad layout for GEMM

The batch dimension N runs across the SIMD lanes. `NPASS = ceil(N/8)` passes cover a batch
wider than 8. For a stone with row index `r` and column index `c`, pass `p` uses:

    C line          = C_BASE + r*NPASS + p
    B line of k     = B_BASE + (c*16 + k)*NPASS + p       k = 0..15

One pass takes 19 cycles:

1. read the `C` line;
2. load it into the accumulators, while reading the first `B` line;
3. 16 multiply-accumulates, each broadcasting one word of the stone against one `B` line;
4. write the `C` line back.

DRAM reads are issued ahead of use, up to the operand-buffer depth. When the buffer already
holds the next stone, the unit goes straight on, so a GEMM costs exactly `19 * NPASS` cycles
per stone. `CYCLES` and `BLOCKS` report the last kernel.

### Registers

Registers are 32-bit words, selected by `reg_addr`:

| index | register |
|---|---|
| 0 | CMD |
| 1 | STATUS: bit0 busy, bit1 done (write 1 to clear), bit2 configuration error, bit3 a memory request fell outside this PIM's bank group (sticky; checked by a built-in PIM ID decoder) |
| 2 | A_START |
| 3 | A_END |
| 4 | SP_BASE |
| 5 | COUNT |
| 6 | B_BASE |
| 7 | C_BASE |
| 8 | NPASS |
| 9 | COLMASK (MCOL bits of the address) |
| 10 | ROWMASK (MROW bits) |
| 11–14 | XMASK0..3 |
| 15 | XTGT |
| 16 | CYCLES |
| 17 | BLOCKS |

With `reg_addr[19] = 1`, the low bits address a scratchpad word directly. This window is
usable while the unit is idle; the host uses it to clear `C` or to write small operands.

## 4. Host side: PIM controller and copy engine

`pim_controller` sits next to the CPU's memory controller and has a simple register bus:

- With `cpu_addr[24] = 0`, the access goes to PIM `cpu_addr[23:20]`, register
  `cpu_addr[19:0]`.
- With `cpu_addr[24] = 1`, it reaches the controller's own registers:
  - 0: PIM_DONE vector;
  - 1: PIM_BUSY vector;
  - 2: CE_CTRL;
  - 3: CE_NSRC;
  - 4: CE_NDST;
  - 5: CE_COUNT;
  - 0x40+i: CE_SRC[i];
  - 0x80+i: CE_DST[i].

Read data returns one cycle after the read request.

The copy engine (`copy_engine`) performs the two data movements that the group flow needs:

- **REPLICATE:** reads one block and writes it to up to 16 PIM-local addresses. This is
  localization of `B`.
- **REDUCE:** reads up to 16 blocks and adds them word by word with 16 fp32 adders. It writes
  the sum to one address. This is the reduction of partial `C`.

## 5. A complete GEMM

The host software (the end-to-end testbench plays this part) runs these steps:

1. From the mapping and the matrix shape, find the ID bits that mix row and column bits
   (these give the groups). Choose partitions so each kernel's `B` and `C` fit.
2. For every row of `B`, one REPLICATE writes it to the PIM-local `B` area of every
   (PIM, group, partition) that needs it.
3. Clear each PIM's `C` lines through the scratchpad window.
4. For each group and partition: FILL `B` into every scratchpad, then start GEMM in every PIM
   and poll PIM_DONE.
5. DRAIN `C` from every PIM. For every row of `C`, one REDUCE sums the partial rows of the PIMs
   that share it.

## 6. What fits

At the default sizes (8 KB and 8 lanes per PIM), one `B` row of a column block takes a full
8-word line per pass. Under this mapping, a PIM touches most or all of the column blocks of a wide
matrix. Whether a weight shape fits depends on the column partitions needed:

| weights | column blocks per PIM | fits |
|---|---|---|
| DLRM 512x32, 512x128, 128x1 | small | yes, without partitions |
| DLRM 2560x512 | 32 | yes, with 4 column partitions |
| 4096x1024, 1024x1024, 8192x2048 | 64–128 | yes, with up to 16 partitions and N run in 8-wide slices |
| 1024x4096, 2048x8192 | 256 | no: they would need 32 column partitions (5 spare parity rows), and 4 are built |

Matrices with a row pitch that is not a power of two, such as GPT-2's 1600 and 6400, are not
handled. The index extraction needs a power-of-two pitch; they must be padded or split by
the host.

## 7. Departures from the source design

- The PIM datapath is a sequential state machine, 19 cycles per stone and pass. The source
  design uses a 20-stage pipeline fed at full SIMD width. Results are the same; the
  throughput is lower.
- Arithmetic is fp32, rounded to nearest even, with subnormals flushed to zero. The source
  design does not state a number format.
- The register map, command encoding, scratchpad layout, controller bus and copy-engine
  descriptor are this design's own choices.
- The operand buffer depth (4) and the number of spare parity rows (4) are also this design's
  own choices.
- The scratchpad is 8 KB per PIM unit. One sentence of the source design reads "8KB per DRAM
  device" and another reads "8KB per StepStone-BG unit"; the per-unit reading is used here.
- Only the Skylake mapping is built in. `W`/`SP_BYTES` of 32/32768 or 256/262144 give the
  device-level and channel-level unit sizes, but the placement of units stays at bank-group
  level.
- Address translation is left to software: all addresses are physical.
- Fusing kernels for non-power-of-two matrices is not implemented.

## 8. Files and simulation

| file | contents |
|---|---|
| `rtl/stepstone_pkg.sv` | types, mapping masks, echelon reduction, `pext` |
| `rtl/pim_id_map.sv` | address to PIM ID |
| `rtl/stepstone_agen.sv` | address generator |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`, `rtl/simd_unit.sv` | vector unit |
| `rtl/scratchpad.sv`, `rtl/operand_fifo.sv` | local memories |
| `rtl/pim_unit.sv` | one PIM |
| `rtl/copy_engine.sv`, `rtl/pim_controller.sv` | host side |
| `rtl/stepstone_top.sv` | 16 PIMs plus the controller |

`tb/` holds one self-checking testbench per block, a behavioural DRAM model (`dram_model`) and
reference helpers (`gemm_ref_pkg`). Each testbench prints
`TB_RESULT checks=<n> failures=<m>`.

`tb_stepstone_top` runs the system at its default sizes. It performs a 64x512 GEMM with N=16,
which exercises:

- block groups and column partitions;
- two passes per stone;
- replication and reduction;
- operand-buffer stalls and DRAM back-pressure.

It checks `C` exactly, checks the cycle count of every PIM, and checks that no PIM touched
another PIM's memory.

To build and run a testbench with Verilator 5:

    verilator --binary --timing -Wno-fatal -y rtl -y tb \
        rtl/stepstone_pkg.sv tb/gemm_ref_pkg.sv tb/tb_stepstone_top.sv --top-module tb_stepstone_top
    ./obj_dir/Vtb_stepstone_top

Building the full system takes a few minutes, because of the 16 x 8 fp32 lanes. Lint
warnings about widths and unused bits are expected.
