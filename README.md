# Lama: LUT-based computing inside an HBM2 bank

Lama computes inside the DRAM bank by looking results up instead of calculating them. To compute
`f(a, b_i)` for one scalar `a` and a vector `b`, every possible result is precomputed once and
stored as a lookup table (LUT). Row `a` of a *compute subarray* holds `f(a, x)` for every `x`.
The operands `b_i` sit in a *source subarray*.

One multiplication batch then works like this:

1. Open the operand row and the LUT row. They are in different subarrays, so both can stay open.
2. Let each of the 16 mats of the bank read a **different** column of the open LUT row. The
   column is the one addressed by its own operand `b_i`.

A plain DRAM bank cannot do step 2, because it has only one column address per bank. Lama adds
one column counter per mat, a 64-byte temporary buffer for the operands, and a small mask unit.
With these, a single internal column access returns up to 16 results.

Three ideas keep the number of DRAM commands low:

- **Operand coalescing.** All products that share the same scalar `a` form one batch.
- **Open page.** Each LUT row is opened once per batch.
- **Bank-level parallelism.** Several banks work on different batches at the same time.

The same hardware also runs an LLM accelerator mode (called *LamaAccel* below). Weights and
activations use exponential quantisation, where a value is `±base^int`. A dot product then
becomes counting: for every output neuron, the bank counts how often each exponent sum
`int_A + int_W` occurs, with a sign. To support this, the column latches become 8-bit up/down
counters. A host then turns the counts into real values.

This repository holds synthesizable SystemVerilog for the Lama logic of one bank, for the
command sequencers a memory controller needs to drive it, and for a pseudo-channel of 8 such
banks. The DRAM cell array is a behavioural model.

## Geometry: the 16-byte line

All blocks share these numbers, defined in `lama_pkg`:

| item | value |
|---|---|
| bank | 64 subarrays × 512 rows |
| row | 1 KB, split over 16 mats |
| mat row | 64 byte-wide columns |
| internal column access (ICA) | 1 byte from each mat = one 16-byte *line* |
| bank logic clock | 500 MHz (2 ns) |
| tRCD = tCL = tWR | 8 cycles (16 ns) |
| tRP | 8 cycles, assumed as tRC − tRAS |

Every mat has its own 6-bit column address. Byte `m` of a line always belongs to mat `m`.

## LUT retrieval and the parallelism degree p

In a LUT, the result for operand `x` sits at a column given by the low bits of `x`. It is in
every mat, or in a group of `g` mats, depending on how many entries fit in a 64-byte mat row:

| operand bits | result | entries / mat row | mats per LUT `g` | results per retrieval `p` | column | mat within group |
|---|---|---|---|---|---|---|
| 4 (and 3) | 8 bit  | 64 | 1 | 16 | `x[5:0]` | – |
| 5 | 16 bit | 32 | 1 | 16 | `{x[4:0], ica}` | – |
| 6 | 16 bit | 32 | 2 | 8 | `{x[4:0], ica}` | `x[5]` |
| 7 | 16 bit | 32 | 4 | 4 | `{x[4:0], ica}` | `x[6:5]` |
| 8 | 16 bit | 32 | 8 | 2 | `{x[4:0], ica}` | `x[7:5]` |
| 7, 8-bit result (accelerator) | 8 bit | 64 | 2 | 8 | `x[5:0]` | `x[6]` |

The functions `lut_glog2`, `lut_col` and `lut_msel` in `lama_pkg` compute this table.

16-bit results need two ICAs: the low byte comes at column `2x`, the high byte at `2x+1`.
Between the two ICAs the column counters simply increment.

When `g > 1`, the same operand is sent to all `g` counters of its group (`lama_temp_buffer`
does this wiring). All `g` mats read, but only one of them holds the wanted byte. The **mask
logic** (`lama_mask_logic`) works out which one from the operand's upper bits. It then moves the
wanted bytes one per cycle through a 16:1 multiplexer into a 16-byte serial-in/parallel-out
buffer. A full buffer is sent as one line, either to the host or to the temporary buffer. The
results inside a line are in operand order, and 16-bit results are little-endian. When
`p = 16` the mask is bypassed and adds no cycles.

## The bank (`lama_bank`)

Blocks inside one bank:

- `lama_dram_bank`: the behavioural DRAM model.
  - Every subarray keeps its own open row, so a source row and a LUT row can be open together.
  - A column command takes 16 per-mat column addresses.
  - Read data returns tCL later.
- 16 × `lama_column_counter`: per-mat column counter and latch.
  - In conventional mode it takes the address register.
  - In LUT mode it takes an operand from the temporary buffer.
  - In counting mode it counts ±1.
- `lama_temp_buffer`: 64 bytes, organised as 4 lines.
- `lama_mask_logic`: the filter described above.
- `lama_bus_arbiter`: the bank's global I/O bus, plus bus gating.
  - It has a fixed-priority arbiter over GSA read data, mask output, temporary buffer, counter
    latches and host write data.
  - A gate lets data reach the host only when the controller opens it.
- `lama_bank_ctrl`: runs one bank command at a time over a valid/ready handshake. It also holds
  the operation configuration and the 8-bit activation buffer.

Bank commands (`cmd_op_e`) and their cycle counts in this implementation:

| command | action | cycles |
|---|---|---|
| ACT | open a row in a subarray | 1 + tRCD |
| PRE | wait out write recovery, close the row | 1 + tRP, more if tWR is still running |
| RD / WR | two ICAs at `col`, `col+1`, to or from the host | ≈ tCL + 4 / 3 |
| IRD | internal read, 1 or 2 ICAs into temporary-buffer lines | ≈ tCL + 3 |
| LUTR | retrieve `p` results from the open LUT row; each counter's column comes from an operand in the temporary buffer (`base`) | tCL + 4 per ICA, plus `p + 1` per ICA with the mask |
| CNT | counting step (see below) | ≈ tCL + 9 |
| LDACT / CFG / TBRD | load activation buffer / set precision / send one buffer line to the host | 1 |

## Bulk multiplication (`lama_mult_seq`)

`lama_mult_seq` plays the memory controller for one batch `c_i = a · b_i`.

**Data layout**

- Operands are stored one byte each, 1024 per row.
- Elements `32k … 32k+31` sit at byte-columns `2k` and `2k+1` of the 16 mats.
- A batch starts at the row that the scalar's positional index selects. It continues into the
  next row if it needs more than 1024 operands.

**Command stream**

```
ACT src  IRD(2 ICAs)  ACT lut_row+a  LUTR ×(32/p)  IRD  LUTR ×(32/p) ... PRE src  PRE cmp
```

- The LUT row is opened only once per batch.
- At a row boundary the source row is precharged and the next row is activated.

**Checked against the published numbers**

256 INT4 products in one bank take:

- 28 commands: 2 ACT, 8 IRD, 16 LUTR and 2 PRE. This equals the published count of 112 commands
  for four banks.
- 322 cycles. At 500 MHz that is 644 ns; the published figure is 583 ns.

For INT8, this design issues 140 commands per bank, against 148 in the published table. The
published INT8 command sequence is not given in detail.

## Accelerator mode (`lama_accel_seq`)

**What the counts represent**

A weight or activation byte is `{S, int}`, where `int` is an n-bit exponent (n = 3…7).
For one output neuron, the dot product expands into four terms:

1. signed counts of `int_A + int_W`;
2. signed counts of `int_W`;
3. signed counts of `int_A`;
4. the sign sum.

The bank keeps terms 1–3 as 8-bit occurrence counters. Term 4 and the scaling by the
quantisation constants are left to the logic die.

**Dataflow**

The dataflow is input-stationary. One activation, together with its positional index, is
broadcast to all banks (`accel_start` on `lama_pch`). Every bank then handles its own groups of
16 output neurons:

1. `IRD` reads 16 weights `{S_W, int_W}` into buffer line 0. They come from the row selected by
   the activation's positional index, at the column equal to the neuron group.
2. `LUTR` reads row `int_A` of the exponent-sum LUT into line 1. That row holds `int_A + int_W`
   at column `int_W`.
3. For each counter row: `ACT`, then `CNT` for term 1, `CNT` for term 2, `CNT` for term 3, then
   `PRE`.

**One CNT command**

- The counters load the column of each neuron's counter from the index.
- One ICA fetches the 16 occurrence bytes into a scratch buffer line.
- The latches load them and count ±1.
- The counts are written back to the line, and from there into the open row.

Only a counter whose mat actually holds the addressed counter changes its value. In the other
mats the counter latches the fetched value and writes it back unchanged.

**Counter layouts**

| n | p | term 1 (`int_A+int_W`) | term 2 (`int_W`) | term 3 (`int_A`) |
|---|---|---|---|---|
| ≤ 4 | 16 | subarray c1, column 0 | c1, column `2^(n+1)` | c1, column `3·2^n` |
| 5 | 16 | c1, columns 0–62 | c2, column 0 | c2, column 32 |
| 6 | 8 | c1, 2 mats per neuron | c2, mat 0 of the pair | c2, mat 1 of the pair |
| 7 | 4 | c1, 4 mats per neuron | c2, mats 0–1 | c2, mats 2–3 |

The 6-bit layout is the published example. The others follow the same pattern and are this
design's choice. When `p < 16`, a group of 16 neurons uses `16/p` counter rows, which are
processed as separate passes.

**Sign convention**

The published description says that an XNOR of the two sign bits equal to 1 decrements the
count. With sign bits, XNOR = 1 means equal signs, i.e. a positive product. That sentence would
therefore invert every product's sign. This design counts **up** on XNOR = 1, because that
matches the arithmetic the mode is meant to compute.

## Pseudo-channel top (`lama_pch`)

`lama_pch` has 8 banks. Each bank has its own `lama_mult_seq`, its own `lama_accel_seq` and a
command multiplexer. The multiplexer gives the bank's command port to, in priority order:

1. the multiplication sequencer, while it is busy;
2. the accelerator sequencer, while it is busy;
3. the host command port.

The host port is used to write LUTs, weights and operands, to read results and to issue any
bank command directly. Per-bank ports carry the host data path, the batch requests and the
command/ACT counters. HBM PHY, TSVs and logic-die post-processing are outside the design.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_lama_column_counter` | address load, increment, counting-mode index/valid for all layouts, up/down counting |
| `tb_lama_mask_logic` | selection for p = 8, 4, 2, 8-bit and 16-bit packing, bypass, cycle count |
| `tb_lama_temp_buffer` | line writes and element broadcast for every g |
| `tb_lama_bus_arbiter` | priority, one-hot grant, stall, gating |
| `tb_lama_dram_bank` | several open subarrays, per-mat columns, persistence over PRE/ACT, tCL latency |
| `tb_lama_bank` | RD/WR, tRCD, write-recovery stall, 8-bit LUT multiplication with mask, 4-bit without mask, one counting step; cycle counts |
| `tb_lama_mult_seq` | INT4 and INT8 batches against `a·b`; 28 commands / 2 ACT for 256 INT4 products; source-row change |
| `tb_lama_accel_seq` | n = 4, 5, 6, 7 against a reference counting model over all counter rows; command and ACT counts |
| `tb_lama_pch` | full-size pseudo-channel end to end (defaults: 8 banks × 64 subarrays) |

`tb_lama_pch` counts each mechanism and fails if any of them never happened. The mechanisms
are:

- write-recovery stall;
- mask filtering and mask bypass;
- LUT-row reuse;
- source-row re-open;
- two banks busy at once;
- counting up and counting down;
- accelerator broadcast to all banks;
- host read-back.

It runs in about half a minute of simulation time.

The testbenches fill LUTs and operands by writing straight into the DRAM model's array. The
hierarchical path is `dut.g_bank[b].u_bank.u_dram.mem[sa][row][mat][col]`.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/lama_pkg.sv rtl/*.sv tb/tb_lama_pch.sv --top-module tb_lama_pch
./obj_dir/Vtb_lama_pch
```

## Limits and departures

- The DRAM array is a behavioural model with no analog detail and no refresh. tFAW and tRRD are
  not enforced.
- The bank command set, the handshake, the exact cycle split inside a command and the bus
  priority are this design's own choices.
  - The published latency for 256 INT4 products is 583 ns; this design takes 644 ns.
  - The published INT8 command count is 148 per bank; this design issues 140.
- Batches must be a multiple of 32 operands.
- Counter layouts other than 6 bits are extrapolated. The counting direction follows the
  arithmetic, not the published sentence (see *Sign convention* above).
- One pseudo-channel is built. A 768-input layer needs more weight rows than one subarray's
  512, so the controller must switch `src_sa` between activations.
- Term 4, scaling, re-quantisation and the host side are not built.
