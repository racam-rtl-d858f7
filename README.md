# RACAM: a bit-serial processing-in-DRAM device, in SystemVerilog

RACAM puts a small amount of logic beside every DRAM bank so that the
integer multiply-accumulates of ML inference run inside the memory. Every
column of a 1024-column block gets a 1-bit processing element (PE). Data are
stored *vertically*: bit i of an operand sits in the same column as its other
bits, in a different row. A row access therefore moves one bit of 1024
operands at once, and an n-bit operation takes O(n) or O(n²) one-bit steps
that run on all columns in SIMD fashion.

Earlier bit-serial in-DRAM designs reach their operand bits through DRAM rows
for every step. An n-bit multiply then needs O(n²) row activations, and those
dominate the run time. RACAM adds three things to each bank:

* a **locality buffer**, 17 rows × 1024 bits, placed between the sub-arrays
  and the PEs. It keeps the multiplicand and the live product bits, so each
  operand bit is read from DRAM once and each product bit is written once.
  That is O(n) row accesses instead of O(n²).
* a **popcount reduction unit** that sums a vertically stored value over all
  1024 columns of the bank. It takes one bit-slice per cycle.
* **broadcasting units** that copy one 64-bit host word into several banks
  and into several column groups of a row. The host therefore sends
  replicated activations once.

One controller per device drives all banks in lockstep. The host reaches it
with a few extra DRAM commands.

This RTL describes one DRAM device with all of the above. It does not include
the DRAM cell arrays: each bank has a request/acknowledge port to its
sub-arrays. The testbenches use a behavioural model for that side.

## Organisation of a device

```
 host CA beats ──► pim_cmd_decoder ──► pim_fsm ──── uop (one per cycle) ───┐
                   (PIM mode, bank_bc,  (one per device)                    │
                    col_bc registers)       ▲ bank_busy                     ▼
 host data ──► bank_broadcast ──► 16 × racam_bank ─────────────────────────────
               (Bank Select)        ├ column_broadcast (Column Select) → write row + mask
                                    ├ locality_buffer 17 × 1024
                                    ├ pe_array (1024 × bitserial_pe)
                                    ├ popcount_reduction (popcount + 32-bit accumulator)
                                    └ sa_* port ⇄ sub-arrays (outside this RTL)
```

| Quantity | Value | Where it is set |
|---|---|---|
| banks per device | 16 | `NUM_BANKS` |
| PEs per bank = buffer columns = block width | 1024 | `COLS` |
| locality buffer rows | 17 (full reuse up to 8 × 8 bit) | `LB_ROWS` |
| data bus word / broadcast grain | 64 bits | `racam_pkg::DATA_W` |
| row address | 18 bits `{sub-array[6:0], row[6:0], block[3:0]}` | `racam_pkg` |
| accumulator | 32 bits | `racam_pkg::ACC_W` |

A bank holds 128 sub-arrays × 128 rows × 16K columns. The RTL treats each
16K-bit row as 16 blocks of 1024 columns, the width of the PE row, so one
row address names one 1024-bit block row. One device therefore addresses
16 × 2^18 × 1024 bits = 512 MiB. The evaluated system has 8 channels × 32
ranks × 8 devices of it, which gives 1 TB. This RTL contains only one device.

**Operand layout.** An n-bit operand "at address X" has bit i at
`bit_addr(X, i) = X + i·2^11`. That is the same row and block, but in the
next sub-array. Successive bits of one operand are therefore never in the
same sub-array. This is what lets DRAM that supports sub-array-level
parallelism overlap the activation of one bit's row with the access to the
previous bit's row. The overlap itself belongs to the DRAM side. Here the
FSM waits for each row access to finish (see *Limits*).

## The reuse-aware multiplication

This is the heart of the design. It is implemented in `pim_fsm.sv`, and the
datapath step is in `bitserial_pe.sv`.

**The PE.** Each PE has one carry register and three inputs, A, B and C:

* B = 1: out = C ⊕ A ⊕ carry, and the carry register takes the carry-out
  (a full add).
* B = 0: out = C, and the carry register keeps its value.
* Sel = 1: out is the product A·B, from the AND gate (PGEN).

The same element therefore does bit-serial addition (B held at 1) and the
shift-and-add step of multiplication (B = the current multiplier bit). With
B = 0 the step leaves the partial product unchanged, as it should.

**Buffer rows for an n-bit multiply** (2n + 1 rows; n = 8 uses all 17):

| rows | contents |
|---|---|
| 0 … n−1 | multiplicand op1, bits 0 … n−1, loaded once |
| n | the current multiplier bit b_j |
| n+1 … 2n | a ring of n live product bits: product bit m lives in row n+1+(m mod n) |

**Schedule.** Load op1 (n row reads). Then for each multiplier bit
j = 0 … n−1:

1. Read b_j into row n, and clear the carries.
2. Run n+1 PE steps, k = 0 … n. Step k adds a_k into product bit j+k, with
   B = b_j and C = the current product bit. For j = 0 no partial product
   exists yet, so step k uses the product output a_k·b_0 (Sel = 1). Step
   k = n adds only the carry (A = 0, C = 0), so its result is the new bit
   j+n.
3. After step k = 0, product bit j is final. It is written to DRAM right
   away, and its ring row is then free for bit j+n, which step k = n writes.

After the last j, product bits n … 2n−1 are still in the ring and are written
out. In total: **2n row reads, 2n row writes, n(n+1) PE steps.** With the
DRAM rows walked for every step instead, there would be about n² reads.

Worked example for int4 (n = 4, 9 rows), for one column. After step j the
ring holds product bits j+1 … j+4, and bit j has been written:

| step | reads | PE steps update | written to DRAM |
|---|---|---|---|
| j=0 | a0…a3, b0 | bits 0…3 = a·b0 (product), bit 4 = 0 | bit 0 |
| j=1 | b1 | bits 1…5 += a·b1 | bit 1 |
| j=2 | b2 | bits 2…6 += a·b2 | bit 2 |
| j=3 | b3 | bits 3…7 += a·b3 | bit 3 |
| end | – | – | bits 4…7 |

**Fused multiply-reduce (`pim_mul_red`).** The product bits are not written
to DRAM. The final product bit-slice from the PEs goes straight into the
popcount unit in the same cycle, with weight 2^m. Bits j are added as they
become final, and bits n … 2n−1 are added at the end. The 32-bit sum over all
1024 columns is then written *horizontally*, into columns 31:0 of the
destination row with a write mask, because one row write holds all of it.
The cost is 2n reads, 1 write and 2n popcount steps. With 1024 columns of
8 × 8-bit products the largest sum is 1024 · 255² < 2^27.

## The other commands

* **`pim_add`** (n bits): for i = 0 … n−1, read op1[i] and op2[i], do one PE
  step with B = 1, and write bit i. A last step on zeros writes the carry as
  bit n. The cost is 2n reads, n+1 writes and n+1 PE steps.
* **`pim_add_parallel`**: read row src1 and add its columns 31:0, as one
  int32, into the cleared accumulator through the reduction unit's
  multiplexer. Then read src2 and add it. Write the sum to columns 31:0 of
  dst. This adds up reduction results from different passes.

## Command interface

PIM commands reuse unused DRAM command encodings and send their fields over
the address bus in several beats. Here a beat is a 14-bit word on
`ca`/`ca_valid`/`ca_ready`.

```
beat 0   ca[13:8] opcode   ca[7:4] prec   ca[3] bank_bc   ca[2] col_bc   ca[1:0] 0
beat 1-4 (compute commands only) {dst, src1, src2} = 54 bits, right-aligned in 56, MSB beat first
```

| command | opcode | what it does here |
|---|---|---|
| `broadcast_enable` | 000000 | load bank_bc and col_bc from beat 0 |
| `broadcast_disable` | 000001 | clear both broadcast bits |
| `pim_enable` | 000010 | enter PIM mode |
| `pim_disable` | 000011 | leave PIM mode; results are read with normal reads |
| `pim_add` | 010000 | dst = src1 + src2, prec bits, result prec+1 bits |
| `pim_mul` | 010001 | dst = src1 · src2, prec bits each, 2·prec-bit result |
| `pim_mul_red` | 010010 | dst[31:0] = Σ over columns of src1 · src2 |
| `pim_add_parallel` | 010011 | dst[31:0] = src1[31:0] + src2[31:0] |

The mode commands act one cycle after their beat. A compute command is sent
to the FSM, and while it waits there `ca_ready` is low. The design drops a
command and pulses `err` for a compute command outside PIM mode, for an
unknown opcode, for prec = 0, and for a multiply whose 2·prec + 1 rows do not
fit the buffer (prec > 8). `done` pulses when a compute command finishes.

Normal reads and writes (`host_req` … `host_ack`, 64-bit data, bank, row
address, column group) go through the same FSM and bank ports. A host access
waits while a compute command runs, and a command that is already waiting
goes first.

## Micro-operations and stalls

The FSM sends one `bank_uop_t` (see `racam_pkg.sv`) to all enabled banks
every cycle. One micro-op can start a sub-array access, perform a PE step,
and perform a reduction step at the same time. The FSM only combines the
ones the schedule needs.

A sub-array access starts with a one-cycle `sa_start`. Each bank latches
the address and write data and holds `sa_req` until its sub-array answers
with `sa_ack`. The FSM waits until no enabled bank is busy, so the slowest
bank sets the pace. That is the stall mechanism: a bank whose sub-array is
slow holds up the whole device. Read data go into the locality-buffer row
named in the micro-op.

## Broadcasting

* **Bank level** (`bank_broadcast`): a host write goes to the addressed bank.
  With `bank_bc` set it goes to every bank whose bit is set in the 16-bit
  Bank Select mask. The 64-bit word crosses the data bus once.
* **Column level** (`column_broadcast`, one per bank): the 64-bit word is
  repeated across the 1024-bit row. The write mask enables the addressed
  64-bit group, or, with `col_bc` set, every group in the 16-bit Column
  Select mask.

Both can be on at once, so one bus word can fill up to 16 groups in each of
16 banks.

## The popcount reduction unit

`popcount_reduction` counts the ones of a 1024-bit slice (11 bits), shifts
the count left by the slice's bit position, and adds it to a 32-bit
accumulator: `sum += popcount(slice_i) << i`. It takes one slice per cycle.
A multiplexer in front of the adder can pass a 32-bit word instead, for
`pim_add_parallel`.

## Where this RTL departs from the paper, and why

* **Shift position in the reduction.** The paper's schematic shifts the
  accumulated partial sum left, which means most-significant slice first.
  Its text gives the formula sum += popcount(slice_i)·2^i. This RTL follows
  the formula: it shifts each count by its bit position. The reason is that
  the fused multiply-reduce produces product bits least-significant first.
* **Widths in the reduction unit.** The schematic prints a 10-bit popcount
  output for 1024 columns, but counting to 1024 needs 11 bits. It also
  mentions a 16-bit partial sum, while the int32 addition needs 32. The RTL
  uses 11 and 32.
* **Fused command name.** The text once calls the fused command
  `pim_mul_add`. The command table calls it `pim_mul_red`, and the RTL uses
  the table's name.
* **Broadcast figure size.** The broadcast figure is drawn for 64
  sub-arrays. The evaluated configuration, with 128, is the one used here.
* **Choices of this design, where the paper is silent:**
  - the 14-bit command beat and its field layout;
  - the 18-bit row address;
  - the req/ack sub-array port;
  - the buffer's port set (five read ports and two write ports, so one PE
    step runs per cycle);
  - the ring use of the product rows;
  - the row allocation of `pim_add`;
  - putting reduction results in columns 31:0;
  - dropping illegal commands with an error pulse;
  - host accesses waiting for a running command;
  - **unsigned** arithmetic (the paper does not say how signed int8 is
    handled).

## Limits

* Only one device is built. Channels, ranks, the 8 devices per rank, the
  host CPU and its memory controller, and the mapping software that picks
  data layouts are not part of the RTL.
* The DRAM arrays, sense amplifiers and global bitlines are outside the RTL.
  Their timing (activate, precharge) is whatever the sub-array port's
  acknowledge delay is. The FSM issues one row access at a time and waits
  for it. Overlapping activations across sub-arrays would need that
  sub-array side, and the bit layout above is prepared for it.
* The locality buffer is a flip-flop array. The paper sizes it as SRAM.

## Files

* `rtl/racam_pkg.sv`: geometry constants, opcodes, and the command and
  micro-op structs.
* `rtl/bitserial_pe.sv` and `rtl/pe_array.sv`: the PE and the 1024-wide
  array of PEs.
* `rtl/locality_buffer.sv`: the 17 × 1024 buffer.
* `rtl/popcount.sv` and `rtl/popcount_reduction.sv`: the reduction unit.
* `rtl/bank_broadcast.sv` and `rtl/column_broadcast.sv`: the broadcast
  units.
* `rtl/pim_cmd_decoder.sv` and `rtl/pim_fsm.sv`: command intake and the
  device controller.
* `rtl/racam_bank.sv`: one bank's peripherals.
* `rtl/racam_device.sv`: the top level, one device.
* `tb/dram_array_model.sv`: a behavioural sub-array model. It is sparse,
  adds random latency, and counts the reads and writes of each bank.
* `tb/tb_<block>.sv`: self-checking testbenches. Each prints
  `TB_RESULT checks=N failures=M`.
  - `tb_racam_device` runs 4 banks × 128 columns.
  - `tb_racam_device_full` runs the device at its default size: 16 banks ×
    1024 columns.
  - Both run every command on random operands in every column of every
    bank: the full-size test at int8, the reduced one at int8 and then five
    more rounds at random precisions. They check the results against plain
    arithmetic, and check the row-access counts. They also count each
    mechanism: dropped commands, over-wide multiplies, both broadcasts,
    mode switches, host accesses stalled by a command, and sub-array stalls.
    A mechanism that never happens is counted as a failure.
  - `tb_racam_gemm` runs a slice of an int8 matrix multiplication on a
    full-size device: Y = X · W with X of 2 × 2048 and W of 2048 × 32. The
    K dimension is spread over the columns of two 1024-column blocks, and
    the N dimension over the banks, two outputs each. W is placed in the
    banks ahead of time. X is written by the host with bank broadcast on:
    512 bus writes reach all 16 banks, 8192 row writes in total. Each
    output is formed by two `pim_mul_red` commands and one
    `pim_add_parallel`, run in all banks at once. The results are read
    back with normal reads and compared with dot products computed in the
    testbench. With one activation row instead of two, the same flow is a
    GEMV.

## Simulating

Verilator 5 with timing support is enough. For example:

```
verilator --binary --timing --assert rtl/racam_pkg.sv rtl/*.sv \
    tb/dram_array_model.sv tb/tb_racam_device.sv --top-module tb_racam_device
./obj_dir/Vtb_racam_device +verilator+rand+reset+2
```

Put the package first. The other testbenches build the same way; only the
device testbenches need `dram_array_model.sv`. The full-size device
testbench takes a few minutes to compile and under a second to run. The GEMM
testbench compiles in about the same time and runs for a few seconds: about
4100 cycles for the broadcast writes and 1700 cycles for the 12 compute
commands, with a sub-array latency of 1 to 3 cycles.
`verilator --lint-only -Wall` reports some style warnings that were left in
place on purpose:

* an unconnected popcount output;
* two unused bits of the operand beats;
* the unused carry outputs;
* `rst_n` used both as an asynchronous reset and in assertion `disable iff`
  clauses.

None of them is a circuit problem.
