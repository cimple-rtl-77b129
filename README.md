# CIMple: a digital SRAM compute-in-memory accelerator for self-attention

Self-attention needs two different kinds of work. There are large INT8
matrix products (the Q/K/V projections, QK^T and A'V), and in between them
sits a softmax that is non-linear and normally wants floating point and a
divider. This design puts both next to one small digital compute-in-memory
(CIM) macro:

- **The CIM macro does the matrix products.** It has 32 kb of SRAM. Each
  bitcell's OAI gate does the 1-bit multiply, and adder trees sum the
  products of a column.
- **The softmax is split in two and stays in INT8.** Each score indexes an
  e^x look-up table, which gives the numerator; the numerators are summed
  into denominators as they appear. Only at the very end is a result divided
  by its denominator, and that division is a multiply by a value from a
  second, reciprocal table.

The numerators are written straight back into the CIM SRAM or into its input
buffer, so the A'V product can start while later scores are still being
computed. Nothing leaves the accelerator between QK^T and the normalised
output.

The RTL here is synthesizable SystemVerilog-2017 at the macro's real size:
32 columns × 2 blocks × 64 rows × 8 bit. It comes with a self-checking
testbench for every block and an end-to-end testbench. That testbench runs a
weight projection, an encoder attention head and a decoder attention step,
all at full size.

## Data path

```
 host / global buffer
   | ext_* (128b weights)      | xin_* (64b activations)     ^ score_* (4 x 8b)
   v                           v                             |
 write decoder --> CIM core <-- XIN buffer (16 x 64 x INT8)  |
   ^              32 columns, 2 blocks                       |
   |              | CIM OUT 4 x 23b / cycle                  |
   |              v                                          |
   |    direct --+-- intermediate ACC + buffer (64 x 4 x 32b) |
   |              v 4 x 32b                                  |
   |     quantization (linear | divide by softmax sum) -------+
   |              v 4 x 8b
   |     e^x LUT (4 x 256 x 8b) + denominator accumulators
   |              v
   +---- Reg (packs 128b CIM rows / 64b XIN words) ----> XIN buffer
```

Each command does one *operation*: a 64-element INT8 vector, taken from the
XIN buffer, is multiplied with one 64×32 weight block of the CIM. That gives
32 dot products, which leave the core four per cycle over 8 cycles. Per
operation, the command then decides:

- whether the results bypass the intermediate accumulator, or are stored in
  it, or are added to what it holds;
- how the results are quantized;
- whether they go through the e^x table;
- where the Reg writes them back.

## The CIM column

A column (`cim_partition`) holds 64 weights in each of its two blocks.
Every weight is INT8 and is stored as two nibbles.

**The OAI multiply.** The bitcells of block 0 and block 1 that sit in the
same row and bit position share one OAI gate:

    prod = ~((WB0 | RWLB0) & (WB1 | RWLB1))

- WB0 and WB1 are the inverted stored bits of the two cells.
- RWLB0 and RWLB1 are the active-low read word lines. Each one carries the
  inverted activation bit, gated by the block select (`xin_drive`).

When only one block's read line is active, the gate gives `weight_bit AND
activation_bit` for that block. It multiplies and picks the bank in one gate.

**Adder trees.** Per column, two 64-input adder trees sum the 4-bit products
of the high and the low nibble. Each gives 10 bits. The high-nibble tree is
signed, because weights are two's complement. The column result is
`(msb_sum << 4) + lsb_sum`, 15 bits.

**Bit-serial activations.** The activation is applied one bit plane per
cycle, MSB first. Behind each column, `shift_acc` computes
`acc = (acc << 1) + mac`. On the sign plane it starts with `acc = -mac`
instead, so activations are signed INT8 too. After 8 planes, the 23-bit
result is the exact signed dot product of 64 INT8 × INT8 values.

**Moving the results out.** The 32 results are captured in a hold register.
A 3-bit counter then steps four 32:8 multiplexers through them. At counter
value c, lane k carries column 4c+k. The hold register frees the
accumulators at once, so the next operation's planes can follow without a
gap, and the output keeps one beat per cycle.

**Weight writes.** A weight write (`write_decoder`) has an 8-bit address
WA = {block, row[5:0], group}. It writes 16 weights (128 bits) to row `row`
of one block, across columns 16·group … 16·group+15. Writes may overlap
compute. The host must not rewrite the block that is being read in the same
operation.

## Timing of one operation

A command is accepted in cycle t (`cmd_valid && cmd_ready`). `cmd_ready` is
the XIN buffer's ready, which is high when the buffer is idle or on its last
plane, so commands can be issued every 8 cycles, back to back.

| cycles          | what happens                                          |
|-----------------|-------------------------------------------------------|
| t+1 … t+8       | 8 bit planes, MSB first, applied to the chosen block  |
| t+9             | 32 results captured in the hold register              |
| t+10 … t+17     | CIM OUT: beat c carries columns 4c … 4c+3             |
| +1 cycle        | direct register or intermediate ACC (same latency)    |
| +2 cycles       | quantized beat on `score_*`                           |
| +3 cycles       | e^x LUT output, denominators updated                  |
| +4 cycles       | Reg writes a 128b CIM row or a 64b XIN word           |

The direct path is registered so that it has the same latency as the ACC
path. That way, a bypass beat and an accumulated beat never collide.

Reg write-backs have priority over the host write ports. In a cycle where the
Reg writes the CIM or the XIN buffer, `ext_wready` or `xin_wready` is low and
the host has to hold its write.

## Split softmax in fixed point

This is the part that needs the most care.

For one query row i and keys j the design computes

    out_i = sum_j e_ij · V_j / S_i,      e_ij = LUT[z_ij + 128],      S_i = sum_j e_ij

**Scores.** z_ij is the INT8 quantized score Q_i·K_j. The quantizer's linear
mode computes it as `sat8((x·mult + 2^(sh-1)) >>> sh)`, with `mult` and `sh`
set on the `q_mult` and `q_shift` ports.

**Numerators.** The e^x table is indexed by z + 128. This puts the largest
possible score (z_quant_max = 127) at the last entry, so entry a holds
about `127 · exp(s·(a − 255))`. The scale s is the score scale, so the table
carries the quantization scale of the scores. Subtracting the maximum keeps
every entry in 0…127, and that keeps the entries valid non-negative INT8
operands for the CIM. The table is writable (`lut_*` ports, loaded into all
four lanes at once), so the scale can change per layer.

**Denominators.** Each lane accumulates the numerators it produces into 8
slot registers (32 bits), one per counter value. A beat at counter value c
belongs to columns 4c+k, so the 32 slots × lanes are the 32 per-row sums of
an encoder tile. A separate total, over all slots and lanes, serves the
decoder mapping, where all 32 columns belong to one query. The `sm_first`
field of a command clears a slot before its first beat.

**Division.** This is a multiply, in the quantizer's `Q_SOFTNRM` mode:

1. Find p, the position of the leading one of S.
2. Take the next 8 bits below it as `idx`, so S ≈ 2^p · (256 + idx) / 256.
3. `recip_lut` holds M = round(2^23 / (256 + idx)), a 256 × 16 b table that
   is computed at elaboration.
4. q = sat8(round(x · M / 2^(15+p))), which is x / S to within 2^-9
   relative error from the table. S = 0 gives 0.

The input x is the A'V sum from the intermediate ACC, so q is the weighted
mean of the INT8 values V_j. It needs no rescaling.

The end-to-end test compares this path with a floating-point softmax on 32
queries × 64 keys. The largest deviation it found is 0.95 LSB of the INT8
output.

## Mapping attention onto the core

**Weight projection.** Weights stay in the SRAM, and token vectors stream
through the XIN buffer. A
128-long dot product is done as two operations on different XIN vectors: the
first with `acc_first`, the second adding and `acc_emit`. The quantized
results go out on `score_*`. They can also be written back as the next
operation's input (`DST_XIN`) or into the SRAM (`DST_CIM`).

**Encoder head: 32 queries × 64 keys per pass.**

1. Write Q^T into block 0: row d, column i holds Q[i][d].
2. Stream each key vector K_j. One operation gives the 32 scores of key j
   against all 32 queries. These are quantized, passed through the e^x
   table, accumulated into the per-row slots, and written by the Reg as row
   j of block 1.
3. Block 1 now holds the numerators transposed: row j, column i is e_ij.
4. Stream column d of V, i.e. the values V_j[d] for all j. This gives
   sum_j e_ij · V_j[d] for all 32 queries. The quantizer divides each one by
   its own slot.

For more than 64 keys, the ACC buffer adds the A'V partial sums of several
key tiles, and the slots keep summing as long as `sm_first` is not given
again. The ACC buffer holds the partial sums of 8 output dimensions for 32
queries, so the 64 output dimensions take 8 passes over the keys, and each
pass recomputes the scores. For 1024 tokens, one tile of 32 queries takes
9216 operations, which is 75,937 cycles including a short gap after each key
tile (its last numerator rows must land before A'V reads them). A
`tb_encoder_workload` run at that size matches the bit-exact model, and its
largest deviation from a floating-point softmax is 0.58 LSB.

**Decoder step.**

1. Put K^T of 32 cached keys in block 0 and V in block 1.
2. The query Q_n is the input. The 32 numerators are written back into the
   XIN buffer as a 64-byte vector: 32 values, the other half zero, chosen
   by `dst_half`.
3. Stream that vector against V, normalised by the total (`norm_total`).

**Encoder–decoder cross-attention** uses the same two flows: the first
(self-)attention layer's output is kept in the XIN buffer as the new Q, and
the encoder's K and V are written into the CIM.

Storing the numerators instead of V in the encoder mapping is a choice of
this implementation. The output beats deliver one key across 32 queries.
Storing V in the CIM and streaming A' rows would need a transpose that no
block provides. The hardware allows either target, because the Reg can write
the CIM or the XIN buffer.

## Command word (`cmd_t`)

| field        | meaning                                                        |
|--------------|----------------------------------------------------------------|
| `blk`        | SRAM block to compute with                                     |
| `xin_vec`    | XIN buffer vector to stream (16 vectors)                       |
| `use_acc`    | route CIM OUT through the intermediate ACC (else direct)       |
| `acc_first`  | store instead of add                                           |
| `acc_emit`   | pass the sums on to the quantizer                              |
| `acc_grp`    | ACC buffer group (8 rows of 4 × 32 b)                          |
| `qmode`      | `Q_LINEAR` or `Q_SOFTNRM`                                      |
| `norm_total` | divide by the total instead of the per-row slot                |
| `sm_en`      | send quantized beats through the e^x table                     |
| `sm_first`   | clear the slots before this operation's beats                  |
| `reg_src_sm` | Reg takes the table output (1) or the quantized value (0)      |
| `dst`        | `DST_NONE`, `DST_CIM` or `DST_XIN`                             |
| `dst_row`    | {block, row} for a CIM write-back (two 128 b halves = 32 bytes)|
| `dst_vec`    | XIN vector for an XIN write-back                               |
| `dst_half`   | XIN bytes 0–31 or 32–63                                        |

The command stays with its results along the pipeline, as a tag. Commands
that overlap in flight therefore never interfere.

## Where this departs from, or goes beyond, the published design

- **Bitcells.** The 8T standard-cell bitcells are modelled as flip-flops
  written on the clock edge.
- **Global buffer.** The 16 kb global-buffer SRAM is not included. Its side
  of the interface is the `ext_*`, `xin_*` and `score_*` ports.
- **Control.** Control is an explicit command per operation. The published
  design describes no controller.
- **Our own choices.** The following were not specified and were chosen
  here:
  - two's-complement weights and activations, with the sign plane
    subtracted;
  - the 4c+k output order;
  - the WA address map;
  - the XIN buffer depth (16 vectors) and its 64-bit write port;
  - the ACC buffer depth (64 rows);
  - the 8 softmax slots plus a total;
  - the reciprocal-table size and its leading-one indexing;
  - the quantization formulas;
  - the write-back priority;
  - all cycle timing.
- **Reg to input path.** The Reg's 64-bit output is written into the XIN
  buffer, and from there it streams as bit planes like any other input. It
  is not driven directly onto the read word lines. Because of this, a
  numerator vector can be reused, or combined with a zeroed half.
- **Quantized values in the Reg.** The Reg can also take the quantized value
  instead of the table output, for projection write-backs.
- **No clock target.** No frequency or power target is modelled.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against values it works out itself and prints
`TB_RESULT checks=N failures=M`:

- `tb_oai_mult`: exhaustive.
- `tb_write_decoder`: every address.
- `tb_adder_tree`: random vectors and extremes, signed and unsigned.
- `tb_shift_acc`: signed dot products.
- `tb_cim_partition`: weights written through the word lines.
- `tb_cim_core`: full size, including the 9-cycle result latency and
  back-to-back operations.
- `tb_xin_buffer`: plane order and ready timing.
- `tb_inter_acc`: store, add and emit.
- `tb_softmax_unit`: table lookup and slot/total sums.
- `tb_recip_lut`: every entry.
- `tb_quant_unit`: both modes.
- `tb_out_reg`: packing.

`tb_encoder_workload` runs one 32-query tile of a 1024-token, head-dimension-64
encoder head, and checks every score and every output.

`tb_decoder_workload` runs one decoder step: a query against 2048 cached
keys at head dimension 64, in 64 tiles of 32 keys. Each tile:

- writes K^T and V into the two blocks;
- streams the query;
- writes its numerators back into the XIN buffer;
- adds both halves of the A'V result in the intermediate ACC.

The output is normalised by the total over all 2048 keys. The step takes
19,368 cycles, mostly spent writing K and V, and its largest deviation from
a floating-point softmax is 0.50 LSB.

`tb_cimple_top` runs the three flows above at the default size, against a
bit-exact model. It counts 16 mechanisms:

- direct path;
- ACC store, ACC add, ACC emit;
- the linear, per-row softmax and total softmax quantizer modes;
- LUT use;
- CIM and XIN write-backs;
- both host stalls;
- use of both blocks;
- writes during compute;
- back-to-back operations.

A mechanism that never happens counts as a failure.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/cimple_pkg.sv tb/tb_cimple_top.sv \
              --top-module tb_cimple_top -Mdir obj_top -o sim
    ./obj_top/sim

Replace `tb_cimple_top` with any other testbench name to run that block. The
modules are found through `-Irtl` by file name, and each file holds one
module. The end-to-end test builds in about 20 s and runs in well under a
second.

The sizes are in `rtl/cimple_pkg.sv`:

- `N_PART`, `N_ROWS`, `LANES`: columns, rows and output lanes.
- `XIN_DEPTH`, `IBUF_DEPTH`: buffer depths.
- `LUT_DEPTH`: e^x table depth.

`cim_core` and `xin_buffer` also take `N_PART_P`/`N_ROWS_P` parameters for
smaller instances.
