# ProactivePIM in SystemVerilog: a two-level PIM-HBM stack for weight-sharing embedding layers

Recommendation models shrink their embedding tables with weight-sharing: QR-trick and TT-Rec
replace each table with a few small *subtables*. An embedding is rebuilt from one vector per
subtable. QR-trick multiplies two vectors element by element. TT-Rec runs a small chain of
matrix products. This rebuild is called collect-and-reconstruct (CnR). The rebuilt embeddings
are then pooled by a weighted sum, gather-and-reduce (GnR). Weight-sharing saves capacity but
reads more memory. On a near-memory processor it also needs both operands of a CnR in the same
memory node.

The design here puts two levels of processing into an HBM2 stack:

* a **bank-group PIM** (bg-PIM) next to each bank group. It runs CnR and GnR on vectors read
  from its bank group. Its 40 KB SRAM cache holds the one small "hot" subtable of the table
  being processed;
* a **base-die PIM** (bd-PIM) per channel. It adds up the four bank groups' partial sums into
  the final sum that goes back to the host.

Two ideas remove the extra traffic.

1. **Duplication.** The smallest subtables are copied into every bank group: QR's R subtable,
   and TT-Rec's first and third subtables. Every CnR then finds both operands locally. A host
   write with the top physical-address bit set is spread to all bank groups by a small
   extension in the memory controller.
2. **Table-wise prefetch.** The cache holds one table's hot subtable only. The next table's
   subtable is loaded while the previous table's partial sums are being sent out. The load
   uses the bank-group bus and the send uses the channel bus, so the two overlap.

Timeline for tables A, B, C:

```
transfer  :            [A]               [B]               [C]
prefetch  : [A]        [B]               [C]
CnR/GnR   :    [ A ........ ]   [ B ........ ]   [ C ........ ]
```

## Hierarchy

```
proactive_pim_top                      one HBM2 stack
 ├─ pim_extension                      memory-controller side: routing, duplication
 └─ g_ch[0..7]                         8 channels
     ├─ bd_pim                         base-die PIM
     │   ├─ pim_inst_fifo              PIM-Inst buffer
     │   ├─ rr_arbiter                 channel I/O arbitration
     │   └─ mac_array                  final-sum adder (64 lanes)
     └─ g_bg[0..3].bg_pim              bank-group PIM
         ├─ pim_inst_fifo              PIM-Inst buffer
         ├─ bg_pim_decoder             delay, MMReg, cache-hit decision
         ├─ sram_cache                 40 KB (1280 x 32 B)
         ├─ psum_regfile               one partial sum per batchTag
         └─ mac_array                  64 MAC lanes
```

`ppim_pkg` holds the shared types. The bank-group DRAM arrays are outside the top, on its
`bk_*` ports: one read port per bank-group PIM, and a write port driven by the extension. The
final sums leave on the per-channel `fs_*` streams. These streams stand for the DQ path through
the PHY, which is not modelled. The testbenches use `tb/bank_group_model.sv` as the DRAM: a
read returns its data after tCL = 14 cycles.

## The PIM instruction

The field names and widths are those of the published format, 84 bits, most significant
first:

| opcode | targetAddr | weight | nRD | delay | batchTag | subId | transfer |
|---|---|---|---|---|---|---|---|
| 3 | 34 | 32 | 4 | 6 | 2 | 2 | 1 |

How the fields are read here:

* **targetAddr.** The start of the vector. Bits [4:0] are the byte in a 32-byte beat, [26:5]
  the beat inside the bank group, [28:27] the bank group and [31:29] the channel. This address
  map is this design's choice.
* **nRD.** A vector is nRD+1 beats of 32 bytes, so 32 B to 512 B. That is 8 to 128 32-bit
  words.
* **weight.** The pooling weight of GnR. It is a 32-bit integer, because all data here is
  32-bit two's complement with wrap-around (see *Departures*).
* **delay.** The bg-PIM decodes an instruction no sooner than `delay` cycles after it entered
  the bg-PIM's buffer.
* **batchTag.** Picks one of four partial-sum registers, so four batch items can be open at
  once.
* **subId.** The subtable the vector belongs to. A vector is served from the cache when its
  subId is the cached subtable's ID.
* **transfer.** After the instruction, the partial sum of its batchTag is complete: send it to
  the bd-PIM.

Opcode values (this design's own; the paper gives only a few of the meanings):

| code | name | effect in the bg-PIM |
|---|---|---|
| 0 | NOP | nothing; with transfer = 1 it is the *transfer command* |
| 1 | LDIN | input register ← vector |
| 2 | MULACC | psum[tag] += weight × (input register ⊙ vector): QR-trick CnR and GnR |
| 3 | ACC | psum[tag] += weight × vector: plain GnR |
| 4 | GEMV | inter += inreg[k] × vector, then k++: one row step of a skinny GEMM |
| 5 | STC | cache ← intermediate buffer; clears the buffer and k |
| 6 | GEMVACC | psum[tag] += weight × inreg[k] × vector, then k++ |
| 7 | MMWR | MMReg ← {start = targetAddr, length = weight[15:0] beats, subtable = subId} |

## Bank-group PIM

`bg_pim` runs one instruction at a time:

* **FETCH.** Read nRD+1 beats, either from the cache (one beat per cycle) or from the bank
  group (one read every tCCD_L = 2 cycles, data back whenever `bk_rd_valid` says).
* **EXEC.** One pass of the 64 MAC lanes per 64 words: one pass for vectors up to 256 B, two
  passes for 512 B. The result goes to the input register, the partial sum of the batchTag, or
  the intermediate buffer.
* **STC.** Write the intermediate buffer into the cache, one beat per cycle.
* **DONE.** If the transfer bit is set, copy the partial sum into the transfer buffer, clear
  it, and start the pending prefetch.

Two engines run beside this sequence.

* The **transfer engine** streams the copied partial sum over channel I/O (`xfer_*`,
  valid/ready).
* The **prefetch engine** reads the MMReg range from the bank group into the cache, starting
  at cache line 0.

Because they use different buses, a table's partial sums go out while the next table's
subtable comes in. Any instruction that needs the bank or the cache waits while a prefetch
runs. The host can instead poll `mm_valid` (MMReg "prefetch done"), as the paper has it. The
interlock only makes an early instruction safe.

**MMReg and the cache window.** MMWR writes MMReg, but only when the engine is idle and no
prefetch runs. The prefetch does not start at once. It starts with the next transfer, so it
overlaps that transfer. An MMWR with its own transfer bit set starts the prefetch immediately,
which is how the first table is loaded.

While `mm_valid` is set, a vector hits the cache when both hold:

* its subId equals the MMReg subtable;
* its beat address lies within 1280 beats of the MMReg start.

It is then read from cache line `address − start`. The lines past the prefetched length are
free scratch space for STC. Matching on the subtable ID alone is the paper's idea: the
controller never has to track individual cached addresses. The window rule is this design's.

**QR-trick.** Each lookup is two instructions:

```
LDIN   Q-row        (subId 0, from the bank)
MULACC R-row, w     (subId of R, from the cache)
```

The transfer command ends the batch item.

**TT-Rec, two-stage skinny GEMM.** The first-subtable row (cached) is multiplied by the
second-subtable matrix (R rows of R words in the bank). The result is then multiplied by the
third subtable:

```
LDIN    first-subtable row            (cache)     inreg ← f,  k = 0
GEMV    row r of 2nd-subtable slice   × R         inter += f[r] · S2[r]
STC     scratch line                  (cache)     cache ← inter
LDIN    scratch line                  (cache)     inreg ← inter, k = 0
GEMVACC row r of 3rd subtable, w      × R         psum  += w · inter[r] · S3[r]
NOP     transfer
```

The intermediate buffer is 64 words (0.25 KB). This is the paper's size for a rank-32, 512 B
embedding, so a GEMV row can be at most 8 beats. The third subtable must be stored one rank
index per row, so that the second stage is again a row-step product.

## Base-die PIM

`bd_pim` has two paths.

* **Instruction path.** Instructions arrive with a 4-bit bank-group mask and wait in the
  buffer. The head goes to all masked bank groups in the same cycle, once every one of them
  has room.
* **Partial-sum path.** The four bank groups share the channel I/O. A round-robin arbiter
  accepts one beat per cycle, which is tCCD_S = 1. The paper gives transfer time as
  batch × vlen × bank groups × tCCD_S, and one beat per cycle matches it. Each vector lands in
  its bank group's buffer.

When all four buffers are full, the MAC adds them, one buffer per cycle per 64-word pass. The
buffers are then freed and the final sum streams out on `fs_*` with its batchTag. An assertion
checks that the four buffers carry the same tag and length.

## PIM extension

`pim_extension` sits in the memory controller. The top physical-address bit sits above the
34-bit targetAddr. It arrives as `req_dup` beside an instruction, and as bit 34 of `hw_addr`
for a host write. The extension handles three cases.

* **Normal instruction (top address bit 0).** It goes to the channel and bank group in its
  address. That node is remembered.
* **Instruction on a duplicated subtable (top bit 1).** It goes to the remembered node, and
  its address's channel and bank-group bits are rewritten to match. So the R row of a
  QR-trick CnR lands where the Q row was just loaded. Before a CnR that starts with a
  duplicated vector (TT-Rec's first LDIN), send a NOP (transfer = 0) addressed to the target
  node to select it.
* **Broadcasts.** MMWR and the transfer command go to every bank group of every channel.

Host writes (`hw_*`) with the top bit set are repeated to all 32 bank groups, one per cycle,
by changing the channel and bank-group bits. `hw_ready` rises with the last copy.

## Timing at a glance

* Bank-group reads are one 32 B beat per tCCD_L = 2 cycles.
* A prefetch of n beats takes (n−1)·2 + tCL + about 3 cycles from the MMWR (or transfer)
  until `mm_valid`.
* Cache reads are one beat per cycle with one cycle of latency.
* Channel I/O carries one beat per cycle per channel. Four 512 B partial sums therefore take
  64 cycles.
* A bg-PIM instruction costs its fetch time plus 1–2 MAC passes plus one cycle. Instructions
  are not overlapped with each other.

## Departures from the paper and what is not built

* **Number format.** The paper does not give one. All arithmetic here is 32-bit integer,
  modulo 2³². A floating-point MAC would replace `mac_array`'s lanes.
* **Opcode set.** The encodings, the `k` row counter, the cache window and the node-select
  NOP are this design's own. So are the handshakes, FIFO depths (8), the address map and the
  final-sum rule (one vector from each of the four bank groups).
* **Bank-group size.** The address map gives 2²² beats × 32 B = 128 MB per bank group. The
  paper's HBM2 has 256 MB. One more beat-address bit would cover it; the channel field would
  then move up.
* **subId.** The paper also says subId marks "CnR termination". That use is not described
  further and is not built. subId serves only the cache hit.
* **DIMM data.** The paper passes DIMM-resident subembeddings through the extension inside
  PIM instructions. That is not built: the instruction format has no field to carry them.
* **Where the cache check happens.** The paper has the PIM extension check the subtable ID
  before it issues a cached access. Here the bg-PIM decoder compares the subId with its own
  MMReg. The extension then needs no per-table state at all. The timing seen from the host is
  the same, since the instruction format is unchanged.
* **MMReg holds start and length**, not start and end address. The two are equivalent.
* **Numbers in the paper that disagree.** The paper gives the R subtable at hash collision 60
  as 0.12 MB in one place and 30 KB in another. 60 rows × 512 B is 30 KB, so that figure is
  used. The cache is given as 40 KB in the architecture and evaluation sections, but as
  100 KB in the discussion. The default `CACHE_BEATS = 1280` is the 40 KB figure.
* **Not designed here.** The host, the PIM kernel software (profiling, choosing what to
  duplicate), the standard memory controller, the DIMMs, the DRAM arrays, the PHY and the
  TSVs. The DRAM model is behavioural and ignores activation, precharge and refresh.
* **Cache size.** The 40 KB cache holds a full QR R subtable at hash collision 60 with 512 B
  rows (60 × 16 beats = 960 beats). It does not hold a whole rank-16 TT-Rec first subtable of
  1600 rows (100 KB). For that case the paper moves the coldest rows to the DIMM before
  inference.

## How far it can be trusted

What is checked:

* Every block has its own self-checking testbench, with a reference model written
  independently of the RTL. The data in the bank-group models comes from a closed-form
  formula, so every expected sum can be computed without keeping a copy of the arrays.
* For each block, a copy with one deliberate bug was run against its testbench, and the
  testbench failed every time. For example, a MAC that adds instead of multiplying, or a
  bd-PIM that skips bank group 3.
* Concurrent assertions check:
  * one prefetch at a time;
  * a GEMV row no longer than the intermediate buffer;
  * no unexpected bank data;
  * a stable transfer beat under back-pressure;
  * equal tags across the four partial sums being reduced.
* The whole stack is built with Verilator lint and parsed by a second SystemVerilog front end.

What is not checked:

* Timing closure and area. The 1280 × 256-bit cache is written as a plain array. A real chip
  would use an SRAM macro.
* Interaction with DRAM refresh, row activation, or any memory-controller timing beyond a
  fixed read latency.
* The performance numbers of the paper. The testbenches count events such as overlap cycles
  and cache hits, but they do not reproduce the paper's speedups.

## Simulating

Every testbench checks itself and ends with `TB_RESULT checks=N failures=M`. Build one with
plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_bg_pim \
    rtl/ppim_pkg.sv tb/tb_util_pkg.sv tb/tb_bg_pim.sv
./obj_dir/Vtb_bg_pim
```

The testbenches:

| testbench | block | what it checks |
|---|---|---|
| `tb_pim_inst_fifo` | `pim_inst_fifo` | random traffic against a queue, full and empty flags |
| `tb_rr_arbiter` | `rr_arbiter` | one-hot grants, rotation order, no requester waits more than 3 |
| `tb_mac_array` | `mac_array` | all modes on random operands |
| `tb_sram_cache` | `sram_cache` | read-back with one-cycle latency |
| `tb_psum_regfile` | `psum_regfile` | slice access, take-and-clear |
| `tb_bg_pim_decoder` | `bg_pim_decoder` | exact delay, MMReg, hit rules, prefetch hand-over |
| `tb_bg_pim` | `bg_pim` | QR, GnR and TT-Rec sequences, prefetch time, overlap, stall, tCCD_L spacing |
| `tb_bd_pim` | `bd_pim` | masked forwarding, final sums, one beat per cycle |
| `tb_pim_extension` | `pim_extension` | routing, re-routing, broadcasts, 32-way duplicated writes |
| `tb_proactive_pim_top` | `proactive_pim_top` | end-to-end at full size |

`tb_proactive_pim_top` runs the whole stack at its default size, 8 channels × 4 bank groups.
It duplicates the small subtables from the host, then runs a QR-trick table with two batch
items. The next table's prefetch overlaps the transfers. A TT-Rec two-stage GEMM follows on
one node. Every final sum is checked against a reference model, and it counts each mechanism
(duplicated writes, re-routed instructions, broadcasts, cache hits, prefetches, overlap,
stalls, reductions). It needs `tb/bank_group_model.sv`; `-Itb` finds it.

Parameters worth changing are `NUM_CH` and `CACHE_BEATS` of `proactive_pim_top`, `T_CCD_L`
of `bg_pim`, and `LANES` of `mac_array`. `MAC_LANES` and the vector sizes in `ppim_pkg` are
shared constants.
