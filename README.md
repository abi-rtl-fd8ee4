# ABI near-memory compute for a GPU: SystemVerilog model

A GPU already keeps most of a neural network's or a solver's operands in three
big on-chip memories: the vector register file (VRF), the L1 and the L2. In
the normal flow, each multiply-accumulate moves an operand out of one of those
memories, through the ALUs and back. This design puts a small, reconfigurable
datapath next to every memory sub-bank instead.

Each sub-bank multiplies the word it reads by a local operand register (REG).
A central adder then reduces the bank results, and a scaler and a thresholding
stage with a cheap softmax finish the job. The whole sequence (load, multiply,
accumulate, reduce, scale, threshold) runs as one instruction, VMAC.

The same datapath serves five workloads. Each one uses a different set of
stages, switched by a handful of programmable registers:

- convolutional networks (CNN)
- Ising-model optimisation
- Jacobi-style linear-system solving (LP)
- graph convolutional networks (GCN)
- transformer attention (LLM)

A register called NRF_M picks the memory level that computes:

| Level | Memory | VMAC latency |
|---|---|---|
| NRF | register file | 2 cycles |
| NM | L1 | 4 cycles |
| NM | L2 | 10 cycles |

So a problem can be worked on next to the smallest memory that holds it.

This RTL covers the ABI additions only: the near-memory/near-register-file
logic, its registers, its instruction decode, and the scan interface used on
the test chip. The GPU around it is not built. That includes the dispatcher,
wavefront scheduling, the baseline ALUs, the cache controllers and the
load/store queues. Where they would connect, the top exposes an instruction
port and a memory-fill instruction.

## Block map

```
abi_top
 ├─ scan_if                     SE/SI/UPD/SO scan access (test chip)
 ├─ abi_cu  × NUM_CU (8)        one slice per compute unit
 │   ├─ abi_decode              slice select, PR/REG/fill/VMAC decode, stall
 │   ├─ prog_regs               programmable registers (PRs)
 │   ├─ nm_unit  (RF, RD_LAT 1)  near-register-file logic, 16 × 8192 words
 │   └─ nm_unit  (L1, RD_LAT 3)  near-L1 logic,            16 × 4096 words
 └─ abi_cu  (L2_SLICE = 1)      the L2 slice
     └─ nm_unit  (L2, RD_LAT 9)  near-L2 logic,            16 × 131072 words

nm_unit
 ├─ nm_bank × 16               sub-bank array (16-bit words)
 ├─ rce × 16                   reconfigurable compute engine, one per bank
 ├─ sparsity_detect × 16       zero detector per bank (SpEn)
 ├─ REG × 16                   bank operand registers
 ├─ central_adder              reduction over the banks (CA)
 ├─ scaler                     division by REG'' (S)
 ├─ threshold                  ReLU / compare / softmax (TH)
 │   └─ lwsm                   light-weight softmax
 └─ sparsity_monitor           switches sparsity detection off when useless
```

`abi_pkg` holds the shared types: the PR record `pr_t`, the PR addresses, the
memory levels and the 72-bit instruction `inst_t`.

## The reconfigurable compute engine (`rce`)

Every sub-bank has one engine. It computes `a × q`, where `a` is the 16-bit word
read from the bank and `q` is the bank's REG. It does this as an explicit
shift-and-add multiplier whose stages can each be bypassed. Stages St1 to St3
can also be silenced by sparsity.

| Stage | Work | Bypassed (Se[X] = 1) |
|---|---|---|
| St0 | partial products `a AND q[k]` for each REG bit k | the word `a` passes unmultiplied (a plain load, used for sums) |
| St1 | shift product k left by k; products with k ≥ BIT_WID are masked to zero | only bit 0's product passes, unshifted (single-bit operands such as spins) |
| St2 | bit-serial accumulator (used only in bit-serial mode) | passes St1 |
| St3 | accumulates over successive VMACs (dot products longer than one row) | passes St2 |
| St4 | multiplies by REG'' | passes St3 |

Details:

- **Stage selects.** The select for stage X is `Se[X] = St[X]Dis | OP[X]DIS`.
  `St[X]Dis` is a programmed register bit; `OP[X]DIS` is a field of the
  instruction. Bit 5 of the same vectors bypasses the scaler.
- **Signed REG.** REG is read as a two's-complement number BIT_WID bits wide.
  The top bit's product is subtracted, so −1 operands (all ones) work at any
  width. For example, at BIT_WID = 2, REG = 2'b11 means −1.
- **Bit-parallel (BP) mode.** St1 adds all BIT_WID shifted products in one
  cycle.
- **Bit-serial (BS) mode.** One REG bit is taken per cycle and St2 adds them up,
  so a VMAC needs BIT_WID compute cycles. The paper serialises 4-bit groups;
  here the grain is one bit.
- **Sparsity gating.** When the bank's sparsity enable SpEn is high, St1..St3
  produce zero and their registers hold. SpEn is raised when the bank word or
  the REG is zero.
- **St3 accumulation.** St3 is loaded at the end of each VMAC. The
  instruction's `acc_clr` bit starts a new sum; without it the sum carries on
  from the previous VMAC.

## One VMAC, cycle by cycle (`nm_unit`)

A VMAC names one word address. All 16 banks read that address at once.

| Phase | Cycles | What happens |
|---|---|---|
| WAIT | RD_LAT (1 / 3 / 9 for RF / L1 / L2) | the bank reads return |
| MAC | 1 in BP, BIT_WID in BS | RCEs compute; St3 is committed on the last cycle |
| RED | NB (16), element-serial only | CA adds one bank per cycle, other inputs forced to zero |

- **Element-parallel (EP) reduction.** The CA adds all 16 banks in the MAC
  cycle itself, so there is no RED phase.
- **After the reduction.** The sum passes through the optional subtraction
  `bias − sum` (LP), the scaler and TH. The result is registered and `done`
  pulses for one cycle.
- **Total latency**, from the edge that takes `start` to the edge that raises
  `done`, is `RD_LAT + (BS ? BIT_WID : 1) + (ES ? NB : 0)`. Bit-parallel,
  element-parallel VMACs therefore take 2 / 4 / 10 cycles at RF / L1 / L2.
- **Write-back.** If the VMAC requested write-back, the result is also
  written into the REG of one sub-bank of the same unit, saturated to the
  16-bit signed range. The write happens on the same edge as `done`.
  This is how a result feeds the next operation: in a GCN, the combination
  results become the REG operands of the aggregation.
- **Register-file write-back.** In a compute-unit slice, a VMAC can also ask
  for its result to be written into a word of a VRF sub-bank. It does not
  matter whether the RF or the L1 unit computed it. The slice writes the
  saturated result through the RF unit's fill port in the cycle `done` is
  high, and reports itself busy in that cycle, so a fill from the decoder
  waits one cycle instead of colliding. The L2 slice has no register file and
  ignores this request.
- **One operation at a time.** A unit handles one operation at a time. While
  it is busy, the decoder stalls the next instruction for that slice.
- **BIT_ELSER.** The mode register's bit 0 selects bit-serial and bit 1 selects
  element-serial.

## Central adder, scaler and thresholding

- **CA (`central_adder`).** A 16-input adder tree, or a one-bank-per-cycle
  accumulator in element-serial mode. With `CA_SUB` set, the output is
  `CA_BIAS − sum`. This is the `b_i − Σ a_ij x_j` step of a Jacobi update.
- **S (`scaler`).** A signed division by REG'' that truncates toward zero. LP
  uses it for `1/a_ii`, GCN for the neighbour count and attention for the
  embedding scale. A divisor of 0, or Se5 set, passes the value through.
  REG'' is also St4's multiplier: the one register serves both.
- **TH (`threshold`).** A chain of two multiplexers:
  - `relu = S[MSB] ? 0 : S`
  - `v = TH_ACT ? relu : S`
  - `out = SM_ACT ? LWSM(v) : v`

  A `gt0` flag (value > 0) gives the comparison used by the Ising update.

## Light-weight softmax (`lwsm`)

Softmax needs `e^x / Σ e^x`. LWSM approximates `e^x` by `1 + x`, which is close
for small x. It then replaces the division by a difference of bit positions:

1. `In1 = 1 + x`, clipped to 0..255 (8-bit datapath).
2. `UpdGcnt = CurrGcnt + In1`, the running sum of all `In1` (saturating).
3. Find the position of the leading '1' of `In1` and of the reference sum. The
   search runs from the LSB up and keeps the last '1' it meets.
4. `DIFF = pos(sum) − pos(In1)` approximates `log2(sum / In1)`. The output is
   `0x80 >> DIFF`, a power-of-two fraction with 0x80 standing for 1.0.

Example: In1 = 21 and a sum of 128 + 21 = 149 give positions 4 and 7,
DIFF = 3 and output 0x10 (1/8).

A softmax over a vector takes two passes:

- **First pass** (PR `ACT` bit 3, `sm_acc`, set). Each output is added to the
  sum, and the updated sum is used as the reference.
- **Second pass** (`sm_acc` clear). The stored total is used, so every element
  is divided by the same total.
- **Clearing.** A write to PR `SM_CLR` clears the sum.

## Sparsity detection and the monitor

- **Detector (`sparsity_detect`).** For each bank, SpEn = (word == 0 || REG == 0),
  enabled by `SP_ACT` and by the monitor's `Mon_En`.
- **Monitor (`sparsity_monitor`).**
  - Counts compute cycles in which no bank raised SpEn. The count restarts at 0
    whenever one does.
  - If the count reaches the window (PR `SP_WIN` + 1, 512 cycles by default, up
    to 65536), the monitor drops `Mon_En` and pulses `sp_off`, which clears
    `SP_ACT`.
  - Dense data thus stops paying for detection.
  - Writing the `ACT` PR re-arms the monitor.

## Programmable registers and instructions

Each slice has one PR set (`prog_regs`), written with `OP_PRWR`:

| addr | PR | contents |
|---|---|---|
| 0 | ST_DIS | St[X]Dis, bits 0..4 stages, bit 5 scaler |
| 1 | ACT | bit0 TH_ACT, bit1 SP_ACT, bit2 SM_ACT, bit3 softmax accumulate |
| 2 | NRF_M | 0 RF, 1 L1, 2 L2 |
| 3 | BIT_ELSER | bit0 bit-serial, bit1 element-serial |
| 4 | BIT_WID | 1..16 (writes are clipped) |
| 5 | REG'' | St4 multiplier / scaler divisor |
| 6 | SP_WIN | monitor window − 1 |
| 7 | CA_SUB | CA output = bias − sum |
| 8 | CA_BIAS | bias |
| 9 | SM_CLR | write strobe: clear the softmax sum |

Reset values: BIT_WID 8, REG'' 1, SP_WIN 511, NRF_M = RF, everything else 0.

The instruction `inst_t` has these fields, MSB first:

| Field | Bits |
|---|---|
| op | 4 |
| cu | 4 |
| lvl | 2 |
| bank | 5 |
| op_dis | 6 |
| acc_clr | 1 |
| addr | 18 |
| data | 32 |

The opcodes are:

| Opcode | Value | Action |
|---|---|---|
| NOP | 0 | nothing |
| PRWR | 1 | write PR `addr[3:0]` with `data` |
| REGWR | 2 | write REG of sub-bank `bank` at level `lvl` |
| MEMWR | 3 | write a word into a sub-bank at level `lvl`; this is the fill path that the GPU's load/store unit would drive |
| VMAC | 4 | run one operation at word `addr` with the extra disables `op_dis`; if `data[0]` is set, also write the result into the REG of sub-bank `bank`; if `data[1]` is set, also write it into the VRF, sub-bank `bank`, word `data[31:14]` |

- **Slice field.** `cu` selects the slice: 0..7 are the compute units and 8 is
  the L2 slice.
- **Which unit runs.** In a compute-unit slice, NRF_M = L1 runs on the L1 unit
  and anything else on the RF unit. The L2 slice always uses its L2 unit.
- **Ready and stall.** An instruction is accepted (`inst_ready`) unless its
  slice is busy. In that case `stall` is raised and the instruction must be
  held.

## Scan interface (`scan_if`)

On the test chip the design is driven serially.

- **Shifting in.** While SE = 1, SI shifts an instruction word in, MSB first.
- **Handing over.** A UPD pulse passes the word to the bus. If its slice is
  busy, the word waits until it is accepted. A scanned word has priority over
  the parallel port.
- **Result word.** Every finished result is loaded into a 33-bit out register
  `{gt0, result}`.
- **Shifting out.** While SE = 1, the out register shifts out on SO, MSB
  first, at the same time as the next word shifts in.
- **UPD as a strobe.** UPD is sampled with the clock as a strobe; it is not a
  separate clock.

## How the workloads map

| Workload | memory holds | REG holds | stages off | notes |
|---|---|---|---|---|
| CNN | weights | activations | S | TH = ReLU; softmax for the label |
| Ising | couplings J | spins (±1) | St1, S | `gt0` gives the new spin sign |
| LP (Jacobi) | coefficients | variables x | TH | CA_SUB with bias b_i; S divides by a_ii |
| GCN | weights / adjacency | features, then the written-back combination results | — | S divides by neighbour count; TH softmax |
| LLM attention | K, V | Q row | — | S divides by embedding scale; softmax on Q·K |

The testbenches reproduce the small published examples:

- A 3×3 convolution of −1 values gives 8.
- An Ising node on a King's graph with 8 neighbours gives −8.
- A Jacobi update of X0 with REG'' = 2 gives 4.
- A 1×8 by 8×1 GCN/attention product scaled by 4 gives 2.
- A 4×5 Q·K attention table and its product with a 3-column V.
- A 3×3 Jacobi iteration.
- A small GCN layer. Two combination results are written back into REGs and
  then aggregated with an adjacency row.

**Capacity at the default sizes:**

| Memory | Words |
|---|---|
| RF, per CU | 131,072 |
| L1, per CU | 65,536 |
| L2 | 2,097,152 |
| Total | 3.67 M |

What fits at those sizes:

- **Ising.** A King's graph needs 8 couplings per spin, so about 450 K spins
  fit.
- **LP.** A dense 1000-constraint system needs 1 M words, which fits in L2.
- **Too large.** BERT-base (about 110 M weights) and the dense GCN feature
  matrices of Cora or Pubmed do not fit. They would have to be streamed from
  DRAM by the baseline GPU, which is not modelled.

## Sizes and their origin

| Parameter | Default | Origin |
|---|---|---|
| operand width | 16 | INT1..INT16 compute is specified |
| NUM_CU | 8 | specified |
| NB (banks per unit) | 16 | 128 extra INT8 operations per cycle over 8 CUs |
| RF_DEPTH | 8192 | 256 KB VRF / 16 banks / 2 bytes (taken per CU) |
| L1_DEPTH | 4096 | 128 KB L1 / 16 / 2 |
| L2_DEPTH | 131072 | 4 MB L2 / 16 / 2 |
| read latency RF / L1 / L2 | 1 / 3 / 9 | chosen so VMAC takes the specified 2 and 4–10 cycles |
| LWSM width | 8 | the softmax example uses 8-bit values |
| accumulator | 32 | own choice |

## Where this model departs from the described chip

- **No pipelining.** One operation is in flight per unit. The chip's claim of
  128 INT8 operations per cycle assumes a new VMAC every cycle, which would
  need a pipelined sequencer.
- **Bit-serial grain.** Bit-serial mode handles one REG bit per cycle, not
  4-bit groups.
- **Logic instead of custom circuits.** The transistor-level circuits (the LWSM
  adder/find-first and the transmission-gate sparsity counter) are replaced by
  ordinary logic with the same function. Their area and speed benefits are not
  modelled.
- **Write-back targets.** Results can be written back into a REG or a
  register-file word. Writing them into the L1 or L2 arrays is not modelled,
  and neither is the ALU side of the register-file write port.
- **Plain arrays for memory.** The memories are plain arrays with fixed read
  latencies. There are no caches, tags, bank conflicts or ALU read ports.
- **Own encodings.** The instruction encoding, PR addresses, BIT_ELSER bit
  meanings, reset values, the CA subtract form (`bias − sum`) and the
  two-pass softmax control are this design's own. The source describes them
  only by name.
- **Stage disabled for Ising.** The description names different stages in
  different places: St2/St4 once, and St1 elsewhere, including its stage
  table. This model follows the St1 version: spins use bit 0 only, unshifted.
- **REG'' does two jobs.** REG'' is both the St4 multiplier and the scaler
  divisor, as the examples need. Disable St4 when only scaling is wanted.
- **L1 norm not built.** The L1-norm mode of TH is not built: only ReLU,
  pass/compare and softmax are.
- **Results share one bus.** All slices share one result port. If two
  slices finish in the same cycle, the higher-numbered one is shown and the
  other result is lost, so software must not let that happen.

## Files and simulation

Each `rtl/<name>.sv` holds one module or the package `abi_pkg`, and each
`tb/tb_<name>.sv` is a self-checking testbench. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

- `tb_abi_top` runs every mechanism end to end, at 2 CUs and 64-word banks. It
  covers all levels, BP/BS, EP/ES, St4, stalls, the monitor shut-off, softmax,
  result write-back into REGs and the register file, and the scan path, and counts each mechanism.
- `tb_abi_top_full` runs the top at its full default sizes (8 CUs, full
  memories). It drives a CNN example through the scan chain, an L1 VMAC at the
  last L1 address and an L2 VMAC at the last L2 address, and checks their
  latencies.

Example with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_abi_top \
    rtl/abi_pkg.sv rtl/*.sv tb/tb_abi_top.sv
./obj_dir/Vtb_abi_top
```

List `abi_pkg.sv` first. The full-size top takes about a minute to build,
because of the 58 Mbit of memory arrays. It then runs in well under a second.
