# A flexible tensor-contraction engine for training tensorized networks

Tensorized neural networks replace each large weight matrix by a chain of
small core tensors (tensor-train, tensor-ring, Tucker-like and similar
formats). Training such a network turns every layer into a sequence of
contractions whose operands are small, oddly shaped and keep changing shape
from one step to the next. The forward pass, the activation gradient and each
core's weight gradient all need the same cores in different orientations. A
fixed systolic array with fixed wiring to fixed buffers runs these badly. Much
of the time goes into re-laying-out data, or the array is mostly idle.

This design attacks the problem at three places:

* **Transposable compute.** Each contraction engine (CE) is a 4x4 systolic
  array. Its stationary operand can be loaded from the top or from the right,
  which is the same as loading it transposed. It can also run
  output-stationary, where both operands stream in and the result stays in
  place. So a contraction can use weight-stationary (WS), input-stationary
  (IS) or output-stationary (OS) order, and neither operand needs an explicit
  transpose in memory.
* **Flexible operand delivery.** Between the 16 memory banks and the 16 CEs
  sit two transposable butterfly networks, one per operand. Each is a
  transpose level followed by log2(16) = 4 butterfly levels of 2:1 muxes. It
  can deliver any bank to any CE (unicast), copy a bank to a group of CEs
  (multicast, broadcast), or exchange bank (r,c) with bank (c,r).
* **Flexible result collection.** A reduction network of adder switches
  either keeps the 16 CE results apart, sums them in groups (spatial
  reduction), or routes them to other accumulation banks. A transpose level at
  its output completes the picture.

Around the contraction unit sit these blocks:
* a multi-banked unified memory with ping-pong halves, so DRAM traffic
  overlaps compute;
* a banked accumulation unit that adds psums across tiles;
* a 64-lane vector unit for element-wise work;
* an address generator;
* a controller that sequences everything from host instructions.

All arithmetic is BF16.

## Block map

```
 host ──instr──► fetta_controller ──loop counters──► fetta_addr_gen
                   │  bank enables, rotation,              │ IA / IB rows,
                   │  network selects, CE control          │ accumulation rows
                   ▼                                       ▼
 DRAM load ──► fetta_unified_mem (16 banks x 4 BF16, two ping-pong halves)
                   │ 16 bank words per cycle
                   ▼
               fetta_tcu
                 ├─ fetta_dist_net (IA)   ─┐
                 ├─ fetta_dist_net (IB)   ─┼─► 16 x fetta_ce (4x4 fetta_pe)
                 └─ fetta_red_net (8 fetta_adder_switch per level, 4 levels)
                   │ 16 psum words
                   ▼
               fetta_accum_unit (16 banks, add or overwrite)
                   │ one row of 64 psums
                   ▼
               fetta_vector_unit (64 lanes) ──► unified memory or DRAM store
```

| Module | Size at default parameters |
|---|---|
| `fetta_top` | whole accelerator |
| `fetta_tcu` | 16 CEs, 2 distribution networks, 1 reduction network |
| `fetta_ce` | 4x4 PEs, IA skew, OS drain sequencing |
| `fetta_pe` | BF16 multiplier and adder, 2 IB and 2 psum registers |
| `fetta_dist_net` | 16 in, 16 out, 5 levels of 16 muxes, combinational |
| `fetta_red_net` | 4 levels of 8 adder switches, registered, output transpose |
| `fetta_adder_switch` | Pass / Swap / Add-Left / Add-Right on 4 BF16 values |
| `fetta_unified_mem` | 16 banks x 4096 rows x 64 bit = 512 KB, ping-pong |
| `fetta_accum_unit` | 16 banks x 1024 rows x 64 bit = 128 KB, 4 adders per bank |
| `fetta_sram_bank` | one 1R1W bank with synchronous read |
| `fetta_vector_unit` | 64 BF16 lanes |
| `fetta_addr_gen` | affine read and write address streams |
| `fetta_controller` | decoder, state machine, loop counters, network control |
| `fetta_pkg` | sizes, instruction and control types, BF16 arithmetic |

The host and the off-chip LPDDR4 memory are outside the RTL. The top has an
instruction port in place of the host. In place of DRAM it has a load port,
which writes the unified-memory half not in use, and a store stream from the
vector unit.

## The contraction engine

A CE is a 4x4 grid of processing elements (PEs). Row r gets one IA element
per cycle. The IA word is delayed by r cycles before row r sees it, the usual
systolic skew. Psums run down the columns and leave at the bottom.

Each PE holds two IB registers and two psum registers. A few muxes give them
different meanings per dataflow.

**WS and IS (stationary IB).** The IB tile is shifted in, one word per cycle
for 4 cycles, with `ib_load`. It goes into the register not in use (the
shadow). It enters from one of two sides:
* north: word k ends in row 3-k;
* east: word k ends in column k, with element r of the word in row r.

So east loading is a transposed load. `ib_swap` makes the shadow register the
active one. It travels down the rows with the same skew as IA, so every row
swaps exactly between the last IA word of the old tile and the first of the
new one. Each valid IA vector x gives, 4 cycles later at the bottom,
`psum[c] = sum_r x[r] * B[r][c]`.

WS and IS use the same hardware. They differ only in which tensor the
software places on the IB side.

**Output stationary.** IA element `A[r][k]` enters row r and IB element
`B[k][c]` enters column c at the top. IB moves one row down per cycle. Row r
takes IA with an extra cycle of delay, so each operand meets its partner in
every PE. Every PE adds into its own register:
* `first` clears the register;
* `last` copies the finished sum into the second (drain) register.

The drain registers then shift down the columns, one row per cycle. The tile
leaves the CE bottom row first, as rows 3, 2, 1, 0, flagged by `psum_row`.
Meanwhile the next tile already accumulates. So an OS tile needs a reduction
length of at least 4.

### Why a stationary tile takes at least 7 cycles

The next tile's 4 IB words go into the shadow registers while the current
tile runs. A shadow register in row r becomes free only once that row has
swapped, r cycles after the swap was issued. The controller therefore loads
the next tile's words at cycles 3..6 of the current tile and swaps on its last
cycle. A tile with fewer than 7 IA vectors is padded with stall cycles. The
`stall` output reports them. With 7 or more IA vectors per tile the array
never waits.

## The distribution network

Inputs are the 16 bank words, outputs go to the 16 CEs. Every level has 16
2:1 muxes. Each mux keeps the value at its own position or takes the value of
one partner position:

1. the transpose level, whose partner of position {r,c} is {c,r} (position
   seen as a 4x4 grid index);
2. butterfly levels for index bits 3, 2, 1, 0, whose partner of position i is
   `i ^ (1 << bit)`.

With all selects 0 the network is the identity. Setting the bit-b select on
outputs whose bit b is 1 copies the low half of each pair to the high half.
Applied at every level, this gives a broadcast.

The controller does not recompute select vectors when the data moves to
other banks. Instead the network XORs bit b of a start-bank index into every
select of level b. One stored pattern, for example "broadcast", then works for
any source bank, and rotating the bank index steps through bank groups.

## The reduction network

The reduction network has four registered levels. At level l, switch k joins
the two positions that differ only in bit l:

* level 0: neighbours;
* level 1: distance 2;
* level 2: distance 4;
* level 3: distance 8.

Each switch takes a 2-bit mode:

| mode | left output | right output |
|---|---|---|
| Pass | a | b |
| Swap | b | a |
| Add-Left | a + b | empty |
| Add-Right | empty | a + b |

The direction bit of every level-l switch mode is XORed with bit l of the
instruction's reduction bank index. This turns Pass into Swap and Add-Left
into Add-Right, so a reduction pattern written for banks 0.. lands on the
banks offset (by XOR) by that index. It is the same trick the distribution
networks use.

A valid bit travels with every word, so "empty" is explicit. An add with one
valid input forwards that input. At the output a combinational transpose
level can exchange positions {r,c} and {c,r}. The latency is 4 cycles. Only
lanes whose valid bit is set (and whose bank is enabled by the instruction's
`acc_bank_en`) are written to the accumulation unit.

## Memories

**Unified memory.** 16 banks, 4 BF16 values per row, 4096 rows per bank,
512 KB in all. Each bank is split into two halves by the top address bit:
* the compute side reads and writes the half selected by `pp_sel`;
* the DRAM load port writes the other half.

An `OP_SWAP` instruction flips `pp_sel`. A compute write wins over a DRAM
write to the same bank in the same cycle; `dram_ready` reports which banks
took the DRAM write. Reads are synchronous with one cycle of latency.

**Accumulation unit.** 16 banks of 1024 rows of 4 psums, 128 KB in all, with
4 BF16 adders per bank. Each incoming word is either stored or added to the
row (read-modify-write over two cycles). A word written in the previous cycle
is forwarded, so the same row can be hit back to back. Reads for the vector
unit are served only in cycles without incoming psums.

## Controller and instructions

The host writes one `instr_t` (see `fetta_pkg`) at a time with a
`instr_valid`/`instr_ready` handshake. `done` pulses when the instruction
ends.

* **`OP_CONTRACT`** runs `n_tiles` tiles of `n_inner` steps in WS, IS or OS
  order. An instruction also sets:
  * the IA and IB bank masks and start-bank indices;
  * both networks' selects;
  * the reduction modes, bank index and transpose selects;
  * the accumulation bank mask;
  * whether to accumulate;
  * base addresses and per-tile strides for IA, IB and the accumulation rows.

  With `rotate_ia` set, the IA bank mask is rotated left by `bank_stride` at
  every tile boundary, and the IA start-bank index grows by `bank_stride`.
  Successive tiles then read successive bank groups through an unchanged
  routing pattern. When all tiles write the same accumulation rows (stride
  0), the tiles after the first accumulate.
* **`OP_VECTOR`** reads `n_inner` accumulation rows and the matching
  unified-memory rows (the second operand). It applies one vector operation
  and writes the result to the unified memory or streams it to DRAM:
  * PASS;
  * ReLU;
  * ReLU backward (a where b > 0);
  * scale;
  * `s*a + b` (an SGD-style update).
* **`OP_SWAP`** flips the ping-pong halves.

Timing of a contraction:
* stationary: 4 preload cycles, then `max(n_inner, 7)` cycles per tile;
* OS: `max(n_inner, 4)` cycles per tile;
* after the last tile, the controller waits until the address generator has
  counted every psum word (memory, CE, reduction-network and
  accumulation latency) and then 2 more cycles for the last write.

Memory reads take a cycle, so the CE control word and the IA start-bank index
are registered. They reach the TCU together with the bank data.

## Number format

Operands, products, psums and accumulations are all BF16. The multiplier
forms the exact 8x8-bit significand product. The adder keeps 3 guard bits
and a sticky bit while aligning. Both then truncate toward zero:
* denormals are flushed to zero;
* an exponent overflow saturates to the largest finite value;
* NaN and infinity are never produced.

Small integers are therefore computed exactly. The testbenches rely on this
to check results bit-exactly against integer arithmetic.

## Where this RTL departs from, or fills in, the accelerator description

* The source description gives the block structure and the PE, CE, network
  and controller organisation. It also gives the sizes: 16 CEs of 4x4, 16
  banks, 4 elements per row, 512 KB unified memory, 128 KB accumulation, 64
  vector lanes, BF16, 1 GHz. It does not give widths, encodings, the
  instruction format, rounding, pipeline depths or the vector-unit operation
  set. All of those are choices made here.
* The rounding mode is truncation. The psums stay in BF16; no wider
  accumulator is used.
* The ping-pong buffer is the two halves of each bank, not separate banks.
* The reduction network has a register after every level. The distribution
  network is combinational.
* Only the IA operand rotates banks at tile boundaries. The reduction network
  has no per-tile reconfiguration: its modes and bank index are fixed for one
  instruction.
* The contraction-sequence search is not hardware: it decides which
  instructions the host issues. The same holds for choosing the
  decomposition format and the dataflow, and for fusing the
  forward/backward steps.
* The off-chip DRAM and its controller are represented only by the two
  streaming ports.
* No timing closure at 1 GHz was attempted. The BF16 multiply-add in every
  PE is a single combinational path.

## Verification

Every module has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. The data are small
integers, so every BF16 result is exact. Expected values come from integer
models in the testbench, not from the RTL's arithmetic.

* `tb_fetta_pkg`: BF16 multiply and add against IEEE double arithmetic.
* `tb_fetta_pe`: stationary load, swap, double buffering, MAC and bypass;
  OS accumulation, hand-off and drain.
* `tb_fetta_ce`: follows the controller's schedule and checks against
  matrix products for north and east loading and for OS. Several tiles run
  back to back.
* `tb_fetta_dist_net`: identity, transpose, broadcast from every bank via the
  start index, multicast, and random selects against a reference walk.
* `tb_fetta_adder_switch`, `tb_fetta_red_net`: all modes. The reduction
  network is pipelined against a reference model.
* `tb_fetta_tcu`: random routing in both networks and random reduction modes
  on the whole unit; OS drain with `psum_row`.
* `tb_fetta_sram_bank`, `tb_fetta_unified_mem`, `tb_fetta_accum_unit`:
  reference copies of the memories, the ping-pong separation, write priority,
  and back-to-back accumulation.
* `tb_fetta_vector_unit`, `tb_fetta_addr_gen`, `tb_fetta_controller`: every
  operation, the address formulas, and per-instruction counts of control
  events including bank rotation.
* `tb_fetta_top`: the whole accelerator at its default size. It runs a WS
  contraction, an OS contraction with IB broadcast and reduction-network
  adds, and an IS contraction with east loading, stalls, bank rotation and
  the output transpose. It then runs vector instructions: PASS, ReLU, AXPY to
  DRAM and to memory, and ReLU backward. DRAM loads run during compute. It
  counts every mechanism and fails if any never happened. It also checks the
  cycle count of one contraction against the schedule above.

To run one with verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/fetta_pkg.sv tb/tb_util_pkg.sv $(ls rtl/*.sv | grep -v fetta_pkg) \
    tb/tb_fetta_top.sv --top-module tb_fetta_top
./obj_dir/Vtb_fetta_top
```

The package goes first; the unit testbenches are run the same way with their
own name as top module. The full-size end-to-end test takes a few seconds of
simulation after a build of a few minutes.
