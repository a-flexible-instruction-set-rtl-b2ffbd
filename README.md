# MTE vector unit: matrix tiles in long vector registers

This is synthesizable SystemVerilog for a long-vector unit that runs matrix multiplications
(GEMMs) through the Matrix Tile Extension (MTE), a small matrix instruction set added to a
RISC-V-style vector ISA. Matrix ISAs usually add dedicated tile registers of a fixed shape. MTE
does not. It reads an ordinary vector register as a small 2-D tile, and a CSR sets the tile's
shape at run time. The same registers, lanes and FPUs therefore serve both vector code and
matrix code. Software asks for the tile size it wants, and the hardware grants the largest
size its register geometry can hold. Each tile multiply becomes a short sequence of vector
FMAs that the existing lanes already know how to run.

The default parameters are the main configuration of the MTE proposal:
- 8192-bit vector registers (VLEN);
- 512-bit tile rows (RLEN);
- 32 registers;
- one vector unit of 64 lanes, each with a 32-bit FPU (a 2048-bit datapath).

In fp32 this gives tiles of up to 16×16. A 16×16×16 tile multiply takes 64 cycles.

## 1. A register as a tile

A register of VLEN bits is read as `VLEN/RLEN` rows of `RLEN` bits. With 32-bit elements that
is 16 rows of 16 elements. Tile element (r, c) sits in register element `r*COLS + c`, where
`COLS = RLEN/SEW`. Elements beyond the active rows or columns are inactive. They are either left
untouched (undisturbed) or may be overwritten; this design writes zero (agnostic).

```
register element:  0 .. 15 | 16 .. 31 | ... | 240 .. 255      (VLEN 8192, SEW 32)
tile row:              0   |     1    | ... |     15
```

A GEMM `C += A·B` is cut into tiles. C is `tm × tn`, A is `tm × tk` and B is `tk × tn`.
The shape lives in a 64-bit CSR (`mte_csr_t` in `mte_pkg`):

| bits  | field  | meaning                                          |
|-------|--------|--------------------------------------------------|
| 11:0  | tm     | rows of A and C                                  |
| 23:12 | tn     | columns of B and C                               |
| 35:24 | tk     | columns of A, rows of B                          |
| 39:36 | ttypei | element type of A and B: [1:0] SEW 8/16/32/64, [2] column policy, [3] row policy (1 = agnostic) |
| 43:40 | ttypeo | element type of C, same layout                   |
| 55:44 | rlenb  | RLEN in bytes, read-only                         |
| 63:56 | —      | reserved                                         |

The field widths come from the MTE definition. Their order inside the word is this design's
choice.

`tssm`, `tssn` and `tssk` each request one dimension. They return `min(request, limit)`, where
the limit comes from the register geometry. With `M = VLEN/RLEN`:

- uniform precision (SEW_i = SEW_o): `M`, `N = RLEN/SEW`, `K = min(M, N)`
- widening (SEW_o = 2·SEW_i): `M`, `N = min(M, RLEN/SEW_o)`, `K = RLEN/SEW_i`

At the default size this gives 16×16×16 for fp32, and 16×16×32 for 16-bit inputs with a
32-bit result. The 3-bit element-type immediate of `tss` is encoded here as SEW_i in [1:0] and
"widening" in [2]. A loop over a matrix of any size therefore needs no knowledge of the
hardware: each call to `tss*` returns how far the loop may step.

## 2. Instructions handled

Instructions arrive already decoded, as an `mte_instr_t` struct, one per valid/ready handshake.
No binary encoding is defined.

| op                        | what it does                                                |
|---------------------------|-------------------------------------------------------------|
| `OP_TSSM/TSSN/TSSK`       | set a tile dimension; the granted size is the response      |
| `OP_CSRW`                 | write the whole CSR except rlenb; responds with the old value |
| `OP_VSETVL`               | vl = min(rs1, VLEN/32)                                      |
| `OP_TL` (tile A/B/C/Bᵀ, `trans`) | tile load from `rs1`, row stride `rs2` bytes; `trans` = transposed load |
| `OP_TSC` (`trans`)        | store the C tile held in vd                                 |
| `OP_TMUL` / `OP_TFMUL`    | integer / fp32 tile multiply-accumulate vd += vs1 · vs2      |
| `OP_TVMASK`               | vd = mask of the active elements of an A, B, C or Bᵀ tile, bounded by rs1 |
| `OP_VBCAST`               | vd[e] = scalar, over vl                                     |
| `OP_VMUL_VX`, `OP_VFMUL_VF`, `OP_VMACC_VX`, `OP_VFMACC_VF` | vector × scalar (and accumulate), over vl |

Any vector instruction, and any tile multiply, can be masked by `v0` (`vm = 1`). These are the
vector instructions that a tiled SGEMM kernel needs around the tile operations:
- `tvmask` builds a mask of the C tile;
- `vbcast` zeroes the accumulator;
- `vfmul.vf` / `vfmacc.vf` apply C = α·AB + β·C.

## 3. How a tile multiply runs on the lanes

This is the core of the design.

**Element placement.** Register element `e` lives in lane `e % NLANES`, in slot `e / NLANES` of
that lane's register file slice. Each register therefore has `SLOTS = VLEN/(32·NLANES)` slots
per lane: 4 at the default size. One step of an instruction handles one slot of every lane. A
16-element tile row (512 bits) covers 16 lanes, so one step covers `NLANES/COLS = 4` tile rows.

**Decomposition.** `tmul vd, vs1, vs2` (C += A·B) is split into `tk` micro-instructions called
cvfma. Micro-instruction `k` performs the rank-1 update `C[r, c] += A[r, k] · B[k, c]` on every
active element of C. It walks the first `tm` tile rows in `STEPS = ceil(tm·COLS/NLANES)` steps.
In step `s`, lane `l` owns C element `e = s·NLANES + l`, with `row = e / COLS` and
`col = e % COLS`. It needs:

- `c`: its own C element, read from vd at slot `s` (lane-local);
- `a = A[row, k]`: register element `row·COLS + k`. That element is in the same step and slot,
  in lane `l − col + k`. The lane interconnect routes it from that lane's vs1 operand buffer.
- `b = B[k, col]`: register element `k·COLS + col`. That element is in slot `k·COLS / NLANES`
  and lane `(k·COLS) % NLANES + col`. The slot is the same for every step of the
  micro-instruction. When a row is exactly as wide as the lane count, this operand is
  lane-local.

The enable of each lane combines three conditions:
- the length bound: `e < tm·COLS`;
- the implicit column mask: `col < tn`;
- with `vm`, bit `e` of `v0`. Every lane reads its word of v0, and the interconnect picks bit
  `e % 32` from word `e / 32`.

Disabled elements keep their old value, so partial tiles and software masks cost nothing extra.

**Pipeline.** Each micro-op goes through three stages. There are no bypasses.

```
 R  read vd, vs1, vs2 and v0 slots into the lane's operand buffers
 E  lane interconnect picks a, b; FPU (fp32 FMA) or ALU (int mul/mac/move) -> write-back buffer
 W  write-back buffer -> register file slice
```

A C element written in W is read again by the next cvfma. The steps of one cvfma must
therefore span at least 3 cycles. When a tile has so few rows that `STEPS < 3`, the sequencer
inserts bubbles (reported on `ev_stall`). After each instruction one drain cycle passes before
the next instruction is accepted. Consequently no later instruction can read a register that is
still in flight.

**Timing.** From acceptance to the next ready, a tile multiply takes
`tk · max(STEPS, 3) + 2` cycles. At the default size a 16×16×16 fp32 multiply is
16 cvfma × 4 steps = 64 issue cycles. That is 4096 FMAs on 64 lanes, one per lane per cycle,
and it matches the 64-cycle latency the MTE evaluation assumes for this configuration.
A load of a tile takes:
- one memory request per tile row;
- then `SLOTS` cycles to write the assembled register image into the lanes.

A store reads the register in `SLOTS` cycles and then issues one request per row.

## 4. Tile loads and stores

A tile in memory is a set of rows. Each row is at most RLEN bits of consecutive bytes, and
rows are `stride` bytes apart (the BLAS leading dimension, in bytes). The load/store unit
(`mte_tile_lsu`) works as follows:

- **Requests.** It issues one RLEN-bit request per tile row, with byte enables on stores. It
  assembles the whole register image in a VLEN-bit buffer.
- **Transposed access** (`trans`). Memory row `i` goes to register column `i`. A column-major
  A or C can then be used without a reshuffle in memory.
- **Zero stride.** This is a row broadcast, or a column broadcast when transposed. One memory
  request is made, and its row is copied to every tile row (`ev_bcast`).
- **Inactive elements.** Loads follow the policy bits: undisturbed leaves the register
  element alone, agnostic writes zero. Stores write only the bytes of active elements. Memory
  padding between rows is never touched.

The memory port is a plain request/response pair:
- requests follow a valid/ready handshake;
- every request gets exactly one response, in order.

A cache or memory system can be attached directly. The testbenches use a behavioural memory
with random back-pressure.

## 5. Modules

| file | role |
|---|---|
| `mte_pkg.sv`      | constants, CSR struct, instruction and micro-op structs, enums |
| `mte_vpu.sv`      | top: wires everything below; registers the execute-stage control |
| `mte_csr.sv`      | CSR, tss granting, vl register |
| `mte_seq.sv`      | sequencer: one instruction at a time → micro-ops (cvfma decomposition, bubbles, load/store phases) |
| `mte_lane.sv`     | one lane: register file slice (32 regs × SLOTS × 32 bit), vd/vs1/vs2/v0 operand buffers, FPU, ALU, write-back buffer |
| `fp32_fma.sv`     | fused multiply-add, single rounding, round to nearest even |
| `mte_lane_xbar.sv`| lane interconnect: cvfma operand routing and enables; vector-scalar, broadcast and image modes |
| `mte_tvmask.sv`   | mask generator for A/B/C/Bᵀ tile shapes |
| `mte_tile_lsu.sv` | tile loads/stores, transposition, broadcast, policies |

Top-level ports of `mte_vpu`:
- `in_valid/in_ready/in_instr`: one decoded instruction per handshake.
- `rsp_valid/rsp_data`: the answer of tss, csrw and vsetvl, one cycle after acceptance.
- `mem_req_*` / `mem_rsp_*`: the tile-row memory port.
- `ev_stall`, `ev_cvfma`, `ev_bcast`: one-cycle event pulses.

The reset is asynchronous and active-low. The register file itself is not reset.

Parameters: `VLEN` (8192), `RLEN` (512), `NLANES` (64), `NREGS` (32). `VLEN` must be a multiple
of `32·NLANES`. `NLANES` must be a multiple of `RLEN/32` (whole tile rows per step).

## 6. Arithmetic

`fp32_fma` computes `a·b + c` with one rounding (round to nearest even). It follows IEEE 754
binary32 with these simplifications:
- subnormal inputs are read as zero, and subnormal results are flushed to a signed zero;
- every NaN result is the canonical quiet NaN `0x7fc00000`;
- there are no exception flags.

`vfmul` is an FMA with `c = −0`. The integer path wraps at 32 bits.

## 7. Where this departs from the MTE proposal

- **One vector unit.** The evaluated system has four vector units behind an out-of-order core.
  Here one unit executes one instruction at a time. Instructions do not overlap, and each one
  ends with a drain cycle.
- **No renaming.** The proposal renames the vector registers (40 physical for 32
  architectural) and the MTE CSR. Only the 32 architectural registers and one CSR exist here.
- **32-bit elements only.** The datapath handles 32-bit elements only; 64-bit (fp64, int64) and
  narrower uniform-precision tiles are not built. `tss` computes the
  limits for every element width, including the widening shapes. The widening multiplies
  (`twmul`/`tfwmul`, which keep B column-major) and 8/16/64-bit tile data are not built.
- **One operand buffer per lane.** Each operand buffer holds one element, because a step is
  issued every cycle.
- **Bubbles instead of bypasses.** Short cvfma micro-instructions are padded with bubbles
  instead of forwarding results.
- **Choices that are this design's own:**
  - the routing network of the lane interconnect (a multiplexer per lane);
  - the bit layout of the CSR fields;
  - the element-type encoding of `tss`;
  - the memory port;
  - the use of `rs1` in `tvmask` as an element bound;
  - writing zeros under the agnostic policy.
- **Not modelled:** the alternative systolic-array implementation of the tile multiply, the
  scalar core and the caches.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_mte_csr`       | random tss requests against the limit formulas, csrw, vsetvl, reset |
| `tb_mte_tvmask`    | random shapes/types/kinds, mask built independently |
| `tb_fp32_fma`      | exactly representable random cases; full-mantissa products rounded by the testbench; exact ties; special values |
| `tb_mte_lane`      | shadow register file, all ops, masked elements, pipeline read-after-write distance |
| `tb_mte_lane_xbar` | every lane's a/b/enable against the matrix view for all k and steps |
| `tb_mte_tile_lsu`  | loads (plain, transposed, broadcast, both policies) and stores with random back-pressure, request counts, untouched bytes |
| `tb_mte_seq`       | micro-op stream of every instruction; tile-multiply cycle counts |
| `tb_mte_vpu`       | end to end at VLEN 2048 / RLEN 256 / 16 lanes (see below) |
| `tb_mte_vpu_full`  | the same end-to-end test at the default size, 20×18×17 GEMM |
| `tb_mte_workloads` | default size: a transformer attention-score GEMM (32×32×64) and a pointwise-convolution GEMM (16×48×40), with cycle counts |

The end-to-end tests (`tb_mte_vpu_body.svh`) run:
- the tiled SGEMM kernel `C = 2·A·B + 0.5·C` with partial tiles on every edge;
- an integer GEMM with a transposed A load and a transposed C store;
- a zero-stride broadcast;
- a tile multiply masked by software;
- the agnostic policy;
- the tss limits.

Each of these mechanisms is counted and must occur. At the default size they also check that
every full 16×16×16 multiply takes 64 issue cycles. The workload test reports the share of
cycles spent in tile multiplies: about 40 % with this one-instruction-at-a-time unit, where
loads and stores do not overlap the multiplies. A 16×16×16 multiply, at 64 cycles of 64 FMA
per cycle, is at peak.

Running one testbench with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mte_vpu_full \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/mte_pkg.sv tb/tb_mte_vpu_full.sv -o sim
./obj_dir/sim
```

The default-size unit has 64 lanes × 32 registers × 4 slots × 32 bits, which is 256 Kbit of
register file in flip-flops; verilator builds the full-size testbenches in about half a minute.
