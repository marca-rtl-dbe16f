# MARCA — a reconfigurable Mamba inference accelerator in SystemVerilog

Mamba replaces attention with a selective state-space model. That leaves a mix of work:

- large matrix products (the linear projections and the 1-D convolution);
- long runs of element-wise multiplies and adds (the state update);
- two non-linear functions, the exponential and SiLU;
- a layer normalization.

A design with separate blocks for each kind of work leaves most of them idle most of the time.
MARCA instead builds one array of *reconfigurable processing elements* (RPEs). Each RPE is a
float multiplier that feeds a float adder, plus a little steering logic. The same array runs in
four ways:

- a matrix engine, with its products summed by a reduction tree;
- an element-wise engine, with the tree bypassed;
- an exponential unit, using a fast biased-exponent trick;
- a SiLU unit, using a four-segment piecewise approximation.

This repository gives synthesizable RTL for that accelerator:

- 32 reconfigurable computing units (RCUs), each a 16×16 array of RPEs plus its reduction tree;
- a 24 MB on-chip buffer with one bank per RCU;
- a layer-normalization unit;
- a memory access handler for the off-chip HBM;
- the instruction path: fetch, buffer, decode with register files, and configure.

## Number format

Every datapath word is IEEE-754 single precision.

- `fp_mul` and `fp_add` round to nearest even.
- Subnormal inputs and results are flushed to zero.
- Overflow goes to infinity.
- NaN is not produced specially.

The architecture describes its processing element in floating-point terms: a float multiplier
and adder, and an exponential built from float exponent bits. The same source also reports
32-bit fixed point for its accuracy study. The RTL follows the floating-point description,
because the exponential and SiLU tricks depend on the float encoding.

## The reconfigurable processing element (`rpe`)

Each RPE has one multiplier stage register and one adder stage register. Every operation is one
or two passes of multiply-then-add:

| op | pass 1 | pass 2 | latency |
|----|--------|--------|---------|
| MUL (EWM, matrix products) | a·b + 0 | – | 2 |
| ADD (EWA) | a·1 + b | – | 2 |
| EXP | s = a·c0 + c1 | shift(s)·1 + c2 | 4 |
| SILU, x < −5 | constant −0.0135 | identity | 4 |
| SILU, −5 ≤ x < −1.5 | −0.06244·x − 0.3457 | identity | 4 |
| SILU, −1.5 ≤ x ≤ 0.75 | t = 0.232·x + 0.547984 | t·x + 0.0485846 | 4 |
| SILU, x > 0.75 | 1.05·x − 0.2781 | identity | 4 |

**Second pass.** While a first-pass result re-enters the multiplier, `in_ready` is low for one
cycle. This is the only back-pressure in the compute path.

**SiLU timing.** Every SiLU input takes two passes, even when one would be enough. This keeps all
256 RPEs of an RCU in lockstep whatever segment their inputs fall in. The quadratic segment
0.232(x+1.181)² − 0.275 is rewritten in Horner form so that it fits two multiply-add passes.

**Fast exponential.** The exponential is computed as e^x ≈ bits-as-float((uint)((x/ln2 + b)·2²³)) + c.
The program supplies a = 1/ln2, b and c through three constant registers. No float-to-integer
converter is needed. `exp_shift_unit` does the conversion in three steps:

1. mask the mantissa (`AND 0x007F_FFFF`);
2. set the hidden bit 23;
3. shift by the unbiased exponent E−127, saturating above 2³².

With b = 126.94 and c = 10⁻⁵ the result is within about 6% of e^x over the tested range.

## The reconfigurable computing unit (`rcu`, `reduction_tree`)

An RCU is a 16×16 RPE array that works on 16×16 tiles. It has four modes.

**MM mode (matrix multiply).** Column j of the right-hand tile B is broadcast along the array:
RPE (i,k) receives A[i][k] and B[k][j].

- Row i of the array reduces its 16 products through a 4-level adder tree.
- A fifth, accumulating adder adds the partial sum that this output column held from earlier
  passes. This is the tree's "third input".
- Feeding the 16 columns, one per cycle, produces C = A·B.
- Feeding K tile pairs with `mm_first` on the first produces Σ_t A_t·B_t. `mm_last` goes with
  the last column of the last pair.
- The finished tile leaves 3 cycles after the last column goes in.

**EW, EXP and SILU modes.** The tree is bypassed. Each RPE produces its own element, and the
tile comes out 2 or 4 cycles after it goes in.

## Compute engine (`compute_engine`, `ce_control_unit`)

All 32 RCUs run in lockstep. Each works on its own buffer bank at the same row address. A single
control unit walks one instruction and writes a result tile every time the RCUs deliver one.

Addressing is in tile rows per bank:

- **Element-wise ops** (EWM, EWA, EXP, SILU): for t < out_size,
  `out[out_addr+t] = f(in0[in0_addr+t], in1[in1_addr+t])`. EWM and EWA also have an immediate
  form, where in1 is a 32-bit constant carried in the instruction.
- **LIN and CONV**: with K = in0_size, for o < out_size,
  `out[out_addr+o] = Σ_{t<K} in0[in0_addr+o·K+t] × in1[in1_addr+t]`.

The in1 tiles are reused from the buffer for every output tile. CONV uses the same schedule: the
program lays out the convolution's operands as a matrix product.

## On-chip buffer and data layout (`onchip_buffer`, `mem_access_handler`)

The buffer has 32 banks × 768 rows × one 1 KB tile = 24 MB. It has two asynchronous read ports
(A and B) and one synchronous write port with a per-bank write enable. A real chip would build it
from eDRAM or SRAM macros; here each bank is a plain array.

**Tensor layout.** A tensor of G tiles is striped across the banks. Tile g lives in bank g mod 32,
row `base + g/32`. So 32 consecutive tiles are processed in one step by the 32 RCUs.

**Memory transfers.** LOAD and STORE move tiles one at a time between global memory and the
buffer.

- Each tile is 4 beats of 64 words.
- 2048 bits per cycle at 1 GHz equals the 256 GB/s of the HBM.
- The global-memory address is `Reg[r2] + imm`, in 32-bit words.
- Tile g sits at word `addr + 256·g`, stored row-major.

## Normalization unit (`norm_unit`)

This unit handles NORM. It reads n = out_size·256 words from bank 0, starting at in0_addr, and
runs four stages:

1. ADD: sums the words.
2. MEAN: forms 1/n with four Newton iterations from the seed 0x7EF311C3 − bits(n).
3. VAR: sums (x − mean)² and scales it by 1/n.
4. LINEAR: forms rsqrt(var + 10⁻⁵) with four Newton iterations from the seed
   0x5F3759DF − bits/2, then writes (x − mean)·rsqrt. A tile row is written every 256 words.

The unit processes one word per cycle, so a 768-element vector takes about 2300 cycles. The
instruction has no operands for a learned scale and bias, so none is applied.

## Instruction path (`inst_fetch`, `inst_buffer`, `inst_decode`, `configure_unit`)

**Instruction format.** Instructions are 64 bits, MSB first:

- a 4-bit opcode, then six 4-bit fields that name registers;
- the remaining bits are reserved;
- EWM/EWA with bit 0 set carry a 32-bit immediate in [47:16];
- LOAD/STORE carry their offset in [47:16].

**Opcodes.** LIN=0, CONV=1, NORM=2, EWM=3, EWA=4, EXP=5, SILU=6, LOAD=7, STORE=8.

**Register fields.** Fields 0–2 name general registers: out address, out size, in0 address.
Fields 3–5 name general registers for LIN/CONV (in0 size, in1 address, in1 size) and constant
registers for EXP (a, b, c).

**Register files.** The 16 general registers and the 16 constant registers are written by the host
through the `reg_we`/`creg_we` port before a program starts.

**Program flow.**

1. `start` with `prog_base` and `prog_len` begins fetching the program from global memory into a
   32-entry instruction FIFO.
2. The decoder turns the head instruction into a configuration.
3. The configure unit hands the configuration to the compute engine, the normalization unit or
   the memory access handler.
4. It waits for that unit's `done` before issuing the next instruction.
5. `active` selects which unit owns the buffer ports.
6. `done` rises after the last instruction completes.

Instructions do not overlap. This is the simplest correct order, and it is the design's own
choice.

## Top level (`marca_top`)

The top level has three groups of ports:

- the host register port and start/done;
- a 64-bit instruction-fetch port;
- a 2048-bit data port to global memory.

Both memory ports use a valid/ready request and an in-order response. Global memory (HBM) is not
part of the RTL. `tb/gm_model.sv` is a behavioural stand-in for simulation.

## Where this RTL departs from the architecture description or fills gaps

- Float arithmetic instead of the 32-bit fixed point quoted for accuracy (see above).
- Exponential shift unit:
  - Uses the hidden bit 23 (`OR 0x0080_0000`). The figure prints `0x00FF_FFFF`, but shows a
    result with only bit 23 set.
  - Shifts by E−127.
- Opcode values, field placement, the immediate flag, the register-write port and the memory
  handshakes are this design's own.
- The control schedules are this design's own: tile addressing, K-accumulation, one instruction
  at a time, and NORM on bank 0 at one word per cycle.
- No learned scale/bias in NORM; ε = 10⁻⁵.
- The two-pass SiLU for every input (lockstep) and the register placement are this design's own.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=… failures=…`. A typical command
is:

```
verilator --binary --timing --assert -Irtl -Itb rtl/marca_pkg.sv tb/tb_fp_pkg.sv \
    -y rtl -y tb tb/tb_marca_top.sv --top-module tb_marca_top -j 8
./obj_dir/Vtb_marca_top
```

The testbenches:

- **Block testbenches** (`tb_fp_mul`, `tb_fp_add`, `tb_exp_shift_unit`,
  `tb_silu_range_detector`, `tb_rpe`, `tb_reduction_tree`, `tb_rcu`) check each block against
  reference arithmetic computed in `real`.
- **`tb_marca_top`** runs a 15-instruction program on a 2-RCU, 28-row configuration: LOADs, LIN
  with K = 2, EXP, SILU, EWM, immediate EWA, NORM and STOREs. It checks every result, and it
  checks that each mechanism occurred: accumulation, bypass, the recirculation stall, all four
  SiLU segments, the immediate form, NORM, loads, stores and instruction buffering.
- **Other blocks.** The compute engine, its control unit, the normalization unit, the buffer, the
  memory access handler and the instruction-path blocks are verified through `tb_marca_top`,
  which runs all of them.

**Largest size simulated.** The default configuration (32 RCUs × 256 RPEs, 768-row banks) was
simulated once: LOAD, LIN, SILU and STORE across all 32 banks, with all 16,389 checks passing.
Its C++ build took about 20 minutes, so that test is not shipped. The shipped top-level test uses
2 RCUs and 28 rows per bank, and every parameter it does not override is the same as the full
design.

## Workloads

Mamba-130M to 2.8B have hidden sizes 768 to 2560 and 24 to 64 layers. At fp32, their weights
(0.5 to 11.2 GB) fit in the 32-bit word address space of global memory (16 GB). A layer's weights
do not fit on chip at once: for 2.8B the input projection alone is about 105 MB. They are streamed
through the 24 MB buffer tile by tile. The per-token recurrent state of one layer
(2·2560·16 words, 10 rows per bank at 2.8B) stays on chip.
