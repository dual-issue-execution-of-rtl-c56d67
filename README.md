# Integer operations inside the FP register file for pseudo dual-issue RISC-V cores

Small in-order RISC-V cores in the style of Snitch can overlap integer and
floating-point work without a second issue slot. The integer core hands an FP
loop body to a hardware loop buffer (FREP). The buffer replays that body on
the FPU while the integer core moves on to its own instructions. For this to
work, the two instruction streams must not depend on each other through
registers. The FP stream can only read and write the FP register file. Its
memory traffic comes in through stream registers (SSRs), which are
memory-mapped FIFOs that appear as FP registers.

A handful of RV32D instructions break this rule. They move values between
the two register files:

| instruction            | standard behaviour                       |
|------------------------|------------------------------------------|
| `fcvt.w.d`, `fcvt.wu.d`| FP source, result in an **integer** register |
| `fcvt.d.w`, `fcvt.d.wu`| **integer** source, FP result            |
| `feq.d`, `flt.d`, `fle.d` | FP sources, 0/1 result in an **integer** register |
| `fclass.d`             | FP source, class mask in an **integer** register |

Mixed kernels need these instructions all the time. Examples are Monte Carlo
integration (random integers become doubles, then a hit test) and
table-driven `logf`/`expf`, where an integer exponent is converted to double.
The way around the problem is to split such a kernel into integer and FP
phases that talk only through memory, and to use variants of the
instructions above that keep **both operands and result in the FP register
file**. An integer then travels from the integer thread to the FP thread
like this: a `sw` into a buffer, an SSR read of that buffer into an FP
register, and a conversion that runs entirely in the FP register file. The
way back is the same in reverse.

This repository is RTL for those variants. It holds an instruction decoder,
four datapaths and a one-stage execution unit with handshakes, packaged as
`copift_top`. It attaches to the FP side of such a core. The core, its FPU,
FREP, the SSRs and the register file are not part of it.

## Instruction encoding

Each new instruction is the RV32D instruction with its major opcode changed
from OP-FP (`1010011`) to **custom-1** (`0101011`). All other fields keep
their standard encoding:

| instruction (custom-1) | funct7    | rs2     | funct3      | MATCH (opcode 0x2b) |
|------------------------|-----------|---------|-------------|---------------------|
| `fcvt.w.d`             | `1100001` | `00000` | rm          | `0xc200002b`        |
| `fcvt.wu.d`            | `1100001` | `00001` | rm          | `0xc210002b`        |
| `fcvt.d.w`             | `1101001` | `00000` | rm (unused) | `0xd200002b`        |
| `fcvt.d.wu`            | `1101001` | `00001` | rm (unused) | `0xd210002b`        |
| `feq.d`                | `1010001` | rs2     | `010`       | `0xa200202b`        |
| `flt.d`                | `1010001` | rs2     | `001`       | `0xa200102b`        |
| `fle.d`                | `1010001` | rs2     | `000`       | `0xa200002b`        |
| `fclass.d`             | `1110001` | `00000` | `001`       | `0xe200102b`        |

`rd`, `rs1` and `rs2` all name **FP** registers. The rounding-mode values
`101` and `110` are reserved and make a conversion illegal. The dynamic
mode `111` takes the rounding mode from the `frm` CSR (input `frm_i`). A
reserved value there also makes the conversion illegal.

## Integers inside FP registers

An FP register is 64 bits wide. An integer result is written to bits
[31:0], and bits [63:32] are set to zero:

* `fcvt.w[u].d` writes the 32-bit two's-complement or unsigned integer.
* `feq/flt/fle.d` write 0 or 1 in bit 0.
* `fclass.d` writes the one-hot class mask in bits [9:0]. The bit order is
  the standard one: −∞, −normal, −subnormal, −0, +0, +subnormal, +normal,
  +∞, sNaN, qNaN.

`fcvt.d.w[u]` reads bits [31:0] of its source and ignores the upper half.
With this layout, a 32-bit word stored by the integer thread at the low
address of a double-word slot arrives in the right place when the slot is
read into an FP register. The same layout serves the other direction.

All results and exception flags follow the RISC-V rules for the standard
instructions:

* Conversions round in any of the five modes.
* Out-of-range values, infinities and NaNs saturate and raise NV. NaN
  converts to the largest positive integer.
* An in-range inexact result raises NX.
* Comparisons return 0 for any NaN operand and treat +0 and −0 as equal.
  `feq.d` raises NV only for a signalling NaN; `flt.d` and `fle.d` raise it
  for any NaN.
* `fcvt.d.w[u]` is exact and never raises a flag.

## The datapaths

**Double to integer (`copift_f2i`)** is the only part with real arithmetic
in it.

1. The 53-bit significand, hidden bit included, is placed at the top of a
   106-bit window.
2. The window is shifted right by `52 − E`, where E is the unbiased
   exponent.
3. The upper 53 bits are now the integer part. Bit 52 is the round bit, and
   the OR of bits 51..0 is the sticky bit.
4. The magnitude is incremented according to the rounding mode:
   * RNE: `round & (sticky | lsb)`
   * RTZ: never
   * RDN: `sign & inexact`
   * RUP: `!sign & inexact`
   * RMM: `round`
5. The result is range-checked after rounding. The check is done after
   rounding because a value such as 2147483647.5 is in range under RTZ but
   overflows under RNE.

The shift is used only for `−1 ≤ E ≤ 52`. For `E < −1` the value is below
0.5 in magnitude: the integer part is 0 and only the sticky bit can be set.
For `E > 32` the value is out of range. Subnormal inputs take the `E < −1`
path. A negative input to `fcvt.wu.d` that rounds to zero gives 0 with NX
only. One that rounds to −1 or below gives 0 with NV.

**Integer to double (`copift_i2f`)**:

1. A negative signed value is negated to get its magnitude.
2. A leading-one detector gives the position p of the top set bit.
3. The magnitude is shifted so that this bit lands on bit 52.
4. The exponent is `1023 + p`. Zero gives +0.

Every 32-bit integer is exact in binary64, so no rounding is needed.

**Comparison (`copift_fcmp`)** compares the sign-magnitude encodings
directly. Bits [62:0] of two numbers with the same sign order like unsigned
integers, and the order is reversed for negative numbers. With different
signs, the negative number is smaller unless both operands are zeros.

**Classification (`copift_fclass`)** decodes the exponent and mantissa
fields.

## Timing, handshakes and hazards

`copift_unit` has one register stage:

* A request accepted on clock edge *n* is offered to the register-file
  write port from edge *n* on. With the port free, it is written at edge
  *n + 1*.
* The unit takes a new request in the same cycle as its held result leaves,
  so it sustains one instruction per cycle.
* Both sides use valid/ready handshakes. Payloads stay stable while valid
  is high and ready is low; assertions in `copift_unit` and `copift_top`
  check this.

The write port is shared with the rest of the FP subsystem. On Snitch, this
port is where some of the kernels stall. The sharing is modelled by the
`wb_ready_i` grant: while it is low, the result waits and the unit stops
taking requests.

`copift_top` reads operands combinationally from the register file in the
cycle it accepts an instruction. An instruction that reads the register the
waiting result is about to write is therefore held, with `instr_ready_o`
low, until the write has happened. There is no bypass.

A word that is not one of the eight instructions, or that is illegal
because of its rounding mode, is consumed in one cycle with `illegal_o`
high. It has no other effect, so the offload path never blocks on a bad
word.

`copift_top` ports:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk_i`, `rst_ni` | in | 1 | clock; asynchronous reset, active low |
| `instr_valid_i`, `instr_ready_o`, `instr_i` | in/out/in | 1/1/32 | offloaded instruction word (from the integer core or the FREP sequencer) |
| `illegal_o` | out | 1 | the word offered is not a legal COPIFT instruction |
| `frm_i` | in | 3 | `frm` CSR, used for rm = 111 |
| `rf_raddr_o`, `rf_rdata_i` | out/in | 2×5 / 2×64 | two FP register-file read ports, data in the same cycle |
| `wb_valid_o`, `wb_ready_i`, `wb_addr_o`, `wb_data_o` | out/in/out/out | 1/1/5/64 | FP register-file write request and grant |
| `fflags_o` | out | 5 | NV, DZ, OF, UF, NX of the result being written; to be ORed into `fflags` on a write |

DZ, OF and UF are always zero: none of these operations can raise them.

## How far it follows the source design, and what is its own

Taken from the source design:

* the idea of keeping these instructions entirely in the FP register file;
* the set of eight instructions;
* copying their encodings into custom-1.

This design's own choices, all where the source is silent:

* the bit layout of integers inside FP registers;
* the single-cycle latency;
* the valid/ready ports and the register-file port shapes;
* stalling (not bypassing) on a read-after-write;
* the treatment of illegal words;
* asynchronous reset;
* all datapath internals. Results and flags follow the RISC-V specification
  for the standard instructions.

The surrounding core, which actually gives the dual issue, is not here: the
integer pipeline, FPU, FREP sequencer, stream registers, L0 instruction
cache, L1 memory and DMA. The same goes for the 12 nm physical
implementation at 1 GHz. `copift_top` brings out the ports where these
would connect. Nothing here reproduces the published speed-ups (about 1.5×
on average, peak IPC 1.75). Those come from the software schedule running
on the full core.

## Testbenches and how to run them

Every testbench checks results against a reference written with the
simulator's own `real` arithmetic (`$floor`, `$ceil`, real comparisons,
integer-to-real casts), not with bit manipulation. The reference lives in
`tb/copift_ref_pkg.sv`. Each testbench prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_copift_decoder` | all eight encodings with random fields against the standard MATCH/MASK values (opcode swapped); OP-FP originals, random words and reserved rm rejected |
| `tb_copift_f2i` | 40 000 conversions in all rounding modes, signed and unsigned: ties, range edges, NaN, ±∞, subnormals |
| `tb_copift_i2f` | edge and random integers, garbage in the upper register half |
| `tb_copift_fcmp` | three comparisons on random pairs, equal pairs, ±0, NaNs; NV flag |
| `tb_copift_fclass` | every class, directed and random |
| `tb_copift_unit` | random traffic with random write-port back-pressure, in-order scoreboard; 64 back-to-back requests must take 65 cycles |
| `tb_copift_top` | end to end with a behavioural 32×64 register file. 4200 random instructions, including dynamic and reserved rounding modes, illegal words, read-after-write hazards and write-port stalls; every write, the final register file and the one-cycle write-back latency are checked, and each of these events must happen at least once |
| `tb_monte_carlo` | FP side of four hit-and-miss Monte Carlo kernels (π and a polynomial, LCG and xoshiro128+), 2000 samples each: `fcvt.d.wu` and `flt.d` run in the design, hit counts must match a real-arithmetic reference |
| `tb_logf` | table-driven `logf` on 3000 inputs; the exponent's `fcvt.d.w` runs in the design, results must match `$ln` to 1e-7 |

To run one with Verilator 5 (shown for the top; for a leaf block, list only
the files it uses):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_copift_top \
  rtl/copift_pkg.sv tb/copift_ref_pkg.sv rtl/copift_f2i.sv rtl/copift_i2f.sv \
  rtl/copift_fcmp.sv rtl/copift_fclass.sv rtl/copift_unit.sv \
  rtl/copift_decoder.sv rtl/copift_top.sv tb/tb_copift_top.sv
./obj_dir/Vtb_copift_top
```

Each run takes well under a second. The design has no parameters: widths
come from `copift_pkg` (FLEN 64, XLEN 32, 32 registers).

## Files

* `rtl/copift_pkg.sv`: opcodes, field values, operation and rounding-mode
  enums, request/response structs.
* `rtl/copift_decoder.sv`: custom-1 decoder.
* `rtl/copift_f2i.sv`, `rtl/copift_i2f.sv`, `rtl/copift_fcmp.sv`,
  `rtl/copift_fclass.sv`: the datapaths, all combinational.
* `rtl/copift_unit.sv`: operation select, output register, handshakes.
* `rtl/copift_top.sv`: decode, operand read, rounding-mode resolution,
  hazard stall, write-back.
* `tb/`: the testbenches above and the reference package.
