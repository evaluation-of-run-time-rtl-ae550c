# Run-time controlled approximation in an RV32IM execution stage

Approximate arithmetic saves energy only when it is allowed, and in a general-purpose
processor whether it is allowed depends on the program and even on the code region:
an image filter can tolerate a wrong low-order bit in a product, a loop counter or
a load address cannot. This design puts the choice in software. It is the
execution stage of a small in-order RISC-V core (RV32I/E with the M extension).
Each of its three execution units, the ALU, the multiplier and the divider, has
four slots for alternative circuits and a 32-bit control register. A program
writes that register with an ordinary CSR instruction to pick the circuit, switch
approximation on or off and, for error-configurable circuits, set how much error
is acceptable. The unselected circuits are isolated so that they do not switch.

The RTL follows the architecture described in *Evaluation of Run-Time Energy
Efficiency using Controlled Approximation in a RISC-V Core* (A. Delavari,
F. Ghoreishy, H. S. Shahhoseini, S. Mirzakuchaki, IICM 2024). The publication gives
the control-register layout, the slot structure, the block structure of the
error-controllable adder and multiplier, and their sizes. Many details are not
published: the logic of the approximate full adder, the 4:2 compressors, the
handshake, and the sign handling. This RTL makes its own choices for them, and
every such choice is stated below and in the header comment of each file. The
rest of the core is outside this RTL: fetch/decode, register file,
memory/write-back stage, memories and counters.

## The control word

The three registers share one layout (`execsr_t` in `rtl/approx_pkg.sv`):

| bits  | field       | meaning |
|-------|-------------|---------|
| 0     | `apx_en`    | 1 = approximate arithmetic allowed, 0 = every circuit computes exactly |
| 2:1   | `sel`       | circuit slot: 0 = Circuit I (the default), 1 = II, 2 = III, 3 = IV |
| 7:3   | `trunc`     | dynamic truncation control (no circuit of this configuration uses it) |
| 11:8  | `custom_lo` | free for designer-defined features (unused) |
| 15:12 | `custom_hi` | free for designer-defined features (unused) |
| 31:16 | `err`       | error-control word for error-configurable circuits |

| CSR address | name     | unit |
|-------------|----------|------|
| 0x800       | `alucsr` | ALU unit |
| 0x801       | `mulcsr` | multiplier unit |
| 0x802       | `divcsr` | divider unit |

All three reset to 0: Circuit I, exact. `approx_csrs` implements `csrrw/csrrs/csrrc`
and their immediate forms as write/set/clear. The old value is the instruction's
result. A typical use is

    li    t0, 0x007E0003      # err = 0x7E, sel = slot II, apx_en = 1
    csrw  0x801, t0           # multiplies now use the approximate multiplier
    ...                       # error-tolerant kernel
    csrw  0x801, zero         # back to the accurate multiplier

## Circuits in this configuration

| unit | slot I | slot II | slots III, IV |
|------|--------|---------|---------------|
| ALU (`alu_unit`) | `alu`: RV32I operations, add/sub through the error-controllable carry-select adder | empty | empty |
| multiplier (`mul_unit`) | `acc_mult32`: exact, single cycle | `apx_mult32`: hierarchical approximate multiplier, 6 cycles | empty |
| divider (`div_unit`) | `acc_div32`: exact restoring divider, 34 cycles | empty | empty |

An empty slot returns 0 and never stalls. Address and jump-target arithmetic never
goes through an approximate adder: `addr_gen` is a separate exact adder (rs1+imm
for loads, stores and jalr, pc+imm for jal, branches and auipc).

```
            alucsr ──► alu_unit  ─┐  (slot I: alu + ecsa32)
 rs1, rs2/imm ─────►              │
            mulcsr ──► mul_unit  ─┤  (slot I: acc_mult32, slot II: apx_mult32)   EXE STAGE MUX
            divcsr ──► div_unit  ─┤  (slot I: acc_div32)                       ──► result
                       addr_gen ──┤  (exact)                                   ──► addr
  CSR instr ─► approx_csrs ───────┘  (old CSR value)                           ──► busy
                                     opcode / funct3 / funct7 select
```

## Timing and the busy handshake

`exe_stage` is the top. A decode stage presents one instruction on `valid`, `pc`,
`opcode`, `funct3`, `funct7`, `imm` and `zimm`, with its operand values on
`rs1`/`rs2`. For OP-IMM the stage itself substitutes `imm` for `rs2`. For CSR
instructions `imm[11:0]` is the CSR address.

* Combinational circuits (ALU, slot-I multiplier, empty slots) answer in the same
  cycle, and `busy` stays low.
* A multi-cycle circuit is started in the first cycle the instruction is seen, and
  `busy` rises in that same cycle (combinationally from the decode). `busy` stays
  high until the circuit is done. In the cycle `busy` is low again, `result` is
  valid.
* The instruction **must leave the stage in the first cycle `busy` is low**. The
  unit is idle again in the next cycle and would restart on an instruction that is
  still presented. The stage has no separate "advance" input. A core that stalls
  EXE for other reasons must drop `valid` during such a stall.
* CSR writes take effect at the clock edge that ends the instruction's cycle.

| operation | busy cycles | total cycles in EXE |
|-----------|-------------|---------------------|
| ALU, lui/auipc/jal/jalr, CSR, mul* in slot I | 0 | 1 |
| mul/mulh/mulhsu/mulhu in slot II | 5 | 6 |
| div/divu/rem/remu | 33 | 34 |

Assertions check that at most one unit is busy and that a unit's multi-cycle
circuit stays busy until done.

## The error-controllable full adder (`apx_fa`)

Every error-configurable circuit is built from one cell: a full adder with an extra
input `er`. With `er = 1` it is exact. With `er = 0` it takes the carry-out from
input `a` and adjusts the sum. Only two of the eight input patterns then give a
wrong value of 2·cout + sum:

| a b cin | exact | er = 0 |
|---------|-------|--------|
| 0 1 1   | 2     | 1 (carry lost) |
| 1 0 0   | 1     | 2 (carry invented) |
| others  | =     | exact |

The error is thus one unit, downward in one case and upward in the other, so on
average it does not bias the result. This behaviour matches the description of the
published cell. The published gate-level circuit was not reproduced, and this
function is this design's choice. In a ripple chain of such cells the total error
is exactly Σ eᵢ·2ⁱ, where each eᵢ ∈ {−1, 0, +1} is the error of cell i. The
testbenches use this to bound errors.

## The error-controllable carry-select adder (`ecsa32`, `eca4`)

The 32-bit adder is cut into eight 4-bit blocks. Each block is an `eca4`, a 4-bit
ripple chain of `apx_fa` cells. The lowest block takes the carry-in. Each higher
block adds with carry-in 0. An exact incrementer forms sum+1 and the matching
carry (ECA carry OR all-ones sum). A 10:5 multiplexer then picks {carry, sum} of
one version by the carry from the block below. The carry therefore ripples
through one multiplexer per block. `er[i]` controls the cell at bit i.

In the ALU, bit i < 16 of the adder is exact when `apx_en = 0` or `err[i] = 1`.
Bits 31:16 are always exact. This mapping is this design's choice. Subtraction is
`a + ~b + 1` through the same adder. All other ALU operations are exact.

## The approximate multiplier

### 8x8 core (`apx_mult8`)

1. **Partial products**: eight AND-gate rows.
2. **Wallace reduction with 4:2 compressors** (`compressor42`, `compressor_row42`):
   rows 0-3 and rows 4-7 are each compressed to two rows. Those four rows are then
   compressed to a sum row S and a carry row C. Each compressor is two exact full
   adders. Its cout does not depend on cin, so a row has no ripple.
3. **Final addition**: C is zero in bits 3:0 for every input, so S[3:0] is already
   the product there. Bits 15:4 take a 12-bit ripple-carry adder of `apx_fa` cells.
   The 7 low cells (product bits 10:4) are error-controlled by `er[6:0]`, with
   `er[k]` on bit 4+k. The top 5 cells are always exact.

`er = 0x7F` gives the exact product. The 128 values of `er` are the 128
approximation levels. The 8x8 error statistics, measured exhaustively over all
65536 operand pairs by `tb_apx_mult8`:

| er   | error rate | MRED  | published ER / MRED |
|------|-----------|-------|---------------------|
| 0x00 | 91.9 %    | 8.39 % | 65.06 % / 8.94 % |
| 0x3F | 26.1 %    | 5.08 % | about 51 % / 5.1 % (read from a plot) |
| 0x7E | 48.4 %    | 0.39 % | 36.2 % / 0.85 % |
| 0x7F | 0         | 0     | not exact (about 36 % / 0.85 %) |

The MRED curve is close to the published one. The error rate is not. The
published multiplier is never exact, even at level 127, so its compressors or
reduction must be approximate in a way that was not published. This RTL uses exact
compressors, and its remaining error comes only from the 7 controlled cells.

### 16x16 and 32x32 (`apx_mult16`, `apx_mult32`)

`apx_mult16` owns one `apx_mult8` and uses it for four cycles. It forms lo·lo,
lo·hi, hi·lo and hi·hi and adds each, shifted by 0, 8, 8 or 16, into an exact
accumulator. `apx_mult32` holds four `apx_mult16` copies, which run in lock step
on the four 16x16 sub-products. Exact adders combine the sub-products into the
64-bit product.

The 8x8 core is unsigned, so `apx_mult32` multiplies operand magnitudes and
negates the product when the signs differ. `mulh` treats both operands as signed,
`mulhsu` only the first, and `mulhu` neither. `mul` treats both as signed. Its
exact low word would be the same either way. With unsigned operands, however, a
small negative number would become a 32-bit magnitude, and the approximation
error would land in high-order bits. With the 0x7E setting every non-zero byte
pair of the magnitudes may be off by 16 at its bit 4 and by nothing else.

## Accurate circuits

* `acc_mult32`: a plain `*` on 33-bit sign- or zero-extended operands. The
  publication uses a vendor-library multiplier here. Any single-cycle multiplier
  will do.
* `acc_div32`: restoring division, one bit per cycle. It gives the RISC-V results
  for division by zero (quotient all ones, remainder = dividend) and for
  −2³¹ / −1.

## Departures from the publication and open points

* **Full-adder logic**: the published schematic was not copied. The cell
  implements the described error behaviour with its own logic (see above).
* **Compressors**: exact, so level 127 is exact. The published error figures at
  high levels cannot be reproduced (see the table).
* **Routing of bit 0 and bits 31:16**: the published slot diagram draws bit 0 to
  Circuit I and bits 31:16 to Circuits II-IV. Here both fields go to whichever
  circuit can use them: the ALU adder in slot I, the approximate multiplier in
  slot II.
* **Carry label**: the adder figure labels the carry into bits 31:28 as "C29". It
  is the carry out of bit 27, and the RTL names carries by block.
* **Unused fields**: the truncation field and the two designer-defined fields are
  stored but not used. No published circuit of this configuration uses them.
* **Switching off** unused circuits is done by operand isolation: zero operands
  and no start. Clock or power gating belongs to the physical implementation.
* **Approximate instructions**: all four multiply instructions reach the slot
  selected by `mulcsr`. The evaluated programs used only `mul` and `mulh`.
* **Handshake, reset values, decode details and latencies** are this design's
  own.
* **Not included**: the rest of the pipeline (IF/ID, MEM/WB, register file,
  branch resolution, hazard logic), memories and performance counters. Their
  signals are the ports of `exe_stage`.

## Verification

Each module in `rtl/` (except the package and the compressor row, which
`apx_mult8`'s test covers) has a self-checking testbench `tb/tb_<module>.sv`. It
compares the module against models written from the specification in
`tb/tb_ref_pkg.sv` or in the testbench itself, checks latencies, and ends with a
`TB_RESULT checks=N failures=M` line. A watchdog ends any run that hangs.

* `tb_apx_fa`, `tb_eca4`, `tb_compressor42`, `tb_apx_mult8` are exhaustive. The
  8x8 test also checks that the reduction's two rows sum to a·b with C[3:0] = 0,
  and compares the approximate product with a reference ripple chain.
* `tb_exe_stage` runs the whole stage at its only size. It covers CSR
  read/write/set/clear, every RV32I ALU operation, lui/auipc/jal/jalr and
  load/store addresses, accurate and approximate multiplies (checking the
  5-cycle stall), divisions (33-cycle stall), an empty slot, approximate
  addition, and a 3x3 convolution run with both multipliers. It counts each
  mechanism and fails if one never happens.
* `tb_workloads` runs the arithmetic of the evaluated kernels instruction by
  instruction through the stage, once with the accurate and once with the
  approximate multiplier (0x7E): 3x3 and 5x5 convolution, 16-tap FIR, 2nd-order
  IIR, 6x6 matrix product, Newton-Raphson square root, factorial. Loads, stores
  and branches are left to the testbench. Typical mean relative output errors
  with approximation: convolutions 0.8-0.9 %, FIR 0.35 %, IIR 0.16 %, matrix
  product 1.6 %. Newton-Raphson reaches about 7 % and factorial about 90 %: small
  products suffer, because the absolute error of a product does not shrink with
  its size. Those two are only reported. Every approximate product is checked
  against its error bound.

To run one testbench with Verilator (5.x):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_exe_stage \
        -y rtl -y tb +libext+.sv -Irtl rtl/approx_pkg.sv tb/tb_ref_pkg.sv tb/tb_exe_stage.sv
    ./obj_dir/Vtb_exe_stage

Replace `tb_exe_stage` with any other testbench name. Every testbench finishes in
a few seconds.

## Files

| file | contents |
|------|----------|
| `rtl/approx_pkg.sv` | control-word struct, CSR addresses, opcodes, ALU op enum |
| `rtl/exe_stage.sv` | top: units, CSRs, address adder, EXE STAGE MUX |
| `rtl/alu_unit.sv`, `rtl/mul_unit.sv`, `rtl/div_unit.sv` | execution units with slot select, isolation and busy |
| `rtl/approx_csrs.sv` | alucsr / mulcsr / divcsr |
| `rtl/alu.sv`, `rtl/ecsa32.sv`, `rtl/eca4.sv`, `rtl/apx_fa.sv` | ALU and the error-controllable adder |
| `rtl/apx_mult32.sv`, `rtl/apx_mult16.sv`, `rtl/apx_mult8.sv`, `rtl/compressor_row42.sv`, `rtl/compressor42.sv` | approximate multiplier hierarchy |
| `rtl/acc_mult32.sv`, `rtl/acc_div32.sv`, `rtl/addr_gen.sv` | accurate circuits |
| `tb/tb_*.sv` | testbenches; `tb/tb_ref_pkg.sv` holds shared reference models |
