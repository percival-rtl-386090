# PERCIVAL posit datapath in SystemVerilog

PERCIVAL adds posit arithmetic to an application-class RISC-V core (CVA6,
RV64GC) without removing the IEEE floating-point unit, so that the same program
can be run with floats and with posits on one chip. The posit format here is
Posit32, that is Posit<32,2>. The most unusual part is the *quire*: a 512-bit
fixed-point accumulator inside the arithmetic unit. A dot product summed in the
quire is exact, and is rounded only once, at the end.

This repository holds the part of that core which executes posit
instructions:

- the decoder for the `Xposit` custom instructions;
- a scoreboard over the posit registers;
- the posit register file;
- the Posit Arithmetic Unit (PAU), with its quire;
- the posit operations added to the integer ALU;
- the posit load/store path.

The rest of CVA6 is outside this RTL. That covers fetch, the integer pipeline
and register file, caches and the FPU. The top module, `percival_xposit`, takes
their place with plain ports: it is handed one instruction at a time together
with its integer `rs1` value, it returns integer results, and it talks to a
simple data memory.

## Posit32 in one paragraph

A posit is a 32-bit two's-complement word. After the sign comes a *regime*: a
run of equal bits, ended by the opposite bit. A run of k ones stands for
k-1; a run of k zeros stands for -k. Then come 2 exponent bits and the fraction.
The value is `(-1)^s * 2^(4*regime + exp) * 1.fraction`. Negative numbers are the
two's complement of the positive pattern. There are two special patterns:
`0x00000000` is zero and `0x80000000` is NaR ("not a real", standing in for
NaN and infinity alike).

Because the regime grows long for very large and very small values, precision
tapers off away from 1.0. The range runs from minpos = 2^-120 to
maxpos = 2^120.

Ordering posits as signed integers orders their values, with NaR below
everything. This is why the integer ALU can do posit comparisons, min and max
without new hardware.

## How a result is rounded

All units share one rounding back end, `posit_norm_encode`. Each arithmetic unit
hands it three things: a sign, an unsigned magnitude, and the scale (power of
two) of the magnitude's top bit. The back end then:

1. finds the leading one;
2. splits the scale into regime and exponent;
3. lays out the bits `{regime, exponent, fraction}`, using an arithmetic shift
   to build the regime run;
4. rounds to nearest, ties to even, on the bit pattern, with a sticky bit
   covering everything shifted out.

A non-zero result never rounds to zero or to NaR. It saturates at minpos or
maxpos instead, as the posit standard requires. The front end, `posit_decode`,
is the mirror image: it turns a posit into sign, scale and fraction.

## The Posit Arithmetic Unit (`pau`)

The PAU has three groups of units:

| group | units (module) | operations |
|-------|----------------|------------|
| COMP  | ADD (`posit_add`), MUL (`posit_mul`), DIV (`posit_adiv`), SQRT (`posit_asqrt`) | PADD, PSUB, PMUL, PDIV, PSQRT |
| CONV  | P2I/P2U/P2L/P2LU (`posit_to_int`, four instances), I2P/U2P/L2P/LU2P (`int_to_posit`, four instances) | PCVT.{W,WU,L,LU}.S, PCVT.S.{W,WU,L,LU} |
| FUSED | MAC (`posit_mac`), Q2P (`quire_to_posit`), quire register | QMADD, QMSUB, QCLR, QNEG, QROUND |

Details of the groups:

- **ADD** subtracts by taking the two's complement of operand B.
- **SQRT** and all the conversions use operand A only.
- **Integer sources** of a conversion arrive on the 64-bit `a_i` port.

**Latency.** The PAU is not pipelined: it holds one operation at a time.
Operands are registered when a request is accepted. The arithmetic is one
combinational block, and it gets L extra cycles to settle (a multi-cycle
path). The result is valid 1+L cycles after the handshake. L depends on the
operation:

| L | operations |
|---|------------|
| 2 | PADD, PSUB, QMADD, QMSUB |
| 1 | PMUL, PDIV, PSQRT, QROUND |
| 0 | everything else |

A static-timing run has to be given these multi-cycle constraints. Without
them, the adder and MAC paths will show as violations at the core clock.

**Handshake.**

- `ready_o` is high when the PAU is idle, and also in the cycle its current
  result leaves, so back-to-back operations lose no cycle.
- `done_next_o` warns one cycle ahead that a result is coming. The scoreboard
  uses it to keep the posit write port free for that result.
- A tag travels with each operation and names the destination register and
  file.

**Operand isolation.** The inputs of the groups not in use are held at zero, so
they do not toggle.

### The quire

The quire is 512 bits of two's complement with its binary point 240 bits from
the bottom:

```
 511   510 ............ 240   239 ............ 0
 sign  integer part (271 bits)  fraction (240 bits)
```

The smallest product of two posits, minpos^2 = 2^-240, sits on bit 0. The
largest, maxpos^2 = 2^240, still leaves 30 bits of headroom below the sign.
This means every product lands in the quire exactly, and about 2^31 of them can
be summed before it overflows.

**QMADD and QMSUB.** `posit_mac` forms the exact 28x28-bit significand
product, shifts it into place, and adds or subtracts it with a single 512-bit
adder.

**Clearing, negating and NaR.**

- QCLR clears the quire.
- QNEG negates it.
- A NaR operand sets the quire to the NaR pattern, a one followed by zeros.
  That pattern maps to itself under negation, and it stays NaR until the next
  QCLR.

**QROUND.** `quire_to_posit` takes the magnitude of the quire and passes all
512 bits to the shared rounding back end, so nothing is lost before rounding.

There is one quire, and it cannot be loaded or stored. Two accumulations
therefore cannot be interleaved, and the quire is not saved on a context
switch.

### Approximate division and square root

Division and square root use Mitchell's logarithmic approximation instead of
exact algorithms. Writing each operand as 2^e x (1+f):

- **Division:** the result fraction is f_a - f_b, borrowing from the scale
  when that is negative.
- **Square root:** the log is halved, so the result is 2^(e/2) x (1 + f/2),
  with an odd e folded into the fraction.

The testbenches measured these maximum relative errors:

| unit | maximum relative error |
|------|------------------------|
| division | 12.5% |
| square root | 6.1% |

The division figure is above the 11.11% quoted for the original units. The
logarithmic units this design is modelled on apply a correction that is not
specified here, so this design uses the uncorrected form (see "Where this
design departs"). Exact division or square root can be done in software with
the quire.

## Xposit instructions

All posit instructions use the `custom-0` major opcode `0001011`. The fields
are laid out like the F extension's:

```
31    27 26 25 24  20 19  15 14  12 11   7 6       0
[funct5 ][fmt ][ rs2 ][ rs1 ][funct3][  rd ][0001011]
```

`funct3` selects the kind of instruction:

| funct3 | instruction | encoding |
|--------|-------------|----------|
| `000` | an operation, chosen by `funct5` | |
| `001` | PLW | I-type immediate |
| `011` | PSW | S-type immediate |

Loads and stores address memory as `rs1` plus a signed 12-bit byte offset. The
`funct5` codes are in `posit_pkg::funct5_e`:

| funct5 | op | funct5 | op | funct5 | op |
|---|---|---|---|---|---|
| 00000 | PADD | 01010 | QNEG | 10100 | PSGNJ |
| 00001 | PSUB | 01011 | QROUND | 10101 | PSGNJN |
| 00010 | PMUL | 01100 | PCVT.W.S | 10110 | PSGNJX |
| 00011 | PDIV | 01101 | PCVT.WU.S | 10111 | PMV.X.W |
| 00100 | PMIN | 01110 | PCVT.L.S | 11000 | PMV.W.X |
| 00101 | PMAX | 01111 | PCVT.LU.S | 11001 | PEQ |
| 00110 | PSQRT | 10000 | PCVT.S.W | 11010 | PLT |
| 00111 | QMADD | 10001 | PCVT.S.WU | 11011 | PLE |
| 01000 | QMSUB | 10010 | PCVT.S.L | | |
| 01001 | QCLR | 10011 | PCVT.S.LU | | |

**The `fmt` field.** The encoding table gives `fmt = 10` for Posit32, and the
decoder follows it: an operation with any other `fmt` is illegal. Loads and
stores have no `fmt` field.

**Illegal instructions.** An unused `funct5` value is flagged as illegal, as
is a wrong `fmt` and any `funct3` other than the three above. An instruction outside the
custom-0 opcode is flagged as well.

**What the decoder outputs.** For each instruction the decoder (`posit_decoder`)
produces a scoreboard entry (`sc_instr_t`). It names the functional unit (PAU,
ALU, load, store) and the operation. It also says, for each source and for the
destination, whether that register is a posit register or an integer one. For
example:

- PCVT.S.W reads an integer register and writes a posit register.
- PEQ reads two posit registers and writes an integer register.

## The datapath and its hazards (`percival_xposit`)

```
 instr ─► posit_decoder ─► posit_scoreboard ──issue──┬─► pau ───────────┐
 int_rs1 ───────────────────────────────┐            ├─► posit_alu ─reg─┤─► posit write-back ─► posit_regfile
             posit_regfile (2 read) ─► operand mux ◄─┤                  │    (+ forward to operands)
                                                     └─► posit_lsu ─────┘─► integer write-back (int_wb_*)
                                                            │ mem_*
```

**Issue and completion.** Instructions issue in order, at most one per cycle,
and complete out of order. Completion times:

- an ALU operation (min, max, compares, sign injection, moves) writes back one
  cycle after issue;
- a load also writes back one cycle after issue, when its data returns;
- a PAU operation writes back 1+L cycles after issue.

**Stalls.** The scoreboard keeps one "pending" bit per posit register. It
stalls the instruction waiting to issue for four reasons:

| stall | cause |
|-------|-------|
| RAW (`stall_raw`) | a posit source is pending and is not being written back this cycle |
| WAW (`stall_waw`) | the destination is still pending from an older instruction |
| structural (`stall_struct`) | the instruction needs the PAU and the PAU cannot accept it |
| write port (`stall_wbport`) | a one-cycle instruction would write back in the same cycle that `done_next_o` says a PAU result arrives |

The WAW stall stops a slow PAU result from landing after a younger, faster one.
The write-port stall exists because each register file has one write port.

**Forwarding.** A source that is written back in the issue cycle is taken
straight from the write-back bus (`fwd1`, `fwd2`). A dependent instruction
therefore loses no cycle once its producer finishes.

**Write-back.** The PAU has priority on the write-back buses, then the ALU,
then loads. Assertions check that each register file sees at most one writer
per cycle.

**Integer destinations.** Hazards on integer destinations are left to the
host core's own scoreboard, as in CVA6. Integer results simply appear on
`int_wb_*`.

## Where this design departs from, or adds to, the original

- **Fixed by this RTL, not by the source.** All handshakes, port widths, the
  tag format, operand isolation, the single write port per register file and
  the exact stall rules.
- **Rounding.** Round to nearest, ties to even, as in the posit standard.
- **Special cases.** How each unit treats NaR, zero, overflow and negative
  square roots.
- **Approximate division.** It is plain Mitchell, with a 12.5% worst-case
  error. The source claims 11.11% for its log-approximate units without giving
  their construction.
- **`fmt` field.** The source contradicts itself: its text calls the field
  `01`, its tables show `10`. This design uses `10` and treats other values as
  illegal.
- **Integer core.** CVA6 and its FPU are not included, and the memory port is
  idealised. The port has one request per cycle and load data one cycle later,
  with no wait states. It takes 32-bit words only. Quire load and store do not
  exist, by design.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself if it hangs.

**Reference model.** The reference is `tb/posit_ref_pkg.sv`. It holds posit
decode and encode written independently of the RTL, working on `real` values
and bit strings. It also has the Mitchell models and the integer conversion
references. The arithmetic testbenches compare tens of thousands of random
and corner-case operands bit for bit.

**Restricted operands.** Where a `real` (double) cannot hold the exact result,
the testbenches use operands with few fraction bits. Such results are exact in
a double, and the reference then rounds once.

**What the unit testbenches check.**

- `tb_pau` checks every operation's result, its 1+L latency, its tag and the
  early-warning signal.
- `tb_posit_scoreboard` checks each stall and each forwarding case against a
  small model.

**End to end.** `tb_percival_xposit` runs the top module at its default
parameters. Its programs are:

- a 6x6 GEMM accumulated in the quire (QCLR, PLW, PLW, QMADD ..., QROUND, PSW);
- the same GEMM with PMUL and PADD, checked against a reference that rounds
  after every step;
- a 2x2, stride-2 max-pool with PMAX;
- conversions, moves, comparisons, sign injection, division, square root,
  QMSUB and QNEG, and two illegal instructions.

It counts how often each of these happens: RAW, WAW, structural and write-port
stalls, forwarded operands, quire operations and illegal instructions. A
mechanism that never occurs counts as a failure.

**Workloads.** `tb_percival_workloads` runs the evaluated kernels at full
size through the same top module and checks every output:

- GEMM at n = 16 and 32, with inputs k/16 in [-1, 1], both with the quire and
  with PMUL+PADD;
- the complete LeNet-5 2x2/stride-2 max-pool layer;
- a 3x3/stride-2 max-pool layer on a reduced 15x15x2 input.

It also prints cycle counts, measured against this testbench's ideal memory:

| kernel | cycles |
|--------|--------|
| GEMM 16x16, quire | 13,832 |
| GEMM 16x16, PMUL+PADD | 25,352 |
| GEMM 32x32, quire | 104,456 |
| GEMM 32x32, PMUL+PADD | 199,688 |
| LeNet-5 max-pool | 9,416 |

The fused QMADD nearly halves the GEMM time: PMUL then PADD occupy the
non-pipelined PAU for 2+3 cycles, while one QMADD occupies it for 3.

To run one testbench with Verilator 5, for example the whole datapath:

```
verilator --binary --timing -Irtl -Itb rtl/posit_pkg.sv tb/posit_ref_pkg.sv \
  rtl/posit_decode.sv rtl/posit_norm_encode.sv rtl/posit_add.sv rtl/posit_mul.sv \
  rtl/posit_adiv.sv rtl/posit_asqrt.sv rtl/posit_to_int.sv rtl/int_to_posit.sv \
  rtl/posit_mac.sv rtl/quire_to_posit.sv rtl/pau.sv rtl/posit_alu.sv \
  rtl/posit_regfile.sv rtl/posit_decoder.sv rtl/posit_scoreboard.sv \
  rtl/posit_lsu.sv rtl/percival_xposit.sv tb/tb_percival_xposit.sv \
  --top-module tb_percival_xposit -Mdir obj && obj/Vtb_percival_xposit
```

For a unit testbench, list `posit_pkg.sv`, `posit_ref_pkg.sv`, the unit, its
helpers (`posit_decode`, `posit_norm_encode`) and the testbench.

## Workloads and capacity

The datapath holds no data memory of its own, so the matrices and feature maps
live behind the memory port. For GEMM of size n, the data occupies 12n^2 bytes
(A, B and C at 4 bytes per element). The quire runs each dot product of length
n without loss, far below its 2^31 limit. Each QMADD keeps the PAU busy for
3 cycles, so the PAU is busy for 3n^3 cycles in total. For n = 256 that is
about 5.0x10^7 cycles.

A k x k max-pool costs k^2-1 PMAX per output, and each PMAX is a one-cycle ALU
operation. The three layer shapes below have roughly 1.2 thousand, 65 thousand
and 194 thousand outputs.

| layer | input | kernel, stride | outputs | PMAX operations |
|-------|-------|----------------|---------|-----------------|
| LeNet-5 | 28x28x6 | 2x2, 2 | 14x14x6 | 3,528 |
| AlexNet | 54x54x96 | 3x3, 2 | 26x26x96 | 519,168 |
| ResNet-50 | 112x112x64 | 3x3, 2 | 55x55x64 | 1,548,800 |

Nothing limits these sizes in the RTL. GEMM at 64 and above, and the AlexNet and
ResNet-50 layers at full size, are not simulated here: only their instruction
count differs from the sizes that are.
