# Big-PERCIVAL posit datapath: 64-bit posits and a 1024-bit quire for an RV64 core

Big-PERCIVAL is an RV64 application core extended so that it can compute natively with
**posits** instead of IEEE doubles. A posit is a tapered-precision real-number format. Values
near 1 get more fraction bits than a double of the same width. Very large and very small values
get fewer. Posits have one zero, one exception value (NaR, "not a real") and no overflow to
infinity. The core adds a posit register file, a **Posit Arithmetic Unit (PAU)** and posit loads
and stores. It also adds a **quire**: a 1024-bit fixed-point accumulator that holds any sum of
posit64 products exactly. Dot products, matrix products and solver inner loops then round only
once, at the end. That single rounding is the source of the large accuracy gains that posit64
shows over doubles in linear algebra kernels.

This RTL implements the posit part of the core:

- the Xposit instruction decoder;
- the 32-entry posit register file;
- the PAU, with every arithmetic, conversion, comparison and quire unit;
- the posit load/store path;
- a small sequencer that ties them together.

The rest of the base core sits outside the top module `big_percival_top`:

- fetch, issue and the scoreboard;
- the integer pipeline;
- the IEEE FPU;
- the caches and MMU.

That outside logic hands over one instruction at a time. It also gives the value of integer
register rs1 and accepts integer results. The top's memory requests go to a data-cache port.

## 1. The posit64 format as the hardware sees it

The parameters are n = 64 bits and es = 2 exponent bits. A word `p` is read as follows:

| field | meaning |
|---|---|
| sign | bit n-1. A negative posit is the 2's complement of its magnitude. |
| regime | A run of identical bits after the sign, ended by the opposite bit or by the end of the word. A run of k ones means r = k-1. A run of k zeros means r = -k. |
| exponent | The next 2 bits, e (missing bits read as 0). |
| fraction | All remaining bits, f, with a hidden 1 in front. |

The value is `(-1)^s * 1.f * 2^(4r+e)`. The hardware works only with the **scale** `4r+e` and
the significand `1.f`. Two words are special: all zeros is 0, and `100…0` is NaR. The largest
posit (maxpos) is 2^248. The smallest positive posit (minpos) is 2^-248. Comparing two posits
is a plain signed-integer comparison of their bit patterns. The comparison, min/max and
sign-injection instructions rely on this.

### Decoding (`posit_decode`)

The decoder works in sign-magnitude form:

1. Take the absolute value.
2. Count the regime run with a leading-bit count.
3. Shift the regime out.
4. Read e and f from what is left.

Its output is a small signed scale (`$clog2(N)+6` bits) and an N-4 bit significand with the
hidden bit on top. All arithmetic units share this format. The decoder is combinational.

### Encoding and rounding (`posit_encode`)

This is the part of a posit unit that is hardest to get right, and every unit goes through it.
The input is a sign, a scale, a fraction of any width FW, and a sticky bit. The encoder works in
four steps:

1. **Clamp** the scale to ±248. A clamped value loses its fraction. This makes the result
   saturate at maxpos or minpos: a nonzero real never rounds to 0 or to NaR.
2. **Build** the unrounded bit string `regime-start, e, fraction`, followed by zeros. For
   r >= 0 the string starts with `10`. For r < 0 it starts with `01`.
3. **Shift** the string right arithmetically, by r for r >= 0 or by -r-1 for r < 0. Copying the
   top bit grows the regime run to its full length.
4. **Round.** The top N-1 bits are the magnitude. The next bit is the guard bit. Everything
   below it, ORed with the incoming sticky, is the sticky bit. Round to nearest, ties to even,
   by adding the guard bit when `guard & (sticky | lsb)`.

A carry out of the fraction simply moves into the exponent and then the regime. This is the
posit property that makes rounding a single integer increment. The result is then negated if
the sign is set.

Every unit hands the encoder all the bits it computed, or their OR as sticky. Each operation
is therefore rounded once and correctly.

## 2. The PAU (`posit_pau`)

The PAU receives an operation code and two XLEN = 64-bit operands. Posits sit in the low N
bits. The integer-to-posit conversions and PMV.W.X take an integer in operand A. All units see
the operands at once, and the operation code selects the result. The output is always 64 bits:

- Posit results are zero-extended.
- 32-bit integer results are sign-extended.

| unit | module | operations | latency (accept to `out_valid`) |
|---|---|---|---|
| adder | `posit_add` | PADD, PSUB | 1 |
| multiplier (exact) | `posit_mul` | PMUL | 1 |
| multiplier (approximate) | `posit_mul_approx` | PMUL | 1 |
| divider (exact) | `posit_div` | PDIV | N+1 (65) |
| divider (approximate) | `posit_div_approx` | PDIV | 1 |
| square root (exact) | `posit_sqrt` | PSQRT | N (64) |
| square root (approximate) | `posit_sqrt_approx` | PSQRT | 1 |
| posit to int | `posit_to_int` x4 | PCVT.W.S, .WU.S, .L.S, .LU.S | 1 |
| int to posit | `int_to_posit` x4 | PCVT.S.W, .S.WU, .S.L, .S.LU | 1 |
| quire MAC | `posit_quire_mac` | QMADD, QMSUB | 1 |
| quire register | `posit_quire` | QCLR, QNEG, MAC write | 1 |
| quire to posit | `posit_q2p` | QROUND | 1 |
| compare / move | inside the PAU | PMIN, PMAX, PEQ, PLT, PLE, PSGNJ*, PMV.* | 1 |

An exact division or square root by a special operand (NaR, zero, division by zero) finishes
in 2 cycles.

Handshake:

- `in_ready` is high while the PAU is idle.
- An operation is accepted on `in_valid && in_ready`.
- `out_valid` pulses for one cycle.
- `result` holds its value until the next operation.

There is no output back-pressure. The PAU is unpipelined: an exact division blocks the unit
for its whole duration.

Synthesis-time parameters:

| parameter | default | effect |
|---|---|---|
| `N` | 64 | posit width; 32 gives the posit32 variant |
| `QW` | 16·N | quire width (1024 bits for posit64) |
| `QUIRE_EN` | 1 | 0 removes the quire, the MAC and the quire-to-posit unit |
| `APPROX_MUL` | 0 | 1 selects the logarithm-approximate multiplier |
| `APPROX_DIVSQRT` | 0 | 1 selects the logarithm-approximate divider and square root |

The default, a 64-bit exact PAU with quire, is the configuration the design is built around.

### Add and subtract (`posit_add`)

PSUB negates operand B. The adder then follows the classic path:

1. Order the operands by magnitude (scale, then significand).
2. Shift the smaller one right by the scale difference into a 2·(N-4)+4 bit field. Bits
   shifted out are ORed into a sticky bit.
3. Add or subtract the magnitudes.
4. Normalise with a leading-zero count.
5. Send the whole field to the encoder.

An exact cancellation gives 0. NaR on either input gives NaR.

### Multiply (`posit_mul`)

The two 60-bit significands give an exact 120-bit product. A product of 2 or more increments
the scale. The full product goes to the encoder.

### Divide (`posit_div`): non-restoring, one bit per cycle

The partial remainder starts as `R = Ma − Mb`. The two significands are in [1,2), so the
quotient is in (0.5, 2). Each cycle does two things:

- The quotient bit becomes `~sign(R)`.
- R becomes `2R − Mb` when R ≥ 0, and `2R + Mb` when R < 0.

A negative R is never restored: the next step adds the divisor back instead of subtracting
it. After N-1 iterations the quotient has 1 integer bit and N-2 fraction bits. The final
remainder, plus Mb if negative, is nonzero exactly when the true quotient has more bits. That
gives the encoder a correct sticky bit.

### Square root (`posit_sqrt`): non-restoring digit recurrence

1. An odd scale is made even by doubling the significand, so the radicand is in [1,4) and the
   result scale is half the input scale.
2. The radicand becomes a 2·QB-bit integer, with QB = N-2 root bits.
3. Each cycle brings down two radicand bits d and updates the signed remainder R and the
   partial root Q:
   - `R ← 4R + d − (4Q+1)` if R ≥ 0;
   - `R ← 4R + d + (4Q+3)` if R < 0.
4. The new root bit is `~sign(R)`. The final remainder, restored when negative, gives the sticky
   bit.

A negative radicand gives NaR.

### The logarithm-approximate units (`posit_*_approx`)

These units use Mitchell's approximation, `log2(1+f) ≈ f`. With it, multiplication, division
and square root become additions, subtractions and a halving of the fixed-point number
`scale.fraction`:

- **multiply**: the fraction sum's carry goes into the scale;
- **divide**: the fraction difference's borrow comes out of the scale;
- **square root**: an odd scale moves its extra half into the fraction before the halving.

Going back from the log domain uses the inverse approximation, `2^f ≈ 1+f`. The relative error is of the order of 10 %. These units are small and finish in one
cycle. Use them only where the application tolerates that error.

### Conversions (`posit_to_int`, `int_to_posit`)

**Posit to integer.** The significand is shifted left by the scale into a 64+N bit field,
rounded to nearest even, and saturated:

- to the signed range, or to `[0, 2^IW−1]` for the unsigned variants;
- a negative value converted to unsigned gives 0;
- NaR gives the most negative integer (signed) or all ones (unsigned).

**Integer to posit.** The integer's absolute value is normalised with a leading-zero count. The
whole value is sent to the encoder, so a 64-bit integer is rounded once.

## 3. The quire

The quire is a 1024-bit 2's complement fixed-point register. Its least significant bit weighs
minpos² = 2^-496.

| part | bits |
|---|---|
| fraction | 496 |
| integer | 496 (enough for maxpos² = 2^496) |
| carry guard | 31 |
| sign | 1 |

The 31 guard bits are what allow 2^31 − 1 products to be summed without overflow.

`posit_quire_mac` forms the exact product of two posits, 120 significand bits with no rounding.
It shifts the product to its place, at offset `scale_a + scale_b + 496`, negates it for QMSUB,
and adds it to the quire in one cycle. A NaR operand makes the quire NaR. The quire holds NaR
as the pattern `100…0`, which stays NaR under further accumulation in this design. A zero
operand leaves the quire unchanged.

`posit_quire` is the register itself:

- QCLR sets it to 0.
- QNEG replaces it with its 2's complement.
- A MAC writes the new sum.
- Reset clears it.

`posit_q2p` (QROUND) rounds the quire to a posit:

1. Take the absolute value.
2. Run a 1024-bit leading-zero count, which gives the scale `527 − lz − 496`.
3. Send all bits below the leading one to the encoder.

Values beyond ±maxpos saturate. The quire-NaR pattern gives NaR.

## 4. Xposit instruction encoding (`xposit_decoder`)

All instructions use the RISC-V custom-0 opcode `0001011`. funct3 selects the class:

| funct3 | instruction | format |
|---|---|---|
| 001 | PLW (32-bit posit load, sign-extended) | I-type, rs1 integer base, rd posit |
| 101 | PLD (64-bit posit load) | I-type |
| 011 | PSW (32-bit posit store) | S-type, rs1 integer base, rs2 posit |
| 110 | PSD (64-bit posit store) | S-type |
| 000 | arithmetic | R-type, bits 26:25 = `10`, funct5 in bits 31:27 |

The arithmetic funct5 values are listed below. The decoder also marks each instruction's
register sources and destination:

| funct5 | instruction | rd |
|---|---|---|
| 00–06 | PADD, PSUB, PMUL, PDIV, PMIN, PMAX, PSQRT | posit |
| 07–0A | QMADD, QMSUB, QCLR, QNEG | none (quire) |
| 0B | QROUND | posit |
| 0C–0F | PCVT.W.S, PCVT.WU.S, PCVT.L.S, PCVT.LU.S | integer |
| 10–13 | PCVT.S.W, PCVT.S.WU, PCVT.S.L, PCVT.S.LU | posit (rs1 integer) |
| 14–16 | PSGNJ, PSGNJN, PSGNJX | posit |
| 17 | PMV.X.W | integer |
| 18 | PMV.W.X | posit (rs1 integer) |
| 19–1B | PEQ, PLT, PLE | integer |

Some register fields are fixed at zero by the encoding:

- rs2 of the one-operand instructions (PSQRT, QCLR, QNEG, QROUND, the conversions, the moves);
- rs1 of QCLR, QNEG and QROUND;
- rd of the quire updates QMADD, QMSUB, QCLR and QNEG.

A word with a nonzero fixed field is flagged invalid. So is any other word in the opcode: funct5
above 1B, bits 26:25 not equal to `10`, or an unused funct3.

## 5. Register file, load/store and the sequencer

**`posit_regfile`** holds 32 posit registers. It has two combinational read ports and one write
port, and reset clears it.

**`posit_lsu`** computes `rs1 + sign-extended 12-bit offset`. It then issues one request on a
valid/ready memory port, with a size of 8 bytes for PLD/PSD or 4 bytes for PLW/PSW. A store
completes when the request is accepted. A load completes when `mem_rsp_valid` returns the data.

**`big_percival_top`** runs one instruction at a time through three states:

1. **IDLE.** `instr_ready` is high. An accepted instruction is decoded, and its posit source
   registers and the integer rs1 value are captured. An invalid word raises `illegal` for one
   cycle and is dropped.
2. **ISSUE.** The PAU or the LSU is started.
3. **WAIT.** The sequencer waits for the PAU's `out_valid` or the LSU's completion. It then
   writes the posit register file or drives `int_wb_valid/int_wb_rd/int_wb_data`, and returns
   to IDLE.

A one-cycle PAU operation takes 3 cycles from acceptance to write-back. An exact division takes
N+3 cycles and an exact square root N+2. While the sequencer is not idle, `busy` tells the issue
stage to hold later posit instructions.

## 6. Where this RTL departs from the paper

The paper describes the posit extension inside a full out-of-order-completion RV64 core and
gives the PAU's structure, its options and the instruction set. The following are this design's
own choices, or simplifications:

- **Issue and hazards.** In the core, the base pipeline's scoreboard issues posit instructions
  and tracks their results. Here a sequencer handles one posit instruction at a time and
  signals `busy`. The order of results is the same. Only throughput, not function, differs.
- **Memory.** The posit LSU has its own simple valid/ready request port. In the core, posit
  accesses share the base core's LSU and data cache.
- **Units and latencies.** The paper lists the units and says that the exact divider and square
  root use a non-restoring algorithm. It does not give their internal structure, pipelining or
  cycle counts. All latencies above are this design's. The flip-flop counts reported for the
  original FPGA builds suggest it registers more internal state than this unit does.
- **Approximate units.** The paper only refers to logarithm-approximate units from other work.
  The Mitchell approximation used here is the textbook form. Its error may differ from the
  units the paper synthesised.
- **Quire NaR.** The encoding of NaR inside the quire (`100…0`) is this design's choice.
- **Sign injection and moves.** The paper names PSGNJ/PSGNJN/PSGNJX and PMV.X.W/PMV.W.X but does
  not define them for posits. Here sign injection returns rs1 or its 2's complement negation.
  The moves copy the raw bit pattern, with PMV.X.W sign-extending it.
- **Integer conversions.** Rounding to nearest even, and the saturation and NaR values, are
  chosen here.
- **posit32.** The paper's posit32 build also narrows the register file and memory accesses.
  Here `N = 32` narrows the PAU, the register file and the quire (512 bits), and 32-bit values
  use PLW/PSW. The posit32 PAU is simulated on its own in all four quire and division/square-root
  combinations. The whole top is also simulated as posit32 (a GEMM run with PLW/PSW).
- **Omitted parts.** The base core's IEEE FPU, integer units, caches and MMU are not part of
  this RTL. Neither are the control and status registers or the exceptions.

## 7. Simulating

Every testbench in `tb/` checks itself. At the end it prints
`TB_RESULT checks=<n> failures=<m>` and calls `$finish`, and a watchdog ends a hung simulation.
Reference values are computed in `tb/posit_ref_pkg.sv`, independently of the RTL: posits are
converted to and from SystemVerilog `real` bit by bit, and exact quire images are built from
reals. With Verilator 5:

```sh
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/posit_pkg.sv tb/posit_ref_pkg.sv rtl/*.sv tb/tb_posit_pau.sv \
    --top-module tb_posit_pau -o sim
./obj_dir/sim
```

Replace `tb_posit_pau` with any other testbench:

| testbench | what it checks |
|---|---|
| `tb_posit_add` | PADD and PSUB |
| `tb_posit_mul` | PMUL |
| `tb_posit_div` | PDIV, including its cycle count |
| `tb_posit_sqrt` | PSQRT, including its cycle count |
| `tb_posit_approx` | the three approximate units |
| `tb_posit_to_int` | posit-to-integer conversions |
| `tb_int_to_posit` | integer-to-posit conversions |
| `tb_posit_quire_mac` | the quire MAC |
| `tb_posit_quire` | the quire register |
| `tb_posit_q2p` | quire-to-posit rounding |
| `tb_posit_regfile` | the register file |
| `tb_xposit_decoder` | every encoding |
| `tb_posit_lsu` | posit loads and stores |
| `tb_posit_pau` | every PAU operation |
| `tb_posit_pau_configs` | the six non-default PAU configurations side by side: posit32 and posit64, with and without the quire, exact or approximate division and square root |
| `tb_big_percival_top` | the whole design |

`tb_big_percival_top` runs the whole design at its default parameters, with a 1024-bit quire
and posit64. It drives a small instruction program against a memory model with random
back-pressure and latency. The program computes a 4×5×6 matrix product C = A·B + C:

1. PLD loads the operands.
2. QMADD accumulates the products in the quire.
3. QROUND rounds the quire to a posit.
4. PSD stores the result.

The testbench then compares every element of C with the exactly rounded value. It also runs
division, square root, PLW/PSW, PLT, QNEG, integer write-back, and an illegal word. It counts
every mechanism and fails if one never occurred. It takes about ten seconds.

Further testbenches run scientific kernels as instruction programs through
`big_percival_top`, against the same memory model. All but the last use the default parameters:

| testbench | kernel | size | about |
|---|---|---|---|
| `tb_workload_cg` | conjugate gradient, stopping at a residual norm of 1e-12 | 48 unknowns, dense generated SPD matrix | 1.9 M cycles |
| `tb_workload_bicg` | biconjugate gradient, same stopping rule | 59 unknowns, dense generated unsymmetric matrix | 1.5 M cycles |
| `tb_workload_gemm` | C = αAB + βC with the quire, without it (multiply and add, rounding each), and with 6-loop tiling (tiles of 5 and 7) | 20 x 25 x 30 (PolyBench MINI) | 1.3 M cycles |
| `tb_workload_cholesky` | in-place Cholesky factorisation, as in PolyBench | 40 x 40 (PolyBench MINI) | 0.23 M cycles |
| `tb_workload_polybench` | 3mm, Durbin, ludcmp and covariance with the quire; fdtd-2d and seidel-2d with add, subtract, multiply and divide only; each compared with a double-precision run of the same algorithm (3mm bit for bit) | PolyBench MINI sizes | 6.6 M cycles |
| `tb_workload_gemm32` | the same GEMM, with and without the quire, on the posit32 build (`N = 32`, 512-bit quire, PLW/PSW) | 20 x 25 x 30 | 0.6 M cycles |

Except in the GEMM variant without the quire, every inner product is accumulated in the quire
and rounded once. The GEMM data are chosen so that every variant must reproduce the exact result
bit for bit. The solvers check the solution against the known integer solution. The Cholesky test rebuilds
L·Lᵀ and compares it with A. The other PolyBench kernels must agree with the double-precision
run within 1e-9 of the largest reference value. Larger problems only need larger size constants (`NS`, or `NI/NJ/NK`) and more simulation time:
the matrices live in the memory model, not in the design.

## 8. Trust and limits

- Every unit is checked against values computed independently: exact special cases, randomly
  chosen exactly representable results, and random operands compared with the reference
  rounded result. Most random checks require an exact bit match. Division and square root on
  random operands accept one unit in the last place, because the reference works in 53-bit
  `real` arithmetic.
- Every testbench has been shown to catch a deliberately broken copy of its unit.
- The approximate units are checked against an independent model of the same approximation,
  not against exact results.
- Operations whose results need more than 53 significant bits (long products, quire sums) are
  checked through exactly representable cases and through quire images built bit-exactly.
  They are not checked against a posit64 software library.
- Timing closure and area have not been studied. The quire MAC, with a 1024-bit shifter and
  adder, and the 1024-bit leading-zero count in QROUND are single-cycle combinational paths. At
  a high clock rate they would need pipelining.
