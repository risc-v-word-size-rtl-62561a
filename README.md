# Word-size modular arithmetic unit for RISC-V (mulmod, addmod, submod)

Residue Number Systems (RNS) represent a large integer by its remainders
modulo a set of word-sized, pairwise coprime moduli m_1 .. m_n. Additions and
multiplications of large numbers then become n independent word-size
operations "a op b mod m_i". On an ordinary processor each of those costs a
multiply or add followed by a software reduction: a division, or a
multiply/shift/mask sequence for pseudo-Mersenne moduli 2^64 - c. That
reduction dominates the run time of RNS software.

The paper "RISC-V Word-Size Modular Instructions for Residue Number Systems"
proposes three RISC-V instructions that do the whole channel operation in
one instruction, with the modulus held in a third source register:

    mulmod rd, rs1, rs2, rs3     rd <- rs1 * rs2 mod rs3
    addmod rd, rs1, rs2, rs3     rd <- rs1 + rs2 mod rs3
    submod rd, rs1, rs2, rs3     rd <- rs1 - rs2 mod rs3

It then measures their benefit in a processor simulator. The RISC-V core gets
one pipelined modular adder with a delay of 2 cycles and one pipelined
modular multiplier with a delay of 4 cycles. A "long delay" variant uses 4
and 9. The RTL here builds that execution unit: the decoder for the three
encodings, the two pipelined arithmetic units with those latencies, and the
glue that issues to them and returns their results. It does not build the
processor the unit plugs into.

## Instruction encoding

All three instructions use one 32-bit format, modelled on the fused
multiply-add (R4) format. The standard source and destination fields stay in
place, and the third source register takes the top five bits:

| bits  | 31..27 | 26..25 | 24..20 | 19..15 | 14..12 | 11..7 | 6..0    |
|-------|--------|--------|--------|--------|--------|-------|---------|
| field | rs3    | 00     | rs2    | rs1    | funct3 | rd    | 0001011 |

The opcode 0001011 is the RISC-V *custom-0* major opcode. funct3 selects the
operation: 000 mulmod, 001 addmod, 010 submod. Example:
`mulmod x5, x6, x7, x8` is `0x4073028B`. `modinst_decoder` accepts exactly
these three funct3 values with bits 26..25 = 00. Every other word is reported
as "not ours", so the rest of custom-0 stays free.

A core executing these needs a third register-file read port for rs3. That
is the only change to the integer datapath outside this unit.

## Arithmetic semantics chosen here

The paper gives the instructions as mathematical formulas. The RTL fixes
what they leave open:

* **Unsigned words.** Operands and modulus are unsigned 64-bit values. RNS
  moduli are chosen as large as the word, e.g. 2^64 - c, and they do not fit
  a signed 64-bit integer.
* **Any operands.** The result is always the true residue in [0, m), even
  when rs1 or rs2 is not already reduced modulo rs3. Software normally passes
  residues below m, but unreduced operands do occur in RNS code. For example,
  a residue modulo one channel may be fed to an operation in another channel
  during base extension. The workload test below relies on this.
* **Modulus zero.** With m = 0 the unit returns the plain wrapping result:
  a + b, a - b, or the low 64 bits of a * b. This follows the RISC-V rule
  that a remainder by zero returns the dividend.

## The modular multiplier (`modmul_unit`)

The modulus changes with every instruction, since it is a register operand.
So no precomputed reciprocal is available, and Barrett or Montgomery
reduction cannot be used directly. The unit therefore computes a true
128-by-64-bit remainder:

1. Stage 0 forms the full 128-bit product of the two operands.
2. Stages 1 .. LAT-1 run a restoring remainder. The product bits are shifted
   in most significant bit first, into a partial remainder r that always
   stays below m:

       r <- 2r + bit;  if r >= m then r <- r - m

   The 128 steps are split evenly over the LAT-1 stages. With the default
   LAT = 4, each stage does 43 steps; with LAT = 9, each does 16.

Each step needs a 65-bit compare and subtract, so a stage is a chain of
about 43 such steps. This matches the paper's latency in cycles. It does not
match the 1 GHz clock the paper assumed: a chain that long does not fit in
1 ns. A design aimed at that clock would need a faster reduction circuit
(for example one that handles several quotient bits per step) or a slower
clock. Only the interface and the cycle latency here follow the paper.

The unit is fully pipelined. One mulmod can start every cycle, and its result
appears exactly LAT cycles later. The paper states that the simulated
operators are pipelined; only division and remainder are not.

## The modular adder (`modaddsub_unit`)

This unit serves both addmod and submod, selected by `in_sub`:

* The first LAT-1 stages reduce each operand modulo m with the same
  restoring-remainder step as the multiplier. There are 64 steps per
  operand, split over those stages. When the operands are already residues,
  this leaves them unchanged.
* The last stage adds or subtracts the two residues. It then makes one
  correction: it subtracts m if the sum is at least m, or adds m if the
  difference went negative.

The default latency is 2; the long-delay setting is 4. It is also fully
pipelined.

## The execution unit (`rnsmod_unit`, top)

`rnsmod_unit` sits beside the core's integer pipeline:

    issue_instr -> modinst_decoder -> rs1_idx/rs2_idx/rs3_idx -> core register file
    rs1_val, rs2_val, rs3_val  --+--> modaddsub_unit (ADD_LAT) -> add_wb_{valid,rd,data}
                                 +--> modmul_unit    (MUL_LAT) -> mul_wb_{valid,rd,data}

* **Issue.** The core presents an instruction word with `issue_valid`. The
  unit decodes it and returns the three register indices combinationally.
  The core returns the three values in the same cycle. `issue_accept` marks
  a mulmod, addmod or submod that has been taken; any other word is ignored
  and left to the core. There is no back-pressure, so one instruction can
  issue every cycle.
* **Writeback.** Each unit has its own writeback port. Results of the two
  units can therefore arrive in the same cycle. An addmod issued after a
  mulmod can finish first (2 < 4). The destination index rd travels with the
  operation as a tag.
* **Left to the core.** Data hazards (stalling or forwarding), merging the
  two writeback ports into the register file, and discarding writes to x0
  are the core's job, as they are for its other multi-cycle units.

Parameters: `XLEN` (64), `ADD_LAT` (2), `MUL_LAT` (4). Both latencies must be
at least 2. Reset `rst_n` is asynchronous and active-low, and clears only the
valid bits.

## Running RNS modular multiplication on the unit

The workload the paper evaluates is one RNS Montgomery modular
multiplication, z = x * y * M^-1 mod p, for 8 to 64 channels of 64-bit moduli
(a 512- to 4096-bit modulus p). It uses two bases, Bm and Bm':

1. s = x*y in both bases.
2. t = s * (-p^-1) in Bm.
3. Extend t from Bm to Bm'. This extension is approximate: it leaves out the
   correction by a multiple of M.
4. u = t*p in Bm'.
5. v = s + u in Bm'.
6. w = v * M^-1 in Bm'.
7. Extend w back from Bm' to Bm.

The second extension has two variants:

* **Szabo-Tanaka.** Compute the mixed-radix digits of w with submod and
  mulmod, then evaluate them in Bm by Horner's rule with mulmod and addmod.
* **Kawamura et al.** Compute xi_j = w_j * (M'/m'_j)^-1 and accumulate
  xi_j * (M'/m'_j) mod m_i. Then subtract k * M'. The integer k is estimated
  from the top bits of the xi_j with ordinary integer instructions.

`tb/rns_modmul_run.sv` runs both variants entirely as mulmod, addmod and
submod instructions through `rnsmod_unit`. Channel operations of one step are
issued back to back.

## Verification

Each testbench prints `TB_RESULT checks=N failures=F` and stops on a
watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_modinst_decoder` | Field extraction and the operation for random words of all three instructions. Rejection of the other funct3 codes, non-zero bits 26..25, other opcodes and random words. |
| `tb_modaddsub_unit` | Latencies 2, 3 and 4 side by side (the adder range considered). 4000 operations with random bubbles; pseudo-Mersenne, random, small, 0 and 1 moduli; edge operands. Each result is compared with 128-bit `%` arithmetic and must arrive exactly LAT cycles after issue. |
| `tb_modmul_unit` | The same for the multiplier at every latency from 4 to 9. |
| `tb_rnsmod_unit` | The whole unit at its default parameters. The testbench acts as a core with a 3-read-port register file and 20000 issued words, mixed with standard RV64 words. It checks each result, its rd, its port and its latency. It also checks that each of these happened at least once: all three instructions, ignored foreign words, back-to-back issue to each unit, both units writing back in one cycle, and an addmod overtaking a mulmod. |
| `tb_rns_modmul` | The workload above at 8 and 64 channels with latencies 2/4, and at 64 channels with 4/9. Every instruction result is checked. The extended w must agree with a reference mixed-radix reconstruction for both extensions. The exact identity W*M = x*y + t'*p must hold modulo four independent check moduli. |

The cycle counts `tb_rns_modmul` prints come from a simple issue loop that
waits for each step to drain before starting the next. They measure that
loop, not a processor, and cannot be compared with the paper's cycle counts.
Those include loads, stores, loop overhead and the caches of a full core.

To simulate with Verilator, for example the end-to-end test:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/rnsmod_pkg.sv tb/tb_rnsmod_unit.sv --top-module tb_rnsmod_unit -o sim
    ./obj_dir/sim

Replace the testbench name to run another one. To try the long-delay
configuration, instantiate `rnsmod_unit #(.ADD_LAT(4), .MUL_LAT(9))`.

## What is not here, and where the RTL departs from the paper

* **Not built.** The processor is not built: the in-order and out-of-order
  pipelines, the register file with its third read port, the integer ALUs
  and multiplier, the caches and the DDR4 memory. The paper uses stock
  simulator models for these and does not design them. `rnsmod_unit` exposes
  the register-file read and writeback signals as ports instead.
* **Taken from the paper.** The instruction formats and codes, the
  semantics, the 64-bit word, the latencies (2/4, and 4/9 in the long-delay
  setting), one adder and one multiplier, and full pipelining.
* **Choices of this design.** The paper leaves these open:
  * unsigned operands;
  * full reduction of unreduced operands;
  * the result for m = 0;
  * the restoring-remainder circuits and how their steps are split across
    stages;
  * the same-cycle operand handshake and the separate writeback ports;
  * the reset style;
  * rejecting the other funct3 values in custom-0.
* **Clock rate.** The latencies in cycles match the paper. The logic depth
  per stage is far beyond a 1 GHz cycle (see the multiplier section).
