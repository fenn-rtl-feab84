# FeNN: a 32-lane, 16-bit vector co-processor for spiking neural networks

Simulating a spiking neural network (SNN) involves almost no arithmetic per byte
moved. A neuron update is a handful of multiply-adds on a few state variables.
Spike propagation is mostly "fetch a row of weights and add it to an input
accumulator". Hardware built around large multiply-accumulate arrays sits idle on
this kind of work. What pays off is wide, single-cycle access to on-chip memory and
cheap control flow.

FeNN ("FPGA-Enhanced Neural Network") is a programmable soft processor for FPGAs
that targets exactly this kind of work. Its main ideas are these:

* **A vector unit tightly coupled to a small scalar RISC-V core.** The scalar core
  runs all control flow: loops over time steps, iteration over spikes, address
  arithmetic. Each vector instruction it meets is handed to FeNN through the core's
  standard co-processor port (the CV32E40X "eXtension interface", XIF).
* **32 lanes of 16-bit fixed point.** A vector is 512 bits. A comparison of two
  vectors yields one bit per lane, so a mask fits exactly in a 32-bit scalar
  register. The scalar core can then test, combine or iterate over masks with
  ordinary integer instructions, and FeNN needs no mask registers.
* **Vector memory one vector wide.** Eight UltraRAM chains side by side load or
  store a whole 512-bit vector every cycle.
* **Accuracy at 16 bits.** A fixed-point multiply can round stochastically, using a
  per-lane Xoroshiro32++ random number generator. Adds and subtracts can saturate.
  With these, slowly decaying state variables do not freeze at zero, and
  out-of-range inputs do not wrap around.

This repository gives synthesizable SystemVerilog for the FeNN co-processor and the
memories around it. It also contains self-checking testbenches that run the
published evaluation workloads. The scalar core, the host processor and the vendor
AXI IP are not included. Their connections are ports of the top module.

## 1. Structure

```
               host (ARM, AXI BRAM controllers)            scalar RISC-V core (not included)
                     |port B            |port B               |fetch   |load/store   | XIF
                 +---------+       +---------+                |        |             | issue / commit / result
fenn_system      |  IMEM   |       |  DMEM   |<---------------+--------+             |
                 |fenn_bram|       |fenn_bram|  port A                               v
                 +---------+       +---------+                    +-------------------------------------+
                      ^ port A (fetch)                            | fenn_coproc                         |
                                                                  |  decode --> execute --> writeback   |
                                                                  |     |        |  ^  bypass  |        |
                                                                  |     |    VALU, RNG step,   |        |
                                                                  |     |    address (LS)      |        |
                                                                  |  fenn_vrf (32 x 512b)   fenn_rng    |
                                                                  +-----------------|-------------^-----+
                                                                           addr/wdata |      rdata |
                                                                               +------v------------+--+
                                                                               | fenn_vmem 8 x 64b     |
                                                                               | (UltraRAM chains)     |
                                                                               +-----------------------+
```

| module | role |
|---|---|
| `fenn_pkg` | widths, instruction encoding, decoded micro-op, XIF structs, the decoder function |
| `fenn_system` | top: co-processor, vector memory, instruction and data BRAMs |
| `fenn_coproc` | the three-stage vector pipeline with register file and RNG |
| `fenn_decode_stage` | XIF issue and commit; decodes and holds one instruction until commit |
| `fenn_execute` | the single execute cycle: operand read and bypass, ALU, RNG step, memory request |
| `fenn_loadstore` | effective address and vector-memory port control |
| `fenn_writeback` | register/RNG-state write, load data, XIF result |
| `fenn_valu`, `fenn_lane` | 32 lanes of 16-bit add/sub/mul/select/compare |
| `fenn_rng`, `fenn_xoroshiro32pp` | per-lane random number generators and their state registers |
| `fenn_vrf` | 32 x 512-bit register file, 2 read + 1 write ports |
| `fenn_vmem`, `fenn_uram_bank` | vector data memory, 8 banks of 64 bits |
| `fenn_bram` | 32-bit true dual-port RAM (instruction and data memory of the scalar core) |

## 2. How an instruction travels

FeNN's pipeline runs beside the scalar core's own pipeline. The two are kept in step
by three XIF transactions:

1. **Issue.** The scalar core's decode stage offers each instruction word, with the
   current values of the scalar registers named in its `rs1` and `rs2` fields.
   `fenn_decode_stage` decodes it in the same cycle. A word in FeNN's opcode space
   is accepted. Anything else is refused (`accept=0`) and stays with the core.
   `writeback=1` in the response tells the core that a scalar result will follow.
   This happens for compares, which return a mask, and for `VEXTRACT`. The core
   uses that to stall later readers of `rd`.
2. **Commit.** The core is still speculating at issue time: a branch or an
   exception ahead of the instruction may cancel it. The accepted instruction
   therefore waits in the decode stage until the core commits it (same `id`,
   `commit_kill=0`). A killed instruction is dropped and has no effect. The decode
   stage holds one instruction, so the core cannot issue the next one until the
   current one has been committed and moved on. A commit may arrive in the issue
   cycle itself or any later cycle.
3. **Execute**, one cycle for every instruction. `fenn_execute` reads up to two
   vector registers and runs the 32 lanes. It steps the RNG if the instruction
   consumes random numbers. For memory instructions it computes the address
   `x[rs1] + imm` and starts the vector-memory access.
4. **Writeback and result.** One cycle later `fenn_writeback` holds the instruction.
   For loads, the vector memory's data has just arrived, because UltraRAM has a
   one-cycle read latency. That is why addresses are formed in execute and the
   register is written in writeback. The stage returns one XIF result per
   committed instruction: `we=1` with the data for the scalar-writing ones, `we=0`
   for the rest. In the cycle the core accepts the result, the stage writes the
   vector register file or an RNG state register.

Timing with commits in the cycle after issue and results accepted at once:

```
edge         E0        E1        E2        E3
instr i    issue ->  decode  -> execute -> writeback/result handshake
instr i+1            issue  ->  decode  -> execute -> ...
```

Throughput is one instruction per cycle, and the result returns three edges after
the issue handshake. `tb_fenn_system` checks both.

**Read-after-write bypass.** The register file is written at the end of the
writeback cycle, while the next instruction is already reading its operands in
execute. `fenn_execute` compares both read addresses with the register that
writeback is about to write. On a match it takes writeback's data instead, whether
that is an ALU result or freshly loaded memory data. A dependent instruction, even
one using a loaded value, therefore never waits. The RNG state registers follow
the same rule: a `VLOADR0/1` in writeback followed by `VRNG` in execute steps from
the loaded state.

**Stalls.** The only stall inside FeNN comes from the result handshake. While the
core does not take the result (`result_ready=0`), writeback holds, and execute
holds behind it. Execute does not repeat its side effects while it waits: the
memory access and the RNG step happen only in the cycle the instruction leaves.
The decode stage backs up to the core through `issue_ready`.

## 3. Instruction set

Every FeNN instruction has bits `[1:0] = 2'b10`. That puts the whole instruction
set in one 30-bit quadrant of the RISC-V encoding space, a quadrant a core without
compressed instructions never uses. Inside the quadrant the standard register field
positions are kept: `funct7[31:25] rs2[24:20] rs1[19:15] funct3[14:12]
rd[11:7] group[6:2]`. In the table, `vN` is a vector register and `x[N]` a scalar
register of the core.

| group | funct3 | mnemonic | effect (per lane i) |
|---|---|---|---|
| 0 | 0 | `VADD vd, vs1, vs2` | `vd = vs1 + vs2`; `funct7[0]=1` saturates |
| 0 | 1 | `VSUB vd, vs1, vs2` | `vd = vs1 - vs2`; `funct7[0]=1` saturates |
| 0 | 2 | `VMUL vd, vs1, vs2` | `vd = (vs1*vs2 + R) >>> N`, `N = funct7[3:0]`, rounding `funct7[5:4]` |
| 1 | 0..3 | `VTEQ/VTNE/VTLT/VTGE rd, vs1, vs2` | `x[rd]` bit i = `vs1 op vs2` (signed) |
| 2 | 0 | `VSEL vd, rs1, vs2` | `vd = x[rs1][i] ? vs2 : vd` |
| 3 | 0 | `VLOAD vd, imm(rs1)` | `vd = M[x[rs1]+imm]` |
| 3 | 1, 2 | `VLOADR0/VLOADR1 imm(rs1)` | RNG state register 0 / 1 `= M[x[rs1]+imm]` |
| 3 | 4 | `VSTORE vs2, imm(rs1)` | `M[x[rs1]+imm] = vs2` (S-type immediate) |
| 4 | 0 | `VFILL vd, rs1` | `vd = x[rs1][15:0]` in every lane |
| 4 | 1 | `VEXTRACT rd, vs1, rs2` | `x[rd] = sign-extended vs1[x[rs2][4:0]]` |
| 5 | 0 | `VRNG vd` | `vd` = next random number of each lane |

Memory addresses are byte addresses. A vector occupies 64 aligned bytes, and
address bits `[5:0]` are ignored. Undefined group or `funct3` values are refused
at issue. Lane i is bits `[16i+15:16i]` of a vector and bit i of a mask.

Masks give data-dependent control flow without branches per lane. A compare
produces the mask in a scalar register. The core can test it (for example, "any
neuron spiked?"), iterate over its set bits to process spikes, or hand it back to
`VSEL` to update only selected lanes. The ALIF neuron update in
`tb_fenn_system` is written this way: `VTGE` yields the spike mask, and two `VSEL`s
apply the reset and the adaptation only in lanes that spiked.

## 4. Lane arithmetic and rounding

`fenn_lane` is combinational. All 32 copies work on the same operation.

* **Add/sub** are 16-bit two's complement. With saturation the 17-bit exact result
  is clamped to `[-32768, 32767]`, so a membrane voltage driven past the range of
  its format sticks at the limit instead of wrapping to the opposite sign.
* **Multiply** forms the exact 32-bit signed product, as an FPGA DSP block does.
  It adds a rounding term `R` (the DSP's accumulate input) and shifts right
  arithmetically by `N` = 0..15 bits. The low 16 bits are the result. `N` is the
  number of fraction bits to drop: 15 for S0.15 x S0.15, for example.
  * mode 0, `R = 0`: plain truncating shift. This is the conventional fixed-point
    multiply. For negative products the shift rounds toward minus infinity, not
    toward zero.
  * mode 1, `R = 2^(N-1)`: round to nearest (ties upward).
  * mode 2, `R` = the low `N` bits of the lane's random number: stochastic
    rounding. The result rounds up with probability equal to the discarded
    fraction, so the rounding error has zero mean. Repeated multiplications by a
    decay factor close to 1, such as `rho = exp(-1/2000)` in the adaptation
    variable, then decay on average as they should instead of stalling at a
    fixed point.

  Multiplication does not saturate. The shifted product is truncated to 16 bits.
* **Compare** is signed: EQ, NE, LT or GE. **Select** picks `b` where the mask bit is 1.

## 5. Random numbers

Each lane has a Xoroshiro32++ generator: 32 bits of state (`s0`, `s1`), 16 bits of
output per step, built only from adds, XORs and fixed rotations:

```
out = rotl(s0 + s1, 9) + s0
t   = s0 ^ s1
s0' = rotl(s0, 13) ^ t ^ (t << 5)
s1' = rotl(t, 10)
```

The state could not live in the vector register file. A step reads 32 bits and
writes 48 bits per lane (new state and output), and a stochastic multiply would add
two more operands. Either would need extra register-file ports. Instead the state
lives in two dedicated 512-bit registers in `fenn_rng`: register 0 holds `s0` of
all lanes and register 1 holds `s1`. Both read and write every cycle. Software
seeds them from vector memory with `VLOADR0` and `VLOADR1`. Every lane must get a
different seed, or lanes produce identical sequences. `VRNG` and stochastic `VMUL`
advance all lanes by one step. Reset clears the state, and an all-zero generator
outputs zeros until it is seeded.

## 6. Memories

* **Vector register file** (`fenn_vrf`): 32 x 512 bits with asynchronous reads, as
  distributed (LUT) RAM provides, so both operands are available in the execute
  cycle. It has one synchronous write port and no reset.
* **Vector memory** (`fenn_vmem`): eight 64-bit banks. Bank k holds lanes
  4k..4k+3 of every vector. Each bank stands for a cascade of 72-bit UltraRAMs, of
  which 64 bits are used. Accesses are single-port and synchronous, with one cycle
  of read latency, and read data holds between reads. Default depth is 32768
  vectors (2 MiB). That would use all 64 UltraRAMs of the Kria K26 device, eight per
  bank.
* **Instruction and data BRAMs** (`fenn_bram`): 4096 x 32-bit true dual-port RAMs
  with byte enables, one cycle of read latency, and read-first behaviour on each
  port. Port A belongs to the scalar core (fetch, load/store) and port B to the
  host's AXI BRAM controller. In use, the host writes a program and initial state
  through port B while FeNN is held in reset, releases reset, and polls until the
  program reports completion.

There is no path between the BRAMs and the vector memory. Vector data is created by
FeNN instructions from scalar values (`VFILL`, `VSEL`) or by the RNG, and is moved
out through `VEXTRACT` and compare masks.

## 7. Top-level interface (`fenn_system`)

| port group | direction | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of pipeline and RNG state (the host's control register) |
| `x_issue_*` | valid/req in, ready/resp out | XIF issue: `instr`, `id` (4 bits), `rs[0..1]`, `rs_valid`; response `accept`, `writeback` |
| `x_commit_*` | in | XIF commit: `id`, `commit_kill` |
| `x_result_*` | valid/result out, ready in | XIF result: `id`, `data`, `rd`, `we` |
| `im_a_*` | in/out | instruction fetch port (read only) |
| `im_b_*`, `dm_b_*` | in/out | host ports of the two BRAMs |
| `dm_a_*` | in/out | scalar core load/store port |

The XIF structs carry only the subset of the CV32E40X interface that FeNN uses.
The parameters are `VMEM_DEPTH` (vectors), `IM_DEPTH` and `DM_DEPTH` (words).
Lane count, element width and register count are package constants in `fenn_pkg`.

## 8. Verification

Each block has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The testbenches that involve the
whole pipeline use two pieces in `tb/`:

* `tb_fenn_ref_pkg`: integer reference arithmetic (floor division, explicit
  clamping, a software Xoroshiro32++), instruction encoders, and `fenn_iss`, an
  instruction-level model of the architectural state.
* `tb_fenn_xif_master`: plays the scalar core on the XIF. It issues instructions,
  commits or kills them after a random delay, withholds `result_ready` at random,
  and checks every returned result against `fenn_iss`.

| testbench | what it shows |
|---|---|
| `tb_fenn_lane`, `tb_fenn_valu` | all lane operations on random and corner operands, every shift and rounding mode, mask gathering |
| `tb_fenn_rng` | bit-exact generator sequence per lane, loads, load-and-step in one cycle, reset |
| `tb_fenn_vrf`, `tb_fenn_vmem`, `tb_fenn_bram` | memory contents, latency, hold behaviour, byte enables |
| `tb_fenn_decode_stage` | accept/refuse, wait for commit, kill, same-cycle commit, operand-valid wait, back-pressure; then 4000 random offers with random commit delays, kills and back-pressure, checked for in-order delivery of exactly the committed instructions |
| `tb_fenn_execute`, `tb_fenn_writeback`, `tb_fenn_loadstore` | per-stage results, bypass on both ports, memory requests, stalls without repeated side effects |
| `tb_fenn_coproc` | 4000 random instructions of every kind with kills, refused words, random commit delays and result stalls, against `fenn_iss`; all registers read back at the end |
| `tb_fenn_system` | full default size. The host loads the program and constants into the BRAMs, and the core model fetches and runs a 32-neuron ALIF network for 260 steps. Spike masks are compared bit-exactly with an independent integer model, and the voltage with a float64 model (normalised RMS error about 0.02). An over-range phase forces saturation. It then checks 1 instruction/cycle issue and 3-cycle result latency, and that bypass, stalls, late commits, kills, refusals, saturation, stochastic rounding, RNG loads and vector loads/stores all occurred. |
| `tb_fenn_poisson` | 3200 Poisson variates with lambda = 5 by Knuth's method. Mean about 5.0; histogram within tolerance of the probability mass function. The loop is software-pipelined: each iteration's mask returns to the scalar side while the next uniform variate is formed, so the core never waits. The result is 90 cycles per 32 variates, and the test checks at most 8 cycles per iteration. |
| `tb_fenn_rounding` | 21760 S0.15 multiplications per rounding mode with RNG operands. Mean error -0.50 LSB (truncation), 0.00 (nearest), 0.00 (stochastic), with the expected error ranges. |
| `tb_fenn_alif` | 32 ALIF neurons for 1000 steps, in four variants, against a float64 simulation. The formats are coarse: V and A have 8 fraction bits. With calibrated input, stochastic rounding lowers the normalised RMS error of V from 0.21 to 0.11 and of A from 0.053 to 0.008 compared with truncation. With input rising beyond the format's range, saturating add/sub lowers it from 0.92 to 0.45 (V) and from 1.02 to 0.77 (A) compared with wrapping. The test checks the direction of both effects. Every variant matches an integer model bit-exactly. |
| `tb_fenn_shd` | A recurrent classifier of spoken-digit size: 700 inputs, 256 recurrent ALIF hidden neurons and 20 leaky read-out neurons, run for 100 time steps. FeNN first fills 7904 vectors of memory with random weights (`VRNG`, `VMUL`, `VSTORE`). Each step it adds one weight row per input spike and per hidden spike of the previous step, updates the hidden neurons, and accumulates the read-out. Hidden spike masks and read-out values match an integer model bit-exactly every step. About 1570 cycles per step, most of them spent adding weight rows (two instructions per 32 synapses). |

To run one with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/fenn_pkg.sv tb/tb_fenn_ref_pkg.sv tb/tb_fenn_system.sv \
    --top-module tb_fenn_system -Mdir obj_sys
./obj_sys/Vtb_fenn_system
```

Replace `tb_fenn_system` with any other testbench name. Every testbench finishes
in about a second.

## 9. What follows the published design and what is this implementation's own

From the published design:
* 32 lanes of 16 bits.
* A three-port register file of 32 x 512 bits in distributed RAM.
* The vector memory as 8 parallel UltraRAM chains, with one-cycle latency.
* A three-stage pipeline with one execute cycle for every instruction and a
  writeback-to-execute bypass.
* XIF issue/commit/result coupling.
* Masks in 32-bit scalar registers.
* The instruction classes of section 3.
* Multiply with an N-bit barrel shift and `((A*B)+R)>>N` rounding (zero, nearest,
  stochastic).
* Saturating add/sub.
* Xoroshiro32++ per lane, with state in two dedicated registers loaded by load
  variants.
* Instruction and data BRAMs shared with the host.

This implementation's own choices, where the published description is silent:
* The bit encoding within the FeNN quadrant and the exact instruction list: which
  compares exist, how `VSEL` and `VEXTRACT` use the register fields.
* The XIF subset and a 4-bit id.
* A single-entry decode buffer. The instruction waits there for its commit, so
  the commit decides whether it enters execute. No uncommitted instruction ever
  touches the register file, the RNG state or the memory.
* One result returned for every committed instruction.
* Byte addressing with 64-byte vector alignment.
* The Xoroshiro32++ constants `[13,5,10,9]`, which are those of the Propeller 2
  microcontroller.
* The layout of lanes and RNG state.
* Reset behaviour.
* The vector-memory depth.
* BRAM size and byte enables.
* Fixed-point formats in the testbenches.

Known differences and limits:
* The scalar core is not included. The testbench core model offers FeNN words
  only; loop control, branches and address arithmetic cost it nothing. The
  Poisson generator reaches 90 cycles per 32 variates, against the published 81
  cycles. The published figure was measured with the real core and a program
  that is not published. The gap most likely lies in the program, for example in
  how the uniform variate is formed. FeNN itself issues one instruction per cycle
  throughout this loop.
* The published text calls truncation "round-to-zero", but it describes a plain
  right shift. The shift is implemented as described, and it rounds negative
  products toward minus infinity. A true round-toward-zero would need a
  sign-dependent correction that the published datapath does not mention.
* The ALIF accuracy runs (`tb_fenn_alif`) use fixed-point formats and input
  trains of this design's own, because the published ones are not given. The
  error values therefore differ from the published ones. Those are 0.13 to 0.045
  for V and 0.019 to 0.0066 for A with stochastic rounding, and 0.29 to 0.098 for
  V and 0.39 to 0.019 for A with saturation. Only the direction of each effect is
  checked.
* The published text says FeNN processes neurons in about 20 clock cycles, without
  saying per how many neurons. Here the ALIF update of one vector of 32 neurons
  takes 16 FeNN instructions in `tb_fenn_system`, including loading and storing
  the state. That is 16 cycles when the core issues them back to back.
* No clock-rate or LUT/FF comparison is possible here. The published 166 MHz and
  about 32.9 k LUTs and 32.5 k FFs cover the complete core, including the scalar
  processor and system logic. This RTL has about 1.8 k flip-flops outside its
  memories.
* The spoken-digit classifier runs at its full size in `tb_fenn_shd`, but with
  random weights and random input spikes. Trained weights and the dataset are not
  part of this repository, so classification accuracy is not measured. Its weights
  take 7904 of the 32768 vectors of the default vector memory.
