# CIDPro co-processor: arithmetic with randomised timing

A program whose run time depends on a secret leaks that secret through timing.
Square-and-multiply modular exponentiation is the textbook case: it multiplies
only for the key bits that are 1, so its run time follows the key's Hamming
weight. Software fixes like dummy branches, masked selects or windowed exponents
shrink the leak but leave it measurable on a quiet bare-metal system, and they
cost time.

CIDPro does not try to make the run time constant. It makes it *random* instead.
The compiler swaps the security-critical arithmetic operations of a program
(multiplications, additions) for custom RISC-V instructions. A small
co-processor on the core's RoCC port (Rocket Custom Coprocessor) executes them.
It computes the result at once, but returns it only after a pseudo-random number
of cycles, between 1 and 2^dl. The core stalls until then. Each run of the
program now takes a different time, and the timing distributions of different
keys merge as the *diversification level* dl rises. Only the instructions the
compiler marked pay this cost; the rest of the program runs on the core
unchanged.

This repository holds the RTL of that co-processor and testbenches for it. The
RISC-V core, its caches and FPU, and the compiler pass that inserts the
instructions are not part of it.

## How an instruction gets its time

```
            funct = {op, dl}
 cmd ──► command interface ──► [funct][rs1][rs2][rd,xd] registers
                                   │      │     │     │
                                   │      └─►Di-ALU──┼──► data ─┐
                                   │                  └─────────┤
   PRNG ──► Truncate(dl) ──┐       │                            ▼
                           ├─► Compare ── valid ───────► response interface ──► resp
   Timer ──► Truncate(dl) ─┘
```

1. **Accept.** The command interface takes the instruction when
   `cmd_valid && cmd_ready`. It latches the funct field, both operands and the
   destination register. On the same clock edge the PRNG steps once and the
   timer clears to 0.
2. **Compute.** The diversifying ALU (Di-ALU) is combinational on the latched
   operands, so the result is ready in the first cycle. One ALU serves every
   "diversified version" of an operation. The versions differ only in how long
   the co-processor holds the result back, never in the result itself.
3. **Wait.** The timer counts the cycles since acceptance. The PRNG value and
   the timer each pass through a Truncate block that keeps their low dl bits.
   The comparator raises *valid* in the cycle where the two agree.
4. **Return.** On that edge the response interface latches the ALU result and
   offers it to the core. The core takes it with `resp_ready`.

Let the PRNG state after the step be `s`, and let `r = s mod 2^dl`. Then the
comparator fires in the r-th cycle after acceptance, counting from 0.
`resp_valid` rises r + 1 clock edges after the accepting edge. The latency
therefore lies in 1..2^dl cycles and is uniform over that range, up to the
LFSR's negligible bias. The mean is (2^dl + 1)/2. With dl = 0 both truncated
values are 0, so every instruction takes exactly one cycle: no diversification.

`cmd_ready` stays low from acceptance until the response has been taken. Only
one instruction is ever in flight, and a following custom instruction stalls the
core. `busy` is high over the same span.

## Instruction encoding

The instructions use a RISC-V custom opcode (custom-0 = `0001011` in the
testbenches) in R-type layout. The 7-bit funct field selects both the operation
and the level:

| bits        | field | meaning                                         |
|-------------|-------|-------------------------------------------------|
| funct[6:3]  | op    | 0 = ADD, 1 = MUL (low 64 bits); other codes return 0 |
| funct[2:0]  | dl    | diversification level 0..7, latency 1..2^dl cycles |

`xd` = 1 asks for a response to be written to `rd`. An instruction with `xd` = 0
runs for its random time and returns nothing.

Putting both the operation and the level in funct follows the source design:
the level is chosen per instruction, in software, to trade leakage against
speed. The bit layout, the 3-bit level (up to 128 cycles) and the choice of
operations are this implementation's own. The published evaluation uses levels
2 to 6, with 5 as the recommended setting. Around that point the added run time
is still modest, and it grows quickly above it.

## Modules

All files are in `rtl/`, one module or package per file.

| module            | role |
|-------------------|------|
| `cidpro_pkg`      | widths (XLEN = 64, MAX_DL = 7, DL_W = 3), operation enum, funct and RoCC instruction structs |
| `cidpro_rocc`     | top level: the co-processor with RoCC-style ports |
| `cidpro_cmd_if`   | command handshake, funct/rs1/rs2/rd registers, in-flight flag |
| `cidpro_di_alu`   | ADD and MUL on XLEN-bit operands |
| `cidpro_prng`     | 32-bit Galois LFSR, x^32 + x^22 + x^2 + x + 1, steps once per instruction, reseedable |
| `cidpro_timer`    | cycle counter, cleared on acceptance |
| `cidpro_truncate` | keeps the low dl bits of a value (two instances) |
| `cidpro_compare`  | valid = in flight and the truncated values are equal |
| `cidpro_resp_if`  | response register and valid/ready handshake |

Top-level ports of `cidpro_rocc`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cmd_valid` / `cmd_ready` | in / out | 1 | command handshake |
| `cmd_inst` | in | 32 | `rocc_inst_t`: funct, rs2, rs1, xd, xs1, xs2, rd, opcode |
| `cmd_rs1`, `cmd_rs2` | in | 64 | source operand values |
| `resp_valid` / `resp_ready` | out / in | 1 | response handshake |
| `resp_rd` | out | 5 | destination register |
| `resp_data` | out | 64 | result |
| `busy` | out | 1 | instruction in flight or response waiting |
| `seed_load`, `seed` | in | 1, 32 | load a new PRNG seed (0 is replaced by 1) |

Parameters: `XW` (data width, 64), `MAXDL` (widest level in timer and truncation
width, 7), `LFSR_W` (32). The dl field stays 3 bits wide.

Synthesised with a generic flow, the co-processor has about 250 flip-flops. Most
of them hold the two 64-bit operand registers and the 64-bit response register.
The logic is one 64×64 multiplier (low half), a 64-bit adder and a few small
comparators. On a 7-series FPGA a 64×64 low-half multiplier maps to roughly ten
DSP blocks. That fits the ten DSPs reported for the original co-processor, but
this is only a consistency check, not a confirmed match.

## What is taken from the source design and what is not

Taken from it:
- The co-processor structure: command interface, registers, Di-ALU, response
  interface, and PRNG and timer, each truncated to dl bits, feeding a comparator
  whose valid signal releases the result.
- The funct field selecting both the operation and the random range.
- Latency varied over 1..2^dl cycles; dl = 0 means no diversification.
- One arithmetic unit shared by all timing variants of an operation.
- The core stalling until the custom instruction completes.

Chosen here, because the source design does not specify them:
- **PRNG.** The generator type is not given. An LFSR is the cheapest
  generator that gives a uniform truncated value. It advances once per
  accepted instruction, so the value is fixed while the timer runs. One
  advance is seven LFSR shifts (MAX_DL), done in one clock by an unrolled XOR
  network. A single shift would only move the bits down one place, so
  successive latencies would share all but one of their bits and be strongly
  correlated. Reset seed 1; the
  `seed` port can reseed it. A 32-bit LFSR is predictable to anyone who sees
  enough outputs. The threat model assumes the attacker knows neither the
  instructions nor the hardware. A deployment worried about that should seed it
  from an entropy source or swap in a stronger generator; only `cidpro_prng`
  needs to change.
- **Operations.** Only ADD and MUL are built, the two the source names. Any
  other operation (for example a modular reduction) would be another case in
  `cidpro_di_alu` and another code in `alu_op_e`.
- **Widths.** XLEN = 64, as on an RV64 Rocket core, and a 3-bit level.
- **Interface.** Valid/ready command and response channels shaped like
  Rocket's RoCC port, but as plain signals. The RoCC memory, interrupt and FPU
  ports are left out, since nothing here uses them. One instruction in flight.
- **Reset.** Asynchronous, active low. All registers are cleared.

## Testbenches

`tb/` has one self-checking testbench per module and two system-level
testbenches. Each prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog.

- `tb_cidpro_rocc` runs the whole co-processor at its default parameters. A core
  model issues 3000 random instructions across all levels, operations and xd
  values, with random response back-pressure. It has its own LFSR model and
  checks every result, every rd and the exact latency of every instruction
  (r + 1 from the model). It also checks that latencies stay within 1..2^dl,
  that all 8 latencies appear at dl = 3, and that the mean per level is near
  (2^dl + 1)/2. A check fails if any of these never happened: core stalls,
  back-pressure, xd = 0 instructions, any level 0..7, either operation, or a
  reseed.
- `tb_cidpro_workloads` runs the two evaluation kernels with every
  multiplication sent to the co-processor:
  - modular exponentiation with a 32-bit key, both plain right-to-left
    square-and-multiply and left-to-right sliding window of width 3, modulus
    2^32 − 5;
  - IDEA's multiplication modulo 2^16 + 1.

  Each kernel runs 200 times for two secrets at levels 0 and 2..6. All other
  core work is charged one cycle per step; that is the testbench's own simple
  cost model, not Rocket's. It checks every result. At dl = 0 it checks that the
  run time is constant per key and differs between keys, which is the leak.
  Above 0 it checks that run time varies from run to run, and at dl = 6 that
  the ranges of the two keys overlap for the sliding-window form. It prints mean and range per key and
  level. Measuring the leak in bits, as a channel-capacity estimate would, is
  left to the user. The printed ranges show the qualitative trend: the two keys'
  distributions overlap more as dl rises, and the mean cost grows roughly as
  (2^dl + 1)/2 per custom instruction.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    --top-module tb_cidpro_rocc rtl/cidpro_pkg.sv tb/tb_cidpro_rocc.sv
./obj_dir/Vtb_cidpro_rocc
```

Use the same command for any other testbench, with its name. Verilator is a
two-state simulator, so the design resets everything it reads. The modules carry
SystemVerilog assertions for the handshake rules, active under `--assert`:

- a command offered and not yet taken must stay unchanged;
- a waiting response must stay unchanged;
- no result may arrive while a response is still pending;
- the LFSR never reaches zero.

Verilator lint reports two warnings, and both stand. One is an unused package
constant (the custom opcode, which only the testbenches use). The other notes
that assertions sample the asynchronous reset synchronously, through
`disable iff`.

## Changing the design

- **Longer maximum latency.** Widen `DL_W` and `MAX_DL` in `cidpro_pkg`. The
  funct field then has fewer bits for the operation.
- **More operations.** Add an enum value in `alu_op_e` and a case in
  `cidpro_di_alu`. Latency handling does not change.
- **Different random source.** Replace `cidpro_prng`. Keep its `step`
  semantics: the value must stay fixed while an instruction runs. If the value
  changed mid-instruction, the comparator would chase a moving target and the
  latency would no longer be uniform.
- **Pipelined multiplier.** If a real multiplier needs k cycles, the smallest
  legal latency becomes k. Either add k−1 to the timer's start value or release
  results only once the multiplier is done. Otherwise short random latencies
  would return stale data.
