# A decimal-arithmetic co-processor for the Rocket RoCC port

Financial and commercial software computes in decimal, and IEEE 754-2008 defines
decimal floating-point formats for it. A full hardware decimal floating-point
unit is large; doing everything in software on binary hardware is slow. The
middle road is to keep the control flow of a decimal operation in software
(special values, exponent arithmetic, rounding) and move only its inner loop
into a small piece of hardware. For decimal multiplication that inner loop is
the coefficient product, and the hardware it needs is a single BCD adder: the
multiplicand multiples 1X..9X are formed by repeated addition, and the product
is the sum of those multiples, shifted one decimal digit per multiplier digit.
This scheme is known as Method-1 of a published co-design study, and this RTL
models the accelerator that an evaluation of it on a RISC-V system proposed.

The RTL here is that accelerator: a co-processor attached to a 64-bit Rocket
RISC-V core through the RoCC (Rocket Custom Co-processor) interface. The core
issues custom instructions; the accelerator keeps a small register file of
BCD-8421 numbers (4 bits per decimal digit, 16 digits per 64-bit word, the
coefficient width of a decimal64 number) and offers BCD addition, BCD
accumulation, a full 16x16-digit BCD multiplication, binary-to-BCD conversion,
register transfer and a cache load. The core itself and its L1 data cache are
not part of the RTL; their side of the interface is brought out as ports.

The design follows the published description where it has one (instruction
encoding, function codes, the flag rules, the interface state machine, the
block structure) and fills in the rest with simple choices, all of which are
listed in the section "What is taken, what is chosen" below.

## The RoCC instruction

Every accelerator instruction is one 32-bit RISC-V word:

| bits  | 31:25    | 24:20 | 19:15 | 14 | 13  | 12  | 11:7 | 6:0     |
|-------|----------|-------|-------|----|-----|-----|------|---------|
| field | function7| rs2   | rs1   | xd | xs1 | xs2 | rd   | opcode  |

`function7` chooses the operation. The three flags say which register
fields name core registers:

* `xs1 = 1` (`xs2 = 1`): the core sends the value of its register `rs1`
  (`rs2`) with the command. With the flag at 0 the field instead names one of
  the accelerator's own 32 registers.
* `xd = 1`: the core waits for a response that writes its register `rd`.
  With `xd = 0` no response is sent.

The opcode is `0010111`, the value the published encoding and its example
word carry for "custom-0" (standard RISC-V assigns custom-0 the value
`0001011`; the accelerator does not look at the opcode, routing is the core's
job). The example word `0x08A5F617` is DEC_ADD with core registers x11 and
x10 as sources and x12 as destination, all three flags set.

## Functions

Operand A is the core value `rs1` if `xs1 = 1`, else accelerator register
`r[rs1]`; operand B likewise from `xs2`/`rs2`. For the register-transfer
functions the accelerator register address `addr` is the low 5 bits of the
core value `rs2` if `xs2 = 1`, else the `rs2` field.

| function7 | name      | effect                                         | response (xd=1)  |
|-----------|-----------|------------------------------------------------|------------------|
| 0000000   | WR        | `r[addr] = A`                                  | A                |
| 0000001   | RD        | —                                              | `r[addr]`        |
| 0000010   | LD        | `r[addr] = mem64[A]`                           | loaded word      |
| 0000011   | ACCUM     | `r[addr] = r[addr] + A` (binary)               | new value        |
| 0000100   | DEC_ADD   | `r[rd] = A + B` (BCD, 16 digits kept)          | sum              |
| 0000101   | CLR_ALL   | all registers = 0                              | 0                |
| 0000110   | DEC_CNV   | `r[rd] = BCD(A)` (low 16 digits)               | BCD value        |
| 0000111   | DEC_MUL   | `{r[rd+1], r[rd]} = A * B` (BCD, 32 digits)    | low 16 digits    |
| 0001000   | DEC_ACCUM | `r[rd] = r[rd] + A` (BCD)                      | sum              |
| other     | —         | ignored                                        | 0                |

`rd+1` wraps from 31 to 0. Decimal operands must be valid BCD (every digit
0..9); other codes give undefined digits. A decimal carry out of the 16th
digit is dropped by DEC_ADD and DEC_ACCUM (the execution unit reports it, but
the RoCC response has no room for it).

The co-design software uses these instructions in two ways. With DEC_ADD
alone it runs Method-1 as a software loop: eight DEC_ADDs on accelerator
registers build `r[i+1] = r[i] + r[1]`, then for every multiplier digit `k`,
most significant first, the core shifts its product left one digit and
issues `DEC_ADD product, r[k]` (product from a core register, the multiple
from an accelerator register). That loop only works while product and 9X fit
in 64 bits, i.e. for operands up to 8 digits. DEC_MUL runs the same
algorithm inside the accelerator for full 16-digit coefficients.

## Structure

```
            +------------------------- dec_rocc_accel -------------------------+
 cmd  ----->| [cmd queue] --> dec_accel_ctrl ------------> dec_exec_unit       |
            |                  - interface FSM             - operand muxes     |
 resp <-----| [resp queue] <-  - acc_regfile (32 x 64)     - bcd_cla_adder x17 |
            |                  - operand select              digits            |
 mem req <--| [mem req queue] <-                           - multiples 0X..9X  |
 mem resp ->| [mem resp queue] ->                          - control FSM       |
            |                                              - bin2bcd           |
            +------------------------------------------------------------------+
```

Each of the four RoCC channels passes through a two-entry queue
(`sync_fifo`), as the published block diagram draws them. Commands are
executed one at a time, in order, so responses come back in command order.

### Interface state machine (`dec_accel_ctrl`)

The controller has one state per function. `Idle` is the only state that
accepts a command; it latches the instruction, resolves operands A and B
(core value or accelerator register, by the flags) and the register address,
and moves to the function's state. That state does the work — in one cycle
for WR, RD, ACCUM and CLR_ALL; waiting for the cache for LD; starting the
execution unit and waiting for it for the decimal functions — then either
returns to `Idle` (`xd = 0`) or stays, offering the response, until the
response queue takes it. The published state diagram shows exactly this shape
for `Idle`, `RD`, `WR`, `CLR_ALL`, `ACCUM` and `DEC_ADD` (a self-loop on each
state, an arc back to `Idle` on the response or ready event); `LD`,
`DEC_ACCUM`, `DEC_MUL`, `DEC_CNV` and an ignore state for unknown codes are
added in the same pattern.

### BCD carry-lookahead adder (`bcd_cla_adder`)

Each digit pair is added in binary. A digit generates a decimal carry if its
sum is 10 or more and propagates one if the sum is exactly 9. A Kogge-Stone
prefix network combines these into every digit's carry in log2(digits)
levels; each digit then adds its carry and, if the result reached 10, adds 6
modulo 16. The execution unit uses one 17-digit instance.

### Execution unit and the hardware Method-1 (`dec_exec_unit`)

All decimal arithmetic goes through the one adder, whose inputs come from
multiplexers:

* **Add** (DEC_ADD, DEC_ACCUM): one pass, registered. 1 cycle.
* **Multiply** (DEC_MUL): the unit stores 0X and X in a buffer of ten
  17-digit multiples, then spends eight cycles feeding `mm[i]` and `mm[1]`
  back through the adder to form 2X..9X — the feedback loop of the block
  diagram. It then takes the multiplier digits least significant first:
  `S = P_hi + mm[digit]`; the lowest digit of `S` shifts into the low half of
  the product and the rest becomes the new `P_hi`. Because `P_hi` stays below
  10^16 and 9X below 9·10^16, `S` always fits in 17 digits, so a 17-digit
  adder is enough for a 32-digit product. 1 + 8 + 16 = 25 cycles.
  (The software loop goes most-significant digit first, which would need a
  32-digit adder; the product is the same.)
* **Convert** (DEC_CNV): `bin2bcd` shifts the 64-bit binary value in one bit
  per cycle, adding 3 to every BCD digit of 5 or more before each shift
  ("double dabble"), in a 20-digit scratch register. The low 16 digits are
  the result; a non-zero higher digit sets an overflow flag. 66 cycles.

### Timing

Counted in clock edges from the edge that accepts a command into the
controller: WR, RD, ACCUM and CLR_ALL finish at the first edge; the response
of DEC_ADD or DEC_ACCUM is offered after 2 edges, DEC_MUL after 26, DEC_CNV
after 67; LD depends on the cache. Each queue adds one edge in its
direction, so a DEC_MUL seen from the core takes 29 cycles from presenting
the command to the response being valid, and the controller frees one edge
after a response is taken. The published evaluation reports 188 cycles of
hardware time per decimal64 multiplication for the software-driven Method-1,
which spends 24 DEC_ADD round trips through the core pipeline; this RTL does
not model the core, so that figure is not reproduced here.

## What is taken, what is chosen

Taken from the published description: the instruction format and field
widths; the function7 codes (one conflict: its encoding table gives RD as
`0000010`, which is LD in its instruction list — the instruction list is
followed; CLR_ALL `0000101` appears only in the encoding table); the flag
rules; 64-bit data; one BCD carry-lookahead adder generating 1X..9X by
repeated addition and accumulating shifted multiples; the interface FSM
states; queues on cmd, resp, mem req and mem resp; a register set in the
decode block.

This design's own choices, where the description is silent:

* 32 accelerator registers; two read and two write ports; clear in one cycle.
* The register-address convention of WR/RD/LD/ACCUM, and that ACCUM is a
  binary add.
* DEC_ADD writes `r[rd]` and, with `xd = 1`, also returns the sum (the
  description shows both a register-file write and a return to the core).
* What DEC_ACCUM, DEC_MUL and DEC_CNV read and where they write; DEC_MUL as a
  hardware sequencer; 32-digit product in two registers; DEC_CNV truncation.
* The adder's internal prefix network, the least-significant-first
  accumulation, the 17-digit adder width and every latency.
* Queue depth 2, valid/ready handshakes, synchronous active-low reset, the
  `busy` output, ignoring unknown function codes.
* The execution unit has no output queue (the block diagram draws one after
  the adder); results are held in registers until written back.

Not modelled: the Rocket core, its caches, the floating-point and other
optional RoCC ports, and the RoCC interrupt. The decimal floating-point parts
of multiplication (special values, sign, exponent, rounding) remain software
and have no RTL.

## Using the RTL

Files (`rtl/`): `dec_pkg` (types and codes), `bcd_cla_adder`, `sync_fifo`,
`acc_regfile`, `bin2bcd`, `dec_exec_unit`, `dec_accel_ctrl`, and the top
`dec_rocc_accel`. Top parameters: `NREGS` (32), `CMD_DEPTH`, `RSP_DEPTH`,
`MEM_DEPTH` (2 each); the data width is `dec_pkg::XLEN` (64).

The core side: present a `rocc_cmd_t` (instruction word fields plus the two
register values) with `cmd_valid` until `cmd_ready`; collect `rocc_resp_t`
(`rd`, `data`) when `resp_valid`, acknowledging with `resp_ready`. The cache
side: `mem_req` carries a 64-bit byte address and a 5-bit tag; answer with
`mem_resp_valid` and the tag and the 64-bit word, at most one load being
outstanding. The memory response has no ready, as in RoCC.

Simulation with Verilator 5: name the two packages and the testbench, and
let Verilator find the modules by file name:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/dec_pkg.sv tb/dec_ref_pkg.sv tb/tb_dec_rocc_accel.sv \
    --top-module tb_dec_rocc_accel
./obj_dir/Vtb_dec_rocc_accel
```

Every testbench prints one line `TB_RESULT checks=N failures=M` and ends;
each finishes in well under a second of simulation time on a workstation.

Testbenches (`tb/`):

* `tb_bcd_cla_adder`, `tb_sync_fifo`, `tb_acc_regfile`, `tb_bin2bcd`,
  `tb_dec_exec_unit`: unit tests against independent digit-by-digit or
  array models, including latency checks.
* `tb_dec_accel_ctrl`: controller plus execution unit, random legal commands
  of every function and flag combination, backpressure, a delayed memory.
* `tb_dec_rocc_accel`: the whole accelerator at its default parameters. It
  runs the software Method-1 loop (8-digit operands) and DEC_MUL on the same
  operands, then 3,000 random commands with backpressure, checking every
  response against the instruction-level model `accel_model` in
  `tb/dec_ref_pkg.sv`, and requires each mechanism to occur: full command
  queue, response backpressure, memory stall, every function code, commands
  without response, decimal carry-out, conversion overflow.
* `tb_method1_workload`: 8,000 full 16-digit coefficient multiplications by
  DEC_MUL, each 32-digit product checked, and the 29-cycle round trip
  verified for every one.

## How far to trust it

All testbenches pass, and each one fails when the block it tests is broken in
a way that matters (a wrong prefix operator, an off-by-one queue limit, a
swapped write priority, a wrong add-3 threshold, a missing multiple, ignored
`xs2`, a corrupted response field). The arithmetic is checked against
independent reference models over tens of thousands of operands. What is not
checked is agreement with the original Chisel accelerator, which was not
available: where this RTL made its own choices (listed above), software
written for the original could see different register conventions or
latencies.
