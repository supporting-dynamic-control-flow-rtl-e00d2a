# Dynamic control flow for a runtime-reconfigurable processor fabric

A runtime-reconfigurable processor couples an ordinary CPU with a fabric of
accelerator slots. The slots are refilled at run time with whatever
accelerators the running application needs. A *special instruction* (SI) on the
CPU starts a *microcode* program on the fabric. This program is a sequence of
VLIWs (very long instruction words). Each VLIW holds one sub-instruction per
accelerator slot, and a *fabric execution controller* issues one VLIW per clock.

In a classic fabric this microcode is a straight line. VLIWs run one after the
other, so a loop must be unrolled to a fixed trip count. The accelerators
cannot steer the program. This RTL adds **dynamic control flow** to the
controller:

* **Jumps** whose condition is a loop counter or a condition signal from the
  accelerators. This gives loops with run-time trip counts, nested loops and
  data-dependent branches inside one SI.
* **Stalls**: an accelerator or a missing memory word can hold the current VLIW.
* **Traps**: a bad jump target, an accelerator error, a stall that lasts too
  long, or a trap the microcode raises on purpose all end the SI. The CPU's own
  exception handling then takes over.

The design also holds the accelerators of four evaluated SIs. SIFT matching and
the shallow-water equations (SWE) use floating-point add/multiply, divide,
square-root and compare/min/max units. The CNN SI uses a 3x3 line-buffer MAC
and a pooling/quantization unit. The SHA-3 SI uses a message buffer and a
Keccak-f[1600] unit.

The design follows the paper *Supporting Dynamic Control-Flow Execution for
Runtime Reconfigurable Processors* (Nassar, Youssef, Bauer, Henkel, ICM 2023).
That paper gives the jump repertoire, the parameter sets, the counter and trap
widths, the stall limit and the block diagrams of several accelerators. It does
not give the VLIW layout, the interfaces or most insides. Those parts are this
design's own, and the section [What follows the paper](#what-follows-the-paper-and-what-does-not)
lists them.

## Block overview

```
            microcode load, SI start/operands        memory read/write
 CPU  ───────────────┬──────────────────────────────┐         │
 (outside)           ▼                              │         ▼
        ┌──────────────────────────┐  VLIW, issue   ┌─────────────────────────────┐
        │ fabric_exec_controller   │───────────────▶│ reconf_fabric               │
        │  microcode memory 1024   │                │  operand crossbar           │
        │  dce_param_sets  (4 sets)│◀───────────────│  rf_slot x5 (accelerators)  │
        │  dce_jump_unit           │ stall, err[5], │                             │
        │  dce_stall_monitor (512) │ cond[5], result│                             │
        └──────────────────────────┘                └─────────────────────────────┘
         done/result, trap/cause ─▶ CPU
```

`rp_top` holds these two parts. The CPU, the system memory and the bus are not
part of the RTL; their signals are plain ports of `rp_top`:

* a microcode write port;
* an SI port: start, first and last VLIW address, two 32-bit operands; it
  returns done with a 32-bit result, or trap with cause, user value and address;
* a memory read stream: a word with a valid flag, taken by `stream_pop`;
* a memory write stream: `wr_data` with `wr_valid`, held off by `wr_ready`.

## The VLIW

`dce_pkg::vliw_t` is 119 bits wide, a packed struct. The bit ranges below count
from the LSB.

| bits      | field      | meaning |
|-----------|------------|---------|
| 118:59    | `sub[4:0]` | one 12-bit sub-instruction per slot, `sub[0]` in bits 70:59: `op` (4 bits, 0 = idle), `src0`, `src1` (4 bits each) |
| 58:55     | `jmp`      | jump kind, see below |
| 54:53     | `jmp_set`  | parameter set used by the jump |
| 52:41     | `jmp_val`  | 12-bit operand of a conditional jump |
| 40:36     | `acc_sel`  | slots that take part in an accelerator-conditioned jump |
| 35:34     | `ps_cmd`   | parameter-set command: none, load, increment, decrement |
| 33:32     | `ps_set`   | set changed by the command |
| 31:22     | `ps_dest`  | destination loaded by `PS_LOAD` |
| 21:10     | `ps_cnt`   | counter value loaded by `PS_LOAD` |
| 9:7       | `utrap`    | user trap value; non-zero raises a trap |
| 6         | `res_wr`   | copy source `res_src` into the SI result register |
| 5:2       | `res_src`  | source for the result and for a memory write |
| 1         | `mem_wr`   | send source `res_src` out on the memory write stream |
| 0         | `last`     | end the SI after this VLIW unless it jumps |

**Operand sources.** A 4-bit source, with N = 5 slots, means:

* 0..4: `out0` of slot k;
* 5..9: `out1` of slot k-5;
* 10, 11: CPU operand A, B;
* 12: the memory stream;
* 13..15: zero.

The crossbar routes the chosen values to every slot's `in0`/`in1` in the same
clock.

## Dynamic control flow

### Parameter sets

Jump destinations are not held in the VLIW. The controller keeps four
*parameter sets*, each a 10-bit destination and a 12-bit counter. A jump names
its set with 2 bits, so a VLIW needs only a few bits for a jump. Four sets allow
loops nested four deep. One VLIW can load a set, or step its counter, with
`ps_cmd`. The jump in that same VLIW already sees the updated counter and
destination. So the usual loop tail is one VLIW: `PS_INC set0` together with
`JMP_IF_CNT_LT set0, N`.

### Jump kinds (`dce_pkg::jmp_e`)

| kind | taken when |
|------|------------|
| `NO_JMP` | never |
| `ALW_JMP` | always |
| `JMP_IF_CNT_EQ / NEQ / LT / GT` | counter of the set ==, !=, <, > `jmp_val` (unsigned) |
| `JMP_IF_ACC_EQ / NEQ / LT / GT` | for **every** slot in `acc_sel`: its 2-bit `cond` ==, !=, <, > `jmp_val[1:0]`; an empty `acc_sel` never jumps |

A taken jump goes to the set's destination, which is an absolute microcode
address. Otherwise execution moves to the next address. A VLIW with `last` set
ends the SI with `done` unless its jump is taken, so a loop may close on the
last VLIW.

Accelerators report their state on their `cond` output. The UTIL unit puts its
compare result there (0 equal, 1 less, 2 greater, 3 unordered). DIV and SQRT
report busy. SHA-Buff reports full and empty. SHA-Comp reports busy. CNN-MAC
reports valid and end of line. CNN-SUM reports valid.

### Stalls

A slot raises `stall` when its opcode cannot proceed. Examples: a read of a
divider that is still running, a pop from an empty buffer, a push into a full
one. The fabric also stalls when a sub-instruction reads the memory stream and
no word is valid, and when a VLIW writes to memory and `wr_ready` is low.
While stalled, the VLIW is held and issues nothing
(`issue = 0`). Iterative units keep working in the background. When the stall
drops, the VLIW issues in that clock.

### Traps

A trap ends the SI. The controller pulses `trap` and reports `trap_cause`, the
user value and the address of the VLIW. The trapping VLIW does not issue. If
several causes occur in one clock, the first one in this list wins:

1. `TRAP_ACC_ERR`: a slot pulsed `err`. The floating-point units do this when an
   operation gives a NaN.
2. `TRAP_STALL`: the VLIW is still stalled in its 512th consecutive clock
   (`STALL_LIM`, a parameter).
3. `TRAP_USER`: `utrap` is non-zero. Its 3-bit value is reported.
4. `TRAP_BAD_JUMP`: the next address lies outside the SI's first..last range.
   This includes running past the last address without a `last` flag.

### Timing

* `si_start` is sampled while idle. The first VLIW issues in the next clock.
* After that one VLIW issues per clock, and a jump costs no extra clock. The
  microcode memory is read synchronously at the address of the *next* VLIW.
* `done` or `trap` pulses in the clock after the final VLIW. `result` and the
  trap information hold until the next SI.
* Every accelerator registers its outputs. An op issued in clock t shows its
  result from clock t+1.
* An SI of n issued VLIWs and s stalled clocks takes n + s clocks from the
  start clock to `done`. The end-to-end test checks this.

## Accelerators

Every slot has the same ports: `en`, `op[3:0]`, `in0`, `in1`, `out0`, `out1`,
`cond[1:0]`, `stall` and `err`. Opcode 0 is idle. `rf_slot` picks the
accelerator with its `KIND` parameter, and the package gives the slot set-ups
of the four SIs:

| set-up | slot 0..4 | used by |
|--------|-----------|---------|
| `CFG_SWE` (default) | FMAV, FMAV, DIV, SQRT, UTIL | shallow-water solvers (FWave/HLLE) |
| `CFG_SIFT` | FMAV x4, empty | SIFT matching |
| `CFG_CNN`  | CNN-MAC x2, CNN-SUM x2, empty | CNN layers |
| `CFG_SHA`  | SHA-Buff x2, SHA-Comp x2, empty | SHA-3 |

On the FPGA, a slot is refilled by partial reconfiguration. Here the set-up is
fixed when the design is elaborated.

* **`acc_fmav`** (SIFT-FMAV, SWE-FMAV): one FP adder, one FP multiplier, an
  output register and a save register.
  - Ops: `ADD`, `SUB`, `MUL` on the inputs; `SQR` squares the last result;
    `ACC` adds the last result to the save register; `MACC` adds `in0` to it;
    `CLR` clears it; `RD` reads it; `PASS` copies `in0`.
  - One SIFT feature is `SUB`, `SQR`, `ACC`.
* **`acc_swe_util`**: FP compare, min/max and absolute value. The compare
  drives `cond`.
* **`acc_swe_div`, `acc_swe_sqrt`**: sequential units that produce one result
  bit per clock.
  - Start with op 1. Read with op 2.
  - A read issued right after the start stalls for 25 clocks.
* **`acc_cnn_mac`**: 3x3 convolution on signed 8-bit pixels and weights.
  - Three line buffers take turns: the newest row is written into one, while
    the other two supply the two rows above it.
  - Each `PUSH` adds a pixel and yields the 3x3 dot product of the current
    window. `PUSHA` also adds `in1`. `LDP` loads a partial sum and `PUSHP`
    adds it to the next window sum. With these, the microcode can add up
    any number of input channels.
  - `cond = {end_of_line, valid}`.
* **`acc_cnn_sum`**: ReLU, 2x2 max pooling through one line buffer, then a
  right shift and saturation to 8 bits. A result is ready after every second
  value of every second row.
* **`acc_sha_buff`**: FIFO of 2048 64-bit words (one Keccak lane per word). It
  stalls on push when full and on pop when empty. `PUSH` writes `{in1, in0}`;
  `STAGE` then `PUSHH` build a lane from two 32-bit words, one per VLIW, so
  a lane can come straight from the 32-bit memory stream.
* **`acc_sha_comp`**: the Keccak-f[1600] permutation, one round per clock (24
  clocks).
  - `ABS` XORs a lane into the state at an auto-incremented lane pointer. `SQZ`
    reads a lane out.
  - Padding and the loop over message blocks are done by the microcode.

`fp32_pkg` holds the floating-point arithmetic, on IEEE binary32 values.
Results are truncated rather than rounded, so they may be up to one ulp from
IEEE results. Subnormal numbers are treated as zero, and every NaN result is
the quiet NaN `7FC00000`.

## Example SIs

Three programs show how the pieces combine. Each runs on `rp_top` in its
slot set-up, with the testbench acting as CPU and memory. In all three, the
CPU changes a single VLIW before each run: the one holding the bound of the
outer counter loop. Everything else in the microcode stays the same for any
input size.

**SIFT matching** (`CFG_SIFT`, `tb_wl_sift`) computes
`sum (a_i - b_i)^2` over n feature pairs. The stream carries `a_0, b_0,
a_1, ...`. Four FMAV slots each take every fourth pair. The loop body has
eight VLIWs, one per stream word. In it, slot k does `PASS a`, `SUB b`,
`SQR` and `ACC` in four VLIWs, starting two VLIWs after slot k-1. Slot 3's
last two steps spill into the next iteration, and after the loop into a
two-VLIW epilogue. The four partial sums are then added as a tree. The CPU
pads n up to a multiple of four with zero pairs. An SI issues
8 + 8 * ceil(n/4) VLIWs.

**CNN layer** (`CFG_CNN`, `tb_wl_cnn`) computes
`quant(pool2x2(relu(sum_c conv(ch_c, w_c))))` for an H x W image with 2P
input channels. The loop nest is: channel pairs, then rows, then columns.
- Each pass over a channel pair reloads the two filters and streams the
  image.
- The two channels' pixels alternate on the stream.
- MAC 0 takes the even channel. Before each of its pixels it loads the
  partial sum of the earlier pairs for that position (`LDP`, then `PUSHP`).
- MAC 1 takes the odd channel and adds MAC 0's result (`PUSHA`).
- Every pass except the last writes MAC 1's sums back to memory. The next
  pass reads them back in as its partial sums.
- The last pass gives the sums to CNN-SUM instead. After each `PUSH`, a jump
  on CNN-SUM's valid signal skips the memory write unless a pooled byte is
  ready.
- The column loops have no counter. They jump back while MAC 1 reports
  "valid and not end of line" (`JMP_IF_ACC_EQ`, value 1), or in the warm-up
  rows "not end of line".
- The first VLIW loads the pass counter and, if P = 1, jumps straight to the
  last-pass code. This jump sees the counter value loaded by that same VLIW.

**SHA3-256** (`CFG_SHA`, `tb_wl_sha3`) uses all four parameter sets.
- For each 136-byte block, SHA-Buff is filled with 17 lanes by `STAGE` and
  `PUSHH` from the stream.
- The lanes are then popped into SHA-Comp's `ABS`, and `PERM` starts.
- The permutation runs while the next block streams into the buffer.
- After the last block, four `SQZ` reads each write two words to memory.
  The first `SQZ` stalls until the permutation ends.
- The CPU does the padding.
- A second program runs both buffer/compute pairs at once, on two messages
  with the same block count. SHA-Buff 0 feeds SHA-Comp 2 and SHA-Buff 1
  feeds SHA-Comp 3, and the lanes of the two messages alternate on the
  stream.

## What follows the paper and what does not

**From the paper:**

* the ten jump kinds;
* four parameter sets named by 2 bits, with 12-bit counters;
* accelerator-conditioned jumps on a 2-bit signal that must hold for all
  selected slots;
* the trap classes: bad jump target, accelerator error such as a NaN, a VLIW
  stalled for 512 clocks or more (the limit is adjustable), and a user trap
  with a 3-bit value;
* the stall flow: hold the VLIW and wait one clock at a time, or end the SI and
  raise an exception at the limit;
* five slots;
* the accelerator line-up of each SI;
* the block diagrams of the FMAV and UTIL accelerators;
* three rotating line buffers in CNN-MAC.

**Own choices:**

* the VLIW layout and all encodings;
* the parameter-set commands;
* absolute jump destinations bounded by the SI's first and last address;
* the `last` flag and the trap priority;
* the microcode depth of 1024;
* the operand crossbar and the memory read and write streams;
* all accelerator opcodes and latencies;
* the data widths of the CNN units;
* the size of the SHA-Buff buffer.

The DIV, SQRT, CNN-SUM and SHA-Buff units had only their function described.
Each is the simplest circuit with that function.

**Departures:**

* The vendor floating-point cores inside the FMAV and UTIL units are replaced
  by simple combinational functions. These truncate and treat subnormals as
  zero, and they take one clock instead of being pipelined behind control
  shift registers.
* SHA-Comp computes the right function, but not with the structure described.
  The original design keeps the state in two block RAMs (one for the gamma
  results, one for results) and adds a rho buffer of shift registers, all
  joined by read and write buses. The bit-level mapping of these units is not
  published, so this version keeps the 1600-bit state in registers.
* The CNN line buffers are read combinationally. A block-RAM version would need
  one clock of read latency.
* Runtime reconfiguration, the CPU, the memory and the bus are outside the RTL.

## Verification

Each module in `rtl/` has a self-checking testbench in `tb/` named
`tb_<module>`. Each prints `TB_RESULT checks=<n> failures=<m>` and stops on a
watchdog if it hangs.

* The arithmetic units are checked against real arithmetic (within one ulp).
* SHA-Comp is checked against the published Keccak-f[1600] value for the zero
  state and the SHA3-256 digests of `""` and `"abc"`.
* The line-buffer units are checked against convolution and pooling computed
  directly in the testbench.
* The controller is checked with hand-counted issue and clock counts for
  loops, stalls and every trap.
* `tb_rp_top` runs the whole design at its default parameters. The testbench
  plays the CPU and a memory stream with random gaps. One SI computes
  `min(sqrt(sum (a_k-b_k)^2) / A, B)` over a counter loop: FMAV
  accumulation, stalls on the SQRT and DIV reads, stream stalls, memory
  writes of each `a_k-b_k` against a randomly held-off write port, and a
  UTIL-conditioned jump. Further SIs raise each trap cause. The test checks
  the results, an exact clock count, and that every mechanism happened.
* `tb_wl_sift`, `tb_wl_cnn` and `tb_wl_sha3` run the example SIs above.
  - `tb_wl_sift` compares against sums in real arithmetic, for 128, 64, 12, 5
    and 4 features.
  - `tb_wl_cnn` compares, byte for byte, against the layer computed in the
    testbench. It runs 8x10, 6x6 and 6x8 images with 4, 2 and 6 channels.
    The memory model returns a pass's partial sums only after the previous
    pass has written them.
  - `tb_wl_sha3` compares against SHA3-256 digests of 0-, 135-, 300- and
    700-byte messages (one to six blocks). It also runs two message pairs
    through the dual program.
  - Each one also checks the exact number of issued VLIWs.
* No shallow-water solver runs: its equations are only cited, not given.
  The SWE set-up is covered by `tb_rp_top`. There, a UTIL comparison picks
  one of two computation paths, the same mechanism that switches between the
  two solvers.

To run a testbench with Verilator 5, list the packages first:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/dce_pkg.sv rtl/fp32_pkg.sv tb/tb_fp_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) tb/tb_rp_top.sv \
  --top-module tb_rp_top -o sim && ./obj_dir/sim
```

The other testbenches build the same way with their own top module.

## Changing the design

* **Slot set-up:** set `SLOT_KIND` on `rp_top`, for example
  `rp_top #(.SLOT_KIND(dce_pkg::CFG_SHA))`.
* **New accelerator:** implement the slot interface and add a kind to
  `acc_kind_e` and a branch to `rf_slot`.
* **Stall limit:** change `STALL_LIM`.
* **Microcode depth:** change `ADDR_W` in `dce_pkg`. This also widens
  `ps_dest`.
* **More slots:** change `NSLOTS` in `dce_pkg`. This widens the VLIW and
  `acc_sel`. The source encoding then needs more `SRC_W` bits once 2N+3
  exceeds 16.
