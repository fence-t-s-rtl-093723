# ff.clr: a flip-flop clear instruction for temporal partitioning of an out-of-order RISC-V core

## The problem and the idea

Two programs that share a processor core in turns can leak information to
each other through timing. The first program leaves its traces in caches,
branch predictors, queues and pipeline registers. The second program notices
them because its own code then runs faster or slower. An operating system
closes these *timing channels* by resetting all of that microarchitectural
state at every switch between security domains. It also makes the switch
itself take a fixed time, so that the switch's own latency reveals nothing.

A simple in-order core can do all of this in one hardware instruction, but
that approach breaks down in a large out-of-order core. Some state there is
*mixed*. The register rename table is invisible to software, and it influences
timing, so it must be cleared. But it is also the only record of which
physical register holds each logical register. Clearing it in hardware alone
would destroy the program's registers.

The **software-supported temporal fence** divides the work between software and
hardware:

1. Software pushes all logical registers to the stack and saves the stack
   pointer in a scratch CSR (`sscratch`).
2. Software writes the address of the instruction after step 5 into the
   reset-vector CSR `mrvbr`.
3. The core's existing maintenance operations write back and clear the L1
   data cache (`dcache.call`). A write to the vendor CSR `mcor` then
   invalidates the L1 caches and branch predictors.
4. `sync.i` waits until everything before it has completed.
5. **`ff.clr` resets every on-core flip-flop except the CSRs.** The core comes
   out of this reset at the address in `mrvbr`, which is the next instruction.
6. After another `sync.i`, software restores the stack pointer from `sscratch`
   and pops the registers. It then pads the whole sequence to a fixed
   worst-case duration, which is 15,000 cycles on the reference core.

`ff.clr` is the only new hardware. The rename table can now be cleared safely,
because every logical register value is on the stack by then. The CSRs keep
their values because the restart address and the saved stack pointer are held
in CSRs. This RTL implements `ff.clr`: the decoder extension, the extended
reset controller and the reset-vector CSR that the restart depends on.

## Two reset domains

The core becomes two reset domains:

| domain               | reset signal   | asserted by             | holds |
|----------------------|----------------|-------------------------|-------|
| CSRs                 | `csr_rst_no`   | power-on reset only     | all CSRs, including `mrvbr` and `sscratch` |
| microarchitectural   | `uarch_rst_no` | power-on reset, `ff.clr`| every other on-core flip-flop: pipeline registers, rename table, reorder buffer, queues, predictor and cache control state |

Both resets are synchronous and active low. The SRAM arrays (cache data and
tags, predictor tables) are not flip-flops. The core's own invalidation
operations clear them in step 3, before `ff.clr`.

Integrating this into a core means deciding, for every register, which of the
two resets it takes. This choice has the most effect on security and on
correctness:

* If a flip-flop that can affect timing stays out of `uarch_rst_no`, it can
  carry a channel across the fence.
* If a CSR gets `uarch_rst_no`, `ff.clr` loses architectural state. If that
  CSR is `mrvbr`, the core restarts at the power-on address instead of
  continuing the program.

## How ff.clr travels through the pipeline

```
 decode                     reorder buffer               retire
 ffclr_decoder  --tag-->   (carried with the entry)  --> rtu_retire_ffclr_i
                                                              |
                                                     ffclr_reset_ctrl
                                                       |           |
                                        uarch_rst_no low      restart_o pulse
                                        for CLR_CYCLES        fetch PC <= mrvbr
```

* **Decode** (`ffclr_decoder`, combinational). The decoder compares the
  instruction word with the `ff.clr` encoding. In machine mode the
  instruction gets a tag. Below machine mode it is flagged illegal and must
  trap, because it would let user code reset the core and jump to a CSR-held
  address.
* **Retirement.** The tag comes back when the instruction retires. `ff.clr`
  acts only at retirement, so it never acts speculatively. The `sync.i`
  before it guarantees that all older work has finished, including the cache
  write-back. The `sync.i` after it keeps younger instructions from issuing.
  Anything that still entered the pipeline behind `ff.clr` is removed by the
  reset.
* **Clear** (`ffclr_reset_ctrl`). Suppose the retiring `ff.clr` is sampled at
  clock edge T. `uarch_rst_no` is then low for the `CLR_CYCLES` cycles after
  T. `busy_o` is high for the same cycles, and `csr_rst_no` stays high.
* **Restart.** In the next cycle `uarch_rst_no` returns high and `restart_o`
  pulses once. The fetch unit loads `restart_pc_o`, which is the current
  value of `mrvbr`. Power-on reset uses the same path: `csr_rst_no` is
  released `SYNC_STAGES` edges after `por_rst_ni` rises. `uarch_rst_no` and
  `restart_o` follow one edge later, and `mrvbr` then holds the strapped
  `rvba_i`.

With the defaults, the clear and restart add 5 cycles to the fence. Refilling
the pipeline adds a few more. This is tiny next to the 15,000-cycle padded
fence, and the padding hides it anyway. The time from `ff.clr` retiring to
the next instruction retiring is the same on every fence: it does not depend
on anything the previous program did.

## Modules

| file | what it is |
|------|------------|
| `rtl/ffclr_pkg.sv` | `XLEN`, the `ff.clr` encoding, the `mrvbr` CSR number, privilege and reset-controller state types |
| `rtl/ffclr_decoder.sv` | decode-stage recognition of `ff.clr`, with a machine-mode check |
| `rtl/ffclr_reset_ctrl.sv` | power-on reset synchroniser and the POR/RUN/CLEAR state machine that drives the two resets and the restart pulse |
| `rtl/mrvbr_csr.sv` | reset-vector CSR: power-on value from `rvba_i`, written by `csrw`, in the CSR domain |
| `rtl/c910_ffclr.sv` | top: the three units wired together, with the ports the rest of the core connects to |

Parameters of the top: `SYNC_STAGES` (default 2) and `CLR_CYCLES` (default
4). `XLEN` is 64 for an RV64 core.

The top leaves out the core itself. Its decode stage drives `id_valid_i`,
`id_insn_i` and `priv_i`. The reorder buffer carries `id_ffclr_o` and returns
it as `rtu_retire_ffclr_i`. The CSR unit drives `csr_we_i`, `csr_addr_i` and
`csr_wdata_i`, and it gets `mrvbr` reads on `csr_rdata_o` and `csr_hit_o`.
The reset outputs go to the two domains, and the fetch unit takes `restart_o`
and `restart_pc_o`.

## What follows the published design and what is this implementation's choice

These points follow the published description:

* `ff.clr` is the only added instruction.
* It clears all on-core flip-flops except the CSRs.
* It is built by extending the decoder and the synchronous reset controller.
* Execution continues at the address software wrote to `mrvbr`.
* It is used inside the `sync.i` / `ff.clr` / `sync.i` sequence described
  above.
* The core is 64-bit.

These points are choices made here, because no published detail covers them:

* **Encoding.** `ff.clr` is the fixed word `0x0040000B`. This is in the
  custom-0 opcode space, which the core's vendor instructions use
  (`dcache.call` is `0x0010000B` and `sync.i` is `0x01A0000B`). Change it in
  `ffclr_pkg`.
* **`mrvbr` CSR number.** It is `0x7C7`, the number the core vendor documents.
* **Machine mode only.** `ff.clr` is restricted to machine mode. `mrvbr`
  writes from lower privilege levels are dropped.
* **Action at retirement.** `ff.clr` acts when it retires, not when it
  executes.
* **Reset shape.** The power-on reset goes through a 2-stage synchroniser.
  The `ff.clr` reset is 4 cycles long, and a separate one-cycle restart pulse
  follows it.
* **Alignment.** `mrvbr` bit 0 reads as zero (2-byte instruction alignment).

The cache and predictor invalidations (`dcache.call`, `mcor`), `sync.i`, the
rest of the pipeline and the SoC around the core are parts of the existing
core and platform. They are not included here. The time padding is done in
software.

## Testbenches

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog.

* `tb/tb_ffclr_decoder.sv` checks the exact encoding, every single-bit
  corruption of it, neighbouring vendor instructions and random words. Each
  case runs at all privilege levels, with `valid` both high and low.
* `tb/tb_ffclr_reset_ctrl.sv` tests two instances: 2/4, the default, and 3/1
  for `SYNC_STAGES`/`CLR_CYCLES`. It checks power-on release timing, the
  length of every clear, single restart pulses and back-to-back `ff.clr`. It
  also checks a power-on reset that arrives in the middle of a clear.
* `tb/tb_mrvbr_csr.sv` checks the power-on value, writes to `mrvbr` and to
  other CSR numbers, the read port, and the reset value.
* `tb/tb_c910_ffclr.sv` is the end-to-end test at default parameters. It uses
  a behavioural core model with a rename table, a 64-entry physical register
  file, a 6-stage decode-to-retire pipeline, a `sync.i` barrier, `sscratch`,
  and an off-core stack. The model runs the complete fence sequence three
  times, each time with different register contents and a different rename
  history. It checks these points:
  * every register survives;
  * the rename table, the physical registers and the pipeline are at their
    reset values when fetch restarts;
  * the restart address is the label after `ff.clr`;
  * `sscratch` and `mrvbr` survive;
  * the clear lasts `CLR_CYCLES`;
  * the time from `ff.clr` retiring to the next retirement is identical every
    time;
  * `ff.clr` in user mode traps and changes nothing.

  It counts each mechanism: power-on restart, `mrvbr` write and read, tag,
  clear, restart at the label, `sync.i` stall and user-mode trap. It fails if
  any of them never happened.
* `tb/tb_channel_bench.sv` is a small prime-and-probe experiment. A Trojan
  encodes a secret s (0 to 128) by training the first s entries of a
  128-entry table held in flip-flops of the microarchitectural domain. After
  a context switch, a spy probes every entry, and each trained entry costs it
  3 extra cycles. With a plain switch, the spy's time is 128 + 3s, so it
  reveals the secret: there are 129 distinct times. When the switch uses
  `ff.clr` and is padded to 64 cycles, the spy's time and the switch time are
  the same for every secret: there is 1 distinct time. The table stands in
  for flip-flop state in general. Cache and predictor SRAMs are cleared by the
  core's own operations, which are not part of this RTL.

Run any testbench with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/ffclr_pkg.sv tb/tb_c910_ffclr.sv --top-module tb_c910_ffclr -o sim
./obj_dir/sim
```

## How far to trust it

All RTL files lint cleanly in Verilator (warnings only for unused package
constants and the unused bit 0 of `mrvbr`'s inputs) and elaborate in Yosys
with the slang front end. All five testbenches pass. Each of the four
module testbenches was also run against a deliberately broken copy of its
module, and it caught the fault. The core model in the
end-to-end test is a stand-in and not the real pipeline. It shows that the
interface and the timing work, but it cannot show that a particular core
routes `uarch_rst_no` to every flip-flop that needs it. That check belongs to
the integration of the unit into a real core.
