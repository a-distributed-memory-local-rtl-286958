# Distributed configuration registers on a common configuration bus

Most chips and FPGA designs hold a block of settings registers: sample rates, gains, phase
offsets, modes. These registers are written by a host and read throughout the design. The
usual layout keeps them in one central register map and routes every setting, bit for bit, to
the logic that uses it. That makes wide, high fan-out buses across the die. If a user runs on a
different clock, every bit also needs its own clock-domain crossing registers.

This design keeps each module's settings inside that module instead. One decoder receives the
host's commands and writes them over a single narrow bus that all modules share: a data word, a
register address and one select line per module. The bus is the same whatever the number of
registers in a module. Each module drives a **Ready** line back to the decoder. Ready is high only
while the module's logic is halted in a safe state. The decoder writes a module only while that
module is Ready, so a setting never changes while the logic that reads it is running. That
handshake is what lets the settings cross from the configuration clock into each module's own
clock without a synchroniser on every bit.

Because the bus is uniform, a module in a dynamically reconfigurable region can be swapped at run
time. The new module connects to the same four signal groups and is then configured over the bus
like any other.

```
             host_data/host_valid ─►┌────────────┐  bus_data, bus_addr (shared)
                     host_ready ◄───│ mm_decoder │──────────┬──────────────┬─────────── ...
                                    │            │ bus_sel[0]│   bus_sel[1] │
                                    └────────────┘          ▼              ▼
                                         ▲  mod_ready[N-1:0] ┌──────────┐   ┌──────────┐
                                         └───────────────────│cfg_slave │   │cfg_slave │ ...
                                                             │ settings │   │ settings │
                                                             └──────────┘   └──────────┘
                                                              mod_clk[0]     mod_clk[1]
```

## Files

| file | what it is |
|---|---|
| `rtl/cfg_pkg.sv` | widths (`DATA_W`=32, `ADDR_W`=8, `MOD_W`=4, `SYNC_STAGES`=2) and the host command type `host_word_t` |
| `rtl/mm_decoder.sv` | memory map module decoder: host handshake, waits for Ready, drives the bus |
| `rtl/cfg_slave.sv` | the configuration end of one module: settings registers, safe-state controller, Ready synchroniser |
| `rtl/local_settings.sv` | the settings register file of one module |
| `rtl/safe_state_ctrl.sv` | RUN/SAFE controller on the module clock |
| `rtl/sync2.sv` | two-flop synchroniser (helper) |
| `rtl/dist_cfg_top.sv` | decoder plus `N_MODULES` modules: the whole system |
| `tb/tb_*.sv` | one self-checking testbench per module, an end-to-end test at reduced size (`tb_dist_cfg_top`) and one at full size (`tb_dist_cfg_full`), and a size sweep (`tb_dist_cfg_sweep`, using the helper `tb_sweep_point`) |

Defaults: 4 modules, 226 registers of 32 bits each, 28,928 setting bits in all. That is the largest
distributed configuration measured in the source evaluation, which swept 1 to 4 modules and up to
226 registers per module.

## The host command and the decoder

The host side has three signals: a command word, Valid and Ready. A command is one packed word
(`host_word_t`, 44 bits, most significant field first):

| bits | field | meaning |
|---|---|---|
| 43:40 | `module_id` | which module (0 .. `N_MODULES`-1) |
| 39:32 | `addr` | register number inside that module |
| 31:0 | `data` | value to write |

`mm_decoder` takes a word when `host_valid && host_ready` on a `clk` edge. It holds one word at a
time, and `host_ready` is low while it holds one. On each following clock it looks at the target
module's Ready:

* **Ready high:** it writes. For one cycle `bus_sel[module_id]` is high, with `bus_addr` and
  `bus_data` from flip-flops, and the held word is released.
* **Ready low:** it keeps the word and `host_ready` stays low. The host is stalled until the module
  reaches its safe state. Writes to other modules wait behind it: commands are carried out in order.
* **`module_id` ≥ `N_MODULES`:** the word is discarded and `drop_o` pulses, so a bad command cannot
  hang the host.

Timing: if the target is already Ready, the write is on the bus in the cycle after the word was
taken, and `host_ready` is high again in that same cycle. The peak rate is one register every two
bus clocks. Assertions check that at most one select is active, and that the host keeps a word
unchanged until it is taken.

## Ready and the safe state: the clock-crossing argument

This is the part to understand before changing anything.

Each module's settings registers (`local_settings`) are clocked by the **bus** clock, because the
bus writes them. The module's logic reads them on **its own** clock, `mod_clk[m]`, with no
synchroniser in between. This is safe only because of the following rule: the registers change
only while the logic is not running.

`safe_state_ctrl` runs on `mod_clk`. In RUN, `run_en` is high and the module's logic operates. When
`halt_req` is high and the logic reports `busy` low, the controller enters SAFE. `run_en` drops and
`safe` rises. A two-flop synchroniser (`sync2`) carries `safe` into the bus clock, where it becomes
`bus_ready` / `mod_ready[m]`. It follows `safe` two to three bus clocks later. When `halt_req`
falls, the controller returns to RUN on the next module clock.

One gap is left to the user, and it is a rule of use, not something the hardware enforces. After
`safe` falls, Ready can read high in the bus domain for up to three more bus clocks. A write issued
in that window would land under running logic. So **`halt_req` must not be released until every
write meant for that module has completed.** A write has completed when `host_ready` is high again
with no word held, plus one bus clock for the register to take the value. The testbenches follow
this rule. `cfg_slave` carries an assertion that the bus never selects a module that is not Ready.

A module leaves reset in SAFE. Its registers are zero, and it can be configured before it first
runs.

## Module side

`cfg_slave` is what a module instantiates to join the bus:

* bus side (`bus_clk`): `bus_sel`, `bus_addr`, `bus_data` in, `bus_ready` out, and `addr_err_o`,
  which pulses when a write names a register at or beyond `NUM_REGS` (nothing is written).
* module side (`mod_clk`): `halt_req` and `busy` in, `run_en` out, and `settings[NUM_REGS]`, every
  register in parallel.

The module's own functional logic is not part of this RTL. It uses `run_en` as its enable, raises
`busy` while it is in an operation that must not be cut short, and reads `settings`. For a partially
reconfigurable region, `cfg_slave` (or a module with the same bus ports) sits inside the region, and
the static side keeps only the decoder and the bus wires.

## Verification

Every testbench checks against values it works out itself, prints
`TB_RESULT checks=<n> failures=<n>`, and has a watchdog.

| testbench | what it exercises |
|---|---|
| `tb_local_settings` | 2,000 random writes, some unselected, some out of range, to 226 registers; full compare against a model; reset clears all |
| `tb_safe_state_ctrl` | random `halt_req`/`busy`; `safe` and `run_en` compared with a reference every cycle; reset state; halts delayed by `busy` |
| `tb_mm_decoder` | 20,000 cycles of random commands and Ready levels; a cycle-level reference predicts `host_ready`, `bus_sel`, address, data and `drop_o`; counts stalls, drops, one-cycle writes and writes per module |
| `tb_cfg_slave` | bus clock 10 ns, module clock 7 ns; Ready latency (within 2–3 bus clocks) on both edges; a halt waits for `busy`; settings intact while running |
| `tb_dist_cfg_top` | whole system, 4 modules of 16 registers on clocks of 7, 9, 13 and 4 ns. Each module's logic model checks on every clock that its settings did not change while it ran. Rounds mix writes to halted modules, writes to a module halted only later (the host stalls), commands for absent modules and out-of-range addresses. Each mechanism must occur at least once. |
| `tb_dist_cfg_full` | the same at default size: first a load of all 904 registers with distinct values, then mixed rounds |
| `tb_dist_cfg_sweep` | the evaluated size range: 1 to 4 modules with 1, 26, 126 and 226 registers, 16 systems built from `tb_sweep_point`. Each is loaded completely at full rate and checked; the load must take exactly 2 × modules × registers bus clocks |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/cfg_pkg.sv tb/tb_dist_cfg_top.sv -y rtl \
          --top-module tb_dist_cfg_top -Mdir obj && ./obj/Vtb_dist_cfg_top
```

All testbenches finish in well under a second of run time. To resize the system, change
`N_MODULES` and `NUM_REGS` on `dist_cfg_top`. To widen the registers or address more modules,
change the constants in `cfg_pkg`. The command layout follows from them.

## What follows the source and what does not

Taken from the architecture as published:

* one decoder between the host landing point and a shared bus of Data, Address and one Select per
  module;
* the host-side names Data, Valid and Ready;
* settings registers local to each module;
* a Ready from each module meaning "logic is in a safe state, settings may be written";
* no writes while logic operates;
* the same bus for reconfigurable modules;
* 32-bit registers, 226 per module, 1 to 4 modules;
* a synchroniser depth of two (used in the source for its clock-crossing registers).

Choices made here, where the source is silent:

* the 44-bit command format and field widths (8-bit address, 4-bit module number);
* the one-word holding register and the one-cycle select pulse;
* dropping commands for absent modules, and the out-of-range address flag;
* a Ready line per module. The published block diagram draws the modules' Ready outputs joined
  into a single line, which leaves open how they are combined; a vector lets the decoder wait on
  the one module it is writing;
* the RUN/SAFE controller with `halt_req` and `busy`, and reset into SAFE;
* asynchronous active-low resets and zero reset values;
* no read-back of settings, since none is described;
* every register is the full 32-bit bus width. The source stresses that the bus does not depend
  on the width of the target registers; a module that needs a narrower setting uses only the low
  bits of its register;
* flip-flop registers rather than embedded RAM, because the logic reads all settings at once. The
  published register count for one module of 226 registers (7,499) is consistent with this:
  226 × 32 = 7,232 setting bits plus control.

Not included:

* the host link itself (described only as typically USB);
* the "common interface logic" at the boundary of a reconfigurable region, which the source shows
  only as wiring;
* the global register-map architecture that the source uses as its comparison baseline.
