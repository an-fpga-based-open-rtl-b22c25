# JARVIS-style SoC for side-channel research: RTL of the debug, clocking and peripheral subsystem

Side-channel attacks recover secret keys from the power a chip draws while it
computes. Studying them, and the countermeasures against them, needs a target
whose hardware and software are both open and changeable. The researcher must
also be able to say exactly which instructions a power trace covers. This SoC
is built around that need. A small RV32IM CPU runs the code under attack, from
bare-metal AES to FreeRTOS applications. Around the CPU sit the parts that
make measurements precise and countermeasures possible:

* **A message-based debug subsystem.** A host PC drives it over a UART. It
  can load and read memory, halt, step, reset and resume the CPU, read its
  registers and performance counters, and set breakpoints and
  *triggerpoints*. A triggerpoint does not stop the CPU. It toggles an
  oscilloscope trigger pin when the program counter reaches a given address,
  so a trace starts and ends on chosen instructions.
* **A dynamic frequency scaling (DFS) actuator.** It generates the CPU clock
  and changes its frequency at run time without stopping it, either on
  command or continuously at random. Random clocking is a hiding
  countermeasure: it smears the timing of the leaking operations across
  traces.
* **A true random number generator (TRNG)** that software can read, for
  masking and other randomised countermeasures.
* **A timer** with a compare interrupt, so that FreeRTOS can run (coarse-grain
  multithreading, chaff threads, morphing).
* **Main memory** (256 KiB), a user UART, and a 64-bit Wishbone bus that joins
  everything.

This repository holds synthesizable SystemVerilog for all of the above except
the CPU. The CPU is an existing five-stage in-order RV32IM core. Its
attachment points are ports of the top module `jarvis_soc`. The testbenches
attach a small behavioural CPU (`tb/cpu_model.sv`) there.

## Block diagram and clock domains

```
           host PC                                  oscilloscope
              | sys_rx/sys_tx                          ^ trg
        +-----v------+    byte stream   +------------+ |
        |  sys_uart  |<---------------->| dbg_global |-+---- req/ack link ----+
        +------------+                  +-----+------+                        |
                                              | Wishbone master 1      +------v--------+
  cpu_dbus --[wb_cdc]-- master 0 --+          |                        | dbg_local_cpu |--> cpu_run/halt/rst,
                                   v          v                        +---------------+    regs, trg
                          +-------------------------+                  +---------------+
                          |     wb_interconnect     |   req/ack link ->| dbg_local_dfs |
                          +--+------+------+-----+--+                  +------+--------+
                             |      |      |     |                   f_in/f_set/rnd | ^ f_out
                         wb_mem  wb_uart wb_trng wb_timer --irq-->    +-----v-------+--+
  cpu_ibus --[wb_cdc]--> (2nd port)                                   | dfs_actuator   |--> cpu_clk
                                                                      +----------------+
```

There are two clock domains:

* **`clk_ref`, 50 MHz.** The bus, memory, peripherals, global debug unit,
  DFS local debug unit and the DFS controller all run on it.
* **`cpu_clk`.** The DFS actuator generates it, at 100 MHz after reset. The
  CPU and the CPU local debug unit run on it. They must, because
  breakpoints compare the program counter every CPU cycle.

Signals cross between the domains in three places:

* **The debug links.** The global unit's links to both local units use a
  four-phase req/ack handshake with two-flop synchronisers on req and ack.
  The request payload is stable while req is high.
* **The CPU buses.** Both CPU buses pass through `wb_cdc`, a toggle-handshake
  bridge, so the CPU can run at any DFS frequency against the fixed 50 MHz
  bus. A transfer costs a few cycles of each clock. Only single (classic)
  transfers cross.
* **The timer interrupt.** It is synchronised into `cpu_clk`.

## The debug protocol

The host and the SoC trade request and response messages. A new request may
only be sent after the previous response has arrived. Every field goes over
the UART low byte first.

| message          | fields                                     | bytes |
|------------------|--------------------------------------------|-------|
| read request     | COMMAND (16), ADDRESS (32)                 | 6     |
| write request    | COMMAND (16), ADDRESS (32), DATA (32)      | 10    |
| read response    | COMMAND (8), DATA (32)                     | 5     |
| write response   | COMMAND (8)                                | 1     |

**Request COMMAND.** The 6-bit TOKEN in bits 5:0 always says what is asked.
The meaning of the upper bits depends on the token:

* **Memory-mapped requests** (MMAP_READ, MMAP_WRITE) carry the Wishbone cycle
  attributes: BTE[15:14], W[13], CTI[12:10] and SEL[9:6].
* **Local requests** carry CPU_ID[10:6], which names the target local unit.
  Bits 15:11 are reserved.

**Response COMMAND.** It is `{6'b0, A, E}`: A=1 on success, E=1 on error.

| tokens | go to | effect |
|---|---|---|
| 1 MMAP_READ, 2 MMAP_WRITE | Wishbone bus | one 32-bit access to any slave |
| 3/4 GPR_INT32_READ/WRITE | CPU unit | register file, ADDRESS = register number |
| 5/6 GPR_FPU32_READ/WRITE | CPU unit | answered with an error: this build has no FPU |
| 7 HALT, 8 RUN, 9 RST_CPU | CPU unit | stop, resume, reset (the CPU is then halted) |
| 10 GET_DULOCAL_STATE, 11 GET_CPU_PC | CPU unit | 0 running, 1 halted, 2 stepping; program counter |
| 12 ADVANCE_ONE_STEP | CPU unit | one instruction from the halted state |
| 13 ECHO_FRONTEND | CPU unit | acknowledged; tests the link |
| 14-17 GET_LOW/HIGH_CYCLECNT/INSTRCNT | CPU unit | 64-bit counters in two halves |
| 18-21 SET/GET/RM/GET_NUM_BRKPNT | CPU unit | ADDRESS = entry, DATA = instruction address; GET_NUM returns {valid entries, capacity} |
| 22-25 the same for TRGPNT | CPU unit | triggerpoint table |
| 26 SET_FREQ_DFS, 27 GET_FREQ_DFS, 28 RND_FREQ_DFS | DFS unit | DATA[9:0] = frequency index; returns the current index; DATA[0] = random mode on/off |

Token 0 (INVALID), codes above 28 and a CPU-unit token with CPU_ID other than 0
are answered with E=1. So are a Wishbone err and a bus time-out (1024
cycles).

**Memory-mapped accesses.** The bus is 64 bits wide, but a message carries
32 bits of data. The global unit therefore works on one half of the bus word:

* ADDRESS bit 2 picks the half.
* SEL is shifted into that half.
* The write data is copied onto both halves.
* A read returns the selected half.

### Global unit timing

The global unit is a small state machine:

1. It collects the request bytes.
2. It decodes the token.
3. It does one of two things:
   * runs one Wishbone cycle, or
   * raises req on one local link, waits for the synchronised ack, drops
     req and waits for ack to fall again (four-phase handshake).
4. It sends the response bytes.
5. Only then does it accept the next request.

At 50 MHz with the default divider 434 (115 200 baud), the UART dominates:
an MMAP write takes about 1 ms from first byte to response.

## Breakpoints, triggerpoints and stepping

The CPU local unit holds `NUM_BRK` breakpoint entries and `NUM_TRG`
triggerpoint entries, 4 of each by default. Each entry is a 32-bit address
plus a valid bit. Every CPU cycle the unit compares the valid entries against
the PC the CPU presents.

**Breakpoint hit.** `cpu_halt` rises in the same cycle and combinationally,
so the instruction at the breakpoint is **not** executed. The debug state
becomes HALTED. A CPU connected to this SoC must start an instruction only in
a cycle where `cpu_run = 1` and `cpu_halt = 0`.

**Resuming from a breakpoint.** RUN or a step from a breakpoint address would
hit the same breakpoint again at once. To avoid this, resuming arms a
one-shot mask for the current PC. The mask lasts until the PC moves.

**Single step.** ADVANCE_ONE_STEP gives exactly one cycle of `cpu_run` (state
STEPPING), then returns to HALTED.

**Triggerpoint hit.** `trg` toggles on the first cycle the PC equals a valid
triggerpoint address. It does not toggle again while the PC stays there. The
usual set-up uses two triggerpoints:

* The start address raises the trigger.
* The end address lowers it again.

Two breakpoints around them stop the CPU before the window, while the
oscilloscope is armed, and after the window, while the trace is read out.

**RST_CPU.** It pulses `cpu_rst` for `RST_CYCLES` (4) CPU cycles and leaves
the CPU halted. The CPU-domain flip-flops of the local unit use an
asynchronous reset. This matters because `cpu_clk` is not running while the
SoC is in reset: the DFS has not locked yet.

## The DFS actuator

This is the least obvious part of the design. A 7-series MMCM (the FPGA's
programmable clock synthesiser) holds its output low while its dividers are
reprogrammed. A single MMCM would therefore stall the CPU for tens of
microseconds at every frequency change. The actuator uses two MMCMs instead:

* The **master** drives `clk_out`.
* The **slave** is the one that gets reprogrammed.

Once the slave has locked, the two swap roles. `is_mst` says which is master:
0 means MMCM_A.

One change goes like this. The state machine runs on `clk_ref`, and the cycle
counts are for the defaults.

1. **Pick the target.** In IDLE a request is taken. The request is either a
   `f_set` pulse from the DFS local unit or a `rnd` flag together with a TRNG
   word not used before. The target index, `f_in` or the low 10 bits of the
   TRNG word, is registered. That register is also `f_out`, the index the
   host reads back.
2. **Read the table.** The index addresses the configuration ROM, which has
   one cycle of latency. The decoder between them is the identity.
3. **Reprogram the slave.** A one-cycle `cfg` pulse goes to the slave MMCM.
   Its `locked` drops and it re-locks `LOCK_CYCLES` (100) cycles later at the
   new frequency.
4. **Swap.** When `ack = lock_A & lock_B` is high again, `is_mst` flips and
   `n_reconf` counts the change.
5. **Wait for the switch.** The clock switch `clk_mux_gf` hands `clk_out`
   over. The state machine waits in SWAP until the handover has completed,
   seen through synchronised copies of the switch's enables. Only then may
   the old master be reprogrammed.

`busy` is high from step 1 to step 5. With the defaults a change takes about
110 cycles of `clk_ref`, plus a few cycles of the slower of the two CPU
clocks.

**Random mode.** In random mode the next change starts as soon as the
previous one is done and the TRNG has a fresh word: every 32 post-processed
bits, about 2.6 us with the defaults. A `f_set` that arrives while a change
is running is remembered and served next.

**After reset.** Both MMCMs are programmed to index 760 (100 MHz). `clk_out`
stays low until both have locked, about 2 us.

**The clock switch.** Each clock has an enable flip-flop. The flip-flop is
set on that clock's rising edge and then re-timed on its falling edge, and
it may only turn on after the other side's enable is off. So `clk_out` never
carries a pulse shorter than half a period of the faster clock. During a
handover it may pause for up to about one period of each clock. On the FPGA
this would be a clock-buffer multiplexer.

### Configuration table

`dfs_cfg_rom` maps index *i* to one MMCM setting, with target frequency
f = 5 MHz + *i* x 0.125 MHz. The 1024 entries therefore span 5 to
132.875 MHz.

Each entry holds three fields:

* `divclk`: the input divider D.
* `mult_x8`: the feedback multiplier M x 8, since M has 1/8 steps.
* `odiv_x8`: the output divider O x 8.

The output frequency is 50 MHz x M / (D x O).

Every entry is chosen by a search that runs during elaboration. The search
keeps the phase detector (50 MHz / D) at 10 MHz or more and the VCO between
600 and 1200 MHz. It then takes the setting closest to the target. Every
entry lands within 0.1 % of its target, and the frequencies rise strictly
with the index.

The table is generated, not loaded from a file. To hold a different set of
frequencies (the MMCM reaches 5 to 800 MHz), change `F_MIN_KHZ` and
`F_STEP_KHZ`, or replace `params_for`.

### The MMCM model

`mmcm_model` is a behavioural stand-in for the hard MMCM primitive, not
logic. It keeps three properties:

* the output is low while unlocked;
* lock is lost on `cfg` and regained `LOCK_CYCLES` reference cycles later;
* the output period follows M, D and O, rounded to 1 ps.

The real primitive is reprogrammed through its dynamic reconfiguration port
(DRP) with a sequence of register writes. That sequence is not modelled.

## TRNG

`trng_core` chains three stages:

1. A noise source: a jittery free-running oscillator sampled on `clk`.
2. One of three post-processing methods, chosen by parameter:
   * `PP_XOR`: XOR of 4 raw bits.
   * `PP_VN`: Von Neumann pairs. This is the default.
   * `PP_LFSR`: the raw bit is XORed into the feedback of a 32-bit LFSR.
3. A 32-bit shift register. Each time 32 new bits have arrived, the register
   is copied to the output word and `fresh` pulses.

The memory-mapped `wb_trng` returns the word in bits 31:0. Bit 32 says
whether the word changed since the last read. The DFS actuator has its own
`trng_core`.

The noise source (`trng_noise_src`) is a behavioural model. Real entropy
sources are ring-oscillator or PLL structures whose jitter is physical. On
an FPGA such a source has to be placed by hand. Swap in one of those for a
real build.

## Bus, memory map and peripherals

The data bus is a shared 64-bit Wishbone B4 bus with two masters: the CPU
data port and the global debug unit. A round-robin arbiter grants the bus for
a whole `cyc`. The grant is registered, which costs one idle cycle between
owners.

| base          | size    | slave                               |
|---------------|---------|-------------------------------------|
| `0x0000_0000` | 256 KiB | main memory, data port              |
| `0x8000_0000` | 4 KiB   | user UART                           |
| `0x8000_1000` | 4 KiB   | TRNG                                |
| `0x8000_2000` | 4 KiB   | timer                               |

Any other address gets `err`.

**Main memory (`wb_mem`).** It has a second read-only port for the CPU
instruction bus, which is a separate point-to-point bus (modified Harvard).
Both ports run classic cycles in 2 cycles. They also run incrementing bursts
(CTI = 010) with linear or 4/8/16-beat wrapping addresses (BTE) at one beat
per cycle after the first. Writes honour the SEL byte enables.

**User UART (`wb_uart`).**

| offset | write          | read |
|--------|----------------|------|
| `0x0`  | sends a byte   | `{rx_full, byte}`, and clears rx_full |
| `0x8`  | —              | `{tx_busy, rx_full}` |

**Timer (`wb_timer`).**

| offset | register   | reset value |
|--------|------------|-------------|
| `0x0`  | `mtime`    | 0; counts every `clk_ref` cycle |
| `0x8`  | `mtimecmp` | all ones |

Writes honour the byte enables. `irq` is a flip-flop set while
`mtime > mtimecmp`.

## Files

* **`rtl/soc_pkg.sv`**: the shared package. It holds the Wishbone structs,
  the memory map, the token enumeration, the debug link structs and the MMCM
  parameter struct.
* **`rtl/`**: one module per file, named after the module. The top is
  `rtl/jarvis_soc.sv`. The helpers are:
  * `sync2`
  * `uart_rx`, `uart_tx`
  * `clk_mux_gf`
  * `trng_core`
  * `wb_cdc`
* **`tb/tb_<module>.sv`**: one self-checking testbench per block. Each
  prints `TB_RESULT checks=N failures=M` and has a watchdog.
* **`tb/tb_jarvis_soc.sv`**: the end-to-end test, run on the top with
  **every parameter at its default**. It drives the SoC only through the
  system UART, like a host would:
  * loads a program;
  * sets breakpoints and triggerpoints, runs and single-steps the CPU;
  * reads the TRNG and the timer while the CPU uses the bus;
  * arms the timer interrupt;
  * provokes a bus error;
  * changes the CPU clock, on command and at random;
  * resets the CPU.

  It counts every mechanism and fails if one never happened. The simulation
  runs for about 30 s of wall time.

To simulate one testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/soc_pkg.sv tb/tb_jarvis_soc.sv \
          --top-module tb_jarvis_soc -o sim && ./obj_dir/sim
```

Replace `tb_jarvis_soc` by any other testbench name. The simulator is
two-state, so every register that is read has a reset or an initial value.
The behavioural models draw their jitter from `$urandom`. The statistical
checks use wide margins so that they hold for any seed.

Synthesis has two caveats:

* **Behavioural models.** Synthesis tools ignore the delays in the two
  behavioural models, the MMCM and the noise oscillator. They then report
  the MMCM output as a combinational loop and the oscillator as an undriven
  net. Both stand for hard FPGA resources and must be replaced by the vendor
  primitive and a real entropy source for an FPGA build.
* **Memory size.** The 256 KiB memory is a plain array. FPGA tools map it to
  block RAM.

## Where this RTL departs from, or goes beyond, the published design

* **CPU and FPU.** They are not included. The CPU ports of `jarvis_soc`
  define the contract a core must meet (run/halt rule, PC, counters,
  register port, two Wishbone master ports). The FPU register tokens answer
  with an error.
* **Choices the published description leaves open.** All of these are this
  design's own:
  * the byte order on the UART;
  * the meaning of ADDRESS and DATA for the local tokens;
  * the error rules;
  * the bus time-out;
  * the memory map and register offsets;
  * the arbitration scheme;
  * the TRNG refresh rule and fresh flag;
  * the timer's reset values.
* **Clock-domain crossing.** The published design puts the CPU on the DFS
  clock and everything else at a fixed frequency. It does not say how the
  two meet. Here the two-flop-synchronised req/ack links and `wb_cdc` do it.
  `wb_cdc` carries classic transfers only, so CPU bursts are not supported
  across it.
* **Clock switching.** The published actuator is described as glitch- and
  latency-free. Here the handover through `clk_mux_gf` is glitch-free, but
  `clk_out` may pause for up to about one period of each clock during a
  swap.
* **Random mode.** The published actuator starts the next random change as
  soon as the previous one completes. Here it also waits until the TRNG has
  produced a word not yet used, so no two changes reuse a TRNG word. With
  the defaults the wait is usually well under a microsecond.
* **Configuration table.** The published table is filled by the user, with
  up to 1024 sets, 0.125 MHz minimum step, and 5-800 MHz reach. This table
  holds 5 to 132.875 MHz in 0.125 MHz steps, computed at elaboration.
  1024 uniform steps cannot cover 5-800 MHz, so another grid means new
  `F_MIN_KHZ`/`F_STEP_KHZ` values or a custom `params_for`.
* **Noise sources and MMCMs** are behavioural models, as explained above.
  Only one noise source style is modelled, not the three published ones.
* **The DFS actuator** is listed in the published bus description as a bus
  master, but no bus function is given for it. It has no bus port here and
  is reached only through its local debug unit.
