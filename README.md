# EILID hardware: an execution-integrity monitor for MSP430-class MCUs

Small bare-metal microcontrollers (16-bit, a few KB of RAM, no MMU, no MPU, no
privilege levels) cannot run the usual control-flow-integrity (CFI) machinery.
EILID gets CFI on such a device by splitting the work three ways:

1. **At compile time** an instrumentation pass inserts a few instructions in
   front of every `call`, `ret`, interrupt entry, `reti` and indirect call. The
   inserted code puts an address in a register and calls a trusted routine.
2. **Trusted software in a secure ROM** keeps a *shadow stack*: it pushes each
   return address (and each interrupt context) when a call or interrupt
   starts. Before the matching return, it pops the copy and compares it with
   the value on the ordinary stack. Before an indirect call, it looks the
   target up in a table of legal function entries that `main()` fills at boot.
3. **Hardware** makes the trusted software trustworthy. It resets the MCU the
   moment anything could subvert the scheme.

This repository holds the RTL of part 3, the hardware, and of the two
memories it adds next to the CPU: the secure ROM and the shadow-stack RAM.
The CPU core, its flash and its RAM are ordinary parts that this RTL only
connects to. The compiler pass and the ROM software are not hardware, and they
are not included. The end-to-end testbench reproduces the ROM software's
bus behaviour.

## Why the hardware is enough

The CFI checks themselves are done in software. The hardware only has to
guarantee five things, and each is a simple check on the CPU's buses:

| Rule | Breach detected when | `viol_t` bit |
|---|---|---|
| Application code is immutable | the CPU writes program memory while its PC is outside the ROM, or DMA writes program memory | `pmem_write` |
| No injected code runs | a valid PC lies outside program memory and outside the ROM (for example in RAM) | `exec_outside` |
| The ROM is entered only at its entry point | the PC moves from outside the ROM to a ROM address other than `ENTRY_ADDR` | `rom_entry` |
| The ROM is left only through its leave point | the PC moves from a ROM address other than `LEAVE_ADDR` to outside the ROM | `rom_exit` |
| The ROM runs atomically | an interrupt is accepted, or a DMA request is active, while the PC is in the ROM | `rom_irq`, `rom_dma` |
| The ROM is read-only | any write (CPU or DMA) into the ROM window | `rom_write` |
| Only the ROM touches the shadow stack | a CPU access to the shadow-stack window while the PC is outside the ROM, or any DMA access to it | `sstack_access` |

A breach of any rule resets the MCU. Together the rules mean that:

* the shadow stack can change only through the ROM routines;
* those routines always run from their first instruction to their last;
* no code can be slipped in beside them.

A return-address overwrite on the ordinary stack therefore can't also fix up
the shadow copy. The ROM routine sees the mismatch, and the device resets.

The hardware needs no dedicated "check failed" signal. When a ROM routine
finds a mismatch, it branches straight back to the application from its body,
skipping the leave point. The exit rule turns that into a reset. This is how
the end-to-end testbench models a failed check. Any other deliberate breach
would do as well.

## How a protected call looks on the buses

The ROM software keeps its stack index in CPU register `r5`. The index is
never stored in memory, which saves a memory access per operation. Entry `k`
of the shadow stack lives at `0x2000 + 2*k`. With `r5 = 2`, the two stored
return addresses sit at `0x2000` and `0x2002`. The next push goes to `0x2004`
and sets `r5` to 3, and a pop reads `0x2000 + 2*(r5-1)`. The argument
registers are:

* `r4` selects the routine (init, store/check return address, store/check
  interrupt context, store/check indirect target);
* `r6` and `r7` carry the addresses being stored or checked.

An interrupt context is two words: the interrupted PC and the status register.

For one call, the monitor sees this sequence:

```
PC in flash   mov #ret,r6 ; call stub          (application)
PC = 0xA000   entry section                    (ROM entered at ENTRY_ADDR: legal)
PC in body    write 0x2000+2*r5 <- r6          (shadow-stack write granted: PC in ROM)
PC = 0xA7FE   leave section                    (ROM left from LEAVE_ADDR: legal)
PC in flash   call foo ... mov 0(r1),r6 ; call stub
PC = 0xA000 … read 0x2000+2*(r5-1)             (granted), compare with r6
PC = 0xA7FE → ret                               on match
PC in body → flash                              on mismatch: illegal exit, reset
```

The shadow-stack memory hands out data only for a granted access. A read by
application code returns zero on the bus and also resets the device.

## Timing

* All rule checks are combinational on the current cycle's inputs, apart from
  one register of PC history in the ROM entry/exit checker.
* `puc_reset` (`reset_req` in `eilid_hw`) rises at the clock edge that ends
  the offending cycle. It stays high for `RST_CYCLES` cycles (8 by default).
  During those cycles, further breaches are ignored and the PC history is
  cleared.
* `viol_cause` holds the bits of the rules that fired, until the next breach.
  `viol_pulse` is high for one cycle per breach.
* `sstack_grant` is combinational: it qualifies a shadow-stack access in the
  same cycle.
* The ROM and the shadow-stack RAM are synchronous. Read data appears one
  clock after the request, matching a synchronous on-chip RAM. `eilid_top`
  registers which memory was addressed, so the returned word comes from the
  right one.

## Address map and parameters

Defaults (byte addresses, all parameters of `eilid_top`):

| Region | Default | Parameter | Origin |
|---|---|---|---|
| Shadow stack | `0x2000`–`0x20FF` (256 B, 128 words) | `SSTACK_BASE`, `SSTACK_BYTES` | published design |
| Secure ROM | `0xA000`–`0xA7FF` (2 KB) | `SROM_BASE`, `SROM_BYTES`, `SROM_INIT` | this implementation |
| ROM entry / leave | `0xA000` / `0xA7FE` (first / last word) | derived in `eilid_top` | this implementation |
| Program memory | `0xE000`–`0xFFFF` (8 KB) | `PMEM_BASE`, `PMEM_LAST` | this implementation |
| Reset hold | 8 cycles | `RST_CYCLES` | this implementation |

The program-memory window was chosen so that the example addresses the
published design uses for application code (`0xE200`, `0xE400`, `0xE500`) fall
inside it. Everything outside program memory and the ROM is non-executable.

The ROM image is a hex file with one 16-bit word per line, word 0 at
`SROM_BASE`. With no file, the ROM reads as zero.

## Modules

```
eilid_top                 buses in/out, address routing, read-data return
├── eilid_hw              the monitor
│   ├── exec_guard        PC must be in program memory or the ROM
│   ├── srom_guard        ROM entry/exit gates, no interrupts or DMA inside (1 PC register)
│   ├── pmem_guard        program-memory and ROM write protection
│   ├── sstack_guard      shadow-stack access grant / violation
│   └── reset_ctrl        RUN/KILL state machine, reset hold counter, cause register
├── shadow_stack_mem      128 x 16 RAM, byte enables, zero on denied read
└── secure_rom            1024 x 16 ROM, fetch port
eilid_pkg                 address map defaults, mem_req_t bus struct, viol_t rule bits
```

`mem_req_t` is `{en, wr, be[1:0], addr[15:0], wdata[15:0]}`. `be` selects
bytes, and `addr` is a byte address. The same struct serves the fetch port,
the data port and the DMA port.

## Connecting a core

`eilid_top` sits between an MSP430-class core and its memories. The core must
provide:

* `pc` and `pc_valid`: the address of the instruction being executed. Hold
  `pc_valid` low while the core is in reset or has not fetched yet.
* `irq`: high in the cycle the core accepts an interrupt.
* The fetch request, on `prog_req`. ROM addresses are answered internally;
  all other addresses go out on `ext_prog_req` to flash.
* The data request, on `cpu_req`, before it is split between RAM, flash and
  peripherals. Shadow-stack addresses are answered internally and never
  forwarded. Everything else goes out on `ext_data_req`.
* Any DMA master, on `dma_req`. The request is forwarded as `ext_dma_req`
  unless it targets the shadow stack or the ROM.

Drive the core's reset (and, usually, the peripherals' reset) from
`puc_reset`.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `tb_eilid_hw` breaks every rule once and checks the reset latency, the reset
  length and the cause bits. It then runs 2000 cycles of random bus traffic
  against a reference model of the rules.
* `tb_shadow_stack_mem` pushes 128 words and pops them in reverse. It also
  checks the read latency, the byte enables, denied accesses and the window
  edges.
* `tb_secure_rom` loads `tb/tb_secure_rom.hex` and checks the image, the
  empty space, `en` and the window edges.
* `tb_eilid_top` is the end-to-end test at default parameters. A behavioural
  core, behavioural flash and RAM, and a bus-level model of the ROM software
  run an application through these steps:
  * boot, and registering the legal indirect-call targets;
  * plain and nested calls, an interrupt, and indirect calls;
  * a secure update;
  * a call chain 126 entries deep that fills the shadow stack.

  It then attacks: a corrupted return address (twice), a corrupted interrupt
  context, an illegal indirect target, application reads and writes of the
  shadow stack, DMA into the shadow stack and into flash, entry into the
  middle of the ROM, an interrupt and a DMA inside the ROM, execution from
  RAM, and a ROM write. Each attack must reset the device one cycle later,
  for 8 cycles, with the right cause. The test counts every mechanism and
  fails if one never happened.

To run one with Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/eilid_pkg.sv tb/tb_eilid_top.sv --top-module tb_eilid_top -o sim
./obj_dir/sim
```

Replace `tb_eilid_top` with any other testbench name. Run `tb_secure_rom`
from the repository root, because it reads `tb/tb_secure_rom.hex` by a
relative path.

## What follows the published design, and what does not

Taken from the published design:

* the split into monitor, secure ROM and shadow stack;
* the monitor's duties: application immutability, no execution from data
  memory, a single entry and a single exit for the trusted code, atomic
  execution, exclusive shadow-stack access, and a reset on any breach;
* the shadow stack's size (256 bytes, 128 words), its base (`0x2000`) and its
  layout (entry `k` at `0x2000 + 2k`).

The published text gives the next free slot once as `0x2000+2*(r5-1)` and
once as `0x2000+2*r5`. This RTL follows the second form, which matches the
published stack picture: `r5` counts the stored entries.

This implementation's own choices:

* the ROM and program-memory windows, and the entry and leave addresses;
* the bus signal set and the `mem_req_t` struct;
* the one-cycle reaction, the 8-cycle reset and the cause register;
* the zero-on-deny read;
* blocking, as well as reporting, DMA into secure regions;
* the fetch-only ROM port.

The monitor follows the rule set of the CASU root of trust, which EILID
reuses unchanged. That rule set is only summarised in the EILID description,
so the checkers here are the simplest logic that enforces it. CASU's
secure-update key protection is not modelled.

The published prototype (an openMSP430 on an FPGA) reports a hardware cost of
99 LUTs and 34 flip-flops over the bare core. This RTL is not tuned to that
figure. It has more flip-flops (about 64), mainly because it registers read
data in the two memories and keeps a cause register.

Not included:

* the CPU core, flash and RAM;
* the ROM software's machine code, so the ROM is empty by default;
* the compile-time instrumenter.

The published performance figures are 2.6–13.2 % run-time overhead, and about
26 instructions to store and 29 to check a value per call. They belong to the
ROM software and the instrumenter, not to this hardware, so this RTL does not
reproduce them.

The stack index lives in a CPU register, so the hardware does not know how
full the shadow stack is. If software pushed a 129th entry, the write would
land just past the window, in ordinary RAM. The monitor would not flag it,
because the access comes from ROM code. Bounding the index is the ROM
software's job.

Whether a particular application fits depends on its deepest call chain.
Each call takes one shadow-stack word, and each nested interrupt takes two.
Recursion is not supported by the scheme. The seven published sample
applications are 246 to 642 bytes after instrumentation, well inside the
default 8 KB program-memory window. Their call depths are not published.
