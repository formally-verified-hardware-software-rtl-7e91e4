# VRASED: a hardware monitor that makes software attestation trustworthy

Remote attestation lets a verifier ask a small, possibly compromised
microcontroller to prove what its memory holds. The device computes an HMAC
over the memory region in question, keyed with a secret only the device and
the verifier know. A verifier nonce (the challenge) goes into the HMAC key
derivation. If malware could read that key, or could interfere with the
routine that computes the HMAC, it could forge the answer.

VRASED keeps the HMAC in software, so the core needs no crypto hardware. The
routine (called SW-Att below) and the key sit in ROM. A small hardware monitor,
HW-Mod, watches a handful of core signals. HW-Mod never blocks an access and
never changes the core's pipeline. When it sees an access that breaks one of
its rules, it asserts `reset`, and the core reboots before the access can do
any harm. A reboot loses all volatile state, so whatever malware learned or
damaged is thrown away. Reset stays asserted until the core has really
restarted, which shows as PC = 0.

The RTL here targets a 16-bit MSP430-class system with byte addresses. It
contains HW-Mod (four monitors), the ROM/RAM/flash memories and the memory
backbone that joins them. The CPU core and the DMA controller are not part of
it: their signals are the top level's ports.

## Regions

Everything HW-Mod checks is stated in terms of five fixed address ranges:

| Region | Meaning | Range (default) | Size |
|---|---|---|---|
| KR | attestation key | 0xA000-0xA03F (ROM) | 64 B |
| CR | SW-Att code | 0xA040-0xB192 (ROM) | 4,436 B (key + code = 4,500 B) |
| XS | SW-Att's private stack | 0x06E4-0x0FFF (RAM) | 2,332 B |
| MR | challenge in / HMAC out | 0x0200-0x021F (RAM) | 32 B |
| CTR | last accepted challenge (optional) | 0xFF00-0xFF1F (flash) | 32 B |

"PC in CR" means that SW-Att is running. `CR_MAX` is the address of SW-Att's
last instruction, which is its only legal exit. The stack pointer is set to
0x1000 before the call, and the stack grows down, so XS ends at 0x0FFF. The
attested region AR is whatever memory the caller names. The test workload
uses 0x1000-0x1FFF.

Full memory map (`vrased_pkg`):

```
0x0200-0x41FF  RAM   16 KB   MR at the bottom, XS below 0x1000, rest for the application
0xA000-0xBFFF  ROM    8 KB   KR then CR; the rest unused
0xC000-0xFFFF  flash 16 KB   application code (and CTR)
```

The region sizes come from the design: a 64-byte key, a 32-byte HMAC, a
2,332-byte stack and about 4.5 KB of ROM. The base addresses, the RAM and
flash sizes and the CTR location are this implementation's choice. All of them
are parameters.

## HW-Mod: four monitors and an OR

`vrased_hwmod` takes PC, irq, R_en, W_en, D_addr, DMA_en and DMA_addr. It
feeds them to four independent monitors and ORs their requests into `reset`.
`rst_vec` shows which monitor fired (bit 0 first):

| Bit | Monitor (module) | Violation |
|---|---|---|
| 0 | key access control (`vrased_key_ac`) | `!(PC in CR) && R_en && D_addr in KR` |
| 1 | atomicity and controlled invocation (`vrased_atomicity`) | entering CR anywhere but CR_MIN, leaving it from anywhere but CR_MAX, or irq while in CR |
| 2 | exclusive stack (`vrased_x_stack`) | `(!(PC in CR) && (R_en or W_en) && D_addr in XS)` or `(PC in CR && W_en && D_addr not in XS and not in MR)` |
| 3 | DMA (`vrased_dma`) | `DMA_en && (DMA_addr in KR or DMA_addr in XS or PC in CR)` |

Each rule has a clear job:

- **Key access control.** Only SW-Att may read the key.
- **Exclusive stack, first half.** Nobody else may see SW-Att's stack, which
  holds key-derived values after the routine returns.
- **Exclusive stack, second half.** SW-Att itself may write only to its stack
  and to MR, so it cannot leak key material anywhere else.
- **DMA.** DMA is a second master that bypasses the core. So it may not touch
  KR or XS, and it may not run at all while SW-Att runs. Otherwise it could
  change the attested memory halfway through the HMAC.

### The Mealy convention and secure reset

Every monitor is a Mealy machine with an explicit Reset state. Its output is
`reset = (next_state == Reset)`:

- `reset` rises in the same cycle as the violating access, not one cycle later.
- `reset` stays high while the machine sits in Reset.
- The machine leaves Reset only in a cycle where PC = 0. That cycle already
  has `reset` low.

This gives the secure-reset rule: once raised, `reset` drops only when the
core shows PC = 0. `vrased_hwmod` checks it with a concurrent assertion.

The key, stack and DMA monitors have two states, Run and Reset. Leaving Reset
also requires the PC = 0 cycle to be free of violations. Without that check, a
violation in exactly that cycle would go unpunished. This is a small
tightening of the published state diagrams, which label the exit only "PC = 0".

### The atomicity machine

The only monitor with more than two states tracks where PC was in the previous
cycle:

```
notCR   PC outside CR
fstCR   PC = CR_MIN         (first instruction)
midCR   CR_MIN < PC < CR_MAX
lastCR  PC = CR_MAX         (last instruction)
Reset
```

Legal moves (anything else goes to Reset):

| From | To | Condition |
|---|---|---|
| notCR | notCR | PC outside CR |
| notCR | fstCR | PC = CR_MIN and no irq |
| fstCR | fstCR | PC = CR_MIN and no irq |
| fstCR | midCR | PC strictly inside CR and no irq |
| midCR | midCR | PC strictly inside CR and no irq |
| midCR | lastCR | PC = CR_MAX and no irq |
| lastCR | lastCR | PC = CR_MAX and no irq |
| lastCR | notCR | PC outside CR and no irq |
| Reset | notCR | PC = 0 |

Because fstCR is the only way in and lastCR the only way out, code cannot:

- jump into the middle of SW-Att (to reuse gadgets that touch the key);
- jump out early (leaving key material in registers);
- interrupt it, since an interrupt handler is untrusted code running mid-routine.

Interrupts outside CR are fine. The self-loops on fstCR and lastCR let PC
stay on one address for several cycles. This implementation's reading is
that a core needs this while it executes a multi-cycle instruction. Three
assertions in the module restate the exit, entry and interrupt rules
directly on the ports.

### Optional verifier authentication

With `VRF_AUTH = 1`, the design adds protection against replayed or fake
challenges. SW-Att first checks an HMAC over the challenge. It then stores the
challenge in CTR and accepts only larger ones later. CTR must be writable by
SW-Att alone, which gives three changes:

- A write to CTR from outside CR is a key-monitor violation.
- A DMA access to CTR is a DMA violation.
- The exclusive-stack rule lets SW-Att write CTR.

The default is `VRF_AUTH = 0`, the plain design.

## Memories and the backbone

`vrased_mem_backbone` decodes the byte address of each of three masters:

- instruction fetch at PC;
- CPU data access;
- DMA.

Each address maps to ROM, RAM, flash or nothing. Each master then gets its
own port on the selected memory. Requests use the `mem_req_t` struct: enable,
write, two byte enables, word index and write data.

Reads return data one cycle later. The backbone registers which memory each
master read, so it can pick the right data in that later cycle. Writes to ROM
or to unmapped addresses are dropped, and unmapped reads return 0. The
backbone does not enforce access rights: that is HW-Mod's job.

`vrased_ram` (used for RAM and for flash) and `vrased_rom` are synchronous
arrays with three ports. If two ports write the same byte in one cycle, the
CPU wins over DMA. Flash is modelled as plain RAM, with no program/erase
timing. The ROM is loaded from `ROM_INIT_FILE` with `$readmemh`, or reads
zero.

About half of the backbone's request bits are constant and are removed by
synthesis: fetch never writes, ROM is never written, and a small memory
ignores the upper index bits. They are kept so that all memories share one
port type.

`vrased_top` wires HW-Mod, the backbone, the ROM, the RAM and the flash
together. HW-Mod sees exactly the signals the core and DMA controller drive
into the backbone.

## Using it with a core

The core must honour `reset` at once: reset every register, set PC to 0,
and squash the violating access. HW-Mod's rules assume three things about the
core:

- PC, R_en/W_en/D_addr and DMA_en/DMA_addr describe the access happening in
  that cycle.
- The core boots at PC = 0.
- An interrupt shows as `irq` in the cycle it is taken.

SW-Att itself is software. It is a formally verified HMAC-SHA256 library: it
copies the key to XS, derives a one-time key from the challenge in MR, MACs
AR and writes the result to MR. It does not wipe its stack: XS stays
readable only by SW-Att, which is the point of the exclusive stack. It is
not part of this RTL, and neither is the core. An engineer building a full
system supplies both, plus a linker script that places the key and SW-Att at KR and CR. The ROM size leaves room
for a ~4.5 KB image.

## Verification

Each module has a self-checking testbench in `tb/` that drives random and
directed stimulus. Each compares against a reference model written
independently in the testbench and prints `TB_RESULT checks=N failures=M`:

| Testbench | What it covers |
|---|---|
| `tb_vrased_key_ac`, `tb_vrased_x_stack`, `tb_vrased_dma` | random PCs and addresses, biased to region edges; both `VRF_AUTH` settings for the key monitor |
| `tb_vrased_atomicity` | random walks of PC through and around CR, with interrupts, illegal entries and illegal exits |
| `tb_vrased_hwmod` | the four monitors together: the OR, `rst_vec`, secure reset |
| `tb_vrased_ram`, `tb_vrased_rom`, `tb_vrased_mem_backbone` | byte enables, port collisions, latency, decoding, dropped writes |
| `tb_vrased_top` | full-size end-to-end run: power-up, application traffic and DMA, a legal attestation, then one attack per rule, each checked for the right `rst_vec` bit, reset held until PC = 0 and ROM unchanged; every mechanism is counted |
| `tb_vrased_vrf_auth` | the system with `VRF_AUTH = 1`: SW-Att updates CTR; application and DMA attacks on CTR, each checked for the right `rst_vec` bit |
| `tb_vrased_attest` | the attestation workloads, below |

`tb_vrased_top` loads `tb/tb_vrased_rom.hex`, a
256-word test image (word i = (i·0x9E37) ^ (i<<3) ^ 0x5A5A), by a path
relative to the repository root. Run it from there.

### Attestation workloads

The published cost of attesting 4 KB with this design is 3,601,216 CPU cycles
(450 ms at 8 MHz). It uses 4,500 B of ROM and 2,332 B of protected RAM, and
the cost grows linearly with the attested size. `tb_vrased_attest` replays two
attestations on the full-size system, acting as the core:

| Run | AR | Cycles in CR | At 8 MHz |
|---|---|---|---|
| 4 KB | 0x1000-0x1FFF | 3,601,216 (the published figure) | 450.15 ms |
| all application RAM | 0x1000-0x41FF, 12,800 B | 11,253,800 (the 4 KB figure scaled linearly) | 1.41 s (0.45 s at 25 MHz) |

In each run, PC enters at CR_MIN and stays in CR for the whole count, ending
at CR_MAX. Meanwhile it:

- copies the key to XS;
- reads every word of AR;
- pushes and pops stack words;
- writes a 32-byte result into MR.

No monitor may fire, every read is checked, and the cycle count is checked.
Both runs together take about 20 s of simulation. The PC trace is synthetic,
not the real SW-Att instruction stream. It shows the monitors' behaviour over
the routine's length and access pattern, not the HMAC itself.

### Running

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/vrased_pkg.sv tb/tb_vrased_util_pkg.sv tb/tb_vrased_top.sv \
  --top-module tb_vrased_top -o sim && ./obj_dir/sim
```

Replace the testbench name to run another one; the packages must come first.

## Where this departs from the published design

- **Reset exit.** Leaving Reset needs PC = 0 and, in the two-state monitors,
  no violation in that cycle (see above).
- **Power-on.** An asynchronous active-low `rst_n` puts every monitor in
  Reset. So `reset` is asserted after power-up until the core reaches PC = 0.
  The published monitors have no power-on input.
- **Memory map, port timing, byte enables, backbone and memories.** These are
  this implementation's choices. The design fixes only the region sizes, the
  0x1000 stack top and the 16-bit address space.
- **Observability.** `rst_vec` is an addition.
- **Atomicity machine.** Implemented as drawn. fstCR cannot go straight to
  lastCR, so SW-Att must be longer than two instructions, which it is. An
  interrupt is refused on the step out of lastCR.
- **Not included.** The MSP430 core, the DMA controller and the SW-Att
  software. Variants that the design only compares against are not included
  either. One such variant has SW-Att erase its own stack, and then needs RAM
  erased at boot, in place of the exclusive stack.
