# CASU hardware: immutable software with authenticated updates for low-end MCUs

Small microcontrollers such as the MSP430 run their firmware straight out of
flash. They have no MMU and no memory protection unit, so an attacker who finds
a buffer overflow can write new code into flash or RAM and jump to it. Remote
attestation can find such an infection afterwards, but it cannot stop it.

CASU (Compromise Avoidance via Secure Update) takes a preventive approach built
on two rules:

1. **The installed software cannot be changed.** No one may write the region
   that holds the authorized software (the *executable region*, ER), the
   pointer that says where ER is (EP), the update status flag (SF) or the
   interrupt vector table (IVTR). The only exception is a small trusted update
   routine that lives in ROM (the *trusted code region*, TCR).
2. **Nothing else can run.** The program counter must always be inside ER or
   TCR.

A hardware monitor checks both rules every clock cycle and resets the MCU the
moment either is broken. The monitor sits beside the CPU and only watches its
signals, so the core needs no changes. To install new software, the old
software downloads the new image into a free part of flash and calls the
trusted routine. That routine checks a version number and a MAC token from the
verifier. It then *moves* ER to the new image by rewriting EP, copies the new
interrupt table, and writes back an authenticated acknowledgement. Because the
software cannot change between two updates, a verified acknowledgement tells
the verifier what the device runs from then on.

This repository holds the hardware side as synthesizable SystemVerilog: the
monitor, the EP register it reads, and a guard for the trusted code. It also
holds testbenches, including one that runs the whole update protocol against
the hardware on a cycle-level model of the MCU.

## The memory picture

Everything CASU does is stated in terms of address regions. All bounds are
inclusive byte addresses. The numeric map is this implementation's own choice
and is set by parameters (defaults in `rtl/casu_pkg.sv`):

| Region | Default | Meaning | Protected by hardware |
|---|---|---|---|
| TCR | `0xA000–0xDFFF` (ROM) | trusted update code; its only legal entry point `casu_entry` is at `0xA000` | may run; ROM, so it cannot be written anyway |
| key | `0x6A00–0x6A3F` | secret key shared with the verifier | only TCR may read it; DMA never |
| ATR | `0x03E0–0x03FF` (RAM, 32 B) | where the token arrives and the acknowledgement is left | no |
| ER | from EP; `0xE000–0xEFFF` at power-on | the authorized software, ISRs included | no writes; the only place besides TCR where code may run |
| slot for the new image | any free flash, e.g. `0xF000–0xFFBF` | new software, downloaded by the old one | no |
| EP | `0xFFC0` (ERmin), `0xFFC2` (ERmax) | current ER bounds | no writes except from TCR |
| bEP | `0xFFC4`, `0xFFC6` | bounds of the downloaded image | no (the untrusted software writes it) |
| SF | `0xFFC8` (1 B) | "install in progress" flag | no writes except from TCR |
| IVTR | `0xFFE0–0xFFFF` | interrupt vectors; reset vector at `0xFFFE` points at `casu_entry` | no writes except from TCR |

Reserved storage adds up to 41 bytes: 32 for ATR, 4 each for EP and bEP, and 1
for SF.

A new image is laid out as `L | V | N | BIN | IVT`: a 16-bit size, a 16-bit
version and a 16-bit nonce, then the binary, then a 32-byte interrupt table.
The verifier's token is `MAC(K, 0 || image)`. The device's acknowledgement is
`MAC(K, 1 || V || N)`. The leading bit gives the direction of the message.

## The monitor FSM (`casu_hw`)

The monitor has two states.

```
            PC == 0
   RESET -----------> EXEC ---+
     ^                  |     | no violation
     +------------------+ <---+
          violation
```

* **RESET**, entered at power-on and after any violation, keeps `reset_o` high.
  A core held in reset shows PC = 0. When the monitor sees PC = 0 it moves to
  EXEC.
* **EXEC** checks, every cycle:
  * *write rule:* the core (`wen`, `daddr`) or the DMA (`dma_en`, `dma_we`,
    `dma_addr`) writes into ER, EP, SF or IVTR while PC is not in TCR;
  * *execution rule:* PC is in neither ER nor TCR.

  On either, it goes back to RESET.

ER is not fixed. Its bounds come from the EP register (`er_min`, `er_max`
inputs), so the rules follow ER as soon as the trusted code moves it.
Immediately after an update, running from the old image's addresses therefore
resets the device.

**Timing.** `reset_o = (state == RESET) | violation`. The output is Mealy: in
the cycle in which a rule is broken, reset is already high. The system uses
this to cancel the offending write in that same cycle. The EP register and the
testbench's memory model both commit a write only when the reset is low. One
cycle later the FSM is in RESET. Leaving RESET takes one cycle with PC = 0
(reset still high in it). The cycle after that, the core runs.

**Boot fetch (a departure).** A real core still shows PC = 0 for a cycle or more
after reset is released, while it reads the reset vector. Read literally, the
execution rule flags that as execution outside ER and TCR, and the MCU would
never leave reset. The monitor therefore has one more flip-flop, `boot_q`. It is
set in RESET and cleared by the first cycle in EXEC whose PC is not 0. PC = 0
counts as legal only while `boot_q` is set, so software cannot return to
address 0 later. The FSM keeps its two states. The published formal properties
hold except in that boot window.

Concurrent assertions in the module restate both rules and the RESET-after-
violation step.

## The EP register (`casu_ep`)

EP is in flash, but the monitor must compare PC against both bounds every
cycle, so `casu_ep` keeps a 32-bit shadow copy. It snoops word writes by the
core or the DMA to `0xFFC0` and `0xFFC2`. A write lands only in a cycle where
the MCU reset is low, so an illegal write never changes EP. If the core and the
DMA both write EP in one cycle, the core's write wins.

Because EP is non-volatile, only the power-on reset clears the register, and it
then holds the manufacture-time ER. The resets that the monitor issues leave it
unchanged. This is what lets an interrupted install be resumed. Reads are
answered combinationally on `hit_o`/`rdata_o`. Byte writes to EP are ignored.

## The trusted-code guard (`tcr_guard`)

The update routine runs with the secret key in reach, so it must run to the end
without interruption and must never leak the key. `tcr_guard` enforces the
protections that CASU relies on here. It resets the MCU when:

* an interrupt is taken while PC is in TCR;
* the DMA is active while PC is in TCR;
* the core reads or writes the key with PC outside TCR, or the DMA touches the
  key at all;
* PC enters TCR from outside at any address other than `casu_entry`. One
  flip-flop remembers whether the previous PC was in TCR, which separates a
  jump into TCR from a step inside it.

It uses the same RESET/EXEC structure as the monitor. `casu_top` ORs its reset
request with the monitor's. This block is **partial**. The original attestation
hardware that CASU builds on has more rules, which are not reproduced here: a
single legal exit point, and protection of the trusted code's stack and of the
data it produces.

## The top (`casu_top`)

`casu_top` wires the three blocks together. Its ports are plain signals: the
core's `pc`, `wen`, `ren`, `daddr`, `wdata` and `irq`, the DMA's `dma_en`,
`dma_we`, `dma_addr` and `dma_wdata`, and `mcu_reset` out. It also brings out
the current ER, the EP read port, and each block's reset request and violation
for debugging. The CPU, DMA controller, interrupt logic, bus and memories belong
to the host MCU and stay outside.

To attach the top to a core such as openMSP430, meet three requirements:

* `pc` must be the address of the instruction being executed;
* the core must show 0 on `pc` while held in reset;
* memories must drop a write in a cycle where `mcu_reset` is high.

## How the update runs on this hardware

The software is not part of this repository. The end-to-end testbench replays
it as bus traffic on the hardware:

1. **Boot.** Reset releases the core into `casu_entry`. The trusted code reads
   SF. If SF is 1, an install was cut short, so the code runs install again
   from the beginning. Otherwise it jumps to ERmin.
2. **Download**, done by the old software in ER. It writes the new image into
   the free slot, its bounds into bEP and the token into ATR, then calls
   `casu_entry`. All of these writes target unprotected memory.
3. **Authenticate**, in TCR. The image's version must exceed the version in the
   ER header. The trusted code then MACs the key and the image and compares the
   result with ATR. On a mismatch it returns to the old ER with EP unchanged.
4. **Install**, in TCR:
   * set SF = 1;
   * copy bEP to EP, which moves ER;
   * copy the new interrupt table to IVTR, leaving the reset vector on
     `casu_entry`;
   * write the acknowledgement to ATR;
   * set SF = 0;
   * jump to the new ER.

   A reset anywhere in this sequence leaves SF at 1, and the next boot
   completes the install.

## Verification

Each testbench checks itself, has a watchdog, and prints
`TB_RESULT checks=N failures=M`. They run under plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/casu_pkg.sv rtl/casu_hw.sv rtl/tcr_guard.sv \
          rtl/casu_ep.sv rtl/casu_top.sv tb/casu_top_tb.sv --top-module casu_top_tb
./obj_dir/Vcasu_top_tb
```

* `casu_hw_tb`, `tcr_guard_tb` and `casu_ep_tb` each keep a reference model
  written from the rules, with the map typed in as numbers. They compare the
  reset output or the EP contents every cycle over about 20,000 biased random
  cycles plus directed cases. The directed cases cover:
  * every protected region, written by the core and by the DMA;
  * writes from TCR being allowed;
  * ER moving;
  * DMA reads being harmless;
  * the boot-fetch window;
  * each guard rule;
  * EP surviving MCU resets;
  * illegal EP writes being dropped.
* `casu_top_tb` runs the protocol above at the default parameters against a
  cycle-level MCU model and a 64 KB memory array. The attacks are:
  * self-modifying code;
  * a DMA write to the vector table;
  * a jump into RAM;
  * an EP write from ER;
  * a key read from ER;
  * a jump into the middle of TCR;
  * an interrupt, and separately DMA activity, during the trusted code;
  * running the old image after an update.

  Each must reset the MCU and leave memory unchanged. A wrong token and a replay
  of the old version must both be refused. An install cut by an interrupt must
  be resumed at the next boot. The testbench counts each mechanism and fails if
  any never occurred.
* Updates to three images of 250, 422 and 734 bytes are installed one after
  another. These are the application sizes the original evaluation uses. Each
  fits easily in a 4 KB slot.

  The MAC in the testbench is a small keyed hash and stands in for HMAC. On
  this model, authenticate takes 197, 283 and 439 cycles and install takes a
  constant 86 cycles. Those counts describe the testbench's replay, not real
  firmware.

The monitor synthesises to two flip-flops (state and boot flag) plus
comparators. The guard also has two flip-flops, and the EP shadow has 32.

## Where this RTL departs from, or goes beyond, the published design

* **Memory map and widths** are this design's own: 16-bit addresses,
  word-wide EP entries, and the regions listed above.
* **Boot-fetch flag** in the monitor (see above). Without it, a literal reading
  of the two rules cannot boot.
* **Reset output.** The original description calls the FSM Mealy, and also says
  that reset is 1 exactly in RESET. Here reset is high in RESET and also in the
  EXEC cycle of a violation.
* **`dma_we`.** The original write rule counts any active DMA cycle as a write.
  Here DMA reads are not treated as modifications. Tie `dma_we` high to get the
  original rule.
* **TCR is not in the write rule.** The architecture drawing shades TCR as
  protected, but the formal write rule lists only ER, EP, SF and IVTR. The
  formal rule is followed. TCR is ROM, so it cannot be written in any case.
* **EP as a register.** The original keeps EP only in flash. Here a shadow
  register is reset to the manufacture-time ER at power-on. A real chip would
  load it from flash at boot.
* **Guard rules** are built from a one-sentence description. Their exact form
  (entry detection, key range, which accesses count) is this design's own, and
  some of the original attestation hardware's rules are absent.
* **Not built, because they are software or belong to the host MCU:**
  the CPU core, DMA controller, interrupt logic, bus and memories (all from the
  host MCU); the update software and the HMAC library (ROM software); and the
  remote verifier.
