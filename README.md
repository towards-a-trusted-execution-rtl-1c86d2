# TEEOD fabric: trusted execution enclaves in FPGA logic

A trusted execution environment (TEE) runs security-critical code, the
*trusted applications* (TAs), apart from the rich operating system (the REE).
Processor-extension TEEs such as TrustZone and SGX share the main CPU with the
attacker, while external secure chips talk over slow, probeable wires. This
design takes a third route. On an FPGA system-on-chip (Arm cores plus
programmable logic), every TA gets its **own soft processor in the programmable
logic**, with a private memory that the main CPU cannot reach. Enclaves are
created when a client asks for a TA and destroyed when it is done with it.

This repository holds synthesizable SystemVerilog for the logic that creates,
feeds and destroys those enclaves. The design follows the TEEOD architecture
(Pereira, Cerdeira, Rodrigues, Pinto, "Towards a Trusted Execution Environment
via Reconfigurable FPGA"), and was written from the published description, not
by its authors. That description gives the blocks, their signals and the
life-cycle of an enclave. Register layouts, bus widths, encodings and the finer
rules are this implementation's own; the section *Where this departs from the
published design* lists them.

## The parts

```
                  rich OS (Arm cores)                     DDR: TA binaries
      AXI4-Lite |                | AXI4-Lite                    ^ AXI4 read
                v                v                              |
     +----------------+   +---------------------+   +-------------------+
     | Manager Agent  |-->| Communication Agent |   |   Loader Agent    |
     | enclaves_list  |   |  REE mailbox        |   |  (DMA)            |
     | loaded_tas     |<--|  mailbox per enclave|   +-------------------+
     +----------------+   +---------------------+      | BRAM write port
       | RST per enclave     | INT    ^ AXI4-Lite      | steered by address
       |  + loader control   |        | (own mailbox)  v
       v                     v        |
     +-------------------------------------------------------------+
     | enclave i:  [soft processor, not in this RTL]                |
     |             TCM 64 KiB  (port A: loader, port B: processor)  |
     |             shared memory 8 KiB (port A: rich OS, B: proc.)  |
     +-------------------------------------------------------------+
```

| File | Block |
|---|---|
| `rtl/teeod_pkg.sv` | shared types: bus structs, mailbox layout, register offsets, codes, default sizes |
| `rtl/teeod_axil_slave.sv` | AXI4-Lite slave front end used by both register blocks |
| `rtl/teeod_manager_agent.sv` | Manager Agent: bookkeeping, enclave resets, drives the loader |
| `rtl/teeod_loader_agent.sv` | Loader Agent: DMA from DDR into a TCM, and TCM wipe |
| `rtl/teeod_comm_agent.sv` | Communication Agent: mailboxes, interrupts, session ids |
| `rtl/teeod_bram.sv` | true dual-port block RAM (TCM and shared memory) |
| `rtl/teeod_enclave.sv` | one enclave's memories, reset and access gating |
| `rtl/teeod_top.sv` | everything wired together, N_ENCLAVES enclaves |

Defaults: four enclaves, a 64 KiB TCM each (the smallest TA code space a
GlobalPlatform-compliant TEE must offer), 8 KiB shared memory each.

## Life of an enclave

The hard part of the design is the choreography between the rich OS, the
Manager Agent (MA) and the Communication Agent (COMM). It follows the
GlobalPlatform client flow: open a session, invoke commands, close the session.

### 1. Creation (open session, TA not yet loaded)

1. The client driver writes the TA's address and size in the contiguous DDR
   area, and its 128-bit UUID, into the MA. Then it writes 1 to `CTRL`.
2. The MA looks the UUID up in `loaded_tas`. On a miss it takes the
   lowest-numbered free enclave from `enclaves_list` and marks it taken. It
   then gives the Loader the source address, the size and that enclave's TCM
   address, with a one-cycle `strt_cpy`. The enclave stays in reset meanwhile.
3. The Loader reads the binary with AXI4 bursts and writes it word by word into
   the TCM, then pulses `done`.
4. The MA records the UUID, releases the enclave's reset and sets `STATUS` to
   LOADED. The processor boots the TA, which sets itself up and waits for an
   interrupt. At the same time the MA raises `ta_ready`, with `ta_enclave` naming
   the enclave, so COMM knows where messages go.

On a hit, step 2 answers HIT at once and nothing is copied. The request fails
(ERR_FULL) if no enclave is free, and (ERR_SIZE) if the size is 0 or larger
than a TCM.

### 2. Messages (open, invoke, close)

A mailbox is twelve 32-bit words:

| index | word | meaning |
|---|---|---|
| 0 | operation_id | 1 open session, 2 invoke command, 3 close session |
| 1 | session_id | written by COMM on open; must match on invoke and close |
| 2 | param_type | how to read the gp_params (raw value or shared-memory pointer/size); passed through untouched |
| 3 | cmd_id | the TA's command number (invoke only) |
| 4..11 | gp_params[0..7] | arguments and results |

1. The client fills the REE mailbox of COMM and writes 1 to its `CTRL`
   (doorbell). From then on the REE mailbox is locked (writes get SLVERR).
2. COMM waits until the MA has an answer (`ta_ready`). A doorbell may thus be
   rung right after the MA request, before loading has finished.
3. COMM checks the message. The operation must be one of the three. An invoke
   or close must carry the session id that the enclave's last open received. A
   bad message sets the error bit and goes nowhere. On open, COMM writes a new
   session id (a counter from 1) into `session_id`.
4. COMM copies the twelve words, one per clock, into the target enclave's
   mailbox. Then it raises that enclave's interrupt.
5. The TA reads its mailbox through its own AXI4-Lite port. It writes its reply
   into the same words and clears the interrupt by writing 0 to its `CTRL`. An
   enclave may write its mailbox only while its interrupt is pending.
6. COMM copies the twelve words back into the REE mailbox and sets `done`.

Bulk data travels through the enclave's shared memory. The client puts a
pointer and a size in the gp_params, and the TA reads or writes the shared
memory through its own port.

### 3. Destruction (close session)

When a close-session message has been answered, COMM pulses `close_done` for
that enclave. The MA then removes the UUID from `loaded_tas` at once, puts the
enclave back in reset and wipes its mailbox. Next it has the Loader write zeros
over the whole TCM, and finally marks the enclave free. All of this happens after
the client has its reply, so the client does not wait for it. A destruction
still pending is served before the next client request. Free enclaves stay in
reset.

## Register maps

All offsets are byte offsets; registers are 32 bits.

**Manager Agent** (`s_ma_axil`)

| offset | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0: start lookup/load |
| 0x04 | STATUS | R | [3:0] 0 idle, 1 busy, 2 loaded, 3 hit, 4 no free enclave, 5 bad size; [11:8] enclave; [31:16] taken bitmap |
| 0x08 | ADDR | RW | TA binary address (low 32 bits) |
| 0x0C | SIZE | RW | TA binary size in bytes |
| 0x10..0x1C | UUID | RW | UUID, least significant word first |
| 0x20 | CMA | RW | [15:0] upper 16 bits of the 48-bit DDR address |

CTRL, ADDR, SIZE and UUID refuse writes (SLVERR) while a request is being served.

**Communication Agent, client side** (`s_comm_axil`): 0x00 CTRL (W bit 0
doorbell; R bit 0 busy, bit 1 done, bit 2 error, [11:8] enclave), then mailbox
word i at 0x04 + 4·i.

**Communication Agent, enclave side** (`s_cpu_mbox[i]`): 0x00 CTRL (R bit 0
interrupt pending; W 0 to bit 0 = reply ready), then mailbox word i at
0x04 + 4·i.

## Loader Agent

The Loader is a DMA engine with one AXI4 read burst in flight: 32-bit beats,
INCR, at most `BURST_BEATS` (16) beats. A burst never crosses a
`BURST_BEATS`·4-byte boundary, so it never crosses a 4 KiB page. Every beat is
written to the TCM in the cycle it arrives. The 48-bit source address is
`{cma_config, addr_source}`. Sizes round up to whole words. In clear mode it
reads nothing and writes one zero word per clock. In the top, one Loader serves
all enclaves. Destination address `i·TCM_BYTES + offset` selects enclave i's TCM.

Measured in simulation with a DDR model that adds random latency: loading a
64 KiB TA, including the MA handshake, takes about 60 000 clocks. Opening a
session on an already loaded TA takes about 130 clocks of register traffic.

## Enclave memories and isolation rules

Each enclave (`teeod_enclave`) holds two `teeod_bram` instances and the
enclave's reset logic:

* The processor's reset asserts at once when the MA raises RST or the system
  resets. It is released two clocks after both are gone.
* Writes from the Loader reach the TCM only while the enclave is in reset, so
  nothing can change a running TA's code. Processor accesses are ignored while
  it is in reset. The interrupt is masked in reset.
* The shared memory's port A belongs to the rich OS and is always open, since it
  is shared by definition.

The top also asserts that the Loader only ever writes into an enclave that is in
reset.

## What this RTL does not contain

* **The soft processor.** The published prototype uses an Arm Cortex-M1
  (DesignStart FPGA). Connect one per enclave to `cpu_rst_n[i]`, `cpu_irq[i]`,
  `cpu_tcm_req/rdata[i]` (instruction and data memory),
  `cpu_shm_req/rdata[i]` and `s_cpu_mbox_req/rsp[i]`, the mailbox as an
  AXI4-Lite slave. The TA software (GlobalPlatform Internal Core API, interrupt
  handler, WFI loop) belongs to that processor.
* **The enclave UART** that the prototype uses for TA debug output.
* **The processing system and DDR**: the AXI ports of the top go to them.
* **An AXI interconnect**: all AXI links are point to point.
* **TA encryption, signatures and trusted storage.** The published prototype
  loads plaintext, unsigned binaries, and so does this design.

## Where this departs from the published design

Taken from the published design: the three agents, each one's job, the signal
names between MA and Loader (`addr_src`, `addr_dest`, `size`, `strt_cpy`,
`done_cpy`, `cma_config`, `rst_enclave`), the two lists, the MA register set
(address, size, UUID, status), the mailbox words, one interrupt and one reset
per enclave, the copy-in / interrupt / wait-for-clear / copy-back sequence,
session ids written by COMM, the destruction steps, and the sizes.

This implementation's own choices:

* All register offsets, the status and operation codes, the 128-bit UUID, and
  32-bit data paths.
* The meaning of `cma_config` / `Din`. The published design leaves it open;
  here it supplies the upper address bits.
* Which agent wipes the TCM. Here it is the Loader, through an added `clear`
  input.
* What "validation" checks. Here: the operation code and the session id. The
  published design mentions access permissions of the TA to the message, but
  gives no field for them, so no permission check exists.
* One session per enclave. A new open replaces the session id.
* The write-permission rules on the mailboxes, the TCM gating while running,
  and holding free enclaves in reset.
* The lowest-free-first enclave choice, and the size check.
* When an enclave counts as taken. The published text marks it taken once the
  binary is loaded. Here it is reserved as soon as it is chosen, so a loading
  enclave is never offered twice; `STATUS` still reports LOADED only after the
  copy.
* The order of the destruction steps. The published text lists: wipe memory,
  reset, mark free, drop the UUID. Here the UUID goes first and the reset
  comes before the wipe, so no lookup can hit an enclave being destroyed and
  the processor never runs on a half-wiped TCM. The outcome is the same; the
  client sees none of it.
* Where the enclave mailboxes live. The published text counts them as part of
  the enclave and of COMM alike. Here they are registers inside COMM, and each
  enclave reaches only its own through a private AXI4-Lite port.
* COMM waits for the enclave with no time-out. A TA that never clears its
  interrupt blocks the message path until the system is reset.

## Sizes against the published evaluation

* Four enclaves is the largest configuration the published prototype
  synthesized. It also states that the board's block RAM would allow six.
  `N_ENCLAVES` is a parameter (1 to 16). `tb_teeod_configs` runs 1, 2, 3, 4
  and 6 enclaves.
* A full 64 KiB TA fits a TCM exactly. The end-to-end test loads one and checks
  every word.
* Two simultaneous TAs (the GlobalPlatform minimum) fit with room to spare.
* The Bitcoin-wallet TA of the published demonstration runs one command per
  session. Every run therefore loads the TA and destroys the enclave, wiping
  the TCM. A TA that must keep a secret across sessions, such as the wallet's
  master key, needs storage outside the enclave. The published design lists
  trusted storage as not yet built, and so does this one. `tb_teeod_wallet`
  runs the six wallet commands this way over the full-size fabric. It carries
  the PIN in the mailbox and the mnemonic, transaction and results through
  shared memory. The wallet's binary size is not published; the test assumes
  48 KiB.
* The published timings (about 54 ms to open a session with loading, 31 µs
  without, 201 µs and 327 µs per invoke, 40 µs per close) are dominated by
  software on the Arm cores. The fabric's share, measured in clocks above, is
  small against them. The clock frequency of the prototype is not published.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_teeod_bram` | both ports, byte enables, read-first timing, against a reference array |
| `tb_teeod_loader_agent` | every size from 1 byte to 34 words, random copies (unaligned, odd sizes, page crossings), no stray writes, done pulse, clear mode, AXI rules |
| `tb_teeod_manager_agent` | miss/hit/full/bad size, busy write refusal, reset sequencing, destruction and reuse |
| `tb_teeod_comm_agent` | waiting for the MA, session ids, routing, rejection, write permissions, close_done, wipe, copy timing |
| `tb_teeod_enclave` | reset release timing, interrupt masking, TCM and shared-memory gating |
| `tb_teeod_top` | the whole fabric at default size, running the client flow end to end (see below) |
| `tb_teeod_wallet` | the six-command wallet client flow, one load and one destruction per command |
| `tb_teeod_configs` | fabrics of 1, 2, 3, 4 and 6 enclaves: fill, refuse one more, invoke each, close all |

`tb_teeod_top` runs at the default parameters. It uses behavioural models for
the DDR (`teeod_tb_ddr`, random latency, checks AXI burst rules) and for each
enclave's processor (`teeod_tb_ta_cpu`). That model verifies the TA image
checksum at boot, then serves messages like the test TAs of the published
evaluation: increment a value, or write a 16-byte array to shared memory. The
test loads five TAs into four enclaves. It exercises a hit, the no-free-enclave
refusal, a doorbell that waits for the MA, a refused session id, and shared
memory. It destroys an enclave, checks that its TCM and mailbox are zero, and
reuses the enclave. It counts each of these mechanisms and fails if one never
happens.

To run one with Verilator (from the repository root):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/teeod_pkg.sv tb/tb_teeod_top.sv --top-module tb_teeod_top -o sim
./obj_dir/sim
```

Replace `tb_teeod_top` with any other testbench name. All testbenches finish in
seconds.

How far to trust it: every block has been simulated against independent
reference checks, and each testbench catches a deliberately broken copy of its
block. Nothing has run on an FPGA. The processor side has been exercised only
through a behavioural model. AXI compliance has been checked only by the
testbench models and assertions, not by a formal protocol checker.
