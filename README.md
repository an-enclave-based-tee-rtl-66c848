# Enclave isolation hardware for a RISC-V MCU with an integrated secure element

A low-cost IoT MCU has one RV32 core with only two privilege levels, M and U.
It still has to keep several mutually distrusting applications apart: a camera
front end, a parser and a network stack, for example. It must also make sure
that only one trusted piece of software can drive the on-chip secure element
(SE) that holds the keys. This design runs each application in its own U-mode
*enclave*, a memory region fenced off by the standard RISC-V physical memory
protection (PMP). A small M-mode firmware, the *enclave privilege arbitrator*,
reprograms the PMP at every switch. Two enclaves are special:

* the **Crypto Enclave (CE)** is the only software that can reach the SE's
  mailbox;
* the **Runtime Enclave (RE)** holds shared library code that every app
  enclave may *execute* but not read or write.

On this base, the hardware adds what software alone cannot do safely: a DMA
engine that moves data from one enclave to another. Because the DMA is a bus
master outside the core, it cannot see the PMP. So the core gets a
**security CSR** that judges every DMA request, and an **Availability Table**
that says where each enclave is willing to receive data.

The SystemVerilog here implements that hardware: the PMP, the security CSR,
the DMA controller with its checks, the Availability Table, the CE-to-SE
mailbox, an on-chip SRAM and a shared bus. It does not implement the core,
the SE's insides or any firmware. The design follows the XINE architecture
described by Ren and Cui ("An Enclave-based TEE for SE-in-SoC in RISC-V
Industry"). That description is at the level of function, not of registers.
Every register map, encoding and timing below is therefore this
implementation's own. Section 7 lists where it departs from the source.

## 1. Block diagram

```
                  core_req / core_rsp           csr_* (M-mode only)
                        |                              |
          +-------------v-------------+   +------------v-------------+
          | pmp  port0: core access   |   | sec_csr                  |
          |      port1/2: DMA source  |-->|  SEC_EID  (running id)   |
          +-------------+-------------+   |  SEC_DMA_PERM[16]        |
             allowed    |                 +------------+-------------+
                        |                      allow/deny  ^ check
   master 0 (core) +----v--------------------------------+ | port
                   |            sys_bus (round robin)    | |
   master 1 (DMA)  +--^---------+---------+---------+----+ |
                      |         |         |         |      |
                  +---+------+ +v-----+ +-v-------+ +v-----------+
                  | dma_ctrl |<| sram | | avail_  | | se_mailbox |<--> SE core
                  | (regs +  | | 64KiB| | table   | | req/rsp    |
                  |  engine) |-+------+ +---------+ | queues     |
                  +----------+   fits? ^            +------------+
```

`xine_soc` is the top. It has no clock or reset generation. Interrupts
(`dma_done_irq`, `dma_err_irq`, `mbox_irq`) go out to an interrupt
controller that is not part of this design.

## 2. Enclaves are PMP views

An enclave has no hardware of its own. It is whatever the PMP lets U-mode
code reach while the arbitrator has that enclave's view loaded. The
reference layout used by the end-to-end testbench (64 KiB SRAM) is:

| region | bytes | app enclave 1 sees | Runtime Enclave sees | Crypto Enclave sees |
|---|---|---|---|---|
| arbitrator (EPA) | 0x0000-0x0FFF | none | none | none |
| OS | 0x1000-0x1FFF | none | full | full |
| AE-1 | 0x2000-0x3FFF | full | full | full |
| AE-2 | 0x4000-0x5FFF | none | full | full |
| AE-3 | 0x6000-0x7FFF | none | full | full |
| unused | 0x8000-0xBEFF | none | full | full |
| shared mailbox AE-1/AE-2 | 0xBF00-0xBFFF | read/write | full | full |
| CE | 0xC000-0xDFFF | none | none | full |
| RE | 0xE000-0xFFFF | execute only | full | execute only |

An app enclave's view takes three PMP entries: its own region as NAPOT RWX,
the RE as NAPOT X-only, and the DMA/table register window as RW. The CE view
takes five. With 16 entries, the PMP can hold any of these views, and the
16-entry limit on the number of enclaves is comfortable because only one
view is loaded at a time.

The mailbox between two app enclaves is also only a view. The OS picks a
memory region and maps it read/write into both enclaves' views and no one
else's. In the testbench, that is one more NAPOT entry in the views of AE-1
and AE-2. Word 0 of the region holds the message length (0 means empty)
and the message words follow. The sender writes only when the mailbox is
empty and the receiver reads only when it is full; both are software
rules.

The enclave ID matters as well as the PMP view. `SEC_EID` holds the
running enclave's number. The top attaches it to every bus request from the
core, and slaves can use it to decide who is talking. The mailbox refuses
every ID except the CE's. The DMA records the ID as the requester. U-mode
cannot write `SEC_EID`, because every CSR access from U-mode raises
`csr_illegal` and changes nothing.

Enclave numbering in the testbenches: OS 0, CE 1, RE 2, AE-1 3, AE-2 4,
AE-3 5.

### PMP (`rtl/pmp.sv`)

The PMP follows the RISC-V privileged specification for RV32: `pmpcfg0..3`
(CSR 0x3A0) pack four configuration bytes `{L, 00, A[1:0], X, W, R}`, and
`pmpaddr0..15` (0x3B0) hold address bits [33:2]. This design uses a 32-bit
physical address, so the top two bits must be 0. The matching modes are
OFF, TOR, NA4 and NAPOT. The lowest-numbered matching entry decides. In
U-mode, an access that matches no entry is refused. M-mode is bound only by
locked entries. A lock freezes the entry, and also the previous `pmpaddr`
when the locked entry is TOR. The reserved combination W=1, R=0 is stored
as W=0.

Checks are purely combinational, one per port, and each reports
allow, matched and the index of the matching entry. Port 0 checks the
core. A refused core access raises `core_acc_fault` in the same cycle and
is never put on the bus; the core is expected to trap. Ports 1 and 2 serve
the DMA check (section 3).

## 3. The DMA request check (the part that needs care)

An enclave asks for a transfer by writing the DMA registers and then
`CTRL.start`. The controller records the enclave ID and privilege that came
with the start write. The registers themselves can be written by anyone:
what decides a request is who started it. The controller then runs
three stages, each printed as a decision in the source's access-control
flow chart:

1. **Security CSR** (one cycle). `sec_csr` allows the request only if both
   of these hold:
   * bit `DST_EID` of `SEC_DMA_PERM[requester]` is set. The firmware
     configures these rows in advance; reset clears them all.
   * the requester owns the source range. The PMP, still holding the
     requester's view, must allow reading both the first and the last
     source word, and both words must match the **same** entry. Under M-mode
     this check follows M-mode PMP rules.

   The second rule is what stops an enclave from *pulling* another
   enclave's data. The paper's rule is that enclaves may only push their
   own data out. If either rule fails, STATUS becomes DENIED, with bit 8
   (permission) or bit 9 (source) saying which, and `dma_err_irq` rises.
   Nothing is read or written.
2. **Availability Table** (one cycle). The range `[DST, DST+LEN)` must lie
   inside the free window `[BASE, BASE+SIZE)` recorded for `DST_EID`,
   computed without overflow. If it does not, STATUS becomes NOSPACE, the
   DMA raises `dma_err_irq` (the paper's "exception") and terminates.
3. **Move**. For each word the controller issues a bus read of the source,
   waits for the data, then a bus write to the destination and waits for its
   response. When LEN bytes have moved, STATUS becomes DONE and `done_irq`
   rises. A bus error stops the move with BUSERR.

Timing on a free bus: DONE is visible `2 + 4*N` cycles after the clock edge
that takes the start write, for N words. The denial shows after 1 cycle and
the no-space exception after 2. When the core uses the bus at the same
time, the round-robin bus interleaves the two masters and the move takes
longer.

Points to keep in mind:

* The source check trusts that the PMP view loaded during the cycle after
  `start` is the requester's. That holds because the start write comes from
  the requester itself, and the arbitrator needs many cycles to switch.
* The two-ends, same-entry test proves ownership of a range only when no
  higher-priority entry cuts a hole in the middle of it. The reference views
  have no such holes.
* The Availability Table is filled by M-mode firmware when an enclave exits.
  The DMA does not shrink the window after a transfer.
* The destination address is whatever the requester wrote. In the source
  flow, the receiving enclave tells the sender where to put the data; that
  is software. The table bounds the address either way.

DMA register map (base 0x1000_0000; every register is a 32-bit word):

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | SRC | rw | source byte address (bits [1:0] dropped) |
| 0x04 | DST | rw | destination byte address |
| 0x08 | LEN | rw | length in bytes, multiple of 4; 0 is denied |
| 0x0C | DST_EID | rw | destination enclave |
| 0x10 | CTRL | w | [0] start, [1] clear status and interrupts |
| 0x14 | STATUS | r | [2:0] 0 idle, 1 busy, 2 done, 3 denied, 4 no space, 5 bus error; [7:4] requester; [8] denied by permission; [9] denied by source |
| 0x18 | MOVED | r | bytes moved |

Writes to SRC..CTRL.start while busy return `err` and are ignored.

### Security CSR map (`rtl/sec_csr.sv`)

| CSR | name | meaning |
|---|---|---|
| 0x7C0 | SEC_EID | running enclave ID [3:0] |
| 0x7D0 + i | SEC_DMA_PERM[i] | bit j set: enclave i may send to enclave j |

Both are in the custom M-mode read/write CSR space and are written only
from M-mode.

### Availability Table map (`rtl/avail_table.sv`, base 0x1000_1000)

Entry i sits at offset 8i (BASE, a byte address) and 8i+4 (SIZE, in bytes).
Any enclave may read it. Writes are accepted from M-mode only. Offsets
beyond the last entry return `err`. Reset leaves every enclave with no
space.

## 4. The Crypto Enclave mailbox (`rtl/se_mailbox.sv`, base 0x1000_2000)

The secure element has its own core. The CE talks to it through two 8-word
queues:

1. The CE pushes request words at TXDATA (0x00). It rings the doorbell with
   CTRL[0] (0x0C).
2. The SE core sees `se_doorbell`, acknowledges it, pops the words
   (`se_req_valid/se_req_data/se_req_pop`) and pushes its results
   (`se_rsp_push/se_rsp_data`). It then pulses `se_done`.
3. `se_done` sets a notify flag that drives `mbox_irq`. The CE pops the
   results from RXDATA (0x04) and clears the flag with CTRL[1].

STATUS (0x08) reports:

* [0] request queue full, [1] request queue empty;
* [2] response queue full, [3] response queue empty;
* [4] notify flag;
* [15:8] request count, [23:16] response count.

A push into a full queue or a pop from an empty one returns `err` and has
no effect. **Every access whose enclave ID is not the CE's is refused with
`err`**, even from M-mode. This check is in addition to the PMP, which
already keeps the mailbox window out of every view except the CE's.
Messages longer than the queue go in chunks. The end-to-end test sends
a 739-word payload as 105 chunks of 7 words and one of 4. Each chunk comes
back as the same number of words plus a tag word.

## 5. Bus, memory and address map

`sys_bus` is a single-beat request/grant bus with two masters: 0 is the
core, after the PMP, and 1 is the DMA.

* **Arbitration.** If both request in the same cycle, the bus grants the
  master that was not granted last. A master that is not granted must hold
  its request; an assertion checks this.
* **Requests.** A request carries `we`, `addr`, `wdata`, `priv` and `eid`.
  The grant (`gnt`) comes in the same cycle.
* **Responses.** `rvalid`, `rdata` and `err` arrive one cycle after the
  grant, for reads and writes alike. An address that decodes to no slave
  gets `err`.

| address | slave |
|---|---|
| 0x0000_0000-0x0FFF_FFFF | `sram`: 64 KiB; beyond its size gives `err` |
| 0x1000_0000-0x1000_0FFF | DMA registers |
| 0x1000_1000-0x1000_1FFF | Availability Table |
| 0x1000_2000-0x1000_2FFF | SE mailbox |

All accesses are aligned 32-bit words; there are no byte strobes. The
SRAM array is not reset.

## 6. Top-level interface (`rtl/xine_soc.sv`)

Parameters:

| parameter | default | meaning |
|---|---|---|
| NUM_PMP | 16 | PMP entries |
| NUM_ENCLAVES | 16 | enclave IDs, DMA permission rows and table entries |
| SRAM_WORDS | 16384 | SRAM size in 32-bit words (64 KiB) |
| MBOX_DEPTH | 8 | words per mailbox queue |
| CE_EID | 1 | ID of the Crypto Enclave |

Ports:

* **`core_req`** (`core_req_t`): `req`, `we`, `acc` (read, write or
  execute), `addr`, `wdata` and `priv`. The response is `core_rsp`
  (`gnt`, `rvalid`, `rdata`, `err`). A PMP refusal raises `core_acc_fault`
  combinationally.
* **CSR port**: `csr_we` or `csr_re` with `csr_addr`, `csr_wdata` and
  `csr_priv`. Reads are combinational. An access from U-mode, or to a number
  that neither the PMP nor the security CSR owns, raises `csr_illegal`, and
  nothing is written.
* **SE side**: the `se_*` signals of the mailbox, as in section 4.
* **Interrupts**: `dma_done_irq`, `dma_err_irq` and `mbox_irq`, all level
  signals.

The reset is asynchronous and active low on every flip-flop except the SRAM
array. Types, CSR numbers and the address map are in `rtl/xine_pkg.sv`.

## 7. Departures from the source, and what is missing

Taken from the source: the M/U-only core with PMP isolation and 16 entries;
enclaves as PMP views, including the execute-only Runtime Enclave; a
security CSR in the core that is configured in advance and denies
illegitimate DMA requests; the rule that enclaves may push only their own
data; the Availability Table, readable by all and updated by the
arbitrator; the order of the DMA checks, with denial, then an exception for
lack of space, then the move; and a mailbox that only the CE can reach,
where the SE core reads the CE's data and notifies the CE when done.

This implementation's own choices:

* all register layouts, CSR numbers, the address map and the enclave
  numbering;
* the bus protocol. The source's SoC uses AXI with an APB bridge; this
  design uses a simpler single-beat bus;
* the SRAM and mailbox sizes;
* word-only accesses;
* how ownership of the source range is proved (the PMP test on the two end
  words);
* the availability check made in hardware by the DMA. In the source's text
  the sending enclave checks the table, but the source also says the DMA
  starts only if the destination has room; checking in hardware keeps a
  rogue enclave from skipping the check;
* the mailbox's enclave-ID filter on top of the PMP. The source's
  philosophy is that violations trap at the processor rather than at
  gated bus slaves, and the PMP alone already keeps the mailbox private.
  The filter is a second line of defence against firmware mistakes, and
  it can be removed without changing the protocol.

Not built, because the source names these parts without designing them:

* the application core;
* the secure element's core, crypto engines, TRNG and eFuse/NVM;
* the DICE secure-boot measurement;
* the interrupt controller, Flash, DDR, the APB bridge and its peripherals.

The arbitrator, the boot loader, the OS, the enclave lifecycle (sleep,
wakeup, run, suspend) and the shared-memory mailbox protocol between app
enclaves are software. The testbench covers the mailbox's PMP mapping.

## 8. Testbenches and simulation

Each block has a self-checking testbench in `tb/`. Every testbench prints
one line `TB_RESULT checks=N failures=M` and stops at a watchdog if it
hangs.

| testbench | what it checks |
|---|---|
| `pmp_tb` | NAPOT/TOR/NA4 entries, including an execute-only one, the lock rule and R=0/W=1; 3000 random addresses on every port, against a model written in terms of region bounds |
| `sec_csr_tb` | CSR read-back; the verdict and deny reasons for 4000 random requests |
| `avail_table_tb` | M-only writes; reads by all; the fit verdict at window edges and random points |
| `dma_ctrl_tb` | every outcome of the check flow; the data moved; no write on a refusal; the `2+4N` cycle count; a stalling bus; refusals while busy |
| `se_mailbox_tb` | full/empty refusals; CE-only access; doorbell and notify; order of both queues |
| `sram_tb` | random write/read-back over the whole 64 KiB; out-of-range refusal |
| `sys_bus_tb` | round-robin grants under contention; decode; response routing |
| `xine_soc_tb` | the whole payment flow at the default sizes (below) |
| `xine_soc_scale_tb` | sixteen 4 KiB enclaves at the default sizes: a ring of DMA permissions; each enclave sends to its successor (done), is denied to the one after and cannot read its successor's memory |

`xine_soc_tb` plays the arbitrator and the enclaves of a QR-code payment
scanner. A behavioural secure-element core (`tb/se_core_model.sv`, with a
toy keyed cipher) sits on the mailbox. The steps are:

1. Boot fills the table and the DMA permissions: AE-1 may send to AE-2, and
   AE-2 to AE-3.
   Boot also marks the shared mailbox empty, since the SRAM is not reset.
2. AE-1 stores a 739-word payload: the largest QR code (2953 bytes)
   rounded up to words. It then tries every access its view must
   refuse and a U-mode CSR write. It leaves a 4-word message in the shared
   mailbox. It then makes three DMA requests that must fail:
   * one to the CE, refused by permission;
   * one pulling data from AE-2, refused by the source check;
   * one a word larger than AE-2's 3 KiB window, refused for lack of space.
3. AE-1 sends the payload to AE-2 while it keeps reading memory, so the
   core and the DMA contend for the bus.
4. AE-2 checks the payload, then takes the message from the shared mailbox
   and clears it.
   When AE-2 exits, the arbitrator shrinks AE-2's table window by the
   2956 bytes it kept.
5. The CE reads AE-2's data directly and encrypts it through the mailbox in
   106 chunks. It writes the ciphertext and the tags back into AE-2.
6. AE-2 sends the result to AE-3, which checks it against the testbench's
   own computation.
7. AE-1 runs again. A send sized to AE-2's old window is refused for lack
   of space. A send that fills the new window completes.
8. The Runtime Enclave's own view is loaded and checked: full access to the
   OS, the app enclaves, unused memory and itself, and none to the EPA or
   the CE.

The testbench counts each mechanism and fails if any count is zero:

* PMP refusal and execute-only access;
* M-mode access and illegal CSR access;
* DMA denial by permission, DMA denial by source, the no-space exception
  and completed transfers;
* bus contention;
* mailbox notification and mailbox refusal;
* refused table write and enclave switch;
* a message passed through the shared mailbox. AE-3 is refused access to
  that mailbox.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/xine_pkg.sv tb/xine_soc_tb.sv --top-module xine_soc_tb -o sim
./obj_dir/sim
```

Replace the testbench name to run another one; `-y` finds the modules it
uses. Every testbench finishes in seconds. The simulator is two-state, so
every register that is read is reset, or is written before it is read.
