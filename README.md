# Split-trust hardware: physically isolated domains joined by delegatable mailboxes

A phone or embedded SoC normally runs every program, trusted or not, on the
same processors, caches, buses and memory, and then tries to keep them apart
with privilege levels, page tables and enclaves. Each of those shared parts is
a place where one program can leak into, or corrupt, another.

This design takes the opposite approach. The machine is split into a fixed
set of **trust domains**. Each domain has its own processor and memory, and
each I/O domain also has its own device. Domains share no hardware at all:
no cache, no bus, no RAM. The only way they can talk is by passing messages
through hardware queues. A security-critical program gets a domain to itself.
The domain is reset before the program runs and again afterwards. While the
program runs, it talks only to the I/O domains it has been given
*exclusively*, and it can check that exclusivity in hardware.

The resource manager decides which domain may talk to which, and when. It is
an ordinary domain and it is **not trusted**. The hardware keeps it honest:

* it can lend a mailbox to a domain, but cannot take the mailbox back before
  the agreed quota runs out;
* it cannot read the mailbox's status while the mailbox is lent out;
* it cannot reset a domain that takes part in a running session;
* it cannot point the untrusted domain's DMA engine at the network device
  unless the untrusted domain legitimately holds the network domain.

The RTL here covers the hardware added around the processors to enforce this.
The processors, the TPM, the DMA engine and the devices themselves are
off-the-shelf parts and appear only as ports.

## The domains

| id | domain | what it is |
|----|--------|------------|
| 0 | `DOM_RM` | resource manager; default owner of every mailbox |
| 1 | `DOM_UNTRUSTED` | the commodity OS on the application CPU (with DRAM and a DMA engine) |
| 2, 3 | `DOM_TEE1`, `DOM_TEE2` | microcontroller domains for security-critical programs |
| 4 | `DOM_SERIAL_IN` | keyboard / serial input |
| 5 | `DOM_SERIAL_OUT` | display / serial output |
| 6 | `DOM_STORAGE` | storage device |
| 7 | `DOM_NETWORK` | Ethernet |

Each domain except the untrusted one runs on a small 32-bit microcontroller.
So does an eighth processor that passes messages between the domains and the
TPM. Each of these eight microcontrollers has its own boot ROM (`boot_rom`)
and RAM (`domain_ram`). The numbering and all types are in `rtl/st_pkg.sv`.

## The delegatable mailbox (`rtl/mailbox.sv`)

This is the core of the design and the hardest part to get right.

### Structure

A mailbox is a queue (`msg_queue`) with two ends:

* The **fixed end** is wired to one domain, `FIXED_DOM`, and to nothing else.
* The **delegatable end** is wired to all eight domains. A multiplexer
  connects only the current **owner** to the queue. Every other domain's leg
  reads all zeros, and its writes go nowhere.

`FIXED_READER` sets the direction:

* `FIXED_READER = 1`: the owner writes and the fixed domain reads. An example
  is the serial-output mailbox, where any program that holds it can put text
  on the screen.
* `FIXED_READER = 0`: the fixed domain writes and the owner reads. Examples
  are serial input and storage responses.

### Sessions

After reset the owner is the resource manager. The resource manager starts a
session by issuing a `MB_DELEGATE` command with three fields:

* `target`: the domain to own the end.
* `msg_quota`: the number of whole messages the owner may move. All ones,
  `12'hFFF`, means no limit.
* `time_quota`: the length of the session in ticks of `TICK_CYCLES` clock
  cycles (1 ms at 100 MHz by default). It cannot be unlimited.

The command is ignored if any of these hold:

* a session is already running;
* the target is the resource manager or the fixed domain;
* either quota is zero.

So the only way to start a session is from the idle state. Nothing the
resource manager sends during a session has any effect on it. That is what
makes the delegation *irrevocable*.

A session ends in one of three ways:

1. the owner sends `MB_YIELD`;
2. the time quota reaches zero;
3. the message quota is used up.

When a session ends, the owner goes back to the resource manager. The queue
is wiped when a session starts and when it ends, so no data crosses from one
session to the next. The wipe is a synchronous clear of the queue's pointers.
Wiped words can never be read again: the queue's read port gives zero when it
is empty, and stale array contents never reach it.

A message is `MSG_WORDS` 32-bit words:

* control-plane mailboxes carry 16-word (64 B) messages;
* data-plane mailboxes carry 128-word (512 B) messages;
* both kinds hold 4 messages.

Only whole messages count against the message quota. The owner cannot move a
word once the quota is zero; the assertion `a_quota` checks this.

**Running out of message quota.** How the session ends depends on the
direction:

* *Delegated writer:* the session ends only once the fixed reader has drained
  the queue. The last message is therefore delivered, not wiped.
* *Delegated reader:* the session ends at the clock edge after its last
  message was read.

### Status register

Every domain reads a status word from every mailbox:
`{valid, owner, msg_left, time_left}`. Only two domains see the real
contents:

* the **owner**, which can check that it really holds the mailbox and how much
  quota is left;
* the **fixed domain**, which can check who is on the other end.

Every other domain reads the dummy value zero. This includes the resource
manager while the mailbox is lent out, so it cannot watch how a session
proceeds. When the resource manager is the owner, it reads the real value as
owner.

### Timing

* Commands are sampled every cycle and take effect at the next edge.
* One word moves per cycle in each direction that has a valid/ready handshake.
* A time-out ends the session at the edge where the last tick elapses.
* While a delegation, yield or expiry is taking effect (`q_clr` is high), the
  owner's ready and valid signals are held low, so no word is half-accepted
  across a wipe.

## The twelve mailboxes and eleven queues

`st_pkg` lists the mailboxes, each with its fixed domain, direction and kind:

| mailbox | fixed domain | fixed end | plane |
|---------|--------------|-----------|-------|
| `MB_SERIAL_OUT` | serial out | reader | control |
| `MB_SERIAL_IN` | serial in | writer | control |
| `MB_STORAGE_CMD_IN` / `_CMD_OUT` | storage | reader / writer | control |
| `MB_STORAGE_DATA_IN` / `_DATA_OUT` | storage | reader / writer | data |
| `MB_NETWORK_CMD_IN` / `_CMD_OUT` | network | reader / writer | control |
| `MB_NETWORK_DATA_IN` / `_DATA_OUT` | network | reader / writer | data |
| `MB_TEE1_IPC`, `MB_TEE2_IPC` | TEE1, TEE2 | reader | control |

The four storage mailboxes follow the prototype this design is based on. The
rest of the assignment is a choice made here so that the total comes to 12.

The 11 **permanent queues** are plain `msg_queue`s of 64 words. They are never
delegated, never wiped and never reset by a domain reset. They serve fixed
links, such as each domain to the TPM mediator, or a TEE to the resource
manager. The top only numbers them. The two processors on each queue are
decided where the processors are wired in.

## Reset: the PMU interface and the reset guard

The resource manager resets domains through the power-management unit
(`pmu_reset`):

1. It sends a command naming a domain.
2. One cycle later the unit answers `resp_ok = 1` and starts a pulse of
   `RESET_CYCLES` cycles on that domain's reset request.
3. If the domain is locked, it answers `resp_ok = 0` and does nothing.

The **reset guard** (`reset_guard`) is combinational and sits after the PMU.
A domain is locked when both of these hold:

* it is the owner, or the fixed domain, of a mailbox;
* that mailbox is in a session.

A locked domain's reset is forced low. Because the guard comes after the PMU,
a pulse that started before the lock is cut the moment the domain becomes
locked. Neither a timing trick nor a faulty PMU can reset a domain in the
middle of a session.

The mailbox state itself is reset only by the global `rst_n`. A domain reset
does not end a session. The program's domain is expected to clean up through
its boot ROM when it is later reset.

## Domain-bound DMA for the network (`dma_arbiter`, `net_packet_fifo`)

Copying every packet through mailboxes is too slow for the untrusted OS. So
the network device's receive and transmit streams are switched between two
places:

* **the untrusted domain's DMA engine**, which can reach only the untrusted
  domain's memory;
* **a packet FIFO** that only the network domain's microcontroller reads and
  writes.

The switch uses the DMA engine only while the untrusted domain owns
`MB_NETWORK_CMD_IN`. That condition is derived in hardware from the mailbox
owner, so the resource manager cannot set it apart from a real delegation.

The select is registered and changes on the cycle after the ownership
changes. A received packet can be cut by such a switch. The rest of that
packet is then dropped, up to its `last` beat, so that the new party never
receives the tail of someone else's packet.

The FIFO (`net_packet_fifo`, 512 words each way) raises `irq` to the network
microcontroller while it holds at least one complete packet. A reset of the
network domain wipes it.

## Memories

* `boot_rom`: 4096 words (16 KiB) per microcontroller, with synchronous read.
  Its contents come from the `INIT_FILE` hex file; with no file it reads
  zeros. The bootloader binary is not part of this design.
* `domain_ram`: 98304 words (384 KiB) per microcontroller, with a single port,
  byte enables and synchronous read. Addresses beyond the end read zero and
  ignore writes.

Eight microcontrollers × (16 + 384) KiB = 3200 KiB. That matches the 3.2 MB
of on-chip memory the prototype reports for everything other than the
untrusted domain. The split between ROM and RAM is a choice made here.

## Files

| file | contents |
|------|----------|
| `rtl/st_pkg.sv` | domain ids, command/status structs, mailbox table, stream and RAM types |
| `rtl/msg_queue.sv` | FIFO with wipe (mailbox storage and permanent queues) |
| `rtl/mailbox.sv` | delegatable mailbox |
| `rtl/reset_guard.sv` | lock computation and reset gating |
| `rtl/pmu_reset.sv` | reset command interface |
| `rtl/dma_arbiter.sv` | network stream switch with packet-cut drop |
| `rtl/net_packet_fifo.sv` | network domain's packet FIFO and interrupt |
| `rtl/boot_rom.sv`, `rtl/domain_ram.sv` | per-microcontroller memories |
| `rtl/split_trust_hw.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_workloads.sv` | benchmark traffic through the full-size top |
| `tb/boot_rom_test.hex` | 16 words, word *i* = 0x13579BDF × (*i*+1) mod 2³² |

The top's mailbox ports are arrays indexed `[domain][mailbox]`. The memory
ports are indexed by microcontroller: 0 = RM, 1 = TEE1, 2 = TEE2,
3 = serial in, 4 = serial out, 5 = storage, 6 = network, 7 = TPM mediator.

## Simulating

Each testbench checks its results itself. It ends by printing
`TB_RESULT checks=N failures=M`, and a watchdog stops it if it hangs. Each is
built with Verilator 5. Always list the package first:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/st_pkg.sv rtl/msg_queue.sv rtl/mailbox.sv tb/tb_mailbox.sv \
    --top-module tb_mailbox
./obj_dir/Vtb_mailbox
```

For the full design, pass all of `rtl/*.sv` (package first) and
`tb/tb_split_trust_hw.sv`. Run it from the directory that holds `tb/`,
because `tb_boot_rom` reads `tb/boot_rom_test.hex` by that relative path.

`tb_split_trust_hw` runs the top with all parameters at their defaults, which
includes the 1 ms quota tick. It goes through:

* delegation, yield, message-quota expiry and time-quota expiry;
* the wipe, and the dummy status;
* a refused reset, and a completed reset;
* a reset pulse cut off by a new session;
* the DMA path, the FIFO path, a cut packet being dropped, and the FIFO
  interrupt;
* a permanent queue, and a full 512 B data-plane message.

It counts how often each mechanism happened, and fails if any count is zero.
It simulates about 2 ms of design time.

`tb_workloads` also uses the full-size top. It pushes benchmark-sized
traffic through it and checks every word and the cycle count:

| workload | traffic | simulated result |
|----------|---------|------------------|
| mailbox throughput | 10,000 messages of 512 B over a data-plane mailbox | one word per cycle: 1,280,001 cycles, 400 MB/s at 100 MHz |
| mailbox latency | 64 B request + 64 B acknowledgment over two control-plane mailboxes | 34 cycles |
| storage writes | 2000 blocks of 512 B, message quota 2000 | session ends by itself once the queue is drained |
| secure file read | 1 MiB (2048 blocks), message quota 2048 | storage and TEE resets refused during the read, accepted after it |
| network via DMA | 100 frames of 1500 B in each direction at once | 37,501 cycles, 3.2 Gbit/s per direction |
| network via FIFO | one 1518 B frame for a TEE | interrupt only after the last beat |

The prototype measured 9.64 MB/s for the throughput test, 15.26 us for the
latency test and 943 Mbit/s for iPerf. Those figures include the processors'
software, which dominates them. The hardware numbers above are upper bounds:
they show only that the mailboxes and the arbiter are never the bottleneck.

The unit testbenches shrink the mailbox for speed: 4-word messages and a
4-cycle tick. They compare the design against small reference models driven
by `$urandom` traffic. The modules also carry SVA assertions on the rules that
must never break:

* ownership only moves to or from the resource manager;
* only a delegation, a yield or an expiry changes the owner;
* only those, or the owner's own messages, change the quota;
* a session never outlives its time quota;
* domains without access see no ready, no data and only the dummy status;
* the queue is empty after every wipe;
* the fixed domain never owns the delegatable end;
* no word moves once the quota is used up;
* nothing goes to the side of the arbiter that is not selected.

## Where this departs from, or goes beyond, the prototype description

* **Formats and interfaces are this design's own:** 32-bit words, 12-bit
  quota fields, the status word layout, valid/ready handshakes, the command
  encoding and the 1 ms tick. The prototype description gives the behaviour,
  not the signals.
* **Drain rule.** A delegated writer whose message quota runs out keeps its
  session until the fixed reader has emptied the queue. Without this rule the
  last message would be wiped before delivery.
* **Delegation rules.** Delegating to the resource manager itself or to the
  fixed domain is refused, as is a zero quota.
* **Status visible to the fixed end.** The fixed end always reads the real
  status, as the verification interface requires. The resource manager reads
  zero while the mailbox is lent out.
* **Mailbox assignment.** Only the storage domain's four mailboxes are taken
  from the prototype. The network, serial and TEE mailboxes are assigned here
  to reach the stated total of 12.
* **Permanent queues.** The permanent queues are 64 words deep, and the top
  does not wire their ends to named domains.
* **Arbiter control.** The arbiter's select comes from the owner of the
  network command mailbox. It takes effect a cycle after that changes, and a
  packet cut by the switch is dropped. None of this is specified beyond "only
  when the I/O domain is used by the untrusted domain".
* **Reset pulse.** The reset pulse length (16 cycles) and refusing, rather
  than queueing, a locked reset are choices made here. Only the reset part of
  the PMU is built; there is no DVFS.
* **Memory sizes.** ROM/RAM sizes per microcontroller are chosen so that they
  add up to the reported 3.2 MB. The built memories total 25,304,064 bits.
  The prototype's FPGA reports 27,061,649 block-RAM bits, which also include
  processor caches and vendor IP.
* **Not built:** the microcontrollers, the application CPU and its DRAM, the
  TPM (and its serial link), the DMA engine and the I/O devices. These are
  standard parts the design uses, not part of it, and they connect through
  the top's ports. The bootloader code in ROM is software and not included.

## What the sizes allow

* **Message quota.** The largest finite message quota is 4094 messages. That
  is 2 MiB on a data-plane mailbox, so a program that reads or writes a 1 MiB
  file (2048 blocks of 512 B) fits in one session. Bulk transfers larger than
  that use the unlimited setting.
* **Time quota.** The largest time quota is 4.095 s. A longer job, such as an
  untrusted bulk copy of 100 MB taking about 24 s, needs several consecutive
  sessions.
* **Throughput.** One word per cycle at 100 MHz gives 400 MB/s per mailbox and
  3.2 Gbit/s through the arbiter. Both are well above what a gigabit link or
  a microcontroller's copy loop needs.
