# SafeTI: a programmable traffic injector for interference testing

In a multicore system-on-chip, cores, accelerators and I/O share buses, caches
and the memory controller, so the execution time of one task depends on the
traffic the others generate. Safety-critical real-time software has to be tested
under the worst of that interference. Some of it cannot be reproduced from
software: traffic that arrives from an Ethernet port at an arbitrary time, for
example, or transaction types a core cannot issue. A traffic injector closes
that gap. It is a bus master that generates a programmed pattern of reads and
writes, on demand and repeatably, so that an asynchronous interference scenario
can be tested synchronously.

This RTL is a SafeTI traffic injector in its enhanced form:

* **Configuration over APB.** The traffic program, a list of *descriptors*, is
  written through a separate APB slave port into a buffer inside the injector.
  The injector never fetches its program over the bus it is testing. Loading a
  program therefore causes no interference of its own, cannot pollute a cache,
  and cannot read stale data because of coherence.
* **A pipelined injector.** Descriptor fetch, decode and execution work on
  three different descriptors at once. Back-to-back descriptors produce
  back-to-back bus traffic, and the bus is the only limit on the injection rate.
* **Two bus protocols.** The injector core emits protocol-independent transfer
  commands. An AMBA AHB master or an AMBA AXI4 master turns them into bus
  transactions.
* **Integration with two buses.** `safeti_top` holds two injectors, as in a
  RISC-V SoC that has an AHB bus (cores and L2 cache) and an AXI bus (L2 cache,
  accelerators, I/O bridge, memory controller). One injector masters each bus,
  and both are configured from the SoC's APB bus.

```
             APB (configuration)                      bus under test
                    |                                        ^
      +-------------+---------------------------------------|------+
      |  safeti_ctrl_regs  ---- start/loop/abort ---->       |      |
      |   |   ^  counters <---- busy/done/beats ----+        |      |
      |   v   |                                     |        |      |
      |  safeti_desc_buf ==fetch==> safeti_injector ==cmd==> AHB or |
      |  (N_DESC x 4 words)         fetch|decode|execute     AXI    |
      |                                                      master |
      +-------------------------------------------------------------+
```

## Programming model

### Descriptors

A descriptor holds four 32-bit words. Descriptor `i` sits at APB offset
`0x800 + 16*i`. The buffer holds `N_DESC` descriptors (16 by default).

| word | offset | bits   | field | meaning |
|------|--------|--------|-------|---------|
| 0    | +0x0   | 0      | WRITE | 1: write transfers, 0: read transfers |
| 0    | +0x0   | 1      | LAST  | last descriptor of the program |
| 0    | +0x0   | 31:16  | REPS  | the transfer is issued REPS+1 times |
| 1    | +0x4   | 31:2   | ADDR  | byte address of the first beat (bits 1:0 ignored) |
| 2    | +0x8   | 15:0   | BEATS | the transfer moves BEATS+1 32-bit words to consecutive addresses |
| 3    | +0xC   | –      | –     | unused; reads back what was written |

A program runs from descriptor 0 up to the first descriptor with LAST set. If
no descriptor has LAST set, it ends at the final buffer entry. Every
repetition goes to the same address: a descriptor with BEATS=7 and REPS=2
reads or writes the same 32 bytes three times. Write data is a fixed function
of the beat address, `addr ^ 0x5AFE7100` (`safeti_pkg::wdata_of`), so a
memory model can check it. Read data is discarded, because the traffic exists
only for the load it puts on the bus.

### Registers

| offset | name   | bits | access |
|--------|--------|------|--------|
| 0x000  | CTRL   | 0 EN: write 1 to start (ignored while busy); reads 1 while running | R/W |
|        |        | 1 LOOP: after the LAST descriptor, restart at descriptor 0 | R/W |
|        |        | 2 ABORT: write 1 to stop a running program | W |
| 0x004  | STATUS | 0 BUSY, 1 DONE (sticky), 2 ERR (sticky: an error response was seen) | R |
| 0x008  | BEATS  | data beats completed since the last start | R |
| 0x00C  | DESCS  | descriptors completed since the last start | R |
| 0x010  | ERRORS | bus error responses since the last start | R |

Each CTRL write sets LOOP to the written bit 1. A start clears DONE, ERR and
the three counters. The APB slave never inserts wait states. It answers
PSLVERR for an undefined register or for a descriptor index at or above
`N_DESC`; a write that gets PSLVERR changes nothing.

A typical test: write the descriptors, write CTRL=1 (or 3 to loop), run the
software under test, then poll STATUS.DONE, or write CTRL=4 to stop a looping
program.

## The injector pipeline

This is the part of the design that sets the injection rate. It is
`safeti_injector`.

The injector has three stages, each one register deep. Each stage holds one
descriptor:

1. **Fetch.** Drives `fetch_en`/`fetch_idx` to the buffer. The buffer's
   synchronous read register is the fetch/decode pipeline register; it is
   marked valid by `f_valid`.
2. **Decode.** Unpacks the four words into a `desc_t` (address, beats,
   repetitions, direction, last).
3. **Execute.** Offers one `cmd_t` (address, beats, direction) per repetition
   on a `cmd_valid`/`cmd_ready` handshake to the bus master, counting
   repetitions in `e_rep`.

The stages hand over in the same clock edge in which the next stage empties:

```
e_end  = command accepted and it was the last repetition (or an abort is on)
e_free = !e_valid || e_end          decode may move into execute
d_free = !d_valid || d_to_e         fetch may move into decode
f_free = !f_valid || f_to_d         a new fetch may be issued
```

When the execute stage issues the last repetition of descriptor *i*,
descriptor *i+1* is already decoded and moves in at that edge. Descriptor
*i+2* moves from fetch to decode, and fetch reads *i+3*. If the master accepts
one command per cycle, descriptors of one repetition each leave at one per
cycle, with no gap. Without the overlap, every descriptor would cost at least
the fetch and decode cycles again. That was the rate limit of the original,
non-pipelined injector.

End of program and looping:

* Fetch learns that a descriptor is LAST only once it has read it. While a
  LAST descriptor sits in the fetch register, no further fetch is issued, so
  nothing past the end is ever read.
* With LOOP set, fetch instead reads descriptor 0 in the same cycle that the
  LAST descriptor moves on. Wrapping around therefore adds no bubble either.
* `done` pulses for one cycle once all three stages are empty and the bus
  master reports `master_idle`, which means every data beat has completed.
  `busy` falls at that point.

Abort empties fetch and decode at once. A command that has already been
offered stays offered until the master takes it, because the handshake never
withdraws a command (an assertion checks this). No further repetitions are
issued after that command.

Timing:

* The first command is offered on the fourth clock edge after the `start`
  pulse: running, fetch, decode, execute.
* In the full SafeTI, `start` comes from the APB access phase that writes
  CTRL.EN.

## Bus master interfaces

Both masters accept a command in the same cycle that they issue the last
address of the previous one. The command queue therefore never empties
between descriptors.

**AHB (`safeti_ahb_master`).**

* AHB-Lite style master port, 32-bit word transfers. There are no
  HBUSREQ/HGRANT signals; arbitration is left to the interconnect.
* Each command starts an INCR burst with NONSEQ, and the following beats are
  SEQ. A beat that lands on a 1 KB boundary starts a new INCR burst with
  NONSEQ, since AHB bursts may not cross 1 KB.
* The address phase of beat *n+1* overlaps the data phase of beat *n*. With
  zero wait states, beats complete on consecutive cycles, across command
  boundaries too.
* An ERROR response is counted and the transfer continues.

**AXI4 (`safeti_axi_master`).**

* A command is cut into INCR bursts of at most 256 beats that never cross a
  4 KB boundary.
* Up to `MAX_OUT` (8) bursts may be outstanding.
* Each write address pushes (address, length) into a small queue that drives
  the W channel, so write data never leads its address.
* RREADY and BREADY are always high. Every transaction uses the single ID
  `ID`, so responses return in order.
* SLVERR or DECERR counts once per R beat and once per B response.
* LOCK, CACHE, PROT, QOS and USER are not implemented.

## The two-injector top

`safeti_top` instantiates `safeti_ahb` and `safeti_axi`. Each is a complete
injector: registers, buffer, pipeline and its bus master. The APB bridge of
the SoC decodes the address and drives `psel[0]` for the AHB injector or
`psel[1]` for the AXI injector. The other APB signals are shared, and PRDATA,
PREADY and PSLVERR come from the selected slave. The AHB and AXI master ports
go straight out of the top. The cores, L2 cache, interconnects, memory
controller and DRAM are outside this RTL.

Parameters, with their defaults:

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `N_DESC`  | 16 | all | descriptors in the buffer (up to 128 fit the APB window) |
| `MAX_OUT` | 8  | AXI | outstanding AXI bursts |
| `ID_W`, `ID` | 4, 0 | AXI | AXI ID width and value |

Synthesized (yosys, coarse): the top is about 730 flip-flop bits and 4.4 kbit
of memory, mostly the two descriptor buffers (16 × 128 bits each).

## What is specified and what is chosen here

The source description of this injector is short, and gives the architecture
rather than the details. It fixes these points:

* the parts: a descriptor buffer, control registers, and an injector that
  takes descriptors as the registers direct;
* the descriptor contents: target address, read or write, amount of data,
  repetitions;
* APB as the configuration port;
* the three overlapped stages: fetch, decode, execute;
* AHB and AXI as the traffic ports;
* one injector per bus, with APB configuration for both.

Everything else is this implementation's own choice, and can be changed
without touching the architecture:

* the descriptor layout;
* the register map, including LOOP, ABORT, the counters and PSLVERR;
* the buffer depth of 16;
* the data width of 32 bits, and the beat and repetition ranges;
* how repetitions behave;
* the end-of-program rule;
* the abort behaviour;
* the write-data pattern;
* the AHB and AXI burst policies, and the outstanding limit;
* the reset style (asynchronous, active low).

No cycle counts or clock rates are specified. The one-command-per-cycle rate
and the four-cycle start latency are properties of this implementation, and
the testbenches check them.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | covers |
|-----------|--------|
| `tb_safeti_desc_buf` | word writes, both read ports, read latency, output hold |
| `tb_safeti_ctrl_regs` | register map, start/abort pulses, counters, sticky bits, PSLVERR |
| `tb_safeti_injector` | command stream against the descriptors, back-pressure, one command per cycle, 4-cycle latency, LOOP without bubble, ABORT, end at the final entry |
| `tb_safeti_ahb_master` | every beat, wait states, 1 KB restart, ERROR, one beat per cycle across commands |
| `tb_safeti_axi_master` | every beat, 256-beat and 4 KB splitting, SLVERR, streaming R and W at one beat per cycle |
| `tb_safeti_ahb`, `tb_safeti_axi` | one injector programmed over APB end to end |
| `tb_safeti_top` | both injectors at default parameters, full buffers, running concurrently, then LOOP and ABORT |

`tb_safeti_top` counts how often each mechanism occurs and fails if any never
does: back-to-back commands, repetitions, AHB wait states, the 1 KB restart,
AHB and AXI errors, AXI back-pressure, burst splitting, several outstanding
bursts, both buses active at once, loop wrap-around and abort.

The bus partners are the behavioural models `tb/ahb_slave_model.sv` and
`tb/axi_slave_model.sv`. They insert random wait states and back-pressure,
inject error responses at one address, report every completed beat, and
count protocol violations. The RTL also carries assertions: an offered
command is held, AHB addresses are held through wait states, and AXI valid
signals are held until their handshake.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/safeti_pkg.sv tb/tb_safeti_top.sv --top-module tb_safeti_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_safeti_top` with any other testbench name. Every testbench runs
in seconds.

## Limits

* Read data is never checked or used, and write data is a fixed pattern. The
  injector produces load, not a memory test.
* Transfers are 32-bit words only: no narrow or unaligned accesses and no
  byte strobes other than all-ones.
* AHB error responses do not cancel the rest of a burst.
* There is no interrupt on completion; software polls STATUS.
* Descriptors may be rewritten while a program runs. An entry already in the
  pipeline uses its old contents.
* Only the two injectors are RTL. The behaviour of the SoC around them is
  represented only by the testbench bus models.
