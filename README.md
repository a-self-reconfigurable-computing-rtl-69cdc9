# Self-reconfiguring PCI FPGA platform: the fixed part

A PC-hosted reconfigurable computer can be kept to two chips: an FPGA on a PCI
card and a Flash that boots it. The FPGA is split into two regions. The
**fixed part** is loaded once from the Flash. It holds the PCI interface core
and a configuration controller. The **reconfigurable part** holds whatever
algorithm the PC wants to run at the moment. To switch algorithms, the PC
leaves a partial bitstream in its own memory and starts a transfer. The fixed
part then fetches the bitstream as PCI bus master and streams it into the
FPGA's Internal Configuration Access Port (ICAP). The algorithm region is
rewritten while the PCI link stays up, and the PC's CPU is not involved. The
same bus-master machinery streams data from PC memory into the algorithm and
streams its results back.

This repository holds synthesizable SystemVerilog for the fixed part, apart
from the vendor PCI core, together with self-checking testbenches. The
reference platform is a Xilinx Virtex-II (XC2V3000) on 33 MHz, 32-bit PCI.
That link gives 132 MByte/s. The 8-bit SelectMap port behind the ICAP takes
at most 50 MByte/s.

## Block map

```
            PCI core (vendor IP, not included)
    target side |            | initiator (bus-master) side         int_req
                v            v
  +-------------------+   +-----------------------------------------------+
  | pci_target_regs   |   | fixed_part_control                            |
  |  0x00 driver_comm |   |   target_control x4 --req--> transfer_arbiter |
  |       status_flags|   |                                   | grant     |
  |  0x20 common_part_|   |   busmaster_address_provider <-> busmaster_   |
  |       control(IRQ)|   |                                  initiator    |
  |  0x40 reconfig_   |   +----------|-----------------------------|------+
  |       part_control|      room / data                     room / data
  +---------|---------+              |                             |
            |            +-----------v-----------+   +-------------v--------------+
  reset_ctrl|            | stream_data_section   |   | selectmap_data_section     |
            |            |  downstream 256x32    |   |  config buffer 256x32      |
            |            |  upstream   256x32    |   |  32->8 mux, clock stop     |
            |            +-----------|-----------+   |  readback buffer 256x32    |
            |                        |               +-------------|--------------+
   static regs, rc_irq      ds/us streams                      SelectMap
            v                        v                             v
  ======== bus macros ========================                  ICAP
       reconfigurable part (algorithm, not included)
```

Each data section buffers through dual-clock block RAM. As a result the PCI
clock (`pci_clk`), the configuration clock (`cfg_clk`) and the algorithm's
clock (`rc_clk`) are fully independent.

## How a transfer runs

There are four *stream targets*. They all share the single bus-master
interface:

| # | target           | direction                     | buffer                   |
|---|------------------|-------------------------------|--------------------------|
| 0 | Upstream         | algorithm → PC memory (write) | stream upstream          |
| 1 | Downstream       | PC memory → algorithm (read)  | stream downstream        |
| 2 | Select Map Read  | ICAP readback → PC memory     | SelectMap readback       |
| 3 | Select Map Write | PC memory → ICAP              | SelectMap configuration  |

A transfer runs in these steps:

1. **Set-up.** The driver writes a PC byte address (`BASE t`) and a length
   in 32-bit items (`LEN t`). It then writes 1 to bit `t` of `CONTROL`.
   `busmaster_address_provider` loads its address and remaining counters.
2. **Requesting.** Each `target_control` compares the target's remaining
   count with its buffer's fill status. The fill status is the free space
   for targets that fetch from the PC, and the stored items for targets that
   send to it. A burst of `min(remaining, room, MAX_BURST)` items is
   requested once that reaches `THRESH` items, or once it covers the rest of
   the transfer. A burst never asks for more than the buffer can take or
   give, so the data phase never waits on a buffer.
3. **Arbitration.** `transfer_arbiter` gives the PCI interface to one
   requester whenever the initiator is idle. No target may win twice in a
   row while another one is waiting. This is met with round-robin order
   starting after the last winner, which also shares the bus evenly.
4. **Burst.** `busmaster_initiator` latches the target, the length and the
   target's current address, raises `m_req`, and moves one item per data
   beat between the core and the buffer. It reports every item to the
   address provider.
5. **Interruption.** A PCI burst can end before its length. A target
   disconnect, a retry or the latency timer can all cut it short. The
   address provider has counted only the items that really moved, so the
   target's next request resumes at the very next address. The testbenches
   cut bursts short at random to check this.
6. **Completion.** When the remaining count reaches zero, `done[t]` pulses.
   This sets the sticky done flag in `STATUS` and the interrupt status bit.
   A master or target abort (`m_err`) stops the target and sets its error
   flag and the error interrupt.

The driver thus deals only with whole transfers. The fixed part turns them
into the packet-style bursts PCI needs on one side, and into a continuous
stream for the algorithm or the ICAP on the other.

## The configuration path

`selectmap_data_section` is the heart of the self-reconfiguration.

- **Width conversion.** The items arrive 32 bits wide, the PCI width. A
  multiplexer sends them to the ICAP as four bytes, **most significant byte
  first**. A bitstream stored as big-endian words therefore goes out in file
  order.
- **SelectMap clock.** `icap_cclk` is a register toggled by `cfg_clk`. It
  runs at half the `cfg_clk` rate and carries one byte per period. With
  `cfg_clk` = 100 MHz that is 50 MHz, i.e. 50 MByte/s, the Virtex-II limit.
  The testbench checks this rate exactly: 400 bytes take 800 `cfg_clk`
  cycles.
- **Clock stop.** If the PCI side has not delivered the next item when a
  byte finishes, the controller holds `icap_cclk` low. It drives the clock
  again when data arrives, so the ICAP sees a paused clock, not a gap in
  the data. `icap_i` and `icap_ce_n` change only while the clock is low.
  `icap_write_n` changes only while no byte is presented.
- **Readback.** Set `MODE[1]`, then start target 2 with a length of N items.
  The controller turns the port around, clocks the ICAP for 4N bytes, and
  skips edges on which `icap_busy` is high. It packs each four bytes into
  one item, first byte most significant. The clock also stops while the
  readback buffer is full. `LEN 2` sets both the number of items read from
  the ICAP and the number written to PC memory.
- **Completion.** `STATUS[12]` (`sm_busy`) stays set until the configuration
  buffer is empty and the last byte has been clocked out. The done interrupt
  of target 3 alone only means that all items were fetched from PC memory.

## Register map (dword addresses in the memory BAR)

| addr      | name       | access | contents |
|-----------|------------|--------|----------|
| 0x00      | CONTROL    | W      | [3:0] start target t, [7:4] stop target t, [8] soft reset of the data path (self-clearing) |
| 0x01      | STATUS     | R/W1C  | [3:0] active, [7:4] done (sticky), [11:8] PCI error (sticky), [12] SelectMap write busy |
| 0x02      | MODE       | RW     | [0] hold the algorithm in reset, [1] SelectMap readback direction |
| 0x03      | ID         | R      | 0x50520001 |
| 0x04+2t   | BASE t     | RW     | PC byte address of target t (bits 1:0 ignored) |
| 0x05+2t   | LEN t      | RW     | transfer length in 32-bit items, 24 bits |
| 0x0C+t    | REMAIN t   | R      | items target t still has to move |
| 0x20      | INT_STATUS | R/W1C  | [3:0] target done, [4] PCI error, [5] algorithm interrupt |
| 0x21      | INT_ENABLE | RW     | mask for INT_STATUS; `int_req` = any enabled bit set |
| 0x40–0x4F | RC_CTRL i  | RW     | static registers driven to the algorithm (`rc_ctrl[i]`, with `rc_ctrl_wr[i]` pulse) |
| 0x50–0x5F | RC_STAT i  | R      | static registers driven by the algorithm (`rc_status[i]`) |

Starting a target clears its done and error flags. Unmapped addresses read
as zero. All constants are in `rtl/proteus_pkg.sv`.

## Interfaces of the top module `proteus_fixed_part`

**PCI core, target side.** `t_wr` writes `t_wdata` to `t_addr` in one
cycle. `t_rd` returns `t_rdata` with a `t_rvalid` pulse one cycle later.

**PCI core, initiator side.** This is the user-side handshake assumed here
for the vendor core:
- The fixed part holds `m_req` with `m_write` (1 = write PC memory),
  `m_addr` and `m_len` until `m_ack`.
- In the data phase, a write item moves on each cycle with `m_wvalid` and
  `m_wready` both high. A read item moves on each cycle with `m_rvalid`.
- `m_done` ends the burst, possibly early. `m_err` together with `m_done`
  reports an abort.
- `int_req` is the interrupt request that the core turns into INTA#.

Connecting a real PCI core means writing a thin adapter to this handshake.
Because every other part sees only this handshake, a different host bus
(PCI-X, USB) could be substituted the same way.

**ICAP.** The ports are `icap_cclk`, `icap_ce_n`, `icap_write_n`, `icap_i`,
`icap_o` and `icap_busy`. They map to the Virtex-II ICAP pins CLK, CE,
WRITE, I, O and BUSY.

**Bus macros.** These ports cross into the reconfigurable part:
- Streams: `rc_ds_*` and `rc_us_*`, both valid/ready. An item moves on an
  `rc_clk` edge with both valid and ready high.
- Registers: `rc_ctrl`, `rc_ctrl_wr` and `rc_status`, the static registers.
- `rc_irq`: a rising edge raises one interrupt.
- `rc_rst`: the algorithm's reset.

The static registers stay in the PCI clock domain; `rc_status` is captured
there through two flip-flops. Treat them as set-up and status values that
do not change while the other side reads them.

**Clocks and resets.** The clocks are `pci_clk`, `cfg_clk` and `rc_clk`.
`pci_rst_n` is the PCI bus reset. `reset_ctrl` derives one reset per use and
per clock domain. Each reset asserts at once and is released synchronously
to its own clock. The two sides of every dual-clock buffer are reset
together.
- The PCI reset resets everything.
- A soft reset (`CONTROL[8]`) resets the data path but not the registers.
- `MODE[0]` holds the algorithm in reset. It also empties the stream
  buffers.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `DEPTH`   | 256     | top, data sections, buffers | items per buffer (256x32, as on the reference platform) |
| `MAX_BRST` / `MAX_BURST` | 64 | top / control | longest bus-master burst, in items |
| `THRESH`  | 32      | top / control | smallest burst worth requesting unless it finishes the transfer |
| `CNT_W`   | 24      | control | length and remaining counter width |
| `RC_REGS` | 16      | package | static registers in each direction |
| `SOFT_RST_CYCLES` | 8 | reset_ctrl | soft reset length in PCI cycles |

A buffer holds `DEPTH` items in the RAM plus one in the read-side output
register.

## What follows the reference architecture and what is chosen here

These points follow the reference architecture:
- the split into a fixed part and a reconfigurable part;
- the three control sections (common, reconfig, fixed part) and the two
  data sections (stream, SelectMap);
- the four stream targets, with their names;
- the bus-master initiator, the address provider and the transfer
  arbitration, including its "never twice in a row while others wait"
  rule;
- dual-port, dual-clock 256x32 buffers;
- transfers triggered by the buffers' fill status;
- resuming an interrupted burst at the next address;
- the 32-to-8 bit multiplexer, and stopping the configuration clock when
  data runs out;
- static registers for the algorithm, and interrupts raised by it.

These are choices made for this RTL:
- the register map;
- placing the register space, driver communication, status flags and reset
  logic beside `fixed_part_control` in the top, not inside it. The
  reference draws them inside the fixed part control, but here they also
  serve the other sections;
- the user-side handshakes to the PCI core and to the algorithm;
- the round-robin realisation of the arbitration rule;
- the burst size and threshold;
- the MSB-first byte order;
- the readback engine and its `icap_busy` handling;
- the SelectMap clock derived from `cfg_clk`;
- the reset tree;
- the sticky flag and interrupt layout;
- stopping a target on a PCI abort;
- "Upstream" taken as algorithm → PC.

The reference numbers for block RAM do not agree with one another. The
configuration buffer is described as two Virtex-II block RAMs giving
256x32 in total. The whole fixed part is reported at 3 block RAMs, and a
256x32 buffer is named for each stream port. This RTL keeps the 256x32 size
and gives each direction its own buffer: configuration, readback, upstream
and downstream. That is four dual-port buffers, and each fits one 18-kbit
Virtex-II block RAM. The Common Part Control is described as holding "PCI access specific
functions" besides the interrupt logic; only the interrupt logic is built,
because those other functions are not specified.

Not included:
- the PCI interface core (vendor IP);
- the ICAP (a hard primitive);
- the boot Flash and the FPGA's power-up configuration from it;
- the bus macros, which are placement objects with no logic;
- the floorplan: on the Virtex-II the fixed part must take the right-most
  columns, next to the ICAP in the lower-right corner and the PCI pins, and
  the algorithm region spans full columns;
- any algorithm.

The testbenches carry behavioural models of the PCI core with PC memory,
of the ICAP, and of a small algorithm.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. It compares
the module's outputs with values computed independently in the testbench,
and ends with a `TB_RESULT checks=N failures=M` line. Models used by the
testbenches:
- `tb/pci_core_model.sv`: PC memory, random wait states, random early
  burst ends, and injected aborts;
- `tb/icap_model.sv`: records configuration bytes, serves a known readback
  sequence, and raises BUSY at random.

`tb/tb_proteus_fixed_part.sv` runs the whole fixed part at its default sizes
and drives it only through registers and interrupts, as a driver would:
1. stream a 1500-item partial bitstream into the ICAP, with a slow bus for
   the first third; then stream it again on a bus with no wait states or
   disconnects. The second pass must keep the SelectMap port at its full
   rate. It does: 5999 byte intervals take exactly 11998 configuration
   clocks, with no clock stop. So 33 MHz PCI can feed the ICAP at its
   50 MByte/s limit;
2. read back 300 items;
3. do a register round trip with the algorithm;
4. push 3000 items through the algorithm both ways at once, with slow PC
   memory writes so the upstream buffer fills;
5. abort a burst;
6. apply a soft reset and an algorithm reset, then run a final stream.

It also counts that each mechanism happened at least once. In a typical
run:
- configuration clock stops: about 230;
- interrupted and resumed bursts: about 240;
- contested arbitrations: about 200;
- ICAP busy edges: about 270;
- upstream back-pressure cycles: thousands;
- interrupts: 6;
- aborts: 1;
- soft reset: 1;
- algorithm reset: 1.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/proteus_pkg.sv \
    tb/tb_proteus_fixed_part.sv --top-module tb_proteus_fixed_part -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Replace the testbench name to run any other one. Every testbench finishes
in seconds. Verilator lint of the RTL (`--lint-only -Wall`) reports only
style warnings, plus one intended `SYNCASYNCNET`: `dp_rst` and `st_rst` are
synchronous resets in the PCI domain and also the asynchronous sources of
the reset synchronisers of the other domains.

What the tests do not cover:
- the real PCI core's timing;
- real ICAP behaviour beyond byte capture and readback;
- the Virtex-II bitstream format;
- clock-domain crossings under real metastability. Simulation has two
  states and ideal clocks, so the Gray-code synchronisers are checked for
  function only.
