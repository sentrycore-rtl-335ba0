# SentryCore: a lockstep RISC-V safety island in SystemVerilog

SentryCore is a small co-processor subsystem meant to sit beside the big
application processors of a mixed-criticality chip (a car, a robot, a
satellite) and run the safety- and time-critical control tasks on its own
hardware. Physical isolation is the point: the critical software gets its own
cores, its own memory and its own interrupt controller, and it reaches the rest
of the chip only through two AXI4 ports. Two concerns shape the design:

* **Dependability without special technology.** Three identical RISC-V cores
  run the same program in lockstep and a majority voter decides what reaches
  the bus, so a transient fault in one core is masked and then repaired by a
  resynchronisation. Both memories protect every word with an error-correcting
  code and are swept by a scrubber so single-bit upsets do not accumulate.
* **Predictable, low-latency control.** A core-local interrupt controller
  (CLIC) and a DMA engine that launches multi-dimensional copies on a fixed
  period let a control loop find fresh sensor data in local memory at every
  tick, without the cores polling or copying.

This repository holds synthesizable RTL for the system around the cores: the
lockstep voter and its recovery control, the OBI system crossbar, the two ECC
memory banks with scrubbers, the peripheral bus with timer, CLIC and real-time
DMA, and both AXI4 ports. The cores themselves (CV32RT with FPU and the
`fastirq` register banking), the RISC-V debug module, the boot ROM contents and
the platform control registers are not included; the top level brings out
their connections as ports.

## Structure

```
            core 0     core 1     core 2        (not included: core_* ports)
              |  instr + data OBI, irq ack  |
           +--------------------------------------+
           | tcls_unit: bitwise majority vote,    |--- resynch interrupt
           | mismatch detect, timed core reset    |--- core_rst_no
           +--------------------------------------+
               | voted instr     | voted data
   AXI4 sub    |                 |        DMA mgr      debug mgr (port)
  axi_to_obi --+-----------------+-----------+------------+
           +--------------------------------------------------+
           |   obi_xbar: 5 managers x 5 subordinates, RR      |
           +--------------------------------------------------+
             |            |             |           |          |
        debug window  periph_bus     imem bank   dmem bank   obi_to_axi
          (port)         |          (ECC+scrub) (ECC+scrub)  AXI4 mgr
                         +-- boot ROM (port)  +-- PCRs (port)
                         +-- timer  +-- clic  +-- idma_rt  +-- tcls_unit regs
```

| File | Module | Role |
|---|---|---|
| `rtl/sc_pkg.sv` | package | OBI, register-bus and AXI4 structs, address map, ECC encode/decode |
| `rtl/tcls_unit.sv` | `tcls_unit` | lockstep voter and resynchronisation control |
| `rtl/obi_xbar.sv` | `obi_xbar` | system-bus crossbar |
| `rtl/ecc_mem_bank.sv` | `ecc_mem_bank` | 64 KiB SECDED SRAM bank with scrubber (used twice) |
| `rtl/periph_bus.sv` | `periph_bus` | OBI to register-bus bridge and decoder |
| `rtl/timer.sv` | `timer` | general-purpose timer |
| `rtl/clic.sv` | `clic` | interrupt controller |
| `rtl/idma_rt.sv` | `idma_rt` | 3-D DMA with timed launches |
| `rtl/axi_to_obi.sv` | `axi_to_obi` | AXI4 subordinate port (host into SentryCore) |
| `rtl/obi_to_axi.sv` | `obi_to_axi` | AXI4 manager port (SentryCore out) |
| `rtl/sentrycore.sv` | `sentrycore` | top level |

## Lockstep voting and resynchronisation

Each core has an instruction port and a data port. `tcls_unit` takes the three
copies of each request (valid, write enable, byte enables, address, write data)
and forms the bitwise majority `(a&b)|(a&c)|(b&c)`; only the voted request
goes to the crossbar, and the crossbar's response is handed unchanged to all
three cores, which therefore keep seeing identical inputs. The cores'
interrupt acknowledges to the CLIC are voted the same way.

Any disagreement is a *mismatch*. It does not disturb the bus (the majority is
still right) but it means one core's internal state is now wrong, and a second
fault in another core could no longer be outvoted. The repair is a software
routine helped by hardware:

1. The mismatch sets a sticky flag one cycle later, records which core was
   outvoted (STATUS bits 6:4) and counts the event. The flag drives
   `resynch_irq_o`, wired to CLIC line 2.
2. The interrupt handler saves the architectural state (registers, CSRs) to
   the stack. Because stores go through the voter, the saved copy is the
   majority's, even for the faulty core.
3. The handler writes 1 to CTRL. The unit gates the cores' requests off and
   holds `core_rst_no` low for `RESET_CYCLES` (8) cycles, then clears the
   mismatch flag and sets STATUS bit 1 (*resynchronised*).
4. All three cores boot identically; the boot code sees the resynchronised
   bit, restores the saved state and resumes. Software clears the bit by
   writing 1 to STATUS bit 1.

The whole sequence is reported to take about 600 cycles in the original
system; the hardware's share here is about ten of them. Mismatches are not
checked while the cores are held in reset.

| Offset (TCLS window 0xD000) | Register |
|---|---|
| 0x0 | STATUS: bit0 mismatch pending, bit1 resynchronised (write 1 to clear), bits 6:4 outvoted core(s) |
| 0x4 | CTRL: write bit0 = 1 to start the core reset |
| 0x8 | COUNT: mismatches seen |

## ECC memory banks and scrubbing

Each bank stores 16384 words, 64 KiB of data, as 39-bit codewords of an
extended Hamming code. Codeword bit *p* (1..38) is Hamming position *p*:
positions 1, 2, 4, 8, 16 and 32 hold check bits (check bit *2^k* makes the XOR
of all positions with bit *k* set equal to zero), the other 32 positions hold
the data bits in ascending order, and bit 0 is the parity of bits 1..38. On a
read the syndrome (six parity sums) and the overall parity classify the word:
odd parity means one flipped bit at the position named by the syndrome (0 = the
parity bit), which is corrected; even parity with a non-zero syndrome means two
flipped bits, reported as an OBI `err` and on `uncorr_o`.

A store of all four bytes is encoded and written in the cycle it is granted.
A store of fewer bytes needs the rest of the old word: the bank reads and
decodes it in one cycle and grants and writes the merged, re-encoded word in
the next (read-modify-write). Reads are granted at once. Every response
arrives one cycle after its grant.

The scrubber runs when the bank is quiet: after `SCRUB_INTERVAL` (64) cycles
without a request it takes one cycle to decode the next word in turn and, if
that word holds a single error, writes the corrected codeword back
(`scrub_fix_o`). A request arriving in that cycle waits one cycle. With the
default interval an idle bank is swept once every 16384 x 65 cycles, about
2.1 ms at 500 MHz. Corrected reads and scrubber repairs are signalled on CLIC
line 4, uncorrectable errors on line 3. The SRAM array is not initialised at
reset, as real SRAM is not: software must write memory before reading it, and
the scrubber will report (and partly "repair") whatever random content it
finds in words never written.

## System bus

The crossbar connects five managers (voted instruction port, voted data
port, AXI4 subordinate port, DMA engine, debug module) with five
subordinates. Addresses decode as follows (`sc_pkg::decode_addr`):

| Range | Subordinate |
|---|---|
| 0x0000_0000 - 0x0000_7FFF | debug module window (port `dbg_sub_*`) |
| 0x0000_8000 - 0x0000_FFFF | peripheral bus, 4 KiB per device |
| 0x0001_0000 - 0x0001_FFFF | instruction memory |
| 0x0002_0000 - 0x0002_FFFF | data memory |
| everything else | AXI4 manager port, out to the host system |

| Peripheral window | Device |
|---|---|
| 0x8000 | boot ROM (port `bootrom_*`) |
| 0x9000 | platform control registers (port `pcr_*`) |
| 0xA000 | timer |
| 0xB000 | CLIC |
| 0xC000 | DMA engine |
| 0xD000 | TCLS control |

Each subordinate has its own round-robin arbiter, so the cores can fetch from
instruction memory while the DMA writes data memory in the same cycle. OBI
demands that a request waiting for its grant stays unchanged, so once the
crossbar has shown a subordinate a request it keeps showing the same one until
it is granted. Subordinates answer in order; each keeps a queue (depth 4) of
the managers it has granted, and the queue head receives the next response. A
manager may have several requests in flight to one subordinate (one transfer
per cycle from a memory) but must wait for all of them before addressing a
different one, which keeps its responses in order. This rule also means that
no combinational path leads from a response back to a grant.

The OBI signals used are `req/gnt`, `addr`, `we`, `be`, `wdata` and
`rvalid/rdata/err`; the response comes at least one cycle after the grant.
The peripheral bus is a simple register bus: `valid/write/addr/wdata/wstrb`
answered in the same cycle by `ready/rdata/error`; the bridge turns `ready`
into the OBI grant and returns the data with `rvalid` one cycle later.

## Real-time DMA

`idma_rt` copies a three-dimensional block of words. Word *j* of row *r* of
plane *p* goes from

    SRC + p*SRC_STRIDE3 + r*SRC_STRIDE2 + 4*j   to
    DST + p*DST_STRIDE3 + r*DST_STRIDE2 + 4*j

for *j* < LEN, *r* < REPS2, *p* < REPS3 (a count of 0 counts as 1). Strides are
in bytes, so a strided sensor register block can be packed densely into data
memory, or the reverse. The engine moves one word at a time (read, then
write), at least four cycles per word, over its own crossbar port; any address
the crossbar knows is reachable, including the host system through the AXI4
manager port.

Writing CTRL bit 0 starts one transfer. Setting CTRL bit 1 turns on the
*real-time* launcher: a counter restarts the configured transfer every PERIOD
cycles. If a period ends while the previous transfer is still running, that
launch is skipped and MISSED counts it, so launches always stay on the period
grid. `done_irq_o` (CLIC line 1) pulses at the end of every transfer; a bus
error stops the transfer and sets STATUS bit 1.

| Offset (window 0xC000) | Register |
|---|---|
| 0x00 / 0x04 / 0x08 | SRC / DST / LEN (words) |
| 0x0C / 0x10 / 0x14 | SRC_STRIDE2 / DST_STRIDE2 / REPS2 |
| 0x18 / 0x1C / 0x20 | SRC_STRIDE3 / DST_STRIDE3 / REPS3 |
| 0x24 | PERIOD (cycles) |
| 0x28 | CTRL: bit0 start (write only), bit1 real-time enable |
| 0x2C | STATUS: bit0 busy, bit1 error |
| 0x30 / 0x34 | DONE count / MISSED count |

## Interrupts

The CLIC follows the shape of the RISC-V CLIC draft in reduced form. Each of
the 64 lines has pending, enable, trigger (level or rising edge) and an 8-bit
level, packed into one word at `0x800 + 4*i` of its window (byte 0 pending,
byte 1 enable, byte 2 bit 0 edge, byte 3 level); `mintthresh` sits at 0x8. The
highest level among pending and enabled lines wins, a tie goes to the higher
line number, and the winner is offered to the cores if its level exceeds the
threshold. The choice is registered (one cycle from input to
`core_irq_valid_o`). Edge-triggered lines stay pending until the cores
acknowledge that id. Vectoring, privilege modes and the level/priority split
of the full specification are not modelled.

| Line | Source |
|---|---|
| 0 | timer |
| 1 | DMA transfer done |
| 2 | TCLS mismatch (resynchronisation request) |
| 3 | uncorrectable memory error |
| 4 | corrected memory error or scrubber repair |
| 5-7 | unused |
| 8-63 | `ext_irq_i` |

The timer counts once every PRESC+1 cycles while enabled and restarts from 0
after reaching CMP, pulsing its interrupt, so its period is
(CMP+1)(PRESC+1) cycles. Registers at 0xA000: CTRL (bit 0 enable, bits 15:8
PRESC), COUNT at +0x4, CMP at +0x8.

## AXI4 ports

Both ports are 32 bits wide with 4-bit IDs. The subordinate port
(`axi_to_obi`) serves one burst at a time, issuing one OBI access per beat;
INCR and FIXED bursts are supported (WRAP is treated as INCR), IDs are echoed,
and any OBI error in a burst gives SLVERR. The manager port (`obi_to_axi`)
turns each outgoing OBI access into a single-beat AXI4 transaction with ID 0,
one at a time; SLVERR or DECERR becomes an OBI `err`.

## What follows the source design and what does not

Taken from the published description: the set of blocks and how they connect;
three lockstep cores behind a majority voter with software-driven recovery
ending in a core reset; two ECC-protected banks (instruction and data,
128 KiB together) with scrubbers on a crossbar; a peripheral bus carrying the
CLIC, platform control registers, a timer and a boot ROM; a DMA engine,
configured over the peripheral bus, that launches 3-D transfers on a timed
schedule; one manager and one subordinate AXI4 port.

Choices of this RTL where the description is silent: the SECDED code and
read-modify-write scheme, the scrubbing schedule, the address map and register
maps of every block, the interrupt numbering, round-robin arbitration and the
ordering rule in the crossbar, the register-bus handshake, the core reset
length, the DMA's word-by-word data path and its skip-on-busy rule, the
64-line CLIC, 32-bit AXI data, and the TCLS control registers (the
architecture drawing does not show them on the peripheral bus; they are placed
there as a sixth device).

Not included: the CV32RT cores with FPU and `fastirq` extension (and so the
6-cycle interrupt latency and sub-110-cycle context switch, which are core
properties), the RISC-V debug module and JTAG, the boot ROM contents and the
platform control registers, whose registers are not described. Physical
results (500 MHz, 0.42 mm2, the radiation-aware core spacing, 50-70 mW) are
outside what RTL can show. The interconnect itself is not protected, as in
the source design, which relies on an external watchdog for it.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert --top-module tb_sentrycore \
        -y rtl -y tb +libext+.sv -Irtl rtl/sc_pkg.sv tb/tb_sentrycore.sv
    obj_dir/Vtb_sentrycore

`--assert` turns on the concurrent assertions in the RTL: OBI requests held
until granted (crossbar inputs, memory banks), no response a subordinate was
not granted for, AXI4 address and data beats held until accepted, and a
burst's WLAST on its last beat.

Replace `tb_sentrycore` by `tb_tcls_unit`, `tb_ecc_mem_bank`, `tb_obi_xbar`,
`tb_periph_bus`, `tb_timer`, `tb_clic`, `tb_idma_rt`, `tb_axi_to_obi` or
`tb_obi_to_axi` for the unit tests. All of them finish in well under a
second. The block tests compare against reference models written in the
testbench (a reference memory, the arbitration rule, the stride formula, the
timer period formula) and check latencies: rvalid one cycle after gnt for the
memory and peripheral bus, two-cycle grant for partial stores, one-cycle
interrupt selection, exact core-reset length, DMA launches exactly PERIOD
cycles apart. `tb_obi_xbar` also streams 24 back-to-back loads from one
manager to a subordinate that answers late, and checks that four requests are
in flight at once and that the data come back in order.

`tb_tcls_resynch` plays out the recovery sequence end to end: a core's data
disagrees, the interrupt is taken, the voted cores store 39 words of state
(31 integer registers and 8 control registers) to data memory one access at
a time, request the reset, and load the state back. It checks the stored and
reloaded words and reports the total cycle count (171 cycles, against the
600-cycle budget for the whole recovery).

`tb_sentrycore` runs the whole system at its default size (two 16384-word
banks, 64 interrupt lines). The testbench stands in for the three cores, the
host on both AXI4 ports, the boot ROM, the control registers and the debug
window, and goes through: a host burst load and read-back of instruction
memory and instruction fetches; core stores including a partial store; reads
from every peripheral window and from host memory; a corrected single-bit
error, a reported double-bit error and a scrubber repair of a planted latent
error; a store in which one core's data is wrong, the resulting interrupt and
the timed core reset; three timer interrupts; and three real-time DMA periods
that copy a 2x4-word block of "sensor" data from host memory into data memory
while the cores keep loading from the same memory (bus contention). Each of
these mechanisms is counted and must occur at least once.

Memory faults are injected by writing the bank's `mem` array through a
hierarchical reference, so those tests need a simulator that allows it.
