# Trikarenos: a fault-tolerant triple-core RISC-V microcontroller in RTL

Trikarenos is a small microcontroller for satellites, where radiation flips
bits in flip-flops and memories. The design stays in a modern commercial
process and protects itself through its architecture instead of hardened
cells. Three ideas carry it:

* **Three cores that can be one.** Three small RISC-V cores (Ibex, RV32IMC) sit
  inside a redundancy unit. After reset they run in *triple-core lockstep*:
  all three see the same inputs, and every request they put on the bus is
  decided by a majority vote. A core hit by an upset is outvoted in the same
  cycle, so the error never leaves the core complex. Software then
  re-synchronises the cores: it saves their state, resets them, and reloads
  the state. When reliability is not needed, one register write releases the
  cores into *performance* mode, and they run three independent programs.
  The same hardware is both a reliable single core and a three-core machine
  (*on-demand redundancy grouping*, ODRG).
* **Memory that corrects itself.** The 256 KiB SRAM is split into eight
  word-interleaved banks. Each bank stores 39-bit code words: 32 data bits
  plus 7 check bits of a Hsiao SEC-DED code. Decoding and correction happen
  in the read cycle, so ECC adds no latency. A scrubber in each bank walks
  the memory in the bank's idle cycles and repairs single errors before a
  second one can pile up in the same word.
* **Errors you can provoke and count.** Every error detector drives an event
  counter and can be routed to an output pin. The memory can be told not to
  write chosen bits, so software can plant errors on purpose.

This repository holds synthesizable SystemVerilog for the SoC around the
cores:
* the redundancy unit with its voters;
* the interconnect;
* the ECC memory banks and their scrubbers;
* the test and error-monitoring registers;
* the I/O DMA with UART and Quad-SPI, GPIO, timer, interrupt controller and
  pad multiplexer.

The cores themselves, the JTAG debug unit and the boot ROM's contents are not
included. Their bus ports are ports of the top module `trikarenos_soc`, and
the testbench drives them with behavioural models.

## Structure

```
        core 0     core 1     core 2          (outside: Ibex cores)
          |  |       |  |       |  |
   +------v--v-------v--v-------v--v------+
   |              odrg_unit               |  vote in lockstep / pass through
   +---+--+-------+--+-------+--+---------+
       |  |       |  |       |  |   uDMA RX  uDMA TX   JTAG (outside)
   +---v--v-------v--v-------v--v------v-------v--------v---+
   |             tcdm_interconnect (9 masters)              |
   +--+-----+-----+-----+-----+-----+-----+-----+-------+---+
      |     |     |     |     |     |     |     |       |
    ecc_bank x 8 (Hsiao enc/dec, scrubber, SRAM 8192x39)  periph_demux
                                                            |
       boot ROM port, GPIO, timer, irq_ctrl, ODRG regs, mem_cfg,
       err_monitor, udma (uart, qspi), pad_mux
```

All bus traffic uses one request/response pair, `tcdm_req_t` and
`tcdm_rsp_t` from `trikarenos_pkg`:
* The request carries `req`, `we`, `be[3:0]`, `addr[31:0]` and `wdata[31:0]`.
* The slave answers with a combinational `gnt` in the same cycle.
* A master keeps its request unchanged until it sees `gnt`. The interconnect
  asserts this rule.
* `rvalid` and `rdata` arrive exactly one cycle after the grant.

Register slaves always grant and answer one cycle later.

### Address map

| Range | Target |
|---|---|
| `0x1C00_0000`–`0x1C03_FFFF` | SRAM, 256 KiB. Bank = addr[4:2], row = addr[17:5] |
| `0x1A00_0000`–`0x1A0F_FFFF` | boot ROM port (boot address `0x1A00_0080`) |
| `0x1A10_0000` | GPIO |
| `0x1A10_1000` | timer |
| `0x1A10_2000` | interrupt controller |
| `0x1A10_3000` | ODRG control |
| `0x1A10_4000` | memory configuration (write-disable masks, scrub enables) |
| `0x1A10_5000` | error counters |
| `0x1A10_6000` | I/O DMA |
| `0x1A10_7000` | pad multiplexer |

Anything else reads as zero and ignores writes. The map follows the habits of
PULP-style microcontrollers; the exact addresses are this design's choice.

## The redundancy unit (`odrg_unit`)

**Lockstep mode** (reset value of `MODE`):
* The instruction requests of the three cores go to one `tmr_voter`, and
  their data requests to another. Each voter is a bitwise two-out-of-three
  majority over the whole request struct.
* The voted requests leave on bus port 0 only. Ports 1 and 2 stay idle.
* The response from port 0, and interrupt line 0, go to all three cores, so
  they keep seeing identical inputs.
* Each voter reports which copy disagreed. A disagreement:
  1. latches the core's number in `STATUS`;
  2. pulses `mismatch_o`, which feeds an error counter;
  3. raises `core_resync_irq_o` to all cores.

The faulty request is already outvoted, so the bus never sees it. What is left
to repair is the faulty core's internal state. The recovery is software:
1. The interrupt handler pushes the register file and other state onto the
   stack.
2. It writes `RESYNC`.
3. The unit holds all three cores in reset (`core_rst_o`) for `ResetCycles`
   cycles (4) and clears the pending flag.
4. The cores restart from the boot ROM. Its recovery code sees the saved
   state and reloads it from the stack.

From the bus's point of view this is a single core that paused for a while.

**Performance mode** (`MODE[0] = 1`): every core uses its own two bus ports
and its own interrupt line. Nothing is voted. Writing `MODE` back to lockstep
also resets all three cores, because they have diverged and must start again
from a common state.

| Offset | Register |
|---|---|
| 0x0 | `MODE`: bit 0 = performance |
| 0x4 | `STATUS` (read only): bit 0 = mismatch pending; bits 3:1 = cores that disagreed |
| 0x8 | `RESYNC`: write 1 to reset the cores and clear the pending mismatch |
| 0xC | `EVENTS` (read only): number of entries into lockstep |

## ECC memory banks (`ecc_bank`)

Each bank combines:
* an `sram_bank` (8192 × 39 bits, one-cycle read, per-bit write mask);
* `hsiao_enc` and `hsiao_dec`;
* a `mem_scrubber`.

### The code

The seven check bits come from a parity-check matrix H with 39 columns:
* The seven check bits have the unit vectors as their columns.
* The 32 data bits get distinct columns of weight three, so every column has
  odd weight.

There are 35 seven-bit columns of weight three. This design takes them in
increasing numeric order and leaves out `0x07`, `0x38` and `0x43`. That keeps
the row weights at 13 or 14, so each check bit is an XOR over 13 or 14 data
bits. The matrix is computed by a function in `trikarenos_pkg`, not typed in.

The stored word is `{check[6:0], data[31:0]}`.

Decoding uses the syndrome, the XOR of the recomputed and the stored check
bits:

| Syndrome | Meaning | Action |
|---|---|---|
| zero | no error | none |
| equals a data column | that data bit flipped | flip it back |
| weight one | a check bit flipped | data is already right; the corrected code word is still produced, for the scrubber |
| anything else | even weight (two flips), or an odd column no bit has | uncorrectable |

The whole decode is combinational and sits in the read-response cycle.

### Bank timing

A read is granted in the cycle it is presented. The SRAM output is decoded
and corrected in the next cycle, which is the response cycle. A full-word
write is encoded and written in its grant cycle.

A sub-word write (byte or halfword) cannot form check bits without the rest
of the word, so it takes two cycles:

```
cycle   bus                       bank
  0     write, be != 4'hF  ->gnt  read old code word of that row
  1     rvalid to the master      decode/correct old word, merge new bytes,
        (other requests: gnt=0)   re-encode, write
  2     bank free again
```

The master gets its response at the normal time. The only cost is that the
bank refuses other requests during cycle 1. A single error in the old word is
corrected during the merge, and counted.

### Scrubber

The scrubber reads the rows in order, one at a time, and only in cycles with
no bus access. In the next cycle its word is decoded:
* If the word has a correctable error, the scrubber writes the corrected code
  word back.
* If the bank is busy with a bus access in that cycle, the scrubber drops the
  write and reads the same row again later. It never writes a correction from
  data that may have changed underneath it.

Bus accesses therefore never wait for the scrubber. At 8192 rows, a bank with
no bus traffic is swept every 8192 to 16384 cycles.

### Fault injection and error events

`mem_cfg` holds, for each bank, a 39-bit write-disable mask over the code
word:
* Bits set in the mask are never written, whether by a bus write, a sub-word
  merge or the scrubber.
* To plant an error, software sets a mask bit and then writes a word whose
  value at that bit differs from what is stored.

`mem_cfg` also holds one scrub enable per bank. The enables are all on after
reset, so software can stop the scrubber while it plants errors.

Each bank produces three one-cycle events: corrected error, uncorrectable
error, and word repaired by the scrubber. `err_monitor` counts them:

| Counter (offset 4·i) | Event |
|---|---|
| 3b | corrected error in bank b |
| 3b+1 | uncorrectable error in bank b |
| 3b+2 | scrub repair in bank b |
| 24 | lockstep mismatch |

* The counters are 32 bits wide. Writing a counter clears it.
* The select register at `0x100` routes one source to `err_o`.
* `err_o` is a top-level pin and also pad function 8, so it can be placed on
  any pad.
* An uncorrectable error in any bank also raises an interrupt.

| `mem_cfg` offset | Register |
|---|---|
| 8b | mask bits 31:0 of bank b |
| 8b+4 | mask bits 38:32 of bank b |
| 0x40 | scrub enables, one bit per bank (reset value `0xFF`) |

## Interconnect (`tcdm_interconnect`)

The interconnect is a single-cycle crossbar with nine masters and nine
slaves.

| Masters | Slaves |
|---|---|
| 0–2: core instruction ports | 0–7: the eight banks |
| 3–5: core data ports | 8: the peripheral decoder |
| 6: uDMA RX | |
| 7: uDMA TX | |
| 8: JTAG debug | |

* Consecutive words fall in consecutive banks, so streams from different
  masters usually hit different banks.
* Each slave has its own round-robin arbiter. The lowest-numbered requesting
  master at or after a rotating pointer wins. The pointer moves past the
  winner whenever the slave grants.
* Responses are routed back by remembering, per slave, whom it served in the
  previous cycle.

A master that loses arbitration, or meets a bank in its sub-word write-back
cycle, sees `gnt` low and retries in the next cycle.

## Peripherals

* **Interrupt controller (`irq_ctrl`).**
  * Registers: `MASK` 0x0, `PENDING` 0x4, `CLEAR` 0x8, `SET` 0xC, per-core
    masks at 0x10 + 4·core.
  * Events set pending bits. A core's line is high when a pending bit is
    enabled in the common mask or in its own mask. The per-core masks matter
    in performance mode.
  * Sources: 0 GPIO, 1 timer, 2 uDMA RX done, 3 uDMA TX done, 4 uncorrectable
    memory error.
* **GPIO.**
  * Registers: `DIR` 0x0, `OUT` 0x4, `IN` 0x8 (two-flop synchroniser),
    `IRQ_EN` 0xC, `IRQ_STATUS` 0x10 (rising edges; write 1 to clear).
* **Timer.**
  * Registers: `CTRL` 0x0 (bit 0 enable), `COUNT` 0x4, `CMP` 0x8.
  * The counter restarts after reaching `CMP`. It gives a one-cycle interrupt
    every `CMP+1` cycles.
* **I/O DMA (`udma`).** Two channels, each with its own master port on the
  interconnect, so transfers do not involve the cores.
  * RX: every byte received by the UART or the Quad-SPI is written to
    `RX_ADDR`, `RX_ADDR+1`, …. Each byte is one sub-word write, which the bank
    handles with its read-modify-write.
  * TX: reads the word holding the next byte and hands the byte on.
  * Each channel pulses a done interrupt when its length runs out.
  * Registers: `RX_ADDR` 0x00, `RX_LEN` 0x04, `RX_CTRL` 0x08, `TX_ADDR` 0x10,
    `TX_LEN` 0x14, `TX_CTRL` 0x18, `UART_DIV` 0x20.
  * In the `CTRL` registers, bit 0 starts the channel and bit 1 selects
    Quad-SPI instead of UART. Reading a `CTRL` register returns the busy bit.
* **UART.**
  * 8N1 frames. The bit time is `UART_DIV+1` cycles; the reset value is 15.
  * The receiver samples mid-bit behind a synchroniser and ignores glitches
    shorter than half a bit.
* **Quad-SPI master.**
  * SPI mode 0: SCK at half the clock, data set up while SCK is low and taken
    on its rising edge.
  * Four data lines, high nibble first, four cycles per byte.
  * Chip select stays low for the whole transfer.
  * Receive pauses SCK while the DMA's one-byte buffer is full.
  * Flash commands are sent as ordinary transmit bytes.
* **Pad multiplexer (`pad_mux`).**
  * 32 pads, each with its own 4-bit select field: 0 = GPIO (reset value),
    f+1 = peripheral function f. Any function can go to any pad; unused codes
    leave the pad undriven.
  * The fields are packed eight per register: pad p is at offset 4·(p/8),
    bits 4·(p%8) and up.
  * Functions: 0 UART TX, 1 UART RX, 2 QSPI SCK, 3 QSPI CSn, 4–7 QSPI data
    0–3, 8 error output. An output function may drive several pads at once.
  * A function input listens to the lowest-numbered pad given to it. With no
    pad given to it, it sees its idle level (high for UART RX).
  * The GPIO block always sees every pad's level.

## Verification

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_hsiao_enc`, `tb_hsiao_dec` | Against an independent bit-by-bit model of H. The decoder gets every single-bit error, random double errors, and check-bit errors. |
| `tb_sram_bank` | Masked writes against a reference array. |
| `tb_ecc_bank` | Random traffic of full-word and sub-word reads and writes against a reference memory, with planted single and double errors. Also checks the busy cycle after a sub-word write, and the scrubber repairing words while traffic runs. |
| `tb_tcdm_interconnect` | Nine masters with random traffic to memory models. Checks every read value and the handshake. |
| `tb_odrg_unit` | Voting with a corrupted copy, the STATUS bits, the resync reset length, and the mode switches. |
| Peripherals | Register behaviour and pin-level protocols against small device models (UART line decoder, Quad-SPI device, DMA memory model with random grant stalls). |

`tb_trikarenos_soc` runs the whole SoC at its default parameters. Three
behavioural core models (`tb/core_model.sv`) stand in for the cores. They
produce the bus traffic of a 24×24 integer matrix multiplication, together
with instruction fetches, and they follow the resync protocol. The run:

1. Loads the matrices over the debug port.
2. Computes the product in lockstep. Halfway through, one core's data address
   is corrupted. The vote hides it, the cores save, reset and restore, and
   the product is still right.
3. Switches to performance mode and computes the product again with the rows
   split over three cores.
4. Switches back to lockstep.
5. Plants single and double errors through the write-disable masks, and
   checks correction, detection, the counters, `err_o`, the interrupt and a
   scrub repair. Routes the error output to a second pad.
6. Runs DMA transfers over the looped-back UART and a Quad-SPI device model.
7. Exercises GPIO and the timer.

Every mechanism is counted, and one that never happens counts as a failure.
The mechanisms are: vote mismatch, resync, arbitration stall, sub-word busy
cycle, boot ROM fetch, corrected error, uncorrectable error, scrub repair,
error output, UART byte, Quad-SPI byte in each direction, GPIO edge and timer
tick.

In this model, performance mode finishes the product about 2.7× faster than
lockstep. The measured figure for the chip is 2.96×. The difference comes
from the traffic model, which is not a cycle-accurate Ibex. The testbench
accepts 2.5–3.05×.

To run a testbench with Verilator 5, give it the package first, then the
testbench, then the RTL it uses:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/trikarenos_pkg.sv tb/tb_ecc_bank.sv rtl/ecc_bank.sv rtl/sram_bank.sv \
  rtl/hsiao_enc.sv rtl/hsiao_dec.sv rtl/mem_scrubber.sv --top-module tb_ecc_bank
./obj_dir/Vtb_ecc_bank
```

For the SoC, list all of `rtl/*.sv` plus `tb/core_model.sv`. The
full-size run takes well under a minute.

## Departures from the original chip, and how far to trust this RTL

* **Not included:** the Ibex cores, the JTAG debug unit and its TAP, the
  boot ROM's code, the per-core scan chains, and the I/O pads.
  * The scan chains exist so that a core's state can be read out and
    replaced with a faulty one. They are a property of the netlist, not of
    the RTL.
  * A real integration connects Ibex's instruction and data interfaces to
    the `core_*` ports. That needs a small adapter, because Ibex's
    `rvalid` may come later than the next cycle.
* **Choices of this design, not taken from the original:**
  * the register maps and address map;
  * the Hsiao column selection;
  * the interconnect's arbitration;
  * the scrubber's read/write-back sequence;
  * the length of the resync reset;
  * the interrupt assignments and the pad select encoding;
  * the UART and Quad-SPI formats;
  * the DMA's byte-per-access transfers.
* **ODRG details:** the original unit is described only at the level of
  behaviour (vote, correct at once, resync through the stack, performance
  mode by register). The hardware here follows that behaviour. The
  cycle-level details of the original unit are not known.
* **Timing:** the design is written for one clock. The chip's 250 MHz target
  in 28 nm is a physical-design result that says nothing about this RTL. The
  one long combinational path to watch is the bank read: SRAM output, then
  decoder, then the interconnect's response mux.
* **Synthesis:** every module elaborates and synthesizes with Yosys, the SRAM
  arrays staying memories. The testbenches run on Verilator, a two-state
  simulator, so X propagation has not been exercised.
