# Back-end DAQ firmware for the HGCAL silicon beam-test prototype

This is the firmware that reads out a prototype of the CMS High Granularity Calorimeter. The prototype has about 12,000 silicon cells on 94 sensor modules. It reads **one triggered event at a time, in lock step across the whole system**.

- A single *sync board* takes the external particle trigger and puts it on the common 40 MHz clock.
- It broadcasts the trigger to up to 15 *readout boards*.
- It then refuses further triggers until every readout board reports `ReadoutDone`.

Each readout board does the following:

1. It forwards the trigger to its eight modules.
2. It pulls 30784 bytes out of each module.
3. It merges the eight byte streams into 30784 32-bit words.
4. It holds the words until the DAQ server has read them over IPbus.

No event is ever buffered behind another. The trigger gate is the only back-pressure in the system. That is why the buffers can be sized to exactly one event. It is also why the sequencing of the handshakes matters more than the datapath. The sequencing is the hardest part, so it takes the most room below.

The RTL is IEEE 1800-2017 SystemVerilog and runs on a single clock. The top module `hgcal_daq` contains the sync board, `N_RDOUT` readout boards, and the readout FPGA of every module slot. These parts are *not* logic in this design and appear as ports:

- the front-end ASICs,
- the Raspberry Pi on each board,
- the IPbus core with its Ethernet link.

---

## 1. The event cycle

The sync board and each readout board are driven by two agents. The board's Raspberry Pi acts over SPI. The DAQ server acts over IPbus. The firmware has no sequencer of its own beyond the sync board's two-state gate. Each step is started by one of three things: a trigger edge, a Pi command, or a server read.

```
 ext_trig ─┐
           ▼
 [sync] WAIT ──trig──► BUSY ─────────────────────────────────────── all enabled boards done ──► WAIT
           │  trig_o (1 clk) to all boards, trig_copy_o out    waiting_o low during BUSY
           ▼
 [readout board]
   CTL oRM : trigger counter++, 64-bit time-stamp latched, data-ready cleared
   DATA oRM: trigger pulse → module FPGA → 4 ASICs (they freeze and digitise)
           │
   Pi polls "trigger pending" (DATA oRM status 1), writes READOUT (DATA oRM control 1 bit 0)
           ▼
   module FPGA sends 30784 bytes, 1 per clock ──► DATA oRM byte FIFOs ──► pair FIFO
           ──► CTL DataFIFO (one per DATA oRM), 16-bit words, 1 per clock
           │
   CTL: every enabled stream holds 30784 words ⇒ STATUS.data_ready = 1
           ▼
   server reads IPbus FIFO register 30784 times (each read pops all four CTL FIFOs)
           │
   Pi writes ASIC RESET (DATA oRMs) and START-ACQ (CTL control 1 bit 0)
           ▼
   CTL: (all 30784 words read) AND (start-acq seen), in either order ⇒ ReadoutDone = 1
           ▼
 [sync] ReadoutDone from every board in its mask ⇒ back to WAIT
        while waiting_o is high every CTL DataFIFO is held flushed (FIFO_Reset)
```

Points that are easy to get wrong:

- **Exactly one trigger pulse per cycle.** The sync board's output flip-flop is gated three ways:
  - the Trigger Disable state (BUSY);
  - the flip-flop's own output, since the cycle just launched has not yet reached the FSM;
  - an `in_flight` flag, set by `trig_o` and cleared when the internal trigger flip-flop's pulse arrives, which covers the clocks in between.
  
  Without these gates, two external edges a few clocks apart could both get through before BUSY is reached. The testbenches fire extra triggers during readout and check that they are dropped.
- **ReadoutDone has two conditions, in either order.** The server must have read every word. The Pi must also have re-armed the modules and sent "start acquisition". The two can come in any order, and the flag goes up when both have happened. It stays up until the next trigger, so a sync board that samples late still sees it.
- **The sync board's done flags are sticky.** `all_done_logic` records a rising `ReadoutDone` per board and clears all flags on the trigger. A board that finishes early does not need to hold its line until the last board is done. Ports whose bit is clear in the mask are treated as always done. The mask is SPI control 1 of the sync board. It must clear the ports that have no board, because those read 0 at the top level.
- **FIFO_Reset.** While `WaitingForTrigger` is high, the four CTL DataFIFOs are held empty, and `data_ready` is forced low. Whatever was not read in the previous cycle therefore cannot leak into the next one. This also means the DATA oRMs must not send before the trigger. They cannot: the module FPGA sends only on a readout request, and the Pi issues that only after seeing the trigger.
- **Disabled modules and streams.** A module slot with its bit cleared in the DATA oRM's control 0 has its byte FIFO held empty. It contributes `8'h00` to the pair word, so a DATA oRM with one module still produces whole words. In the CTL oRM, the 8-bit module mask decides two things:
  - which nibbles of the 32-bit word are forced to zero;
  - which streams must be full before `data_ready`. A stream whose two modules are both off is not popped.
  
  A read of the FIFO register while an enabled stream is empty returns `ipb_err` and pops nothing.
- **Time-stamp.** The CTL oRM counts 40 MHz clocks from its last "configuration" pulse (CTL control 1 bit 1) and latches the count at each trigger. The trigger reaches every board on the same clock. After a common configuration, all boards therefore report the same value. Boards configured at different times differ by a constant offset. Their event-to-event differences always agree.

---

## 2. Data formats and bit order

### Front-end ASIC (Skiroc2-CMS) event

Each ASIC produces 1924 sixteen-bit words per event. There are 64 channels. Each channel has 13 analogue memory cells in two gains, plus two ToA and two ToT values, which gives 64 × 30 = 1920 words. Four trailer words bring the total to 1924. The ASIC shifts the words out most significant bit first, so one event is 30784 bits. The package `hgc_pkg` provides helper functions for the individual word types. They are used by the testbench model. The firmware itself never interprets ASIC data: it only moves bits.

| word | layout (MSB … LSB) |
|------|--------------------|
| ADC data | `100` · hit · 12-bit value |
| roll mask | `000` · 13-bit roll position |
| time-stamp MSB | `00` · 14 bits |
| time-stamp LSB | `000` · 12 bits · `0` |
| chip ID | `11000000` · 8-bit ID |

### Module link byte (module FPGA → DATA oRM)

The four ASICs of a module are read in parallel, one bit each per clock. Every byte carries the header `1000` and one bit of each ASIC:

```
 byte[7:4] = 4'b1000      byte[3] = ASIC 0   byte[2] = ASIC 1   byte[1] = ASIC 2   byte[0] = ASIC 3
```

An event is 30784 bytes per module, sent at one byte per 40 MHz clock (0.77 ms). Half of every byte is header, so the useful content is 15392 bytes, or about 16 KB per module.

### DATA oRM → CTL oRM word

The DATA oRM turns bytes into 16-bit words: `{byte of module 2k, byte of module 2k+1}`. Module 2k is in the upper byte. A disabled module is `8'h00`.

### Event word read by the server (IPbus FIFO register)

The CTL oRM drops the four headers and concatenates the eight data nibbles, with module 0 first:

```
 bit 31-4i-j  =  ASIC j of module i          (i = 0..7, j = 0..3)
 word[31:28] = module 0, ASIC 0..3   …   word[3:0] = module 7, ASIC 0..3
```

There are 30784 such words per event per board. Word n holds bit n of every ASIC's serial stream. Bit n of an ASIC stream is bit 15 − (n mod 16) of that ASIC's word ⌊n/16⌋. An ASIC word is rebuilt by collecting its nibble bit from 16 consecutive event words, MSB first.

The published layouts number bit 0 at the left end of a word. This design reads that left end as the most significant bit in every format. That is the only assumption about bit order, and it is applied throughout: `hgc_pkg::hb_byte` and `hgc_pkg::ctl_word`.

---

## 3. Register maps

### SPI (Pi → every oRM)

All oRMs use the same slave, `spi_if`. It is SPI mode 0, MSB first, with 40-bit frames while `cs_n` is low:

```
 bit 39      : 1 = write, 0 = read
 bits 38..32 : address (bit 6 set = status bank, read-only)
 bits 31..0  : data (write) / data returned on MISO (read)
```

A write takes effect when `cs_n` rises after exactly 40 bits. A control write also gives a one-clock `wr_pulse_o[addr]`, which is used for the command bits below. SCLK, CS and MOSI are oversampled by the 40 MHz clock through two-flop synchronizers, so SCLK must stay below 10 MHz. The testbenches use 2.5 MHz.

| oRM | control 0 | control 1 | status 0 (addr 0x40) | status 1 (addr 0x41) |
|-----|-----------|-----------|----------------------|----------------------|
| SYNC | bit 0 = Disable (close trigger gate) | board mask for ReadoutDone | `{Done, WaitingForTrigger}` | triggers accepted |
| CTL (`cs_n[0]`) | bits 7:0 module enable | write pulse: bit 0 start-acq, bit 1 configuration (clears time-stamp and trigger counter) | trigger count | `{ReadoutDone}` |
| DATA k (`cs_n[1+k]`) | bits 1:0 module enable `{B, A}` | write pulse: bit 0 readout request, bit 1 ASIC reset | `{bytes B, bytes A}` (16 bits each, since trigger) | `{sending B, sending A, trig pending B, trig pending A}` |

On a readout board the five oRMs share SCLK and MOSI. The MISO of the selected oRM is returned.

### IPbus (server → CTL oRM)

The bus signals are the IPbus slave signals (`ipb_wbus_t` / `ipb_rbus_t` in `hgc_pkg`). The slave acknowledges a strobe on the next clock with a one-clock `ipb_ack`, so at most one word is read per two clocks. An assertion checks that the ack lasts one clock.

| addr | name | meaning |
|------|------|---------|
| 0 | STATUS | `{ReadoutDone, WaitingForTrigger, data_ready}` |
| 1 | TRIGCNT | triggers since the last configuration pulse |
| 2 / 3 | TS_LO / TS_HI | 64-bit time-stamp of the last trigger |
| 4 | FIFO | next event word; the read pops the CTL FIFOs; `ipb_err` if an enabled stream is empty |
| 5 | NREAD | event words read since the trigger |

All registers are read-only. Writes are acknowledged and ignored.

---

## 4. Hierarchy

```
hgcal_daq
├── sync_board
│   ├── global_trigger_ff        2-flop synchronizer + edge detect, gated by Trigger Disable
│   ├── spi_if                   Pi registers (Disable, mask; status)
│   ├── trigger_ff               Flip-Flop For Trigger inside the SYNC oRM
│   ├── trigger_disable_logic    WAIT/BUSY gate, WaitingForTrigger
│   └── all_done_logic           sticky per-board done flags, mask
├── readout_board  × N_RDOUT
│   ├── data_orm × 4
│   │   ├── spi_if, trigger_ff
│   │   ├── hexaboard_bridge × 2 command pulses to the module, pending/byte-count status
│   │   ├── data_fifo × 2        byte FIFO per module (DEPTH)
│   │   └── data_fifo            16-bit pair FIFO, valid/ready stream to the CTL oRM
│   └── ctl_orm
│       ├── spi_if, trigger_ff, trigger_counter
│       ├── data_fifo × 4        one per DATA oRM, flushed by WaitingForTrigger
│       └── ipbus_interface      registers, event-word builder, data_ready, ReadoutDone
└── hexaboard_fpga  × N_RDOUT × 8   module FPGA: trigger to ASICs, bit-serial read, byte packing
```

`data_fifo` is a first-word-fall-through RAM FIFO with a flush input. It has assertions against writing when full and reading when empty.

Top-level parameters and their defaults:

- `N_RDOUT = 14`: the readout boards of the last beam test.
- `N_SYNC_PORTS = 15`: the sync board's HDMI ports.
- `DEPTH = 32768`: FIFO entries, the power of two above one event.
- `EVENT_WORDS = 30784`.

At the defaults the design holds 77 Mbit of FIFO memory.

---

## 5. Timing

- Trigger latency:
  - external edge to `trig_o` at the boards: 3 clocks (2 synchronizer flops plus the gated output flop);
  - board `trig_o` to the ASIC trigger pins: 3 more clocks (oRM trigger flip-flop, bridge register, module FPGA register).
- Module transfer: the first byte arrives 2 clocks after the readout request, then one byte per clock. The byte FIFOs, pairing and CTL FIFOs all sustain one word per clock. A board's event is in the CTL FIFOs about 30784 + 10 clocks after the request, or 0.77 ms.
- Server readout: 30784 IPbus reads, at least 2 clocks each, take ≥ 1.54 ms.
- The firmware's share of one cycle is therefore about 2.3 ms. A 40 Hz trigger rate leaves 25 ms per event. The full-size testbench measures the whole cycle, from trigger to re-armed sync board, including the Pi's SPI commands at 2.5 MHz: it takes 101,131 clocks (2.5 ms). Most of the remaining time in a real run is taken by the Pi's polling and the server software, which are outside this RTL. One board's event is 123 KB. At 40 Hz that is about 5 MB/s per board, against the 12.5 MB/s of each board's 100 Mbit/s Ethernet output. The event alone takes at least 9.9 ms on that wire, so the link, not the firmware, sets the limit on the rate. For 94 modules over a 5 s spill the total is about 290 MB.

---

## 6. What follows the published system and what is chosen here

**Taken from the published description:**

- One sync board and fourteen readout boards, with a 15-port sync board.
- Five oRMs per readout board, one CTL and four DATA, with two modules per DATA oRM.
- The sync board's firmware blocks: Global Trigger Flip-Flop, Flip-Flop For Trigger, Trigger Disable Logic, All_Done Logic, SPI Interface Logic.
- The readout board's firmware blocks: Hexaboard Bridge Logic, DataFIFOs, Trigger Counter, IPbus Interface, and `FIFO_Reset` driven by WaitingForTrigger.
- The event cycle of section 1, including ReadoutDone after server read-out and Pi re-arm.
- The 64-bit clock-count time-stamp.
- The module byte format and the 32-bit event word of eight modules × four ASICs.
- The 1924-word ASIC event.

**Chosen here (the published description is silent):**

- Every register map and address, and the 40-bit SPI frame.
- The ASIC serial handshake: one bit per clock, with a read strobe.
- The pairing of two modules into 16-bit words, and zero fill for absent modules.
- The valid/ready link between oRMs.
- The sticky done flags.
- Bit order: the left end of a published word is the MSB.
- FIFO depths.
- The one-cycle IPbus ack.
- The `in_flight` trigger guard.
- The SPI chip-select scheme on the readout board.

**Not built:**

- The Veto input of the sync board, which was unused in operation.
- A separate busy line. The busy level that the sync board sends to the readout boards is carried here by WaitingForTrigger, which is low while busy. The module FPGA also receives busy, but what it does with it is not described, so the line stops at the readout board.
- The daisy-chain port between sync boards.
- Loading the MAX10 firmware.
- Setting the IPbus IP/MAC address, which belongs to the IPbus core.
- The IPbus protocol engine and Ethernet.
- Clock generation: one ideal 40 MHz clock drives everything, so the cables and the clock-distribution delays between boards are not modelled.
- Power and bias distribution.
- The analogue front end.

---

## 7. Simulation and verification

The testbenches use behavioural models of the parts that are not in the RTL:

| model | role |
|-------|------|
| `tb/skiroc2cms_model.sv` | one ASIC's serial readout. Its event content is a hash of (chip, event, word), built from the word formats above. |
| `tb/pi_spi_model.sv` | a Pi's SPI master, on several buses. |
| `tb/ipb_master_model.sv` | the server side of IPbus. |
| `tb/daq_seq.svh` | plays the Pis and the server through full event cycles. |

`tb/tb_pkg.sv` computes the expected bytes and words independently of the RTL.

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one ends with a `TB_RESULT checks=… failures=…` line and has a watchdog.

- **`tb_hgcal_daq`** runs the whole system at reduced size (3 boards, 120-word events). Its events cover:
  - missing modules (zero fill);
  - a DATA oRM with no module (stream off);
  - a trigger during readout (dropped);
  - a trigger blocked by the SPI Disable bit;
  - a FIFO read past the event (`ipb_err`);
  - time-stamp agreement between boards.
  
  It counts each of these mechanisms and fails if any never happened.
- **`tb_hgcal_daq_full`** runs the top at its default parameters: 14 boards and 94 populated modules (boards 0–9 with seven modules, 10–13 with six). It runs two complete events and checks every one of the 2 × 14 × 30784 words. The boards are handled concurrently, each by its own Pi and server thread. Each cycle must fit the 1,000,000 clocks (25 ms) of a 40 Hz trigger rate. The test takes about 15 s with verilator.

To run a testbench with plain verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hgc_pkg.sv tb/tb_pkg.sv tb/tb_hgcal_daq.sv --top-module tb_hgcal_daq
./obj_dir/Vtb_hgcal_daq +verilator+rand+reset+2
```

Replace `tb_hgcal_daq` with any other testbench name. The `+verilator+rand+reset+2` option randomises every flop that has no reset, which is how the designs are meant to be checked.

Each testbench has also been run against a copy of its module with one deliberate bug, and each copy fails. Examples of the bugs:

- a FIFO flush that leaves the read pointer;
- modules swapped within a pair;
- ReadoutDone without the Pi's start-acquisition pulse;
- an ignored board mask;
- a DataFIFO not reset by WaitingForTrigger.

**How far to trust it:**

- The trigger gate, the data path and the bit packing are checked cycle by cycle and word by word, including at full size.
- The register maps and the SPI/IPbus framing are this design's own. Software for the real boards would have to follow them, not the reverse.
- Clock-domain crossing is only present at the external trigger and SPI inputs, where two-flop synchronizers are used. Multi-board cable skew is not modelled.

---

## 8. Changing it

- **Board count:** `N_RDOUT` (≤ `N_SYNC_PORTS`, checked by an assertion at elaboration).
- **Event length:** `EVENT_WORDS` on the top, and `N_BITS` on `hexaboard_fpga`, which the top sets from `EVENT_WORDS`. The FIFO `DEPTH` must be at least `EVENT_WORDS`, because a whole event is held in each FIFO.
- **Bit order:** to change it, edit `hgc_pkg::hb_byte` and `hgc_pkg::ctl_word` and the matching reference functions in `tb/tb_pkg.sv`. All other code uses these functions.
