# Readout logic of a silicon-strip tracker readout board (TRB)

A space-borne silicon-strip tracker reads out 73,728 strips on eight identical readout boards.
Each board serves 9216 strips: 24 front-end hybrids, each with two groups of three cascaded
64-channel VA140 preamplifier/shaper chips, and each group is digitised by one 12-bit serial ADC
(AD7476). That is 48 ADCs per board, each reading 192 strips one after another. The downlink
cannot carry raw data at the 50 Hz mean trigger rate: a raw event is 18 KB per board, and the
data handling unit (PDHU) accepts at most 2000 bytes per board and trigger. The board logic
therefore has to:

* sample and hold all VA140 chips on a trigger and clock the 192 strips through all 48 ADCs in
  parallel;
* reduce the data on board: pedestal subtraction, common-noise subtraction per VA140 chip,
  removal of known bad strips, and cluster finding against a per-strip threshold;
* buffer the result in an external SRAM and send it on a serial LVDS link while the next
  trigger is already being taken;
* take commands and answer house-keeping polls on an RS422 UART, keep the per-strip thresholds
  in an EEPROM, watch supply currents for single-event latch-up (SEL) and cycle the affected
  supplies, switch the detector bias supplies, and drive the charge-injection calibration;
* keep all of this working under radiation: every external bus has a backup, the configuration
  registers are triple-redundant, and the data carry a CRC or a checksum.

On the real board this logic is split between a master and a slave FPGA. Each FPGA runs one copy
of the data-reduction block for its 24 ADCs. The master also drives the front end, the SRAM, the
EEPROM and the PDHU links. The slave handles house-keeping, SEL protection and the bias
supplies. Here both FPGAs are one top module, `trb_top`, with the two data-reduction blocks
instantiated side by side (`g_fpga[0]` for the master, `g_fpga[1]` for the slave).

## One trigger, step by step

All logic runs from one 20 MHz clock. Timings below are at the default sizes.

1. **Trigger** (`trigger_rx`). The trigger line is active on its falling edge. The low level
   must last 4 clocks, so shorter glitches are ignored. A trigger that arrives while `busy` is
   high is counted as lost and otherwise ignored. The main or backup line is chosen by command.
2. **Hold and readout** (`daq_driver`, `sadc_rx`).
   - HOLDB freezes the shaper outputs. A token on SHIFT_IN_B and then CKB pulses step the analog
     multiplexer of each 3-chip chain from strip 0 to strip 191.
   - For each strip, after a settling time, all 48 ADCs convert together. They share CS and a
     10 MHz SCLK; each frame is 16 bits, 4 leading zeros then 12 data bits.
   - One strip takes 54 clocks, so the readout takes about 10,400 clocks (0.52 ms).
   - In calibration mode, the calibration switch fires `HOLD_DLY` clocks before the hold.
   - `sadc_rx` deserialises the 24 lines of one FPGA. It presents the 24 samples of a strip as
     one vector.
3. **Data reduction** (`data_process`, one per FPGA). The samples are written into an event
   memory of 4608 words. After the last strip, what happens depends on the mode:
   - *raw* and *gain calibration*: all 4608 samples are sent as `{4'b0, sample}` words.
   - *pedestal update*: each sample is added to a 22-bit sum for its strip. After 1024 events,
     each pedestal becomes `sum >> 10` and the sums are cleared. Nothing is sent.
   - *data compression*: the event is processed one VA140 chip (64 strips) at a time.
     - Pass one sums `raw - pedestal` over the good strips of the chip.
     - A 23-clock restoring divider turns that sum into the common-noise mean.
     - Pass two stores `raw - pedestal - common_noise` as a signed 14-bit signal. A bad strip
       stores 0.
     - This takes about 151 clocks per chip, or about 10,900 clocks for the 72 chips of an FPGA.
       The two FPGAs work in parallel.
     - A scan then finds clusters: runs of adjacent strips of one ADC whose signal is above
       their own threshold.
     - Each cluster is sent as a header word `{2'b10, strip number[13:0]}` (the board-wide strip
       number), a length word, and one signed 16-bit word per strip.
   - A strip is **bad** when its threshold is `0xFFF`. It is left out of the common-noise mean
     and is never part of a cluster.
4. **Event buffer** (`cirbuf_ctl`). The master's words and then the slave's are written into the
   128 K x 8 SRAM, used as a ring, behind a 6-byte header:

   | byte | content |
   |---|---|
   | 0-1 | data length in bytes |
   | 2-3 | trigger number |
   | 4 | `{truncated, 5'b0, mode}` |
   | 5 | board ID |

   - In compression mode the data is cut at 1988 bytes, so the LVDS frame never exceeds 2000
     bytes, and the flag is set.
   - An event that cannot fit in the free part of the ring is dropped and counted.
   - `busy` (the dead time) covers the readout, the processing and this writing. It falls when
     the frame is complete in the SRAM.
   - A compressed event at full size has a dead time of 35,900 clocks (1.79 ms).
5. **LVDS transfer** (`lvds_tx`). Each buffered frame is sent as a FRAME strobe held high while
   the DATA line carries `EB 90`, the frame bytes, and a CRC-16/CCITT (polynomial 0x1021, start
   value 0xFFFF) over the frame bytes. Data goes one bit per clock, MSB first.
   - A 2000-byte frame takes 0.8 ms.
   - The SRAM read port has priority over the writer, so the transfer overlaps later triggers.
   - If the buffer cannot deliver a byte in time, the frame is aborted and counted as an
     underrun, and the rest of that frame is skipped.

## Working modes and commands

Commands arrive on the RS422 UART at 115200 baud. Bytes are 8 data bits, odd parity and 1 stop
bit (the divider is 174 at 20 MHz).

- Command packet: `EB 90 ID CMD ARG_H ARG_L SUM`. SUM is the 8-bit sum of ID..ARG_L.
- A packet with a wrong ID is ignored. A packet with a bad parity or checksum is counted as an
  error.

| CMD | name | argument |
|---|---|---|
| 01 | SET_MODE | 0 raw, 1 gain calibration, 2 pedestal update, 3 data compression (default after reset) |
| 02 | HV | bits {3:0} = {B1, A1, B0, A0}: main module A and spare B of groups 0 and 1 |
| 03 | SEL_THR | bits 15:12 group, bits 11:0 current threshold in ADC counts |
| 04 | THR_ADDR | strip number 0..9215 for the next THR_DATA |
| 05 | THR_DATA | 12-bit threshold; the address then increments |
| 06 | EE_STORE | write the threshold table to the EEPROM |
| 07 | EE_LOAD | reload the table from the EEPROM |
| 08 | HK_POLL | answer with the house-keeping packet |
| 09 | BUS_SEL | bit 0 trigger, bit 1 UART, bit 2 LVDS: 1 selects the backup bus |

The UART is half duplex. The board drives the transmitter of the selected bus only while it sends
a reply, `EB 90 ID 50 <50 bytes> SUM`. The 50 bytes are listed in the header of `trb_top.sv`:
- mode and bus selection;
- counters: triggers, lost triggers, dropped frames, truncated frames, command errors;
- calibration step and SEL trips per group;
- the 20 house-keeping ADC channels;
- seconds since reset, frames waiting, LVDS underruns, frames sent;
- error flags, corrected upsets, pedestal updates, clusters in the last event.

## Thresholds and the EEPROM (`eeprom_ctrl`)

The EEPROM (128 K x 8) holds the threshold table:
- 2 bytes per strip, strips 0..9215;
- then a 16-bit sum of all 18,432 table bytes.

After reset, each data-reduction block clears its memories and sets every threshold to 40. The
table is then loaded automatically: 18,434 reads, about 3.9 ms in all with the power-on clearing.
A checksum mismatch raises a flag in the house-keeping packet. The loaded values are kept either
way.

EE_STORE writes the table back one byte at a time. It waits the write-cycle time (10 ms assumed)
after each byte, so a full store takes about 3 minutes. It is meant for rare updates from the
ground.

## House-keeping, SEL protection and bias supplies

**House-keeping** (`hk_ctrl`). Once a second, two serial ADCs behind a 16-way multiplexer are
read in turn on 10 channels:
- supply currents of the eight SEL groups;
- board voltages;
- NTC temperatures.

Channels in `SLOW_MASK` are read only every 16th second.

**SEL protection** (`sel_hv_ctl`). Eight supply groups are watched: six VA140 groups (24 chips in
4 hybrids each) and the two ADC groups.
- When a group's current is above its threshold, its LDO enable drops for one second
  (`OFF_CLKS`) and then comes back.
- Each trip is counted.
- The thresholds sit in triple-redundant registers.

**Bias supplies.** Each of the two groups has a main module A, on after reset, and a cold-spare
module B. B can only be enabled while A is off.

**Calibration** (`cal_ctrl`). In gain-calibration mode a TLV5638 DAC sets the step amplitude Vm.
The injected charge is Q = 0.1 · Vm · 2 pF, so the ten charges 20..200 fC need Vm = 100..1000 mV.
With an assumed 4096 mV full scale these are codes 100..1000. The step advances every 100
events, and code 0 is written when calibration mode is left.

## Radiation tolerance

- `tmr_reg` keeps three copies of a register, outputs their majority, and rewrites all three
  with the vote every clock. A single upset therefore lasts one clock and is counted.
- TMR protects the mode, the bus selection, the bias-supply enables and the SEL thresholds.
- The LVDS frames carry a CRC-16.
- The EEPROM table carries a cumulative checksum.
- The UART uses odd parity and a packet checksum.
- In synthesis the three copies of a TMR register are logically equal, so an optimiser may merge
  them and fold the disagreement flag to 0. A flight build has to keep the copies apart, with
  keep attributes or the FPGA tool's own TMR option.
- The large data memories (event data, pedestals, thresholds, sums) are not protected. Pedestals
  are refreshed by pedestal runs and thresholds can be reloaded from the EEPROM.

## Parameters and sizes

All defaults are the full-size values.

| module | parameter | default | meaning |
|---|---|---|---|
| trb_top | N_ADC, N_STRIP | 24, 192 | ADCs per FPGA, strips per ADC |
| trb_top | PED_LOG2 | 10 | pedestal run of 1024 events |
| trb_top | UART_DIV | 174 | 20 MHz / 115200 |
| trb_top | HK_TICK, SEL_OFF | 20,000,000 | one second |
| trb_top | EE_T_WC | 200,000 | EEPROM page write time (10 ms) |
| trb_top | CAL_EV | 100 | events per calibration amplitude |
| trb_top | SRAM_AW | 17 | 128 K x 8 SRAM |
| daq_driver | SETTLE, CK_W, HOLD_DLY | 20, 2, 120 | readout timing in clocks |
| data_process | DEF_THR | 40 | power-on threshold |

Per FPGA, the data-reduction memories are 4608 words each:
- 14-bit event data;
- 12-bit pedestal;
- 12-bit threshold;
- 22-bit pedestal sum.

That is 552,960 bits per FPGA, written as plain arrays.

## How far this follows the source description

Taken from the description of the board:
- the partitioning into the blocks above;
- 24 ADCs x 192 strips per FPGA and 64-channel chips;
- the 20 MHz clock;
- the falling-edge trigger;
- 115200-baud half-duplex UART;
- the 2000-byte limit per trigger;
- the four modes;
- the 1024-event pedestal;
- the compression steps, in order;
- SEL groups cut for one second;
- main and cold-spare bias modules;
- Q = 0.1 · Vm · 2 pF with ten amplitudes from 20 to 200 fC;
- TMR, CRC, odd parity and a cumulative checksum;
- the SRAM and EEPROM parts.

This design's own choices, where the description gives no detail:
- all packet and frame formats, sync words and command codes;
- the CRC polynomial;
- the common-noise estimator (plain mean over good strips) and the cluster rule (contiguous
  strips above threshold, no seed/neighbour thresholds);
- the 0xFFF bad-strip marker;
- the readout timing;
- the EEPROM table layout;
- the house-keeping channel map;
- the SEL threshold default;
- the DAC full scale;
- the events per calibration step.

Known departures and gaps:
- Raw and calibration frames (18,438 bytes) are sent whole, although the PDHU limit is stated as
  2000 bytes per trigger. The raw-mode test in the description uses a 100 Hz periodic trigger,
  and one raw frame takes 7.4 ms on the link.
- The DS18S20 one-wire thermometers of the hybrids are not read. Their protocol and wiring are
  not given.
- Analog parts are outside the RTL: VA140, ADCs, analog conditioning, calibration pulse circuit,
  LDOs and bias modules. So are the SRAM and EEPROM chips themselves and the PDHU.
- Master and slave FPGA logic sit in one module, without the inter-FPGA link. The slave's data
  stream goes straight to the master's buffer.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Shared testbench code:
- `tb_stk_ref_pkg`: the stimulus definitions. These are a per-strip pedestal, a common-mode
  shift per chip and event, noise, a few injected clusters per event, and a strip in every 509
  that jumps between 300 and 3900 counts. It also has a reference CRC.
- `va_sadc_model`: front-end and ADC behaviour, producing those values on the serial lines.
- `sram_model`: a byte-wide memory, used for the SRAM and the EEPROM.

The references in the testbenches are computed from these definitions, not from the RTL.

- `tb_trb_top`: the whole board at 4 ADCs x 128 strips per FPGA, with short timers and a
  4 KB ring.
  - It runs a pedestal run, a raw event, a calibration run over two amplitudes, and compressed
    events. It compares every frame byte for byte with the reference.
  - It also makes each of these happen and counts it: a lost trigger, a house-keeping poll, an
    SEL trip and the one-second off time, switching a bias group to its spare, all three backup
    buses, a corrected register upset, an EEPROM reload with truncation of an oversized
    compressed event, ring overflow with dropped frames, and threshold writes stored back to the
    EEPROM.
- `tb_trb_full`: the board at full size with default parameters.
  - It covers power-on initialisation and table load, a raw event (all 9216 samples checked),
    and three compressed events checked against the reference (with zero pedestals, so they
    are cut at 2000 bytes).
  - It checks the dead time against 3 ms and polls house-keeping at 115200 baud.
  - It runs in about ten seconds with verilator.

To run one testbench:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/stk_pkg.sv tb/tb_stk_ref_pkg.sv tb/tb_trb_top.sv --top-module tb_trb_top
./obj_dir/Vtb_trb_top
```
