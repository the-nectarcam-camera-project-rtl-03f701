# NectarCAM read-out and trigger electronics in SystemVerilog

NectarCAM is a camera for the medium-size telescopes of the Cherenkov Telescope Array. It photographs
the few-nanosecond flash of Cherenkov light from an air shower with about 1800 photomultipliers. These
are grouped into about 250 independent read-out modules of seven pixels. The central idea of its
electronics is to avoid digitising everything all the time. Each pixel's signal is written continuously
into an analogue ring buffer: the switched capacitor array (SCA) of the NECTAr chip, 1024 cells deep, at
about 1 GHz. A two-level trigger then decides within a few hundred nanoseconds whether something worth
keeping happened. Only on a camera trigger are the 16 cells around the trigger time digitised, which
takes 2 µs. They are then sent out either as raw samples or reduced on the module to a charge and an
arrival time per pixel.

This RTL is the digital side of that scheme, from the samples arriving at the chips to the packets
leaving each module, at the camera's full size. It follows the architecture described in "The NectarCAM
camera project" (Glicenstein et al., for the CTA consortium). That paper gives the structure, the sizes
and the timing budget, but almost none of the logic inside the blocks. Every rule inside a block below
(trigger conditions, packet format, register map, timing of the handshakes) is this design's own choice.
Each choice is marked as such, here and at the head of every source file.

## The blocks

```
             per pixel: high gain, low gain, trigger channel (digitised samples, 1 per ns)
                 |                 |                     |
      +----------v-----------------v---------+   +-------v------+
      | nectar_chip x7 (SCA 1024 cells, ADC) |   |  l0_trigger  |--- l0 ---+
      +------------------+-------------------+   +--------------+          |
                         | cells                                          |
      +------------------v-------------------+   +--------------+   +-----v------+
      |         sync_fifo x7                 |   | slow_control |   | l1_trigger |  (backplane,
      +------------------+-------------------+   +------+-------+   +-----+------+   one per camera)
                         |                              | cfg             |
      +------------------v------------------------------v--------+        |
      | fe_fpga: event counter, time stamp, read-out control,    |<-- L1 accept
      |          feature_extract (charge, time) x2, packet out   |<-- time stamp -- timestamp_counter <-- 0.1 pps
      +------------------+---------------------------------------+
                         | 16-bit word stream to the network switches
                   nectar_module  (x NMOD = 250 in nectarcam_top)
```

| file | role |
|---|---|
| `nectar_pkg.sv` | sizes, `out_mode_e`, `gain_pair_t`, `module_cfg_t` |
| `nectar_chip.sv` | one NECTAr chip: ring buffer of {HG, LG} samples, windowed read-out with conversion dead time |
| `sync_fifo.sv` | FIFO between each chip and the FPGA |
| `l0_trigger.sv` | module trigger: N of 7 trigger channels over threshold |
| `l1_trigger.sv` | camera trigger: M modules with an L0 inside a coincidence gate |
| `feature_extract.sv` | pedestal-subtracted charge and peak position over the window |
| `timestamp_counter.sv` | nanoseconds since the last synchronisation pulse, plus a pulse count |
| `slow_control.sv` | configuration and status registers of a module |
| `fe_fpga.sv` | the module's event sequencer and packet builder |
| `nectar_module.sv` | one 7-pixel module |
| `nectarcam_top.sv` | the camera: NMOD modules, the L1 trigger, the time base |

Everything runs on one 1 GHz clock, so one cycle is one nanosecond. The paper's SCA runs between
500 MHz and 3.2 GHz. A real front-end FPGA would run its logic on a slower clock behind a clock-domain
crossing at the chip interface; this model leaves that crossing out.

## Life of an event, cycle by cycle

This part is the hardest to get right, because the trigger decision comes after the light. The read-out
therefore has to reach back into the buffer. Take a photon pulse whose first sample enters the chips at
clock edge T:

| edge | what happens |
|---|---|
| T | the sample is written into SCA cell `wr_ptr` of each chip; `l0_trigger` compares each trigger channel with the threshold |
| T+1 | pixel count ≥ multiplicity, so `l0_o` rises (two edges after the sample) |
| T+2 | `l1_trigger` opens this module's coincidence gate (GATE = 8 cycles) |
| T+3 | open gates counted |
| T+4 | count ≥ `l1_mult` (and it was below on the previous cycle), so `l1_accept_o` pulses |
| E = T+5 | each idle module takes the accept: event counter +1, time stamp latched, `rd_req` |
| E+1 | the chips stop writing; window start = `wr_ptr − lookback` |
| E+1+125·(k+1) | cell k of the window leaves each chip into its FIFO |
| E+1+2000 | last cell out; the chips resume sampling; the FPGA starts the packet |

The sample taken at the accept edge E is the newest one in the buffer. With the default look-back of 16
cells, the window therefore holds the samples of edges E−15 … E. The pulse that caused the trigger sits in
cell 10 (later for modules whose light arrives later), with the ten nanoseconds before it in the window too. Increasing `LOOKBACK` moves the
window back in time. It can reach 1023 cells, far beyond the 400 ns that the camera trigger may take. A
look-back below 16 is raised to 16, so a window never reaches cells that have not been written.

From the accept to the end of the chip read-out the module is dead: sampling is stopped. A second L1
accept in that time, or while the packet is still leaving, is dropped and counted in the `DROPPED`
register. The chips convert one cell every 125 cycles, so 16 cells take 2000 ns. That is the paper's
2 µs dead time for a 16-cell read-out. The conversion order and its constant rate are this design's
choices.

## The two triggers

**L0 (per module).** Each of the 7 trigger channels is compared with one common threshold (`L0_THR`).
L0 is high while at least `L0_MULT` pixels are over it. The module also reports how many pixels are
over the threshold (`npix_o`, the "L1 data" of the module). The top level does not use it.

**L1 (camera).** Every L0 edge (re)starts an 8-cycle gate for its module. L1 fires once when the number
of open gates reaches `l1_mult_i`, and it must fall below that number before L1 can fire again. The
paper allows either an analogue or a digital implementation and points to schemes that trigger
different pixels at different times. Those schemes are not described, so this design has a single
camera-wide majority with no sectors or neighbour logic.

## What a module sends

Each module has its own valid/ready stream of 16-bit words; `out_last_o` marks the last word. Every
packet starts with four header words:

```
word 0  {mode, event_count[14:0]}
word 1  ts[47:32]       ts = {sync pulses since reset [13:0], ns since last pulse [33:0]}
word 2  ts[31:16]
word 3  ts[15:0]
```

* **Charge mode** (`CTRL[1] = 0`). Three words per pixel: HG charge, LG charge and arrival time.
  Charge = Σ samples − 16 × pedestal, as a signed number saturated to 16 bits. Arrival time is the
  index (0–15) of the first largest HG sample. Packet: 4 + 7 × 3 = 25 words = 400 bits.
* **Full mode** (`CTRL[1] = 1`). Each pixel's 16 cells, each as an HG word and then an LG word:
  `{gain (0 = HG), pixel[2:0], code[11:0]}`. Packet: 4 + 7 × 16 × 2 = 228 words = 3648 bits.

At the typical single-telescope trigger rate of 5 kHz, charge mode gives 400 bit × 5 kHz = 2.0 Mbit/s
per module. That is exactly the rate the paper quotes for charge and time. Full mode gives 18 Mbit/s,
while the paper quotes about 40 Mbit/s for "all the samples in the region of interest", presumably with
a longer window and framing overhead that it does not detail. One event keeps a module busy for 2160 ns
in charge mode (2000 ns of conversion, then the packet) and 2230 ns in full mode. That is two orders of
magnitude more capacity than 5 kHz needs.

## Registers (per module, 3-bit address, 16-bit data)

| addr | name | bits | reset |
|---|---|---|---|
| 0 | CTRL | [0] L0 enable, [1] mode (1 = full samples) | 1 (charge mode) |
| 1 | L0_THR | [11:0] | 400 |
| 2 | L0_MULT | [2:0], 0 disables L0 | 2 |
| 3 | LOOKBACK | [9:0] cells | 16 |
| 4 | PED_HG | [11:0] | 0 |
| 5 | PED_LG | [11:0] | 0 |
| 6 | EVT_CNT | read only, low 16 bits | |
| 7 | DROPPED | read only, low 16 bits | |

At the top level, `sc_sel_i` picks the module that is read or written. A write with `sc_bcast_i` set
goes to every module. The camera trigger's settings are the plain inputs `l1_enable_i` and
`l1_mult_i`. The paper drives these settings through SPI links from the FPGA; those links are not
modelled.

## Time base

`timestamp_counter` sits once on the backplane and feeds every module. It counts nanoseconds and is
reset by the synchronisation pulse, which the clock distribution sends every 10 s (0.1 pulse per
second). It also counts the pulses, so the time stamp is {pulses, ns since pulse}, 14 + 34 bits. If a
period runs past 10 s, `pps_missed_o` is raised until the next pulse. The resolution is the 1 ns clock;
the paper asks for about 2 ns accuracy.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| NMOD | 250 | paper: about 250 modules |
| NPIX | 7 | paper: 7 pixels per module |
| DEPTH | 1024 | paper: SCA depth |
| WIN | 16 | paper: 16-cell read-out (16–20 ns around the trigger) |
| CONV_CYCLES | 125 | from the paper's 2 µs for 16 cells, at 1 ns per cycle |
| W | 12 | own choice (the chip has 11.3 bits of dynamic range) |
| GATE | 8 | own choice: L1 coincidence gate in ns |
| timestamp PERIOD | 10¹⁰ | paper: 0.1 pps |

Every default is the camera's own size. A full camera holds 250 × 7 × 2 × 1024 × 12 bits, about
43 Mbit, of sample memory in `mem` arrays.

## What is not here

The analogue parts and the parts the paper takes from elsewhere are not modelled: the photomultipliers
with their high-voltage bases and preamplifiers, the ACTA amplifier, and the analogue storage and the
ADC of the NECTAr chip. The chip model stores digital codes and represents conversion only by its
duration. Also absent are the "glue logic" of the front-end board (named, never described), the
Ethernet MAC/PHY, the network switches, the camera server with its array-trigger coincidence, the clock
distribution board, and the monitoring, safety and cooling systems. The module streams, the pulse input
and the sample inputs are the places where those parts would connect.

Two smaller gaps. First, the paper's trigger diagram also draws a link from the backplane's
synchronisation to each module's event counter, without saying what it carries. Here the event counters
simply count from reset. Second, the SPI links that configure the trigger boards and the high voltage are
replaced by the register bus described above.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints `TB_RESULT checks=N failures=M` and
stops itself after a fixed number of cycles if something hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/nectar_pkg.sv tb/tb_nectar_module.sv \
          --top-module tb_nectar_module -Mdir obj && obj/Vtb_nectar_module
```

Substitute any testbench name. Only `nectar_pkg.sv` has to be listed; `-y rtl` finds the rest.

| testbench | what it shows |
|---|---|
| `tb_nectar_chip` | window contents after the buffer has wrapped; look-back clamp; each cell at (k+1)·125 cycles; exactly 2000 cycles dead; a request while busy ignored |
| `tb_sync_fifo` | random traffic against a queue model, full and empty flags |
| `tb_l0_trigger`, `tb_l1_trigger` | trigger decisions against reference models, with their latencies |
| `tb_feature_extract` | charge and time against a reference, including both saturations |
| `tb_timestamp_counter` | stamps and the missed-pulse flag (short period) |
| `tb_slow_control` | reset values, every register, read-only counters |
| `tb_fe_fpga` | packets in both modes under back-pressure; drops while busy |
| `tb_nectar_module` | one module from pulses to packets; L0 timing, dead time, drop counter |
| `tb_nectarcam_top` | the camera with 7 modules (the first demonstrator's size): accepted and rejected showers, drops during dead time, a mode switch by broadcast write, a sync pulse, link stalls; each module's packet checked word for word |
| `tb_module_rate` | one module fed L1 accepts at 5 kHz in both modes: measures 400 and 3648 bits per event, 2.000 and 18.24 Mbit/s, and the busy time per event; then a burst of accepts 1 µs apart, of which one in three is taken |
| `tb_nectarcam_full` | the same test with every parameter at its default (250 modules); it takes about three minutes to build and seconds to run |
