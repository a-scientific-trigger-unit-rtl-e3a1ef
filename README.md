# ELS: photon preprocessing logic for a real-time gamma-ray-burst trigger

A gamma-ray-burst (GRB) trigger on a satellite has to look at every photon
that hits its coded-mask camera, 80 x 80 = 6400 pixels read out over 8
serial links, and decide within seconds whether a new source has appeared.
The trigger algorithms run as software on a radiation-hardened SPARC
processor (Leon2 class, 100 MHz). That processor is too slow to touch each
photon several times. This logic does the per-photon work in hardware, so
the software only sees finished data products in its own SDRAM:

* the **raw photons**, one 32-bit word each, in one ring buffer per link;
* the **preprocessed photons**, 16 bits each ({pixel, energy band}), in
  one ring buffer for the count-rate trigger;
* four **shadowgrams**, one 80 x 80 image of per-pixel counts for each
  energy strip, for the image trigger. They are double-buffered: the logic
  fills one layer while the software analyses the other;
* 36 **photon counters**, one per (energy strip, detector zone) pair, and
  9 **word counts**, one per ring. Both are handed over every 10 ms time
  frame.

The logic sits on the processor's PCI bus. To write into SDRAM it acts as
bus master. It is configured as a bus target. Inside it everything runs on
the one PCI clock, 20 MHz in the reference setup. The RTL here implements
the firmware described by Le Provost et al. in "A Scientific Trigger Unit
for Space-Based Real-Time Gamma Ray Burst Detection, II". That description
gives the block diagram, the data products and their sizes, and the 10 ms
freeze/interrupt cycle. Link framing, field layouts, register and memory
maps and buffer depths are not given there, so they are choices made for
this RTL. The section "What is taken from the description and what is not"
lists them.

## Block structure

```
 cxg_link[0..7] ─► cxg_link_emulator ─► cxg_link_control ─┐  (x8)
                                                          ▼
                                               cxg_link_arbiter
                                                          ▼
                       interrupt_controller ──freeze──► raw_photons_buffer
                          ▲         │                     ▼
           uts_time_control      cpu_irq[1:0]       data_processing ──► raw_* stream
                          ▲                          │  (photon_classifier,
                          │                          │   ahb_master_port)
                 uts_control_status ◄──┐             ├──► photon_counters
                 (cxg_clk, top frame)  │             ├──► ram_pointers (port B)
                                       │             └──► AHB master ──┐
     ┌──► ahb_slave_access ────────────┴── registers, ram_pointers     │
     │                                     (port A), counters, wcs     │
     └──────────────── pci_ahb_bridge ◄────────────────────────────────┘
                             ▲
                             ▼
                      PCI bus (pci_*)
```

`els_fpga` is the top: `els_core` (everything above the bridge, with two
AHB-Lite ports) plus `pci_ahb_bridge`. The processor configures the
bridge and then reaches the registers with PCI memory cycles. Data
processing writes into the processor's SDRAM as PCI bus master.

## Life of a photon

1. **Link.** Each link idles low. A photon is sent as a start bit followed
   by 32 bits, MSB first, one bit per period of `cxg_clk`. `cxg_clk` is the
   PCI clock divided by `CXG_DIV` (default 2, so 10 MHz). The receiver
   samples in the PCI cycle before each rising edge of `cxg_clk`, so no
   clock-domain crossing is needed. `cxg_link_control` deserialises the
   photon into a 4-entry FIFO. Each link has a `cxg_link_emulator` in
   front of it. Normally it passes the link through. When enabled, it
   replaces the link with a programmed photon word repeated every
   `EMU_PERIOD` bit slots, so that the whole chain can run without a
   camera.
2. **Merge.** `cxg_link_arbiter` moves at most one photon per cycle from
   the link FIFOs into `raw_photons_buffer` (512 entries). It serves the
   links round-robin and tags each photon with its 3-bit link number.
3. **Classify.** `data_processing` takes the head photon, unless
   acquisition is off or the readout is frozen. `photon_classifier` then
   derives:
   * the *energy band* (0..7): how many of the 7 programmed, ascending
     thresholds the 12-bit energy reaches;
   * the *energy strips*: a 4-bit mask looked up per band, so strips may
     overlap;
   * the *zone* (0..8): a 3 x 3 grid over the detector, with two
     programmable column bounds and two row bounds. x = pixel mod 80 and
     y = pixel / 80.
4. **Route.** One photon at a time, in this order:
   * the raw word goes out on the `raw_*` stream (towards the SpaceWire
     side) and is written to the raw ring of its link;
   * {pixel, band} is written as a halfword to the photon ring. The value
     is replicated on both HWDATA halves, so either byte order works;
   * for each strip in the mask, the 32-bit shadowgram word
     `shadow_base[layer][strip] + 4*pixel` is read, incremented and written
     back. This is the read-modify-write the PCI bus has to carry;
   * the (strip, zone) counters are incremented, and the word counts of
     the two rings are incremented.

   For each ring write, the current pointer, the end and the base are
   read from the pointer RAM. The datum goes to the current pointer. The
   pointer then advances by 4 (raw) or 2 (photon) bytes, returns to the
   base when it reaches the end, and is written back.

### Throughput

With a bus that answers with no wait states, one photon costs
**15 + 9 x (number of strips)** PCI cycles: 24 to 51 cycles. At 20 MHz
that is 390 000 to 830 000 photons/s. Each wait state adds one cycle, and
a photon needs 2 + 2 x strips bus transfers. The nominal camera rate is
about 4000 photons/s. The complete board (with real PCI latency) was
measured at 214 000 photons/s at 20 MHz, which allows about 93 cycles
per photon. `tb_data_processing` checks the cycle count exactly.

Through the bridge, each SDRAM access becomes a PCI cycle: request, grant,
address phase, data phase, turnaround. The memory's DEVSEL# and TRDY#
delays and its retries come on top. Without help this cost about 96 cycles
per photon in `tb_els_fpga`, which is too slow. The bridge therefore posts
writes: the AHB write ends once its data is latched, and the PCI write
happens while data processing moves on. Only the shadowgram reads wait for
the PCI bus. With posting, `tb_els_fpga` measures 72 cycles per photon.

`tb_els_rate` runs the device through PCI at both rates for full 10 ms
frames. The PCI memory model adds 0-2 clocks of DEVSEL# delay and 0-3 of
TRDY# delay, and retries 5% of cycles. At about 4000 photons/s, data
processing is busy 1.2% of the time. At 214 000 photons/s it is busy 59%,
and the raw buffer never holds more than 12 photons. No photon is lost and
every count matches.

## The time frame: freeze, interrupt, acknowledge

This handshake is the most important thing to understand when writing
the driver. Every time frame (`FRAME_CYC` cycles; reset value 200 000,
which is 10 ms at 20 MHz):

1. `uts_time_control` pulses `frame_tick`. `interrupt_controller` raises
   `freeze`, and the raw photons buffer stops giving out photons. The
   links keep filling it.
2. The photon in flight, if any, finishes all its bus transfers. Only
   then (`data_processing.idle`) is **interrupt 0** raised, so the
   counters, word counts and ring pointers are stable while the CPU reads
   them.
3. The interrupt routine reads the 36 counters and 9 word counts. These
   are the counts of this frame only: they were cleared at the previous
   acknowledge. It can also read the ring pointers.
4. It writes 1 to bit 0 of `IRQ_ACK`. This clears the counters and word
   counts, drops interrupt 0 and releases the freeze. Processing resumes
   with the photons that queued up meanwhile.

Every `SWAP_FRAMES` frames (default 2048, which is 20.48 s) the same frame
also raises **interrupt 1**. The routine then toggles the `layer` bit of
`CTRL`, so that later photons fill the other shadowgram layer. The image
trigger can then analyse the layer just completed. It acknowledges with
`IRQ_ACK` bit 1. A frame tick that arrives while interrupt 0 is still
unacknowledged sets the `overrun` status bit (cleared by `IRQ_ACK`
bit 2). The buffer keeps 512 photons: 128 ms of input at the nominal
rate, but only 2.4 ms at 214 000 photons/s. So the interrupt routine must
be short if the rate is high. `cxg_top_frame` is a pulse one CXG clock
long at every frame, for the camera.

## Programming model

PCI configuration first. The bridge answers type-0 configuration cycles
when IDSEL is high. Its header has the ID word at 0x00. At 0x04 is the
command word: bit 1 enables memory space and bit 2 enables bus mastering.
At 0x10 is BAR0, a 1 KB memory window; writing all ones and reading back
gives 0xFFFFFC00. All registers below sit at BAR0 + address. Every PCI
access to the FPGA has a single data phase: the bridge disconnects after
one word.

Inside the window, the AHB slave decodes byte address bits [9:8] as the region and [7:2] as
the word. Writes take no wait state; reads take one.

| region | contents |
|---|---|
| 0 | control/status registers |
| 1 | pointer RAM, 64 words |
| 2 | photon counters, word 9*strip + zone (read only) |
| 3 | word counts, words 0-7 raw rings, 8 photon ring (read only) |

Registers (word index):

| # | name | fields |
|---|---|---|
| 0 | CTRL | [0] acquisition, [1] shadowgram layer being filled, [15:8] link enable, [23:16] emulator enable |
| 1 | STATUS (ro) | [0] frozen/interrupt 0 pending, [2:1] pending interrupts, [3] overrun, [4] raw buffer overflow, [5] AHB error seen, [15:8] link FIFO overflow |
| 2 | IRQ_ACK | write-one pulses: [0] frame, [1] swap, [2] clear overrun, [3] clear overflow flags |
| 3 | IRQ_MASK | [1:0], reset 11 |
| 4-7 | THR | band thresholds 1..7, two 12-bit fields per word at [11:0] and [27:16]; reset 512, 1024, ..., 3584 |
| 8 | STRIP_MAP | 4 bits per band, band b at [4b+3:4b] |
| 9, 10 | ZONE_X, ZONE_Y | [6:0] first bound, [14:8] second bound; reset 27, 54 |
| 11 | FRAME_CYC | cycles per time frame |
| 12 | SWAP_FRAMES | frames per shadowgram swap |
| 13 | FRAME_COUNT (ro) | frames since acquisition started |
| 14, 15 | EMU_WORD, EMU_PERIOD | emulator photon and spacing in bit slots |

Pointer RAM (byte addresses in SDRAM): words 0-7 are the raw ring bases,
8-15 the raw ring ends (exclusive), 16-23 the raw ring current pointers,
24/25/26 the photon ring base/end/current, and 32 + 4*layer + strip the
shadowgram bases. Load it before setting `CTRL[0]`.

Raw photon layout (32 bits): [31:19] pixel = 80*y + x, [18:7] energy,
[6:0] time stamp (carried through unchanged). Preprocessed photon
(16 bits): [15:3] pixel, [2:0] band.

## What is taken from the description and what is not

Taken from it:
* the block structure (8 link emulators and link controls, arbiter, raw
  photons buffer, data processing/AHB master, RAM pointers, 36 x 32-bit
  photon counters, interrupt controller with two CPU interrupt lines, time
  control, control & status with CXG clock and top-frame outputs, AHB
  slave, PCI/AHB bridge);
* 8 links, 8 bands, 4 strips, 9 zones, 80 x 80 pixels;
* 32-bit raw photons in one ring per link, and 16-bit {pixel, band}
  photons in one ring;
* one shadowgram per strip, double-buffered in SDRAM, updated by
  read-modify-write, with the layer switched by the interrupt routine;
* word counts of the data written since the previous interrupt;
* the freeze / interrupt / unfreeze cycle every 10 ms;
* a design fully synchronous to the PCI clock.

Departures and choices:
* **Swap period.** The description gives it both as "20480 time frames of
  10 ms" (204.8 s) and as 20.48 s, which is also the image trigger's
  step. The default follows 20.48 s (2048 frames). It is a register
  either way.
* **Own choices.** All of these are this design's own: the link framing;
  the raw-word field layout; how band, strip and zone are computed
  (thresholds, mask, 3 x 3 grid); the register and pointer-RAM maps; the
  meaning of interrupt line 1 (swap period); clearing counters on
  acknowledge; waiting for the photon in flight before interrupting; and
  the buffer depths (512 and 4).
* **CXG clock and top frame.** The camera clock ratio and the top-frame
  waveform are not specified; the ones used here are guesses.
* **Buffers.** The description speaks of raw-photon buffers in the plural.
  Its diagram shows one buffer after the arbiter, and that is what is
  built.
* **PCI/AHB bridge.** The description only names it. The core here is a
  minimal PCI 2.x design of this RTL's own. It is 32 bits wide and uses
  one data phase per cycle and fast DEVSEL#. It has a small configuration
  header and posts its master writes. It generates PAR but does not check
  it. It has no PERR#/SERR#, bursts, LOCK# or byte-selective target
  writes. A posted write that ends in a master abort is dropped. PCI and
  logic share one clock.
* **Not included.** The processor, the SpaceWire FPGA and the memories
  are not here. The AHB used inside is a subset: single transfers only,
  with OKAY/ERROR responses.

## Files

`rtl/`: `els_pkg` (types, maps), `els_fpga` (top), `els_core`,
`pci_ahb_bridge`, one file per block above, and the helpers `sync_fifo`
and `ahb_master_port`. `tb/`: one self-checking testbench per module
(`tb_<module>`) and `tb_els_rate`, plus two models:
* `pci_sys_model`: the PCI bus. It contains the host master, an SDRAM
  target with random latency and retries, and the arbiter. It also checks
  for bus contention and checks parity.
* `ahb_mem_model`: an AHB memory with random wait states, for the
  core-level tests.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`, and it has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/els_pkg.sv tb/tb_els_fpga.sv --top-module tb_els_fpga
./obj_dir/Vtb_els_fpga
```

`tb_els_fpga` runs the top at its default parameters, end to end, in
about ten seconds, with the testbench acting through the PCI pins only.
`tb_els_core` is the same scenario at AHB level against `els_core`. They
cover:
* 8 links carrying about 5400 random photons, with link contention;
* a first time frame at the full 200 000 cycles, with its timing
  checked, then shortened frames;
* per-frame checks of all counters and word counts in the interrupt
  routine;
* photons queued during the freeze;
* four shadowgram swaps;
* a period in emulator mode;
* a deliberately late acknowledge, which must flag an overrun;
* SDRAM wait states (core) or PCI target retries, with no bus contention
  and correct parity (device).

At the end it compares every raw ring (one of them wraps), the photon
ring, the ring pointers and both shadowgram layers with a reference model
built from the injected photons. It counts how often each of these
mechanisms occurred, and fails if any never did. The unit testbenches
check their blocks against independent models, for example:
* `tb_data_processing`: ring wrap, read-modify-write and exact cycle
  counts;
* `tb_photon_classifier`: 2000 random photons and random settings;
* `tb_uts_time_control`: 10 ms frames of 200 000 cycles;
* `tb_pci_ahb_bridge`: configuration header, address decoding, master
  abort, and random host and FPGA traffic at the same time, against
  reference memories.
