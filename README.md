# Readout FPGA for a two-CCD spectrograph camera

Each visible camera of the Subaru Prime Focus Spectrograph images its spectra onto
two side-by-side 2k x 4k Hamamatsu CCDs. Each CCD has four outputs. Reading them needs
three things. First, a set of CCD and CDS (correlated double sampling) clocks, timed
to tens of nanoseconds and repeated millions of times per frame. Second, a serial
readout of eight 16-bit ADCs after every pixel. Third, a buffer that holds the ~36 MB
image until the camera computer collects it. An analog front-end board turns logic-level
clocks into biased CCD clocks and digitises the video. Everything digital and
timing-critical sits in one FPGA on the back-end computer's PCIe stack. This repository
is SystemVerilog for that FPGA.

The central idea is the **waveform processor (WPU)**. It is a tiny sequencer with no
arithmetic. It steps through a program in on-chip RAM. Every instruction sets all clock
lines at once and says how long to hold them. One bit of the instruction starts an ADC
read, and loop instructions repeat a row. The host computer writes the program, so
readout, wipe, erase and binning modes are all software. The rest of the FPGA supports
the WPU. It lets the host load programs and read status over PCIe. It turns the ADC-read
bit into serial-clock bursts and deserialises the ADC data. It streams the pixels into a
DDR2-backed FIFO for the host to drain. For multi-camera work, it also shares one clock
so that up to eight cameras step in lock-step.

## Block diagram and clock domains

```
             62.5 MHz              77 MHz                       25 MHz (synchronized)
 PCIe core ─► pcie_tlp_pio ─► pio_resync ─► reg_file ──► dp_sram (128 KB) ──► wpu ──► CCD/CDS clock lines
   (ports)       ▲                            │  │          port A      port B   │
                 │                            │  └─ run / start address ─────────┤ adc_read
                 │                            └─ master ─► clk25_gen ─► 8 x 25 MHz out
                 │                                          (200 MHz)     (one wired back as clk_wpu)
                 │                                                              │
                 │      dram_fifo (64 MB ring in DDR2) ◄── storage_crc ◄── adc_deser ◄── sck_gen
                 └──────── read-ahead (16 words)   │   (77 MHz)  ▲ busy      (200 MHz)    (200 MHz)
                                                   ▼             └─ from wpu   ▲ sdata[1:0]   │ sck
                                         DDR2 memory interface (ports)         └─ ADC chains ◄┘
```

| Domain | Clock | Blocks |
|---|---|---|
| PCIe user clock | 62.5 MHz `clk_pcie` | `pcie_tlp_pio`, side A of `pio_resync`, read side of the FIFO read-ahead |
| System | 77 MHz `clk_sys` | `reg_file`, side B of `pio_resync`, port A of `dp_sram`, `storage_crc`, `dram_fifo` |
| WPU | 25 MHz `clk_wpu` | `wpu`, port B of `dp_sram` |
| Fast | 200 MHz `clk_fast` | `clk25_gen`, `sck_gen`, `adc_deser` |

`clk_wpu` is not made inside the FPGA. It is the synchronized 25 MHz clock coming in from
the LVDS cable. In the master camera, `clk25_gen` makes this clock from 200 MHz and
drives eight identical copies. One copy is looped back to the master's own `clk_wpu`
input. The others go to up to seven slave cameras over equal-length cables. Every
crossing between domains uses one of three mechanisms: a two-flop synchroniser
(`sync_2ff`), a toggle handshake (`pio_resync`) or a Gray-pointer dual-clock FIFO
(`async_fifo`). `rst_sync` releases the asynchronous reset `arst_n` separately in each
domain.

## The waveform processor

### Instruction word (32 bits, see `pfs_pkg`)

| op `[31:30]` | name | fields | time taken |
|---|---|---|---|
| `00` | WAVE | `[29]` ADC read, `[28:16]` dwell (0–8191), `[15:0]` clock-line states | (dwell+1) slots |
| `01` | LOOP | `[15:0]` count (0 is taken as 1); the body starts at the next word | 1 slot |
| `10` | ENDLOOP | closes the innermost LOOP: jump back while iterations remain | 1 slot |
| `11` | HALT | end of program; lines keep their last state | — |

A **slot** is 80 ns, which is two cycles of the 25 MHz clock. In the first cycle the
program counter goes to the RAM. In the second, the returned word is executed. The RAM
has one cycle of read latency, so this is the shortest slot the WPU can have. New line
states appear on the clock edge that ends the execute cycle. Two consecutive WAVE
instructions therefore change the lines exactly `2*(dwell+1)` clock cycles apart. The
spacing has no jitter and does not depend on what came before. LOOP, ENDLOOP and HALT
also take one slot each and leave the lines unchanged, so they can be counted in a
program's timing. Loops nest two deep (`LOOP_DEPTH`). A LOOP beyond that depth is
ignored, and its ENDLOOP then closes the enclosing loop.

The ADC read starts on the *rising edge* of bit 29. Two back-to-back WAVE words that both
have the bit set give only one read.

### A row-read program and its timing

This program reads a full camera row. It is the one the end-to-end testbench uses. The
mapping of clock-line bits to CCD/CDS signals belongs to the program, not the hardware.

```
LOOP   rows
  WAVE dwell 999  P1|TG        ┐
  WAVE dwell 999  P2|TG        ├ parallel transfer, 3000 slots = 240 us
  WAVE dwell 999  P3           ┘
  LOOP 536
    WAVE dwell 9   RG|S1|SW     reset the summing node          10 slots
    WAVE dwell 9   S2|SW|IR     reset the CDS integrator        10
    WAVE dwell 59  S2|SW|IM     integrate the pedestal (minus)  60
    WAVE dwell 9   S3           charge onto the summing node    10
    WAVE dwell 59  S3|IP        integrate the signal (plus)     60
    WAVE dwell 1   S3|CNV       start conversion                 2
    WAVE dwell 14  S1, ADC read                                 15
  ENDLOOP                                                        1   -> 168 slots = 13.44 us / pixel
ENDLOOP
WAVE dwell 49  (idle)           let the last ADC read land       50
HALT
```

One row takes 3000 + 1 + 536 x 168 + 1 = 93 050 slots = 7.444 ms. A full frame of 4240
rows takes 31.56 s. The camera's target is a 13.4 µs serial shift, a ~7.4 ms row and
~31.5 s per frame. 13.4 µs is 167.5 slots, so with 80 ns granularity the program rounds
up to 168. The program is 16 words and the RAM holds 32 768.

Other modes are just other programs. Vertical binning by N rows puts a `LOOP N` around
the three parallel-transfer words, just before the pixel loop. The two inner loops run
one after the other, so a depth of two is enough. Wipe and erase programs drop the ADC bit.
Slower readouts for debugging use longer dwells. Any extra logic-level clock the front end
needs can be given one of the 16 lines. The SCK burst rate is the one thing fixed in
hardware, at 50 MHz.

### Starting and stopping, and multi-camera lock-step

`run` (CTRL bit 0) is a level. An idle WPU that sees `run` starts at `WPU_START`. After
HALT it stays *done* until `run` is cleared. The WPU samples `run` only on its own
25 MHz clock, which gives this sequence:

1. Load the program and set `WPU_START` in every camera.
2. Set `run` in every camera. Nothing happens yet, because there is no 25 MHz clock.
3. Set `master` (CTRL bit 1) in the master camera. Its `clk25_gen` starts the clock on a
   whole period, and every WPU starts on the same edge.
4. After *done*, clear `run` **before** clearing `master`. If the clock stops first, the
   WPUs never see `run` fall.

A camera with `run` clear ignores the clock, so a subset of cameras can be armed for a
given exposure. Every camera releases its WPU-domain reset on its own 25 MHz clock. A
slave whose sync clock is missing at power-up therefore holds its WPU in reset until the
master starts the clock. On the FPGA, the configuration values of the flops cover the
time before. In simulation, flops start at random values, so the full-FPGA testbenches
put a few 25 MHz pulses on the sync input during power-on reset.

## ADC read path

`sck_gen` synchronises the ADC-read bit into the 200 MHz domain. On its rising edge
`sck_gen` emits one burst of 65 SCK pulses at 50 MHz. Each pulse is two cycles high and
two low, so a burst takes 1.3 µs and starts 3–4 fast cycles after the bit rises. The
eight ADCs form two daisy chains of four, one chain per CCD. Each chain has one serial
data line, `sdata[1:0]`. A burst has 65 pulses for 4 x 16 = 64 data bits. This design
takes the first bit as the chain's busy-indicator bit and discards it. It takes the other
64 bits MSB first, starting with the ADC nearest the FPGA. Data are sampled in the last
fast cycle of each SCK high phase, just before the ADCs change them on the falling
edge. Cable delay is not compensated. One cycle after the 64th bit, `adc_deser` presents
all eight samples (channel = chain x 4 + position) with a one-cycle `valid`.

## Image storage

**`storage_crc`** carries each set of eight samples into the 77 MHz domain through a
16-deep dual-clock FIFO. It packs each set as four words, word *k* = `{ch[2k+1], ch[2k]}`.
A *frame* is the time the WPU is busy. At the start of a frame the CRC is preset to
`0xFFFFFFFF`. Every data word then updates a CRC-32 (polynomial `0x04C11DB7`, MSB first,
not reflected). When the WPU stops and the crossing FIFO has drained, the engine appends
the inverted CRC as one trailer word and latches `FRAME_WORDS` and `FRAME_CRC`. Frame
end waits only for the crossing FIFO, so a program must idle at least about 2 µs after its
last ADC read, as the example does. `overflow` is set when a sample set arrives at a
full crossing FIFO. It is cleared when the next frame starts.

**`dram_fifo`** keeps a 2^24-word (64 MB) ring in the DDR2. It talks to the memory
controller through a minimal command port:

| signal | meaning |
|---|---|
| `mem_req_valid`, `mem_req_ready` | one single-word command per handshake |
| `mem_we`, `mem_addr[23:0]`, `mem_wdata` | write or read, word address |
| `mem_rvalid`, `mem_rdata` | read data, in request order, any latency |

When both a write and a read are waiting, they alternate. Reads feed a 16-word read-ahead
FIFO whose output side is in the PCIe domain. Reads are issued only while the words in
flight plus the words in the read-ahead stay below its depth, so read data always has
room. `level` counts all words accepted and not yet popped. A full frame (2 rows shown
above: 4288 words + 1 CRC; a full 4240-row frame: 9.09 M words = 36.4 MB) fits the
16 M-word ring.

## Host interface

The PCIe core's 32-bit TLP streams (`rx_*`, `tx_*`, with `sof`/`eof` and
`valid`/`ready`) go into **`pcie_tlp_pio`**. That block serves single-DW requests with
3-DW headers:

* MWr32 (fmt `010`, type `00000`, length 1): a PIO write.
* MRd32 (fmt `000`, type `00000`, length 1): a PIO read, or a FIFO pop, answered with a
  CplD (fmt `010`, type `01010`, byte count 4, tag, requester ID and lower address
  copied from the request).

All other TLPs are consumed and dropped without a completion. Byte enables are ignored.
There is one request at a time. A PIO access crosses to the 77 MHz register file through
**`pio_resync`** and returns after about 10 PCIe cycles.

BAR map (byte offsets; the BAR is 4 MB):

| offset | contents |
|---|---|
| `0x000000–0x01FFFF` | WPU program RAM, 32 768 words, read/write |
| `0x100000` CTRL | rw: bit 0 `run`, bit 1 `master` (drive the 25 MHz sync clock), bit 2 FIFO clear (strobe) |
| `0x100004` WPU_START | rw: first instruction address |
| `0x100008` STATUS | ro: bit 0 busy, 1 done, 2 FIFO empty, 3 overflow |
| `0x10000C` FIFO_LEVEL | ro: words in the FIFO |
| `0x100010` FRAME_WORDS | ro: data words of the last frame |
| `0x100014` FRAME_CRC | ro: CRC trailer of the last frame |
| `0x200000` and up | FIFO data window: each read pops one image word |

Read `FIFO_LEVEL`, then read that many words from the window. A word counted in the
level may still be on its way from DDR2. In that case a window read waits up to
`FIFO_WAIT` (200) PCIe cycles for it, then returns zero. A read of an empty FIFO
therefore returns zero after that wait.

## What follows the camera design and what is this implementation's own

The following come from the readout system's description:

* the split into these blocks and their clock domains (62.5, 77, 25 and 200 MHz);
* a 128 KB dual-port program RAM, a 64 MB FIFO in 128 MB of DDR2, and a PCIe host path
  through a TLP-to-PIO engine and a resynchroniser;
* instructions that set clock-line states, a dwell count, a single ADC-read bit and a row
  loop count, with 80 ns granularity;
* 65 SCK pulses at 50 MHz per read, and eight 16-bit ADCs in two serial groups of four;
* a 25 MHz sync clock from the master to itself and up to seven slaves, with execution
  starting when the clock starts.

The following are this design's own choices, because the source leaves them open:

* the instruction encoding, the 16 clock lines, the 2-deep loop stack;
* the meaning of the 65th pulse (busy indicator) and the bit order;
* the sampling point and the SCK duty cycle;
* sample packing, the CRC polynomial and the CRC trailer word;
* the frame definition, the memory command port, the read-ahead and the arbitration;
* the register map and BAR layout, the restriction to single-DW TLPs, and the
  FIFO-window wait;
* all handshakes and synchronisers.

Known departures and limits:

* The source specifies 13.4 µs per serial shift. With 80 ns slots the closest is 13.44 µs,
  so a row takes 7.444 ms instead of ~7.4 ms.
* The figure's arrows do not connect the storage engine or the FIFO to the register file.
  Here they do: the host reads level, frame word count, CRC and overflow there.
* Unsupported TLPs get no "unsupported request" completion. A host that issues a
  multi-DW read will time out.
* The next front-end revision moves to 18-bit ADCs (72 bits per chain, one LSB dropped in
  the FPGA). That is not built: the deserializer and packer assume 16-bit samples in a
  65-pulse burst.
* LVDS I/O buffers, input delay tuning and clock-domain timing constraints are not part
  of this RTL.

## Parts outside the RTL

These connect to the top level, `bee_fpga`, through its ports. None of them is modelled
in `rtl/`:

* the FPGA vendor's PCIe core;
* the DDR2 memory controller and the DDR2 chip;
* the LVDS buffers;
* the embedded PC that builds programs, assembles FITS images and talks to the
  observatory;
* the analog front end: clock switches, CDS integrators, the AD7686 ADCs, DACs, monitor
  ADCs and the microprocessor that runs them, regulators;
* the preamplifier and the CCDs.

Testbenches use behavioural models of the memory controller (`tb/ddr_model.sv`: random
back-pressure, fixed read latency, sparse storage) and of one ADC chain
(`tb/adc_chain_model.sv`).

## Files

| file | contents |
|---|---|
| `rtl/pfs_pkg.sv` | instruction encoding, PIO request struct, register map, CRC-32 step, program-building functions |
| `rtl/bee_fpga.sv` | top level |
| `rtl/wpu.sv`, `rtl/dp_sram.sv` | waveform processor, program RAM |
| `rtl/clk25_gen.sv`, `rtl/sck_gen.sv`, `rtl/adc_deser.sv` | 200 MHz clocking and ADC logic |
| `rtl/storage_crc.sv`, `rtl/dram_fifo.sv` | image path |
| `rtl/pcie_tlp_pio.sv`, `rtl/pio_resync.sv`, `rtl/reg_file.sv` | host path |
| `rtl/async_fifo.sv`, `rtl/sync_2ff.sv`, `rtl/rst_sync.sv` | clock-domain-crossing helpers |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_bee_fpga.sv` | end-to-end test at default parameters |
| `tb/tb_multi_camera.sv`, `tb/camera_rig.sv` | eight cameras on one sync clock |
| `tb/ddr_model.sv`, `tb/adc_chain_model.sv` | behavioural memory-interface and ADC-chain models |

## Simulating

Every testbench is self-checking. Each prints one line,
`TB_RESULT checks=N failures=M`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/pfs_pkg.sv tb/tb_bee_fpga.sv --top-module tb_bee_fpga -o sim
obj_dir/sim
```

Replace `tb_bee_fpga` with any other `tb_*` name to run that testbench.

`tb_bee_fpga` runs the whole FPGA at its default parameters. It loads the 16-word
row-read program over PCIe and reads it back. It starts the master clock and reads two
full rows (1072 pixel reads, 15 ms of simulated time, a few seconds of wall time). While
the frame is taken, it drains the FIFO through the PCIe window. It checks:

* every image word against the ADC model;
* the CRC trailer and the `FRAME_CRC` register;
* the pixel period (13.44 µs) and the row period (7.444 ms);
* that every SCK burst has 65 pulses at 50 MHz;
* the stop sequence and FIFO clear.

It also counts DDR2 back-pressure, reads that ran while writes were waiting, an
empty-window read and the master clock's start and stop. A full 4240-row frame would take
hours to simulate.

`tb_multi_camera` builds eight complete cameras, each a `camera_rig` with its own host,
memory and ADC models. It wires the master's eight sync outputs to the eight
synchronized 25 MHz inputs and runs a short two-row program in all of them. It checks:

* every clock-line change happens in all eight cameras at the same instant with the same
  value;
* every camera stores the same, correct frame;
* no slave drives a sync clock;
* cameras left unarmed stay idle when the master starts again.

The block testbenches cover:

* the WPU against a reference interpreter, including nested loops, the depth limit and a binned row read;
* the full 128 KB RAM through both ports;
* random PIO traffic across the resynchroniser;
* TLP decode, including dropped TLPs and the FIFO window;
* clock period, duty cycle and clean start/stop of the 25 MHz generator;
* SCK burst shape;
* deserialisation against two ADC chain models;
* CRC and packing under back-pressure, plus overflow;
* the DDR2 FIFO with a 256-word ring, to reach wrap-around and full.
