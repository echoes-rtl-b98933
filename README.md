# Echoes: FFT accelerator, shared L2 and TDM I2S interface in SystemVerilog

Echoes is a microcontroller-class SoC for acquiring and processing sound
from microphone arrays in the frequency domain. Two pieces of hardware
carry the idea:

- **A fixed-point FFT accelerator.** It works directly in the
  processor's shared L2 memory. It handles complex samples of 64, 32 or
  16 bits (C64, C32, C16) up to 512, 1024 or 2048 points. Narrower
  types run 2× or 4× more butterflies per cycle.
- **A full-duplex I2S peripheral.** Besides standard stereo I2S, it speaks
  time-division-multiplexed (TDM) framing in two forms: TDM I2S and the
  "DSP mode". This lets one pair of data pins serve up to 16 stereo
  devices.

This repository gives synthesizable RTL for those two blocks and for the
memory system that joins them: the word-interleaved 256 KiB L2, the
64 KiB private memory and the single-cycle interconnect. The
general-purpose parts of the chip are reached through top-level ports: the
RISC-V core, the I/O DMA, the other peripherals, the clock generators and
the pads.

Everything runs on one clock. Every file opens with a comment that explains
the block, its interface and its timing.

## Memory system

| region | base | size | organisation |
|---|---|---|---|
| private memory | `0x1C00_0000` | 64 KiB | two 32 KiB banks, bank = upper/lower half |
| L2 | `0x1C01_0000` | 256 KiB | 16 banks of 4096 words, bank = word address mod 16 |

All masters use the same simple handshake (`tcdm_req_t` / `tcdm_rsp_t` in
`echoes_pkg`):

- A master raises `req` with `we`, `be`, `addr` and `wdata`, and holds them
  until `gnt`.
- Exactly one cycle after the grant, `rvalid` comes with `rdata`, for reads
  and writes alike.

`tcdm_xbar` decodes each request to one bank. Every bank has its own
round-robin arbiter, so a bank serves one master per cycle. A waiting master
is served within `NM-1` cycles. Addresses outside both regions are granted
at once and read as zero. An assertion checks that masters keep their
request stable until it is granted.

The top (`echoes_top`) connects 12 masters:

- ports 0–3 are the accelerator's read ports;
- ports 4–7 are its write ports;
- ports 8–11 (`ext_req_i`) are for the core's instruction and data ports and
  the DMA.

A single APB slave port configures both accelerators: `paddr[8] = 0` selects
the FFT registers and `paddr[8] = 1` the I2S registers.

## FFT accelerator (`fft_hwpe`)

### Programming

| offset | register | meaning |
|---|---|---|
| 0x00 | CTRL | write bit 0 = 1 to start |
| 0x04 | STATUS | bit 0 busy, bit 1 done, bit 2 error (size/type not supported) |
| 0x08 | ADDR | byte address of the input, 16-byte aligned |
| 0x0C | LOG2N | log2 of the number of points |
| 0x10 | DTYPE | 0 = C64, 1 = C32, 2 = C16 |
| 0x14 | RESULT | byte address where the transform ends up |

To run a transform:

1. Store the N input samples at ADDR.
2. Keep the N sample slots right after them free as scratch space.
3. Program LOG2N and DTYPE, then write CTRL.
4. Wait for `fft_evt_o`, a one-cycle pulse.
5. Read the transform from RESULT, in natural order and scaled by 1/N.

RESULT equals ADDR when log2 N is even. Otherwise it is ADDR + N × sample
size. Supported sizes:

| type | sizes |
|---|---|
| C64 | 4 – 512 |
| C32 | 8 – 1024 |
| C16 | 16 – 2048 |

Anything else sets the error bit and does not start.

Sample packing in memory:

| type | bytes per sample | layout |
|---|---|---|
| C64 | 8 | real word, then imaginary word (two's complement) |
| C32 | 4 | `{im[15:0], re[15:0]}` |
| C16 | 2 | `{im[7:0], re[7:0]}` per half word, lower half first |

### Access pattern and why it avoids most bank conflicts

A plain radix-2 FFT touches memory with strides that change from stage to
stage. On interleaved banks those strides pile requests onto the same few
banks. This design therefore uses a **constant-geometry** decimation-in-time
schedule instead. Every stage reads and writes the same way:

- It reads `a = x[i]` from the first half of the source buffer (the "left
  wings") and `b = x[i + N/2]` from the second half (the "right wings").
- It writes `(a + W b)/2` to `y[2i]` and `(a − W b)/2` to `y[2i+1]` of the
  other buffer.
- The twiddle is `W = exp(−j2π·k/2048)` with
  `k = bitrev10(i mod 2^s)` in stage `s`.
- The input order comes out bit-reversed.
- The last stage writes each result to its bit-reversed address, so the
  result leaves in natural order.
- The stages alternate between the input buffer and the scratch buffer
  behind it.

Because reads and writes both go to consecutive addresses, the accelerator
moves whole 16-byte groups:

- Read port p fetches word p of each group: first the left word at
  `src + 16g + 4p`, then the right word `N·bytes/2` further on.
- The four ports therefore always target four different banks.
- Each port runs on its own. It issues a read whenever its two input
  registers have room, so memory latency and stalls of one port do not hold
  up the others.

### Datapath

```
 read ports 0..3 ─► input registers ─► scatter ─► butterfly unit ─► gather ─► output queues ─► write ports 0..3
   (streamer)       (fft_bfly_regs)              (fft_bfly_unit)              (fft_bfly_regs)    (streamer)
                                        twiddle LUT ─┘
```

- **Input registers.** Each read port owns a left-word and a right-word
  register. A right word that arrives in the current cycle can be used at
  once (bypass).
- **Sub-steps.** The controller (`fft_ctrl`) alternates sub-steps between
  port pair {0,1} and port pair {2,3}.
  - A sub-step fires when both ports of its pair hold their two words and
    every output queue has room.
  - With B = 1/2/4 butterflies per sub-step for C64/C32/C16, a stage takes
    N/(2B) sub-steps.
- **Scatter** unpacks the two left and two right words into operands for up
  to four lanes.
- **Butterfly unit.** It holds one 32-bit engine (lane 0), one 16-bit engine
  (lane 1) and two 8-bit engines (lanes 2–3).
  - C64 uses lane 0; C32 uses lanes 0–1; C16 uses all four.
  - A wide engine working on narrow data gives the narrow engine's result.
    After its final saturation to the narrow width the values are
    bit-identical.
- **Arithmetic.** Twiddles are Q2.30, Q2.14 or Q2.6 for the three types.
  - The product is rounded to nearest.
  - The sum is halved (floor), so every stage scales by 1/2.
  - The result is saturated to the data width.
- **Twiddle LUT.** It stores a quarter cosine wave of 513 Q2.30 entries
  (`rtl/twiddle_qw.hex`). The other quadrants come from symmetry, and the
  value is then rounded to the type's format.
- **Gather** packs the eight results of a sub-step into one 16-byte write
  beat: one word per write port.
  - In the last stage every sample goes to its own bit-reversed address.
  - For C16 that means two half-word writes per port, with byte enables.
- **Output queues** hold two entries per write port. The write ports simply
  present the head of each queue.

### Throughput

With memory that never stalls, a stage takes about N/(2B) cycles plus a
short drain:

| type, size | ideal cycles (all stages) |
|---|---|
| C64, 512 | 2304 |
| C32, 1024 | 2560 |
| C16, 2048 | 2816 |

The last C16 stage runs at about a third of the rate because it writes
half words.

In the full-chip test the core keeps streaming into the same banks. There
the three workloads took 3532, 4426 and 6033 cycles. The extra time comes
from bank conflicts between the accelerator's own read and write streams
and the core's traffic.

## I2S / TDM peripheral (`i2s_periph`)

### Structure

- **Two interfaces.**
  - The *slave* interface receives on DIN, using the SLV BCLK/FSYNC pads.
  - The *master* interface transmits on DOUT, using the MST pads.
  - Each interface has an I2S-mode and a DSP-mode serial unit; DSP EN picks
    one.
  - On the receive side, PDM EN instead passes the word stream of an
    external PDM front end.
- **Clocking.** Each interface has a BCLK generator
  (`BCLK = f_clk / (2(div+1))`) and two FSYNC generators, one for I2S and
  one for DSP framing.
  - The clock select either drives BCLK and FSYNC onto the pads or takes
    them from the pads (`ext_clk`).
  - Taken from the pads, they pass through a two-flop synchroniser and an
    edge detector, so the peripheral clock must be at least four times
    BCLK.
  - The polarity bit swaps which BCLK edge samples and which drives.
- **Timing.** Data are driven on the falling edge and sampled on the rising
  edge. Words are sent MSB first.
- **Stream interface.**
  - Received words leave on `rx_valid_o/rx_data_o`, right-aligned and tagged
    with device (`rx_dev_o`) and channel (`rx_ch_o`, 0 = left).
  - Words to send are taken from `tx_data_i/tx_valid_i` whenever
    `tx_ready_o` pulses at the first bit of a slot.
  - If no word is offered, the slot carries zeros and the sticky underrun
    flag is set.

### Framing

K devices (1–16) with k-bit words (1–32) give a frame of 2·K·k bit clocks.

| mode | FSYNC | slot order on SD |
|---|---|---|
| I2S / TDM I2S | low for the first K·k bits, high for the rest | L0 … L(K−1), R0 … R(K−1) |
| DSP (TDM) | one-bit pulse at the start of the frame | L0, R0, L1, R1, … |

With the alignment bit set, the first data bit follows the FSYNC edge by one
bit clock (classic I2S). With it clear, the first data bit coincides with
the edge.

In DSP mode a device's pair of samples is complete after 2k bit clocks.
In TDM I2S mode it is complete only after (K+1)·k bit clocks. That latency
difference is the reason DSP mode exists.

### Registers (APB offsets from the I2S base)

| offset | register | contents |
|---|---|---|
| 0x00 | RX_CFG | configuration of the receive (slave) interface |
| 0x04 | TX_CFG | configuration of the transmit (master) interface; PDM bit reads 0 |
| 0x08 | RX_CLKDIV | BCLK divider, receive side |
| 0x0C | TX_CLKDIV | BCLK divider, transmit side |
| 0x10 | STATUS | bit 0: transmit underrun (sticky, write 1 to clear) |

Configuration bits:

| bits | field |
|---|---|
| 0 | enable |
| 1 | DSP mode |
| 2 | PDM input |
| 3 | external clock |
| 4 | polarity |
| 5 | one-bit alignment |
| 10:6 | word length − 1 |
| 14:11 | devices − 1 |

## Relation to the published chip

**Follows the published description:**

- the memory sizes and banking (16 word-interleaved L2 banks, two private
  banks);
- the accelerator's eight 32-bit ports (four in, four out);
- the C64/C32/C16 types and their maximum sizes;
- the one C64 + one C32 + two C16 engine mix with its 1/2/4
  butterflies-per-cycle rates;
- the two sets of butterfly registers and the twiddle LUT;
- the programming model: points, type, address, start;
- the I2S and DSP framing with up to 16 devices;
- the drive and sample edges;
- the polarity and alignment options;
- the block structure of the I2S peripheral: two BCLK generators, four
  FSYNC generators, clock select, PDM EN and DSP EN multiplexers.

**Own choices, where the description gives no detail:**

- the address map, register maps and bit fields;
- the handshake;
- the FFT schedule, which uses the constant-geometry scheme described above;
- the twiddle format, rounding and per-stage scaling;
- the sample packing;
- the single-clock strobe design of the I2S peripheral;
- the stream interface that stands in for the DMA.

**Known departures:**

- The published accelerator uses a reordering scheme from the literature.
  Under that scheme bank conflicts occur only in the final bit-reversed
  stage, where they cost one cycle each. In this design the read and write
  streams of a stage are independent, so inner stages can also lose cycles
  to conflicts. The last stage's bit-reversed half-word writes for C16 are
  slower still.
- The published chip needs only about a 25 MHz system clock for 16
  devices at 48 kHz with 32-bit device frames (BCLK 24.576 MHz). This
  design runs the I2S logic on the system clock with BCLK edges as
  strobes, so it needs at least 2× BCLK (about 49 MHz) when it generates
  BCLK itself, and 4× BCLK when BCLK comes from a pad.
- The blocks the published chip takes from elsewhere are not included:
  - the RISC-V core and its FPU;
  - the I/O DMA engine;
  - HyperBus, QSPI, UART and I2C;
  - the PDM filter;
  - the boot ROM;
  - the APB peripherals;
  - the frequency-locked loops;
  - the pads.

  Their connections are top-level ports.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench:

- compares the module's outputs with an independent model;
- prints `TB_RESULT checks=… failures=…`;
- stops with a watchdog.

Unit testbenches may shrink memories to keep runs short. The end-to-end test
`tb_echoes_top` uses the top at its default size. It does the following:

- loads samples through a core port;
- runs C64/512, C32/1024 and C16/2048 transforms while a second master
  hammers the same banks;
- compares every output bin with a double-precision DFT/N (worst error
  about 3 LSB, limit 5);
- exercises the private memory;
- loops the I2S master pads back into the slave pads. The receiver runs on
  the external clock, first in DSP mode with 16 × 32-bit devices, then in
  TDM I2S mode with 4 × 16-bit devices.

It also counts that each mechanism occurred and fails if one never did:

- each FFT type;
- the bit-reversed last stage;
- bank-conflict stalls;
- private-memory access;
- DSP mode and TDM I2S mode;
- external clock;
- transmit underrun.

Other checks worth knowing:

- `tb_fft_hwpe` adds random grant withholding and a bank-conflict model. It
  also bounds the cycle count on conflict-free memory.
- `tb_i2s_periph` checks the receive latency of DSP mode (2k bit clocks)
  and of TDM I2S mode ((K+1)·k bit clocks).

Simulate with Verilator 5 from the repository root, because the twiddle
table is read by a path relative to it:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/echoes_pkg.sv \
    tb/tb_echoes_top.sv --top-module tb_echoes_top -o sim
./obj_dir/sim
```

Replace `tb_echoes_top` with any other testbench name to run a unit test.
The full-chip test takes about half a second of simulation time on a
desktop machine.

## Files

| file | content |
|---|---|
| `rtl/echoes_pkg.sv` | shared types (bus structs, complex sample, I2S configuration), address map, helper functions |
| `rtl/echoes_top.sv` | SoC top: interconnect, memories, FFT accelerator, I2S peripheral, APB split |
| `rtl/tcdm_xbar.sv`, `rtl/tcdm_sram.sv`, `rtl/l2_interleaved_mem.sv`, `rtl/private_mem.sv` | memory system |
| `rtl/fft_*.sv`, `rtl/twiddle_qw.hex` | FFT accelerator |
| `rtl/i2s_*.sv` | I2S peripheral |
| `tb/tb_<module>.sv` | testbench of each module |
