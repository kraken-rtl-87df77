# Kraken: an event-and-frame visual processing SoC in SystemVerilog

A nano-drone carries two sorts of camera. A dynamic vision sensor (DVS)
reports only the pixels that change, as a sparse stream of events. A normal
imager delivers dense frames. Kraken is a small SoC that handles both on a
budget of a few tens of milliwatts. Each sort of data gets its own engine.
Both engines and a general-purpose RISC-V cluster share one L2 memory.
A power controller switches each engine off when it is not needed.

- **SNE (Sparse Neural Engine).** Runs spiking convolutional networks on DVS
  events. Its work is proportional to the number of events, so a quiet
  scene costs almost nothing.
- **CUTIE (Completely Unrolled Ternary Inference Engine).** Runs ternary
  (-1/0/+1) CNNs on frames. It unrolls the whole multiply side of a
  convolution, so every output channel produces one activation per cycle.
- **The cluster.** Eight cores share a 128 KiB L1. Their dot-product
  instructions work on packed 8-, 4- and 2-bit integers, including mixed
  pairs.

This repository gives the RTL for the digital parts that can be written
down: both engines, the memory system, the power and clock control, the
cluster's L1 and its dot-product unit, and a top that connects them. The
processor cores and the standard peripherals are not included. They are
the ports of the top, and a testbench stands in for them.

## Block diagram

```
              APB (fc_apb_*)                       L2 ports: fc, udma, cluster
                   |                                          |
             +-----------+   error if domain off      +------------------+
             | apb_demux |--------------------------- | interleaved_mem  |
             +-----------+                            | 1 MiB, 8 banks,  |
   0x0xxx /     | 0x1xxx      \ 0x2xxx                 | log interconnect |
  pwr_ctrl    sne           cutie                     +------------------+
   |  |  |     | L2 master 2 (streamers)                 ^ master 2
   |  |  +---- clock_gate / reset / power enable per domain
   |  +------- (SNE, CUTIE, cluster)
   +---------- pwr_en_o -> external power switches
                                    pulp_cluster: 8 core ports -> 16-bank 128 KiB L1
                                                  8 x simd_dotp
```

The L2 master ports are numbered: 0 fabric controller, 1 uDMA (the sensor
data path), 2 SNE streamers, 3 cluster. The APB decodes on 4 KiB regions:
0x0xxx power controller, 0x1xxx SNE, 0x2xxx CUTIE.

## SNE: from an event to a burst of synaptic operations

An input event is one 32-bit word in L2. Its low 16 bits are
`{channel[5:0], y[4:0], x[4:0]}`, a coordinate-list (COO) entry. Only the
5-bit channel field of the event is used on input.

1. The **input streamer** (`sne_dma`) reads the event list, one word at a
   time, from `SRC` for `COUNT` words.
2. The **crossbar** (`sne_crossbar`) broadcasts each event to all eight
   engines. It hands over an event only when every engine can take it, so
   all engines start the same event together.
3. Each **engine** (`sne_engine`) owns 8 output channels with 32 x 32
   neurons each: 8 KiB of 8-bit membrane states. It turns the event into a
   burst of 8 x 9 = 72 synaptic operations (SOPs), one per cycle. For output
   channel `c` and kernel tap `(ky, kx)` the neuron is at
   `(y - ky + 1, x - kx + 1)`. The weight is tap `(ky, kx)` of kernel
   `{c, cin}` in the weight buffer. Taps that fall off the map still take
   their cycle but change nothing. A burst takes 1 + 72 cycles when no
   output stalls.
4. Each SOP is done by `sne_lif_unit`, a leaky integrate-and-fire neuron:
   - leak: `v = (v * ALPHA) >>> 8`;
   - integrate: add the signed 4-bit weight, saturating to 8 bits;
   - fire: if `v >= THETA`, the neuron spikes and its state resets to 0.
5. Spikes leave the engine as `{cout, y, x}` events. The crossbar merges the
   eight engines round-robin. An engine whose spike is not taken stalls its
   burst. The **output streamer** writes the spikes to L2 at `DST`, one word
   each.

The **weight buffer** holds 2048 kernels of 36 bits (9 taps x 4 bits), which
is 9 KiB. It is indexed `{cout[5:0], cin[4:0]}`. The host writes a kernel
with `WADDR`, `WLO`, then `WHI`; the write to `WHI` commits it.

The leak is applied on every SOP, not from timestamps: the event words carry
no time. A spike from one layer can be fed back as an input list for the
next. Software has to keep the channel numbers within the 5-bit input range.

### SNE registers (APB, base 0x1000)

| offset | name   | access | meaning |
|-------:|--------|--------|---------|
| 0x00 | CTRL   | W  | bit0 start, bit1 clear all neuron states |
| 0x04 | STATUS | R  | bit0 busy |
| 0x08 | SRC    | RW | event list byte address in L2 |
| 0x0C | COUNT  | RW | number of events |
| 0x10 | DST    | RW | spike list byte address in L2 |
| 0x14 | SPIKES | R  | spikes written |
| 0x18 | ALPHA  | RW | leak factor / 256 (reset 255) |
| 0x1C | THETA  | RW | firing threshold, signed 8 bit (reset 8) |
| 0x20 | SOPS   | R  | synaptic operations since reset |
| 0x24 | WADDR  | RW | kernel index |
| 0x28 | WLO    | RW | kernel bits 31:0 |
| 0x2C | WHI    | W  | kernel bits 35:32; commits the kernel |
| 0x30 | CYCLES | R  | busy cycles of the last run |
| 0x34 | EVTS   | R  | events consumed in the last run |

## CUTIE: one output pixel per cycle

CUTIE computes one ternary 3x3 convolution layer with 96 input and 96
output channels and "same" padding. It has 96 **output channel compute
units** (`cutie_ocu`). Each OCU does the following in the same cycle:

1. It sees the whole 3 x 3 x 96 input window, which is 864 trits.
2. It multiplies each trit by its own latched weight. A ternary multiply is
   only a sign selection.
3. It sums the 864 products in an adder tree.
4. It applies its channel's normalisation: `y = acc * scale + bias`.
5. It thresholds the result: `+1` if `y > thr`, `-1` if `y < -thr`,
   otherwise `0`.

Trits are 2 bits: `00` = 0, `01` = +1, `11` = -1.

A layer runs in two phases. The total is `96 + 5 + (W+1)(H+1)` cycles for a
W x H map, which is 1190 cycles at 32 x 32.

1. **Weight load (97 cycles).** One word per cycle is read from the weight
   memory. A word holds one output channel's 864 trits, compressed 5 trits
   per byte (3^5 = 243 < 256) into 173 bytes, which is 1.6 bits per weight.
   `cutie_weight_decoder` expands the word. The OCU latches it together with
   its `{thr, bias, scale}` entry from the norm memory.
2. **Streaming.** The input map is read in raster order, one pixel (96
   trits) per word. `cutie_window` keeps two line buffers and a 3 x 3
   register window. From the second row and column on it presents a
   complete window every cycle; borders are masked to zero. The extra row
   and column flush the last outputs. Every OCU's trit for the pixel is
   written back together as one word at `OUT_BASE + y*W + x`.

The memories are at their full sizes:

- activations: 6583 words x 192 bit = 158 kB;
- weights: 676 words x 1384 bit = 117 kB.

Weight word `LAYER*96 + c` belongs to output channel `c`, so seven layers
stay resident. The host places input and output maps in the activation
memory, and consecutive layers ping-pong between two regions.

The host reaches the memories through a 1384-bit staging word:

- `STAGE_IDX` selects a 32-bit slice of the staging word, and `STAGE_DATA`
  writes it, advancing `STAGE_IDX`.
- Writing an address to `WMEM_WR`, `AMEM_WR` or `NORM_WR` copies the
  staging word into that memory.
- Writing an address to `AMEM_RD` loads the word at that address into the
  staging word.

Other registers: `0x00` CTRL (bit0 start), `0x04` STATUS (bit0 busy),
`0x08` LAYER, `0x0C` WIDTH, `0x10` HEIGHT, `0x14` IN_BASE, `0x18` OUT_BASE,
`0x1C` CYCLES. The offsets above are `0x40` STAGE_IDX, `0x44` STAGE_DATA,
`0x48` WMEM_WR, `0x4C` AMEM_WR, `0x50` AMEM_RD, `0x54` NORM_WR. The norm
word is `{thr[15:0], bias[15:0], scale[7:0]}`.

Pooling layers and the final classifier are not part of this RTL.

## Memory system

All memory ports use one TCDM-style convention (`mem_req_t` / `mem_rsp_t`
in `kraken_pkg`):

- The request carries `req, we, addr, wdata, be`.
- `gnt` comes back combinationally in the same cycle.
- `rvalid`/`rdata` follow one cycle after the grant.

`log_interconnect` is a single-cycle crossbar from N masters to N banks. The
banks are word-interleaved, so consecutive words fall in consecutive banks.
Each bank has its own round-robin arbiter. A master that loses an
arbitration simply keeps its request up. `conflicts_o` counts the cycles in
which some request lost.

- **L2** (`interleaved_memory`): 1 MiB in 8 banks of 32768 words, with 4
  masters.
- **Cluster L1** (`pulp_cluster`): 128 KiB in 16 banks. Each of the 8 core
  ports reaches it in one cycle when there is no conflict.

## Mixed-precision dot product

`simd_dotp` computes `res = acc + sum(a_i * b_i)` over packed signed
elements. The precision is held in a status register written once, rather
than encoded in the instruction. The register is
`{sel[2:0], prec_b[1:0], prec_a[1:0]}`, with precision 0 = 8 bit, 1 = 4 bit
and 2 = 2 bit.

When both operands have the same width there are 32/width products per
instruction: 4, 8 or 16.

When the widths differ, the wider operand sets the element count. The
narrower operand supplies chunk `sel` of its register. For example, with
int8 x int2, the four int8 elements of `a` meet bytes `sel` of `b`'s 16
int2 elements. This lets the same loaded narrow word serve several
instructions.

## Power and clock control

`pwr_ctrl` sequences each of the three switchable domains.

Power on:

1. Close the power switch (`pwr_en_o`).
2. Wait `SETTLE` = 16 cycles.
3. Enable the clock gate with the domain still in reset for 2 cycles.
4. Release reset. STATUS shows the domain ON.

Power off is the reverse: stop the clock and assert reset, then open the
switch.

Registers (base 0x0000):

- `REQ` (0x00): one bit per domain: 0 SNE, 1 CUTIE, 2 cluster.
- `STATUS` (0x04): which domains are ON.
- `SWITCHES` (0x08): counts completed transitions.

`clock_gate` is the usual latch-based gate. The enable is captured while the
clock is low, so the gated clock never glitches. An APB access to a domain
that is not ON gets `pslverr` and has no effect.

All domains run from one clock here, each through its own gate. The silicon
has separate clocks and clock-domain crossings between the SoC, the
accelerators and the cluster. They are not modelled, and an engine's L2 port
is connected directly to the interconnect.

## How far to trust it, and where it departs from the original chip

These parts follow the chip's published description:

- eight SNE engines with 8 KiB state memories each and a 9 KiB weight
  buffer;
- 4-bit 3x3 kernels and 8-bit LIF states;
- COO event coding and bursts proportional to events;
- 96 CUTIE OCUs with 158 kB and 117 kB memories, 1.6-bit weights, full
  unrolling and per-channel normalise-and-threshold;
- a 1 MiB L2 in 8 interleaved banks;
- 8 cores with a 128 KiB L1;
- int8/int4/int2 and mixed-precision dot products;
- power-gateable accelerators with clock gating.

These are this design's own choices:

- every register map and the event word format;
- the neuron update order and the leak as a multiply by ALPHA/256;
- the state memory layout (8 channels x 32 x 32 per engine) and the
  split of channels over engines;
- the crossbar policy;
- CUTIE's 96 input channels, its line-buffer streaming and its
  normalisation arithmetic;
- the L1 bank count;
- the power sequence and its cycle counts.

These are not included:

- the fabric controller and cluster cores;
- the uDMA and its peripherals (QSPI, I2C, UART, GPIO);
- the DVS and camera interfaces;
- clock-domain crossings;
- the power switches themselves;
- the pads.

Sensor data is assumed to be placed in L2 (SNE) or loaded over APB
(CUTIE). A full 128 x 132 DVS frame does not fit the 32 x 32 SNE maps, so
it has to be tiled by software.

## Testbenches and simulation

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`.
One exception: the L2 testbench is `tb_interleaved_memory`. Each testbench:

- drives random stimulus with `$urandom`;
- compares against a model written independently inside the testbench;
- checks cycle counts where the design fixes them;
- stops on a watchdog;
- ends with a line `TB_RESULT checks=N failures=M`.

Coverage by testbench:

- `tb_sne` checks SNE spikes, SOP counts and burst timing against a
  behavioural neuron array.
- `tb_cutie` checks every output trit and the layer cycle count against a
  reference convolution, at a reduced size (8 channels, 6x5 map).
- `tb_cutie_cifar_layer` runs two layers over a 32 x 32 map, the size of a
  CIFAR-10 image, at 8 channels, and checks the 1102-cycle layer time.
- `tb_kraken_soc` runs the whole SoC at its default parameters:
  - powers the domains up and down;
  - runs 60 SNE events from L2 and a 96-channel CUTIE layer;
  - runs uDMA and core traffic in the background;
  - checks the results;
  - counts that every mechanism happened at least once: L2 and L1 bank
    conflicts, crossbar stalls, power-up and power-down sequences, and
    APB errors to gated domains.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/kraken_pkg.sv rtl/*.sv \
    tb/tb_sne.sv --top-module tb_sne -o sim && ./obj_dir/sim
```

`tb_sne` and `tb_sne_dma` also need `tb/tb_mem_model.sv`, a behavioural
L2 port that stands in for the memory. `tb_kraken_soc` takes about
1.5 minutes to build and about 1.5 minutes to run.
