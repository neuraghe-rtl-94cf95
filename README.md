# A Convolution-Specific Processor for CPU-FPGA SoCs

This is synthesizable SystemVerilog for a convolution accelerator. It is
meant to sit in the programmable logic of a Zynq-class SoC, next to the hard
ARM cores. The work is split between the two sides:

- The host processor runs the parts of a CNN that are irregular or cheap:
  fully-connected layers, odd pooling shapes, shortcut merges.
- The accelerator, the **Convolution-Specific Processor (CSP)**, runs the
  convolutions, which account for nearly all of the arithmetic.

Inside the CSP, a small controller core sequences the jobs. It programs the
DMAs, starts the convolution engine, and then gets out of the way. All data
the engine touches lives in one shared, banked scratchpad.

The main idea of the CSP is a fixed 4x4 grid of sum-of-products units. Each
unit computes two adjacent output pixels per clock from a 3x3 or 5x5
window. The grid is fed by four line buffers that can be rewired. In 3x3
mode, each line buffer carries three input features, so the engine reads
12 inputs and writes 4 outputs per pass. In 5x5 mode, each line buffer
carries one input feature.

Deeper layers are built from several passes. Each pass adds its partial
sums to those stored in the scratchpad, and the partial sums never leave the
chip between passes.

At the default sizes the engine does 16 x 2 x 27 = 864 multiply-accumulates
per cycle. At 140 MHz that is 242 GOp/s, counting a multiply-accumulate as
two operations.

## Block map

```
             clk_ls (70 MHz)                     |          clk_hs (140 MHz)
                                                 |
 uC fetch --> instr_mem                          |
 uC data  --\                                    |
 host     ---+-> ctrl_bus --(regs)--> pulse_sync ====> conv_engine --20 ports--> ce_xbar
             |       |                           |         |                       |
             |       +--> adma --AXI rd/wr--> DDR|     weight_loader <-- weight_memory <-- wdma <-- AXI rd
             |             |                     |                                                   (DDR)
             +------> log_interconnect           |                                     |
                            | port B (32 banks)  |       port A (32 banks)             |
                            +-------------> tcdm (dual-port, dual-clock) <-------------+
```

| File | Block |
|---|---|
| `neuraghe_pkg.sv` | Widths, counts and the CE configuration struct `ce_cfg_t`. |
| `csp_top.sv` | The CSP: all blocks below, two clock domains. |
| `conv_engine.sv` | CE: controller, line buffers, SoP matrix, output pipelines. |
| `line_buffer.sv` | Reconfigurable 9-line buffer with the zero-padding mask. |
| `sop.sv`, `sop_trellis.sv` | Sum-of-products unit: 27 multipliers in three adder trees (3x9 taps), two windows. |
| `weight_loader.sv` | Copies the 436 coefficients of a job from the weight memory into registers. |
| `weight_memory.sv` | 32 banks of 16-bit weights; 64-bit write port for the weight DMA. |
| `add_shift.sv` | Sums the four line-buffer contributions, shifts back to 16 bits, adds y_in or the bias. |
| `relu.sv`, `pooling.sv` | Optional ReLU, then two cascaded 2x2 pooling stages (max / average / downsample). |
| `tcdm.sv` | 32-bank scratchpad, 32-bit words; port A on clk_hs, port B on clk_ls. |
| `ce_xbar.sv` | 20 CE ports to 32 banks on port A, static priority. |
| `log_interconnect.sv` | 3 masters (uC, host, activation DMA) to 32 banks on port B, round robin per bank. |
| `adma.sv`, `wdma.sv` | Activation DMA (load and store) and weight DMA (load only), 64-bit AXI masters. |
| `ctrl_bus.sv` | Address decoding for uC and host, the register file, stdout and interrupt. |
| `instr_mem.sv` | Controller program memory. It has a fetch port, and a second port that the host uses to load programs. |
| `pulse_sync.sv` | Toggle synchroniser for single-cycle events between the clocks. |

The controller core, the host, the DDR and the clock generation are not part
of the RTL. `csp_top` exposes their connection points as ports:

- the instruction fetch port and the data port of the controller core;
- the host master port;
- two AXI master ports;
- a stdout character stream and an interrupt line.

## Number format and data layout

All pixels and weights are 16-bit two's complement in **Q5.11** format.
Products are 32 bits wide, and the trees sum them at full width. The
Add-Shift stage divides by `2^shift` (arithmetic shift; 11 for plain Q5.11)
and keeps the low 16 bits. There is no saturation. Biases and y_in partial
sums are added after the shift, so they are in the output format.

**Feature maps in the TCDM.** A map is stored row-major, two pixels per
32-bit word, with the even column in bits [15:0] and the odd column in bits
[31:16]. It occupies `H*W/2` consecutive word addresses, starting at its base
register. The 32 banks are word-interleaved: word `a` is in bank `a mod 32`,
row `a / 32`. Each port walks linearly through its map, so the 20 CE streams
move through the banks in step. The data layout decides how often streams
collide:

- Streams whose bases differ by a multiple of 32 collide on every access.
- Bases spaced by 1 or 2 banks collide rarely.

The testbenches use both kinds of spacing on purpose.

The width `W` must be even, so that a row is a whole number of words, and at
most 256 (`2*LINE_WORDS`). It must be a multiple of 4 when pooling is
enabled, so that a pooled row is again a whole number of words.

**Coefficients in the weight memory.** One job needs 436 coefficients:

- 16 SoPs x 27 taps of weights;
- 4 biases.

Coefficient `i` sits in weight-memory bank `i mod 32`, at row `WM_BASE + i/32`.
The indices are:

- Weights: `i = 27*sop + tap`, with `sop = 4*output + line_buffer`.
- Biases: `i = 432 + output`.

Tap numbering depends on the mode:

- **3x3 mode:** `tap = 9*s + 3*r + c`. Here `s` is the input stream in that
  line buffer, fed by x_in port `l + 4*s`. `r` and `c` are the row and
  column, counted from the top left.
- **5x5 mode:** `tap = 5*r + c`. Taps 25 and 26 are multiplied by zero.

The weight DMA writes 64-bit slots, four weights per slot, into four
consecutive banks. The job's 436 coefficients are therefore 109 beats, and a
job that starts on row R starts on slot 8R. The weight loader reads all 32
banks at once, one row per cycle. It has the register file full 15 cycles
after the start.

## The line buffer

A line buffer turns one or three streams of words into two overlapping
windows per cycle. The windows are centred on output pixels `2j` and `2j+1`.

It is one long shift register of 9 lines:

- Lines 0-4 and 6-7 are `LINE_WORDS` (128) words long.
- Lines 5 and 8 are 3 words long, because only the window needs them.

Each advance shifts one word into line 0. Line `l` passes on the word that is
`W/2` words old, which is where the current image row ends. Line `l` thus
holds the row that lies `l` rows above the newest row. Two multiplexers
select the mode:

| line | 3x3 mode fed from | 5x5 mode fed from |
|---|---|---|
| 0 | `din[0]` | `din[0]` |
| 3 | `din[1]` | end of line 2 |
| 6 | `din[2]` | zero |

In 3x3 mode, lines 0-2, 3-5 and 6-8 are three independent 3-row buffers. In
5x5 mode, lines 0-4 form one 5-row buffer. The window taps are the first few
word slots of each line, giving 4 pixels for 3x3 and 6 pixels for 5x5. They
are read combinationally.

**Zero padding.** Row and column counters follow where the newest word lies
in the image. From them, the rewiring logic:

- decides which window positions are valid outputs (`win_valid`);
- masks to zero every tap that falls outside the image when padding is on.

For padding to work, the controller pushes zero words after the last real
word, so that the last rows can still be centred. With filter half-size `p`
(1 or 2), the push ends once `H + p + 1` rows have entered. Without padding,
the output is `(H-2p) x (W-2p)`.

In 3x3 mode with padding, the window is taken from slots 1..4 rather than
0..3. This keeps the output pixel pairs aligned to words, at the cost of one
more word of latency.

## The convolution engine controller

The controller is the part of this design that is most its own, so it is
described here in detail.

**Job start.** A job starts with a pulse on `start`, and the configuration
register is latched at that moment. The weight loader then runs for 15
cycles. Both the job's words and the zero tail go through the line buffers.

**Ports.** The CE has 20 TCDM ports:

| port | role |
|---|---|
| 0..11 | x_in, the input features. Line buffer `l` gets ports `l`, `l+4`, `l+8`; 5x5 mode uses only 0..3. |
| 12..15 | y_in, partial sums to accumulate, one per output. |
| 16..19 | y_out, one per output. |

A per-port enable register switches each port on or off.

**Prefetch FIFOs.** Every enabled read port runs on its own and reads its
map in order. It keeps a 3-entry FIFO and issues a request whenever
`stored + in flight < 3`. A granted read returns its data in the next cycle.
A port that loses arbitration simply asks again. Because a port never issues
more reads than its FIFO can hold, no data is ever lost.

**Advance condition.** The datapath moves one step ("advance") in a cycle
only when all of the following hold:

1. **Inputs ready.** Every enabled x_in FIFO holds a word. During the
   zero-padding tail this condition is true without data.
2. **Partial sums ready.** When the Add-Shift is about to consume a y_in
   word, because y_in accumulation is on and a valid output is at the end of
   the SoP pipeline, every enabled y_in FIFO holds a word.
3. **Output written.** The word that the first pooling stage offers on each
   y_out port is written in this cycle, or was already written in an earlier
   cycle.

One advance shifts all line buffers, moves the 6-stage SoP pipeline and the
Add-Shift register, and presents new outputs. The datapath has no storage of
its own between these stages. Holding the advance freezes all of them
together, so nothing can overrun.

**Output ordering.** The output words of one advance may be written in
different cycles on different ports. A per-output `written` bit records
which have gone out.

**Bank conflicts.** The crossbar gives each bank to the **highest**-numbered
requesting port. Writes (ports 16..19) therefore beat reads, and y_in reads
beat x_in reads.

This order matters for forward progress. A blocked write stops the datapath,
because of condition 3. A blocked read only delays one port, whose FIFO
refills later. An earlier version used fixed low-first priority and a single
all-ports-together step. It could livelock, with the same two ports losing
to each other every cycle. The FIFO scheme described here replaced it.

**`stall` output.** `stall` is high in every running cycle in which at least
one CE request was not granted. It is the conflict count a designer uses to
tune base addresses.

**Timing.** Without conflicts, a job takes about

    15 (weight load) + 2 + (H + p + 1) * W/2 (streaming, including the zero tail) + 12 (pipeline drain)

cycles. Each bank conflict adds up to one cycle. `done` pulses once, after
the last y_out word is written.

**Not built.** The engine runs at stride 1 only. Strided layers (stride 2
or 4) would need to discard windows and pack the outputs that remain, and
that scheme is not specified, so it was not invented here.

## Output pipeline per output feature

Each output has its own pipeline:

1. **Add-Shift.** Adds the four SoP results of that output. Each is a 32-bit
   sum over up to 27 taps for each of the two windows. It shifts the total
   right by `shift` and adds either the y_in word or the bias. The bias is
   used only when y_in accumulation is off, so that a layer's bias is added
   exactly once, in its first pass.
2. **ReLU** (optional).
3. **Pooling stage 1 and pooling stage 2.** `pool_en[0]` gives 2x2 pooling;
   `pool_en[1]` with it gives 4x4. Each stage keeps the horizontal
   reductions of an even row and combines them with those of the odd row.
   The average is the sum of four shifted right by 2, so it rounds toward
   minus infinity. Downsampling keeps the top-left pixel.

## Clocks, control and programming

**Clock domains.** The design has two clocks:

| clock | published frequency | blocks |
|---|---|---|
| `clk_hs` | 140 MHz | CE, crossbar, weight memory, weight DMA |
| `clk_ls` | 70 MHz | interconnect, activation DMA, control bus, instruction memory |

The TCDM is the only memory shared between the domains, and each of its
ports runs in one domain. Single-cycle events cross through toggle
synchronisers. These are the CE start and done, and the weight DMA start and
done. Configuration registers are quasi-static: software must not change
them while a job runs.

**Bus masters.** The controller core and the host issue byte-addressed
requests:

| address | target |
|---|---|
| `0x1000_0000` | TCDM, through each master's own port of the logarithmic interconnect |
| `0x1010_0000` | instruction memory |
| `0x1020_0000` | registers |

**Register map.** Offsets from `0x1020_0000`:

| offset | register | content |
|---|---|---|
| 0x00 | CE_CTRL | write bit0: start; read: `{wdma_busy, adma_busy, ce_busy}` |
| 0x04 | CE_CFG0 | `fs5[0] zp[1] use_yin[2] relu[3] pool_en[5:4] method[7:6] shift[12:8]`. Method: 0 max, 1 avg, 2 downsample. |
| 0x08 | CE_DIM | `width[15:0] height[31:16]` |
| 0x0C | CE_EN | `x_en[11:0] y_en[19:16]` |
| 0x10 | CE_WM_BASE | first weight-memory row of the job |
| 0x14 | STATUS | sticky done bits: ce[0] adma[1] wdma[2]; write 1 to clear |
| 0x18 | STDOUT | character to the host |
| 0x1C | IRQ | write: one-cycle interrupt to the host |
| 0x20-0x2C | ADMA_EXT, ADMA_TCDM, ADMA_LEN, ADMA_CTRL | DDR byte address, TCDM word address, 64-bit beats, start + direction (bit1 = store) |
| 0x30-0x3C | WDMA_EXT, WDMA_WM, WDMA_LEN, WDMA_CTRL | DDR address, weight slot, beats, start |
| 0x40-0x6C | X_BASE[0..11] | TCDM word addresses of the inputs |
| 0x70-0x7C | YIN_BASE[0..3] | partial-sum inputs |
| 0x80-0x8C | YOUT_BASE[0..3] | outputs |

**Programming one layer pass:**

1. Load the input strips with the activation DMA (load direction).
2. Load the 109 coefficient beats with the weight DMA.
3. Write CFG0, DIM, EN, WM_BASE and the base registers.
4. Start the CE and poll STATUS.
5. Store the outputs with the activation DMA.
6. Clear STATUS.

The DMAs can be overlapped with the previous CE job, provided their target
regions differ.

## Fit of reference networks

The sizes below are checked against the default parameters: 256-pixel rows,
a 128 KiB TCDM, and stride 1.

**VGG-16.** All thirteen 3x3 convolution layers fit:

- Widths 224, 112, 56, 28 and 14 are all at most 256 and even.
- A strip of 12 inputs plus 4 outputs at W = 224 costs 7 KiB per row, so a
  TCDM strip can hold up to 18 rows. Larger maps are processed in row strips
  that overlap by `2p` rows.
- 2x2 max pooling can be fused into the last layer of blocks 1-4.
- In block 5 (W = 14), the pooling has to run as a separate step, because 14
  is not a multiple of 4.
- The fully-connected layers are left to the host.

**ResNet-18.** Support is partial:

- These fit: the stride-1 3x3 layers at 56x56, 28x28 and 14x14, with batch
  normalisation folded into the weights and bias.
- These do not fit, because they need stride 2:
  - conv1 (7x7, stride 2, which can be split into four 5x5 jobs);
  - the first layer of each later stage;
  - the 1x1 shortcut projections.
- The 7x7 maps of the last stage do not fit, because of their odd width.
  Padding them to 8 columns in memory would work around that.

## Departures from the published design

- **Stride.** Only stride 1 is built. See above.
- **7x7 filters.** These run only as software-split 5x5 jobs, and therefore
  only where stride 1 applies.
- **CE controller.** The TCDM port request/grant protocol, the prefetch
  FIFOs, the advance rule and the crossbar priority are this design's own.
  The published description gives the datapath but not the sequencing.
- **Bus protocols.** The control path uses a simple request/grant bus
  instead of AXI-Lite. The DMAs use a small AXI4 subset: INCR bursts of at
  most 256 beats, no IDs, no error responses.
- **Port mapping.** Each DMA has its own 64-bit AXI master here. The
  published system shares two HP ports between the DMAs in a way that is not
  detailed.
- **Memory sizes.** These are assumptions: 1024 words per TCDM bank
  (128 KiB in total), 512 weights per weight-memory bank, and 32 KiB of
  instruction memory.
- **Storage style.** Line-buffer lines are plain registers, not a split
  between registers and shift-register LUTs.
- **Arithmetic.** Average pooling truncates, and there is no saturation
  anywhere.
- **Clock-crossing reset.** Reset is one asynchronous input. Releasing it
  synchronously in each domain is left to the integrator.

## Verification and simulation

Every block has a self-checking testbench in `tb/`. Each testbench:

- compares against a model written independently in the testbench;
- checks cycle counts where a latency is defined;
- has a watchdog;
- prints `TB_RESULT checks=N failures=M` at the end.

Stimulus is random (`$urandom`), and all state that is read is reset first.

The end-to-end test `tb_csp_top` runs the top level with every parameter at
its default:

- A behavioural DDR model serves the two AXI ports.
- The host port loads weights and activations, programs three layer passes,
  and reads back the results. The three passes are 3x3 with zero padding,
  ReLU and max pooling; 5x5 with y_in accumulation and 4x4 average pooling;
  and 3x3 with downsampling, whose base addresses are chosen to force bank
  conflicts.
- The results are compared with a reference convolution.
- It counts each mechanism and fails if any of them never occurs: CE stalls,
  3x3 and 5x5 modes, zero padding, y_in accumulation, bias, ReLU, each
  pooling method and two-stage pooling, DMA loads and stores, weight DMA,
  instruction fetch, stdout and the interrupt.

To simulate a block with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/neuraghe_pkg.sv tb/tb_conv_engine.sv --top-module tb_conv_engine -o sim
./obj_dir/sim
```

Run from the directory that holds `rtl/` and `tb/`. Swap in any `tb_*.sv`
file and its module name. The full top-level test is the slowest of them.

**Lint note.** Verilator reports the TCDM bank array as driven by two
differently clocked processes. That is the intended true dual-port,
dual-clock RAM, and it maps onto FPGA block RAM.
