# DDNA: an INT8 accelerator for a neural-network OFDM receiver

An OFDM receiver can be built as two small neural networks instead of a chain of hand-designed
blocks. **DFT-Net** replaces the FFT: two Linear layers hold the real and imaginary parts of the
DFT matrix, and a 1x1 Conv1D combines the four partial products into the real and imaginary
spectrum. **Demod-Net** replaces equalisation and demapping: two Linear branches (one on the real
plane, one on the imaginary plane of a whole frame) produce a value per soft bit. A 1x1 Conv1D
then mixes those values with their LeakyReLU copies into two scores per bit. Nearly all the work
is in large INT8 matrix products.

The DFT-Demodulation Net Accelerator (DDNA) runs both networks on one output-stationary systolic
array. Four ideas make the array busy most of the time:

* **Basic blocks.** A Linear layer bigger than the array is cut into array-sized products along
  the inner dimension. Their partial sums are added in a small buffer (Buffer 4).
* **Data merge.** Each PE has two result registers, so the next product streams in while the
  previous one drains. Back-to-back passes therefore cost K cycles each, plus one fill.
* **Frame batching.** Demod-Net takes one row vector per frame, which would light only one row of
  the array. Instead 2kF = 16 frames are stacked, one per array row. DFT-Net results are written
  back "reshaped" (Buffer 3) so that each array row sees one frame.
* **Pipelining.** Linear layers write into a ping-pong buffer (Buffers 1/2) while Conv1D reads
  the other bank. The controller overlaps the Conv1D of one launch with the matrix passes of the
  next.

The default configuration is a 16 x 16 array (k = 1, F = 8 OFDM symbols per frame, S = 80 samples
per symbol: N = 64 plus a 16-sample cyclic prefix), INT8 data, INT16 biases and 32-bit
accumulation.

## Numbers

Every quantised layer computes

    q = sat8( ((sum_k a_k * w_k + bias) * m + 2^(n-1)) >> n )

* `a`, `w` are INT8 and `bias` is INT16 (scale S_in * S_w).
* `(m, n)` is the integer form of the real factor S_in * S_w / S_out: a 16-bit multiplier and a
  5-bit shift, one pair per layer.
* The shift is arithmetic and rounds half up. `sat8` clamps to [-128, 127].
* LeakyReLU uses slope 13/128 (about 0.1) with floor rounding: `y = x >= 0 ? x : (13 x) >>> 7`.

## The PE and the array (`pe`, `pea`)

**The PE.** A PE registers its activation (which moves right) and its weight (which moves down),
and adds their product to **MAC reg1**. The activation carries a *valid* and a *last* flag. When
the last element of a pass arrives, reg1 + product goes into **MAC reg2** and reg1 restarts from
zero. The next pass can therefore begin in the very next cycle.

**Readout.** The reg2 registers of a column form a shift chain towards row 0. The bottom PE of a
column loads last; its load starts a ROWS-cycle shift window, and row 0 leaves first. For the
window to end before the next result lands, a pass must have K >= 2 x ROWS. An assertion in `pe`
checks this.

**Skew and deskew.** Row r of the input column is delayed by r cycles and column c of the weight
row by c cycles, so PE(r, c) sees matching operands. On the way out, column c's readout is
delayed by COLS-1-c cycles. The array then delivers one complete output row (`COLS` 32-bit sums,
`out_row_idx`) per cycle.

**Timing.** The last result of P back-to-back passes of depth K is stored `P*K + ROWS + COLS - 1`
cycles after the first input. That is 431 cycles for one DFT-Net Linear layer (5 passes of 80)
and 831 for both layers merged (10 passes). These are the cycle counts the published evaluation
reports for Linear-1/2 and Linear-12. `tb_pea` checks both numbers exactly.

## From sums to bytes: Buffer 4, quantisation, Buffers 1/2

Each array output row carries a tag from the controller: `{kind, layer, column block, bias
address}`.

**Buffer 4 (`acc_buffer`)** acts on the kind:

| kind   | effect                          |
| ------ | ------------------------------- |
| SINGLE | the row goes straight on        |
| FIRST  | the row is stored               |
| MID    | the row is added to the store   |
| LAST   | store + row goes on             |

It holds a single ROWS x COLS tile, because an output tile is finished before the next one
starts.

**Quantisation (`requant`)** adds the bias word fetched for that column block and applies the
layer's (m, n). The INT8 row is then written into **the ping-pong buffer (`pingpong_buffer`)**:

* position: bank, layer slot (0/1), array row, column block;
* one read returns a row pair from both layers as four channels:
  `[layer0 even row, layer0 odd row, layer1 even row, layer1 odd row]`.

For DFT-Net the array rows are (Re, Im) of symbol f, so one read holds the four DFT partial
products of 16 samples of one symbol. For Demod-Net the rows are frames, so one read holds both
branches of two frames.

## Conv1D and LeakyReLU (`conv1d_unit`, `leaky_relu`)

A 2 x 4 kernel with kernel size 1, applied to 16 samples per cycle. Its two INT16 biases and its
own (m, n) come from registers loaded at launch.

| mode     | four inputs                                                  | outputs          |
| -------- | ------------------------------------------------------------ | ---------------- |
| DFT      | the four channels as read                                    | Re Y, Im Y       |
| Demod    | a, b, LeakyReLU(a), LeakyReLU(b) for the frame picked by `odd_row` | two scores per bit |

In Demod mode, a and b are the frame's two branch values. The unit has two pipeline stages
(multiply-add, then requantise).

Where a result goes:

* A DFT-Net result either leaves on the output stream (the IDFT / transmit use) or goes to
  Buffer 3.
* A Demod-Net result always leaves on the output stream.

## Activation memory and reshape (`act_mem`)

The array reads one *word* per cycle: one INT8 per array row. There are two writers:

* the DMA writes whole words;
* Conv1D produces 16 consecutive samples of *one* frame, which must land in byte lane g of 16
  consecutive words.

Both are served in one cycle by **skewed banking**:

* The memory is 16 byte-wide banks.
* Element (k, g) lives in bank `(k + g) mod 16` at address `(k div 16)*16 + g`.
* A whole word touches each bank once, and so does a run of 16 consecutive k in one lane.
* A read takes one byte from each bank and rotates the result into row order.

**Planes.** There are two planes, so a Conv1D result writes its real and imaginary runs in the
same cycle. Global word addresses:

| global words   | plane | use                                          |
| -------------- | ----- | -------------------------------------------- |
| 0 .. 639       | 0     | real part of the Demod-Net input             |
| 640 .. 1279    | 1     | imaginary part of the Demod-Net input        |
| 1280 and above | 0     | (local words 640 and up) DFT-Net input frame |

So a Demod-Net Linear branch reads 640 words starting at 0 (real) or 640 (imaginary).

## Controller (`axil_regs`, `ddna_ctrl`)

**Registers.** The processor programs a launch over AXI4-Lite (map in `ddna_pkg`), raises
`start_signal` (CTRL bit 0), polls STATUS and clears it by writing 0. A hardware set beats a
clear that comes in the same cycle.

| register      | contents                                                                   |
| ------------- | -------------------------------------------------------------------------- |
| CTRL          | start, conv_en, conv_mode, conv_to_act (Buffer 3), two_layers             |
| L_K, L_GEOM   | pass depth K; K blocks, column blocks, destination column block           |
| L_ACT, L_WB   | activation base of each layer; weight base and bias base                  |
| RQ_L1/L2/CV   | (m, n) of the two Linear layers and of Conv1D                             |
| C_GEOM, C_WB, C_RS | Conv1D row groups, column blocks, frame lane; kernel/bias word; symbol length |
| LOAD          | target memory and start word of the next DMA input stream                 |
| STATUS        | array_done, conv_done, recv_done                                          |
| CYCLES        | engine cycles of the last launch                                          |

**Linear engine.** On the start edge it streams every pass without gaps. For each layer, output
column block j and basic block i:

* the weight word is `w_base + ((layer*n_blocks + j)*k_blocks + i)*K + k`;
* the activation word is `act_base[layer] + i*K + k`;
* a tag for the pass goes into a 4-deep queue and is removed when the pass's last row leaves the
  array.

When the last row has been written to Buffers 1/2, it sets array_done.

**Conv1D engine.** With conv_en set, it takes over the bank the Linear engine just filled, and
the next launch's Linear passes use the other bank. A launch whose bank is still being read waits
(a *start stall*). The engine fetches the kernel and bias words once, then issues one read per
(row group, column block). It waits while fewer than four output FIFO entries are free (an
*output stall*). When it is done it sets conv_done.

**Output FIFO (`out_fifo`).** Results leave through a 16-entry FIFO as a 256-bit AXI4-Stream. The
stream carries two channels of 16 INT8 each: channel 0 in bits 127:0, channel 1 in bits 255:128.
The last beat of a launch carries tlast. Once that beat has been taken, recv_done is set.

**Input stream.** The input AXI4-Stream writes the memory selected by LOAD: activation, weight or
bias. Each beat writes one word at an incrementing address. A reshape write has priority: tready
drops for that cycle.

## A complete receive pass, in launches

1. **DFT-Net, for each of 16 frames:**
   * load the frame (80 words, rows = Re/Im of the 8 symbols);
   * launch two layers x 5 column blocks of depth 80 (about 850 cycles);
   * Conv1D writes the 8 x 80 complex samples into lane g of Buffer 3.
2. **Demod2-Net (QPSK):** 46 launches, one per block of 16 of the 736 soft-bit positions.
   * Each launch runs both branches with 8 accumulated basic blocks of depth 80.
   * The next launch's weights (1280 words) stream into the other half of the weight memory
     meanwhile.
   * The last launch enables Conv1D in Demod mode over all 46 column blocks of all 16 frames:
     736 output beats.

`tb_ddna_top` runs exactly this at the default parameters and compares every output byte with an
integer model. It also runs a DFT-Net launch three times with the output held back, to force
start and output stalls.

## Where this RTL departs from the published design, or goes beyond it

* The published figures name the blocks and their connections, not their insides. The following
  are this design's own choices:
  * the register map;
  * the tag queue;
  * the skewed-bank reshape;
  * the two-plane activation memory;
  * the FIFO depth;
  * the stream formats.
* **Conv1D speed.** Conv1D handles 16 samples x 2 channels per cycle. A DFT-Net frame therefore
  takes 40 Conv1D beats, where the published count is 80 cycles. The Demod-Net count (736) agrees.
* **Not included:** the processing system, DDR, the DMA engine and the AXI interconnect. They are
  standard platform parts; their ports appear at the top level. The final sigmoid / bit decision
  is also left out, since it is not mapped to the accelerator.
* **Assumed values.** Neither the LeakyReLU slope nor the widths of m and n are published;
  13/128, 16 bits and 5 bits are assumed.
* **Sizes are parameters.** Memory depths (`NBLK = 92` column blocks, `WDEPTH = 4096`,
  `BDEPTH = 256`, `PLANE_WORDS = 768`) cover QPSK and 16-QAM Demod2-Net and Demod1-Net. 64-QAM
  (2208 soft bits) needs `NBLK = 138`.
* **Demod2-Net matrix time.** Both branches for 16 frames take 46 launches of about 1334 engine
  cycles, about 61 400 cycles in all. The published figure for the merged layers is 66 480
  cycles (80 x 831). The 32 x 16 variant is `ROWS = 32`; it has not been
  simulated.
* **Latency.** End-to-end latency in microseconds depends on the processor and DMA, so it is not
  reproduced.

## Simulating

All files are IEEE 1800-2017 SystemVerilog. `ddna_pkg.sv` must come first. For example:

    verilator --binary --timing --assert rtl/ddna_pkg.sv rtl/*.sv tb/tb_ddna_top.sv \
        --top-module tb_ddna_top

Each block has its own self-checking testbench, `tb/tb_<module>.sv`; the controller is tested
through `tb_ddna_top`. Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
The end-to-end test builds in about a minute and runs in about a second.
