# SwiftChannel accelerator: streaming RTL for CNN-based 5G channel estimation

A 5G base station learns each user's uplink channel from sounding reference
signals (SRS). Pilots are sent only on some subcarriers, and with
antenna sub-sampling only on some antennas, so a plain least-squares (LS)
estimate gives a coarse grid. Here that grid is 108 subcarriers by
16 receive antennas × 2 UE antennas. This design takes the received pilot samples
of one SRS symbol, forms the LS estimate, and runs a small quantised
convolutional network on it. The network treats the coarse grid as a
low-resolution image and up-scales it four times in both directions,
to the full 432 × 128 channel matrix (real and imaginary planes).

All of this is one pipeline of streaming blocks. Each block starts as soon as
the block before it has produced enough data, and
every block handles about one value per clock. The network's layers therefore
overlap row by row instead of running one after another. A whole frame takes
about as long as its slowest block, here the output side at one value per
cycle: 115,208 cycles for the 110,592 output values, 0.58 ms at 200 MHz,
inside the 1 ms SRS period.

The SystemVerilog is synthesizable. Every parameter memory (weights,
biases, quantisation constants, pilot table, activation table) is written
through one configuration port. No trained network is included: the
testbenches load random quantised networks and compare the output bit for bit
with an independent integer reference model.

## The data path

```
 pilots in (complex FIX32, 108 x 32, subcarrier-major)
   ls_estimator        H_LS = y * conj(p),  p = s/|s|^2 from an on-chip table
   scale_shift_input   FIX32 -> UINT8, two channels (Re, Im)
   qconv3_engine       3x3 conv,  2 -> 12 channels   (tiles 4 x 2)
   spab  x 4           3x3 conv 12 -> 8, ReLU, 3x3 conv 8 -> 12,
                       attention with the block input (bypass FIFO)
   qconv3_engine       3x3 conv, 12 -> 4 channels    (tiles 4 x 4)
   qconv1_engine       1x1 conv,  4 -> 32 channels
   pixel_shuffle       108 x 32 x 32  ->  432 x 128 x 2
   output_dequant      UINT8 -> FIX32, TLAST on the last value
 channel out (FIX32, 432 x 128 x 2)
```

Between two blocks there is a two-entry `stream_fifo`. Every link is a
valid/ready stream that carries one value per transfer. A feature map is
sent in depth-first order: channel fastest, then column, then row. A block
that cannot accept data lowers `ready`. The stall then travels back up the
chain, and nothing is lost or dropped anywhere.

`swiftchannel_top` is the top level. Its ports are:

| port | width | meaning |
|---|---|---|
| `s_axis_tvalid/tready/tdata` | 1/1/64 | one received pilot sample `{Im, Re}` per transfer. Subcarrier k is the slow index. The column `r*N_UE + u` (receive antenna r, UE antenna u) is the fast one. |
| `m_axis_tvalid/tready/tdata/tlast` | 1/1/32/1 | one FIX32 output value per transfer, in depth-first order (432 rows × 128 columns × {Re, Im}). `tlast` marks the last value of a frame. |
| `cfg_we/cfg_addr/cfg_wdata` | 1/21/32 | parameter write port, `cfg_addr = {unit[4:0], offset[15:0]}` (see below) |

Frames can follow each other without a gap. Every block counts its own
position in the frame and restarts by itself at the end.

## Numbers

* **FIX32** is a signed 32-bit fixed-point format with 25 fraction bits
  (range ±64). It carries the pilots, the LS estimate, the de-quantised
  values inside the attention unit, the activation table and the output.
  Products and sums saturate.
* **UINT8** activations follow `x_q = round(x/scale) + zp`. Weights are INT8,
  and accumulators and biases are INT32.
* **Re-quantisation** turns any 32-bit value `v` into UINT8 with an integer
  multiplier and a right shift, rounding to nearest:
  `q = sat_0..255( ((v*mult + 2^(shift-1)) >>> shift) + zp )`.
  The real factor (`scale_x*scale_w/scale_out` for a convolution,
  `2^-25/scale` for a FIX32 value) is therefore `mult / 2^shift`. A convolution
  has one multiplier and one shift per output channel (per-channel quantisation).
* **De-quantisation** is `(x_q - zp) * scale`, with `scale` in FIX32.

All of these functions live in `sc_pkg`, so every block does the arithmetic
the same way.

## The 3×3 convolution engine

`qconv3_engine` holds the layer's parameter memories and joins two parts:
`window3d` and `filter3d`. Ten of these engines are in the chain: the first, the last, and two in each SPAB.
Most of the logic sits in them.

### window3d: line buffer and sliding window

`window3d` turns the depth-first pixel stream into one 3×3×F_in window per
output pixel. It has two stores:

* A **line buffer** of three row slots, each W pixels × F_in channels. Input
  row y goes to slot `y mod 3`. The window for output row y needs rows
  y−1, y and y+1. With three slots, row y+2 can stream in while the windows of
  row y are still being built, so the input does not wait at the end of a row.
* A **window register** `[F_in][3][3]`. Moving one pixel to the right shifts
  it one column left and loads the new right-hand column (three rows ×
  F_in channels) from the line buffer. At the start of a row it is loaded
  with {zero column, column 0, column 1}.

Two counters control the block: pixels written (`in_pix`) and windows built
(`out_pix`).
* A window is built once its bottom-right neighbour has arrived,
  `in_pix >= out_pix + W + 2`, or once the whole frame is in.
* A pixel is written only while `in_pix < out_pix + 2W - 1`. This keeps the
  writer from overwriting a row slot that a pending window still reads.

While building the window, the block also:
* sets to zero every position that falls outside the map (zero padding of
  one);
* subtracts the input zero point from every value (`x_s = x_q - zp`).

The shifted values range over −255…255. They are carried as 9-bit signed
numbers, not INT8 (see *Departures*). One window leaves per cycle when the
filter takes it.

### filter3d: tiled multiply-accumulate

`filter3d` follows a tiled convolution loop:

```
for to in 0..F_out-1 step Tm          -- output-channel tile
  for ti in 0..F_in-1 step Tn         -- input-channel tile   (one cycle)
    for too < Tm, tii < Tn, rr < 3, cc < 3:                  (unrolled)
      psum[to+too] += win[ti+tii][rr][cc] * w[to+too][ti+tii][rr][cc]
```

Each cycle, Tm·Tn·9 multipliers process one (to, ti) tile. When ti = 0 the
partial sums start from the bias, not from zero. A window therefore takes
`(F_out/Tm)·(F_in/Tn)` cycles:

| engine | F_in → F_out | Tm × Tn | multipliers | tile cycles per window |
|---|---|---|---|---|
| first conv | 2 → 12 | 4 × 2 | 72 | 3 |
| SPAB conv a | 12 → 8 | 4 × 4 | 144 | 6 |
| SPAB conv b | 8 → 12 | 4 × 4 | 144 | 6 |
| last conv | 12 → 4 | 4 × 4 | 144 | 3 |

After the last tile, the F_out sums go to an output register. A serialiser
re-quantises them one channel per cycle and sends them on, while the next
window is already being accumulated. So an engine needs
`max(F_out, tiles)` cycles per pixel. For every engine that is F_out cycles,
which is exactly its output rate in a depth-first stream.
`s_ready` goes high only in the cycle of the last tile. That is when the
filter takes the next window.

## SPAB: convolutions with parameter-free attention

A SPAB (swift parameter-free attention block) computes

    O = σa(H) · (H + X),     σa(x) = sigmoid(x) − 0.5,

where X is the block input and H the result of `conv(8→12)(ReLU(conv(12→8)(X)))`.

* **ReLU** in the quantised domain is `max(x_q, zp)`, where zp is the zero point of the
  first convolution's output. `relu_stream` receives it from that engine.
* **Bypass.** The input stream is copied: each value goes both to the
  first convolution and into a bypass FIFO. The block input is accepted only
  when both can take it. The attention unit reads X from the bypass FIFO
  alongside H from the second convolution. The FIFO has to hold everything the
  two convolutions keep in flight. Each convolution is about W+2 pixels
  behind its input, which comes to about (2W+3)·12 ≈ 800 values at W = 32,
  plus the small FIFOs between the stages. The FIFO has 1,024 entries.
  If it fills, it holds the block input back, and the convolutions can still
  finish because their own look-ahead fits in the FIFO.
* **Attention unit** (`spab_attention`, two pipeline stages):
  1. De-quantise H and X to FIX32.
     Look up σa(H) in a 512-entry FIX32 table covering (−3, 3).
     Add H + X with saturation.
  2. Multiply, then re-quantise to UINT8.

  The table index is `floor((h + 3)·512/6)`, clamped to 0 and 511. It is
  computed without a divider: `t = h + 3·2^25` (a non-negative value below
  6·2^25) is multiplied by the constant 357,913,942 ≈ 2^47·512/(6·2^25),
  and bits 55:47 of the product are kept. For every `t` in range this gives
  the exact floor. The table contents are loaded through the configuration
  port. The testbenches fill entry i with σa at the middle of its interval,
  `σa(−3 + (i + 0.5)·6/512)`.

## Pixel shuffle without a frame buffer

The 1×1 convolution makes 32 channels per coarse pixel:
c = co·16 + i·4 + j. The pixel shuffle moves channel c of pixel (y, x) to
output position (4y + i, 4x + j), channel co. One input row of 32 pixels
turns into four output rows of 128 × 2 values. Output row 4y can start at
once. Rows 4y+1 to 4y+3 need data from pixels that come later.

`pixel_shuffle` has four parts:

* a capture register that collects the 32 values of one pixel;
* a distribution register that hands them to four **sub-row FIFOs**, one
  value to each FIFO per cycle, in output order (j, co). FIFO i collects
  output row 4y + i;
* two banks of four sub-row FIFOs, 256 values each, used for even and odd
  input rows;
* a reader that empties the current bank, sub-row 0, then 1, 2 and 3.

Sub-row 0 leaves while its input row is still arriving. Sub-rows 1 to 3
are sent after it, while the next input row already fills the other bank.
At steady state the block takes one value and sends one value per cycle.
Total storage is 2 × 4 × 256 bytes plus the two 32-byte registers,
not a frame buffer.

## LS estimator and the quantisers

`ls_estimator` holds a table of pilots p = s/|s|² for every
(subcarrier, UE antenna). The host computes this table, so no divider is
needed. Each received sample y gives `H = y · conj(p)`:
`Re = yr·pr + yi·pi` and `Im = yi·pr − yr·pi`. That is four FIX32 products
and one register stage. `scale_shift_input` re-quantises the real and
imaginary parts to UINT8, two values per sample. `output_dequant` turns each
UINT8 output into FIX32 and raises `tlast` on value 110,592 of the frame.

## Configuration map

`cfg_addr = {unit[4:0], offset[15:0]}`, with 32-bit data:

| unit | block | offset |
|---|---|---|
| 0 | LS pilot table | `(k·N_UE + u)·2 + {0: Re, 1: Im}` |
| 1 | input quantiser | 0 multiplier, 1 shift, 2 zero point |
| 2 | first 3×3 conv | conv map below |
| 3 + 3s, 4 + 3s | SPAB s, first and second conv (s = 0…3) | conv map below |
| 5 + 3s | SPAB s, attention | `offset[15:13]=0`: table entry `offset[8:0]`; `=1`: 0 scale_h, 1 zp_h, 2 scale_x, 3 zp_x, 4 multiplier, 5 shift, 6 output zero point |
| 15 | last 3×3 conv | conv map below |
| 16 | 1×1 conv | conv map below (weight index `fo·F_in + fi`) |
| 17 | output de-quantiser | 0 scale (FIX32), 1 zero point |

Conv map: `offset[15:13]` picks the region and `offset[12:0]` the index.

| region | contents | index | data |
|---|---|---|---|
| 0 | weights | `(fo·F_in + fi)·9 + 3·rr + cc` | `data[7:0]` |
| 1 | biases | fo | INT32 |
| 2 | multipliers | fo | 32-bit |
| 3 | shifts | fo | `data[5:0]` |
| 4 | zero points | — | `data[7:0]` input zp, `data[15:8]` output zp |

Write the parameters before the first frame. Writing during a frame
changes the frame in flight.

## Timing

| stage | rate at the default sizes |
|---|---|
| LS estimator, input quantiser | 1 UINT8 value per cycle out, so one pilot sample every 2 cycles: 6,912 cycles per frame |
| 3×3 engines | F_out cycles per pixel (12, 8, 12, 4); the busiest takes 12 × 3,456 = 41,472 cycles per frame |
| attention, ReLU | 1 value per cycle |
| 1×1 conv | 32 cycles per pixel: 110,592 cycles per frame |
| pixel shuffle, output | 1 value per cycle: 110,592 cycles per frame |

The 1×1 convolution, the pixel shuffle and the output all stream 110,592
values, so they set the frame time. In the full-size simulation, the
last output leaves 115,208 cycles after the first input is accepted (input
offered every cycle, output always ready). That is 0.576 ms at 200 MHz. The
remaining 4,600 cycles are the ramp through the chain: each 3×3 layer waits
about one row before it starts. Frames can follow each other back to back.
With two frames sent without a gap, the last outputs of the two frames are
110,856 cycles apart, which is about 1,800 frames per second at 200 MHz.

## Departures from the paper and open points

* **Cycle counts.** The paper's synthesis report gives 176,473 cycles for the
  12→8 filter block, 159,193 for the 1×1 convolution and a 0.883 ms frame.
  Here a 3×3 engine is much faster, 6 cycles per pixel for the 12→8
  filter, about 21,000 cycles per frame. The frame takes 115,208 cycles,
  set by the one-value-per-cycle output side. The paper's tile loop is
  followed exactly (one Tm×Tn×3×3 tile per cycle), so the gap probably comes
  from the paper's tool-generated control and stream overheads. Those cannot
  be rebuilt from the text. The blocks that move one value per cycle do match
  the paper's counts: pixel shuffle 111,819 and output de-quantisation 110,595
  cycles there, 110,592 values at one per cycle here; attention and a 12-channel
  window stream 41,488 and 41,871 there, 41,472 values here; ReLU 27,650 there,
  27,648 values here; input quantisation 6,918 there, 6,912 values here.
* **Number of PEs.** The paper gives the PE count of the filter as
  (F_out/Tm)·(F_in/Tn). It also describes a loop whose tile iterations are
  pipelined with one tile per cycle. This design builds one Tm·Tn·9 tile
  unit used once per cycle (the loop reading). It does not build
  (F_out/Tm)·(F_in/Tn) such units, which would finish a window in one cycle
  but could not be fed faster anyway. The paper's resource table supports this reading: it lists
  119 DSP slices for the 12→8 filter, about what one 144-multiplier tile
  unit needs and far below the 864 multipliers of six.
* **Shifted window values** are 9 bits (−255…255), not INT8. With
  unsigned activations and an arbitrary zero point, 8 bits cannot hold them.
* **Line buffer** of three rows instead of K−1 = 2, so the input never waits
  at row ends.
* **σa table index and contents.** The paper gives 512 points over (−3, 3)
  but not how they are indexed. Uniform intervals and mid-point values are
  this design's choice.
* **Re-quantisation** by multiplier and shift stands in for the real-valued
  scale of the quantisation equation.
* **FIFO depths** (2 between blocks, 1,024 for each SPAB bypass, 2 × 4 ×
  256 in the pixel shuffle) are not given in the paper. Likewise the
  number formats' integer/fraction split, the stream orders, and the
  configuration port.
* **Not built:** the DMA engine and AXI interconnect, the host processor and
  the external DDR. The top has stream ports and a parameter write port in
  their place. The paper's clock frequency and resource figures (DSP, BRAM,
  LUT counts) are not checked here.

## Verification

Each block has a self-checking testbench in `tb/`. It drives random data
with random gaps on the input and random back-pressure on the output, and
compares every output with `tb_ref_pkg`. That package is a whole-array integer
model of the same network, written layer by layer with no streaming or tiling.
Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle-count
watchdog.

| testbench | what it covers |
|---|---|
| `tb_stream_fifo` | order, ready exactly at full, full-rate refill (depth 2 and 5) |
| `tb_ls_estimator`, `tb_scale_shift_input`, `tb_output_dequant` | arithmetic, sample order, TLAST position |
| `tb_window3d` | every window of a 6×5 map incl. padding and zero-point shift, two frames |
| `tb_filter3d` | tiled sums against the reference; 40 windows in the expected number of cycles |
| `tb_qconv3_engine`, `tb_qconv1_engine` | whole layers through the configuration port |
| `tb_relu_stream`, `tb_spab_attention`, `tb_spab` | ReLU, table look-up incl. clamping, full SPAB with bypass |
| `tb_pixel_shuffle` | ordering over two frames; one value per cycle and early start of sub-row 0 |
| `tb_swiftchannel_top` | whole chain at 4 × 4 pilots (N_K = 4, N_R = 2), two frames back to back, random stalls; counts input and output stalls, bypass FIFO occupancy, ReLU clamping, pixel-shuffle read/write overlap and TLAST. A mechanism that never happens counts as a failure. |
| `tb_swiftchannel_full` | two back-to-back frames at the default sizes, all 2 × 110,592 outputs; first-input-to-last-output time under 200,000 cycles and frame period under 176,678 cycles (1 ms and 1,132 frames/s at 200 MHz) |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sc_pkg.sv tb/tb_ref_pkg.sv tb/tb_spab.sv --top-module tb_spab
./obj_dir/Vtb_spab +verilator+rand+reset+2
```

The full-size run builds and finishes in under a minute.

To change a size, override the parameters of `swiftchannel_top`. N_K and N_R·N_UE
set the map size. C, MID, C_LAST, R and C_OUT set the network widths. The
tile factors are set where the engines are instantiated. The bypass FIFO depth
(`BYPASS_DEPTH` of `spab`) should stay above about (2W+3)·C.
