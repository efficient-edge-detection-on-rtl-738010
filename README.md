# Streaming Sobel edge detector built from 4:2 compressors

This design computes the horizontal and vertical Sobel gradients of a
greyscale video stream, one pixel per clock, with very little logic. It is
meant for small FPGAs whose logic elements pair 3-input LUTs with a fast carry
chain. Three ideas make it small:

1. **Separable kernels, cached column results.** Both 3x3 Sobel kernels are
   the product of a column vector and a row vector. So the column part of
   each convolution is computed once per image column and kept for the two
   clocks in which it is needed again. Each output then needs only four
   operands.
2. **A 4:2 compressor that folds in the arithmetic.** The four operands of
   the x and y gradients have the form `W + 2X + Y - Z`. Two layers of
   carry-save (3:2) compressors reduce them to two words. The doubling is
   done by wiring and the subtraction by inverted inputs plus a forced
   carry-in, so no separate shifter or negation stage exists.
3. **One split adder at the end.** The two compressor words are added by a
   ripple adder that is cut in half. The carry into the upper half is
   predicted from the two bits just below the cut.

The RTL is written for any synthesis tool and does not use vendor
primitives. The defaults are 8-bit pixels and 512-pixel rows, and the
results are 11-bit signed.

## Dataflow

```
            +-------------------- pixel_cache ---------------------+
pix_in ---> | 3,3 -> 3,2 -> 3,1 -> row buffer (IMG_W-3) ->          |
            | 2,3 -> 2,2 -> 2,1 -> row buffer (IMG_W-3) ->          |
            | 1,3 -> 1,2 -> 1,1                                     |
            +------------------------------------------------------+
                 |1,3      |2,3       |3,3
                 v         v          v
          sobel_x_path: col = 1,3 + 2*2,3 + 3,3 (kept two clocks)
                        gx  = col(t) - col(t-2)         -> edge_x
          sobel_y_path: d   = 3,3 - 1,3       (kept two clocks)
                        gy  = d(t) + 2 d(t-1) + d(t-2)  -> edge_y

cache_control: ENA / CLR for all registers, window-valid and coordinates
```

Register `r,c` of the cache holds the pixel that Sobel coefficient `(r,c)`
multiplies. Register 3,3 is the newest pixel, at the bottom right of the
window. The row buffers are `IMG_W - 3` long, so each window row is exactly
one image row above the next. Only the newest column (1,3, 2,3, 3,3) is read
by the datapaths. The other six window registers are the delay stages that
feed the row buffers.

The kernels, with `(r,c)` meaning row r and column c:

```
Sx = [-1 0 1; -2 0 2; -1 0 1] = [1 2 1]^T  x [-1 0 1]
Sy = [-1 -2 -1; 0 0 0; 1 2 1] = [-1 0 1]^T x [1 2 1]
```

## The two datapaths

The two directions cache different things.

**x direction** (`sobel_x_path`). The column weights `[1 2 1]` come first.
The first compressor layer forms `1,3 + 2*(2,3) + 3,3` as a sum word and a
carry word. An ordinary adder completes that column sum, and two registers
keep it for the next two columns. The second compressor layer subtracts the
column sum from two clocks back. This gives `gx = col(t) - col(t-2)`: right
column minus left column. The compressor's interim words therefore feed both
the cache adder and the second layer.

**y direction** (`sobel_y_path`). Here the column step, `3,3 - 1,3`, is a
single difference. An adder forms it, and two registers keep `d(t-1)` and
`d(t-2)`. The compressor then evaluates
`3,3 + 2*d(t-1) + d(t-2) - 1,3 = d(t) + 2 d(t-1) + d(t-2)`.
The newest difference is never stored: its two pixels go straight into the
compressor as the W and Z operands.

In both directions the look-ahead adder turns the compressor's two words into
the gradient.

## The 4:2 compressor, bit by bit

All words are N-bit two's complement (default N = 11) and all arithmetic is
modulo 2^N. Every Sobel result lies in -1020..+1020, so the result is exact
even though intermediate values wrap.

*First layer, `csa_p2pp` ("P2PP:PP": plus, plus-doubled, plus).* Bit i is a
full adder on `W[i]`, `X[i-1]` and `Y[i]`. Bit 0 takes 0 in place of X. Its
sum stays at bit i, and its carry goes to bit i+1 of the carry word. The
carry word's bit 0 is 0, and the carry out of the top bit is dropped. Result:
`sint + cint = W + 2X + Y`.

*Second layer, `csa_ppn` ("PPN:PP": plus, plus, negated).* Subtraction is
`A + B + ~Z + 1`. Bit i is a full adder on `sint[i]`, `cint[i]` and `~Z[i]`,
so the sum bit is `~(A ^ B ^ Z)` and the carry is `maj(A, B, ~Z)`. The `+1`
is free: bit 0 of the carry word has no full adder driving it, so it is tied
to 1. Result: `sout + cout = W + 2X + Y - Z`.

No carry travels along the word in either layer. On a LUT-plus-carry-chain
fabric, each bit of the two layers maps onto two adjacent logic elements,
with the interim carry passed on the dedicated chain.

## The split look-ahead adder

`lookahead_adder` adds `sout + cout`. The adder is cut at `H = N/2` (bit 5
for N = 11):

```
G   = a[H-1]b[H-1] + (a[H-1]^b[H-1]) a[H-2]b[H-2]     2-bit group generate
P   = (a[H-1]^b[H-1]) (a[H-2]^b[H-2])                 2-bit group propagate
C_H = G + P * C_(H-2)
```

The lower half ripples from bit 0. The carry into bit H is taken from this
formula rather than from bit H-1. `C_(H-2)` is the ripple carry into bit H-2.
G, P and the carry-in together fit one 4-input LUT. The upper half ripples
from `C_H`. The carry-in of the whole adder is 0; the +1 of the subtraction
is already in `cout[0]`.

## Stream control

A camera delivers rows separated by horizontal blanking and frames separated
by vertical blanking. `cache_control` handles this in the simplest way that
works:

- **Stall.** `ena = pix_valid`. The cache, the row buffers and the four
  column registers advance only on a pixel, and hold through blanking or any
  other gap.
- **Flush.** `clr = frame_start`. A pulse in vertical blanking clears the
  window and datapath registers and the row and column counters. The row
  buffers are RAM and are not cleared.
- **Prime.** The counters know the position of each incoming pixel. The
  window it completes lies wholly inside the current frame only if the
  pixel's row is 2 or more and its column is 2 or more. Otherwise no result
  is produced. This covers the first two rows, stale row-buffer data and
  windows that would wrap round the left edge. The outer one-pixel ring of
  the image therefore gets no result.

## Interface and timing of the top level, `sobel_edge_detector`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `frame_start` | in | 1 | one-clock pulse before each frame, with `pix_valid` low (an assertion checks this) |
| `pix_valid`, `pix_in` | in | 1, PIX_W | pixel in raster order; low in blanking |
| `edge_valid` | out | 1 | one clock per result |
| `edge_x`, `edge_y` | out | GRAD_W, signed | x and y Sobel gradients |
| `edge_row`, `edge_col` | out | clog2(IMG_H), clog2(IMG_W) | pixel the result belongs to |

Timing works as follows:

- The result for pixel (r-1, c-1) is on the outputs two clocks after pixel
  (r, c) is accepted. The first clock shifts the pixel into the cache, and
  the result then settles through the compressor and adder. The second clock
  loads the output register.
- Blanking before or after the pixel does not change this.
- Throughput is one result per accepted pixel.
- Per frame, `(IMG_W-2) x (IMG_H-2)` results come out, in raster order.

Parameters: `PIX_W` = 8, `IMG_W` = 512, `IMG_H` = 512, `GRAD_W` = PIX_W + 3.
For other pixel widths keep `GRAD_W >= PIX_W + 3`. The x and y paths apply
this rule to their own `GRAD_W` too.

## Where this RTL follows the published architecture and where it does not

These parts follow the published architecture:

- The two-row pixel cache with its 3x3 register grid and `width-3` row
  shift registers.
- The register naming and the ENA/CLR controls.
- The separated Sobel datapaths: cache adder, two registers, two compressor
  layers and a final adder.
- The compressor equations, including the forced carry-in of 1.
- The split adder with its 2-bit generate/propagate prediction.
- The 512 x 512 x 8-bit test size.

These are this design's own choices, or departures:

- **Second-layer carry equation.** The published carry equation for the
  subtracting compressor, as printed, does not give the carry of
  `A + B + ~Z`. For example, all-zero inputs would produce a carry of 1. The
  RTL uses `maj(A, B, ~Z)`, which the subtraction requires. The sum equation
  and the carry-in of 1 are as published.
- **Which operand is doubled.** The published text says Y is doubled, but
  the bit-level drawing doubles the operand called X. The RTL follows the
  drawing; the arithmetic is the same either way.
- **Look-ahead indexing.** The prediction formula is printed as
  `C_i = G_i + P_i C_(i-1)`. It is implemented with the carry into the 2-bit
  group (bit i-2), the only reading that gives an exact sum.
- **y-path wiring.** Which wire of the y path enters which compressor input
  was not legible in the published diagram. The mapping above is the one
  that yields the y kernel.
- **Output register.** One output register stage was added. The published
  design has no explicit pipeline.
- **Control.** The controller is an assumption: the publication states only
  that the pipeline must be primed, stalled and flushed for video with
  blanking.
- **Clear.** CLR is synchronous.
- **Output format.** Results are signed and the two directions are output
  separately. They are not combined into one magnitude (for example a
  Euclidean norm) and no threshold is applied.
- **Row buffers.** The row buffers are generic RAM with a circulating
  pointer rather than a vendor RAM shift-register primitive. Their size,
  2 x 509 x 8 = 8,144 bits, is close to the 8,158 dedicated registers
  reported for the published implementation.
- **Not reproduced.** The reported clock rate (338 MHz on a Cyclone IV) and
  logic-element counts depend on mapping onto that fabric. They are not
  reproduced or checked here.

## Files

| file | content |
|---|---|
| `rtl/edge_pkg.sv` | shared sizes |
| `rtl/row_shift_register.sv` | RAM-based row delay line |
| `rtl/pixel_cache.sv` | 3x3 window and two row buffers |
| `rtl/cache_control.sv` | stall, flush, prime; window coordinates |
| `rtl/csa_p2pp.sv`, `rtl/csa_ppn.sv` | the two 3:2 compressor types |
| `rtl/compressor_4_2.sv` | the two layers together |
| `rtl/lookahead_adder.sv` | split adder with carry prediction |
| `rtl/sobel_x_path.sv`, `rtl/sobel_y_path.sv` | the two gradient datapaths |
| `rtl/sobel_edge_detector.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_sobel_full_frame.sv` | one 512 x 512 frame at default parameters |

## Verification

Every testbench checks the outputs against values it computes itself,
independently of the design. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- The compressor testbenches compare against integer arithmetic modulo 2^N,
  over random operands and the operand ranges of both gradients.
- The adder is checked exhaustively for all 2^22 operand pairs at N = 11.
  The testbench confirms that both terms of the predicted carry occur.
- The cache, controller and datapath testbenches use random stalls. They
  compare against a software history of the accepted pixels or columns.
- `tb_sobel_edge_detector` runs three 16 x 10 frames: random, black and
  white blocks, and dim random. The stream has stalls inside rows,
  horizontal blanking and a frame flush between frames. Every result is
  compared with a direct 3x3 convolution. The testbench also checks the
  exact two-clock latency, and counts each mechanism (stall, blanking,
  flush, priming, both signs of both gradients) to make sure it happened.
- `tb_sobel_full_frame` does the same for one 512 x 512 synthetic horizon
  scene at the default parameters: 260,100 results.

For each module, a deliberately broken copy was confirmed to make its
testbench fail.

To simulate with Verilator, for example the top level:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_sobel_edge_detector \
          rtl/edge_pkg.sv tb/tb_sobel_edge_detector.sv
./obj_dir/Vtb_sobel_edge_detector
```

The same command works for any `tb/tb_<module>.sv`. The full-frame
testbench runs in well under a second.
