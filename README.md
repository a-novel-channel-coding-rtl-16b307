# Haar wavelet + Hamming code link for progressive image transmission

This design sends a grey-scale image over a noisy channel one small piece at a
time. The transmitter cuts the image into 8 x 8 subblocks. It transforms each
subblock with a 3-level 2-D Haar wavelet transform and protects every wavelet
coefficient with a single-error-correcting Hamming code. Each subblock is sent
as soon as it is ready, so the receiver can show the image block by block.
The receiver corrects one flipped bit per codeword, undoes the transform and
puts the image back together in raster order.

The scheme follows the paper "A Novel Channel Coding for Progressive
Transmission of Medical Images" (P. Jagatheeswari, M. Rajaram). The paper
gives the algorithms: the averaging and differencing steps of the Haar
transform, and the parity-coverage rule and syndrome decoding of the Hamming
code. It does not give an architecture, widths, sizes or interfaces. Those,
and everything marked below as this design's choice, are my own work.

## The link at a glance

```
 transmitter                                             receiver
 pix_in ─► image_segmenter ─► haar2d_fwd ─► hamming_enc ─► tx_code
                                                                │  (channel,
 pix_out ◄─ image_merger ◄─ haar2d_inv ◄─ hamming_dec ◄── rx_code   off chip)
```

`pit_system` is the top module. It holds both halves. They share only the
clock and reset. The channel sits outside, between the `tx_*` and `rx_*`
ports: connect them directly for a loop-back, or through a real link. Every
arrow is a valid/ready stream. A word moves on a rising clock edge when both
`valid` and `ready` are high, and a sender holds its word while `ready` is
low. Assertions in the stream sources check that rule.

| unit | work per item |
|---|---|
| `image_segmenter` | buffers 8 image rows (one *strip*), then sends the strip's 32 subblocks left to right, each in raster order |
| `haar2d_fwd` | loads 64 pixels; transforms all 8 rows, then all 8 columns, one line per clock; sends 64 coefficients |
| `hamming_enc` | 9-bit coefficient to 13-bit codeword, combinational |
| `hamming_dec` | 13-bit codeword to corrected 9-bit coefficient plus syndrome and flags, combinational |
| `haar2d_inv` | loads 64 coefficients; inverse on all columns, then all rows; sends 64 clamped pixels |
| `image_merger` | collects a strip's 32 subblocks, then sends the strip's 8 rows in raster order |

## The integer Haar transform

This part needs the most care. It is the only source of loss in the whole
link.

### One level on one line

A line of L samples is split into pairs (a, b) = (x[2i], x[2i+1]). Each pair
gives:

* the average m = floor((a + b) / 2), written to entry i;
* the difference d = a - m, written to entry L/2 + i.

The inverse is a = m + d and b = m - d. `a` always comes back exactly. `b`
comes back one too small when a + b is odd, because the floor dropped half a
grey level. No quantiser or thresholding is used, so this rounding is the only
loss. Over the six inverse steps of a 2-D block, it adds up to about +-12 grey
levels in the worst case of random data. Smooth images lose much less.

### Three levels, and the 2-D order

`haar1d_fwd` applies the level three times. Each new level works on the first
half of the previous one's output: lengths 8, 4 and 2 for the default 8-sample
line. The result is one overall average, then the level-3, level-2 and
level-1 differences.

Worked example:

```
9 7 3 5 6 10 2 6  ->  8 4 8 4 | 1 -1 -2 -2  ->  6 6 2 2 | ...  ->  6 0 2 2 1 -1 -2 -2
```

`haar2d_fwd` applies this full 3-level 1-D transform to every row, then to
every column. This is the separable ("standard") decomposition, not the
pyramid one that would alternate rows and columns level by level. For an 8 x 8
block, coefficient [0][0] is the block's mean, and the rest are detail bands of
sizes 1, 2 and 4 in each direction. `haar2d_inv` undoes the columns first,
then the rows. The paper's pictures of the row-wise, column-wise and final
results show this kind of decomposition. Its text describes only the 1-D
procedure. The pictures do not make clear which axis the paper's "row-wise"
pass runs along. Doing the columns first instead would change only the
rounding.

### Widths

Pixels are 8-bit unsigned. Coefficients are 9-bit two's complement, and that
is enough for every coefficient:

* An average lies between its two samples, so averages of pixels stay in
  0..255.
* A difference a - floor((a+b)/2) equals ceil((a-b)/2). If the samples span
  at most 255, the difference lies in -127..128.
* Each line the column pass sees is made of entries of one kind only:
  averages of pixels, or differences. Either kind spans at most 255, so the
  same bound holds again.

The inverse unit works internally on 9 + 2*3 = 15 bits. Each of its six steps
can at most double a value, so no value wraps, even for garbage coefficients
from an uncorrectable word. Its output is clamped to 0..255. The clamp matters
because a pixel of value 0 can come back as -1.

## The coefficient code

Each coefficient becomes one Hamming codeword. For k data bits there are r
parity bits, with r the smallest number such that 2^r >= k + r + 1. For
k = 9, this gives r = 4 and a 13-bit codeword. (`K = 7` gives the (11,7) code
of the paper's example.)

* Positions are numbered 1..13. `code[p-1]` is position p.
* Positions 1, 2, 4 and 8 hold parity bits. Data bit 0 goes to position 3, bit
  1 to position 5, and so on up to bit 8 at position 13.
* Parity bit 2^j is the even parity of every position whose number has bit j
  set.
* The decoder recomputes the four checks, parity bits included. Read as a
  binary number, the failing checks (the *syndrome*) give the position of a
  single flipped bit, and that bit is inverted.

Syndromes 14 and 15 point past the 13-bit word. No single error can cause
them, so the word is passed on unchanged and flagged `rx_uncorrectable`.
There is no overall parity bit. A double error whose syndrome lands inside the
word is therefore "corrected" into a third wrong bit. The paper's text claims
double-error detection, but the construction it gives cannot provide it.
`corrected_count` and `uncorrectable_count` count the two outcomes since
reset.

## Timing

All figures below are at full rate, with no stalls from outside.

* `haar2d_fwd` and `haar2d_inv`: 64 load cycles, then exactly 16 transform
  cycles, then 64 output cycles. That is 144 cycles per block, and blocks do
  not overlap inside a unit. The first output appears 2N + 1 = 17 cycles
  after the cycle that presented the last input.
* `image_segmenter` and `image_merger`: 8 x 256 = 2048 fill cycles, then the
  drain. The input is held off (`ready` low) while a strip drains. There is
  one strip buffer, not two.
* Whole link: the transmitter needs about 2048 + 32 x 144 = 6656 cycles per
  strip. That is about 213 k cycles for a 256 x 256 frame, about 3.3 cycles
  per pixel. The receiver paces itself the same way. The full-size test, with
  20 % random stalls on every port, takes 246 k cycles for one frame.

Only the cycle counts for the transform units are checked by testbenches.

## Parameters

| parameter | default | meaning | from the paper? |
|---|---|---|---|
| `LEVELS` | 3 | Haar decomposition levels | yes |
| `N` | 8 | subblock edge; a power of two, at least 2^LEVELS | no |
| `IMG_W`, `IMG_H` | 256, 256 | image size; multiples of N | no |
| `PIX_W` | 8 | grey-level bits | no |
| `COEF_W` | 9 | coefficient bits (PIX_W + 1) | no |
| `K` (Hamming) | 9 = COEF_W | data bits per codeword; n = K + r | example k = 7 only |

The package `pit_pkg` holds the shared defaults and the Hamming helper
functions `hamming_r`, `hamming_n` and `data_pos`.

## What is this design's own choice

* Sizes: the 256 x 256 image, the 8 x 8 subblock and 8-bit pixels. The paper
  states none of them.
* Rounding: the floor in the average, and the difference taken from the
  first sample of each pair.
* Decomposition order: separable, with rows first in the transmitter and
  columns first in the receiver.
* Coefficient order: raster order of the transformed block, with no
  reordering by band.
* Code layout: one codeword per coefficient, sent in parallel, with no
  serialiser. Even parity, and the data-bit placement.
* Decoder extras: the uncorrectable flag and the error counters.
* Microarchitecture: the valid/ready streams, the one-line-per-clock
  schedule, the single strip buffers, the synchronous active-low reset and
  the output clamp.
* `image_merger`: the paper shows a reassembled image but does not describe
  this unit at all.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself.
Each has a watchdog that counts a failure if it hangs. The reference models
are in `tb/haar_ref_pkg.sv`: integer Haar transforms and a Hamming
encoder/decoder, written independently of the RTL.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    tb/haar_ref_pkg.sv rtl/pit_pkg.sv tb/tb_pit_system.sv --top-module tb_pit_system
obj_dir/Vtb_pit_system
```

The same command works for any testbench `tb/tb_<unit>.sv`. Two of them cover
the whole link:

* `tb_pit_system` runs three 32 x 16 frames. The testbench plays the channel.
  It corrupts about 40 % of the codewords in five ways: no error, one data
  bit, one parity bit, two bits with an in-range syndrome, and two bits with
  syndrome 14 or 15. It predicts the output from what was actually sent, and
  requires every mechanism to occur: each error kind, input hold-off, the
  stall on every port, block ends and frame ends.
* `tb_pit_system_full` runs one 256 x 256 frame at the default parameters,
  with single-bit errors only. Every pixel must equal the reference
  reconstruction and lie within 16 grey levels of the original; the largest
  error seen is 11. It takes well under a second.

The unit testbenches check the 1-D transforms exhaustively against the
reference on random data, with a worked example. They check both Hamming
units on every data word with every single error and every double error, for
k = 9 and k = 7. For the 2-D units they check latency and block period, and
for the segmenter and merger the ordering and end markers.
