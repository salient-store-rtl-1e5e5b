# Salient Store: archival logic for a computational-storage FPGA

An edge server that runs continuous-learning video analytics also has to
archive every frame it sees. Done the usual way, the video is encoded,
encrypted and spread over disks on the host, so the archive competes with
inference for CPU time, memory and I/O bandwidth. Salient Store (Mishra et
al.) moves the archive pipeline into computational storage drives (CSDs):
SSDs with an FPGA next to the flash. Two tasks run in that FPGA:

* a **neural video codec** that reuses features from the inference network
  and adds inter-frame prediction. Each frame is split into blocks, a motion
  vector is found against an anchor frame, and only the residual
  `R_t = F_t - predict(F_{t-1}, M_t)` is handed to a layered autoencoder;
* **quantum-safe encryption** of the compressed data with ring learning with
  errors (R-LWE). Its cost is dominated by polynomial multiplication, which
  is done by a wide schoolbook multiplier built from double modular
  multipliers.

This repository holds synthesizable SystemVerilog for the parts of that FPGA
logic whose behaviour is defined well enough to write down: the codec front
end (data movement, motion estimation, prediction and residual) and the
complete encryption engine. The neural layers, the error sampler and the
drives themselves are outside it and appear as ports.

## Block structure

```
                     salient_store_csd
  frame store  <--> +-------------------------------------------------+
  (F_t, F_t-1)      | codec_dataflow                                  |
                    |   block buffers --> motion_estimation --+       |
                    |        |                                 v      |
                    |        +------------> predict_residual ---------+--> residual rows, motion vector
                    |                                                 |     (to the layered neural encoder)
  compressed  ----> | msg_packer --> lbc_encrypt                      |
  bytes             |                  hspm (128 x sdmm, mod_reduce)  |--> ciphertext c1, c2
  error samples --> |                  public key store               |     (to the storage write path)
  key writes  ----> |                                                 |
  stored      ----> | lbc_decrypt (hspm, secret key store)            |--> recovered 256-bit blocks
  ciphertext        +-------------------------------------------------+
```

The parts run independently. The compressed bytes come back from the
encoder, which this RTL does not contain, so nothing inside the top joins the
codec output to the encryptor input.

| file | role |
|---|---|
| `salt_pkg.sv` | shared constants (n, q, widths) and the ciphertext-select enum |
| `mod_reduce.sv` | modular reduction of an 18-bit product, shift/add fold + one correction |
| `sdmm.sv` | one multiplier producing two modular products, with sign handling |
| `hspm.sv` | polynomial multiplier `d = a*b + c` mod `(x^256 + 1, q)` |
| `lbc_encrypt.sv` | R-LWE encryption controller around one `hspm` |
| `lbc_decrypt.sv` | R-LWE decryption around a second `hspm` |
| `msg_packer.sv` | packs the compressed byte stream into 256-bit message blocks |
| `motion_estimation.sv` | full-search SAD block matching |
| `predict_residual.sv` | motion-compensated prediction and residual |
| `codec_dataflow.sv` | per-macroblock loading, sequencing and intra/inter mode |
| `salient_store_csd.sv` | top level |

## The polynomial multiplier

This is the least obvious part of the design, and most of its detail follows
the published description.

### What is computed

All polynomials live in `Z_q[x]/(x^n + 1)` with `n = 256` and `q = 7681`. Every
product in R-LWE has one "large" operand with 13-bit coefficients in `[0, q)`
(the public key `a` or `p`, or ciphertext `c1` on decryption) and one "small"
operand drawn from a narrow Gaussian (`e1`, or the secret `r2`). Small
coefficients are stored as **6-bit sign-magnitude** numbers (bit 5 is the
sign, magnitude up to 31), which is what makes the double multiplier possible.
`hspm` computes `d = a*b + c`, with `b` the small operand.

### Schedule (`hspm`)

There are 256 accumulators of 13 bits and 128 `sdmm` units; unit `k` serves
accumulators `2k` and `2k+1`.

1. **Load.** The 256 coefficients of `b` shift serially into a 256-entry
   6-bit shift register, `b_0` first. Afterwards position `j` holds `b_j`.
2. **Multiply.** One coefficient `a_i` per cycle is broadcast to all 128
   units. Unit `k` multiplies it by shift-register positions `2k` and `2k+1`,
   and then the register rotates by one place, the top entry re-entering at
   the bottom. At step `i` position `j` therefore holds `b_{(j-i) mod n}`, and
   accumulator `j` collects `a_i * b_{j-i}`, the schoolbook term for
   coefficient `j`. A term whose index has wrapped (`j < i`) belongs to
   `x^{i+j-n} = -x^{i+j}` in the negacyclic ring and must be subtracted. The
   control logic raises the unit's `s` bit for each lane where `j < i`, and
   the unit negates that product. The products arrive two cycles later and
   are added modulo q into the accumulators.
3. **Read-out.** The accumulators are read in address order (`d_addr`, the
   "addr_ab" of the description). Each accepted `c_j` yields
   `d_j = acc_j + c_j mod q` one cycle later.

Without stalls an operation takes `N + (N + 2) + N` cycles plus one per phase
change: 772 cycles from the cycle after `start` to `done`, a figure the
testbench checks. Every stream has
a valid/ready pair and may stall.

### Two products from one multiplier (`sdmm`)

Since `|b| <= 31` and `a < 2^13`, each product `a*|b|` fits in 18 bits. The unit
forms one 23-bit operand `(|b1| << 18) | |b0|` and multiplies it by `a` once.
The low 18 bits of the 36-bit result are then `a*|b0|` and the high 18 bits are
`a*|b1|`. On an FPGA this is one DSP multiplication for two coefficient
products. Each half is reduced separately. The sign of lane `x` is
`b_x[5] XOR s[x]`, and a negative lane outputs `q - r`, or `0` when `r = 0`. The
sign bits pass through two registers so that they line up with the data.
Latency is two cycles: the multiplier output register, then the register
inside `mod_reduce`. A new pair can enter every cycle.

### Reduction modulo q (`mod_reduce`)

For `q = 2^13 - 2^9 + 1` the top bits `t = x >> 13` of a product are an
estimate of the quotient, and

    x - t*q = x[12:0] + (t << 9) - t

which takes one shifter, one subtractor and one adder. The folded value is
registered and then corrected in one constant-time step. For an 18-bit input
the folded value is below `4q`, so the correction subtracts the largest of
`0, q, 2q, 3q` that fits. Any modulus of the form `2^QW - 2^SH + 1` works
unchanged. Other moduli are rejected when the design is elaborated.

## Encryption flow (`lbc_encrypt`)

With public key `(a, p = r1 - a*r2)` and fresh small errors `e1, e2, e3`:

    c1 = a*e1 + e2
    c2 = p*e1 + e3 + encode(m),   encode(m)_i = m_i * floor(q/2) = 3840 m_i

Both lines have the form `a*b + c`, so one `hspm` runs two passes:

* pass 1: `b = e1` comes straight from the sample stream and is also copied
  into a 256 x 6-bit buffer; `a` is read from the key store; `c = e2`;
* pass 2: `b = e1` is replayed from the buffer; `a = p`; `c = e3` plus the
  encoded message bit.

Samples are consumed in the order `e1[0..255], e2[0..255], e3[0..255]`. They are
converted from sign-magnitude to `Z_q` as they enter. The ciphertext leaves
as `c1[0..255]` and then `c2[0..255]`, tagged with `ct_sel` and `ct_idx`. One
256-bit block takes 1548 cycles when samples arrive on every cycle. The key
store (two 256 x 13-bit arrays) is written through `key_*`, so keys can be
replaced between blocks.

## Decryption for retrieval (`lbc_decrypt`)

With the secret `r2`, `c1*r2 + c2 = e1*r1 + e2*r2 + e3 + encode(m)`: small noise
around 0 or `q/2`. This is again `a*b + c`, with `a = c1`, `b = r2` and
`c = c2`, so one `hspm` pass computes it. The secret is loaded from a local
256 x 6-bit store as `b`. Ciphertext read back from storage streams in as
`c1[0..255]`, which feed the multiply phase, then `c2[0..255]`, which feed
the read-out. A coefficient `v` decodes to 1 when `q/4 < v < 3q/4`. A block
takes 775 cycles when the ciphertext arrives on every cycle. The decryptor has
its own `hspm`, so archiving and retrieval can run at the same time. Sharing
one multiplier would halve the arithmetic at the cost of serialising the two.

## Codec front end

### Data flow (`codec_dataflow`)

A command `(mb_x, mb_y, intra)` processes one 16x16 macroblock:

1. It loads 256 pixels of the current frame `F_t` and, in inter mode, the
   32x32 window of the anchor frame `F_{t-1}` centred on the block (search
   range +/-8) into on-chip buffers. Coordinates outside the frame are
   clamped to the nearest edge pixel. The frame store is read through a
   request/ready port. Data returns in order, with any latency.
2. Inter mode: `motion_estimation` searches the window. Intra mode, used
   for the first frame of a sequence, which has no anchor: the search is
   skipped and the motion vector is zero.
3. The motion vector is reported on `mv_*`, and `predict_residual` streams the
   residual.

### Motion estimation

Full search over all 17 x 17 displacements, scored by the sum of absolute
differences. One block row (16 differences and an adder tree) is evaluated
per cycle, so one search takes 17*17*16 + 1 = 4625 cycles. Candidates are
visited row by row from (-8,-8). A candidate wins only with a strictly smaller
SAD, so ties go to the first one visited.

### Prediction and residual

The prediction of row `r` is window row `r + 8 + mv_y` from column `8 + mv_x`.
The residual row `cur - pred` (16 signed 9-bit values) is registered and sent
on a valid/ready stream. A whole block takes 16 cycles when the consumer never
stalls.

## Where this RTL departs from, or adds to, the published design

Taken from the description: the 128-unit / n = 256 schoolbook multiplier with
serial `b` loading into a 6-bit shift register, broadcast of `a_i`, 13-bit
accumulation registers and addressed serial read-out with `c` added. Also
taken: the double multiplication in one DSP with the products in the low and
high 18 bits, sign-magnitude small operands where the sign selects `q - r`,
the shift/subtract/add reduction and its register, the two-cycle multiplier
latency, and the `a*b + c` role assignment (`a, p, c1` / `e1, r2` /
`e2, e3, c2`). The codec front end follows the stated components (motion
estimation by block matching, pipelined prediction and residual, buffered data
paths) and the rule that the first frame has no motion vectors.

Choices made here, where the description is silent:

* **q = 7681.** The modulus is never stated. The 13-bit width, the shift
  block in the reduction and the 6-bit samples all fit this value.
* **Negacyclic ring and wrap handling.** The rotating shift register plus a
  per-lane `s` bit is this design's reading of the "S" input to the double
  multiplier. `s` is 2 bits wide, one per lane.
* **Reduction correction.** The description calls for a single subtraction of
  q. For q = 7681 and 6-bit operands one subtraction is not enough (the fold
  can reach almost 3q), so the correction chooses among several multiples of
  q in one constant-time step.
* **Encryption order.** One listing of the algorithm writes the second
  product as `PA * PM`. This RTL follows the prose (`c2 = p*e1 + e3 + m`),
  which is also the standard scheme.
* **Message encoding** `m_i * floor(q/2)` and the matching decoding rule, the
  e1 buffer, the sample order, the key ports, a separate multiplier for
  decryption, and all handshakes.
* **Codec geometry and protocol:** 16x16 blocks (after the H.264 macroblock),
  +/-8 search, SAD metric, raster tie-break, edge clamping, 8-bit luma only,
  the frame-store protocol and the byte interface for compressed data.
* **Speed of the front end.** The published design is meant to keep up with
  high-resolution video in real time. One front end here searches one
  candidate per cycle, which is about 6 frames per second of 1080p at
  300 MHz (see below). Real time needs several front ends working on
  different macroblocks. Only one is instantiated here.

## What is not here

* **Layered neural encoder / stacked decoder.** The layers, sizes and
  weights are not specified, so the residual and motion vector leave on
  ports and compressed bytes return on `cmp_*`.
* **Feature extractor (MobileNet).** It runs on the analytics accelerator,
  not in the storage FPGA.
* **Gaussian sampler.** Its distribution and circuit are not given. Samples
  enter on `err_*`.
* **Frame store, flash, PCIe peer-to-peer, host, HDDs.** These are devices,
  not logic. A behavioural frame-store model is in `tb/frame_store_model.sv`.

## Sizes and what fits

Defaults: 1920x1080 frames (21-bit frame-store address, 120 x 68
macroblocks), n = 256, q = 7681. Frames up to that size run unchanged, for
example 1600x900 stored with a 1920-pixel stride. Wider or taller frames
need `FRAME_W` and `FRAME_H` set to match. Examples are 2048x1024 street
scenes and 1920x1280 driving cameras, and the address widths follow the new
values automatically. Point clouds and audio bypass the codec front end, and
the encryption path takes any byte stream in 256-bit blocks.

Throughput of the codec front end, measured over a whole 1920x1080 frame
by `tb_workload_1080p_frame`: 5930 cycles per macroblock, or 48,388,800
cycles per frame (8160 macroblocks). Most of this is the full search,
17 x 17 x 16 cycles. At an example clock of 300 MHz one front end handles
about 6 frames per second, so 1080p at 60 fps needs about ten front ends
side by side, or a smaller search range. Encrypting a 256-bit block takes
two multiplier passes, 1548 cycles in all.

After generic synthesis each `hspm` has about 12k word-level cells and 12k
flip-flop bits, mostly the 256 accumulators and the 256-entry shift register.
Its 128 multipliers are 13 x 23 bits. The codec front end adds about 2k cells
and 10k flip-flop bits, mostly its two pixel buffers.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The reference results are computed inside
the testbench: schoolbook negacyclic products, exhaustive motion search and
software decryption. `tb_salient_store_csd` runs the whole design at its
default size. Two macroblocks (one inter, one intra) pass through the codec.
A stand-in encoder turns residual bytes into three 256-bit blocks, which are
encrypted, compared coefficient by coefficient and decrypted. The testbench
also counts that every mechanism occurred: frame-store stalls, residual and
compressed-stream back-pressure, sample-stream stalls, negacyclic wraps, and
both codec modes. Every stored ciphertext is then read back through the
decryptor, which must return the original block.

With plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hspm \
    rtl/salt_pkg.sv rtl/*.sv tb/tb_video_pkg.sv tb/*.sv
./obj_dir/Vtb_hspm
```

Replace `tb_hspm` with any testbench name. Each one finishes in a few seconds,
except `tb_workload_1080p_frame`, which simulates a whole 1080p frame
(about 48 million cycles, under a minute). It checks the motion vector, SAD
and residual of every macroblock away from the frame border.
`tb/frame_store_model.sv` and `tb/tb_video_pkg.sv` supply a synthetic moving
texture, so no video files are needed.

To change the design: `N`, `Q` and the frame size are parameters of the top.
`Q` must have the form `2^13 - 2^k + 1` for the reduction circuit. Block size
and search range come from `salt_pkg` (`MB_BLK`, `MB_SR`). The multiplier
array grows with `N/2`.
