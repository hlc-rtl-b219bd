# HLC encoder in SystemVerilog

HLC is a lightweight image codec for mezzanine links, the short hops in a
broadcast or display chain where video is compressed only 10–30 times.
Every frame is coded on its own, so any frame can be accessed or replaced
without touching the others. Mezzanine codecs such as JPEG‑XS stay simple
and fast, but they lose badly on screen content such as text and user
interfaces. HLC keeps a small block-based hybrid coder and adds a
**palette** mode. A block with only a few colours is then sent as a short
colour table plus one index per pixel.

Palette coding is normally hard to pipeline. Each new pixel may change the
colour it was matched to, and every pixel after it must then be compared
again. HLC avoids this: a cluster centre is fixed by the first pixel that
opens the cluster and never changes. A separate running average, the
*virtual* centre, is kept only for reconstruction. With that change the
clustering becomes a plain systolic pipeline with no feedback.

This RTL is an encoder built from that architecture. Each stage of it
(line buffer, clustering, prediction, RDO, entropy coding) can be simulated
and changed on its own. The architecture follows the published HLC design.
Many details that the publication leaves open are choices made here; they
are listed in the section "Where this RTL makes its own choices".

## Data format and coding unit

* A pixel is three 8-bit components (`hlc_pkg::pix_t`). The RTL does not
  care whether they are RGB or YCbCr 4:4:4.
* The coding unit (CU) is a **16×4** block of 64 pixels. It holds as many
  pixels as an 8×8 block, but a CU row needs only four picture lines
  instead of eight. Inside a CU, pixels are stored in raster order, at index
  `y*16 + x`.
* Input is four pixels per clock (`PPC = 4`), in raster order over the
  picture.
* Output is one bitstream per CU (`cu_bits`, `cu_len`). Stream bit *i* is
  `cu_bits[i]`, and every field is written most significant bit first.

## Pipeline

```
raster pixels ──► hlc_line_buffer ──► 16 groups of 4 pixels per CU
                     (4 lines)             │
        ┌──────────────────────────────────┼───────────────────────────┐
  S0    │ hlc_clu (8 × hlc_pce + virtual   │ CU assembly ─► hlc_dp_mode │  hlc_rate_control
        │ cluster table)                   │  (REF Buf Ori, DC/VT/HT,   │  (QP sampled at the
        │                                  │   SAD trees, compare)      │   first group of a CU)
        └──────────────────────────────────┴───────────────────────────┘
  S1    hlc_rdo: DP R-D path ‖ PLT R-D path ‖ J = 16·D + λ·R ‖ REF Buf (Rec)
  S2    hlc_ec: header + hlc_ec_plt (EGC runs) or hlc_ec_dp (FLC bit-planes + VLC)
                 └─► CU size fed back to rate control as B_act
```

Timing, counted in clocks at the `hlc_top` level:

| event | clock |
|---|---|
| last pixel group of CU *n* leaves the line buffer | *t* |
| the group leaves PCE 7 | *t* + 8 |
| palette, index map and `plt_ok` registered | *t* + 9 |
| S1 result registered | *t* + 10 |
| S2 bitstream (`cu_valid`) | *t* + 11 |

A CU enters every 16 clocks, so S1 and S2 each evaluate a whole CU in one
clock and are idle for the other 15. S1's DP path needs the reconstructed
right column of the CU to its left. That column is ready long before the
next CU reaches S1, so the pipeline has no feedback hazard.

## The clustering engine (`hlc_pce`, `hlc_clu`)

`hlc_clu` is a chain of eight `hlc_pce` stages, one per possible palette
entry. A group of four pixels moves one stage per clock. Each pixel
carries its best match so far: the SAD, the cluster index, and an
*assigned* flag. The clustering threshold is `thr = 1 << (QP >> 1)`. At
stage *k*:

* If the stage's **CC Reg** (cluster centre) is set, the pixel-to-centre
  SAD over the three components is computed. The pixel moves to cluster
  *k* when that SAD is below `thr` and below its current best. On a tie the
  lower index wins.
* If the CC Reg is empty and the pixel is still unassigned, the pixel
  becomes centre *k*. Any pixel that gets this far unassigned has already
  failed to match every existing centre, so centres open in order 0, 1, 2, …
* A group flagged `first` clears the CC Reg before use. Nothing else ever
  writes the register, so no pixel is ever re-evaluated.

The four pixels of one group pass a stage in the same clock. A centre
opened by lane *j* is visible to lanes *j*+1… of that group through a short
combinational chain. The result is the same as clustering the pixels one
by one in raster order. `tb_hlc_clu` checks exactly that equivalence
against a sequential reference.

After stage 7, every pixel has its final cluster. The **virtual cluster
table** accumulates, per cluster, the sum of the member pixels and their
count. When the CU's last group arrives, each palette colour becomes
`(sum + cnt/2) / cnt`. These means are what palette reconstruction uses,
even though clustering only ever used the static centres. A pixel still
unassigned at the end would need a ninth cluster. The CU is then marked
`plt_ok = 0` and RDO will not pick the palette for it.

## Run-length index mapping and palette rate (`hlc_rli_map`, `hlc_rce_plt`)

Each index in the 16×4 map is replaced by one of three symbols:

* **L** (0): same index as the left neighbour;
* **T** (1): same as the neighbour above;
* **N** (2): a new index, whose 3-bit value must be sent.

L is tested first. The 64 symbols are read in raster order and cut into
runs of equal symbols; a run may continue across a row end. The palette
rate estimate `R_PLT` is the sum of the bit-widths of the run lengths. The
run count, symbols and lengths are registered and used again by the
entropy coder, which does not scan the map a second time.

## Directional prediction path

* **S0 mode decision** (`hlc_dp_mode`, `hlc_dp_pred`): three predictions
  are built from *original* neighbour pixels. DC is one flat value. VT
  copies the row above. HT copies the column to the left. Each is compared
  with the CU by a SAD tree, and the smallest SAD wins, with ties going to
  DC first, then VT. The neighbours come from a `hlc_ref_buf`, which keeps
  the bottom row of every CU of the previous CU row and the right column of
  the previous CU.
* DC is `(Σtop + 4·Σleft + 16) >> 5` when both sides exist, and the mean of
  the available side otherwise. A missing neighbour is replaced by 128.
* **S1** rebuilds the chosen mode from *reconstructed* neighbours, using a
  second `hlc_ref_buf` inside `hlc_rdo`. It then forms the residual
  ORI − PRE.
* **Wavelet** (`hlc_dwt_qt`): one level of the integer Haar lifting
  transform, `H = a − b` and `L = b + (H >>> 1)`. It runs first along each
  row, then along each column. The subbands are placed in the 16×4 array
  with the horizontal low band in columns 0–7 and the vertical low band in
  rows 0–1.
* **Quantization** drops `QP >> 1` magnitude bits, rounding toward zero.
  QP 0 and 1 are therefore lossless.
* **Inverse** (`hlc_iqt_idwt`): levels are rebuilt at the middle of their
  interval, the lifting steps are undone, the prediction is added back and
  the result is clipped to 0–255.
* **Rate** (`hlc_rce_dp`): the bit-width of a coefficient is 0 for zero,
  and otherwise its magnitude bits plus a sign bit. `R_DP` is the sum over
  all 192 coefficients. The CU has sixteen 2×2 *cubes*; a cube spans all
  three components, so it holds 12 coefficients. Each cube's largest
  bit-width is its **bit-plane**, which is reused by the entropy coder.

## Mode decision (`hlc_rdo`, `hlc_qp_lambda`)

`J = 16·D + λ·R` is computed for both paths, with λ in units of 1/16 and
D the SAD between the original and the reconstruction. The palette is
chosen only if `plt_ok` is set and its J is strictly smaller. The chosen
reconstruction goes to the reference buffer and out of the top as
`cu_rec`.

λ comes from a 16-entry table. The R-D model behind it is
`D = 10⁶ · R^−1.291`, fitted over a training set of game images.
λ = −dD/dR = 1.291·10⁶ · R^−2.291, evaluated at an operating rate per QP.
That per-QP rate is not published; the table assumes
`R(QP) = 1000 · 2^(−QP/5)` bits per CU. Entry = round(16·λ), which gives
3, 4, 5, 7, 10, 14, 19, 26, 35, 48, 66, 91, 125, 172, 236, 324.

## Rate control (`hlc_rate_control`)

Budgets are counted in bits per CU. `B_tar = bpp · 64`, where the input
`bpp_q4` is bits per pixel with 4 fractional bits (1.75 → 28). After each
coded CU:

* `B_err += B_tar − B_act`, saturated at ±2^17.
* The next CU's QP is the smallest QP whose expected size `B_QP` is at most
  `B'_tar = B_tar + (B_err >>> 3)`. If no QP qualifies, the QP is 15.

The QP-BPP table is `round(1536 · 2^(−0.4·QP))`. Both its values and the
QP range 0–15 are assumptions. A CU's size becomes known about 11 clocks
after the CU, so each QP decision lags by one CU.

## Bitstream of one CU (`hlc_ec`, `hlc_ec_plt`, `hlc_ec_dp`)

| field | bits | present |
|---|---|---|
| PLT flag | 1 | always |
| QP | 4 | always |
| DP mode (0 DC, 1 VT, 2 HT) | 2 | DP |
| bit-plane of cube 0…15 | 4 each | DP |
| coefficients of cube k, order row/column/component | bit-plane(k) each, two's complement | DP |
| palette size − 1 | 3 | PLT |
| palette colours | 24 each | PLT |
| run count − 1 | EGC0 | PLT |
| per run: symbol, length − 1 | 2, EGC0 | PLT |
| per pixel of an N run: index | 3 | PLT |

EGC0 is the zero-order Exp-Golomb code. The value *v* is sent as
`⌊log2(v+1)⌋` zeros followed by *v*+1 in binary.

The fixed-length fields come first: the DP bit-planes and the palette run
lengths. They fix where every variable-length field starts, so a decoder
or a parallel bit packer does not have to decode serially. The largest
CU (DP, every coefficient 11 bits wide) needs 2183 bits; `MAXBITS` is 2560.
The output is one whole CU per `cu_valid`. Packing CUs into a continuous
stream is left to the system.

## Line buffer (`hlc_line_buffer`)

There are four banks, each one picture line long: `WIDTH/4` words of four
pixels. The buffer first fills all four lines, with `in_ready` high. It then
drains them CU by CU, 16 clocks per CU, while `in_ready` is low. **This
halves the sustained input rate**: the average is 2 pixels per clock at
the input, while the core behind it takes 4. The publication keeps the
line buffer at four lines but does not say how filling and draining
overlap. An overlapped scheme in the same storage needs addresses that are
permuted from stripe to stripe; it has not been built.

## Where this RTL makes its own choices

Taken from the published architecture:

* the three stages and the blocks in each;
* the 16×4 CU;
* eight PCEs with a static CC register and a virtual CC average;
* the threshold `1 << (QP >> 1)`;
* the L/T/N symbols and their codes;
* the run-length rate and the bit-width rate;
* the bit-planes of sixteen 2×2 cubes, reused by fixed-length coding;
* EGC0 for the run count and run lengths;
* the DC/VT/HT modes;
* the J = D + λR decision, with λ from the slope of the fitted R-D curve;
* the rate-control data flow: difference, accumulation, `>>3`, addition,
  then comparison against the QP-BPP table.

Chosen here:

* the pixel format and PPC = 4;
* equal SAD and threshold: the pixel opens a new cluster (the written
  description says a pixel joins when its SAD is *below* the threshold);
* tie rules, the DC formula, and 128 for missing neighbours;
* the Haar filter, a single level, and the subband layout;
* the quantizer and its reconstruction points;
* the cube grouping across components;
* the bitstream syntax and header;
* both tables' contents;
* the J scaling and the `B_err` saturation;
* the fill/drain line buffer.

Not present:

* a bitstream packer;
* the decoder (its architecture is not published);
* any frame-level syntax.

## Sizes and throughput

At the defaults (`WIDTH = 3840`, `HEIGHT = 2160`):

* The line buffer holds 4 × 3840 × 24 bit = 360 kbit.
* Each reference buffer holds 240 × 16 × 24 bit = 90 kbit, plus one
  column.
* The core accepts one CU every 16 clocks, which is 4 pixels per clock:
  1200 Mpixel/s at 300 MHz. 4K at 120 frames/s needs 995 Mpixel/s.
* With the fill/drain line buffer the input side averages 600 Mpixel/s.
  4K at 120 frames/s therefore does *not* fit at 300 MHz unless the line
  buffer is replaced. No clock frequency has been measured for this RTL.

## Files

| file | contents |
|---|---|
| `rtl/hlc_pkg.sv` | types, bundles between stages, tables, bit helpers |
| `rtl/hlc_line_buffer.sv` | four-line raster-to-CU buffer |
| `rtl/hlc_pce.sv`, `rtl/hlc_clu.sv` | clustering engine and unit |
| `rtl/hlc_rate_control.sv` | rate control |
| `rtl/hlc_ref_buf.sv` | neighbour store (original and reconstructed) |
| `rtl/hlc_dp_pred.sv`, `rtl/hlc_dp_mode.sv`, `rtl/hlc_sad_tree.sv` | DP prediction and S0 mode decision |
| `rtl/hlc_dwt_qt.sv`, `rtl/hlc_iqt_idwt.sv`, `rtl/hlc_rce_dp.sv` | DP transform, quantization, rate |
| `rtl/hlc_rli_map.sv`, `rtl/hlc_rce_plt.sv`, `rtl/hlc_plt_rec.sv` | palette mapping, rate, reconstruction |
| `rtl/hlc_qp_lambda.sv`, `rtl/hlc_rdo.sv` | stage S1 |
| `rtl/hlc_ec_plt.sv`, `rtl/hlc_ec_dp.sv`, `rtl/hlc_ec.sv` | stage S2 |
| `rtl/hlc_top.sv` | the encoder |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_hlc_top_full.sv` | one full 3840×2160 frame at the default size |
| `tb/tb_hlc_workload_bpp.sv` | the four target rates on synthetic screen content |

## Verification

Every testbench checks its block against a reference model written
independently inside the testbench. The references include:

* sequential clustering;
* integer Haar transforms;
* bit-width counts;
* a parser for each coding path.

Each testbench prints `TB_RESULT checks=N failures=M`.

`tb_hlc_top` runs four 64×16 frames through the encoder. Its decoder,
written in the testbench, parses every CU and rebuilds it from its own
decoded picture. The result must equal the reconstruction the encoder
reports, bit for bit. The testbench also checks CU order and the 16-clock
CU spacing. It fails unless each of the following has happened at least
once:

* the palette chosen;
* DP chosen;
* each of DC, VT and HT chosen;
* a palette overflow (a ninth cluster needed);
* the QP raised and the QP lowered by rate control;
* an input stall.

`tb_hlc_top_full` does the same for one complete 3840×2160 frame (129 600
CUs) at 1.75 bpp, with the top at its defaults. It takes about 1.5 minutes
of simulation.

`tb_hlc_workload_bpp` codes two 256×64 frames at each of the four target
rates: 1.75, 1.50, 1.25 and 1.00 bpp. It decodes and compares every CU
in the same way. It checks that rate control reacts: an over-budget pair
of frames must run at a mean QP of at least 13, and a lower target must
never give a lower mean QP. The measured result is a real limitation of
this design:

| target | coded | mean QP |
|---|---|---|
| 1.75 bpp | 2.74 bpp | 14.95 |
| 1.50 bpp | 2.74 bpp | 15.00 |
| 1.25 bpp | 2.72 bpp | 15.00 |
| 1.00 bpp | 2.74 bpp | 15.00 |

The palette rate used in the mode decision follows the paper: the sum of
the bit widths of the run lengths. It leaves out the colour table and the
indices sent for new runs. Dense text-like CUs therefore choose the
palette even when it costs more bits than DP at QP 15, and raising the QP
barely changes their size. On this content the encoder cannot get below
about 2.7 bpp. Adding the colour-table and index bits to the palette rate
would be the obvious fix. It was not made, because the paper defines the
rate this way.

Simulating with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/hlc_pkg.sv tb/tb_hlc_top.sv --top-module tb_hlc_top -Mdir obj_top
./obj_top/Vtb_hlc_top
```

Replace `tb_hlc_top` with any other testbench name. Every module in `rtl/`
also passes `verilator --lint-only -Wall`, apart from warnings about
unused signals.

What the tests do not cover: compression quality (no PSNR against real
content), timing closure at any clock, and decoding by anything other than
the testbench's own decoder.
