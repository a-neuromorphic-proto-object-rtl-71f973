# Proto-object grouping accelerator for dynamic visual saliency

A saliency map tells a vision system where to look. The model behind this
RTL does not score isolated features. It scores *proto-objects*: regions that
an early visual system would already group into a figure on a background.
For video, the model first filters each feature channel in time. Intensity
goes through a strongly phasic (motion-sensitive) temporal filter, the four
colour opponencies through a weakly phasic one, and the four orientation
channels are not filtered in time. Then, for each of the nine channels, it
finds edges, decides which side of each edge is the figure ("border
ownership"), and integrates that around candidate object centres
("grouping"). The grouping maps of all channels are normalised and added into
the saliency map.

Grouping is the expensive part. This RTL implements it as an FPGA
accelerator for **one feature channel**. It takes a 112x84 8-bit map, builds
a three-level pyramid, runs the filter chain on all three levels at once, and
returns the grouping maps. The temporal filtering, the mask step in the
middle of the chain and the final normalisation stay in software on a host
PC. This is the split of the original FPGA implementation, which ran one
channel at a time on an Opal Kelly XEM7350 (Kintex-7) board at 100 MHz.

## Data flow

```
 host                         FPGA (podvs_top, one channel)
 ----                         -------------------------------------------------
 feature map 112x84 --P1-->  L0 map --P2 downsample--> L1 80x60, L2 56x44
                             per level, in parallel:
                               P3 edge_cs_filter : 4 complex edge, ON, OFF
                               P4 vonmises_filter: 16 von Mises maps
                             P5 vm_sum x16       : sum across levels (in place)
                               P6 border_own     : 8 BO maps (left/right x 4 ori)
 read 24 BO maps  <--------  (bo_ready)
 masks = max(L,R) -------->  24 one-bit mask maps
 grp_start        -------->    P7 grouping       : 4 grouping maps
 read 12 maps     <--------  (grp_done)
 normalise, merge levels and channels (host)
```

Every map is its own block RAM, 8 bits per pixel. That is 35 byte maps and
8 one-bit mask maps per level, 129 memories and about 4.8 Mbit in total.
The 8-bit width is not stated in so many words. It follows from the BRAM
budgets given for each stage: for example 16 von Mises maps over
112x84 + 80x60 + 56x44 = 16 672 pixels is the quoted ~266.7 KB.

| stage | module | work per pixel | cycles at 112x84 (measured) |
|---|---|---|---|
| P2 pyramid | `downsample` x2 | 5 | 24 002 (80x60 sets the pace) |
| P3 edge / center-surround | `edge_cs_filter` x3 | 26 load + 75 MAC + square root | 1 128 962 |
| P4 von Mises filtering | `vonmises_filter` x3 | 26 + 75 + 1 | 959 618 |
| P5 von Mises sum | `vm_sum` x16 | 6 per level summed + 1 store | 258 402 |
| P6 border ownership | `border_own` x3 | 6 | 56 450 |
| P7 grouping | `grouping` x3 | 26 + 75 + 1 | 959 618 |

The three levels run in parallel and a stage ends when its slowest level
(the 112x84 one) ends. One channel takes 3.39 M cycles, 34 ms at 100 MHz,
plus the host's transfers and mask computation.

Timings that match the published figures exactly: 5 cycles per pixel and
24 000 cycles for the pyramid, 3 cycles per MAC and 75 per 5x5 weighted sum,
the P5 term count (241 728 cycles, quoted as ~241K), and 6 cycles per pixel
for border ownership (56 448, quoted as ~56K). The source gives about 1.9 M
cycles for each 5x5 stage but does not break that figure down. The engine
here is about twice as fast, because its patch load costs only 26 cycles.

## The 5x5 weighted-sum engine

`conv5x5_engine` is shared by P3, P4 and P7 and sets most of the run time.
It scans the map in raster order. For each pixel it:

1. **Loads the patch.** It issues 25 reads, one per cycle, on a combinational
   address, and captures each word one cycle later. All `N_IN` input maps are
   read at the same address. Taps outside the map are zero.
2. **Runs the MACs.** There are `N_OUT` lanes, each a single multiply-accumulate
   that walks the 25 taps at 3 cycles each: operand select, multiply,
   accumulate. The engine puts the current tap index on `tap`, and the user
   returns every lane's coefficient for it combinationally on `coef`. This
   keeps the kernel tables outside the engine.
3. **Offers the sums.** `out_valid` stays high with the sums held until
   `out_ready`. The edge filter uses this to hold the engine while its four
   square-root units run.

Lane `o` reads input `(o*N_IN)/N_OUT`. That one rule covers all three users:

| user | inputs | lanes | wiring |
|---|---|---|---|
| P3 | 1 pixel map | 9 | 4 even, 4 odd, 1 center-surround, all on the same input |
| P4 | ON, OFF | 16 | lanes 0-7 on ON, 8-15 on OFF, kernel `o%8` |
| P7 | 8 masked differences | 8 | one input per lane |

In P7 each input is built on the fly from four memories: mask, own-side BO
map and opposite-side BO map. It is `mask ? B_own - wp*B_other : 0`, so the
masked maps are never stored.

## Arithmetic of each stage

All kernels have 25 signed 8-bit taps. Each is scaled so that its positive
taps sum to 64, and every weighted sum is shifted right by 6 and saturated
to 0..255. The kernel shapes are this design's own, because the source names
the kernels but does not give them. `rtl/podvs_pkg.sv` lists the formulas they
sample (Gabor-like even/odd edge pairs, a difference of Gaussians, and von
Mises lobes on a ring).

* **P2:** destination pixel (x, y) copies source pixel
  (x*floor(256*Ws/Wd) >> 8, y*floor(256*Hs/Hd) >> 8). That is a constant
  multiply and a shift, which the source describes as bit-shift address
  approximation. Rounding down keeps the source index in range.
* **P3:** complex edge C_t = sqrt(even_t^2 + odd_t^2) >> 6, ON = max(cs,0) >> 6,
  OFF = max(-cs,0) >> 6. The square root is `isqrt`, a 16-cycle restoring
  circuit. The original used a vendor core.
* **P4:** sixteen maps, index `pol*8 + side*4 + ori` (pol 0 = light/ON,
  1 = dark/OFF; side 0 = left, 1 = right).
* **P5:** S_j(x,y) = sum over k = j..2 of V_k(scaled x, scaled y) >> k. The
  result overwrites V_j in place. This is safe because level j is only read
  again by levels above it, and those are processed first.
* **P6:** B_s[t] = sat8( sum over p of (C_t * max(0, S_p,s[t] - S_p,opp(s)[t])) >> 8 ).
  Figure activity on the preferred side excites, activity on the other side
  inhibits, and the response appears only on edges. The light + dark sum is
  the published form.
* **P7:** GrpSum_t = sat8( (conv(ML_t.*(B_L - B_R), v_t,left) +
  conv(MR_t.*(B_R - B_L), v_t,right)) >> 6 ), with w_p = 1 and sat8
  clipping to 0..255. The left and right terms are added before the shift.

## Where this RTL fills gaps or departs from the source

* **Von Mises sum range and weight.** The step list says to sum "each lower
  level, k <= j" and to multiply by 2^-j. Only the reading used here
  (the target level plus all coarser levels, each weighted 2^-k by its own
  level) reproduces the published 241K-cycle figure. The other reading gives
  158 400 cycles.
* **Meaning of `*` in the grouping equations.** The text calls v_t the "von
  Mises summation responses". The equations and the 1.9 M-cycle stage time
  point to a 5x5 convolution with the von Mises kernel. The RTL convolves.
* **Border-ownership formula.** The source only says that B_light and B_dark
  come from the P5 sums. The form above is this design's choice.
* **Kernels, rectification, the shift-by-6 scaling, zero padding, the
  saturation of every stored value** and the host port protocol are this
  design's choices.
* **Level 2 is 56x44**, as printed, although 112x84 halved would be 56x42.
* **Only the 112x84 configuration is built.** The 80x60 variant's lower
  pyramid levels are not given. Its parallel-channel count is also given
  inconsistently, as both 2 and 3 channels.

Not in the RTL:

* the host-side feature extraction (temporal filters, colour opponency)
* the mask computation (a max of left against right)
* the normalisation and merge
* the USB 3.0 link

The testbench models the mask step as `ML = B_L > B_R`, `MR = B_R > B_L`.

## Host interface of `podvs_top`

All ports are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset of the control state. The memories are not reset, because each stage
writes a whole map before the next stage reads it.

1. In `ST_IDLE`, write the input map with `px_we/px_addr/px_data`, raster
   order, address y*112+x.
2. Pulse `start`. P2..P6 run, then `bo_ready` rises and `stage` is `ST_MASK`.
3. Read BO maps with `rd_en`, `rd_sel=RD_BO`, `rd_level` (0..2), `rd_idx`
   (0..3 left at 0/45/90/135 degrees, 4..7 right) and `rd_addr`. `rd_data`
   is valid one cycle later.
4. Write the 24 mask maps with `mask_we/mask_level/mask_idx/mask_addr/mask_data`,
   indexed like the BO maps.
5. Pulse `grp_start`. `grp_done` pulses at the end of P7. Read the grouping
   maps with `rd_sel=RD_GRP`, `rd_idx` 0..3.

## Files

* `rtl/podvs_pkg.sv`: sizes, types, the stage enum, kernels and helpers.
* `rtl/podvs_top.sv`: the channel. It holds the memories and the muxing of
  memory ports between stages.
* `rtl/stage_sequencer.sv`: runs the stages in order.
* Stage modules: `downsample`, `edge_cs_filter`, `vonmises_filter`, `vm_sum`,
  `border_own`, `grouping`.
* Building blocks: `conv5x5_engine`, `isqrt`, `bram`.
* `tb/podvs_ref_pkg.sv`: a loop-level reference of every stage, plus the
  host mask model.
* `tb/tb_<module>.sv`: self-checking testbenches, one per module.
  `tb_podvs_top` runs the whole channel at the default size.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on a cycle
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl \
    rtl/podvs_pkg.sv tb/podvs_ref_pkg.sv tb/tb_podvs_top.sv --top tb_podvs_top
./obj_dir/Vtb_podvs_top
```

What each testbench checks:

* **`tb_podvs_top`** runs the full-size channel twice, back to back, in
  about 30 s:
  * loads a synthetic scene: light rectangles, a dark disc, a saturating
    bar and a bright frame edge
  * for the second frame, moves the objects by six pixels, as between two
    video frames
  * compares all 24 BO maps and 12 grouping maps with the reference
  * checks each stage's cycle count
  * counts that every stage, both mask values, saturation, zero padding and
    the in-place P5 update all occur
* **Unit testbenches** use small maps (the downsampler runs at its real
  sizes). Each compares every output pixel with the reference and checks
  the cycle count.

## Changing it

* **Level sizes** are `LVL_W`/`LVL_H` in `podvs_pkg`. The modules take their
  sizes as parameters, and `ADDR_W` must cover the largest level.
* **Kernels** are `FILT_K` and `VM_K`. Keep the positive-tap gain at 64, or
  change `KSHIFT`.
* **More channels in parallel** means instantiating `podvs_top` several
  times. Each instance is independent.
