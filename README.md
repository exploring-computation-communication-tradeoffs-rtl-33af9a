# In-camera accelerators: face authentication and bilateral-space stereo

A camera system can spend energy on computing or on moving data, and the right
split depends on the application. This RTL implements the accelerators from
two camera systems at opposite ends of that range:

* **Face authentication for a battery-free camera.** Every frame goes through
  a chain of filters. Each one is more selective and more costly than the one
  before:
  1. A cheap motion detector drops frames in which nothing changed.
  2. A Viola-Jones face detector finds face-sized windows in the frames that
     are left.
  3. A small fixed-point neural network (400-8-1) scores each window against
     one enrolled user.

  Only the last stage does real work, and only on the few windows that reach
  it.
* **Depth refinement for a VR camera rig.** A streaming single-precision
  floating-point datapath applies the bilateral-space stereo (BSSA) filter to
  vertices of a bilateral grid. Twelve identical compute units sit behind one
  AXI-Stream port.

The two systems are independent. `camera_accel_top` places them side by side,
each with its own clock and reset:

| Side | Clock | Input | Output |
|---|---|---|---|
| Face authentication | `clk_fa` | pixels, `pix_*` | one result per face, `res_*` |
| BSSA stereo | `clk_vr` | AXI-Stream vertices, `s_axis_*` | AXI-Stream results, `m_axis_*` |

Both sides are configured through write ports: the cascade, the network
weights, the sigmoid table and the microcode. The image sensor, the camera
serial link, the DMA engines, the bus and the host CPU are not part of this
RTL. Their signals are ports.

## Face authentication pipeline (`fa_pipeline`)

```
pix ─► motion_detect ─► frame buffer + vj_detector ─► window_resample ─► nn_pu ─► res_*
         (drop frame)     (cascade scan)              (20x20, Q1.7)       (400-8-1)
```

A frame moves through the pipeline in these steps:

1. **Capture.** The frame is written into a frame buffer. At the same time,
   the detector builds its integral image and the motion detector sums tiles.
2. **Motion decision.** If the motion detector reports no motion, the frame
   is dropped and counted in `stat_skipped`.
3. **Scan.** Otherwise the detector scans the frame.
4. **Authenticate each face.** For every window the detector reports:
   * the window is resampled to 20x20 pixels by nearest neighbour;
   * the pixels are written into the network's input SRAM as Q1.7 (pixel >> 1);
   * the network runs, and its score leaves on `res_*` with
     `res_match = (score >= auth_thr)`.

   The detector waits on its `det_ready` while this happens. The stall cycles
   are counted in `stat_det_stall`.
5. **Release.** `pix_ready` stays low from the end of capture until the last
   result of the frame has been accepted.

The camera this targets takes one frame per second, so holding the sensor off
during processing costs nothing.

### Motion detector (`motion_detect`)

1. The frame is cut into 8x8 tiles. Each tile's pixel sum builds up in one
   accumulator per tile column, while the pixels stream past.
2. When the last pixel of a tile arrives, its sum is compared with the same
   tile's sum from the previous frame. The tile counts as changed if the
   difference is more than `thr`.
3. The frame has motion if at least `min_tiles` tiles changed.

The first frame after reset always reports motion. The only storage is one
sum per tile.

### Viola-Jones detector (`vj_detector`)

**Capture.** While pixels stream in, the detector builds an integral image.
Each entry holds the sum of all pixels above and to the left of it. It is
built from a running row sum and a one-row line buffer, and stored with one
extra row and column of zeros. Any rectangle sum then costs four reads.

**Scan.** A square window slides over the frame:
1. It starts at 20x20 and moves `STEP` pixels at a time, row by row.
2. After each full pass over the frame, the window grows by `SCALE_Q8/256`
   (1.10 by default).
3. The scan stops when the window no longer fits in the frame.

**Evaluating one window.** At each position the cascade runs stage by stage:
1. A feature has up to three rectangles with small signed weights. Each
   rectangle's position and size are scaled by the window scale.
2. The feature compares its weighted sum (times 256) with its threshold
   times the area factor `scale²/256`.
3. The feature then adds either its left vote or its right vote to the
   stage sum.
4. A stage sum below the stage threshold rejects the window at once.

Most windows stop after the small first stage, and this is what makes the
algorithm cheap. `stat_reject_first` counts those windows.

**Cost.** Each rectangle takes five cycles: four reads and one accumulate.

**Storage.** The cascade is held in RAM: up to `MAX_STAGES` = 20 stages and
1024 features. A feature record (`vj_pkg::feat_t`) holds:
* three rectangles, each `{x, y, w, h}` of 5 bits plus a 4-bit signed weight;
* a 16-bit threshold;
* two 12-bit votes.

A stage record holds the first feature, the feature count and the stage
threshold.

The design applies no variance normalisation. The thresholds are only scaled
by the window area, so a cascade trained with normalisation must have its
thresholds adapted.

### Neural network processing unit (`nn_pu`)

The network is evaluated by one processing unit made of these parts:

* an input/activation SRAM of 512 x 8 bits;
* a 32-entry bias ("offset") memory;
* a chain of `N_PE` = 8 processing elements (PEs), each with its own
  512-word weight memory;
* an accumulator FIFO;
* a LUT sigmoid unit;
* an output FIFO.

**Number formats**

| Quantity | Width | Format |
|---|---|---|
| Activations | 8 bits | Q1.7 |
| Weights | 8 bits | Q3.5 |
| Products | 16 bits | |
| Partial sums | 26 bits | Q14.12 |

**How a layer is computed.** The array is input-stationary. A layer with
`n_in` inputs and `n_out` neurons runs as `ceil(n_in/8)` passes. Each pass
works in four steps:

1. **Load.** The sequencer reads the pass's (up to) eight inputs from the
   SRAM onto a broadcast bus. PE *j* latches input *j*.
2. **Stream.** One token per neuron enters the head of the chain, one per
   cycle. A token is `{valid, weight address, partial sum}`. Its starting sum
   is:
   * the neuron's bias `<< 7` on the first pass;
   * the neuron's partial sum from the accumulator FIFO on later passes.
3. **Multiply and add.** Each PE reads the token's weight from its local
   memory, adds `x_j * w` to the sum and passes the token on. A token advances
   one PE every two cycles.
4. **Drain.** On a non-final pass, the sums leaving the last PE are pushed
   into the accumulator FIFO, in neuron order, ready for the next pass. On the
   final pass, the sigmoid unit instead takes the sums from the PE that held
   the last input. That PE is not always the last one, because the last pass
   can be short.

**Sigmoid.** The sigmoid unit computes
`LUT[saturate8(sum >>> 8) + 128]`. The 256-entry table spans −8 to +8 in
steps of 1/16. The resulting activations are written back to the SRAM as the
next layer's inputs. For an output layer they are also pushed to the output
FIFO and appear on `d_out`.

**Weight layout.** Weights are stored by pass. PE *j* holds, at address
`wbase + p*n_out + n`, the weight of input `p*8 + j` for neuron `n`.
Unused slots of a short last pass hold 0.

**Microcode.** The sequencer runs one microcode word per layer
(`nn_pkg::ucode_t`). The word holds `n_in`, `n_out`, the SRAM source and
destination, the weight base, the bias base and a flag `to_out`. A word with
`op = UOP_END` ends the program. For a pass, the sequencer steps through
these states:

1. LOAD
2. LWAIT
3. SPACE, before the final pass of an output layer only
4. STREAM
5. DRAIN

The SPACE state makes the final pass wait until the output FIFO has room for
all `n_out` results. A slow reader of `d_out` therefore stalls the array
instead of losing results. `stall_cycles` counts these waits.

A pass ends only when every token has also left the end of the chain. A short
final pass therefore cannot leave tokens in flight that the next layer would
take for partial sums.

**Cost of the 400-8-1 network.** It takes 50 + 1 passes and 1786 cycles, or
about 60 µs at 30 MHz. It uses:

| Memory | Used | Size |
|---|---|---|
| Weights, per PE | 401 words | 512 |
| Biases | 9 | 32 |
| SRAM (inputs, hidden activations and output) | 409 | 512 |

### Depth refinement: BSSA compute unit and accelerator (`bssa_cu`, `bssa_accel`)

A grid vertex (`bssa_pkg::vertex_t`) carries six neighbour values and three
coefficients *a*, *b* and *w*, all IEEE single precision. One compute unit
evaluates

```
r = ((n0+n1 + n2+n3 + n4+n5) · a · 8 + b) · w · w
```

as a 7-stage pipeline, one stage per register:

| Stage | Operation |
|---|---|
| 1 | three pair sums |
| 2 | sum of the three |
| 3 | × a |
| 4 | × 8, the figure's `<<<3`, done as exponent + 3 |
| 5 | + b |
| 6 | × w |
| 7 | × w |

`fp32_add` and `fp32_mul` are combinational. They round to nearest even,
flush subnormals to zero and propagate infinities and NaN. The pipeline moves
whenever its output is taken or its last stage is empty.

`bssa_accel` puts `N_CU` = 12 units in lockstep behind one AXI-Stream slave
and one master:
* An input beat carries 12 vertices, with one `tkeep` bit per vertex slot.
* `tkeep` and `tlast` travel down the pipelines as tags and come out with the
  results.
* The accelerator takes one beat per clock: B beats take B + 7 cycles.
* `m_axis_tready` low stalls all units together.

The numbers from the source design are 12 units on the ZC702 board at
125 MHz. The projected 682 units on a larger device is only a change of the
`N_CU` parameter, and it has not been simulated.

## Where this departs from or adds to the source design

The source describes these blocks at very different levels of detail:

| Level of detail | What it covers |
|---|---|
| Given in some depth | the NN PE datapath: 8-bit PEs, 16-bit products, 26-bit sums, per-PE weight memories, a LUT sigmoid with 256 entries, accumulator and sigmoid FIFOs; the 400-8-1 topology and 20x20 input; the cascade shape: 20 stages, 3 features in the first and 53 in the last; the BSSA compute unit's operators; 12 units at 125 MHz with AXI-Stream |
| Function only | the motion detector; the micro-coded sequencer; the VJ scan loop |
| Filled in by this design | everything else |

The choices this design makes:

* **Number of PEs.** The source text mentions both a four-PE drawing and an
  energy-optimal point at eight PEs. The default here is 8.
* **Frame size.** The camera's resolution is not given. The default is
  160x120. Frame buffer, integral image and motion memory all scale with
  `IMG_W`/`IMG_H`.
* **Chosen here and not from the source:**
  * the scale factor (1.10) and step (1);
  * the feature encoding;
  * area-scaled thresholds;
  * the resampling method;
  * the fixed-point formats;
  * the microcode format;
  * the memory depths: 512-word weight memories and SRAM, 32 biases, 16-entry
    FIFOs, 1024 features;
  * the tile-based motion test;
  * all handshakes.
* **The `<<<3` in the compute unit** is read as multiplication by 8. The
  order of the six-input sum is chosen here.
* **Not provided:** trained network weights and a trained cascade. Both are
  loaded at run time.

## Simulating

Every file in `rtl/` holds one module or package. Packages are `nn_pkg`,
`vj_pkg` and `bssa_pkg`. Testbenches in `tb/` are self-checking: they print
`TB_RESULT checks=N failures=M` and have a watchdog. Two testbench packages
supply the reference models:
* `fp_ref_pkg`: bit-exact single-precision add and multiply;
* `fa_ref_pkg`: the cascade scan, the resampling and the fixed-point network.

Build and run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/*_pkg.sv rtl/*.sv tb/fp_ref_pkg.sv tb/fa_ref_pkg.sv tb/tb_nn_pu.sv \
    --top-module tb_nn_pu
./obj_dir/Vtb_nn_pu
```

Or list all of `rtl/` and `tb/` and pick the top module. Every reset is
asynchronous and active low. The testbenches start with reset high and pull
it low after 1 time unit, so that a real falling edge occurs.

| Testbench | What it shows |
|---|---|
| `tb_nn_pe`, `tb_nn_sigmoid`, `tb_sync_fifo`, `tb_nn_sequencer` | unit behaviour and latencies |
| `tb_nn_pu` | 400-8-1 bit-exact in 1786 cycles and 51 passes; a 20-8-1 network with a short last pass; a 20-10-12 network whose output reader stalls, so the sequencer waits for FIFO space |
| `tb_motion_detect` | changed-tile counts and the motion decision |
| `tb_vj_detector` | every detection, in order, against a reference scan on a 40x30 frame; first-stage rejections and stalls |
| `tb_bssa_cu`, `tb_bssa_accel` | bit-exact results; one beat per cycle and B+7 latency; back-pressure, `tkeep` and `tlast` |
| `tb_fa_pipeline` | three 40x30 frames end to end: one dropped for no motion; every score and match decision checked; counts of dropped frames, first-stage rejections, detector stalls, network passes, matches and non-matches |
| `tb_camera_accel_top` | the full-size top with no parameter overrides: three 160x120 frames (about 150,000 windows each) and 200 vertex beats with back-pressure, partial `tkeep` and `tlast`; takes about three minutes |

## Limits

* The test networks and cascades are random, not trained. The tests check
  that the hardware computes exactly what its integer rules say. They do not
  check detection or recognition accuracy.
* The scan is sequential: one integral-image read per cycle. A 160x120 frame
  has about 150,000 windows. If most windows are rejected in the first stage,
  a scan takes a few million cycles, which is well within one frame per second
  at 30 MHz. A cascade that passes many windows to later stages will cost more.
* The floating-point units flush subnormals to zero. Results for inputs or
  intermediate values below 2⁻¹²⁶ differ from full IEEE behaviour.
