# NeuroHSMD spiking-network kernel in SystemVerilog

NeuroHSMD detects moving objects in video by mimicking the object-motion
sensitive ganglion cells of the vertebrate retina. A conventional background
subtractor first marks the pixels that differ from a learned background. Each
marked pixel then drives a small column of leaky integrate-and-fire (LIF)
neurons. The last neuron of the column fires only when the activity is
sustained, and its spike count becomes the motion map. The spiking network is
the expensive part, and the published system moves it from the CPU onto an
FPGA as an OpenCL kernel with 16 parallel circuits in IEEE754 single
precision.

This repository gives register-transfer-level SystemVerilog for that kernel:
the single-precision arithmetic, the neuron, the per-pixel three-layer column,
the 16 parallel lanes with their buffers, and a host-side port. The image
capture, colour-to-grey conversion, background subtraction and averaging
filter run on the host CPU in the published system, so they are not part of
this RTL.

## Where the kernel sits

```
 host CPU                                            FPGA kernel (this RTL)
 ---------------------------------------------       -------------------------------------
 1 capture  2 RGB->grey  3 background subtraction --> pixel values (fp32, one per pixel)
                                                      16 lanes x (3-layer LIF column per pixel,
                                                                 n_steps time steps)
 6 averaging filter  7 display/save          <------- spike sum of the motion layer per pixel
```

One kernel run processes one frame. The host resets the buffers once at the
start of a video sequence. For each frame it then writes the foreground
values, starts the kernel, waits for `done` and reads back one spike sum per
pixel. Membrane potentials stay in the kernel between frames. A pixel's
response therefore depends on the frames before it, and this history is what
makes the network react to motion and not only to foreground.

## The neuron column

Every pixel owns three neurons, connected one-to-one. The published text
numbers them layers 2, 3 and 4, after an input layer that stands for the
background subtractor. The RTL numbers them 1 to 3 in evaluation order:

| RTL layer | role              | input current                      |
|-----------|-------------------|------------------------------------|
| 1         | pixel to current  | `I1 = pixel * p2c`                 |
| 2         | motion stability  | `I2 = sum1 * s2c`                  |
| 3         | motion detection  | `I3 = sum1 * s2c + sum2 * s2c`     |

`sumK` is the number of spikes layer K has fired so far in the current frame.
The motion-detection neuron thus hears the pixel layer both directly and
through the stability layer. Within one time step the three layers are
updated in order, so layer 2 sees the spike layer 1 fired in the same step,
and layer 3 sees both. The result of a frame is `sum3`.

Each neuron update is one explicit Euler step of
`tau dV/dt = -(V - E_L) + R I`:

```
V' = V + (dt/tau) * ((E_L - V) + R*I)
if V' >= V_th : spike, V' = V_reset
V' = max(V', V_min)
```

All neuronal constants are one runtime structure, `snn_cfg_t`, because the
host sends one parameter set shared by every neuron. The package constant
`PAPER_CFG` holds the published values:

| field     | value   | published source                      |
|-----------|---------|---------------------------------------|
| `p2c`     | 17.5    | pixel-to-current constant c           |
| `s2c`     | 1370    | weight of all synapses                |
| `r_m`     | 1.0     | R = 1 MOhm                            |
| `k_dt`    | 1.0     | dt/tau with dt = 10 ms, tau = 10 ms   |
| `e_l`     | -55.0   | E_L                                   |
| `v_reset` | -70.0   | V_reset                               |
| `v_th`    | -70.0   | V_th                                  |
| `v_min`   | -70.0   | V_min                                 |
| `v_init`  | -55.0   | initial V_m                           |

Two things about this set need care. First, with `dt/tau = 1` the Euler step
forgets the old potential: `V' = E_L + R I`. Second, the published threshold
(-70 mV) lies below the resting potential (-55 mV), so every neuron fires in
every step whatever its input. The same text describes the reset value as
lying below the threshold, and the listed threshold contradicts that. The
list is probably garbled, but the RTL does not guess a correction: it takes
the parameters at run time. The testbenches check `PAPER_CFG` (every sum
equals `n_steps`). For the dynamic tests they use a set of their own, with
`v_th = -50`, `k_dt = 0.25`, `p2c = 0.1` and `s2c = 4`. With that set some
pixels fire and others stay silent.

The published refractory period (2 ms) is shorter than a time step (10 ms),
so it never holds a neuron back and is not modelled. The number of time steps
per frame is not published; `n_steps` is a runtime input with default 10.

## The two kernel variants

The published work builds the kernel twice. In v1 every pixel is simulated.
In v2 only pixels with a value above 0.0 are simulated. Here both are one
circuit with the runtime bit `skip_zero`. For a skipped pixel the lane writes
a spike sum of 0, leaves its three potentials untouched and spends 3 cycles
instead of `3*n_steps + 3`. Background subtraction leaves most pixels at 0,
so v2 saves most of the work on typical frames.

## Hardware organisation

```
              host port                          neurohsmd_kernel
 pix_we/addr/data ──► lane = addr % 16 ──┐
                                         ▼
   ┌──────────── lane 0 ─────────────┐        ┌──────────── lane 15 ────────────┐
   │ neuron_bank (25920 entries)     │        │                                 │
   │  pixel  fp32   (host wr, lane rd)│  ...  │            same                 │
   │  state  3xfp32 (lane rd/wr)      │        │                                 │
   │  sum    16 bit (lane wr, host rd)│        │                                 │
   │ snn_lane: FSM + one lif_neuron   │        │                                 │
   └──────────────────────────────────┘        └─────────────────────────────────┘
 sum_addr ──► all banks read entry addr/16 ──► mux by addr % 16 ──► sum_data
```

* **Lanes.** Neuron `n` belongs to lane `n % 16`, at bank entry `n / 16`.
  Each lane walks its own entries, so the lanes never compete for memory and
  need no arbiter. In v2 mode the lanes run free and finish at different
  times, and the kernel is done when the last one is.
* **Buffers.** The published kernel keeps its buffers in OpenCL global memory
  (board DDR4). Here they are on-chip simple dual-port arrays, sized for the
  largest frame in the published evaluation, 720 x 576 = 414720 pixels
  (25920 per lane). Per lane that is 25920 x (32 + 96 + 16) bits, about
  3.7 Mbit, or 60 Mbit for the kernel.
* **Lane datapath.** One `lif_neuron` per lane serves the three layers in
  turn, one layer per clock. The layer currents come from two spike-count
  converters (`fp32_from_uint`), three multipliers and one adder.
* **Lane sequence per pixel.** READ (address the bank), LOAD (take pixel and
  potentials, clear the sums, decide whether to skip), RUN (3 x `n_steps`
  cycles), WRITE (store the potentials and `sum3`). That is
  `3*n_steps + 3` cycles per simulated pixel and 3 per skipped one.
* **Clear.** `clear` writes `v_init` into all three potentials and 0 into
  the sum of the first `n_neurons` neurons. This is the host's buffer reset
  at the start of a sequence, one cycle per lane entry.

## Arithmetic

All values are IEEE754 single precision, as in the published kernel:

* `fp32_add` and `fp32_mul` are combinational. They round to nearest, ties to
  even.
* Subnormal inputs are read as zero, and results below the normal range flush
  to zero. Overflow gives infinity.
* NaN and infinity inputs are not treated specially. The network's values
  (potentials around -70 to +5000, currents up to a few thousand) never come
  near these limits.
* `fp32_ge` compares two values, with +0 and -0 equal.
* `fp32_from_uint` converts a spike count exactly.
* Alignment and normalisation shifts use five-stage barrel shifters
  (distances 1, 2, 4, 8 and 16), shared through the package.

Spike sums are integers and are converted before they are scaled, so
`sum * s2c` is one correctly rounded product, as in the kernel loop.

A lane's RUN cycle is a long combinational path: up to four multiplies and
four additions from the spike counters to the new potential. The RTL has not
been pipelined or timing-closed. The cycle counts below are in clock cycles
of whatever frequency this path permits. The published OpenCL build reaches
300 MHz because its compiler pipelines the loop.

## Host interface and timing

| signal                          | dir | width | meaning |
|---------------------------------|-----|-------|---------|
| `clk`, `rst_n`                  | in  | 1     | clock, asynchronous active-low reset |
| `cfg`                           | in  | 288   | `snn_cfg_t`, sampled with start/clear |
| `n_neurons`                     | in  | 19    | pixels in the frame (width x height) |
| `n_steps`                       | in  | 16    | time steps per frame |
| `skip_zero`                     | in  | 1     | 0 = v1, 1 = v2 |
| `start`, `clear`                | in  | 1     | run a frame / reset the buffers (ignored while busy; start wins) |
| `busy`                          | out | 1     | high from the cycle after start/clear until all lanes are idle |
| `done`                          | out | 1     | one-cycle pulse as `busy` falls |
| `pix_we`, `pix_addr`, `pix_data`| in  | 1, 19, 32 | write one pixel value (fp32) |
| `sum_addr` → `sum_data`         | in/out | 19 → 16 | read one spike sum, valid one cycle later |

The buffers may only be accessed while the kernel is idle. An assertion flags
a pixel write while `busy` is high. Settings are latched on the `start` or
`clear` edge and reach the lanes one cycle later. A frame is therefore busy
for `1 + max over lanes of (sum of per-pixel cycles)`. For v1 and a full
720 x 576 frame at 10 steps that is `1 + 25920 * 33 = 855361` cycles. A
clear takes `1 + ceil(n_neurons / 16)` cycles.

## Frame sizes

Every sequence size in the published speed tables fits the default buffers.
The largest is 720 x 576, which is exactly what the buffers are sized for.
The smallest is 320 x 240 (76800 pixels, 4800 entries per lane). Smaller
frames use the first `n_neurons` entries. To build for larger frames, raise
`N_NEURONS` on `neurohsmd_kernel`. To build for more or fewer circuits,
change `N_LANES`; any lane count works, and powers of two keep the address
split free.

## Where this RTL departs from, or adds to, the published design

* The buffers are on-chip memories rather than DDR4 behind the OpenCL
  runtime, and the host port is a plain synchronous interface, not PCIe.
* v1 and v2 are one circuit with a mode bit, not two bitstreams.
* The weights are one shared scalar set (`p2c`, `s2c` and the neuron
  constants), as in the published kernel loop, and are delivered as one
  `snn_cfg_t`. The published text says the weights were kept in vectors in
  host and device buffers; per-neuron weight vectors are not implemented.
* The time-step schedule follows the published kernel loop. Layer 3 uses the
  stability layer's count from the same step. The prose description instead
  says the stability layer delays spikes by one time step; that reading is
  not implemented.
* The pixel-to-current constant is 17.5. The published parameter list also
  names an input weight of 8.0 for the same layer, which is not used.
* Spike sums restart at zero each frame, and potentials persist until
  `clear`. Skipped pixels report 0. The published text states none of these
  points explicitly.
* The numeric format details (rounding, subnormals) and all cycle timing are
  this design's own.

## Files

| file | contents |
|------|----------|
| `rtl/nhsmd_pkg.sv` | types (`fp32_t`, `snn_cfg_t`, `vm_state_t`), sizes, `PAPER_CFG` |
| `rtl/fp32_add.sv`, `rtl/fp32_mul.sv`, `rtl/fp32_ge.sv`, `rtl/fp32_from_uint.sv` | single-precision units |
| `rtl/lif_neuron.sv` | one Euler step, threshold, reset, floor |
| `rtl/neuron_bank.sv` | one lane's pixel, state and sum buffers |
| `rtl/snn_lane.sv` | one parallel circuit: sequencing of pixels, steps and layers |
| `rtl/neurohsmd_kernel.sv` | top: 16 lanes, host port, control |
| `tb/tb_fp_pkg.sv` | reference fp32 arithmetic (double, rounded once) |
| `tb/tb_snn_ref_pkg.sv` | reference neuron and column model |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fp32_helpers`, `tb_neurohsmd_full` and `tb_neurohsmd_workloads` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. Each
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/nhsmd_pkg.sv tb/tb_fp_pkg.sv tb/tb_snn_ref_pkg.sv \
    rtl/fp32_add.sv rtl/fp32_mul.sv rtl/fp32_ge.sv rtl/fp32_from_uint.sv \
    rtl/lif_neuron.sv rtl/neuron_bank.sv rtl/snn_lane.sv rtl/neurohsmd_kernel.sv \
    tb/tb_neurohsmd_kernel.sv --top tb_neurohsmd_kernel
obj_dir/Vtb_neurohsmd_kernel
```

Replace the last testbench file and `--top` to run another one.

* `tb_fp32_add`, `tb_fp32_mul`: directed corner cases (ties, cancellation,
  carry-out, overflow, flush to zero) and 20000 random operand pairs each.
  Their reference is double-precision arithmetic rounded once to single, which
  is exact for these operands.
* `tb_fp32_helpers`: `fp32_from_uint` on every 16-bit count, and `fp32_ge`
  on signed zeros, subnormals, near-equal values and 20000 random pairs.
* `tb_lif_neuron`: the published set, quiet, firing and floor cases, and 5000
  random steps.
* `tb_neuron_bank`: write and read-back on all three buffers, read latency,
  and isolation of neighbouring entries.
* `tb_snn_lane`: clear, frames that carry state, v2 frames and a
  published-set frame. It checks every sum, every stored potential and the
  exact cycle count of every pass.
* `tb_neurohsmd_kernel`: end-to-end at a 10 x 10 frame. It counts clear, v1,
  state carry-over, v2 with skipped pixels, an ignored start while busy,
  uneven lane loads, firing and silent pixels, and the published set. It fails
  if any of these never happened.
* `tb_neurohsmd_full`: the kernel at its default size. It runs a clear and
  one 720 x 576 frame of 10 steps, with a bright object on an empty background
  plus sparse noise. It checks all 414720 spike sums and the 855361-cycle
  frame time, and takes about 20 s to build and 6 s to run.
* `tb_neurohsmd_workloads`: the kernel at its default size on three frame
  sizes of the target sequences, one after another with a buffer reset
  before each. These are 320 x 240 and 645 x 315 in v1, and 720 x 540 in v2.
  645 x 315 leaves lanes 0 to 6 one entry longer than the rest. It checks
  every spike sum, each clear time, and each frame time against the
  slowest lane's load.

The reference models compute each fp32 operation in double precision and
round once. Products of two singles are exact in double. Sums are exact when
the operands' exponents differ by less than 29, which covers every case the
tests produce.
