# Model-based photoacoustic reconstruction core with symmetric table reuse

In photoacoustic tomography, a laser pulse makes tissue emit ultrasound, and a ring
of transducers records it. Turning those recordings into an image is quickest with
delay-and-sum (DAS), but DAS leaves strong artifacts. A model-based reconstruction
removes most of them. It alternates a backward model (sensor data to image, here
DAS) with a forward model (image to sensor data, here the "superposed wave",
s-Wave, approximation) and corrects the image from the mismatch. The cost is
memory and arithmetic: every (sensor, pixel) pair needs a delay, a phase offset and
an amplitude.

This RTL implements that loop as a streaming hardware core. It follows the
architecture published as *Hardware Architecture Design of Model-Based Image
Reconstruction Towards Palm-size Photoacoustic Tomography*. The central trick is
in how the geometry tables are stored. The 128-element ring and the 128 x 128 pixel
grid share a centre and mirror axes. So the tables of only 33 sensors are stored,
and the other 95 sensors are served by reading those tables at a mirrored pixel
address. The channels are processed 32 at a time ("lanes") in four *execution
cycles*. The table reuse and the lane schedule are built to fit each other.

The design is parameterised. The defaults are the sizes of the reference system:
128 elements, 32 lanes, 33 table sets, a 128 x 128 image, 10-bit delays and
offsets, 8-bit amplitudes and an 8-bit image. Some widths and the record length are
not given by the method. The choices made for them are listed under
"Departures and open points".

## The iteration the hardware computes

With `S` the measured data (128 channels x M samples), `K` the iteration limit,
`L` the loss threshold and `lr` the learning rate:

```
I0      = norm256( |DAS(S)| )                 initial image, 0..256
E       = I0                                  stored estimate (deviation RAM)
p       = norm255(E)                          8-bit image for the forward model
t = 0
loop:
  sn    = sWave(p)                            forward model, per channel
  R     = sat16(sn - S)                       residual, per sample
  loss  = floor(sqrt(sum R^2))
  if t >= 1 and (loss < L or t == K): output p, stop
  I'    = norm256( |DAS(R)| )
  E     = | E - (lr * I') >> 8 |              lr in unsigned Q8.8
  p     = norm255(E);  t = t + 1
```

`normX(v) = (v << 8) / max(v)` over the whole image. It is clipped to 255 for the
8-bit version, and it gives 0 for an all-zero image.

The update `E - lr*I'` together with the residual `sn - S` is the usual gradient
step `E + lr * DAS(S - sn)`, written with both signs flipped.

The DAS of one sensor is `sum_s S[s][delay(s,j)]`.

The s-Wave contribution of pixel j to sensor s is
`(p_j * A(s,j) * std[k]) >>> 8`, added at sample `(tau(s,j) + k) mod M` for
every k of the standard signal `std`. `std` is the recorded response of a unit
pixel at the image centre. `A` approximates a 1/d^2 amplitude law. `tau` is the
delay difference from the centre. The addition wraps around the record, so the
shifted signal is circular.

## Execution cycles, lanes and the symmetry reuse

The sensors are numbered clockwise. Sensor 0 is at the left end of the horizontal
axis, sensor 32 at the top and sensor 64 at the right. Tables are stored for
sensors 0..32 (sets 0..32). In execution cycle `cc`, lane `i` handles one sensor
as follows:

| cc | sensor served by lane i | table set read | pixel address used for pixel (row, col) | symmetry |
|----|-------------------------|----------------|-----------------------------------------|----------|
| 0  | i                       | i              | (row, col)                              | none |
| 1  | 63 - i                  | i + 1          | (row, N-1-col)                          | mirror about the vertical axis through sensor 32 |
| 2  | 64 + i                  | i              | (N-1-row, N-1-col)                      | point reflection through the centre |
| 3  | 127 - i                 | i + 1          | (N-1-row, col)                          | point reflection, then the vertical mirror |

Two details follow from this schedule:

- Lane `i` only ever reads set `i` or set `i + 1`. So in hardware each lane has a
  2:1 multiplexer between neighbouring table banks. In cc 0 and 2 banks 0..31 are
  in use; in cc 1 and 3 banks 1..32 are in use.
- The *pixel* address mapping is the same for every lane. One address mapping
  unit (`amu`) per table bank group is enough. It has four counters, one per row of
  the table above, and a multiplexer that picks the counter selected by `cc`. The
  image itself is always walked in raster order. Only the table address is
  mirrored.

The load unit follows the same lane-to-channel order (`pat_pkg::lane_channel`).
When the controller copies "cc's channels" into the DAS sensor RAMs, lane `i`
receives the samples of exactly the sensor whose tables it will read.

`tb_amu` checks this property numerically. For every lane, cc and pixel, the
distance from the sensor the lane serves to the pixel equals the distance from
the stored sensor whose table it reads to the mapped pixel. The geometry
generalises to any `LANES`, with `4*LANES` elements and `LANES+1` stored sets.

## Blocks

### `load_unit`: input buffer and frame store
The input is a 16-bit sample stream with valid/ready handshaking. It is ordered
sample-major: all channels of sample 0, then all channels of sample 1, and so on.
The samples pass through a 16-entry `sync_fifo` into one RAM per channel. After a
full frame `loaded` is set, and the unit stops draining its FIFO until the
controller releases the frame. A second frame can therefore be sent at once; it
back-pressures the source while the first frame is processed. The read port
returns one sample for each lane's channel in the given cc, one cycle after the
request.

### `das_module`: delay-and-sum
One pass takes one cc and visits every pixel, one pixel per clock:

```
p0  AMU address -> all 33 delay ROMs read
p1  per-lane cc mux picks ROM i or i+1 -> delay is the sensor-RAM read address
p2  adder stage 1: two half sums of the 32 samples
p3  adder stage 2: total;  image RAM read for the pixel
p4  adder stage 3: + image RAM value (0 in cc 0); abs() in cc 3
p5  image RAM write (two cycles after its read); max unit updated in cc 3
```

A pass takes `NPIX + 6` cycles from `start` to `done`, which is 16390 at default
size. The read and the write of a pixel are two cycles apart. Consecutive pixels
use different addresses, so the read-modify-write needs no forwarding.

The output pass reads the image in raster order. Each value goes through the
pipelined `divider` as `(v << 8) / max` and leaves as a 9-bit value, 0..256. The
divider adds 31 cycles of latency.

### `deviation_module`: the image update
It takes the DAS image as a stream and reads the stored estimate at the same
pixel. On `t_zero` it stores the new image unchanged. Otherwise it stores
`|prev - (x*lr >> 8)|`. Each new value is written back two cycles after the read,
and its own `max_unit` tracks the largest value written. Its output pass
normalises the stored estimate to 8 bits. The top routes that stream either into
the s-Wave pixel RAM or, after the last iteration, to the image output.

### `swave_module`: the forward model
It holds the 8-bit image, 33 amplitude and 33 offset table banks, the standard
signal and 32 accumulation RAMs of M words (32-bit). An FSM runs one cc:

```
CLEAR   zero the 32 accumulation RAMs                        M cycles
FETCH   read pixel j and all amplitude/offset banks          1
WEIGHT  w_i = p_j * A_i for all lanes, latch tau_i           1
ACCUM   k = 0..SIG_LEN-1: read acc_i[tau_i+k], multiply
        w_i * std[k] >>> 8, add, write back                  SIG_LEN
DRAIN   let the last writes land before the next pixel       3
```

The write address is the read address delayed through three registers. The
3-cycle drain means that the next pixel never reads a word whose update is still
in the pipeline. A pass takes `M + NPIX*(SIG_LEN+5) + 1` cycles. At the default
size (M = SIG_LEN = 1024) that is 16.86 M cycles per cc, or 67.4 M per full
forward projection. The accumulation RAMs are read by the loss module through a
one-lane read port.

### `loss_module` and `isqrt`: residual and stop test
The loss module works serially over (sample, lane). For each pair it reads the new
sample `sn` from the s-Wave module and the measured sample `S` from the load unit.
It writes `sat16(sn - S)` into the DAS sensor RAM of that lane, and squares and
accumulates it into a 64-bit register. After the cc 3 pass, `isqrt` takes the
integer square root, one bit per cycle over 32 cycles. The core then raises
`iter_end` if the root is below the threshold. A pass takes `LANES*M + 3` cycles.

### `top_controller`: frame sequencing
The frame sequence is:

1. Wait for a loaded frame.
2. For each cc: copy that cc's channels into the DAS sensor RAMs (M cycles), then
   run a DAS pass.
3. Stream the DAS image into the deviation module, then stream the deviation
   output into the s-Wave pixel RAM.
4. For each cc: run an s-Wave pass, then a loss pass (which overwrites the DAS
   sensor RAMs with that cc's residuals), then a DAS pass over the residuals.
5. Stop test. If the run goes on, the residual image goes back to step 3 with
   t + 1. Otherwise the deviation output goes to the image port, `done` pulses and
   the load unit is released.

Only one of DAS, s-Wave and loss is active at a time, and `mbr_top` asserts this.
The residual DAS of the last iteration is computed even when it is not used. That
is one extra DAS pass, small next to the s-Wave cost.

## Using the core (`mbr_top`)

1. **Write the geometry tables.** Drive `cfg_we` with:
   - `cfg_sel`: `TBL_DELAY`, `TBL_AMP`, `TBL_OFFSET` or `TBL_STD`;
   - `cfg_set`: the stored sensor, 0..32;
   - `cfg_addr`: the raster pixel index (row*128 + col), or the sample index for
     `TBL_STD`;
   - `cfg_data`.

   Set `r` holds the values of sensor `r` in the numbering above:
   - delay `= round(d * fs / c)`;
   - offset `= round((d - R) * fs / c) mod M`, where R is the distance from the
     centre to the ring;
   - amplitude `~ k / d^2` in 8 bits.

   Loading all tables takes 3 x 33 x 16384 + 1024 writes.
2. **Stream a frame** on `in_valid/in_ready/in_data`.
3. **Pulse `start`** with `k_max`, `lr` (Q8.8) and `threshold` applied. The
   final image leaves in raster order on `out_valid/out_data`. After it, `done`
   pulses. `loss/loss_valid` report every loss computed, `iterations` the final t,
   and `stopped_by_loss` the stop reason.

Main parameters of `mbr_top`:

| parameter | default | meaning |
|-----------|---------|---------|
| `LANES`   | 32      | channels per execution cycle; the array has 4*LANES elements and LANES+1 table sets |
| `IMG_N`   | 128     | image side in pixels |
| `SAMP_AW` | 10      | log2 of the record length M (10-bit delays address 1024 samples) |
| `SIG_LEN` | 1024    | length of the standard signal |
| `S_W`     | 16      | sample width |
| `SW_SHIFT`| 8       | right shift of the s-Wave term, i.e. the amplitude-law constant |

## Departures and open points

- **Frame time.** The method reports 0.047 to 0.133 s per frame at 200 MHz, several
  iterations included. Taken literally (one standard-signal sample per lane per
  clock, a standard signal as long as the record), one forward projection here
  takes 67.4 M cycles, about 0.34 s. The published timing therefore implies a
  shorter standard signal or more parallelism in the superposition, and the
  method does not say which. `SIG_LEN` is a parameter and can be set to a shorter
  pulse.
- **Absolute value on every DAS pass.** The abs in the last execution cycle is
  applied to the residual DAS as well, as described for the DAS block. The sign of
  the correction image is therefore lost, and the update `|E - lr*I'|` can only
  pull pixels down towards the residual image's pattern. A reader who wants the
  signed gradient should bypass the abs and the normalisation when `t > 0`.
- **Square root.** The method uses a vendor CORDIC core. `isqrt` computes the same
  floor square root with plain logic.
- **Tables are RAMs with a write port.** The method calls them ROMs. Their
  contents depend on the array geometry, sampling rate and sound speed, so here
  they are written once at start-up.
- **Widths and formats chosen here.** The method does not give them:
  - 16-bit samples and a 1024-sample record;
  - 23-bit DAS accumulation;
  - 18-bit estimate;
  - 32-bit s-Wave accumulators, with wrap-around on overflow;
  - Q8.8 learning rate;
  - 16-bit saturated residuals;
  - 64-bit sum of squares.

  A 256 after normalisation is clipped to 255 in the 8-bit image.
- **Handshakes and schedule chosen here:** the input stream order, the FIFO
  depth, the frame hold/release, the serial loss pass, the three-cycle drain in the
  s-Wave FSM, and the controller's state sequence.
- **Not included:** the board around the core (transducers, analogue front end,
  ADCs, laser driver, USB/DisplayPort/Ethernet). The core's stream input and image
  output are where those connect.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
values computed independently in `tb/pat_ref_pkg.sv`. That package recomputes
every sensor from its own position, without the symmetry reuse, and reproduces the
fixed-point arithmetic bit for bit. Where a block has a fixed latency or pass
length, the testbench checks the cycle count too.

| testbench | what it covers |
|-----------|----------------|
| `tb_amu` | all four counter modes at 8x8 and 128x128; the distance-symmetry property |
| `tb_max_unit`, `tb_divider`, `tb_isqrt` | arithmetic against reference values, latency |
| `tb_load_unit` | frame storage, lane/channel order for each cc, stall while held, release |
| `tb_das` | a full 16-element 8x8 DAS; pass length NPIX+6; normalised output |
| `tb_deviation` | t = 0 and two t > 0 updates; 8-bit normalisation |
| `tb_swave` | a full forward projection, 8 elements, 4x4, 32 samples; pass length |
| `tb_loss` | residuals with saturation, loss value, stop flag either side of the threshold |
| `tb_top_controller` | pass counts for a K-limited and a loss-limited run |
| `tb_mbr_top` | end to end at 16 elements, 8x8, 64 samples, two frames: every output pixel and every loss against the reference; counts stalls, all four cc in DAS and s-Wave, both deviation paths, both stop reasons, abs of negative sums |
| `tb_mbr_full` | one frame at the default size, one iteration; checks the 16384-pixel DAS image against the reference and completion of the loop; about 5 minutes |

Run any testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_mbr_top -Irtl -y rtl -y tb \
          rtl/pat_pkg.sv tb/pat_ref_pkg.sv tb/tb_mbr_top.sv
./obj_dir/Vtb_mbr_top
```

Each testbench ends with a line `TB_RESULT checks=N failures=F`.

At the default size, `tb_mbr_full` does not recompute the s-Wave reference. Its
images after t = 0 are checked only for count and completion. The forward model
is checked bit for bit at the reduced sizes.

## Files

- `rtl/pat_pkg.sv`: constants, the table-select enum, the lane/channel/table-set
  mapping functions.
- `rtl/mbr_top.sv`: top level.
- `rtl/top_controller.sv`: frame sequencing.
- `rtl/load_unit.sv`, `rtl/sync_fifo.sv`: input buffer and frame store.
- `rtl/das_module.sv`, `rtl/amu.sv`, `rtl/max_unit.sv`, `rtl/divider.sv`: the
  backward model.
- `rtl/deviation_module.sv`: the image update.
- `rtl/swave_module.sv`: the forward model.
- `rtl/loss_module.sv`, `rtl/isqrt.sv`: residual and stop test.
- `tb/`: testbenches, `tb/pat_ref_pkg.sv` (reference model and test geometry), and
  `tb/tb_responder.sv` (a stand-in for sub-modules in the controller test).
