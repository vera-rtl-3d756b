# VeRA+ drift compensation for RRAM in-memory compute: SystemVerilog model

RRAM crossbars compute a layer's matrix-vector product in place and use very
little energy doing it. The catch is that programmed conductances relax over
time. Weights that are exact on the day of programming are measurably wrong an
hour later and badly wrong after a year. Rewriting the array is slow and wears
it out. VeRA+ therefore leaves the RRAM alone and adds a small digital
correction to every layer's output:

    y = W(t)·X  +  b_k ⊙ ( B_R · ( d_k ⊙ ( A_R · X ) ) )

- `A_R` (r × C_in) and `B_R` (C_out × r) are fixed matrices shared by all
  layers and all drift levels.
- `b_k` (C_out entries) and `d_k` (r entries) are the only values that depend
  on the layer and on the drift level `k`.
- The rank `r` is 1 in the main configuration, so a layer's correction costs
  one dot product over the input channels, one scalar multiply, and two
  multiplies per output channel.

The vector sets are trained offline, one for each interval of device age.
The chip holds only the set for its current age. It picks the set from an
elapsed-time counter and fetches a new set from external ROM/Flash whenever
the age passes the next drift point. With a 2.5 % accuracy budget, ResNet-20
needs eleven such sets to cover ten years.

This repository models that system: the RRAM array (as a behavioural model),
the digital compensation unit, the time-driven set selection, the loader, the
activation buffer, and a layer sequencer that ties them together.

## The compensation arithmetic (`sram_imc_comp`)

The unit stores:

- one global `A_max` of `RANK × DIN_MAX`;
- one global `B_max` of `DOUT_MAX × RANK`;
- for the active drift set, a `b` vector of `DOUT_MAX` entries and a `d`
  vector of `RANK` entries for each of the `NLAYERS` layers.

Layers differ in width. A layer with `din` inputs and `dout` outputs uses the
first `din` columns of `A_max` and the first `dout` rows of `B_max`. One pair
of matrices thus serves the whole network.

The correction is applied in 1×1 form even for 3×3 convolutions. `A_R` sees
only the `C_in` channel values of one pixel, not the nine-tap window, which
cuts cost by about 9×. This design feeds the 1×1 branch from the centre tap
of the im2col window (tap `CTAP = 4`). That is the pixel a 1×1 convolution
with the same stride and padding would see.

Arithmetic, per request:

| stage | computes | width |
|---|---|---|
| 1 | `h[r] = Σ_{i<din} A[r][i]·x[i]` | 8-bit signed × 4-bit unsigned, summed |
| 2 | `g[r] = d[layer][r]·h[r]` | |
| 3 | `comp[j] = sat32((b[layer][j] · Σ_r B[j][r]·g[r]) >>> SHIFT)` for `j < dout`, 0 otherwise | |

Every intermediate is kept at full width. The only rounding is the final
arithmetic shift (`SHIFT = 8`), followed by saturation to 32 bits. The
pipeline accepts a request every cycle, and `out_valid` follows `start` by
exactly three cycles. Parameters are written one byte at a time through a
port with four regions (`psel_e`: A, B, b, d). Only the loader uses that port.

## Drift levels and set switching (`drift_timer`, `set_scheduler`)

Device age is kept in whole seconds. `drift_timer` divides the clock by
`CYC_PER_SEC` and saturates at 2³²−1 s (about 136 years). The host can
overwrite the count, for example after a power cycle when it knows the true
age from its own clock.

`set_scheduler` holds the drift points `t_0 < t_1 < … < t_{n-1}` found by the
offline schedule. `t_0` is 1 s, and later points are powers of 1.5 s chosen by
the training procedure. Set `k` covers `[t_k, t_{k+1})`. The host writes the
table and sets `num_sets` (e.g. 5 or 11). Each cycle the scheduler counts the
points that are ≤ `now`. The target set is that count minus one, or set 0
before `t_0`.

Reload handshake:

1. When the target differs from the set held on chip, or no set is held yet,
   the scheduler raises `switch_req`. It does so only once the shared
   matrices have been loaded.
2. The top answers with a loader job, but only while the layer sequencer is
   idle. A running layer operation therefore never sees a half-written set.
3. While the set is in transit `cur_valid` is low, and new commands wait.
   This wait is the one stall in the design. It lasts about one set's worth
   of bytes, about 2,000 cycles at the default size.

A jump in time (a host preload) can skip several sets at once. Only the
target set is fetched.

## Parameter storage and loading (`param_loader`, `ext_bus_if`)

External memory is byte-addressed and holds one signed byte per parameter:

    0                         A_max   (RANK × DIN_MAX, row r then column i)
    RANK·DIN_MAX              B_max   (DOUT_MAX × RANK, row j then r)
    S = shared_words          set 0:  b of layer 0..NL-1 (DOUT_MAX each), then d (RANK each)
    S + k·set_words           set k

With the defaults this is 164 shared bytes plus 2,020 bytes per set, or
22,384 bytes for 11 sets. Every layer's `b` is padded to 100 entries, so a
real deployment would pack this tighter.

The bus (`ext_bus_if`) is read-only:

- A request (`req_valid`, `req_addr`) is taken on `req_ready`.
- Each accepted request returns one `rsp_valid` byte, in order, with any
  latency.
- Several requests may be outstanding. A waiting request must not change,
  and an assertion checks this.

The loader issues addresses back to back and turns the n-th response into the
n-th parameter write. A job therefore takes one cycle per byte plus memory
latency and back-pressure. `shared_load` (from the host) fetches `A_max` and
`B_max` once. Set jobs come from the scheduler.

## One layer operation (`vera_ctrl`, `act_buffer`, `rram_imc`)

The host performs these steps:

1. Write an im2col input vector into one of 16 input-buffer entries. The
   vector holds `KK × DIN_MAX` unsigned 4-bit activations, tap-major:
   `x[t·DIN_MAX + c]`.
2. Issue a `cmd_t` with `{layer, din, dout, in_idx, out_idx}` over a
   valid/ready handshake.
3. Read the result vector from output entry `out_idx` after `cmd_done`.

For a 1×1 or fully connected layer, put the inputs in the centre tap and
zeros in the others.

The sequencer's states:

- **IDLE**: accept the command and read the input entry. The buffer read is
  registered.
- **GO**: zero channels ≥ `din`. Start the RRAM array on all taps and the
  compensation unit on the centre tap.
- **WAIT**: collect both results.
- **WRITE**: store `y[j] = rram[j] + comp[j]` for `j < dout` (0 above) and
  pulse `cmd_done`.

The RRAM model reads out one output column per cycle, so `cmd_done` comes
`DOUT_MAX + 3` cycles after acceptance. The compensation result (3 cycles)
is always ready first, so the correction adds nothing to layer latency.

`rram_imc` is a behavioural model. Weights are signed 4-bit, one row per
(layer, output channel) at row `layer·DOUT_MAX + o`. All layers stay resident.
The model does not drift by itself. To reproduce aged hardware, program the
drifted weights `W(t)` through the programming port, which the testbenches do.
The real array would sum bit-line currents and convert them with ADCs. Here
that is an exact integer dot product.

## Files

| file | what it is |
|---|---|
| `rtl/vera_pkg.sv` | sizes, number formats, `psel_e`, `cmd_t`, memory-map functions |
| `rtl/vera_plus_top.sv` | the system; all host, bus and programming signals are plain ports |
| `rtl/sram_imc_comp.sv` | compensation unit (parameter store + 3-stage datapath) |
| `rtl/rram_imc.sv` | behavioural RRAM array |
| `rtl/act_buffer.sv` | input and output vector stores |
| `rtl/param_loader.sv`, `rtl/ext_bus_if.sv` | external-memory loader and its bus |
| `rtl/drift_timer.sv`, `rtl/set_scheduler.sv` | device age and set selection |
| `rtl/vera_ctrl.sv` | layer sequencer |
| `tb/tb_*.sv` | one self-checking testbench per block; `tb_vera_plus_top` (reduced size) and `tb_vera_plus_full` (default size) run the whole system |
| `tb/tb_top_driver.sv`, `tb/ext_mem_model.sv`, `tb/tb_ref_pkg.sv` | shared end-to-end stimulus/checker, external memory model, reference arithmetic |

## Sizes, and which networks fit

The defaults are rank 1, 11 sets, 20 layers, 64 input channels, 100 outputs,
3×3 taps and W4A4. This covers ResNet-20 on CIFAR-10 and CIFAR-100 (19 conv
layers of 16/32/64 channels plus a 64→100 classifier) with either the 5-set
or the 11-set schedule.

Everything is a parameter of the top (`R`, `NS`, `NL`, `DI`, `DO`, `K`,
`CT`, `DEPTH`, `CYC_PER_SEC`):

- `R = 6` gives the rank-6 variant.
- ResNet-32 needs `NL = 32`.
- ResNet-50 needs `NL ≈ 54`, `DI`/`DO` up to 2048, and 1000 outputs. The
  RRAM model stores every layer, so its memory grows as `NL · DO · K · DI`.
- BERT needs hidden sizes of 768 to 4096 and 8-bit activations. `AW` is a
  package constant, so this means editing `vera_pkg`.

## What is modelled and what is assumed

These parts follow the source description:

- the split of `W(t)X` (RRAM) and the correction (digital);
- the correction formula;
- sharing of `A_R`/`B_R` across layers and drift levels, with per-layer
  slicing of `A_max`/`B_max`;
- the 1×1 form;
- one set held on chip, the others in external ROM/Flash;
- set selection by elapsed time from a timer or the host;
- rank 1, 11 sets, 4-bit weights and activations.

These are this design's own choices, because the description does not give
them:

- all bit widths of the compensation path (8-bit parameters, shift,
  saturation);
- the three-stage pipeline and its latency;
- the external memory layout and bus protocol;
- the buffer organisation;
- the command format and sequencing;
- feeding the 1×1 branch from the centre tap;
- one-second timer resolution and the 100 MHz clock;
- reloading only between commands.

Known departures and gaps:

- The "SRAM-IMC" is a plain digital datapath over register arrays. No
  compute-in-SRAM bit-cell scheme is modelled.
- Outputs stay at 32 bits. Requantising to the next layer's activations,
  pooling, residual additions and the sliding-window (im2col) generation are
  left to the host.
- The RRAM array has a separate programming port. Programming it over the
  shared bus is not modelled.
- The external memory stores padded sets. This uses more space than a
  tightly packed per-layer layout would.
- Drift, device variation and the offline scheduling/training are simulation
  and training matters. None of them is in hardware: the trained vectors and
  drift points arrive as data.

## Simulating

Every testbench ends with `TB_RESULT checks=N failures=M`. A plain Verilator
run, from the repository root:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/vera_pkg.sv tb/tb_ref_pkg.sv tb/tb_vera_plus_top.sv \
        --top-module tb_vera_plus_top -o sim
    ./obj_dir/sim

Substitute any other testbench name. The block testbenches use reduced sizes
where that exercises more corner cases, such as rank 2 in `tb_sram_imc_comp`.

The reduced end-to-end test (`tb_vera_plus_top`):

- runs 40 layer commands with a timer of 8 cycles per second, so drift
  points are crossed by the running timer as well as by host preloads;
- counts set switches, a switch that skips sets, command stalls during a
  reload, sliced layers, 1×1 layers and bus back-pressure, and fails if any
  of them never happens;
- checks every output value against a reference computed independently from
  the programmed weights and the memory contents;
- checks the command latency of `DOUT_MAX + 3` cycles.

`tb_vera_plus_full` runs the same checks at the default size. It programs
three layers, issues eight commands, and jumps the age up to the last set.
It takes about ten seconds.

`tb_resnet20_workload` is the ResNet-20 workload at the default size. It:

- programs all 20 layers;
- uses 11 drift points, 7× apart, from 1 s to about 9 years;
- before each interval, nudges every weight by up to one LSB to stand in for
  drift;
- computes one output pixel of every layer in every interval, 220 layer
  operations in all, including the 64→100 classifier;
- checks that the set in use matches the interval.

It runs in under half a minute. Two variants run the same sequence:

- `tb_resnet20_rank6` uses the rank-6 compensation (`R = 6`).
- `tb_resnet20_5sets` uses the five-set schedule. Five drift points are
  written, 135× apart, and `num_sets = 5`.

The external memory contents in simulation are a fixed pseudo-random byte per
address (`tb_ref_pkg::ext_byte`), not trained vectors. The tests therefore
show that the arithmetic and the control are correct. They say nothing about
accuracy recovery, which depends on the trained values.
