# Histogram-free fluorescence lifetime imaging with an on-FPGA GRU

Time-correlated single-photon counting (TCSPC) measures fluorescence lifetime
by time-stamping each detected photon relative to the laser pulse that excited
it. The usual approach builds a per-pixel histogram of those timestamps and
fits a decay curve after the acquisition. This design skips the histogram. Each
pixel keeps the hidden state of a small recurrent neural network (a GRU, gated
recurrent unit), and every photon updates that state as it arrives. At the end
of an integration period, a small fully connected network (FCNN) turns each
pixel's final state into a lifetime estimate. Only one number per pixel then
leaves the FPGA, instead of a histogram or a stream of raw timestamps.

The RTL covers the FPGA side of such an imager for a 32 x 32 SPAD
(single-photon avalanche diode) sensor with 128 on-chip TDCs (time-to-digital
converters):

```
 128 TDC lanes ─► serializer_correction ─┬─► computation_unit 0 ─┐
                  (one photon / clock,    ├─► computation_unit 1 ─┤
                   offset + gain,         ├─► computation_unit 2 ─┼─► io_arbiter ─► result stream
                   route by pixel id)     └─► computation_unit 3 ─┘   {pixel, count, lifetime}

 computation_unit:   photon ─► gru_core ◄──port A──► state_bram ──port B──► fcnn_core ─► sync_fifo
```

Four computation units share the sensor. Each one owns a 32 x 8 quarter, so 256
pixels, and holds one GRU core, one FCNN core, one state memory and one result
FIFO. All blocks run on one clock; the intended clock is 160 MHz.

## Photon path and throughput

A timestamp word is `{pixel id[10], TDC code[12]}`, and any lane may present one
in any cycle. The pixel id is `row*32 + column`.

- **Serializer.** Each lane has a one-word holding register. A round-robin
  arbiter takes one occupied register per clock. A word that arrives while its
  lane's register is still occupied is lost, and `lane_drops` counts it.
- **Correction.** The chosen code gets a per-pixel offset subtracted, clamped at
  zero, and is scaled by a global Q8.8 gain into the network input `x` (Q3.12).
  With the default gain of 4.0, `x = code / 1024`.
- **Routing.** The top two id bits select the unit; the low eight bits address
  the pixel inside it.
- **Latency.** Two clocks from holding register to unit.

A unit accepts a photon only when its GRU core is idle. A photon that finds the
core busy is discarded (`photons_dropped_busy`), as in the published system;
there is no queue in front of the core. The core takes **HIDDEN + 5 = 37 cycles** per photon. At 160 MHz that is 231 ns, or
4.3 Mphoton/s per unit and 17 Mphoton/s for four units. The published system
quotes 4 Mphoton/s in total, so this schedule leaves a margin of about four.

## The GRU step (`gru_core`)

Each photon triggers one step of a single-layer GRU with input size 1, in
PyTorch's gate order and form:

```
r  = σ(W_ir x + b_ir + W_hr h + b_hr)
z  = σ(W_iz x + b_iz + W_hz h + b_hz)
n  = tanh(W_in x + b_in + r ⊙ (W_hn h + b_hn))
h' = (1 − z) ⊙ n + z ⊙ h        (computed as n + z ⊙ (h − n))
```

The state memory holds one 520-bit word per pixel: 32 hidden values of 16 bits
plus an 8-bit saturating photon count. The core works through these steps:

| cycle(s) | state | work |
|---|---|---|
| 0 | accept | read of the pixel's word issued on port A |
| 1 | LOAD | word captured; accumulators take `W_i x` and the biases |
| 2 … 33 | MAC | cycle k adds column k of W_hr, W_hz, W_hn times h[k]: 96 multipliers working in parallel |
| 34 | ACT1 | round; r, z through the sigmoid |
| 35 | ACT2 | n through tanh |
| 36 | WB | h' and count+1 written back; ready again the next cycle |

**Numerics.** Weights and activations are 16-bit two's complement Q3.12, which
covers −8 to +8 in steps of 1/4096. Products are summed exactly in 48 bits, so
there is no rounding inside a dot product. Each result is then rounded once to
Q3.12 by convergent rounding (ties go to even) and saturated. Every
element-wise product (`r ⊙ hn`, `z ⊙ (h − n)`) is rounded the same way. The
16-bit width and convergent rounding are the paper's choices; the
binary-point position and accumulator width are not given there.

**Activation functions.** The sigmoid is the four-segment PLAN approximation,
built from shifts and adds:

| \|x\| | σ(\|x\|) |
|---|---|
| ≥ 5 | 1 |
| 2.375 … 5 | \|x\|/32 + 0.84375 |
| 1 … 2.375 | \|x\|/8 + 0.625 |
| < 1 | \|x\|/4 + 0.5 |

For negative x, σ(−x) = 1 − σ(x). tanh is computed as
tanh(x) = 2σ(2x) − 1. The paper only says the activations were approximated;
any other curve can replace `sigmoid_core` in `flim_pkg`, but the reference
model in `tb/tb_flim_model_pkg.sv` must change with it.

## Frames, read-out and state clearing (`computation_unit`, `fcnn_core`)

`frame_end` is a one-cycle pulse that closes an integration period. After it,
each unit goes through these phases:

1. **DRAIN.** The photon in flight is finished. New photons are discarded.
2. **READOUT.** The FCNN core sweeps all 256 pixels.
   - For each pixel it reads the word on port B, which is read-only.
   - It computes `y = W2 · relu(W1 h + b1) + b2`, with 16 hidden units.
   - It pushes `{pixel, count, y}` into the FIFO.
   - The cycle after the FCNN reads a word, the unit writes zero to that
     address through port A. The GRU never uses port A during read-out.
   - Photons are discarded during the whole read-out.
3. **INTEGRATE** again, with every pixel back at h = 0 and count = 0.

A `frame_end` that arrives during a read-out is held and starts the next
read-out as soon as integration resumes. After reset the unit spends 256
cycles clearing the memory (INIT) before it accepts photons.

The FCNN needs **HIDDEN + FC_HIDDEN + 5 = 53 cycles** per pixel, as long as the
FIFO keeps up. That is 13,568 cycles, or 85 µs, per unit per frame. At 10
frames/s it is under 0.1 % of the time.

Clearing behind the read-out means no extra pass over the memory. It also
avoids any frame tag in the state word. An earlier idea, a one-bit epoch tag
instead of clearing, fails: a pixel with no photon for two frames reappears
with its old state.

## Results and the host link (`sync_fifo`, `io_arbiter`)

Each unit's 16-entry first-word fall-through FIFO feeds a round-robin arbiter.
The arbiter puts the unit number in front of the local pixel address, giving a
valid/ready stream of `result_t = {pixel id[10], count[8], lifetime[15:0]}`.

The lifetime is the network's Q3.12 output code. Its physical scale (for
example ns per LSB) is fixed by training. Count plus lifetime is 24 bits per
pixel: 1024 pixels × 24 bits × 10 frames/s = 246 kb/s. That matches the
roughly 240 kb/s the published system needs. The pixel id is only needed
because the four units interleave their results.

## Configuration

There is one write-only bus, `cfg_wr_t = {we, addr[16], data[16]}`. It is
broadcast, so all four units load the same network. The full map is in
`rtl/flim_pkg.sv`:

| address | content |
|---|---|
| 0x0000–0x03FF | per-pixel timestamp offset (TDC codes) |
| 0x0400 | timestamp gain, Q8.8 (reset value 0x0400 = 4.0) |
| 0x1000 + g·H + j | W_ih, with g = 0 for r, 1 for z, 2 for n |
| 0x1100 + g·H + j | b_ih |
| 0x1200 + g·H + j | b_hh |
| 0x2000 + (g·H + j)·H + k | W_hh[g][j][k] |
| 0x3000 + i·H + k | FCNN W1[i][k] |
| 0x3400 + i | FCNN b1 |
| 0x3500 + i | FCNN W2 |
| 0x3600 | FCNN b2 |

Coefficients live in registers and have no reset value, so they must be
written before use. The layout follows a PyTorch `GRU` state dict (`weight_ih_l0`,
`weight_hh_l0`, `bias_ih_l0`, `bias_hh_l0`) scaled by 4096. Trained weights are
not part of the RTL.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `N_LANES` | 128 | top, serializer | TDC lanes (the sensor's 128 TDCs) |
| `HIDDEN` | 32 | top, unit, cores | GRU hidden size (8, 16 and 32 were studied) |
| `FC_HIDDEN` | 16 | top, unit, FCNN | FCNN hidden layer |
| `FIFO_DEPTH` | 16 | top, unit | result FIFO entries |
| `DATA_W`/`FRAC`/`ACC_W` | 16/12/48 | `flim_pkg` | number format |

`HIDDEN` sets the GRU's cost: 3·HIDDEN multipliers and HIDDEN + 5 cycles per
photon. The state word grows to 8 + 16·HIDDEN bits.

## Where this departs from the published system

- **No HLS schedule.** The published cores were generated by high-level
  synthesis, and their schedule and resources are not given. The
  parallel-MAC schedule here is one possible implementation.
- **GRU latency.** The paper states "1.05 ns" at 160 MHz, which is shorter
  than one clock cycle. Together with the 4 Mphoton/s total, it is read here as
  about 1.05 µs per photon and unit. This core is faster than that.
- **Invented details.** The paper does not give the timestamp correction, word
  formats, widths, the frame-end mechanism, the FCNN hidden size, the
  activation curve or the host record layout. This design chose them.
- **Lane overflow.** Words lost at a full lane register are a consequence of
  this serializer. The paper mentions only losses at busy units.
- **Count saturation.** The photon count saturates at 255. Brighter pixels,
  such as around 500 photons per pixel at 5 frames/s, report 255, but their
  GRU state keeps integrating every accepted photon.
- **Outside the RTL.** The sensor, laser, USB 3 link and PC are not included.
  The top's lane inputs and result stream are where they connect.

## Verification

Each block has a self-checking testbench in `tb/`. The testbenches compare
against `tb_flim_model_pkg`, an integer model of the arithmetic written
independently of the RTL functions. The tests check:

| testbench | what it checks |
|---|---|
| `tb_gru_core` | each written state word against the model; the 37-cycle accept rate |
| `tb_fcnn_core` | every result, plus 53 cycles per pixel, with and without back-pressure |
| `tb_state_bram`, `tb_sync_fifo` | memory and queue behaviour against shadow models |
| `tb_serializer_correction` | every corrected event, lane-drop accounting, one event per cycle, two-cycle latency |
| `tb_io_arbiter` | per-unit ordering, hold under back-pressure, full-rate turn-taking |
| `tb_computation_unit` | cycle-exact accept/discard prediction, read-out time, clearing between frames, a frame_end during read-out |
| `tb_flim_top` | the whole design at default size (below) |

`tb_flim_top` runs the whole design at its default size for two frames:

- It checks every one of 2 × 1024 results against the model.
- It checks photon conservation: driven = accepted + busy-discarded + lane-dropped.
- It requires each of these to have happened at least once: lane overflow,
  busy discard, discard during read-out, count saturation, output
  back-pressure, and a second frame.

`tb_flim_workloads` also runs the default build and covers the loads the
published system was evaluated with:

- **Smaller model.** A GRU-8 is loaded into the 32-unit core with the unused
  units' weights at zero. The results must equal a GRU-8 reference exactly.
- **Realistic timestamps.** Codes follow an exponential decay (5.5 ns mean).
- **Peak capacity.** With every lane busy, each unit is offered a photon every
  4th cycle and accepts one every 40. Together the four units process
  16 Mphoton/s.
- **Random load.** At 4 Mphoton/s of random arrivals, about 83 % of photons are
  accepted and 17 % are discarded because a unit was busy.
- **Bright pixels.** Four pixels receive enough photons to saturate their
  counts.
- **Long samples.** Four pixels each receive exactly 1024 photons.
- **Read-out time.** Each read-out takes 13,571 cycles (85 µs).

Every testbench prints `TB_RESULT checks=N failures=M` and stops with a
watchdog if the design hangs.

To run a testbench with plain Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/flim_pkg.sv tb/tb_flim_model_pkg.sv tb/tb_flim_top.sv \
    --top-module tb_flim_top -Mdir obj_top
./obj_top/Vtb_flim_top
```

Use the same pattern for the other testbenches. The full-size top test takes
about half a minute to build and under a second to run. Its stimulus is random
(`$urandom`); pass `+verilator+seed+N` to vary it.
