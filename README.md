# Streaming fixed-point matrix-element kernels for event generation

Monte Carlo event generators spend most of their time on two regular
computations:

- building the momenta of each phase-space point and evaluating the squared
  matrix element |M|^2 at it;
- for multi-parton QCD processes, the colour sum that turns the colour-flow
  ("jamp") partial amplitudes A_i into a number. This sum is
  ΔME = Σ_i Re(A_i* Σ_j C_ij A_j), with a fixed, real, symmetric colour matrix C.

Both computations are the same arithmetic repeated for millions of independent
events. This design therefore streams events through deep fixed-point
pipelines that accept a new event every cycle, or every few cycles. Data moves
from global memory, through the arithmetic, and back to global memory, and no
stage stores an event anywhere else.

The RTL holds two kernels:

1. **e+e− → μ+μ− compute unit.** The complete chain runs on chip for this
   benchmark process:
   - random numbers in;
   - phase space (the RAMBO method reduced to two bodies);
   - helicity amplitudes for the photon and Z diagrams, summed over all 16
     helicities;
   - |M|^2 and the momenta out.

   It accepts one event per clock cycle (II = 1). The top level replicates it
   `N_CU = 8` times.
2. **Colour-algebra kernel for gg → tt̄ + jets.** It contracts 6, 24 or 120
   colour-flow amplitudes against the colour matrix. The default size is 120
   flows (tt̄ + 3 gluons), which runs at one event per 4 cycles (II = 4). The
   6- and 24-flow sizes run at one event per cycle.

The top level `me_accel_top` places both kernels side by side. Each kernel has
its own AXI4 master ports to global memory. A host starts each kernel with a
`start` pulse and an event count, and waits for `done`.

## Number formats

All arithmetic is two's-complement fixed point. Casts truncate and wrap, which
is the default behaviour of HLS `ap_fixed`. Every format is defined in
`rtl/me_pkg.sv`. In the table, `<W,I>` means W bits in total, of which I are
integer bits, sign included.

| Use | Format | Fraction bits |
|---|---|---|
| Numbers in global memory (random inputs, results) | <32,14> | 18 |
| Momenta, couplings, propagators | <24,8> | 16 |
| Helicity-sum accumulator | <32,12> | 20 |
| Output rescaling | <48,24> | 24 |
| Colour amplitudes (re, im) | <16,4> | 12 |
| Colour coefficients | <24,7> | 17 |
| Reduced row sum | <22,10> | 12 |
| Colour accumulator | <28,15> | 13 |
| Colour result | 32-bit integer | (accumulator bits) |

**Momentum scaling.** Momenta and masses are divided by S = 2^10 before they
enter the <24,8> datapath. A 750 GeV beam therefore becomes 0.732, and s, MZ^2
and the propagator denominators all stay within range. The output writer
multiplies by 2^10 again through the 48-bit type, so momenta leave the chip in
GeV. |M|^2 is dimensionless and is not rescaled.

**Electroweak inputs.** They are the usual Standard Model defaults of MadGraph:
- MZ = 91.188 GeV and ΓZ = 2.441404 GeV;
- α = 1/132.507;
- sin²θ_W = 0.2222.

The couplings are stored pre-scaled as parameters of `ee_mumu_me`:
- e² = 0.0948;
- g_L = −0.668 and g_R = 0.535 (Z couplings of the left- and right-handed
  leptons).

## The e+e− → μ+μ− compute unit (`ee_mumu_cu`)

```
 AXI read ─► ee_input_loader ─► fifo ─► rambo_phase_space ─► fifo ─► ee_mumu_me ─► fifo ─► ee_output_writer ─► AXI write
```

**Stream handshake.** Every link is a valid/ready stream, and `stream_fifo`
decouples the stages. A stage moves only when the next one can take its
result (`in_ready = !out_valid || out_ready`). A stall at the memory therefore
propagates backwards through the pipeline, and nothing is ever dropped.

### Input loader

Input format:
- each event needs two random numbers, r_θ and r_φ, each 32 bits in [0,1);
- eight events share one 512-bit word, event k taking bits 64k..64k+63
  (r_θ low, r_φ high);
- `n_events` events therefore occupy ⌈n/8⌉ words starting at `src_addr`.

`axi_burst_reader` behaviour:
- it issues bursts of up to 16 beats;
- it keeps one burst in flight while the previous one drains;
- it never requests more beats than its FIFO can hold, so `rready` stays high
  and the memory is never stalled by the loader.

The unpacker hands out one event per cycle.

### Phase space (`rambo_phase_space`)

For two massless particles in their centre-of-mass frame, RAMBO reduces to
choosing a direction uniformly:

- cos θ = 2 r_θ − 1
- sin θ = √(1 − cos²θ)
- φ = 2π r_φ
- p(μ−) = E_beam (1, sinθ cosφ, sinθ sinφ, cosθ)
- p(μ+) = E_beam (1, −sinθ cosφ, −sinθ sinφ, −cosθ)

Energy and momentum are conserved exactly, because p(μ+) is formed by negating
p(μ−).

The unit has three pipeline stages:
1. cos θ, and φ scaled to radians.
2. A bit-serial integer square root (unrolled over 24 result bits) produces
   sin θ. An 18-step unrolled CORDIC with 20 fraction bits produces cos φ and
   sin φ, after folding φ into (−π/2, π/2].
3. The products with E_beam.

**Accuracy near the poles.** The square root loses accuracy where sin θ → 0.
There, 1 − cos²θ is a difference of nearly equal numbers in a format with 16
fraction bits. The transverse momentum can then be off by a few GeV. This is
the error behaviour the fixed-point reference implementation shows as well.

### Matrix element (`ee_mumu_me`)

For massless fermions, each of the 16 helicity combinations of e−e+μ−μ+ gives
an amplitude of one of two forms:

```
A = e² · K · [ 1/s  +  g_e g_μ / (s − MZ² + i MZ ΓZ) ]
```

- K = 4 p1·p4 when the e− and μ− helicities are equal, and 4 p1·p3 when they
  differ.
- g_e and g_μ are g_L or g_R according to the helicity.
- The amplitude is zero unless e− and e+ have opposite helicities, and μ− and
  μ+ likewise.

This is what the HELAS chain of spinors, vector currents and the photon and Z
propagators evaluates. Here it is written in closed form rather than as a
sequence of wavefunction calls.

The four pipeline stages:

1. **Invariants.** s is formed from the beam energy, and the two K values from
   the final-state momenta.
2. **Propagators.** 1/s and the complex Z propagator (χ_re, χ_im) are
   computed by combinational division.
3. **Helicity amplitudes.** All 16 amplitudes are formed in parallel (the loop
   is fully unrolled) and squared into the <32,12> accumulator type.
4. **Average.** The sum is divided by 4 to average over the initial
   helicities, and converted to the memory format.

Latency is 4 cycles, and a new event is accepted every cycle. The momenta
travel alongside the result.

### Output writer

Each event produces one 512-bit word at `dst_addr + 64·event`:

| 32-bit slot | Contents |
|---|---|
| 0 | \|M\|² |
| 1–4 | μ− (E, px, py, pz) in GeV |
| 5–8 | μ+ (E, px, py, pz) in GeV |
| 9–15 | zero |

`axi_burst_writer` collects beats into bursts of up to 16:
- it sends W data only after the burst's AW has been accepted;
- it marks the last beat of each burst with `wlast`;
- it raises `done` once every write response has returned.

## The colour kernel (`color_kernel`)

```
 AXI read ─► color_input_loader ─► fifo ─► color_matrix_product ─► fifo ─► color_output_writer ─► AXI write
```

### Folding the colour matrix

C is real and symmetric, so

```
ΔME = Σ_i [ Re A_i · Σ_{j≥i} C'_ij Re A_j  +  Im A_i · Σ_{j≥i} C'_ij Im A_j ]
```

where C'_ii = C_ii and C'_ij = 2 C_ij for j > i. Only the N(N+1)/2 upper-
triangle coefficients are stored: 21, 300 or 7260. Coefficient (i, j) sits at
index `i·N − i(i−1)/2 + (j − i)`.

**Loading the coefficients.** The store is an on-chip register array written
once through `cfg_we/cfg_addr/cfg_data`, before any events are sent. A
hard-wired ROM would fix the kernel to one process. With the write port, the
same RTL serves any colour matrix, and the testbenches load the SU(3) matrices
of gg → tt̄ + 1, 2 and 3 gluons.

### Spreading the triangle over II cycles

Row i of the triangle has N − i entries. If consecutive rows were taken in
blocks, the first cycle would carry far more work than the last.
`color_matrix_product` instead assigns row i to group i mod II. The groups
then have nearly equal work, and each cycle evaluates one group.

Within a group, all row sums S_i = Σ_{j≥i} C'_ij A_j are computed in
parallel. Each S_i is exact until it is cast to the <22,10> reduced type. The
row term Re A_i Re S_i + Im A_i Im S_i is then cast to the <28,15>
accumulator and summed with wrap-around.

Timing:
- An event takes II cycles.
- The next event is accepted in the cycle the current one finishes, so events
  follow each other every II cycles with no gap.
- If the output stream is not ready on the last cycle, the unit holds that
  cycle and does not accept new input.

### Why II = 4 at 120 flows

One event of 120 flows is 120 × 32 bits = 3840 bits. On the 1024-bit read bus
that is four beats. The loader can therefore deliver one event per 4 cycles,
and the contraction is split into 4 groups to match.

At 6 or 24 flows an event fits one beat, and both the loader and the
contraction run at II = 1.

A unit built for 120 flows can also run a smaller process, with two
adjustments:
- the smaller matrix is written into the top-left corner of the store, and
  every other coefficient is set to zero;
- the unused amplitudes are set to zero.

The zero terms add nothing, so the result is exactly that of the smaller
process. It is produced at the 120-flow rate of one event per 4 cycles.

### Output packing

Results are 32-bit values: the accumulator bits, i.e. ΔME·2^13.
`color_output_writer` packs four of them into each 128-bit word, in event
order. If the event count is not a multiple of four, the last word is written
with its unused slots zero.

## Interfaces and timing at a glance

| Block | Accepts | Latency (cycles) |
|---|---|---|
| `stream_fifo` | 1 word/cycle | 1 (registered count, data from array) |
| `rambo_phase_space` | 1 event/cycle | 3 |
| `ee_mumu_me` | 1 event/cycle | 4 |
| `ee_mumu_cu` | ~1 event/cycle sustained | ≈ 20–30 from memory to memory, plus memory latency |
| `color_matrix_product` | 1 event per II cycles | II |
| `color_kernel` (120 flows) | 1 event per 4 cycles | set mainly by memory latency |

All blocks use an asynchronous active-low reset, `rst_n`. Stream data must
stay constant while valid is high and ready is low; `stream_fifo` checks this
with an assertion.

## Where this design departs from the reference implementation

- **Latency.** The reference HLS kernels quote pipeline latencies of 141
  cycles (e+e−) and 182, 290 and 157 cycles (colour kernels with 6, 24 and
  120 flows). Those counts include their memory interfaces and HLS
  scheduling. Here each arithmetic stage has its own short pipeline (3 to 5
  cycles). The initiation intervals (1, 1, 1 and 4) are the same.
- **Phase space and amplitudes.** These are written in closed form for this
  one 2 → 2 process, not as a general RAMBO and HELAS library.
- **Colour matrix storage.** It is loadable through a write port rather than a
  constant ROM.
- **Arithmetic for 6 and 24 flows.** The reference kernels use FP32 for these
  sizes. Here they use the same fixed-point datapath as the 120-flow kernel.
  It is bit-exact to the fixed-point model, and within 0.01 of the
  double-precision sum for amplitudes below 1. No FP32 datapath is included.
- **Results per colour event.** The reference implementation speaks of four
  output components per colour event without defining them. This design
  writes one result per event, four events per 128-bit word.
- **Bus widths and layouts.** The widths (512 bits for e+e−, 1024 bits for
  colour data), burst lengths and memory layouts are this design's own
  choices.
- **Both kernels on one top level.** The reference builds them as separate
  FPGA images. Here they share one top level, and each has its own memory
  ports.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Expected values are
computed independently, in double precision or by a bit-exact integer model:
- `tb/tb_ref_pkg.sv` holds the two-body kinematics and the analytic
  e+e− → μ+μ− cross-section formula.
- It also builds the SU(3) colour matrices from the Fierz identity. Each entry
  is a product of colour traces, evaluated by tracking index loops.
- `tb/axi_mem_model.sv` is a behavioural global memory with random stalls and
  latency.

Highlights:
- `tb_ee_mumu_me`: |M|^2 within 0.11% of the analytic result over cos θ; the
  4-cycle latency and II = 1 are checked.
- `tb_ee_mumu_cu`: 200 events from memory to memory, once with 30% memory
  stalls and once without. The stall-free run must finish in under 320 cycles
  from start to done.
- `tb_color_matrix_product`: 6, 24 and 120 flows. Results are bit-exact, and
  their spacing must be exactly 1, 1 and 4 cycles.
- `tb_color_kernel`: 120 flows from memory to memory, with II = 4 and a
  flushed partial last word.
- `tb_color_workloads`: the 6- and 24-flow processes on the default 120-flow
  unit. Their matrices are written into the corner of the store, and the
  unused coefficients and amplitudes are zero. Results are bit-exact to the
  small-size model, at one event per 4 cycles.
- `tb_me_accel_top`: the whole top at its default parameters.
  - Workload: eight compute units with 150–311 events each, run concurrently
    with 7260 coefficient loads and 21 colour events.
  - Mechanisms counted (the test fails if any never occurs): back-pressure,
    write stalls, back-to-back events, multi-burst writes, concurrent units,
    II = 4 spacing, contraction stalls and the partial flush.

**Running a testbench.** Every testbench builds with plain Verilator from the
project root, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/me_pkg.sv tb/tb_ref_pkg.sv tb/tb_me_accel_top.sv --top-module tb_me_accel_top
./obj_dir/Vtb_me_accel_top
```

**Known lint warnings.** Verilator's lint reports:
- unused signals: FIFO counts and the loaders' `done`;
- an unused `rlast` (the reader counts beats instead);
- `rst_n` used both synchronously and asynchronously. The synchronous use is
  the `disable iff` clause of the bus-handshake assertions, not logic.

None of these is a circuit problem.

## Changing sizes

| Parameter | Where | Effect |
|---|---|---|
| `N_CU` | `me_accel_top` | Number of e+e− units |
| `NCOLOR`, `COL_W` | `me_accel_top` | Colour basis and read-bus width; II follows as ⌈32·NCOLOR/COL_W⌉ |
| `EBEAM`, `MZ`, `WZ`, `E2`, `GL`, `GR` | `rambo_phase_space`, `ee_mumu_me` | Physics inputs, pre-scaled <24,8> values |
| `FIFO_DEPTH` | `ee_mumu_cu`, `color_kernel` | Decoupling between stages |
