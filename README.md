# A streaming Heston / Longstaff-Schwartz path kernel in SystemVerilog

Pricing the Greeks of a basket of American options with the STAC-A2
approach starts with a Monte Carlo simulation. Every asset follows
Heston stochastic-volatility dynamics over T timesteps and P paths, and
for every path and timestep the best price over all A assets is kept.
That maximum is what the Longstaff-Schwartz regression consumes. The
random normals are drawn in advance, so the hardware problem is pure
streaming. Two cubes of A x T x P normals come in, and a T x P array of
maxima goes out. This RTL implements that streaming stage as an FPGA
dataflow design, after the approach of Brown et al., *"Low-power option
Greeks: efficiency-driven market risk analysis using FPGAs"*. The kernel
accepts one cube element per clock cycle. The top module places six such
kernels side by side.

Three ideas carry the design:

1. **Dataflow.** The computation is split into stages that run
   concurrently and are joined by FIFOs. Each stage does one thing to one
   element per cycle.
2. **Loop interchange.** Each timestep of a path depends on the previous
   one, so a naive path-by-path order stalls for the whole arithmetic
   latency between steps. Iterating paths innermost puts n_paths elements
   between two steps of the same path. As long as n_paths is larger than
   the pipeline latency, the dependency never stalls. The state of each
   path is kept in a small per-path cache.
3. **Batching and ping-pong reduction.** The maximum over assets needs a
   timesteps x paths buffer. So paths are processed in batches of 500,
   with a 500 x 1260 buffer, and the buffer is doubled. One copy fills
   with the current batch while the other streams out the previous batch.

## The computation per element

Each asset has one configuration word, computed by the host from the
Heston parameters (kappa, theta, xi, rho, r), the timestep dt and the
start values (v0, S0). The package `greeks_pkg` lists the fields and
their formulas. With E = exp(-kappa dt):

```
m   = theta(1-E) + E V                    s^2 = c1 V + c2
psi = s^2 / m^2
psi <= 1.5 : b^2 = 2/psi - 1 + sqrt(2/psi) sqrt(2/psi - 1)
             a   = m / (1 + b^2)
             V'  = a (b + Zv)^2
psi >  1.5 : p = (psi-1)/(psi+1),  beta = (1-p)/m,  u = Phi(Zv)
             V'  = 0                                      if u <= p
                 = (ln(1-p) - ln(1-u)) / beta             otherwise
ln S' = ln S + k0 + k1 V + k2 V' + sqrt(k3 V + k4 V') Zs
S'    = exp(ln S')
out[t][p] = max over assets of S'
```

This is Andersen's quadratic-exponential (QE) scheme with psi_c = 1.5
and central weighting (gamma1 = gamma2 = 1/2). Zv comes from the first
input cube (`corrpathcube`) and Zs from the second (`corrpathcube_p1`).
The source study names these stages but does not print their formulas,
so the formulas are this design's choice of the standard scheme.

## Data layout and loop order

All stages walk the same loop nest, with the path innermost:

```
for batch  in 0 .. n_batches-1
  for asset in 0 .. n_assets-1
    for t   in 0 .. n_steps-1
      for p in 0 .. n_paths-1      (n_paths <= BATCH = 500)
```

Both input cubes must therefore be laid out in memory in exactly this
order. Element e is at word `base + e/16`, lane `e%16`. Each 512-bit word
holds 16 IEEE-754 single-precision values, lane 0 in bits 31:0.

The results come out per batch, in the order (t, p), path fastest:
n_steps x n_paths values per batch. They are packed the same way from
`out_base` on. The last word carries byte strobes when it is only partly
filled.

Reordering the host's natural data layout into this order, and the
results back, is the host's job, as in the source study.

## Stages of one kernel (`heston_ls_kernel`)

```
cube_reader (Zv) -> fifo -> variance_path_qe -> fifo --+
cube_reader (Zs) -> fifo -------------------------------+-> log_price_path_qe
   -> fifo -> asset_path_exp -> fifo -> ls_path_reduction -> fifo -> ls_path_writer
```

All connections are valid/ready streams; a transfer happens when both
are high. Every stage sustains one element per cycle.

- **`cube_reader`** keeps up to PREFETCH (4) 512-bit reads in flight.
  It issues a read only when the reply is guaranteed buffer space, so
  replies never need back-pressure. It unpacks 16 lanes per word and
  converts each float32 to fixed point.
- **`variance_path_qe`** computes the QE variance step. At t = 0 the
  current variance is the asset's v0; after that it is the value this
  path produced one timestep earlier, read from the per-path cache. The
  arithmetic is one combinational function, followed by a LAT-stage
  register pipeline (`stall_pipe`) that a retiming synthesis flow can
  spread the logic across. The cache is written when the result leaves
  the pipeline. That is the real read-after-write hazard, and it is why
  an assertion requires n_paths > LAT. The stage forwards (V, V') to the
  next stage.
- **`log_price_path_qe`** joins the variance pairs with the Zs stream
  and applies the log-price step. It keeps its own per-path cache of
  ln S (`cached_asspath`), seeded from ln S0 at t = 0.
- **`asset_path_exp`** takes exp(ln S).
- **`ls_path_reduction`** takes the maximum over assets (below).
- **`ls_path_writer`** packs 16 results per 512-bit word, converts them
  to float32, and writes with strobes.

The kernel is controlled by `start`/`args` → `busy` → a one-cycle
`done`. A 50-entry table holds the asset configurations; it is written
through `cfg_we`/`cfg_addr`/`cfg_data` while the kernel is idle.

## The ping-pong reduction buffer

This is the least obvious part of the design. Within a batch, the values
arrive asset by asset. For each asset, every (t, p) of the batch is
visited once. The buffer entry `t*n_paths + p` is:

- written with the first asset's value;
- then replaced by max(stored, new) for each later asset.

This update is a two-cycle read-modify-write on a synchronous RAM. It is
safe because the same address comes back only n_steps x n_paths elements
later.

The two buffer copies (each `BATCH x MAX_STEPS` words) have a `full`
flag each:

- A buffer becomes full when the write of its batch's last element lands.
  At that moment the fill side switches to the other copy.
- The drain side streams a full buffer out one address per cycle.
- The buffer's full flag clears, and the drain switches copies, when its
  last read is issued.
- If the fill side reaches a batch whose buffer is still full, it holds
  `in_ready` low. The whole pipeline then backs up to the readers.

The read-data path has three cycles between issuing a read and popping
the value from the output FIFO. The drain therefore uses a three-entry
FIFO and three credits, which lets it run at one value per cycle.

With no back-pressure a run takes `elements + n_steps*n_paths + ~40`
cycles: every element once, plus draining the last batch. The
testbenches measure exactly this.

At the defaults, one kernel's buffers hold 2 x 500 x 1260 x 32 bits,
about 5 MB. This matches the on-chip memory the source study reports
placing in UltraRAM. Here the buffers are generic inferred RAMs
(`sdp_ram`).

## The top: `greeks_accel`

`greeks_accel` instantiates NUM_KERNELS = 6 kernels. The source study's
limit is six kernels at 1260 maximum timesteps, set by on-chip memory.
With MAX_STEPS = 504 it fits ten, a limit set by three memory ports per
kernel. The parameters allow both builds.

The configuration write port is broadcast to all kernels. Each kernel
has its own start, arguments and three 512-bit memory ports: two read
ports (request/response, replies in request order) and one write port
with byte strobes.

The host divides the 500-path batches among the kernels and gives each
kernel its own buffer addresses. A 25,000-path problem has 50 batches,
which six kernels take as 9/9/8/8/8/8. The memories (HBM2 or DDR), the
AXI shell and the host software are outside this RTL.

## Numbers and accuracy

The datapath is 32-bit signed fixed point: 12 integer bits (sign
included) and 20 fraction bits. This is the `ap_fixed<32,12>` format of
the source study. Float32 is used only at the memory boundary. The
functions in `greeks_pkg` are:

- saturating add, multiply and divide;
- a bit-serial square root;
- exp by power-of-two range reduction and a degree-6 polynomial;
- ln by normalisation and an atanh series;
- the normal CDF by Abramowitz-Stegun 26.2.17, with the upper tail
  computed directly.

Limits a user should know:

- **Range.** Prices above 2048 saturate. Keep S0 and the volatility
  within that range, or rescale prices.
- **Small variances.** k3 V + k4 V' below a few 1e-6 is only a few LSBs
  wide, so its square root is coarse. The log-price step then carries an
  absolute error of up to about 2e-3 x |Zs|.
- **Far tail.** In the exponential branch, 1 - Phi(Zv) is resolved only
  to 2^-20. For Zv above about 4, V' is therefore somewhat low.
- **QE switch point.** A step with psi very close to 1.5 can take the
  other QE branch than a double-precision model would. From there the
  path follows a different, equally valid, trajectory.

For its `<32,12>` configuration the source study reports a deviation of
1.44% at 504 timesteps and 1.75% at 1260. That is against a double
reference, on its own data. With the fairly extreme test parameters used
here (vol-of-vol up to 1.6), `tb_workloads` measures these mean
deviations against a free-running double-precision simulation:

| Timesteps | Mean deviation |
|-----------|----------------|
| 126       | 0.1%           |
| 504       | 0.6%           |
| 1260      | 5.7%           |

At 1260 steps the deviation is dominated by paths that cross the 2048
ceiling or flip QE branch. Individual steps agree with a double model to
the tolerances listed in the testbench headers.

## Where this design departs from the source study

- **Fixed point instead of floating point.** The study's final
  multi-kernel builds use double, single or half precision floating
  point. Floating-point cores are vendor IP, so this RTL uses the study's
  32-bit fixed-point alternative.
- **Pipeline depth.** The study's HLS pipeline for the log-price step
  is 457 cycles deep, hence its rule "paths per batch > 457". Here the
  arithmetic is combinational with LAT_QE = 8 pipeline registers behind
  it (a parameter), and the rule is n_paths > LAT_QE. A real FPGA build
  needs LAT_QE raised until timing closes. The caches and loop order
  already tolerate any LAT_QE below the batch size.
- **Formulas.** The study does not print the QE and log-price formulas.
  Andersen's scheme above is used, without its martingale correction.
- **Host precomputation.** The per-asset constants (E, c1, c2, k0..k4)
  are computed by the host and loaded as a table.
- **Interfaces.** Memory ports are simple request/response and
  valid/ready channels rather than AXI4. The control is
  start/busy/done rather than an XRT-managed control register block.
- **Outside this RTL.** Host data reordering, transfers, the
  Longstaff-Schwartz regression and the Greeks themselves are not in the
  RTL.

## Files

| File | Contents |
|------|----------|
| `rtl/greeks_pkg.sv` | types, configuration word, fixed-point functions, QE steps |
| `rtl/stream_fifo.sv` | first-word-fall-through FIFO (the inter-stage streams) |
| `rtl/stall_pipe.sv` | register pipeline with valid bits and back-pressure |
| `rtl/loop_counter.sv` | the batch/asset/timestep/path loop nest |
| `rtl/sdp_ram.sv` | simple dual-port RAM, registered read |
| `rtl/cube_reader.sv` | 512-bit cube reader, float32 → fixed |
| `rtl/variance_path_qe.sv` | QE variance stage with per-path cache |
| `rtl/log_price_path_qe.sv` | log-price stage with per-path cache |
| `rtl/asset_path_exp.sv` | exp stage |
| `rtl/ls_path_reduction.sv` | max-over-assets reduction, ping-pong buffers |
| `rtl/ls_path_writer.sv` | result packer/writer |
| `rtl/heston_ls_kernel.sv` | one kernel |
| `rtl/greeks_accel.sv` | top, NUM_KERNELS kernels |

The testbenches in `tb/` are self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_heston_pkg.sv` is an independent double-precision model.
- `mem_read_model.sv` and `mem_write_model.sv` are behavioural memories
  with latency and random stalls.
- There is one testbench per stage.
- `tb_heston_ls_kernel` runs a reduced-size kernel, twice back to back.
- `tb_greeks_accel` runs the full-size top. All six kernels run
  concurrently, under heavy back-pressure and then none, and the test
  counts every mechanism: both QE branches, zero variance, cache reuse,
  fill/drain overlap, buffer waits, pipeline stalls, partial last words
  and concurrent kernels.
- `tb_workloads` runs one 500-path batch of each benchmark shape
  (Tiny 5x126, Small 10x126, Medium 20x252, Large 30x504, Huge 50x1260)
  on a default-size kernel. The asset count is capped at 10 to keep the
  run near 30 s.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`. The package files go first:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/greeks_pkg.sv tb/tb_heston_pkg.sv $(ls rtl/*.sv | grep -v greeks_pkg) \
  tb/mem_read_model.sv tb/mem_write_model.sv tb/tb_greeks_accel.sv \
  --top-module tb_greeks_accel -o sim
./obj_dir/sim
```

Replace the last testbench file and `--top-module` for any other test.
The memory models are only used by the reader, writer, kernel, top and
workload tests, but listing them always does no harm. Every testbench
finishes in well under a minute; `tb_workloads` is the longest.
