# A matched filter group engine in SystemVerilog

Pulsar searches for radio telescopes correct for a source's acceleration by passing the same
long input signal through many filters. This set of filters is called a *matched filter
group*. A group MF-(N_filter, N_inc, Tap_1) holds N_filter complex FIR filters whose lengths
grow linearly:

    Tap_j = Tap_1 + N_inc * (j - 1),    j = 1 .. N_filter

Filter j produces its own output plane:

    y_j[n] = sum_{k=0}^{Tap_j - 1} h_j[k] * x[n - k]

All samples and coefficients are complex single-precision floating-point numbers. Typical
ranges are N_filter and Tap_j up to 1000, N_inc up to 10, and 2^10 to 2^30 input samples.

This RTL implements an FPGA node for such groups with two kinds of filter processor. Each
suits a different part of the parameter space.

* **Time-domain overlap-add (TD-OLA).** N_PU_OLA small FIR units of N_OLA_TAP taps work on
  the whole group. A long filter is split into ceil(Tap_j / N_OLA_TAP) sub-filters that run
  one after another. Their partial results are combined through intermediate arrays in
  off-chip memory. Filters are allocated to units with the *longest processing time first*
  (LPT) rule.
* **Fourier-domain overlap-save (FD-OLS).** N_PU_OLS units each multiply a
  Fourier-transformed input chunk by a Fourier-transformed filter. An N_OLS_FT-point FFT
  engine then brings the product back to the time domain. Several filters share one padded
  copy of the input.

The defaults are the configurations that performed best on an Intel Arria 10:

* 7 TD-OLA units of 32 taps;
* 3 FD-OLS units with 4096-point FFT engines that take 4 points per clock.

## Number format and arithmetic

`mfg_pkg` defines `cplx_t` as a packed pair of IEEE-754 binary32 words, `{re, im}`. It also
holds the floating-point functions that every datapath uses:

* multiply and add with round-to-nearest-even;
* subnormal inputs and results flushed to zero;
* overflow to infinity;
* no NaN propagation rules beyond what falls out of the arithmetic.

A complex multiply is four real multiplies and two adds, each rounded separately. The
testbenches therefore compare against double-precision references with a relative
tolerance, never bit for bit.

## TD-OLA: sub-filters, launch rounds and the shared input stream

### The unit (`ola_fir`)

The unit is a transposed-form complex FIR of L = N_OLA_TAP taps. Coefficients are loaded one
per cycle before a launch. It adds one extra operand, `acc_in`, to every output:

    w[p] = sum_{k<L} c[k] x[p-k]  +  acc_in[p]        (registered, latency 1)

The unit does not feed its output back into itself. The accumulation across sub-filters
goes through off-chip memory, as described next.

### Combining sub-filters

Split filter j into sub-filters s = 0 .. nsub-1, where sub-filter s holds taps
s*L .. s*L+L-1. The last sub-filter is zero-padded when L does not divide Tap_j. The full
output is the sum of the sub-filter outputs z_s, each delayed by s*L:

    y_j[p] = sum_s z_s[p - s*L]

The controller launches the sub-filters in **reverse** order: s = nsub-1 first, s = 0 last.
Each launch computes

    w_s[p] = z_s[p] + w_{s+1}[p - L]

It reads the previous launch's intermediate array at p - L and writes its own at p. After
the final launch (s = 0), w_0 equals y_j, and that launch writes to filter j's output plane
instead of an intermediate array.

The read offset is the same (L) for every launch of every filter. So all units in a round
can consume **one** input stream x[p] and one address sequence p, even when they work on
different filters and different sub-filters. This is why the reverse order was chosen.

Each unit owns two intermediate arrays, a and b. It alternates between them from launch to
launch, so one launch never reads and writes the same array.

### Allocation (`lpt_scheduler`)

Filter j costs ceil(Tap_j / L) launches. The scheduler visits the filters from the longest
(j = N_filter) to the shortest. It gives each filter to the unit with the fewest launches so
far; ties go to the lowest unit index. This costs one filter per clock.

Since filter lengths grow with j, the visiting order is the LPT order. The largest per-unit
load, `makespan`, is the number of launch rounds that the group needs.

### Launch rounds (`ola_controller`)

In each round, every unit that still has work runs the next sub-filter of its current
filter:

1. **Coefficient load, L + 1 cycles.** Unit u reads taps
   `(j-1)*TAP_STRIDE + s*L + k` from its coefficient port. Taps past Tap_j are replaced by
   zero.
2. **Stream, LEN cycles.**
   * For p = 0 .. LEN-1, the input x[p] is read once and broadcast.
   * Each unit reads its intermediate array at p - L. That value counts as zero for the
     first launch of a filter and for p < L.
   * Each unit writes its result at p, tagged with final/buffer/filter.
   * LEN = N_input + ceil(Tap_N_filter / L)*L - 1. This is the length of the longest output
     plane, so every round streams the same length.
3. **Drain and turnaround, 4 cycles.**

A unit with no work left in a round idles. The controller counts these idle unit-rounds and
the launches of zero-padded sub-filters (`n_idle_slot`, `n_pad_launch`).

A whole job takes exactly

    N_filter + 2 + makespan * (L + LEN + 5) + 1   cycles

The testbenches check this cycle count. Example: MF-(42, 10, 1) on the default 7 x 32-tap
node needs 42 rounds.

### Memory expected by the TD-OLA ports

All ports are request/response with the read data returned on the next cycle and no
back-pressure.

* The input array must read as zero from N_input up to LEN.
* Coefficient words must be valid up to Tap_j for each filter. Words beyond Tap_j are never
  used.
* Each unit's two intermediate arrays need LEN words.
* Each output plane receives LEN words. The last words of a short filter's plane are zero,
  up to rounding.

## FD-OLS: padded input sets, chunks and the FFT engine

### What the host prepares

Overlap-save cuts the input into chunks of N = N_OLS_FT points. Consecutive chunks overlap
by `ovl` points, and the first chunk starts with `ovl` zeros. After a circular convolution
with a filter of at most `ovl` taps, the first `ovl` points of each output chunk are wrong
and are dropped. The remaining N - ovl points are exact. A set of

    ceil(N_input / (N - ovl))

chunks covers the input.

Filters of different lengths need different overlaps. To avoid one padded copy of the input
per filter, the group is cut into **sub-groups** of N_share * N_PU_OLS consecutive filters,
longest first. Each sub-group shares one padded input set, built with the overlap of its
longest filter; its shorter filters count as zero-padded to that length.

The host does the following, outside this RTL:

* builds each padded set by plain memory copies;
* Fourier transforms every chunk;
* transforms every filter's zero-padded coefficients, with the 1/N of the inverse transform
  folded in;
* picks N_share.

The node then runs **launches**. One launch streams one padded set through up to N_PU_OLS
units, one filter per unit. A sub-group therefore takes N_share launches on the same input
set.

### The unit (`ols_pu` = `dot_product` + `fft_engine`)

* `dot_product` multiplies P input points by P coefficient points per cycle, with a
  registered output.
* `fft_engine` is an inverse transform of N points, P per cycle. It is built from log2(N)
  radix-2 decimation-in-frequency stages (`fft_stage`) and a bit-reversal reorder buffer
  (`fft_reorder`).
  * Each stage writes an incoming frame into one of two frame buffers, at the indices that
    travel with the data.
  * Once the frame is complete, the stage reads it back in butterfly order. It does P/2
    butterflies per cycle while the other buffer fills.
  * Twiddle factors are constant tables computed during elaboration from cos/sin and
    rounded to binary32.

The engine accepts a new frame every N/P cycles without gaps. The first output beat of a
frame appears `log2(N)*(N/P + 1) + 2` cycles after the frame's last input beat; add one
cycle for `ols_pu`. The engine holds 2N points in each stage, so at N = 4096 this is the
dominant storage of the node.

### The sequencer (`ols_controller`)

A launch is described by `in_base`, `n_chunk`, `ovl`, `filt_base` and `n_active`.

* Chunk c is read from `in_base + c*N`, P points per beat. The read is shared by all units.
* Unit u reads filter `filt_base + u` at `(filt_base + u - 1)*N`.
* On the way out, each lane is masked: point m of a chunk is written only if m >= ovl.
  Kept points go to `y_f[c*(N - ovl) + m - ovl]`.
* Chunks stream back to back and the units never stall. A launch of C chunks takes

      C*N/P + 1 + log2(N)*(N/P + 1) + 3 + N/P   cycles

* `n_discard` reports C * ovl, the number of points dropped.

Units beyond `n_active` still compute, but their writes stay disabled.

## The node (`mfg_node`)

`mfg_node` holds both processor kinds:

* `ola_controller` with N_PU_OLA `ola_fir` units;
* `ols_controller` with N_PU_OLS `ols_pu` units.

Pulse `start` with `mode` = 0 for a TD-OLA job, which runs a whole group from
`n_filter`, `n_inc`, `tap1` and `n_input`. Pulse it with `mode` = 1 for one FD-OLS launch,
described by the `fd_*` inputs. `start` is ignored while `busy`. `done` pulses at the end of
the job or launch.

All memory ports are plain signals and arrays:

* `td_*` for the input, coefficient, intermediate and output arrays of the TD side;
* `fd_*` for the padded input set, coefficient spectra and output planes of the FD side.

An assertion checks that the two controllers are never busy together.

## Where this RTL departs from the published design

* The published design runs each processor kind as its own FPGA image. Here both sit in one
  node behind `mode`.
* The LPT allocation was a host-side computation. Here it is done in hardware, so a TD job
  needs only the three group numbers.
* The original kernels were written in OpenCL. The FIR structure, the sub-filter launch
  order, the FFT architecture, the memory layout and all cycle timing in this RTL are this
  design's own.
* The intermediate arrays are LEN = N_input + ceil(Tap_max/L)*L - 1 words long, not the
  2*N_input words quoted for the original.
* Everything the host did is left out: Fourier transforms of inputs and coefficients,
  building padded sets, and choosing N_OLA_TAP and N_share. So are the off-chip DRAM and
  the host link. The testbenches play these parts with behavioural memories and
  double-precision DFTs.
* Arithmetic flushes subnormals to zero and has no special NaN handling.
* There are no clock-rate claims. The floating-point operators are single-cycle
  combinational blocks. A real device would pipeline them, which would change the latencies
  above by a fixed number of cycles.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_PU_OLA` | 7 | TD-OLA units |
| `N_OLA_TAP` | 32 | taps per TD-OLA unit (power of two) |
| `N_PU_OLS` | 3 | FD-OLS units |
| `N_OLS_FT` | 4096 | FFT length (power of two) |
| `FFT_P` | 4 | FFT points per clock (power of two, at most N_OLS_FT/2) |
| `FILT_W` | 10 | width of filter numbers (N_filter up to 1023) |
| `TAP_W` | 14 | width of tap counts |
| `MAX_FILT` | 1000 | largest group size |
| `TAP_STRIDE` | 1024 | coefficient words reserved per filter (at least the longest filter) |

Other configurations that were evaluated are parameter settings of the same RTL:

* TD-OLA: 16/15, 64/3 and 128/1 taps/units on Arria 10; 8/8 to 64/1 on Stratix V.
* FD-OLS: 64- to 4096-point engines with 4- or 8-point throughput and 1 to 4 units.

## Files

| file | content |
|---|---|
| `rtl/mfg_pkg.sv` | complex binary32 type and arithmetic |
| `rtl/ola_fir.sv` | TD-OLA sub-filter unit |
| `rtl/lpt_scheduler.sv` | LPT allocation of filters to units |
| `rtl/ola_controller.sv` | TD-OLA launch rounds and memory traffic |
| `rtl/dot_product.sv` | P-lane complex multiplier |
| `rtl/fft_stage.sv`, `rtl/fft_reorder.sv`, `rtl/fft_engine.sv` | streaming FFT |
| `rtl/ols_pu.sv` | FD-OLS unit |
| `rtl/ols_controller.sv` | FD-OLS chunk sequencer |
| `rtl/mfg_node.sv` | the node (top) |
| `tb/tb_fp_pkg.sv` | binary32/real conversions, tolerance compare, random values |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_mfg_node.sv` | end-to-end test at reduced size |
| `tb/tb_mfg_node_full.sv` | end-to-end test at the default sizes |

## Verification

Every testbench:

* computes its expected values independently, in double precision;
* prints `TB_RESULT checks=N failures=M`;
* has a watchdog;
* checks cycle counts wherever this README gives a latency or a rate.

The testbenches cover the following:

* **`tb_ola_fir`**: two launches with gaps in the stream, and latency.
* **`tb_lpt_scheduler`**: every allocation, the makespan and the one-filter-per-clock rate
  against a software LPT, for a set of groups that includes MF-(42,10,1) and
  MF-(1000,1,1).
* **`tb_ola_controller`**: four groups through three 4-tap units. It checks every output
  point, the round count, the exact job time, and the idle and padded counts.
* **`tb_dot_product`**: random lanes, with and without gaps, and the one-cycle latency.
* **`tb_fft_engine`** and **`tb_ols_pu`**: random data against a direct DFT. Frames run back
  to back, and latency and frame spacing are checked.
* **`tb_ols_controller`**: two launches sharing one padded set. It checks every kept point,
  that inactive units write nothing, the launch time, and the discard count.
* **`tb_mfg_node`**: MF-(6,3,2) over 50 samples on a node with 3 units of 4 taps and 2 units
  of 32-point FFTs.
  * It runs a TD job, the FD launches for all sub-groups with N_share = 2, and a second TD
    job.
  * It compares every output of every filter with direct convolution.
  * It fails if any of these never happened: either mode, a mode switch, a padded
    sub-filter, an idle unit, an intermediate-array write, a discarded point, or a launch
    reusing an input set.
* **`tb_mfg_node_full`**: the same test on the node at its default parameters. The TD job is
  MF-(42,10,1) over 8192 samples, followed by the first FD sub-group: six filters, overlap
  411, three 4096-point chunks, two launches. About 400 000 checked points; under a minute
  of simulation.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_mfg_node \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/mfg_pkg.sv tb/tb_fp_pkg.sv tb/tb_mfg_node.sv
    ./obj_dir/Vtb_mfg_node +verilator+rand+reset+2

Uninitialised state starts random under `+verilator+rand+reset+2`. The testbenches reset or
initialise everything they read.

Verilator lint reports width warnings: index and operand widths that are truncated or
extended on purpose. It reports no latches, combinational loops, multiple drivers or
undriven nets. The unused output bits of `mfg_node`'s internal lockstep FD units
(`out_valid`, `out_beat` of units 1 and up) are left unconnected on purpose: unit 0's copies
drive the shared write sequencing.
