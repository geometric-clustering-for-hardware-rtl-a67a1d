# Time-Domain Clustered Equalizer (TDCE) for chromatic dispersion compensation

Chromatic dispersion in optical fibre is undone in a coherent receiver by a
complex FIR filter. Its taps follow from the link (fibre length `z`,
dispersion coefficient `D`, wavelength `lambda`, sampling period `T`):

    g[m] = sqrt(j c T^2 / (D lambda^2 z)) * exp(-j pi c T^2 m^2 / (D lambda^2 z))

All taps have the same magnitude. Only their phase changes, quadratically in
`m`, so the taps lie on one circle in the complex plane. For short and medium
links they bunch together at a few angles. This design uses that bunching:

1. The `M` taps are replaced offline by `NC` cluster centres `g_C[0..NC-1]`.
2. A mapping `Q[i]` records which cluster tap position `i` belongs to.
3. The filter is then evaluated through the distributive law. First, every
   input sample is added into the running sum of its tap's cluster:

       x_S[w] = sum of x[i] over all i with Q[i] = w

   Then each sum is multiplied once:

       y = sum over w of x_S[w] * g_C[w]

An output costs `M` complex additions and only `NC` complex multiplications,
instead of `M` of each. The RTL implements this for the 4-span link
(320 km at 32 GBd and 2 samples per symbol). The filter has `M = 97` taps and
`NC = 10` clusters. The datapath produces `L = 20` outputs per block and has
`LP = 2` complex multipliers. At 250 MHz it delivers one block of 20 outputs
every 110 clock cycles.

The clustering itself is not part of the hardware. It runs in software on the
known link parameters. That software can be plain k-means, or k-means refined
by gradient descent, which needs fewer clusters. Either way, it produces `Q`
and `g_C`, which are loaded into the equalizer through configuration ports.

## Index convention

The hardware computes, for output block `k` and output `j = 0..L-1`:

    y[kL + j] = sum over i = 0..M-1 of x[kL + j + i - (M-1)] * g_C[Q[i]]

Here `x` is the input stream, with `M-1` zero samples in front of the first
block.

- Window position `i = 0` is the oldest sample of the window, so `Q[i]` is
  the cluster of the reversed tap `g[M-1-i]`.
- A filter with fewer than `M` taps is loaded by pointing the spare positions
  at a cluster whose centre is zero.
- An output therefore appears `M-1` samples after the newest input it
  depends on. This is the usual group delay of a causal FIR filter.

## Parallel summation: one mapping read, L additions

A direct loop over the taps would have to route each input sample to a
different sum in every cycle. The trick that makes the summation cheap is the
following. Output `j+1` sees the same taps as output `j`, shifted by one
sample. So tap position `i` multiplies `x[i], x[i+1], ..., x[i+L-1]` for `L`
consecutive outputs, and all of these go to the same cluster `Q[i]`. Per tap
position, then:

    w = Q[i]
    for j in 0..L-1 (in parallel):  x_S[j][w] += x[i + j]

Each output `j` keeps its own set of `NC` sums, held in bank `j`. A block of
`L` outputs takes `M` cycles whatever `L` is. The reads are all sequential:

- one read of `Q` per cycle;
- a sliding window of `M+L-1` input samples, shifted by one per cycle.

The only random access is the single bank address `w`, which is shared by all
`L` banks.

## The three stages and how they overlap

| Stage | Module | Work per block | Cycles |
|---|---|---|---|
| Summation (Control Unit 1) | `tdce_summation` | `M` iterations of `L` additions into `L` banks of `NC` words | `M + 1` (one pipeline stage) |
| Memory transfer | `tdce_mem_transfer` | copy the `L` banks into `L` secondary banks, one cluster per cycle | `NC` |
| Simplified dot product (Control Unit 2) | `tdce_dot_product` | `NC` cluster iterations, each doing `L/LP` steps of `LP` complex MACs; then stream `LP` outputs per cycle | `NC*L/LP + L/LP` |

The summation hardware has nothing to do while the products are formed. The
transfer frees the summation banks, so Control Unit 1 can start the next
block while Control Unit 2 still works on the previous one.

`tdce_dataflow_ctrl` tracks two facts:

- whether the summation banks hold a finished block that has not yet been
  transferred;
- whether the secondary banks are empty, full, or being read.

From these it enables the three units.

Two hand-overs save a cycle each:

- **Transfer start.** The transfer may start in Control Unit 2's last MAC
  cycle. That cycle reads cluster `NC-1`, while the transfer first writes
  cluster 0.
- **Control Unit 2 start.** Control Unit 2 may start in the transfer's last
  cycle. Its first read, cluster 0, was written long before.

Steady-state block period:

    P = max(M + NC + 3,  NC*L/LP + max(L/LP, NC))

At the defaults this gives `max(110, 100 + 10) = 110` cycles. The two sides
are balanced exactly, and this matches the "about `M + NC`, rounded to 110"
budget the design was sized to.

Latency from the cycle a block is taken (with the equalizer idle) to its
first output:

    M + NC + 3 + NC*L/LP  =  210 cycles at the defaults

Throughput is `L / P` samples per cycle, which is 20/110 at the defaults. This
is the form `L / (alpha * M)` with `alpha = 110/97`.

Only `LP = 2` complex multipliers are needed. The reason is that the summation
takes about `M` cycles anyway. The `NC * L = 200` complex products of a block
can be spread over those cycles.

## Number format and arithmetic

All samples, sums, centres and outputs are 16-bit two's complement with 11
fraction bits. That is 5 integer bits including the sign, for a range of
[-16, 16).

- **Sums** (`cadd` in `tdce_pkg`) wrap around on overflow. There is no
  saturation.
- **Complex products** (`cmul`) are formed from four real 16x16 products,
  each exact in 32 bits. The real part is `ar*br - ai*bi` and the imaginary
  part is `ar*bi + ai*br`. Each part is then shifted right by 11 bits
  (rounding toward minus infinity) and wrapped to 16 bits.
- **Inputs must be scaled** so that the sum of up to `M` samples in one
  cluster stays in range. Inputs of about ±0.25 per component are comfortably
  inside it.

On real dispersion filters with k-means centres, the fixed-point output was
measured against the same clustered filter in floating point. It stays within
about 1.6 % RMS. The error that clustering itself adds, compared with the
unclustered filter, is much larger: 17–27 % RMS with these plain k-means
centres. Better centres, for example ones refined by training, are a matter
for the offline software.

## Interfaces

`tdce_top` has four groups of ports.

**Clock and reset.** `clk` and `rst_n`. The reset is asynchronous and
active low. It clears the control state, the `Q` and `g_C` stores, and the
input history. The pre-summed banks have no reset: every word is written
before it is read.

**Input.**

- `in_data[L]` carries one block of `L` complex samples. `in_data[0]` is the
  oldest.
- A block is taken in a cycle where both `in_valid` and `in_ready` are high.
- `in_ready` is low while the summation banks are busy or still hold an
  untransferred block. This is the equalizer's back-pressure.

**Configuration.**

- `Q` is written through `q_cfg_we`, `q_cfg_addr` (tap position) and
  `q_cfg_idx` (cluster).
- `g_C` is written through `g_cfg_we`, `g_cfg_addr` and `g_cfg_data`.
- Write both only while `busy` is low.

**Output.**

- `out_valid` is high for `L/LP` consecutive cycles per block.
- In stream cycle `s`, `out_data[p]` is output `s*LP + p` of the block.
- The output cannot be stalled.

`cplx_t` is a packed struct `{re, im}` of two 16-bit words, defined in
`tdce_pkg`.

## Modules

| File | Block |
|---|---|
| `tdce_pkg.sv` | Default sizes, data types, wrapping complex add and truncating complex multiply |
| `tdce_top.sv` | The equalizer |
| `tdce_dataflow_ctrl.sv` | Dataflow controller |
| `tdce_summation.sv` | Control Unit 1 with its pipeline, adders and summation banks |
| `tdce_input_window.sv` | Sliding window of `M+L-1` samples with `M-1` samples of history |
| `tdce_mapping_mem.sv` | Sample mapping `Q` (M entries) |
| `tdce_xs_bank.sv` | One bank of `NC` pre-summed values: one write port, two asynchronous read ports (LUT-RAM style) |
| `tdce_mem_transfer.sv` | Bulk copy of the `L` summation banks to the secondary banks |
| `tdce_dot_product.sv` | Control Unit 2: MAC over clusters, output memory, output stream |
| `tdce_ctap_mem.sv` | Cluster centres `g_C` (NC entries) |
| `tdce_cmul.sv` | One complex multiplier |

All sizes are parameters of `tdce_top`: `M`, `L`, `LP` and `NC`. `L` must be
a multiple of `LP`. The pre-summed banks are small arrays with asynchronous
reads. On an FPGA they fit distributed (LUT) RAM, which suits memories of
`NC` words better than block RAM. At the defaults, synthesis gives about
8.8 kbit of flip-flops and 12.8 kbit of bank memory, across the two bank sets
of 20 × 10 words of 32 bits each.

Other configurations from the same link study:

| Link | Variant | `M` | `NC` | `L` | Period at own size (cycles) | In the default-size hardware |
|---|---|---|---|---|---|---|
| 1 span | plain | 31 | 9 | 10 | 54 | Loadable (spare positions use a zero cluster) |
| 1 span | trained | 31 | 6 | 8 | 40 | Loadable |
| 2 spans | plain | 53 | 10 | 12 | 70 | Not loadable: the zero cluster needs an 11th slot |
| 2 spans | trained | 53 | 8 | 10 | 64 | Loadable |
| 4 spans | plain | 97 | 10 | 20 | 110 | The default configuration |
| 4 spans | trained | 97 | 8 | 18 | 108 | Loadable |
| 8 spans | both | 189 | 12 | 36 | 234 | Not loadable: needs `M = 189, L = 36, NC = 12` |

All rows use `LP = 2`. "Loadable" means the filter can be loaded into the
default-size hardware, which then still produces 20 outputs every 110
cycles. The periods follow the formula above at each row's own size. At
8 spans the dot product is the slower side (`12*18 + 18 = 234` against
`189 + 12 + 3 = 204`). A third complex multiplier there (`LP = 3`, so
`12*12 + 12 = 156`) would bring the period down to the summation's 204
cycles.

## Design choices beyond the reference architecture

- **Handshakes and controller.** The valid/ready input handshake, the
  controller's state encoding and the one-cycle early hand-overs described
  above belong to this implementation.
- **Summation pipeline.** The pipeline has two stages:
  - stage 1 reads `Q[i]` and the window;
  - stage 2 does read-add-write on the bank.

  Consecutive updates of the same cluster need no forwarding, because the
  bank reads are asynchronous.
- **Clearing the sums.** The sums are cleared between blocks by a per-cluster
  "written" mask, not by writing zeros. A cluster not yet touched in the
  current block reads as zero. This includes a cluster that `Q` never
  references.
- **Output streaming.** The output memory is streamed out after the MAC phase
  rather than during it. This costs `L/LP` cycles per block on the
  dot-product side. At the defaults those cycles are hidden, because the
  summation side needs `M + NC + 3 = 110` cycles anyway.
- **Multipliers per complex product.** A complex product here uses four real
  multipliers, so the two complex multipliers amount to eight real ones. The
  reference implementation counts two real multipliers per complex product.
  That count is reachable with a three- or two-multiplier complex-product
  structure, but is not reproduced here.
- **Overflow and rounding.** Wrap-around sums and truncated products are
  assumptions. No overflow or rounding behaviour was specified for the
  16-bit format.

## Simulation

Every testbench is self-checking. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Outputs are compared
bit for bit against an independent integer model, in `tb_tdce_ref_pkg.sv`.
With Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
        rtl/tdce_pkg.sv tb/tb_tdce_ref_pkg.sv tb/tb_tdce_top_full.sv \
        --top-module tb_tdce_top_full -o sim
    ./obj_dir/sim

To run another testbench, substitute its name for `tb_tdce_top_full`. The two
packages must come first on the command line. The other modules are found in
`rtl/` and `tb/` by name.

| Testbench | What it covers |
|---|---|
| `tb_tdce_top_full` | The equalizer at its default size. Blocks with gaps, with the 210-cycle latency checked. Back-to-back blocks, with the 110-cycle period checked. A reconfiguration that leaves one cluster unused. Back-pressure, stage overlap and waiting on the transfer are each counted and must each occur. |
| `tb_tdce_top` | The same sequence at `M=7, L=8, LP=2, NC=4`. There the dot product is the slower side, so the transfer also has to wait for the secondary banks. |
| `tb_tdce_workloads_sized` (with `tb_tdce_wl_run`) | Every row of the configuration table at its own size, one `tdce_top` instance each, on real dispersion filters clustered by k-means. Checks bit-exact outputs, the fixed-point error and each block period. |
| `tb_tdce_workloads` | The default-size equalizer on real dispersion filters for 1, 2 and 4 spans. The taps are computed from the formula above and clustered by k-means inside the testbench. Checks bit-exact outputs, the fixed-point error and the block period. |
| `tb_tdce_summation`, `tb_tdce_mem_transfer`, `tb_tdce_dot_product`, `tb_tdce_dataflow_ctrl`, `tb_tdce_input_window`, `tb_tdce_mapping_mem`, `tb_tdce_ctap_mem`, `tb_tdce_xs_bank` | The individual blocks, including their cycle counts (`M+1`, `NC`, `NC*L/LP + L/LP`). |

All testbenches finish in seconds. Variables that are not reset start at
random values in these runs, and the results do not depend on them.
