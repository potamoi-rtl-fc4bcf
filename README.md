# A streaming NPU for neural rendering: RTL of the Potamoi augmentation

Radiance-field renderers (Instant-NGP, DirectVoxGO, TensoRF, 3D Gaussian
splatting) spend much of their frame time *gathering* features. For every
sample along every ray they fetch the feature vectors of the nearby grid
vertices, or the nearby Gaussian points, and blend them. Done ray by ray,
these fetches jump all over a model of tens to hundreds of megabytes. DRAM
sees random traffic, and an on-chip feature buffer suffers bank conflicts,
because several samples want the same bank in the same cycle.

The Potamoi architecture turns this around. The scene is cut into
**MVoxels**: blocks of 8 x 8 x 8 grid points (or up to 512 Gaussian points)
that lie next to each other in DRAM. Software first works out which ray
samples fall into each MVoxel and writes that down in a **Ray Index Table
(RIT)**. The hardware then streams the MVoxels in memory order, one after
another. While an MVoxel is on chip, a **Gathering Unit (GU)** serves every
sample that needs it. Inside the MVoxel buffer the features are stored
**channel-major**: channel *b* of every point lives in bank *b*. One read
therefore returns all 32 channels of one point, and no two reads of a cycle
can collide. The gathered vectors go into the NPU's feature buffer, where the
systolic array and the vector unit run the MLP layers. The vector unit gains
an exponential, which Gaussian splatting needs.

This repository gives synthesizable SystemVerilog for that NPU side: the
Gathering Unit, the feature, weight and index buffers, the 24 x 24 systolic
array, the vector unit with its exponential, and a layer sequencer that ties
them together. Self-checking testbenches cover every block and the whole NPU.

## Block map

```
            DMA writes                         control commands
   rit_wr_* mft_wr_*   wb_wr_*              gu_job_*       gemm_cmd_*
      |        |          |                    |               |
  +---v--------v----------|--------------------v----+          |
  | Gathering Unit        |                         |          |
  |  rit_buffer (2 x 128 entries, 2 read ports)     |          |
  |        | rows                                   |          |
  |  address_generation --addr/weight/flags-->      |          |
  |  mvoxel_feature_table (32 banks = mft_bank,     |          |
  |        2 x 512 points, 2 read ports)            |          |
  |        | 2 x 32 channels                        |          |
  |  reducer x 64 (2 ports x 32 channels)           |          |
  |        |                                        |          |
  |  feature_fifo x 2 -> round-robin -> out         |          |
  +--------------------------|----------------------+          |
                             v  (lower priority)               |
   +------------------------------------------+     +----------v-------+
   | global_feature_buffer 2 x 768 KB         |<----| gemm_controller  |
   | 1 write port, sequencer read, host read  |---->|  LOAD/FEED/DRAIN |
   +------------------------------------------+     +--+-----------+---+
          host_rd_*                                    |           |
                             weight_buffer 96 KB ----> systolic_array 24x24
                                                           |
                                                       vector_unit (24 lanes,
                                                       pass / ReLU / exp_unit)
```

`potamoi_npu` is the top. `potamoi_pkg` holds the shared sizes, the job and
command structs and the vector-unit opcode. The GPU, the control
processor, the DMA, the SoC bus and DRAM sit outside the NPU and are not
modelled. Their traffic enters through the top's plain ports.

## The Ray Index Table

The RIT tells the GU which MVoxel points each ray sample needs. It is double
buffered, 6 KB per half: 128 entries of 384 bits, written by the DMA as six
64-bit words per entry (word address = entry x 6 + word). An entry has one of
two formats, chosen per job:

* **structured** (grid models): one entry per ray sample. Slot *v* = 0..7
  occupies bits `[48v+47 : 48v]` and holds `{VID[31:0], W[15:0]}`. VID is the
  global id of one of the sample's eight surrounding vertices. W is its
  trilinear weight, an unsigned Q1.15 number in which 0x8000 means 1.0.
* **unstructured** (Gaussian models): twelve 32-bit point ids (PIDs) per
  entry, PID *j* at bits `[32j+31 : 32j]`. That makes 1536 PIDs per half.

The GU turns an id into a table address by subtracting the job's `base`
(the id of the MVoxel's first point) and keeping 9 bits. Software therefore
numbers the points of an MVoxel consecutively.

## The MVoxel Feature Table and the channel-major layout

The MFT has 32 banks (`mft_bank`). Each bank is 16 bits wide, holds two
halves of 512 points, and has two read ports. Bank *b* holds channel *b* of
every point. The DMA writes one point (all 32 channels) per cycle into the
fill half. The address generator reads two points per cycle from the work
half, one per port. Each read returns the full 32-channel vector of its
point. Bank conflicts are impossible: every port reads the same row in all
banks, and every bank has a port for each reader.

One half is 32 KB, exactly one MVoxel of 8 x 8 x 8 points with 32 channels.
Wider features are cut into 32-channel **segments**. These are gathered one
after another with the same RIT (`keep_rit`, below) into separate rows of
the feature buffer. A layer then consumes the segments one command at a
time.

## Gathering: address generator, reducers, FIFOs

A job (`gu_job_t`) names the format, the number of samples or PIDs, the id
base, the destination half and first row of the feature buffer, and
`keep_rit`.

**Structured mode.** Port 0 takes samples 0, 2, 4 ... and port 1 takes samples
1, 3, 5 ... For eight cycles each port issues one vertex of its sample per
cycle: MFT address, weight, `first` on vertex 0 and `last` on vertex 7.
A pair of samples therefore takes 8 cycles. The RIT row of the next pair is
read one cycle ahead, so pairs follow without a gap. A job spends one extra
priming cycle at its start.

**Unstructured mode.** Each cycle the two ports take PIDs 2k and 2k+1, with
`skip` set. The reducers then pass the feature through unchanged.

**Reducers.** There are 2 x 32 of them, one per port and channel. Reducer
(m, b) multiplies channel b of the fetched point by the weight and adds the
product into a 32-bit accumulator. `first` restarts the sum. On `last` it
outputs `sat16(sum >>> 15)`, which is the Q3.12 feature again.

**Output path.** The pipeline has three stages: issue, MFT read, reduce. A
finished 32-channel vector enters its port's FIFO two cycles after its last
vertex was issued, tagged with the destination half and row (`out_base` +
sample index). A round-robin arbiter drains the two FIFOs into the feature
buffer's single write port.

**Stall rule.** Issue stops while either FIFO has fewer than three free
entries. Up to two results can still be in flight, so a FIFO can never
overflow. `stall_cycles` counts the cycles issue is held.

This matters for throughput. Structured jobs produce two vectors per
8 cycles, far below the write port's one per cycle. Unstructured jobs would
produce two per cycle, so they run at the write port's rate of one point per
cycle. The FIFOs fill and issue stalls about every other cycle.

**Double buffering.** When a job is accepted, the RIT and MFT swap their
fill and work halves, so the DMA can load the next MVoxel while this one is
processed. `rit_fill_buf` and `mft_fill_buf` show which half the DMA must
write. With `keep_rit` set only the MFT swaps. The next channel segment of
the same MVoxel then runs with the same index table. A new job is accepted
as soon as the address generator is idle, even while the previous results
still drain from the FIFOs.

Programming rule: load the fill halves completely before submitting the job
that uses them. After the job is accepted, the old work halves become the
new fill halves.

## Feature computation

**Global Feature Buffer.** 1.5 MB, double buffered: two halves of 48 blocks
of 32 KB. A row is 512 bits, i.e. 32 features of 16 bits, which gives
12,288 rows per half. It has one write port shared by the GU and the layer
write-back, one read port for the sequencer and one for the host. The
write-back has priority. The GU's output simply waits, and the top counts
those cycles in `gfb_conflict_cycles`.

**Weight buffer.** 96 KB: 2048 rows of 24 Q3.12 weights, one row per input
channel of a 24-column weight tile.

**Systolic array.** 24 x 24 output-stationary processing elements (`sa_pe`).
Each PE has two 16-bit operand registers and a 32-bit accumulator. Row *i*
of A (ray samples) enters delayed by *i* steps, and column *j* of B (output
neurons) by *j* steps. A values move right, B values move down, and PE
(i, j) meets channel *kk* of both at step kk + i + j. After
K + 46 steps every PE holds one dot product. Any row of 24 accumulators can
be read combinationally.

**Layer sequencer** (`gemm_controller`). A command (`gemm_cmd_t`) runs up
to 24 samples x K <= 32 input channels x 24 output neurons in three phases:

| phase | work | cycles |
|---|---|---|
| LOAD | read `nrows` rows of the feature buffer into a local tile | nrows + 1 |
| FEED | apply channel kk of all rows and weight row `w_base + kk`, then zeros until the wavefront leaves the array | K + 49 |
| DRAIN | per row: vector unit, then write the 24 results to `out_base + r` (channels 24..31 written as 0) | nrows x (1 + 1), or nrows x (25 + 1) for exp |

Counted from the accept edge until the sequencer is ready again, a command
takes `(nrows+1) + (K+49) + nrows*(L+1)` cycles, where L is the vector
latency. With `hold` set the DRAIN phase is skipped. With `accumulate` set
the array is not cleared on accept. A layer whose input has several
32-channel segments is therefore one command per segment: `hold` on all but
the last, `accumulate` on all but the first. Layers with more than 24
outputs take one command per 24-column weight tile.

**Vector unit.** 24 lanes. Each accumulator is shifted right arithmetically
by `shift`, saturated to 16 bits, and then passed through, clamped at zero
(ReLU), or fed to the lane's exponential unit. Pass and ReLU take one
cycle; exp takes 25.

## The exponential unit

`exp_unit` computes e^x by the additive convergence method. The argument is
written as a sum of the constants ln(1 + 2^-i), i = 0..19, each either used
or not. Two registers are involved: R_remain starts at x, R_accum at 1.0.
Two rotating shift registers hold the constants ln(1 + 2^-i) (SR_sub) and
the factors 1 + 2^-i (SR_mul).

In every cycle a comparator checks R_remain against the head of SR_sub. If
R_remain is not smaller, the constant is subtracted from R_remain and R_accum
is multiplied by the head of SR_mul. Both shift registers then rotate by one
entry. After 20 cycles R_accum is e^(x/8).

This converges for arguments in [-1, 1]. Larger arguments are handled by
scaling with a power of two. Every input is first divided by 8, an exact
shift, so the whole Q3.12 range [-8, 8) maps into [-1, 1). After the
iterations, R_accum is squared three times, one squaring per cycle, since
e^x = (e^(x/8))^8. The squares are clamped at 8.0, where the Q3.12 output
saturates anyway.

The constants sum to about 1.56, so a negative scaled argument cannot be
handled directly. It is replaced by x/8 + 2 ln 2, and R_accum is divided by
4 before the squarings. The scaling is fixed rather than chosen per
argument, so all 24 lanes finish together.

The unit runs 20 iterations, which keeps the results within 3 LSB of exact
after the squarings, over the whole input range. Internally 28 fraction
bits are carried. Latency is 24 cycles from start to done, or 25 through
the vector unit.
The ln constants are a 24-entry table written in the source
(round(ln(1 + 2^-i) x 2^28)). Beyond i = 23 they equal 2^(28-i).

## Number formats

| quantity | format |
|---|---|
| features in MFT and feature buffer, weights, vector-unit results | signed Q3.12, 16 bits |
| trilinear weights in the RIT | unsigned Q1.15, 16 bits |
| reducer and array accumulators | signed 32 bits |
| exp unit internal | unsigned, 28 fraction bits |

## Following the paper, and departing from it

Taken from the paper:

* the block structure (GU with RIT, MFT, address generation, reducers and
  FIFOs; systolic array; weight and feature buffers; vector unit with exp);
* the sizes: 6 KB RIT halves with 128 entries; 32 KB MFT halves with 32
  banks x 2 ports and 512 points; a 1.5 MB double-buffered feature buffer
  in 32 KB blocks; a 24 x 24 array; a 16-bit-input, 32-bit-accumulator PE;
* the channel-major layout;
* one read per vertex feature;
* the skip flag for point-based models;
* the shift-register structure of the exp unit.

The paper describes its PE as two 16-bit input registers feeding a MAC into
a 32-bit accumulator. It also says the array mimics a TPU, which would mean
weight-stationary operation. This RTL follows the PE description and builds
an output-stationary array.

This design's own choices:

* the RIT entry formats and the VID-minus-base addressing;
* the pairing of samples to the two ports;
* the priming cycle, the FIFO depth (8) and the stall threshold;
* the single write port of the feature buffer and its priority rule;
* swapping both buffers on job accept;
* `keep_rit`;
* the whole layer sequencer with its `hold` and `accumulate` flags;
* the requantisation shift;
* the number formats;
* 20 exp iterations, the fixed scaling by 8 and the negative-argument
  reduction.

The paper gives no control interface for the NPU. The job and command
structs are therefore a minimal choice, not a reconstruction.

Not built:

* the GPU, which runs ray indexing, RIT construction, warping, sorting and
  spherical-harmonics-to-colour;
* the control processor, the DMA, the bus and DRAM;
* the software run-time that predicts poses and schedules frames;
* the vendor SRAM macros (the buffers are plain arrays that a memory
  compiler would replace).

## Simulating

Every testbench is a single top module that prints
`TB_RESULT checks=<n> failures=<n>` and finishes. Each one has a watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/potamoi_pkg.sv tb/tb_potamoi_npu.sv --top-module tb_potamoi_npu
./obj_dir/Vtb_potamoi_npu
```

Replace the name with any other `tb_*` file. Variables are not reset by the
simulator, and every testbench initialises what it reads.

| testbench | what it checks |
|---|---|
| `tb_exp_unit` | e^x over [-1, 1] and the whole range [-8, 8) against `$exp`, within 3 LSB, saturation; latency 24 cycles |
| `tb_vector_unit` | shift, saturation, ReLU, exp per lane; latencies 1 and 25 |
| `tb_systolic_array` | random matrices for K = 1, 7, 24, 32; results complete exactly at K + 46 steps, not earlier |
| `tb_weight_buffer`, `tb_global_feature_buffer`, `tb_rit_buffer`, `tb_mvoxel_feature_table` | random writes and reads against a model, both halves, all ports, one-cycle read latency |
| `tb_feature_fifo` | ordering, full/empty, counts under random push/pop |
| `tb_reducer` | weighted sums and saturation against a model, skip mode |
| `tb_address_generation` | every issued address, weight and flag in both modes; 8 cycles per structured pair plus one priming cycle; random stalls |
| `tb_gathering_unit` | trilinear and copy results for 128 samples and 1536 points against a model; buffer swaps; DMA overlapping processing; keep_rit; FIFO stall under a slow sink; job cycle counts |
| `tb_gemm_controller` | 42 layer tiles (random sizes, all three operations, 2- and 3-segment layers) against an integer model; exact cycle counts |
| `tb_potamoi_npu` | the whole NPU at full size (see below) |

`tb_potamoi_npu` uses the top with every parameter at its default. It runs
the following sequence:

1. Gather a structured MVoxel (128 samples, checked to take 8 cycles per
   sample pair) while the DMA loads an unstructured one.
2. Gather that unstructured MVoxel (1536 points) while ReLU, exp and pass
   layers run. Their write-backs collide with the GU on the write port, and
   the GU FIFOs stall.
3. Gather a second channel segment with the same index table.
4. Run a two-segment layer over the 64-channel result.

Every row written is then read back and compared against an independent
model. The testbench counts each mechanism (both gather modes, buffer swap,
DMA overlap, segment reuse, stall, port conflict, each vector operation, the
two-segment layer). It fails if any count is zero. It runs in well under a
minute.

## Limits and trust

* The RTL follows the paper's block diagram and sizes. Its cycle-level
  control is this design's own: the paper's performance numbers come from a
  simulator, not from this RTL.
* Unstructured gathering is limited to one point per cycle by the single
  feature-buffer write port. The paper does not say how wide that port is.
* An MVoxel may hold at most 512 points. A job may cover at most 128
  structured samples or 1536 points. Larger groups must be split by
  software.
* The exp unit takes Q3.12 inputs only. Results above 7.99976 saturate,
  and results below 2^-13 round to 0.
* Accumulators wrap at 32 bits. Saturation happens only on requantisation.
* Synthesis has been tried only with a generic flow. The buffers
  (about 1.7 MB in total) are behavioural arrays meant to be mapped to SRAM
  macros.
