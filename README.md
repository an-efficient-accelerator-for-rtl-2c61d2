# PointNet feature-extraction core for PointNetLK registration

PointNetLK aligns two 3-D point clouds, a template and a source, without
matching individual points. It computes a global feature vector for each
cloud with a small PointNet network. It then solves a Lucas–Kanade style
linear system for the rigid motion that makes the two features equal. It
moves the source by that motion and repeats. Almost all of the run time goes
into the PointNet forward passes: one per iteration for the source, and seven
at the start for the template and its Jacobian. That is the part built in
hardware here. The pseudo-inverse, the exponential map and the point
transforms stay in software on the host CPU.

The core in this repository computes

    phi(P) = max over p in P of psi(p),      psi = MLP5 ∘ MLP4 ∘ MLP3 ∘ MLP2 ∘ MLP1

for a cloud `P` of any size. Here `psi(p)` is the 1024-D local feature of one
point `p = (x, y, z)`, and the maximum is taken element by element. Each MLP
layer is a fully connected layer followed by batch normalization and ReLU.
The layer widths are 3 → 64 → 64 → 64 → 128 → 1024.

The key property is that the work for each point is independent until the
final maximum. The core therefore streams points through once. It keeps only
the running maximum `phi` and the vectors that are in flight between layers.
On-chip memory is constant in the number of points, and run time is linear in
it.

## Block diagram

```
 AXI4-Lite ──► axil_regs ──start/mode/npts──► stream_ctrl ◄── AXI4-Stream in (params | points)
                                                │   │  └────► AXI4-Stream out (ack | phi)
                                  parameter bus │   │ x,y,z
            ┌───────────────────────────────────┘   ▼
            │    [ch] FC1(3,64)   B=1  ─[ch]─ BN1(64)   B=1 ─[ch]─►
            ├──► FC2(64,64)  B=16 ─[ch]─ BN2(64)   B=1 ─[ch]─►
            ├──► FC3(64,64)  B=16 ─[ch]─ BN3(64)   B=1 ─[ch]─►
            ├──► FC4(64,128) B=32 ─[ch]─ BN4(128)  B=1 ─[ch]─►
            └──► FC5(128,1024) B=128 ─[ch]─ BN5(1024) B=2 ─[ch]─► MaxPool(1024) B=2 ──► phi
```

`[ch]` is a ping-pong vector channel (`vec_buf`). `B` is the unrolling factor
of each module: how many elements it handles per clock cycle.

## The pipeline across points

The eleven compute modules (five FC, five BN-ReLU, one MaxPool) each process
one point's vector at a time. Each runs as soon as two things hold:

- its input channel holds a complete vector;
- its output channel has a free bank.

Each channel has two banks. A producer can therefore write the vector of
point n+1 while its consumer still reads point n. Once the pipeline is full,
FC5 works on one point while FC4 works on the next, BN3 on the one after, and
so on. The rate is set by the slowest module. When no module is waiting, one
point's vector is passed on in each channel per that period.

Per-vector latency of each module, in cycles at the default sizes, measured
as start to commit of the output vector:

| module        | B   | work per vector        | cycles here | paper (100 MHz) |
|---------------|-----|------------------------|-------------|-----------------|
| FC(3,64)      | 1   | 64 rows × 3 chunks     | 195         | 577             |
| FC(64,64)     | 16  | 64 rows × 4 chunks     | 263         | 513             |
| FC(64,128)    | 32  | 128 rows × 2 chunks    | 264         | 769             |
| FC(128,1024)  | 128 | 1024 rows × 1 chunk    | 1034        | 1028            |
| BN-ReLU(64)   | 1   | 64 groups              | 65          | 68              |
| BN-ReLU(128)  | 1   | 128 groups             | 129         | 132             |
| BN-ReLU(1024) | 2   | 512 groups             | 513         | 516             |
| MaxPool(1024) | 2   | 512 groups             | 513         | 514             |

The paper column converts the published latencies to cycles at 100 MHz. For
FC(128,1024), BN-ReLU and MaxPool the published numbers equal "work + a few
cycles", which is what this RTL does. The three smaller FC layers are
reported 2–3× slower than their work, presumably because of the original
tool's schedule. This RTL issues one chunk per cycle for every FC module. The
bottleneck is the same either way: FC5 at about 1030 cycles per point. In
simulation, consecutive points leave MaxPool every 1035 cycles (the FC5
latency plus one hand-over cycle). At 100 MHz this is about 10.4 µs per
point, or 10.6 ms for a 1024-point cloud.

## Inside the FC module

`fc_layer` computes `y = W x + b` for a K-input, L-output layer. The K loop is
unrolled by B: K is cut into `ceil(K/B)` chunks of B inputs. Every cycle one
(row, chunk) pair is issued, and the pipeline runs as follows:

1. **Read.** A B-lane word of the weight memory is read (synchronous read,
   as in a block RAM), together with the B matching inputs from the input
   channel. One memory word holds the B weights of one chunk. This is the
   array partitioning that gives B weight reads per cycle.
2. **Multiply.** B multipliers form full-precision 2W-bit products.
3. **Sum.** A pipelined adder tree, `adder_tree`, with one register per
   level, sums the B products in `log2 B` cycles.
4. **Accumulate.** An accumulator adds the chunk sums of a row. After the
   last chunk it adds the bias, shifts back to the word format and
   saturates. It then writes `y_i` to the output channel.

The latency of one vector is `L*ceil(K/B) + log2(B) + 3` cycles. The row
index, a first-chunk flag and a last-chunk flag travel through the pipeline
with the data.

## Numbers

All activations and parameters are two's-complement fixed point. Each word
has `W = 2n` bits: a sign bit, an n-bit integer part and an (n−1)-bit
fraction.

- **Default build:** `W = 32`, `FRAC = 15`.
- **Reduced builds:** `W` = 16, 20, 24 or 28 with `FRAC = W/2 − 1`. Set them
  with the `W` and `FRAC` parameters of `pointnet_core`.

Each datapath follows the same rule:

- Products are exact and sums are exact.
- A result is returned to the word format by an arithmetic right shift of
  FRAC bits, which truncates towards minus infinity.
- The shifted result is saturated to the W-bit range.

Batch normalization with ReLU is computed as

    y_i = max(0, ((x_i − mu_i) · s_i) >>> FRAC + beta_i),   s_i = gamma_i / sqrt(sigma_i² + eps)

The host folds the square root and the division into `s_i` before loading
the parameters. The core stores three words per channel: `mu`, `s` and
`beta`.

## Using the core

### Control registers (AXI4-Lite, 32-bit)

| offset | name | meaning |
|--------|------|---------|
| 0x00   | CTRL | write bit 0 = 1 to start a run (ignored while busy). Read: bit 0 busy, bit 1 done (cleared by reading CTRL), bit 2 idle |
| 0x10   | MODE | 0 = weight initialization, 1 = feature extraction |
| 0x18   | NPTS | number of points in a feature-extraction run |

### Weight initialization (MODE = 0)

1. Set MODE to 0 and write CTRL.start.
2. Stream the parameters on the AXI4-Stream input, one word per beat, in
   this order, for layers 1 to 5 in turn:
   - FC weights `W[L][K]`, row-major: output index outer, input index inner;
   - FC bias `b[L]`;
   - BN `mu[L]`;
   - BN `s[L]`;
   - BN `beta[L]`.
3. The core answers with a single output beat: the nonzero word 1, with
   TLAST set. CTRL.done is then set.

At the default sizes the stream has 153 024 words. TLAST on the input is not
used.

### Feature extraction (MODE = 1)

1. Set NPTS and MODE, then write CTRL.start.
2. `phi` is cleared to zero. Zero is a correct start value because every
   local feature comes out of a ReLU and is never negative.
3. Send NPTS points as three beats each: x, y, z. TREADY drops while the
   first channel is full, which holds the stream back.
4. After the last point has passed MaxPool, the core sends the 1024 words
   of `phi` with TLAST on the last. In builds narrower than 32 bits each
   word is sign-extended. CTRL.done is then set.

In a full system, a memory-to-stream DMA engine drives both streams, and the
host programs the registers. Neither is part of this RTL.

## Files

| file | content |
|------|---------|
| `rtl/pointnet_pkg.sv`  | widths, layer sizes, unrolling factors, parameter-bus struct, saturation helper |
| `rtl/pointnet_core.sv` | top level: the pipeline, the channels, the controller and the registers |
| `rtl/stream_ctrl.sv`   | mode sequencing, parameter decoding, point feeding, feature read-out |
| `rtl/axil_regs.sv`     | AXI4-Lite register file |
| `rtl/fc_layer.sv`      | FC(K, L) with B-way unrolling |
| `rtl/adder_tree.sv`    | pipelined adder tree used by `fc_layer` |
| `rtl/bn_relu.sv`       | BN-ReLU(K) with B-way unrolling |
| `rtl/maxpool.sv`       | MaxPool(K) and the `phi` storage |
| `rtl/vec_buf.sv`       | ping-pong vector channel |
| `tb/pn_ref_pkg.sv`     | plain-loop reference arithmetic used by the testbenches |
| `tb/pointnet_core_probe.sv` | observation points bound into the core by the end-to-end testbenches |
| `tb/*_tb.sv`           | one self-checking testbench per module, plus the two end-to-end ones below |

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5, run from the repository
root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/pointnet_pkg.sv tb/pn_ref_pkg.sv tb/pointnet_core_tb.sv \
        --top-module pointnet_core_tb -o sim && ./obj_dir/sim

Replace `pointnet_core_tb` with the name of any other testbench.

- **`pointnet_core_tb`** runs the complete core at its default 32-bit sizes.
  It loads all 153 024 random parameters, extracts the feature of a 6-point
  cloud, then extracts that of a 2-point cloud. Both features are compared
  with the reference model. The test also checks that each of these
  happened:
  - both modes ran;
  - the acknowledgement came back;
  - FC4 and FC5 were busy at the same time on different points;
  - the input stream was held back by a full pipeline;
  - the output was stalled by back-pressure;
  - the ReLU clamped values;
  - the steady-state point interval stayed within the FC5 latency.

  The run takes about 350 000 cycles and a few seconds of wall time.
- **`pointnet_core_q20_tb`** runs the same sequence on the 20-bit build.
- **`pointnet_core_n1024_tb`** loads the parameters and extracts the
  feature of one 1024-point cloud at the default sizes, the cloud size used
  for registration. It checks all 1024 words of `phi` and the point interval.
  It reports 1 063 224 cycles, which is 10.63 ms at 100 MHz. It takes about
  1.4 million cycles and roughly half a minute of wall time.

The three end-to-end testbenches observe a few internal signals through
`pointnet_core_probe`, a small module bound into the core with `bind`.

## How far it can be trusted

- Every module is checked against an independent reference in its own
  testbench, including cycle counts.
- Both end-to-end runs match the reference bit for bit.
- Random parameter values are used, not trained weights. Accuracy against
  the registration results of the original work has not been measured.
- Lint and elaboration are clean under Verilator and the Yosys slang front
  end. No FPGA implementation was run, so timing closure at 100 MHz and the
  resource figures are not confirmed.

The largest arrays are the FC5 weight memory (1024 words × 128 lanes × 32
bits = 4 Mbit) and the channels in front of and behind FC5. The
combinational read ports of the channels are written as plain arrays. An FPGA
tool maps them to distributed RAM or registers. Where a block RAM is wanted,
a registered read would have to be added.

## Where this design departs from the original description, or fills gaps

- **Channels.** The original work describes the modules as a dataflow
  pipeline. It does not say how vectors are passed. This design uses
  explicit two-bank channels with a valid/ready-style handshake.
- **FC schedule.** All FC modules use a fully pipelined chunk loop. As a
  result FC1–FC4 are faster than the published latencies (see the table
  above). The point rate is unchanged because FC5 limits it.
- **BN parameters.** The batch-norm parameters are stored pre-folded
  (`mu`, `s`, `beta`) rather than as mean, variance, weight and bias.
- **Published total.** The published total for a 1024-point feature, 8.58
  ms, is below 1024 × the published FC5 latency (10.5 ms). This RTL takes
  about 10.6 ms, in line with the per-module figure.
- **Unspecified details.** These are choices of this design, not taken from
  the original work:
  - the register map;
  - the stream layout and parameter order;
  - the acknowledgement value;
  - rounding (truncation) and overflow (saturation);
  - the asynchronous active-low reset.
