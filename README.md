# Real-time extended-depth-of-field reconstruction on an FPGA

A camera whose aperture carries a phase mask blurs the image differently in
each colour channel, depending on depth. Sharp detail survives in at least one
channel over a much larger depth range than a clear aperture gives. A
learned sparse-coding network recovers an all-in-focus colour image from the
raw Bayer mosaic.

The network is an unrolled, trained ISTA (iterative shrinkage and
thresholding) solver. It works on 8×8 raw patches:

* an **I** layer projects the 64 Bayer samples onto a 192-atom dictionary;
* **T−2 M layers** each do one shrink-and-update step;
* an **F** layer multiplies the sparse code by the output dictionary. This
  gives 128 values per patch: 64 luma and 32 + 32 chroma (4:2:2).

The patches overlap. Each output pixel is the average of every patch that
covers it.

This RTL implements the whole streaming system around that network. The
pieces are:

* raw frames arriving over HDMI;
* double-buffered frames in external DRAM;
* a patch reader;
* a pipeline of identical, host-configurable calculator stages;
* gamma conversion;
* average pooling back into raster order;
* a second set of DRAM frame buffers;
* an HDMI output with video timing.

Everything runs in one clock domain. The default clock is 125 MHz.

```
HDMI in ─► write_agent_in ─┐                        ┌─► read_agent_out ─► HDMI out
                           │   mem_arbiter (4:1)    │
         patch_reader ◄────┼──────── DRAM ──────────┼──── write_agent_out
              │            └────────────────────────┘            ▲
              ▼                                                  │
   calc_pipeline: I ─► M ─► M ─► F ─► out_format ─► patch_pool ──┘
                                      (gamma LUT)   (average + reorder)
            ctrl_regs: registers, buffer sequencing, host write port
```

## The calculator stage (`calc_stage`)

Every network layer is the same circuit with different contents:

```
z_j   = shrink(b_j, θ_j)        shrink(x,θ) = sign(x)·max(|x|−θ, 0)
d_j   = z_j − c_j               c_j from the incoming stream (c_sel=1) or from a stored vector
acc_i = Σ_j A[i][j] · d_j        MAX_OUT parallel 48-bit MACCs
out_i = sat16((acc_i >>> shift) + (b_add ? b_i : 0))
```

The three layer types are settings of this one circuit:

| layer | A    | θ      | c                          | b_add | n_in → n_out |
|-------|------|--------|----------------------------|-------|--------------|
| I     | Qᵀ   | 0      | 0 (stored)                 | 0     | 64 → 192     |
| M     | S    | learnt | previous z (streamed)      | 1     | 192 → 192    |
| F     | D    | learnt | 0 (stored)                 | 0     | 192 → 128    |

The M layer needs both b_t and z_t = shrink(b_t) of the previous layer, so
that it can form z_{t+1} − z_t. Each stage therefore forwards, with every
output element, the shrunk input element at the same index. A `vec_elem_t`
carries `{b, z, last}`.

The first M layer has z_1 = 0. It uses c_sel = 0 with a stored c of zero.

Data are 16-bit two's complement. The products accumulate in 48 bits. After
the accumulator, a per-stage arithmetic right shift stands in for the
fixed-point scale factors, and the result saturates back to 16 bits.

**Schedule.** The input vector arrives one element per clock.

1. In the clock an element is accepted, θ_j and c_j are read and d_j is formed.
2. In the next clock, row j of A (all MAX_OUT coefficients) is read from the
   stage's own RAM.
3. In the clock after that, all MAX_OUT accumulators add `A[i][j]·d_j`.

n_in + 2 clocks after the first element, the accumulators move into an output
buffer. That buffer is streamed out one element per clock while the next
vector is already accumulating. A stage therefore sustains one vector every
max(n_in + 2, n_out) clocks:

* 192 clocks for I;
* 194 clocks for M and F.

A full-size four-stage pipeline has these timings:

* first output element after 648 clocks;
* steady-state interval of 194 clocks per patch.

The testbench checks both numbers.

`calc_pipeline` chains N_STAGES stages (default 4 = T). A stage exposes
`in_ready` low only while its finished vector waits for the output buffer.
Back-pressure from the pooling logic or DRAM therefore ripples back to the
patch reader without losing data.

## Host address map

One 32-bit write port loads everything. Address bits [31:28] select the
target.

| [31:28] | target | offset |
|---|---|---|
| 0 | `ctrl_regs` | [3:0] register number |
| k+1 | calculator stage k | [17:16]: 0 = A (j = [15:8], i = [7:0]), 1 = θ_j ([7:0]), 2 = c_j, 3 = stage config |
| 15 | gamma table | [15:0] entry, data [7:0] |

The stage config word has these fields:

| bits | field |
|---|---|
| [7:0] | n_in |
| [15:8] | n_out |
| [21:16] | shift |
| [24] | c_sel |
| [25] | b_add |

The control registers are:

| # | register | reset value |
|---|---|---|
| 0 | width | 1920 |
| 1 | height | 1080 |
| 2 | stride_log2 (1..3 → stride 2, 4, 8) | 3 |
| 3 | h_total | 2200 |
| 4 | v_total | 1125 |
| 5 | input buffer 0 base address | |
| 6 | input buffer 1 base address | |
| 7 | output buffer 0 base address | |
| 8 | output buffer 1 base address | |
| 9 | bit 0: enable | |

Three status counters come out as top-level ports:

* `frames_in`;
* `frames_processed`;
* `frames_dropped`.

## Data path and formats

**Input.** A raw sample is 16 bits:

* bits 15:8 arrive on the HDMI Y bus;
* bits 7:0 arrive on the C bus.

`write_agent_in` starts a frame on the rising edge of vsync. It writes each
pixel with `de` high to base + n through a 32-entry FIFO. A pixel that finds
the FIFO full is lost and counted in `in_overflows`.

**Patch reader.** `patch_reader` visits patch corners (px·S, py·S) in raster
order, with stride S = 2, 4 or 8. Stride 8 means no overlap. Within a patch it
reads the 64 samples row by row from base + y·W + x.

A read is issued only while the response FIFO has space for every outstanding
read. A stalled pipeline therefore simply stops the reader.

**Output formatting.** `out_format` maps the F-layer output as follows:

* Elements 0–63 are luma. Each goes through a 65536 × 8 gamma table indexed
  by the 16-bit value.
* Elements 64–95 are Cb and 96–127 are Cr, each on the 8×4 grid of pixel
  pairs. They are clamped to [−128, 127] and offset by 128.

**Average pooling.** `patch_pool` keeps, for each pixel, a sum of the Y
values, a sum of the chroma values and a count of the patches that covered it.
These live in an 8-row circular strip buffer of MAX_W columns.

Once a row of patches is complete, image rows py·S … py·S+S−1 can receive no
more contributions, so they are emitted. For the last patch row, all 8 rows
are emitted. Each value is computed as sum × round(65536/count) >> 16 with
rounding, and the entries are cleared. After reset the strip buffer is swept clear, one column per clock (MAX_W clocks), before the first patch is accepted. The output is 16-bit {Y, C} 4:2:2
pixels in raster order:

* Cb sits on even columns;
* Cr sits on odd columns.

**Output buffer.** `write_agent_out` writes the pooled frame to an output
buffer.

**Display.** `read_agent_out` drives the HDMI output. It runs a raster of
h_total × v_total clocks with the active area first. The default CEA-861
1080p porches and syncs are HFP 88, HS 44, VFP 4 and VS 5.

A 64-word prefetch FIFO feeds the display. During vertical blanking the agent
switches to the newest completed buffer and refills the FIFO. An active pixel
that finds the FIFO empty is sent as black (Y = 0, C = 0x80) and counted in
`out_underruns`.

## Frame sequencing and DRAM sharing

There are two input buffers and two output buffers.

**Input side.** The HDMI writer always gets the input buffer that the patch
reader is not reading. A completed input frame becomes the *newest*. Whenever
the patch reader is idle, it starts on the newest frame. If the writer
overwrites the newest frame before it was read, that frame is dropped and
counted.

**Output side.** The output buffers alternate on each completed output frame.
The display picks up the last completed one at its next vertical blanking.

**DRAM sharing.** `mem_arbiter` shares one DRAM request port round-robin among
the four agents. The controller returns reads in request order. The arbiter
therefore queues the master number of every granted read in a 64-entry tag
FIFO and steers each response to the master at the head.

## Interfaces of `edof_top`

* `cfg_we`, `cfg_addr[31:0]`, `cfg_wdata[31:0]`: the host write port.
* `hdmi_in_de`, `hdmi_in_vsync`, `hdmi_in_y[7:0]`, `hdmi_in_c[7:0]`: the HDMI
  receiver's pixel bus, synchronous to `clk`.
* `hdmi_out_de`, `hdmi_out_hsync`, `hdmi_out_vsync`, `hdmi_out_y`,
  `hdmi_out_c`: the transmitter's pixel bus. Syncs are active high.
* `dram_req_valid/ready` with a `mem_req_t {we, addr[23:0], wdata[15:0]}`, and
  `dram_resp_valid` with `dram_resp_data[15:0]`: a word-addressed memory
  controller port with in-order read data.
* Status counters.

The DRAM controller, the HDMI PHYs and the host software are outside this
RTL.

## Throughput and sizing

**Compute.** At 1920×1080 with stride 8 (no overlap) there are 240 × 135 =
32,400 patches. At 194 clocks each, a frame takes 6.29 M clocks, which is
about 19.9 frames/s at 125 MHz.

The paper reports about 16 frames/s. It attributes the gap to about 100
clocks of overhead per layer. This design has 2 clocks of overhead per layer,
because each stage's output is double-buffered.

**DRAM bandwidth.** With a 16-bit word per pixel, each processed frame needs
about 4 × 2.07 M DRAM transfers: input write, patch read, output write and
display read. The patch read needs more when patches overlap (64/S² reads per
pixel). A one-word-per-clock DRAM port therefore limits the system before the
calculator does. A real board would use a wider memory word. The system
testbench slows the HDMI input to one pixel per four clocks for this reason.

**Storage.** The coefficient memories hold N_STAGES × 192 × 192 16-bit words,
which is 2.36 Mbit for four stages. The gamma table is 512 kbit. The pooling
strip buffer is 8 × 1920 entries of three sums and a count.

**Deeper networks.** A T = 8 network, used for the best-quality results,
needs N_STAGES = 8.

## Where this RTL departs from the source description

* **Sign of the I-layer matrix.** The layer description sets A = −Qᵀ, but the
  ISTA recursion starts from b₁ = Qᵀx. The stage formula b_in + A(shrink(b) − c)
  yields the M and F layers as described. The host loads A = Qᵀ for I.
* **Number of stages.** One physical stage is built per layer (N_STAGES = T,
  default 4), instead of a few stages reused in time.
* **Overhead per layer.** As described under throughput, this design has 2
  clocks of overhead per layer, where the paper reports about 100.
* **Choices made here.** The following were not specified and are choices of
  this design:
  * the scale factors, done as a per-stage shift;
  * the element order of the 128 outputs;
  * the chroma clamp;
  * the DRAM word format;
  * the arbiter;
  * buffer sequencing;
  * the video timing;
  * the register map.
* **Stride restrictions.** The stride is limited to 2, 4 or 8. (W − 8) and
  (H − 8) must be multiples of it.

## Simulation

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv` that
prints `TB_RESULT checks=N failures=M`. `tb/dram_model.sv` is a behavioural
DRAM with random stalls and a fixed read latency. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/edof_pkg.sv tb/tb_edof_top.sv --top tb_edof_top
./obj_dir/Vtb_edof_top
```

`tb_edof_top` runs the whole system with every parameter at its default. It
uses three 32×16 frames, stride 2 and a simple network whose result can be
predicted exactly. It checks:

* both output buffers;
* the HDMI output;
* that DRAM contention, calculator back-pressure, overlap averaging, a frame
  drop, buffer swaps and new-frame display each occur.

`tb_calc_pipeline` runs the full-size 64→192→192→192→128 network against a
bit-exact reference. It also checks the 648-clock latency and the 194-clock
interval.
