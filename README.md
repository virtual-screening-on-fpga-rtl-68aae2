# A streaming FPGA kernel for virtual molecule screening

Drug-discovery groups train Bayesian matrix-factorisation models that link
chemical compounds to protein targets. They then use these models to screen
millions of candidate molecules. Each molecule is scored in two matrix-vector
products. Its fingerprint (a feature vector) times the *beta link matrix*
gives a short *latent vector*. The latent vector times the *target
representation* gives one activity prediction per protein target. Gibbs
sampling yields many models, one per sample, and the final prediction is the
average over them.

This RTL puts that computation into hardware:

    fingerprints --> [ x beta ] --> latent --> [ x target repr. ] --> mean over samples --> predictions
    (from DRAM)      on-chip model             on-chip model                                (to DRAM)

The model is loaded into on-chip RAM once, before any compound arrives.
Fingerprints then stream in from external memory and predictions stream back
out, both as long 512-bit AXI bursts. All arithmetic is fixed point: 16-bit
features and predictions, 8-bit model entries. The same kernel is instantiated
once per die region of the FPGA, and each copy has its own memory bank.

The design follows the paper "Virtual Screening on FPGA: Performance and
Energy versus Effort" (Vander Aa et al., imec). That paper describes an HLS
implementation at the level of its prediction flow and its optimisations. It
gives no RTL, no sizes and no number formats beyond "16 and 8 bit". Everything
below that level of detail is this design's own choice and is marked as such.

## Sizes

| parameter      | default | meaning                                           |
|----------------|---------|---------------------------------------------------|
| `NUM_KERNELS`  | 3       | kernel copies, one per die region                  |
| `NUM_FEATURES` | 1024    | fingerprint length (a multiple of 32)             |
| `NUM_LATENT`   | 32      | latent dimensions                                 |
| `NUM_SAMPLES`  | 16      | Gibbs samples (a power of two)                    |
| `NUM_TARGETS`  | 32      | protein targets                                   |
| `NUM_PAR`      | 2       | compounds computed side by side in a kernel       |
| `LAT_SHIFT`    | 7       | right shift that scales a latent sum to 16 bits   |
| `PRED_SHIFT`   | 7       | right shift, after the sample average, for a prediction |
| `BURST_LEN`    | 64      | AXI burst length in 64-byte beats (4 KB)          |
| `FIFO_DEPTH`   | 128     | beats buffered in each AXI streamer               |

Only the 512-bit bus, the 16/8-bit fixed point, several kernels and the idea
of processing several compounds at once come from the paper. The paper names no model dimensions. The defaults above
are plausible values for a screening model, chosen so that both pipeline
stages take the same time (see *Throughput*). The kernel count is three
because the FPGA card the paper uses (an Alveo U200) has three die regions.

## Number formats

All values are two's-complement integers. Their binary point is implied by the
two shift parameters.

* Feature: 16 bits. Model entries (beta and target representation): 8 bits.
* Latent: the exact sum of `NUM_FEATURES` products (35 bits at defaults) is
  shifted right arithmetically by `LAT_SHIFT` and saturated to 16 bits.
* Prediction: per sample, a `NUM_LATENT`-term dot product is formed exactly.
  These are summed exactly over the samples. The sum is shifted right by
  `log2(NUM_SAMPLES) + PRED_SHIFT` and saturated to 16 bits. Both shifts round
  toward minus infinity.

Put another way, with `sat16` clamping to [-32768, 32767]:

    latent[s][l] = sat16( (sum_f x[f] * beta[s][f][l]) >>> LAT_SHIFT )
    pred[t]      = sat16( (sum_s sum_l latent[s][l] * T[s][l][t]) >>> (log2 S + PRED_SHIFT) )

The paper says which numbers were narrowed ("input and output streams, and
the model") and to which widths ("16bit and 8bit"). It does not say which
width goes where. Giving 16 bits to the streams and 8 to the model is this
design's reading. The intermediate latent width and the scaling are also this
design's choices.

## Inside one kernel (`vms_kernel`)

    AXI read --> axi_read_streamer --> latent_engine --> stream_fifo --> predict_engine --> axi_write_streamer --> AXI write
                                            |        (4 latents)             |
                                        model_ram                        model_ram
                                        (beta)                           (target repr.)

The five stages run at the same time and are joined only by valid/ready
streams. This is the hardware counterpart of an HLS dataflow region with
streams between its functions. Each stage stalls on its own when its consumer
is full.

### Compound groups

The model is the large operand. It is read from on-chip RAM once per group of
`NUM_PAR` compounds, and every word read is multiplied by all compounds of
the group in the same cycle. This is loop blocking over compounds: MAC count
grows with `NUM_PAR`, while RAM bandwidth stays the same. Compounds stay
contiguous in memory. A group is simply `NUM_PAR` consecutive compounds, and
`num_compounds` must be a multiple of `NUM_PAR`.

### First stage: `latent_engine`

Groups are computed **one at a time, sample by sample**. For sample `s`, the
engine walks the `NB = NUM_FEATURES/32` beat positions of the fingerprints. In
each cycle it reads one beta word: all 32 features of the beat position times
all `NUM_LATENT` latent dimensions. It then performs `NUM_PAR` x 32 x
`NUM_LATENT` multiply-accumulates. This is 2048 MACs per cycle at defaults:
the feature loop is unrolled by the bus width, and the latent and compound
loops fully. After the last beat the group's latent vectors for that sample
are scaled and pushed out as one word. The engine then starts the next sample
on the same fingerprints.

The fingerprints must therefore be read `NUM_SAMPLES` times, so a group is
held in a **two-bank buffer**. While one bank is being computed on, the next
group loads into the other. A bank is freed after its last sample. So the
input stream stalls only when both banks are full. This is normal: the input
is many times faster than the compute.

The beta RAM has one cycle of read latency. Stage 0 issues the read and picks
the feature beat. Stage 1 forms the products and accumulates. If the output
register holds a latent that nobody takes, the whole engine freezes for that
cycle, the RAM read included.

### Second stage: `predict_engine`

For each latent word (one sample of one group), the engine walks the targets,
one per cycle. It reads the target word of (sample, target) and forms
`NUM_PAR` dot products of `NUM_LATENT` terms each. It adds each product to
that compound's running sum for the target, held in a small accumulator array
per target. The sample-0 product overwrites the sum instead
of adding to it, so nothing needs clearing between compounds. At the last
sample the sum is averaged, scaled and saturated. The result is packed into 512-bit beats,
32 predictions per beat. After the last target, the group's beats are copied
to an output buffer and sent compound by compound. So every compound produces
`ceil(NUM_TARGETS/32)` consecutive beats, and unused slots are zero. The
engine stalls only if a group finishes before the previous group's beats have
left. The next latent vector
is taken in the same cycle as the last target of the current one is issued,
so the engine never idles between samples.

### Model memories: `model_ram`

The two model memories are instances of one RAM. It has a 512-bit load port,
which writes one slice of a word per cycle, and a full-width read port with
one cycle of latency. Its layout:

* **beta**: word `s*NB + b` holds `beta[s][32*b + k][l]` in byte
  `k*NUM_LATENT + l` (a 1024-byte word at defaults, loaded in 16 slices).
* **target representation**: word `s*NUM_TARGETS + t` holds `T[s][l][t]` in
  byte `l` (32 bytes, loaded from the low bits of the load word).

Keeping the whole model on chip, and never re-reading it from DRAM, is what
the paper does. How it gets there is not described. Here a simple load port is
used, and in `vms_top` it is broadcast to every kernel.

### Memory streaming: `axi_read_streamer`, `axi_write_streamer`

Both are AXI4 masters with 512-bit data and INCR bursts of 64-byte beats.

* The **reader** keeps several bursts in flight. Before each read request it
  reserves FIFO space for the whole burst, so `rready` is tied high and the
  memory never waits for the kernel.
* The **writer** waits until a whole burst is in its FIFO before sending the
  address. It then sends the data beats back to back. The next address may go
  out before the previous write response has come back.

The last burst of a call may be short. Base addresses must be aligned to
`BURST_LEN*64` bytes so that no burst crosses a 4 KB boundary. Assertions
check that reserved space really suffices, that a burst's data never has a
gap and that a pending address stays stable.

### Calling a kernel

Pulse `start` for one cycle with `num_compounds`, `in_addr` and `out_addr`.
`busy` stays high until `done` pulses. `done` comes when the last prediction
burst has been acknowledged by memory. At `in_addr` a compound takes `NB`
consecutive beats. Feature `f` of the compound sits in bits `(f mod 32)*16`
of beat `f/32`. At `out_addr` each compound takes `ceil(NUM_TARGETS/32)`
beats. The model stays loaded across calls.

## Several kernels (`vms_top`)

`vms_top` places `NUM_KERNELS` independent kernels side by side. All ports are
arrays indexed by kernel, and each kernel has its own AXI master. A host
splits a screen across the kernels and runs them concurrently. Each kernel
holds its own copy of the model.

## Throughput

In steady state the first stage needs `NUM_SAMPLES*NUM_FEATURES/32` cycles per
group of `NUM_PAR` compounds and the second `NUM_SAMPLES*NUM_TARGETS`. At
defaults both are 512. The slower stage sets the rate. A call of `n`
compounds takes about `n/2*512 + 130` cycles, where the extra cycles are the
first group's read and the pipeline fill and drain. Three kernels make 6336
MACs per cycle, or about 0.63 T MAC/s at the paper's 100 MHz clock. For scale,
the paper's figure for the card's peak is 684 G operations/s, which is 6840
per cycle.

`NUM_PAR` trades area for speed directly: MACs scale with it, and so does the
rate. Also balance `NUM_FEATURES/32` against `NUM_TARGETS`, since the stage
that is faster idles. The paper also names processing several Gibbs samples
at once as a tuning knob. That is not parameterised here: samples are always
taken one after the other.

## How far to trust it, and where it departs from the paper

Every module has a self-checking testbench. Each testbench compares results
with values computed independently in `tb/vms_ref_pkg.sv`, from the formulas
above. The full design is simulated at its default size, with three kernels and two
compounds per group, against memories that stall at random. Every prediction is checked, and so is
the call length of each kernel.

The paper gives the computation, not the circuit. These points are this
design's own:

* All sizes, the Q-format scaling, saturation and floor rounding.
* The loop order (sample outer, feature beat inner) and the degree of
  unrolling.
* The averaging over Gibbs samples. The paper says only that the work grows
  with the number of samples. Averaging is the usual way Bayesian
  matrix-factorisation predictions are combined. The paper also mentions that
  such models can give a confidence estimate (a spread over samples). This
  kernel does not compute one.
* The model load port. The paper only says the model is stored on chip
  beforehand.
* The burst policies and FIFO depths.
* The control interface. It is made of plain ports where a real platform
  would use memory-mapped registers.

* `NUM_PAR = 2`. The paper names compound parallelism but gives no number.
* Parallelism across protein targets. The paper mentions it, but here the
  targets are walked one per cycle. The second stage is kept as fast as the
  first by its small target count, not by unrolling the target loop.

The design leaves out the parts the paper does not design: the host program
and its runtime, the DRAM controllers and the PCIe shell. The AXI ports and the
control signals of `vms_top` are where these connect.

Some output bits are constant by design: `arsize`, `arburst`, `awsize`,
`awburst`, `wstrb`, `rready` and `bready`.

## Files and simulation

`rtl/`:

* `vms_pkg.sv`: widths, AXI constants, `sat16`.
* `stream_fifo.sv`
* `model_ram.sv`
* `latent_engine.sv`
* `predict_engine.sv`
* `axi_read_streamer.sv`
* `axi_write_streamer.sv`
* `vms_kernel.sv`
* `vms_top.sv`

`tb/`:

* One `tb_<module>.sv` per module.
* `axi_mem_model.sv`: a behavioural AXI4 memory with random stalls.
* `vms_ref_pkg.sv`: hash-generated test data and the reference model.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. To build and run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/vms_pkg.sv tb/vms_ref_pkg.sv rtl/*.sv tb/axi_mem_model.sv \
        tb/tb_vms_top.sv --top tb_vms_top -Mdir obj_top
    ./obj_top/Vtb_vms_top

`tb_vms_top` runs the whole design at its default size. The first build takes
about a minute and the run under a second. The block testbenches use reduced
parameters and build in seconds. Change `NUM_SAMPLES` only to powers of two.
Change `NUM_FEATURES` only to multiples of 32, and call a kernel only with
multiples of `NUM_PAR` compounds.
