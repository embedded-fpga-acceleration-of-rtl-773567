# A streaming BCPNN accelerator with online learning

This is synthesizable SystemVerilog for an FPGA accelerator of a Bayesian
Confidence Propagation Neural Network (BCPNN). The network is brain-like: it
is built from hypercolumns (HCUs), each holding a group of minicolumns (MCUs)
that compete through a soft winner-take-all. Learning is local and Hebbian.
Every synapse keeps a running estimate of how often its two units fire
together, and the weights and biases are logarithms of those estimates. So
learning is three pipelined streaming steps:

1. compute activities,
2. update the probability traces,
3. turn the traces into weights.

The accelerator can therefore learn online, one sample at a time, in the
same pass that classifies the sample.

The kernel `bcpnn_kernel` runs a three-layer network:

| layer  | organisation (defaults: MNIST model) | connections in |
|--------|--------------------------------------|----------------|
| input  | 784 HCUs (one per pixel) × 2 MCUs (x, 1−x) | — |
| hidden | 32 HCUs × 128 MCUs | sparse: each hidden HCU sees 64 active and 64 silent input HCUs, chosen by an index list |
| output | 1 HCU × 10 MCUs (classes) | dense from all 4096 hidden MCUs |

Every size is a parameter (`N_IN`, `HID_HCU`, `HID_MCU`, `NACT`, `NSIL`,
`OUT_MCU`). The model parameters live in DDR and are streamed through the
chip for every sample. Only activities, unit traces and the index list stay
on chip.

## The model computed

For a post-synaptic MCU j with pre-synaptic activities x_i:

- support: s_j = b_j + Σ_i w_ij x_i
- activity: y_j = exp(s_j) / Σ_{k in the same HCU} exp(s_k) (the soft winner-take-all)
- traces, learning rate α: p_i += α(x_i − p_i), p_j += α(y_j − p_j), p_ij += α(x_i y_j − p_ij)
- bias: b_j = ln p_j
- weight: w_ij = ln p_ij − ln p_i − ln p_j

Learning is unsupervised in the input→hidden projection. The target there is
the hidden activity the sample produced. Learning is supervised in the
hidden→output projection. The target there is the one-hot label, not the
output activity.

A learning run gives up to `cfg.nsamples` samples these steps, each sample in
turn: forward pass, unit traces, input→hidden traces and weights, then
hidden→output traces and weights. An inference run does only the forward
pass.

## Number format

Everything stored is 16-bit Q3.12 fixed point: activities, traces, weights
and biases. The range is [−8, 8) with a resolution of 1/4096. Supports are
accumulated in 32-bit Q19.12, which has headroom for sums of several
thousand full-scale products.
Products are `(a*b) >>> 12`. Stored results saturate to 16 bits.
`bcpnn_pkg` holds these helpers.

The two transcendental functions use cheap approximations:

- **exp** (only of arguments ≤ 0, after the maximum is subtracted) goes through base 2:
  - e^x = 2^(x·log2 e), split into an integer and a fraction f;
  - 2^f ≈ 1 + f(0.6565 + 0.3435 f);
  - a shift applies the integer part.
- **ln** finds the leading one:
  - log2(1+f) ≈ f(1.3465 − 0.3465 f);
  - the result is scaled by ln 2 and clipped to [−8, 8);
  - a zero trace therefore gives −8, the most negative weight.

Each weight is the sum of three clipped logarithms, clipped again.

## Memory layout

All data moves as 256-bit beats of sixteen Q3.12 lanes over AXI4 INCR bursts.
`cfg` carries the byte base address of each region, 32-byte aligned.

| region | contents, in beat order |
|--------|-------------------------|
| `in_base` | per sample: ceil(N_IN/16) beats of pixels, then one beat with the label in lane 0 |
| `idx_base` | HID_HCU × (NACT+NSIL) 16-bit input-HCU numbers; for each hidden HCU the active ones come first, then the silent ones |
| `wih_base` | for each hidden HCU h and group jg of 16 MCUs: 1 bias beat, then NACT × 2 weight beats (connection c, input MCU m) |
| `pih_base` | input→hidden joint traces, for each (h, jg): (NACT+NSIL) × 2 beats, active then silent; no bias beat |
| `who_base` | 1 bias beat (output MCUs in lanes 0..OUT_MCU−1), then one weight beat per hidden MCU |
| `pho_base` | one joint-trace beat per hidden MCU |
| `out_base` | one result beat per sample: lanes 0..OUT_MCU−1 are the output activities, lane 15 the predicted class |

Lanes past the end of an HCU (when the MCU count is not a multiple of 16)
are carried but masked: the softmax gives them activity 0 and they never win.

## Datapath and controller

```
            +-------------------+   +-----------+   +-------------+   +--------------+
DDR ==AR/R=>| axi_burst_reader  |-->|stream_fifo|-->| support_unit|-->| softmax_unit |--> on-chip activities
            +-------------------+   +-----------+   +-------------+   +--------------+
                                          |
                                          +--> trace_update --> bw_update --+--> axi_burst_writer (traces)  ==AW/W/B=> DDR
                                                                            +--> axi_burst_writer (weights, results) ==> DDR
```

There is one read master. The FIFO after it decouples DDR latency from the
datapath. One `support_unit` and one `softmax_unit` serve both projections,
in turn. The controller walks these phases:

1. **INIT**: when `cfg.learn` is set, unit traces are set to 1/(MCUs per HCU).
2. **IDX**: the index list is loaded into on-chip memory.
3. **IN**: one sample's pixels and label are loaded. Each pixel x becomes the MCU pair (x, 1−x).
4. **FWD**: the input→hidden weight stream goes through `support_unit`. For each weight beat, the controller picks the pre-synaptic activity by looking up the index list; this is the sparse gather. The softmax of each hidden HCU goes to on-chip memory. The hidden→output stream follows the same path.
5. **RES**: the result beat is written.
6. **UTR**: when learning, the on-chip unit traces are updated.
7. **LRN**: the trace stream is read, updated (`trace_update`), turned into new weights and biases (`bw_update`), and written back. The traces go through one writer and the weights through the other. Silent connections have traces but no weights. A bias beat is inserted before each group's weight beats.
8. **NEXT / DONE**: back to IN for the next sample, or raise `done`.

The fork to the two writers is a plain valid/ready fork. A beat leaves only
when both writers can take it.

### Throughput

- **Forward pass:**
  - One weight beat per clock (16 multiply-accumulates).
  - MNIST needs 33,024 + 4,097 weight beats.
  - An inference run of one MNIST sample took about 50,000 clocks in simulation, with a memory model that stalls at random.
- **Learning pass:**
  - Each trace beat is read once and written back once; the new weights leave in parallel on the second writer.
  - A learning run of one sample took about 160,000 clocks.
- **Softmax:**
  - Takes 3·B + 24 clocks per HCU of B beats.
  - This is shorter than the weight stream of a group, so it is not the bottleneck at MNIST sizes.
- **Bursts:**
  - Up to 16 beats, with several outstanding.
  - Split so that none crosses a 4 KiB boundary.

## Departures from the original kernel

The kernel described in the literature is written in high-level synthesis. It
computes in FP32 or FP16, with a mixed-precision variant that stores Q3.12.
It is organised as a dataflow region of concurrently running sub-kernels.
Here:

- **Arithmetic:** all arithmetic is fixed point, including accumulation. Accumulation is 32-bit integer where the original uses FP16.
- **Control:**
  - Phases run one after another under an FSM, with streaming inside each phase.
  - The sub-kernels do not run concurrently.
  - Plain `start/cfg/busy/done` ports replace the AXI-Lite control slave.
- **Memory interfaces:** there is one read master and two write masters instead of a separate AXI bundle per argument.
- **Parallelism:** the factor is 16 lanes for both inference and learning. The original full-learning kernel on the small device was limited to 4.
- **Structural plasticity:** the index list is used as given. Silent connections learn traces, but no rewiring between active and silent connections is done.
- **Dendrite activity:** the block named "dendrite activity" in the original block diagram has no description, so it is not built.
- **Learning rate:** α is a run-time input, not derived from a time constant.
- **Input coding and layouts:** the (x, 1−x) input coding, the memory layouts and the per-sample learning order are this design's choices.

## Verification

Each block has a self-checking testbench in `tb/` with random stimulus and a
watchdog. Each prints `TB_RESULT checks=N failures=M`.

- `tb_stream_fifo`: checks order, full/empty and the one-cycle latency.
- `tb_axi_burst_reader`, `tb_axi_burst_writer`:
  - check random commands against `axi_mem_model`, a behavioural DDR with random stalls;
  - check burst legality, WLAST, and that no burst crosses 4 KiB;
  - check the rate: 64 beats in at most 72 clocks without stalls.
- `tb_support_unit`: checks sums against integer arithmetic, and the rate of one beat per clock.
- `tb_softmax_unit`: checks activities within 0.01 of a real-valued softmax, masking of padding lanes, and the latency.
- `tb_trace_update`: checks bit-exactly against the integer rule.
- `tb_bw_update`: checks against real-valued logarithms.
- `tb_bcpnn_kernel`:
  - A small network: 20 pixels, 2×20 hidden, 3 active and 2 silent connections.
  - Three runs: inference, learning, inference with the learned parameters.
  - A bit-exact reference model in the testbench checks every result beat and every rewritten bias, weight and trace.
  - It also counts that each mechanism occurred: softmax and memory back-pressure, split bursts, silent-trace beats, bias beats, and learn and inference runs.
- `tb_bcpnn_kernel_full`: the same test at the default MNIST sizes with no parameter overrides. It finishes in seconds.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/bcpnn_pkg.sv tb/tb_bcpnn_kernel.sv --top-module tb_bcpnn_kernel
./obj_dir/Vtb_bcpnn_kernel
```

## Sizes of other models

The other models the kernel was evaluated on do not fit the default
parameters; the kernel must be rebuilt with theirs.

| model | N_IN | hidden | active / silent | outputs |
|-------|------|--------|-----------------|---------|
| Pneumonia X-ray | 4096 | 30 × 400 | 320 / 80 | 2 |
| Breast cancer | 16384 | 10 × 1000 | 676 / 156 | 2 |

Nothing in the RTL limits these sizes except on-chip memory. On-chip memory
grows with N_IN, HID_HCU·HID_MCU and HID_HCU·(NACT+NSIL). The beat counters
are 24 bits wide. These configurations have not been simulated.
