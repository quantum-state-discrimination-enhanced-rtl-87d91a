# A streaming neural-network qubit state discriminator

Reading out a superconducting qubit produces, after demodulation, one
complex number per shot: a point (I, Q) in the IQ plane. Shots taken with
the qubit in |0> and in |1> form two overlapping clouds, and *state
discrimination* means deciding which cloud a new point belongs to. Doing it
quickly, in the control hardware rather than offline, is what makes
mid-circuit measurement and feedback possible.

This RTL implements the discriminator of *Quantum State Discrimination
Enhanced by FPGA-Based AI Engine Technology* (Butko, Marisov, Santiago,
Siddiqi). It has two parts:

* a small multilayer perceptron, 2 → 8 → 4 → 1, with ReLU after the two
  hidden layers. It maps (I, Q) to a score L3, and the sign of the score
  gives the state;
* the streaming pipeline around it. Memory-to-stream movers read the I and
  Q samples from off-chip memory and feed them to the network. A
  stream-to-memory mover writes one result per sample back.

In the paper, the network runs as a software kernel on one AI Engine core,
a vendor VLIW vector processor of the Versal device. The movers sit in
programmable logic. Here the whole pipeline, network included, is
synthesizable SystemVerilog. The network is a dataflow of three small
vector units, and each unit does what one vectorised layer step does on the
processor: it multiplies an input element by a weight vector and
accumulates. The section *Departures from the reference design* lists what
this changes.

```
 memory ──read port 0──► mm2s (I) ──stream──►┌───────────────────────────────┐
                                             │ nn_kernel                     │
                                             │  layer 1   layer 2   layer 3  │──stream──► s2mm ──write port──► memory
 memory ──read port 1──► mm2s (Q) ──stream──►│  2→8 ReLU  8→4 ReLU  4→1      │
                                             └───────────────────────────────┘
 host ──cfg port (weights)──► nn_kernel        host ──start/done──► movers
```

## The network and its arithmetic

For one sample x = (I, Q):

```
L1[k] = ReLU( B1[k] + I*W1[0][k] + Q*W1[1][k] )        k = 0..7
L2[k] = ReLU( B2[k] + sum_{j=0..7} L1[j]*W2[j][k] )    k = 0..3
L3    =       B3    + sum_{j=0..3} L2[j]*W3[j][0]
state = (L3 > 0)
```

The layer sizes and the placement of the activations are those of the
reference network. The paper gives no number format, so this
implementation picks one:

| quantity | format |
|---|---|
| I, Q samples | signed 16-bit, Q7.8 (256 = 1.0), low half of a 32-bit word |
| weights, biases | signed 16-bit, Q7.8 |
| products and sums | 48-bit accumulator, scale 2^16 |
| layer output | ReLU (hidden layers), then arithmetic shift right by 8 (truncation toward −∞), then saturation to [−32768, 32767] |

The bias is shifted left by 8 when it is loaded into the accumulator, so
that it has the scale of the products. For these layer sizes a 48-bit
accumulator cannot overflow. Layer 2 has the largest sum: 9 terms of at
most 2^30 each. `qsd_pkg.sv` holds all these constants (`DATA_W`, `FRAC`,
`ACC_W` and the layer sizes `N_IQ`, `N_H1`, `N_H2`, `N_SCORE`).

**Result word** (`qsd_pkg::result_word_t`): bits [15:0] hold L3 and bit
[16] holds the state. Bits [31:17] are zero. The zero threshold is this
design's choice: a trained network can fold any threshold into B3.

**Weight addressing.** Weights and biases live in registers inside the
layers. The host writes them one at a time through `cfg_we/cfg_addr/cfg_data`:

| `cfg_addr[7:6]` | layer | `cfg_addr[5:0]` |
|---|---|---|
| 0 | layer 1 (2 in, 8 out) | `i*8 + k` → W1[i][k] (0..15), `16 + k` → B1[k] |
| 1 | layer 2 (8 in, 4 out) | `i*4 + k` → W2[i][k] (0..31), `32 + k` → B2[k] |
| 2 | layer 3 (4 in, 1 out) | `i` → W3[i][0] (0..3), `4` → B3 |

That makes 65 values in all. The reference figure uses different index
orders for layer 1 (input first) and the later layers (output first). Here
every layer is stored input-first, as W[input][output]. Reset clears all
weights. A write takes effect at once, so load the weights before
streaming samples. Training is not part of the design: the weights come
from an offline fit.

## How a layer computes: the vector schedule

`dense_layer` is the unit everything else is built from. It holds N_OUT
accumulator lanes and has three states:

1. **accept** (`in_ready` high in IDLE). The cycle in which `in_valid` is
   seen registers the input vector and loads each lane with its bias.
2. **multiply-accumulate**, N_IN cycles. In cycle i, the input element x[i]
   is broadcast to all lanes, and lane k adds x[i]·W[i][k]. So one cycle is
   one "scalar times weight vector" step, the operation the paper's kernel
   issues on the AI Engine's vector unit.
3. **present**. `out_valid` is high, and `out_vec` is the ReLU'd,
   requantised accumulators. The vector is held until `out_ready`.

So an input accepted in cycle c produces its result in cycle c + N_IN + 1.
The layer holds one vector at a time. The three layers of `nn_kernel` are
chained with valid/ready, so they form a pipeline: layer 1 can take sample
n+1 while layer 2 still works on sample n.

**Kernel latency.** For a sample that finds the kernel empty, input
handshake to valid result is (2+1) + (8+1) + (4+1) = **17 cycles**. The
latency does not depend on the data. It depends only on the layer sizes
(`qsd_pkg::KERNEL_LATENCY`). Under continuous input, layer 1 takes the next
sample early and holds its result until layer 2 is free. Counted from the
input handshake, such a sample takes 23 cycles; what a waiting sample
sees is still fixed by the schedule, not by the data.

**Kernel throughput.** Layer 2 is the slowest unit, so the kernel accepts
at most one sample every 8 + 2 = **10 cycles**: one accept cycle, eight
multiply-accumulate cycles and one hand-over cycle. The other units are
idle part of the time. Wider lanes, or a second multiplier per lane, would
shorten layer 2. That is the first change to make for more throughput.

The two kernel input streams are joined in lock-step. A sample is taken
only when both the I word and the Q word are valid and layer 1 is idle.
If either stream runs ahead, it waits.

## The movers and the memory channels

The paper only names the movers: an MM2S (memory-mapped to stream) and an
S2MM (stream to memory-mapped) module between DDR and the kernel. Their
interfaces here are this design's own, and deliberately simple:

* **Memory ports** are single-beat, in the style of AXI4-Lite. A read has an
  address handshake (`arvalid/arready/araddr`) and a data handshake
  (`rvalid/rready/rdata`). A write has address and data handshakes
  (`aw*`, `w*`, in any order) and a response (`bvalid/bready`). There are
  no bursts, IDs or error codes. Addresses are byte addresses of 32-bit
  words.
* **mm2s** issues reads at consecutive word addresses. Data returning from
  memory goes into an 8-entry FIFO (`sync_fifo`), and the FIFO head drives
  the stream. A read is issued only if the FIFO has room for it, counting
  all reads still in flight. So `rready` is always high, and up to 8 reads
  can overlap the memory latency. With a read round trip of L cycles,
  mm2s sustains one word per cycle as long as L + 2 ≤ 8.
* **s2mm** registers each stream word and offers it on the write address
  and data channels. It takes the next word in the same cycle as both
  handshakes complete, so it sustains one word per cycle. `done` waits for
  the last write response, so the results are in memory when `done` rises.
* Both movers take `start` (a pulse), `base_addr` and `num_words` (up to
  65535). Each reports `busy`, and a sticky `done` that clears on the next
  start. A start while busy is ignored. The streams carry no TLAST: each
  side knows the length.

## Running an iteration (`qsd_top`)

`qsd_top` connects two mm2s (read port 0 for I, port 1 for Q), the kernel
and the s2mm. It brings out to ports everything a host processor and the
memory network would connect to. A host does the following:

1. **Initialisation**, once: write the 65 weights and biases over `cfg_*`.
2. **Per iteration**: store the I values as an array of 32-bit words at
   `i_base`, and the Q values at `q_base`. Set `out_base` and
   `num_samples`, then pulse `start`. All three movers start together.
   `busy` is high until the last result has been written. Then `done`
   rises, and result k sits at `out_base + 4*k`.

`state_valid`/`state_bit` show each decision as the writer takes it. Logic
in the fabric can use this tap to act on a measurement without reading
memory back. It is this design's addition, motivated by the paper's point
that results must get back to the programmable logic to continue a
mid-circuit measurement.

**End-to-end rate.** With a memory that keeps up, the pipeline is limited
by the kernel: 100 samples take 1017 cycles from start to done in
simulation. That is 10 cycles per sample plus the pipeline fill.

## Timing compared with the reference

The paper measures its software kernel at 81.6 ns per inference on an AI
Engine clocked at 1250 MHz, which is 102 processor cycles, with a constant
execution time. It compares this with the 54 ns of an earlier
programmable-logic implementation of the same network. This RTL takes 17
cycles for one inference. The following is general knowledge of such devices, not from the
paper: programmable logic typically closes timing at a few hundred MHz.
At 300 MHz, 17 cycles is about 57 ns; at 500 MHz it is 34 ns. The paper's
Initialization and Main phases (87.2 ns, and 216.8 ns and 145.6 ns per
iteration) are host software time. The host side is not part of this RTL,
so they have no counterpart here.

## Departures from the reference design

* **The kernel is hardware, not AI Engine software.** The AI Engine array,
  its cores, local memories and stream switches are vendor silicon and are
  not modelled. The network's arithmetic and the vector step are
  reproduced, but the processor that runs them in the paper is not.
* **Latency grows with layer width.** The paper expects its kernel latency
  to stay constant as the network grows, thanks to vector parallelism. In
  this RTL the latency depends on nothing but the schedule: 17 cycles for
  a sample that finds the kernel empty, and up to 23 under continuous
  input, the same for every dataset and iteration. It grows,
  however, with the number of inputs of each layer: one cycle per input
  element.
* **Number format, rounding, threshold, weight loading, stream and memory
  handshakes, and the FIFO depth** are not given in the paper. They are
  chosen here as described above.
* **Which stream is I and which is Q.** The paper's kernel has two input
  streams and one output stream, but does not say what each input carries.
  Here input 0 carries I and input 1 carries Q, each as its own array in
  memory.
* **One channel.** The paper aims at several qubits and mentions
  replicating the kernel. This design classifies one stream of samples per
  start; several qubits would need several instances, or interleaved
  buffers.
* **Not included:** the host software, the on-chip network, DDR, and the
  surrounding control system (control core, filters, error decoder,
  converters). Qutrit/qudit discrimination is future work in the paper and
  is not built.

## Files

| file | contents |
|---|---|
| `rtl/qsd_pkg.sv` | sizes, number format, result word, requantisation function |
| `rtl/dense_layer.sv` | one layer: N_OUT-lane vector multiply-accumulate, ReLU, weight registers |
| `rtl/nn_kernel.sv` | I/Q join and the three chained layers; result word |
| `rtl/sync_fifo.sv` | small FIFO used by mm2s |
| `rtl/mm2s.sv` | memory-to-stream mover |
| `rtl/s2mm.sv` | stream-to-memory mover |
| `rtl/qsd_top.sv` | the whole pipeline |
| `tb/qsd_ref_pkg.sv` | reference model of the network (64-bit integers), random and hand-set weights |
| `tb/mem_model.sv` | behavioural memory with random latency and back-pressure (simulation only) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_qsd_iterations` for the initialisation-and-two-iterations run |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. From the
directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/qsd_pkg.sv tb/qsd_ref_pkg.sv tb/tb_qsd_top.sv --top-module tb_qsd_top
./obj_dir/Vtb_qsd_top
```

Replace `tb_qsd_top` with `tb_dense_layer`, `tb_nn_kernel`, `tb_mm2s` or
`tb_s2mm` or `tb_qsd_iterations` to run the others. (`-Wno-fatal` keeps the width warnings of
the testbenches' check helpers from stopping the build; they are still
printed.) The testbenches use `$urandom` only, with no
constraint solver, and run in well under a second.

What they check:

* **tb_dense_layer.** The default layer (2→8, ReLU) and a linear 4→1 layer
  are tested against a 64-bit reference, with small and with full-range
  weights. Latency must be exactly N_IN + 1. Results must hold under
  back-pressure. ReLU clipping and saturation must both occur.
* **tb_nn_kernel.** Random weights are used. The exact 17-cycle latency is
  checked on isolated samples. The I and Q streams get independent random
  gaps, and the output gets random back-pressure; every result word is
  compared in order. Full-rate streaming must produce exactly 10 cycles
  between results.
* **tb_mm2s / tb_s2mm.** Transfers of length 0, 1 and longer run against
  the behavioural memory with random latency and ready stalls. The tests
  check data and addresses, that nothing is read or written past the end,
  and the busy/done behaviour, and include a rate check with an ideal
  memory.
* **tb_qsd_iterations.** The measured run of the reference design: one
  initialisation, then two iterations, first with 1 sample each and then
  with 64 samples each, against a fixed-delay memory. Every sample's
  kernel latency is recorded. The first sample of each iteration must
  take exactly 17 cycles, none may take more than 23, and both iterations
  must show the same latency sequence and the same start-to-done time.
  With one sample, an iteration takes 25 cycles from start to done; with
  64 samples it takes 655.
* **tb_qsd_top.** A full run at the design's only size. The host load
  uses a hand-set network that computes L3 = I. The first iteration uses
  samples drawn from two clusters at I = ±1.0 with a spread of about 0.25,
  the two-state readout picture. All 400 land on their cluster's side. The
  second iteration reloads random weights and uses random samples, and a
  third checks the rate. A fourth keeps reads fast but makes writes slow,
  so results back up from the writer into the kernel. Every result word in memory and every state on
  the tap must match the reference model. The test counts the following
  mechanisms, and each must occur: read and write stalls, kernel output
  back-pressure, a wait at the I/Q join, ReLU clipping, both states, a
  weight reload, and a start ignored while busy.

Concurrent assertions in the RTL check the handshake rules: a valid word
or address is held until it is taken, the FIFO never overflows, and no
write response arrives unasked. They are active under `--assert`.

## Changing it

* **Network size.** Change `N_H1`, `N_H2` (and `N_IQ`, `N_SCORE`) in
  `qsd_pkg`. `CFG_IDX_W` must cover N_IN·N_OUT + N_OUT of the largest
  layer. The result word uses output neuron 0. For more than two states
  (qutrits), add output neurons and replace the sign test with an argmax.
  Update `qsd_ref_pkg` to match.
* **Precision.** Change `DATA_W`, `FRAC` and `ACC_W`; the saturation bounds
  follow `DATA_W`. The testbench reference model assumes 16-bit Q7.8 and
  must be changed with them.
* **Throughput.** Give `dense_layer` more than one multiplier per lane, so
  that it consumes several input elements per cycle, or let it accept a
  new vector in the same cycle as its result leaves.
