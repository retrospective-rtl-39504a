# DA-VINCI / NEURIC: one CORDIC datapath for every activation function

Neural-network accelerators need more than multiply-accumulate. Every layer
ends in a non-linear activation function (AF), and modern networks mix
several of them: ReLU and Sigmoid in classic CNNs, Tanh in LSTMs, GELU and
SoftMax in transformers, Swish and SELU elsewhere. Building one dedicated
block per function wastes area, because only one of them is busy at a time.

This design computes all seven functions on **one hyperbolic CORDIC and one
linear CORDIC**, selected at run time by a 3-bit `sel_af` code. The key
observation:

- Almost every smooth AF is a ratio of exponentials.
- A hyperbolic CORDIC produces `cosh z` and `sinh z` with shifts and adds
  only, and `e^z = cosh z + sinh z`.
- A linear CORDIC in vectoring mode divides.

Sigmoid, Tanh, Swish, GELU and SoftMax therefore all become "exponential,
then a few adds, then one division". Two multipliers, one adder, a FIFO and
a ReLU register cover the rest. The activation core is called **DA-VINCI**.

A linear CORDIC in rotation mode is also a multiply-accumulate unit. Putting
one in front of a DA-VINCI core gives a complete neuron built from CORDIC
hardware, the **NEURIC**. Sixty-four NEURICs, two banked memories and a small
controller form a **layer-multiplexed vector engine**. It runs the fully
connected layers of a network one after another on the same lanes, writing
each layer's outputs back as the next layer's inputs.

The RTL is synthesizable SystemVerilog-2017. Everything is parameterised, and
the defaults are the sizes described for the original design: 64 lanes,
1 KB memory banks and 8/16-bit precision.

---

## 1. Number formats

| Where | Format | Range | Notes |
|---|---|---|---|
| External, 16-bit mode (`prec16 = 1`) | Q3.12 in 16 bits | ±8, LSB 2^-12 | |
| External, 8-bit mode (`prec16 = 0`) | Q3.4 in the low byte of the 16-bit word | ±8, LSB 1/16 | Upper byte ignored on input, sign-extended on output |
| Inside the CORDICs and multipliers | Q7.16 in 24 bits (`CW`, `CFRAC` in `davinci_pkg`) | | |

Conversions are in `davinci_pkg` (`ext_to_int`, `int_to_ext`):

- Inputs are shifted up exactly.
- Outputs are rounded to nearest, then saturated.

The precision bit changes two things: the output format and the number of
CORDIC iterations. Fewer iterations make each operation shorter (Section 3).

---

## 2. The CORDIC engines

Both engines run one pseudo-rotation per clock:

    x(i+1) = x(i) - m·d·y(i)·2^-i
    y(i+1) = y(i) + d·x(i)·2^-i
    z(i+1) = z(i) - d·e(i)

### Hyperbolic rotation — `hyp_cordic`

- Mode: m = -1, e(i) = atanh(2^-i), d = sign(z).
- Start values: x = 1/K_h and y = 0, so after the last step x = cosh z0 and
  y = sinh z0 with no scaling multiply.
- Shift sequence: 1, 2, 3, 4, 4, 5, …, 13, 13, 14. The repeated steps 4 and
  13 are needed for the hyperbolic iteration to converge.
- Steps: 16 in 16-bit mode, the first 7 in 8-bit mode. 1/K_h differs
  slightly between the two schedules, and both values are in the package.
- The atanh table is a function of the shift amount, written as constants
  in `davinci_pkg::atanh_q16`. Each entry is round(atanh(2^-i)·2^16).
- Convergence range: **|z| ≤ 1.1182**. No range extension is built, so the
  caller must keep the argument inside it (Section 7).

### Linear CORDIC — `lin_cordic`

- Mode: m = 0, e(i) = 2^-i.
- The `mode` input selects one of two uses:

| Mode | Used for | Start | Indices | Result | Operand range |
|---|---|---|---|---|---|
| LV (vectoring) | the divider of the AF core | x = q, y = p, z = 0 | i = 0 … N-1 | z = p/q | \|p/q\| < 2 |
| LR (rotation) | the NEURIC MAC | x, y = accumulator, z = weight | i = -2 … N-3 | y = acc + x·w | \|w\| ≤ 7.968 |

- N is 15 in 16-bit mode and 7 in 8-bit mode.
- LR starting at i = -2 (steps of 4, 2, 1, ½, …) gives the ±7.968 range.
- The last step leaves a residual below 2^-12 (16-bit) or 2^-4 (8-bit) in z.
  The product error is therefore at most |x| times that residual.

### Timing of both engines

- `start` samples the operands.
- The N steps take the next N clock edges.
- `done` pulses in cycle N+1 after the start cycle.
- The results hold until the next `start`.

| Engine | 16-bit mode | 8-bit mode |
|---|---|---|
| Hyperbolic | 17 cycles | 8 cycles |
| Linear | 16 cycles | 8 cycles |

---

## 3. DA-VINCI activation core — `da_vinci_af`

### Datapath

- **mul1** scales the input: β·x for Swish, t·x for GELU.
- **Hyperbolic CORDIC** produces cosh and sinh.
- **Two adders** form e^z = cosh + sinh, and either 1 + e^z or the running
  SoftMax sum.
- **Linear CORDIC** (LV) divides p by q.
- **HOAA adder** forms e^x − 1 for SELU.
- **mul2** forms the final product.
- **ReLU**: a sign mux into a register.
- **SoftMax FIFO** holds the exponentials of one vector.

### Per-function schedule

Nh and Nl are the hyperbolic and linear step counts: 16/15 in 16-bit mode,
7/7 in 8-bit mode.

| sel_af | Function | How it is computed | p / q of the divider | mul2 | Latency (cycles) |
|---|---|---|---|---|---|
| 0 | ReLU | sign mux → buffer register | – | – | 1 |
| 1 | Sigmoid | e^x / (1 + e^x) | e^x / 1+e^x | – | Nh+Nl+3 |
| 2 | Tanh | sinh x / cosh x | sinh / cosh | – | Nh+Nl+3 |
| 3 | Swish | x · σ(βx) | e^u / 1+e^u, u = βx | x · quotient | Nh+Nl+3 |
| 4 | GELU | (x/2) · e^u / cosh u = (x/2)(1 + tanh u), u = t·x | e^u / cosh u | (x>>1) · quotient | Nh+Nl+3 |
| 5 | SELU | x ≥ 0: λx; x < 0: λα(e^x − 1) | – | x·λ or HOAA·λα | 2 or Nh+2 |
| 6 | SoftMax | e^xi / Σ e^xj | FIFO head / sum | – | see below |
| 7 | reserved | treated as ReLU | | | 1 |

Notes on the table:

- **Latency** counts from the clock edge that accepts the input to the cycle
  in which `out_valid` is high. Nh+Nl+3 is 33 cycles in 16-bit mode and 17 in
  8-bit mode.
- **Constants** t, β, λ and λα are inputs, so software can change them.
  - Defaults: t = 0.851, β = 1, λ = 1.0507, λα = 1.7581.
  - With t = 0.851, GELU is the sigmoid-form approximation x·σ(1.702x). Over
    [-1, 1] it stays within 0.007 of the exact erf-based GELU, and within
    about 0.02 anywhere.
- **GELU quotient**: 1 + tanh u reaches 2. This is why the linear CORDIC's
  vectoring range is ±2 rather than ±1.

### SoftMax

SoftMax is the one function that needs the whole vector before it can emit
anything:

1. Elements arrive one per call, with `in_last` on the final one.
2. For each element, the core computes e^xi, pushes it into the FIFO and adds
   it to the running sum. A new element is accepted every Nh+2 cycles.
3. After the last element, the core pops each FIFO entry and divides it by
   the sum.
   - The first result appears Nh+Nl+4 cycles after the last element is
     accepted.
   - The rest follow every Nl+2 cycles.
   - `out_last` marks the final result.
4. The FIFO holds `SFM_DEPTH` = 16 entries. An element that fills the FIFO
   ends the vector as if it carried `in_last`, and `sfm_trunc` is raised.

### Interface

- `in_valid` / `in_ready` / `in_data` / `in_last` form a valid/ready input.
- `out_valid` is a one-cycle strobe carrying `out_data` (and `out_last`).
- The core is iterative: it takes one input at a time and is ready again once
  the result is out. During a SoftMax vector it is also ready between
  elements.
- `sel_af` and `prec16` are sampled with each accepted input.

---

## 4. NEURIC neuron — `neuric`

A NEURIC is a CORDIC MAC (a `lin_cordic` in LR mode with a Q7.16
accumulator) followed by a DA-VINCI core.

| Signal | Effect |
|---|---|
| `clear` | Zeroes the accumulator. |
| `mac_valid` with `x_in` and `w_in` | Adds x·w. |
| `act_valid` | Sends the rounded accumulator through the activation core. With `act_src_ext` set, it sends `ext_data` instead; the engine uses this to replay SoftMax vectors. |
| `acc_out` | The accumulator in the external format. |

- A MAC can be issued every N+2 cycles: 17 in 16-bit mode, 9 in 8-bit mode.
- The MAC has its own linear CORDIC, separate from the activation core's.

---

## 5. Vector engine — `vector_engine`

### Structure

- **Lanes**: `NUM_NEURIC` = 64. Each lane is a NEURIC with an Input
  Register and a Weight Register.
- **ifmap memory**: 64 banks of 512 × 16-bit words (1 KB each), addressed as
  one flat space of 32,768 words.
  - It holds the network input and every layer's output.
  - One word at a time is broadcast to all lanes.
- **kernel memory**: 64 banks of 512 words. Bank j feeds lane j.
- **MMU** (`mmu`): gives the host the memories while idle and the controller
  while busy. A host write during a run is dropped, and the `host_drop`
  status bit records it.
- **Configuration and status registers** (`cfg_status_regs`): hold
  precision, AF constants and up to `MAX_LAYERS` = 4 layer descriptors.
  They ignore writes while busy.
- **Data-flow controller** (`dataflow_ctrl`): runs the layers.
- **Batch-norm and max-pooling** are left to the host. Every result also
  leaves on the ofmap stream for that purpose.

### Register map

Word addresses are on `cfg_addr`. Values are in the external Q format where
they are numbers.

| Addr | Name | Content |
|---|---|---|
| 0x00 | CTRL | bit 0: prec16 (reset 1) |
| 0x01 | NUM_LAYERS | layers per run, 1…4 |
| 0x02 | T | GELU t |
| 0x03 | BETA | Swish β |
| 0x04 | LAMBDA | SELU λ |
| 0x05 | LAMBDA_ALPHA | SELU λα |
| 0x08 | STATUS | {sfm_len_err, host_drop, busy, done} (read only) |
| 0x09 | CYCLES | clock cycles of the last run (read only) |
| 0x10 + 8·l + f | layer l | f = 0 n_in, 1 n_out, 2 in_base, 3 out_base, 4 k_base, 5 sel_af |

### One run

A rising edge on `exec_en` starts a run. For each layer, the controller does
the following:

1. Split the `n_out` neurons into passes of 64. Neuron p·64 + j runs on
   lane j in pass p; lanes beyond the last neuron stay idle.
2. For each input i in turn:
   - read ifmap word `in_base + i` and, from every kernel bank, word
     `k_base + p·n_in + i`;
   - load the lane registers;
   - issue one MAC in every active lane;
   - wait until all lanes are ready again.
3. Start all activations, then collect the 64 results.
4. Write result j to ifmap address `out_base + p·64 + j` and put it on
   `of_valid` / `of_addr` / `of_data` / `of_layer`.

The next layer reads these results by setting its `in_base` to this layer's
`out_base`.

**SoftMax layers** need every neuron's value before any output:

1. Each pass writes its raw accumulators back instead of activations.
2. After the last pass, the controller streams them through lane 0's
   activation core as one SoftMax vector.
3. Each probability overwrites its raw value and is streamed out.

A SoftMax layer longer than 16 is processed for its first 16 neurons only,
and `sfm_len_err` is set. `exec_finish` rises when the last layer is done
and stays high until the next start.

### Weight layout

Weight i of neuron n sits in bank n mod 64 at address
`k_base + (n div 64)·n_in + i`. A layer therefore fits if
⌈n_out/64⌉·n_in ≤ 512 − k_base, and all layers of a run must fit together.

### Throughput

In 16-bit mode, a layer of n_in inputs costs about 17·n_in cycles of MACs
per pass, plus about 40 cycles of activation and 64 cycles of write-back.

---

## 6. Files

| File | Content |
|---|---|
| `rtl/davinci_pkg.sv` | formats, AF codes, iteration counts, constants, atanh table, conversions |
| `rtl/ve_pkg.sv` | layer descriptor, status word, register map |
| `rtl/hyp_cordic.sv`, `rtl/lin_cordic.sv` | CORDIC engines |
| `rtl/fxp_mul.sv`, `rtl/hoaa_adder.sv`, `rtl/sfm_fifo.sv`, `rtl/relu_buffer.sv` | AF core parts |
| `rtl/da_vinci_af.sv` | activation core |
| `rtl/neuric.sv` | neuron |
| `rtl/sram_bank.sv`, `rtl/mmu.sv` | memories |
| `rtl/cfg_status_regs.sv`, `rtl/dataflow_ctrl.sv` | control |
| `rtl/vector_engine.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_vector_engine_full.sv` | the whole engine at its default size |
| `tb/tb_af_error_sweep.sv` | accuracy sweep of the activation core over [-1, 1] |

### Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl \
        rtl/davinci_pkg.sv rtl/ve_pkg.sv tb/tb_da_vinci_af.sv \
        --top-module tb_da_vinci_af
    ./obj_dir/Vtb_da_vinci_af

Replace the testbench name for the others.

### Accuracy

`tb_af_error_sweep` drives 400 uniformly distributed random inputs in
[-1, 1] through each function at each precision, plus 40 random SoftMax
vectors of 2 to 16 elements. It compares every output with a
double-precision reference.

| Function | 16-bit mean / max abs. error | 8-bit mean / max abs. error |
|---|---|---|
| ReLU | 0 / 0 | 0 / 0 |
| Sigmoid | 6.4e-5 / 1.7e-4 | 0.015 / 0.031 |
| Tanh | 6.9e-5 / 2.1e-4 | 0.012 / 0.029 |
| Swish | 6.5e-5 / 2.0e-4 | 0.015 / 0.035 |
| GELU | 6.3e-5 / 1.8e-4 | 0.019 / 0.033 |
| SELU | 7.9e-5 / 3.4e-4 | 0.016 / 0.037 |
| SoftMax | 6.2e-5 / 1.4e-4 | 0.017 / 0.032 |

- At 16 bits the error is about one LSB of Q3.12 (2.4e-4). It comes mostly
  from the truncated CORDIC schedules and the final rounding.
- At 8 bits it is within about half an LSB of Q3.4 (0.031) plus the shorter
  iterations.

### What the testbenches check

- **CORDIC engines**: against real arithmetic, including exact cycle counts.
- **AF core**: every function at both precisions against real-valued
  references, and every latency above.
  - Tolerance is 4·10^-3 at 16 bits and 0.1 at 8 bits.
  - SoftMax is tested with vectors of several lengths, including the
    truncation case.
- **Controller**: the integer lane models in `tb_dataflow_ctrl` isolate the
  sequencing.
- **`tb_vector_engine`** (4 lanes for speed) exercises and counts:
  multi-pass layers, partial passes, layer reuse, SoftMax layers, the
  SoftMax length error, dropped host writes and 8-bit layers.
- **`tb_vector_engine_full`** runs the default 64-lane engine with no
  parameter overrides: 16 inputs → 100 Sigmoid neurons → 10-way SoftMax.

---

## 7. Departures and limits

- **Linear vectoring range.** The divider converges for |p/q| < 2, not ±1.
  GELU's quotient 1 + tanh u needs values up to 2.
- **GELU** uses the sigmoid/tanh form (x/2)(1 + tanh(t·x)) with a
  programmable t. It has no cubic term, which saves a third multiply.
- **HOAA adder.** The approximate HOAA adder that the design builds on is not
  described in enough detail to reproduce. An exact saturating adder takes
  its place, so the area and power savings attributed to HOAA do not apply.
- **Input range.** There is no argument range reduction. Inputs to the
  exponential paths must keep the hyperbolic argument within ±1.118: x for
  Sigmoid/Tanh/SELU/SoftMax, βx for Swish, and 0.851x for GELU (so |x| ≤ 1.31).
  Outside that range, results are wrong rather than saturated.
- **SIMD.** The 8-bit mode shortens the iterations and narrows the I/O. It
  does not pack two 8-bit operands into one 16-bit lane.
- **Execution strategy.** Only the iterative version is built. There is no
  pipelined version with one result per clock.
- **SoftMax length.** A SoftMax vector is at most 16 elements, the FIFO
  depth. The engine runs a SoftMax layer through a single lane.
- **Layer types.** The engine runs fully connected layers only:
  - convolutions must be unrolled by the host;
  - batch-norm and pooling are off chip;
  - at most four layers per run, with all weights in the 64 KB kernel
    memory.

  None of the large benchmark networks (VGG-16 or ResNet-50 on CIFAR-100,
  MobileViT on ImageNet) fit in one run.
- **Own choices.** These are not specified by the original design: the
  iteration counts, the register map, the handshakes, the memory layout,
  the layer schedule and all timing.
