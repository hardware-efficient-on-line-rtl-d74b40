# On-line learning engine for binary-state networks

This is synthesizable SystemVerilog for an FPGA engine that trains a small fully connected
network of binary neurons one example at a time. The weights live in external DRAM. The
engine's main idea is **pipelined, truncated-error backpropagation**:

- Each pass pushes a new example forward through the network. It also pushes the errors of
  older examples backward, one layer per pass.
- A neuron's outgoing weights are therefore read from DRAM once. That one read serves both
  the forward contribution of the current example and the delayed weight update and error
  backpropagation of an earlier example.
- Below the top layer, errors are kept to the three values −1, 0 and +1 (truncated, or
  ternary). The backward pass then needs no multiplier: a weight is added, subtracted or
  skipped.

The reference configuration is a 784‑600‑600‑10 network trained on binarized handwritten
digits (MNIST). The hidden neurons are either bipolar (−1/+1) or unipolar (0/1). The weights
are signed fixed point with 16 or 8 bits. The design follows the architecture of Mostafa et
al., "Hardware-efficient on-line learning through pipelined truncated-error backpropagation
in binary-state networks". The paper describes that architecture only in prose and a block
diagram. Everything below the level of that description is this implementation's own, and
the section *Where this design makes its own choices* lists those choices.

## The parts

```
                 host register bus                      DRAM port (burst read, word write)
                        |                                          |
                +---------------+   config   +---------------------------------------+
                | monitor_setup |----------->|          central_controller           |
                |  registers,   |<-- events -|  pass sequencer, weight fetch, update |
                |  counters     |            +---------------------------------------+
                +---------------+                  | command bus       ^ responses
                        | probability              v                   |
                    +------+  dropout   +--------------+ ... +--------------+  +-------------+
                    | prng |----------->| neuron_core 0|     |neuron_core 14|  | output_core |
                    +------+            |  256 x 49 bit|     |  256 x 49 bit|  |  (core 15)  |
                                        +--------------+     +--------------+  +-------------+
```

| module | role |
|---|---|
| `bsn_pkg` | constants, the neuron word, the command and response structs, configuration structs |
| `neuron_core` | 256 neurons of an input or hidden layer in a 256 × 49-bit memory |
| `output_core` | the C = 10 output neurons: classification and hinge-loss errors |
| `prng` | one dropout bit per neuron update, with a programmable probability |
| `central_controller` | runs the passes and does all DRAM traffic and weight arithmetic |
| `monitor_setup` | host-writable configuration, and counters of DRAM traffic and accuracy |
| `bsn_top` | wires the blocks above together |

The top exposes two ports:

- **DRAM port.** This is the port a DDR2 memory controller would serve.
- **Host register bus.** On the FPGA board this sits behind a USB bridge.

The memory controller, the DRAM and the USB bridge are not part of the RTL.

## Layers, cores and the delay K

Neurons live in cores of 256. A core holds neurons of one layer only, but a layer may span
several cores. Lower layers must sit in lower-numbered cores, because every pass updates the
cores in ascending order. For the reference network:

| layer | neurons | cores | neuron type | K |
|---|---|---|---|---|
| input | 784 | 0–3 | unipolar, set from the pixels | 3 |
| hidden 1 | 600 | 4–6 | bipolar or unipolar | 2 |
| hidden 2 | 600 | 7–9 | bipolar or unipolar | 1 |
| output | 10 | 15 | integer accumulators | – |

**What K means.** K is the number of passes between the time a neuron's output is computed
and the time the error for that same example reaches it.

- In pass *n*, the output layer produces the error of example *n*.
- In pass *n*+1, hidden layer 2 combines that error with its own state from example *n*,
  which it saved one update ago, so K = 1.
- One pass later, that error has reached hidden layer 1, whose matching state is two updates
  old (K = 2).
- The input layer's matching state is three updates old (K = 3).

Each core gets its K from the setup registers. All neurons of one layer share a single K.

## The neuron word

Each neuron owns one 49-bit word in its core's memory:

```
 48 47 | 46 ............................. 32 | 31 ........................ 0
 error |           history (5 slots)        |        accumulator
 2 bit | s4   s3   s2   s1   s0, 3 bit each |   32-bit signed, shared by
       | s0 = newest, slot = {value,grad,drop}   forward and backward sums
```

**UPDATE.** When a neuron is updated, the core does the following:

1. It reads the accumulator.
2. It forms the binary output, `acc >= 0`.
3. It forms the *virtual gradient*. This is 1 when the accumulator lies in [−2¹⁶, 2¹⁶] with
   16-bit weights, or in [−2⁸, 2⁸] with 8-bit weights. It is the hardware form of a
   hard-tanh derivative.
4. It samples the dropout bit.
5. It shifts {value, gradient, dropout} into the history and clears the accumulator.

The response carries the new state and the state stored K updates earlier (slot K after the
shift).

**FINALIZE.** Later in the same pass, backpropagated errors from the layer above have been
summed into the cleared accumulator. FINALIZE then stores the new ternary error:

```
err = (grad_K && !drop_K) ? sign(acc) : 0
```

It also clears the accumulator again, ready for the next pass's forward sum. The history keeps
five slots, so K can be at most 4.

## One pass

`central_controller` runs one pass per example. Every step that touches a core is one command
on the shared bus. A command takes two cycles: it is accepted at a clock edge, and the
response arrives on the next one.

1. **Fetch the example.** The controller reads the example record, ⌈(n_input+4)/32⌉ words
   (25 for 784 pixels), in one burst.
2. **Load the label and inputs.** SET_LABEL sends the 4-bit label to the output core. Then
   one SET_ACC per input neuron sets its accumulator to +1 (pixel on) or −1 (pixel off).
3. **Update the cores.** For each used core in ascending order, and for each neuron in turn:
   - **UPDATE** returns `value, drop, delayed value, delayed drop, delayed gradient`. From
     these the controller decides two flags, `forward` and `backward`:

     ```
     forward  = !drop && (bipolar || value)
     backward = learning && passes_done >= K && !delayed_drop &&
                (bipolar || delayed_value || (delayed_gradient && layer is not the input))
     ```

     The second condition, `passes_done >= K`, keeps weight updates back while the pipeline
     is still filling. Until K passes have run, the delayed state holds no real example.
   - If neither flag is set, the neuron costs no DRAM access.
   - Otherwise the controller reads the neuron's two-word entry in the connectivity table,
     then its weight list in bursts of at most 64 words.
   - **For each weight w to target t:** one TARGET command does two things at once.
     - It adds ±w (or nothing) into t's accumulator. The sign follows the source's output; a
       unipolar neuron at 0 sends nothing.
     - It returns t's stored error e. That error was computed in the previous pass, so it
       belongs to the example whose state is K updates old.
   - If `backward` is set and e ≠ 0, the controller repeats the following |e| times:
     - It adds sgn(e)·w into the source's own accumulator (SRC_ACC). This is skipped if the
       delayed gradient is 0 or the source is an input pixel.
     - It steps the weight by −sgn(e)·h_delayed·2^lr_shift and saturates it at the weight
       range. Here h_delayed is ±1 for bipolar neurons, and 0 or 1 for unipolar ones (no step
       when it is 0).

     Hidden targets have |e| ≤ 1. Output targets have errors in [−9, +1], so the loop turns
     the multiplication by the output error into repeated addition.
   - When the last weight of a 32-bit word has been processed, the word is written back, but
     only if one of its weights changed.
   - **FINALIZE** then forms the neuron's new ternary error from the backpropagated sum.
4. **Update the output core.** TOP_UPDATE makes it classify the example and compute the new
   output errors.

In step 3, the backward sum into the source uses the weight as it was read, before that
pass's step.

**Cost per weight.** The forward dispatch of a weight costs 2 cycles. Each repetition of the
backward loop costs 2 more. The full-size simulation uses a modelled DRAM with 6-cycle read
latency and random (not handwritten-digit) examples. In it, one training example takes
about 2.4 million cycles with 16-bit weights and bipolar hidden layers, and about
1.5 million cycles with 8-bit weights and unipolar hidden layers. At the 78 MHz the
original FPGA ran at, that is about 31 ms and 19 ms. Reported figures on real DDR2 and real
digits are roughly 33 ms and 12 ms. The unipolar figure depends on how sparse the activity
is, which random examples do not reproduce. None of these numbers is a precise prediction.

## Output core

The output core holds C accumulators and C errors in registers. TARGET commands to it add into
its accumulators and return its stored errors, like any core.

TOP_UPDATE takes C cycles, one per output neuron. In that sweep the core:

- finds the largest accumulator, which is the predicted class (ties go to the lower index);
- evaluates the hinge-loss gradient, where p is the label and H the programmable margin:

  ```
  e[i] = (z[i] + H - z[p] > 0) ? 1 : 0        for i != p
  e[p] = -(number of i != p with e[i] = 1)
  ```

In the last cycle of the sweep it stores the errors, clears the accumulators and reports
`class_o` and `correct_o`. The output errors are not truncated.

## External memory layout

Addresses count 32-bit words. A 25-bit word address covers 1 Gbit.

```
word 0 ...                connectivity table, 2 words per neuron, at 2*{core[3:0], neuron[7:0]}
                            word 0: address of the neuron's weight list
                            word 1: [31:16] first target (global address {core,neuron})
                                    [15:0]  number of targets
anywhere                  weight lists: the weights to the consecutive targets, in order,
                            2 per word (16-bit) or 4 per word (8-bit), first weight in the
                            lowest bits; each list starts on a word boundary
IMG_BASE + i*stride       example i: bit b of the record is bit b%32 of word b/32;
                            bits 0..n_input-1 are the pixels, the next 4 bits the label;
                            stride = ceil((n_input+4)/32) words
```

All of a neuron's targets are consecutive, so two numbers describe them. The table costs
64 bits per neuron.

For the reference network this works out as follows:

| data | size |
|---|---|
| weights (16-bit) | 836,400 weights, 1.67 MB |
| weights (8-bit) | 0.84 MB |
| connectivity table | 1,994 entries |
| 70,000 examples | 7 MB |

All of it fits easily in 128 MB.

The DRAM port works like this:

- **Reads.** A request (`rd_req`, `rd_addr`, `rd_len` of 1 to 64) is taken when `rd_ready`
  is high. The words come back in order on `rd_valid`/`rd_data`, with any gaps. They cannot
  be stalled, and a 64-word buffer receives them.
- **Writes.** Writes are single words (`wr_req`/`wr_addr`/`wr_data`), taken when `wr_ready`
  is high.

## Dropout generator

`prng` combines two linear feedback shift registers:

- a 31-bit register on x³¹ + x²⁸ + 1, shifting up;
- a 19-bit register shifting the other way.

Each cycle, bit i of an 8-bit random number is the XOR of one bit from each register. A neuron
is dropped when the random number is below the 8-bit probability register; 51/256 ≈ 0.2 is
the reference setting. Dropout is enabled only while learning is on, so test examples are
never dropped.

The dropout bit is common to all cores. The core that is executing an UPDATE samples it.

## Host registers

The register bus is synchronous: `host_we` writes `host_wdata` to `host_addr` at the clock
edge. Reads are combinational.

| addr | name | contents |
|---|---|---|
| 0x00 | CTRL | [0] start (write 1, pulses), [1] learning on, [2] 16-bit weights |
| 0x01 | LR_SHIFT | [3:0] weight step is 2^LR_SHIFT (7 → 128 for 16-bit, 0 → 1 for 8-bit) |
| 0x02 | HINGE | signed margin H, in accumulator units |
| 0x03 | DROP_PROB | [7:0] dropout probability × 256 |
| 0x04 | IMG_BASE | word address of example 0 |
| 0x05 | NUM_IMAGES | examples per run |
| 0x06 | N_INPUT | number of input neurons |
| 0x07 | CLR_CNT | write clears all counters |
| 0x10+c | CORE_CFG c | [8:0] neurons used, [11:9] K, [12] bipolar |
| 0x20 | STATUS | [0] busy, [7:4] last class, [8] last correct |
| 0x22–0x2F | counters | lo/hi halves of 48-bit counters |

The counters are, in register order:

- words read;
- words written;
- read bursts;
- predicted read words for plain backpropagation;
- pipelined read words;
- examples;
- correct classifications.

**Learning-rate schedule.** The host sets LR_SHIFT and can lower it between epochs: start at
128 and halve every 10 epochs for 16-bit weights.

**Run sequence.** A typical run does the following:

1. Load the DRAM.
2. Write the core configurations, N_INPUT, IMG_BASE, NUM_IMAGES, HINGE, LR_SHIFT and
   DROP_PROB.
3. Write CTRL with start and learning on.
4. Poll STATUS until busy clears.
5. Clear the learning bit and run the test set.

**The plain-backpropagation prediction.** For every neuron that touched DRAM, the controller
adds (2 + list words) once for each of the forward and backward duties that the neuron has.
This counts what a non-pipelined forward-then-backward trainer would read. Comparing it with
the pipelined count gives the saving from reading each weight only once.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends with one
`TB_RESULT checks=N failures=M` line and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_neuron_core` | random command streams against an independent model of each neuron, both weight widths, gradient-window edges, every K from 0 to 4, the response timing and commands addressed to other cores |
| `tb_output_core` | classification and hinge errors against a model, over random accumulators, labels and margins; the C-cycle latency |
| `tb_prng` | the bit stream against an independent LFSR model, and the dropout rate for several probabilities |
| `tb_monitor_setup` | register read-back, the start pulse and every counter |
| `tb_central_controller` | the controller with three real cores, the output core and a DRAM model; 8-bit bipolar, 3‑130‑3‑10 network (33-word lists, burst length never above 64); weights and classifications compared with a reference model |
| `tb_bsn_top` | end to end on a 40‑300‑20‑10 network, in all four configurations (16/8-bit weights × bipolar/unipolar hidden layers) side by side |
| `tb_bsn_full` | the full 784‑600‑600‑10 network at the top's default parameters, as 16-bit bipolar and as 8-bit unipolar; five training examples and one test example each, every weight checked (about 35 s of simulation) |

In `tb_bsn_top`, every classification, every weight left in DRAM and all traffic counters
must match `bsn_ref_pkg`, which is an independent behavioural model of the algorithm. The
model replays the dropout decisions observed on the dropout wire. The testbench also requires
each of these mechanisms to have happened at least once:

- dropout;
- a skipped fetch;
- pipeline-fill gating;
- a weight step;
- weight saturation;
- repeated addition of an output error;
- a multi-burst weight list;
- a dirty-word write-back;
- a DRAM write stall;
- a learning-off test pass.

`tb/ddr2_model.sv` stands in for the DDR2 controller and DRAM. It has a fixed read latency,
random gaps between returned words and random write back-pressure.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/bsn_pkg.sv tb/bsn_ref_pkg.sv tb/tb_bsn_top.sv --top-module tb_bsn_top
./obj_dir/Vtb_bsn_top
```

Replace the last file and the top module name to run another testbench. Only
`tb_central_controller`, `tb_bsn_top` and `tb_bsn_full` need `tb/bsn_ref_pkg.sv`.

To change the network, edit the parameters at the top of `bsn_tb_harness`'s instance. The
harness builds the connectivity table, the weights and random examples itself.

## Where this design makes its own choices

The paper fixes:

- the neuron word (2 + 15 + 32 bits) and the update steps;
- the virtual-gradient ranges;
- the forward and backward fetch rules, and repeated addition for output errors;
- the C-cycle output core and the hinge loss;
- the connectivity-table idea and its 64-bit cost;
- 2 or 4 weights per word, 64-word bursts and dirty-word writes;
- the counters;
- the two-LFSR dropout source with a probability register.

The following are this implementation's own:

- **Command protocol.** One shared bus with a 2-cycle read-modify-write per command, and
  one command in flight.
- **Encodings.** The packing of the connectivity table and the example record. The 2-bit
  error as two's complement. The slot order {value, gradient, drop}. The register map and
  the 48-bit counters.
- **PRNG details.** The register lengths (31 and 19), taps and seeds, and the 8-bit
  probability.
- **Rules the paper does not state.**
  - Weights saturate at their range.
  - A neuron dropped K updates ago gets a zero error.
  - The input layer never accumulates backpropagated error. The paper only says its
    weights need no update when the delayed pixel is 0.
  - Ties in the output maximum go to the lower index.
- **Hinge margin.** H is a plain register; the paper tuned it but gives no value.
- **Reset.** Each core clears its memory in 256 cycles after reset, and the controller
  waits for that.
- **Ternary errors.** These go through the same repeated-addition loop as output errors
  (one iteration). The result is equivalent to multiplying by ±1.

Not built:

- **DDR2 controller and DRAM.** These are vendor IP and an off-chip part. A behavioural model
  stands in for them in simulation.
- **USB bridge.** It is not described in the paper. Its register bus is a port of the top.
- **Weight initialisation.** The weights are loaded into DRAM by the host; the testbenches
  write random values.
