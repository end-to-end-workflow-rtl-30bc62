# A ternary neural-network qubit-state classifier for an RFSoC readout chain

To read out a superconducting qubit, a microwave pulse is sent to a resonator
coupled to the qubit. The pulse comes back slightly changed depending on
whether the qubit was in |0> or |1>. An RF ADC digitises it, and the readout
firmware demodulates it into a stream of in-phase/quadrature pairs
(I_n, Q_n), one pair per FPGA clock. The usual classifier averages the trace
and compares the average with a threshold. This design replaces that step
with a small neural network that runs in the programmable logic, right next
to the stream:

* it takes **400 consecutive I/Q samples**, starting a programmable number of
  cycles (typically **100**) after a trigger from the experiment sequencer;
* it evaluates an **800 x 4 x 1 multilayer perceptron with ternary weights**
  (every weight is -1, 0 or +1), fully unrolled, in **8 clock cycles**;
* it writes the result as a **pair of 32-bit logits** (ground, excited) into a
  **128 KB block-RAM buffer** in **2 more clock cycles**, so that up to 16,384
  predictions stay in the buffer until the processor reads them over
  AXI4-Lite.

At the 3.25 ns clock of the target system, the result is in memory 10 cycles
(about 32 ns) after the last sample of the window.

The RTL is SystemVerilog-2017. It synthesises as written, and every block has
a self-checking testbench for Verilator.

## How the pieces fit

```
                 +------------------------------- nn_axi (classifier IP) ------------------------------+
 AXI4-Lite  ---->| nn_config_regs   offset, gain, soft/deep reset, count, status                        |
 (config)        |        |                                                                            |
 trigger    ---->| nn_ctrl  Configure -> Offset -> Load -> Compute -> Store   (and Clear)              |
                 |        | buf_we/idx                 | nn_start                                      |
 in_TDATA   ---->| iq_window_buffer (400 x 32 b) --x[800]--> nn_hls4ml --(logit_g, logit_e)--> pred_store|--out_*--+
 in_TVALID  ---->|                                  dense1_ternary -> batchnorm -> dense2_ternary       |          |
                 +-------------------------------------------------------------------------------------+          |
                                                                                                               pred_bram (128 KB)
 AXI4-Lite (buffer) ---------------------------------------------------------------------------------------------->+
```

`qick_nn_top` is the unit to instantiate: it holds `nn_axi` and `pred_bram`.
Its ports are the readout stream, the trigger, and two AXI4-Lite slaves (the
registers and the buffer), all on one clock with a synchronous active-low
reset. The parts of the readout system around it are outside this RTL: the
sequencer that sends the trigger, the signal generators, the RF DACs and ADCs,
the demodulator that makes the I/Q stream, the processor system with its AXI
interconnect, and the software driver.

## One readout, cycle by cycle

Let t0 be the clock cycle in which `trigger` is first seen high, `OFS` the
`READOUT_OFFSET` register, and W = 400.

| cycles                      | phase    | what happens |
|-----------------------------|----------|--------------|
| t0 .. t0+OFS-1              | Offset   | nothing is taken from the stream |
| t0+OFS .. tL                | Load     | every beat with `in_TVALID` high is written to the window buffer, until W beats are in (tL = t0+OFS+W-1 if valid never drops) |
| tL+1 .. tL+8                | Compute  | `nn_start` in tL+1; the eight pipeline stages of the network |
| tL+9                        | Store    | `out_en=1, out_we=4'hf`, `logit_g` written to byte address 8n |
| tL+10                       | Store    | `logit_e` written to 8n+4; pointer and prediction count advance |
| tL+11                       | Configure| ready for the next trigger |

With `OFS = 0`, the beat in the trigger cycle itself is sample 0. The stream
is never stalled: the readout source has no back-pressure input, so the
classifier simply takes what it needs. `in_TREADY` is an output that is high
during Load. It tells when the window is open, but the source must not wait
for it. If valid drops during the load, the load takes longer by that many
cycles. A trigger that comes while a readout or a clear is in progress is
ignored, and the `trig_ignored` output pulses.

## The network and its arithmetic

The network is the one the classifier was trained as: Dense(800->4) ->
BatchNorm(4) -> Dense(4->1). Training adds a sigmoid on the output; the
hardware keeps the logit, which gives the same decision and saves the table.

Input order: `x[2k] = I_k`, `x[2k+1] = Q_k`, k = 0..399. Each 32-bit stream
beat holds I in bits [13:0] and Q in bits [29:16]; bits [15:14] and [31:30]
are padding and are ignored. Samples are unsigned 14-bit integers.

| stage | module          | operation | format out |
|-------|-----------------|-----------|------------|
| 1     | dense1_ternary  | per neuron, add/subtract/skip each input in groups of 8 (800 -> 100 partial sums) | 26-bit signed |
| 2     | dense1_ternary  | groups of 8 (100 -> 13) | 26-bit signed |
| 3     | dense1_ternary  | groups of 8 (13 -> 2)  | 26-bit signed |
| 4     | dense1_ternary  | final sum | 26-bit signed |
| 5     | dense1_ternary  | `h1 = sat32(floor(a * SCALING_FACTOR / 256) + B1)` | 32-bit signed, ADC units |
| 6     | batchnorm       | `h2 = sat16(floor(h1 * S / 2^14) + T)` | signed Q5.10 |
| 7     | dense2_ternary  | `z = sum_o W2[o] * h2[o] + B2` | Q.10 in 32 bits |
| 8     | nn_hls4ml       | `(logit_g, logit_e) = (-z, z)` | two 32-bit words |

Points that matter when you change the design:

* **Ternary weights cost no multipliers.** The kernels are module parameters,
  so synthesis keeps only the non-zero terms of each sum. The price is that a
  new model means a new bitstream. The 2-bit code is 01 = +1, 11 = -1,
  00 = 0. Element (o, i) of the first kernel sits at bits `[2*(o*800+i) +: 2]`
  of `W1`.
* **The gain.** `SCALING_FACTOR` is an unsigned Q8.8 gain on the input
  samples (reset value 1.0). Because the first layer is linear, it is applied
  once per neuron, after the sum, instead of on 800 inputs. Both give the same
  result.
* **Folding the batch normalisation.** To load a trained model, compute
  `S = gamma / sqrt(moving_variance + eps)` and
  `T = beta - moving_mean * S` per neuron. Then quantise `S` to 18-bit signed
  with 24 fractional bits (`BN_S`) and `T` to Q5.10 (`BN_T`). `B1` is in ADC
  units; `B2` is Q5.10. If you change the input gain convention, rescale `S`
  to match.
* **Saturation is the hidden activation.** Between the normalisation and the
  output layer there is no ReLU. The only non-linearity is the clipping of
  `h2` to the 16-bit Q5.10 range.
* **Two logits from one output neuron.** The output layer has one neuron, but
  the buffer stores a ground/excited pair for each prediction. The pair is
  (-z, z). A softmax over the pair is the sigmoid of 2z. The state is
  "excited" when `logit_e > logit_g`, that is when z > 0.
* **Placeholder weights.** The trained kernel, biases and normalisation
  statistics are not part of this RTL. The defaults (`nn_pkg::ternary_pattern`,
  a fixed hash of the weight index giving -1/0/+1 about equally often; zero
  biases; `S = 2^-20`, `T = 0`) only make the design complete and testable.
  Pass the trained values through the parameters of `nn_axi` (or
  `nn_hls4ml`).

## Software view

Configuration registers (AXI4-Lite, 32-bit, byte addresses):

| addr | name           | access | meaning |
|------|----------------|--------|---------|
| 0x00 | CTRL           | W  | bit 0: soft reset; bit 1: deep reset (clear INDEX_LO..INDEX_HI) |
| 0x04 | READOUT_OFFSET | RW | cycles from the trigger edge to sample 0 (16 bits) |
| 0x08 | SCALING_FACTOR | RW | input gain, unsigned Q8.8, reset 0x100 |
| 0x0C | INDEX_LO       | RW | first buffer entry to clear (14 bits) |
| 0x10 | INDEX_HI       | RW | last buffer entry to clear (14 bits) |
| 0x14 | PRED_COUNT     | R  | predictions since reset (32 bits; keeps counting after the buffer wraps) |
| 0x18 | STATUS         | R  | [2:0] phase (0 configure, 1 offset, 2 load, 3 compute, 4 store, 5 clear), [3] clear pending |
| 0x1C | WINDOW_SIZE    | R  | 400 |

* **Soft reset** puts every configuration register back to its reset value at
  once. In the next cycle it clears the controller, the network's valid
  pipeline, the buffer pointer and the count, so the next prediction goes to
  entry 0.
* **Deep reset** zeroes both words of each entry from INDEX_LO to INDEX_HI.
  It writes one word per cycle through the classifier's own buffer port, and
  it starts only when no readout is in progress. If INDEX_LO > INDEX_HI,
  nothing is written.

The buffer is 32,768 words. Prediction n is stored at entry n mod 16384:
`logit_g` at byte `8*entry` and `logit_e` at `8*entry + 4`, both signed
Q.10. The processor reads it through the second AXI4-Lite port (17-bit
address) at its own pace. It may also write there. The classifier's port is
write-first, with a one-cycle read latency.

## Departures from the published design, and choices made here

The published description gives the ports, phases, sizes, latencies and the
network structure. It does not give what is listed below, so these are this
implementation's own choices:

* the register map, field widths and reset values. Also the meaning of the
  scaling factor: it is taken here as an input gain;
* the bit positions of I and Q in the stream word, and the input order;
* every internal number format, and how the eight inference cycles are split
  over the layers. The published network was produced by a high-level
  synthesis flow, and its internal schedule is not known;
* how sample 0 lines up with the trigger edge, counting only valid beats,
  and ignoring triggers while busy;
* the (-z, z) logit pair, and no hardware sigmoid;
* wrap-around of the buffer pointer, and a hardware engine for the deep
  reset;
* `in_TREADY`: the stream has no back-pressure, and this output only marks
  the load window;
* the trained parameters, which are replaced by placeholders (see above).

The published text gives the clock period as both 3.22 ns and 3.25 ns. The
testbenches use 3.25 ns, which only matters for the printed times.

Only the configuration the design was built for is supported. The window
size (`WINDOW`) and hidden width (`NH`) are elaboration parameters. The
800 x 64 x 1 variant, other windows, and 3- or 6-bit weights would each need
a new build. The 3- and 6-bit weights would also need multipliers in
`dense1_ternary`.

## Files

| file | contents |
|------|----------|
| `rtl/nn_pkg.sv` | sizes, formats, stream-word struct, phase enum, register map, placeholder-weight function |
| `rtl/axil_if.sv` | AXI4-Lite interface with handshake assertions |
| `rtl/axil_slave.sv` | AXI4-Lite to simple register-port adapter (one-cycle reads) |
| `rtl/nn_config_regs.sv` | configuration registers |
| `rtl/nn_ctrl.sv` | phase controller |
| `rtl/iq_window_buffer.sv` | window storage, presented as 800 parallel inputs |
| `rtl/dense1_ternary.sv`, `rtl/batchnorm.sv`, `rtl/dense2_ternary.sv` | network layers |
| `rtl/nn_hls4ml.sv` | network core (layers plus the logit-pair stage) |
| `rtl/pred_store.sv` | buffer writes, pointer, count, range clear |
| `rtl/nn_axi.sv` | the classifier IP |
| `rtl/pred_bram.sv` | 128 KB dual-port buffer with AXI4-Lite port |
| `rtl/qick_nn_top.sv` | classifier plus buffer |
| `tb/nn_ref_pkg.sv` | integer reference of the network arithmetic |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.
A watchdog ends a run that hangs. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/nn_pkg.sv tb/nn_ref_pkg.sv tb/tb_qick_nn_top.sv --top-module tb_qick_nn_top
./obj_dir/Vtb_qick_nn_top
```

What they cover:

* `tb_qick_nn_top` runs the whole design at its default size: a 400-sample
  window, the 800 x 4 x 1 network and the 128 KB buffer. It checks the logit
  pairs read back over AXI4-Lite against the integer reference, and the
  9/10-cycle store timing after the window. It drives offsets 100 and 0,
  gaps in valid, an ignored trigger, a gain change, a deep reset, a soft
  reset, and 16,386 readouts so that the buffer wraps. It runs in about a
  minute.
* `tb_nn_axi` tests the IP with a 16-sample window and random weights. It
  checks the exact cycle, address and data of every buffer write.
* `tb_nn_hls4ml` and `tb_dense1_ternary` test the network and its first layer
  at full size with random parameters. They check the results, the 8- and
  5-cycle latencies, and saturation.
* `tb_nn_ctrl` checks the controller's phases cycle by cycle, for several
  offsets and for a stream with gaps in valid.
* `tb_pred_store`, `tb_pred_bram` and `tb_nn_config_regs` test the buffer
  path and the registers. They cover wrap-around, range clears, byte
  strobes, write-first reads, soft reset and the AXI handshakes.

The simulator has two states, so all state that is read is reset or written
before use. The network's data registers are not reset: their valid bits
are.

## Trust and limits

* Everything here is checked against an independent integer model and a
  cycle timeline, not against the trained model or hardware measurements. No
  claim about classification fidelity can be made with the placeholder
  weights.
* The fully unrolled first layer is 3,200 ternary terms. Synthesis keeps the
  window buffer (12,800 bits) and the adder-tree registers. The 128 KB
  buffer is inferred as a memory; on an FPGA it maps to block RAM.
* Timing closure at 3.25 ns has not been studied. Stage 1 adds eight 14-bit
  values per neuron and group, and stages 5 and 6 each have a
  26 x 17 and a 32 x 18 multiply.
