# IMS: a neural-network monitor for AXI4 header attacks

An AXI4 master that is malicious or simply broken can bring down a
system-on-chip without touching a single forbidden address. A burst length
above what the slave supports, a flood of top-priority QoS requests or a
reused read ID all look like legal traffic to an address-based firewall or
MPU, yet they can stall the interconnect or starve other masters: a partial
or complete denial of service.

This RTL implements the hardware side of the *Intelligent Hardware
Monitoring System* (IMS) proposed by Foudhaili, Rencber et al., "IMS:
Intelligent Hardware Monitoring System for Secure SoCs" (DATE 2026). The
core watches an AXI4 bus passively. Each time a write-address (AW) or
read-address (AR) handshake completes, it takes the transaction's header
and classifies it as *normal* or *malicious* with a small quantized
multilayer perceptron. It then counts the verdicts and can raise an
interrupt. The core drives nothing on the watched bus, so it cannot slow
it down. Software loads the network and reads the results through an
AXI4-Lite slave port, so the core appears as an ordinary memory-mapped
peripheral.

The published work gives the network's shape, its quantization and its
place in the SoC. It does not give the trained weights, the exact feature
list or any register-level interface. This RTL therefore builds the
detector as an engine whose parameters are loaded at run time. The last
two sections say which parts follow the publication and which are this
design's own.

## Signal flow

```
 monitored AXI4 bus (inputs only)
   AW/AR header fields, AW/W/AR valid+ready
            |
   axi_header_monitor   one sample per address handshake, 22 features x 8 bit
            |           (one-entry buffer; a sample that finds it full is dropped)
            v  valid/ready
   pca_projection       8 principal components  y = C (x - mu)
            |
            v  valid/ready
   mlp_classifier       dense 8->32 + ReLU -> dense 32->32 + ReLU -> dense 32->1
            |           -> sigmoid -> score >= threshold ?
            v  result pulse
   ims_axil_regs        counters, last score, alarm flag, irq_o,
                        AXI4-Lite port and the parameter write bus (cfg)
```

`ims_top` wires these stages together. Each stage holds at most one sample
and passes it on with a valid/ready handshake. A stage that has finished
waits until the next one takes its result, so several samples are in
flight at once: one in PCA and one in each layer.

## What a sample is

A sample is a snapshot of the watched bus in the cycle of an address
handshake (`AWVALID && AWREADY`, or `ARVALID && ARREADY`). If both
handshakes happen in the same cycle, they give one sample. The vector has
22 entries, each an unsigned 8-bit integer, in the order of
`ims_pkg::feat_idx_e`:

| entries | content |
|---|---|
| 0-5   | AWID, AWLEN, AWSIZE, AWBURST, AWPROT, AWQOS |
| 6-11  | ARID, ARLEN, ARSIZE, ARBURST, ARPROT, ARQOS |
| 12-21 | AWVALID, AWREADY, WVALID, WREADY, BVALID, BREADY, ARVALID, ARREADY, RVALID, RREADY |

Fields are taken as integers, so AWLEN = 0x12 becomes 18. An ID wider than
8 bits saturates at 255. The published flow reduced 52 recorded signals to
22 features but does not list them. The list above is this design's
choice. It covers every field the published attack set uses: AWLEN, AWQOS,
AWSIZE, ARID and ARPROT. It also carries the handshake state of all five
channels (AW, W, B, AR, R), which the published capture covered. AxLOCK
and AxCACHE are not part of the vector. If your trained model used other signals, change
the snapshot in `axi_header_monitor` and the enum in `ims_pkg`.

The monitor never stalls the bus, so it cannot wait for the classifier. A
handshake that finds the monitor's one-entry buffer still full is dropped.
Both kept and dropped samples are counted: the `CAPTURED` and `DROPS`
registers.

## Arithmetic and number formats

The formats are the part of this design that is easiest to get wrong when
exporting a trained model, so they are spelled out in full here.

| quantity | format | meaning of an integer value v |
|---|---|---|
| feature x_j | unsigned 8 bit | v |
| PCA mean mu_j | signed 16 bit, 4 fractional | v / 16 |
| PCA coefficient C[k][j] | signed 16 bit, 12 fractional | v / 4096 |
| activation (PCA output, hidden, logit) | signed 16 bit, 10 fractional | v / 1024 |
| weight, bias | signed 8 bit, 2 fractional | v / 4 |
| score | unsigned 8 bit | v / 256 |

The weight format is the publication's `<8,5>` quantization, read the way
QKeras reads `quantized_bits(8,5)`. That means 8 bits, of which 5 are
integer bits, plus a sign, which leaves 2 fractional bits. Weights
therefore range from -32 to +31.75 in steps of 0.25. The 16-bit activation
format with 6 integer bits is the usual hls4ml default. It is an
assumption, since the publication does not state it.

Each MAC stage adds up the full-precision products in a wide accumulator.
The bias is added first, aligned to the products' fractional bits. The sum
is then shifted back to 10 fractional bits, rounding toward minus
infinity, and saturated to 16 bits:

```
pca:    y_k   = sat16( floor( sum_j C[k][j] * (16*x_j - mu_j)        / 2^6 ) )
dense:  out_o = sat16( floor( (1024*b_o + sum_i W[o][i] * in_i)      / 2^2 ) )
        then ReLU (max(0, .)) in the two hidden layers, identity in the output layer
```

Everything is in integer units here: `C`, `mu`, `b` and `W` are the stored
integers. Fold any feature standardisation (1/sigma) into `C`.

The sigmoid uses the PLAN piecewise-linear approximation, which needs only
shifts and adds. Its largest error against the true logistic function is
about 0.02:

```
|x| >= 5          : 1
2.375 <= |x| < 5  : |x|/32 + 0.84375
1 <= |x| < 2.375  : |x|/8  + 0.625
|x| < 1           : |x|/4  + 0.5           and  s(-x) = 1 - s(x)
```

The result is turned into an 8-bit score. A sample is malicious when
`score >= THRESHOLD`. The threshold resets to 128 (0.5). The approximation
is monotonic, so the threshold acts on the logit as well.

## Timing

At each stage, N parallel multiply-accumulate units take one input element
per clock:

| stage | MACs | clocks from taking a sample to its result | one sample per |
|---|---|---|---|
| PCA (22 -> 8) | 8 | 23 | 24 clocks |
| layer 1 (8 -> 32) | 32 | 9 | 10 clocks |
| layer 2 (32 -> 32) | 32 | 33 | 34 clocks |
| layer 3 (32 -> 1) + sigmoid + result register | 1 | 34 | 34 clocks |

From the bus handshake to the updated counters takes 104 clocks. The
slowest stage sets the rate at one sample every 34 clocks, which is
7.35 million classifications per second at the 250 MHz clock of the
published FPGA build. The publication reports about 2.5 million per second,
which allows up to 100 clocks per sample, so this datapath is comfortably
faster. Its reported latency of 1.5 ms per inference is far longer than
any datapath of this size needs. It presumably includes software overhead
and is not modelled. When every cycle carries an address handshake, about
33 in 34 samples are dropped. Under such saturation a captured sample also
queues: each of the five one-sample stages (monitor buffer, PCA, three
layers) passes one sample per 34 clocks. Its latency therefore grows from
104 clocks to at most 5 x 34 = 170 clocks. The publication gives no figure for that
case, because it does not define its "bus load" in handshakes per cycle.

## Programming the core

AXI4-Lite port: 16-bit byte addresses and 32-bit data. Every response is
OKAY and WSTRB is ignored. Address bits [15:12] select a region:

| address | register / store | access |
|---|---|---|
| 0x0000 CTRL | [0] enable sampling, [1] interrupt enable, [2] write 1 = clear counters and alarm flag | RW |
| 0x0004 STATUS | [0] alarm flag (sticky, write 1 to clear), [1] verdict of the last sample | R / W1C |
| 0x0008 THRESHOLD | [7:0] alarm threshold on the score, reset 128 | RW |
| 0x000C SAMPLES | samples classified | R |
| 0x0010 DROPS | samples lost because the buffer was full | R |
| 0x0014 ALARMS | samples judged malicious | R |
| 0x0018 SCORE | [7:0] last score, [31:16] last logit | R |
| 0x001C ID | 0x494D5301 | R |
| 0x0020 CAPTURED | samples taken by the monitor | R |
| 0x1000 + 4*{k[2:0], j[4:0]} | PCA coefficient C[k][j] (WDATA[15:0]) | W |
| 0x2000 + 4*j | PCA mean mu_j (WDATA[15:0]) | W |
| 0x3000 + 4*{o[4:0], i[2:0]} | layer-1 weight, neuron o, input i (WDATA[7:0]) | W |
| 0x4000 + 4*o | layer-1 bias | W |
| 0x5000 + 4*{o[4:0], i[4:0]} | layer-2 weight | W |
| 0x6000 + 4*o | layer-2 bias | W |
| 0x7000 + 4*i | output-neuron weight from hidden neuron i | W |
| 0x8000 | output-neuron bias | W |

The coefficient and weight memories have no reset, so write every entry,
including the zero (pruned) ones, before setting CTRL.enable. Means and
biases reset to zero. A full model is 1,575 writes. `irq_o` is high while
the alarm flag and the interrupt enable are both set. Clear it by writing 1
to STATUS[0].

Suggested use: load the model, write THRESHOLD, write CTRL = 0x3, then
service the interrupt by reading SCORE and ALARMS.

## What follows the publication and what does not

Taken from the publication:

* the monitor is passive and sits on the SoC's AXI bus as a memory-mapped
  IP core;
* 22 features after correlation filtering, reduced by PCA (8 components,
  the 97 % variance point; 4 or 6 also work if the unused components are
  loaded with zeros);
* an MLP with two hidden layers of 32 ReLU neurons and a sigmoid output
  for the binary decision;
* `<8,5>` weights, and the 250 MHz clock used to state rates;
* the attack classes and their sample counts that the tests use: AWLEN >
  15, AWQOS = 0xF, invalid AWSIZE, ARPROT violation, duplicate ARID and
  mixed patterns (what an ARPROT violation and a mixed pattern look like
  on the wires is the tests' own reading).

This design's own choices:

* the exact feature list and the sampling instant;
* the one-entry buffer and its drop policy;
* PCA done in hardware;
* the activation, coefficient and score formats, and the truncation and
  saturation rules;
* the MAC schedule and the layer pipeline;
* the PLAN sigmoid;
* the threshold register, the counters, the interrupt and the whole
  register map.

Known departures and limits:

* **No trained weights.** The published model's weights are not available,
  so the core ships empty and must be loaded. Detection accuracy depends
  entirely on the loaded model.
* **Sparsity is not exploited.** The publication prunes 80 % of the weights
  and builds the model with constant weights through HLS, so the
  synthesizer can remove the zero multipliers. Here the weights are
  loadable, so every multiplier is built and a zero weight is simply a
  stored 0. The area is therefore not comparable to the published FPGA
  figures.
* **ARID duplication.** The publication lists duplicate read IDs among the
  detected attacks. A single-sample vector holds the current ARID but no
  history of outstanding IDs, so this design can catch ID reuse only as
  far as a model can infer it from one header.
* **Mitigation.** The publication detects but does not block. This core
  raises an interrupt and leaves any response to software.

## Verification

Each module has a self-checking testbench in `tb/`. Every one prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/ims_ref_pkg.sv`
holds the reference arithmetic: plain 64-bit integer sums, floor division
and clamping, written from the formulas above.

| testbench | what it checks |
|---|---|
| `tb_axi_header_monitor` | random AW/AR traffic with a randomly stalling consumer; every emitted sample compared field by field, sample and drop pulses compared clock by clock with a model of the buffer, nothing taken while disabled |
| `tb_pca_projection` | random coefficients and means, exact outputs including saturation, latency, output held under back-pressure |
| `tb_dense_layer` | 32x32 ReLU and 32x1 linear layers with 80 %-sparse random weights, exact outputs, latency, back-pressure |
| `tb_sigmoid_act` | sweep of the whole input range against the PLAN formula and the true logistic, monotonicity |
| `tb_mlp_classifier` | full network with random weights: exact logit, score, alarm at three thresholds, 78-clock latency, 34-clock interval |
| `tb_ims_axil_regs` | reset values, read-back, parameter forwarding, counters under fixed and random event sequences, clear, W1C flag, interrupt, held write response |
| `tb_ims_top` | the whole core at default sizes, driven over AXI4-Lite (see below) |
| `tb_bus_load` | random address traffic at 10, 25, 50, 75 and 100 % of clocks: counters add up, inference rate at least the published rate for that load, latency at most 170 clocks |
| `tb_attack_set` | the published evaluation mix through the whole core: 16,383 normal transactions and 3,242 attacks in six classes (see below) |

`tb_ims_top` loads a hand-made model. PCA components 0 to 2 pass through
AWLEN, AWQOS and AWSIZE. Three first-layer neurons fire on AWLEN > 15,
AWQOS = 15 and AWSIZE > 3. The second layer ORs them, and the output neuron
maps "any" to a score near 1. All other weights are small random values,
so the whole datapath is exercised. The test then sends normal writes,
normal reads, the three header attacks and duplicate-ARID reads one at a
time. For each one it checks that the logit matches the reference chain
exactly, that the verdict is right and that the interrupt works. A burst of
300 back-to-back handshakes then overflows the pipeline, and the test
checks that every handshake was either classified or counted as dropped.
Finally the threshold is moved and sampling is switched off. The test
counts each of these mechanisms and fails if one never happened.

`tb_attack_set` replays the size and make-up of the published evaluation
set: 16,383 normal transactions plus 642 AWLEN overflows, 558 duplicate
ARIDs, 423 QoS floods, 389 invalid sizes, 345 ARPROT violations and 885
mixed patterns. They are shuffled and sent one every 36 clocks, so none is
dropped. Its model adds a fourth detector neuron, for ARPROT > 3. That
neuron flags a data read that carries the instruction-access bit. A mixed
pattern is an AW and an AR handshake in the same clock that carries two or
more anomalies. Every result is checked against the reference chain. The
test prints a table of samples and flags per class. With this model, all
field attacks and mixed patterns are flagged, and normal traffic raises no
alarm. Duplicate ARIDs pass unflagged, as explained above.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ims_pkg.sv tb/ims_ref_pkg.sv rtl/*.sv tb/tb_ims_top.sv --top tb_ims_top
./obj_dir/Vtb_ims_top
```

Replace `tb_ims_top` with any other testbench name. Lint the RTL with
`verilator --lint-only -Wall -Irtl rtl/ims_pkg.sv rtl/ims_top.sv`.

## Files

* `rtl/ims_pkg.sv`: sizes, number formats, feature order, parameter-bus
  type, register offsets
* `rtl/axi_header_monitor.sv`, `rtl/pca_projection.sv`,
  `rtl/dense_layer.sv`, `rtl/sigmoid_act.sv`, `rtl/mlp_classifier.sv`,
  `rtl/ims_axil_regs.sv`: the stages described above
* `rtl/ims_top.sv`: the core
* `tb/ims_ref_pkg.sv`: reference arithmetic
* `tb/tb_*.sv`: testbenches
