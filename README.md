# KLiNQ readout discriminator in SystemVerilog

A superconducting qubit is read out by sending a microwave tone through its
resonator and digitizing the reflected signal as two streams, I and Q. The
trace looks slightly different depending on whether the qubit was in |0> or
|1>, and a discriminator has to decide which, quickly and for each qubit on
its own, so that a quantum program can measure one qubit in the middle of a
circuit while the others keep running.

This RTL implements the FPGA discriminator proposed in *KLiNQ: Knowledge
Distillation-Assisted Lightweight Neural Network for Qubit Readout on FPGA*.
A large "teacher" network is trained offline on all qubits together; its
knowledge is then distilled into one very small "student" network per qubit.
Only the students run in hardware. Each student sees a compressed form of its
own qubit's trace (a handful of averaged and normalized I/Q points) plus one
extra number, the output of a matched filter, and produces a single score. The
training itself (teacher, distillation, matched-filter envelope fitting) is
software and is not part of this RTL; the hardware only loads the resulting
weights.

## What one readout does

```
            trace (500 I + 500 Q samples, per qubit)
               |                                   |
           averaging (1 cycle)            matched_filter (shared by all qubits)
               |                          dot(trace, envelope), 16 cycles
         normalization (2 cycles)                   |
               |                                    |
               +------ concatenate: [I points, Q points, MF feature]
                                   |
                  FC nin->16, ReLU -> FC 16->8, ReLU -> FC 8->1, ReLU
                                   |
                         score, state = (score != 0)
```

Two student sizes exist, chosen per qubit by the `FNN_B_SEL` mask of
`klinq_top` (default: qubits 2 and 3 use network B):

| | averaging window | points per component | inputs | hidden | parameters |
|---|---|---|---|---|---|
| Network A | 32 samples (64 ns) | 15 | 31 | 16, 8 | 657 |
| Network B | 5 samples (10 ns) | 100 | 201 | 16, 8 | 3377 |

Samples are taken every 2 ns, and the first 1 µs of a readout (500 samples per component) is used.
Network A forms 15 windows of 32 samples and so uses the first 480 samples. The
remaining 20 samples are ignored. Network B uses all 500.

## Number format

Every datum, weight, bias and activation is a 32-bit two's-complement
fixed-point number with 16 fraction bits (Q16.16, `fx_t` in `klinq_pkg`).
Each product is computed at full width and shifted right by 16 bits. The shift
rounds toward minus infinity. Sums are kept in 64 bits (`acc_t`) through the
adder tree and the bias addition. The value is brought back to 32 bits only in
the ReLU stage. That stage clamps a positive sum above `0x7fffffff` to
`0x7fffffff` and pulses `sat_event`; a negative sum becomes 0. The matched-filter
feature is saturated to 32 bits in the same way, in both directions.

## The neuron: four-phase multiply and adder tree

`neuron` is the building block of every layer and of the matched filter, and
its timing sets the timing of the whole design.

*Multiplication.* An N-input neuron has only `M = ceil(N/4)` multipliers. On
`start` the inputs `x[]` and weights `w[]` must be stable; during the next
four cycles (phases 0..3) multiplier `j` computes product `k*M + j` in phase
`k`, and each product is written to a register. A 31-input neuron therefore
uses 8 multipliers, and the 1000-input matched filter uses 250. The neuron can
accept a new input set every 4 cycles (`ready`).

*Summation.* Once all N products are registered, `adder_tree` adds them in
`ceil(log2 N)` pipelined levels, each a row of two-input adders with an odd
operand passed through. A final register adds the bias. The bias is captured at
`start` and delayed alongside the tree, so a back-to-back start cannot change
the bias of a computation already in flight.

*Latency.* From `start` to `out_valid` it is `4 + ceil(log2 N) + 1` cycles:
10 cycles for 31 inputs, 13 for 201, 9 for 16, 8 for 8 and 15 for 1000.

`fc_layer` places `NOUT` neurons side by side on the same input vector, so a
layer takes as long as one neuron. `relu_act` adds one more register.

## Pre-processing

`averaging` divides each window sum by the constant window length. It does all
windows of both components in parallel, in one cycle, and rounds toward zero.
`normalization` computes `(x - x_min) >>> shift` in two registered steps:
subtract, then shift and saturate. The standard deviation is approximated by a
power of two, so a shift replaces the division. There is one `x_min` and one
`shift` for I and another pair for Q. Both pairs are loaded per qubit together
with the network weights.

## Shared matched filter

The matched-filter feature of qubit q is the dot product of the qubit's
complete trace with a trained envelope of the same length. The envelope is
1000 words: I part first, then Q part. The dot product is computed by a
single `neuron` with 1000 inputs and a zero bias, shared by all qubits:

- A one-cycle `req[q]` from a student marks qubit q as pending.
- When the neuron is ready, a round-robin arbiter grants one pending qubit. A
  request that arrives while the unit is idle is granted in the same cycle.
- The trace/envelope multiplexer is held on the granted qubit for the four
  multiply phases.
- A delay line tags the result with its qubit number.
- The feature appears 16 cycles after the grant, as a pulse on
  `feat_valid[q]` together with `feat`.
- Under contention, qubits are served every 4 cycles in round-robin order.
  `mf_pending` in the status word shows which qubits are waiting.

Each student starts its averaging and its matched-filter request in the same
cycle. Its first layer starts when both its normalized points and its feature
have arrived.

## Timing of a readout

At the default sizes, the top-level testbench measures these cycles from trigger to `done`:

| | cycles | at 100 MHz |
|---|---|---|
| Network A qubit | 47 | 470 ns |
| Network B qubit | 50 | 500 ns |

When the feature is ready first, a student alone takes 34 cycles (network A).
The remaining cycles are spent waiting for the matched filter's 1000-input
adder tree. Each additional qubit that triggers at the same time waits up to
4 more cycles per qubit ahead of it in the round robin.

**This does not meet the paper's headline figure.** The paper reports a
discrimination latency of 32 ns at 100 MHz, split as MF 11 ns, averaging and
normalization 9 or 6 ns, and network 12 or 15 ns. That is about three clock
cycles. The same paper describes a four-cycle multiplication followed by an
adder tree of `ceil(log2 n) + 1` cycles in every layer, so one layer alone
takes at least 9 cycles. These two statements cannot both hold. This design
follows the architectural description, and its cycle counts are as given above.

## Host interface and memory map

`klinq_top` has a 32-bit AXI4-Lite slave (`axi_lite_loader`) through which a
processor loads traces, envelopes and weights and reads results. All writes
must be full words (`wstrb = 4'hf`). The module handles one outstanding write
and one outstanding read. Byte address = word address × 4. The word address
is `{region[17:15], qubit[14:12], index[11:0]}`, with the qubit field
0-based:

| region | contents (index) |
|---|---|
| 0 | trace: I samples 0..499, Q samples 500..999 |
| 1 | matched-filter envelope, same layout |
| 2 | network parameters: W1 row-major [16][nin], b1[16], W2[8][16], b2[8], W3[8], b3, x_min I, x_min Q, shift I, shift Q |
| 3 | write index 0: start the qubits whose bits are set; read index 0: status; read index 1+q: score of qubit q |

The status word is `{mf_pending[31:24], result_valid[23:16], state[15:8],
busy[7:0]}`.

A readout of a qubit can be started in two ways: by the `trig[q]` pin, which
stands for the readout pulse of a real system, or by a control write. A start
is ignored while that qubit is busy.
- `done[q]` pulses when the result is ready.
- `state[q]` then holds the result until the next readout finishes.
- `sat_event[q]` reports that an activation was clamped.

The trace and the parameters of a qubit must not be rewritten while the qubit
is busy.

The trace, envelope and weight buffers are plain register arrays with
parallel read. Every multiplier and adder needs its operands at the same time,
so a RAM with one or two ports would not serve. In the original system the
traces come from DDR memory and stand in for live ADC samples. The processor,
DDR and AXI interconnect are outside this RTL.

## Files

| file | role |
|---|---|
| `rtl/klinq_pkg.sv` | types, sizes, fixed-point helpers |
| `rtl/adder_tree.sv`, `rtl/neuron.sv`, `rtl/fc_layer.sv`, `rtl/relu_act.sv` | network datapath |
| `rtl/averaging.sv`, `rtl/normalization.sv` | pre-processing |
| `rtl/matched_filter.sv` | shared matched-filter unit with arbiter |
| `rtl/student_fnn.sv` | one qubit's discriminator and its control |
| `rtl/data_buffer.sv`, `rtl/weights_buffer.sv` | trace and parameter storage |
| `rtl/axi_lite_loader.sv` | AXI4-Lite slave |
| `rtl/klinq_top.sv` | five qubits, shared MF, buffers, host port |
| `tb/klinq_ref_pkg.sv` | bit-exact reference model used by the testbenches |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `klinq_top_duration_tb` |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. Its
watchdog reports a failure if the simulation hangs. Two examples, from the
directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module klinq_top_tb \
  rtl/klinq_pkg.sv tb/klinq_ref_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/klinq_top_tb.sv
./obj_dir/Vklinq_top_tb

verilator --binary --timing --assert -Wno-fatal --top-module neuron_tb \
  rtl/klinq_pkg.sv tb/klinq_ref_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/neuron_tb.sv
./obj_dir/Vneuron_tb
```

The package files must come first on the command line.

`klinq_top_tb` runs the full default design: five qubits, 500-sample traces,
and both network sizes. It takes about a minute. It loads random traces,
envelopes and weights over AXI4-Lite and compares every score and state with
`klinq_ref_pkg`. It checks both latencies, and also exercises:
- several qubits triggered together, so they contend for the matched filter;
- starts that arrive while a qubit is busy, which must be ignored;
- a clamped activation;
- starts by pin and by register;
- repeated readouts of one qubit;
- both decision outcomes.

The testbench counts each of these events and fails if any of them never
happened.

`klinq_top_duration_tb` runs the same sequence with a different readout
duration per qubit: 1 µs for qubits 1 and 2, 950 ns for qubit 4, and 550 ns
for qubits 3 and 5. The windows are `AVG_N_Q = '{32, 5, 2, 31, 18}`. The
latencies stay the same, because the network sizes do not change.

The unit testbenches use smaller sizes where the size does not
matter (for example a 3-qubit matched filter with 8-sample traces). The
exception is `student_fnn_tb`, which runs network A at full size.

## Changing the design

- **Trace length and averaging window:** `TRACE_LEN`, `AVG_N_SA/GROUPS_SA` and
  `AVG_N_SB/GROUPS_SB` on `klinq_top`. `AVG_N × GROUPS` must not exceed
  `TRACE_LEN`.
- **Shorter readouts, per qubit:** a shorter readout keeps the network's
  input size and shrinks the averaging window instead. `AVG_N_Q[q]`, when
  non-zero, sets the window of qubit q. For example, a 950 ns readout has
  475 samples, which gives 15 windows of 31 samples for network A. A window
  that does not divide the trace is rounded down. The host writes zeros into
  the envelope beyond the qubit's duration, so the unused samples do not
  reach the matched filter either. This is chosen at elaboration time, not
  at run time.
- **Which qubits get the large network:** `FNN_B_SEL`.
- **Hidden layer widths:** `HID1`, `HID2`. The parameter layout follows
  automatically (`n_params` in the package).
- **Multiply phases:** `MUL_STAGES` in the package. Fewer phases mean more
  multipliers and lower latency.

## Where this design had to choose

The published description leaves the following points open. Each is resolved
here as stated.

- **Input order.** Inputs are ordered: I points, then Q points, then the
  feature.
- **Decision rule.** The state is 1 when the output score is positive.
- **Normalization constants.** `x_min` and the shift are per component, and
  the shift only ever moves right. The matched-filter feature is not
  normalized.
- **Sample usage.** Network A drops the last 20 samples of each component.
- **Matched-filter scheduling.** The arbitration is round robin.
- **Control and interfaces.** All handshakes, the memory map, the AXI4-Lite
  variant and reset are this design's own. Reset is synchronous and
  active-low, and it clears control state only.
- **Matched-filter position.** One block diagram draws the matched filter in
  front of the averaging stage. The text describes it as a separate feature
  computed at the same time. This design follows the text.
- **Latency.** The latency does not match the reported 32 ns (see above).
- **Resources.** The paper gives DSP and LUT counts that were not used as
  targets here.
