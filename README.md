# LUNA qubit-readout accelerator in SystemVerilog

A superconducting qubit is read out by sending a microwave pulse to its
resonator and digitising what comes back. The result is a trace of a few
hundred in-phase (I) and quadrature (Q) samples, and the trace has to be
classified as |0> or |1>. The decision must arrive within nanoseconds, because
mid-circuit measurement and error-correction feedback are waiting for it. It
must also be cheap, because a large machine needs one such classifier per
qubit.

LUNA tackles this with two cheap stages and no multipliers:

1. **Integrator.** The trace is cut into a few windows. Every sample has its
   noisy low bits shifted away, each window is summed in a pipelined adder
   tree, and the sum is shifted down once more. The trace of 2 x 400 samples
   becomes four small integers.
2. **LogicNet.** A small neural network with quantised activations and very
   low fan-in classifies those features. Each neuron sees only a few bits:
   7, 12 or 16 inputs here. Its weights, bias, activation and quantisation
   therefore collapse into one truth table, which synthesis turns into FPGA
   lookup tables. Each layer is then one lookup followed by a register.

The design is fully pipelined, and its latency is a fixed cycle count:
ceil(log2(samples per window)) cycles for the adder tree, plus one cycle per
network layer, plus two cycles to save the result. At the default design
point that is 8 + 4 + 2 = 14 cycles after the last sample of the window.

This RTL implements the published LUNA architecture at its
fidelity-optimised design point. The network's trained contents are not
available, so it holds a deterministic stand-in network (see
[The stand-in network](#the-stand-in-network-and-how-to-replace-it)). All the
hardware is real: the datapath, the widths and the timing. The classification
is only as meaningful as the tables you put in.

## Data path

```
 ADC (demodulated)            luna_capture          luna_integrator                    luna_logicnet             luna_result_store
 adc_i, adc_q 14b  ─────►  keep samples 100..499 ─► per channel, per window:        ─► 56b ─► L0 145 NEQ 7:2  ─► ... ─► save in 2 cycles
 adc_valid_i, trig_i        (shift register,        >>>7 (14b→7b), 200-input tree        L1  40 NEQ 12:2         256-word memory
                             400 x 14b x 2)         (8 levels, 15b), >>>1 (14b)          L2  15 NEQ 12:2         read port
                                                    concatenate 4 x 14b = 56b            L3   1 NEQ 16:2 → state
```

| Stage | Default | Cycles |
|---|---|---|
| Capture window | ADC samples 100 to 499 (400 per channel) | the readout itself |
| Pre-accumulation shift `SHIFT_M` | 7: 14-bit samples become 7-bit | 0 (combinational) |
| Windows `NUM_WIN` | 2 windows of 200 samples | |
| Adder tree | 200 inputs, 15-bit sum | 8 |
| Post-accumulation shift `SHIFT_N` | 1: 15-bit sums become 14-bit features | 0 |
| Feature vector | 2 channels x 2 windows x 14 bits = 56 bits | |
| LogicNet | 145 / 40 / 15 / 1 neurons; fan-in 7 / 6 / 6 / 8; input width 1 / 2 / 2 / 2 bits | 4 |
| Result store | register stage, then memory write | 2 |

## Integrator arithmetic

All samples and sums are two's complement, and both shifts are arithmetic,
so they round towards minus infinity. For window `w` of channel `c`:

```
pre[s]   = x[w*WIN + s] >>> SHIFT_M                 // ADC_W - SHIFT_M bits
sum      = pre[0] + ... + pre[WIN-1]                // + ceil(log2 WIN) bits
feature  = sum >>> SHIFT_N                          // FEAT_W = ADC_W - SHIFT_M + ceil(log2 WIN) - SHIFT_N
feat_o[(c*NUM_WIN + w)*FEAT_W +: FEAT_W] = feature  // c = 0 for I, 1 for Q
```

Every width is derived from the parameters. With the defaults these are the
widths 7, 15 and 14 bits and the 56-bit vector of the reference design.
`N_SAMPLES` must be a multiple of `NUM_WIN`, which an elaboration-time
assertion checks. Of the window counts 1 to 4, three windows therefore need a
start index of 50 (450 samples).

Each adder-tree level adds adjacent pairs. The odd element of a level is
passed up unchanged. Every level is registered and carried at the full output
width; synthesis trims the unused upper bits. The shifts add no register, so
the integrator's latency equals the depth of the tree. A new trace can enter
on every cycle.

## The LogicNet and its bit-level wiring

A LogicNet layer `l` is described by four numbers:

- `WIDTH[l]`: the number of neurons (NEQs, "neuron equivalents").
- `FANIN[l]`: how many sources each neuron reads.
- `INBITS[l]`: how many bits one source carries.
- the output width of each neuron, which is the next layer's `INBITS`. The
  last neuron instead emits `OUTBITS` (2) bits.

A neuron therefore looks up a table of `2^(FANIN*INBITS)` entries, each
`OUTBITS` wide.

The input layer has `INBITS[0] = 1`. Each of the 56 feature bits is one
1-bit source, and each first-layer neuron reads 7 of them. The network is
given the raw two's-complement bits of the four features; there is no
separate input quantiser. The predicted state is the MSB of the final 2-bit
code, so codes 2 and 3 mean |1>.

`luna_logicnet_layer` does the wiring. For every neuron it gathers `FANIN`
source fields from the previous layer's packed bus:

```
neuron n, slot j  <=  x_i[src(l, n, j)*INBITS +: INBITS]
```

It then calls `luna_neq` (the lookup) and registers all outputs together. The
gather is pure wiring. Some sources of a sparse layer feed no neuron at all,
and lint reports them as unused bits.

### The stand-in network and how to replace it

A trained LogicNet consists of its sparse connectivity and one truth table
per neuron. Both come out of training, and neither is available here.
`luna_pkg` defines a deterministic stand-in so that the hardware can be
built, simulated and checked bit for bit:

- **Connectivity.** `neq_source(l, n, j, n_prev, gamma)` returns
  `(base + j*step) mod n_prev`, where `base` and `step` come from a 32-bit
  integer hash of the layer and neuron, and `1 <= step <= n_prev/gamma`.
  This makes the `gamma` sources of each neuron distinct.
- **Truth table.** `neq_truth(l, n, ...)` evaluates the following for the
  table index `code`:
  - slot `j` gives the level `v_j = 2*x_j - (2^INBITS - 1)`;
  - the sum is `bias + sum_j w_j*v_j`, with weights `w_j` in {±1, ±2} and a
    bias in [-8, 7], all taken from the hash;
  - the sum is shifted right by `ceil(log2(2*FANIN*(2^INBITS-1))) - OUTBITS`,
    offset by `2^(OUTBITS-1)` and clamped to `[0, 2^OUTBITS - 1]`.

  This is a quantised hard-tanh neuron.

To deploy a trained network, replace these two functions with your own. For
example, use a `case` over the table index per neuron, generated from the
trained model, and a source table. No module changes.

`luna_neq` evaluates the table as a function of its index (`y = f(x)`) and
does not store a ROM array. The Boolean function, and hence the LUTs it
synthesises to, is the same either way. Filling a 65,536-entry ROM in an
`initial` loop, however, exceeds the compile-time evaluation budget of some
front ends.

## Interface and timing of `luna_top`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (valids, counters, pointer) |
| `trig_i` | in | 1 | the sample on the bus this cycle is sample 0 of a readout |
| `adc_valid_i` | in | 1 | an I/Q pair is on `adc_i`/`adc_q`; gaps are allowed and not counted |
| `adc_i`, `adc_q` | in | 14 | demodulated samples, signed |
| `busy_o` | out | 1 | a readout is being captured; `trig_i` is ignored meanwhile |
| `pred_valid_o`, `pred_state_o`, `pred_code_o` | out | 1, 1, 2 | classifier decision |
| `saved_o`, `saved_state_o` | out | 1, 1 | decision written to the result memory |
| `wr_ptr_o` | out | 8 | next word to be written (wraps at `RESULT_DEPTH`) |
| `rd_addr_i` → `rd_data_o` | in → out | 8 → 3 | asynchronous read of `{state, code}` |

A readout proceeds as follows. Let cycle `c` be the one in which the last
window sample (index 499) is on the bus with `adc_valid_i` high:

| Cycle | Event |
|---|---|
| c + 1 | the capture buffer holds the whole trace (internal `valid`) |
| c + 1 ... c + 8 | the adder tree runs |
| c + 9 ... c + 12 | the four LogicNet layers run |
| c + 13 | `pred_valid_o` is high |
| c + 15 | `saved_o` is high and the word is readable |

Measured from the complete trace, this is 12 cycles to the decision and 14 to
the stored result. For a gap-free stream, a new readout can be triggered in
the cycle right after sample 499. The previous readout then continues through
the pipeline alongside it.

Concurrent assertions state two of these rules in the RTL:
- In `luna_capture`, the trace-valid pulse lasts one cycle and only occurs
  when the buffer is free.
- In `luna_result_store`, every prediction is saved exactly two cycles after
  it arrives, and nothing else is saved.

Simulate with `--assert` to enable them.

## Other design points

The same RTL covers other points of the design space through its parameters:

- **Latency-optimised point.** Use `SHIFT_M=9`, `SHIFT_N=1`, a
  145 / 35 / 15 / 1 network with fan-in 6 / 6 / 6 / 7 and input widths
  1 / 1 / 1 / 2 (one-bit hidden activations). This gives 12-bit features,
  48 feature bits and the same 12 + 2 cycles. `tb_luna_top_latency_cfg` runs
  it.
- **Area-optimised point.** It has one window of 400 samples, a 9-level
  tree and 13 cycles. Its integrator is supported, and
  `tb_luna_integrator` checks it with these settings. Its published network
  (25 / 5 / 5 / 1 neurons with fan-in 6 / 6 / 11) cannot be built under this
  RTL's reading of fan-in as distinct source neurons: a neuron cannot read 6
  or 11 distinct sources from a layer of 5. `luna_logicnet_layer` stops
  elaboration when `FANIN > N_IN`.

## Where this RTL departs from, or adds to, the reference design

Taken from the reference design:
- the two-stage structure;
- the shifts, window sums and pipelined adder trees;
- every default size;
- the NEQ as an X:Y lookup with X = fan-in x input bits;
- one register per layer;
- the 12-cycle compute latency and the fixed 2 cycles to save the result.

Choices made in this implementation:
- **Stand-in network.** The truth tables and connectivity (above) replace
  trained ones, so classification fidelity is not reproduced.
- **Capture buffer.** One sample pair per clock, a trigger that marks sample
  0, gaps allowed, retriggers ignored while busy, and a shift-register
  buffer. The front end of the reference design only says that samples are
  "captured".
- **Signedness and rounding.** Signed samples and floor-rounding shifts.
- **Feature order.** I windows in the low bits, then Q.
- **State decoding.** The state is the MSB of a 2-bit output code.
- **Result memory.** 256 words of `{state, code}`, a wrapping pointer and an
  asynchronous read port. The reference design states only that saving
  takes two cycles.
- **Not included.** The ADC, the demodulator, the signal generator and the
  DAC. The top's `adc_*` ports are where the demodulated stream enters.
- **Not tested.** Timing closure and FPGA resource use (LUTs, flip-flops)
  are not checked here.

## Files

`rtl/`:
- `luna_pkg.sv`: defaults and the stand-in network.
- `luna_capture.sv`, `luna_adder_tree.sv`, `luna_integrator.sv`: the front end.
- `luna_neq.sv`, `luna_logicnet_layer.sv`, `luna_logicnet.sv`: the classifier.
- `luna_result_store.sv`: the result memory.
- `luna_top.sv`: the top level.

`tb/`:
- `luna_ref_pkg.sv`: an independent reference model. It holds the
  integrator arithmetic and a layer-by-layer evaluator of the network
  definition.
- One self-checking testbench per module (`tb_<module>.sv`).
- `tb_luna_top.sv`: the end-to-end test at the default parameters. It
  checks 520 readouts against the model, the exact cycle of every decision
  and save, and that ADC gaps, ignored triggers, back-to-back readouts,
  pointer wrap-around and both states all occur.
- `tb_luna_top_latency_cfg.sv`: the same test for the latency-optimised
  configuration.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/luna_pkg.sv tb/luna_ref_pkg.sv rtl/*.sv tb/tb_luna_top.sv \
    --top-module tb_luna_top -Mdir obj_top
./obj_top/Vtb_luna_top
```

Replace `tb_luna_top` with any other testbench name. The full-size
end-to-end test builds in about 10 s and runs in about 2 s. `verilator
--lint-only -Wall rtl/luna_pkg.sv rtl/*.sv --top-module luna_top` lints the
design. Its remaining warnings are unused package constants and the unread
source bits of sparse layers.
