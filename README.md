# MLPF: a multilayer-perceptron denoising filter inside an event camera

An event camera (DVS) pixel reports a brightness change as an event: the pixel
address, an ON/OFF polarity and a timestamp. In dim scenes most events are
background-activity noise, isolated events with no relation to their
neighbours. If the noise reaches the host, the USB link and the host CPU have
to stay awake just to throw it away. This RTL removes the noise inside the
camera. For each event it looks at the recent history of the 7x7 pixels around
it. A tiny quantized neural network (98 inputs, 10 hidden units, 1 output)
then decides whether the event is signal, which is forwarded, or noise, which
is dropped.

The design follows the published ASIC organisation of the MLP denoising filter
(MLPF) for a 346 x 260 DAVIS camera. It takes 33 clock cycles per event: 30 to
gather the neighbourhood and 3 for the network. At the 833 MHz clock quoted for
a 65 nm implementation, that is about 40 ns per event, or 25 M events/s.

## What the filter computes

The filter keeps a **timestamp+polarity image (TPI)**. This is one 18-bit word
per pixel: the millisecond timestamp of the latest event at that pixel (16 bits)
and its polarity (2 bits: none, ON or OFF). The millisecond time is the
sensor's microsecond timestamp shifted right by 10 bits, so one "ms" is
1.024 ms.

For an event e at (x, y) with time t_e, every pixel of the 7x7 patch around it
gives two network inputs:

* **age** `a`. Let dt = t_e - t_NNb (modulo 2^16), where t_NNb is the
  neighbour's stored timestamp. The age window is tau = 2^k ms, with k = 0..8,
  so tau runs from 1 to 256 ms; the default is 64 ms.
  If dt < tau, then `a = 15 - (dt >> (k-4))`, in units of 1/16. For tau < 16 ms
  the shift goes left instead. The age therefore falls linearly from 15/16 for
  a fresh neighbour to 0 at the edge of the window. It is 0 for older pixels,
  for pixels that never fired, and for pixels outside the sensor.
* **polarity** `p`. This is +1 for ON and -1 for OFF, for neighbours inside
  the window, and 0 otherwise. The centre pixel's polarity is always that of
  the event being classified, so the network can tell whether the event agrees
  with its neighbours. +1 does not fit the 5-bit input format, so it saturates
  to +15/16; -1 is exact.

The 98-element input vector has the 49 ages first and then the 49 polarities,
in the same pixel order: `(dy+3)*7 + (dx+3)`. After the vector is formed, the
event's own timestamp and polarity are written into the TPI.

The network is the following:

| layer  | computation | format |
|--------|-------------|--------|
| input  | ages and polarities | 5-bit signed, 4 fraction bits |
| hidden | `h_j = relu4( sat16( sum_i x_i*W1[j][i] + B1[j] ) )`, j = 0..9 | accumulator 16-bit signed with 10 fraction bits; `relu4` gives 4-bit unsigned fraction, floor, clamped at 15/16 |
| output | `y = sat16( sum_j h_j*W2[j] + B2 )` | 16-bit signed, 10 fraction bits |

All weights and biases are 5-bit signed with 4 fraction bits. The trained
network ended in a sigmoid. The hardware leaves it out, because only the
comparison `y >= t_mlpf` is needed; t_mlpf is a 16-bit signed input in the same
format. A higher threshold keeps less signal and lets through less noise.

## Reading a 7x7 patch two pixels per cycle

This is the part that sets the latency. An SRAM macro gives one read port.
With one SRAM per column, all 7 pixels of a patch row could be read in one
cycle, but on silicon that means hundreds of small macros. This design uses two
1W1R SRAMs instead: each has one read port and one write port, and each is built
from 2048 x 18-bit banks.

The image is split by **column parity**:

* side 0 holds the even columns and side 1 the odd ones;
* inside a side, pixel (x, y) is word `y*173 + x/2`;
* the word index bits above the low 11 select one of 22 banks, and the low 11
  bits select the word in that bank.

Both sides together have 44 banks and 90,112 words, for 89,960 pixels. Any 7
adjacent columns hold 4 columns of one parity and 3 of the other. Each cycle,
one side reads a pixel from the "4" group and the other side reads a pixel from
the "3" group, so one patch row takes 4 cycles:

| cycle in row | side with 4 columns | side with 3 columns |
|---|---|---|
| 0 | dx = -3 | dx = -2 |
| 1 | dx = -1 | dx =  0 |
| 2 | dx = +1 | dx = +2 |
| 3 | dx = +3 | idle    |

The timeline of one event (cycle 0 is the cycle it is accepted) is as follows:

| cycle | action |
|---|---|
| 0 | `evt_in_vld && evt_ready`: event and its ms timestamp are registered |
| 1-28 | 28 read cycles, 7 rows x 4, up to 2 reads per cycle; reads outside the sensor are not issued |
| 2-29 | read data return one cycle later; ages and polarities are written into the vector |
| 30 | vector valid (`mlp_data_vld`); the event is written into the TPI |
| 31 | hidden layer registered |
| 32 | output registered |
| 33 | `mlp_pred_vld`; the decision is made and a signal event appears on `evt_out`; the next event can be accepted in this same cycle |

The write in cycle 30 comes after all reads of the event, and the next event
reads no earlier than cycle 34, so no read can see a half-updated image. Each
event uses 49 reads at most and one write.

After reset, the TPI writes zero into every bank in parallel for 2048 cycles.
Zero is the "no event" code. `evt_ready` stays low until this clear is done.

## Busy events: bypass or block

The sensor side has no back-pressure. An event that arrives while
`evt_ready` is low is handled according to `bypass_mode`:

* `bypass_mode = 1`: the event is sent out unfiltered, with
  `evt_out_filtered = 0`;
* `bypass_mode = 0`: the event is dropped, and `byp_lost` pulses.

"Busy" means that an earlier event is being classified, or that the TPI is
still clearing. The filter is ready again in the cycle it decides, so a bypassed
event never competes with a classified one for the output. The threshold block
still gives the classified event priority, in case it is reused elsewhere.

## Top-level interface (`mlpf_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `evt_in` | in | 19 | `{x[8:0], y[8:0], pol}`, pol = 1 for ON |
| `evt_in_vld` | in | 1 | event present this cycle |
| `ts_us`, `ts_vld` | in | 32, 1 | microsecond timestamp. The latest valid one is kept, and an event in the same cycle as `ts_vld` uses the new value |
| `tau_log2` | in | 4 | age window 2^k ms, 0..8 (6 = 64 ms) |
| `t_mlpf` | in | 16 | decision threshold, signed, 10 fraction bits |
| `bypass_mode` | in | 1 | 1 = pass busy events through, 0 = drop them |
| `evt_out`, `evt_out_vld` | out | 19, 1 | output event |
| `evt_out_filtered` | out | 1 | 1 = classified as signal, 0 = bypassed |
| `evt_ready`, `busy` | out | 1 | an event now would be classified; an event is in flight |
| `cls_signal`, `cls_noise`, `byp_lost` | out | 1 | one-cycle status pulses, for counters |

## Hierarchy

```
mlpf_top
 ├─ e2mlp            event -> 98-element input vector, TPI read schedule and write-back
 ├─ tpi_memory       two sides x 22 banks, address decoding, self-clear
 │   └─ tpi_sram_bank (x44)   2048 x 18, 1W1R, one-cycle read
 ├─ mlp              98-10-1 network, weights as parameters, 3-cycle latency
 └─ mlpf_threshold   decision and bypass/block
```

`mlpf_pkg` holds the sizes, fixed-point types and default weights.
`tpi_if` is the bundle between `e2mlp` and `tpi_memory`: two read ports,
one per column parity, and one write port.

## How far to trust it, and where it departs from the published design

* **The weights are placeholders.** The published filter uses weights from
  quantization-aware training, and they are not public in numerical form.
  `mlpf_pkg::default_w1/b1/w2` and `DEFAULT_B2` are a hand-made network of the
  same shape: 1001 parameters, 30% of the first-layer weights non-zero. Its
  hidden units respond to recent neighbours and to polarity agreement, so it
  passes events on a moving edge and blocks isolated ones. It reproduces the
  behaviour, not the published accuracy. To use trained weights, override the
  `W1`, `B1`, `W2` and `B2` parameters of `mlp`, or replace the package
  functions. Zero weights cost no logic, because the weights are elaboration
  constants.
* **Number formats.** The specification gives weights as "4 fraction + 1 sign
  bit". The description of its training tool implies 4 bits with 3 fraction
  bits. This design follows the 5-bit form. It is a one-line change in
  `mlpf_pkg` (`WGT_W`, plus the constant scaling in `mlp`).
* **This design's own choices.** The published description does not give the
  following, so they were chosen here:
  - the column-parity split of the TPI and the read order;
  - saturating (not wrapping) accumulators;
  - truncating ReLU quantization;
  - `>=` in the threshold;
  - the polarity code (00 none, 01 ON, 10 OFF);
  - timestamps modulo 2^16 ms, so an event 65.5 s old can look recent again;
  - zero inputs for pixels outside the sensor;
  - the TPI self-clear;
  - the exact pipeline split of the 30 + 3 cycles.
  - the wait for the prediction before the next event is accepted. This adds a
    `mlp_pred_vld` connection into `e2mlp`, which the published block diagram
    does not draw. It gives the published 25 M events/s, one event per 33
    cycles;
  - the configuration ports `tau_log2` and `bypass_mode`, and the status
    outputs. The published diagram shows only the threshold as an input.
* **Not included.** Not included are the SRAM macros as process cells (they are
  arrays here), clock-gating cells (enables only), the sensor and the host
  link. The FPGA organisation of the same filter is also not included: it reads
  7 pixels per cycle from one memory per column and takes 10 cycles per event.
* **Checked by simulation.** The whole filter runs at its full size in
  simulation. A cycle-accurate reference, written separately from the RTL,
  agrees with it on every output of every cycle.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mlpf_pkg.sv tb/tb_mlpf_ref_pkg.sv tb/tb_mlpf_top.sv --top-module tb_mlpf_top
./obj_dir/Vtb_mlpf_top
```

To run a block test, replace `tb_mlpf_top` with one of the following:

* `tb_tpi_sram_bank` tests the bank: random traffic, read latency, hold and
  read-before-write.
* `tb_tpi_memory` tests the full-size memory: clear length and content, then
  two reads and one write per cycle against a reference image.
* `tb_e2mlp` tests `e2mlp` with the real memory. It compares all 98 inputs of
  each event with the reference, at sensor borders and corners, over the whole
  tau range and with latched timestamps. It also checks the 30-cycle latency
  and the stall on `mlp_ready`.
* `tb_mlp` tests the network arithmetic, including saturation, the 3-cycle
  latency and `ready`.
* `tb_mlpf_threshold` tests the decision and the bypass/block rules.
* `tb_mlpf_top` runs end to end at the default sizes: a moving edge plus
  scattered noise, random arrival times, and changes of tau, threshold and
  bypass mode during the run. It predicts `evt_ready` and every output each
  cycle. It also counts signal and noise decisions, bypassed and blocked events,
  events during the clear and border patches, and fails if any of them never
  happened.
  A 4000-cycle stretch with an event on every cycle must yield exactly one
  classified event per 33 cycles (122 in that stretch). With the placeholder
  weights and threshold 0, about 30% of the moving-edge events and 0.1% of the
  scattered events are passed.

`tb/tb_mlpf_ref_pkg.sv` is the reference model. It uses a plain 2-D image, a
division-based age formula and integer network arithmetic, all written without
reference to the RTL.
