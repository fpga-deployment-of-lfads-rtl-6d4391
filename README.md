# Real-time LFADS inference in RTL

LFADS (Latent Factor Analysis via Dynamical Systems) models a trial of
multi-channel neural spike counts as the output of a low-dimensional dynamical
system. A recurrent encoder summarises the whole trial into an initial
condition. A recurrent generator (the decoder) is then run forward from that
condition without any input. At every time step it emits a few latent factors
and, from them, one firing rate per recorded channel. For closed-loop
neuroscience experiments, the time from the end of a trial to its last
inferred rate has to be far below the millisecond sampling interval of the
recording.

This RTL implements the autoencoder variant of LFADS (no Gaussian sampling and
no controller network) for a 70-channel, 73-step trial:

| stage | shape | module |
|---|---|---|
| input stream, one time step per beat | 70 values | `stream_fifo` |
| trial buffer with forward and reversed read | 73 x 70 | `seq_buffer` |
| bidirectional GRU encoder | 2 x 64 units | `bigru_encoder`, `gru_cell` |
| latent layer (initial state of the decoder) | 128 -> 64 | `dense_mac` |
| decoder GRU, all-zero input, 73 steps | 64 units | `gru_cell` |
| factor layer f_t | 64 -> 4 | `dense_mac` |
| log-rate layer log r_t | 4 -> 70 | `dense_mac` |
| exponential r_t | 70 | `exp_unit` |
| output stream, one time step per beat | 4 + 70 + 70 values | `stream_fifo` |

All values, weights and biases are two's-complement fixed point
`<16,6>`: 16 bits, of which 6 are integer bits including the sign, so the
resolution is 2^-10. At the default sizes a trial takes 5,661 clock cycles
from its first input beat to its last output beat, or 28.3 us at 200 MHz.
The latency target this was sized against is 41.97 us (8,394 cycles).

## Top-level interface (`lfads_top`)

* **Parameter load.** `w_en` writes one 16-bit value, `w_data`, into the
  layer chosen by `w_layer` (numbering in `lfads_pkg::layer_e`). If `w_bias`
  is 0 it goes to weight `W[w_in][w_out]` (input index, output index). If
  `w_bias` is 1 it goes to bias `b[w_out]`. Every parameter must be written
  before the first trial. Nothing is initialised by reset.
  There are nine layers:
  * 0 to 3: the input and recurrent kernels of the forward and backward
    encoder cells.
  * 4: the latent layer.
  * 5: the decoder's input dense. Only its bias has any effect, because the
    input is zero.
  * 6: the decoder's recurrent kernel.
  * 7: the factor layer.
  * 8: the log-rate layer.

  The 3 x 64 outputs of each GRU kernel are ordered z (update), r (reset),
  h (candidate), as in Keras.
* **Input stream.** `in_valid`/`in_ready`/`in_data[70]` carry one time step
  per beat. 73 beats make one trial, and trials follow each other with no
  separator.
* **Output stream.** `out_valid`/`out_ready` carry 73 beats per trial. Each
  beat holds `out_factor[4]`, `out_lograte[70]` and `out_rate[70]` for one
  step. `trial_done` pulses when the last beat of a trial enters the output
  FIFO.
* `rst_n` is an asynchronous, active-low reset.

## Arithmetic

Number formats are parameters: `DW`/`DI` for data and state, `WW`/`WI` for
weights and biases. One multiply-accumulate works like this:

* The product of a `<DW,DI>` value and a `<WW,WI>` value keeps all its bits.
* The accumulator is `DW + WW + clog2(N_IN+1) + 1` bits wide, so a dot
  product of any length cannot overflow.
* The bias is shifted into the product's binary point and added.
* The sum returns to the data format in two steps. First it is truncated,
  with an arithmetic shift, toward minus infinity. Then it saturates to the
  16-bit range.

Every addition and product in the GRU gates uses the same
truncate-then-saturate rule. Saturation is a deliberate choice, because
overflow would otherwise wrap.

The activations are the *hard* quantised forms. They use no multiplier and
no table:

* `hard_sigmoid(x) = clip(x/2 + 1/2, 0, 1 - 2^-10)`. This is a shift, an
  added constant and a clamp.
* `hard_tanh(x) = 2*hard_sigmoid(x) - 1`, which clips to `[-1, 1 - 2^-9]`.

With a 4-bit output these give the staircases 0 to 0.9375 and -1 to 0.875.

A GRU step (`gru_gate`, one instance per unit) is

```
z  = hard_sigmoid(Wz x + bz + Uz s + cz)
r  = hard_sigmoid(Wr x + br + Ur s + cr)
h~ = hard_tanh  (Wh x + bh + r * (Uh s + ch))     -- reset after the product
s' = z * s + (1 - z) * h~
```

Here W and b belong to the input dense, and U and c to the recurrent dense.

The exponential computes `2^(x * log2 e)`:

* `log2 e` is held with 16 fraction bits (94548).
* The integer part of the product becomes a shift.
* The fraction is looked up in a 9-point table, `E[k] = round(2^(k/8) * 2^14)`,
  with linear interpolation between points.
* The relative error stays below 0.2%.
* Results above the largest `<16,6>` value (about 32, reached from
  log r of about 3.47) saturate.

## How the datapath is time-shared

This is the part that sets the latency.

`dense_mac` is the only arithmetic engine. It has one MAC lane per output,
and each lane consumes `PAR = 2` inputs per cycle:

* On `start` it latches the input vector.
* It then runs `NK = ceil(N_IN/PAR)` accumulate cycles.
* One more cycle adds the bias and quantises.
* `done` rises on the `NK+1`-th clock edge after the edge that samples
  `start`.

A GRU cell runs its two dense engines side by side. The input dense
(N_IN -> 192) and the recurrent dense (64 -> 192) take 35 and 32 cycles for
the encoder. The 64 gate units then update the state in one cycle.

The two encoder directions run in lock step:

* At step t the forward cell reads row t of the trial buffer.
* At the same time the backward cell reads row 72 - t through the buffer's
  second, reversed read port.
* One encoder step takes `NK + 4 = 39` cycles.
* The encoder finishes in 73 x 39 + 1 = 2,848 cycles.
* Its output is the two final states, forward first.

The decoder is a `gru_cell` whose input is a constant zero (one input, so
its input dense takes a single cycle). It starts from the latent vector.
Each decoder step takes 34 cycles. The readout overlaps it:

* When a step ends, the factor dense latches the new state.
* In the same cycle, the next decoder step starts.
* The log-rate dense (4 -> 70, 3 cycles) and the 70 combinational
  exponentials follow the factor dense.

The readout is therefore hidden behind the decoder, apart from the last
step.

## Flow control between stages

Each stage has a *result held* flag. A stage starts only when three things
hold: its input result is available, it is idle, and its own previous result
has been taken. Everything else follows from that rule:

* **Input backpressure.** The trial buffer is full during encoding, so the
  input FIFO fills and `in_ready` falls.
* **Buffer release.** The buffer empties the moment the encoder finishes. The
  next trial can then load, and can even be encoded, while the current trial
  is still being decoded.
* **Waiting latent vector.** A finished latent vector waits until the
  decoder is free.
* **Output backpressure.** When `out_ready` is low the output FIFO fills.
  Then the log-rate result cannot be pushed, the factor result cannot be
  handed on, and the decoder's new state cannot be taken. The decoder waits,
  and no value is lost.

Assertions in `lfads_top`, `dense_mac` and `stream_fifo` check the
no-overwrite rules.

## Where this departs from, or adds to, the model description

* **Latent layer.** The encoder's two 64-unit directions concatenate to 128
  values, but the latent vector is 64-dimensional. A 128 -> 64 dense layer
  is assumed between them.
* **Activation choice.** Hard activations are used with the `<16,6>` format
  of the deployed build. The hard forms are the only activation hardware
  described; they belong to the quantisation-aware-trained model.
  A post-training-quantised model would normally use table-based sigmoid and
  tanh, which are not provided here. The 10-bit quantisation-aware format
  (activations `<10,3>`, weights `<10,1>`) is selected with the `DW`, `DI`,
  `WW` and `WI` parameters.
* **Rounding.** Truncation and saturation after every operation are
  assumptions, not the model's.
* **Weights are loadable registers.** No trained weights are available. The
  testbenches use random, Lecun-uniform-like weights, so they check the
  arithmetic and control, not the model's accuracy.
* **Latency.** `PAR` is a design choice that sets the latency. The schedule,
  the handshakes and the overlap of trials are also this design's own.
* **Not built.** The FPGA card, its host interface and shell, and the DSP
  primitive mapping are outside the RTL. The "compare with observed spikes"
  step is the training loss.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

`tb/lfads_ref_pkg.sv` holds an independent integer reference model: a dense
layer, a GRU step, the hard activations, a tolerance check of the
exponential, and a class for the whole model.

* `hard_sigmoid_tb`, `hard_tanh_tb`, `exp_unit_tb`: all 65,536 inputs.
* `dense_mac_tb`, `gru_cell_tb`, `bigru_encoder_tb`: random weights. They
  check exact results and exact cycle counts, including saturating cases.
* `stream_fifo_tb`, `seq_buffer_tb`: handshake, ordering, full and empty,
  reversal.
* `lfads_top_tb`: three trials through a reduced model. The sizes are T=6,
  5 channels, 4+4 encoder units, 4 decoder units and 2 factors. The output
  side applies random and long backpressure. The test counts each flow
  control case above and requires every one to happen.
* `lfads_full_tb`: one trial at the default sizes with no parameter
  overrides. All 73 x 74 outputs match the reference bit for bit, and the
  latency is checked against 8,394 cycles. It runs in about half a minute.
* `lfads_qat_tb`: the same full-size trial in the 10-bit format (data
  `<10,3>`, weights `<10,1>`). It is also bit-exact and takes the same
  5,661 cycles.

To simulate with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/lfads_pkg.sv tb/lfads_ref_pkg.sv tb/lfads_full_tb.sv \
    --top-module lfads_full_tb -o sim && ./obj_dir/sim
```

Replace `lfads_full_tb` with any other testbench name. Parameters of
`lfads_top` have the model's sizes as defaults. `PAR` trades multipliers
(192 x PAR per dense engine) against latency. `FIFO_DEPTH` sets the stream
FIFOs.
