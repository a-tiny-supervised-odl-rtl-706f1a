# A tiny supervised on-device learning core with automatic data pruning

A wearable that recognises human activity from motion features works well
for the people it was trained on and worse for new ones: the data drifts.
This core keeps learning on the device. It classifies each sample with a
small single-hidden-layer network. After a drift is detected it retrains
the output layer one sample at a time, using the OS-ELM recursive
least-squares update. The labels for retraining come from a nearby "teacher"
device (a phone, say) over a radio link, and sending a sample costs far more
energy than computing on it. So the core asks the teacher only when its own
prediction is uncertain. The gap between the two largest class probabilities,
`p1 - p2`, serves as the confidence measure. The threshold `theta` that
confidence is compared against tunes itself at run time.

The RTL follows a published design: a 45 nm ODL core for the UCI human
activity dataset (561 input features, 128 hidden nodes, 6 classes, 32-bit
fixed point, seventeen 8 kB SRAMs). The algorithm, the sizes, the pruning
rule and the threshold schedule are taken from that design. The fixed-point
format, the activation functions, the state machine, the memory layout and
all handshakes are choices made here, because the publication does not give
them. The section "Where this RTL departs from or goes beyond the source"
lists each such choice.

## The network

For an input `x` (n values), hidden weights `alpha` (n x N), hidden bias
`b`, output weights `beta` (N x m):

    H = G1(x alpha + b)        hidden layer, N values
    z = H beta                 logits, m values
    O = G2(z)                  class probabilities
    c = argmax O,  p1 = max O,  p2 = second largest O

`alpha` and `b` are never stored. They are random and never trained, so a
16-bit xorshift generator (`s ^= s<<7; s ^= s>>9; s ^= s<<8`) regenerates
them in the same order for every sample. This "hashed" variant is what makes
the core small: at N = 128, storing `alpha` would take 287 kB. The generator
starts from `cfg.seed` at each event. It produces `alpha[0][j] ..
alpha[n-1][j]` and then `b[j]`, one hidden node `j` after another. Each
16-bit state, read as a signed fraction in [-1, 1), is one weight.

- `G1` is a sigmoid, approximated piecewise-linearly with power-of-two
  slopes (the PLAN approximation, `sigmoid_plan`). The approximation steps
  down by 1/256 at |x| = 2.375.
- `G2` is a softmax. The largest logit is subtracted first, then `e^z` is
  approximated as `2^(z log2 e)` with `2^f ~ 1 + f` on the fraction
  (`exp2_approx`, within 6.5 % of `e^z`). One division gives `1/sum` and m
  multiplications normalise.

All numbers are 32-bit two's complement, Q16.16 (16 fraction bits).
Products are scaled back by 16 bits and rounded to nearest. Sums and
products saturate instead of wrapping. Rounding matters here: with
truncation, the recursive update of `P` drifts downward sample after
sample, and in long retraining runs the model can collapse; with rounding
to nearest the drift test below stays stable.

## Operating modes

The core runs once per sensing event (`start` pulse). It is in one of two
modes (`mode_ctrl`):

- **predicting**: the event only predicts. If the external drift detector
  holds `drift` high when the event starts, the mode becomes *training* from
  the next event on.
- **training**: the event predicts, decides whether to ask the teacher, and
  if it gets a label, performs one training step. After `cfg.train_len`
  training-mode events the mode returns to predicting. The publication
  leaves this "training done" condition open and gives a sample count or a
  loss as examples. The count is used here.

## Deciding when to ask the teacher

This is the core's main idea (`prune_ctrl`). In training mode the teacher is
skipped (the sample is *pruned*, nothing is sent and nothing is trained)
only when all three of these hold:

1. at least `cfg.min_train` samples have been trained since training mode
   began (the source uses max(N, 288) = 288);
2. `drift` is low, so the data is not changing right now;
3. `p1 - p2 > theta`: the local prediction is confident.

Conditions 1 and 2 guard against pruning while the model is still far from
the new data. Otherwise `query_valid` goes high and stays high until the
teacher side answers. It answers with `label_valid` and a class index in
`label`, or with `label_skip` if the teacher cannot be reached. A skipped
sample is dropped; retrying it is up to the host.

`theta` tunes itself over five levels: 1, 0.64, 0.32, 0.16 and 0.08. It
starts at 1 after reset. At that level nothing is pruned, because `p1 - p2`
never exceeds 1. Each answered or pruned sample is scored:

- **success**: `p1 - p2 > theta`, or the teacher was asked and its label
  equals the local prediction `c`;
- **failure**: the teacher was asked with `p1 - p2 <= theta` and its label
  differs from `c`.

`X = cfg.x_consec` successes in a row (the source uses 10) lower `theta` by
one level. A failure raises it by one level and restarts the count. In
effect, `theta` drops while the local model keeps agreeing with the teacher
and rises as soon as it disagrees on a sample it was unsure about. The
source gives the rule in words. The one-level steps, the restart of the count
after each change, and scoring during the first `min_train` samples are
choices made here. With `cfg.auto_theta = 0` the threshold is fixed at
`cfg.theta_fixed`, which reproduces a fixed-threshold sweep.

Reported per event: `queried`, `pruned` and `trained`. The current
threshold is on `theta` and `theta_idx`.

## The training step

For one labelled sample, with `h` the hidden vector (a row) and `y` the
one-hot label, OS-ELM updates

    P    <- P - P h' (1 + h P h')^-1 h P
    beta <- beta + P_new h' (y - h beta)

`P` is N x N and symmetric. For a single sample the inverse is a scalar, so
the controller computes:

    u = P h'                      N*N multiply-adds
    d = 1 + h u                   N multiply-adds, then inv = 1/d (one division)
    w_j = -u_j * inv
    P_new[j][k] = P[j][k] + w_j u_k           N*N multiply-adds
    beta[j][c] += w_j (z_c - y_c)             N*m multiply-adds

The beta update uses `P_new h' = u / d`, which follows from the P update
itself. This saves a second pass over `P`. `z = h beta` is the logit vector
already computed by the prediction.

`P` lives in two banks. Each row of `P_new` is read from the current bank
and written to the other one in the same cycle, one element per cycle; then
the banks swap roles. The source's memory budget includes two N x N arrays,
and this is how the RTL uses the second one.

## Memory organisation

At the default sizes the storage is 4(2N^2 + Nm + n) bytes = 136,388 bytes
(n = 561, N = 128, m = 6). It is built from seventeen 2048 x 32-bit macros
(`sram_8kb`), grouped by `sram_bank`:

| bank | contents | words | macros |
|---|---|---|---|
| XB | `x` at 0..n-1, `beta[j][c]` at `N_IN_MAX + j*N_OUT_MAX + c` | 1,329 | 1 |
| P0 | `P[j][k]` at `j*N_HID_MAX + k` (current or next) | 16,384 | 8 |
| P1 | the other P bank | 16,384 | 8 |

The vectors H, u, z and O (about 2N + 3m words) are held in registers and
rebuilt at every event. The macros are plain arrays with a one-cycle
synchronous read. A silicon flow would replace `sram_8kb` with its SRAM
macro.

## Interface

`odl_top` (parameters `N_IN_MAX = 561`, `N_HID_MAX = 128`, `N_OUT_MAX = 6`)
has these ports, all synchronous to `clk`. `rst_n` is an asynchronous
active-low reset, and SRAM contents are not reset.

- `cfg` (struct `odl_cfg_t`): run-time sizes `n_in`, `n_hid`, `n_out`, which
  may be anything up to the built maxima; `x_consec` (X); `min_train`;
  `train_len`; `seed`; `auto_theta`; `theta_fixed`. The sizes are sampled at
  `start`.
- host port (`host_en`, `host_we`, `host_sel` = X / BETA / P, `host_addr`,
  `host_wdata`, `host_rdata`): word access while `busy` is low, and also
  while `query_valid` is high. Read data
  arrives one cycle after the request. `P` always means the current bank. Use
  this port to write each new input `x` and to load the initial `beta` and `P`
  (for example `P = I / lambda`, `beta = 0`, or the result of an offline
  batch training).
- event: `start` (pulse), `drift`, `busy`, `done` (pulse), `ev_mode` (the mode
  the event ran in), `pred_class`, `p1`, `p2`, `queried`, `pruned`, `trained`.
- teacher: `query_valid` out; `label_valid`, `label_skip`, `label` in. `x`
  stays in memory during the wait, so the host can read it and send it.
- status: `mode`, `theta`, `theta_idx`, `trained_cnt`.

## Timing

All loops are streamed: every multiply-add takes one cycle, and memory reads
are issued a cycle ahead. The event latency, in cycles with `busy` high and
not counting the teacher wait, is:

| phase | cycles | n=561, N=128, m=6 |
|---|---|---|
| prediction | N(n+2) + m(N+2) + 2m + 52 | 72,908 |
| pruning decision (training mode) | 1 | 1 |
| training step | N(N+2) + N + 50 + N(N+1) + 2Nm | 34,866 |

The division unit takes 49 cycles of each division. At 10 MHz a trained
event takes 10.8 ms. The source reports 36.4 ms for prediction and 171.3 ms
for training at 10 MHz; its schedule is not published, and this RTL does
not try to match it.

## Where this RTL departs from or goes beyond the source

- Q16.16 split, saturation and rounding: chosen here (the source says only
  "32-bit fixed point").
- `G1` = PLAN sigmoid and `G2` = base-2 softmax approximation: chosen here.
  The source names the activations but not their form. The probabilities
  must lie in [0, 1] for the threshold range 0.01..1 to make sense.
- Mapping of xorshift states to weights, generation order, the use of the
  generator for `b` as well, and the seed: chosen here.
- The second N x N array used as a ping-pong P bank, the x/beta/P split
  over the 17 macros, and the vectors held in registers: inferred from the
  published memory sizes, which equal 4(2N^2 + Nm + n) bytes for every N.
- `P_new h' = u/d` instead of a second pass over `P`: algebraically the same
  update.
- Initial training (the batch OS-ELM start, which needs a matrix inverse) is
  not in the core. A host loads `beta` and `P`.
- Threshold tuning steps one level per change and restarts its count after
  any change. IsTrainDone is a count of training-mode events.
- The teacher, the BLE radio, the sensors and the drift detector are
  outside the core and reach it through ports.
- Latency differs from the published figures (see Timing).
- The source treats the logic as stateless, so it could be powered off
  between events. This RTL keeps a little state in flip-flops: the mode,
  the event and trained-sample counters, the theta level and its success
  count. Powering the logic off would need those few registers retained,
  or saved to a memory word.
- Only the hashed-weight variant is built. The stored-`alpha` variant and
  the network without learning, which the source uses for comparison, are
  not.

At the defaults the core can also run N = 32 or 64 (set `cfg.n_hid`).
N = 256 needs `N_HID_MAX = 256`, i.e. 65,536-word P banks (32 macros each).

## Verification

Every module has a self-checking testbench in `tb/`. Expected values come
from `odl_ref_pkg`, a bit-exact reference written independently with 64-bit
integer arithmetic. Each testbench prints `TB_RESULT checks=N failures=M`
and has a watchdog.

- `tb_odl_top`: the whole core at n = 16, N = 8, m = 3. It runs 138 events
  with random class-cluster inputs against a reference model of the full algorithm. Every
  event checks the class, `p1`, `p2`, the mode, the flags, `theta` and the
  exact latency. After every training step all of `beta` and `P` are read
  back and compared. The simulated teacher sometimes disagrees and
  sometimes does not answer. The testbench counts each mechanism (drift
  switch, query, pruning, unavailable teacher, theta down and up, drift
  blocking pruning, return to predicting) and fails if any never occurs.
- `tb_odl_full`: the same test with every parameter at its default
  (561/128/6) and the published pruning settings (X = 10, 288 samples). It
  runs 420 training-mode events, over 40 million cycles, in under a minute
  of simulation. Its inputs come from one cluster per class. In this test
  the teacher gives the true class. Once theta has come down, it gives a
  wrong class again after at least 24 answers, on an event without drift.
- `tb_odl_core`: the controller with plain memories and run-time sizes
  smaller than the built ones.
- `tb_odl_drift`: the use case the core was made for, on synthetic data
  (n = 24, N = 32, m = 6). Six classes are clusters around random means,
  and a new subject shifts every mean. The core first learns from zero
  (beta = 0, P = 4 I). It is then tested on the shifted data, retrained on
  300 shifted samples with automatic pruning (X = 10), and tested again.
  Typical result: close to 100 % before the shift, 65 to 99 % after it,
  100 % after retraining. During retraining only 10 to 20 % of the samples
  go to the teacher. The checks are at least 80 % accuracy, no loss from
  retraining, and fewer queries than samples.
- `tb_odl_theta`: the threshold sweep on the same synthetic data. The state
  after the first training is saved through the host port. Retraining then
  runs once per setting from that same state: fixed theta = 1, 0.5, 0.1,
  0.01, and automatic tuning. In a typical run, theta = 1 and 0.5 query all
  300 samples, while 0.1, 0.01 and the automatic setting query 40 to 44.
  Accuracy is 100 % in every case. With softmax outputs trained towards
  one-hot targets, the gap between the two top probabilities rarely
  exceeds about 0.35. That is why theta = 0.5 prunes nothing.
- Unit tests for the SRAM macro, the bank, the multiply-add unit, the
  divider, the xorshift generator (including its full 65,535 period), both
  activations, the pruning controller and the mode controller.

To simulate, for example:

    verilator --binary --timing --assert --top-module tb_odl_top \
        rtl/odl_pkg.sv tb/odl_ref_pkg.sv rtl/*.sv tb/tb_odl_top.sv
    ./obj_dir/Vtb_odl_top

The RTL uses only `logic`, `always_ff`/`always_comb`, one package of shared
types (`odl_pkg`) and a few concurrent assertions (the configuration fits
the built sizes, the teacher label is in range, the divider is never
restarted while busy).

## Files

| file | role |
|---|---|
| `rtl/odl_pkg.sv` | word format, memory request struct, configuration struct, theta levels, saturating arithmetic |
| `rtl/odl_top.sv` | the core: controller plus 17 macros |
| `rtl/odl_core.sv` | state machine and datapath for prediction, labelling, training |
| `rtl/prune_ctrl.sv` | teacher-query decision and threshold tuning |
| `rtl/mode_ctrl.sv` | predicting/training mode and sample counters |
| `rtl/fxp_mac.sv`, `rtl/fxp_div.sv` | multiply-add and division units |
| `rtl/xorshift16.sv` | weight generator |
| `rtl/sigmoid_plan.sv`, `rtl/exp2_approx.sv` | activation functions |
| `rtl/sram_bank.sv`, `rtl/sram_8kb.sv` | memories |
| `tb/odl_ref_pkg.sv` | bit-exact reference arithmetic used by the testbenches |
| `tb/tb_*.sv` | testbenches (see Verification) |
