# A branch predictor that also predicts brain activity

A brain implant records neurons continuously. Its processor, however, only
has work to do when something interesting happens. For cerebellar Purkinje
neurons, the interesting event is a *synchronization*: several neurons fire
in the same 10ms window. Between those events the processor could sit in
its idle low-power mode, with the pipeline and caches clock-gated. But it
has to be awake *before* a synchronization begins, so that it also records
the activity leading up to it.

The idea here is to reuse hardware the processor already has. A perceptron
branch predictor learns correlations between the outcomes of earlier
branches and the next outcome of a given branch. Predicting whether a
neuron fires in the next epoch, given which neurons fired in the previous
one, is the same problem. So while the processor is idle:

- one bank of the branch predictor (B0) stays powered;
- each of its perceptron entries is given to one neuron;
- the global history register holds "which neurons fired last epoch";
- a small state machine trains and queries the perceptrons once per epoch.

When the perceptrons predict that enough neurons will fire in the next
epoch, the controller wakes the processor one epoch early.

This repository holds synthesizable SystemVerilog for the following parts:

- the banked perceptron predictor, in both its roles;
- the neuronal state machine;
- the epoch timer;
- the power-mode controller that decides between Idle and Nominal operation.

It also has one self-checking testbench per block and two system
testbenches.

## System context

```
 Utah array -> amplifiers/ADC -> DRAM activity buffer (1 bit per needle per epoch)
                                        |
                                        v  mem_req/mem_addr/mem_ack/mem_rdata
   epoch_timer --tick--> neuronal_fsm ----nr_* (entry, train, outcome, history load)
                              |   ^                 |
                     epoch_done,  | nr_pred         v
                   pred_sync,     +------- perceptron_predictor (banks B0..B3)
                   actual_sync                      ^
                              v                     | br_req/br_rsp/br_upd (CPU)
                        power_mode_ctrl --mode, bank_pwr, cpu_clk_en
```

The following are outside the RTL. Their signals are ports of
`brain_predictor_top`:

- the processor core and its caches;
- the DRAM;
- the recording front end (electrode array, amplifiers, ADC);
- the bank power switches.

The front end must write, once per epoch, one bit per electrode needle into
the activity buffer. The bit is 1 if that needle saw a spike during the
epoch. The buffer starts at `ACT_BUF_BASE` (0x2000_0000). The 100 bits are
packed LSB-first into four 32-bit words.

Default numbers (package `bp_pkg`):

| parameter | default | meaning |
|---|---|---|
| `NUM_BANKS` | 4 | predictor banks B0..B3; only B0 is powered in Idle |
| `BANK_ENTRIES` | 32 | perceptrons per bank, one per neuron in Idle |
| `HIST_LEN` | 32 | history bits = weights per perceptron (plus a bias weight) |
| `WEIGHT_BITS` | 8 | one's-complement weights, range -127..127 |
| `THETA` | 75 | training threshold, floor(1.93*32+14) |
| `NUM_NEURONS` | 32 | neurons tracked |
| `NUM_NEEDLES` | 100 | needles of the electrode array (10x10) |
| `SYNC_NEURONS` | 4 | neurons that must fire in one epoch for a synchronization |
| `EPOCH_CYCLES` | 3,000,000 | 10ms at 300MHz |
| `CAPTURE_EPOCHS` | 50 | 500ms of Nominal operation after a synchronization |

One bank is 32 perceptrons × 32 weights × 8 bits = 1KB, plus one bias byte
per perceptron.

## The perceptron and its two uses (`bp_lookup_update`, `perceptron_bank`, `branch_history`, `perceptron_predictor`)

Each perceptron is a vector of `HIST_LEN+1` signed weights: a bias w0 and
one weight per history bit. A lookup computes

    y = w0 + sum over i of x_i * w_i

where x_i = +1 if history bit i-1 is 1, and x_i = -1 if it is 0. The
prediction is "taken" (or "fires") when y >= 0.

A perceptron is trained when its prediction was wrong, or when |y| <= THETA
(a weak decision):

- each weight moves one step towards agreeing with its input and the outcome;
- the bias moves one step towards the outcome;
- weights saturate at ±127.

Weights are stored in one's complement. Multiplying a weight by x = -1 is
then a bitwise inversion.

Parameter `BIPOLAR=0` switches the input coding to x ∈ {0,1}. A history bit
of 0 then contributes nothing. This matches the small worked example in the
paper's perceptron figure, and `tb_bp_lookup_update` reproduces that
example (y = 2). The default is the conventional ±1 coding, because the
stated training rule ("agree / disagree with x_i") only has meaning with
it.

`perceptron_bank` is one bank as a register array. It has two asynchronous
read ports (lookup and update) and one write port. While its power enable
is off, it reads as zero and is cleared, just as a power-gated SRAM loses
its contents. `branch_history` is the global history register:

- in branch mode it shifts in each resolved outcome;
- in neuronal mode it is loaded in parallel with the neuron firing vector.

`perceptron_predictor` puts these together.

- **Branch mode.** The PC selects a bank and an entry: `pc[7:6]` is the
  bank and `pc[5:1]` the entry, for halfword-aligned Thumb code. A
  prediction is returned one cycle after the request, together with the
  history snapshot it used. The CPU hands that snapshot back with the
  resolved outcome. The update path then recomputes y from the snapshot,
  trains the entry in the same cycle, and shifts the outcome into the
  history.
- **Neuronal mode.** The neuronal FSM addresses B0 directly by neuron
  number. The lookup result is combinational. A training write happens at
  the next clock edge.

## The neuronal FSM (`neuronal_fsm`): one epoch, step by step

This is the part that turns a branch predictor into a neuron predictor.

**Calibration.** After the implant is installed, the processor works out
which needles actually sit on a Purkinje neuron. It writes that
information with a single store of a 100-bit mask (`cfg_we`, `cfg_mask`).
Neuron *n* is the *n*-th set bit of the mask, counted from needle 0. At
most `NUM_NEURONS` neurons are used.

**Each epoch**, on the timer tick, the FSM runs through these states:

1. `S_READ` reads the four activity-buffer words. It holds `mem_req` with
   a stable address until `mem_ack`; `mem_rdata` is valid in the ack
   cycle. An assertion checks this rule.
2. `S_MAP` compresses the needle bits through the mask into the 32-bit
   outcome vector: bit *n* tells whether neuron *n* fired in the epoch that
   just ended.
3. `S_UPDATE` trains neuron *n*'s B0 perceptron with outcome bit *n*, for
   every neuron in turn (one neuron per cycle). The history register still
   holds the *previous* epoch's outcome vector, so each perceptron learns
   "what happened last epoch → whether I fire this epoch".
4. `S_LOAD` loads the new outcome vector into the history register.
5. `S_PREDICT` looks up every neuron's perceptron against the new history,
   one per cycle, and collects the predictions in `pred_vec`.
6. `S_DONE` pulses `epoch_done`. `pred_sync` is set when at least
   `SYNC_NEURONS` neurons are predicted to fire next epoch. `actual_sync`
   is set when at least that many fired in the epoch just ended. Both are
   counts from `sync_detector`.

With memory latency L, an epoch's work takes about 4·(L+1) + 2·32 + 4
cycles. That is about 0.003% of a 3,000,000-cycle epoch, so the FSM is idle
almost all the time.

The paper describes updating at the start of an epoch and predicting at
its end. Here both happen back to back at the epoch boundary. The effect is
the same: the update uses the outcome of the epoch that just ended, and the
prediction is for the epoch that has just started.

**History across a wake-up.** In Nominal operation the CPU owns the
predictor. Its branches shift the history register, so the neuron vector in
it is lost. The FSM keeps the last outcome vector it read, because it also
reads the activity buffer in branch mode (to report `actual_sync`). When
the predictor returns to neuronal mode, the FSM reloads the history from
that vector before the next epoch. The first epoch after the return can
then train straight away.

Without this reload, every false wake-up would skip training. Learning
could then stall in a loop of false predictions; an earlier version of the
design did exactly that in simulation. The paper does not discuss this
point; the reload is this design's choice.

**B0 and the CPU.** In Nominal operation the CPU's branches may map to B0
and overwrite what the neurons' perceptrons learned. The paper does not
say how the two uses share B0. This RTL does not protect B0. The system
testbench keeps the CPU's branches in banks B1–B3 (a software or linker
convention), so that learning can be observed. A design that needs the
protection could steer branch-mode accesses away from B0. That is a
one-line change in the bank decode of `perceptron_predictor`.

## Idle and Nominal (`power_mode_ctrl`)

The controller acts once per epoch, on `epoch_done`. Each epoch that ends
in Idle falls into one of four classes, reported on `ev_valid`/`ev_kind`:

| class | situation | action |
|---|---|---|
| `EV_NOSYNC_OK` | no synchronization, none predicted (or predicted for the *next* epoch) | stay Idle, or wake early if `pred_sync` |
| `EV_SYNC_MISS` | synchronization happened, not predicted | wake at once; the lead-up epoch was not recorded |
| `EV_SYNC_OK` | predicted (processor woke early), and it happened | go on to the capture window |
| `EV_SYNC_FALSE` | predicted, but it did not happen | go back to Idle |

The states are:

- `ST_BOOT`: Nominal after reset. The processor boots, writes the mask and
  asks to sleep (`cpu_sleep_req`).
- `ST_IDLE`: `cpu_clk_en = 0`, `bank_pwr = 0001`, neuronal mode.
- `ST_WAKE_PRED`: Nominal for the predicted epoch.
- `ST_CAPTURE`: Nominal for at least `CAPTURE_EPOCHS` epochs. The
  controller returns to Idle only when the window has passed *and* the
  processor has asked to sleep. A request that arrives early is
  remembered, so it is "held" until the window ends.

In every Nominal state all banks are on, the clock is enabled and the
predictor is in branch mode. The wake-up latency of the core (microseconds)
is not modelled.

## Epoch timer (`epoch_timer`)

The timer is a free-running counter. It gives a one-cycle `tick` every
`EPOCH_CYCLES` cycles. A `restart` input is provided; the top ties it low.

## Where this departs from, or adds to, the paper

- **Prediction rule.** The perceptron figure prints "y ≥ 0 → fires", but
  the text says "non-zero". This design follows the figure.
- **Input coding.** The default uses ±1 inputs, as in the conventional
  perceptron predictor. `BIPOLAR=0` gives the 0/1 arithmetic of the
  figure's example.
- **Bias weight.** There is a bias weight per perceptron, which is standard
  for perceptron predictors. The paper's 1KB budget counts only the 32
  history weights.
- **Chosen by this design, not the paper:**
  - the number of banks (4) and the PC-to-bank mapping;
  - the activity-buffer address and layout;
  - the memory handshake;
  - the mask-to-neuron mapping;
  - the boot state and the sleep handshake;
  - the history reload on re-entry to neuronal mode.
- **Training threshold.** THETA comes from the standard formula for a
  32-bit history. The paper does not give it.
- **Not built:**
  - the Smith, gshare and two-level alternatives the paper compares
    against;
  - the processor, caches, DRAM, ADC, electrode array, power switches,
    flash, radio and battery.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops
itself. It also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/bp_pkg.sv rtl/*.sv tb/tb_neuronal_fsm.sv --top-module tb_neuronal_fsm
./obj_dir/Vtb_neuronal_fsm
```

(`bp_pkg.sv` must come first.) The unit testbenches compare against
independent reference models driven by `$urandom`:

| testbench | what it checks |
|---|---|
| `tb_perceptron_bank` | storage, read ports, power-off clear |
| `tb_bp_lookup_update` | y, prediction, training, saturation against an integer model; the worked example |
| `tb_branch_history` | shift and load |
| `tb_sync_detector` | counts and thresholds 2/4/8/10 |
| `tb_epoch_timer` | tick period |
| `tb_neuronal_fsm` | memory reads, mask mapping, the update/predict sequence, sync flags |
| `tb_perceptron_predictor` | both modes against a reference predictor |
| `tb_power_mode_ctrl` | every transition and event class |

`tb_brain_predictor_top` runs the whole design, with these settings:

- all sizes at their defaults;
- a 200-cycle epoch and a 5-epoch capture window, to keep it short;
- 900 epochs of synthetic activity, with random single spikes and
  "lead-up" epochs (neurons 0 and 1) that are usually followed by a
  synchronized epoch (neurons 0–5).

It fails if any mechanism never occurs:

- each of the four event classes;
- training;
- an early wake-up;
- the return to Idle;
- a held sleep request;
- bank power-down;
- branch predictions.

It also requires that, in the later part of the run, correctly predicted
synchronizations outnumber missed ones; that is, the perceptrons must have
learned the lead-up pattern.

`tb_brain_predictor_full` uses every default, including 3,000,000-cycle
epochs and the 50-epoch window. It takes the design through one complete
operation:

1. boot and calibration;
2. Idle prediction;
3. a wake-up;
4. a full 500ms capture window;
5. the return to Idle, followed by three more Idle epochs.

That is about 57 epochs, or 170 million cycles. It prints one line per
epoch. Its testbench processes sleep between the FSM's short bursts of
activity, so the simulator spends its time on the design alone.
