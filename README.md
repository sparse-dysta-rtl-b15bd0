# A sparsity-aware hardware scheduler for multi-DNN accelerators

Several DNNs often share one accelerator (NPU), for example a phone's speech
assistant and its camera pipeline, or many users' requests in a data centre. The
scheduler decides which request's next layer runs, and it needs to know how long
each request still has to run. With sparse networks that time is not fixed. It
depends on the weight-sparsity pattern each model was pruned with, and on
activation sparsity, which changes from input to input. For example, a dark image
produces more zeros after ReLU, and a short prompt gives a sparser attention matrix.

The scheduler here works on two levels:

* **First level, in software on the host.** When a request arrives, the host looks up
  the average latency `Lat` of the request's model and sparsity pattern. It gives
  the request an initial score `Lat + beta * (SLO - Lat)` and passes the request to
  the hardware.
* **Second level, the hardware in this repository.** It sits between the host and
  the NPU. Each time the NPU finishes a layer, the hardware does three things:
  1. It counts the zeros in that layer's output and uses the count to correct its
     estimate of the running request's remaining time.
  2. It rescores every waiting request.
  3. It starts the next layer of the request with the lowest score. That request
     may differ from the one that just ran, so preemption happens at layer
     granularity.

The whole scheduler is a few thousand gates plus some small memories. All its
arithmetic is half-precision floating point (FP16).

## The score

For each queued request `i`, the hardware computes at time `t`:

```
score_i = AvgLat(model_i, layer_i) * gamma_i
        + beta * ( (DDL_i - t)  +  (t - ExeClk_i) * RecipNormIso_i )
          ^^^^     ^^^^^^^^^^      ^^^^^^^^^^^^^^^^^^^^^^^^^^^^^^^^^
          weight   slack            waiting-time penalty
```

* `AvgLat(m, j)` is the average time a request of model-pattern pair `m` still needs
  from layer `j` onward. It comes from the **latency table**.
* `gamma_i` is the request's **sparsity coefficient**. It is 1.0 on arrival. After
  every layer the request runs, it becomes the layer's measured sparsity divided by
  that layer's average sparsity (the "last-one" rule: only the most recent layer
  counts). A request that turns out sparser than usual gets a smaller remaining-time
  estimate.
* `DDL_i` is the absolute deadline (arrival time plus latency SLO). A tight
  deadline makes the slack term small, which pulls the request forward.
* `ExeClk_i` is the last time the request ran (or its arrival time).
  `RecipNormIso_i` is `1 / (T_isolated * queue length)` and is precomputed by the
  host. Together they form the penalty. The request that just ran has zero waiting
  time, so it has the smallest penalty. This discourages needless preemption.
* `beta` is a host-set weight. A large `beta` favours deadlines, which reduces SLO
  violations. A small `beta` favours short jobs, which reduces normalised turnaround.

The coefficient of the request that just finished a layer is

```
gamma = (zeros * 2^-10) * (2^10 / shape(m, j))  *  (1 / AvgSparsity(m, j))
         monitor output    shape table             sparsity table
```

`shape` is the number of activations the layer produces. The hardware divides by
two constants: the layer shape and the average sparsity. Both tables therefore store
reciprocals, computed offline. No divider is built.

Lower scores run first. On ties, the lower queue slot wins.

## One decision, step by step

The `scheduler_controller` state machine does the following:

1. **Idle.** The controller accepts new requests from the host
   (`req_valid`/`req_ready`) into the lowest free queue slot. A new request's
   waiting-time clock starts at its arrival.
2. **Layer result.** The runtime monitor holds the zero count of the finished layer
   until the controller takes it. The controller samples the current time once, and
   that value is the time `t` for the whole decision.
   * If the layer was the request's last one, the request leaves the queue and the
     controller reports its tag on `done_valid`/`done_tag`.
   * Otherwise the compute unit computes `gamma` (**coefficient mode**, 2 clocks).
     The request's coefficient, next-layer index and `ExeClk = t` are written back.
3. **Sweep.** The controller visits all queue slots, one per clock. The compute
   unit, now in **score mode**, is fully pipelined. Each new score is written back,
   and the controller keeps a running minimum.
4. **Dispatch.** The controller pulses `npu_start` with the winner's tag, model and
   layer. If the winner is not the request that just ran, `ev_preempt` is also
   asserted.

A decision therefore takes **FIFO_DEPTH + 4 clocks** after an ordinary layer and
**FIFO_DEPTH + 2** after a final layer. With the default depth of 64, that is 68
clocks, or 0.34 µs at 200 MHz. This is negligible next to a DNN layer.

If the NPU is idle when requests arrive, the controller dispatches by the **stored
scores**, without recomputing them. A new request is therefore placed by the initial
score the host gave it, and the dynamic rescoring takes over from its first finished
layer onward.

## The shared compute unit

The coefficient and the score are never needed in the same clock. A single datapath
therefore serves both. It has three FP16 multipliers, two adders and two subtractors:

```
 wait  = t - ExeClk ─┐
                     X RecipNormIso ──┐
 slack = DDL - t ────────────────────(+)── slack_pen
                                          │
              COEF: zeros      ──┐        │
              SCORE: slack_pen ──┴ Mux ─ X(middle) ── Mux ─ b: COEF recip_shape / SCORE beta
                                          │
 COEF: middle product ─┐                  │
 SCORE: AvgLat ────────┴ Mux ─ X(left) ── DeMux ──► COEF: gamma
 COEF: 1/AvgSparsity ──┐          │
 SCORE: gamma ─────────┴ Mux ─────┘       └──► SCORE: (+) with middle product ──► score
```

In **coefficient mode**, only the middle and left multipliers are used. The middle
one forms the measured sparsity. That value is routed back through the left
multiplier's input multiplexer and multiplied by the reciprocal average sparsity.
The left multiplier's output demultiplexer sends the result out as `gamma`.

In **score mode**, every unit is used:
* the left multiplier forms the latency term;
* the middle multiplier applies `beta`;
* the final adder combines the two.

The results are registered, so a result appears one clock after its operands, and
an operation can be issued every clock.

## Numbers and time

* **FP16 everywhere.** Rounding is to nearest, with ties to even. Subnormals are
  flushed to zero. Overflow gives infinity, and no NaNs are produced.
  `fp16_mul` and `fp16_add` are combinational. `fp16_add` also serves as a
  subtractor.
* **Zero count.** The monitor counts zeros in 32 bits. It then hands the count on as
  `count * 2^-ZERO_SCALE` in FP16, with `ZERO_SCALE = 10`, so layers of up to about
  67 million zeros stay in range. The shape table must be written with
  `2^ZERO_SCALE / shape` to match.
* **Time.** `sys_timer` counts ticks of `cfg_tick_div` clocks and converts the count
  to FP16. All times written by the host (deadlines, latencies) must use the same
  tick. FP16 has real consequences here:
  * Ticks are exact only up to 2048.
  * Above 2048, time advances in steps of 2, 4, ... up to 32 ticks.
  * The count saturates at 65504 ticks.

  Choose the tick so that the run, including every deadline, fits in about 60 000
  ticks. A 1000-request run at 30 requests/s lasts about 33 s, which needs a tick of
  at least 0.5 ms. At 2 requests/s the run lasts about 500 s, which needs a tick of
  at least 7.6 ms. Late in such a run, time differences are resolved only to about
  32 ticks.

## What the host has to provide

Before any request arrives, the host fills the three lookup tables through
`lut_we`/`lut_sel`/`lut_model`/`lut_layer`/`lut_data`. Every table is indexed by
(model-pattern pair, layer):

| table (`lut_sel`) | entry for (m, j) |
|---|---|
| `LUT_LATENCY` | average time, in ticks, that model m needs from layer j to the end |
| `LUT_SPARSITY` | 1 / average output sparsity of layer j |
| `LUT_SHAPE` | 2^ZERO_SCALE / number of output activations of layer j |

The tables are not reset, so every entry the scheduler can reach must be written.
The averages come from offline profiling of representative inputs.

Each request (`host_req_t`) carries:
* `tag`;
* `model`, the model-pattern pair index;
* `score`, the initial score `Lat + beta*(SLO - Lat)`;
* `ddl`, the absolute deadline in ticks;
* `recip_norm_iso`, which is `1/(T_isolated * number of queued requests)` at
  admission.

`cfg_beta` is the score weight.

## Interfaces

| signal | dir | meaning |
|---|---|---|
| `req_valid`, `req`, `req_ready` | in/in/out | request handshake. The controller accepts only while it is idle and the queue is not full. |
| `done_valid`, `done_tag` | out | one-clock pulse when a request's last layer has finished |
| `npu_start`, `npu_tag`, `npu_model`, `npu_layer` | out | one-clock pulse to start a layer |
| `npu_act_valid`, `npu_act_data` | in | the NPU's output activations, `LANES` x `DATA_W` bits per beat, watched for zeros |
| `npu_layer_done`, `npu_layer_last` | in | one-clock pulse at the end of a layer (a beat in the same clock still counts). `last` marks the request's final layer. |
| `queue_count`, `now` | out | requests held; current time in FP16 |
| `ev_preempt`, `ev_coef`, `ev_sweep_update`, `ev_sweep_select` | out | event pulses for performance counters |

Reset is asynchronous and active low. The NPU must not end a new layer before it
has been started. An assertion in the monitor enforces this.

## Parameters

| parameter | default | origin |
|---|---|---|
| `FIFO_DEPTH` | 64 | queue depth used with an Eyeriss-V2-class accelerator in the published evaluation (which also tried 512) |
| `NUM_MODELS` | 16 | own choice: 4 CNNs x 3 pruning patterns = 12 pairs, plus room |
| `MAX_LAYERS` | 64 | own choice: covers ResNet-50's 54 layers |
| `LANES`, `DATA_W` | 8, 8 | own choice: width of the NPU output stream |
| `ZERO_SCALE` | 10 | own choice, see "Numbers and time" |
| `TAG_W`, `MODEL_W`, `LAYER_W` (in `dysta_pkg`) | 8, 4, 6 | own choice |

## Where this design departs from, or fills in, the published description

* **Slack.** The algorithmic description subtracts the remaining time inside the
  slack (`SLO - t - T_remain`). The compute-unit dataflow feeds only the deadline
  and the current time to its subtractor. This RTL follows the dataflow.
* **Penalty normalisation.** The penalty is normalised by the queue length. Because
  the division is done with an offline reciprocal, the host folds the queue length
  in at admission, and the hardware does not renormalise as the queue changes.
* **Table indexing.** The latency table is indexed per layer, not only per model, so
  that the estimate shrinks as a request progresses. Which operand of each
  subtractor is the minuend, and which two multipliers serve coefficient mode, are
  read from the datapath drawing.
* **Own choices.** The following are this design's own choices:
  * slot organisation of the request "FIFOs" (any slot can be dispatched or retired);
  * state machine, handshakes, table write port and time base;
  * idle-NPU dispatch by stored scores;
  * zero-count scaling;
  * rounding and exception handling.
* **Memory size.** The published implementation reports 0.5 KB of scheduler RAM.
  This design uses more: 6.1 Kbit of queue entries (98 bits each) and 48 Kbit of lookup tables at
  the defaults.
* **Not included.** The first-level scheduler (host software), the host CPU, the NPU
  and the off-chip memory are not part of the RTL. The off-chip-memory link shown
  in the architecture has no scheduler function to implement. The testbenches model
  the host and the NPU behaviourally.

## Files

`rtl/`: `dysta_pkg` (types, FP16 helpers), `fp16_mul`, `fp16_add`,
`compute_unit`, `sparsity_monitor`, `model_lut`, `request_queue`, `sys_timer`,
`scheduler_controller` and the top, `dysta_scheduler`.

`tb/`: one self-checking testbench per block (`tb_<module>.sv`), plus:
* `fp16_ref_pkg` and `dysta_ref_pkg`: FP16 reference arithmetic in `real`,
  rounded per operation;
* `sched_ref_pkg`: a transaction-level model of the scheduling decisions;
* `npu_model`: a behavioural NPU.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* **`tb_dysta_scheduler`** runs the top at its default sizes:
  * 120 requests, the later ones in a burst that overfills the 64-entry queue;
  * a behavioural NPU streams activations with request-dependent sparsity.

  Every dispatch (request, layer, preemption flag), every completion and the clock
  count of every decision are compared with the reference. The test also requires
  each mechanism to occur at least once: preemption, coefficient update, score
  sweep, idle selection, queue-full back-pressure and completion.
* **`tb_workloads`** runs the top at its default sizes on two mixes with the layer
  counts of real networks:
  * an attention mix of 3 model-pattern pairs with 12, 24 and 12 layers;
  * a CNN mix of 4 networks x 3 pruning patterns, with 54, 16, 28 and 35 layers.

  Latencies, sparsities and arrivals are synthetic and scaled down. The test checks
  every decision against the reference, as above, and prints the SLO violation rate
  and the normalised turnaround of each mix.
* **`tb_scheduler_controller`** does the same with an 8-entry queue. It drives the
  monitor results directly.
* **The arithmetic testbenches** compare tens of thousands of random and corner-case
  operations with the real-number reference.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/dysta_pkg.sv tb/fp16_ref_pkg.sv tb/dysta_ref_pkg.sv tb/sched_ref_pkg.sv \
  tb/tb_dysta_scheduler.sv --top-module tb_dysta_scheduler -o sim
./obj_dir/sim
```

Substitute any other `tb_<module>`. All of them finish in well under a second.

## Limits of trust

* The FP16 units have been checked against the stated rounding rules with random
  and corner-case operands, not exhaustively and not against an IEEE test suite.
* The scheduling reference model was written from the same reading of the algorithm
  as the RTL. It confirms that the RTL does what this document says, not that this
  document matches the original authors' implementation.
* No synthesis timing has been run at 200 MHz. In score mode, five FP16 operations
  lie in series before the output register (subtract, multiply, add, multiply by
  `beta`, final add). An FPGA build at 200 MHz will probably need pipeline stages
  inside `compute_unit`, which would lengthen the sweep by the same number of
  clocks.
