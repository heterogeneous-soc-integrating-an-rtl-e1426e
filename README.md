# An AER dataset player for the ReckOn recurrent-SNN accelerator on a Zynq FPGA

ReckOn is a small recurrent spiking neural network accelerator that learns
on chip. It takes input spikes one at a time on an address-event (AER) bus
and advances its network one time step per `TIME_TICK` pulse. It also
expects a handful of control lines that say when a sample starts and ends,
when its output should be averaged, and when it may learn. To train and test
it on a whole dataset, something has to turn each stored recording into
that stream of spikes, ticks and control levels at the right time steps,
sample after sample. It also has to collect the network's answer for each
sample and keep count of how many were right.

This RTL is that "something", placed in the programmable logic of a Zynq-7000
next to ReckOn. The ARM cores keep the dataset in DRAM and write it one batch
at a time into a block-RAM buffer. A hardware state machine, the **AER
decoder**, then plays the batch into ReckOn with cycle-level timing. When the
batch is used up, the decoder gives control back to software, which writes
the next batch. The software decides *what* is played: data, batch sizes,
epoch counts, and training versus test. The hardware decides *when*: time
steps, handshakes and per-sample control.

```
  ARM (Linux) --AXI--+-- BRAM controller ==> buffer_bram ==> aer_decoder ==> ReckOn AER in / control
                     +-- GPIO  <== NEW_EPOCH/NEW_BATCH/TEST/STOP, EPOCH_DONE/BATCH_DONE ==> aer_decoder
                     +-- Quad SPI ==> spi_param_bank ==> (run-time parameters) ==> aer_decoder
                                  \=> ReckOn's own SPI slave (weights, network config)
  ReckOn OUT_DATA ==> aer_output_capture (inside aer_decoder) ==> EPOCH_ACC ==> logic analyser
```

`reckon_soc_pl` is the top module: buffer, parameter bank and decoder. ReckOn
itself, the ARM system, the AXI bridges and the logic analyser are not
included. Their signals are ports of `reckon_soc_pl`.

## Event words

The buffer holds 32-bit words. Each word is one event of one sample:

| bits    | meaning                                                           |
|---------|-------------------------------------------------------------------|
| [31:24] | code: `0x03` spike, `0x02` label, `0x01` end of sample            |
| [23:12] | spike: input neuron address. Label: class index. End: unused.     |
| [11:0]  | target time step (tick) of the event in its sample                |

A sample is a sequence of words ending with an end-of-sample word. The words
of one sample must have non-decreasing ticks. The end word's tick is the
sample's length in time steps. A label can come anywhere before the end
word; in practice it comes first. Only the low 8 bits of the address field
reach ReckOn (`AERIN_ADDR` is 8 bits wide). Words with any other code are
skipped, so padding or header words do no harm. Ticks are 12 bits, so a
sample can last at most 4095 time steps.

## The decoder state machine

States are `IDLE, READ, TICK, SPIKE, LABEL, END_S, END_B, END_E`
(`reckon_soc_pkg::dec_state_e`).

* **IDLE.** A rising edge on `NEW_EPOCH` clears all counters and starts
  reading at buffer word 0.
* **READ.** Fetches one word, taking two clocks because the BRAM has one
  clock of read latency. If this is the first word of a sample, `SAMPLE`
  rises and the tick counter restarts at 0. The code selects the next state.
* **TICK.** Only spikes pass through TICK. It issues `TIME_TICK` pulses until
  the tick counter equals the spike's target tick. Then it goes to SPIKE.
* **SPIKE / LABEL.** A 4-phase handshake puts the address (or the label, with
  `AERIN_TAR_EN` high) on `AERIN_ADDR`: REQ rises, ACK rises, REQ falls, ACK
  falls. Labels are sent at once, without ticking. The label is also kept for
  the accuracy count.
* **END_S.** Ticks up to the end word's tick, then lowers `SAMPLE`. ReckOn
  answers with its inference on `OUT_DATA`/`OUT_REQ`, and the decoder
  acknowledges with `OUT_ACK`. A result equal to the stored label adds one to
  the accuracy counter. The sample counters then advance.
  - If the batch (`SPI_BATCH_SIZE` samples) or the epoch (`SPI_N_SAMPLES`
    samples) is complete, go to END_B.
  - Otherwise, go straight back to READ for the next sample.
* **END_B.** `BATCH_DONE` is high.
  - If the epoch is complete, go to END_E.
  - Otherwise, wait for a rising edge on `NEW_BATCH`: software has refilled
    the buffer. Reading restarts at word 0.
* **END_E.** On entry, the accuracy counter is copied to `EPOCH_ACC` and
  cleared, and the epoch counter advances. `EPOCH_DONE` is high.
  - A rising edge on `NEW_EPOCH` starts the next epoch at word 0.
  - Once `SPI_N_EPOCHS` epochs have run and `STOP` is high, go to IDLE.

### Time steps and ReckOn's readiness

`aer_tick_gen` issues the ticks. A tick is sent only when both conditions
hold:

* ReckOn has `TIMING_ERROR_RDY` high, meaning it has finished the previous
  time step.
* At least `SPI_TIMING` clocks have passed since the last tick. The floor is 2
  clocks, so that ReckOn can drop its ready flag in between.

Each tick is a one-clock pulse. The tick counter advances at the same edge.
So the tick rate is set either by ReckOn's computation time or by
`SPI_TIMING`, whichever is slower. No tick is ever sent during an AER
handshake.

### Learning and inference windows

While `SAMPLE` is high and the tick counter has reached `SPI_LABEL_DELAY`:

* `INFER_ACC` is high: ReckOn averages its output neurons for the inference.
* `TARGET_VALID` is also high, unless `TEST` is set: ReckOn applies its
  learning rule.

So with `TEST` high (validation or test data) the network is only evaluated,
never trained. With a label delay of *d*, the first *d* time steps of every
sample are neither learnt from nor counted. This suits delayed-supervision
tasks such as cue accumulation, where the answer is known only at the end.

### Timing summary

* A word costs 2 clocks to read.
* A spike or label costs the handshake (4 edges, plus ReckOn's acknowledge
  delay).
* A tick costs `max(SPI_TIMING, 2, ReckOn busy time)` clocks.
* One sample costs roughly `words x 2 + events x handshake + ticks x tick period`,
  plus the result handshake.

At the 15 MHz fabric clock of the reference Zynq set-up, one clock is about
67 ns. The fastest possible tick rate is 7.5 MHz. In practice ReckOn's
per-step computation sets the tick rate.

`BATCH_DONE` and `EPOCH_DONE` are levels. The decoder stays in END_B or END_E
for as long as software takes.

## Batch and epoch protocol for software

1. Write the run-time registers over SPI (below).
2. Set `TEST` for a validation or test epoch, and clear it for training.
   Write the first batch to the buffer from word 0 through the BRAM port.
   Pulse `NEW_EPOCH`.
3. Wait for `BATCH_DONE`.
   - If `EPOCH_DONE` is also high, the epoch is over. Read `EPOCH_ACC`, then
     go back to step 2 for the next epoch. `SPI_N_SAMPLES` may be rewritten
     before that step, e.g. when switching from the training set to the
     validation set.
   - Otherwise, write the next batch from word 0 and pulse `NEW_BATCH`.
4. After the last epoch (`SPI_N_EPOCHS` epochs in all, training and
   validation together), raise `STOP`. The decoder returns to IDLE.

The GPIO inputs are sampled in the PL clock domain without a synchroniser,
which is correct for AXI GPIO on the same clock. Only their rising edges act.

## SPI run-time registers (`spi_param_bank`)

ReckOn's SPI parameter bank is extended with five registers. They share the
bus with ReckOn's own SPI slave: MOSI and SCK go to both, and MISO comes from
the bank only while it answers a read of its own addresses. The bus has no
chip select, so frames are fixed at 32 bits and counted from reset. SPI mode
0, MSB first, SCK at most clk/4 (SCK is oversampled).

| frame bits | field                                       |
|------------|---------------------------------------------|
| [31:30]    | `01` write, `10` read                       |
| [29:16]    | register address                            |
| [15:0]     | write data, or read data returned on MISO   |

| addr | register            | width | reset | meaning                                        |
|------|---------------------|-------|-------|------------------------------------------------|
| 0    | `SPI_N_EPOCHS`      | 16    | 10    | epochs before STOP is honoured                 |
| 1    | `SPI_N_SAMPLES`     | 16    | 50    | samples per epoch                              |
| 2    | `SPI_BATCH_SIZE`    | 16    | 50    | samples per batch (per buffer fill)            |
| 3    | `SPI_TIMING`        | 16    | 2     | minimum clocks between ticks                   |
| 4    | `SPI_LABEL_DELAY`   | 12    | 0     | first tick of a sample with learning/inference |

The reset values match a 50-sample, 10-epoch cue-accumulation run.

## Parameters and sizes

* **Buffer.** `ADDR_W = 14` gives 16384 words (64 KiB, 16 RAMB36 tiles).
* **Counters.** `ACC_W = 16`; all sample and epoch counters are 16 bits.
* **Port widths.** `AERIN_ADDR` and `OUT_DATA` are 8 bits.

How the evaluated tasks fit:

* **Cue accumulation.** 40 inputs, 2 classes, 50 samples per epoch. A sample
  is estimated at about 420 words, so an epoch is about 21k words and runs as
  two batches of 25 samples.
* **Braille digits.** 12 inputs, 3 or 4 classes. 980 training, 280
  validation and 140 test samples, and about 241 epochs counting validation.
  This fits whenever the batch size is chosen so that one batch fits the
  buffer.

## Departures and interpretations

* **Label delay.** The register's exact effect is not specified. Here it
  gates `TARGET_VALID` and `INFER_ACC` until the given tick of each sample;
  the label itself is still sent at its own word.
* **`SPI_TIMING`.** Read as a minimum tick period.
* **Labels on test data.** Labels are sent over AER in test mode too. What
  stops learning is `TARGET_VALID`, which stays low.
* **Back-to-back samples.** After an end-of-sample word the decoder goes
  straight on to the next sample when the batch is not complete.
* **Choices of this design.** These are not given by the original design:
  - the buffer depth;
  - the two-clock read;
  - the SPI frame format and addresses;
  - the MISO merge;
  - edge detection of NEW_EPOCH and NEW_BATCH;
  - skipping unknown codes;
  - counter widths;
  - reset values.
* **STOP.** STOP is a separate input (a GPIO line here).
* **X-HEEP version.** An earlier version of this system used the X-HEEP
  RISC-V microcontroller instead of the ARM. It had a configuration header
  word, separate training and test buffers, and START and STOP pins. It is
  not built. Its header words would simply be skipped by this decoder.
* **Classification only.** Only ReckOn's classification output, one result
  per sample, is compared with the label.

## Files

| file | content |
|------|---------|
| `rtl/reckon_soc_pkg.sv` | widths, event codes, state enum, parameter struct, SPI register map |
| `rtl/buffer_bram.sv` | dual-port buffer RAM |
| `rtl/aer_tick_gen.sv` | tick counter and tick pacing |
| `rtl/aer_output_capture.sv` | result handshake and accuracy counter |
| `rtl/aer_decoder.sv` | the state machine |
| `rtl/spi_param_bank.sv` | SPI run-time registers |
| `rtl/reckon_soc_pl.sv` | top |
| `tb/reckon_model.sv` | behavioural stand-in for ReckOn's bus side (not the network) |
| `tb/tb_*.sv` | self-checking testbenches, one per block |
| `tb/soc_harness.sv` | end-to-end harness: plays the ARM and checks everything |
| `tb/tb_reckon_soc_pl.sv` | top at default size, 2 training epochs and 1 test epoch |
| `tb/tb_workloads.sv` | three harnesses at the evaluated tasks' dataset sizes |

## Verification

The testbenches build their data with `$urandom` and work out the expected
results themselves. They check the following:

* every spike's address and arrival tick, and that it arrives inside SAMPLE;
* label delivery;
* the total number of ticks, and the minimum tick spacing;
* that `TARGET_VALID`/`INFER_ACC` are high on exactly the expected ticks, and
  that `TARGET_VALID` is never high on test data;
* the count of `BATCH_DONE`/`EPOCH_DONE`;
* `EPOCH_ACC` against the model's answers;
* SPI read-back and pass-through;
* byte-enable writes to the buffer;
* the return to IDLE on STOP.

The end-to-end tests also count every mechanism (stalls on
`TIMING_ERROR_RDY`, batch waits, test epochs, label-delay gating, skipped
words and so on), and fail if one never happened.

`tb_workloads` replays data shaped like the evaluated tasks at their dataset
sizes:

* the cue-accumulation schedule in full;
* the Braille tasks at full dataset size, but for 5 of their 200 epochs.

It runs in about 15 s. The ReckOn model is a simple counting model, so the
accuracies it produces say nothing about the real network. They only check
the bookkeeping.

To simulate with Verilator 5, for example the top:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
  rtl/reckon_soc_pkg.sv tb/tb_reckon_soc_pl.sv --top-module tb_reckon_soc_pl
./obj_dir/Vtb_reckon_soc_pl +verilator+rand+reset+2
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Verilator's `-Wall` reports a few known warnings; the opening comment of each
affected module explains them:

* three capture outputs are left unconnected on purpose;
* the assertions use the reset in `disable iff`;
* the byte-offset address bits of the buffer are unused.
