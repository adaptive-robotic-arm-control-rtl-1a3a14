# Real-time sample replay for the ReckOn spiking-network accelerator on a Zynq MPSoC

ReckOn is a digital recurrent spiking neural network (RSNN) accelerator with
on-chip learning. It has 256 recurrent leaky integrate-and-fire neurons, 256
inputs and 16 readout neurons. It takes spikes on an Address-Event
Representation (AER) bus and works in steps marked by an external time tick.
Training and testing it on a recorded dataset means replaying each sample's
spikes. Every spike has to land in the right tick, the label has to arrive at
the right moment, and learning has to be switched on only for training
samples. A processor running Python cannot do that through memory-mapped GPIO
writes, because their latency would distort the timing.

This RTL is the programmable-logic (PL) glue that solves that. The processor
hands over a whole sample at once, as a list of (address-event, timestamp)
words sent by DMA. Hardware then replays the sample in real time:

* a FIFO buffers the words;
* one FSM reads and decodes them;
* a second FSM owns the time base. It waits for each word's tick, drives the
  AER handshake, raises and lowers the SAMPLE, learning and inference
  controls, and collects the accelerator's answer for the processor.

A mux can instead connect a live AER sensor to the accelerator. The
accelerator's output can either be kept for the processor or forwarded off the
board.

The accelerator itself, the DMA engine, the AXI GPIO and AXI SPI controllers
and the processor are not part of this RTL. They connect to the ports of
`reckon_pl_system`.

## Block diagram

```
            AXI4-Stream                                          +-----------------+
 DMA  ====> s_axis_* ==> event_fifo ==> event_reader_fsm ==>     |                 |
                        (1024 x 32b)    (decode AE,TS)    evt    |   accelerator   |
                                                           |     |    (ReckOn)     |
                                                           v     |                 |
                                                  event_sender_fsm --time_tick-->  |
 GPIO enable, train  -----------------------------> (tick_gen)   --sample------->  |
 GPIO ok_dma, status <-----------------------------            --learn_en------>  |
                                                               --infer_en------>  |
                                                               <-timing_err-----  |
                                                     AER (9b)                    |
                                                        |                        |
 board AER sensor (8b) -----------------------> aer_in_mux ---AER in---------->  |
 GPIO in_sel ----------------------------------->   (sel)                        |
                                                                                 |
 GPIO out_* results <--------------------------- aer_out_path <--AER out (8b)--  |
 board AER out      <---------------------------   (fwd)                         +
 GPIO out_fwd ---------------------------------->
```

Everything runs on one clock. Reset is synchronous and active low. All AER
links use the four-phase handshake, bundled in the `aer_if` interface inside
the design. The top-level ports are plain signals.

## Sample format

The DMA stream carries one 32-bit word per tuple:

| bits    | field | meaning                                                      |
|---------|-------|--------------------------------------------------------------|
| [31:16] | AE    | signed 16 bits: input neuron (0..255), or a reserved code    |
| [15:0]  | TS    | tick, counted from the start of the sample, at which the word takes effect |

Two AE codes are reserved:

* **AE = -2: label.** The low 8 bits of TS carry the label (class) value.
  The label is always handled at tick `LABEL_TICK` (2100), whatever its TS.
* **AE = -1: end of sample.** Handled at tick TS.

Words must be in time order. The sender handles them strictly in stream
order, so a word never overtakes an earlier one. This also applies to the
label: put it among the events where tick 2100 falls. Any other AE value is
an input spike to neuron `AE[7:0]`.

On the AER input bus the address is 9 bits:

* `{1'b0, neuron}` for a spike;
* `{1'b1, label}` for a label.

The 32-bit word layout, the field widths and this 9-bit encoding are this
design's own. The accelerator's native label encoding may differ, and would
need a small remap at `reckon_aer_in_addr`.

## How a sample is replayed

`event_reader_fsm` keeps one decoded event (`event_t`: kind, address, ts)
ready for the sender. Whenever its slot is empty, or is emptied in the
current cycle, it pops the next FIFO word. It can therefore hand over one
event per clock.

`event_sender_fsm` has six states:

| state    | what happens                                                                 |
|----------|------------------------------------------------------------------------------|
| `S_IDLE` | `ok_dma` high. When `enable` is high and an event is waiting: raise `sample`, restart the tick counter, pulse `out_clear`, lower `ok_dma`. |
| `S_NEXT` | Take the next event. Its target tick is TS, or `LABEL_TICK` for a label.     |
| `S_WAIT` | Wait until the tick count reaches the target, then act on the event (below). |
| `S_REQ`  | `req` is high; wait for `ack`, then drop `req`.                              |
| `S_REL`  | Wait for `ack` to fall. After a label, raise `infer_en`.                     |
| `S_OUT`  | `sample` is low. Wait for an output event (`out_seen`) or `OUT_TIMEOUT_TICKS` ticks. Then clear `learn_en` and `infer_en`, set `ok_dma`, and return to `S_IDLE`. |

What `S_WAIT` does depends on the event kind:

* **Spike:** drive `{0,addr}` with `req`, then go to `S_REQ`.
* **Label, training sample (`train` = 1):** drive `{1,label}` with `req`,
  raise `learn_en`, then go to `S_REQ`.
* **Label, test sample (`train` = 0):** send nothing; raise `infer_en` only.
* **End of sample:** drop `sample`, then go to `S_OUT`.

Time comes from `tick_gen`. It emits a one-clock `time_tick` every
`TICK_CYCLES` clocks, from the start of a sample until the sender returns to
idle. It also counts the ticks. The counter restarts when `sample` rises, so
tick *n* arrives *n*·`TICK_CYCLES` clocks after SAMPLE rises.

An event due at tick *n* leaves on the bus two clocks after that tick's pulse.
When events pile up in the same tick, they go out back to back:

* five clocks per event if the accelerator acknowledges in one clock;
* six clocks per event in the unit test, which counts the turnaround of the
  acknowledging model.

At the assumed 100 MHz that is 16 to 20 M events/s. This is above the 3.8 M
events/s peak measured for the accelerator itself, so the replay path is not
the bottleneck.

Timeline of one training sample at the default parameters:

```
tick:      0     ts1 ...              2100                      2250      (+ up to 16)
sample:    ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|___________
AER in:    spikes at their ticks ...  label{1,c}   spikes ...
learn_en:  ___________________________|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|__
infer_en:  ______________________________|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|__
AER out:                                                                 ev
ok_dma:    __________________________________________________________________|‾
```

For a test sample nothing is sent at tick 2100: `infer_en` rises and
`learn_en` stays low. If no output event arrives within `OUT_TIMEOUT_TICKS`
ticks after SAMPLE falls, the sample still completes, and
`gpio_status.out_timeout` records the miss.

The accelerator's `timing_err` flag is counted on its rising edges, in
`gpio_status.timing_errs`.

## Input mux and output path

`aer_in_mux` selects the AER source:

* `sel` = 0: the sender;
* `sel` = 1: the sensor pins.

The selected source's `req`/`addr` go to the accelerator, and only that
source gets `ack`. The other source stays stalled. The mux has no registers.
An assertion checks that `sel` changes only while the link is idle. Sensor
addresses are zero-extended to 9 bits, so a sensor can never inject a label.

`aer_out_path` receives the accelerator's output events:

* `fwd` = 0: it acknowledges each event itself, one clock after `req`.
* `fwd` = 1: it passes `req`/`addr` to the board pins and returns the
  board's `ack`.

In both modes it records each completed event. The record holds the last
address, an event count, one 16-bit counter per output neuron (selected by
the low 4 address bits) and `top_class`. `top_class` is the arg-max of the
counters, with the lowest index winning a tie. For classification the
processor reads `top_class`. For per-step regression it reads `last_addr`
and the counters.

The sender clears the record when a sample starts. Its `seen` flag ends the
`S_OUT` wait.

## Top-level interface (`reckon_pl_system`)

| group        | signals | notes |
|--------------|---------|-------|
| DMA          | `s_axis_tdata[31:0]`, `s_axis_tvalid`, `s_axis_tready` | AXI4-Stream; `tready` falls when the FIFO is full |
| GPIO control | `gpio_enable`, `gpio_train`, `gpio_in_sel`, `gpio_out_fwd` | change `in_sel`/`out_fwd` only between samples |
| GPIO status  | `gpio_ok_dma`, `gpio_status` (ticks, timing_errs, events_sent, samples_done, out_timeout), `gpio_fifo_level`, `gpio_words_read`, `gpio_out_last_addr`, `gpio_out_count`, `gpio_out_class_count[16][16]`, `gpio_out_top_class`, `gpio_out_seen` | |
| sensor       | `sensor_aer_req`, `sensor_aer_addr[7:0]`, `sensor_aer_ack` | |
| accelerator  | `reckon_aer_in_req/addr[8:0]/ack`, `reckon_time_tick`, `reckon_sample`, `reckon_learn_en`, `reckon_infer_en`, `reckon_timing_err`, `reckon_aer_out_req/addr[7:0]/ack` | |
| board output | `board_aer_out_req`, `board_aer_out_addr[7:0]`, `board_aer_out_ack` | |

The accelerator's SPI configuration port has no connection here. On the real
board, an AXI Quad SPI controller in basic mode drives it directly from the
processor.

`gpio_status` is the packed struct `sender_status_t`, defined in
`reckon_pl_pkg`.

Parameters and their defaults:

| parameter | default | meaning |
|-----------|---------|---------|
| `FIFO_DEPTH`        | 1024   | FIFO words. One 36-kbit block RAM; a sample may be longer, because the DMA is back-pressured. |
| `TICK_CYCLES`       | 100000 | clocks per tick: 1 ms at 100 MHz |
| `LABEL_TICK`        | 2100   | tick at which the label is handled |
| `OUT_TIMEOUT_TICKS` | 16     | how long to wait for the output after SAMPLE falls |
| `N_OUT`             | 16     | output neurons counted by `aer_out_path` |

After synthesis the design is about 600 flip-flops and 320 word-level cells,
plus the 32 Kbit FIFO memory.

## Which parts come from the published system, and which are this design's

These parts follow the published system:

* the block structure:
  * a DMA-fed FIFO of (AE,TS) tuples;
  * two chained FSMs instead of GPIO-timed control;
  * a selectable sensor input;
  * output either to the processor through GPIO or off the board;
* the reserved codes -2 (label) and -1 (end of sample);
* the sequence SAMPLE high → replay with tick waits → label at 2100 ms, with
  learning only for training samples and inference enabled afterwards →
  SAMPLE low → read the output → learning and inference off;
* the accelerator sizes quoted above.

These are choices made here, where the description is silent:

* Clock and tick: 100 MHz clock and a 1 ms tick, so `TICK_CYCLES` = 100000.
  The published timing is only given in milliseconds.
* TS is read as an absolute tick within the sample, not as a wait relative
  to the previous word.
* The label waits for tick 2100, while samples last 2250 ms. Both numbers
  are kept: the end-of-sample word carries the sample length in its TS.
* Only one label per sample (classification) is handled. Regression targets
  sent at every time step are not supported by the sender.
* Data layout: the 32-bit word layout, the 9-bit AER address with a label
  flag, and the 8-bit output address.
* Handshakes: four-phase AER everywhere, and the valid/ready hand-off
  between the two FSMs.
* Start and finish of a sample:
  * a sample starts when `enable` is high and the first word has arrived;
  * ticks keep running while the sender waits for the output;
  * the output timeout, and `ok_dma` as a level meaning "ready for the next
    sample".
* Output path: the per-neuron output counters and arg-max, and recording
  events also in forward mode.
* FIFO: its depth and its first-word-fall-through organisation, with a
  registered block-RAM read.

## What is not included

* **The ReckOn accelerator.** This includes its SPI slave, parameter
  memory, controller, LIF logic, readout logic, e-prop weight update, and
  the weight and neuron memories (Wrec 64 KB, Winp 64 KB, Neuron 2 KB,
  Wout 8 KB, mapped to block RAM on the FPGA). It is an existing open-source
  design, used as is.
* **The processor side:** the Zynq processing system, AXI interconnect,
  AXI DMA, AXI GPIO and AXI Quad SPI.

For simulation, `tb/reckon_model.sv` stands in for the accelerator. It is
behavioural, not a network:

* it acknowledges input events and logs them with their tick;
* it raises `timing_err` when a tick receives more than a set number of
  events;
* after an inference sample it sends one output event, whose class is the
  number of input spikes mod 2.

## Workloads

| workload | needed | this design | fits |
|----------|--------|-------------|------|
| Robot-arm payload detection: 24-200-2 network, 2250 ms samples, 2 classes | TS up to 2250 ticks; input addresses 0..23; label 0..1; 2 output classes; sample length (events per sample) not published | TS range 65535 ticks; 256 input addresses; 8-bit label; 16 output counters; FIFO back-pressure, so no length limit | yes, for the replay path; the network itself runs in the accelerator (24 ≤ 256 inputs, 200 ≤ 256 neurons, 2 ≤ 16 outputs) |
| Delayed-cue (T-maze) validation task | sizes not given | as above | unknown |
| Peak input rate 3.8 M events/s | ≤ 26 clocks per event at 100 MHz | 5–6 clocks per event | yes |

## Simulation

Every file under `rtl/` is one module, package or interface. `reckon_pl_pkg`
must be compiled first. To lint the top:

```
verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/reckon_pl_pkg.sv rtl/reckon_pl_system.sv
```

To build and run a testbench:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/reckon_pl_pkg.sv tb/tb_reckon_pl_system.sv --top-module tb_reckon_pl_system
./obj_dir/Vtb_reckon_pl_system
```

Every testbench checks its results itself. Each prints one line,
`TB_RESULT checks=N failures=M`, and a watchdog ends it if it hangs.

| testbench | what it covers |
|-----------|----------------|
| `tb_event_fifo` | Random push/pop against a queue model: data order, level, `tready` at full, two-clock fall-through latency. |
| `tb_event_reader_fsm` | Decoding of spikes, labels and end markers; order; one event per clock. |
| `tb_event_sender_fsm` | With short ticks: tick spacing; every spike at its tick; the label only for training and at `LABEL_TICK`; `learn_en`/`infer_en`/`sample` timing; output wait and timeout; timing-error count; back-to-back rate. |
| `tb_aer_in_mux` | Routing, no acknowledge to the unselected source, no leakage. |
| `tb_aer_out_path` | Capture and forward modes, per-neuron counts, arg-max with ties, clear. |
| `tb_reckon_pl_system` | End to end with short ticks and a 16-word FIFO. Five samples plus a sensor burst. Checks, and counts, each of: DMA back-pressure, tick waits, label with learning, inference-only sample, captured output, output timeout, timing error, sensor input, forwarded output. |
| `tb_reckon_pl_system_full` | One 2250-tick training sample (180 spikes from 24 inputs) at the default parameters: about 225 M clocks, roughly 3 minutes in Verilator. |

The simulator has only two states, so every register that is read has a
reset.
