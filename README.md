# Event-driven waveform capture for SNSPD photon/dark-count identification

A superconducting nanowire single-photon detector (SNSPD) answers every
absorbed photon, and every dark count, with the same kind of electrical pulse:
a steep rise and a slower decay of a few tens of nanoseconds. A conventional
time tagger only compares this pulse with a threshold and records a click, so
dark counts cannot be told apart from photons. The PhotonIDs approach keeps the
whole waveform of each click instead and hands it to a classifier, which looks
at the pulse shape (peak, rise time, fall time, width, and a learned
"pseudo-position" of the absorption along the nanowire) and decides "photon"
or "dark count".

That needs a front end that digitises the detector at GS/s rates without
drowning in data. Between clicks the ADC produces nothing but baseline noise,
and at the count rates of interest (thousands of events per second) more than
99.7 % of all samples are background. The RTL here is that front end: an
**event-driven capture fabric**. It watches the ADC stream, triggers on the
first sample above a threshold, and stores only a fixed 200-sample window
around each trigger (8 samples before it, the trigger sample and 191 after it),
with a time stamp and an event number. Stored records are streamed out to the
processor. The fabric also counts triggered, stored and dropped events. The
machine-learning classifier that consumes the records is software and is not
part of this RTL (see [What stays in software](#what-stays-in-software)).

## Signal chain

```
 SNSPD --> bias tee --> RF amplifier --> RF-ADC --adc_sample--> photonids_acq_top --m_* stream--> processor
 (cryostat)   (analog front end)          (RFSoC)   1 sample/clk   (this RTL)      <--reg bus--   (ARM + PYNQ)
```

Inside `photonids_acq_top`:

```
                 +--------------------+ trig, post_valid/idx/last
 adc_sample ---> | event_trigger_fsm  |-------------------------+
      |          +--------------------+                         v
      |          +--------------------+ pre[0..7]     +------------------+
      +--------> | pretrigger_line    |-------------->|   event_buffer   |--> m_valid/m_ready,
      |          +--------------------+               | 32 record slots  |    m_sample, m_index,
      +---------------------------------------------->| pre / post / meta|    m_last, m_timestamp,
                 +--------------------+ timestamp,    |   memories       |    m_event
                 |    event_stamp     |-- n_trig ---->|                  |
                 +--------------------+ <- stored,    +------------------+
                          ^                dropped          | fill
                          |                                 v
                 +--------------------------------------------------+
 reg bus <-----> |  acq_regs: threshold, timeout, Start/Stop/Clear,  |
                 |  state, fill, counters, time                      |
                 +--------------------------------------------------+
```

Everything runs in one clock domain at **one ADC sample per clock**.

## The trigger: four states

The heart of the design is a small state machine with the states IDLE, ARMED,
TRIGGER and INHIBITION (`event_trigger_fsm`, type `acq_state_e`):

| from | to | when |
|------|----|------|
| IDLE | ARMED | Start command |
| ARMED | TRIGGER | the current sample is strictly greater than the threshold ("Event") |
| ARMED | IDLE | Stop command, or `armed_timeout` samples in a row without an event ("End") |
| TRIGGER | INHIBITION | always, after one sample ("Wait") |
| INHIBITION | ARMED | after the last sample of the post-trigger window ("Inhibit End"); to IDLE instead if a Stop came during the window |

The trigger decision is combinational. `trig` is high in the same cycle as
the sample that crosses the threshold, and that sample is index 0 of the
post-trigger window. While the FSM is in TRIGGER and INHIBITION the threshold
is not looked at, so the decaying tail of the pulse cannot trigger again. Nor
can a second pulse that arrives within the window. The window is counted
like this:

```
cycle          t-8 .. t-1 |   t    |  t+1    |  t+2 ... t+191  |  t+192
state            ARMED    | ARMED  | TRIGGER |   INHIBITION    |  ARMED (may trigger again)
sample role    pre[0..7]  | trig   |  post 1 |  post 2 .. 191  |
record index     0..7     |   8    |    9    |   10 .. 199     |
```

The length of INHIBITION is therefore what fixes the record length:
POST_SAMPLES = 192 samples counted from the trigger sample. The FSM is armed
again in the very next sample after the window. If the signal is still above
threshold there, as it is when pulses pile up, that sample triggers a new event
at once. The end-to-end test makes this happen on purpose.

A Stop that arrives while a window is running is held and obeyed when the
window ends, so a started record is always complete. The armed timeout
(register TIMEOUT, 0 = off) is this design's reading of "fall back to IDLE when
no more signals come". It counts samples spent in ARMED since the FSM last
entered it.

## The event record and the buffer

`pretrigger_line` is an 8-deep shift register of the last samples. In the
trigger cycle it holds exactly the 8 samples before the trigger sample.

`event_buffer` stores each record in a slot of three memories:

* **pre-trigger memory**, one 128-bit word per slot: the 8 pre-trigger
  samples, written all at once in the trigger cycle;
* **post-trigger memory**, 192 samples per slot at `slot*192 + index`,
  written one per cycle as the samples arrive;
* **metadata memory**: the 64-bit time stamp and the 32-bit event number of
  the trigger.

Splitting the pre-trigger samples off is what allows back-to-back events. The
8 samples before event *n+1* may be the last 8 samples of event *n*'s window,
which are still arriving when event *n+1* needs them. A single sample-wide
memory would need a second write port for that. Here each memory has one
write port.

The slots form a ring. A record is committed with the last sample of its
window (`stored` pulse); `fill` counts committed, unread records. An event that
triggers while all 32 slots hold unread records is **not stored**. It is still
counted as a trigger, the `dropped` pulse counts it, and the FSM still inhibits
for its window.

Read-out is a valid/ready stream with one sample per beat: `m_index` 0..199
(0..7 pre-trigger, 8 the trigger sample), `m_last` on index 199, and
`m_timestamp`/`m_event` constant over the record. The memories are read
synchronously, so every beat takes one fetch cycle and one offer cycle: the
stream delivers at most one beat every two clocks, 400 clocks per record. An
offered beat does not change until it is taken (checked by an assertion).

## Time stamps and counters

`event_stamp` counts clock cycles, which are ADC samples, in a 64-bit time base
that starts at 0 after reset or Clear. Its value in the trigger cycle is the
record's time stamp: the time of the trigger sample, not of the first stored
sample (that one is 8 earlier). The event number is the number of triggers
before this one. The trigger, stored and dropped counters are 32 bits wide and
wrap.

## Register map

Word addresses on the simple register port of `acq_regs`. Writes take effect
at the clock edge. Read data arrives one cycle after `rd_en` with
`rd_valid`.

| addr | name | access | content |
|------|------|--------|---------|
| 0 | CTRL | W | bit0 Start, bit1 Stop, bit2 Clear (one-cycle pulses) |
| 1 | THRESHOLD | RW | signed 16-bit trigger threshold, reset 2000 |
| 2 | TIMEOUT | RW | armed timeout in samples, 0 = off (reset) |
| 3 | STATUS | R | [1:0] state (0 IDLE, 1 ARMED, 2 TRIGGER, 3 INHIBITION), [15:8] buffer fill |
| 4 | N_TRIG | R | triggers since Clear |
| 5 | N_STORED | R | records stored |
| 6 | N_DROP | R | events lost to a full buffer |
| 7 | TS_LO | R | time base [31:0]; latches [63:32] for TS_HI |
| 8 | TS_HI | R | time base [63:32] as latched by the last TS_LO read |

A Start, Stop or Clear written at the end of cycle *w* acts in cycle *w+1*:
the FSM is ARMED from cycle *w+2* on.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| PRE_SAMPLES | 8 | top, pretrigger_line, event_buffer | samples stored before the trigger (paper value) |
| POST_SAMPLES | 192 | top, event_trigger_fsm, event_buffer | post-trigger window = inhibition length (paper value) |
| N_SLOTS | 32 | top, event_buffer | records the buffer holds (own choice) |
| TIMEOUT_W | 32 | event_trigger_fsm | width of the armed timeout |

The sample type (`sample_t`, 16-bit signed), the time and counter widths and
the register map live in `photonids_pkg`.

## Rates

With one clock per sample at 2 GS/s (the 200-sample record spans 100 ns), the
fabric is blind for 192 samples (96 ns) after each trigger and reads a record
out in 400 clocks, about 5 million records per second sustained. The count
rates of the experiments it serves are far below that: 8000 events/s for laser
data collection, 4300, 7000 and 24000 events/s for a 20 km fibre link in a
dark, dimly lit and fully lit lab, and about 22 events/s for a single erbium-ion
emitter. `tb_workload_rates` runs 2 ms of each of the first four streams
(random arrivals) and finds every pulse captured as one record, with none
dropped. Only 0.03 % to 0.23 % of the ADC samples are kept.

The 32-record buffer only rides out read-out stalls. The large labelled data
sets used to train the classifier (hundreds of thousands of waveforms) are
meant to be streamed into processor memory, not held in the fabric.

## What stays in software

The classifier that makes the photon/dark-count decision runs on a CPU and is
not in this RTL. Its trained weights and calibration curves are not available
here either. For orientation, it works per record as follows:

1. Savitzky-Golay smoothing (window 11, cubic), then 20x cubic
   interpolation.
2. Four scalar features: peak amplitude, rise time, fall time and FWHM.
3. A small 1-D CNN regresses four "pseudo-positions" from the waveform. It
   has two Conv1D layers, 1 to 64 and 64 to 32 channels, kernel 3, each
   with batch norm and ReLU, then global average pooling, FC 32 to 128 with
   ReLU, and FC 128 to 4. In training, its targets come from kernel-density
   statistics of the four features.
4. Each of the four outputs is recalibrated by a monotone piecewise-cubic
   Hermite (PCHIP) map.
5. The four features and the four calibrated positions go into a fully
   connected classifier (8 to 256 to 128 to 64 to 32 to 2, softmax).

The records this fabric produces (200 signed samples, time stamp, event
number) are that pipeline's input.

## Departures and own choices

What follows the source description: the four states and their transitions;
the threshold comparison in ARMED; inhibition that suspends comparison for a
fixed window that sets the record length; 8 + 192 = 200 samples per event;
time stamping and counting of events; storage in on-board memory and
streaming to the processor; configuration by the processor.

What this design chose where the description is silent:

* **One sample per clock.** A real RF-ADC interface delivers several
  samples per fabric clock (for example 8 at 250 MHz for 2 GS/s). For
  that, the comparison would have to run on all lanes in parallel and
  pick the first crossing. This RTL does not do that, so it cannot be
  clocked at the true sample rate as it is.
* Start is a processor command. End happens on Stop or on the armed timeout.
  TRIGGER lasts exactly one sample. The comparison is strict (`>`).
* 16-bit signed samples. The threshold resets to 2000.
* 32 record slots, split pre-trigger, post-trigger and metadata memories;
  events are dropped (and counted) when the buffer is full.
* The stream format and its rate of one beat every two clocks.
* A simple word-addressed register port instead of an AXI4-Lite slave,
  and its register map.
* A 64-bit time base in sample clocks, 32-bit counters, synchronous
  active-low reset.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_event_trigger_fsm` | every cycle against an integer reference: trigger, window index, last flag, state, timeout; covers inhibition, back-to-back triggers, Stop while armed and during a window, timeout |
| `tb_pretrigger_line` | the line always holds the previous 8 samples, oldest first; zeros after reset |
| `tb_event_buffer` | random events (some back-to-back) with a random reader; full buffer and drops; every beat compared; 399 clocks from first to last beat with ready held high |
| `tb_event_stamp` | time base and counters against counts kept by the testbench, with Clear |
| `tb_acq_regs` | reset values, read-back, command pulses, status, coherent 64-bit time read |
| `tb_photonids_acq_top` | end to end at default sizes with a pulse model (`adc_pulse_model`): configures over the register port, fires pulses, and compares every record sample by sample with a cycle-level reference; counts and requires triggers, inhibition, pile-up re-trigger, back-pressure, full buffer and drops, both Stop cases, timeout, pulses ignored in IDLE, Clear |
| `tb_workload_rates` | random event streams at the experiments' count rates, 2 ms each; every pulse gives one complete record |

The testbenches were also run against deliberately broken copies of each
module (a window one sample short, a lost pre-trigger stage, an off-by-one
read address, a missed counter increment, a missing time latch, a late time
stamp), and each of those copies failed them. The pulse model is behavioural
only. It has the right shape (fast rise, exponential decay, noisy baseline)
but is not derived from detector physics.

To run one with Verilator 5 (from the folder holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -y rtl -y tb rtl/photonids_pkg.sv \
          tb/tb_photonids_acq_top.sv --top-module tb_photonids_acq_top
./obj_dir/Vtb_photonids_acq_top
```

Replace the testbench name to run the others. `tb_photonids_acq_top` runs
about 50,000 cycles in well under a second. `tb_workload_rates` runs 16 million
cycles in about 10 seconds. The RTL lints cleanly with `verilator --lint-only
-Wall`, apart from warnings about package constants a given module does not
use.
