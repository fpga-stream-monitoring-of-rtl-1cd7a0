# A hardware stream monitor for RTLola specifications

This is synthesizable SystemVerilog for a runtime monitor that checks a
running system against a stream specification written in RTLola. RTLola
streams come in two kinds. *Event-based* streams are computed whenever new
input arrives. *Periodic* streams are computed at fixed rates, such as 1 Hz,
and may summarise the event-based streams over a sliding time window. The
monitor receives events, for example one per network packet, and computes
every stream the specification defines. It raises a trigger whenever a
trigger condition holds.

The hard part in hardware is that the two kinds of work arrive independently:

- Events come at an unknown and often bursty rate.
- Deadlines come on a fixed schedule.
- Stream values depend on each other, and the computation must respect that
  order.

The design splits the problem in two, with a FIFO between the halves:

```
 external source                                                       results
 ext_write, ext_din ──► HIGH-LEVEL CONTROLLER ──► QUEUE ──► LOW-LEVEL CONTROLLER ──► report, trig
                        (when: events, deadlines,           (what: evaluate the affected
                         time stamps, ordering)              streams, layer by layer)
```

- The **high-level controller (HLC)** decides *when* something must be
  computed. It stamps each event with a time. It detects periodic deadlines
  and turns both into uniform queue entries. Each entry lists the output
  streams it affects.
- The **queue** absorbs bursts so that the two halves run at their own pace.
- The **low-level controller (LLC)** pops one entry at a time. It evaluates
  every affected stream in dependency order and reports the results.

The LLC is specific to one specification. This repository builds it for the
network-traffic specification used as the main example:

```
constant server: Int32
input src, dst: Int32          input fin, push, syn: bool        input length: Int32

receiver      := dst = server
many_conn @1Hz := sum(receiver over 0.5 s) > 10000               trigger "many incoming connections"
received      := if receiver & push then 0 else length
workload  @1Hz := sum(received over 1 s)
trig_workload := workload > 10^7                                 trigger "workload too high"
opened        := opened[-1, default 0] + (dst = server & syn ? 1 : 0)
closed        := closed[-1, default 0] + (dst = server & fin ? 1 : 0)
trig_closed   := opened - closed < 0                             trigger "closed more than opened"
```

## Time, clocks and the two modes

Everything runs on one system clock `clk`, 100 MHz by default
(`CLK_PERIOD = 10`, with time in nanoseconds and 64-bit time stamps). The
HLC works at a slower rate, *hclk*, which is one tick every `PRESCALE = 4`
system cycles. Its queue interface runs on a tick twice as fast (*qclk*). All
of these are one-cycle clock enables made by `prescaler`, not separate
clocks.

The monitor is built in one of two modes, chosen by the `MODE` parameter:

- **Online** (the default). Time is the monitor's own clock. `time_select`
  adds `CLK_PERIOD` to a register every cycle, and an event is stamped with
  the time at which it was taken in.
- **Offline**. Each event carries its own time stamp in the upper 64 bits of
  `ext_din`, for example when replaying a log. The schedule starts at the
  first event's time stamp. The monitor's notion of "now" jumps from event to
  event. A single event can therefore make several deadlines due at once, and
  they must all be evaluated before that event.

## High-level controller

```
ext_interface ──ev──────────────────────────────► event_delay ──► hlq_interface ──► queue
      │ ext_ts                                        ▲  hold           ▲
      ▼                                               │                 │ deadlines
time_select ──its──► [input_buffer] ──────────────► scheduler ─────────┘
                      (offline only)
```

- **ext_interface.** The source writes an event by pulsing `ext_write`,
  which is allowed while `ext_avail` is low. This sets `avail`. At the next
  hclk tick the event is handed on for one hclk period and `avail` clears.
  The source can therefore deliver at most one event per hclk period.
- **scheduler.** The scheduler knows the deadlines of one *hyper-period*, the
  least common multiple of all periods. Each deadline has an offset within the
  hyper-period and a set of target streams. Two registers track the schedule:
  - `period` holds the start of the current hyper-period.
  - `did` holds the next deadline, one-hot coded. Zero means "not started";
    it is initialised at reset (online) or by the first event (offline).

  A deadline is due when `its - period >= offset(did)`. It is then emitted
  with its exact due time `period + offset`, and `did` rotates. After the
  last deadline of the hyper-period, `period` advances by one hyper-period.
  The network specification has a single 1 Hz deadline, so the hyper-period
  is 1 s.
- **hold and the input buffer (offline).** While a deadline is due, the
  scheduler raises `hold`. The current event then waits until every deadline
  its time stamp passes has been emitted, one per hclk period. New events keep
  arriving meanwhile. They queue in `input_buffer`, a shift buffer of
  `BUF_DEPTH` entries in front of the scheduler.

  The depth a trace needs follows from its backlog. Let δ be the number of
  hclk periods between events, and dl(e) the number of deadlines that event e
  makes due. Then

  backlog(e₁) = 0
  backlog(eᵢ₊₁) = backlog(eᵢ) − min(backlog(eᵢ), δ−1) + dl(eᵢ₊₁)

  A depth of at least the maximum backlog never overflows. The design records
  an overflow in the sticky `buf_overflow` output.
- **event_delay.** Offline, this block delays the event by one hclk period.
  That matches the scheduler's registered deadline output, so an event and the
  deadlines it makes due arrive together. During `hold` the event stays at
  the head of the buffer. Online, events pass straight through.
- **hlq_interface.** The queue takes one entry per cycle, but an event and a
  deadline can both be ready in the same hclk period. The interface therefore
  uses two qclk ticks per hclk period, one for each.
  - The event entry's affected mask is the OR of `dep(i)` over the inputs
    present in the event. `dep(i)` is the set of output streams that depend,
    directly or indirectly, on input i.
  - A deadline entry has an all-zero event and the deadline's target mask.
  - Offline, the event goes first. It is one hclk period older than the
    deadline found in the same period.
  - Online, the deadline goes first (`DL_FIRST`). Here the event and the
    deadline come from the same time sample, and the deadline's due time is
    not later than the event's time stamp.

### Queue entry

| field | width | contents |
|---|---|---|
| event | 105 | for each input, its value and a "present" bit: src 32+1, dst 32+1, fin 1+1, push 1+1, syn 1+1, length 32+1 |
| ts | 64 | time stamp in ns (event time, or the deadline's due time) |
| aff | 8 | one bit per output stream: evaluate it for this entry |

`event_queue` is a first-word-fall-through circular FIFO of `QUEUE_DEPTH = 8`
entries. A push into a full queue is refused and counted in `q_drops`.

## Low-level controller

The `llq_interface` is a three-state machine. In **idle** it waits for a
non-empty queue. In **pop** it pulses `pop` for one cycle and copies the
entry into a register. In **eval** it holds `een` until the evaluation
finishes, then goes back to pop or idle.

The `eval_controller` runs the evaluation through ℓ + 2 states, where ℓ is
the number of dependency layers (four here):

1. **State 1.** In its first cycle:
   - inputs present in the entry store their new values;
   - each affected output stream is *pseudo-extended*: a dummy "not yet
     computed" value is shifted in, so that `x[-1]` means the same thing
     before and after x is computed.

   Windows evict outdated buckets, one per cycle. The state ends when every
   component reports done (`done1`).
2. **States 2.1 … 2.ℓ.** Each takes two cycles:
   - a *request* step, in which windows fed by the previous layer take their
     new value and windows read by this layer compute their aggregate;
   - an *evaluate* step, in which each affected stream of layer x writes its
     value over the dummy value.

For the network specification, one evaluation takes 1 (pop) + 1 + (cycles
in state 1, normally 1) + 2·4 cycles. `report` pulses one cycle after that,
with:

- the entry's time stamp and mask;
- the newest value and valid bit of every output stream;
- one trigger bit for each trigger stream evaluated true in this entry.

The layers of the network specification:

| layer | streams | window work in the request step |
|---|---|---|
| 2.1 | receiver, opened, closed | — |
| 2.2 | received, trig_closed, many_conn | w0 adds receiver; many_conn reads w0 |
| 2.3 | workload | w1 adds received; workload reads w1 |
| 2.4 | trig_workload | — |

### Stream components

- `in_stream` and `out_stream` are shift registers of value-and-valid pairs.
  Each is as deep as the largest offset used on the stream: one here, or two
  for `opened` and `closed`, which read their own previous value.
- An invalid value is replaced by the default from the expression.

### Sliding windows

A window of length *d* is cut into buckets of length *p*. Each bucket holds a
partial aggregate `{accumulator, count}`. The bucket count is *d* times the
rate of the stream that reads the window. The 0.5 s window of the 1 Hz stream
`many_conn` is rounded up to one bucket of 0.5 s.

- **Eviction.** A register T holds the end of the newest bucket. While the
  current time stamp lies beyond T, the buckets shift by one, a fresh empty
  bucket enters, and T advances by *p*. A gap of several seconds costs one
  cycle per bucket.
- **Update.** A new value of the target stream is folded into the newest
  bucket.
- **Request.** All buckets are combined in a binary tree and finalised: sum,
  count, min, max or average. A value added in the same cycle is included
  (bypass).
- **Validity.** The result is valid only once the time stamp has reached the
  window length; before that, the specification's default applies. With the
  paper's example of a 3-bucket, 3 s average (values 10.0 at 0.5 s, 10.1 at
  0.6 s, 9.9 at 2.2 s, default 8), the window gives 8.0 at 1 s and 2 s and
  10.0 at 3 s.

## Where this design departs from the paper, and why

- **Clocks.** The derived clocks hclk and qclk are enables in one clock
  domain.
- **Deadline test.** A deadline is due at `its - period >= offset`, not `>`.
  The paper's own worked example is at the boundary and needs `>=`.
- **Emitting deadlines.** The scheduler emits a deadline when one is due. The
  paper's formula writes the valid bit as the negation of "due", which read
  literally would emit deadlines when none are due.
- **Deadline time stamp.** A deadline is stamped with its exact due time, not
  the current time. With the current time, a window whose bucket ends on the
  deadline would already have been evicted when the deadline reads it.
- **Online ordering.** Online, deadlines take the first queue slot of an hclk
  period and events the second. Events are stamped with the time sampled at
  the hclk tick. The paper gives events precedence in both modes, and gives
  that rule the purpose of keeping events and deadlines in time order. Online,
  precedence for events would let an event slightly after a deadline evict the
  deadline's window bucket. The end-to-end test exposed this; with the paper's
  order, the 2 s periodic triggers were lost.
- **Offline event delay.** The event delay keeps the one-cycle register but
  not the paper's second `stalled` register. The held event waits at the head
  of the input buffer instead, which keeps events and deadlines in order.
- **Sizes the paper leaves open.** PRESCALE = 4, QUEUE_DEPTH = 8,
  BUF_DEPTH = 4, 64-bit nanosecond time stamps, the value of `server`
  (10.0.0.1), and 64-bit window accumulators.
- **`received`.** The specification listing defines `received` as 0 for
  pushing packets to the server. The prose describes the opposite filter. The
  listing is built.
- **Typos in the listing.** `open` and `dest` are read as `opened` and `dst`.
- **Window results before they are valid** read as 0, since the specification
  gives no default there.
- **Output interface.** How results leave the chip is not described. The
  `report` interface is this design's own.
- **Specification constants** (`dep`, deadline offsets and targets, layers,
  expressions) are compiled by hand into `rtlola_pkg` and `llc`. The
  generator that produces them from a specification is not part of this RTL.

## What is not here

- The avionics specification: it needs a square root, Float64 values and an
  integral window.
- The parallel command-response specification, which is only excerpted.
- The external event source: a serial link or processor, which the monitor
  only sees as the `ext_write`/`ext_din`/`ext_avail` handshake.

The stream, window and controller blocks are generic, but an LLC for those
specifications would have to be written like `llc.sv`.

## Files

| file | block |
|---|---|
| `rtl/rtlola_pkg.sv` | types, entry layout and the compiled network specification |
| `rtl/prescaler.sv`, `ext_interface.sv`, `time_select.sv`, `scheduler.sv`, `event_delay.sv`, `input_buffer.sv`, `hlq_interface.sv`, `hlc.sv` | high-level controller |
| `rtl/event_queue.sv` | queue |
| `rtl/llq_interface.sv`, `eval_controller.sv`, `in_stream.sv`, `out_stream.sv`, `sliding_window.sv`, `llc.sv` | low-level controller |
| `rtl/rtlola_monitor.sv` | top level |
| `tb/<block>_tb.sv` | self-checking testbench of each block |
| `tb/net_ref_pkg.sv` | reference model of the network specification, used by the controller and top-level testbenches |
| `tb/rtlola_monitor_full_tb.sv` | the top at its default parameters for one full second (10⁸ cycles) |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rtlola_pkg.sv \
  rtl/prescaler.sv rtl/ext_interface.sv rtl/time_select.sv rtl/scheduler.sv \
  rtl/event_delay.sv rtl/input_buffer.sv rtl/hlq_interface.sv rtl/hlc.sv \
  rtl/event_queue.sv rtl/llq_interface.sv rtl/eval_controller.sv \
  rtl/in_stream.sv rtl/out_stream.sv rtl/sliding_window.sv rtl/llc.sv \
  rtl/rtlola_monitor.sv tb/net_ref_pkg.sv tb/rtlola_monitor_tb.sv \
  --top-module rtlola_monitor_tb -o tb && ./obj_dir/tb
```

### The end-to-end test

`rtlola_monitor_tb` runs three monitors side by side.

- **Online monitor.** Each cycle stands for 2 µs, so three seconds of
  monitored time take 1.5 M cycles. Traffic includes:
  - FIN-heavy random traffic;
  - one write per hclk across every full second;
  - from 1.55 s, a burst of 10 100 packets to the server, so that both
    periodic triggers fire at the 2 s deadline.
- **Offline monitor.** Time stamps jump by up to three seconds.
- **Two-entry-queue monitor.** It is written as fast as it accepts events.

Every report of the first two monitors is compared with the reference model.
The testbench counts each mechanism and fails if any never occurred:

- event and deadline evaluations in both modes;
- an event and a deadline in the same hclk period;
- bucket evictions, including several buckets in one evaluation;
- all three triggers;
- the offline hold;
- the input buffer holding two or more events;
- a busy external interface;
- a queue overflow.

The window bypass never occurs at the top level, because events and
deadlines are separate queue entries. It is tested in `sliding_window_tb`.

`rtlola_monitor_full_tb` uses the default parameters: online, 10 ns clock,
prescaler 4, 8-entry queue. It runs one second of monitored time with a burst
of 10 100 packets at 0.6 s. At the 1 s deadline all three triggers fire. It
takes about one minute under Verilator.

## Size

Generic synthesis of the top level at its default parameters, without
technology mapping, gives about 8700 gate-level cells and 2511 flip-flops.
The flip-flops include the 8-entry queue, which is held as an array of
registers, and the 64-bit time stamps carried through the design. For the same
network specification, the reference FPGA build on a Zynq-7000 reports 1905
flip-flops (HLC 550, queue 330, LLC 895) and 1533 LUTs. That build was
generated from the specification and targets a real FPGA. It also sizes its
queue and time stamps differently, so the two sets of numbers compare only
roughly.
