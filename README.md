# FlashCam readout logic: continuous digitisation, a 32 µs ring buffer and a digital camera trigger

A Cherenkov telescope camera sees flashes of light a few nanoseconds long,
at random times, on top of a steady background. The FlashCam camera for the
medium-sized telescopes of CTA handles this without any analog trigger: each
of its 1764 photomultiplier pixels is digitised continuously at 250 MS/s with
12 bits, the samples are kept for 32 µs in a ring buffer in an FPGA, and the
trigger decision is itself computed from the digitised samples. When a
trigger arrives, either from the camera's own logic or later from the
telescope array, the FPGA reads the trace of every pixel around the trigger
time out of the ring buffer and sends it over Ethernet to a camera server.
Because the buffer keeps being written while events are read, there is no
dead time as long as events are read before they are overwritten.

This repository gives synthesizable SystemVerilog for that digital part: the
per-board ring buffer, trigger preprocessing, trigger queue and readout, and
the camera-wide trigger, assembled into a complete camera. The photomultipliers,
preamplifiers, FADC chips, Ethernet MACs and switches, slow control and the
camera server are outside it. The published description of the camera gives
the structure and the numbers (pixel count, sample rate and width, buffer
length, event rates) but not the internals of the firmware. So every
algorithm, format and handshake here is the simplest one that does what the
camera is described as doing. Each file's header says which parts follow the
camera description and which are this design's own choices. The
[departures](#where-this-design-departs-from-or-goes-beyond-the-camera-description)
section lists them.

## Structure

```
             samples[b] (12 x 12 bit per cycle)                    ext_valid, ext_ts
                 |                                                       |
   +-------------v----------------- fadc_board b (x147) -+               |
   |  ring_buffer  <---- rd_age ---- readout_controller -+--> m_* stream (to Ethernet)
   |   8000 x 144 bit  --rd_data-->      ^               |
   |                                     | q_pop/q_dout   |
   |  trigger_preprocessor           sync_fifo (16)      |
   +--------|--------------------------------^-----------+
            | prim (nhits, sum, ts)           | trig (evt, src, ts)
            v                                 |
         camera_trigger  ---------------------+  broadcast to all boards
```

| module | role |
|---|---|
| `flashcam_pkg` | sizes, `trig_prim_t`, `trig_msg_t`, trigger source and algorithm enums, record constants |
| `ring_buffer` | 8000-word memory written every cycle, read by age |
| `trigger_preprocessor` | per board and per cycle: number of pixels over threshold and the summed amplitude |
| `camera_trigger` | combines all boards, holdoff, merges external triggers, numbers events |
| `sync_fifo` | trigger queue of a board |
| `readout_controller` | turns a queued trigger into an event record |
| `fadc_board` | one board's FPGA: the four blocks above |
| `flashcam_top` | 147 boards, the camera trigger and the camera-wide sample counter |

Defaults: `N_BOARDS = 147`, `CH_PER_BOARD = 12` (1764 pixels),
`RING_DEPTH = 8000` (32 µs × 250 MS/s), `SAMPLE_W = 12`, trigger queue depth 16.

## Time

All logic runs on one 250 MHz clock, so one clock cycle is one sample. The top
keeps a 48-bit sample counter, `ts_now`, and hands it to every board together
with the samples. A sample, a trigger primitive, a trigger message and an event
record all carry a time stamp from this counter. The camera therefore needs no
fixed relation between when something happens and when it is processed. A
trigger says *which* samples it wants, not *when* it was issued. This is what
makes delayed triggers work: an array trigger that arrives microseconds late
simply names an older time.

## The ring buffer

`ring_buffer` stores one 144-bit word (all 12 channels) per sample, at a
write address that advances every cycle and wraps after 8000 words. Writing
never pauses; the read port is separate. It is addressed by **age**:
`rd_age = 0` is the word written in the previous cycle, `rd_age = 7999` the
oldest one held (it is being overwritten in the same cycle, and the read
returns its old contents). Data appears on `rd_data` one cycle after `rd_en`
and holds until the next read.

For a sample of time `T`, read while the counter shows `ts`, the age is
`ts - 1 - T`. The readout controller does this subtraction at full 48-bit
width. So a time that is too old (age > 7999) or not yet written (negative
age) is recognised and never silently wraps to a wrong address.

## The trigger path

The trigger is built in two steps, with four cycles of latency in total. The
latency does not matter for the data, because the time stamp travels with the
primitive.

1. **`trigger_preprocessor`, on every board.** For each channel it computes
   `amp = max(sample − pedestal, 0)` and a discriminator bit `amp > pix_thr`.
   It then sends `nhits` (the number of set bits) and `sum` (the saturating
   16-bit sum of the amplitudes), stamped with the samples' time.
2. **`camera_trigger`.** It adds `nhits` over all boards and checks whether
   any board's `sum` reaches `sum_thr`. It then decides with the run-time
   algorithm `trig_alg`:
   - `ALG_MULT`: at least `maj_thr` pixels over threshold in the camera;
   - `ALG_SUM`: the summed amplitude of at least one board ≥ `sum_thr`.

   A self trigger also requires `trig_enable`. It starts a holdoff of
   `holdoff` cycles, during which no new self trigger is issued, so a pulse
   several samples long gives one event (it fires again every
   `holdoff + 1` cycles while the condition persists).

**External triggers** enter as `ext_valid` with `ext_ts`, the time they refer
to. One that arrives alone is forwarded in the next cycle. One that arrives in
the same cycle as a self trigger is held for one cycle and sent after it. If
another external trigger arrives while one is held and a self trigger again
takes the slot, the new one is lost and counted in `ext_lost`. Every issued
trigger gets the next 16-bit event number and is broadcast to all boards as a
`trig_msg_t {evt, src, ts}` with a one-cycle `trig_valid`.

The same input serves a *second-level* decision: readout upon a later,
lower-threshold or array-level trigger. Whatever forms that decision, inside
or outside the camera, only needs to present the time of the event on
`ext_ts` within the ring buffer's reach.

## Reading an event

Each board queues trigger messages in a 16-entry `sync_fifo`. A message that
arrives while the queue is full is dropped and counted (`n_dropped`); other
boards may still take it. `readout_controller` handles the queue head:

1. **Window.** The window is `win_len` samples (0 counts as 1) starting at
   `t0 = ts − pretrig`.
2. **Wait.** If the last sample of the window has not been written yet, the
   controller waits (`n_wait` counts the cycles). A self trigger always waits
   briefly, because its window reaches past the trigger time.
3. **Expire.** If `t0` is older than the buffer (age > 7999), or lies before
   time zero, the trigger is dropped and counted (`n_expired`).
4. **Send.** Otherwise the controller sends one record on the
   `m_valid/m_ready/m_data/m_last` stream (16-bit words, AXI-stream style; a
   word that is offered stays unchanged until it is taken):

| word | content |
|---|---|
| 0 | `0xFCA0` with the source in bits 1:0 (1 self, 2 external) |
| 1 | event number |
| 2, 3, 4 | trigger time stamp, bits 15:0, 31:16, 47:32 |
| 5 ... | channel 0 samples `t0 ... t0+win_len−1`, then channel 1, ..., channel 11; each zero-extended to 16 bits |

The last sample word has `m_last` set. The samples are fetched one cycle
ahead of the stream. The next ring-buffer read is issued in the same cycle in
which the word on offer is taken. While the receiver holds off, the ring
buffer's output register therefore keeps the offered word, and with `m_ready`
high one word leaves every cycle. From the moment its window is complete, a
record takes `3 + 5 + 12·win_len` cycles, and the next queued trigger is taken
up in the following cycle.

### Dead time and the 32 µs budget

This is the part of the design that needs care when it is configured.
Writing never stops, so the only way to lose data is for a sample to be
overwritten before it is read. A trigger is served fully when

    lookback + pretrig + (time waiting in the queue) + 12·win_len  <  8000 samples

Here lookback is how far in the past the trigger's time is when it reaches
the board.

- With `win_len = 128` (512 ns), a record takes 1544 cycles, which is 6.2 µs.
  A board can therefore sustain about 160 kHz of triggers.
- At 30 kHz (33.3 µs between events) windows of up to 693 samples can be read.
- At 50 kHz, windows of up to 416 samples can be read.
- An external trigger referring 16 µs back, with one record queued ahead of
  it, uses 4000 + 4 + 1544 + 1544 = 7092 samples of the budget.
- A trigger 30 µs back fits only with an empty queue and a short window.

If stream back-pressure or queueing pushes a sample past the buffer while the
record is being sent, the controller does not stall or abort. It sends
`0xFFFF` (a value no 12-bit sample can take) in that sample's place and counts
it in `n_lost`, so the record keeps its length and the receiver can tell.

## Where this design departs from or goes beyond the camera description

Taken from the camera description:

- the partition into FADC, FPGA with ring buffer and trigger preprocessor,
  camera trigger and Ethernet readout to a server;
- the 12-bit, 250 MS/s continuous sampling;
- the 32 µs ring buffer;
- the 1764 pixels;
- a trigger computed from the digitised signals, with algorithms that can be
  chosen and tuned;
- delayed external triggers;
- dead-time-free readout of traces.

Chosen here, because the description does not give them:

- 12 channels per board (a photodetector module has 12 pixels, and
  1764 = 147 × 12);
- the two trigger algorithms, the pedestal/threshold/sum primitive and the
  holdoff;
- the external-trigger merge rule;
- the 48-bit time stamp, the trigger message and the record format;
- the 16-entry queue and its drop rule;
- the expiry rule and the lost-sample marker;
- the one-word-per-cycle read pipeline;
- one clock domain for the whole camera.

Not modelled:

- the grouping into three readout sectors of about 600 channels, crates,
  backplanes and trigger interface cards (all boards form one flat array
  here);
- the physical trigger links;
- firmware multi-boot and upload;
- anything the camera server does (event building, zero suppression, event
  selection).

The primitive bus carries 147 × 72 bits per cycle, which is 2.65 Tbit/s. That
is the same order as the 2.7 Tbit/s quoted for the real camera's trigger
communication, but the real link format is unknown.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_flashcam_top \
  rtl/flashcam_pkg.sv rtl/ring_buffer.sv rtl/trigger_preprocessor.sv rtl/sync_fifo.sv \
  rtl/readout_controller.sv rtl/fadc_board.sv rtl/camera_trigger.sv rtl/flashcam_top.sv \
  tb/tb_flashcam_top.sv -o sim && obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `tb_ring_buffer` | random reads of every age against a copy of everything written, at the full 8000 depth |
| `tb_trigger_preprocessor` | every primitive against a reference, random pedestals and thresholds |
| `tb_sync_fifo` | queue model, fill and drain phases |
| `tb_camera_trigger` | both algorithms at and below threshold, holdoff, external triggers alone, held and lost, enable; exact cycle of every message |
| `tb_readout_controller` | record contents and cycle count, waiting, expiry at exactly the buffer edge, burst under back-pressure, overwritten samples |
| `tb_fadc_board` | one full-size board: primitives every cycle, record latency, future window, expiry, a 20-trigger burst overflowing the queue |
| `tb_flashcam_top` | 4 boards, 1024-sample buffers: every mechanism above happens at least once, all records checked |
| `tb_flashcam_full` | the full 1764-pixel camera at default parameters: one self trigger and one external trigger 30 µs back, all 294 records checked |
| `tb_flashcam_rate` | full camera: 40 external triggers 16 µs back at 50 kHz, 40 at 30 kHz, and 10 kHz of self triggers, with 128-sample windows; nothing dropped, expired or lost |

The full-size runs take well under a minute of simulation after a build of
about half a minute. Note that a full camera holds 169 Mbit of ring buffer
(1.15 Mbit per board). In an FPGA this is block RAM. As an ASIC it would be
SRAM macros, which would replace the `mem` arrays in `ring_buffer` and
`sync_fifo`.
