# Event frame generation for HD event cameras, in SystemVerilog

An event camera does not deliver images. Each pixel reports on its own when
its brightness changes, as an event `e = {t, x, y, p}`: a microsecond
timestamp, the pixel position and the polarity (brighter or darker). Most
vision algorithms, classical or neural, still expect images. The usual bridge
is the *event frame*: collect all events of a time interval `tau` and project
them onto the image plane, one grey level per pixel.

At 1280 x 720 pixels (HD) this is hard to do in an FPGA. The frame must live in
on-chip memory (921,600 elements), the whole memory must be read out and
cleared once per interval, and events keep arriving while that happens. This
RTL implements the frame generator described by K. Blachut and T. Kryjak in
"High-definition event frame generation using SoC FPGA devices". It includes
the basic architecture and the variants that publication implements:

- four pixel representations;
- several block memories read in parallel;
- a rolling window.

## The idea in one picture

```
 events  +-----------+  head  +--------------+  write port  +-----------------+
 ------->| event_fifo|------->| event_writer |------------->| accumulator_ram |
 ev_valid| (32768 x  |  pop   | address calc |  (read port  |  x BANKS        |
         |  {t,x,y,p})|<-------| value / RMW  |   for RMW)   |  921600 / BANKS |
         +-----------+        +--------------+              |  cells x DW bit |
              ^ drop oldest          | window_done          +-----------------+
              | in read mode         v                        ^ read     | data
              |               +--------------+  counter,      | all      v banks
              +---- mode -----| mode control |  clear(addr-1) +--+ +--------------+
                              | write / read |--------------->| | frame_reader  |
                              +--------------+    start/done  | +--------------+
                                                                      | values
                                                          +---------------+
                                                          | pixel_decoder | x BANKS
                                                          +---------------+
                                                                 | 8-bit grey
                                                                 v pix_data
```

The generator is always in one of two modes.

- **Write mode.** Events are taken from the head of the event queue. Each one
  is written to the accumulator at `address = y * WIDTH + x`. This continues
  until the event at the queue head has a timestamp at or beyond the end of
  the current interval. That event stays in the queue. Once the write
  pipeline is empty, the generator switches to read mode.
- **Read mode.** A pixel counter starts at 0 and steps through the whole
  accumulator, one cell per clock. Each value read is decoded to a grey level
  and output. The cell address is delayed by one clock and sent to the
  memory's second port with the value 0, which clears the cell just read.
  After the last pixel the interval end advances by `tau` and the generator
  returns to write mode.

Events that arrive during read mode belong to the next frame. They must not
reach the accumulator yet. So *every* event goes through the queue, in both
modes. In read mode nobody drains the queue. If it fills up, the oldest
queued event is dropped to make room for the newest, because recent events
describe the current scene.

## Modules

| file | role |
|---|---|
| `rtl/efg_pkg.sv` | event struct, representation enum, encodings, the two look-up tables |
| `rtl/event_fifo.sv` | event queue: show-ahead FIFO in one block memory, drop-oldest in read mode |
| `rtl/pixel_address.sv` | `address = y*WIDTH + x`; `bank = address % BANKS`, `cell = address / BANKS` |
| `rtl/accumulator_ram.sv` | two-port memory (one read port, one write port), one element per pixel |
| `rtl/event_writer.sv` | write memory controller: interval tracking, value per representation, read-modify-write |
| `rtl/frame_reader.sv` | read memory controller: pixel counter, delayed clearing, rolling-window selection |
| `rtl/pixel_decoder.sv` | accumulator value to 8-bit grey level |
| `rtl/event_frame_generator.sv` | top: wires the above together and holds the write/read mode switch |

## Representations (`REPR`)

The representation sets what one accumulator element holds and how it is
decoded. It also sets the width of the accumulator, and that width is the main
cost of the design.

| `REPR` | bits | written on each event | grey level out |
|---|---|---|---|
| `REPR_BINARY` | 1 | 1 | 1 -> 255, 0 -> 0 |
| `REPR_EVENT` (default) | 2 | +1 (`01`) or -1 (`11`), latest event wins | +1 -> 255, -1 -> 0, none -> 128 |
| `REPR_EXP_DECAY` | 8 | `±round(127·exp(-k/64))`, `k = floor(64·(t_end - t)/tau)` | 128 + value |
| `REPR_FREQUENCY` | 5 | stored sum ±1, saturated to -16 .. 15 | `round(255 / (1 + exp(-x/2)))` |

- **Binary frame from one polarity.** `BIN_POL = POL_POS` or `POL_NEG`
  builds the binary frame from positive or negative events only, which the
  publication mentions as possible. Events of the other polarity are still
  taken from the queue, so they advance time as usual, but nothing is
  written for them. The default, `POL_BOTH`, uses every event.
- **Exponentially decaying time surface.** The intended pixel value is
  `p · exp((t - t_end)/tau)`. The event's distance from the interval end is
  quantised to 64 steps of `tau`. A 65-entry table in `efg_pkg` gives the
  magnitude, `round(127·exp(-k/64))`. The signed result is stored, so one
  cleared cell (0) still means "no event". The decoder centres it on 128.
  The scale of 127, the 64 steps and the 128 offset are choices of this RTL.
  The original only says that the rounded value is stored in 8 bits.
- **Event frequency.** This is the only representation that needs the old
  content of a cell. On an event the writer reads the sum through the read
  port. One clock later it writes the incremented or decremented sum through
  the write port. If the next event hits the same cell, the memory still
  returns the old sum (the memory is read-first). The writer therefore
  forwards the value it wrote in the previous clock. The output table
  `freq_lut` holds `round(255/(1+exp(-x/2)))` for x = -16 .. 15.

## Several memories in parallel (`BANKS`)

With `BANKS = X` the accumulator is split into X memories of
`WIDTH*HEIGHT/X` cells each. An event goes to memory `address % X`, at cell
`address / X`. When X divides the width, that memory is simply the column
modulo X. In read mode the counter reads the same cell of all X memories at
once. This gives X consecutive pixels per clock ("Xppc"), lane 0 first. The
image is identical to the one-memory case. Reading takes X times fewer clocks,
so the clock can be X times slower. X must divide `WIDTH*HEIGHT`. The
published illustration (12 x 8 pixels, 2 memories) labels the worked example,
event (8, 5), with "select BLOCK RAM 2". Here it goes to memory 0, the first
one: the column parity rule `68 % 2 = 0` is followed, counting from 0.

## Rolling window (`ROLLING = 1`)

This is the least obvious part. Its aim is to output an image every `K` ms that
covers the last `M` ms, while the accumulator remembers `N` ms
(`K <= M <= N`). The defaults are the published test values `N = 8`, `M = 4`,
`K = 1` ms (`N_SUB`, `M_SUB`, `K_US`).

- Time is cut into sub-windows of `K` ms, numbered modulo `N` (3 bits for
  N = 8). Indices run from 0 to N-1 here; the published illustration counts
  them from 1 to N, which changes nothing but the labels. The writer stores `{sub-window index, value}` in each cell, so the
  event frame needs 2 + 3 = 5 bits.
- After each sub-window the generator enters read mode, as it would after a
  full interval. Let `c` be the index of the sub-window that just ended. For
  each cell the reader computes the age `(c - idx) mod N`:
  - **age < M**: the value is output;
  - **otherwise**: the pixel is output as "no event", but its content is kept;
  - **idx == (c + 1) mod N**: the cell is cleared. This is the oldest
    sub-window, whose index the next sub-window is about to reuse. All other
    cells are left untouched.

  Example, N = 4, M = 2: after sub-window 4 the image shows sub-windows 3
  and 4, and cells of sub-window 1 are cleared. After the next sub-window
  (index 1 again) the image shows 4 and 1, and sub-window 2 is cleared.
- A cell holds only its latest event, so a pixel shows in the image only if
  its latest event is recent enough. For the event frequency, a count stored
  under another sub-window index starts again from zero. That is a choice of
  this RTL.

The rolling window costs a full read-out every `K`. At K = 1 ms and HD with
one memory, that is 921,600 clocks per millisecond, i.e. a clock above
921.6 MHz before any event is written. In practice it needs `BANKS >= 8`
(115.2 MHz for the read-out alone).

## Interface of `event_frame_generator`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `ev_valid`, `ev` | in | 1, 54 | one event per clock at most; `ev` is `efg_pkg::event_t` `{t[31:0] (us), x[10:0], y[9:0], p}`, with `p = 1` for brighter |
| `pix_valid` | out | 1 | `pix_data` holds BANKS pixels |
| `pix_data` | out | BANKS x 8 | grey levels of consecutive pixels, row-major, lane 0 first |
| `pix_first`, `pix_last` | out | 1 | first / last pixel group of a frame |
| `frame_end_t` | out | 32 | end timestamp of the interval being accumulated; during read mode, of the frame being output |
| `read_mode` | out | 1 | 1 while the accumulator is being read |
| `ev_dropped` | out | 1 | pulses for each event lost to a full queue |
| `fifo_count` | out | 16 | queue fill level |

There is no back-pressure: a sensor cannot be stalled, and the queue absorbs
the input instead. Timing:

- In write mode one event is accumulated per clock.
- A read-out lasts `WIDTH*HEIGHT/BANKS + 2` clocks in read mode.
- The first pixel group follows the mode switch by two clocks: one for the
  memory read, one for the output register.

### When does a frame come out?

The end of an interval is detected on the *event stream*, not on a timer. The
first event opens the first interval (`t_first + tau`), and later intervals
follow back to back. A frame is emitted when an event with a timestamp past
the interval end reaches the queue head. If the sensor is silent, the last
frame waits for the next event. If there is a gap longer than `tau`, one
empty frame is emitted per skipped interval. That keeps a fixed frame rate in
sensor time.

## Parameters

| parameter | default | origin |
|---|---|---|
| `WIDTH`, `HEIGHT` | 1280, 720 | HD sensor of the publication |
| `REPR` | `REPR_EVENT` | the "basic" configuration of its resource comparison is the 2-bit event frame |
| `BANKS` | 1 | basic version; the illustration of the variant uses 2 |
| `FIFO_DEPTH` | 32768 | queue size of the publication (its resource comparison used 512) |
| `TAU_US` | 10000 | 10 ms interval used throughout |
| `ROLLING`, `N_SUB`, `M_SUB`, `K_US` | 0, 8, 4, 1000 | rolling window test values N = 8, M = 4, K = 1 ms |
| `BIN_POL` | `POL_BOTH` | own choice; one-polarity binary frames are an option the publication mentions |

The timestamp width (32 bits of microseconds) and the coordinate widths
(11 + 10 bits) are choices of this RTL.

### Memory needed

The numbers below are computed from the parameters.

| configuration | accumulator | queue (54-bit events) |
|---|---|---|
| binary frame | 921,600 x 1 = 0.92 Mbit | 32768 x 54 = 1.77 Mbit |
| event frame (default) | 921,600 x 2 = 1.84 Mbit | 1.77 Mbit |
| decaying time surface | 921,600 x 8 = 7.37 Mbit | 1.77 Mbit |
| event frequency | 921,600 x 5 = 4.61 Mbit | 1.77 Mbit |
| rolling window, event frame | 921,600 x 5 = 4.61 Mbit | 1.77 Mbit |

Memories are written as plain arrays with one read and one write port, so
FPGA tools map them to block RAM or UltraRAM. The publication compares these
sizes with the block memory of ZCU104, Kria KV260 and Zybo Z7-20 boards. On
the smallest of these, only the 1- and 2-bit representations fit.

How long can a read-out be? It is 921,600 clocks at one memory, which is
9.2 ms at 100 MHz: almost a whole 10 ms interval. How many events the queue
must absorb during it depends on the scene. The publication chose 32768;
a busier scene loses its oldest buffered events.

## What follows the publication and what does not

Taken from the publication:

- the three-part architecture (accumulator, memory controllers, temporary
  queue);
- one element per pixel and the address formula;
- the two-port use of the memory, with clearing through the write port at
  the read address delayed by one clock;
- the queue size, and replacing the oldest event when it is full in read mode;
- the four representations, with their bit widths, the event-frame grey
  levels 255/0/128, the saturation to -16 .. 15 and the frequency formula;
- the bank/cell split by division by the number of memories, read in
  parallel for X pixels per clock;
- the rolling window's index bits, its selection of the last M sub-windows
  and its clearing of only the oldest index.

Choices of this RTL, where the publication gives no detail:

- event field widths and the microsecond timestamp;
- the event-driven end-of-interval rule and the first interval starting at
  the first event;
- the FIFO's internal structure, and dropping the *incoming* event if the
  queue is full in write mode;
- read-first memories, initialised to zero;
- the forwarding in the read-modify-write;
- the decay table (scale 127, 64 steps, signed, offset 128);
- the output register, and the frame markers and status outputs;
- the rolling-window behaviour of the frequency count.

Not built:

- reading several pixels from one wide memory, which the publication
  mentions as a Vivado option;
- ping-pong double accumulators and queues in external DRAM or UltraRAM,
  which are discussed as alternatives;
- an adaptive interval, or a frame every Z events, which are proposed as
  future work;
- rolling-window refinements the publication only suggests: several frames
  offset by K combined into a multi-channel image, and an M that changes at
  run time;
- the event camera itself and the downstream vision system.

The published variants were verified with recorded sequences of a thrown
ball. Those recordings are not available here. The testbenches use random
event streams instead.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

- `tb_event_fifo`: compares with a list model every clock. It covers both
  overflow cases and checks one push plus one pop per clock.
- `tb_pixel_address`: checks the HD corner pixel, and the 12 x 8 example
  (event (8, 5) -> address 68, cell 34 with two memories) over all pixels with
  2 and 3 memories.
- `tb_accumulator_ram`: checks the zero initial content, random traffic, and
  read-first behaviour on collisions.
- `tb_event_writer`: runs event frequency with the rolling window and
  2 memories against a reference accumulation. It covers the interval
  boundaries, one event per clock and back-to-back events on one pixel. It
  also checks decay values against `exp()` computed in the testbench.
- `tb_frame_reader`: checks the basic and the rolling-window reader against
  random memory contents. It covers values, markers, latency, rate and which
  cells are cleared.
- `tb_pixel_decoder`: checks every input code of the four mappings.
- `tb_event_frame_generator`: runs eight small generators (12 x 8, 16-entry
  queue) side by side: every representation, 2 and 3 memories, the rolling
  window with the event frame and with the frequency, and a binary frame of
  positive events only. Each has its
  own random stream and a reference model (`efg_harness`). The checks cover
  every pixel of every frame, every popped event, each mode switch and each
  read-out length. The bench also requires that queue overflow, events during
  read mode, back-to-back events on one pixel, rolling-window hold-back
  and clearing, and events left out of the one-polarity frame all happened.
- `tb_efg_full`: uses all default parameters (HD, event frame, 32768-entry
  queue, 10 ms). It checks two full frames pixel by pixel. During the first
  read-out, 40,000 events arrive, so exactly 7,233 are dropped and the
  second frame must show only the newest 32,768.
- `tb_efg_hd_variants`: runs each variant of the resource comparison at full
  HD with the 512-entry queue it used: four representations, two memories,
  and the rolling window. Each variant is checked against the reference
  model. It takes about ten seconds.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/efg_pkg.sv \
    tb/tb_event_frame_generator.sv --top-module tb_event_frame_generator
./obj_dir/Vtb_event_frame_generator
```

Verilator finds the other modules by file name through `-I`/`-y`, as each
module lives in a file of the same name. The testbenches pulse the
asynchronous reset before the first clock edge and do not rely on any
register's initial value.
