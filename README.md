# Cycle-accurate timing and power triggering for dataflow software on an FPGA multiprocessor

Software written as a synchronous dataflow graph (SDFG) is made of actors. Each actor
firing has three phases: it reads tokens from its input channels, computes, and writes
tokens to its output channels. To choose a good mapping of actors to processors, you want
to know how long each phase, actor or whole graph iteration takes, and how much power it
draws, on the real hardware.

This RTL is the on-chip half of such a measurement setup. It sits next to a multiprocessor
built from soft cores. The software is instrumented with `start()` and `stop()` statements,
each of which is one write to a private stream port. The hardware turns those writes into:

* an **exact execution time** in clock cycles, counted on the processors' own clock;
* a **trigger wire** to an external power meter, high for exactly the cycles being timed;
* a **buffer of results**, sent to a host over a UART only after a series of measurements
  is complete. The serial traffic therefore never falls inside a power measurement.

The multiprocessor itself, the power meter and the host are not part of this RTL. They
connect through the ports of `measurement_system`.

```
 proc 0 --P-bus--> pbus_decoder -+
 proc 1 --P-bus--> pbus_decoder -+                         +--> power_trigger (to power meter)
 proc 2 --P-bus--> pbus_decoder -+--> meas_controller -----+
 proc 3 --P-bus--> pbus_decoder -+        |        |
                                          v        v upload_en
                                      stopwatch  result_uploader --> uart_tx --> uart_txd
                                          |        ^
                                          v        |
                                       result_buffer
```

## Marking code blocks: the P-bus command words

Each processor has its own AXI4-Stream link, the *P-bus*, into the measurement system.
Because no processor shares it, a trigger never waits in arbitration. The slave is always
ready, so one stream write delivers one command. On a MicroBlaze-class core that is about
two instructions. A command is one 32-bit word:

| bits 31:28 | name          | argument (bits 27:0)                                           |
|-----------:|---------------|----------------------------------------------------------------|
| 1          | `START`       | none                                                           |
| 2          | `STOP`        | none                                                           |
| 3          | `SET_STOPS`   | number of stops that end a measurement (0 is taken as 1)       |
| 4          | `SET_NMEAS`   | measurements per series before upload (0: until buffer full)   |
| 5          | `SET_AUTORST` | bit 0: start the next measurement at every final stop          |
| other      | none          | accepted and ignored                                           |

The helper `meas_pkg::make_cmd(op, arg)` builds these words.

To keep the program's timing the same whether or not a block is being measured, every
annotation point that is not in use should execute a delay of equal cost in place of the
`start()`/`stop()`. The hardware does not depend on this; the Sobel workload testbench
models it.

## When a measurement starts and ends

This is the subtle part of the design. A graph may have several source actors on different
processors, and several sink actors. So "the measurement" is defined over all P-buses
together:

* **Idle.** The first `START` from *any* processor starts the stopwatch. A `STOP` that arrives
  while idle is ignored.
* **Running.** Further `START`s are ignored, so every source processor may send one
  harmlessly. Each `STOP` is counted; stops in the same cycle on different buses count
  separately. When the count reaches `SET_STOPS` (the number of processors that fire sink
  actors), the measurement ends. The time is written into the buffer and the trigger drops.
* **Auto-restart.** With `SET_AUTORST 1`, the cycle that ends one measurement also starts
  the next one. Software then issues a single `start()` before its processing loop. Each
  iteration's final `stop()` closes one measurement and opens the next. The first value is
  the latency from the start to the end of iteration 1. Each later value is one iteration
  period, and no cycle is lost or counted twice. The power trigger falls for exactly one
  clock at each boundary, so a meter that reacts to edges can separate the iterations.
* **Upload.** After `SET_NMEAS` measurements, or when the buffer would overflow, the
  controller stops accepting triggers and lets the uploader empty the buffer over the UART.
  It returns to idle only when the buffer is empty and the last byte has left the line.
  Triggers that arrive during the upload are dropped, so the software should size a series
  so that it ends before the program moves on.

Same-cycle corner cases, all choices made by this design:

* With auto-restart off, a `START` in the same cycle as the final `STOP` is ignored.
* Configuration words are accepted only while idle.
* If two buses configure in the same cycle, the lower-numbered bus wins.

## What a time value means

Say the `START` beat is accepted on its P-bus in cycle *t0* and the final `STOP` beat in
cycle *t1*. Then the stored value is **t1 - t0**. Every P-bus has the same one-cycle
register stage, so the relation holds whichever buses carry the start and the stops.

The power trigger rises in cycle *t0* + 2 and falls in cycle *t1* + 2, so it is high for
exactly *t1 - t0* clocks. After an auto-restart it is high for one clock less, because of
the gap.

The stopwatch is 32 bits wide by default, which is 43 s at 100 MHz. If a measurement runs
longer, the reading saturates at all ones and `sw_overflow` is set, rather than wrapping.

Consider a phase-level measurement whose code is bracketed by `start()` and `stop()`. If
each statement costs two processor cycles, as modelled in the testbenches, the value is
the block's own length plus 2. The Sobel testbench checks exactly that for the
deterministic compute phases.

## Result upload format

The values leave on `uart_txd` as 8N1 serial frames at `CLK / CLKS_PER_BIT` baud (115200
at 100 MHz by default). Each value is `CNT_W/8` bytes, least significant byte first, with
no framing between values. The host reads fixed-size little-endian words. The order of
values is the order in which the measurements ended.

## Parameters (top: `measurement_system`)

| parameter      | default | meaning                                                         |
|----------------|--------:|-----------------------------------------------------------------|
| `N_PBUS`       | 4       | processors / P-buses (the reference platform is a quad-core)    |
| `CNT_W`        | 32      | stopwatch and result width                                      |
| `BUF_DEPTH`    | 1024    | result buffer entries (one 36 Kb block RAM at 32 bit)           |
| `CLKS_PER_BIT` | 868     | UART bit time in clocks                                         |

Status outputs of the top:

* `state`: IDLE, RUN or UPLOAD.
* `cfg`: the current configuration.
* `measuring`, `sw_overflow`: stopwatch state.
* `buf_count`, `buf_full`: buffer fill.
* `meas_cnt`: measurements in the current series.

## Files

| file                         | contents                                                   |
|------------------------------|------------------------------------------------------------|
| `rtl/meas_pkg.sv`            | command encoding, command/config structs, controller states |
| `rtl/pbus_decoder.sv`        | P-bus AXI4-Stream slave and command decoder                |
| `rtl/meas_controller.sv`     | start/stop/auto-restart/upload control, power trigger      |
| `rtl/stopwatch.sv`           | saturating cycle counter                                   |
| `rtl/result_buffer.sv`       | FIFO of time values (block-RAM style)                      |
| `rtl/result_uploader.sv`     | buffer to byte stream                                      |
| `rtl/uart_tx.sv`             | 8N1 transmitter                                            |
| `rtl/measurement_system.sv`  | top level                                                  |
| `tb/tb_*.sv`                 | self-checking testbenches, one per module, plus workloads  |

The code uses `always_ff`/`always_comb`, a package for the shared types, and concurrent
assertions for the rules that must never break:

* no push into a full buffer;
* no pop from an empty buffer;
* UART handshake data held stable;
* a stop only while running;
* the controller's count agrees with the buffer's fill level.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. It also has
a watchdog that counts a failure if the run hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/meas_pkg.sv tb/tb_measurement_system.sv \
          --top-module tb_measurement_system -Mdir obj && ./obj/Vtb_measurement_system
```

Replace the testbench name to run another one.

| testbench               | what it exercises                                                             |
|-------------------------|-------------------------------------------------------------------------------|
| `tb_pbus_decoder`       | random words against the command layout, one-cycle latency                    |
| `tb_stopwatch`          | random intervals, back-to-back restart, saturation (8-bit counter)            |
| `tb_result_buffer`      | random push/pop against a queue model, full and empty reached                 |
| `tb_uart_tx`            | a bit-level receiver, back-to-back bytes exactly 10 bit times apart           |
| `tb_result_uploader`    | byte order, nothing read while disabled, random back-pressure                 |
| `tb_meas_controller`    | every start/stop rule above, upload by count and by full buffer               |
| `tb_measurement_system` | end to end at small sizes (see below)                                         |
| `tb_sobel_workload`     | the top at its default parameters, Sobel graph at phase, actor and graph level |
| `tb_mapping_workload`   | the top at its default parameters, Sobel and JPEG graphs under seven mappings  |

`tb_measurement_system` uses a 16-bit counter, 8 buffer entries and 4 clocks per bit. It
runs three series and fails unless each of these happens at least once:

* ignored idle stop;
* ignored second start;
* multi-stop end;
* auto-restart;
* upload by count;
* upload by full buffer;
* triggers ignored during upload;
* saturation.

`tb_sobel_workload` runs the top with no parameter overrides. Four timing-only processor
stand-ins execute getPixel, GX, GY and ABS, with 9-token channels between getPixel and the
gradient actors and 1-token channels into ABS. It measures 15 scenarios of three iterations
each: 10 phases, 4 actors and the graph iteration with auto-restart. Every value is
decoded from the UART line at 115200 baud. The run is about 5 s of Verilator time. The
phase lengths in the stand-ins come from published Sobel 9x9 measurements on such a
platform, for example 4575 cycles for a gradient compute phase.

`tb_mapping_workload` places a Sobel graph and a JPEG encoder chain (getMB, CC, DCT, VLC)
together on the four processors. It uses seven static-order mappings, from one graph per
processor pair down to each graph on a single processor. Each graph's iteration latency is
measured at graph level with auto-restart. The JPEG phase lengths are placeholders, because
only whole-iteration times are published for it. The Sobel latencies come out
clearly longer in the mappings where Sobel actors queue behind JPEG actors on the same
processor, which is the effect such measurements are meant to expose.

## Capacity against the reference workloads

* Sobel filter, 9x9 mask, phase level. The longest phase reported is 34855 cycles (16 bits
  needed, 32 built), and each scenario is a series of repeated measurements. 1024 values
  fit in one series; longer series upload in several batches.
* Sobel filter and JPEG encoder, graph level, seven mappings on four tiles. Iterations take
  about 36 000 cycles (Sobel) and 295 000 cycles (JPEG), so 19 bits are needed and 32 are
  built. Each graph has one sink actor, so `SET_STOPS 1`. Two tiles or four fit in
  `N_PBUS = 4`.
* Sobel filter with a 3x3 mask: about 1820 cycles per actor.

## Where this RTL goes beyond, or stops short of, the published method

Taken from the method:

* one exclusive stream port per processor;
* start/stop semantics with ignored extra starts and a configured stop count;
* auto-restart for graph-level latency and period;
* a configured number of measurements;
* a result buffer uploaded over UART once enough values are collected or it is full;
* a trigger wire to an external power meter;
* a stopwatch clocked by the processor clock.

Chosen here, where the method leaves it open:

* the command word layout and opcodes;
* the always-ready P-bus and its one-cycle register stage;
* the *t1 - t0* convention;
* 32-bit saturating counter;
* 1024-entry buffer;
* configuration only while idle, and the same-cycle priorities;
* ignoring triggers during upload;
* the trigger as a level with a one-clock gap at auto-restart boundaries;
* little-endian raw byte stream;
* 8N1 at 115200 baud.

Not included:

* the processors and their memories, the system bus and the shared memory (vendor
  components);
* the external power meter with its shunts and firmware;
* the UART-to-USB converter and host software;
* the software API and the tool that inserts the annotations.

The power meter's own latency, up to 25 cycles for a trigger edge at 100 MHz, and its
minimum resolvable block of about 1200 cycles are properties of that board, not of this
RTL.
