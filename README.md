# Trigger-windowed strip readout for an RPC muon tracker

A muon scattering tomography setup tracks cosmic muons with stacks of
Resistive Plate Chambers (RPCs). Each chamber has two orthogonal planes of
readout strips (X and Y). A muon fires one to three strips per plane. Each
strip signal goes to a NINO amplifier-discriminator. The NINO turns it into
a digital LVDS pulse whose width, the time over threshold (TOT), measures
the induced charge. External scintillators in coincidence provide a muon
trigger.

The back end described here is one small FPGA. It oversamples every strip
line at 500 MHz, one bit per strip every 2 ns. When a trigger arrives it
keeps a 260 ns slice of those bits, 130 samples. It then sends the slice to
a PC over a plain UART. The PC finds which strips fired and how wide their
pulses were. From that it computes the hit position as a TOT-weighted mean
of the strip numbers. No TDC, no ADC and no custom board are needed: the
sampling clock is the time digitiser.

The RTL has four data-path parts: a digital delay, a FIFO memory, a
controller and a UART transmitter. A per-channel TOT counter is added
alongside. Defaults are 16 channels, i.e. two 8-channel NINO boards (one X
plane and one Y plane) on one FPGA. A slave link lets two boards share one
PC connection: a slave board sends its events over UART to a master
board, which passes them on after its own (see "Two boards").

```
             clk_500 (PLL)                               clk_50 (board)
 nino_in[15:0] --> digital_delay --> window_fifo ===(async FIFO)===> daq_controller --> slave_link --> uart_tx --> uart_txd
                   (64 x 2 ns)        |  ^   write side                 |   ^   read side     ^ uart_rx     (8N1)
                                      |  '-------- save_window ---------'   |                 |
                                      v                                    muon_trigger      slave_rxd
                                 tot_counter --> tot[16][8], tot_valid
```

## One event, step by step

1. **Trigger.** `muon_trigger` is asynchronous. The controller passes it
   through two flops at 50 MHz and reacts to its rising edge. If idle, it
   raises `save_window` (also the `trigger_window` output). The window
   opens 40 to 60 ns after the trigger edge and stays high for exactly 13
   clock cycles (260 ns).
2. **Capture.** On the 500 MHz side, `window_fifo` synchronises
   `save_window`. On its rising edge the FIFO stores exactly 130
   consecutive samples of the delayed strip lines. The window length is
   counted in the sampling domain. This makes the count exact whatever the
   phase between the two clocks. The 50 MHz level only starts the window.
3. **TOT.** `tot_counter` sees the same 130 samples as the FIFO. For each
   strip it counts the high samples of the first pulse in the window. On
   the edge that takes the last sample it updates `tot` and raises
   `tot_valid` for one cycle. The result is in units of 2 ns.
4. **Readout.** When the window closes, the controller pops the samples
   one at a time. Each 16-bit sample goes to the UART as two bytes.
5. **Dead time.** The controller returns to idle after the 130th sample
   has been handed over. Until then a trigger edge is not acted on. It
   only pulses `trigger_ignored`.

## Where a pulse lands in the window: the 128 ns delay

The coincidence unit issues the trigger some time after the strip pulse of
the same muon. Without a delay, the pulse would be over before the window
opens. `digital_delay` therefore shifts every strip line by 64 sampling
clocks (128 ns) before the FIFO.

Let a strip pulse start at `T + off`, where `T` is the trigger edge. It
then appears in the stored window at sample `off/2 + K`. K is common to all
strips of an event:

* the window opens 40–60 ns after `T`: two synchroniser flops plus the
  state register at 50 MHz;
* the first sample is taken 3–4 sampling clocks after that: a synchroniser,
  then the edge detector;
* hence K = 64 − (46…68 ns)/2, between 30 and 41 samples.

A pulse at the trigger time lands about a quarter of the way into the
window. A pulse up to about 60 ns before the trigger is still captured
whole. In the real setup the NINO pulse precedes the trigger, and the
coincidence cable delay pushes the pulse towards the window centre. If
your trigger latency differs, change `DELAY_SAMPLES`.

The delay line has no reset. It is a plain shift register, which an FPGA
maps to memory. Its first two stages serve as the synchroniser of the
asynchronous LVDS inputs. It holds random data for the first 64 sampling
clocks after power-up.

## The two clock domains

| domain | clock | blocks |
|---|---|---|
| sampling | `clk_500`, 500 MHz from the FPGA PLL | `digital_delay`, `window_fifo` write side, `tot_counter` |
| control | `clk_50`, 50 MHz board oscillator | `daq_controller`, `window_fifo` read side, `slave_link`, `uart_rx`, `uart_tx` |

The clocks need no phase relation. These signals are synchronised:

* `save_window` goes to the sampling domain through a two-flop
  synchroniser (`sync_ff`);
* `slave_rxd` comes from another board and passes two flops in `uart_rx`;
* the FIFO pointers cross in Gray code, each through its own two-flop
  synchroniser (`async_fifo`);
* `rst_n` is asserted asynchronously and released separately in each
  domain (`reset_sync`).

The `tot`, `tot_valid` and `fifo_overflow` outputs belong to the sampling
domain. The other outputs belong to the control domain.

The FIFO is 256 words of 16 bits. One window is 130 words. Triggers are
not served while a window is being sent, so the FIFO never holds more than
one window. `fifo_overflow` is a sticky error flag and should never rise.
The FIFO testbench forces an overflow to check the flag.

## Serial data format

Each event is `WINDOW_SAMPLES × ceil(CHANNELS/8)` bytes: 130 × 2 = 260
bytes at the defaults.

* There is no header and no trailer.
* Samples are sent in time order. Sample 0 is the oldest, the first
  sample after the window opened.
* Each sample is sent low byte first: byte 0 bit i is channel i, byte 1
  bit i is channel 8+i.
* Each byte is one 8N1 frame: a start bit, 8 data bits with the LSB first,
  and a stop bit.
* At the default `CLKS_PER_BIT = 434` (115200 Bd at 50 MHz) an event takes
  22.6 ms.

The PC recovers a strip's TOT by counting consecutive ones. The event
position is `Σ strip_i · w_i / Σ w_i` per plane, with `w_i` the TOT.
Events with more than three strips fired in a plane are treated as
streamers and dropped. This analysis is PC software and is not part of the
RTL.

Because events have no framing, the receiver must count bytes from a known
idle line. If that is a problem in your setup, add a header byte in
`daq_controller`. The cost is one state.

## Dead time and rate

At 115200 Bd the core accepts at most about 44 events per second. For
scale, a 25 cm × 35 cm trigger paddle sees roughly 15 cosmic muons per
second. About a third of those triggers would then fall into the dead time
and be ignored, and `trigger_ignored` tells you when this happens.

The bit rate is a parameter. The CH340G USB bridge on the board used with
this design runs up to 2 Mbd, and `CLKS_PER_BIT = 25` cuts the dead time to
1.3 ms. The dead time is one event's serial transfer. The capture itself
takes only 260 ns.

## Two boards: master and slave

One board per readout plane is also possible. The trigger goes to both
boards at once. There are two ways to connect them:

* **Master-master.** Each board sends to the PC on its own UART. Tie
  `slave_rxd` high on both.
* **Master-slave.** Wire the slave's `uart_txd` to the master's
  `slave_rxd`, and tie the slave's own `slave_rxd` high. Only the master
  talks to the PC.

In the master, `uart_rx` receives the slave's bytes and `slave_link`
buffers them (512 bytes). `slave_link` then shares the master's
transmitter, one whole event at a time:

* the master's own event has priority;
* when it has been handed over, one slave event of the same size
  (`WINDOW_SAMPLES × ceil(CHANNELS/8)` bytes) is passed on;
* the link waits for bytes still arriving from the slave.

Both boards capture the same trigger. The slave's event therefore arrives
while the master sends its own, so the PC sees the master event and then
the slave event. A master-slave event pair is 520 bytes at the defaults
and takes 45 ms at 115200 Bd, which allows about 22 pairs per second.

Limitations:

* there is no event header, so the PC pairs master and slave events by
  their order;
* this only works if both boards accept the same triggers. The master
  stays busy longer than the slave, by the time it spends forwarding. A
  trigger that only the slave accepts would break the pairing. Keep the
  trigger rate well below the pair rate, or gate the trigger externally;
* if slave bytes are lost, the master waits for the missing ones and its
  own next event is delayed. `link_overflow` (buffer full) and
  `link_frame_error` (bad stop bit) are sticky flags that report link
  trouble.

## Modules

| file | role |
|---|---|
| `daq_pkg.sv` | shared constants: clock periods, 128 ns / 260 ns, channel count, defaults |
| `daq_top.sv` | the core: wires the blocks below |
| `digital_delay.sv` | 64-stage delay per channel (128 ns) |
| `window_fifo.sv` | windowed 130-sample capture into a dual-clock FIFO |
| `async_fifo.sv` | Gray-pointer dual-clock FIFO used by `window_fifo` |
| `daq_controller.sv` | trigger handling, 260 ns window, FIFO-to-UART sequencing, dead time |
| `uart_tx.sv` | 8N1 transmitter with a valid/ready byte input |
| `uart_rx.sv` | 8N1 receiver for the line from a slave board |
| `slave_link.sv` | slave event buffer and event-wise sharing of the master's transmitter |
| `tot_counter.sv` | per-channel TOT of the first pulse in each window |
| `sync_ff.sv`, `reset_sync.sv` | synchronisers |

Parameters of `daq_top`:

| parameter | default | meaning |
|---|---|---|
| `CHANNELS` | 16 | strip lines (two NINO boards) |
| `DELAY_SAMPLES` | 64 | input delay in 2 ns steps (128 ns) |
| `WINDOW_SAMPLES` | 130 | samples stored per trigger (260 ns) |
| `WINDOW_CYCLES` | 13 | length of `trigger_window` in 50 MHz cycles (260 ns) |
| `FIFO_DEPTH` | 256 | FIFO words, power of two, at least `WINDOW_SAMPLES` |
| `CLKS_PER_BIT` | 434 | 50 MHz clocks per UART bit (115200 Bd), for both UART directions |
| `LINK_DEPTH` | 512 | slave event buffer in bytes, power of two, at least one event |

The PLL and the LVDS input buffers are not part of the RTL. Neither are
the NINO front end, the scintillator coincidence unit and the PC. To use
the core on an FPGA, instantiate the vendor PLL for `clk_500` and the
vendor differential input buffers for `nino_in`. The `tot` outputs are
available for local use, for example hit counters or a display. They are
not in the serial stream.

## Relation to the published design

These points follow the published design:

* the four blocks and their connections;
* the clock rates: 500 MHz for the delay and the FIFO, 50 MHz for the
  controller and the UART;
* the 128 ns delay, the 260 ns window and its 130 one-bit samples per
  channel;
* the trigger-then-send sequence;
* two NINO boards on one FPGA;
* serial transmission to a PC;
* the master-slave configuration, with the slave sending to the master
  over UART and the master sending to the PC.

These points are this design's own choices, because the publication does
not give them:

* the realisation of the delay as a shift register;
* the dual-clock FIFO with its depth of 256, and one shared FIFO word per
  sample rather than one memory per channel;
* the controller state machine, and ignoring triggers until the event has
  been sent;
* the byte layout, with no header;
* the UART bit rate and frame format;
* in the master, the slave buffer and the rule of sending the master's
  event first, then the slave's;
* synchronisers and reset;
* the TOT counter's rule of counting the first pulse, and its output as
  ports. The publication attributes the TOT count to the FPGA board but
  lists only the four blocks as the core.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/daq_pkg.sv \
    tb/daq_top_tb.sv --top-module daq_top_tb -Mdir obj_top
./obj_top/Vdaq_top_tb
```

Replace the testbench and top name for the other benches:

| testbench | what it checks |
|---|---|
| `digital_delay_tb` | every channel delayed by exactly 64 clocks |
| `window_fifo_tb` | 130 samples per window, start latency, order across clocks, re-trigger during capture, forced overflow |
| `tot_counter_tb` | TOT against a reference for random windows with edge, double and missing pulses |
| `uart_tx_tb` | 8N1 frames decoded by an independent receiver, frame length, ready/busy |
| `daq_controller_tb` | window width, byte order, back-pressure, triggers in the dead time |
| `uart_rx_tb` | good frames, frames with a low stop bit, short glitches, random gaps and phase |
| `slave_link_tb` | whole events only, own event first, own event held during forwarding, waits for bytes in flight, overflow and frame-error flags |
| `daq_top_tb` | end to end, master and slave, with a fast UART (4 clocks per bit): six events of 2–6 fired strips, widths, alignment K, TOT outputs, ignored triggers, the slave's window forwarded after the master's |
| `daq_top_full_tb` | the same at all defaults (115200 Bd); one event, master and slave |

In the end-to-end benches, pulses are driven on the 500 MHz falling edge
in whole 2 ns steps. The widths are therefore exact in samples. Real
asynchronous pulses would show a ±1 sample spread, which is the 2 ns
resolution of the method. Verilator has no X or Z. The benches wait for
the delay line to flush before the first event.
