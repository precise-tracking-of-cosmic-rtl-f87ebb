# TOT strip readout for an RPC muon tracker: FPGA logic in SystemVerilog

A resistive plate chamber (RPC) reads out a crossing muon as charge induced on
several neighbouring copper strips (1.2 cm pitch here). The strip under the
track collects the most charge, and the way the charge spreads over its
neighbours locates the track to a fraction of the pitch. Measuring that charge
normally needs one ADC per strip. This design avoids ADCs. Each strip is
read by a NINO discriminator channel, whose output pulse stays high for as
long as the strip signal is above threshold. That *time over threshold*
(TOT) grows with the charge, so charge becomes pulse width. Pulse width can be
measured with nothing more than a counter in a low-cost FPGA.

The logic here measures those widths with a 500 MHz clock, i.e. in 2 ns steps.
It keeps the latest width of each of seven strips: the central strip and three
on each side. Whenever three trigger scintillators and the central strip fire
together, it sends the seven widths to a PC over a UART. The PC then takes the
strip with the largest TOT as the hit strip, and the spread of TOT over the
strips as a measure of the resolution.

The measurement scheme is taken from a published description of such a DAQ:
500 MHz TOT counting from a PLL on a 50 MHz board clock, seven strips in a
memory array, a 50 MHz coincidence of three scintillators with the central
strip, and a UART link. That description gives what each part does but not how
it is built. Everything that joins the parts is this design's own and is
listed in [What is specified and what is chosen](#what-is-specified-and-what-is-chosen).
This covers the windows, hold times, handshakes, frame format and baud rate.

## Structure

```
             clk_500 (PLL, outside)                      clk_50 (board)
             ------------------------------------------  --------------------------------
nino[0..6] ->| tot_counter x7 --wr--> tot_memory        |  |                              |
             |  (width in 2 ns counts)   7 x {valid,tot} |<-|-- freeze_req   readout_ctrl --|--> uart_tx --> uart_txd
             |                            hold 1024 ns   |--|-> freeze_ack    (frame FSM)   |
             |                            read port  ----|--|-> rd_valid/rd_tot             |
nino[3] ---->| pulse_stretch (80 ns window) -------------|--|-> coincidence AND --> trig -->|
sc[0..2] --->| pulse_stretch x3 (80 ns windows) ---------|--|->                             |
             ------------------------------------------  --------------------------------
```

| File | Role |
|---|---|
| `rtl/daq_pkg.sv` | shared constants (7 strips, central index 3, 3 scintillators, 8-bit TOT, baud, frame header) and the controller state type |
| `rtl/tot_counter.sv` | pulse-width counter of one strip, 500 MHz |
| `rtl/tot_memory.sv` | seven-entry TOT array with hold window, freeze and clear |
| `rtl/pulse_stretch.sv` | opens an 80 ns window at a pulse's leading edge, 500 MHz |
| `rtl/coincidence.sv` | four windows, brought to 50 MHz and ANDed into a single-cycle trigger |
| `rtl/readout_ctrl.sv` | per-trigger sequence: settle, freeze, send frame, release |
| `rtl/uart_tx.sv` | 8N1 transmitter, valid/ready byte interface |
| `rtl/sync_2ff.sv`, `rtl/rst_sync.sv` | level synchroniser and reset synchroniser |
| `rtl/nino_daq_top.sv` | the top level: all of the above wired together |

The NINO ASIC and the PLL are not logic and are not modelled. The top takes
the NINO outputs (after the LVDS receivers) and the 500 MHz clock as ports.

## The life of one event

The hardest part of the design is timing: pulses of 10 ns to 500 ns, two clock
domains, and a trigger that is known only after the pulses have begun. At the
default parameters an event proceeds like this. Times are from the muon
(t = 0), when the strip and scintillator pulses start.

| time | what happens |
|---|---|
| 0 | NINO outputs of the hit strips and the scintillator signals rise. |
| +4 to 6 ns | Each input is synchronised on the 500 MHz clock. `pulse_stretch` opens an 80 ns window for the central strip and for each scintillator. Each `tot_counter` starts counting its strip. |
| about +30 to 60 ns | The 50 MHz side sees all four windows open, two synchroniser stages later. `coincidence` emits one `trig` pulse. |
| end of each strip pulse, +6 ns | That strip's `tot_counter` strobes its count into `tot_memory`. A second pulse on the same strip replaces the first. |
| trig + 640 ns | `readout_ctrl` has waited `SETTLE_CYCLES` = 32 board clocks for the neighbours to finish. It raises `freeze_req`. |
| + about 6 ns | `tot_memory` stops writing and ageing and raises `freeze_ack`. |
| + 40 to 60 ns | The acknowledge reaches the 50 MHz side. The controller starts sending the frame. |
| + 8 x 86.8 us | Eight bytes at 115200 baud leave on `uart_txd`. |
| after the 8th byte is handed to the UART | `freeze_req` falls. The memory clears every entry and re-arms. `busy` falls about 0.61 ms after the trigger, and the last byte is still on the line for one more byte time. |

Three limits follow from this sequence:

* **Acceptance window.** A `tot_memory` entry is dropped 1024 ns
  (`HOLD_CYCLES` = 512) after it was written. The memory freezes about 700 ns
  after the muon. So the frame contains every pulse of the event that ended
  before the freeze, and also a pulse that ended up to about 300 ns before
  the muon. Hits that ended earlier are reported as 0.
* **Longest measurable pulse.** A pulse must end before the freeze, about
  650 ns after it starts, or it is not reported. Pulses above 510 ns already
  saturate the 8-bit count at 255.
* **Dead time.** From the trigger until `busy` falls (about 0.61 ms), further
  coincidences are ignored. Pulses that end while the memory is frozen are
  discarded. For cosmic muons through a 1 cm strip, well under one per second,
  this costs nothing.

## TOT measurement

`tot_counter` synchronises the NINO output and counts the 500 MHz clock edges
at which it is high. It loads 1 on the first high sample and saturates at
255. On the first low sample it presents the count with a one-cycle strobe,
three clock edges after the pin falls. The quantisation is that of a plain
sampler. A pulse of W ns reads floor(W/2) or ceil(W/2) counts, depending on
its phase against the clock. A pulse that is an exact multiple of 2 ns always
reads W/2, so the 60 ns calibration pulse always reads 30. Multiply by 2 ns to
get the width. A pulse shorter than 2 ns can be missed entirely.

## Coincidence

Three scintillator signals and the central strip's NINO output must coincide.
The decision runs on the 50 MHz clock, but central-strip pulses are mostly
10 to 20 ns long, shorter than one 20 ns period. Sampling them directly at
50 MHz would lose many events. Each of the four inputs therefore first opens
an 80 ns window (`GATE_CYCLES` = 40 at 500 MHz) at its leading edge, or keeps
it open while the input stays high. The AND of the windows, synchronised to
50 MHz, starts a coincidence. Its rising edge is the single-cycle `trig`.
Inputs whose leading edges lie within about 80 ns of each other coincide.
Setting `N_SCINT` = 1 turns the scintillator inputs into one pre-combined
trigger line.

## Crossing between the clocks

The design does not rely on the 500 MHz clock being a multiple of the 50 MHz
clock. Only synchronised levels cross between the two domains:

* the four coincidence windows, 500 MHz to 50 MHz, each at least 80 ns long;
* `freeze_req`, 50 MHz to 500 MHz, and `freeze_ack`, back again.

The TOT values themselves are not synchronised. The controller reads them
through a combinational port only while the acknowledge says they are frozen.
The design's timing constraints must treat the `rd_*` paths as quasi-static,
for example as multicycle or false paths. An assertion in `tot_memory` checks
that the frozen contents do not move.

## Event frame on the UART

8N1, least significant bit first, 115200 baud (434 board clocks per bit).

| byte | content |
|---|---|
| 0 | header `0xA5` |
| 1 .. 7 | TOT of strips 0 .. 6, in 2 ns counts (0 = no pulse in the hold window, 255 = 510 ns or more) |

Strip 3 is the central (trigger) strip; strips 0 to 2 and 4 to 6 are the
neighbours on either side. A TOT of 0 cannot come from a real pulse, so 0 is
free to mean "no pulse". A TOT byte equals the header only for a width of
165 counts (330 ns). The PC should therefore resynchronise on the line falling
silent between frames (frames start at least 0.6 ms apart) rather than on the
header alone.

## Parameters of `nino_daq_top`

| parameter | default | meaning | origin |
|---|---|---|---|
| `N_STRIPS` | 7 | strips read out | published scheme |
| `CENTER_IDX` | 3 | index of the central strip in `nino[]` | chosen (three strips each side) |
| `N_SCINT` | 3 | scintillators in the coincidence | published scheme |
| `TOT_W` | 8 | bits per TOT value (must be at most 8) | chosen |
| `GATE_CYCLES` | 40 | coincidence window, 500 MHz cycles (80 ns) | chosen |
| `HOLD_CYCLES` | 512 | memory hold window, 500 MHz cycles (1024 ns) | chosen |
| `SETTLE_CYCLES` | 32 | wait from trigger to freeze, 50 MHz cycles (640 ns) | chosen |
| `CLKS_PER_BIT` | 434 | UART bit length, 50 MHz cycles (115200 baud) | chosen |

The clock frequencies are fixed by the ports: 50 MHz board clock and 500 MHz
from the PLL, as in the published scheme. Running at other clocks changes the
TOT unit and the times in the table above accordingly.
`HOLD_CYCLES` should stay above the 500 MHz length of trigger latency
plus `SETTLE_CYCLES`, or early-ending neighbour pulses will be dropped.

## What is specified and what is chosen

Taken from the published description:

* TOT measured by counting a 500 MHz clock made by a PLL from the 50 MHz
  board clock, giving 2 ns resolution;
* seven strips (central plus three on each side) stored in a memory array;
* the coincidence of three scintillators and the central strip, at 50 MHz;
* serial transfer of the stored values to a computer over a UART when the
  coincidence occurs.

Chosen here, because the description is silent:

* the synchronisers and the reset scheme (one asynchronous reset,
  synchronised per domain);
* the 80 ns coincidence windows;
* the 8-bit saturating TOT;
* the 1024 ns hold window, last pulse wins, the 640 ns settle delay,
  the freeze/acknowledge handshake, and clearing on release;
* ignoring triggers during readout;
* the frame layout, the baud rate and the 8N1 format.

One conflict in the description: its block diagram shows a single
scintillator trigger line entering the FPGA, while its text has the FPGA
combine three scintillators with the central strip. The text is followed
here. `N_SCINT` = 1 gives the diagram's arrangement.

Not part of this RTL: the NINO ASIC, the PLL (the FPGA vendor's macro),
LVDS input buffers (instantiated by the FPGA tools from pin constraints) and
the PC software. The pulse-selection rules used when the detector was
characterised are also left out: a noise threshold from the first 200 ns, at
least 8 ns above threshold, and multiple pulses taken as streamers. They were
applied offline to oscilloscope waveforms, not in the FPGA.

## Testbenches and how far to trust the design

Every testbench is self-checking: it computes its expected values
independently of the design and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_tot_counter` | counts against a reference that samples the pin on the same clock edges. Checks the 60 ns pulse (30 counts at all phases), 40 random widths from 4 to 110 ns, a 1.5 ns pulse across one edge, saturation at 255, strobe latency and one strobe per pulse. |
| `tb_tot_memory` | write and read-back, later pulse wins, expiry after exactly `HOLD_CYCLES`, freeze acknowledged after three edges, no writes or ageing while frozen, clear on release. |
| `tb_coincidence` | full overlap gives one trigger, each input missing gives none, and short 6 ns pulses staggered over 40 ns coincide. A central strip 200 ns late gives none, two events give two triggers, and the trigger latency is 30 to 70 ns. A sweep of the central strip's delay shows the window edge: up to 60 ns late still triggers, 100 ns or more never does. |
| `tb_uart_tx` | 60 random bytes decoded by a behavioural receiver, 10 bit times per byte, start bit on the accepting edge. |
| `tb_readout_ctrl` | with models of the memory and a stalling UART: settle delay, frame contents and order, freeze held for the whole frame, triggers during readout ignored. |
| `tb_nino_daq_top` | end to end at the default parameters (115200 baud). It runs random events over the 10 to 110 ns TOT range, the 60 ns calibration, saturation, a double hit, an expired old hit, three incomplete coincidences and a coincidence during readout. Each mechanism is counted from the ports and the received frames alone, with no look inside the design, and must occur. |
| `tb_tot_spectra` | 40 synthetic events at each of the three operating voltages of the detector (avalanche peak plus a streamer tail growing with voltage), every frame checked byte by byte. It prints strip multiplicity and TOT share per strip as the PC would. UART at 8 clocks per bit to save time. |

`tb/uart_rx_model.sv` is the behavioural receiver standing in for the PC.

Everything has been simulated only. The design has not run on an FPGA, and
no timing analysis has been done. At 500 MHz the counters and the memory
write path are the critical paths. On a low-cost FPGA they may need pipelining
or a lower TOT clock, and the published scheme does not say how its FPGA met
this. The detector behaviour in the testbenches is synthetic: pulse widths are
drawn to cover the published TOT range, not fitted to measured data.

## Simulating

Any testbench builds with plain Verilator 5 from the repository root, with the
package first:

```
verilator --binary --timing --assert -Irtl -Itb rtl/daq_pkg.sv tb/tb_nino_daq_top.sv --top-module tb_nino_daq_top
./obj_dir/Vtb_nino_daq_top
```

Replace the name with any other `tb_*` module. Verilator finds the other
modules through `-Irtl -Itb`. The end-to-end test at full baud rate covers
about 9 ms of simulated time and runs in a few seconds.
