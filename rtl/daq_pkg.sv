// daq_pkg: constants and types shared by the NINO time-over-threshold (TOT)
// data-acquisition logic.
//
// The readout covers seven RPC strips: the central strip, which takes part in
// the trigger, and three neighbours on each side. Strip index 0 is the outer
// left strip, index 3 the central strip and index 6 the outer right strip.
// TOT values count periods of the 500 MHz sampling clock, so one count is 2 ns.
// The strip count, the clock frequencies and the 2 ns resolution come from
// the published description. The 8-bit TOT width, the UART frame layout and
// the baud rate are choices of this design.
package daq_pkg;

  // Number of read-out strips and the position of the central (trigger) strip.
  localparam int unsigned N_STRIPS   = 7;
  localparam int unsigned CENTER_IDX = 3;

  // Number of scintillators in the trigger hodoscope.
  localparam int unsigned N_SCINT    = 3;

  // Width of one TOT value: 8 bits, 0..255 counts = 0..510 ns (saturating).
  localparam int unsigned TOT_W      = 8;

  // Clock frequencies (Hz): the board clock and the PLL output.
  localparam int unsigned F_SLOW_HZ  = 50_000_000;
  localparam int unsigned F_FAST_HZ  = 500_000_000;

  // Serial link: 115200 baud from the 50 MHz clock (50e6/115200 = 434.03).
  localparam int unsigned BAUD          = 115_200;
  localparam int unsigned CLKS_PER_BIT  = F_SLOW_HZ / BAUD;

  // First byte of every event frame sent to the host.
  localparam logic [7:0] FRAME_HEADER = 8'hA5;

  // Bytes per event frame: header plus one TOT byte per strip.
  localparam int unsigned FRAME_BYTES = 1 + N_STRIPS;

  typedef logic [TOT_W-1:0] tot_t;

  // States of the readout controller.
  typedef enum logic [2:0] {
    RO_IDLE,     // waiting for a coincidence
    RO_SETTLE,   // letting the neighbour strips' pulses end
    RO_FREEZE,   // waiting for the memory to acknowledge the freeze
    RO_SEND,     // handing the frame bytes to the UART
    RO_RELEASE   // waiting for the memory to clear and re-arm
  } ro_state_t;

endpackage
