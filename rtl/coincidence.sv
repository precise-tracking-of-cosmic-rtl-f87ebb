// coincidence: event trigger from the scintillator hodoscope and the central
// RPC strip.
//
// A cosmic muon is accepted when all N_SCINT scintillators and the NINO
// output of the central RPC strip fire together. The decision is taken on
// the 50 MHz board clock. NINO pulses can be as short as about 10 ns, less
// than one 20 ns period of that clock, so each of the N_SCINT + 1 inputs
// first opens a window of GATE_CYCLES periods of the 500 MHz clock (80 ns by
// default) at its leading edge (pulse_stretch). The windows are brought to
// the 50 MHz clock by two-flip-flop synchronisers and ANDed. The rising
// edge of the AND gives one single-cycle `trig` pulse per coincidence.
// `coinc` is the AND level, registered. Inputs whose leading edges lie
// within roughly one window of each other therefore form a coincidence.
//
// Timing: a window rises three 500 MHz edges after its input. `trig` is high
// for the one 50 MHz cycle that follows the second synchroniser stage, i.e.
// it rises two 50 MHz edges after the first edge that sees all windows
// open. The trigger therefore follows the last input by about 30 to 50 ns.
//
// Taken from the published scheme: a coincidence of three scintillators and the
// central strip, evaluated at 50 MHz. This design's own choices: the
// windows, the synchronisers and the single-pulse trigger.
module coincidence #(
  parameter int unsigned N_SCINT     = daq_pkg::N_SCINT,
  parameter int unsigned GATE_CYCLES = 40
) (
  input  logic               clk_fast,     // 500 MHz, for the windows
  input  logic               rst_fast_n,
  input  logic               clk,          // 50 MHz, for the decision
  input  logic               rst_n,
  input  logic [N_SCINT-1:0] sc,           // asynchronous scintillator signals
  input  logic               center,       // asynchronous NINO output of the central strip
  output logic               coinc,        // all windows open (registered level)
  output logic               trig          // one-cycle pulse at the start of a coincidence
);
  logic [N_SCINT:0] win;       // windows, 500 MHz domain; [N_SCINT] = central strip
  logic [N_SCINT:0] in_sync;   // windows on the 50 MHz clock

  for (genvar i = 0; i <= N_SCINT; i++) begin : g_in
    pulse_stretch #(.GATE_CYCLES(GATE_CYCLES)) u_win (
      .clk  (clk_fast),
      .rst_n(rst_fast_n),
      .d    ((i == N_SCINT) ? center : sc[i % N_SCINT]),
      .gate (win[i])
    );
    sync_2ff u_sync (.clk(clk), .rst_n(rst_n), .d(win[i]), .q(in_sync[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coinc <= 1'b0;
    end else begin
      coinc <= &in_sync;
    end
  end

  assign trig = (&in_sync) && !coinc;

endmodule
