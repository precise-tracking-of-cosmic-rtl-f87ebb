// nino_daq_top: FPGA back end of a NINO-based RPC strip readout for muon
// tracking.
//
// Seven RPC strips (the central one and three on each side) are read out by
// NINO discriminators, whose output pulse width, the time over threshold
// (TOT), grows with the charge induced on the strip. The strip with the
// largest TOT is where the muon crossed, and the spread of TOT across the
// strips refines the position. This block:
//
//   * measures the width of every NINO pulse with a 500 MHz clock, one
//     tot_counter per strip (2 ns per count);
//   * keeps the most recent width of each strip in tot_memory;
//   * looks, on the 50 MHz board clock, for a coincidence of the three
//     scintillators of the trigger hodoscope with the central strip, each
//     input first opening an 80 ns window on the 500 MHz clock;
//   * on each coincidence sends the seven stored widths to the host over
//     a UART (readout_ctrl + uart_tx).
//
// Clocks: `clk_50` is the 50 MHz board clock. `clk_500` is the 500 MHz
// clock that the FPGA's PLL derives from it; the PLL itself is vendor IP and
// stays outside this module. The two domains meet only at the coincidence
// windows and the tot_memory freeze handshake, both through synchronisers,
// so the design does not rely on any phase relation between the clocks. `rst_n` is an asynchronous
// active-low reset, synchronised into each domain here.
//
// Interface: nino[i] is the digital (LVDS-received) NINO output of strip i,
// with strip CENTER_IDX the central one; sc[] are the scintillator signals.
// All are asynchronous. `uart_txd` carries one frame per event: header
// 0xA5, then one TOT byte per strip, strip 0 first (see readout_ctrl).
// `busy` is high from a coincidence until its frame has been sent, and
// `coinc` is the registered coincidence level.
//
// Taken from the published scheme: the 500 MHz TOT counting, the 50 MHz coincidence
// of three scintillators with the central strip, the memory array of seven
// TOT values and the UART transfer on coincidence. The way these are tied
// together (coincidence windows, hold window, settle delay, freeze
// handshake, frame format, baud rate) is this design's own.
module nino_daq_top #(
  parameter int unsigned N_STRIPS      = daq_pkg::N_STRIPS,
  parameter int unsigned CENTER_IDX    = daq_pkg::CENTER_IDX,
  parameter int unsigned N_SCINT       = daq_pkg::N_SCINT,
  parameter int unsigned TOT_W         = daq_pkg::TOT_W,
  parameter int unsigned GATE_CYCLES   = 40,
  parameter int unsigned HOLD_CYCLES   = 512,
  parameter int unsigned SETTLE_CYCLES = 32,
  parameter int unsigned CLKS_PER_BIT  = daq_pkg::CLKS_PER_BIT
) (
  input  logic                clk_50,     // board clock
  input  logic                clk_500,    // PLL output, 10 x clk_50
  input  logic                rst_n,      // asynchronous, active low
  input  logic [N_STRIPS-1:0] nino,       // NINO outputs (asynchronous)
  input  logic [N_SCINT-1:0]  sc,         // scintillator signals (asynchronous)
  output logic                uart_txd,   // serial data to the host
  output logic                busy,       // event readout in progress
  output logic                coinc       // coincidence level
);
  localparam int unsigned ADDR_W = $clog2(N_STRIPS);

  logic rst_fast_n, rst_slow_n;

  rst_sync u_rst_fast (.clk(clk_500), .rst_n_in(rst_n), .rst_n_out(rst_fast_n));
  rst_sync u_rst_slow (.clk(clk_50),  .rst_n_in(rst_n), .rst_n_out(rst_slow_n));

  // ---------------------------------------------------------------- 500 MHz
  logic [N_STRIPS-1:0] tot_valid;
  logic [TOT_W-1:0]    tot_value [N_STRIPS];

  for (genvar i = 0; i < N_STRIPS; i++) begin : g_ch
    tot_counter #(.TOT_W(TOT_W)) u_tot (
      .clk      (clk_500),
      .rst_n    (rst_fast_n),
      .nino_in  (nino[i]),
      .tot_valid(tot_valid[i]),
      .tot_value(tot_value[i])
    );
  end

  logic              freeze_req, freeze_ack;
  logic [ADDR_W-1:0] rd_addr;
  logic              rd_valid;
  logic [TOT_W-1:0]  rd_tot;

  tot_memory #(
    .N_STRIPS   (N_STRIPS),
    .TOT_W      (TOT_W),
    .HOLD_CYCLES(HOLD_CYCLES)
  ) u_mem (
    .clk       (clk_500),
    .rst_n     (rst_fast_n),
    .wr_valid  (tot_valid),
    .wr_tot    (tot_value),
    .freeze_req(freeze_req),
    .freeze_ack(freeze_ack),
    .rd_addr   (rd_addr),
    .rd_valid  (rd_valid),
    .rd_tot    (rd_tot)
  );

  // ----------------------------------------------------------------- 50 MHz
  logic trig;

  coincidence #(
    .N_SCINT    (N_SCINT),
    .GATE_CYCLES(GATE_CYCLES)
  ) u_coinc (
    .clk_fast  (clk_500),
    .rst_fast_n(rst_fast_n),
    .clk       (clk_50),
    .rst_n     (rst_slow_n),
    .sc        (sc),
    .center    (nino[CENTER_IDX]),
    .coinc     (coinc),
    .trig      (trig)
  );

  logic               tx_valid, tx_ready;
  logic [7:0]         tx_data;

  readout_ctrl #(
    .N_STRIPS     (N_STRIPS),
    .TOT_W        (TOT_W),
    .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_ctrl (
    .clk       (clk_50),
    .rst_n     (rst_slow_n),
    .trig      (trig),
    .freeze_req(freeze_req),
    .freeze_ack(freeze_ack),
    .rd_addr   (rd_addr),
    .rd_valid  (rd_valid),
    .rd_tot    (rd_tot),
    .tx_valid  (tx_valid),
    .tx_data   (tx_data),
    .tx_ready  (tx_ready),
    .busy      (busy)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk     (clk_50),
    .rst_n   (rst_slow_n),
    .tx_valid(tx_valid),
    .tx_data (tx_data),
    .tx_ready(tx_ready),
    .txd     (uart_txd)
  );

endmodule
