// tb_nino_daq_top: end-to-end test of the DAQ at its default parameters
// (7 strips, 500 MHz TOT clock, 50 MHz coincidence and control clock, UART
// at 115200 baud).
//
// The testbench plays the detector: three scintillator pulses plus NINO
// pulses of chosen widths on the seven strips. It decodes the UART line
// with a behavioural receiver (the host computer) and compares every frame
// with the expected one. Expected TOT values are worked out here by
// counting the 500 MHz clock edges at which each strip's pulse was high
// (the last pulse of each strip counts), saturated at 255; strips without a
// recent pulse must read 0. Scenarios:
//   * events with random widths over the 10-110 ns range of the measured
//     TOT spectra, some strips empty;
//   * a 60 ns calibration pulse on every strip (30 counts);
//   * a 560 ns pulse (TOT saturation);
//   * a strip pulsing twice (the later pulse is reported);
//   * a lone hit long before an event (expired, reported as 0);
//   * coincidences with one scintillator missing (no frame);
//   * a second coincidence during a frame, with hits on all strips (ignored,
//     its hits dropped, and the following frame unaffected).
// Each mechanism is counted from what the host and the top's ports see and
// must occur at least once. The readout time is checked against the settle delay plus
// 7 bytes of 10 bit times (busy ends when the eighth byte is handed over).
module tb_nino_daq_top;
  import daq_pkg::*;

  localparam int unsigned N  = N_STRIPS;
  localparam int unsigned NS = N_SCINT;

  logic          clk_50 = 1'b0, clk_500 = 1'b0;
  logic          rst_n = 1'b0;
  logic [N-1:0]  nino = '0;
  logic [NS-1:0] sc = '0;
  logic          uart_txd, busy, coinc;
  logic          rx_valid, frame_err;
  logic [7:0]    rx_data;

  int checks = 0, failures = 0;

  always #1ns  clk_500 = ~clk_500;
  always #10ns clk_50  = ~clk_50;

  nino_daq_top dut (
    .clk_50(clk_50), .clk_500(clk_500), .rst_n(rst_n),
    .nino(nino), .sc(sc), .uart_txd(uart_txd), .busy(busy), .coinc(coinc)
  );

  uart_rx_model #(.CLKS_PER_BIT(CLKS_PER_BIT)) host (
    .clk(clk_50), .rxd(uart_txd), .rx_valid(rx_valid), .rx_data(rx_data), .frame_err(frame_err)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // ---------------------------------------------------------- reference TOT
  int cnt_ref  [N];
  int last_ref [N];
  logic [N-1:0] nino_prev = '0;
  bit ref_hold = 1'b0;     // set while hits are expected to be dropped
  always @(posedge clk_500) begin
    for (int i = 0; i < N; i++) begin
      if (nino[i]) cnt_ref[i]++;
      if (!nino[i] && nino_prev[i]) begin
        if (!ref_hold) last_ref[i] = (cnt_ref[i] > 255) ? 255 : cnt_ref[i];
        cnt_ref[i]  = 0;
      end
    end
    nino_prev <= nino;
  end

  // ------------------------------------------------------- received bytes
  logic [7:0] rx_q [$];
  always @(posedge clk_50) if (rx_valid) begin
    rx_q.push_back(rx_data);
    check(!frame_err, "UART stop bit");
  end

  // ------------------------------------------------- mechanism counters
  int n_frames = 0, n_rejected = 0, n_ignored = 0, n_expired = 0;
  int n_saturated = 0, n_overwrite = 0, n_dropped = 0, n_empty = 0;

  // A coincidence that starts while the previous readout is still busy:
  // `coinc` rises one cycle after the trigger, so `busy` is looked at one
  // cycle earlier than `coinc`.
  logic coinc_prev = 1'b0, busy_prev = 1'b0;
  always @(posedge clk_50) begin
    if (rst_n && coinc && !coinc_prev && busy_prev) n_ignored++;
    coinc_prev <= coinc;
    busy_prev  <= busy;
  end

  logic [7:0] last_frame [FRAME_BYTES];   // the most recent complete frame

  // ------------------------------------------------------------ stimulus
  // Start time of everything: 0.4 ns after a 500 MHz edge, so that no
  // pulse edge coincides with a clock edge.
  task automatic align();
    @(posedge clk_500);
    #0.4ns;
  endtask

  task automatic strip_pulse(input int i, input int delay_ns, input int width_ns);
    fork
      begin
        repeat (delay_ns) #1ns;
        nino[i] = 1'b1;
        repeat (width_ns) #1ns;
        nino[i] = 1'b0;
      end
    join_none
  endtask

  task automatic scint_pulses(input logic [NS-1:0] which, input int width_ns);
    fork
      begin
        sc = which;
        repeat (width_ns) #1ns;
        sc = '0;
      end
    join_none
  endtask

  // One coincidence: widths[i] < 0 means no pulse on strip i.
  task automatic fire(input int widths [N], input logic [NS-1:0] which_sc = '1);
    align();
    for (int i = 0; i < N; i++) last_ref[i] = 0;
    scint_pulses(which_sc, 100);
    for (int i = 0; i < N; i++)
      if (widths[i] > 0) strip_pulse(i, 2 + (i % 4), widths[i]);
  endtask

  // Wait for the frame of the event just fired and compare it.
  task automatic expect_frame(input string what);
    int t;
    int slow_cycles;
    t = 0;
    while (!busy && t < 200) begin @(posedge clk_50); t++; end
    check(busy, $sformatf("%s: coincidence started a readout", what));
    slow_cycles = 0;
    while (busy && slow_cycles < 200_000) begin @(posedge clk_50); slow_cycles++; end
    // settle + 7 bytes of 10 bits + handshakes: busy ends when the last
    // byte has been handed to the UART, which then still sends it
    check(slow_cycles >= 32 + (FRAME_BYTES - 1) * 10 * CLKS_PER_BIT &&
          slow_cycles <= 32 + (FRAME_BYTES - 1) * 10 * CLKS_PER_BIT + 20,
          $sformatf("%s: readout took %0d cycles", what, slow_cycles));
    t = 0;
    while (rx_q.size() < FRAME_BYTES && t < 20 * CLKS_PER_BIT) begin @(posedge clk_50); t++; end
    repeat (CLKS_PER_BIT) @(posedge clk_50);
    check(rx_q.size() == FRAME_BYTES,
          $sformatf("%s: %0d bytes received, expected %0d", what, rx_q.size(), FRAME_BYTES));
    if (rx_q.size() == FRAME_BYTES) begin
      n_frames++;
      for (int b = 0; b < FRAME_BYTES; b++) last_frame[b] = rx_q[b];
      check(rx_q[0] == FRAME_HEADER, $sformatf("%s: header %02h", what, rx_q[0]));
      for (int i = 0; i < N; i++) begin
        check(int'(rx_q[1 + i]) == last_ref[i],
              $sformatf("%s: strip %0d TOT %0d, expected %0d", what, i, rx_q[1 + i], last_ref[i]));
        if (rx_q[1 + i] == 8'd255) n_saturated++;
        if (rx_q[1 + i] == 8'd0)   n_empty++;
      end
    end
    rx_q.delete();
  endtask

  task automatic expect_no_frame(input string what);
    repeat (200) @(posedge clk_50);
    check(!busy && rx_q.size() == 0, $sformatf("%s: no readout expected", what));
    if (!busy) n_rejected++;
    rx_q.delete();
  endtask

  int w [N];
  int f0;

  initial begin
    for (int i = 0; i < N; i++) begin
      cnt_ref[i]  = 0;
      last_ref[i] = 0;
    end
    repeat (5) @(posedge clk_50);
    rst_n = 1'b1;
    repeat (5) @(posedge clk_50);
    // let anything the receiver picked up before reset took hold run out
    repeat (12 * CLKS_PER_BIT) @(posedge clk_50);
    rx_q.delete();

    // events with widths drawn from the measured TOT range
    for (int e = 0; e < 4; e++) begin
      for (int i = 0; i < N; i++)
        w[i] = ($urandom_range(0, 4) == 0 && i != CENTER_IDX) ? -1
             : 10 + int'($urandom_range(0, 100));
      fire(w);
      expect_frame($sformatf("random event %0d", e));
      #2us;
    end

    // 60 ns calibration pulse on every strip: 30 counts of 2 ns
    for (int i = 0; i < N; i++) w[i] = 60;
    fire(w);
    expect_frame("60 ns calibration");
    for (int i = 0; i < N; i++) check(last_ref[i] == 30, "60 ns reference is 30 counts");
    #2us;

    // saturation, a strip hit twice, and an expired lone hit on strip 1
    align();
    strip_pulse(1, 0, 50);                 // lone hit, 3 us before the event
    #3us;
    for (int i = 0; i < N; i++) w[i] = 15 + 5 * i;
    w[1] = -1;
    w[2] = 560;                             // over 510 ns: saturates
    fire(w);
    strip_pulse(4, 60, 40);                 // second, later pulse on strip 4
    f0 = failures;
    expect_frame("saturation / double hit / expired hit");
    // strip 4 shows the second pulse (20 counts), not the first (17 or 18)
    if (failures == f0 && last_frame[1 + 4] == 8'd20) n_overwrite++;
    // the lone hit on strip 1 is 3 us old and must read 0
    if (failures == f0 && last_frame[1 + 1] == 8'd0) n_expired++;
    #2us;

    // one scintillator missing in turn: no readout
    for (int m = 0; m < NS; m++) begin
      logic [NS-1:0] which;
      for (int i = 0; i < N; i++) w[i] = 40;
      which    = '1;
      which[m] = 1'b0;
      fire(w, which);
      expect_no_frame($sformatf("scintillator %0d missing", m));
      #2us;
    end

    // a coincidence in the middle of a readout is ignored
    for (int i = 0; i < N; i++) w[i] = 20 + 7 * i;
    fire(w);
    f0 = failures;
    fork
      expect_frame("event with a coincidence during its readout");
      begin
        #200us;
        ref_hold = 1'b1;   // the memory is frozen: these hits are dropped
        align();
        scint_pulses('1, 100);
        for (int i = 0; i < N; i++) strip_pulse(i, 3, 90);
      end
    join
    // the 90 ns hits came about 200 us into the frame, before strips 2..6
    // were read: a frame that still shows this event's values proves that
    // they were dropped
    if (failures == f0)
      for (int i = 2; i < N; i++) if (last_frame[1 + i] != 8'd45) n_dropped++;
    #2us;
    ref_hold = 1'b0;
    for (int i = 0; i < N; i++) w[i] = 11 + 3 * i;
    fire(w);
    expect_frame("event after the ignored coincidence");

    $display("mechanisms: frames=%0d rejected=%0d ignored=%0d expired=%0d saturated=%0d overwrite=%0d dropped=%0d empty=%0d",
             n_frames, n_rejected, n_ignored, n_expired, n_saturated, n_overwrite, n_dropped, n_empty);
    check(n_frames    > 0, "mechanism: frame on coincidence");
    check(n_rejected  > 0, "mechanism: incomplete coincidence rejected");
    check(n_ignored   > 0, "mechanism: coincidence ignored during readout");
    check(n_expired   > 0, "mechanism: stale entry expired");
    check(n_saturated > 0, "mechanism: TOT saturation");
    check(n_overwrite > 0, "mechanism: later pulse overwrites");
    check(n_dropped   > 0, "mechanism: hit dropped while frozen");
    check(n_empty     > 0, "mechanism: empty strip reported as 0");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
