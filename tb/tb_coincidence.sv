// tb_coincidence: self-checking test of the scintillator/central-strip
// coincidence with its 80 ns input windows (GATE_CYCLES = 40 at 500 MHz).
// Scenarios, each checked for the number of triggers it must give:
// full overlap (one trigger however long it lasts), each input missing in
// turn (none), short 6 ns pulses spread over 40 ns (one: the windows make
// them overlap), a central pulse arriving 200 ns after the scintillators
// ended (none), a sweep of the central strip's delay against 10 ns
// scintillator pulses (a trigger up to 60 ns, none from 100 ns), and two
// separate coincidences (two). For the triggers the
// delay from the last input's leading edge is checked to lie between
// 30 and 70 ns, and `coinc` must follow `trig` one cycle later.
module tb_coincidence;
  localparam int unsigned N_SCINT = 3;

  logic               clk_fast = 1'b0, clk = 1'b0;
  logic               rst_n = 1'b0;
  logic [N_SCINT-1:0] sc = '0;
  logic               center = 1'b0;
  logic               coinc, trig;

  int checks = 0, failures = 0;
  int trig_count = 0;
  realtime last_input_t, trig_t;

  always #1ns  clk_fast = ~clk_fast;   // 500 MHz
  always #10ns clk      = ~clk;        // 50 MHz, aligned as a PLL would give

  coincidence #(.N_SCINT(N_SCINT), .GATE_CYCLES(40)) dut (
    .clk_fast(clk_fast), .rst_fast_n(rst_n), .clk(clk), .rst_n(rst_n),
    .sc(sc), .center(center), .coinc(coinc), .trig(trig)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  logic trig_d = 1'b0;
  always @(posedge clk) begin
    if (trig) begin
      trig_count++;
      trig_t = $realtime;
    end
    if (rst_n && trig_d) check(coinc, "coinc follows trig");
    trig_d <= trig;
  end

  task automatic expect_trigs(input int n, input string what);
    repeat (10) @(posedge clk);
    check(trig_count == n, $sformatf("%s: %0d triggers, expected %0d", what, trig_count, n));
    if (n > 0 && trig_count == n) begin
      realtime d;
      d = trig_t - last_input_t;
      check(d >= 30ns && d <= 70ns, $sformatf("%s: trigger %0t after last input", what, d));
    end
    trig_count = 0;
  endtask

  task automatic pulse_sc(input int i, input int width_ns);
    fork
      begin sc[i] = 1'b1; repeat (width_ns) #1ns; sc[i] = 1'b0; end
    join_none
  endtask

  task automatic pulse_center(input int width_ns);
    fork
      begin center = 1'b1; repeat (width_ns) #1ns; center = 1'b0; end
    join_none
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    trig_count = 0;

    // all four overlap for 300 ns: exactly one trigger
    #3.3ns;
    for (int i = 0; i < N_SCINT; i++) pulse_sc(i, 300);
    pulse_center(300);
    last_input_t = $realtime;
    #400ns;
    expect_trigs(1, "full overlap");

    // one input missing in turn: no trigger
    for (int m = 0; m <= N_SCINT; m++) begin
      #7ns;
      for (int i = 0; i < N_SCINT; i++) if (i != m) pulse_sc(i, 100);
      if (m != N_SCINT) pulse_center(100);
      #300ns;
      expect_trigs(0, $sformatf("input %0d missing", m));
    end

    // short 6 ns pulses spread over 40 ns: the windows make them coincide
    #5.5ns pulse_sc(0, 6);
    #13ns  pulse_sc(1, 6);
    #11ns  pulse_center(6);
    #16ns  pulse_sc(2, 6);
    last_input_t = $realtime;
    #300ns;
    expect_trigs(1, "short staggered pulses");

    // central strip 200 ns after the scintillators ended: no trigger
    for (int i = 0; i < N_SCINT; i++) pulse_sc(i, 20);
    #220ns pulse_center(20);
    #300ns;
    expect_trigs(0, "late central strip");

    // window length: 10 ns scintillator pulses, central strip d ns later.
    // Windows are 80 ns, so d <= 60 must coincide and d >= 100 must not.
    for (int d = 0; d <= 160; d += 10) begin
      if (d > 60 && d < 100) continue;
      #0.7ns;
      for (int i = 0; i < N_SCINT; i++) pulse_sc(i, 10);
      repeat (d) #1ns;
      pulse_center(10);
      last_input_t = $realtime;
      #300ns;
      expect_trigs((d <= 60) ? 1 : 0, $sformatf("central strip %0d ns late", d));
    end

    // two coincidences 500 ns apart: two triggers
    for (int k = 0; k < 2; k++) begin
      #1.7ns;
      for (int i = 0; i < N_SCINT; i++) pulse_sc(i, 30);
      #9ns pulse_center(12);
      last_input_t = $realtime;
      #500ns;
    end
    expect_trigs(2, "two coincidences");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
