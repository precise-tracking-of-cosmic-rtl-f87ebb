// tb_tot_counter: self-checking test of the pulse-width counter.
// A 500 MHz clock samples pulses of many widths and phases. The expected
// count is worked out in the testbench by counting the clock edges at which
// the pulse was high. Also checked: the 60 ns calibration pulse always gives
// 30 counts (2 ns resolution), saturation at 255 for pulses over 510 ns, the
// latency from the trailing edge to the strobe (registered on the third clock
// edge after the fall, so seen by the testbench at the fourth), and that
// exactly one strobe is given per pulse.
module tb_tot_counter;
  localparam int unsigned TOT_W = 8;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             nino = 1'b0;
  logic             tot_valid;
  logic [TOT_W-1:0] tot_value;

  int checks = 0, failures = 0;
  int ref_count = 0;        // edges at which the pulse was high
  int strobes = 0;
  int last_value = -1;
  int edges_since_fall = 0;
  int strobe_latency = -1;

  always #1ns clk = ~clk;   // 500 MHz

  tot_counter #(.TOT_W(TOT_W)) dut (
    .clk(clk), .rst_n(rst_n), .nino_in(nino),
    .tot_valid(tot_valid), .tot_value(tot_value)
  );

  // Reference: sample the pin as the design's first flip-flop does.
  logic nino_prev = 1'b0;
  always @(posedge clk) begin
    if (nino) ref_count++;
    edges_since_fall++;
    if (tot_valid) begin
      strobes++;
      last_value     = int'(tot_value);
      strobe_latency = edges_since_fall;
    end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // One pulse of width_ps starting phase_ps after a rising clock edge.
  task automatic pulse(input int width_ps, input int phase_ps);
    int exp;
    @(posedge clk);
    repeat (phase_ps / 50) #50ps;
    ref_count = 0;
    strobes   = 0;
    nino = 1'b1;
    repeat (width_ps / 50) #50ps;
    nino = 1'b0;
    exp = ref_count;
    edges_since_fall = 0;
    repeat (8) @(posedge clk);
    if (exp > 255) exp = 255;
    check(strobes == 1, $sformatf("one strobe per pulse (got %0d)", strobes));
    check(last_value == exp,
          $sformatf("width %0d ps phase %0d ps: tot %0d, expected %0d",
                    width_ps, phase_ps, last_value, exp));
    check(strobe_latency == 4,
          $sformatf("strobe latency %0d edges, expected 4", strobe_latency));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 60 ns calibration pulse at many phases: always 30 counts
    for (int ph = 100; ph < 2000; ph += 300) begin  // phases in steps of 100 ps
      pulse(60_000, ph);
      check(last_value == 30, $sformatf("60 ns pulse gave %0d counts", last_value));
    end
    // widths typical of the measured TOT spectra (about 10 to 110 ns)
    for (int k = 0; k < 40; k++) begin
      pulse(4_000 + 100 * int'($urandom_range(0, 1060)), 150 + 100 * int'($urandom_range(0, 18)));   // never on a clock edge
    end
    // very short pulse (one sample) and long pulse (saturation)
    pulse(1_500, 1_500);
    check(last_value == 1, "1.5 ns pulse across one clock edge counts 1");
    pulse(600_000, 300);
    check(last_value == 255, $sformatf("saturation: got %0d", last_value));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
