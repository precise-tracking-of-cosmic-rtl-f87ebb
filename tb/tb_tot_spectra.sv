// tb_tot_spectra: runs the three operating points at which the detector was
// characterised (10.2 kV, 10.6 kV and 11.6 kV) through the whole DAQ.
//
// For each operating point 40 muon events are generated. The central strip
// gets a TOT drawn from a narrow avalanche peak (10-18 ns) or, with a
// probability that grows with the voltage, from a streamer tail (20-110 ns).
// The neighbour strips get smaller pulses that fall off with distance, with
// a wider spread at higher voltage; some neighbours stay silent. The shapes
// are only meant to span the range of the published spectra, not to
// reproduce them. Every frame is compared byte for byte with TOT values
// worked out here from the 500 MHz clock edges at which each pulse was high.
// The host side then reports, per operating point, the mean strip
// multiplicity and the share of the total TOT on each strip.
// The UART runs at 8 clocks per bit to keep the simulation short.
module tb_tot_spectra;
  import daq_pkg::*;

  localparam int unsigned N      = N_STRIPS;
  localparam int unsigned CPB    = 8;
  localparam int unsigned EVENTS = 40;

  logic         clk_50 = 1'b0, clk_500 = 1'b0;
  logic         rst_n = 1'b0;
  logic [N-1:0] nino = '0;
  logic [N_SCINT-1:0] sc = '0;
  logic         uart_txd, busy, coinc;
  logic         rx_valid, frame_err;
  logic [7:0]   rx_data;

  int checks = 0, failures = 0;

  always #1ns  clk_500 = ~clk_500;
  always #10ns clk_50  = ~clk_50;

  nino_daq_top #(.CLKS_PER_BIT(CPB)) dut (
    .clk_50(clk_50), .clk_500(clk_500), .rst_n(rst_n),
    .nino(nino), .sc(sc), .uart_txd(uart_txd), .busy(busy), .coinc(coinc)
  );

  uart_rx_model #(.CLKS_PER_BIT(CPB)) host (
    .clk(clk_50), .rxd(uart_txd), .rx_valid(rx_valid), .rx_data(rx_data), .frame_err(frame_err)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // reference TOT: edges at which each pulse was high
  int cnt_ref [N], last_ref [N];
  logic [N-1:0] nino_prev = '0;
  always @(posedge clk_500) begin
    for (int i = 0; i < N; i++) begin
      if (nino[i]) cnt_ref[i]++;
      if (!nino[i] && nino_prev[i]) begin
        last_ref[i] = (cnt_ref[i] > 255) ? 255 : cnt_ref[i];
        cnt_ref[i]  = 0;
      end
    end
    nino_prev <= nino;
  end

  logic [7:0] rx_q [$];
  always @(posedge clk_50) if (rx_valid) rx_q.push_back(rx_data);

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

  // tail_pct: share of streamer-like central pulses; spread: fall-off of the
  // neighbours in percent per strip of distance
  task automatic run_point(input string name, input int tail_pct, input int spread);
    int  w [N];
    longint tot_sum [N];
    longint tot_all;
    int  mult_sum;
    int  frames;
    for (int i = 0; i < N; i++) tot_sum[i] = 0;
    tot_all  = 0;
    mult_sum = 0;
    frames   = 0;
    for (int e = 0; e < EVENTS; e++) begin
      int tc, t;
      tc = ($urandom_range(0, 99) < tail_pct) ? 20 + int'($urandom_range(0, 90))
                                               : 10 + int'($urandom_range(0, 8));
      for (int i = 0; i < N; i++) begin
        int d;
        d = (i > int'(CENTER_IDX)) ? i - int'(CENTER_IDX) : int'(CENTER_IDX) - i;
        w[i] = (d == 0) ? tc : (tc * (100 - (100 - spread) * d / 3 - 30)) / 100
                              - int'($urandom_range(0, 6));
        if (d > 0 && $urandom_range(0, 99) >= spread) w[i] = -1;
        if (w[i] < 4 && d > 0) w[i] = -1;
      end
      @(posedge clk_500);
      #0.4ns;
      for (int i = 0; i < N; i++) last_ref[i] = 0;
      fork begin sc = '1; #100ns; sc = '0; end join_none
      for (int i = 0; i < N; i++) if (w[i] > 0) strip_pulse(i, 2 + (i % 3), w[i]);
      t = 0;
      while (!busy && t < 200) begin @(posedge clk_50); t++; end
      t = 0;
      while (rx_q.size() < FRAME_BYTES && t < 20 * FRAME_BYTES * CPB + 200) begin
        @(posedge clk_50); t++;
      end
      while (busy) @(posedge clk_50);
      check(rx_q.size() == FRAME_BYTES, $sformatf("%s event %0d: %0d bytes", name, e, rx_q.size()));
      if (rx_q.size() == FRAME_BYTES) begin
        int m;
        frames++;
        m = 0;
        check(rx_q[0] == FRAME_HEADER, $sformatf("%s event %0d: header", name, e));
        for (int i = 0; i < N; i++) begin
          check(int'(rx_q[1 + i]) == last_ref[i],
                $sformatf("%s event %0d strip %0d: %0d, expected %0d", name, e, i, rx_q[1 + i], last_ref[i]));
          tot_sum[i] += longint'(rx_q[1 + i]);
          tot_all    += longint'(rx_q[1 + i]);
          if (rx_q[1 + i] != 0) m++;
        end
        mult_sum += m;
      end
      rx_q.delete();
      #1.5us;
    end
    check(frames == EVENTS, $sformatf("%s: %0d frames of %0d events", name, frames, EVENTS));
    $display("%s: %0d events, mean multiplicity %0d.%02d, TOT share per strip (%%):", name, frames,
             mult_sum / frames, (mult_sum * 100 / frames) % 100);
    for (int i = 0; i < N; i++)
      $display("  strip %0d: %0d", int'(i) - int'(CENTER_IDX), int'(tot_sum[i] * 100 / tot_all));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin cnt_ref[i] = 0; last_ref[i] = 0; end
    repeat (5) @(posedge clk_50);
    rst_n = 1'b1;
    repeat (5) @(posedge clk_50);
    // let anything the receiver picked up before reset took hold run out
    repeat (12 * CPB) @(posedge clk_50);
    rx_q.delete();
    run_point("10.2 kV", 5, 40);
    run_point("10.6 kV", 20, 60);
    run_point("11.6 kV", 50, 85);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
