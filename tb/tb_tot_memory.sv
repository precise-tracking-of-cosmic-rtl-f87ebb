// tb_tot_memory: self-checking test of the TOT memory array.
// Checks writes and read-back of every strip, last-pulse-wins on a strip
// hit twice, expiry of an entry after exactly HOLD_CYCLES cycles, the
// freeze handshake (acknowledge three clock edges after the request), that
// a frozen memory neither takes writes nor ages, and clear-on-release.
module tb_tot_memory;
  localparam int unsigned N     = 7;
  localparam int unsigned TOT_W = 8;
  localparam int unsigned HOLD  = 32;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [N-1:0]     wr_valid = '0;
  logic [TOT_W-1:0] wr_tot [N];
  logic             freeze_req = 1'b0;
  logic             freeze_ack;
  logic [2:0]       rd_addr = '0;
  logic             rd_valid;
  logic [TOT_W-1:0] rd_tot;

  int checks = 0, failures = 0;

  always #1ns clk = ~clk;

  tot_memory #(.N_STRIPS(N), .TOT_W(TOT_W), .HOLD_CYCLES(HOLD)) dut (
    .clk(clk), .rst_n(rst_n), .wr_valid(wr_valid), .wr_tot(wr_tot),
    .freeze_req(freeze_req), .freeze_ack(freeze_ack),
    .rd_addr(rd_addr), .rd_valid(rd_valid), .rd_tot(rd_tot)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // Strobe one write on the next clock edge (inputs change at negedge).
  task automatic write(input int strip, input int value);
    @(negedge clk);
    wr_valid        = '0;
    wr_valid[strip] = 1'b1;
    wr_tot[strip]   = TOT_W'(value);
    @(negedge clk);
    wr_valid = '0;
  endtask

  task automatic expect_entry(input int strip, input bit v, input int value);
    rd_addr = 3'(strip);
    #1ps;
    check(rd_valid == v, $sformatf("strip %0d valid %0b, expected %0b", strip, rd_valid, v));
    if (v) check(int'(rd_tot) == value,
                 $sformatf("strip %0d tot %0d, expected %0d", strip, rd_tot, value));
  endtask

  int ack_edges;

  initial begin
    for (int i = 0; i < N; i++) wr_tot[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N; i++) expect_entry(i, 1'b0, 0);

    // expiry: valid for HOLD cycles after the write edge, then dropped
    write(0, 77);                         // written at the edge before this negedge
    repeat (HOLD - 2) @(negedge clk);
    expect_entry(0, 1'b1, 77);            // HOLD-1 edges after the write
    @(negedge clk);
    expect_entry(0, 1'b1, 77);            // HOLD edges: age reached its last value
    @(negedge clk);
    expect_entry(0, 1'b0, 0);             // HOLD+1 edges: gone

    // fill all strips, one strip twice (the later value wins)
    for (int i = 0; i < N; i++) write(i, 10 + 3 * i);
    write(2, 200);
    for (int i = 0; i < N; i++) expect_entry(i, 1'b1, (i == 2) ? 200 : 10 + 3 * i);

    // freeze: acknowledge three edges after the request
    @(negedge clk);
    freeze_req = 1'b1;
    ack_edges = 0;
    while (!freeze_ack && ack_edges < 10) begin
      @(negedge clk);
      ack_edges++;
    end
    check(ack_edges == 3, $sformatf("freeze acknowledged after %0d edges", ack_edges));

    // frozen: writes ignored, no ageing
    write(4, 99);
    repeat (3 * HOLD) @(negedge clk);
    for (int i = 0; i < N; i++) expect_entry(i, 1'b1, (i == 2) ? 200 : 10 + 3 * i);

    // release: cleared, acknowledge falls
    freeze_req = 1'b0;
    repeat (4) @(negedge clk);
    check(!freeze_ack, "acknowledge falls after release");
    for (int i = 0; i < N; i++) expect_entry(i, 1'b0, 0);

    // re-armed: writes work again
    write(6, 5);
    expect_entry(6, 1'b1, 5);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
