// tb_readout_ctrl: self-checking test of the readout controller.
// The testbench stands in for the TOT memory (an array plus a freeze
// acknowledge that follows the request after a random delay) and for the
// UART (a ready signal that drops for a random time after each byte). For
// each trigger it checks the settle delay before the freeze, that the frame
// is the header followed by the seven entries (0 for an empty strip) in
// order, that the freeze is held for the whole frame, and that triggers
// arriving while the controller is busy are ignored.
module tb_readout_ctrl;
  import daq_pkg::*;
  localparam int unsigned N      = 7;
  localparam int unsigned SETTLE = 5;
  localparam int unsigned EVENTS = 20;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       trig = 1'b0;
  logic       freeze_req;
  logic       freeze_ack = 1'b0;
  logic [2:0] rd_addr;
  logic       rd_valid;
  logic [7:0] rd_tot;
  logic       tx_valid;
  logic [7:0] tx_data;
  logic       tx_ready = 1'b1;
  logic       busy;

  int checks = 0, failures = 0;

  // memory model
  logic       mem_valid [N];
  logic [7:0] mem_tot   [N];
  assign rd_valid = mem_valid[rd_addr];
  assign rd_tot   = mem_tot[rd_addr];

  always #10ns clk = ~clk;

  readout_ctrl #(.N_STRIPS(N), .TOT_W(8), .SETTLE_CYCLES(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .trig(trig),
    .freeze_req(freeze_req), .freeze_ack(freeze_ack),
    .rd_addr(rd_addr), .rd_valid(rd_valid), .rd_tot(rd_tot),
    .tx_valid(tx_valid), .tx_data(tx_data), .tx_ready(tx_ready), .busy(busy)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // freeze acknowledge: follows the request after 3..20 ns
  always @(freeze_req) begin
    repeat (3 + $urandom_range(0, 17)) #1ns;
    freeze_ack = freeze_req;
  end

  // UART model: takes a byte on valid && ready, then is busy for a while
  logic [7:0] got [$];
  int  ready_wait = 0;
  int  freeze_drops_in_frame = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (tx_valid && tx_ready) begin
        got.push_back(tx_data);
        tx_ready   <= 1'b0;
        ready_wait  = 1 + $urandom_range(0, 6);
      end else if (!tx_ready) begin
        ready_wait--;
        if (ready_wait == 0) tx_ready <= 1'b1;
      end
      if (tx_valid && !freeze_ack) freeze_drops_in_frame++;
    end
  end

  int lat;
  int extra_trigs = 0;

  initial begin
    for (int i = 0; i < N; i++) begin
      mem_valid[i] = 1'b0;
      mem_tot[i]   = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(!busy && !freeze_req && !tx_valid, "idle after reset");

    for (int e = 0; e < EVENTS; e++) begin
      logic [7:0] exp [$];
      for (int i = 0; i < N; i++) begin
        mem_valid[i] = 1'($urandom_range(0, 3) != 0);
        mem_tot[i]   = 8'($urandom_range(1, 255));
      end
      got.delete();
      exp.delete();
      @(negedge clk);
      trig = 1'b1;
      @(negedge clk);
      trig = 1'b0;
      check(busy, "busy after trigger");
      lat = 0;
      while (!freeze_req && lat < 100) begin
        @(negedge clk);
        lat++;
      end
      // lat counts the edges after the one that took the trigger
      check(lat == SETTLE, $sformatf("freeze after %0d edges, expected %0d", lat, SETTLE));
      // triggers while busy must be ignored
      if (e % 2 == 0) begin
        repeat (2) @(negedge clk);
        trig = 1'b1;
        @(negedge clk);
        trig = 1'b0;
        extra_trigs++;
      end
      while (busy) @(negedge clk);
      exp.push_back(FRAME_HEADER);
      for (int i = 0; i < N; i++) exp.push_back(mem_valid[i] ? mem_tot[i] : 8'h00);
      check(got.size() == exp.size(),
            $sformatf("event %0d: %0d bytes, expected %0d", e, got.size(), exp.size()));
      for (int b = 0; b < exp.size() && b < got.size(); b++)
        check(got[b] == exp[b],
              $sformatf("event %0d byte %0d: %02h, expected %02h", e, b, got[b], exp[b]));
      check(!freeze_req && !freeze_ack, "freeze released at the end of the frame");
      repeat (4) @(negedge clk);
      check(!busy, "ignored trigger did not start a second frame");
    end
    check(freeze_drops_in_frame == 0, "freeze acknowledged for every byte sent");
    check(extra_trigs > 0, "triggers during readout were exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (EVENTS * 400 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
