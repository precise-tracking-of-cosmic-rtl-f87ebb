// tb_uart_tx: self-checking test of the 8N1 UART transmitter.
// Random bytes are offered with random gaps. The line is decoded by a
// behavioural receiver, and every received byte is compared with the byte
// that was accepted. Also checked: the line idles high, `tx_ready` is low for
// exactly 10 * CLKS_PER_BIT cycles per byte, the start bit begins on the
// accepting edge, and back-to-back bytes follow each other without a gap.
module tb_uart_tx;
  localparam int unsigned CPB = 12;
  localparam int unsigned NBYTES = 60;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       tx_valid = 1'b0;
  logic [7:0] tx_data = '0;
  logic       tx_ready, txd;
  logic       rx_valid, frame_err;
  logic [7:0] rx_data;

  int checks = 0, failures = 0;
  logic [7:0] sent [$];
  int busy_cycles = 0;
  int received = 0;
  bit armed = 1'b0;        // receiver output counted only after reset

  always #10ns clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (
    .clk(clk), .rst_n(rst_n), .tx_valid(tx_valid), .tx_data(tx_data),
    .tx_ready(tx_ready), .txd(txd)
  );

  uart_rx_model #(.CLKS_PER_BIT(CPB)) rx (
    .clk(clk), .rxd(txd), .rx_valid(rx_valid), .rx_data(rx_data), .frame_err(frame_err)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  always @(posedge clk) begin
    if (rx_valid && armed) begin
      logic [7:0] exp;
      exp = (sent.size() > 0) ? sent.pop_front() : 8'hxx;
      check(rx_data == exp, $sformatf("received %02h, expected %02h", rx_data, exp));
      check(!frame_err, "stop bit");
      received++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    check(txd == 1'b1, "line idles high in reset");
    rst_n = 1'b1;
    repeat (12 * CPB) @(posedge clk);
    armed = 1'b1;
    check(txd == 1'b1 && tx_ready, "idle after reset");
    for (int k = 0; k < NBYTES; k++) begin
      @(negedge clk);
      tx_valid = 1'b1;
      tx_data  = 8'($urandom);
      check(tx_ready, "ready when idle");
      @(posedge clk);                 // accepted here
      sent.push_back(tx_data);
      #1ns;
      check(txd == 1'b0, "start bit begins on the accepting edge");
      @(negedge clk);
      tx_valid = 1'b0;
      tx_data  = 8'($urandom);        // may change once taken
      busy_cycles = 0;              // cycles after the accepting edge
      while (!tx_ready) begin
        @(negedge clk);
        busy_cycles++;
      end
      check(busy_cycles == 10 * CPB,
            $sformatf("byte took %0d cycles, expected %0d", busy_cycles, 10 * CPB));
      if (k % 3 == 0) repeat ($urandom_range(0, 40)) @(negedge clk);
    end
    repeat (2 * CPB) @(posedge clk);
    check(received == NBYTES, $sformatf("received %0d bytes, expected %0d", received, NBYTES));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBYTES * 12 * CPB + 5_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
