// uart_rx_model: behavioural 8N1 UART receiver standing in for the host
// computer in the testbenches. It waits for a falling edge on the line,
// samples every bit in its middle (CLKS_PER_BIT clocks per bit) and pulses
// `rx_valid` for one clock with the received byte. A stop bit read as 0 is
// flagged on `frame_err`.
module uart_rx_model #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rxd,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  output logic       frame_err
);
  initial begin
    rx_valid  = 1'b0;
    rx_data   = 8'h00;
    frame_err = 1'b0;
    forever begin
      @(posedge clk);
      rx_valid = 1'b0;
      if (rxd == 1'b0) begin
        // in the start bit: move to its middle, then one bit period per bit
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        for (int b = 0; b < 8; b++) begin
          repeat (CLKS_PER_BIT) @(posedge clk);
          rx_data[b] = rxd;
        end
        repeat (CLKS_PER_BIT) @(posedge clk);
        frame_err = (rxd != 1'b1);
        rx_valid  = 1'b1;
        @(posedge clk);
        rx_valid  = 1'b0;
        // wait out the rest of the stop bit
        while (rxd == 1'b0) @(posedge clk);
      end
    end
  end
endmodule
