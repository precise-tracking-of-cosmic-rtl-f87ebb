// uart_tx: serial transmitter that carries the event data to the host
// computer.
//
// Standard asynchronous format, 8N1: the line idles high. Each byte is sent
// as one start bit (0), eight data bits with the least significant first,
// and one stop bit (1). Every bit lasts CLKS_PER_BIT clock cycles; the
// default of 434 cycles at 50 MHz gives 115200 baud (0.01 % fast).
//
// Byte interface: valid/ready. A byte is taken in the cycle in which
// `tx_valid` and `tx_ready` are both high. `tx_ready` is high only while the
// transmitter is idle, so one byte takes 10 * CLKS_PER_BIT cycles and the
// next can be accepted in the cycle after the stop bit ends. The start bit
// begins on the clock edge that accepts the byte.
//
// Taken from the published scheme: the data go to the computer over UART. The frame
// format, baud rate and handshake are this design's choices; the published scheme
// gives none of them.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = daq_pkg::CLKS_PER_BIT
) (
  input  logic       clk,       // 50 MHz
  input  logic       rst_n,
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  output logic       tx_ready,
  output logic       txd        // serial line, idle high
);
  localparam int unsigned DIV_W = $clog2(CLKS_PER_BIT);

  logic [9:0]       shreg;      // {stop, data[7:0], start}, sent from bit 0
  logic [3:0]       bits_left;  // bits still to send, 0 = idle
  logic [DIV_W-1:0] div;        // cycles left in the current bit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      div       <= '0;
    end else if (bits_left == 4'd0) begin
      if (tx_valid) begin
        shreg     <= {1'b1, tx_data, 1'b0};
        bits_left <= 4'd10;
        div       <= DIV_W'(CLKS_PER_BIT - 1);
      end
    end else if (div != '0) begin
      div <= div - DIV_W'(1);
    end else begin
      shreg     <= {1'b1, shreg[9:1]};
      bits_left <= bits_left - 4'd1;
      div       <= DIV_W'(CLKS_PER_BIT - 1);
    end
  end

  assign tx_ready = (bits_left == 4'd0);
  assign txd      = (bits_left == 4'd0) ? 1'b1 : shreg[0];

  // Handshake rule: a byte offered and not yet taken stays unchanged.
  a_hold_data: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_valid && !tx_ready) |=> (tx_valid && $stable(tx_data)));

endmodule
