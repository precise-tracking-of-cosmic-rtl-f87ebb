// rst_sync: reset synchroniser. Asserts its active-low reset output at once
// when the input reset is asserted and releases it two clock edges after the
// input is released, in step with the destination clock. One is used in each
// of the two clock domains (50 MHz and 500 MHz). A choice of this design;
// the published scheme says nothing about reset.
module rst_sync (
  input  logic clk,
  input  logic rst_n_in,   // asynchronous active-low reset
  output logic rst_n_out   // active-low reset, released synchronously to clk
);
  logic stage;

  always_ff @(posedge clk or negedge rst_n_in) begin
    if (!rst_n_in) begin
      stage     <= 1'b0;
      rst_n_out <= 1'b0;
    end else begin
      stage     <= 1'b1;
      rst_n_out <= stage;
    end
  end
endmodule
