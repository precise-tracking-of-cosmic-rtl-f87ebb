// sync_2ff: two-flip-flop synchroniser for a single asynchronous level.
//
// The input (a NINO output, a scintillator signal, or a handshake level from
// the other clock domain) is sampled by two flip-flops in series on the
// destination clock. The output follows the input two clock edges later and
// has settled from any metastability in the first stage. Resets to 0
// (asynchronous, active low). A choice of this design: the published scheme says
// nothing about how the asynchronous detector signals enter the FPGA logic.
module sync_2ff (
  input  logic clk,
  input  logic rst_n,
  input  logic d,      // asynchronous level
  output logic q       // the level on clk, two cycles late
);
  logic meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= 1'b0;
      q    <= 1'b0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
