// pulse_stretch: opens a coincidence window of at least GATE_CYCLES clock
// cycles at the leading edge of an asynchronous pulse.
//
// The input passes a two-flip-flop synchroniser on the 500 MHz clock. From
// its first sampled-high cycle the registered output stays high for
// GATE_CYCLES cycles, or for as long as the input stays high if that is
// longer. A NINO pulse of 10 ns is thereby turned into a window long enough
// to be seen reliably by logic on the 50 MHz clock. A pulse that rises again
// while the window is open restarts it.
//
// Timing (clk = 500 MHz): `gate` rises three clock edges after the input
// rises (two synchroniser stages and the output register).
//
// This block is a choice of this design; the published scheme does not say how
// nanosecond pulses are brought to the 50 MHz coincidence.
module pulse_stretch #(
  parameter int unsigned GATE_CYCLES = 40,          // 80 ns at 500 MHz
  localparam int unsigned CNT_W      = $clog2(GATE_CYCLES + 1)
) (
  input  logic clk,     // 500 MHz
  input  logic rst_n,
  input  logic d,       // asynchronous pulse
  output logic gate     // stretched pulse, registered on clk
);
  logic             level, level_d;
  logic [CNT_W-1:0] cnt;          // window cycles still to go after this one

  sync_2ff u_sync (.clk(clk), .rst_n(rst_n), .d(d), .q(level));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level_d <= 1'b0;
      cnt     <= '0;
      gate    <= 1'b0;
    end else begin
      level_d <= level;
      if (level && !level_d) begin
        cnt  <= CNT_W'(GATE_CYCLES - 1);
        gate <= 1'b1;
      end else begin
        if (cnt != '0) cnt <= cnt - CNT_W'(1);
        gate <= level || (cnt != '0);
      end
    end
  end
endmodule
