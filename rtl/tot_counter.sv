// tot_counter: time-over-threshold (pulse width) measurement for one strip.
//
// The NINO discriminator output is high for as long as the strip's signal is
// above threshold, so its width is a measure of the induced charge. This
// block samples that output with the 500 MHz PLL clock and counts the clock
// periods during which it is high: one count is 2 ns, the resolution of the
// published scheme. The input first passes a two-flip-flop synchroniser. On
// the first sampled-high cycle the counter loads 1; it then increments every
// further high cycle and holds at all ones (2^TOT_W - 1) instead of wrapping,
// so a very long pulse reads as the largest value. On the first sampled-low
// cycle the count is presented on `tot_value` together with a one-cycle
// `tot_valid` strobe.
//
// Timing (clk = 500 MHz): `tot_valid` rises three clock edges after the pin
// falls (two synchroniser stages plus the output register). A pulse of width
// W ns gives floor(W/2) or ceil(W/2) counts depending on its phase against
// the clock.
//
// Taken from the published scheme: direct counting of the pulse width with a 500 MHz
// clock. This design's own choices: the synchroniser, the counter width and
// saturation, and the end-of-pulse strobe.
module tot_counter #(
  parameter int unsigned TOT_W = daq_pkg::TOT_W
) (
  input  logic             clk,        // 500 MHz sampling clock
  input  logic             rst_n,      // active-low reset, synchronous to clk release
  input  logic             nino_in,    // asynchronous NINO output (after the LVDS receiver)
  output logic             tot_valid,  // one-cycle strobe at the end of a pulse
  output logic [TOT_W-1:0] tot_value   // pulse width in clock periods, valid with tot_valid
);
  localparam logic [TOT_W-1:0] CNT_MAX = '1;

  logic             level;     // synchronised input
  logic             level_d;   // synchronised input, one cycle later
  logic [TOT_W-1:0] cnt;

  sync_2ff u_sync (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (nino_in),
    .q    (level)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level_d   <= 1'b0;
      cnt       <= '0;
      tot_valid <= 1'b0;
      tot_value <= '0;
    end else begin
      level_d   <= level;
      tot_valid <= 1'b0;
      if (level && !level_d) begin
        cnt <= TOT_W'(1);                       // leading edge: first high sample
      end else if (level && cnt != CNT_MAX) begin
        cnt <= cnt + TOT_W'(1);                 // still high: count, saturating
      end
      if (!level && level_d) begin
        tot_value <= cnt;                       // trailing edge: report width
        tot_valid <= 1'b1;
      end
    end
  end

endmodule
