// tot_memory: the array that holds the latest TOT value of every strip until
// an event is read out.
//
// Each of the N_STRIPS entries holds a valid flag, the TOT value and an age
// counter. When the strip's tot_counter reports a finished pulse, the entry
// is overwritten with the new value, marked valid and its age reset. A valid
// entry ages by one every clock cycle and is dropped (valid cleared) after
// HOLD_CYCLES cycles, so only pulses that ended shortly before a trigger are
// reported with it; a pulse that ended long before the coincidence is not.
//
// Freeze handshake with the readout controller, which runs on the other
// (50 MHz) clock: the controller raises `freeze_req`. Two cycles later the
// memory stops writing and ageing, and one cycle after that it raises
// `freeze_ack`. From then on the contents do not change, and the controller
// can read them through the combinational read port (`rd_addr` -> `rd_valid`,
// `rd_tot`) on its own clock. When the controller drops `freeze_req`, the
// memory clears every entry and lowers `freeze_ack`, which re-arms it for
// the next event. Pulses that end while the memory is frozen are lost: this
// is the dead time of the readout.
//
// Timing (clk = 500 MHz): a write appears in the entry one cycle after the
// `wr_valid` strobe. `freeze_req` reaches the memory after two synchroniser
// cycles, and `freeze_ack` follows one cycle later.
//
// Taken from the published scheme: the TOT values of the seven strips are kept in a
// memory array for a short time and sent out when a coincidence is found.
// This design's own choices: the hold window, last-pulse-wins when a strip
// pulses more than once, the freeze handshake and clear-on-release.
module tot_memory #(
  parameter int unsigned N_STRIPS    = daq_pkg::N_STRIPS,
  parameter int unsigned TOT_W       = daq_pkg::TOT_W,
  parameter int unsigned HOLD_CYCLES = 512,                // 1024 ns at 500 MHz
  localparam int unsigned ADDR_W     = $clog2(N_STRIPS),
  localparam int unsigned AGE_W      = $clog2(HOLD_CYCLES)
) (
  input  logic              clk,                  // 500 MHz
  input  logic              rst_n,
  // write side, from the tot_counter channels
  input  logic [N_STRIPS-1:0] wr_valid,
  input  logic [TOT_W-1:0]  wr_tot [N_STRIPS],
  // freeze handshake with the readout controller (other clock domain)
  input  logic              freeze_req,           // asynchronous level
  output logic              freeze_ack,           // level, to be synchronised by the reader
  // read port, used only while frozen
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_valid,
  output logic [TOT_W-1:0]  rd_tot
);
  localparam logic [AGE_W-1:0] AGE_LAST = AGE_W'(HOLD_CYCLES - 1);

  logic                frozen;        // synchronised freeze_req
  logic                frozen_d;      // frozen, one cycle later
  logic [N_STRIPS-1:0] valid;
  logic [TOT_W-1:0]    tot [N_STRIPS];
  logic [AGE_W-1:0]    age [N_STRIPS];

  sync_2ff u_sync_freeze (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (freeze_req),
    .q    (frozen)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frozen_d <= 1'b0;
      valid    <= '0;
      for (int i = 0; i < N_STRIPS; i++) begin
        tot[i] <= '0;
        age[i] <= '0;
      end
    end else begin
      frozen_d <= frozen;
      if (frozen_d && !frozen) begin
        valid <= '0;                           // release: clear for the next event
      end else if (!frozen) begin
        for (int i = 0; i < N_STRIPS; i++) begin
          if (wr_valid[i]) begin
            valid[i] <= 1'b1;
            tot[i]   <= wr_tot[i];
            age[i]   <= '0;
          end else if (valid[i]) begin
            if (age[i] == AGE_LAST) valid[i] <= 1'b0;   // hold window over
            else                    age[i]   <= age[i] + AGE_W'(1);
          end
        end
      end
    end
  end

  // The acknowledge is given once writes and ageing have stopped (frozen_d).
  assign freeze_ack = frozen && frozen_d;

  assign rd_valid = valid[rd_addr];
  assign rd_tot   = tot[rd_addr];

  // Contents must not change while the freeze is acknowledged.
  property p_frozen_stable;
    @(posedge clk) disable iff (!rst_n)
      (freeze_ack && $past(freeze_ack)) |-> ($stable(valid) && $stable(tot[0]));
  endproperty
  a_frozen_stable: assert property (p_frozen_stable);

endmodule
