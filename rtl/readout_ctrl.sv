// readout_ctrl: sends one event frame to the host for every coincidence.
//
// On a `trig` pulse from the coincidence unit the controller first waits
// SETTLE_CYCLES clock cycles, so that the neighbour strips' NINO pulses,
// which may outlast the central one, have ended and been written to the TOT
// memory. It then freezes the memory (freeze_req/freeze_ack handshake; the
// acknowledge arrives from the 500 MHz domain and is synchronised here). It
// reads the frozen entries one by one and hands the UART a frame of
// FRAME_BYTES bytes:
//
//   byte 0      : header 0xA5
//   byte 1 + i  : TOT of strip i in 2 ns counts (0 if strip i had no pulse
//                 within the memory's hold window), i = 0..N_STRIPS-1,
//                 strip CENTER_IDX being the central (trigger) strip
//
// After the last byte has been accepted it drops freeze_req. The memory then
// clears itself, and once the acknowledge has fallen the controller returns
// to idle. Triggers that arrive while `busy` is high are ignored: that is
// the readout dead time, about 0.6 ms per event at 115200 baud.
//
// Timing (clk = 50 MHz): freeze_req rises SETTLE_CYCLES clock edges after
// the edge that takes the trigger.
// The UART accepts a byte when its previous one has left the line, so
// `busy` falls when the last byte is accepted, about
// (FRAME_BYTES-1) * 10 bit times after the freeze; that last byte is still
// on the line for another 10 bit times.
//
// Taken from the published scheme: transmission over UART of the seven stored TOT
// values when a coincidence is found. This design's own choices: the settle
// delay, the frame layout with its header byte, the zero for empty strips
// and the handling of triggers during readout.
module readout_ctrl #(
  parameter int unsigned N_STRIPS      = daq_pkg::N_STRIPS,
  parameter int unsigned TOT_W         = daq_pkg::TOT_W,
  parameter int unsigned SETTLE_CYCLES = 32,                // 640 ns at 50 MHz
  localparam int unsigned ADDR_W       = $clog2(N_STRIPS),
  localparam int unsigned FRAME_BYTES  = N_STRIPS + 1,
  localparam int unsigned IDX_W        = $clog2(FRAME_BYTES),
  localparam int unsigned SET_W        = $clog2(SETTLE_CYCLES + 1)
) (
  input  logic              clk,          // 50 MHz
  input  logic              rst_n,
  input  logic              trig,         // one-cycle coincidence pulse
  // TOT memory handshake and read port
  output logic              freeze_req,
  input  logic              freeze_ack,   // asynchronous, from the 500 MHz domain
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_valid,
  input  logic [TOT_W-1:0]  rd_tot,
  // byte stream to the UART transmitter
  output logic              tx_valid,
  output logic [7:0]        tx_data,
  input  logic              tx_ready,
  // status
  output logic              busy
);
  import daq_pkg::*;

  ro_state_t        state;
  logic             ack;          // synchronised freeze_ack
  logic [SET_W-1:0] settle_cnt;
  logic [IDX_W-1:0] idx;          // frame byte being sent

  sync_2ff u_sync_ack (.clk(clk), .rst_n(rst_n), .d(freeze_ack), .q(ack));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= RO_IDLE;
      freeze_req <= 1'b0;
      settle_cnt <= '0;
      idx        <= '0;
    end else begin
      unique case (state)
        RO_IDLE: if (trig) begin
          settle_cnt <= SET_W'(SETTLE_CYCLES);
          state      <= RO_SETTLE;
        end
        RO_SETTLE: begin
          if (settle_cnt == SET_W'(1) || settle_cnt == '0) begin
            freeze_req <= 1'b1;
            state      <= RO_FREEZE;
          end
          settle_cnt <= settle_cnt - SET_W'(1);
        end
        RO_FREEZE: if (ack) begin
          idx   <= '0;
          state <= RO_SEND;
        end
        RO_SEND: if (tx_ready) begin
          if (idx == IDX_W'(FRAME_BYTES - 1)) begin
            freeze_req <= 1'b0;
            state      <= RO_RELEASE;
          end else begin
            idx <= idx + IDX_W'(1);
          end
        end
        RO_RELEASE: if (!ack) state <= RO_IDLE;
        default: state <= RO_IDLE;
      endcase
    end
  end

  assign rd_addr  = (idx == '0) ? '0 : ADDR_W'(idx - IDX_W'(1));
  assign tx_valid = (state == RO_SEND);
  assign tx_data  = (idx == '0) ? FRAME_HEADER
                  : (rd_valid ? 8'(rd_tot) : 8'h00);
  assign busy     = (state != RO_IDLE);

  // freeze_req may only drop once the whole frame has been handed over.
  a_freeze_held: assert property (@(posedge clk) disable iff (!rst_n)
    (state == RO_SEND) |-> freeze_req);

  initial begin
    assert (TOT_W <= 8) else $error("readout_ctrl: a TOT value must fit one byte");
  end

endmodule
