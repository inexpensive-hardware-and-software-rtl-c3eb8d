// event_detect: turns the tagger's raw inputs into per-cycle events.
//
// The four strobe inputs carry TTL pulses from photon-counting detectors and
// are asynchronous to the core clock; the four delta inputs carry the
// sequencer outputs. Both groups pass through the same SYNC_STAGES-flop
// synchroniser so that an edge on either reaches the edge detector after the
// same delay, which keeps strobe and delta timestamps comparable.
//
// A strobe event is a rising edge on an enabled strobe channel; strobe_hit
// shows one bit per channel and may have several bits set in one cycle. A
// delta event is any change, either direction, on an enabled delta channel;
// delta_hit is one bit and delta_state is the full synchronised four-bit
// state after the change. Outputs are registered: an input edge that meets
// the first synchroniser flop at clock edge k is reported in the cycle after
// edge k+SYNC_STAGES.
//
// Recording changes of the sequencer outputs and rising edges of detector
// pulses follows the published design; the synchroniser depth, the choice of
// the rising edge and the per-channel enables are this design's own.
module event_detect
  import timetag_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] strobe_in,
  input  logic [NCH-1:0] delta_in,
  input  logic [NCH-1:0] strobe_en,
  input  logic [NCH-1:0] delta_en,
  output logic [NCH-1:0] strobe_hit,
  output logic           delta_hit,
  output logic [NCH-1:0] delta_state
);

  logic [SYNC_STAGES-1:0][NCH-1:0] strobe_sync, delta_sync;
  logic [NCH-1:0] strobe_prev, delta_prev;
  logic [NCH-1:0] strobe_now, delta_now;

  assign strobe_now = strobe_sync[SYNC_STAGES-1];
  assign delta_now  = delta_sync[SYNC_STAGES-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      strobe_sync <= '0;
      delta_sync  <= '0;
      strobe_prev <= '0;
      delta_prev  <= '0;
      strobe_hit  <= '0;
      delta_hit   <= 1'b0;
      delta_state <= '0;
    end else begin
      strobe_sync <= {strobe_sync[SYNC_STAGES-2:0], strobe_in};
      delta_sync  <= {delta_sync[SYNC_STAGES-2:0], delta_in};
      strobe_prev <= strobe_now;
      delta_prev  <= delta_now;
      strobe_hit  <= strobe_now & ~strobe_prev & strobe_en;
      delta_hit   <= |((delta_now ^ delta_prev) & delta_en);
      delta_state <= delta_now;
    end
  end

endmodule
