// record_encoder: builds the 48-bit event records.
//
// Each cycle at most one record is made. A delta event (a change of the
// sequencer outputs) wins over strobe events: when both occur in the same
// cycle the strobe event is dropped, as in the published design, and
// strobe_collide pulses. Otherwise any strobe hits form one strobe record
// whose channel bits show every channel that fired in that cycle. The
// timestamp is the one presented with the event.
//
// Two flags are carried forward to the next record that is actually
// written. If a record is made while the buffer is full it is lost, overrun
// pulses, and the next record written has sample_lost set (published
// behaviour). A counter wrap makes the next record written carry wraparound
// (this design's reading of the published "counter overflows" bit).
// A strobe dropped for a colliding delta does not set sample_lost.
//
// Timing: rec_valid, rec, strobe_collide and overrun are combinational from
// the inputs of the same cycle (all of which come straight from flops), so a
// record is written into the buffer on the clock edge that ends the cycle in
// which its event is presented, and fifo_full is never stale. Only the two
// pending flags are state. While capture_en is low no records are made and
// pending flags are kept.
module record_encoder
  import timetag_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            capture_en,
  input  logic [TS_W-1:0] ts,
  input  logic            wrap,
  input  logic [NCH-1:0]  strobe_hit,
  input  logic            delta_hit,
  input  logic [NCH-1:0]  delta_state,
  input  logic            fifo_full,
  output logic            rec_valid,
  output record_t         rec,
  output logic            strobe_collide,
  output logic            overrun
);

  logic    make;
  logic    accept;
  logic    lost_pending, wrap_pending;

  always_comb begin
    make   = capture_en && (delta_hit || (|strobe_hit));
    accept = make && !fifo_full;

    rec             = '0;
    rec.timestamp   = ts;
    rec.sample_lost = lost_pending;
    rec.wraparound  = wrap_pending || wrap;
    if (delta_hit) begin
      rec.rec_type = REC_DELTA;
      rec.channels = delta_state;
    end else begin
      rec.rec_type = REC_STROBE;
      rec.channels = strobe_hit;
    end

    rec_valid      = accept;
    strobe_collide = capture_en && delta_hit && (|strobe_hit);
    overrun        = make && fifo_full;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lost_pending <= 1'b0;
      wrap_pending <= 1'b0;
    end else if (accept) begin
      lost_pending <= 1'b0;
      wrap_pending <= 1'b0;
    end else begin
      if (make) lost_pending <= 1'b1;
      if (wrap) wrap_pending <= 1'b1;
    end
  end

endmodule
