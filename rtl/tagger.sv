// tagger: the time tagger.
//
// Records the arrival time of events on four strobe channels (photon
// detectors) and four delta channels (the sequencer outputs, looped back
// inside the FPGA) as 48-bit records in an on-chip buffer that the USB
// interface drains. Strobe and delta records share one format (see
// timetag_pkg): a 36-bit timestamp in clock cycles, channel bits, record
// type and the wraparound and sample-lost flags.
//
// Pipeline: event_detect synchronises the inputs and finds edges;
// timestamp_counter supplies the time of the cycle in which the event is
// seen; record_encoder forms at most one record per cycle, giving delta
// priority over strobe; record_fifo buffers DEPTH records. An input edge
// is written into the buffer SYNC_STAGES + 1 cycles after it is first
// sampled, and a record can be written every cycle, so every channel can
// take events at the clock rate until the buffer fills.
//
// Read side: rec_data is the oldest record while rec_empty is low; rec_pop
// removes it. Control inputs come from the register interface.
// The division into these four parts and the way they are wired are this
// design's own; what each records follows the published design.
module tagger
  import timetag_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic           clk,
  input  logic           rst_n,
  // control
  input  logic           capture_en,
  input  logic           ts_clear,
  input  logic [NCH-1:0] strobe_en,
  input  logic [NCH-1:0] delta_en,
  // event inputs
  input  logic [NCH-1:0] strobe_in,
  input  logic [NCH-1:0] delta_in,
  // record stream
  output record_t        rec_data,
  output logic           rec_empty,
  input  logic           rec_pop,
  // event monitors (one-cycle pulses)
  output logic           mon_record,
  output logic           mon_collide,
  output logic           mon_overrun,
  output logic           mon_wrap
);

  logic [NCH-1:0]  strobe_hit;
  logic            delta_hit;
  logic [NCH-1:0]  delta_state;
  logic [TS_W-1:0] ts;
  logic            wrap;
  logic            fifo_full;
  logic            rec_valid;
  record_t         rec;
  logic [REC_W-1:0] rd_bits;

  event_detect u_detect (
    .clk, .rst_n,
    .strobe_in, .delta_in, .strobe_en, .delta_en,
    .strobe_hit, .delta_hit, .delta_state
  );

  timestamp_counter #(.TS_W(TS_W)) u_ts (
    .clk, .rst_n, .clear(ts_clear), .ts, .wrap
  );

  record_encoder u_enc (
    .clk, .rst_n, .capture_en, .ts, .wrap,
    .strobe_hit, .delta_hit, .delta_state, .fifo_full,
    .rec_valid, .rec, .strobe_collide(mon_collide), .overrun(mon_overrun)
  );

  record_fifo #(.W(REC_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(rec_valid), .wr_data(rec), .full(fifo_full),
    .rd_en(rec_pop), .rd_data(rd_bits), .empty(rec_empty)
  );

  assign rec_data   = record_t'(rd_bits);
  assign mon_record = rec_valid;
  assign mon_wrap   = wrap;

endmodule
