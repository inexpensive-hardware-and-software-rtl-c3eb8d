// timetag_pkg: types and constants shared by the time tagger, sequencer,
// register interface and USB interface.
//
// The record is the 48-bit word every event becomes. Its layout follows the
// published record format: a 36-bit timestamp in clock cycles, four channel
// bits, a record-type bit (strobe = 0, delta = 1), a wraparound bit and a
// sample-lost bit. The published description counts bits from 1 (channels in
// bits 37-40, type in 46, wraparound 47, sample lost 48); here bits are
// counted from 0, so the same fields sit at [39:36], [45], [46] and [47].
// Bits [44:40] are unused and always 0.
//
// The register map below is this design's own; only the existence of a
// register interface between the host and the tagger and sequencer is given.
package timetag_pkg;

  localparam int unsigned NCH   = 4;   // strobe channels, delta channels, sequencer outputs
  localparam int unsigned TS_W  = 36;  // timestamp width in clock cycles
  localparam int unsigned REC_W = 48;  // record width
  localparam int unsigned REC_BYTES = REC_W / 8;

  typedef enum logic {
    REC_STROBE = 1'b0,
    REC_DELTA  = 1'b1
  } rec_type_e;

  typedef struct packed {
    logic            sample_lost;  // [47] a record was lost to a buffer overrun before this one
    logic            wraparound;   // [46] the timestamp counter wrapped before this record
    rec_type_e       rec_type;     // [45]
    logic [4:0]      unused;       // [44:40]
    logic [NCH-1:0]  channels;     // [39:36] strobe: channels hit; delta: sequencer state
    logic [TS_W-1:0] timestamp;    // [35:0]
  } record_t;

  // One sequencer channel's program, in clock cycles.
  typedef struct packed {
    logic        init_level;  // level while stopped and at start
    logic [31:0] init_count;  // cycles at init_level before the first toggle
    logic [31:0] low_count;   // cycles spent low in each later period
    logic [31:0] high_count;  // cycles spent high in each later period
  } seq_cfg_t;

  // Register addresses (8-bit address space, 32-bit registers).
  localparam logic [7:0] REG_CTRL       = 8'h00;  // [0] capture_en [1] seq_run [2] ts_clear (self-clearing)
  localparam logic [7:0] REG_STROBE_EN  = 8'h01;  // [3:0]
  localparam logic [7:0] REG_DELTA_EN   = 8'h02;  // [3:0]
  localparam logic [7:0] REG_SEQ_BASE   = 8'h10;  // 0x10 + 4*ch + {0:init_level, 1:init_count, 2:low_count, 3:high_count}

  // USB command frame: op byte (bit 0 = write), address byte, 4 data bytes LSB first.
  localparam int unsigned CMD_BYTES = 6;
  // Reply frame: address byte, 4 data bytes LSB first.
  localparam int unsigned RSP_BYTES = 5;

  // FX2 endpoint select values on fifoadr.
  localparam logic [1:0] EP_CMD  = 2'd0;  // host -> FPGA commands
  localparam logic [1:0] EP_DATA = 2'd2;  // FPGA -> host records
  localparam logic [1:0] EP_RSP  = 2'd3;  // FPGA -> host register replies

endpackage
