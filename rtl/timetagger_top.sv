// timetagger_top: the FPGA of the photon time tagger.
//
// Four photon-counting detectors drive the strobe inputs; a four-channel
// sequencer drives the excitation switch (an acousto-optic tunable filter)
// and is looped back inside the chip to the tagger's delta inputs, so that
// every photon and every change of excitation becomes a 48-bit time-tagged
// record. Records stream to the PC through a Cypress FX2 USB controller,
// and the PC programs the tagger and the sequencer through registers
// reached over the same USB link. This is the arrangement of the published
// block diagram: FX2 interface, register interface, sequencer, tagger.
//
// Interface: clk is the 128 MHz core clock (on the board a PLL multiplies a
// 32 MHz crystal by four; that vendor PLL is outside this RTL). rst_n is a
// synchronous active-low reset. det_in are the asynchronous detector pulse
// inputs, seq_out the sequencer outputs to the excitation switch, and the
// fd_*/sl*/fifoadr/ep_* signals the FX2 FIFO bus described in
// fx2_interface.
//
// Timing: a detector edge reaches the record buffer 3 cycles after it is
// first sampled; each record leaves over the FX2 bus as 6 bytes.
module timetagger_top
  import timetag_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] det_in,
  output logic [NCH-1:0] seq_out,
  // FX2 bus
  input  logic [7:0]     fd_i,
  output logic [7:0]     fd_o,
  output logic           slrd,
  output logic           slwr,
  output logic [1:0]     fifoadr,
  input  logic           ep_cmd_empty,
  input  logic           ep_rsp_full,
  input  logic           ep_data_full
);

  logic           capture_en, seq_run, ts_clear;
  logic [NCH-1:0] strobe_en, delta_en;
  seq_cfg_t       seq_cfg [NCH];

  logic           cmd_valid, cmd_write;
  logic [7:0]     cmd_addr;
  logic [31:0]    cmd_wdata;
  logic           rsp_valid;
  logic [7:0]     rsp_addr;
  logic [31:0]    rsp_data;

  record_t        rec_data;
  logic           rec_empty, rec_pop;
  logic           mon_record, mon_collide, mon_overrun, mon_wrap;

  fx2_interface u_fx2 (
    .clk, .rst_n,
    .fd_i, .fd_o, .slrd, .slwr, .fifoadr,
    .ep_cmd_empty, .ep_rsp_full, .ep_data_full,
    .cmd_valid, .cmd_write, .cmd_addr, .cmd_wdata,
    .rsp_valid, .rsp_addr, .rsp_data,
    .rec_data, .rec_empty, .rec_pop
  );

  register_interface u_regs (
    .clk, .rst_n,
    .cmd_valid, .cmd_write, .cmd_addr, .cmd_wdata,
    .rsp_valid, .rsp_addr, .rsp_data,
    .capture_en, .seq_run, .ts_clear, .strobe_en, .delta_en, .seq_cfg
  );

  sequencer u_seq (
    .clk, .rst_n, .run(seq_run), .cfg(seq_cfg), .seq_out
  );

  tagger #(.DEPTH(DEPTH)) u_tagger (
    .clk, .rst_n,
    .capture_en, .ts_clear, .strobe_en, .delta_en,
    .strobe_in(det_in), .delta_in(seq_out),
    .rec_data, .rec_empty, .rec_pop,
    .mon_record, .mon_collide, .mon_overrun, .mon_wrap
  );

endmodule
