// register_interface: host-visible control registers.
//
// The host reaches the tagger and sequencer only through these registers.
// A command (cmd_valid, with cmd_write, an 8-bit address and 32-bit data)
// is taken in one cycle; the next cycle rsp_valid pulses with the address
// and the register's value after the command, for reads and writes alike,
// so the host always gets an acknowledgement. Commands must not come closer
// than one every two cycles (the USB interface sends at most one per
// six bytes).
//
// Map (timetag_pkg):
//   0x00 CTRL       [0] capture_en  [1] seq_run  [2] ts_clear, a one-cycle
//                   pulse on write that reads back as 0
//   0x01 STROBE_EN  [3:0] strobe channel enables (reset 0xF)
//   0x02 DELTA_EN   [3:0] delta channel enables  (reset 0xF)
//   0x10+4*ch+k     sequencer channel ch: k=0 init_level[0], 1 init_count,
//                   2 low_count, 3 high_count
// Other addresses read 0 and ignore writes. All registers reset to 0
// except the enables.
//
// A register interface linking USB, tagger and sequencer is part of the
// published block diagram; its map and protocol are this design's own.
module register_interface
  import timetag_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  // command / reply
  input  logic           cmd_valid,
  input  logic           cmd_write,
  input  logic [7:0]     cmd_addr,
  input  logic [31:0]    cmd_wdata,
  output logic           rsp_valid,
  output logic [7:0]     rsp_addr,
  output logic [31:0]    rsp_data,
  // control outputs
  output logic           capture_en,
  output logic           seq_run,
  output logic           ts_clear,
  output logic [NCH-1:0] strobe_en,
  output logic [NCH-1:0] delta_en,
  output seq_cfg_t       seq_cfg [NCH]
);

  logic        is_seq;
  logic [1:0]  seq_ch, seq_field;
  logic [31:0] rdata;

  assign is_seq    = (cmd_addr >= REG_SEQ_BASE) && (cmd_addr < REG_SEQ_BASE + 8'(4 * NCH));
  assign seq_ch    = 2'((cmd_addr - REG_SEQ_BASE) >> 2);
  assign seq_field = cmd_addr[1:0];

  // Value of the addressed register as it will be after this command.
  always_comb begin
    rdata = '0;
    if (is_seq) begin
      unique case (seq_field)
        2'd0: rdata = cmd_write ? {31'd0, cmd_wdata[0]} : {31'd0, seq_cfg[seq_ch].init_level};
        2'd1: rdata = cmd_write ? cmd_wdata : seq_cfg[seq_ch].init_count;
        2'd2: rdata = cmd_write ? cmd_wdata : seq_cfg[seq_ch].low_count;
        2'd3: rdata = cmd_write ? cmd_wdata : seq_cfg[seq_ch].high_count;
      endcase
    end else begin
      unique case (cmd_addr)
        REG_CTRL:      rdata = cmd_write ? {30'd0, cmd_wdata[1:0]} : {30'd0, seq_run, capture_en};
        REG_STROBE_EN: rdata = cmd_write ? 32'(cmd_wdata[NCH-1:0]) : 32'(strobe_en);
        REG_DELTA_EN:  rdata = cmd_write ? 32'(cmd_wdata[NCH-1:0]) : 32'(delta_en);
        default:       rdata = '0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp_valid  <= 1'b0;
      rsp_addr   <= '0;
      rsp_data   <= '0;
      capture_en <= 1'b0;
      seq_run    <= 1'b0;
      ts_clear   <= 1'b0;
      strobe_en  <= '1;
      delta_en   <= '1;
      for (int c = 0; c < NCH; c++) seq_cfg[c] <= '0;
    end else begin
      rsp_valid <= cmd_valid;
      ts_clear  <= 1'b0;
      if (cmd_valid) begin
        rsp_addr <= cmd_addr;
        rsp_data <= rdata;
      end
      if (cmd_valid && cmd_write) begin
        if (is_seq) begin
          unique case (seq_field)
            2'd0: seq_cfg[seq_ch].init_level <= cmd_wdata[0];
            2'd1: seq_cfg[seq_ch].init_count <= cmd_wdata;
            2'd2: seq_cfg[seq_ch].low_count  <= cmd_wdata;
            2'd3: seq_cfg[seq_ch].high_count <= cmd_wdata;
          endcase
        end else begin
          unique case (cmd_addr)
            REG_CTRL: begin
              capture_en <= cmd_wdata[0];
              seq_run    <= cmd_wdata[1];
              ts_clear   <= cmd_wdata[2];
            end
            REG_STROBE_EN: strobe_en <= cmd_wdata[NCH-1:0];
            REG_DELTA_EN:  delta_en  <= cmd_wdata[NCH-1:0];
            default: ;
          endcase
        end
      end
    end
  end

  // Commands must be spaced by at least one idle cycle.
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |=> !cmd_valid)
    else $error("register_interface: back-to-back commands");

endmodule
