// fx2_interface: FPGA side of the USB link through a Cypress FX2.
//
// The FX2 presents endpoint FIFOs to the FPGA. This block uses three:
// EP_CMD (host to FPGA register commands), EP_RSP (register replies to the
// host) and EP_DATA (the record stream to the host). The bus is modelled as
// a simple synchronous FIFO port in the core clock domain: each cycle the
// block selects one endpoint with fifoadr and either pops the byte shown on
// fd_i (slrd) or pushes fd_o (slwr). A pop is only issued when that
// endpoint's empty flag is low and a push only when its full flag is low, so
// a transfer happens on every clock edge where slrd or slwr is high.
// Priority, highest first: reading a command byte, writing a reply byte,
// writing a record byte.
//
// Commands are 6 bytes: op (bit 0 = write), address, then 32-bit data least
// significant byte first. After the sixth byte cmd_valid pulses for one
// cycle; no further command byte is read until the register interface's
// reply (address, then 32-bit data LSB first, 5 bytes) has been sent.
// Records are popped from the tagger's buffer and sent as 6 bytes, least
// significant byte first, so a host reads them as little-endian 48-bit
// words; a new record is loaded in the cycle after the previous record's
// last byte, so a record takes 7 cycles when the FX2 never stalls.
//
// That the FPGA talks to the PC through an FX2 interface block follows the
// published design; the bus timing, endpoint use, framing and byte order
// are this design's own. A real FX2 slave FIFO runs on its own interface
// clock of at most 48 MHz; here it shares the core clock.
module fx2_interface
  import timetag_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // FX2 bus
  input  logic [7:0]  fd_i,
  output logic [7:0]  fd_o,
  output logic        slrd,
  output logic        slwr,
  output logic [1:0]  fifoadr,
  input  logic        ep_cmd_empty,
  input  logic        ep_rsp_full,
  input  logic        ep_data_full,
  // register interface
  output logic        cmd_valid,
  output logic        cmd_write,
  output logic [7:0]  cmd_addr,
  output logic [31:0] cmd_wdata,
  input  logic        rsp_valid,
  input  logic [7:0]  rsp_addr,
  input  logic [31:0] rsp_data,
  // tagger record buffer
  input  record_t     rec_data,
  input  logic        rec_empty,
  output logic        rec_pop
);

  logic [CMD_BYTES-1:0][7:0] cmd_buf;
  logic [2:0]                cmd_cnt;
  logic                      wait_rsp;
  logic [RSP_BYTES-1:0][7:0] rsp_sh;
  logic [2:0]                rsp_left;
  logic [REC_BYTES-1:0][7:0] rec_sh;
  logic [2:0]                rec_left;

  logic take_cmd, send_rsp, send_rec;

  always_comb begin
    take_cmd = !ep_cmd_empty && !wait_rsp && (rsp_left == 0) && (cmd_cnt < 3'(CMD_BYTES));
    send_rsp = !take_cmd && (rsp_left != 0) && !ep_rsp_full;
    send_rec = !take_cmd && !send_rsp && (rec_left != 0) && !ep_data_full;

    slrd    = take_cmd;
    slwr    = send_rsp || send_rec;
    fifoadr = take_cmd ? EP_CMD : (send_rsp ? EP_RSP : EP_DATA);
    fd_o    = send_rsp ? rsp_sh[0] : rec_sh[0];

    cmd_valid = (cmd_cnt == 3'(CMD_BYTES));
    cmd_write = cmd_buf[0][0];
    cmd_addr  = cmd_buf[1];
    cmd_wdata = {cmd_buf[5], cmd_buf[4], cmd_buf[3], cmd_buf[2]};

    rec_pop = (rec_left == 0) && !rec_empty;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd_buf  <= '0;
      cmd_cnt  <= '0;
      wait_rsp <= 1'b0;
      rsp_sh   <= '0;
      rsp_left <= '0;
      rec_sh   <= '0;
      rec_left <= '0;
    end else begin
      // command deframer
      if (take_cmd) begin
        cmd_buf[cmd_cnt] <= fd_i;
        cmd_cnt          <= cmd_cnt + 1'b1;
      end
      if (cmd_valid) begin
        cmd_cnt  <= '0;
        wait_rsp <= 1'b1;
      end
      // reply serialiser
      if (rsp_valid) begin
        rsp_sh   <= {rsp_data, rsp_addr};
        rsp_left <= 3'(RSP_BYTES);
        wait_rsp <= 1'b0;
      end else if (send_rsp) begin
        rsp_sh   <= rsp_sh >> 8;
        rsp_left <= rsp_left - 1'b1;
      end
      // record serialiser
      if (rec_pop) begin
        rec_sh   <= rec_data;
        rec_left <= 3'(REC_BYTES);
      end else if (send_rec) begin
        rec_sh   <= rec_sh >> 8;
        rec_left <= rec_left - 1'b1;
      end
    end
  end

  // Bus rules: never pop an empty endpoint or push a full one.
  assert property (@(posedge clk) disable iff (!rst_n) slrd |-> !ep_cmd_empty && fifoadr == EP_CMD);
  assert property (@(posedge clk) disable iff (!rst_n)
                   slwr |-> (fifoadr == EP_RSP && !ep_rsp_full) || (fifoadr == EP_DATA && !ep_data_full));
  assert property (@(posedge clk) disable iff (!rst_n) !(slrd && slwr));

endmodule
