// fx2_model: behavioural model of the Cypress FX2 endpoint FIFOs as seen by
// the FPGA, for testbenches only (the real part is a USB microcontroller).
//
// Three byte FIFOs: the command endpoint (filled by the testbench through
// push_cmd, popped by the FPGA with slrd), and the reply and data endpoints
// (pushed by the FPGA with slwr, held in rsp_q and data_q for the testbench
// to read). fd_i always shows the head of the command endpoint. The data
// endpoint holds at most DATA_CAP bytes and the host side drains one byte
// every DRAIN_EVERY cycles (USB carries about 600,000 six-byte events per
// second, i.e. one byte every ~36 cycles of 128 MHz); setting hold_data
// stops draining to force back-pressure.
module fx2_model #(
  parameter int DATA_CAP    = 512,
  parameter int DRAIN_EVERY = 1
) (
  input  logic       clk,
  input  logic [7:0] fd_o,
  input  logic       slrd,
  input  logic       slwr,
  input  logic [1:0] fifoadr,
  output logic [7:0] fd_i,
  output logic       ep_cmd_empty,
  output logic       ep_rsp_full,
  output logic       ep_data_full
);

  byte unsigned cmd_q[$];
  byte unsigned rsp_q[$];
  byte unsigned data_q[$];    // bytes delivered to the host, in order
  int           data_fill = 0; // bytes sitting in the endpoint buffer
  int           drain_cnt = 0;
  bit           hold_data = 0;
  int           stall_cycles = 0;
  int           errors = 0;

  function automatic void push_cmd(byte unsigned b);
    cmd_q.push_back(b);
  endfunction

  assign fd_i         = (cmd_q.size() != 0) ? cmd_q[0] : 8'h00;
  assign ep_cmd_empty = (cmd_q.size() == 0);
  assign ep_rsp_full  = 1'b0;
  assign ep_data_full = (data_fill >= DATA_CAP);

  // Bus signals are sampled at the clock edge; the FIFOs change 1 ns later
  // so that the FPGA sees the pre-edge fd_i and flags at that edge.
  always @(posedge clk) begin
    logic       rd, wr;
    logic [1:0] adr;
    logic [7:0] d;
    rd = slrd; wr = slwr; adr = fifoadr; d = fd_o;
    if (ep_data_full) stall_cycles++;
    #1;
    if (rd) begin
      if (adr != 2'd0 || cmd_q.size() == 0) errors++;
      else void'(cmd_q.pop_front());
    end
    if (wr) begin
      if (adr == 2'd3) rsp_q.push_back(d);
      else if (adr == 2'd2) begin
        if (data_fill >= DATA_CAP) errors++;
        data_q.push_back(d);
        data_fill++;
      end else errors++;
    end
    if (!hold_data && data_fill > 0) begin
      drain_cnt++;
      if (drain_cnt >= DRAIN_EVERY) begin
        drain_cnt = 0;
        data_fill--;
      end
    end
  end

endmodule
