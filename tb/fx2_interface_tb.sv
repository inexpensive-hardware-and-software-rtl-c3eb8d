// fx2_interface_tb: the FX2 interface between a behavioural FX2 model and
// testbench stand-ins for the register interface and the record buffer.
// Random command frames go in through the command endpoint; each must come
// out as one cmd_valid with the right fields, and the stand-in's reply must
// arrive on the reply endpoint as 5 bytes in order. Meanwhile random
// records are offered; the bytes on the data endpoint must be every record,
// least significant byte first, with nothing lost while the data endpoint
// is held full for a while. The FX2 bus rules are asserted inside the
// interface.
module fx2_interface_tb;
  import timetag_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [7:0] fd_i, fd_o;
  logic slrd, slwr;
  logic [1:0] fifoadr;
  logic ep_cmd_empty, ep_rsp_full, ep_data_full;
  logic cmd_valid, cmd_write;
  logic [7:0] cmd_addr;
  logic [31:0] cmd_wdata;
  logic rsp_valid = 0;
  logic [7:0] rsp_addr = '0;
  logic [31:0] rsp_data = '0;
  record_t rec_data;
  logic rec_empty, rec_pop;
  int checks = 0, failures = 0;

  record_t src_q[$], sent_q[$];
  logic [47:0] exp_cmd_q[$];
  byte unsigned exp_rsp_q[$];

  always #5 clk = ~clk;

  fx2_interface dut (.*);
  fx2_model #(.DATA_CAP(64), .DRAIN_EVERY(2)) fx2 (
    .clk, .fd_o, .slrd, .slwr, .fifoadr, .fd_i, .ep_cmd_empty, .ep_rsp_full, .ep_data_full
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  // record buffer stand-in (show-ahead)
  assign rec_empty = (src_q.size() == 0);
  assign rec_data  = rec_empty ? record_t'('0) : src_q[0];
  // the head is removed 1 ns after the edge so the interface samples it first
  always @(posedge clk) if (rst_n && rec_pop) begin
    sent_q.push_back(src_q[0]);
    #1 void'(src_q.pop_front());
  end

  // register interface stand-in: reply one cycle later with addr and ~data
  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (rst_n && cmd_valid) begin
      logic [47:0] e;
      check(exp_cmd_q.size() != 0, "unexpected command");
      if (exp_cmd_q.size() != 0) begin
        e = exp_cmd_q.pop_front();
        check({cmd_wdata, cmd_addr, 7'd0, cmd_write} == e, $sformatf("command fields %h %h %b exp %h", cmd_wdata, cmd_addr, cmd_write, e));
      end
      rsp_valid <= 1'b1;
      rsp_addr  <= cmd_addr;
      rsp_data  <= ~cmd_wdata;
      exp_rsp_q.push_back(cmd_addr);
      for (int b = 0; b < 4; b++) exp_rsp_q.push_back(8'(~cmd_wdata >> (8 * b)));
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stalls;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // discard whatever the bus did before the interface came out of reset
    fx2.rsp_q.delete(); fx2.data_q.delete(); fx2.data_fill = 0; fx2.errors = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 99) == 0) begin
        logic [7:0] a; logic [31:0] d; bit w;
        a = $urandom; d = $urandom; w = $urandom;
        fx2.push_cmd({7'd0, w}); fx2.push_cmd(a);
        for (int b = 0; b < 4; b++) fx2.push_cmd(8'(d >> (8 * b)));
        exp_cmd_q.push_back({d, a, 7'd0, w});
      end
      if ($urandom_range(0, 24) == 0) src_q.push_back(record_t'({16'($urandom), 32'($urandom)}));
      fx2.hold_data = (k >= 1000 && k < 1400);
    end
    repeat (2000) @(negedge clk);
    stalls = fx2.stall_cycles;
    check(exp_cmd_q.size() == 0, "all commands decoded");
    check(fx2.rsp_q.size() == exp_rsp_q.size(), "reply byte count");
    for (int i = 0; i < exp_rsp_q.size() && i < fx2.rsp_q.size(); i++)
      check(fx2.rsp_q[i] == exp_rsp_q[i], "reply byte");
    check(src_q.size() == 0, "all records taken");
    check(fx2.data_q.size() == 6 * sent_q.size(), "data byte count");
    for (int r = 0; r < sent_q.size() && 6 * r + 5 < fx2.data_q.size(); r++)
      for (int b = 0; b < 6; b++)
        check(fx2.data_q[6 * r + b] == 8'(sent_q[r] >> (8 * b)), "record byte");
    check(stalls > 0, "data endpoint back-pressure exercised");
    check(fx2.errors == 0, "bus protocol");
    $display("rsp_q=%0d exp=%0d data=%0d sent=%0d", fx2.rsp_q.size(), exp_rsp_q.size(), fx2.data_q.size(), sent_q.size());
    $display("records=%0d replies=%0d stalls=%0d", sent_q.size(), exp_rsp_q.size() / 5, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
