// register_interface_tb: writes and reads every register through the
// command port and checks the control outputs, the one-cycle reply with the
// register's new value, reset values, the self-clearing ts_clear pulse and
// that unmapped addresses read 0. Values are compared with a shadow copy
// kept by the testbench.
module register_interface_tb;
  import timetag_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_write = 0;
  logic [7:0] cmd_addr = '0;
  logic [31:0] cmd_wdata = '0;
  logic rsp_valid;
  logic [7:0] rsp_addr;
  logic [31:0] rsp_data;
  logic capture_en, seq_run, ts_clear;
  logic [NCH-1:0] strobe_en, delta_en;
  seq_cfg_t seq_cfg [NCH];
  int checks = 0, failures = 0, clear_pulses = 0;
  logic [31:0] shadow [256];

  always #5 clk = ~clk;

  register_interface dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  always @(posedge clk) if (ts_clear) clear_pulses++;

  task automatic access(bit wr, logic [7:0] a, logic [31:0] d, output logic [31:0] rd);
    @(negedge clk);
    cmd_valid = 1; cmd_write = wr; cmd_addr = a; cmd_wdata = d;
    @(negedge clk);
    cmd_valid = 0;
    check(rsp_valid && rsp_addr == a, "reply valid/address");
    rd = rsp_data;
    @(negedge clk);
    check(!rsp_valid, "reply is one cycle");
  endtask

  function automatic logic [31:0] mask_for(logic [7:0] a);
    if (a == REG_CTRL) return 32'h3;
    if (a == REG_STROBE_EN || a == REG_DELTA_EN) return 32'hF;
    if (a >= REG_SEQ_BASE && a < REG_SEQ_BASE + 16) return (a[1:0] == 0) ? 32'h1 : 32'hFFFF_FFFF;
    return 32'h0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int a = 0; a < 256; a++) shadow[a] = 0;
    shadow[REG_STROBE_EN] = 32'hF;
    shadow[REG_DELTA_EN]  = 32'hF;
    // reset values
    for (int a = 0; a < 32; a++) begin
      access(0, 8'(a), 32'hFFFF_FFFF, rd);
      check(rd == shadow[a], $sformatf("reset value of %0h = %h", a, rd));
    end
    // random writes and reads
    for (int k = 0; k < 600; k++) begin
      logic [7:0] a;
      logic [31:0] d;
      a = ($urandom_range(0, 9) == 0) ? 8'($urandom) : 8'($urandom_range(0, 31));
      d = $urandom;
      if (a == REG_CTRL) d[2] = 0;
      if ($urandom_range(0, 1)) begin
        access(1, a, d, rd);
        shadow[a] = d & mask_for(a);
        check(rd == shadow[a], $sformatf("write reply %0h: %h exp %h", a, rd, shadow[a]));
      end else begin
        access(0, a, d, rd);
        check(rd == shadow[a], $sformatf("read %0h: %h exp %h", a, rd, shadow[a]));
      end
      // outputs follow the registers
      check(capture_en == shadow[REG_CTRL][0] && seq_run == shadow[REG_CTRL][1], "ctrl outputs");
      check(strobe_en == shadow[REG_STROBE_EN][3:0] && delta_en == shadow[REG_DELTA_EN][3:0], "enables");
      for (int c = 0; c < NCH; c++) begin
        check(seq_cfg[c].init_level == shadow[REG_SEQ_BASE + 4*c][0] &&
              seq_cfg[c].init_count == shadow[REG_SEQ_BASE + 4*c + 1] &&
              seq_cfg[c].low_count  == shadow[REG_SEQ_BASE + 4*c + 2] &&
              seq_cfg[c].high_count == shadow[REG_SEQ_BASE + 4*c + 3], "sequencer config");
      end
    end
    // ts_clear pulses once per write with bit 2 set and reads back 0
    check(clear_pulses == 0, "no stray clear");
    access(1, REG_CTRL, 32'h5, rd);
    check(rd == 32'h1, "ctrl reply hides clear bit");
    check(clear_pulses == 1, "one clear pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
