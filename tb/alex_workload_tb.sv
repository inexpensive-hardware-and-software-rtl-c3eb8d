// alex_workload_tb: alternating laser excitation as run on the instrument.
// Sequencer channels 0 and 1 drive the two lasers as a complementary pair
// switching every 50 us (6400 cycles at 128 MHz); both changes land in the
// same cycle, so each switch is one delta record. Two detectors (donor on
// channel 0, acceptor on channel 1) fire at random, on average once per
// 1000 cycles between them, for 10 ms of instrument time. The host side
// classifies every photon by the channel bits of the delta record before
// it, which is how the excitation source of a photon is recovered; the
// classification must match the laser that was on when the testbench sent
// the photon. Also checked: no record is lost or flagged at this rate
// (well under the 600,000 records per second the USB link carries), delta
// records are 6400 cycles apart, and photon timestamps match.
module alex_workload_tb;
  import timetag_pkg::*;

  localparam int SWITCH = 6400;
  localparam longint RUN_CYCLES = 1_280_000;

  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] det_in = '0, seq_out;
  logic [7:0] fd_i, fd_o;
  logic slrd, slwr;
  logic [1:0] fifoadr;
  logic ep_cmd_empty, ep_rsp_full, ep_data_full;

  int checks = 0, failures = 0;
  longint cyc = 0, clear_cyc = 0;
  record_t rx_q[$];
  // timestamp -> {laser state when sent, channels}
  logic [5:0] sent [longint];
  int n_photon = 0, n_delta = 0, n_class [4];

  always #4 clk = ~clk;

  timetagger_top dut (.*);
  fx2_model #(.DATA_CAP(512), .DRAIN_EVERY(36)) fx2 (
    .clk, .fd_o, .slrd, .slwr, .fifoadr, .fd_i, .ep_cmd_empty, .ep_rsp_full, .ep_data_full
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("%t: %s", $time, what);
    end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    while (fx2.data_q.size() >= 6) begin
      logic [47:0] w;
      for (int b = 0; b < 6; b++) w[8*b +: 8] = fx2.data_q.pop_front();
      rx_q.push_back(record_t'(w));
    end
  end

  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    fx2.push_cmd(8'h01);
    fx2.push_cmd(a);
    for (int b = 0; b < 4; b++) fx2.push_cmd(8'(d >> (8 * b)));
    while (fx2.rsp_q.size() < 5) @(negedge clk);
    repeat (5) void'(fx2.rsp_q.pop_front());
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NCH-1:0] laser;
    longint last_delta;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fx2.rsp_q.delete(); fx2.data_q.delete(); fx2.data_fill = 0; fx2.errors = 0;
    // donor laser (ch0) on first, acceptor laser (ch1) off
    reg_write(REG_SEQ_BASE + 0, 1);
    reg_write(REG_SEQ_BASE + 1, SWITCH);
    reg_write(REG_SEQ_BASE + 2, SWITCH);
    reg_write(REG_SEQ_BASE + 3, SWITCH);
    reg_write(REG_SEQ_BASE + 4, 0);
    reg_write(REG_SEQ_BASE + 5, SWITCH);
    reg_write(REG_SEQ_BASE + 6, SWITCH);
    reg_write(REG_SEQ_BASE + 7, SWITCH);
    reg_write(REG_DELTA_EN, 4'b0011);
    reg_write(REG_STROBE_EN, 4'b0011);
    fx2.push_cmd(8'h01); fx2.push_cmd(REG_CTRL);
    fx2.push_cmd(8'h07); fx2.push_cmd(8'h00); fx2.push_cmd(8'h00); fx2.push_cmd(8'h00);
    wait (dut.u_regs.ts_clear);
    @(negedge clk) clear_cyc = cyc + 1;
    while (fx2.rsp_q.size() < 5) @(negedge clk);
    fx2.rsp_q.delete();
    while (cyc - clear_cyc < RUN_CYCLES) begin
      repeat ($urandom_range(2, 1998)) @(negedge clk);
      // the laser state sampled at the same edge as the photon, unless a
      // switch is about to happen: skip photons within 4 cycles of it
      if ((cyc + 1 - clear_cyc) % SWITCH inside {[SWITCH - 4 : SWITCH - 1], [0 : 4]}) continue;
      det_in = 4'($urandom_range(1, 2));
      sent[cyc + 1 - clear_cyc + 2] = {seq_out[1:0], det_in};
      @(negedge clk) det_in = '0;
    end
    reg_write(REG_CTRL, 32'h0);
    while (!dut.rec_empty || fx2.data_fill > 0 || dut.u_fx2.rec_left != 0) @(negedge clk);
    repeat (20) @(negedge clk);

    laser = 4'b0001;   // initial levels
    last_delta = -1;
    foreach (rx_q[i]) begin
      record_t r;
      r = rx_q[i];
      check(!r.sample_lost && !r.wraparound, "no flags at this rate");
      if (r.rec_type == REC_DELTA) begin
        n_delta++;
        if (last_delta >= 0) check(longint'(r.timestamp) - last_delta == SWITCH, "switch spacing");
        last_delta = r.timestamp;
        laser = r.channels;
        check(laser[1:0] inside {2'b01, 2'b10}, "one laser at a time");
      end else begin
        n_photon++;
        check(sent.exists(longint'(r.timestamp)), "photon timestamp");
        if (sent.exists(longint'(r.timestamp))) begin
          logic [5:0] s;
          s = sent[longint'(r.timestamp)];
          check(s[3:0] == r.channels, "photon channel");
          check(s[5:4] == laser[1:0], "excitation classification");
          sent.delete(longint'(r.timestamp));
          // 0: donor exc/donor det, 1: donor exc/acceptor det, 2: acceptor exc/acceptor det
          n_class[{laser[1], r.channels[1]}]++;
        end
      end
    end
    check(sent.size() == 0, $sformatf("%0d photons missing", sent.size()));
    check(n_delta >= RUN_CYCLES / SWITCH - 1, "every switch recorded");
    check(fx2.errors == 0, "FX2 bus protocol");
    $display("photons=%0d deltas=%0d  DexDem=%0d DexAem=%0d AexDem=%0d AexAem=%0d",
             n_photon, n_delta, n_class[0], n_class[1], n_class[2], n_class[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
