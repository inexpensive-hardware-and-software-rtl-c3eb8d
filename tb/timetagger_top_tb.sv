// timetagger_top_tb: the whole chip, at its default sizes, driven the way
// the host and the optics drive it. A behavioural FX2 drains the record
// stream at the USB rate (one byte every 36 cycles, about 600,000 records
// per second at 128 MHz); the host side programs registers through it and
// decodes the 6-byte records it receives.
//
// Phase A, alternating excitation: sequencer channels 0 and 1 are programmed
// as a complementary pair toggling every HALF cycles, capture is started and
// sparse detector pulses are sent, a few of them timed to land on a
// sequencer toggle. Every strobe record must match a pulse the testbench
// sent (channels and timestamp = sampling cycle since clear + 2); pulses
// that collided with a delta must be the only ones missing; delta records
// must alternate 01/10 and be HALF cycles apart.
// Phase B, burst and overrun: with the USB side held, 3000 events arrive at
// one per clock; the 2048-record buffer overflows, and after the USB side
// resumes the first record written after the overflow must carry the
// sample-lost bit.
// Phase C, wraparound: the timestamp counter is preset near 2^36 and the
// first record after the wrap must carry the wraparound bit.
// Each mechanism (strobe, multi-channel strobe, delta, collision drop,
// overrun, sample-lost flag, wraparound flag, USB back-pressure, register
// read-back) is counted and must occur at least once.
module timetagger_top_tb;
  import timetag_pkg::*;

  localparam int HALF = 200;

  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] det_in = '0, seq_out;
  logic [7:0] fd_i, fd_o;
  logic slrd, slwr;
  logic [1:0] fifoadr;
  logic ep_cmd_empty, ep_rsp_full, ep_data_full;

  int checks = 0, failures = 0;
  longint cyc = 0, clear_cyc = 0;
  record_t rx_q[$];
  logic [NCH-1:0] exp_strobe [longint];   // timestamp -> channels
  int n_strobe = 0, n_multi = 0, n_delta = 0, n_coll = 0, n_over = 0, n_lost = 0, n_wrap = 0;
  int n_coll_pulses = 0, n_regs = 0;

  always #4 clk = ~clk;   // 125 MHz period rounded; the design counts cycles

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
  always @(posedge clk) begin
    if (dut.u_tagger.mon_collide) n_coll++;
    if (dut.u_tagger.mon_overrun) n_over++;
  end

  // host side: turn delivered bytes into records
  always @(negedge clk) begin
    while (fx2.data_q.size() >= 6) begin
      logic [47:0] w;
      for (int b = 0; b < 6; b++) w[8*b +: 8] = fx2.data_q.pop_front();
      rx_q.push_back(record_t'(w));
    end
  end

  task automatic reg_access(bit wr, logic [7:0] a, logic [31:0] d, output logic [31:0] rd);
    fx2.push_cmd({7'd0, wr});
    fx2.push_cmd(a);
    for (int b = 0; b < 4; b++) fx2.push_cmd(8'(d >> (8 * b)));
    while (fx2.rsp_q.size() < 5) @(negedge clk);
    check(fx2.rsp_q.pop_front() == a, "reply address");
    rd = '0;
    for (int b = 0; b < 4; b++) rd[8*b +: 8] = fx2.rsp_q.pop_front();
  endtask

  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    logic [31:0] rd;
    reg_access(1, a, d, rd);
  endtask

  // one detector pulse on channels ch, rising edge sampled at the next edge
  task automatic send_pulse(logic [NCH-1:0] ch, bit want);
    @(negedge clk) det_in = ch;
    if (want) exp_strobe[cyc + 1 - clear_cyc + 2] = ch;
    @(negedge clk) det_in = '0;
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    longint last_delta_ts;
    logic [NCH-1:0] last_state;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fx2.rsp_q.delete(); fx2.data_q.delete(); fx2.data_fill = 0; fx2.errors = 0;

    // ---- program: ch0 starts high, ch1 low, both toggle every HALF cycles
    reg_write(REG_SEQ_BASE + 0, 1);
    reg_write(REG_SEQ_BASE + 1, HALF);
    reg_write(REG_SEQ_BASE + 2, HALF);
    reg_write(REG_SEQ_BASE + 3, HALF);
    reg_write(REG_SEQ_BASE + 4, 0);
    reg_write(REG_SEQ_BASE + 5, HALF);
    reg_write(REG_SEQ_BASE + 6, HALF);
    reg_write(REG_SEQ_BASE + 7, HALF);
    reg_write(REG_DELTA_EN, 4'b0011);
    reg_access(0, REG_SEQ_BASE + 5, 0, rd);
    check(rd == HALF, "register read-back");
    n_regs++;
    check(seq_out[1:0] == 2'b01, "sequencer initial levels");

    // ---- phase A: start capture and the sequencer, clear the timestamp
    fx2.push_cmd(8'h01); fx2.push_cmd(REG_CTRL);
    fx2.push_cmd(8'h07); fx2.push_cmd(8'h00); fx2.push_cmd(8'h00); fx2.push_cmd(8'h00);
    wait (dut.u_regs.ts_clear);
    @(negedge clk) clear_cyc = cyc + 1;   // ts_clear is seen at the next edge: ts == 0 after it
    while (fx2.rsp_q.size() < 5) @(negedge clk);
    fx2.rsp_q.delete();
    for (int k = 0; k < 60; k++) begin
      repeat ($urandom_range(3, 40)) @(negedge clk);
      // stay away from sequencer toggles except on purpose
      while (((cyc + 1 - clear_cyc) % HALF) inside {[HALF - 8 : HALF - 1], [0 : 8]}) @(negedge clk);
      send_pulse(4'($urandom_range(1, 15)), 1);
    end
    // pulses aimed at toggles: find the sampling cycle that sees the toggle
    for (int k = 0; k < 5; k++) begin
      logic [1:0] s0;
      s0 = seq_out[1:0];
      while (seq_out[1:0] == s0) @(negedge clk);
      // the new sequencer level and this pulse are sampled at the same edge,
      // so the strobe is dropped in favour of the delta record
      det_in = 4'b0100;
      @(negedge clk) det_in = '0;
      n_coll_pulses++;
    end
    reg_write(REG_CTRL, 32'h1);           // stop the sequencer, keep capturing
    while (fx2.data_q.size() != 0 || !dut.rec_empty || dut.u_fx2.rec_left != 0 || fx2.data_fill != 0)
      @(negedge clk);
    repeat (10) @(negedge clk);

    // check phase A
    last_delta_ts = -1;
    last_state = 4'b0001;
    foreach (rx_q[i]) begin
      record_t r;
      r = rx_q[i];
      check(r.unused == 0 && !r.sample_lost && !r.wraparound, "phase A flags");
      if (r.rec_type == REC_STROBE) begin
        n_strobe++;
        if (!$onehot(r.channels)) n_multi++;
        check(exp_strobe.exists(longint'(r.timestamp)) && exp_strobe[longint'(r.timestamp)] == r.channels,
              $sformatf("strobe record ts=%0d ch=%b not sent", r.timestamp, r.channels));
        if (exp_strobe.exists(longint'(r.timestamp))) exp_strobe.delete(longint'(r.timestamp));
      end else begin
        n_delta++;
        check(r.channels[1:0] == ~last_state[1:0], $sformatf("delta state %b", r.channels));
        if (last_delta_ts >= 0)
          check(longint'(r.timestamp) - last_delta_ts == HALF,
                $sformatf("delta spacing %0d", longint'(r.timestamp) - last_delta_ts));
        last_delta_ts = r.timestamp;
        last_state = r.channels;
      end
    end
    check(exp_strobe.size() == 0, $sformatf("%0d strobe pulses missing", exp_strobe.size()));
    check(n_coll == n_coll_pulses, $sformatf("collisions %0d of %0d aimed", n_coll, n_coll_pulses));
    rx_q.delete();

    // ---- phase B: burst of 3000 events at one per clock with USB held
    fx2.hold_data = 1;
    for (int k = 0; k < 1500; k++) begin
      @(negedge clk) det_in = 4'b0001;
      @(negedge clk) det_in = 4'b0010;
    end
    @(negedge clk) det_in = '0;
    repeat (10) @(negedge clk);
    check(n_over > 0, "buffer overrun");
    fx2.hold_data = 0;
    while (!dut.rec_empty || fx2.data_fill > 0 || dut.u_fx2.rec_left != 0) @(negedge clk);
    send_pulse(4'b1000, 0);
    repeat (20) @(negedge clk);
    while (!dut.rec_empty || fx2.data_fill > 0 || dut.u_fx2.rec_left != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    // every event not refused by a full buffer arrives, plus the marker pulse
    check(rx_q.size() == 3000 - n_over + 1 && rx_q.size() > 2048,
          $sformatf("records kept in burst: %0d, overruns %0d", rx_q.size(), n_over));
    check(rx_q[rx_q.size() - 1].sample_lost && rx_q[rx_q.size() - 1].channels == 4'b1000,
          "sample-lost bit on first record after overrun");
    foreach (rx_q[i]) if (rx_q[i].sample_lost) n_lost++;
    check(n_lost == 1, "exactly one sample-lost record");
    rx_q.delete();

    // ---- phase C: wraparound of the 36-bit counter
    @(negedge clk);
    force dut.u_tagger.u_ts.ts = {TS_W{1'b1}} - TS_W'(20);
    @(negedge clk);
    release dut.u_tagger.u_ts.ts;
    repeat (40) @(negedge clk);
    send_pulse(4'b0001, 0);
    send_pulse(4'b0010, 0);
    repeat (300) @(negedge clk);
    check(rx_q.size() == 2, "two records after wrap");
    if (rx_q.size() == 2) begin
      check(rx_q[0].wraparound && rx_q[0].timestamp < 100, "wraparound bit on first record after wrap");
      check(!rx_q[1].wraparound, "wraparound bit only once");
      if (rx_q[0].wraparound) n_wrap++;
    end

    check(fx2.stall_cycles > 0, "USB back-pressure");
    check(fx2.errors == 0, "FX2 bus protocol");
    check(n_strobe > 0 && n_multi > 0 && n_delta > 0 && n_coll > 0 && n_over > 0 && n_lost > 0 &&
          n_wrap > 0 && n_regs > 0, "every mechanism exercised");
    $display("strobe=%0d multi=%0d delta=%0d collide=%0d overrun=%0d lost=%0d wrap=%0d stalls=%0d regs=%0d",
             n_strobe, n_multi, n_delta, n_coll, n_over, n_lost, n_wrap, fx2.stall_cycles, n_regs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
