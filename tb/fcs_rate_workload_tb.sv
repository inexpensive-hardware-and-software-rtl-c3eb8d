// fcs_rate_workload_tb: the count-rate limits of the instrument, as seen in
// an FCS measurement. Two detectors fire with exponentially distributed
// gaps (Poisson photon statistics) while the FX2 model drains the data
// endpoint at the USB rate: one byte every 36 cycles, 216 cycles per
// six-byte record, about 592,000 records per second at 128 MHz.
//
// Part 1, steady state: 400,000 photons per second over both channels for
// 10 ms of instrument time. This is below the link rate, so every photon
// must arrive with the right channel and timestamp and no record may carry
// a flag.
// Part 2, overload: about 3.2 million photons per second for 1.5 ms. The
// 2048-record buffer fills, records are refused, and the check is that:
// - every record that does arrive was sent, in timestamp order;
// - records sent minus records refused equals records received;
// - the sample-lost bit appears;
// - while the buffer is backed up, the delivered rate equals the link rate
//   to within 2 %, so the FPGA side is not the bottleneck.
module fcs_rate_workload_tb;
  import timetag_pkg::*;

  localparam longint STEADY_CYCLES   = 1_280_000;
  localparam real    STEADY_GAP      = 320.0;    // 400k photons/s at 128 MHz
  localparam longint OVERLOAD_CYCLES = 192_000;
  localparam real    OVERLOAD_GAP    = 40.0;     // 3.2M photons/s
  localparam int     DRAIN           = 36;       // cycles per USB byte

  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] det_in = '0, seq_out;
  logic [7:0] fd_i, fd_o;
  logic slrd, slwr;
  logic [1:0] fifoadr;
  logic ep_cmd_empty, ep_rsp_full, ep_data_full;

  int checks = 0, failures = 0;
  longint cyc = 0, clear_cyc = 0;
  record_t rx_q[$];
  logic [NCH-1:0] sent [longint];   // timestamp -> channels
  longint rx_count = 0;             // records delivered to the host so far
  int n_over = 0;

  always #4 clk = ~clk;

  timetagger_top dut (.*);
  fx2_model #(.DATA_CAP(512), .DRAIN_EVERY(DRAIN)) fx2 (
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
  always @(posedge clk) if (dut.u_tagger.mon_overrun) n_over++;

  always @(negedge clk) begin
    while (fx2.data_q.size() >= 6) begin
      logic [47:0] w;
      for (int b = 0; b < 6; b++) w[8*b +: 8] = fx2.data_q.pop_front();
      rx_q.push_back(record_t'(w));
      rx_count++;
    end
  end

  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    fx2.push_cmd(8'h01);
    fx2.push_cmd(a);
    for (int b = 0; b < 4; b++) fx2.push_cmd(8'(d >> (8 * b)));
    while (fx2.rsp_q.size() < 5) @(negedge clk);
    repeat (5) void'(fx2.rsp_q.pop_front());
  endtask

  // exponential gap with the given mean, at least 2 cycles (a pulse and
  // the low cycle after it)
  function automatic int gap(real mean);
    real u;
    int g;
    u = (real'($urandom_range(1, 1_000_000))) / 1_000_000.0;
    g = int'(-mean * $ln(u));
    return (g < 2) ? 2 : g;
  endfunction

  task automatic photons(longint cycles, real mean);
    longint t0;
    t0 = cyc;
    while (cyc - t0 < cycles) begin
      repeat (gap(mean) - 1) @(negedge clk);
      det_in = 4'($urandom_range(1, 2));
      sent[cyc + 1 - clear_cyc + 2] = det_in;
      @(negedge clk) det_in = '0;
    end
  endtask

  task automatic drain();
    while (!dut.rec_empty || fx2.data_fill > 0 || dut.u_fx2.rec_left != 0) @(negedge clk);
    repeat (20) @(negedge clk);
  endtask

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_sent, n_lost, n_bad;
    longint last_ts, c0, r0;
    real rate, link;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fx2.rsp_q.delete(); fx2.data_q.delete(); fx2.data_fill = 0; fx2.errors = 0;
    reg_write(REG_STROBE_EN, 4'b0011);
    reg_write(REG_DELTA_EN, 4'b0000);
    // capture on and timestamp cleared, sequencer stopped
    fx2.push_cmd(8'h01); fx2.push_cmd(REG_CTRL);
    fx2.push_cmd(8'h05); fx2.push_cmd(8'h00); fx2.push_cmd(8'h00); fx2.push_cmd(8'h00);
    wait (dut.u_regs.ts_clear);
    @(negedge clk) clear_cyc = cyc + 1;
    while (fx2.rsp_q.size() < 5) @(negedge clk);
    fx2.rsp_q.delete();

    // ---- part 1: steady state below the link rate
    photons(STEADY_CYCLES, STEADY_GAP);
    drain();
    n_sent = sent.size();
    check(n_over == 0, $sformatf("%0d records refused below the link rate", n_over));
    check(rx_q.size() == n_sent, $sformatf("received %0d of %0d photons", rx_q.size(), n_sent));
    n_bad = 0;
    foreach (rx_q[i]) begin
      if (rx_q[i].sample_lost || rx_q[i].wraparound || rx_q[i].rec_type != REC_STROBE ||
          !sent.exists(longint'(rx_q[i].timestamp)) ||
          sent[longint'(rx_q[i].timestamp)] != rx_q[i].channels)
        n_bad++;
      else
        sent.delete(longint'(rx_q[i].timestamp));
    end
    check(n_bad == 0, $sformatf("%0d records do not match a photon", n_bad));
    check(sent.size() == 0, $sformatf("%0d photons missing", sent.size()));
    $display("steady: %0d photons in %0d cycles, all delivered", n_sent, STEADY_CYCLES);
    rx_q.delete();
    sent.delete();

    // ---- part 2: overload
    fork
      photons(OVERLOAD_CYCLES, OVERLOAD_GAP);
      begin
        // measure the delivered rate once the buffer has backed up
        wait (dut.u_tagger.u_fifo.count > 1024);
        c0 = cyc; r0 = rx_count;
        repeat (100_000) @(negedge clk);
        rate = real'(rx_count - r0) / real'(cyc - c0);
      end
    join
    drain();
    n_sent = sent.size();
    check(n_over > 0, "overload refuses records");
    check(rx_q.size() == n_sent - n_over,
          $sformatf("received %0d, sent %0d, refused %0d", rx_q.size(), n_sent, n_over));
    n_bad = 0;
    n_lost = 0;
    last_ts = -1;
    foreach (rx_q[i]) begin
      if (rx_q[i].sample_lost) n_lost++;
      if (!sent.exists(longint'(rx_q[i].timestamp)) ||
          sent[longint'(rx_q[i].timestamp)] != rx_q[i].channels ||
          longint'(rx_q[i].timestamp) <= last_ts)
        n_bad++;
      last_ts = rx_q[i].timestamp;
    end
    check(n_bad == 0, $sformatf("%0d overload records wrong or out of order", n_bad));
    check(n_lost > 0, "sample-lost bit after overrun");
    link = 1.0 / (6.0 * DRAIN);
    check(rate > 0.98 * link && rate < 1.02 * link,
          $sformatf("delivered %f records/cycle, link %f", rate, link));
    check(fx2.errors == 0, "FX2 bus protocol");
    $display("overload: sent=%0d refused=%0d received=%0d lost_flags=%0d  rate=%.0f records/s at 128 MHz",
             n_sent, n_over, rx_q.size(), n_lost, rate * 128.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
