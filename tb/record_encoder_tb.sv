// record_encoder_tb: random events, wrap pulses and buffer-full cycles
// against an independent reference of the record rules: one record per
// cycle, delta before strobe (a colliding strobe is dropped), channel bits
// as given, and the sample-lost and wraparound flags carried to the next
// record that is written. Counts that each rule was exercised.
module record_encoder_tb;
  import timetag_pkg::*;

  logic clk = 0, rst_n = 0;
  logic capture_en;
  logic [TS_W-1:0] ts;
  logic wrap, delta_hit, fifo_full;
  logic [NCH-1:0] strobe_hit, delta_state;
  logic rec_valid, strobe_collide, overrun;
  record_t rec;
  int checks = 0, failures = 0;
  int n_delta = 0, n_strobe = 0, n_coll = 0, n_lost = 0, n_wrap = 0, n_multi = 0;
  bit m_lost, m_wrap;

  always #5 clk = ~clk;

  record_encoder dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    capture_en = 0; ts = '0; wrap = 0; delta_hit = 0; fifo_full = 0;
    strobe_hit = '0; delta_state = '0;
    m_lost = 0; m_wrap = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      bit make, acc;
      @(negedge clk);
      capture_en  = (k < 100) ? 1'b0 : ($urandom_range(0, 19) != 0);
      ts          = {4'($urandom), 32'($urandom)};
      wrap        = ($urandom_range(0, 49) == 0);
      delta_hit   = ($urandom_range(0, 5) == 0);
      delta_state = 4'($urandom);
      strobe_hit  = ($urandom_range(0, 2) == 0) ? 4'($urandom) : 4'b0;
      fifo_full   = ($urandom_range(0, 9) == 0);
      #1;
      make = capture_en && (delta_hit || strobe_hit != 0);
      acc  = make && !fifo_full;
      check(rec_valid == acc, "rec_valid");
      check(overrun == (make && fifo_full), "overrun");
      check(strobe_collide == (capture_en && delta_hit && strobe_hit != 0), "collide");
      if (acc) begin
        check(rec.timestamp == ts, "timestamp");
        check(rec.unused == 0, "unused bits");
        check(rec.sample_lost == m_lost, "sample_lost");
        check(rec.wraparound == (m_wrap || wrap), "wraparound");
        if (delta_hit) begin
          check(rec.rec_type == REC_DELTA && rec.channels == delta_state, "delta record");
          n_delta++;
          if (strobe_hit != 0) n_coll++;
        end else begin
          check(rec.rec_type == REC_STROBE && rec.channels == strobe_hit, "strobe record");
          n_strobe++;
          if (!$onehot(strobe_hit)) n_multi++;
        end
        if (m_lost) n_lost++;
        if (m_wrap || wrap) n_wrap++;
        // record layout, bit positions counted from 0
        check(rec[35:0] == ts && rec[45] == delta_hit && rec[47] == m_lost, "bit layout");
        m_lost = 0;
        m_wrap = 0;
      end else begin
        if (make) m_lost = 1;
        if (wrap) m_wrap = 1;
      end
    end
    check(n_delta > 0 && n_strobe > 0 && n_coll > 0 && n_lost > 0 && n_wrap > 0 && n_multi > 0,
          "every rule exercised");
    $display("delta=%0d strobe=%0d collide=%0d lost=%0d wrap=%0d multi=%0d",
             n_delta, n_strobe, n_coll, n_lost, n_wrap, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
