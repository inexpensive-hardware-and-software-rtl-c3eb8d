// tagger_tb: drives random detector and sequencer inputs into a tagger with
// a 16-record buffer and compares every record read out with a list built
// from the inputs alone: a strobe record for the rising edges on the
// enabled strobe channels sampled at a clock edge, a delta record (and no
// strobe record) when the delta inputs changed at that edge, and a
// timestamp equal to the number of cycles since the counter was cleared
// plus the fixed two-cycle detection offset. It then stops reading, sends
// more events than the buffer holds, and checks that exactly 16 are kept,
// that the next record written carries sample_lost, and that a record
// reaches the buffer three cycles after its input is first sampled.
module tagger_tb;
  import timetag_pkg::*;

  logic clk = 0, rst_n = 0;
  logic capture_en = 0, ts_clear = 0;
  logic [NCH-1:0] strobe_en = '1, delta_en = '1;
  logic [NCH-1:0] strobe_in = '0, delta_in = '0;
  record_t rec_data;
  logic rec_empty, rec_pop;
  logic mon_record, mon_collide, mon_overrun, mon_wrap;
  int checks = 0, failures = 0;
  int n_coll = 0, n_over = 0, n_multi = 0;
  longint edge_no = 0, clear_edge = 0;
  record_t exp_q[$];
  logic [NCH-1:0] ps = '0, pd = '0;
  bit reading = 1;

  always #5 clk = ~clk;

  tagger #(.DEPTH(16)) dut (.*);

  assign rec_pop = reading && !rec_empty;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  // Reference: what the inputs sampled at each edge must produce.
  always @(posedge clk) begin
    edge_no <= edge_no + 1;
    if (rst_n) begin
      logic [NCH-1:0] rise;
      bit dchg;
      record_t r;
      rise = strobe_in & ~ps & strobe_en;
      dchg = |((delta_in ^ pd) & delta_en);
      r = '0;
      r.timestamp = TS_W'(edge_no + 1 - clear_edge + 2);
      if (capture_en && (dchg || rise != 0)) begin
        if (dchg) begin r.rec_type = REC_DELTA; r.channels = delta_in; end
        else begin r.rec_type = REC_STROBE; r.channels = rise; end
        exp_q.push_back(r);
      end
      ps <= strobe_in;
      pd <= delta_in;
    end
  end

  always @(posedge clk) begin
    if (mon_collide) n_coll++;
    if (mon_overrun) n_over++;
    if (rst_n && rec_pop) begin
      record_t e;
      if (exp_q.size() == 0) check(0, "unexpected record");
      else begin
        e = exp_q.pop_front();
        check(rec_data == e, $sformatf("record %h expected %h", rec_data, e));
        if (e.rec_type == REC_STROBE && !$onehot(e.channels)) n_multi++;
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ts_clear = 1;
    @(negedge clk) ts_clear = 0; clear_edge = edge_no;
    capture_en = 1;
    // phase 1: random traffic, reading continuously (buffer never overflows
    // because reads keep pace with one record per cycle)
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (k == 1000) strobe_en = 4'b1011;
      if (k == 2000) begin strobe_en = 4'b1111; delta_en = 4'b0011; end
      // keep the inputs quiet around capture_en changes, which take effect
      // at the record encoder two cycles after the inputs are sampled
      if ((k >= 2495 && k <= 2505) || (k >= 2695 && k <= 2705)) strobe_in = 0;
      else begin
        strobe_in = ($urandom_range(0, 2) == 0) ? 4'($urandom) : 4'b0;
        if ($urandom_range(0, 9) == 0) delta_in = 4'($urandom);
      end
      if (k == 2500) capture_en = 0;
      if (k == 2700) capture_en = 1;
    end
    @(negedge clk) strobe_in = 0;
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0 && rec_empty, "phase 1 drained");
    check(n_coll > 0 && n_multi > 0, "collisions and multi-channel records seen");
    // phase 2: overflow. stop reading, send 20 single-channel events
    reading = 0;
    for (int k = 0; k < 20; k++) begin
      @(negedge clk) strobe_in = 4'b0001;
      @(negedge clk) strobe_in = 4'b0000;
    end
    repeat (6) @(negedge clk);
    check(n_over == 4, $sformatf("4 overruns, saw %0d", n_over));
    // the model cannot know which were dropped: drop the last 4 expected
    repeat (4) void'(exp_q.pop_back());
    reading = 1;
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "16 records kept");
    // next record carries sample_lost; also measure the input-to-buffer latency
    begin
      time t0;
      strobe_in = 4'b0100;
      reading = 0;
      @(posedge clk) t0 = $time;  // sampling edge
      wait (!rec_empty);
      check($time - t0 == 30, $sformatf("latency %0t", $time - t0));
      @(negedge clk);
      check(rec_data.sample_lost == 1'b1, "sample_lost set after overrun");
      exp_q[0].sample_lost = 1'b1;
      reading = 1;
      @(negedge clk) strobe_in = 0;
    end
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0, "all records read");
    $display("collide=%0d overrun=%0d multi=%0d", n_coll, n_over, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
