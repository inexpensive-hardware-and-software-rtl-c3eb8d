// record_fifo_tb: random pushes and pops on a 16-deep buffer against a
// queue model, checking data order, full and empty every cycle, that a
// push while full is refused and a pop while empty does nothing. A second
// instance at the default depth of 2048 is filled to full and drained.
module record_fifo_tb;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [47:0] wr_data = '0, rd_data;
  logic wr2 = 0, rd2 = 0, full2, empty2;
  logic [47:0] wd2 = '0, rdd2;
  logic [47:0] q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  always #5 clk = ~clk;

  record_fifo #(.W(48), .DEPTH(16)) dut (.*);
  record_fifo dut2 (.clk, .rst_n, .wr_en(wr2), .wr_data(wd2), .full(full2),
                    .rd_en(rd2), .rd_data(rdd2), .empty(empty2));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int bias;
      @(negedge clk);
      check(full == (q.size() == 16), "full");
      check(empty == (q.size() == 0), "empty");
      if (q.size() != 0) check(rd_data == q[0], "data");
      if (full) n_full++;
      if (empty) n_empty++;
      bias = ((k / 300) % 2 == 0) ? 3 : 1;  // alternate filling and draining phases
      wr_en   = ($urandom_range(0, 3) < bias);
      rd_en   = ($urandom_range(0, 3) >= bias);
      wr_data = {16'($urandom), 32'($urandom)};
      // model the edge: a push is refused while full, a pop while empty
      if (wr_en && q.size() < 16) q.push_back(wr_data);
      if (rd_en && q.size() != 0 && !(wr_en && q.size() == 1 && empty)) void'(q.pop_front());
      @(posedge clk);
    end
    check(n_full > 0 && n_empty > 0, "full and empty reached");
    // default depth: fill until full
    wr_en = 0; rd_en = 0;
    for (int k = 0; k < 2048; k++) begin
      @(negedge clk);
      check(!full2, "2048-deep not full early");
      wr2 = 1; wd2 = 48'(k * 7);
    end
    @(negedge clk);
    wr2 = 0;
    check(full2, "2048-deep full after 2048 writes");
    for (int k = 0; k < 2048; k++) begin
      check(rdd2 == 48'(k * 7), "2048-deep data");
      rd2 = 1;
      @(negedge clk);
    end
    rd2 = 0;
    check(empty2, "2048-deep empty after 2048 reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
