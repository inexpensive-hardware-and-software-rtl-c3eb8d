// timestamp_counter_tb: an 8-bit counter (to reach the wrap quickly) is
// checked every cycle against a free-running reference count, including
// the wrap pulse on rollover and a clear in the middle of the run. A short
// run of the default 36-bit counter checks that it counts cycles too.
module timestamp_counter_tb;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [7:0]  ts;
  logic        wrap;
  logic [35:0] ts36;
  logic        wrap36;
  int checks = 0, failures = 0;
  int unsigned ref_cnt;
  int wraps = 0;

  always #5 clk = ~clk;

  timestamp_counter #(.TS_W(8)) dut (.clk, .rst_n, .clear, .ts, .wrap);
  timestamp_counter dut36 (.clk, .rst_n, .clear(1'b0), .ts(ts36), .wrap(wrap36));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ref_cnt = 0;
    for (int k = 0; k < 1200; k++) begin
      @(posedge clk);
      #1;
      if (k == 700) begin
        // clear was high for the edge just passed
        ref_cnt = 0;
      end else begin
        ref_cnt++;
      end
      checks++;
      if (ts !== 8'(ref_cnt) || wrap !== (k != 700 && 8'(ref_cnt) == 8'd0)) begin
        failures++;
        if (failures < 10) $display("k=%0d ts=%0d exp %0d wrap=%b", k, ts, 8'(ref_cnt), wrap);
      end
      if (wrap) wraps++;
      checks++;
      if (ts36 !== 36'(k + 1) || wrap36 !== 1'b0) failures++;
      clear = (k == 699);
    end
    checks++;
    if (wraps != 3) begin failures++; $display("wraps=%0d", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
