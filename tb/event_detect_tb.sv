// event_detect_tb: random strobe and delta inputs against a cycle model.
// The model keeps a history of the sampled inputs: the outputs seen after
// clock edge k must be the rising edges (strobe) and the changes (delta)
// between the inputs sampled at edges k-2 and k-3, so this also checks the
// three-cycle latency.
module event_detect_tb;
  import timetag_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] strobe_in = '0, delta_in = '0, strobe_en, delta_en;
  logic [NCH-1:0] strobe_hit, delta_state;
  logic delta_hit;
  int checks = 0, failures = 0;
  logic [NCH-1:0] hs[$], hd[$];

  always #5 clk = ~clk;

  event_detect dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    strobe_en = 4'b1111;
    delta_en  = 4'b1111;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (k == 1500) begin strobe_en = 4'b0101; delta_en = 4'b1100; end
      // check outputs produced by the posedge just passed
      if (hs.size() >= 4) begin
        logic [NCH-1:0] exp_s, exp_ds;
        logic exp_dh;
        exp_s  = hs[hs.size()-3] & ~hs[hs.size()-4] & strobe_en;
        exp_dh = |((hd[hd.size()-3] ^ hd[hd.size()-4]) & delta_en);
        exp_ds = hd[hd.size()-3];
        checks++;
        if (strobe_hit !== exp_s || delta_hit !== exp_dh || delta_state !== exp_ds) begin
          failures++;
          if (failures < 10)
            $display("k=%0d strobe %b exp %b delta %b/%b exp %b/%b", k, strobe_hit, exp_s,
                     delta_hit, delta_state, exp_dh, exp_ds);
        end
      end
      strobe_in = 4'($urandom);
      if ($urandom_range(0, 7) == 0) delta_in = 4'($urandom);
      // value sampled at the next posedge
      hs.push_back(strobe_in);
      hd.push_back(delta_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
