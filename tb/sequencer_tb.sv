// sequencer_tb: programs four channels with different waveforms, including
// an alternating-excitation pair (two complementary outputs switching every
// 50 us = 6400 cycles at 128 MHz), and checks every output bit every cycle
// against a closed-form model: level = init_level for the first init_count
// cycles after run rises, then low/high phases of the programmed lengths.
// Also checks that outputs hold init_level while stopped and that a restart
// begins the waveform again.
module sequencer_tb;
  import timetag_pkg::*;

  logic clk = 0, rst_n = 0, run = 0;
  seq_cfg_t cfg [NCH];
  logic [NCH-1:0] seq_out;
  int checks = 0, failures = 0, toggles = 0;

  always #5 clk = ~clk;

  sequencer dut (.*);

  // level of channel c, n cycles after run was first sampled high (n >= 1)
  function automatic logic model(seq_cfg_t p, longint n);
    longint lo, hi, per, t;
    lo = (p.low_count == 0) ? 1 : p.low_count;
    hi = (p.high_count == 0) ? 1 : p.high_count;
    t  = (p.init_count == 0) ? 1 : p.init_count;
    if (n < t) return p.init_level;
    per = lo + hi;
    n = (n - t) % per;
    // after the first toggle the level is ~init_level
    if (p.init_level) return (n < lo) ? 1'b0 : 1'b1;
    else              return (n < hi) ? 1'b1 : 1'b0;
  endfunction

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NCH-1:0] prev;
    cfg[0] = '{init_level: 1'b1, init_count: 32'd6400, low_count: 32'd6400, high_count: 32'd6400};
    cfg[1] = '{init_level: 1'b0, init_count: 32'd6400, low_count: 32'd6400, high_count: 32'd6400};
    cfg[2] = '{init_level: 1'b0, init_count: 32'd5,    low_count: 32'd3,    high_count: 32'd7};
    cfg[3] = '{init_level: 1'b1, init_count: 32'd0,    low_count: 32'd1,    high_count: 32'd2};
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      repeat (3) @(negedge clk);
      checks++;
      if (seq_out !== {cfg[3].init_level, cfg[2].init_level, cfg[1].init_level, cfg[0].init_level})
        failures++;
      run = 1;
      prev = seq_out;
      for (longint n = 1; n <= 30000; n++) begin
        @(negedge clk);
        for (int c = 0; c < NCH; c++) begin
          checks++;
          if (seq_out[c] !== model(cfg[c], n)) begin
            failures++;
            if (failures < 10) $display("pass %0d ch %0d n=%0d out=%b exp %b", pass, c, n, seq_out[c],
                                        model(cfg[c], n));
          end
        end
        checks++;
        if (seq_out[0] === seq_out[1]) failures++;   // complementary pair
        if (seq_out != prev) toggles++;
        prev = seq_out;
      end
      run = 0;
      cfg[2].low_count = 32'd11;
    end
    checks++;
    if (toggles < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
