// sequencer: programmable periodic outputs for excitation control.
//
// Each of the NCH channels produces a periodic two-level waveform, used for
// example to switch an acousto-optic tunable filter between laser lines
// (alternating excitation switches every 50 us, i.e. 6400 cycles at
// 128 MHz). The outputs leave the FPGA and are also fed back to the
// tagger's delta inputs, so every change of excitation is time-tagged.
//
// Program per channel (seq_cfg_t, all counts in clock cycles): while run is
// low the output sits at init_level and its down-counter is loaded with
// init_count. Once run is high the output stays at init_level for
// init_count cycles, then toggles; after that it spends low_count cycles
// low and high_count cycles high, repeating, for a period of
// low_count + high_count. A count of 0 behaves as 1. Channels with the same
// program and the same run edge stay in lockstep, and a channel with an
// inverted init_level gives the complementary waveform. seq_out is
// registered.
//
// That each channel produces a programmable periodic waveform follows the
// published design; this way of programming it is this design's own.
module sequencer
  import timetag_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  input  seq_cfg_t       cfg [NCH],
  output logic [NCH-1:0] seq_out
);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [31:0] cnt;

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        seq_out[c] <= 1'b0;
        cnt        <= '0;
      end else if (!run) begin
        seq_out[c] <= cfg[c].init_level;
        cnt        <= cfg[c].init_count;
      end else if (cnt <= 32'd1) begin
        seq_out[c] <= ~seq_out[c];
        cnt        <= seq_out[c] ? cfg[c].low_count : cfg[c].high_count;
      end else begin
        cnt <= cnt - 1'b1;
      end
    end
  end

endmodule
