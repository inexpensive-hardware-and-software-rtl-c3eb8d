// timestamp_counter: the tagger's time base.
//
// A TS_W-bit counter of core-clock cycles (128 MHz, 7.8 ns per count, as in
// the published instrument). It starts at zero after reset or a host clear
// and counts one per cycle; after 2^TS_W - 1 it rolls over to zero and wrap
// pulses high for that one cycle, so the record encoder can flag the next
// record. With the default 36 bits the counter wraps every 2^36 / 128 MHz,
// about 537 s.
//
// The width and the existence of a wraparound flag follow the published
// record format; the clear input and the one-cycle wrap pulse are this
// design's own.
module timestamp_counter #(
  parameter int unsigned TS_W = 36
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  output logic [TS_W-1:0] ts,
  output logic            wrap
);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ts   <= '0;
      wrap <= 1'b0;
    end else begin
      ts   <= ts + 1'b1;
      wrap <= &ts;
    end
  end

endmodule
