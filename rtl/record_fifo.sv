// record_fifo: the on-board event buffer between the tagger and USB.
//
// USB carries about 600,000 events per second while events can arrive at
// the full clock rate, so bursts are absorbed here; the published instrument
// handles bursts of roughly 2000 events, and DEPTH defaults to 2048 records.
// It is a synchronous FIFO, one write and one read per cycle, built on a
// simple dual-port memory array. The read side is show-ahead: rd_data is
// the oldest record whenever empty is low, and rd_en pops it. A write while
// full and a read while empty are ignored (the writer checks full; see the
// record encoder for what happens to the lost record).
// The buffer size follows the published burst length; its organisation is
// this design's own.
module record_fifo #(
  parameter int unsigned W     = 48,
  parameter int unsigned DEPTH = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

endmodule
