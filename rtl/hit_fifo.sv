`timescale 1ns / 1ps
// hit_fifo - synchronous first-word-fall-through FIFO for one channel's hit
// words, on the 125 MHz working clock.
//
// A DEPTH-word array with binary read and write pointers one bit wider than
// the address. rd_data always shows the oldest word while empty is low;
// rd_en pops it. A write while full is dropped and counted in drops
// (saturating), so a burst larger than the buffer loses its newest hits
// rather than corrupting stored ones. count gives the fill level, used by the
// UDP framer to size packets. A write and a pop in the same cycle are both
// done, also when full.
//
// The paper places a FIFO between the time-calculate unit and the UDP
// sender; depth, width, fall-through reads and drop-on-full are this design's
// choices.
module hit_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data,
  output logic          empty,
  output logic          full,
  output logic [AW:0]   count,
  output logic [15:0]   drops
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic         do_wr, do_rd;

  assign count   = wr_ptr - rd_ptr;
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      drops  <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      if (wr_en && !do_wr && drops != 16'hFFFF) drops <= drops + 1'b1;
    end
  end

  // A pop of an empty FIFO is a caller error.
  a_no_underflow : assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("hit_fifo: read while empty");

endmodule
