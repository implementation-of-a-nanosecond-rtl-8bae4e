`timescale 1ns / 1ps
// coarse_counter - counts 8 ns periods of the 125 MHz count clock since the
// latest start edge.
//
// Every start edge resets the counter to zero; it resumes counting at the
// first count-clock edge after the start. Inputs arrive from the edge
// detectors one count period late, one period per clock, so while the
// results of period k after the start period are presented, coarse holds
// k-1: a stop two periods after the start period reads 1 (8 ns), as in the
// paper's timing diagram. The counter saturates at its maximum and then
// raises ovf until the next start.
//
// Interface: start_hit (from the start-edge detector), coarse, armed (a start
// has been seen since reset), ovf. All on clk, synchronous active-low reset.
// Follows the paper: 125 MHz count, reset by start. Own choices: width
// (tdc_pkg::COARSE_W) and saturation.
module coarse_counter
  import tdc_pkg::*;
#(
  parameter int unsigned W = COARSE_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start_hit,
  output logic [W-1:0] coarse,
  output logic         armed,
  output logic         ovf
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      coarse <= '0;
      armed  <= 1'b0;
      ovf    <= 1'b0;
    end else if (start_hit) begin
      coarse <= '0;
      armed  <= 1'b1;
      ovf    <= 1'b0;
    end else if (armed && !ovf) begin
      if (coarse == {W{1'b1}}) ovf <= 1'b1;
      else                     coarse <= coarse + 1'b1;
    end
  end

endmodule
