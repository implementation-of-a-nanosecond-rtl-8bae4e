`timescale 1ns / 1ps
// pll_model - simulation stand-in for the FPGA PLL that feeds the TDC.
//
// Produces the 250 MHz quadrature clock, phases 0, 90, 180 and 270 degrees
// (rising edges at 0, 1, 2 and 3 ns modulo 4 ns), and the 125 MHz count clock
// whose rising edges fall on every other 0-degree rising edge (0 ns modulo
// 8 ns). All clocks change in one process at whole nanoseconds, so an edge of
// clk_q[0] and of clk_cnt that coincide happen in the same time step.
// Not synthesizable: the real clocks come from the FPGA's PLL primitive.
module pll_model (
  output logic [3:0] clk_q,
  output logic       clk_cnt
);
  int unsigned n = 0;
  initial begin
    clk_q   = 4'b0000;
    clk_cnt = 1'b0;
    forever begin
      for (int p = 0; p < 4; p++) clk_q[p] = (((n + 4 - p) % 4) < 2);
      clk_cnt = ((n % 8) < 4);
      #1;
      n++;
    end
  end
endmodule
