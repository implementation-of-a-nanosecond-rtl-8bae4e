`timescale 1ns / 1ps
// tdc_pkg - types and constants shared by the multiphase FPGA TDC.
//
// The TDC works on a 125 MHz count clock (8 ns period) and a 250 MHz
// quadrature clock whose four phases split each 8 ns period into eight 1 ns
// bins. A fine time (HIT_TIME) is therefore 3 bits, and an arrival time is
// start hit-time + 8 ns * coarse-time + stop hit-time in 1 ns bins.
// The widths of the coarse counter, the start number and the 32-bit hit word
// layout are this design's choices; the 1 ns bin, 8 ns period and the four
// phases follow the paper.
package tdc_pkg;

  localparam int unsigned NPHASE   = 4;   // 0, 90, 180, 270 degrees
  localparam int unsigned NSAMPLE  = 8;   // 1 ns bins per 8 ns count period
  localparam int unsigned FINE_W   = 3;   // HIT_TIME[2:0]
  localparam int unsigned COARSE_W = 16;  // coarse counter: 8 ns * 2^16 = 524 us
  localparam int unsigned ARR_W    = 20;  // arrival time in 1 ns bins
  localparam int unsigned SNO_W    = 9;   // start number carried in each hit
  localparam int unsigned CH_W     = 2;   // channel number (four channels)
  localparam int unsigned WORD_W   = 32;

  // Hit word as written to the FIFO and sent in the UDP payload (MSB first).
  typedef struct packed {
    logic [CH_W-1:0]  ch;        // readout channel 0..3
    logic             ovf;       // coarse counter saturated: arrival is a lower bound
    logic [SNO_W-1:0] start_no;  // number of the start (mod 512) the hit belongs to
    logic [ARR_W-1:0] arrival;   // arrival time after the start, 1 ns per bin
  } hit_word_t;

endpackage
