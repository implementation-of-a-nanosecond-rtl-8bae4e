`timescale 1ns / 1ps
// tdc_channel - one readout channel of the multiphase TDC.
//
// Holds the stop-edge detector (four-phase sampling of the discriminator
// output), the coarse-time counter (reset by every start edge, counting 8 ns
// periods) and the time-calculate unit that turns start hit-time, coarse-time
// and stop hit-time into an arrival time. The start-edge detector is shared
// by all channels and its decoded result comes in on start_hit/start_time.
//
// Interface: clk_q quadrature clocks, clk the 125 MHz count/working clock,
// stop_sig the discriminator output (asynchronous). out_valid/out_word give
// one hit word per stop edge, two count periods after the period that held
// the edge (one in the edge detector, one in the time-calculate unit).
// Structure follows the paper's one-channel diagram; the channel number CH is
// placed in the hit word.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter logic [CH_W-1:0] CH = '0
) (
  input  logic [NPHASE-1:0] clk_q,
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stop_sig,
  input  logic              start_hit,
  input  logic [FINE_W-1:0] start_time,
  output logic              out_valid,
  output hit_word_t         out_word
);

  logic                stop_hit;
  logic [FINE_W-1:0]   stop_time;
  logic [COARSE_W-1:0] coarse;
  logic                armed;
  logic                ovf;

  mp_edge_detector u_stop_edge (
    .clk_q    (clk_q),
    .clk_cnt  (clk),
    .rst_n    (rst_n),
    .sig      (stop_sig),
    .hit      (stop_hit),
    .hit_time (stop_time)
  );

  coarse_counter u_coarse (
    .clk       (clk),
    .rst_n     (rst_n),
    .start_hit (start_hit),
    .coarse    (coarse),
    .armed     (armed),
    .ovf       (ovf)
  );

  time_calc_unit #(.CH(CH)) u_calc (
    .clk        (clk),
    .rst_n      (rst_n),
    .start_hit  (start_hit),
    .start_time (start_time),
    .stop_hit   (stop_hit),
    .stop_time  (stop_time),
    .coarse     (coarse),
    .armed      (armed),
    .ovf        (ovf),
    .out_valid  (out_valid),
    .out_word   (out_word)
  );

endmodule
