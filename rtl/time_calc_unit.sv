`timescale 1ns / 1ps
// time_calc_unit - combines start hit-time, coarse-time and stop hit-time
// into the arrival time of one stop edge, in 1 ns bins.
//
// The start-edge detector reports the index s (0..7) of the start edge within
// its 8 ns period; the start hit-time, the time from the start edge to the
// end of that period, is 8 - s. The stop-edge detector reports the stop
// index t, which is the stop hit-time measured from the start of its period.
// For a stop k >= 1 periods after the start period the coarse counter holds
// k-1, and
//     arrival = (8 - s) + 8 * coarse + t          (1 ns per bin)
// which is the paper's sum start hit-time + coarse-time + stop hit-time. A
// stop inside the start's own period (t >= s, same clock as start_hit) gives
// arrival = t - s. A stop in that period but before the new start (t < s)
// still belongs to the previous start and uses the old start index. Every
// start is counted and its number (mod 512) tags the hits that follow it, so
// that the receiver can group all events between two start triggers.
//
// Interface: inputs from the shared start-edge detector, this channel's
// stop-edge detector and coarse counter, all on the 125 MHz clock. out_valid
// pulses one clock after the stop is presented, with out_word (tdc_pkg::
// hit_word_t). Stops before the first start are dropped.
// Follows the paper: the arrival-time formula and 1 ns bins. Own choices:
// the word layout, start numbering, same-period handling. The channel bits
// of out_word are the constant CH of the instance.
module time_calc_unit
  import tdc_pkg::*;
#(
  parameter logic [CH_W-1:0] CH = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start_hit,
  input  logic [FINE_W-1:0]   start_time,
  input  logic                stop_hit,
  input  logic [FINE_W-1:0]   stop_time,
  input  logic [COARSE_W-1:0] coarse,
  input  logic                armed,
  input  logic                ovf,
  output logic                out_valid,
  output hit_word_t           out_word
);

  logic [FINE_W-1:0] start_q;     // fine index of the latest start
  logic [SNO_W-1:0]  start_no_q;  // number of starts seen (mod 2^SNO_W)

  logic              new_start_owns;  // stop belongs to the start presented now
  logic              old_start_owns;  // stop belongs to an earlier start
  logic [ARR_W-1:0]  start_hit_ns;    // start hit-time, 1..8
  logic [ARR_W-1:0]  arrival;

  always_comb begin
    new_start_owns = stop_hit && start_hit && (stop_time >= start_time);
    old_start_owns = stop_hit && !new_start_owns && armed;
    start_hit_ns   = ARR_W'(NSAMPLE) - ARR_W'(start_q);
    if (new_start_owns)
      arrival = ARR_W'(stop_time) - ARR_W'(start_time);
    else
      arrival = start_hit_ns + (ARR_W'(coarse) << 3) + ARR_W'(stop_time);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start_q    <= '0;
      start_no_q <= '0;
      out_valid  <= 1'b0;
      out_word   <= '0;
    end else begin
      if (start_hit) begin
        start_q    <= start_time;
        start_no_q <= start_no_q + 1'b1;
      end
      out_valid <= new_start_owns || old_start_owns;
      if (new_start_owns || old_start_owns) begin
        out_word.ch       <= CH;
        out_word.ovf      <= old_start_owns && ovf;
        out_word.start_no <= new_start_owns ? start_no_q + 1'b1 : start_no_q;
        out_word.arrival  <= arrival;
      end
    end
  end

endmodule
