`timescale 1ns / 1ps
// tb_time_calc_unit - self-checking test of the arrival-time calculation.
//
// The testbench plays the edge detectors and the coarse counter: each clock
// is one 8 ns count period P; a start or stop in that period carries a fine
// index 0..7 (the 1 ns instant at which it was first seen). The reference
// arrival is the plain difference of absolute instants, 8*(P_stop - P_start)
// + t - s, computed without the start hit-time/coarse-time split the unit
// uses. Covered: stops in the start's own period, stops in the start period
// but before the new start (they belong to the previous start), stops before
// any start (dropped), start numbering and the one-clock output latency.
module tb_time_calc_unit;
  import tdc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start_hit = 1'b0, stop_hit = 1'b0;
  logic [2:0] start_time = '0, stop_time = '0;
  logic [COARSE_W-1:0] coarse = '0;
  logic armed = 1'b0, ovf = 1'b0;
  logic out_valid;
  hit_word_t out_word;

  int checks = 0, failures = 0;
  int P = 0, Ps = -1, s = 0, sno = 0;
  int n_same = 0, n_before = 0, n_later = 0;
  logic exp_valid = 1'b0;
  int exp_arr = 0, exp_sno = 0;

  always #4 clk = ~clk;

  time_calc_unit #(.CH(2'd3)) dut (
    .clk(clk), .rst_n(rst_n), .start_hit(start_hit), .start_time(start_time),
    .stop_hit(stop_hit), .stop_time(stop_time), .coarse(coarse), .armed(armed),
    .ovf(ovf), .out_valid(out_valid), .out_word(out_word));

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 20000; i++) begin
      logic st, sp;
      int a, b;
      @(posedge clk); #1;
      // check the result of the previous period
      checks++;
      if (out_valid !== exp_valid) begin
        failures++; $display("FAIL period %0d valid=%0b expected %0b", P, out_valid, exp_valid);
      end else if (exp_valid) begin
        checks++;
        if (int'(out_word.arrival) != exp_arr || int'(out_word.start_no) != exp_sno % 512 ||
            out_word.ch != 2'd3 || out_word.ovf) begin
          failures++;
          $display("FAIL period %0d arrival=%0d sno=%0d expected %0d/%0d", P, out_word.arrival,
                   out_word.start_no, exp_arr, exp_sno % 512);
        end
      end
      // drive period P+1
      P++;
      st = (i > 10) && ($urandom_range(0, 29) == 0);
      sp = ($urandom_range(0, 3) == 0);
      a = int'($urandom_range(0, 7));
      b = int'($urandom_range(0, 7));
      start_hit  = st; start_time = 3'(a);
      stop_hit   = sp; stop_time  = 3'(b);
      armed      = (Ps >= 0);
      coarse     = (Ps >= 0) ? COARSE_W'(P - Ps - 1) : '0;
      exp_valid  = 1'b0;
      if (sp && st && b >= a) begin
        exp_valid = 1'b1; exp_arr = b - a; exp_sno = sno + 1; n_same++;
      end else if (sp && Ps >= 0) begin
        exp_valid = 1'b1; exp_arr = 8 * (P - Ps) + b - s; exp_sno = sno;
        if (st) n_before++; else n_later++;
      end
      if (st) begin Ps = P; s = a; sno++; end
    end
    if (n_same == 0 || n_before == 0 || n_later == 0) begin
      failures++; $display("FAIL case not reached %0d %0d %0d", n_same, n_before, n_later);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
