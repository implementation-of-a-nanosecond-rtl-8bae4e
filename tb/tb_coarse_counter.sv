`timescale 1ns / 1ps
// tb_coarse_counter - self-checking test of the coarse-time counter.
//
// Random start pulses at random gaps on a 125 MHz clock. The reference
// counts clocks since the last start independently: the period presented k
// clocks after the clock that carried the start must see coarse = k-1 (0 on
// the first clock after the start), armed must be set after the first start, and a gap longer than
// 2^16 + 1 clocks must saturate the counter and raise ovf.
module tb_coarse_counter;
  import tdc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start_hit = 1'b0;
  logic [COARSE_W-1:0] coarse;
  logic armed, ovf;
  int checks = 0, failures = 0;
  int k = -1;        // clocks since the start, -1 before any start
  int n_ovf = 0;

  always #4 clk = ~clk;

  coarse_counter dut (.clk(clk), .rst_n(rst_n), .start_hit(start_hit),
                      .coarse(coarse), .armed(armed), .ovf(ovf));

  task automatic check_now();
    int exp_c;
    logic exp_ovf;
    checks++;
    if (k < 1) begin
      if (k < 0 && armed) begin
        failures++; $display("FAIL armed before start");
      end
      return;
    end
    // sampled just after clock k: this is the value the next period (k+1
    // clocks after the start) will see, i.e. (k+1)-1 = k
    exp_ovf = k > int'({COARSE_W{1'b1}});
    exp_c   = exp_ovf ? int'({COARSE_W{1'b1}}) : k;
    if (exp_ovf) n_ovf++;
    if (!armed || int'(coarse) != exp_c || ovf !== exp_ovf) begin
      failures++;
      $display("FAIL k=%0d coarse=%0d ovf=%0b armed=%0b expected %0d/%0b", k, coarse, ovf, armed, exp_c, exp_ovf);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) begin @(posedge clk); #1 check_now(); end
    for (int i = 0; i < 400; i++) begin
      int gap;
      gap = (i == 200) ? 65540 : int'($urandom_range(1, 60));
      start_hit <= 1'b1;
      @(posedge clk); #1;
      start_hit <= 1'b0;
      k = 0;
      for (int j = 0; j < gap; j++) begin
        @(posedge clk); #1;
        k++;
        check_now();
      end
    end
    if (n_ovf == 0) begin failures++; $display("FAIL overflow never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
