`timescale 1ns / 1ps
// tb_rr_merge - self-checking test of the round-robin FIFO merge.
//
// Four sources with random empty flags and distinct head words; requests at
// random. A model pointer, advanced past each served source, gives the
// expected choice: the first non-empty source at or after the pointer. The
// testbench checks any, word and the one-hot pop every clock, and that over
// the all-busy half of the run the sources are served in strict rotation.
module tb_rr_merge;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] empty = '1;
  logic [31:0] data [N];
  logic req = 1'b0, any;
  logic [31:0] word;
  logic [N-1:0] pop;

  int checks = 0, failures = 0;
  int ptr = 0;
  int served [N];

  always #4 clk = ~clk;

  rr_merge #(.N(N), .W(32)) dut (.clk(clk), .rst_n(rst_n), .empty(empty), .data(data),
                                 .req(req), .any(any), .word(word), .pop(pop));

  initial begin
    foreach (served[i]) served[i] = 0;
    foreach (data[i]) data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 20000; i++) begin
      int sel;
      #1;
      empty = (i < 10000) ? N'($urandom) : '0;   // second half: all busy
      foreach (data[c]) data[c] = {8'(c), 24'($urandom)};
      req = ($urandom_range(0, 2) != 0);
      #1;
      sel = -1;
      for (int k = 0; k < N; k++) if (sel < 0 && !empty[(ptr + k) % N]) sel = (ptr + k) % N;
      checks++;
      if (any !== (sel >= 0) || (sel >= 0 && word !== data[sel]) ||
          pop !== ((req && sel >= 0) ? N'(1) << sel : '0)) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: sel %0d any %0b pop %b", i, sel, any, pop);
      end
      @(posedge clk);
      if (req && sel >= 0) begin
        ptr = (sel + 1) % N;
        if (i >= 10000) served[sel]++;
      end
    end
    // all busy: strict rotation, so the counts differ by at most one
    foreach (served[c]) begin
      checks++;
      if (served[c] < 1500 || served[c] > served[0] + 1 || served[c] < served[0] - 1) begin
        failures++; $display("FAIL source %0d served %0d times", c, served[c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
