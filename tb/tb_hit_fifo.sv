`timescale 1ns / 1ps
// tb_hit_fifo - self-checking test of the hit FIFO against a queue model.
//
// Random writes and pops on a 16-deep instance, with phases of heavy writing
// (to fill it and force drops) and heavy reading (to drain it). Every clock
// the head word, empty, full, count and the drop counter are compared with
// the model.
module tb_hit_fifo;
  localparam int D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [31:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [4:0] count;
  logic [15:0] drops;

  int checks = 0, failures = 0;
  logic [31:0] q[$];
  int n_drop = 0, n_full = 0;

  always #4 clk = ~clk;

  hit_fifo #(.W(32), .DEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data), .rd_en(rd_en),
    .rd_data(rd_data), .empty(empty), .full(full), .count(count), .drops(drops));

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 20000; i++) begin
      int wp;
      #1;
      // compare with the model
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == D) || int'(count) != q.size() ||
          int'(drops) != n_drop || (q.size() > 0 && rd_data !== q[0])) begin
        failures++;
        $display("FAIL cycle %0d: count=%0d model=%0d drops=%0d/%0d", i, count, q.size(), drops, n_drop);
      end
      if (full) n_full++;
      wp = ((i / 500) % 2 == 0) ? 80 : 25;
      wr_en   = ($urandom_range(0, 99) < wp);
      wr_data = $urandom;
      rd_en   = (q.size() > 0) && ($urandom_range(0, 99) < 50);
      @(posedge clk);
      // model update for this clock
      if (rd_en) void'(q.pop_front());
      if (wr_en) begin
        if (q.size() < D) q.push_back(wr_data);
        else n_drop++;
      end
    end
    if (n_drop == 0 || n_full == 0) begin failures++; $display("FAIL full never reached"); end
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
