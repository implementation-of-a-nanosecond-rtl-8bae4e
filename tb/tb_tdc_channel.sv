`timescale 1ns / 1ps
// tb_tdc_channel - end-to-end test of one TDC channel with a shared start
// detector, clocked by the quadrature PLL model.
//
// Starts rise at t = k + 0.5 ns, stops at t = k + 0.25 ns, so every edge is
// first seen at the whole instant k + 1 and a start and a stop can share an
// instant. Both streams are recorded; at the end the reference is built from
// them alone: per 8 ns period only the first stop counts, it belongs to the
// latest start seen at the same or an earlier instant, its arrival is the
// difference of the two instants in ns and its start number is that start's
// 1-based index. The hit words of the channel must match this list in order.
// Stops before the first start give nothing.
module tb_tdc_channel;
  import tdc_pkg::*;
  logic [3:0] clk_q;
  logic       clk;
  logic       rst_n = 1'b0;
  logic       start_sig = 1'b0, stop_sig = 1'b0;
  logic       start_hit;
  logic [2:0] start_time;
  logic       out_valid;
  hit_word_t  out_word;

  int checks = 0, failures = 0;
  int start_n[$], stop_n[$];
  hit_word_t got[$];
  localparam int T_END = 60000;

  pll_model u_pll (.clk_q(clk_q), .clk_cnt(clk));

  mp_edge_detector u_start (.clk_q(clk_q), .clk_cnt(clk), .rst_n(rst_n), .sig(start_sig),
                            .hit(start_hit), .hit_time(start_time));

  tdc_channel #(.CH(2'd1)) dut (
    .clk_q(clk_q), .clk(clk), .rst_n(rst_n), .stop_sig(stop_sig),
    .start_hit(start_hit), .start_time(start_time),
    .out_valid(out_valid), .out_word(out_word));

  initial begin
    #20 rst_n = 1'b1;
  end

  // starts: 5 ns high, 10 to 300 ns apart
  initial begin
    int t;
    t = 100;
    #(real'(t) + 0.5);
    while (t < T_END - 400) begin
      int g;
      start_sig = 1'b1; start_n.push_back(t + 1);
      #5 start_sig = 1'b0;
      g = int'($urandom_range(10, 300));
      #(g - 5);
      t += g;
    end
  end

  // stops: 1 to 25 ns high, 1 to 60 ns low
  initial begin
    int t;
    t = 50;
    #(real'(t) + 0.25);
    while (t < T_END - 400) begin
      int w, g;
      stop_sig = 1'b1; stop_n.push_back(t + 1);
      w = int'($urandom_range(1, 25));
      #(w) stop_sig = 1'b0;
      g = int'($urandom_range(1, 60));
      #(g);
      t += w + g;
    end
  end

  always @(posedge clk) if (rst_n && out_valid) got.push_back(out_word);

  initial begin
    hit_word_t e;
    int last_p, si, n_exp, n_same;
    #(T_END);
    last_p = -1; si = -1; n_exp = 0; n_same = 0;
    foreach (stop_n[i]) begin
      if (stop_n[i] / 8 == last_p) continue;
      last_p = stop_n[i] / 8;
      while (si + 1 < start_n.size() && start_n[si + 1] <= stop_n[i]) si++;
      if (si < 0) continue;
      if (start_n[si] / 8 == stop_n[i] / 8) n_same++;
      e.ch = 2'd1; e.ovf = 1'b0;
      e.start_no = SNO_W'(si + 1);
      e.arrival  = ARR_W'(stop_n[i] - start_n[si]);
      checks++;
      if (n_exp >= got.size()) begin
        failures++; $display("FAIL missing hit %0d", n_exp);
      end else if (got[n_exp] !== e) begin
        failures++;
        $display("FAIL hit %0d: got arrival %0d start %0d, expected %0d start %0d", n_exp,
                 got[n_exp].arrival, got[n_exp].start_no, e.arrival, e.start_no);
      end
      n_exp++;
    end
    checks++;
    if (got.size() != n_exp) begin
      failures++; $display("FAIL %0d hits, expected %0d", got.size(), n_exp);
    end
    if (n_exp < 200 || n_same == 0) begin
      failures++; $display("FAIL too little exercised: %0d hits, %0d same-period", n_exp, n_same);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_END + 5000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
