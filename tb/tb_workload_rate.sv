`timescale 1ns / 1ps
// tb_workload_rate - count-rate workload through the whole readout at
// default sizes.
//
// Detector 0 fires at a mean rate of 8 MHz (the top of the linear range
// measured for one detector) and detectors 1-3 at 1 MHz (the count-rate
// specification), each as a Poisson process of 20 ns discriminator pulses;
// starts come every 800 ns for 400 us and the Ethernet MAC always accepts
// bytes. Every hit must reach the receiver unchanged (reference model as in
// the other system benches), no FIFO may drop a word, and the recorded rate
// of detector 0 must exceed 7 MHz (the 20 ns pulse width costs some pulses
// at 8 MHz).
module tb_workload_rate;
  import tdc_pkg::*;
  localparam int NCH = 4;

  // Reference: edges are given by the whole 1 ns instant at which sampling
  // first sees them. The first stop of each 8 ns period counts; it belongs to
  // the latest start at the same or an earlier instant; with k = periods
  // between the start's and the stop's period, arrival = t - s for k = 0, else
  // (8 - s) + 8 * min(k - 1, 2^16 - 1) + t, overflow flag when k - 1 exceeds
  // 2^16 - 1 (s, t = instants modulo 8); start number = 1-based start index.
  typedef int       inst_q_t[$];
  typedef hit_word_t word_q_t[$];

  function automatic word_q_t expected_hits(inst_q_t starts, inst_q_t stops, int ch);
    word_q_t q;
    int last_p, si, maxc;
    maxc = (1 << COARSE_W) - 1;
    last_p = -1; si = -1;
    foreach (stops[i]) begin
      hit_word_t e;
      int k, s, t;
      if (stops[i] / 8 == last_p) continue;
      last_p = stops[i] / 8;
      while (si + 1 < starts.size() && starts[si + 1] <= stops[i]) si++;
      if (si < 0) continue;
      k = stops[i] / 8 - starts[si] / 8;
      s = starts[si] % 8;
      t = stops[i] % 8;
      e.ch       = CH_W'(ch);
      e.start_no = SNO_W'(si + 1);
      e.ovf      = (k - 1 > maxc);
      e.arrival  = (k == 0) ? ARR_W'(t - s) : ARR_W'(8 - s + 8 * ((k - 1 > maxc) ? maxc : k - 1) + t);
      q.push_back(e);
    end
    return q;
  endfunction
  localparam int T_BUNCH = 800;
  localparam int T_RUN = 400000;

  logic [3:0]  clk_q;
  logic        clk;
  logic        rst_n = 1'b0;
  logic        start_sig = 1'b0;
  logic [NCH-1:0] stop_sig = '0;
  logic [7:0]  tx_data;
  logic        tx_valid, tx_last, tx_ready = 1'b1;
  logic [31:0] frames;
  logic [NCH-1:0] fifo_full;
  logic [15:0] drops [NCH];

  int checks = 0, failures = 0;
  inst_q_t start_n;
  inst_q_t stop_n [NCH];
  word_q_t got [NCH];
  logic [7:0] fb[$];

  pll_model u_pll (.clk_q(clk_q), .clk_cnt(clk));

  apd_tdc_top dut (
    .clk_q(clk_q), .clk(clk), .rst_n(rst_n), .start_sig(start_sig), .stop_sig(stop_sig),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_last(tx_last), .tx_ready(tx_ready),
    .frames(frames), .fifo_full(fifo_full), .drops(drops));

  initial #40 rst_n = 1'b1;

  initial begin
    #100.5;
    for (int j = 0; j < T_RUN / T_BUNCH; j++) begin
      start_sig = 1'b1; start_n.push_back(101 + T_BUNCH * j);
      #5 start_sig = 1'b0;
      #(T_BUNCH - 5);
    end
  end

  for (genvar c = 0; c < NCH; c++) begin : g_det
    initial begin
      int t;
      real mean;
      mean = (c == 0) ? 125.0 : 1000.0;   // mean interval in ns
      t = 50;
      #(real'(t) + 0.25);
      while (t < T_RUN) begin
        int g;
        real u;
        stop_sig[c] = 1'b1; stop_n[c].push_back(t + 1);
        #20 stop_sig[c] = 1'b0;
        u = (real'($urandom_range(1, 1000000))) / 1000000.0;
        g = int'(-mean * $ln(u));
        if (g < 21) g = 21;
        #(g - 20);
        t += g;
      end
    end
  end

  // receiver
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    fb.push_back(tx_data);
    if (tx_last) begin
      int n;
      n = (fb.size() - 42) / 4;
      for (int w = 0; w < n; w++) begin
        hit_word_t h;
        h = {fb[42 + 4 * w], fb[43 + 4 * w], fb[44 + 4 * w], fb[45 + 4 * w]};
        got[h.ch].push_back(h);
      end
      fb.delete();
    end
  end

  initial begin
    real rate0;
    #(T_RUN + 20000);
    for (int c = 0; c < NCH; c++) begin
      word_q_t e;
      e = expected_hits(start_n, stop_n[c], c);
      checks++;
      if (got[c].size() != e.size() || drops[c] != 0) begin
        failures++; $display("FAIL channel %0d: %0d words, expected %0d, dropped %0d", c,
                             got[c].size(), e.size(), drops[c]);
      end
      foreach (e[i]) begin
        checks++;
        if (i >= got[c].size() || got[c][i] !== e[i]) begin
          failures++;
          if (failures < 10) $display("FAIL channel %0d word %0d", c, i);
        end
      end
    end
    rate0 = real'(got[0].size()) / real'(T_RUN) * 1000.0;
    $display("recorded rates (MHz): %f %f %f %f, frames %0d", rate0,
             real'(got[1].size()) / real'(T_RUN) * 1000.0, real'(got[2].size()) / real'(T_RUN) * 1000.0,
             real'(got[3].size()) / real'(T_RUN) * 1000.0, frames);
    checks++;
    if (rate0 < 7.0) begin failures++; $display("FAIL detector 0 rate below 7 MHz"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_RUN + 100000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
