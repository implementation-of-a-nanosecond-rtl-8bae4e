`timescale 1ns / 1ps
// tb_workload_nrs - 57Fe nuclear resonance scattering time spectrum through
// the whole readout at default sizes.
//
// Starts (one per X-ray bunch) come every 800 ns. After each start every
// detector sees, with probability 1/2, a prompt pulse 20 ns later (electronic
// scattering), and with probability 1/2 a delayed pulse at 20 ns plus an
// exponentially distributed delay with the 141 ns lifetime of the 14.4 keV
// 57Fe level (nuclear scattering), so several events per start and channel
// occur. All frames are decoded; every hit word is compared with the
// reference model, and from the received arrival times the delayed-event
// spectrum is histogrammed: the counts in [0, 141) ns and [141, 282) ns after
// the prompt time must stand in the ratio e = 2.72 (within 15 %), i.e. the
// decay constant is recovered from the TDC output.
module tb_workload_nrs;
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
  localparam int N_BUNCH = 1500;
  localparam int T_BUNCH = 800;
  localparam real TAU = 141.0;

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
  bit running = 1;

  pll_model u_pll (.clk_q(clk_q), .clk_cnt(clk));

  apd_tdc_top dut (
    .clk_q(clk_q), .clk(clk), .rst_n(rst_n), .start_sig(start_sig), .stop_sig(stop_sig),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_last(tx_last), .tx_ready(tx_ready),
    .frames(frames), .fifo_full(fifo_full), .drops(drops));

  initial #40 rst_n = 1'b1;

  // starts at 200.5 + 800 j ns, first seen at instant 201 + 800 j
  initial begin
    #200.5;
    for (int j = 0; j < N_BUNCH; j++) begin
      start_sig = 1'b1; start_n.push_back(201 + T_BUNCH * j);
      #5 start_sig = 1'b0;
      #(T_BUNCH - 5);
    end
    running = 0;
  end

  // one process per detector: edges at whole ns + 0.25
  for (genvar c = 0; c < NCH; c++) begin : g_det
    initial begin
      #200.25;
      for (int j = 0; j < N_BUNCH; j++) begin
        int t0, tp, td;
        t0 = 200 + T_BUNCH * j;       // now
        tp = -1; td = -1;
        if ($urandom_range(0, 1) == 0) tp = t0 + 20;
        if ($urandom_range(0, 1) == 0) begin
          real u;
          u  = (real'($urandom_range(1, 1000000))) / 1000000.0;
          td = t0 + 20 + int'(-TAU * $ln(u));
          if (td > t0 + T_BUNCH - 30) td = -1;         // past the next bunch: not drawn
          if (tp >= 0 && td >= 0 && td < tp + 8) td = -1;  // merged with the prompt pulse
        end
        if (tp >= 0) begin
          #(tp - t0);
          stop_sig[c] = 1'b1; stop_n[c].push_back(tp + 1);
          #5 stop_sig[c] = 1'b0;
          t0 = tp + 5;
        end
        if (td >= 0) begin
          #(td - t0);
          stop_sig[c] = 1'b1; stop_n[c].push_back(td + 1);
          #5 stop_sig[c] = 1'b0;
          t0 = td + 5;
        end
        #(200 + T_BUNCH * (j + 1) - t0);
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
    int n1, n2, n_prompt, n_multi;
    real ratio;
    wait (!running);
    #20000;
    n1 = 0; n2 = 0; n_prompt = 0; n_multi = 0;
    for (int c = 0; c < NCH; c++) begin
      word_q_t e;
      int per_start[int];
      e = expected_hits(start_n, stop_n[c], c);
      checks++;
      if (got[c].size() != e.size() || drops[c] != 0) begin
        failures++; $display("FAIL channel %0d: %0d words, expected %0d", c, got[c].size(), e.size());
      end
      foreach (e[i]) begin
        checks++;
        if (i >= got[c].size() || got[c][i] !== e[i]) begin
          failures++;
          if (failures < 10) $display("FAIL channel %0d word %0d", c, i);
        end
      end
      foreach (got[c][i]) begin
        int d;
        d = int'(got[c][i].arrival) - 20;   // delay after the prompt time
        per_start[int'(got[c][i].start_no)]++;
        if (d == 0) n_prompt++;
        else if (d > 0 && d < 141) n1++;
        else if (d >= 141 && d < 282) n2++;
      end
      foreach (per_start[k]) if (per_start[k] > 1) n_multi++;
    end
    ratio = (n2 > 0) ? real'(n1) / real'(n2) : 0.0;
    $display("prompt %0d, delayed in [0,141) %0d, in [141,282) %0d, ratio %f (e = 2.718), starts with several hits %0d",
             n_prompt, n1, n2, ratio, n_multi);
    checks++;
    if (ratio < 2.31 || ratio > 3.13) begin failures++; $display("FAIL decay ratio"); end
    checks++;
    if (n_prompt < 1000 || n_multi == 0) begin failures++; $display("FAIL too few events"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_BUNCH * N_BUNCH + 100000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
