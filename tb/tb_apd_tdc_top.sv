`timescale 1ns / 1ps
// tb_apd_tdc_top - end-to-end test of the four-channel TDC readout at its
// default sizes (1024-word FIFOs, 64-word datagrams, 16-bit coarse counter).
//
// A start (RF timing) stream and four independent stop streams drive the
// top, clocked by the quadrature PLL model; a receiver takes the UDP byte
// stream, checks frame lengths and splits the payload words by channel. The
// run has three phases:
//   A  starts every 0.2-1.2 us, moderate stop rates, MAC sometimes stalling:
//      several hits per start, stops in the start's own 8 ns period and
//      just before a start, full 64-word datagrams.
//   B  the MAC stops accepting bytes while all channels fire every 16-30 ns:
//      the FIFOs fill and drop hits, then drain when the MAC resumes.
//   C  one start gap of about 540 us, longer than the coarse counter's range,
//      with a few stops late in it (coarse overflow), and quiet stretches
//      that end in flush datagrams shorter than 64 words.
// Reference: edges are placed at k + 0.5 ns (starts) and k + 0.25 ns
// (stops), first seen at instant k + 1. Per channel and 8 ns period the
// first stop counts; it belongs to the latest start at the same or an
// earlier instant; k periods after the start's period the arrival is
// (8 - s) + 8 * min(k - 1, 65535) + t, or t - s in the start's own period,
// with the overflow flag when k - 1 > 65535. The words received on a channel
// must be, in order, this list less as many words as the channel's drop
// counter reports. Each mechanism above is counted and must occur.
module tb_apd_tdc_top;
  import tdc_pkg::*;
  localparam int NCH = 4;
  localparam int MAXC = (1 << COARSE_W) - 1;

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
  int phase = 0;
  int start_n[$];
  int stop_n[NCH][$];
  hit_word_t got[NCH][$];
  logic [7:0] fb[$];
  int n_frames = 0, n_full_dg = 0, n_flush_dg = 0, n_stall = 0, n_full_fifo = 0;
  bit done_a = 0, done_b = 0;

  pll_model u_pll (.clk_q(clk_q), .clk_cnt(clk));

  apd_tdc_top dut (
    .clk_q(clk_q), .clk(clk), .rst_n(rst_n), .start_sig(start_sig), .stop_sig(stop_sig),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_last(tx_last), .tx_ready(tx_ready),
    .frames(frames), .fifo_full(fifo_full), .drops(drops));

  initial begin
    #40 rst_n = 1'b1;
  end

  // ---- starts --------------------------------------------------------------
  initial begin
    int t;
    t = 200;
    #(real'(t) + 0.5);
    while (phase < 3) begin
      int g;
      start_sig = 1'b1; start_n.push_back(t + 1);
      #5 start_sig = 1'b0;
      g = (phase == 2) ? 540000 : int'($urandom_range(200, 1200));
      if (phase == 2) phase = 3;   // the long gap ends the run's starts
      #(g - 5);
      t += g;
    end
    start_sig = 1'b1; start_n.push_back(t + 1);
    #5 start_sig = 1'b0;
    #30000 phase = 4;                    // stops end, the FIFOs drain
  end

  // ---- stops, one process per channel -------------------------------------
  for (genvar c = 0; c < NCH; c++) begin : g_stop
    initial begin
      int t;
      t = 100 + 7 * c;
      #(real'(t) + 0.25);
      while (phase != 4) begin
        int w, g;
        stop_sig[c] = 1'b1; stop_n[c].push_back(t + 1);
        w = int'($urandom_range(1, 20));
        #(w) stop_sig[c] = 1'b0;
        case (phase)
          0:       g = int'($urandom_range(1, 150));
          1:       g = int'($urandom_range(8, 12));
          default: g = int'($urandom_range(20000, 60000));
        endcase
        #(g);
        t += w + g;
      end
    end
  end

  // ---- phases and MAC back-pressure ---------------------------------------
  initial begin
    #100000;  phase = 1;                 // B: fire fast with the MAC stopped
    #30000;   phase = 2;                 // C: long gap, slow stops
  end
  always @(posedge clk) begin
    if (phase == 0)      tx_ready <= ($urandom_range(0, 3) != 0);
    else if (phase == 1) tx_ready <= 1'b0;
    else                 tx_ready <= 1'b1;
    if (tx_valid && !tx_ready) n_stall++;
    if (|fifo_full) n_full_fifo++;
  end

  // ---- receiver -------------------------------------------------------------
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    fb.push_back(tx_data);
    if (tx_last) begin
      int n;
      n = (fb.size() - 42) / 4;
      checks++;
      if (fb.size() != 42 + 4 * n || n < 1 || n > 64 ||
          ((int'(fb[38]) << 8) | int'(fb[39])) != 8 + 4 * n) begin
        failures++; $display("FAIL frame %0d has %0d bytes", n_frames, fb.size());
      end
      for (int w = 0; w < n; w++) begin
        hit_word_t h;
        h = {fb[42 + 4 * w], fb[43 + 4 * w], fb[44 + 4 * w], fb[45 + 4 * w]};
        got[h.ch].push_back(h);
      end
      if (n == 64) n_full_dg++; else n_flush_dg++;
      n_frames++;
      fb.delete();
    end
  end

  // ---- reference and comparison --------------------------------------------
  initial begin
    int n_multi, n_same, n_before, n_ovf, n_drop, n_hits;
    int hits_per_start[int];
    wait (phase == 4);
    #20000;    // the last flush
    n_multi = 0; n_same = 0; n_before = 0; n_ovf = 0; n_drop = 0; n_hits = 0;
    for (int c = 0; c < NCH; c++) begin
      hit_word_t exp_q[$];
      int last_p, si, gi, miss;
      exp_q.delete();
      last_p = -1; si = -1;
      foreach (stop_n[c][i]) begin
        hit_word_t e;
        int k, s, tt;
        if (stop_n[c][i] / 8 == last_p) continue;
        last_p = stop_n[c][i] / 8;
        while (si + 1 < start_n.size() && start_n[si + 1] <= stop_n[c][i]) si++;
        if (si < 0) continue;
        k  = stop_n[c][i] / 8 - start_n[si] / 8;
        s  = start_n[si] % 8;
        tt = stop_n[c][i] % 8;
        e.ch = CH_W'(c);
        e.start_no = SNO_W'(si + 1);
        e.ovf = (k - 1 > MAXC);
        if (k == 0) e.arrival = ARR_W'(tt - s);
        else        e.arrival = ARR_W'(8 - s + 8 * ((k - 1 > MAXC) ? MAXC : k - 1) + tt);
        if (k == 0) n_same++;
        if (si + 1 < start_n.size() && start_n[si + 1] / 8 == stop_n[c][i] / 8) n_before++;
        if (e.ovf) n_ovf++;
        hits_per_start[si]++;
        exp_q.push_back(e);
      end
      // received words must be the expected list with drops[c] words left out
      gi = 0; miss = 0;
      foreach (exp_q[i]) begin
        if (gi < got[c].size() && got[c][gi] === exp_q[i]) gi++;
        else miss++;
      end
      checks++;
      if (gi != got[c].size() || miss != int'(drops[c])) begin
        failures++;
        $display("FAIL channel %0d: %0d of %0d words matched, %0d missing, drop counter %0d",
                 c, gi, got[c].size(), miss, drops[c]);
      end
      n_drop += int'(drops[c]);
      n_hits += gi;
      checks++;
      if (got[c].size() < 100) begin failures++; $display("FAIL channel %0d idle", c); end
    end
    foreach (hits_per_start[i]) if (hits_per_start[i] > 1) n_multi++;
    checks++;
    if (int'(frames) != n_frames) begin failures++; $display("FAIL frame counter"); end
    $display("hits %0d, frames %0d (%0d full, %0d flushed), starts with several hits %0d,",
             n_hits, n_frames, n_full_dg, n_flush_dg, n_multi);
    $display("same-period stops %0d, stops before a start in its period %0d, overflows %0d,",
             n_same, n_before, n_ovf);
    $display("dropped %0d, MAC stall clocks %0d, clocks with a FIFO full %0d",
             n_drop, n_stall, n_full_fifo);
    if (n_multi == 0)    begin failures++; $display("FAIL no start with several hits"); end
    if (n_same == 0)     begin failures++; $display("FAIL no same-period stop"); end
    if (n_before == 0)   begin failures++; $display("FAIL no stop just before a start"); end
    if (n_ovf == 0)      begin failures++; $display("FAIL no coarse overflow"); end
    if (n_drop == 0 || n_full_fifo == 0) begin failures++; $display("FAIL no FIFO overflow"); end
    if (n_full_dg == 0)  begin failures++; $display("FAIL no full datagram"); end
    if (n_flush_dg == 0) begin failures++; $display("FAIL no flushed datagram"); end
    if (n_stall == 0)    begin failures++; $display("FAIL no MAC stall"); end
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
