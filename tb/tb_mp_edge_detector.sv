`timescale 1ns / 1ps
// tb_mp_edge_detector - self-checking test of the multiphase edge detector.
//
// Drives random pulses whose rising edges fall between two 1 ns sampling
// instants (0.1 to 0.9 ns after a whole ns), so the expected result is exact:
// an edge between n - 1 and n ns is first seen at instant n, i.e. in count
// period n / 8 with HIT_TIME n % 8. Only the first edge of a period is
// expected. The result of period P must be on the outputs just after the
// count-clock edge at 8(P+1) ns, the edge that closes period P, which
// checks the one-period latency; periods without an edge must report no hit.
module tb_mp_edge_detector;
  logic [3:0] clk_q;
  logic       clk_cnt;
  logic       rst_n = 1'b0;
  logic       sig   = 1'b0;
  logic       hit;
  logic [2:0] hit_time;

  int checks = 0, failures = 0;
  int exp_idx [int];
  int n_hits = 0;
  localparam int N_PERIODS = 3000;

  pll_model u_pll (.clk_q(clk_q), .clk_cnt(clk_cnt));

  mp_edge_detector dut (
    .clk_q(clk_q), .clk_cnt(clk_cnt), .rst_n(rst_n), .sig(sig),
    .hit(hit), .hit_time(hit_time)
  );

  // stimulus: edges at a random fraction (0.1 .. 0.9 ns) past a whole ns
  initial begin
    int t;   // whole ns just before the next edge
    #20 rst_n = 1'b1;
    t = 40;
    while (t < 8 * N_PERIODS - 60) begin
      int w, g, n;
      real f;
      f = real'($urandom_range(1, 9)) / 10.0;
      #(real'(t) + f - $realtime);
      sig = 1'b1;
      n = t + 1;   // first sampling instant that sees the edge
      if (!exp_idx.exists(n / 8)) exp_idx[n / 8] = n % 8;
      w = 1 + int'($urandom_range(0, 12));
      #(w);
      sig = 1'b0;
      g = 1 + int'($urandom_range(0, 20));
      t = t + w + g;
    end
  end

  // monitor: just after each count-clock edge, the result of the period
  // that ended one period earlier is on the outputs
  initial begin
    @(posedge rst_n);
    for (int m = 8; m < N_PERIODS; m++) begin
      #(real'(8 * m) + 0.1 - $realtime);
      checks++;
      if (hit !== exp_idx.exists(m - 1)) begin
        failures++;
        $display("FAIL period %0d: hit=%0b expected %0b", m - 1, hit, exp_idx.exists(m - 1));
      end else if (hit) begin
        n_hits++;
        checks++;
        if (int'(hit_time) != exp_idx[m - 1]) begin
          failures++;
          $display("FAIL period %0d: hit_time=%0d expected %0d", m - 1, hit_time, exp_idx[m - 1]);
        end
      end
    end
    if (n_hits < 100) begin
      failures++;
      $display("FAIL too few edges seen: %0d", n_hits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(8 * N_PERIODS + 1000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
