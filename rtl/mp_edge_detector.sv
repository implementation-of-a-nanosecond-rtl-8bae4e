`timescale 1ns / 1ps
// mp_edge_detector - multiphase rising-edge detector with 1 ns bins.
//
// The asynchronous input is sampled by four flip-flop rows, row p clocked by
// the 250 MHz quadrature phase p (0, 90, 180, 270 degrees, i.e. 0, 1, 2, 3 ns
// apart). Each row is two flip-flops long, both on the row's phase, so at the
// rising edge of the 125 MHz count clock (aligned with a 0-degree edge) the
// eight flip-flops hold the input at the eight 1 ns instants of the count
// period that just ended: second flip-flops = instants 0..3 ns, first
// flip-flops = 4..7 ns. The sample-and-decode stage, on the count clock,
// looks for the first 0->1 transition among those eight samples (the sample
// before instant 0 is the last one of the previous period) and reports its
// index as HIT_TIME[2:0]; an edge between instants i-1 and i gives i.
//
// Interface: clk_q[3:0] quadrature clocks, clk_cnt count clock, rst_n active
// low (synchronous to clk_cnt), sig the signal. hit is a one-cycle pulse in
// the clk_cnt domain, valid together with hit_time. Both are registered on
// the count-clock edge that closes the period holding the edge, so they are
// valid during the following period.
//
// Follows the paper: four phases, two flip-flops per phase, decode to 3 bits,
// 1 ns bins, one result per 8 ns. Own choices: only the first rising edge of
// a period is reported; the sample flip-flops have no reset. The same module
// serves as the stop-edge detector of each channel and as the shared
// start-edge detector.
module mp_edge_detector
  import tdc_pkg::*;
(
  input  logic [NPHASE-1:0] clk_q,
  input  logic              clk_cnt,
  input  logic              rst_n,
  input  logic              sig,
  output logic              hit,
  output logic [FINE_W-1:0] hit_time
);

  logic [NPHASE-1:0] ff1;  // first flip-flop of each row: instants 4..7 ns
  logic [NPHASE-1:0] ff2;  // second flip-flop of each row: instants 0..3 ns

  for (genvar p = 0; p < NPHASE; p++) begin : g_row
    logic s1, s2;
    always_ff @(posedge clk_q[p]) begin
      s1 <= sig;
      s2 <= s1;
    end
    assign ff1[p] = s1;
    assign ff2[p] = s2;
  end

  // Sample & decode on the count clock.
  logic [NSAMPLE-1:0] samples;
  logic               last_q;    // sample at instant 7 of the previous period
  logic               found;
  logic [FINE_W-1:0]  idx;

  assign samples = {ff1, ff2};   // bit i = input at instant i ns

  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int i = NSAMPLE - 1; i >= 0; i--) begin
      if (samples[i] && !((i == 0) ? last_q : samples[(i == 0) ? 0 : i - 1])) begin
        found = 1'b1;
        idx   = FINE_W'(i);
      end
    end
  end

  always_ff @(posedge clk_cnt) begin
    if (!rst_n) begin
      last_q   <= 1'b1;   // a signal already high at reset is not an edge
      hit      <= 1'b0;
      hit_time <= '0;
    end else begin
      last_q   <= samples[NSAMPLE-1];
      hit      <= found;
      hit_time <= idx;
    end
  end

endmodule
