`timescale 1ns / 1ps
// rr_merge - round-robin selection of one word from N first-word-fall-through
// FIFOs.
//
// word shows the head word of the next non-empty FIFO at or after the
// round-robin pointer; any is high when some FIFO holds a word. A pulse on
// req pops that FIFO (pop is one-hot) and moves the pointer past it, so the
// channels share the output link fairly. Purely combinational selection,
// pointer updated on clk.
//
// The paper shows one FIFO per channel feeding a single UDP sender; how the
// channels are merged is this design's choice.
module rr_merge #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 32,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     empty,
  input  logic [W-1:0]     data [N],
  input  logic             req,
  output logic             any,
  output logic [W-1:0]     word,
  output logic [N-1:0]     pop
);

  logic [IW-1:0] ptr;
  logic [IW-1:0] sel;

  always_comb begin
    any = 1'b0;
    sel = ptr;
    for (int k = N - 1; k >= 0; k--) begin
      logic [IW-1:0] c;
      c = IW'((int'(ptr) + k) % N);
      if (!empty[c]) begin
        any = 1'b1;
        sel = c;
      end
    end
    word = data[sel];
    pop  = '0;
    if (req && any) pop[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (req && any) ptr <= (int'(sel) == N - 1) ? '0 : sel + 1'b1;
  end

endmodule
