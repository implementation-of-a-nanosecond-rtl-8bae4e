`timescale 1ns / 1ps
// apd_tdc_top - FPGA logic of the four-channel APD readout: multiphase TDC,
// per-channel hit FIFOs and a UDP framer towards the acquisition computer.
//
// The RF timing signal from the storage ring is the common start. One
// start-edge detector, shared by the channels, finds its rising edge to 1 ns.
// Each of the NCH channels times the rising edges of its discriminator output
// (stop) against the latest start: fine times from four-phase sampling at
// 250 MHz, coarse time from a 125 MHz counter reset by the start. Every stop
// edge, not only the first after a start, becomes a 32-bit hit word (channel,
// start number, arrival time in 1 ns bins) in the channel's FIFO. A
// round-robin merge feeds the words to the UDP framer, whose byte stream goes
// to the Ethernet MAC and optical transceiver (outside this module).
//
// Clocks come from the FPGA PLL: clk_q[3:0] the 250 MHz quadrature phases
// (0, 90, 180, 270 degrees), clk the 125 MHz count/working clock whose rising
// edges coincide with rising edges of clk_q[0]. rst_n is active low,
// synchronous to clk. start_sig and stop_sig are asynchronous logic inputs
// from the timing receiver and the discriminators. drops reports the hits
// each channel lost to a full FIFO and fifo_full
// which FIFOs are full now.
// The blocks and their clocks follow the paper's channel diagram; the FIFO
// sizes, merge and UDP framing are this design's choices.
module apd_tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned NCH          = 4,
  parameter int unsigned FIFO_DEPTH   = 1024,
  parameter int unsigned MAX_WORDS    = 64,
  parameter int unsigned FLUSH_CYCLES = 1024
) (
  input  logic [NPHASE-1:0] clk_q,
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_sig,
  input  logic [NCH-1:0]    stop_sig,
  output logic [7:0]        tx_data,
  output logic              tx_valid,
  output logic              tx_last,
  input  logic              tx_ready,
  output logic [31:0]       frames,
  output logic [NCH-1:0]    fifo_full,
  output logic [15:0]       drops [NCH]
);

  localparam int unsigned AW = $clog2(FIFO_DEPTH);

  // ---- shared start-edge detector -----------------------------------------
  logic              start_hit;
  logic [FINE_W-1:0] start_time;

  mp_edge_detector u_start_edge (
    .clk_q    (clk_q),
    .clk_cnt  (clk),
    .rst_n    (rst_n),
    .sig      (start_sig),
    .hit      (start_hit),
    .hit_time (start_time)
  );

  // ---- channels and their FIFOs -------------------------------------------
  logic [NCH-1:0]    ch_valid;
  hit_word_t         ch_word  [NCH];
  logic [WORD_W-1:0] fifo_data[NCH];
  logic [NCH-1:0]    fifo_empty, fifo_pop;
  logic [AW:0]       fifo_count[NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    tdc_channel #(.CH(CH_W'(c))) u_ch (
      .clk_q      (clk_q),
      .clk        (clk),
      .rst_n      (rst_n),
      .stop_sig   (stop_sig[c]),
      .start_hit  (start_hit),
      .start_time (start_time),
      .out_valid  (ch_valid[c]),
      .out_word   (ch_word[c])
    );

    hit_fifo #(.W(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (ch_valid[c]),
      .wr_data (ch_word[c]),
      .rd_en   (fifo_pop[c]),
      .rd_data (fifo_data[c]),
      .empty   (fifo_empty[c]),
      .full    (fifo_full[c]),
      .count   (fifo_count[c]),
      .drops   (drops[c])
    );
  end

  // ---- merge and UDP framer -----------------------------------------------
  logic [15:0]       avail;
  logic              word_req, any_word;
  logic [WORD_W-1:0] word;

  always_comb begin
    avail = '0;
    for (int c = 0; c < NCH; c++) avail += 16'(fifo_count[c]);
  end

  rr_merge #(.N(NCH), .W(WORD_W)) u_merge (
    .clk   (clk),
    .rst_n (rst_n),
    .empty (fifo_empty),
    .data  (fifo_data),
    .req   (word_req),
    .any   (any_word),
    .word  (word),
    .pop   (fifo_pop)
  );

  udp_tx #(.MAX_WORDS(MAX_WORDS), .FLUSH_CYCLES(FLUSH_CYCLES)) u_udp (
    .clk      (clk),
    .rst_n    (rst_n),
    .avail    (avail),
    .word_req (word_req),
    .word     (word),
    .tx_data  (tx_data),
    .tx_valid (tx_valid),
    .tx_last  (tx_last),
    .tx_ready (tx_ready),
    .frames   (frames)
  );

  // The framer only asks for a word that the FIFOs hold.
  a_word_there : assert property (@(posedge clk) disable iff (!rst_n) word_req |-> any_word)
    else $error("apd_tdc_top: word requested from empty FIFOs");

endmodule
