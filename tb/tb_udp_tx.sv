`timescale 1ns / 1ps
// tb_udp_tx - self-checking test of the UDP framer.
//
// A queue plays the FIFOs (fall-through word, avail = queue size). Words
// arrive in bursts and trickles; the MAC side drops tx_ready at random. Each
// received frame is parsed byte by byte and checked: Ethernet addresses and
// type, IPv4 version, lengths, protocol and header checksum (the ones'
// complement sum over the header must be 0xFFFF), UDP ports and length, and
// the payload words, which must be the source words in order. A frame must
// hold MAX_WORDS words, or fewer only after the flush timeout; with tx_ready
// high the frame must take exactly 42 + 4n clocks.
module tb_udp_tx;
  localparam int MAXW = 8, FLUSH = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] avail;
  logic word_req;
  logic [31:0] word;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1'b1;
  logic [31:0] frames;

  int checks = 0, failures = 0;
  logic [31:0] src[$];     // words waiting
  logic [31:0] sent[$];    // words popped, in order
  logic [7:0]  fb[$];      // bytes of the frame being received
  int n_frames = 0, n_full = 0, n_flush = 0, n_stall = 0;
  int frame_cycles = 0, words_seen = 0;
  logic stalled_in_frame = 1'b0;

  always #4 clk = ~clk;

  assign avail = 16'(src.size());
  assign word  = (src.size() > 0) ? src[0] : 32'hDEAD_BEEF;

  udp_tx #(.MAX_WORDS(MAXW), .FLUSH_CYCLES(FLUSH)) dut (
    .clk(clk), .rst_n(rst_n), .avail(avail), .word_req(word_req), .word(word),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_last(tx_last), .tx_ready(tx_ready),
    .frames(frames));

  function automatic int be16(int i);
    return (int'(fb[i]) << 8) | int'(fb[i + 1]);
  endfunction

  task automatic check_frame();
    int n, sum;
    logic ok;
    n = (fb.size() - 42) / 4;
    ok = (fb.size() == 42 + 4 * n) && n >= 1 && n <= MAXW;
    for (int i = 0; i < 6; i++) ok &= (fb[i] == 8'hFF) && (fb[6 + i] == ((i == 5) ? 8'h01 : (i == 0) ? 8'h02 : 8'h00));
    ok &= be16(12) == 16'h0800 && fb[14] == 8'h45 && be16(16) == 28 + 4 * n && fb[23] == 8'h11;
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += be16(i);
    while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
    ok &= (sum == 16'hFFFF);
    ok &= be16(26) == 16'hC0A8 && be16(28) == 16'h010A && be16(30) == 16'hC0A8 && be16(32) == 16'h0164;
    ok &= be16(34) == 5000 && be16(36) == 5000 && be16(38) == 8 + 4 * n;
    for (int w = 0; w < n; w++) begin
      logic [31:0] v;
      v = {fb[42 + 4 * w], fb[43 + 4 * w], fb[44 + 4 * w], fb[45 + 4 * w]};
      if (sent.size() == 0 || v !== sent[0]) ok = 1'b0;
      else void'(sent.pop_front());
    end
    if (!stalled_in_frame) begin
      checks++;
      if (frame_cycles != fb.size()) begin
        failures++; $display("FAIL frame took %0d clocks for %0d bytes", frame_cycles, fb.size());
      end
    end
    if (n == MAXW) n_full++; else n_flush++;
    n_frames++;
    checks++;
    if (!ok) begin failures++; $display("FAIL frame %0d (%0d bytes) malformed", n_frames, fb.size()); end
  endtask

  // receiver and source bookkeeping
  always @(posedge clk) if (rst_n) begin
    if (tx_valid) frame_cycles++;
    if (tx_valid && !tx_ready) stalled_in_frame <= 1'b1;
    if (tx_valid && tx_ready) begin
      fb.push_back(tx_data);
      if (tx_last) begin
        check_frame();
        fb.delete();
        frame_cycles = 0;
        stalled_in_frame <= 1'b0;
      end
    end
    if (word_req) begin
      checks++;
      if (src.size() == 0) begin failures++; $display("FAIL pop from empty source"); end
      else sent.push_back(src.pop_front());
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 30000; i++) begin
      @(posedge clk); #1;
      // bursts in the first half of each 2000 clocks, single words later
      if ((i % 2000) < 300) begin
        if ($urandom_range(0, 9) < 4) src.push_back($urandom);
      end else if ($urandom_range(0, 299) == 0) src.push_back($urandom);
      tx_ready = (i > 10000 && i < 20000) ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (tx_valid && !tx_ready) n_stall++;
    end
    repeat (2000) @(posedge clk);
    checks++;
    if (src.size() != 0 || sent.size() != 0 || int'(frames) != n_frames) begin
      failures++; $display("FAIL left %0d unsent, %0d unchecked, frames %0d/%0d", src.size(),
                           sent.size(), frames, n_frames);
    end
    if (n_full == 0 || n_flush == 0 || n_stall == 0) begin
      failures++; $display("FAIL not exercised: full %0d flush %0d stall %0d", n_full, n_flush, n_stall);
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
