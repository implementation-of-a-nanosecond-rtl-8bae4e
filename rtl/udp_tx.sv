`timescale 1ns / 1ps
// udp_tx - packs 32-bit hit words into UDP/IPv4 datagrams inside Ethernet II
// frames and hands them to the Ethernet MAC one byte per clock.
//
// A datagram starts when MAX_WORDS words are waiting, or when fewer are
// waiting and the framer has been idle with words waiting for FLUSH_CYCLES
// clocks, so that the last hits of a quiet period also reach the receiver.
// The number of words n is fixed at that moment (the sources only grow while
// the framer drains them). The frame is a 42-byte header (destination and
// source MAC, EtherType 0x0800, 20-byte IPv4 header with its checksum, 8-byte
// UDP header with checksum 0) followed by the n words, most significant byte
// first. The next word is popped on the clock that sends the last byte of the
// header or of the previous word, so bytes flow without gaps while tx_ready
// is high. The MAC adds preamble, padding to the minimum frame and the FCS.
//
// Interface: avail = words waiting; word_req pops one word, which must be on
// `word` in the same clock (fall-through). Byte stream tx_data/tx_valid/
// tx_last with tx_ready back-pressure; tx_data and tx_last hold while
// tx_valid is high and tx_ready is low. frames counts sent frames.
// The paper names UDP as the link to the acquisition computer; all addresses,
// ports, sizes and the framing rules here are this design's choices.
module udp_tx #(
  parameter int unsigned MAX_WORDS    = 64,
  parameter int unsigned FLUSH_CYCLES = 1024,
  parameter logic [47:0] SRC_MAC  = 48'h02_00_00_00_00_01,
  parameter logic [47:0] DST_MAC  = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [31:0] SRC_IP   = {8'd192, 8'd168, 8'd1, 8'd10},
  parameter logic [31:0] DST_IP   = {8'd192, 8'd168, 8'd1, 8'd100},
  parameter logic [15:0] SRC_PORT = 16'd5000,
  parameter logic [15:0] DST_PORT = 16'd5000,
  localparam int unsigned HDR_BYTES = 42
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] avail,
  output logic        word_req,
  input  logic [31:0] word,
  output logic [7:0]  tx_data,
  output logic        tx_valid,
  output logic        tx_last,
  input  logic        tx_ready,
  output logic [31:0] frames
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY} state_t;

  state_t       state;
  logic [15:0]  n_words;     // words in the current datagram
  logic [15:0]  words_left;  // words not yet fully sent, including word_q
  logic [5:0]   hdr_idx;
  logic [1:0]   byte_idx;
  logic [31:0]  word_q;
  logic [15:0]  ip_id;
  logic [31:0]  wait_cnt;

  // ---- header bytes, from n_words and ip_id -------------------------------
  logic [7:0]  hdr [HDR_BYTES];
  logic [15:0] ip_len, udp_len, ip_csum;
  logic [31:0] csum_acc;

  always_comb begin
    udp_len = 16'd8 + (n_words << 2);
    ip_len  = 16'd20 + udp_len;
    // IPv4 header checksum: ones' complement of the ones' complement sum of
    // the header's 16-bit words, taken with the checksum field zero.
    csum_acc = 32'h4500 + 32'(ip_len) + 32'(ip_id) + 32'h4000 + 32'h4011
             + 32'(SRC_IP[31:16]) + 32'(SRC_IP[15:0])
             + 32'(DST_IP[31:16]) + 32'(DST_IP[15:0]);
    csum_acc = 32'(csum_acc[15:0]) + 32'(csum_acc[31:16]);
    csum_acc = 32'(csum_acc[15:0]) + 32'(csum_acc[31:16]);
    ip_csum  = ~csum_acc[15:0];

    for (int i = 0; i < 6; i++) begin
      hdr[i]     = DST_MAC[47 - 8*i -: 8];
      hdr[6 + i] = SRC_MAC[47 - 8*i -: 8];
    end
    hdr[12] = 8'h08;  hdr[13] = 8'h00;          // EtherType IPv4
    hdr[14] = 8'h45;  hdr[15] = 8'h00;          // version 4, IHL 5, DSCP 0
    hdr[16] = ip_len[15:8];  hdr[17] = ip_len[7:0];
    hdr[18] = ip_id[15:8];   hdr[19] = ip_id[7:0];
    hdr[20] = 8'h40;  hdr[21] = 8'h00;          // don't fragment
    hdr[22] = 8'h40;  hdr[23] = 8'h11;          // TTL 64, protocol UDP
    hdr[24] = ip_csum[15:8]; hdr[25] = ip_csum[7:0];
    for (int i = 0; i < 4; i++) begin
      hdr[26 + i] = SRC_IP[31 - 8*i -: 8];
      hdr[30 + i] = DST_IP[31 - 8*i -: 8];
    end
    hdr[34] = SRC_PORT[15:8]; hdr[35] = SRC_PORT[7:0];
    hdr[36] = DST_PORT[15:8]; hdr[37] = DST_PORT[7:0];
    hdr[38] = udp_len[15:8];  hdr[39] = udp_len[7:0];
    hdr[40] = 8'h00;          hdr[41] = 8'h00;  // UDP checksum not used
  end

  // ---- frame sequencing ---------------------------------------------------
  logic xfer, start_pkt, hdr_done, word_done;

  assign xfer      = tx_valid && tx_ready;
  assign start_pkt = (state == S_IDLE) && (avail != 0) &&
                     ((avail >= 16'(MAX_WORDS)) || (wait_cnt >= FLUSH_CYCLES));
  assign hdr_done  = xfer && (state == S_HDR) && (hdr_idx == 6'(HDR_BYTES - 1));
  assign word_done = xfer && (state == S_PAY) && (byte_idx == 2'd3);
  assign word_req  = hdr_done || (word_done && words_left > 16'd1);

  always_comb begin
    tx_valid = (state != S_IDLE);
    tx_data  = (state == S_HDR) ? hdr[hdr_idx] : word_q[31 - 8*byte_idx -: 8];
    tx_last  = (state == S_PAY) && (byte_idx == 2'd3) && (words_left == 16'd1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      n_words    <= '0;
      words_left <= '0;
      hdr_idx    <= '0;
      byte_idx   <= '0;
      word_q     <= '0;
      ip_id      <= '0;
      wait_cnt   <= '0;
      frames     <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (avail == 0)  wait_cnt <= '0;
          else if (wait_cnt < FLUSH_CYCLES) wait_cnt <= wait_cnt + 1;
          if (start_pkt) begin
            n_words    <= (avail > 16'(MAX_WORDS)) ? 16'(MAX_WORDS) : avail;
            words_left <= (avail > 16'(MAX_WORDS)) ? 16'(MAX_WORDS) : avail;
            hdr_idx    <= '0;
            state      <= S_HDR;
          end
        end
        S_HDR: if (xfer) begin
          hdr_idx <= hdr_idx + 1'b1;
          if (hdr_done) begin
            word_q   <= word;
            byte_idx <= '0;
            state    <= S_PAY;
          end
        end
        S_PAY: if (xfer) begin
          byte_idx <= byte_idx + 1'b1;
          if (word_done) begin
            words_left <= words_left - 1'b1;
            if (words_left == 16'd1) begin
              state    <= S_IDLE;
              wait_cnt <= '0;
              ip_id    <= ip_id + 1'b1;
              frames   <= frames + 1'b1;
            end else begin
              word_q <= word;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Byte-stream rule: an offered byte stays put until the MAC takes it.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            tx_valid && !tx_ready |=> tx_valid && $stable(tx_data) && $stable(tx_last))
    else $error("udp_tx: byte changed while stalled");

endmodule
