// write_scheduler: produces the bytes of each UDP frame, from the Ethernet header
// to the last payload byte, for the transmit scheduler.
//
// Runs on the 50 MHz network clock. When the audio register (800 bytes ready) or
// the video register (twelve coded blocks ready) signals a packet, it steps through
// the states of the design's transmit FSM: Ethernet header (14 bytes), IPv4 header
// (20 bytes), UDP header (8 bytes), metadata (audio/video tag, sequence number) and
// data. It hands one byte at a time to tx_scheduler, which adds the preamble, FCS and
// gap. The current byte sits on tx_data. tx_sof marks the first byte of a frame and
// tx_eof the last, and each tx_ack moves on to the next byte. A byte is needed only
// every four cycles, so the one-cycle reads of the data registers fit in between.
//
// Header contents: fixed local MAC and IP addresses and UDP ports (parameters),
// EtherType 0x0800, IPv4 version 4 / IHL 5, identification 0, don't-fragment, TTL 64,
// protocol 17, and a header checksum computed for each packet from its length. The
// UDP checksum is 0 (not used, as IPv4 allows). Video data is sent word by word,
// most significant byte first. The sequence byte of a video packet is the index of
// its superblock pair. An audio packet carries a running count of audio packets.
// Audio goes first when both registers are ready. The field order and sizes follow
// the design. The address values, the identification field, the tag values and the
// arbitration are this implementation's choices.
//
// Handshake with each source (four-phase, across clock domains): the *_ready level is
// synchronised here. After the last data byte the matching *_ack rises and stays high
// until the synchronised ready has fallen.
module write_scheduler
  import net_pkg::*;
#(
  parameter logic [47:0] SRC_MAC  = 48'h02_00_00_00_00_01,
  parameter logic [47:0] DST_MAC  = 48'h02_00_00_00_00_02,
  parameter logic [31:0] SRC_IP   = 32'hC0A8_0102,     // 192.168.1.2
  parameter logic [31:0] DST_IP   = 32'hC0A8_0101,     // 192.168.1.1
  parameter logic [15:0] SRC_PORT = 16'd5000,
  parameter logic [15:0] DST_PORT = 16'd5000,
  parameter int unsigned AUDIO_BYTES = 800,
  parameter int unsigned VIDEO_WORDS = 300
) (
  input  logic        clk,
  input  logic        rst,
  // sources (ready levels come from the 100 MHz domain)
  input  logic        audio_ready,
  output logic        audio_ack,
  output logic [9:0]  audio_rd_offset,
  input  logic [7:0]  audio_rd_data,
  input  logic        video_ready,
  output logic        video_ack,
  input  logic [$clog2(VIDEO_WORDS):0]   video_num_words,
  input  logic [7:0]  video_seq,
  output logic [$clog2(VIDEO_WORDS)-1:0] video_rd_addr,
  input  logic [31:0] video_rd_data,
  // to tx_scheduler
  output logic [7:0]  tx_data,
  output logic        tx_sof,
  output logic        tx_eof,
  input  logic        tx_ack,
  // status
  output logic [7:0]  audio_packets,
  output logic [7:0]  video_packets
);
  ws_state_t   state;
  logic [10:0] cnt;
  logic        is_video;
  logic [10:0] data_len;
  logic [7:0]  seq_q;
  logic        audio_ready_s, video_ready_s;

  sync_2ff u_sync_a (.clk, .rst, .d(audio_ready), .q(audio_ready_s));
  sync_2ff u_sync_v (.clk, .rst, .d(video_ready), .q(video_ready_s));

  // ---------------- header bytes ----------------
  logic [15:0] ip_total_len, udp_len, ip_csum;
  logic [19:0] csum_acc;
  always_comb begin
    udp_len      = 16'(UDP_HDR_BYTES + META_BYTES) + 16'(data_len);
    ip_total_len = 16'(IP_HDR_BYTES) + udp_len;
    csum_acc = 20'h04500 + 20'(ip_total_len) + 20'h00000 + 20'h04000
             + 20'({IP_TTL, IP_PROTO_UDP})
             + 20'(SRC_IP[31:16]) + 20'(SRC_IP[15:0]) + 20'(DST_IP[31:16]) + 20'(DST_IP[15:0]);
    csum_acc = 20'(csum_acc[15:0]) + 20'(csum_acc[19:16]);
    csum_acc = 20'(csum_acc[15:0]) + 20'(csum_acc[19:16]);
    ip_csum  = ~csum_acc[15:0];
  end

  function automatic logic [7:0] eth_byte(input logic [10:0] i);
    logic [111:0] h;
    h = {DST_MAC, SRC_MAC, ETHERTYPE_IPV4};
    return h[8*(13 - 32'(i)) +: 8];
  endfunction

  logic [159:0] ip_hdr;
  logic [63:0]  udp_hdr;
  assign ip_hdr  = {8'h45, 8'h00, ip_total_len, 16'h0000, 16'h4000, IP_TTL, IP_PROTO_UDP,
                    ip_csum, SRC_IP, DST_IP};
  assign udp_hdr = {SRC_PORT, DST_PORT, udp_len, 16'h0000};

  // ---------------- data path ----------------
  assign audio_rd_offset = cnt[9:0];
  assign video_rd_addr   = $bits(video_rd_addr)'(cnt >> 2);

  always_comb begin
    unique case (state)
      WS_ETH_HDR: tx_data = eth_byte(cnt);
      WS_IP_HDR:  tx_data = ip_hdr[8*(19 - 32'(cnt)) +: 8];
      WS_UDP_HDR: tx_data = udp_hdr[8*(7 - 32'(cnt)) +: 8];
      WS_META:    tx_data = (cnt == 11'd0) ? (is_video ? TAG_VIDEO : TAG_AUDIO) : seq_q;
      WS_DATA:    tx_data = is_video ? video_rd_data[8*(3 - 32'(cnt[1:0])) +: 8] : audio_rd_data;
      default:    tx_data = 8'h00;
    endcase
  end

  assign tx_sof = (state == WS_ETH_HDR) && (cnt == 11'd0);
  assign tx_eof = (state == WS_DATA) && (cnt == data_len - 11'd1);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= WS_IDLE; cnt <= '0; is_video <= 1'b0; data_len <= '0; seq_q <= '0;
      audio_ack <= 1'b0; video_ack <= 1'b0; audio_packets <= '0; video_packets <= '0;
    end else begin
      unique case (state)
        WS_IDLE: begin
          cnt <= '0;
          if (audio_ready_s && !audio_ack) begin
            is_video <= 1'b0;
            data_len <= 11'(AUDIO_BYTES);
            seq_q    <= audio_packets;
            state    <= WS_ETH_HDR;
          end else if (video_ready_s && !video_ack) begin
            is_video <= 1'b1;
            data_len <= 11'(video_num_words) << 2;
            seq_q    <= video_seq;
            state    <= WS_ETH_HDR;
          end
        end
        WS_ETH_HDR: if (tx_ack) begin
          cnt <= cnt + 11'd1;
          if (cnt == 11'(ETH_HDR_BYTES - 1)) begin cnt <= '0; state <= WS_IP_HDR; end
        end
        WS_IP_HDR: if (tx_ack) begin
          cnt <= cnt + 11'd1;
          if (cnt == 11'(IP_HDR_BYTES - 1)) begin cnt <= '0; state <= WS_UDP_HDR; end
        end
        WS_UDP_HDR: if (tx_ack) begin
          cnt <= cnt + 11'd1;
          if (cnt == 11'(UDP_HDR_BYTES - 1)) begin cnt <= '0; state <= WS_META; end
        end
        WS_META: if (tx_ack) begin
          cnt <= cnt + 11'd1;
          if (cnt == 11'(META_BYTES - 1)) begin cnt <= '0; state <= WS_DATA; end
        end
        WS_DATA: if (tx_ack) begin
          cnt <= cnt + 11'd1;
          if (cnt == data_len - 11'd1) begin
            cnt   <= '0;
            state <= WS_WAIT_REQ_LOW;
            if (is_video) begin video_ack <= 1'b1; video_packets <= video_packets + 8'd1; end
            else          begin audio_ack <= 1'b1; audio_packets <= audio_packets + 8'd1; end
          end
        end
        WS_WAIT_REQ_LOW: begin
          if (is_video ? !video_ready_s : !audio_ready_s) begin
            video_ack <= 1'b0;
            audio_ack <= 1'b0;
            state     <= WS_IDLE;
          end
        end
        default: state <= WS_IDLE;
      endcase
    end
  end

  a_len_ok: assert property (@(posedge clk) disable iff (rst)
    (state != WS_IDLE) |-> (data_len != 0 && 32'(data_len) <= MAX_DATA_BYTES));
endmodule
