// video_accumulator: the video register (300 x 32 bits) between the codec and the
// network, with the packet handshake on both sides.
//
// Codec side (clk, 100 MHz): each bitstream word is written at the next free index
// and each valid_block is counted. When BLOCKS_PER_PACKET (12) blocks, two
// superblocks, have been coded, video_ready rises and num_words and seq hold the
// packet's length and position. Words past the 300th are dropped and counted in
// overflow_count (the design sizes the register for the usual case, not the worst
// case). After reset, and after every packet the network has sent, next_packet
// pulses for one cycle to restart the codec.
//
// Network side (rd_clk, 50 MHz): rd_addr/rd_data is a synchronous read port with one
// cycle of latency. Four-phase handshake: the scheduler raises sent_ack after the last
// data byte. The accumulator sees it through a synchroniser, drops video_ready, clears
// the register and pulses next_packet. The scheduler then lowers sent_ack. A packet
// that completes while the synchronised sent_ack is still high waits (pkt_done) and
// video_ready rises only once sent_ack is seen low. The register contents,
// num_words and seq stay still while video_ready is high, so the network domain can
// read them without further synchronisation.
module video_accumulator
  import jpeg_pkg::*;
#(
  parameter int unsigned WORDS  = 300,
  parameter int unsigned BLOCKS = BLOCKS_PER_PACKET,
  parameter int unsigned AW     = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [31:0]   bitstream,
  input  logic          bitstream_valid,
  input  logic          valid_block,
  input  logic [7:0]    position,
  output logic          next_packet,
  output logic          video_ready,
  output logic [AW:0]   num_words,
  output logic [7:0]    seq,
  output logic [15:0]   overflow_count,
  input  logic          sent_ack,       // from the network domain
  input  logic          rd_clk,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  logic [31:0] mem [WORDS];
  logic [3:0]  blocks;
  logic        ack_s, ack_s_q, started;
  logic        pkt_done;       // twelve blocks in, waiting for the old ack to fall
  logic        accepting;

  assign accepting = !video_ready && !pkt_done;

  sync_2ff u_sync (.clk, .rst, .d(sent_ack), .q(ack_s));

  always_ff @(posedge clk) begin
    if (bitstream_valid && accepting && (32'(num_words) < WORDS))
      mem[AW'(num_words)] <= bitstream;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      blocks <= '0; num_words <= '0; seq <= '0; video_ready <= 1'b0;
      next_packet <= 1'b0; overflow_count <= '0; ack_s_q <= 1'b0; started <= 1'b0;
      pkt_done <= 1'b0;
    end else begin
      ack_s_q     <= ack_s;
      next_packet <= 1'b0;
      if (!started) begin
        started     <= 1'b1;
        next_packet <= 1'b1;
      end
      if (bitstream_valid && accepting) begin
        if (32'(num_words) < WORDS) num_words <= num_words + 1'b1;
        else                        overflow_count <= overflow_count + 16'd1;
      end
      if (valid_block && accepting) begin
        if (blocks == 4'(BLOCKS - 1)) begin
          blocks <= '0;
          seq    <= position;
        end else begin
          blocks <= blocks + 4'd1;
        end
      end
      // raise ready once the last block of the packet is in and the previous ack is gone
      if (accepting && valid_block && blocks == 4'(BLOCKS - 1))
        pkt_done <= 1'b1;
      if (pkt_done && !ack_s) begin
        pkt_done    <= 1'b0;
        video_ready <= 1'b1;
      end
      if (video_ready && ack_s && !ack_s_q) begin
        video_ready <= 1'b0;
        num_words   <= '0;
        next_packet <= 1'b1;
      end
    end
  end

  always_ff @(posedge rd_clk)
    rd_data <= mem[rd_addr];

  // The codec only runs after next_packet, so no word may arrive while a packet waits.
  a_no_word_when_full: assert property (@(posedge clk) disable iff (rst)
    bitstream_valid |-> accepting);
endmodule
