// audio_buffer: the audio register (1024 x 8 bits) between the microphone ADC and
// the network.
//
// Samples from the SPI controller are written in a ring, one byte per sample_valid
// (8 kHz). When PACKET_BYTES (800) unsent bytes have gathered, which takes 0.1 s,
// audio_ready rises and base marks the first byte of the packet. The network
// domain reads byte i of the packet at rd_offset = i (one cycle of latency, in
// rd_clk). The design's register holds 1024 bytes but sends at 800. This
// implementation uses the 224 spare bytes so that sampling can continue while a
// packet is being sent. A sample that arrives with the ring full is dropped and
// counted in overflow_count.
//
// Handshake with the network domain as in video_accumulator: sent_ack rises after the
// packet has been sent. The buffer then advances base by 800, lowers audio_ready, and
// waits for sent_ack to fall before it raises audio_ready again.
module audio_buffer #(
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned PACKET_BYTES = 800,
  parameter int unsigned AW           = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          sample_valid,
  input  logic [7:0]    sample,
  output logic          audio_ready,
  output logic [15:0]   overflow_count,
  input  logic          sent_ack,
  input  logic          rd_clk,
  input  logic [AW-1:0] rd_offset,
  output logic [7:0]    rd_data
);
  logic [7:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, base;
  logic [AW:0]   count;
  logic          ack_s, ack_s_q, wait_ack_low;
  logic          take, release_pkt;

  sync_2ff u_sync (.clk, .rst, .d(sent_ack), .q(ack_s));

  assign take        = sample_valid && (32'(count) < DEPTH);
  assign release_pkt = audio_ready && ack_s && !ack_s_q;

  always_ff @(posedge clk)
    if (take) mem[wr_ptr] <= sample;

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0; base <= '0; count <= '0; audio_ready <= 1'b0;
      ack_s_q <= 1'b0; wait_ack_low <= 1'b0; overflow_count <= '0;
    end else begin
      ack_s_q <= ack_s;
      if (take) wr_ptr <= AW'((32'(wr_ptr) + 1) % DEPTH);
      if (sample_valid && !take) overflow_count <= overflow_count + 16'd1;
      count <= count + (AW+1)'(take) - (release_pkt ? (AW+1)'(PACKET_BYTES) : '0);
      if (release_pkt) begin
        audio_ready  <= 1'b0;
        base         <= AW'((32'(base) + PACKET_BYTES) % DEPTH);
        wait_ack_low <= 1'b1;
      end else if (wait_ack_low) begin
        if (!ack_s) wait_ack_low <= 1'b0;
      end else if (32'(count) >= PACKET_BYTES) begin
        audio_ready <= 1'b1;
      end
    end
  end

  always_ff @(posedge rd_clk)
    rd_data <= mem[AW'((32'(base) + 32'(rd_offset)) % DEPTH)];
endmodule
