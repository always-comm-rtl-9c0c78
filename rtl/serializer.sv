// serializer: removes the unused bits between variable-length words and emits the
// bit stream in 32-bit chunks.
//
// Every valid aligned word (up to 27 meaningful bits, left aligned) is appended to a
// 64-bit left-aligned buffer. Whenever the buffer holds 32 bits or more, its top 32
// bits are emitted (first bit of the stream in bit 31) and shifted out. At most 27
// bits come in per cycle and 32 go out, so the buffer never holds more than 58 bits.
// When the word marked end_of_block has been taken, the remaining bits are emitted
// as one last chunk, padded with zeros at the bottom, and block_done pulses with
// that chunk. So every 8x8 block starts on a 32-bit boundary. Flushing at each block
// end, rather than once per packet, is this implementation's reading of the
// design's end_of_block signal.
//
// Timing: a chunk appears one cycle after the input that completes it. A flush takes
// one extra cycle when a full chunk is emitted in the same cycle as the end_of_block;
// a word arriving during that cycle starts the next block's buffer, so the input
// never has to stall.
module serializer
  import jpeg_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [ALIGN_W-1:0] in_aligned_value,
  input  logic [4:0]         in_len,
  input  logic               in_end_of_block,
  output logic               out_valid,
  output logic [31:0]        out_word,
  output logic               block_done
);
  logic [63:0] buf_q;
  logic [6:0]  cnt_q;
  logic        flush_q;      // a block ended with a full chunk; its tail goes out now
  logic [63:0] base, merged;
  logic [6:0]  base_cnt, total;
  logic        in_eob;

  // While a pending tail is being emitted, the incoming word starts a fresh buffer.
  always_comb begin
    base     = flush_q ? '0 : buf_q;
    base_cnt = flush_q ? '0 : cnt_q;
    merged   = base;
    total    = base_cnt;
    if (in_valid) begin
      merged = base | ({in_aligned_value, {(64 - ALIGN_W){1'b0}}} >> base_cnt);
      total  = base_cnt + 7'(in_len);
    end
    in_eob = in_valid & in_end_of_block;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      buf_q <= '0; cnt_q <= '0; flush_q <= 1'b0;
      out_valid <= 1'b0; out_word <= '0; block_done <= 1'b0;
    end else begin
      out_valid  <= 1'b0;
      block_done <= 1'b0;
      if (flush_q) begin
        // tail of the previous block (at most 26 bits, never empty)
        out_valid  <= 1'b1;
        out_word   <= buf_q[63:32];
        block_done <= 1'b1;
        buf_q      <= merged;         // total <= 27 here, nothing else to emit
        cnt_q      <= total;
        flush_q    <= in_eob;
      end else if (total >= 7'd32) begin
        out_valid <= 1'b1;
        out_word  <= merged[63:32];
        buf_q     <= merged << 32;
        cnt_q     <= total - 7'd32;
        if (in_eob && total == 7'd32) begin
          block_done <= 1'b1;          // block ends exactly on a chunk boundary
          buf_q      <= '0;
          cnt_q      <= '0;
        end else begin
          flush_q <= in_eob;
        end
      end else if (in_eob) begin
        out_valid  <= 1'b1;
        out_word   <= merged[63:32];
        block_done <= 1'b1;
        buf_q      <= '0;
        cnt_q      <= '0;
      end else begin
        buf_q <= merged;
        cnt_q <= total;
      end
    end
  end
  // The buffer can never overflow: at most 31 bits stay behind and 27 come in.
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) total <= 7'd58);
endmodule
