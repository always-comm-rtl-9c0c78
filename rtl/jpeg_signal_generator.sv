// jpeg_signal_generator: walks the frame buffer two superblocks at a time and feeds
// the codec one 8x8 block at a time.
//
// A pulse on next_packet starts one pass over the next pair of 16x16 superblocks.
// Pairs are counted in raster order of superblocks. With 320x180 frames padded to
// 192 rows, a frame has 20 x 12 superblocks and 120 pairs, and the pair index wraps
// from 119 to 0. Each superblock yields six blocks: Y top-left, Y top-right, Y
// bottom-left, Y bottom-right, then Cr, then Cb.
// For a Y block the generator reads its 64 pixels in raster order. For a Cr or Cb
// block it reads, for each of the 64 subsampled positions, the four pixels of the 2x2
// group (top-left, top-right, bottom-left, bottom-right), and the converter averages
// them. Rows past the bottom of the image are padding: they are sent as zero
// pixels and nothing is read for them.
// After the reads of a block the generator waits for block_done from the end of the
// codec before it starts the next block, so only one block is in flight. This follows
// the design: "we traverse the next block for DCT only after the previous DCT is fully
// done being JPEG compressed". After the twelfth block it goes idle until the next
// next_packet. position holds the index of the pair being coded.
//
// Interface: addr_b/bram_pixel_in is a synchronous read port with one cycle of
// latency. bram_pixel/valid_pixel/channel_sel carry the pixels on to the converter,
// one cycle after the address. busy is high from next_packet until the twelfth
// block_done.
module jpeg_signal_generator
  import jpeg_pkg::*;
#(
  parameter int unsigned WIDTH  = IMG_W,
  parameter int unsigned HEIGHT = IMG_H,
  parameter int unsigned ADDR_W = $clog2(WIDTH * HEIGHT)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              next_packet,
  input  logic              block_done,
  output logic [ADDR_W-1:0] addr_b,
  input  logic [15:0]       bram_pixel_in,
  output logic [15:0]       bram_pixel,
  output logic              valid_pixel,
  output chan_t             channel_sel,
  output logic [7:0]        position,
  output logic              busy
);
  localparam int unsigned SB_COLS = WIDTH / SB_SIZE;
  localparam int unsigned SB_ROWS = (HEIGHT + SB_SIZE - 1) / SB_SIZE;
  localparam int unsigned PAIRS   = SB_COLS * SB_ROWS / SB_PER_PACKET;

  typedef enum logic [1:0] {G_IDLE, G_READ, G_WAIT} gstate_t;
  gstate_t state;

  logic [3:0] blk;        // 0..11 within the packet
  logic [7:0] rd_cnt;     // read counter within the block
  logic       first_block_pending;

  // geometry of the current block
  logic [2:0]  blk_in_sb;
  logic        sb_in_pair;
  logic [15:0] sb_index, sb_row, sb_col;
  logic [15:0] px_y, px_x;
  chan_t       cur_chan;
  logic        last_read;

  always_comb begin
    sb_in_pair = (blk >= 4'd6);
    blk_in_sb  = 3'(sb_in_pair ? blk - 4'd6 : blk);
    sb_index   = 16'(position) * 16'(SB_PER_PACKET) + 16'(sb_in_pair);
    sb_row     = sb_index / 16'(SB_COLS);
    sb_col     = sb_index % 16'(SB_COLS);
    cur_chan   = (blk_in_sb < 3'd4) ? CH_Y : ((blk_in_sb == 3'd4) ? CH_CR : CH_CB);
    if (cur_chan == CH_Y) begin
      // rd_cnt[5:3] = row, rd_cnt[2:0] = column inside the 8x8 block
      px_y = sb_row * 16'(SB_SIZE) + 16'({blk_in_sb[1], 3'b000}) + 16'(rd_cnt[5:3]);
      px_x = sb_col * 16'(SB_SIZE) + 16'({blk_in_sb[0], 3'b000}) + 16'(rd_cnt[2:0]);
      last_read = (rd_cnt == 8'd63);
    end else begin
      // rd_cnt[7:5] = row, rd_cnt[4:2] = column, rd_cnt[1] = dy, rd_cnt[0] = dx
      px_y = sb_row * 16'(SB_SIZE) + 16'({rd_cnt[7:5], rd_cnt[1]});
      px_x = sb_col * 16'(SB_SIZE) + 16'({rd_cnt[4:2], rd_cnt[0]});
      last_read = (rd_cnt == 8'd255);
    end
    addr_b = ADDR_W'(32'(px_y) * WIDTH + 32'(px_x));
  end

  logic  rd_valid_q, pad_q;
  chan_t rd_chan_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= G_IDLE; blk <= '0; rd_cnt <= '0; position <= '0;
      first_block_pending <= 1'b1;
      rd_valid_q <= 1'b0; pad_q <= 1'b0; rd_chan_q <= CH_Y;
    end else begin
      rd_valid_q <= 1'b0;
      unique case (state)
        G_IDLE: if (next_packet) begin
          if (!first_block_pending)
            position <= (position == 8'(PAIRS - 1)) ? 8'd0 : position + 8'd1;
          first_block_pending <= 1'b0;
          blk    <= '0;
          rd_cnt <= '0;
          state  <= G_READ;
        end
        G_READ: begin
          rd_valid_q <= 1'b1;
          pad_q      <= (px_y >= 16'(HEIGHT));
          rd_chan_q  <= cur_chan;
          rd_cnt     <= rd_cnt + 8'd1;
          if (last_read) state <= G_WAIT;
        end
        G_WAIT: if (block_done) begin
          rd_cnt <= '0;
          if (blk == 4'(BLOCKS_PER_PACKET - 1)) begin
            state <= G_IDLE;
          end else begin
            blk   <= blk + 4'd1;
            state <= G_READ;
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  assign valid_pixel = rd_valid_q;
  assign bram_pixel  = pad_q ? 16'h0000 : bram_pixel_in;
  assign channel_sel = rd_chan_q;
  assign busy        = (state != G_IDLE);
endmodule
