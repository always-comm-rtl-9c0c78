// mjpeg_codec: the M-JPEG encoding chain from frame-buffer reads to 32-bit words.
//
// jpeg_signal_generator -> ycrcb_converter -> dct_2d -> quantizer -> zigzag ->
// entropy_coder -> data_aligner -> serializer. One pulse on next_packet codes the
// next pair of superblocks (twelve 8x8 blocks). The blocks are coded one after the
// other: the generator starts a block only after the serializer has flushed the
// previous one (block_done, called valid_block in the design's block diagram).
// bitstream/bitstream_valid carry the coded words, every block starting on a
// word boundary. valid_block pulses once per finished block. position is the
// index of the superblock pair being coded.
//
// Timing per block, from the first read to valid_block: 64 reads (256 for Cr/Cb),
// 2 converter cycles, 64 + 28 + 64 DCT cycles, 1 quantizer cycle, 64 zigzag cycles,
// then a few cycles of coding and flushing. That is about 290 cycles for a Y block.
module mjpeg_codec
  import jpeg_pkg::*;
#(
  parameter int unsigned WIDTH  = IMG_W,
  parameter int unsigned HEIGHT = IMG_H,
  parameter int unsigned ADDR_W = $clog2(WIDTH * HEIGHT)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              next_packet,
  output logic [ADDR_W-1:0] addr_b,
  input  logic [15:0]       bram_pixel,
  output logic [31:0]       bitstream,
  output logic              bitstream_valid,
  output logic              valid_block,
  output logic [7:0]        position,
  output logic              busy
);
  // generator -> converter
  logic [15:0] g_pixel;  logic g_valid;  chan_t g_chan;
  // converter -> DCT
  logic signed [PIX_W-1:0] y_pixel; logic y_valid; chan_t y_chan;
  // DCT -> quantizer
  logic signed [DCT_W-1:0] d_coeff; logic d_valid; chan_t d_chan; logic d_ready;
  // quantizer -> zigzag
  logic signed [COEF_W-1:0] q_coeff; logic q_valid; chan_t q_chan;
  // zigzag -> entropy coder
  logic signed [COEF_W-1:0] z_coeff; logic z_valid, z_last, z_ready; chan_t z_chan;
  // entropy coder -> aligner
  logic e_valid, e_eob; logic [CODE_W-1:0] e_code; logic [4:0] e_code_len;
  logic [COEF_W-1:0] e_coeff; logic [3:0] e_coeff_len;
  // aligner -> serializer
  logic a_valid, a_eob; logic [ALIGN_W-1:0] a_value; logic [4:0] a_len;

  jpeg_signal_generator #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .ADDR_W(ADDR_W)) u_gen (
    .clk, .rst, .next_packet, .block_done(valid_block),
    .addr_b, .bram_pixel_in(bram_pixel),
    .bram_pixel(g_pixel), .valid_pixel(g_valid), .channel_sel(g_chan),
    .position, .busy
  );

  ycrcb_converter u_ycc (
    .clk, .rst, .in_valid(g_valid), .in_pixel(g_pixel), .in_chan(g_chan),
    .out_valid(y_valid), .out_pixel(y_pixel), .out_chan(y_chan)
  );

  dct_2d u_dct (
    .clk, .rst, .in_valid(y_valid), .in_ready(d_ready), .in_pixel(y_pixel), .in_chan(y_chan),
    .out_valid(d_valid), .out_coeff(d_coeff), .out_chan(d_chan)
  );

  quantizer u_quant (
    .clk, .rst, .in_valid(d_valid), .in_coeff(d_coeff), .in_chan(d_chan),
    .out_valid(q_valid), .out_coeff(q_coeff), .out_chan(q_chan)
  );

  zigzag u_zz (
    .clk, .rst, .in_valid(q_valid), .in_ready(z_ready), .in_coeff(q_coeff), .in_chan(q_chan),
    .out_valid(z_valid), .out_last(z_last), .out_coeff(z_coeff), .out_chan(z_chan)
  );

  entropy_coder u_ec (
    .clk, .rst, .in_valid(z_valid), .in_coeff(z_coeff), .in_chan(z_chan),
    .out_valid(e_valid), .out_codeword(e_code), .out_code_len(e_code_len),
    .out_coeff(e_coeff), .out_coeff_len(e_coeff_len), .out_end_of_block(e_eob)
  );

  data_aligner u_align (
    .clk, .rst, .in_valid(e_valid), .in_codeword(e_code), .in_code_len(e_code_len),
    .in_coeff(e_coeff), .in_coeff_len(e_coeff_len), .in_end_of_block(e_eob),
    .out_valid(a_valid), .out_aligned_value(a_value), .out_len(a_len), .out_end_of_block(a_eob)
  );

  serializer u_ser (
    .clk, .rst, .in_valid(a_valid), .in_aligned_value(a_value), .in_len(a_len),
    .in_end_of_block(a_eob), .out_valid(bitstream_valid), .out_word(bitstream),
    .block_done(valid_block)
  );

  // One block in flight: the DCT and the zigzag buffer must be free when data arrives.
  a_dct_ready: assert property (@(posedge clk) disable iff (rst) y_valid |-> d_ready);
  a_zz_ready:  assert property (@(posedge clk) disable iff (rst) q_valid |-> z_ready);
  // z_last is used only by the assertion below: the coder sees 64 coefficients per block.
  a_zz_last:   assert property (@(posedge clk) disable iff (rst) z_last |=> !z_valid);
endmodule
