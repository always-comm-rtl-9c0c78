// always_comm_top: camera-to-Ethernet audio/video streamer.
//
// Three clock domains, all supplied from outside (on the FPGA they come from clock
// generators):
//   clk_camera (200 MHz): pixel_reconstruct writes camera pixels into frame_buffer.
//   clk_100mhz: mjpeg_codec reads the frame buffer and codes two superblocks per
//     packet into video_accumulator. audio_sample_timer and spi_con sample the
//     microphone ADC at 8 kHz into audio_buffer.
//   clk_net (50 MHz): write_scheduler and tx_scheduler build UDP frames and drive the
//     RMII PHY. clk_net_phased, the same clock shifted by -45 degrees, is passed
//     straight to the PHY as its reference clock, so eth_refclk is simply that input.
//     eth_mdio is a constant 1 (idle bus), because the design sends no management
//     frames; only the MDC clock is driven.
// The codec is paced by the network: each video packet sent restarts it for the
// next pair of superblocks (next_packet). An audio packet goes out every 800 samples.
//
// rst is synchronous to clk_100mhz and is synchronised into the two other domains.
// The status outputs count packets and dropped data and show whether the codec is
// coding and the transmitter is idle; they are for observation only.
//
// The two least significant bits of each 10-bit ADC result are not used: the
// design keeps 8-bit audio samples (data_out[9:2]), so sample_raw[1:0] is
// deliberately left unconnected.
//
// Follows the design: the block structure and the signals between the blocks, the
// clock rates, the 320x180 image, two superblocks per video packet, 800-byte audio
// packets, the 300-word video register and the 1024-byte audio register.
// This implementation's choices: the four-phase handshakes across clock domains,
// the reset synchronisers, the status outputs and the pacing of the codec by the
// network.
module always_comm_top
  import jpeg_pkg::*;
#(
  parameter int unsigned WIDTH         = IMG_W,
  parameter int unsigned HEIGHT        = IMG_H,
  parameter int unsigned SAMPLE_PERIOD = 12_500,     // 100 MHz / 8 kHz
  parameter int unsigned SPI_CLK_DIV   = 50,
  parameter int unsigned PHY_RESET_CYCLES = 20_000,
  parameter int unsigned AUDIO_BYTES   = 800,
  parameter int unsigned AUDIO_DEPTH   = 1024,
  parameter int unsigned VIDEO_WORDS   = 300
) (
  input  logic       clk_100mhz,
  input  logic       clk_camera,
  input  logic       clk_net,
  input  logic       clk_net_phased,
  input  logic       rst,
  // camera
  input  logic       cam_pclk,
  input  logic       cam_hsync,
  input  logic       cam_vsync,
  input  logic [7:0] cam_data,
  // microphone ADC (MCP3008)
  output logic       adc_cs,
  output logic       adc_copi,
  input  logic       adc_cipo,
  output logic       adc_dclk,
  // Ethernet PHY (RMII)
  output logic [1:0] eth_txd,
  output logic       eth_txen,
  output logic       eth_refclk,
  output logic       eth_rstn,
  output logic       eth_mdc,
  output logic       eth_mdio,
  // status
  output logic [7:0]  audio_packets,
  output logic [7:0]  video_packets,
  output logic [15:0] video_overflow,
  output logic [15:0] audio_overflow,
  output logic        codec_busy,
  output logic        net_idle
);
  localparam int unsigned ADDR_W = $clog2(WIDTH * HEIGHT);
  localparam int unsigned VAW    = $clog2(VIDEO_WORDS);
  localparam int unsigned AAW    = $clog2(AUDIO_DEPTH);

  logic rst_cam, rst_net;
  sync_2ff #(.RESET_VAL(1'b1)) u_rst_cam (.clk(clk_camera), .rst(1'b0), .d(rst), .q(rst_cam));
  sync_2ff #(.RESET_VAL(1'b1)) u_rst_net (.clk(clk_net),    .rst(1'b0), .d(rst), .q(rst_net));

  // ---------------- camera -> frame buffer ----------------
  logic [15:0]       cam_pixel;
  logic              cam_valid;
  logic [ADDR_W-1:0] addr_a, addr_b;
  logic [15:0]       bram_pixel;

  pixel_reconstruct #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_pix (
    .clk(clk_camera), .rst(rst_cam), .cam_pclk, .cam_hsync, .cam_vsync, .cam_data,
    .camera_pixel(cam_pixel), .valid_pixel(cam_valid), .addr_a
  );

  frame_buffer #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_fb (
    .clk_a(clk_camera), .we_a(cam_valid), .addr_a, .din_a(cam_pixel),
    .clk_b(clk_100mhz), .addr_b, .dout_b(bram_pixel)
  );

  // ---------------- video codec ----------------
  logic [31:0] bitstream;
  logic        bitstream_valid, valid_block, next_packet;
  logic [7:0]  position;

  mjpeg_codec #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_codec (
    .clk(clk_100mhz), .rst, .next_packet, .addr_b, .bram_pixel,
    .bitstream, .bitstream_valid, .valid_block, .position, .busy(codec_busy)
  );

  logic           video_ready, video_ack;
  logic [VAW:0]   video_num_words;
  logic [7:0]     video_seq;
  logic [VAW-1:0] video_rd_addr;
  logic [31:0]    video_rd_data;

  video_accumulator #(.WORDS(VIDEO_WORDS)) u_vacc (
    .clk(clk_100mhz), .rst, .bitstream, .bitstream_valid, .valid_block, .position,
    .next_packet, .video_ready, .num_words(video_num_words), .seq(video_seq),
    .overflow_count(video_overflow), .sent_ack(video_ack),
    .rd_clk(clk_net), .rd_addr(video_rd_addr), .rd_data(video_rd_data)
  );

  // ---------------- audio ----------------
  logic       sample_trigger, sample_valid;
  logic [9:0] sample_raw;
  logic       audio_ready, audio_ack;
  logic [9:0] audio_rd_offset;
  logic [7:0] audio_rd_data;

  audio_sample_timer #(.PERIOD(SAMPLE_PERIOD)) u_timer (
    .clk(clk_100mhz), .rst, .trigger(sample_trigger)
  );

  spi_con #(.CLK_DIV(SPI_CLK_DIV)) u_spi (
    .clk(clk_100mhz), .rst, .trigger(sample_trigger),
    .cs(adc_cs), .copi(adc_copi), .cipo(adc_cipo), .dclk(adc_dclk),
    .data_out(sample_raw), .data_valid(sample_valid)
  );

  audio_buffer #(.DEPTH(AUDIO_DEPTH), .PACKET_BYTES(AUDIO_BYTES)) u_abuf (
    .clk(clk_100mhz), .rst, .sample_valid, .sample(sample_raw[9:2]),
    .audio_ready, .overflow_count(audio_overflow), .sent_ack(audio_ack),
    .rd_clk(clk_net), .rd_offset(AAW'(audio_rd_offset)), .rd_data(audio_rd_data)
  );

  // ---------------- network ----------------
  logic [7:0] tx_data;
  logic       tx_sof, tx_eof, tx_ack;

  write_scheduler #(.AUDIO_BYTES(AUDIO_BYTES), .VIDEO_WORDS(VIDEO_WORDS)) u_ws (
    .clk(clk_net), .rst(rst_net),
    .audio_ready, .audio_ack, .audio_rd_offset, .audio_rd_data,
    .video_ready, .video_ack, .video_num_words, .video_seq, .video_rd_addr, .video_rd_data,
    .tx_data, .tx_sof, .tx_eof, .tx_ack, .audio_packets, .video_packets
  );

  tx_scheduler #(.RESET_CYCLES(PHY_RESET_CYCLES)) u_ts (
    .clk(clk_net), .rst(rst_net), .tx_data, .tx_sof, .tx_eof, .tx_ack,
    .eth_txd, .eth_txen, .eth_rstn, .eth_mdc, .eth_mdio, .idle(net_idle)
  );

  assign eth_refclk = clk_net_phased;
endmodule
