// tb_always_comm_top_full: the streamer at its full size, with no parameter
// overrides: 320 x 180 frames (120 superblock pairs per frame), 8 kHz audio from a
// 1 MHz ADC clock, 800-byte audio packets in the 1024-byte ring, the 300-word video
// register and a 20,000-cycle PHY reset. It runs for 110 ms of simulated time, long
// enough for the first audio packet (800 samples = 100 ms) and for the pair index to
// wrap at least once.
//
// The camera sends a smooth test image over and over. Every frame on the RMII pins
// is checked (preamble, FCS, headers). Audio payloads must equal the ADC samples in
// order. Every video packet must decode into twelve word-aligned blocks, and the
// packets coded after the first complete camera frame must match the reference
// coder within one quantisation step per coefficient.
module tb_always_comm_top_full;
  localparam int W = 320, H = 180, AUDIO_N = 800, VWORDS = 300;

  logic clk_100mhz, clk_camera, clk_net, clk_net_phased;
  logic rst = 1;
  logic cam_pclk, cam_hsync, cam_vsync;
  logic [7:0] cam_data;
  logic adc_cs, adc_copi, adc_cipo, adc_dclk;
  logic [1:0] eth_txd;
  logic eth_txen, eth_refclk, eth_rstn, eth_mdc, eth_mdio;
  logic [7:0] audio_packets, video_packets;
  logic [15:0] video_overflow, audio_overflow;
  logic codec_busy, net_idle;

  always_comm_top dut (.*);

  `include "top_checks.svh"

  initial begin
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y * W + x] = {5'(x >> 4), 6'(y >> 2), 5'((x + y) >> 5)};
    repeat (5) @(posedge clk_100mhz);
    rst = 0;
    wait (cam_frames == 1);
    settle_time = $realtime;
    wait (n_audio_pkts >= 1);
    repeat (100) @(posedge clk_100mhz);
    $display("longest video packet: %0d words", max_words);
    $display("mechanisms:");
    expect_at_least("audio packets", n_audio_pkts, 1);
    expect_at_least("video packets", n_video_pkts, 121);
    expect_at_least("frames with good FCS", n_crc_ok, 122);
    expect_at_least("blocks decoded", n_blocks_decoded, 1452);
    expect_at_least("blocks matched to the reference", n_blocks_compared, 1000);
    expect_at_least("blocks with padding rows", n_padding_blocks, 1);
    expect_at_least("ZRL codes", n_zrl, 1);
    expect_at_least("pair index wraps", n_wrap, 1);
    expect_at_least("PHY reset released", int'(phy_released), 1);
    checks++;
    if (audio_overflow != 0 || video_overflow != 0) begin
      failures++; $display("dropped data: audio %0d, video %0d", audio_overflow, video_overflow);
    end
    finish_run();
  end

  initial begin
    #150ms;
    failures++;
    $display("watchdog expired");
    finish_run();
  end
endmodule
