// tb_always_comm_top: end-to-end test of the whole streamer at reduced sizes, so
// that every mechanism happens within a short run: a 32 x 20 image (2 x 2
// superblocks, 12 padding rows, 2 pairs per frame), an audio sample every 200
// cycles with a faster ADC clock (CLK_DIV 2), 64-byte audio packets in a 128-byte
// ring, a 100-cycle PHY reset and a 64-word video register.
//
// The camera model first sends a mostly smooth image, which every packet decodes and
// matches against the reference coder once a full frame of it is in memory. It
// then sends a noisy image whose packets are too long for the video register: these
// must be cut at 64 words and counted as overflow, and the system must keep going.
// All frames are checked on the RMII pins (preamble, FCS, headers); audio payloads
// must equal the ADC samples in order.
//
// Mechanisms counted (each must happen at least once): audio and video packets,
// good FCS, decoded and reference-compared blocks, chroma blocks, blocks with
// padding rows, ZRL, EOB in place of a zero last coefficient, EOB after a nonzero
// last coefficient, blocks flushed with zero padding, a video packet waiting while an
// audio packet is sent (the arbitration itself is tested in tb_write_scheduler),
// completed audio and video handshakes (another packet of the kind follows), video
// overflow, wrap of the pair index, PHY reset release. Everything is observed on
// the pins of the top level.
module tb_always_comm_top;
  localparam int W = 32, H = 20, AUDIO_N = 64, VWORDS = 64;

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

  always_comm_top #(
    .WIDTH(W), .HEIGHT(H), .SAMPLE_PERIOD(200), .SPI_CLK_DIV(2), .PHY_RESET_CYCLES(100),
    .AUDIO_BYTES(AUDIO_N), .AUDIO_DEPTH(128), .VIDEO_WORDS(VWORDS)
  ) dut (.*);

  `include "top_checks.svh"

  initial begin
    int f0;
    // smooth image with a sharp line, plus one noisy superblock so that some blocks
    // have a nonzero last coefficient
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y * W + x] = (x >= 16 && y < 16) ? 16'($urandom) :
                         (x == 13 && y > 4) ? 16'hFFFF : {5'(x), 6'(2 * y + x), 5'(31 - y)};
    repeat (5) @(posedge clk_100mhz);
    rst = 0;
    // settle: a full frame after reset
    wait (cam_frames == 1);
    settle_time = $realtime;
    wait (n_video_pkts >= 14);
    // noisy image: long packets, overflow
    compare_video = 0;
    foreach (img[i]) img[i] = $urandom_range(1) ? 16'hFFFF : 16'h0000;
    f0 = n_video_pkts;
    wait (n_video_pkts >= f0 + 8);
    repeat (100) @(posedge clk_100mhz);
    $display("longest video packet: %0d words", max_words);
    $display("mechanisms:");
    expect_at_least("audio packets", n_audio_pkts, 2);
    expect_at_least("video packets", n_video_pkts, 10);
    expect_at_least("frames with good FCS", n_crc_ok, 12);
    expect_at_least("blocks decoded", n_blocks_decoded, 100);
    expect_at_least("blocks matched to the reference", n_blocks_compared, 48);
    expect_at_least("chroma blocks", n_chroma_blocks, 10);
    expect_at_least("blocks with padding rows", n_padding_blocks, 4);
    expect_at_least("ZRL codes", n_zrl, 1);
    expect_at_least("EOB in place of coefficient 63", n_eob_replacing_63, 1);
    expect_at_least("EOB after a nonzero coefficient 63", n_eob_after_63, 1);
    expect_at_least("blocks flushed with padding bits", n_flushes, 100);
    expect_at_least("video waiting behind an audio packet", n_priority, 1);
    expect_at_least("audio handshakes completed", n_audio_hs, 2);
    expect_at_least("video handshakes completed", n_video_hs, 10);
    expect_at_least("video packets cut by the register", n_overflow_pkts, 1);
    expect_at_least("dropped video words counted", int'(video_overflow), 1);
    expect_at_least("pair index wraps", n_wrap, 2);
    expect_at_least("PHY reset released", int'(phy_released), 1);
    checks++;
    if (audio_overflow != 0) begin failures++; $display("audio samples dropped"); end
    checks++;
    if (int'(audio_packets) != n_audio_pkts % 256 || int'(video_packets) != n_video_pkts % 256) begin
      failures++; $display("packet counters %0d/%0d", audio_packets, video_packets);
    end
    finish_run();
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    finish_run();
  end
endmodule
