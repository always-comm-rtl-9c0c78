// top_checks.svh: test environment shared by the two system testbenches. It is
// included inside a testbench module that has already declared
//   localparam int W, H (image size), AUDIO_N (audio packet bytes), VWORDS (video
//   register words), and the signals of always_comm_top connected to `dut`.
// It provides:
//   - clocks: 100 MHz, 200 MHz camera, 50 MHz network and its phase-shifted copy;
//   - a camera model sending RGB565 frames of `img` over and over (pclk = 1/4 of
//     the camera clock, href around each line, vsync before each frame);
//   - the MCP3008 model, with a new random value on channel 7 after every
//     conversion, whose 8 top bits are queued as the expected audio stream;
//   - an RMII receiver that rebuilds every frame, checks preamble, SFD and FCS,
//     the Ethernet/IPv4/UDP headers (including the IPv4 checksum), and then the
//     payload: audio bytes against the expected stream, video words by decoding
//     the twelve blocks (Huffman codes, value fields, ZRL, EOB, zero padding to
//     the next word) and, where the image is known to be settled, comparing the
//     coefficients with a real-valued reference coder (tolerance 1);
//   - counters of each mechanism of the design, all taken from the pins.

  int checks = 0, failures = 0;

  initial clk_100mhz = 0;
  always #5 clk_100mhz = ~clk_100mhz;
  initial clk_camera = 0;
  always #2.5 clk_camera = ~clk_camera;
  initial clk_net = 0;
  always #10 clk_net = ~clk_net;
  initial begin clk_net_phased = 0; #17.5; forever #10 clk_net_phased = ~clk_net_phased; end

  localparam int SBC = W / 16;
  localparam int SBR = (H + 15) / 16;
  localparam int PAIRS = SBC * SBR / 2;

  // ---------------- camera ----------------
  logic [15:0] img [W * H];
  int cam_frames = 0;
  realtime frame_done_time [$];

  task automatic cam_cycle(input logic hs, input logic vs, input logic [7:0] d);
    cam_pclk = 0; cam_hsync = hs; cam_vsync = vs; cam_data = d;
    repeat (2) @(negedge clk_camera);
    cam_pclk = 1;
    repeat (2) @(negedge clk_camera);
  endtask

  initial begin
    cam_pclk = 0; cam_hsync = 0; cam_vsync = 0; cam_data = 0;
    wait (!rst);
    forever begin
      repeat (3) cam_cycle(0, 1, 8'h00);
      repeat (4) cam_cycle(0, 0, 8'h00);
      for (int r = 0; r < H; r++) begin
        for (int c = 0; c < W; c++) begin
          cam_cycle(1, 0, img[r * W + c][15:8]);
          cam_cycle(1, 0, img[r * W + c][7:0]);
        end
        repeat (8) cam_cycle(0, 0, 8'h00);
      end
      cam_frames++;
      frame_done_time.push_back($realtime);
    end
  end

  // ---------------- microphone ADC ----------------
  logic [9:0] adc_value [8];
  logic adc_start, adc_single;
  logic [2:0] adc_channel;
  int adc_rising;
  byte unsigned audio_exp [$];
  mcp3008_model u_adc (.cs(adc_cs), .dclk(adc_dclk), .din(adc_copi), .dout(adc_cipo), .value(adc_value),
                       .start_bit(adc_start), .single(adc_single), .channel(adc_channel), .rising(adc_rising));
  initial foreach (adc_value[i]) adc_value[i] = 10'($urandom);
  always @(posedge adc_cs) if (!rst && adc_rising == 17) begin
    audio_exp.push_back(adc_value[7][9:2]);
    adc_value[7] = 10'($urandom);
  end

  // ---------------- mechanism counters ----------------
  int n_audio_pkts = 0, n_video_pkts = 0, n_crc_ok = 0, n_blocks_decoded = 0, n_blocks_compared = 0;
  int n_padding_blocks = 0, n_zrl = 0, n_eob_after_63 = 0, n_eob_replacing_63 = 0, n_flushes = 0;
  int n_priority = 0, n_audio_hs = 0, n_video_hs = 0, n_overflow_pkts = 0, n_chroma_blocks = 0;
  int n_wrap = 0, max_words = 0;
  bit phy_released = 0;
  int last_seq = -1;

  always @(posedge eth_rstn) if (!rst) phy_released = 1;
  // only the pins are observed: a handshake has completed when another packet of the
  // same kind follows; a video packet was kept waiting by an audio packet when it
  // starts right after it (within 100 network cycles of its end)
  realtime prev_end = 0;
  bit prev_audio = 0;

  // ---------------- reference coder ----------------
  function automatic int conv(input logic [15:0] p, input int ch);
    int r, g, b, acc;
    r = {p[15:11], p[15:13]};
    g = {p[10:5], p[10:9]};
    b = {p[4:0], p[4:2]};
    case (ch)
      1: acc = 128 * r - 107 * g - 21 * b + 32896;
      2: acc = -43 * r - 85 * g + 128 * b + 32896;
      default: acc = 77 * r + 150 * g + 29 * b + 128;
    endcase
    if (acc < 0) acc = 0;
    if (acc > 65535) acc = 65535;
    return acc >> 8;
  endfunction

  function automatic logic [15:0] pix_at(input int y, input int x);
    return (y >= H) ? 16'h0000 : img[y * W + x];
  endfunction

  task automatic reference(input int pos, input int b, output int q [64]);
    int sb, y0, x0, bi, ch, s;
    real f [64];
    real acc, cu, cv;
    sb = pos * 2 + b / 6;
    bi = b % 6;
    y0 = (sb / SBC) * 16;
    x0 = (sb % SBC) * 16;
    ch = (bi < 4) ? 0 : bi - 3;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        if (ch == 0) s = conv(pix_at(y0 + (bi / 2) * 8 + r, x0 + (bi % 2) * 8 + c), 0);
        else begin
          s = 0;
          for (int d = 0; d < 4; d++) s += conv(pix_at(y0 + 2 * r + d / 2, x0 + 2 * c + d % 2), ch);
          s = (s + 2) / 4;
        end
        f[r * 8 + c] = real'(s - 128);
      end
    for (int v = 0; v < 8; v++)
      for (int u = 0; u < 8; u++) begin
        acc = 0.0;
        for (int y = 0; y < 8; y++)
          for (int x = 0; x < 8; x++)
            acc += f[y * 8 + x] * $cos((2 * x + 1) * u * 3.14159265358979 / 16.0)
                                * $cos((2 * y + 1) * v * 3.14159265358979 / 16.0);
        cu = (u == 0) ? 0.70710678 : 1.0;
        cv = (v == 0) ? 0.70710678 : 1.0;
        acc = 0.25 * cu * cv * acc / real'((ch == 0) ? jpeg_pkg::QUANT_LUMA[v * 8 + u]
                                                      : jpeg_pkg::QUANT_CHROMA[v * 8 + u]);
        q[v * 8 + u] = $rtoi(acc + ((acc >= 0.0) ? 0.5 : -0.5));
      end
  endtask

  // ---------------- decoder ----------------
  int dec_map [4][int];
  bit bits [$];
  int bits_used;

  initial begin
    jpeg_pkg::huff_code_t hc;
    for (int s = 0; s < 4; s++)
      for (int sym = 0; sym < 256; sym++) begin
        hc = jpeg_pkg::huff_code(jpeg_pkg::huff_sel_t'(s), 8'(sym));
        if (hc.len != 0) dec_map[s][(int'(hc.len) << 16) | int'(hc.code >> (16 - hc.len))] = sym;
      end
  end

  function automatic int take(input int n);
    int v;
    v = 0;
    repeat (n) begin
      v = (v << 1) | int'(bits.pop_front());
      bits_used++;
    end
    return v;
  endfunction

  function automatic int symbol(input int sel, output bit ok);
    int code;
    code = 0;
    ok = 0;
    for (int len = 1; len <= 16 && bits.size() > 0; len++) begin
      code = (code << 1) | int'(bits.pop_front());
      bits_used++;
      if (dec_map[sel].exists((len << 16) | code)) begin
        ok = 1;
        return dec_map[sel][(len << 16) | code];
      end
    end
    return 0;
  endfunction

  function automatic int value(input int cat);
    int v;
    if (cat == 0) return 0;
    v = take(cat);
    return (v >> (cat - 1)) ? v : v - (1 << cat) + 1;
  endfunction

  // decodes one block from `bits`, then drops the zero padding up to the next word
  task automatic decode_block(input bit chroma, output int z [64], output bit ok);
    int k, sym, run, cat, pad;
    ok = 1;
    foreach (z[i]) z[i] = 0;
    sym = symbol(chroma ? 1 : 0, ok);
    if (!ok) return;
    z[0] = value(sym);
    k = 1;
    while (1) begin
      sym = symbol(chroma ? 3 : 2, ok);
      if (!ok) return;
      if (sym == 8'h00) begin
        if (k == 64) n_eob_after_63++;
        else if (k == 63) n_eob_replacing_63++;
        break;
      end
      if (k > 63) begin ok = 0; return; end
      if (sym == 8'hF0) begin k += 16; n_zrl++; continue; end
      run = sym >> 4;
      cat = sym & 15;
      k += run;
      if (k > 63) begin ok = 0; return; end
      z[k] = value(cat);
      k++;
    end
    pad = (32 - bits_used % 32) % 32;
    if (pad > bits.size()) begin ok = 0; return; end
    if (pad > 0) n_flushes++;
    if (take(pad) != 0) ok = 0;
  endtask

  // ---------------- RMII receiver ----------------
  byte unsigned rx [$];
  logic [1:0] dibits [$];
  realtime last_video_end = 0, frame_start = 0, settle_time = 0;
  bit compare_video = 1;

  function automatic logic [31:0] crc_of(input byte unsigned m [$], input int from, input int to);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int i = from; i < to; i++) begin
      c = c ^ 32'(m[i]);
      for (int b = 0; b < 8; b++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    end
    return ~c;
  endfunction

  task automatic check_frame();
    int n, sum, len, pos, nwords, bad, worst;
    logic [31:0] f;
    bit ok, settled;
    int z [64];
    int q [64];
    n = rx.size();
    checks++;
    if (n < 8 + 44 + 4) begin failures++; $display("runt frame of %0d bytes", n); return; end
    checks++;
    ok = (rx[7] == 8'hD5);
    for (int i = 0; i < 7; i++) if (rx[i] != 8'h55) ok = 0;
    if (!ok) begin failures++; $display("bad preamble or SFD"); return; end
    f = crc_of(rx, 8, n - 4);
    checks++;
    if ({rx[n-1], rx[n-2], rx[n-3], rx[n-4]} != f) begin failures++; $display("bad FCS"); return; end
    n_crc_ok++;
    sum = 0;
    for (int i = 22; i < 42; i += 2) sum += {rx[i], rx[i+1]};
    while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
    len = n - 8 - 44 - 4;
    checks++;
    if ({rx[20], rx[21]} != 16'h0800 || sum != 16'hFFFF || {rx[24], rx[25]} != 16'(30 + len) ||
        {rx[46], rx[47]} != 16'(10 + len) || rx[31] != 8'd17) begin
      failures++; $display("bad headers (IP checksum sum %h)", sum); return;
    end
    if (rx[50] == 8'h00) begin
      // audio
      if (n_audio_pkts > 0) n_audio_hs++;
      n_audio_pkts++;
      prev_audio = 1;
      checks++;
      bad = 0;
      if (len != AUDIO_N) bad = 1;
      else for (int i = 0; i < len; i++) begin
        if (audio_exp.size() == 0) begin bad = 1; break; end
        if (rx[52 + i] != audio_exp.pop_front()) bad = 1;
      end
      if (bad) begin failures++; $display("audio packet %0d wrong", n_audio_pkts); end
    end else begin
      if (n_video_pkts > 0) n_video_hs++;
      n_video_pkts++;
      if (prev_audio && frame_start - prev_end < 100 * 20.0) n_priority++;
      prev_audio = 0;
      pos = rx[51];
      nwords = len / 4;
      checks++;
      if (len % 4 != 0 || pos >= PAIRS) begin failures++; $display("video packet of %0d bytes, seq %0d", len, pos); return; end
      if (last_seq >= 0 && pos != (last_seq + 1) % PAIRS) begin
        checks++; failures++; $display("video seq %0d after %0d", pos, last_seq);
      end
      if (last_seq == PAIRS - 1 && pos == 0) n_wrap++;
      last_seq = pos;
      if (nwords == VWORDS) n_overflow_pkts++;
      max_words = (nwords > max_words) ? nwords : max_words;
      // the image is settled for this packet if it was coded after a full camera frame
      // of the current image had been written
      settled = compare_video && settle_time > 0 && last_video_end > settle_time;
      last_video_end = $realtime;
      if (nwords == VWORDS) return;   // may be truncated: not decodable
      bits.delete();
      bits_used = 0;
      for (int i = 0; i < len; i++) for (int j = 7; j >= 0; j--) bits.push_back(rx[52 + i][j]);
      for (int b = 0; b < 12; b++) begin
        decode_block((b % 6) >= 4, z, ok);
        checks++;
        if (!ok) begin failures++; $display("video packet %0d block %0d does not decode", n_video_pkts, b); return; end
        n_blocks_decoded++;
        if (b % 6 >= 4) n_chroma_blocks++;
        if ((((pos * 2 + b / 6) / SBC) * 16 + 16) > H && (b % 6) >= 2) n_padding_blocks++;
        if (settled) begin
          reference(pos, b, q);
          bad = 0;
          worst = 0;
          for (int k = 0; k < 64; k++) begin
            int d;
            d = z[k] - q[jpeg_pkg::zigzag_idx2pos(k)];
            if (d < 0) d = -d;
            if (d > worst) worst = d;
            if (d > 1) bad++;
          end
          checks++;
          n_blocks_compared++;
          if (bad) begin failures++; $display("pair %0d block %0d: %0d coefficients off (worst %0d)", pos, b, bad, worst); end
        end
      end
      checks++;
      if (bits.size() != 0) begin failures++; $display("%0d bits left after twelve blocks", bits.size()); end
    end
  endtask

  always @(posedge clk_net) begin
    if (rst) dibits.delete();
    else if (eth_txen) begin
      if (dibits.size() == 0) frame_start = $realtime;
      dibits.push_back(eth_txd);
    end else if (dibits.size() != 0) begin
      rx.delete();
      while (dibits.size() >= 4) begin
        logic [7:0] b;
        for (int i = 0; i < 4; i++) b[2*i +: 2] = dibits.pop_front();
        rx.push_back(b);
      end
      dibits.delete();
      check_frame();
      prev_end = $realtime;
    end
  end

  task automatic expect_at_least(input string what, input int got, input int want);
    checks++;
    $display("  %-38s %0d", what, got);
    if (got < want) begin failures++; $display("  ^ expected at least %0d", want); end
  endtask

  task automatic finish_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
