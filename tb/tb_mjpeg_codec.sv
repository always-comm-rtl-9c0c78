// tb_mjpeg_codec: codes every superblock pair of a reduced 32 x 20 image (2 x 2
// superblocks, 12 padding rows, 2 pairs) held in a one-cycle-latency memory model,
// and decodes the output. The decoder here splits the words at each valid_block,
// reads the Huffman codes (tables built from the package's BITS/HUFFVAL lists), the
// value fields, ZRL and EOB, and checks that each block's padding bits are zero.
// The decoded coefficients are compared with a reference computed here: the
// converter's integer colour conversion, 4:2:0 averaging, level shift, a real-valued
// 2-D DCT in the JPEG normalisation, and rounding division by the quantisation
// tables. A coefficient may differ from the reference by at most 1 (fixed-point
// rounding). The first image has smooth gradients; the second is random noise, whose
// large values also exercise the long codes.
module tb_mjpeg_codec;
  import jpeg_pkg::*;
  localparam int W = 32, H = 20, SBC = 2, PAIRS = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic next_packet = 0, bitstream_valid, valid_block, busy;
  logic [9:0] addr_b;
  logic [15:0] bram_pixel;
  logic [31:0] bitstream;
  logic [7:0] position;
  mjpeg_codec #(.WIDTH(W), .HEIGHT(H)) dut (.*);

  logic [15:0] img [W * H];
  always @(posedge clk) bram_pixel <= img[addr_b];

  // words of the block being received, and finished blocks
  logic [31:0] cur_words [$];
  logic [31:0] blocks [$][$];
  always @(posedge clk) if (!rst) begin
    if (bitstream_valid) cur_words.push_back(bitstream);
    if (valid_block) begin blocks.push_back(cur_words); cur_words.delete(); end
  end

  // ---------------- reference ----------------
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
        acc = 0.25 * cu * cv * acc / real'((ch == 0) ? QUANT_LUMA[v * 8 + u] : QUANT_CHROMA[v * 8 + u]);
        q[v * 8 + u] = $rtoi(acc + ((acc >= 0.0) ? 0.5 : -0.5));
      end
  endtask

  // ---------------- decoder ----------------
  int dec_map [4][int];
  bit bits [$];
  int zrl_count = 0, eob63_count = 0, long_codes = 0;

  function automatic int take(input int n);
    int v;
    v = 0;
    repeat (n) v = (v << 1) | int'(bits.pop_front());
    return v;
  endfunction

  function automatic int symbol(input int sel, output bit ok);
    int code, len;
    code = 0;
    ok = 0;
    for (len = 1; len <= 16 && bits.size() > 0; len++) begin
      code = (code << 1) | int'(bits.pop_front());
      if (dec_map[sel].exists((len << 16) | code)) begin
        ok = 1;
        if (len > 10) long_codes++;
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

  task automatic decode(input logic [31:0] words [$], input bit chroma, output int z [64], output bit ok);
    int k, sym, run, cat;
    ok = 1;
    bits.delete();
    foreach (words[i]) for (int j = 31; j >= 0; j--) bits.push_back(words[i][j]);
    foreach (z[i]) z[i] = 0;
    sym = symbol(chroma ? 1 : 0, ok);
    if (!ok) return;
    z[0] = value(sym);
    k = 1;
    while (1) begin
      sym = symbol(chroma ? 3 : 2, ok);
      if (!ok) return;
      if (sym == 8'h00) begin if (k == 63) eob63_count++; break; end
      if (k > 63) begin ok = 0; return; end
      if (sym == 8'hF0) begin k += 16; zrl_count++; continue; end
      run = sym >> 4;
      cat = sym & 15;
      k += run;
      if (k > 63) begin ok = 0; return; end
      z[k] = value(cat);
      k++;
    end
    // padding: whatever is left must be zero and shorter than a word
    if (bits.size() >= 32) ok = 0;
    foreach (bits[i]) if (bits[i]) ok = 0;
  endtask

  initial begin
    int q [64];
    int z [64];
    bit ok;
    int bad, worst, pos;
    logic [31:0] words [$];
    huff_code_t hc;
    for (int s = 0; s < 4; s++)
      for (int sym = 0; sym < 256; sym++) begin
        hc = huff_code(huff_sel_t'(s), 8'(sym));
        if (hc.len != 0) dec_map[s][(int'(hc.len) << 16) | int'(hc.code >> (16 - hc.len))] = sym;
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y * W + x] = {5'(x), 6'(2 * y + x), 5'(31 - y)};
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int p = 0; p < 2 * PAIRS; p++) begin
      if (p == PAIRS) foreach (img[i]) img[i] = 16'($urandom);
      @(negedge clk) next_packet = 1;
      @(negedge clk) next_packet = 0;
      pos = position;
      checks++;
      if (pos != p % PAIRS) begin failures++; $display("position %0d", pos); end
      wait (blocks.size() == 12);
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy after twelve blocks"); end
      for (int b = 0; b < 12; b++) begin
        words = blocks.pop_front();
        reference(pos, b, q);
        decode(words, (b % 6) >= 4, z, ok);
        checks++;
        if (!ok) begin failures++; $display("packet %0d block %0d does not decode", p, b); continue; end
        bad = 0;
        worst = 0;
        for (int k = 0; k < 64; k++) begin
          int d;
          d = z[k] - q[zigzag_idx2pos(k)];
          if (d < 0) d = -d;
          if (d > worst) worst = d;
          if (d > 1) bad++;
        end
        checks++;
        if (bad != 0) begin failures++; $display("packet %0d block %0d: %0d coefficients off (worst %0d)", p, b, bad, worst); end
      end
    end
    checks++;
    if (zrl_count == 0 || long_codes == 0) begin failures++; $display("ZRL %0d, long codes %0d", zrl_count, long_codes); end
    $display("decoded %0d ZRL, %0d EOB after coefficient 62, %0d long codes", zrl_count, eob63_count, long_codes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
