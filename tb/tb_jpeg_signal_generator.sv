// tb_jpeg_signal_generator: a 64 x 40 image (4 x 3 superblocks with 8 padding rows,
// 6 pairs per frame) sits in a one-cycle-latency memory model filled with random
// pixels. For each next_packet the testbench expects twelve blocks in the order
// Y TL, Y TR, Y BL, Y BR, Cr, Cb of the first superblock of the pair, then of the
// second one. A Y block is 64 pixels in raster order; a chroma block is 256 pixels,
// the 2x2 group of each subsampled position in turn. Padding rows must come out as 0.
// It checks every pixel value and channel tag, that no pixel leaves while the
// generator waits for block_done (given after a random delay), the position of
// each packet (including the wrap after the sixth pair) and the busy flag.
module tb_jpeg_signal_generator;
  import jpeg_pkg::*;
  localparam int W = 64, H = 40, SBC = 4, PAIRS = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic next_packet = 0, block_done = 0, valid_pixel, busy;
  logic [11:0] addr_b;
  logic [15:0] bram_pixel_in, bram_pixel;
  chan_t channel_sel;
  logic [7:0] position;
  jpeg_signal_generator #(.WIDTH(W), .HEIGHT(H)) dut (.*);

  logic [15:0] img [W * H];
  always @(posedge clk) bram_pixel_in <= (int'(addr_b) < W * H) ? img[addr_b] : 16'hDEAD;

  typedef struct { logic [15:0] pix; chan_t ch; } px_t;
  px_t exp_q [$];
  int got_in_block = 0;

  function automatic logic [15:0] pix_at(input int y, input int x);
    return (y >= H) ? 16'h0000 : img[y * W + x];
  endfunction

  task automatic expect_packet(input int pos);
    int sb, y0, x0;
    px_t e;
    for (int s = 0; s < 2; s++) begin
      sb = pos * 2 + s;
      y0 = (sb / SBC) * 16;
      x0 = (sb % SBC) * 16;
      for (int b = 0; b < 4; b++)
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 8; c++) begin
            e.pix = pix_at(y0 + (b / 2) * 8 + r, x0 + (b % 2) * 8 + c); e.ch = CH_Y; exp_q.push_back(e);
          end
      for (int ch = 1; ch <= 2; ch++)
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 8; c++)
            for (int d = 0; d < 4; d++) begin
              e.pix = pix_at(y0 + 2 * r + d / 2, x0 + 2 * c + d % 2); e.ch = chan_t'(ch); exp_q.push_back(e);
            end
    end
  endtask

  always @(posedge clk) if (!rst && valid_pixel) begin
    px_t e;
    checks++;
    got_in_block++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected pixel"); end
    else begin
      e = exp_q.pop_front();
      if (bram_pixel != e.pix || channel_sel != e.ch) begin
        failures++;
        if (failures < 10) $display("pixel %h ch %0d, expected %h ch %0d", bram_pixel, channel_sel, e.pix, e.ch);
      end
    end
  end

  initial begin
    int want;
    foreach (img[i]) img[i] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int p = 0; p < PAIRS + 2; p++) begin
      expect_packet(p % PAIRS);
      @(negedge clk) next_packet = 1;
      @(negedge clk) next_packet = 0;
      checks++;
      if (!busy || int'(position) != p % PAIRS) begin failures++; $display("position %0d, expected %0d", position, p % PAIRS); end
      for (int b = 0; b < 12; b++) begin
        want = (b % 6 < 4) ? 64 : 256;
        wait (got_in_block == want);
        repeat ($urandom_range(5, 40)) @(negedge clk);
        checks++;
        if (got_in_block != want) begin failures++; $display("block %0d: %0d pixels", b, got_in_block); end
        got_in_block = 0;
        block_done = 1;
        @(negedge clk) block_done = 0;
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("still busy after twelve blocks"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
