// tb_zigzag: writes blocks whose raster position p holds the value p + offset and
// checks that the k-th output is the position with zigzag number k. The numbering
// table is written out independently by walking the anti-diagonals (even diagonals
// upwards, odd ones downwards, starting with (0,1)). Also checks that out_last
// marks the 64th output and that the output phase takes exactly 64 cycles.
module tb_zigzag;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_last;
  logic signed [10:0] in_coeff = 0, out_coeff;
  chan_t in_chan = CH_Y, out_chan;
  zigzag dut (.*);

  int order [64];   // raster position of the k-th output
  initial begin
    int k = 0;
    for (int d = 0; d < 15; d++) begin
      for (int t = 0; t <= d; t++) begin
        int r, c;
        if (d % 2 == 0) begin r = d - t; c = t; end   // upwards: row falls
        else            begin r = t;     c = d - t; end
        if (r < 8 && c < 8) begin order[k] = r*8 + c; k++; end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < 4; b++) begin
      int n;
      @(negedge clk);
      for (int p = 0; p < 64; p++) begin
        in_valid = 1; in_coeff = 11'(p + 100*b - 150); in_chan = chan_t'(b % 3);
        @(negedge clk);
        in_valid = 0;
        if (b == 2 && p < 63) @(negedge clk);          // gaps in the input
      end
      n = 0;
      while (n < 64) begin
        @(posedge clk);
        if (out_valid) begin
          checks++;
          if (out_coeff != 11'(order[n] + 100*b - 150)) begin
            failures++;
            if (failures < 10) $display("out %0d = %0d expected %0d", n, out_coeff, order[n] + 100*b - 150);
          end
          checks++;
          if (out_last != (n == 63)) begin failures++; $display("out_last at %0d", n); end
          n++;
        end else begin
          failures++; checks++; $display("gap in output"); n = 64;
        end
      end
      checks++;
      if (out_chan != chan_t'(b % 3)) begin failures++; $display("channel"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
