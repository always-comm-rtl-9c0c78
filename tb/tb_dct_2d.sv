// tb_dct_2d: feeds random 8x8 blocks of level-shifted samples and compares the 64
// serial outputs with the JPEG-normalised 2-D DCT computed in real arithmetic (the
// output has 10 fractional bits, and the tolerance is 1/8 of a coefficient unit).
// It also checks the channel tag and the block time: about 150 cycles from the
// first sample in to the last coefficient out, for contiguous input.
module tb_dct_2d;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid;
  logic signed [7:0]  in_pixel = 0;
  chan_t in_chan = CH_Y, out_chan;
  logic signed [23:0] out_coeff;
  dct_2d dut (.*);

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  real g [64];
  real ref_c [64];

  task automatic run_block(input int mode, input chan_t ch);
    int t0, n;
    real s;
    for (int i = 0; i < 64; i++) begin
      case (mode)
        0: g[i] = real'($signed($urandom_range(255)) - 128);
        1: g[i] = 127.0;
        default: g[i] = (i % 2 == 0) ? -128.0 : 127.0;
      endcase
    end
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) begin
        s = 0.0;
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++)
            s += g[i*8+j] * $cos((2*i+1)*u*3.14159265358979/16.0) * $cos((2*j+1)*v*3.14159265358979/16.0);
        ref_c[u*8+v] = 0.25 * ((u == 0) ? 0.70710678118654 : 1.0) * ((v == 0) ? 0.70710678118654 : 1.0) * s;
      end
    wait (in_ready);
    @(negedge clk);
    t0 = cycle;
    for (int i = 0; i < 64; i++) begin
      in_valid = 1; in_pixel = 8'($rtoi(g[i])); in_chan = ch;
      @(negedge clk);
    end
    in_valid = 0;
    n = 0;
    while (n < 64) begin
      @(posedge clk);
      if (out_valid) begin
        real d;
        d = real'(out_coeff) / 1024.0 - ref_c[n];
        checks++;
        if (d > 0.125 || d < -0.125) begin
          failures++;
          if (failures < 10) $display("coef %0d = %f expected %f", n, real'(out_coeff)/1024.0, ref_c[n]);
        end
        if (n == 0) begin
          checks++;
          if (out_chan != ch) begin failures++; $display("channel tag wrong"); end
        end
        n++;
      end
    end
    checks++;
    if (cycle - t0 > 160) begin failures++; $display("block took %0d cycles", cycle - t0); end
    $display("block time %0d cycles", cycle - t0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    run_block(0, CH_Y);
    run_block(1, CH_CR);
    run_block(2, CH_CB);
    for (int b = 0; b < 5; b++) run_block(0, CH_Y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
