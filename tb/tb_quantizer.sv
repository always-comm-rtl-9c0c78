// tb_quantizer: drives blocks of random DCT coefficients (10 fractional bits) and
// checks each output against round(coefficient / q) in real arithmetic. q comes
// from the luminance matrix for Y and the chrominance matrix for Cr/Cb, written
// out again here. Rounding ties may go either way (tolerance 1). Also checks the
// one-cycle latency and saturation at +/-1023.
module tb_quantizer;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic signed [23:0] in_coeff = 0;
  logic signed [10:0] out_coeff;
  chan_t in_chan = CH_Y, out_chan;
  quantizer dut (.*);

  int ql [64] = '{16,11,10,16,24,40,51,61, 12,12,14,19,26,58,60,55, 14,13,16,24,40,57,69,56,
                  14,17,22,29,51,87,80,62, 18,22,37,56,68,109,103,77, 24,35,55,64,81,104,113,92,
                  49,64,78,87,103,121,120,101, 72,92,95,98,112,100,103,99};
  int qc [64] = '{17,18,24,47,99,99,99,99, 18,21,26,66,99,99,99,99, 24,26,56,99,99,99,99,99,
                  47,66,99,99,99,99,99,99, 99,99,99,99,99,99,99,99, 99,99,99,99,99,99,99,99,
                  99,99,99,99,99,99,99,99, 99,99,99,99,99,99,99,99};

  int exp_q [$];
  always @(posedge clk) if (!rst && out_valid) begin
    int e;
    e = exp_q.pop_front();
    checks++;
    if (int'(out_coeff) - e > 1 || e - int'(out_coeff) > 1) begin
      failures++;
      if (failures < 10) $display("got %0d expected %0d", out_coeff, e);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < 6; b++) begin
      chan_t ch;
      ch = (b % 3 == 0) ? CH_Y : ((b % 3 == 1) ? CH_CR : CH_CB);
      for (int i = 0; i < 64; i++) begin
        real v, r;
        int e, q;
        @(negedge clk);
        if (b == 5 && i == 0) v = 40000.0;          // saturates
        else if (b == 5 && i == 1) v = -40000.0;
        else v = real'($signed($urandom_range(4000)) - 2000) + real'($urandom_range(1023)) / 1024.0;
        in_coeff = 24'($rtoi(v * 1024.0));
        q = (ch == CH_Y) ? ql[i] : qc[i];
        r = real'(in_coeff) / 1024.0 / real'(q);
        e = (r >= 0.0) ? $rtoi(r + 0.5) : -$rtoi(-r + 0.5);
        if (e > 1023) e = 1023;
        if (e < -1024) e = -1024;
        exp_q.push_back(e);
        in_valid = 1; in_chan = ch;
      end
      @(negedge clk) in_valid = 0;
      @(negedge clk);
      checks++;
      if (out_chan != ch) begin failures++; $display("channel"); end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
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
