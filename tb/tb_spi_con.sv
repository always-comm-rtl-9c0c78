// tb_spi_con: runs conversions against the MCP3008 behavioural model with random
// 10-bit values on all eight channels. Each conversion must read channel 7 in
// single-ended mode with a start bit, use exactly 17 DCLK periods of 100 system
// cycles, return the channel-7 value on data_out with one data_valid pulse, and
// release chip select. A trigger given during a conversion must be ignored. The
// result must be valid 17 * 100 cycles after the edge that sees the trigger (the
// sampler here counts that as 1,701 edges from the trigger being set up).
module tb_spi_con;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic trigger = 0, cs, copi, cipo, dclk, data_valid;
  logic [9:0] data_out;
  spi_con dut (.*);

  logic [9:0] value [8];
  logic start_bit, single;
  logic [2:0] channel;
  int rising;
  mcp3008_model adc (.cs, .dclk, .din(copi), .dout(cipo), .value, .start_bit, .single, .channel, .rising);

  // DCLK half periods
  int cyc = 0, last_edge = -1, bad_half = 0;
  always @(posedge clk) begin
    cyc++;
  end
  always @(dclk) if (!rst && !cs) begin
    if (last_edge >= 0 && cyc - last_edge != 50) bad_half++;
    last_edge = cyc;
  end
  always @(posedge cs) last_edge = -1;

  int valid_pulses = 0;
  always @(posedge clk) if (data_valid) valid_pulses++;

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 30; n++) begin
      foreach (value[i]) value[i] = 10'($urandom);
      if (n == 0) value[7] = 10'h3FF;
      if (n == 1) value[7] = 10'h000;
      @(negedge clk) trigger = 1;
      t0 = cyc;
      @(negedge clk) trigger = 0;
      // a second trigger in the middle of the conversion
      if (n % 2 == 1) begin
        repeat (500) @(negedge clk);
        trigger = 1;
        @(negedge clk) trigger = 0;
      end
      @(posedge clk iff data_valid);
      t1 = cyc;
      checks++;
      if (data_out !== value[7]) begin failures++; $display("read %h, expected %h", data_out, value[7]); end
      checks++;
      if (!start_bit || !single || channel != 3'd7 || rising != 17) begin
        failures++; $display("command start=%b sgl=%b ch=%0d, %0d clocks", start_bit, single, channel, rising);
      end
      checks++;
      if (t1 - t0 != 17 * 100 + 1) begin failures++; $display("conversion took %0d cycles", t1 - t0); end
      @(negedge clk);
      checks++;
      if (!cs) begin failures++; $display("chip select still low"); end
      repeat ($urandom_range(10, 300)) @(negedge clk);
      checks++;
      if (!cs) begin failures++; $display("the ignored trigger started a conversion"); end
    end
    checks++;
    if (bad_half != 0 || valid_pulses != 30) begin
      failures++; $display("%0d bad DCLK half periods, %0d valid pulses", bad_half, valid_pulses);
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
