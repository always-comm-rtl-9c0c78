// tb_audio_buffer: a producer writes random bytes on the 100 MHz side and a
// consumer on the 50 MHz side reads each 800-byte packet when audio_ready is high,
// then completes the four-phase handshake. A reference ring mirrors which samples
// are kept. Checks: audio_ready stays low with 799 bytes and rises at 800; each
// packet holds the next 800 kept samples in order, across the ring's wrap; ready
// does not come back while the acknowledge is high; with the ring full, samples are
// dropped and counted exactly in overflow_count, and the kept ones still come out in
// order.
module tb_audio_buffer;
  logic clk = 0, rd_clk = 0, rst = 1;
  always #5 clk = ~clk;
  always #10 rd_clk = ~rd_clk;
  int checks = 0, failures = 0;

  logic sample_valid = 0, sent_ack = 0, audio_ready;
  logic [7:0] sample = 0, rd_data;
  logic [9:0] rd_offset = 0;
  logic [15:0] overflow_count;
  audio_buffer dut (.*);

  byte unsigned exp_q [$];
  int in_ring = 0, dropped = 0, packets = 0;

  task automatic put(input int n);
    repeat (n) begin
      @(negedge clk);
      sample = 8'($urandom);
      sample_valid = 1;
      if (in_ring < 1024) begin exp_q.push_back(sample); in_ring++; end
      else dropped++;
      @(negedge clk) sample_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (4) @(negedge clk);
  endtask

  task automatic consume();
    int bad;
    bad = 0;
    checks++;
    if (!audio_ready) begin failures++; $display("audio_ready low with %0d bytes", in_ring); return; end
    for (int i = 0; i < 800; i++) begin
      @(negedge rd_clk) rd_offset = 10'(i);
      @(negedge rd_clk);
      if (rd_data != exp_q[i]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("packet %0d: %0d wrong bytes", packets, bad); end
    repeat (800) void'(exp_q.pop_front());
    @(negedge rd_clk) sent_ack = 1;
    wait (!audio_ready);
    in_ring -= 800;
    packets++;
    repeat (10) @(negedge rd_clk);
    checks++;
    if (audio_ready) begin failures++; $display("ready raised while ack high"); end
    @(negedge rd_clk) sent_ack = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    put(799);
    checks++;
    if (audio_ready) begin failures++; $display("ready with 799 bytes"); end
    put(1);
    checks++;
    if (!audio_ready) begin failures++; $display("not ready with 800 bytes"); end
    consume();
    for (int n = 0; n < 5; n++) begin
      put($urandom_range(800, 1000));
      consume();
    end
    // fill past the ring's capacity
    put(1200);
    checks++;
    if (int'(overflow_count) != dropped || dropped == 0) begin
      failures++; $display("overflow_count %0d, expected %0d", overflow_count, dropped);
    end
    consume();
    put(600);
    consume();
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
