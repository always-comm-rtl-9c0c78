// tb_video_accumulator: a codec model answers each next_packet with twelve blocks of
// random length (words with a valid_block on each block's last word) and a random
// position. A network model on the 50 MHz side waits for video_ready, reads
// num_words words through the one-cycle read port, compares them and seq with what
// the codec sent, and completes the four-phase handshake, sometimes holding
// sent_ack high for a long time. Checks: contents, length and seq of every packet;
// one next_packet after reset and one per packet sent; video_ready never rises
// while sent_ack is high; and for a packet longer than 300 words, the first 300
// words are kept and the rest are counted in overflow_count.
module tb_video_accumulator;
  logic clk = 0, rd_clk = 0, rst = 1;
  always #5 clk = ~clk;
  always #10 rd_clk = ~rd_clk;
  int checks = 0, failures = 0;

  logic [31:0] bitstream = 0, rd_data;
  logic bitstream_valid = 0, valid_block = 0, next_packet, video_ready, sent_ack = 0;
  logic [7:0] position = 0, seq;
  logic [9:0] num_words;
  logic [15:0] overflow_count;
  logic [8:0] rd_addr = 0;
  video_accumulator dut (.*);

  logic [31:0] sent_words [$][$];
  logic [7:0]  sent_pos [$];
  int next_pulses = 0, pkt_index = 0;

  always @(posedge clk) if (!rst && next_packet) next_pulses++;

  // codec model
  initial begin
    logic [31:0] w [$];
    int n;
    int lens [12];
    wait (!rst);
    forever begin
      @(posedge clk iff next_packet);
      repeat ($urandom_range(2, 20)) @(negedge clk);
      w.delete();
      position = 8'($urandom);
      for (int b = 0; b < 12; b++) begin
        // packet 3 is too long for the register; packet 5 is short and quick
        lens[b] = (pkt_index == 3) ? 30 : (pkt_index == 5) ? 1 : $urandom_range(1, 24);
        repeat (lens[b]) w.push_back($urandom);
      end
      sent_words.push_back(w);
      sent_pos.push_back(position);
      n = 0;
      for (int b = 0; b < 12; b++) begin
        for (int i = 0; i < lens[b]; i++) begin
          @(negedge clk);
          bitstream = w[n];
          n++;
          bitstream_valid = 1;
          valid_block = (i == lens[b] - 1);
        end
        @(negedge clk) begin bitstream_valid = 0; valid_block = 0; end
        if (pkt_index != 5) repeat ($urandom_range(0, 10)) @(negedge clk);
      end
      pkt_index++;
    end
  end

  // ready must not rise while the acknowledge is high
  logic ready_q = 0;
  int early = 0;
  always @(posedge rd_clk) begin
    if (video_ready && !ready_q && sent_ack) early++;
    ready_q <= video_ready;
  end

  initial begin
    logic [31:0] w [$];
    logic [7:0] p;
    int bad, expect_n, ovf_before;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 8; k++) begin
      wait (video_ready);
      @(negedge rd_clk);
      w = sent_words.pop_front();
      p = sent_pos.pop_front();
      expect_n = (w.size() > 300) ? 300 : w.size();
      checks++;
      if (int'(num_words) != expect_n || seq != p) begin
        failures++; $display("packet %0d: %0d words seq %h, expected %0d seq %h", k, num_words, seq, expect_n, p);
      end
      if (k == 3) begin
        checks++;
        if (int'(overflow_count) != w.size() - 300) begin
          failures++; $display("overflow_count %0d, expected %0d", overflow_count, w.size() - 300);
        end
      end
      bad = 0;
      for (int i = 0; i < expect_n; i++) begin
        rd_addr = 9'(i);
        @(negedge rd_clk);
        if (rd_data != w[i]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("packet %0d: %0d wrong words", k, bad); end
      sent_ack = 1;
      wait (!video_ready);
      // hold the acknowledge long enough for the next packet to finish first
      repeat ((k == 4) ? 2000 : $urandom_range(1, 30)) @(negedge rd_clk);
      sent_ack = 0;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (next_pulses != 9) begin failures++; $display("%0d next_packet pulses", next_pulses); end
    checks++;
    if (early != 0) begin failures++; $display("video_ready rose with sent_ack high"); end
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
