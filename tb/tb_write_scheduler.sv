// tb_write_scheduler: models both data registers (a 1024-byte audio memory and a
// 300-word video memory, each with a one-cycle read and a ready/ack handshake) and
// a transmitter that acknowledges one byte every four cycles after a 32-cycle
// preamble. Every frame is checked byte by byte: MAC addresses and EtherType, IPv4
// header fields and a header checksum that sums to FFFF, UDP ports and length, the
// tag and sequence bytes, the payload, and tx_sof/tx_eof on the first and last
// bytes. The handshake must end each packet (ack high until ready falls). When both
// registers are ready together, the audio frame must go first.
module tb_write_scheduler;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic audio_ready = 0, video_ready = 0, audio_ack, video_ack;
  logic [9:0] audio_rd_offset;
  logic [7:0] audio_rd_data;
  logic [8:0] video_num_words = 0;
  logic [7:0] video_seq = 0;
  logic [8:0] video_rd_addr;
  logic [31:0] video_rd_data;
  logic [7:0] tx_data, audio_packets, video_packets;
  logic tx_sof, tx_eof, tx_ack;
  write_scheduler dut (.*);

  logic [7:0]  amem [1024];
  logic [31:0] vmem [300];
  always @(posedge clk) begin
    audio_rd_data <= amem[audio_rd_offset];
    video_rd_data <= vmem[video_rd_addr];
  end

  // transmitter model
  bit in_frame = 0;
  int tcnt = 0, pause = 0;
  byte unsigned rx [$];
  byte unsigned frames [$][$];
  bit sof_ok = 1;
  assign tx_ack = in_frame && tcnt >= 32 && tcnt % 4 == 3;
  always @(posedge clk) if (!rst) begin
    if (pause > 0) pause--;
    else if (!in_frame && tx_sof) begin in_frame = 1; tcnt = 0; rx.delete(); end
    else if (in_frame) begin
      if (tx_ack) begin
        if ((rx.size() == 0) != tx_sof) sof_ok = 0;
        rx.push_back(tx_data);
        if (tx_eof) begin frames.push_back(rx); in_frame = 0; pause = 60; end
      end
      tcnt++;
    end
  end

  task automatic check_frame(input bit video, input int len, input logic [7:0] seq, input int first);
    byte unsigned f [$];
    int sum;
    wait (frames.size() != 0);
    f = frames.pop_front();
    checks++;
    if (f.size() != 44 + len) begin
      failures++; $display("frame of %0d bytes, expected %0d", f.size(), 44 + len); return;
    end
    checks++;
    if ({f[0], f[1], f[2], f[3], f[4], f[5]} != 48'h02_00_00_00_00_02 ||
        {f[6], f[7], f[8], f[9], f[10], f[11]} != 48'h02_00_00_00_00_01 || {f[12], f[13]} != 16'h0800) begin
      failures++; $display("Ethernet header");
    end
    checks++;
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += {f[i], f[i+1]};
    while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
    if (sum != 16'hFFFF || f[14] != 8'h45 || {f[16], f[17]} != 16'(28 + 2 + len) || f[22] != 8'd64 ||
        f[23] != 8'd17 || {f[26], f[27], f[28], f[29]} != 32'hC0A8_0102 || {f[30], f[31], f[32], f[33]} != 32'hC0A8_0101) begin
      failures++; $display("IPv4 header (checksum sum %h)", sum);
    end
    checks++;
    if ({f[34], f[35]} != 16'd5000 || {f[36], f[37]} != 16'd5000 || {f[38], f[39]} != 16'(8 + 2 + len)) begin
      failures++; $display("UDP header");
    end
    checks++;
    if (f[42] != (video ? 8'h01 : 8'h00) || f[43] != seq) begin
      failures++; $display("tag %h seq %h, expected video=%0d seq %h", f[42], f[43], video, seq);
    end
    checks++;
    for (int i = 0; i < len; i++) begin
      logic [7:0] e;
      e = video ? vmem[first + i / 4][8*(3 - i % 4) +: 8] : amem[(first + i) % 1024];
      if (f[44 + i] != e) begin failures++; $display("payload byte %0d", i); break; end
    end
  endtask

  task automatic fill_audio();
    foreach (amem[i]) amem[i] = 8'($urandom);
  endtask
  task automatic fill_video(input int words, input logic [7:0] seq);
    foreach (vmem[i]) vmem[i] = $urandom;
    video_num_words = 9'(words);
    video_seq = seq;
  endtask

  // each source drops ready once it sees ack, then waits for ack to fall
  always @(posedge clk) begin
    if (audio_ack) audio_ready <= 0;
    if (video_ack) video_ready <= 0;
  end

  int prio_checked = 0;
  initial begin
    int words;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 12; n++) begin
      case (n % 3)
        0: begin
          fill_audio();
          @(negedge clk) audio_ready = 1;
          check_frame(0, 800, audio_packets, 0);
        end
        1: begin
          words = (n == 1) ? 300 : $urandom_range(1, 300);
          fill_video(words, 8'($urandom));
          @(negedge clk) video_ready = 1;
          check_frame(1, 4 * words, video_seq, 0);
        end
        2: begin
          // both at once: audio has priority
          fill_audio();
          words = $urandom_range(1, 300);
          fill_video(words, 8'(n));
          @(negedge clk) begin audio_ready = 1; video_ready = 1; end
          check_frame(0, 800, audio_packets, 0);
          check_frame(1, 4 * words, 8'(n), 0);
          prio_checked++;
        end
      endcase
      wait (!audio_ack && !video_ack);
      repeat (10) @(posedge clk);
    end
    checks++;
    if (!sof_ok) begin failures++; $display("tx_sof misplaced"); end
    checks++;
    if (audio_packets != 8 || video_packets != 8 || prio_checked != 4) begin
      failures++; $display("counted %0d audio and %0d video packets", audio_packets, video_packets);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
