// tb_serializer: feeds random left-aligned words of 2..27 bits, with random gaps and
// random end-of-block marks, and rebuilds the expected stream bit by bit: 32-bit
// chunks with the first bit in bit 31, and at every end of block one last chunk
// padded with zeros. Each emitted word is compared with the reference, and
// block_done must pulse exactly with the last word of each block. The run also
// includes blocks that end exactly on a 32-bit boundary.
module tb_serializer;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_end_of_block = 0;
  logic [26:0] in_aligned_value = 0;
  logic [4:0]  in_len = 0;
  logic out_valid, block_done;
  logic [31:0] out_word;
  serializer dut (.*);

  bit bits [$];
  logic [31:0] exp_words [$];
  bit          exp_last  [$];
  int blocks_sent = 0, blocks_done = 0, exact_ends = 0;

  task automatic cut(input bit eob);
    logic [31:0] w;
    while (bits.size() >= 32) begin
      for (int i = 31; i >= 0; i--) w[i] = bits.pop_front();
      exp_words.push_back(w);
      exp_last.push_back(eob && bits.size() == 0);
      if (eob && bits.size() == 0) exact_ends++;
    end
    if (eob && bits.size() > 0) begin
      w = '0;
      for (int i = 31; bits.size() > 0; i--) w[i] = bits.pop_front();
      exp_words.push_back(w);
      exp_last.push_back(1);
    end
  endtask

  always @(posedge clk) if (!rst) begin
    if (block_done) blocks_done++;
    if (out_valid) begin
      checks++;
      if (exp_words.size() == 0) begin failures++; $display("unexpected word %h", out_word); end
      else begin
        logic [31:0] w;
        bit l;
        w = exp_words.pop_front();
        l = exp_last.pop_front();
        if (w !== out_word || l !== block_done) begin
          failures++;
          if (failures < 10) $display("got %h done %b, expected %h done %b", out_word, block_done, w, l);
        end
      end
    end else if (block_done) begin
      checks++; failures++; $display("block_done without a word");
    end
  end

  initial begin
    int len, left;
    logic [26:0] v;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if ($urandom_range(4) == 0) begin in_valid = 0; continue; end
      // every 50th block is built to end exactly on a word boundary
      left = 32 - (bits.size() % 32);
      len = (n % 50 == 49 && left <= 27 && left >= 2) ? left : $urandom_range(2, 27);
      v = 27'($urandom) & ~(27'h7FF_FFFF >> len);
      in_valid = 1;
      in_aligned_value = v;
      in_len = 5'(len);
      in_end_of_block = (n % 50 == 49) || ($urandom_range(30) == 0);
      for (int i = 26; i > 26 - len; i--) bits.push_back(v[i]);
      if (in_end_of_block) blocks_sent++;
      cut(in_end_of_block);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_words.size() != 0 || blocks_done != blocks_sent) begin
      failures++;
      $display("%0d words missing, %0d of %0d blocks done", exp_words.size(), blocks_done, blocks_sent);
    end
    checks++;
    if (exact_ends == 0) begin failures++; $display("no block ended on a word boundary"); end
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
