// tb_huffman_rom: reads all 1024 ROM words. Checks spot values that appear in the
// JPEG standard's tables, each table's symbol count (12 DC, 162 AC), that every code
// of a table differs from every other and none is a prefix of another, and the
// one-cycle read latency.
module tb_huffman_rom;
  import jpeg_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  huff_sel_t  sel = HT_DC_LUMA;
  logic [7:0] index = 0;
  huff_code_t code;
  huffman_rom dut (.*);

  logic [15:0] codes [4][256];
  int          lens  [4][256];

  task automatic expect_code(input int t, input logic [7:0] sym, input string bits);
    logic [15:0] want;
    want = '0;
    for (int i = 0; i < bits.len(); i++) want[15 - i] = (bits[i] == "1");
    checks++;
    if (lens[t][sym] != bits.len() || codes[t][sym] != want) begin
      failures++;
      $display("table %0d symbol %02h: len %0d code %016b, expected %s", t, sym, lens[t][sym], codes[t][sym], bits);
    end
  endtask

  initial begin
    for (int t = 0; t < 4; t++)
      for (int s = 0; s < 256; s++) begin
        @(negedge clk);
        sel = huff_sel_t'(t); index = 8'(s);
        @(posedge clk); #1;
        codes[t][s] = code.code;
        lens[t][s]  = int'(code.len);
      end
    // spot values from the standard's tables
    expect_code(0, 8'h00, "00");
    expect_code(0, 8'h01, "010");
    expect_code(0, 8'h05, "110");
    expect_code(0, 8'h0B, "111111110");
    expect_code(1, 8'h00, "00");
    expect_code(1, 8'h03, "110");
    expect_code(1, 8'h0B, "11111111110");
    expect_code(2, 8'h00, "1010");
    expect_code(2, 8'h01, "00");
    expect_code(2, 8'h02, "01");
    expect_code(2, 8'h03, "100");
    expect_code(2, 8'h11, "1100");
    expect_code(2, 8'h21, "11100");
    expect_code(2, 8'hF0, "11111111001");
    expect_code(2, 8'hFA, "1111111111111110");
    expect_code(3, 8'h00, "00");
    expect_code(3, 8'h01, "01");
    expect_code(3, 8'h11, "1011");
    expect_code(3, 8'hF0, "1111111010");
    expect_code(3, 8'hFA, "1111111111111110");
    // counts and prefix freedom
    for (int t = 0; t < 4; t++) begin
      int used;
      used = 0;
      for (int a = 0; a < 256; a++) if (lens[t][a] != 0) begin
        used++;
        for (int b = 0; b < 256; b++) if (b != a && lens[t][b] != 0) begin
          int l;
          logic [15:0] mask;
          l = (lens[t][a] < lens[t][b]) ? lens[t][a] : lens[t][b];
          mask = ~(16'hFFFF >> l);
          if ((codes[t][a] & mask) == (codes[t][b] & mask)) begin
            failures++;
            if (failures < 10) $display("table %0d: codes of %02h and %02h collide", t, a, b);
          end
        end
      end
      checks++;
      if (used != ((t < 2) ? 12 : 162)) begin failures++; $display("table %0d has %0d symbols", t, used); end
    end
    // latency: the word changes one clock after the address
    @(negedge clk); sel = HT_AC_LUMA; index = 8'h00;
    @(posedge clk); #1;
    @(negedge clk); index = 8'hF0;
    #1;
    checks++;
    if (code.len != 5'd4) begin failures++; $display("read is not registered"); end
    @(posedge clk); #1;
    checks++;
    if (code.len != 5'd11) begin failures++; $display("read latency wrong"); end
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
