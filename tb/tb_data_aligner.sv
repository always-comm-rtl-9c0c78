// tb_data_aligner: random code words and value fields of every legal length go in;
// each result is checked bit by bit against a string-built reference: code bits
// first, then the value bits, then zeros up to 27 bits. Bits of the value input above
// its length are filled with random junk, which the aligner must mask off. Checks the
// one-cycle latency and that end_of_block travels with its word.
module tb_data_aligner;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_end_of_block = 0;
  logic [15:0] in_codeword = 0;
  logic [4:0]  in_code_len = 0;
  logic [10:0] in_coeff = 0;
  logic [3:0]  in_coeff_len = 0;
  logic out_valid, out_end_of_block;
  logic [26:0] out_aligned_value;
  logic [4:0]  out_len;
  data_aligner dut (.*);

  logic [26:0] exp_val;
  logic [4:0]  exp_len;
  logic        exp_eob, exp_valid = 0;
  // the expectation for the input applied before a clock edge is compared at the
  // following edge, where the registered result is visible
  logic [26:0] p_val;
  logic [4:0]  p_len;
  logic        p_eob, p_valid = 0;

  always @(posedge clk) if (!rst) begin
    if (p_valid) begin
      checks++;
      if (!out_valid || out_aligned_value !== p_val || out_len !== p_len || out_end_of_block !== p_eob) begin
        failures++;
        if (failures < 10) $display("got %b/%0d eob %b, expected %b/%0d eob %b", out_aligned_value, out_len,
                                    out_end_of_block, p_val, p_len, p_eob);
      end
    end else if (out_valid) begin
      checks++; failures++; $display("output without input");
    end
    p_val = exp_val; p_len = exp_len; p_eob = exp_eob; p_valid = exp_valid;
  end

  initial begin
    int cl, vl, pos;
    logic [15:0] code;
    logic [10:0] val;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if ($urandom_range(3) != 0) begin
        cl = $urandom_range(2, 16);
        vl = $urandom_range(0, 11);
        code = 16'($urandom) & 16'((1 << cl) - 1);
        val  = 11'($urandom);
        // the code word is left aligned in its 16 bits, as the ROM delivers it
        in_codeword = code << (16 - cl);
        in_code_len = 5'(cl);
        in_coeff = val;
        in_coeff_len = 4'(vl);
        in_end_of_block = 1'($urandom);
        in_valid = 1;
        exp_val = '0;
        pos = 26;
        for (int i = cl - 1; i >= 0; i--) begin exp_val[pos] = code[i]; pos--; end
        for (int i = vl - 1; i >= 0; i--) begin exp_val[pos] = val[i]; pos--; end
        exp_len = 5'(cl + vl);
        exp_eob = in_end_of_block;
      end else begin
        in_valid = 0;
        in_codeword = 16'($urandom);
      end
      exp_valid = in_valid;
    end
    @(negedge clk) begin in_valid = 0; exp_valid = 0; end
    repeat (3) @(posedge clk);
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
