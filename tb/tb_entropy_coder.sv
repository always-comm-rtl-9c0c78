// tb_entropy_coder: drives zigzag-ordered blocks and compares every output tuple
// with a reference coder written here from the rules of the design: DC coded raw
// with the DC table; for AC, a ZRL on each 16th zero in a row; EOB in place of a zero
// last coefficient; a nonzero last coefficient followed by EOB. Values use the
// standard's one's-complement fields. Code words come from the package's canonical
// table builder, which tb_huffman_rom checks against the standard. The blocks are
// random sparse data plus the edge cases: all-zero AC, long zero runs, a nonzero
// last coefficient, extreme values, and chroma blocks.
module tb_entropy_coder;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  logic signed [10:0] in_coeff = 0;
  chan_t in_chan = CH_Y;
  logic out_valid, out_end_of_block;
  logic [15:0] out_codeword;
  logic [4:0]  out_code_len;
  logic [10:0] out_coeff;
  logic [3:0]  out_coeff_len;
  entropy_coder dut (.*);

  typedef struct { int code; int clen; int field; int flen; bit eob; } tuple_t;
  tuple_t exp_q [$];
  int zrl_seen = 0, eob_after_nonzero = 0;

  function automatic int category(input int v);
    int m, c;
    m = (v < 0) ? -v : v;
    c = 0;
    while (m > 0) begin c++; m = m >> 1; end
    return c;
  endfunction

  task automatic expect_sym(input huff_sel_t sel, input int sym, input int v, input bit eob);
    tuple_t t;
    huff_code_t hc;
    int c;
    hc = huff_code(sel, 8'(sym));
    c = category(v);
    t.code = int'(hc.code); t.clen = int'(hc.len);
    t.flen = c;
    t.field = (v >= 0) ? v : ((v + (1 << c) - 1));   // one's complement of |v| in c bits
    t.eob = eob;
    exp_q.push_back(t);
  endtask

  task automatic reference(input int blk [64], input chan_t ch);
    huff_sel_t dc, ac;
    int run;
    dc = (ch == CH_Y) ? HT_DC_LUMA : HT_DC_CHROMA;
    ac = (ch == CH_Y) ? HT_AC_LUMA : HT_AC_CHROMA;
    expect_sym(dc, category(blk[0]), blk[0], 0);
    run = 0;
    for (int k = 1; k < 64; k++) begin
      if (k == 63) begin
        if (blk[k] == 0) expect_sym(ac, 8'h00, 0, 1);
        else begin
          expect_sym(ac, (run << 4) | category(blk[k]), blk[k], 0);
          expect_sym(ac, 8'h00, 0, 1);
          eob_after_nonzero++;
        end
      end else if (blk[k] == 0) begin
        run++;
        if (run == 16) begin expect_sym(ac, 8'hF0, 0, 0); run = 0; zrl_seen++; end
      end else begin
        expect_sym(ac, (run << 4) | category(blk[k]), blk[k], 0);
        run = 0;
      end
    end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    tuple_t t;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      t = exp_q.pop_front();
      if (int'(out_codeword) != t.code || int'(out_code_len) != t.clen || int'(out_coeff_len) != t.flen ||
          int'(out_coeff) != t.field || out_end_of_block != t.eob) begin
        failures++;
        if (failures < 10)
          $display("got code %h/%0d field %h/%0d eob %b, expected %h/%0d %h/%0d %b", out_codeword, out_code_len,
                   out_coeff, out_coeff_len, out_end_of_block, t.code, t.clen, t.field, t.flen, t.eob);
      end
    end
  end

  task automatic send(input int blk [64], input chan_t ch);
    reference(blk, ch);
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      in_valid = 1; in_coeff = 11'(blk[k]); in_chan = ch;
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    int blk [64];
    repeat (3) @(posedge clk);
    rst <= 0;
    // 1: DC only
    foreach (blk[k]) blk[k] = 0;
    blk[0] = -300;
    send(blk, CH_Y);
    // 2: nonzero last coefficient, long run before it
    blk[0] = 0; blk[5] = 1; blk[6] = -1; blk[63] = 7;
    send(blk, CH_Y);
    // 3: extremes and chroma
    foreach (blk[k]) blk[k] = 0;
    blk[0] = -1024; blk[1] = 1023; blk[2] = -1023; blk[40] = -512; blk[62] = 3;
    send(blk, CH_CR);
    blk[0] = 1023;
    send(blk, CH_CB);
    // random sparse blocks
    for (int n = 0; n < 40; n++) begin
      foreach (blk[k]) blk[k] = ($urandom_range(99) < ((k < 10) ? 60 : 12)) ? ($signed($urandom_range(60)) - 30) : 0;
      blk[0] = $signed($urandom_range(2000)) - 1000;
      send(blk, chan_t'(n % 3));
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d tuples missing", exp_q.size()); end
    checks++;
    if (zrl_seen == 0 || eob_after_nonzero == 0) begin failures++; $display("edge cases not exercised"); end
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
