// data_aligner: packs a Huffman code word and its value field into one left-aligned
// 27-bit word.
//
// aligned_value[26:0] holds the code_len code bits from bit 26 down, then the
// coeff_len value bits right behind them, then zeros. This is the layout of the
// alignment diagram of the design: a 16-bit code word with its code at the top, an
// 11-bit coefficient with its field at the bottom, and a 27-bit result. out_len =
// code_len + coeff_len (at most 27) counts the bits that carry meaning.
// end_of_block travels with the word. One cycle of latency.
module data_aligner
  import jpeg_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic [CODE_W-1:0]   in_codeword,
  input  logic [4:0]          in_code_len,
  input  logic [COEF_W-1:0]   in_coeff,
  input  logic [3:0]          in_coeff_len,
  input  logic                in_end_of_block,
  output logic                out_valid,
  output logic [ALIGN_W-1:0]  out_aligned_value,
  output logic [4:0]          out_len,
  output logic                out_end_of_block
);
  logic [ALIGN_W-1:0] code_part, coeff_part, coeff_mask;
  logic [4:0]         total;

  always_comb begin
    total      = in_code_len + 5'(in_coeff_len);
    code_part  = {in_codeword, {COEF_W{1'b0}}};
    coeff_mask = ALIGN_W'((1 << in_coeff_len) - 1);
    coeff_part = (ALIGN_W'(in_coeff) & coeff_mask) << (5'(ALIGN_W) - total);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_aligned_value <= '0; out_len <= '0; out_end_of_block <= 1'b0;
    end else begin
      out_valid        <= in_valid;
      out_end_of_block <= in_valid & in_end_of_block;
      if (in_valid) begin
        out_aligned_value <= code_part | coeff_part;
        out_len           <= total;
      end
    end
  end
endmodule
