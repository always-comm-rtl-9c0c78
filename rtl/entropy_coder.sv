// entropy_coder: category coding, zero-run-length coding and Huffman coding of one
// zigzag-ordered block of quantised coefficients.
//
// Each nonzero coefficient V is described by a tuple (R, N, V): R is the number of
// zeros before it (4 bits), N = floor(log2|V|) + 1 its category, and V is sent as
// an N-bit field. Positive values are sent as themselves. A negative value is sent as
// the bitwise complement of its magnitude, the low N bits of V - 1. The pair {R, N}
// indexes a Huffman table, and the resulting code word replaces R and N in the stream.
// Coefficient 0 of each block (DC) uses the DC table and is coded by its raw value,
// not as a difference from the previous block. The rules at the edges follow the
// design as described:
//   * on the 16th consecutive zero a ZRL code (symbol 0xF0) is sent and the run restarts;
//   * if coefficient 63 is zero, EOB (symbol 0x00) is sent in its place, dropping any
//     pending run;
//   * if coefficient 63 is nonzero, its tuple is sent and EOB follows one cycle later.
// Y blocks use the luminance tables and Cr/Cb blocks the chrominance tables.
//
// Interface: one coefficient per in_valid cycle, 64 per block, with a cycle free after
// the 64th. The outputs come two cycles after the input (a decision register, then
// the synchronous Huffman ROM). They are the code word (left aligned) with its
// length, the value field (right aligned) with its length, out_valid, and
// out_end_of_block on the EOB tuple.
module entropy_coder
  import jpeg_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      in_valid,
  input  logic signed [COEF_W-1:0]  in_coeff,
  input  chan_t                     in_chan,
  output logic                      out_valid,
  output logic [CODE_W-1:0]         out_codeword,
  output logic [4:0]                out_code_len,
  output logic [COEF_W-1:0]         out_coeff,
  output logic [3:0]                out_coeff_len,
  output logic                      out_end_of_block
);
  logic [5:0] idx;
  logic [3:0] run;
  logic       eob_pending;
  chan_t      eob_chan;

  // category of the incoming value and its N-bit field
  logic [COEF_W-1:0] mag;
  logic [3:0]        cat;
  logic [COEF_W-1:0] field;
  always_comb begin
    mag = in_coeff[COEF_W-1] ? COEF_W'(-in_coeff) : COEF_W'(in_coeff);
    cat = '0;
    for (int b = 0; b < COEF_W; b++)
      if (mag[b]) cat = 4'(b + 1);
    field = in_coeff[COEF_W-1] ? COEF_W'(in_coeff - 1'b1) : COEF_W'(in_coeff);
    field = field & COEF_W'((1 << cat) - 1);
  end

  // decision stage
  logic              d_valid, d_eob;
  huff_sel_t         d_sel;
  logic [7:0]        d_sym;
  logic [COEF_W-1:0] d_field;
  logic [3:0]        d_len;

  always_ff @(posedge clk) begin
    if (rst) begin
      idx <= '0; run <= '0; eob_pending <= 1'b0; eob_chan <= CH_Y;
      d_valid <= 1'b0; d_eob <= 1'b0; d_sel <= HT_DC_LUMA; d_sym <= '0; d_field <= '0; d_len <= '0;
    end else begin
      d_valid <= 1'b0;
      d_eob   <= 1'b0;
      if (in_valid) begin
        idx <= idx + 6'd1;
        d_field <= field;
        d_len   <= cat;
        if (idx == 6'd0) begin
          // DC coefficient: raw value, DC table, symbol = category
          d_valid <= 1'b1;
          d_sel   <= (in_chan == CH_Y) ? HT_DC_LUMA : HT_DC_CHROMA;
          d_sym   <= {4'd0, cat};
          run     <= '0;
        end else begin
          d_sel <= (in_chan == CH_Y) ? HT_AC_LUMA : HT_AC_CHROMA;
          if (idx == 6'd63 && mag == '0) begin
            d_valid <= 1'b1;            // EOB straight away
            d_eob   <= 1'b1;
            d_sym   <= 8'h00;
            d_len   <= '0;
            run     <= '0;
          end else if (mag == '0) begin
            if (run == 4'd15) begin
              d_valid <= 1'b1;          // ZRL: sixteen zeros
              d_sym   <= 8'hF0;
              d_len   <= '0;
              run     <= '0;
            end else begin
              run <= run + 4'd1;
            end
          end else begin
            d_valid <= 1'b1;
            d_sym   <= {run, cat};
            run     <= '0;
            if (idx == 6'd63) begin
              eob_pending <= 1'b1;
              eob_chan    <= in_chan;
            end
          end
        end
      end else if (eob_pending) begin
        eob_pending <= 1'b0;
        d_valid <= 1'b1;
        d_eob   <= 1'b1;
        d_sel   <= (eob_chan == CH_Y) ? HT_AC_LUMA : HT_AC_CHROMA;
        d_sym   <= 8'h00;
        d_field <= '0;
        d_len   <= '0;
      end
    end
  end

  huff_code_t rom_code;
  huffman_rom u_rom (.clk, .sel(d_sel), .index(d_sym), .code(rom_code));

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_end_of_block <= 1'b0; out_coeff <= '0; out_coeff_len <= '0;
    end else begin
      out_valid        <= d_valid;
      out_end_of_block <= d_eob;
      out_coeff        <= d_field;
      out_coeff_len    <= d_len;
    end
  end
  assign out_codeword = rom_code.code;
  assign out_code_len = rom_code.len;
endmodule
