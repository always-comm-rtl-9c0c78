// huffman_rom: read-only memory of the four JPEG Huffman code tables.
//
// The address is {table select, code index}. The code index is the 8-bit
// concatenation {R, N} of a zero-run length and a category (for DC tables, just N).
// Each word holds the prefix-free code word, left aligned in 16 bits, and its length
// (2..16 for the AC tables, 2..9 for the DC tables; 0 marks an unused index). The
// contents are the example tables of the JPEG standard, expanded at elaboration time
// from their BITS/HUFFVAL form by one canonical walk per table. Reading is synchronous: the
// word appears one cycle after the address, like a block RAM used as ROM.
module huffman_rom
  import jpeg_pkg::*;
(
  input  logic       clk,
  input  huff_sel_t  sel,
  input  logic [7:0] index,
  output huff_code_t code
);
  typedef logic [$bits(huff_code_t)-1:0] rom_t [1024];

  // One canonical walk per table: codes are handed out in order of length, and
  // each symbol of HUFFVAL gets the next code (the JPEG standard's Annex C rule).
  function automatic rom_t build_rom();
    rom_t r;
    huff_code_t e;
    int unsigned next_code, k;
    for (int i = 0; i < 1024; i++) r[i] = '0;
    for (int t = 0; t < 4; t++) begin
      next_code = 0;
      k = 0;
      for (int l = 1; l <= 16; l++) begin
        for (int n = 0; n < int'(huff_bits(huff_sel_t'(t), 4'(l - 1))); n++) begin
          e.len  = 5'(l);
          e.code = 16'(next_code << (16 - l));
          r[{2'(t), huff_val(huff_sel_t'(t), 8'(k))}] = e;   // stored as plain bits
          next_code++;
          k++;
        end
        next_code = next_code << 1;
      end
    end
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  always_ff @(posedge clk)
    code <= huff_code_t'(ROM[{sel, index}]);
endmodule
