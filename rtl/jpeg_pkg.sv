// jpeg_pkg: constants, types and constant tables shared by the M-JPEG codec.
//
// Holds the image geometry (320x180 RGB565 frames, padded to 192 rows and cut into
// 16x16 superblocks of six 8x8 blocks), the channel encoding carried alongside every
// sample, the zigzag order, the two quantisation matrices and the four Huffman code
// tables. The zigzag numbering is copied from the ordering diagram of the design.
// The quantisation matrices and Huffman tables are the example tables of the JPEG
// standard (Annex K, 50% quality); the Huffman tables are stored in their compact
// BITS/HUFFVAL form and expanded into code words by the canonical construction of
// the standard (codes of each length are consecutive integers, and moving to the
// next length appends a zero). Reciprocals of the quantisers are computed here too.
package jpeg_pkg;

  // ---------------- image geometry ----------------
  localparam int unsigned IMG_W   = 320;   // frame width in pixels
  localparam int unsigned IMG_H   = 180;   // frame height in pixels (180p)
  localparam int unsigned SB_SIZE = 16;    // superblock edge
  localparam int unsigned SB_PER_PACKET = 2;
  localparam int unsigned BLOCKS_PER_SB = 6; // 4 Y + Cr + Cb
  localparam int unsigned BLOCKS_PER_PACKET = SB_PER_PACKET * BLOCKS_PER_SB; // 12

  // Channel of a sample or a block. Y blocks come first in a superblock, then Cr, then Cb.
  typedef enum logic [1:0] {
    CH_Y  = 2'd0,
    CH_CR = 2'd1,
    CH_CB = 2'd2
  } chan_t;

  // ---------------- coefficient widths ----------------
  localparam int unsigned PIX_W   = 8;    // signed, level-shifted sample
  localparam int unsigned DCT_W   = 24;   // 2-D DCT output, 10 fractional bits
  localparam int unsigned DCT_FRAC = 10;
  localparam int unsigned COEF_W  = 11;   // quantised coefficient
  localparam int unsigned CODE_W  = 16;   // Huffman code word, left aligned
  localparam int unsigned ALIGN_W = CODE_W + COEF_W; // 27

  // ---------------- zigzag ----------------
  // ZIGZAG_POS2IDX[p] is the position in the zigzag readout of raster position p
  // (p = row*8 + column, row = vertical frequency).
  localparam logic [5:0] ZIGZAG_POS2IDX [64] = '{
     0,  1,  5,  6, 14, 15, 27, 28,
     2,  4,  7, 13, 16, 26, 29, 42,
     3,  8, 12, 17, 25, 30, 41, 43,
     9, 11, 18, 24, 31, 40, 44, 53,
    10, 19, 23, 32, 39, 45, 52, 54,
    20, 22, 33, 38, 46, 51, 55, 60,
    21, 34, 37, 47, 50, 56, 59, 61,
    35, 36, 48, 49, 57, 58, 62, 63
  };

  // Inverse: raster position that is read out k-th.
  function automatic logic [5:0] zigzag_idx2pos(input int unsigned k);
    logic [5:0] r;
    r = '0;
    for (int p = 0; p < 64; p++)
      if (int'(ZIGZAG_POS2IDX[p]) == int'(k)) r = 6'(p);
    return r;
  endfunction

  // ---------------- quantisation ----------------
  localparam logic [7:0] QUANT_LUMA [64] = '{
    16, 11, 10, 16,  24,  40,  51,  61,
    12, 12, 14, 19,  26,  58,  60,  55,
    14, 13, 16, 24,  40,  57,  69,  56,
    14, 17, 22, 29,  51,  87,  80,  62,
    18, 22, 37, 56,  68, 109, 103,  77,
    24, 35, 55, 64,  81, 104, 113,  92,
    49, 64, 78, 87, 103, 121, 120, 101,
    72, 92, 95, 98, 112, 100, 103,  99
  };
  localparam logic [7:0] QUANT_CHROMA [64] = '{
    17, 18, 24, 47, 99, 99, 99, 99,
    18, 21, 26, 66, 99, 99, 99, 99,
    24, 26, 56, 99, 99, 99, 99, 99,
    47, 66, 99, 99, 99, 99, 99, 99,
    99, 99, 99, 99, 99, 99, 99, 99,
    99, 99, 99, 99, 99, 99, 99, 99,
    99, 99, 99, 99, 99, 99, 99, 99,
    99, 99, 99, 99, 99, 99, 99, 99
  };
  localparam int unsigned RECIP_FRAC = 16;

  // round(2^16 / q)
  function automatic logic [16:0] quant_recip(input logic [7:0] q);
    return 17'(((32'd1 << RECIP_FRAC) + (32'(q) >> 1)) / 32'(q));
  endfunction

  // ---------------- Huffman tables ----------------
  // Table selector: bit 1 = AC (1) / DC (0), bit 0 = chroma (1) / luma (0).
  typedef enum logic [1:0] {
    HT_DC_LUMA   = 2'd0,
    HT_DC_CHROMA = 2'd1,
    HT_AC_LUMA   = 2'd2,
    HT_AC_CHROMA = 2'd3
  } huff_sel_t;

  localparam logic [7:0] DCL_BITS [16] = '{0,1,5,1,1,1,1,1,1,0,0,0,0,0,0,0};
  localparam logic [7:0] DCC_BITS [16] = '{0,3,1,1,1,1,1,1,1,1,1,0,0,0,0,0};
  localparam logic [7:0] ACL_BITS [16] = '{0,2,1,3,3,2,4,3,5,5,4,4,0,0,1,8'h7d};
  localparam logic [7:0] ACC_BITS [16] = '{0,2,1,2,4,4,3,4,7,5,4,4,0,1,2,8'h77};

  localparam logic [7:0] ACL_VALS [162] = '{
    8'h01,8'h02,8'h03,8'h00,8'h04,8'h11,8'h05,8'h12,8'h21,8'h31,8'h41,8'h06,8'h13,8'h51,8'h61,8'h07,
    8'h22,8'h71,8'h14,8'h32,8'h81,8'h91,8'ha1,8'h08,8'h23,8'h42,8'hb1,8'hc1,8'h15,8'h52,8'hd1,8'hf0,
    8'h24,8'h33,8'h62,8'h72,8'h82,8'h09,8'h0a,8'h16,8'h17,8'h18,8'h19,8'h1a,8'h25,8'h26,8'h27,8'h28,
    8'h29,8'h2a,8'h34,8'h35,8'h36,8'h37,8'h38,8'h39,8'h3a,8'h43,8'h44,8'h45,8'h46,8'h47,8'h48,8'h49,
    8'h4a,8'h53,8'h54,8'h55,8'h56,8'h57,8'h58,8'h59,8'h5a,8'h63,8'h64,8'h65,8'h66,8'h67,8'h68,8'h69,
    8'h6a,8'h73,8'h74,8'h75,8'h76,8'h77,8'h78,8'h79,8'h7a,8'h83,8'h84,8'h85,8'h86,8'h87,8'h88,8'h89,
    8'h8a,8'h92,8'h93,8'h94,8'h95,8'h96,8'h97,8'h98,8'h99,8'h9a,8'ha2,8'ha3,8'ha4,8'ha5,8'ha6,8'ha7,
    8'ha8,8'ha9,8'haa,8'hb2,8'hb3,8'hb4,8'hb5,8'hb6,8'hb7,8'hb8,8'hb9,8'hba,8'hc2,8'hc3,8'hc4,8'hc5,
    8'hc6,8'hc7,8'hc8,8'hc9,8'hca,8'hd2,8'hd3,8'hd4,8'hd5,8'hd6,8'hd7,8'hd8,8'hd9,8'hda,8'he1,8'he2,
    8'he3,8'he4,8'he5,8'he6,8'he7,8'he8,8'he9,8'hea,8'hf1,8'hf2,8'hf3,8'hf4,8'hf5,8'hf6,8'hf7,8'hf8,
    8'hf9,8'hfa
  };
  localparam logic [7:0] ACC_VALS [162] = '{
    8'h00,8'h01,8'h02,8'h03,8'h11,8'h04,8'h05,8'h21,8'h31,8'h06,8'h12,8'h41,8'h51,8'h07,8'h61,8'h71,
    8'h13,8'h22,8'h32,8'h81,8'h08,8'h14,8'h42,8'h91,8'ha1,8'hb1,8'hc1,8'h09,8'h23,8'h33,8'h52,8'hf0,
    8'h15,8'h62,8'h72,8'hd1,8'h0a,8'h16,8'h24,8'h34,8'he1,8'h25,8'hf1,8'h17,8'h18,8'h19,8'h1a,8'h26,
    8'h27,8'h28,8'h29,8'h2a,8'h35,8'h36,8'h37,8'h38,8'h39,8'h3a,8'h43,8'h44,8'h45,8'h46,8'h47,8'h48,
    8'h49,8'h4a,8'h53,8'h54,8'h55,8'h56,8'h57,8'h58,8'h59,8'h5a,8'h63,8'h64,8'h65,8'h66,8'h67,8'h68,
    8'h69,8'h6a,8'h73,8'h74,8'h75,8'h76,8'h77,8'h78,8'h79,8'h7a,8'h82,8'h83,8'h84,8'h85,8'h86,8'h87,
    8'h88,8'h89,8'h8a,8'h92,8'h93,8'h94,8'h95,8'h96,8'h97,8'h98,8'h99,8'h9a,8'ha2,8'ha3,8'ha4,8'ha5,
    8'ha6,8'ha7,8'ha8,8'ha9,8'haa,8'hb2,8'hb3,8'hb4,8'hb5,8'hb6,8'hb7,8'hb8,8'hb9,8'hba,8'hc2,8'hc3,
    8'hc4,8'hc5,8'hc6,8'hc7,8'hc8,8'hc9,8'hca,8'hd2,8'hd3,8'hd4,8'hd5,8'hd6,8'hd7,8'hd8,8'hd9,8'hda,
    8'he2,8'he3,8'he4,8'he5,8'he6,8'he7,8'he8,8'he9,8'hea,8'hf2,8'hf3,8'hf4,8'hf5,8'hf6,8'hf7,8'hf8,
    8'hf9,8'hfa
  };

  // One ROM entry: {length[4:0], code[15:0] left aligned}. Length 0 = symbol unused.
  typedef struct packed {
    logic [4:0]  len;
    logic [15:0] code;
  } huff_code_t;

  function automatic logic [7:0] huff_bits(input huff_sel_t sel, input logic [3:0] l);
    case (sel)
      HT_DC_LUMA:   return DCL_BITS[l];
      HT_DC_CHROMA: return DCC_BITS[l];
      HT_AC_LUMA:   return ACL_BITS[l];
      default:      return ACC_BITS[l];
    endcase
  endfunction

  function automatic logic [7:0] huff_val(input huff_sel_t sel, input logic [7:0] k);
    case (sel)
      HT_DC_LUMA, HT_DC_CHROMA: return 8'(k);   // DC symbols are the categories 0..11 in order
      HT_AC_LUMA:   return ACL_VALS[k];
      default:      return ACC_VALS[k];
    endcase
  endfunction

  // Canonical code of symbol `sym` in table `sel`.
  function automatic huff_code_t huff_code(input huff_sel_t sel, input logic [7:0] sym);
    huff_code_t r;
    int unsigned code, k;
    r = '0;
    code = 0;
    k = 0;
    for (int l = 1; l <= 16; l++) begin
      for (int n = 0; n < int'(huff_bits(sel, 4'(l - 1))); n++) begin
        if (huff_val(sel, 8'(k)) == sym) begin
          r.len  = 5'(l);
          r.code = 16'(code << (16 - l));
        end
        code++;
        k++;
      end
      code = code << 1;
    end
    return r;
  endfunction

endpackage
