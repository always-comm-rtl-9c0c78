// quantizer: divides each DCT coefficient by its JPEG quantisation step and rounds.
//
// Coefficients arrive serially in raster order, one per in_valid cycle, 64 per block.
// An internal 0..63 counter picks the step from the 50%-quality example matrices of
// the JPEG standard: the luminance matrix for Y blocks and the chrominance matrix for
// Cr/Cb blocks. The division is a multiplication by a 16-bit fixed-point reciprocal
// round(2^16/q), as the design specifies. The result is rounded to nearest (halves
// towards +infinity) and saturated to 11 bits. Using both matrices, chosen by channel,
// is this implementation's reading of "a standard quantization matrix".
//
// Timing: one cycle of latency, full throughput. out_chan follows in_chan.
module quantizer
  import jpeg_pkg::*;
#(
  parameter int unsigned IN_W   = DCT_W,
  parameter int unsigned IN_FRAC = DCT_FRAC,
  parameter int unsigned OUT_W  = COEF_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_coeff,
  input  chan_t                   in_chan,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_coeff,
  output chan_t                   out_chan
);
  localparam int unsigned SH = IN_FRAC + RECIP_FRAC;
  localparam int unsigned PW = IN_W + 18;
  typedef logic signed [PW-1:0] prod_t;
  localparam prod_t MAXV = prod_t'((1 << (OUT_W - 1)) - 1);
  localparam prod_t MINV = -prod_t'(1 << (OUT_W - 1));

  logic [5:0]  idx;
  logic [7:0]  q;
  logic [16:0] recip;
  prod_t       prod, rounded;

  always_comb begin
    q       = (in_chan == CH_Y) ? QUANT_LUMA[idx] : QUANT_CHROMA[idx];
    recip   = quant_recip(q);
    prod    = prod_t'(in_coeff) * prod_t'({1'b0, recip});
    rounded = (prod + (prod_t'(1) <<< (SH - 1))) >>> SH;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      idx       <= '0;
      out_valid <= 1'b0;
      out_coeff <= '0;
      out_chan  <= CH_Y;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        idx      <= idx + 6'd1;
        out_chan <= in_chan;
        if (rounded > MAXV)      out_coeff <= MAXV[OUT_W-1:0];
        else if (rounded < MINV) out_coeff <= MINV[OUT_W-1:0];
        else                     out_coeff <= rounded[OUT_W-1:0];
      end
    end
  end
endmodule
