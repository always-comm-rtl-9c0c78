// ycrcb_converter: RGB565 to level-shifted Y / Cr / Cb with 4:2:0 chroma averaging.
//
// Each RGB565 pixel is widened to 8 bits per component (the top bits are repeated
// into the new low bits). It is converted with the JFIF equations in 8-bit fixed
// point:
//   Y  = ( 77 R + 150 G +  29 B) / 256
//   Cb = (-43 R -  85 G + 128 B) / 256 + 128
//   Cr = (128 R - 107 G -  21 B) / 256 + 128
// Only the component named by channel_sel is kept. Y samples come out one per input
// pixel. For Cr and Cb the signal generator sends the four pixels of a 2x2 group on
// consecutive valid cycles, and one sample, their rounded mean, comes out per group.
// Every sample is shifted from [0, 255] to [-128, 127] before it leaves.
// The subsampling, averaging and level shift follow the design. The coefficients
// and the rounding are this implementation's choices.
//
// Timing: two cycles of latency (convert, then average/shift). out_chan follows
// the channel of the sample.
module ycrcb_converter
  import jpeg_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic [15:0]             in_pixel,     // RGB565
  input  chan_t                   in_chan,
  output logic                    out_valid,
  output logic signed [PIX_W-1:0] out_pixel,
  output chan_t                   out_chan
);
  logic [7:0] r8, g8, b8;
  logic signed [19:0] acc;
  logic [7:0] comp;

  always_comb begin
    r8 = {in_pixel[15:11], in_pixel[15:13]};
    g8 = {in_pixel[10:5],  in_pixel[10:9]};
    b8 = {in_pixel[4:0],   in_pixel[4:2]};
    unique case (in_chan)
      CH_CR:   acc = 20'sd128 * $signed({1'b0, r8}) - 20'sd107 * $signed({1'b0, g8})
                   - 20'sd21 * $signed({1'b0, b8}) + 20'sd32896;    // +128*256 +128
      CH_CB:   acc = -20'sd43 * $signed({1'b0, r8}) - 20'sd85 * $signed({1'b0, g8})
                   + 20'sd128 * $signed({1'b0, b8}) + 20'sd32896;
      default: acc = 20'sd77 * $signed({1'b0, r8}) + 20'sd150 * $signed({1'b0, g8})
                   + 20'sd29 * $signed({1'b0, b8}) + 20'sd128;
    endcase
    if (acc < 0)               comp = 8'd0;
    else if (acc > 20'sd65535) comp = 8'd255;
    else                       comp = acc[15:8];
  end

  // stage 1
  logic       s1_valid;
  logic [7:0] s1_comp;
  chan_t      s1_chan;
  // stage 2 chroma accumulator
  logic [1:0] grp_cnt;
  logic [9:0] grp_sum;
  logic [9:0] grp_total;

  assign grp_total = grp_sum + 10'(s1_comp);

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0; s1_comp <= '0; s1_chan <= CH_Y;
      grp_cnt <= '0; grp_sum <= '0;
      out_valid <= 1'b0; out_pixel <= '0; out_chan <= CH_Y;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_comp <= comp;
        s1_chan <= in_chan;
      end
      out_valid <= 1'b0;
      if (s1_valid) begin
        if (s1_chan == CH_Y) begin
          out_valid <= 1'b1;
          out_pixel <= $signed(s1_comp ^ 8'h80);      // x - 128
          out_chan  <= CH_Y;
        end else begin
          grp_cnt <= grp_cnt + 2'd1;
          if (grp_cnt == 2'd3) begin
            logic [7:0] mean;
            mean = 8'((grp_total + 10'd2) >> 2);
            grp_sum   <= '0;
            out_valid <= 1'b1;
            out_pixel <= $signed(mean ^ 8'h80);
            out_chan  <= s1_chan;
          end else begin
            grp_sum <= grp_total;
          end
        end
      end
    end
  end
endmodule
