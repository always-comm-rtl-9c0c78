// dct_2d: serial-in, serial-out 8x8 two-dimensional DCT built around one dct_1d.
//
// The block is an FSM with four phases. LOAD takes 64 samples, one per valid cycle,
// in raster order (row by row). ROWS feeds the eight rows to the 1-D DCT, one per
// cycle, and writes the results back in place. COLS does the same with the eight
// columns. UNLOAD streams the 64 coefficients out, one per cycle, in raster order of
// (vertical frequency, horizontal frequency). Sharing one 1-D DCT for both passes and
// serialising both ends follow the design; the in-place buffer is this
// implementation's choice.
//
// Arithmetic: the 8-bit input samples are integers. The row pass adds 5 fractional
// bits and is stored as 16 bits. The column pass adds 5 more, so out_coeff is a signed
// 24-bit value with 10 fractional bits. Its integer part is the JPEG-normalised 2-D
// DCT coefficient: G[u][v] = 1/4 C(u) C(v) sum g[i][j] cos(..) cos(..).
//
// Timing: in_ready is high only in LOAD. Both passes take 8 + 5 + 1 cycles each,
// so the last coefficient leaves 64 + 14 + 14 + 64 cycles after the first sample
// (allowing for gaps in the input). out_chan repeats the in_chan of the first sample.
module dct_2d
  import jpeg_pkg::*;
#(
  parameter int unsigned IN_W  = PIX_W,
  parameter int unsigned OUT_W = DCT_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_pixel,
  input  chan_t                   in_chan,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_coeff,
  output chan_t                   out_chan
);
  localparam int unsigned MID_W = IN_W + 8;   // row-pass result width (5 fractional bits)

  typedef enum logic [1:0] {S_LOAD, S_ROWS, S_COLS, S_UNLOAD} state_t;
  state_t state;

  logic signed [OUT_W-1:0] mat [64];
  logic [5:0] cnt;          // sample counter in LOAD/UNLOAD
  logic [3:0] feed_cnt;     // vectors fed in ROWS/COLS
  logic [3:0] res_cnt;      // vectors received in ROWS/COLS

  logic                    d_in_valid, d_out_valid;
  logic signed [MID_W-1:0] d_in  [8];
  logic signed [OUT_W-1:0] d_out [8];   // 1-D DCT output width is MID_W + 8 = OUT_W

  dct_1d #(.IN_W(MID_W), .OUT_W(OUT_W)) u_dct_1d (
    .clk, .rst,
    .in_valid (d_in_valid),
    .in_data  (d_in),
    .out_valid(d_out_valid),
    .out_data (d_out)
  );

  // Vector presented to the 1-D DCT: row feed_cnt in ROWS, column feed_cnt in COLS.
  always_comb begin
    d_in_valid = ((state == S_ROWS) || (state == S_COLS)) && (feed_cnt < 4'd8);
    for (int k = 0; k < 8; k++) begin
      if (state == S_COLS) d_in[k] = MID_W'(mat[{k[2:0], feed_cnt[2:0]}]);
      else                 d_in[k] = MID_W'(mat[{feed_cnt[2:0], k[2:0]}]);
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_coeff = mat[cnt];

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_LOAD;
      cnt      <= '0;
      feed_cnt <= '0;
      res_cnt  <= '0;
      out_chan <= CH_Y;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          mat[cnt] <= OUT_W'(in_pixel);
          if (cnt == 6'd0) out_chan <= in_chan;
          cnt <= cnt + 6'd1;
          if (cnt == 6'd63) begin
            state    <= S_ROWS;
            feed_cnt <= '0;
            res_cnt  <= '0;
          end
        end
        S_ROWS, S_COLS: begin
          if (d_in_valid) feed_cnt <= feed_cnt + 4'd1;
          if (d_out_valid) begin
            for (int k = 0; k < 8; k++) begin
              if (state == S_ROWS) mat[{res_cnt[2:0], 3'(k)}] <= d_out[k];
              else                 mat[{3'(k), res_cnt[2:0]}] <= d_out[k];
            end
            res_cnt <= res_cnt + 4'd1;
            if (res_cnt == 4'd7) begin
              feed_cnt <= '0;
              res_cnt  <= '0;
              state    <= (state == S_ROWS) ? S_COLS : S_UNLOAD;
            end
          end
        end
        S_UNLOAD: begin
          cnt <= cnt + 6'd1;
          if (cnt == 6'd63) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
