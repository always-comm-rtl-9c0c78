// zigzag: reorders one 8x8 block of quantised coefficients into zigzag order.
//
// The block alternates between two phases and is not double buffered. In the first
// phase it stores 64 serial inputs in raster order, one per in_valid cycle. In the
// second it emits them on 64 consecutive cycles. Output k is the stored
// coefficient at raster position zigzag_idx2pos(k), a lookup table derived from the
// zigzag numbering of the design (position 0 is the DC term, 1 is (0,1), 2 is (1,0),
// 3 is (2,0), ...). in_ready is low while the block is being emitted. out_last
// marks the 64th output. out_chan repeats the channel of the first input.
module zigzag
  import jpeg_pkg::*;
#(
  parameter int unsigned W = COEF_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_coeff,
  input  chan_t               in_chan,
  output logic                out_valid,
  output logic                out_last,
  output logic signed [W-1:0] out_coeff,
  output chan_t               out_chan
);
  // Read order table: raster position of the k-th output.
  localparam logic [5:0] ORDER [64] = '{
    zigzag_idx2pos( 0), zigzag_idx2pos( 1), zigzag_idx2pos( 2), zigzag_idx2pos( 3),
    zigzag_idx2pos( 4), zigzag_idx2pos( 5), zigzag_idx2pos( 6), zigzag_idx2pos( 7),
    zigzag_idx2pos( 8), zigzag_idx2pos( 9), zigzag_idx2pos(10), zigzag_idx2pos(11),
    zigzag_idx2pos(12), zigzag_idx2pos(13), zigzag_idx2pos(14), zigzag_idx2pos(15),
    zigzag_idx2pos(16), zigzag_idx2pos(17), zigzag_idx2pos(18), zigzag_idx2pos(19),
    zigzag_idx2pos(20), zigzag_idx2pos(21), zigzag_idx2pos(22), zigzag_idx2pos(23),
    zigzag_idx2pos(24), zigzag_idx2pos(25), zigzag_idx2pos(26), zigzag_idx2pos(27),
    zigzag_idx2pos(28), zigzag_idx2pos(29), zigzag_idx2pos(30), zigzag_idx2pos(31),
    zigzag_idx2pos(32), zigzag_idx2pos(33), zigzag_idx2pos(34), zigzag_idx2pos(35),
    zigzag_idx2pos(36), zigzag_idx2pos(37), zigzag_idx2pos(38), zigzag_idx2pos(39),
    zigzag_idx2pos(40), zigzag_idx2pos(41), zigzag_idx2pos(42), zigzag_idx2pos(43),
    zigzag_idx2pos(44), zigzag_idx2pos(45), zigzag_idx2pos(46), zigzag_idx2pos(47),
    zigzag_idx2pos(48), zigzag_idx2pos(49), zigzag_idx2pos(50), zigzag_idx2pos(51),
    zigzag_idx2pos(52), zigzag_idx2pos(53), zigzag_idx2pos(54), zigzag_idx2pos(55),
    zigzag_idx2pos(56), zigzag_idx2pos(57), zigzag_idx2pos(58), zigzag_idx2pos(59),
    zigzag_idx2pos(60), zigzag_idx2pos(61), zigzag_idx2pos(62), zigzag_idx2pos(63)
  };

  logic signed [W-1:0] mem [64];
  logic [5:0] cnt;
  logic       emitting;

  assign in_ready  = !emitting;
  assign out_valid = emitting;
  assign out_last  = emitting && (cnt == 6'd63);
  assign out_coeff = mem[ORDER[cnt]];

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      emitting <= 1'b0;
      out_chan <= CH_Y;
    end else if (!emitting) begin
      if (in_valid) begin
        mem[cnt] <= in_coeff;
        if (cnt == 6'd0) out_chan <= in_chan;
        cnt <= cnt + 6'd1;
        if (cnt == 6'd63) emitting <= 1'b1;
      end
    end else begin
      cnt <= cnt + 6'd1;
      if (cnt == 6'd63) emitting <= 1'b0;
    end
  end
endmodule
