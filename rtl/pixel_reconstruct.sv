// pixel_reconstruct: turns the camera's 8-bit parallel bus into RGB565 pixels with
// frame-buffer addresses.
//
// The camera drives pclk, href (line valid, named hsync here), vsync and 8 data bits.
// All of them are sampled in the faster clk_camera domain, and a rising edge of pclk
// is detected from two samples. During href, bytes alternate between the high byte
// (R[4:0] G[5:3]) and the low byte (G[2:0] B[4:0]). The second byte completes a
// pixel, which leaves with valid_pixel and its address
// addr = line * WIDTH + column. The column restarts at the falling edge of href, which
// also advances the line. vsync resets both. The design names this block and its
// outputs (camera_pixel[15:0], valid_pixel, addr_a). The byte order and the sync
// handling are the usual ones for this camera in RGB565 mode and are this
// implementation's choice.
module pixel_reconstruct #(
  parameter int unsigned WIDTH  = 320,
  parameter int unsigned HEIGHT = 180,
  parameter int unsigned ADDR_W = $clog2(WIDTH * HEIGHT)
) (
  input  logic              clk,          // clk_camera
  input  logic              rst,
  input  logic              cam_pclk,
  input  logic              cam_hsync,
  input  logic              cam_vsync,
  input  logic [7:0]        cam_data,
  output logic [15:0]       camera_pixel,
  output logic              valid_pixel,
  output logic [ADDR_W-1:0] addr_a
);
  logic       pclk_q, hs_q, vs_q, hs_prev;
  logic [7:0] data_q;
  logic       pclk_prev;
  logic       half;
  logic [7:0] hi_byte;
  logic [15:0] col, row;

  always_ff @(posedge clk) begin
    if (rst) begin
      pclk_q <= 1'b0; hs_q <= 1'b0; vs_q <= 1'b0; data_q <= '0;
      pclk_prev <= 1'b0; hs_prev <= 1'b0; half <= 1'b0; hi_byte <= '0;
      col <= '0; row <= '0;
      camera_pixel <= '0; valid_pixel <= 1'b0; addr_a <= '0;
    end else begin
      pclk_q <= cam_pclk; hs_q <= cam_hsync; vs_q <= cam_vsync; data_q <= cam_data;
      pclk_prev   <= pclk_q;
      valid_pixel <= 1'b0;
      if (pclk_q && !pclk_prev) begin
        hs_prev <= hs_q;
        if (vs_q) begin
          row <= '0; col <= '0; half <= 1'b0;
        end else if (hs_q) begin
          if (!half) begin
            hi_byte <= data_q;
            half    <= 1'b1;
          end else begin
            half <= 1'b0;
            col  <= col + 16'd1;
            if (col < 16'(WIDTH) && row < 16'(HEIGHT)) begin
              camera_pixel <= {hi_byte, data_q};
              valid_pixel  <= 1'b1;
              addr_a       <= ADDR_W'(32'(row) * WIDTH + 32'(col));
            end
          end
        end else if (hs_prev) begin
          row  <= row + 16'd1;
          col  <= '0;
          half <= 1'b0;
        end
      end
    end
  end
endmodule
