// frame_buffer: dual-clock image memory between the camera and the codec.
//
// One 16-bit RGB565 word per pixel, WIDTH x HEIGHT words (320 x 180 x 16 bits =
// 921,600 bits, the "1 Mb" block-RAM frame buffer of the design). Port A is written
// in the camera clock domain. Port B is read in the system clock domain with one
// cycle of latency. The memory lets the camera write in its own clock domain while
// the codec reads. There is no frame locking: the codec may see parts of two
// consecutive frames, as with a plain dual-port block RAM.
module frame_buffer #(
  parameter int unsigned WIDTH  = 320,
  parameter int unsigned HEIGHT = 180,
  parameter int unsigned DEPTH  = WIDTH * HEIGHT,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk_a,
  input  logic              we_a,
  input  logic [ADDR_W-1:0] addr_a,
  input  logic [15:0]       din_a,
  input  logic              clk_b,
  input  logic [ADDR_W-1:0] addr_b,
  output logic [15:0]       dout_b
);
  logic [15:0] mem [DEPTH];

  always_ff @(posedge clk_a)
    if (we_a && (32'(addr_a) < DEPTH)) mem[addr_a] <= din_a;

  always_ff @(posedge clk_b)
    dout_b <= (32'(addr_b) < DEPTH) ? mem[addr_b] : 16'h0000;
endmodule
