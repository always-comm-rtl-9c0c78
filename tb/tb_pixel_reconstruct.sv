// tb_pixel_reconstruct: a camera model drives pclk at a quarter of the sampling
// clock, with data changing on falling pclk, href (hsync) around each line and a
// vsync pulse before each frame. Lines are longer than WIDTH and frames have more
// lines than HEIGHT; the extra pixels must not be written. Every valid_pixel is
// compared in order with the expected RGB565 value (high byte first) and address
// line * WIDTH + column. A vsync arriving in the middle of a frame must restart at
// address 0. Runs at a reduced 24 x 6 image so several frames fit.
module tb_pixel_reconstruct;
  localparam int W = 24, H = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cam_pclk = 0, cam_hsync = 0, cam_vsync = 0;
  logic [7:0] cam_data = 0;
  logic [15:0] camera_pixel;
  logic valid_pixel;
  logic [7:0] addr_a;
  pixel_reconstruct #(.WIDTH(W), .HEIGHT(H)) dut (.*);

  typedef struct { int addr; logic [15:0] pix; } px_t;
  px_t exp_q [$];

  task automatic pclk_cycle(input logic hs, input logic vs, input logic [7:0] d);
    cam_pclk = 0; cam_hsync = hs; cam_vsync = vs; cam_data = d;
    repeat (2) @(negedge clk);
    cam_pclk = 1;
    repeat (2) @(negedge clk);
  endtask

  task automatic frame(input int lines, input int line_px, input int stop_after_line);
    logic [15:0] p;
    px_t e;
    repeat (3) pclk_cycle(0, 1, 8'h00);
    repeat (4) pclk_cycle(0, 0, 8'h00);
    for (int r = 0; r < lines && r < stop_after_line; r++) begin
      for (int c = 0; c < line_px; c++) begin
        p = 16'($urandom);
        pclk_cycle(1, 0, p[15:8]);
        pclk_cycle(1, 0, p[7:0]);
        if (c < W && r < H) begin e.addr = r * W + c; e.pix = p; exp_q.push_back(e); end
      end
      repeat (6) pclk_cycle(0, 0, 8'($urandom));
    end
  endtask

  always @(posedge clk) if (!rst && valid_pixel) begin
    px_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected pixel at %0d", addr_a); end
    else begin
      e = exp_q.pop_front();
      if (int'(addr_a) != e.addr || camera_pixel != e.pix) begin
        failures++;
        if (failures < 10) $display("pixel %h at %0d, expected %h at %0d", camera_pixel, addr_a, e.pix, e.addr);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    frame(H + 2, W + 3, 99);
    frame(H, W, 3);          // cut short by the next vsync
    frame(H + 1, W + 1, 99);
    frame(H, W, 99);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d pixels missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
