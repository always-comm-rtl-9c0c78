// tb_frame_buffer: writes random pixels at random addresses in the camera clock
// domain while reading random addresses in the system clock domain (unrelated clock
// periods), with a full-size 320 x 180 memory. Every read is compared with a
// reference copy one cycle later. Writes beyond the last pixel must be ignored and
// reads beyond it must return 0.
module tb_frame_buffer;
  localparam int DEPTH = 320 * 180;
  logic clk_a = 0, clk_b = 0;
  always #7 clk_a = ~clk_a;
  always #5 clk_b = ~clk_b;
  int checks = 0, failures = 0;

  logic we_a = 0;
  logic [15:0] addr_a = 0, addr_b = 0, din_a = 0, dout_b;
  frame_buffer dut (.*);

  logic [15:0] refm [DEPTH];
  bit written [DEPTH];

  initial begin
    // fill the memory first, then mix reads and writes to different addresses
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk_a);
      we_a = 1; addr_a = 16'(i); din_a = 16'($urandom);
      refm[i] = din_a; written[i] = 1;
    end
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk_a);
      we_a = 1;
      addr_a = (n % 100 == 0) ? 16'(DEPTH + $urandom_range(0, 65535 - DEPTH)) : 16'($urandom_range(0, DEPTH - 1));
      din_a = 16'($urandom);
      if (addr_a < DEPTH) refm[addr_a] = din_a;
    end
    @(negedge clk_a) we_a = 0;
  end

  initial begin
    int a;
    wait (written[DEPTH - 1]);
    repeat (2) @(negedge clk_b);
    for (int n = 0; n < 30000; n++) begin
      @(negedge clk_b);
      a = (n % 50 == 0) ? $urandom_range(DEPTH, 65535) : $urandom_range(0, DEPTH - 1);
      // avoid the address being written in this very cycle
      if (we_a && int'(addr_a) == a) a = (a + 1) % DEPTH;
      addr_b = 16'(a);
      @(negedge clk_b);
      checks++;
      if (dout_b != ((a < DEPTH) ? refm[a] : 16'h0000)) begin
        failures++;
        if (failures < 10) $display("address %0d read %h, expected %h", a, dout_b, (a < DEPTH) ? refm[a] : 16'h0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk_b);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
