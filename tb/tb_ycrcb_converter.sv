// tb_ycrcb_converter: sends Y pixels one by one and Cr/Cb pixels in groups of four,
// with random gaps, including black, white and pure-colour pixels. Each output is
// checked against the fixed-point conversion (integer arithmetic written out here),
// and also against the real-valued JFIF equations within 1.5 levels. Chroma
// outputs must be the rounded mean of their group. All values must be level-shifted
// by -128 and carry their channel tag.
module tb_ycrcb_converter;
  import jpeg_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [15:0] in_pixel = 0;
  chan_t in_chan = CH_Y, out_chan;
  logic signed [7:0] out_pixel;
  ycrcb_converter dut (.*);

  typedef struct { int v; real rv; chan_t ch; } smp_t;
  smp_t exp_q [$];

  function automatic int fixed_conv(input logic [15:0] p, input chan_t ch, output real rv);
    int r, g, b, acc;
    r = {p[15:11], p[15:13]};
    g = {p[10:5], p[10:9]};
    b = {p[4:0], p[4:2]};
    case (ch)
      CH_CR: begin acc = 128 * r - 107 * g - 21 * b + 32896; rv = 0.5 * r - 0.418688 * g - 0.081312 * b + 128.0; end
      CH_CB: begin acc = -43 * r - 85 * g + 128 * b + 32896; rv = -0.168736 * r - 0.331264 * g + 0.5 * b + 128.0; end
      default: begin acc = 77 * r + 150 * g + 29 * b + 128; rv = 0.299 * r + 0.587 * g + 0.114 * b; end
    endcase
    if (acc < 0) acc = 0;
    if (acc > 65535) acc = 65535;
    return acc >> 8;
  endfunction

  task automatic send(input logic [15:0] p, input chan_t ch);
    @(negedge clk);
    in_valid = 1; in_pixel = p; in_chan = ch;
    @(negedge clk) in_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  function automatic logic [15:0] pick();
    case ($urandom_range(0, 7))
      0: return 16'h0000;
      1: return 16'hFFFF;
      2: return 16'hF800;
      3: return 16'h07E0;
      4: return 16'h001F;
      default: return 16'($urandom);
    endcase
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    smp_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (int'(out_pixel) != e.v - 128 || out_chan != e.ch ||
          (real'(int'(out_pixel)) - (e.rv - 128.0)) > 1.5 || (real'(int'(out_pixel)) - (e.rv - 128.0)) < -1.5) begin
        failures++;
        if (failures < 10) $display("got %0d ch %0d, expected %0d (%f) ch %0d", out_pixel, out_chan, e.v - 128, e.rv - 128.0, e.ch);
      end
    end
  end

  initial begin
    smp_t e;
    logic [15:0] p;
    logic [15:0] grp [4];
    real rv, rsum;
    int sum;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 600; n++) begin
      if (n % 3 == 0) begin
        p = pick();
        e.v = fixed_conv(p, CH_Y, rv); e.rv = rv; e.ch = CH_Y;
        exp_q.push_back(e);
        send(p, CH_Y);
      end else begin
        e.ch = chan_t'(n % 3);
        sum = 0; rsum = 0.0;
        for (int k = 0; k < 4; k++) begin
          grp[k] = pick();
          sum += fixed_conv(grp[k], e.ch, rv);
          rsum += rv;
        end
        e.v = (sum + 2) / 4; e.rv = rsum / 4.0;
        exp_q.push_back(e);
        for (int k = 0; k < 4; k++) send(grp[k], e.ch);
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
