// tb_dct_1d: checks the 8-point DCT against the DCT-II definition computed in real
// arithmetic. 200 random vectors go in back to back. Each output must be within 2 LSB
// (1/16) plus the constant-rounding bound of 32 * F[k] and come out exactly 5 cycles after its input.
module tb_dct_1d;
  localparam int IN_W = 16, OUT_W = 24, N = 200;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic signed [IN_W-1:0]  in_data [8];
  logic signed [OUT_W-1:0] out_data [8];
  dct_1d #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  real exp_q [$];
  int  in_cycle_q [$];
  real tol_q [$];
  int  cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic push(input int amp);
    real f [8];
    real e [8];
    for (int i = 0; i < 8; i++) begin
      in_data[i] = IN_W'($signed($urandom_range(2*amp)) - amp);
      f[i] = real'(in_data[i]);
    end
    for (int k = 0; k < 8; k++) begin
      real s;
      s = 0.0;
      for (int i = 0; i < 8; i++) s += f[i] * $cos((2*i+1) * k * 3.14159265358979 / 16.0);
      e[k] = 0.5 * ((k == 0) ? 0.70710678118654 : 1.0) * s * 32.0;
    end
    for (int k = 0; k < 8; k++) exp_q.push_back(e[k]);
    in_cycle_q.push_back(cycle);
    // constant rounding (2^-15 each) on up to 8 inputs, plus output rounding
    tol_q.push_back(2.0 + 8.0 * amp * 32.0 / 32768.0);
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    real e [8];
    real d, tol;
    int c0;
    for (int k = 0; k < 8; k++) e[k] = exp_q.pop_front();
    c0 = in_cycle_q.pop_front();
    tol = tol_q.pop_front();
    checks++;
    if (cycle - c0 != 5) begin
      failures++; $display("latency %0d, expected 5", cycle - c0);
    end
    for (int k = 0; k < 8; k++) begin
      d = real'(out_data[k]) - e[k];
      checks++;
      if (d > tol || d < -tol) begin
        failures++;
        if (failures < 10) $display("F%0d = %0d, expected %f", k, out_data[k], e[k]);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      push((n % 3 == 0) ? 128 : ((n % 3 == 1) ? 2000 : 8000));
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("%0d vectors lost", exp_q.size()); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
