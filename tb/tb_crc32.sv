// tb_crc32: checks the Ethernet CRC-32 against the standard check value
// ("123456789" gives CBF43926), against a bit-serial reference of the reflected
// polynomial EDB88320 on random messages with random gaps in valid, and checks
// that init restarts the register. The FCS is the complement of the register.
module tb_crc32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init = 0, valid = 0;
  logic [7:0] data = 0;
  logic [31:0] crc;
  crc32 dut (.*);

  function automatic logic [31:0] ref_crc(input logic [31:0] c, input logic [7:0] d);
    c = c ^ 32'(d);
    for (int i = 0; i < 8; i++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction

  task automatic message(input byte unsigned msg [$], output logic [31:0] got, output logic [31:0] expv);
    logic [31:0] r;
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    r = 32'hFFFF_FFFF;
    foreach (msg[i]) begin
      while ($urandom_range(3) == 0) @(negedge clk);
      valid = 1; data = msg[i];
      r = ref_crc(r, msg[i]);
      @(negedge clk) valid = 0;
    end
    got = ~crc;
    expv = ~r;
  endtask

  initial begin
    byte unsigned m [$];
    logic [31:0] g, e;
    repeat (3) @(posedge clk);
    rst <= 0;
    m = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    message(m, g, e);
    checks++;
    if (g !== 32'hCBF4_3926) begin failures++; $display("check value %h", g); end
    for (int n = 0; n < 50; n++) begin
      m.delete();
      repeat ($urandom_range(1, 80)) m.push_back(8'($urandom));
      message(m, g, e);
      checks++;
      if (g !== e) begin failures++; $display("message %0d: got %h expected %h", n, g, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
