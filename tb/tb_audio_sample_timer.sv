// tb_audio_sample_timer: checks that the trigger is a single-cycle pulse every
// 12,500 cycles of the 100 MHz clock (8 kHz), over 20 periods, and that the first
// pulse comes 12,500 cycles after reset.
module tb_audio_sample_timer;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic trigger;
  audio_sample_timer dut (.*);

  int cyc = 0, last = 0, pulses = 0;
  bit prev = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (trigger) begin
      checks++;
      if (prev) begin failures++; $display("trigger longer than one cycle"); end
      if (cyc - last != 12500) begin failures++; $display("interval %0d cycles", cyc - last); end
      last = cyc;
      pulses++;
    end
    prev = trigger;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // the first pulse is seen one edge after the counter's last state
    last = 1;
    repeat (20 * 12500 + 10) @(posedge clk);
    checks++;
    if (pulses != 20) begin failures++; $display("%0d pulses", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
