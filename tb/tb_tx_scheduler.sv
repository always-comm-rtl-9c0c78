// tb_tx_scheduler: a byte source answers tx_ack with the next byte of random frames
// (1 to 120 bytes, random pauses between frames). A receiver samples the RMII pins
// each clock, rebuilds bytes from the dibits (least significant pair first) and
// checks each burst: 7 x 0x55, 0xD5, the frame bytes, then the FCS computed here
// bit-serially. It also checks that eth_txd is 00 outside bursts, that bursts are at
// least 48 cycles apart, that eth_rstn rises after exactly 20,000 cycles, that
// eth_mdc has a period of 32 cycles and that eth_mdio stays high.
module tb_tx_scheduler;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] tx_data;
  logic tx_sof, tx_eof, tx_ack;
  logic [1:0] eth_txd;
  logic eth_txen, eth_rstn, eth_mdc, eth_mdio, idle;
  tx_scheduler dut (.*);

  byte unsigned frame [$];
  byte unsigned sent [$][$];
  int idx = 0;
  bit active = 0;
  assign tx_data = (active && idx < frame.size()) ? frame[idx] : 8'hXX;
  assign tx_sof  = active && idx == 0;
  assign tx_eof  = active && idx == frame.size() - 1;
  always @(posedge clk) if (active && tx_ack) idx <= idx + 1;

  function automatic logic [31:0] crc_of(input byte unsigned m [$]);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (m[i]) begin
      c = c ^ 32'(m[i]);
      for (int b = 0; b < 8; b++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    end
    return ~c;
  endfunction

  // receiver
  logic [1:0] dibits [$];
  int gap = 1000, frames_rx = 0, cycle = 0, rstn_rise = -1;
  always @(posedge clk) if (!rst) begin
    cycle++;
    if (eth_rstn && rstn_rise < 0) rstn_rise = cycle;
    if (!eth_mdio) begin checks++; failures++; end
    if (eth_txen) begin
      if (dibits.size() == 0) begin
        checks++;
        if (gap < 48) begin failures++; $display("gap of %0d cycles", gap); end
      end
      dibits.push_back(eth_txd);
      gap = 0;
    end else begin
      if (eth_txd != 2'b00) begin checks++; failures++; $display("txd not idle"); end
      gap++;
      if (dibits.size() != 0) begin
        byte unsigned rx [$];
        byte unsigned exp_f [$];
        logic [31:0] f;
        rx.delete();
        checks++;
        if (dibits.size() % 4 != 0) begin failures++; $display("burst of %0d dibits", dibits.size()); end
        while (dibits.size() >= 4) begin
          logic [7:0] b;
          for (int i = 0; i < 4; i++) b[2*i +: 2] = dibits.pop_front();
          rx.push_back(b);
        end
        dibits.delete();
        exp_f = sent.pop_front();
        f = crc_of(exp_f);
        checks++;
        if (rx.size() != exp_f.size() + 12) begin
          failures++; $display("frame of %0d bytes, expected %0d", rx.size(), exp_f.size() + 12);
        end else begin
          for (int i = 0; i < 7; i++) if (rx[i] != 8'h55) begin failures++; $display("preamble"); end
          if (rx[7] != 8'hD5) begin failures++; $display("SFD"); end
          foreach (exp_f[i]) if (rx[8 + i] != exp_f[i]) begin failures++; $display("byte %0d", i); break; end
          for (int i = 0; i < 4; i++)
            if (rx[8 + exp_f.size() + i] != f[8*i +: 8]) begin failures++; $display("FCS byte %0d", i); end
        end
        frames_rx++;
      end
    end
  end

  // MDC period
  int last_mdc_rise = -1, mdc_checks = 0;
  always @(posedge eth_mdc) if (!rst) begin
    if (last_mdc_rise >= 0) begin
      checks++; mdc_checks++;
      if (cycle - last_mdc_rise != 32) begin failures++; $display("MDC period %0d", cycle - last_mdc_rise); end
    end
    last_mdc_rise = cycle;
  end

  initial begin
    int n_frames;
    repeat (3) @(posedge clk);
    rst <= 0;
    n_frames = 40;
    for (int n = 0; n < n_frames; n++) begin
      repeat ($urandom_range(0, 200)) @(posedge clk);
      frame.delete();
      repeat ((n == 0) ? 1 : $urandom_range(1, 120)) frame.push_back(8'($urandom));
      sent.push_back(frame);
      @(negedge clk);
      idx = 0; active = 1;
      wait (idx == frame.size());
      @(negedge clk) active = 0;
    end
    wait (idle);
    repeat (60) @(posedge clk);
    while (cycle < 20100) @(posedge clk);
    checks++;
    if (frames_rx != n_frames) begin failures++; $display("%0d of %0d frames seen", frames_rx, n_frames); end
    checks++;
    // high from the 20,000th clock edge on; this sampler sees it at the next edge
    if (rstn_rise != 20001) begin failures++; $display("PHY reset released at cycle %0d", rstn_rise); end
    checks++;
    if (mdc_checks < 100) begin failures++; $display("MDC not running"); end
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
