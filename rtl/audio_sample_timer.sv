// audio_sample_timer: the 8 kHz counter of the audio path.
//
// Counts cycles of the 100 MHz clock and emits a one-cycle trigger every
// CLK_HZ / SAMPLE_HZ = 12,500 cycles, which starts one ADC conversion in spi_con.
module audio_sample_timer #(
  parameter int unsigned CLK_HZ    = 100_000_000,
  parameter int unsigned SAMPLE_HZ = 8_000,
  parameter int unsigned PERIOD    = CLK_HZ / SAMPLE_HZ
) (
  input  logic clk,
  input  logic rst,
  output logic trigger
);
  logic [$clog2(PERIOD)-1:0] cnt;
  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      trigger <= 1'b0;
    end else begin
      trigger <= (32'(cnt) == PERIOD - 1);
      cnt     <= (32'(cnt) == PERIOD - 1) ? '0 : cnt + 1'b1;
    end
  end
endmodule
