// mcp3008_model: behavioural model of the MCP3008 10-bit ADC's SPI interface, for
// simulation only.
//
// Chip select falling starts a transfer. On rising DCLK edges 1..5 the model takes
// the command from DIN: start bit, single/differential bit, channel D2..D0. It drives
// a null bit (0) after falling edge 6 and the 10-bit result of the selected channel
// MSB first after falling edges 7..16, as in the data sheet's timing diagram. DOUT
// is 1 (standing in for high impedance) while chip select is high. The sample of
// each channel comes from the `value` input. The decoded command is reported on
// `start_bit`, `single` and `channel`, and `rising` counts the DCLK rising edges of
// the last transfer so a testbench can check the frame length.
module mcp3008_model (
  input  logic       cs,
  input  logic       dclk,
  input  logic       din,
  output logic       dout,
  input  logic [9:0] value [8],
  output logic       start_bit,
  output logic       single,
  output logic [2:0] channel,
  output int         rising
);
  int falling;
  logic [4:0] cmd;

  always @(negedge cs) begin
    rising  = 0;
    falling = 0;
    cmd     = '0;
  end

  always @(posedge dclk) if (!cs) begin
    rising++;
    if (rising <= 5) cmd = {cmd[3:0], din};
    if (rising == 5) begin
      start_bit = cmd[4];
      single    = cmd[3];
      channel   = cmd[2:0];
    end
  end

  always @(negedge dclk) if (!cs) begin
    falling++;
    if (falling == 6) dout = 1'b0;
    else if (falling >= 7 && falling <= 16) dout = value[channel][16 - falling];
  end

  always @(posedge cs) dout = 1'b1;
  initial dout = 1'b1;
endmodule
