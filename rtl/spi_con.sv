// spi_con: SPI master that reads one sample from channel 7 of an MCP3008 ADC.
//
// On trigger, chip select falls and DCLK runs for 17 periods of 2*CLK_DIV system
// cycles. The controller drives its command on COPI, changing it on falling DCLK
// edges: start bit 1, single-ended bit 1, channel bits D2..D0 = 111 (CH7, where the
// MAX9814 microphone is wired). The ADC answers with a null bit after the sixth
// falling edge, then the 10-bit result MSB first after falling edges 7..16. The
// controller samples CIPO on rising edges 8..17. Chip select then rises and
// data_valid pulses with data_out[9:0]. The audio path keeps data_out[9:2], the top
// eight bits. The block, its pins and the 8-bit output follow the design. The
// clock rate (1 MHz at CLK_DIV = 50) and the bit timing follow the ADC's
// data sheet and are this implementation's choice.
//
// A trigger that arrives during a conversion is ignored. data_valid is set by the
// 17 * 2 * CLK_DIV-th clock edge after the edge that sees trigger (1,700 cycles).
module spi_con #(
  parameter int unsigned CLK_DIV = 50,       // half period of DCLK in system cycles
  parameter logic [2:0]  CHANNEL = 3'd7
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       trigger,
  output logic       cs,        // active low chip select
  output logic       copi,
  input  logic       cipo,
  output logic       dclk,
  output logic [9:0] data_out,
  output logic       data_valid
);
  localparam int unsigned NCLK = 17;
  localparam logic [4:0] CMD = {1'b1, 1'b1, CHANNEL};

  logic [$clog2(CLK_DIV)-1:0] div;
  logic [4:0]  edge_n;     // number of rising edges done
  logic        busy;
  logic [9:0]  shreg;

  always_ff @(posedge clk) begin
    if (rst) begin
      cs <= 1'b1; copi <= 1'b0; dclk <= 1'b0; busy <= 1'b0;
      div <= '0; edge_n <= '0; shreg <= '0; data_out <= '0; data_valid <= 1'b0;
    end else begin
      data_valid <= 1'b0;
      if (!busy) begin
        if (trigger) begin
          busy   <= 1'b1;
          cs     <= 1'b0;
          dclk   <= 1'b0;
          div    <= '0;
          edge_n <= '0;
          copi   <= CMD[4];          // start bit set up before the first rising edge
        end
      end else if (32'(div) == CLK_DIV - 1) begin
        div <= '0;
        if (!dclk) begin
          // rising edge
          dclk   <= 1'b1;
          edge_n <= edge_n + 5'd1;
          if (edge_n >= 5'd7) shreg <= {shreg[8:0], cipo};
        end else begin
          // falling edge
          dclk <= 1'b0;
          if (edge_n < 5'd5) copi <= CMD[3'(4 - edge_n)];
          else               copi <= 1'b0;
          if (edge_n == 5'(NCLK)) begin
            busy       <= 1'b0;
            cs         <= 1'b1;
            data_out   <= shreg;
            data_valid <= 1'b1;
          end
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end
endmodule
