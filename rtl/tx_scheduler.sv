// tx_scheduler: the RMII side of the Ethernet transmitter. It sends the preamble,
// passes the frame bytes through, appends the FCS and keeps the interframe gap.
//
// Runs on the 50 MHz network clock and sends two bits per cycle, least significant
// pair first, so one byte takes four cycles. When the write scheduler offers a frame
// (tx_sof high with the first byte on tx_data), it sends 7 bytes of 0x55 and one of
// 0xD5 (32 cycles). Then it takes one byte from tx_data every four cycles,
// acknowledging each with a one-cycle tx_ack. That is when the byte is latched and
// fed to the CRC. After the byte marked tx_eof it sends the 4-byte FCS (16 cycles)
// and holds eth_txen low for a 48-cycle interframe gap before it looks at tx_sof
// again. eth_txen is high from the first preamble bit to the last FCS bit.
//
// PHY housekeeping, as the design describes: eth_rstn is held low for the first
// RESET_CYCLES (20,000) cycles after reset, and no frame starts before it is
// released. eth_mdc is the network clock divided by 32 (1.5625 MHz). eth_mdio
// stays at its idle level of 1, because no management frames are sent (so it is a
// constant output). The PHY reference clock, phase-shifted by -45 degrees, comes
// from a clock generator outside this module.
module tx_scheduler
  import net_pkg::*;
#(
  parameter int unsigned RESET_CYCLES = 20_000
) (
  input  logic       clk,        // clk_net, 50 MHz
  input  logic       rst,
  input  logic [7:0] tx_data,
  input  logic       tx_sof,
  input  logic       tx_eof,
  output logic       tx_ack,
  output logic [1:0] eth_txd,
  output logic       eth_txen,
  output logic       eth_rstn,
  output logic       eth_mdc,
  output logic       eth_mdio,
  output logic       idle
);
  ts_state_t   state;
  logic [1:0]  phase;
  logic [7:0]  cur_byte;
  logic [5:0]  cnt;          // bytes of preamble/FCS, cycles of IFG
  logic        last;
  logic [31:0] fcs_q;
  logic        crc_init;
  logic [31:0] crc_reg, fcs;

  crc32 u_crc (.clk, .rst, .init(crc_init), .valid(tx_ack), .data(tx_data), .crc(crc_reg));
  assign fcs = ~crc_reg;             // the FCS is the complemented register

  // a payload byte is taken on the last dibit of the previous byte
  assign tx_ack = (phase == 2'(CYCLES_PER_BYTE - 1)) &&
                  (((state == TS_PREAMBLE) && (cnt == 6'(PREAMBLE_BYTES - 1))) || ((state == TS_PAYLOAD) && !last));
  assign crc_init = (state == TS_IDLE);

  assign eth_txd  = (state == TS_PREAMBLE || state == TS_PAYLOAD || state == TS_FCS)
                    ? cur_byte[2*phase +: 2] : 2'b00;
  assign eth_txen = (state == TS_PREAMBLE || state == TS_PAYLOAD || state == TS_FCS);
  assign idle     = (state == TS_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= TS_IDLE; phase <= '0; cur_byte <= '0; cnt <= '0; last <= 1'b0; fcs_q <= '0;
    end else begin
      unique case (state)
        TS_IDLE: if (tx_sof && eth_rstn) begin
          state <= TS_PREAMBLE; phase <= '0; cnt <= '0; cur_byte <= 8'h55;
        end
        TS_PREAMBLE: begin
          phase <= phase + 2'd1;
          if (phase == 2'(CYCLES_PER_BYTE - 1)) begin
            cnt <= cnt + 6'd1;
            if (cnt == 6'(PREAMBLE_BYTES - 2)) cur_byte <= 8'hD5;
            if (cnt == 6'(PREAMBLE_BYTES - 1)) begin
              state    <= TS_PAYLOAD;
              cur_byte <= tx_data;
              last     <= tx_eof;
            end
          end
        end
        TS_PAYLOAD: begin
          phase <= phase + 2'd1;
          if (phase == 2'(CYCLES_PER_BYTE - 1)) begin
            if (last) begin
              state    <= TS_FCS;
              fcs_q    <= fcs;
              cur_byte <= fcs[7:0];
              cnt      <= '0;
            end else begin
              cur_byte <= tx_data;
              last     <= tx_eof;
            end
          end
        end
        TS_FCS: begin
          phase <= phase + 2'd1;
          if (phase == 2'(CYCLES_PER_BYTE - 1)) begin
            cnt <= cnt + 6'd1;
            if (cnt == 6'(FCS_BYTES - 1)) begin
              state <= TS_IFG;
              cnt   <= '0;
            end else begin
              cur_byte <= fcs_q[15:8];
              fcs_q    <= fcs_q >> 8;
            end
          end
        end
        TS_IFG: begin
          cnt <= cnt + 6'd1;
          if (cnt == 6'(IFG_CYCLES - 1)) state <= TS_IDLE;
        end
        default: state <= TS_IDLE;
      endcase
    end
  end

  // PHY reset and management clock
  logic [$clog2(RESET_CYCLES+1)-1:0] rst_cnt;
  logic [4:0] mdc_div;
  always_ff @(posedge clk) begin
    if (rst) begin
      rst_cnt  <= '0;
      eth_rstn <= 1'b0;
      mdc_div  <= '0;
    end else begin
      mdc_div <= mdc_div + 5'd1;
      if (32'(rst_cnt) < RESET_CYCLES) rst_cnt <= rst_cnt + 1'b1;
      eth_rstn <= (32'(rst_cnt) >= RESET_CYCLES - 1);
    end
  end
  assign eth_mdc  = mdc_div[4];
  assign eth_mdio = 1'b1;

endmodule
