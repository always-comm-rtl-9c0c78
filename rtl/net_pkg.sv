// net_pkg: constants and types of the UDP/IPv4/Ethernet transmitter.
//
// The frame is: preamble (7 x 0x55, 0xD5), Ethernet header (14 bytes), IPv4 header
// (20 bytes), UDP header (8 bytes), a one-byte audio/video tag, a one-byte sequence
// number, the payload (up to 1470 bytes), the FCS (4 bytes) and a 48-cycle
// interframe gap. The link is RMII: two bits per 50 MHz cycle, so one byte takes four
// cycles. The addresses and port numbers are fixed local values of this design (a
// point-to-point link with two hosts); they are parameters of the write scheduler.
package net_pkg;

  localparam int unsigned PREAMBLE_BYTES = 8;
  localparam int unsigned ETH_HDR_BYTES  = 14;
  localparam int unsigned IP_HDR_BYTES   = 20;
  localparam int unsigned UDP_HDR_BYTES  = 8;
  localparam int unsigned META_BYTES     = 2;   // audio/video tag + sequence number
  localparam int unsigned MAX_DATA_BYTES = 1470;
  localparam int unsigned FCS_BYTES      = 4;
  localparam int unsigned IFG_CYCLES     = 48;
  localparam int unsigned CYCLES_PER_BYTE = 4;  // RMII: 2 bits per cycle

  localparam logic [7:0] TAG_AUDIO = 8'h00;
  localparam logic [7:0] TAG_VIDEO = 8'h01;

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;
  localparam logic [7:0]  IP_TTL         = 8'd64;

  // States of the write scheduler (one per packet section it produces).
  typedef enum logic [2:0] {
    WS_IDLE,
    WS_ETH_HDR,
    WS_IP_HDR,
    WS_UDP_HDR,
    WS_META,
    WS_DATA,
    WS_WAIT_REQ_LOW
  } ws_state_t;

  // States of the transmit scheduler (the sections it produces itself plus payload pass-through).
  typedef enum logic [2:0] {
    TS_IDLE,
    TS_PREAMBLE,
    TS_PAYLOAD,
    TS_FCS,
    TS_IFG
  } ts_state_t;

  // Byte-wise CRC-32 (IEEE 802.3, reflected polynomial 0xEDB88320) table entry:
  // the CRC register after shifting eight zero bits through a register holding i.
  function automatic logic [31:0] crc32_table_entry(input logic [7:0] i);
    logic [31:0] c;
    c = {24'd0, i};
    for (int b = 0; b < 8; b++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction

endpackage
