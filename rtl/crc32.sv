// crc32: byte-at-a-time CRC-32 (IEEE 802.3) for the Ethernet frame check sequence.
//
// A 256-entry lookup table, filled at elaboration time from the reflected polynomial
// 0xEDB88320, updates the register by one whole byte per cycle:
//   crc <= (crc >> 8) ^ TABLE[(crc ^ byte) & 0xFF]
// The table makes the checksum keep pace with the transmitter, one byte at a time,
// as the design describes. init loads 0xFFFFFFFF. The frame check sequence is the
// complement of crc, sent least significant byte first (done by the transmitter).
module crc32
  import net_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        init,
  input  logic        valid,
  input  logic [7:0]  data,
  output logic [31:0] crc
);
  typedef logic [31:0] table_t [256];
  function automatic table_t build_table();
    table_t t;
    for (int i = 0; i < 256; i++) t[i] = crc32_table_entry(8'(i));
    return t;
  endfunction
  localparam table_t TABLE = build_table();

  always_ff @(posedge clk) begin
    if (rst || init)  crc <= 32'hFFFF_FFFF;
    else if (valid)   crc <= (crc >> 8) ^ TABLE[crc[7:0] ^ data];
  end
endmodule
