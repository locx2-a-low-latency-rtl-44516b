// crc_generator: 8-bit CRC trailer of the LOCic payload.
//
// The 112 payload bits arrive, unscrambled, as 8 bits in word 0, 16 bits in
// each of words 1..6 and 8 bits in word 7 of a frame. The CRC (polynomial
// x^8+x^2+x+1, initial value 0, MSB of each byte first) is updated byte-wise;
// crc is combinational and already includes the data of the current cycle, so
// in word 7 it is the complete trailer. first restarts the CRC from the
// initial value; en ("CRC Clk") stores the running value. 8-bit data sit in
// data[7:0]; 16-bit data are processed data[15:8] first. The paper states an
// 8-bit CRC over the payload; the polynomial and bit order are this design's.
module crc_generator
  import locx2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        first,
  input  logic        two_bytes,
  input  logic [15:0] data,
  output logic [7:0]  crc
);
  logic [7:0] state, c;

  always_comb begin
    c = first ? CRC_INIT : state;
    if (two_bytes) c = crc8_byte(c, data[15:8]);
    crc = crc8_byte(c, data[7:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= CRC_INIT;
    else if (en) state <= crc;
  end
endmodule
