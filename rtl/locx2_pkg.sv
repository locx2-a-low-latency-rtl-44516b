// locx2_pkg: constants, configuration layout and small pure functions shared
// by the LOCx2 transmitter RTL.
//
// Frame format (one frame per 40 MHz LHC clock cycle and per channel, 128 bits,
// sent most-significant bit of each 16-bit word first):
//   word 0 : {4'b1010 sync, 4-bit encoded BCID, 8 payload bits}
//   word 1-6: 16 payload bits each
//   word 7 : {8 payload bits, 8-bit CRC of the payload}
// The 8-bit header, the 112-bit payload and the 8-bit CRC trailer, the "1010"
// pattern and the two-PRBS BCID code follow the paper. The word layout, the CRC
// polynomial, the scrambler polynomial and the PRBS polynomials are this
// design's own choices (the paper does not give them).
package locx2_pkg;

  // ADC side: each ADC has 4 serial data lanes; 8 lanes x 14 bits = 112 payload bits.
  localparam int LANES_PER_ADC  = 4;
  localparam int BITS_PER_LANE  = 14;
  localparam int PAYLOAD_BITS   = 2 * LANES_PER_ADC * BITS_PER_LANE;  // 112
  localparam int WORD_BITS      = 16;
  localparam int WORDS_PER_FRAME = 8;
  localparam int FRAME_BITS     = WORD_BITS * WORDS_PER_FRAME;        // 128

  localparam logic [3:0] HDR_SYNC = 4'b1010;

  // CRC-8, polynomial x^8 + x^2 + x + 1, initial value 0, MSB first.
  localparam logic [7:0] CRC_POLY = 8'h07;
  localparam logic [7:0] CRC_INIT = 8'h00;

  // Self-synchronous scrambler s[n] = d[n] ^ s[n-39] ^ s[n-58].
  localparam int SCR_TAP1 = 39;
  localparam int SCR_TAP2 = 58;

  // The 32 configuration bits written over I2C, as four 8-bit registers.
  // reg0 = {spare[4:0], lpf_3rd, vco_band[1:0]}, reg1 = {lpf_bw, cp_current},
  // reg2 = {cml_amp1, cml_amp0}, reg3 = spare.
  typedef struct packed {
    logic [7:0] spare3;
    logic [3:0] cml_amp1;
    logic [3:0] cml_amp0;
    logic [3:0] lpf_bw;
    logic [3:0] cp_current;
    logic [4:0] spare0;
    logic       lpf_3rd;
    logic [1:0] vco_band;
  } cfg_t;

  localparam cfg_t CFG_RESET = '{spare3: 8'h00, cml_amp1: 4'h8, cml_amp0: 4'h8,
                                 lpf_bw: 4'h8, cp_current: 4'h8, spare0: 5'h00,
                                 lpf_3rd: 1'b1, vco_band: 2'd2};

  function automatic logic [7:0] crc8_byte(input logic [7:0] crc, input logic [7:0] data);
    logic [7:0] c;
    c = crc;
    for (int i = 7; i >= 0; i--) begin
      if (c[7] ^ data[i]) c = {c[6:0], 1'b0} ^ CRC_POLY;
      else                c = {c[6:0], 1'b0};
    end
    return c;
  endfunction

  // One step of PRBS-7 (x^7 + x^6 + 1); new bit enters at the bottom.
  function automatic logic [6:0] prbs7_step(input logic [6:0] s);
    return {s[5:0], s[6] ^ s[5]};
  endfunction

  // One step of PRBS-5 (x^5 + x^3 + 1).
  function automatic logic [4:0] prbs5_step(input logic [4:0] s);
    return {s[3:0], s[4] ^ s[2]};
  endfunction

  function automatic logic [3:0] bitrev4(input logic [3:0] v);
    return {v[0], v[1], v[2], v[3]};
  endfunction

endpackage
