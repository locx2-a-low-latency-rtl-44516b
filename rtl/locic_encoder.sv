// locic_encoder: one LOCic encoder ("LOCic16B") of LOCx2.
//
// Takes the serial data of two ADCs (4 lanes each, with SCK and FCK) and the
// bunch-crossing reset, and produces one 16-bit word per 320 MHz cycle for the
// 16:1 serializer, i.e. one 128-bit frame per 40 MHz cycle. Inside, as in the
// paper's encoder diagram: the 8x4 synchronous FIFO (locic_fifo), the PRBS
// generator for the BCID header code, the CRC generator over the unscrambled
// payload, the payload scrambler, and the frame builder that sequences them.
// The input data are not re-ordered by channel: bit columns of the 8 lanes go
// into the payload in arrival order, which keeps the encoder small and fast.
// Latency: word 0 of a frame is registered 2 to 3 cycles of the 320 MHz clock
// after FCK rises (two synchronizer flops, then one cycle to build the word).
module locic_encoder
  import locx2_pkg::*;
(
  input  logic                     rst_n,
  input  logic                     clk,          // 320 MHz from the serializer divider
  input  logic                     bcr,
  input  logic                     sck_a,
  input  logic                     fck_a,
  input  logic [LANES_PER_ADC-1:0] data_a,
  input  logic                     sck_b,
  input  logic                     fck_b,
  input  logic [LANES_PER_ADC-1:0] data_b,
  output logic [15:0]              data_out,
  output logic                     aligned,
  output logic                     realign
);
  logic [2:0]  word_idx;
  logic [15:0] fifo_data, scr_data;
  logic        frame_start, bcr_sync;
  logic        prbs_en, prbs_bcr, crc_en, crc_first, two_bytes, scr_en;
  logic [3:0]  bcid_code;
  logic [7:0]  crc;

  locic_fifo u_fifo (
    .rst_n, .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b,
    .clk, .bcr, .word_idx, .rd_data(fifo_data), .frame_start, .bcr_sync);

  prbs_generator u_prbs (
    .clk, .rst_n, .frame_en(prbs_en), .bcr(prbs_bcr), .code(bcid_code));

  crc_generator u_crc (
    .clk, .rst_n, .en(crc_en), .first(crc_first), .two_bytes, .data(fifo_data), .crc);

  scrambler u_scr (
    .clk, .rst_n, .en(scr_en), .two_bytes, .data(fifo_data), .scr(scr_data));

  frame_builder u_fb (
    .clk, .rst_n, .frame_start, .bcr_sync, .word_idx,
    .prbs_en, .prbs_bcr, .bcid_code, .crc_en, .crc_first, .two_bytes, .crc,
    .scr_en, .scr_data, .word_out(data_out), .aligned, .realign);
endmodule
