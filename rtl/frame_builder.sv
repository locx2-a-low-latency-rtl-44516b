// frame_builder: assembles 128-bit LOCic frames as eight 16-bit words.
//
// A 3-bit word counter runs at 320 MHz (8 words per 25 ns frame). The frame
// clock pulse from the FIFO forces word 0; from then on the counter wraps on
// its own, and a frame clock pulse that arrives when the counter is not about
// to wrap re-aligns it and raises realign for one cycle. word_idx tells the
// FIFO which payload bits to return. The builder strobes the PRBS generator
// once per frame (word 0), runs the CRC generator and the scrambler on every
// word, and composes
//   word 0 : {4'b1010, BCID code, 8 scrambled payload bits}
//   word 1-6: 16 scrambled payload bits
//   word 7 : {8 scrambled payload bits, CRC}
// The word is registered: it reaches word_out one cycle after word_idx.
// Before the first frame clock pulse word_out is zero and aligned is low. A
// BCR seen at any time is held and applied to the next frame, which becomes
// BCID 0. The header/payload/trailer content follows the paper; the word
// layout, the BCR timing and the alignment rule are this design's.
module frame_builder
  import locx2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_start,
  input  logic        bcr_sync,
  output logic [2:0]  word_idx,
  output logic        prbs_en,
  output logic        prbs_bcr,
  input  logic [3:0]  bcid_code,
  output logic        crc_en,
  output logic        crc_first,
  output logic        two_bytes,
  input  logic [7:0]  crc,
  output logic        scr_en,
  input  logic [15:0] scr_data,
  output logic [15:0] word_out,
  output logic        aligned,
  output logic        realign
);
  logic [2:0]  cnt;
  logic        bcr_pend;
  logic        active;
  logic [15:0] word;

  assign word_idx  = frame_start ? 3'd0 : cnt + 3'd1;
  assign active    = aligned | frame_start;
  assign two_bytes = (word_idx != 3'd0) && (word_idx != 3'd7);
  assign crc_first = (word_idx == 3'd0);
  assign crc_en    = active;
  assign scr_en    = active;
  assign prbs_en   = active && (word_idx == 3'd0);
  assign prbs_bcr  = bcr_pend | bcr_sync;

  always_comb begin
    unique case (word_idx)
      3'd0:    word = {HDR_SYNC, bcid_code, scr_data[7:0]};
      3'd7:    word = {scr_data[7:0], crc};
      default: word = scr_data;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= 3'd7;
      aligned  <= 1'b0;
      bcr_pend <= 1'b0;
      word_out <= '0;
      realign  <= 1'b0;
    end else begin
      cnt      <= word_idx;
      realign  <= frame_start && aligned && (cnt != 3'd7);
      if (frame_start) aligned <= 1'b1;
      word_out <= active ? word : '0;
      if (prbs_en)       bcr_pend <= 1'b0;
      else if (bcr_sync) bcr_pend <= 1'b1;
    end
  end

  // Once aligned, frames follow each other every 8 words.
  a_wrap: assert property (@(posedge clk) disable iff (!rst_n)
                           aligned && !frame_start |-> word_idx == 3'((cnt + 3'd1)));
endmodule
