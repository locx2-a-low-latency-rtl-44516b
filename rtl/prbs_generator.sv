// prbs_generator: 4-bit encoded BCID for the LOCic frame header.
//
// Two pseudo-random binary sequences, PRBS-7 (x^7+x^6+1) and PRBS-5
// (x^5+x^3+1), are both restarted from the all-ones state by the
// bunch-crossing reset (BCR) and each advanced by two steps per frame. The
// header carries the two new bits of each: code = {p7 bit1, p7 bit2, p5 bit1,
// p5 bit2}. PRBS-7 repeats every 127 frames and PRBS-5 every 31; together they
// repeat only after 3937 frames, more than the 3564 bunch crossings of an LHC
// orbit, so a receiver that tracks both sequences knows the BCID.
// Interface: frame_en ("PRBS Clk") is high in the cycle that builds word 0;
// code is combinational for that frame; when bcr is also high that frame is
// BCID 0 and uses the restart state. The paper gives only "two PRBSs" and the
// 4-bit field; the polynomials, seed and bit mapping are this design's.
module prbs_generator
  import locx2_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       frame_en,
  input  logic       bcr,
  output logic [3:0] code
);
  logic [6:0] s7, s7_1, s7_2, base7;
  logic [4:0] s5, s5_1, s5_2, base5;

  always_comb begin
    base7 = bcr ? 7'h7F : s7;
    base5 = bcr ? 5'h1F : s5;
    s7_1  = prbs7_step(base7);
    s7_2  = prbs7_step(s7_1);
    s5_1  = prbs5_step(base5);
    s5_2  = prbs5_step(s5_1);
    code  = {s7_1[0], s7_2[0], s5_1[0], s5_2[0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s7 <= 7'h7F;
      s5 <= 5'h1F;
    end else if (frame_en) begin
      s7 <= s7_2;
      s5 <= s5_2;
    end
  end
endmodule
