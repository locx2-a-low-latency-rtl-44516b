// serializer: 16:1 serializer of one LOCx2 channel, 5.12 Gb/s from a 2.56 GHz
// clock.
//
// As in the paper's serializer diagram: three divide-by-2 stages make 1.28 GHz,
// 640 MHz and 320 MHz from the PLL's 2.56 GHz clock, and four ranks of 2:1
// multiplexers (8, 4, 2 and 1 of them, mux2_stage) form a binary tree clocked
// at 320 MHz, 640 MHz, 1.28 GHz and 2.56 GHz. The last multiplexer switches on
// both edges of the 2.56 GHz clock, giving one bit every 195 ps. The 320 MHz
// clock goes to the encoder, which updates din on its rising edge; the first
// rank captures din half a cycle later. The 640 MHz node is brought out as
// the test clock.
// Bit order: din[15] leaves first. In a binary tree the n-th serial bit comes
// from first-rank input bitrev4(n), so din is wired to the first rank through
// that permutation. Latency from the 320 MHz edge that launches din to the
// first serial bit is about 1.5 periods of 320 MHz plus half-periods of the
// faster stages (about 6 ns). rst_n stops and clears the dividers.
module serializer
  import locx2_pkg::*;
(
  input  logic        rst_n,
  input  logic        clk_2g56,
  input  logic [15:0] din,
  output logic        sout,
  output logic        clk_320,
  output logic        clk_640
);
  logic clk_1g28;
  logic [15:0] tree_in;
  logic [7:0]  a1, b1, y1;
  logic [3:0]  a2, b2, y2;
  logic [1:0]  a3, b3, y3;
  logic        y4;

  always_ff @(posedge clk_2g56 or negedge rst_n)
    if (!rst_n) clk_1g28 <= 1'b0; else clk_1g28 <= ~clk_1g28;
  always_ff @(posedge clk_1g28 or negedge rst_n)
    if (!rst_n) clk_640 <= 1'b0; else clk_640 <= ~clk_640;
  always_ff @(posedge clk_640 or negedge rst_n)
    if (!rst_n) clk_320 <= 1'b0; else clk_320 <= ~clk_320;

  always_comb begin
    for (int i = 0; i < 16; i++) tree_in[i] = din[15 - int'(bitrev4(4'(i)))];
  end

  always_comb begin
    for (int m = 0; m < 8; m++) begin a1[m] = tree_in[2*m]; b1[m] = tree_in[2*m+1]; end
    for (int m = 0; m < 4; m++) begin a2[m] = y1[2*m];      b2[m] = y1[2*m+1];      end
    for (int m = 0; m < 2; m++) begin a3[m] = y2[2*m];      b3[m] = y2[2*m+1];      end
  end

  mux2_stage #(.N(8)) u_rank1 (.clk(clk_320),  .a(a1), .b(b1), .y(y1));
  mux2_stage #(.N(4)) u_rank2 (.clk(clk_640),  .a(a2), .b(b2), .y(y2));
  mux2_stage #(.N(2)) u_rank3 (.clk(clk_1g28), .a(a3), .b(b3), .y(y3));
  mux2_stage #(.N(1)) u_rank4 (.clk(clk_2g56), .a(y3[0]), .b(y3[1]), .y(y4));

  assign sout = y4;
endmodule
