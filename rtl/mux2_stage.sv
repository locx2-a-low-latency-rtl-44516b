// mux2_stage: one rank of N flip-flop based 2:1 multiplexers of the 16:1
// serializer tree.
//
// On the falling edge of clk each multiplexer captures its two inputs a and b;
// while clk is low it drives the captured a, while clk is high the captured b.
// The output therefore carries two bits per clk period, a first: each rank
// doubles the bit rate. The next rank, clocked twice as fast, samples this
// output in the middle of each half period (on its own falling edges), which
// is what makes the tree hazard-free. The clock is used as the select of the
// output multiplexer on purpose: that is how a half-rate 2:1 multiplexer
// works. Static flip-flops follow the paper; the edge assignment is this
// design's.
module mux2_stage #(
  parameter int N = 8
) (
  input  logic         clk,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] y
);
  logic [N-1:0] a_q, b_q;

  always_ff @(negedge clk) begin
    a_q <= a;
    b_q <= b;
  end

  assign y = clk ? b_q : a_q;
endmodule
