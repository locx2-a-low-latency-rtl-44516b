// adc_lane_store: write half of the 8x4 synchronous FIFO for one ADC.
//
// On every rising edge of the ADC serial clock SCK one bit of each of the
// LANES data lanes is written into an 8-entry x LANES-bit store. The ADC frame
// clock FCK, sampled on the same SCK edge, marks the first bit of a frame: the
// edge that sees FCK go from 0 to 1 writes entry 0, and later bits go to entry
// (bit index mod DEPTH). The store is read, without a read pointer, by the
// 320 MHz side (locic_fifo), which knows from its frame word counter which bit
// index it needs. Capturing on the rising SCK edge and using FCK's rising
// edge as the frame mark are this design's choices.
module adc_lane_store #(
  parameter int DEPTH = 8,
  parameter int LANES = 4
) (
  input  logic                        rst_n,
  input  logic                        sck,
  input  logic                        fck,
  input  logic [LANES-1:0]            data,
  output logic [DEPTH-1:0][LANES-1:0] mem
);
  localparam int AW = $clog2(DEPTH);

  logic          fck_q;
  logic [AW-1:0] wptr;
  logic          frame_mark;
  logic [AW-1:0] waddr;

  assign frame_mark = fck & ~fck_q;
  assign waddr      = frame_mark ? '0 : wptr;

  always_ff @(posedge sck or negedge rst_n) begin
    if (!rst_n) begin
      fck_q <= 1'b0;
      wptr  <= '0;
    end else begin
      fck_q <= fck;
      wptr  <= waddr + AW'(1);
    end
  end

  always_ff @(posedge sck) begin
    mem[waddr] <= data;
  end
endmodule
