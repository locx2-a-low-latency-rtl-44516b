// locic_fifo: the "8x4 synchronous FIFO" at the input of a LOCic encoder.
//
// Two ADCs, each with 4 serial data lanes, a serial clock SCK and a frame
// clock FCK, write into two 8-entry x 4-bit stores (adc_lane_store), one bit
// per lane per SCK edge, 14 bits per lane per 25 ns frame. The 320 MHz side
// has no read pointer: ADC clocks and the 320 MHz clock are all locked to the
// 40 MHz LHC clock, so the FIFO works with a fixed phase. FCK of ADC A is
// passed through a two-flop synchronizer into the 320 MHz domain and its
// rising edge becomes the frame_start pulse (the "Frame Clock" of the
// encoder). The frame builder then asks, through word_idx, for the bits of
// word 0..7 and gets them combinationally:
//   word 0: bit index 0, words 1..6: bit indices 2w-1 and 2w, word 7: 13.
// An "entry" is the 8-bit column {A lane3..lane0, B lane3..lane0} of one bit
// index; 8-bit words are returned in rd_data[7:0].
// Timing: frame_start is high in the second 320 MHz cycle after FCK rises
// (1 to 2 cycles later, depending on the clock phase). The frame builder
// builds word 0 in the frame_start cycle and word w w cycles later, and
// registers each at the end of its cycle. Every bit is then
// sampled after it was written and before it is overwritten (bit i is
// overwritten by bit i+8 about 14 ns later); the tightest margin, about 2.4 ns,
// is bit 12 in word 6. The one-cycle uncertainty of the synchronizer, fixed
// at power-up by the clock phases, is one source of the latency variation the
// paper reports after power cycles (6.25 ns for the whole link, receiver
// included). BCR is synchronized the same way.
// Depth 8 and width 4 come from the paper's "8x4" label; the fixed-phase,
// pointer-free read and the bit-column layout are this design's reading.
module locic_fifo
  import locx2_pkg::*;
#(
  parameter int DEPTH = 8,
  parameter int LANES = LANES_PER_ADC
) (
  input  logic                 rst_n,
  input  logic                 sck_a,
  input  logic                 fck_a,
  input  logic [LANES-1:0]     data_a,
  input  logic                 sck_b,
  input  logic                 fck_b,
  input  logic [LANES-1:0]     data_b,
  input  logic                 clk,        // 320 MHz LOC clock
  input  logic                 bcr,        // bunch-crossing reset, 40 MHz wide pulse
  input  logic [2:0]           word_idx,
  output logic [4*LANES-1:0]   rd_data,
  output logic                 frame_start,
  output logic                 bcr_sync
);
  logic [DEPTH-1:0][LANES-1:0] mem_a, mem_b;
  logic [2:0] fck_s, bcr_s;

  adc_lane_store #(.DEPTH(DEPTH), .LANES(LANES)) u_store_a (
    .rst_n, .sck(sck_a), .fck(fck_a), .data(data_a), .mem(mem_a));
  adc_lane_store #(.DEPTH(DEPTH), .LANES(LANES)) u_store_b (
    .rst_n, .sck(sck_b), .fck(fck_b), .data(data_b), .mem(mem_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fck_s <= '0;
      bcr_s <= '0;
    end else begin
      fck_s <= {fck_s[1:0], fck_a};
      bcr_s <= {bcr_s[1:0], bcr};
    end
  end

  assign frame_start = fck_s[1] & ~fck_s[2];
  assign bcr_sync    = bcr_s[1] & ~bcr_s[2];

  function automatic logic [2*LANES-1:0] entry(input int idx);
    int a;
    a = idx % DEPTH;
    return {mem_a[a], mem_b[a]};
  endfunction

  always_comb begin
    unique case (word_idx)
      3'd0:    rd_data = {{(2*LANES){1'b0}}, entry(0)};
      3'd7:    rd_data = {{(2*LANES){1'b0}}, entry(BITS_PER_LANE - 1)};
      default: rd_data = {entry(2 * int'(word_idx) - 1), entry(2 * int'(word_idx))};
    endcase
  end
endmodule
