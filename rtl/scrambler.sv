// scrambler: payload scrambler of the LOCic encoder.
//
// Self-synchronous (multiplicative) scrambler s[n] = d[n] ^ s[n-39] ^ s[n-58]
// over the payload bits in transmission order; header and trailer bits skip it
// and do not advance it. A receiver descrambles with
// d[n] = s[n] ^ s[n-39] ^ s[n-58] and needs no reset or alignment with the
// transmitter: 58 received payload bits set its state. Each cycle takes 16
// bits (data[15] first) or, with two_bytes low, 8 bits in data[7:0]; the
// scrambled bits are combinational and en ("SCR Clk") stores the new history.
// The paper says only that the payload is scrambled; the polynomial and the
// self-synchronous form are this design's choices.
module scrambler
  import locx2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        two_bytes,
  input  logic [15:0] data,
  output logic [15:0] scr
);
  // hist[0] is the most recent scrambled bit.
  logic [SCR_TAP2-1:0] hist, h;
  logic s;

  always_comb begin
    h   = hist;
    scr = '0;
    for (int i = 15; i >= 0; i--) begin
      if (two_bytes || i < 8) begin
        s      = data[i] ^ h[SCR_TAP1-1] ^ h[SCR_TAP2-1];
        scr[i] = s;
        h      = {h[SCR_TAP2-2:0], s};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  hist <= '0;
    else if (en) hist <= h;
  end
endmodule
