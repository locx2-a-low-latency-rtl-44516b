// adc_emu: testbench model of one 4-lane serial ADC.
//
// After run goes high it waits OFFSET_PS and then sends one frame every
// FRAME_PS: 14 bits on each of 4 lanes, bit k of lane l being
// word[l*14 + 13 - k]. Data and FCK change at the start of each bit, SCK
// rises in the middle of the bit. FCK is high for bits 0..6. The frame word
// comes from a xorshift generator seeded with SEED. For each frame the model
// raises frame_evt for 1 ps with cur_word/cur_t0 valid, so a testbench can
// record what was sent and when.
module adc_emu #(
  parameter int unsigned SEED      = 1,
  parameter real         FRAME_PS  = 25000.0,
  parameter real         OFFSET_PS = 1000.0
) (
  input  logic        run,
  output logic        sck,
  output logic        fck,
  output logic [3:0]  data,
  output logic [55:0] cur_word,
  output realtime     cur_t0,
  output logic        frame_evt
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [63:0] x;
  realtime t_start, t0, bit_ps;

  function automatic logic [63:0] xorshift(input logic [63:0] v);
    logic [63:0] r;
    r = v ^ (v << 13);
    r = r ^ (r >> 7);
    r = r ^ (r << 17);
    return r;
  endfunction

  initial begin
    sck = 0; fck = 0; data = 0; cur_word = 0; cur_t0 = 0; frame_evt = 0;
    x = 64'h9E3779B97F4A7C15 ^ 64'(SEED);
    bit_ps = FRAME_PS / 14.0;
    wait (run);
    t_start = $realtime + OFFSET_PS;
    for (int f = 0; ; f++) begin
      t0 = t_start + f * FRAME_PS;
      x  = xorshift(x);
      #(t0 - $realtime);
      cur_word  = x[55:0];
      cur_t0    = t0;
      frame_evt = 1'b1;
      for (int k = 0; k < 14; k++) begin
        #(t0 + k * bit_ps - $realtime);
        sck = 1'b0;
        fck = (k < 7);
        for (int l = 0; l < 4; l++) data[l] = cur_word[l*14 + 13 - k];
        #(bit_ps / 2.0);
        sck = 1'b1;
        if (k == 0) frame_evt = 1'b0;
      end
    end
  end
endmodule
