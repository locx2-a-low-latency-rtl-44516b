// locx2_top: LOCx2, a two-channel 5.12 Gb/s transmitter for ADC data.
//
// Each of the two channels takes the serial outputs of two 4-channel ADCs
// (ADC A/B for channel 0, C/D for channel 1; 4 data lanes, SCK and FCK each),
// encodes them with the LOCic line code (locic_encoder) into one 128-bit frame
// per 40 MHz LHC clock cycle, and serializes the frame at 5.12 Gb/s
// (serializer). Both serializers run from one PLL (lc_pll, behavioural model)
// that multiplies the 40 MHz reference by 64 to 2.56 GHz; each serializer
// divides it down to the 320 MHz clock of its encoder. An I2C slave
// (i2c_slave), clocked by the reference clock, holds the 32 configuration bits
// for the PLL and the CML line drivers. The CML drivers are analog and not
// modelled: ser_out is their input and cml_amp their setting. The
// differential input receivers are not modelled either: inputs are logic
// levels. test_clk_640 is the 640 MHz node of channel 0's divider.
// Structure (two encoders, two serializers, shared PLL and I2C) follows the
// paper's block diagram; the reset pin and the channel-to-ADC port packing are
// this design's.
module locx2_top
  import locx2_pkg::*;
(
  input  logic                          rst_n,
  input  logic                          refclk,      // 40 MHz LHC clock
  input  logic                          bcr,         // bunch-crossing reset
  input  logic [3:0]                    adc_sck,     // ADC A, B, C, D
  input  logic [3:0]                    adc_fck,
  input  logic [3:0][LANES_PER_ADC-1:0] adc_data,
  input  logic                          scl,
  input  logic                          sda_in,
  input  logic [2:0]                    i2c_addr,
  output logic                          sda_oe,
  output logic [1:0]                    ser_out,     // to the CML drivers
  output logic [1:0][3:0]               cml_amp,
  output logic                          test_clk_640,
  output logic                          pll_locked,
  output logic [1:0]                    enc_aligned,
  output logic [1:0]                    enc_realign
);
  cfg_t cfg;
  logic clk_2g56;
  logic [1:0] clk_320, clk_640;
  logic [1:0][15:0] enc_word;

  i2c_slave u_i2c (
    .clk(refclk), .rst_n, .scl, .sda_in, .addr_pins(i2c_addr), .sda_oe, .cfg);

  lc_pll u_pll (
    .rst_n, .refclk, .vco_band(cfg.vco_band), .lpf_3rd(cfg.lpf_3rd),
    .cp_current(cfg.cp_current), .lpf_bw(cfg.lpf_bw),
    .clk_out(clk_2g56), .locked(pll_locked));

  for (genvar ch = 0; ch < 2; ch++) begin : g_ch
    locic_encoder u_enc (
      .rst_n, .clk(clk_320[ch]), .bcr,
      .sck_a(adc_sck[2*ch]),   .fck_a(adc_fck[2*ch]),   .data_a(adc_data[2*ch]),
      .sck_b(adc_sck[2*ch+1]), .fck_b(adc_fck[2*ch+1]), .data_b(adc_data[2*ch+1]),
      .data_out(enc_word[ch]), .aligned(enc_aligned[ch]), .realign(enc_realign[ch]));

    serializer u_ser (
      .rst_n, .clk_2g56, .din(enc_word[ch]), .sout(ser_out[ch]),
      .clk_320(clk_320[ch]), .clk_640(clk_640[ch]));
  end

  assign cml_amp      = {cfg.cml_amp1, cfg.cml_amp0};
  assign test_clk_640 = clk_640[0];
endmodule
