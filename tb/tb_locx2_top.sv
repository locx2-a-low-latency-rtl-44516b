// tb_locx2_top: end-to-end test of LOCx2 as in the paper's test setup: four
// ADC models send random data frames locked to the 40 MHz reference, a
// control-link model sends BCR pulses every ORBIT reference cycles, an I2C
// master configures the chip and reads it back, and two link receivers
// recover the 5.12 Gb/s serial outputs. Each receiver samples its line in the
// middle of each 195.3 ps bit (its clock recovered from the reference),
// finds the 128-bit frame boundary from the 1010 pattern and the CRC,
// descrambles the payload and checks, frame by frame: the CRC, the payload
// against the ADC data, the BCID code against the reference PRBSs counted from
// each BCR, and the latency of the first and last payload bit from the ADC to
// the serial line (must stay below the paper's 27.2 ns). Mechanisms that must
// occur at least once: PLL lock, encoder frame alignment, I2C write and
// read-back, BCID restart on BCR.
module tb_locx2_top;
  timeunit 1ps;
  timeprecision 1fs;
  import locx2_pkg::*;
  import locic_ref_pkg::*;

  localparam int  NFRAMES = 3700;    // frames sent
  localparam int  ORBIT   = 3564;    // BCR period in 40 MHz cycles
  localparam int  BCR0    = 60;      // reference cycle of the first BCR
  localparam real TREF    = 25000.0;
  localparam real TBIT    = TREF / 128.0;
  localparam real LAT_MAX = 27200.0;

  logic rst_n = 1, refclk = 0, bcr = 0, run = 0;
  logic [3:0] adc_sck, adc_fck, adc_evt;
  logic [3:0][3:0] adc_data;
  logic [3:0][55:0] adc_word;
  realtime adc_t0 [4];
  logic scl = 1, sda_m = 1, sda_in, sda_oe;
  logic [2:0] i2c_addr = 3'b010;
  logic [1:0] ser_out;
  logic [1:0][3:0] cml_amp;
  logic test_clk_640, pll_locked;
  logic [1:0] enc_aligned, enc_realign;

  int checks = 0, failures = 0;
  int n_lock = 0, n_i2c = 0, n_bcr_restart = 0, n_frames_ok = 0, n_realign = 0;
  int ref_cycle = 0;
  realtime max_lat = 0;

  // recorded stimulus and samples
  logic [55:0] qw [4][$];
  realtime     qt [4][$];
  realtime     t_bcr [$];
  logic        rx_bits [2][$];
  realtime     rx_time [2][$];

  locx2_top dut (.rst_n, .refclk, .bcr, .adc_sck, .adc_fck, .adc_data, .scl, .sda_in,
                 .i2c_addr, .sda_oe, .ser_out, .cml_amp, .test_clk_640, .pll_locked,
                 .enc_aligned, .enc_realign);

  assign sda_in = sda_m & ~sda_oe;

  for (genvar a = 0; a < 4; a++) begin : g_adc
    adc_emu #(.SEED(100 + a), .OFFSET_PS(2000.0 + 150.0 * a)) u_adc (
      .run, .sck(adc_sck[a]), .fck(adc_fck[a]), .data(adc_data[a]),
      .cur_word(adc_word[a]), .cur_t0(adc_t0[a]), .frame_evt(adc_evt[a]));
    always @(posedge adc_evt[a]) begin
      qw[a].push_back(adc_word[a]);
      qt[a].push_back(adc_t0[a]);
    end
  end

  always #(TREF / 2.0) refclk = ~refclk;

  // control link: BCR one reference cycle long, every ORBIT cycles
  always @(posedge refclk) begin
    ref_cycle <= ref_cycle + 1;
    if (run && ref_cycle >= BCR0 && (ref_cycle - BCR0) % ORBIT == 0) begin
      bcr <= 1'b1;
      t_bcr.push_back($realtime);
    end else bcr <= 1'b0;
  end

  // link receivers: sample mid-bit, clock recovered from the reference
  always @(posedge refclk) if (run) begin
    realtime t0;
    t0 = $realtime;
    for (int k = 0; k < 128; k++) begin
      #(t0 + (k + 0.5) * TBIT - $realtime);
      for (int c = 0; c < 2; c++) begin
        rx_bits[c].push_back(ser_out[c]);
        rx_time[c].push_back($realtime - TBIT / 2.0);
      end
    end
  end

  always @(posedge pll_locked) n_lock++;
  always @(posedge refclk) if (enc_realign != 0) n_realign++;

  initial begin
    #(TREF * (NFRAMES + 400) + 60us);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("%t: %s", $realtime, what);
    end
  endtask

  // I2C master, 2.5 MHz SCL
  localparam time Q = 100ns;
  task automatic i2c_start();
    sda_m = 1; #Q; scl = 1; #Q; sda_m = 0; #Q; scl = 0; #Q;
  endtask
  task automatic i2c_stop();
    sda_m = 0; #Q; scl = 1; #Q; sda_m = 1; #(2*Q);
  endtask
  task automatic i2c_bit(input logic b, output logic r);
    sda_m = b; #Q; scl = 1; #Q; r = sda_in; #Q; scl = 0; #Q;
  endtask
  task automatic i2c_byte(input logic [7:0] v, output logic [7:0] rd, output logic ack);
    logic r;
    for (int i = 7; i >= 0; i--) begin i2c_bit(v[i], r); rd[i] = r; end
    i2c_bit(1'b1, r);
    ack = ~r;
  endtask

  task automatic configure();
    logic ack, a2;
    logic [7:0] rd;
    logic [6:0] dev;
    dev = {4'b1100, i2c_addr};
    i2c_start();
    i2c_byte({dev, 1'b0}, rd, ack);
    i2c_byte(8'h02, rd, a2); ack &= a2;
    i2c_byte(8'hC3, rd, a2); ack &= a2;
    i2c_stop();
    check(ack, "I2C write acknowledged");
    check(cml_amp == {4'hC, 4'h3}, "CML settings from I2C");
    i2c_start();
    i2c_byte({dev, 1'b0}, rd, ack);
    i2c_byte(8'h02, rd, a2);
    i2c_start();
    i2c_byte({dev, 1'b1}, rd, a2);
    // read one byte, master NACKs
    for (int i = 7; i >= 0; i--) begin logic r; i2c_bit(1'b1, r); rd[i] = r; end
    begin logic r; i2c_bit(1'b1, r); end
    i2c_stop();
    check(rd == 8'hC3, $sformatf("I2C read-back %h", rd));
    if (ack && rd == 8'hC3) n_i2c++;
  endtask

  // Decode one channel's recorded serial stream.
  task automatic decode(input int c);
    int o, nb, nfr, j, k0, bi;
    logic [127:0] fr;
    logic [111:0] pl, exp_pl;
    logic [57:0] h;
    logic good;
    realtime tf, lat;
    nb = rx_bits[c].size();
    // frame boundary: 1010 and CRC for frames 3..8 after the offset
    o = -1;
    for (int cand = 0; cand < 128 * 60 && o < 0; cand++) begin
      good = 1;
      h = '0;
      for (int f = 0; f < 10 && good; f++) begin
        for (int b = 0; b < 128; b++) fr[127 - b] = rx_bits[c][cand + 128*f + b];
        pl = descramble(h, fr[119:8]);
        if (f >= 3 && (fr[127:124] != 4'b1010 || fr[7:0] != crc_ref(pl) || fr == '0)) good = 0;
      end
      if (good) o = cand;
    end
    check(o >= 0, $sformatf("channel %0d: frame boundary found", c));
    if (o < 0) return;
    nfr = (nb - o) / 128 - 1;
    h = '0;
    j = -1;
    k0 = -1;
    bi = 0;
    for (int f = 0; f < nfr; f++) begin
      for (int b = 0; b < 128; b++) fr[127 - b] = rx_bits[c][o + 128*f + b];
      tf = rx_time[c][o + 128*f];
      pl = descramble(h, fr[119:8]);
      if (f < 3) continue;      // descrambler warm-up
      check(fr[127:124] == 4'b1010, $sformatf("ch%0d frame %0d sync", c, f));
      check(fr[7:0] == crc_ref(pl), $sformatf("ch%0d frame %0d crc", c, f));
      // which ADC frame: the last one that started at least 10 ns before word 0 left
      if (j < 0) begin
        for (int q = 0; q < qt[2*c].size(); q++) if (qt[2*c][q] < tf - 10000.0) j = q;
      end else j++;
      if (j >= qw[2*c].size() || j >= qw[2*c+1].size()) break;
      exp_pl = payload_of(qw[2*c][j], qw[2*c+1][j]);
      check(pl == exp_pl, $sformatf("ch%0d frame %0d payload", c, f));
      if (pl == exp_pl && fr[7:0] == crc_ref(pl)) n_frames_ok++;
      // latency: ADC bit 0 (SCK edge) -> end of payload bit 0 (frame bit 8);
      //          ADC bit 13 -> end of payload bit 104 (frame bit 112)
      lat = tf + 9 * TBIT - (qt[2*c][j] + 0.5 * TREF / 14.0);
      if (lat > max_lat) max_lat = lat;
      check(lat < LAT_MAX, $sformatf("ch%0d first-bit latency %0t", c, lat));
      lat = tf + 113 * TBIT - (qt[2*c][j] + 13.5 * TREF / 14.0);
      if (lat > max_lat) max_lat = lat;
      check(lat < LAT_MAX, $sformatf("ch%0d last-bit latency %0t", c, lat));
      // BCID: the first ADC frame that starts after a BCR edge has BCID 0
      if (bi < t_bcr.size() && qt[2*c][j] >= t_bcr[bi]) begin
        k0 = f;
        bi++;
        n_bcr_restart++;
      end
      if (k0 >= 0)
        check(fr[123:120] == bcid_code_ref(f - k0), $sformatf("ch%0d frame %0d bcid %0d code %h", c, f, f - k0, fr[123:120]));
    end
    $display("channel %0d: %0d frames decoded", c, nfr);
  endtask

  initial begin
    #1 rst_n = 0;
    #(4 * TREF);
    rst_n = 1;
    wait (pll_locked);
    #(2 * TREF);
    run = 1;
    fork configure(); join_none
    wait (enc_aligned == 2'b11);
    #(TREF * (NFRAMES - 2));
    wait (n_i2c > 0 || checks >= 3);
    run = 0;
    #(2 * TREF);
    decode(0);
    decode(1);
    $display("mechanisms: pll_lock=%0d i2c=%0d bcid_restart=%0d frames_ok=%0d realign=%0d max_latency=%0.1f ps",
             n_lock, n_i2c, n_bcr_restart, n_frames_ok, n_realign, max_lat);
    check(n_lock > 0, "PLL locked");
    check(n_i2c > 0, "I2C configuration");
    check(n_bcr_restart >= 2, "BCID restarted by BCR on both channels");
    check(n_frames_ok > 2 * (NFRAMES - 20), "frames decoded");
    check(n_realign == 0, "no re-alignment in steady state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
