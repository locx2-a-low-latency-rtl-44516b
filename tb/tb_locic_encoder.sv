// tb_locic_encoder: two ADC models feed one encoder clocked at 320 MHz
// (phase-locked to the ADC frames). The testbench decodes the 16-bit output
// words as a LOCic receiver would: it cuts frames of 8 words, checks the 1010
// pattern, the CRC trailer against a CRC it computes itself on the
// descrambled payload, the descrambled payload against the ADC data, and the
// BCID code against the reference PRBSs counted from the BCR. It also checks
// the rate (one frame per 8 clock cycles) and the latency from the first ADC
// bit of a frame to the output of word 0 (2 to 3 cycles). Four copies of the
// encoder run side by side with their ADCs at four phases, 800 ps apart,
// relative to the 320 MHz clock, and ADC B 400 ps behind ADC A, so the
// FIFO's read windows are checked across the clock cycle.
module tb_locic_encoder;
  timeunit 1ps;
  timeprecision 1fs;
  import locic_ref_pkg::*;

  localparam real TCLK = 25000.0 / 8.0;
  localparam int  NPH  = 4;            // ADC-to-clock phases tested side by side

  logic clk = 0, rst_n = 1, run = 0, bcr = 0;
  realtime t_bcr;
  logic bcr_done = 0;
  int checks = 0, failures = 0;
  logic [NPH-1:0] done = '0;

  always #(TCLK / 2.0) clk = ~clk;

  initial begin
    #10us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $realtime, what);
    end
  endfunction

  // BCR as the control link would send it: one 40 MHz period, after 20 frames
  initial begin
    wait (run);
    #(20 * 25000.0 + 16000.0);  // mid-frame for every phase below
    bcr = 1; t_bcr = $realtime; bcr_done = 1;
    #25000;
    bcr = 0;
  end

  for (genvar ph = 0; ph < NPH; ph++) begin : g_ph
    // ADC A starts 300 + 800*ph ps after a 320 MHz rising edge, ADC B 400 ps later
    localparam real OFF_A = 300.0 + 800.0 * ph - TCLK / 2.0 + 2.0 * TCLK;
    logic sck_a, fck_a, sck_b, fck_b, evt_a, evt_b;
    logic [3:0] data_a, data_b;
    logic [55:0] word_a, word_b;
    realtime t0_a, t0_b;
    logic [15:0] data_out;
    logic aligned, realign;
    logic [55:0] qa[$], qb[$];
    realtime qt[$];

    adc_emu #(.SEED(5 + 2*ph), .OFFSET_PS(OFF_A)) u_adc_a (.run, .sck(sck_a), .fck(fck_a),
      .data(data_a), .cur_word(word_a), .cur_t0(t0_a), .frame_evt(evt_a));
    adc_emu #(.SEED(6 + 2*ph), .OFFSET_PS(OFF_A + 400.0)) u_adc_b (.run, .sck(sck_b), .fck(fck_b),
      .data(data_b), .cur_word(word_b), .cur_t0(t0_b), .frame_evt(evt_b));

    locic_encoder dut (.rst_n, .clk, .bcr, .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b,
                       .data_out, .aligned, .realign);

    always @(posedge evt_a) begin
      qa.push_back(word_a);
      qt.push_back(t0_a);
    end
    always @(posedge evt_b) qb.push_back(word_b);

    initial begin
      logic [127:0] fr;
      logic [111:0] pl, exp_pl;
      logic [57:0] h;
      realtime t_w0, lat;
      int j, k0, nfr;
      h = '0;
      wait (run);
      wait (aligned);
      #1;
      // aligned rises with word 0 of the first frame
      j = -1; k0 = -1; nfr = 0;
      while (nfr < 150) begin
        t_w0 = $realtime - 1;
        for (int w = 0; w < 8; w++) begin
          fr[127 - 16*w -: 16] = data_out;
          if (w == 0) check(data_out[15:12] == 4'b1010, "sync pattern");
          @(posedge clk);
          #1;
          check(!realign, "no realign");
        end
        // ADC frame this is: last one started before word 0 left
        if (j < 0) begin
          for (int q = 0; q < qt.size(); q++) if (qt[q] < t_w0) j = q;
        end else j++;
        lat = t_w0 - qt[j];
        check(lat > 2.0 * TCLK && lat <= 3.0 * TCLK + 1, $sformatf("phase %0d word 0 latency %0t", ph, lat));
        pl = descramble(h, fr[119:8]);
        exp_pl = payload_of(qa[j], qb[j]);
        check(pl == exp_pl, $sformatf("phase %0d frame %0d payload %h expected %h", ph, nfr, pl, exp_pl));
        check(fr[7:0] == crc_ref(pl), $sformatf("phase %0d frame %0d crc", ph, nfr));
        // the first ADC frame that starts after the BCR edge is BCID 0
        if (bcr_done && k0 < 0 && qt[j] >= t_bcr) k0 = nfr;
        if (k0 >= 0)
          check(fr[123:120] == bcid_code_ref(nfr - k0), $sformatf("phase %0d frame %0d bcid code", ph, nfr));
        nfr++;
      end
      check(k0 >= 0, "BCR seen");
      done[ph] = 1'b1;
    end
  end

  initial begin
    #1 rst_n = 0;
    #2000;
    rst_n = 1;
    @(posedge clk);
    run = 1;
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
