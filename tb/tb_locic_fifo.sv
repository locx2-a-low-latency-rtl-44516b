// tb_locic_fifo: two ADC models (A and B, B skewed by 300 ps) send random
// frames at 40 MHz; a 320 MHz clock phase-locked to them reads the FIFO with
// a word counter started by the FIFO's own frame_start. Every word of every
// frame is compared with the bits the ADC models sent for that frame. Also
// checks that frame_start comes 1 to 2 LOC clock cycles after FCK rises, once
// per frame, and that each BCR pulse gives exactly one bcr_sync pulse.
module tb_locic_fifo;
  timeunit 1ps;
  timeprecision 1fs;
  import locic_ref_pkg::*;

  localparam real TCLK = 25000.0 / 8.0;

  logic clk = 0, rst_n = 1, run = 0, bcr = 0;
  logic sck_a, fck_a, sck_b, fck_b, evt_a, evt_b;
  logic [3:0] data_a, data_b;
  logic [55:0] word_a, word_b;
  realtime t0_a, t0_b;
  logic [2:0] word_idx = 0;
  logic [15:0] rd_data;
  logic frame_start, bcr_sync;
  int checks = 0, failures = 0, n_bcr = 0;

  logic [55:0] qa[$], qb[$];
  realtime qt[$];

  adc_emu #(.SEED(11), .OFFSET_PS(1000.0)) u_adc_a (.run, .sck(sck_a), .fck(fck_a), .data(data_a),
    .cur_word(word_a), .cur_t0(t0_a), .frame_evt(evt_a));
  adc_emu #(.SEED(22), .OFFSET_PS(1300.0)) u_adc_b (.run, .sck(sck_b), .fck(fck_b), .data(data_b),
    .cur_word(word_b), .cur_t0(t0_b), .frame_evt(evt_b));

  locic_fifo dut (.rst_n, .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b,
                  .clk, .bcr, .word_idx, .rd_data, .frame_start, .bcr_sync);

  always #(TCLK / 2.0) clk = ~clk;

  always @(posedge evt_a) begin
    qa.push_back(word_a);
    qt.push_back(t0_a);
  end
  always @(posedge evt_b) qb.push_back(word_b);

  always @(posedge clk) if (bcr_sync) n_bcr++;

  initial begin
    #10us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $realtime, what);
    end
  endtask

  initial begin
    logic [111:0] p;
    logic [15:0] exp_d;
    realtime dt;
    int nframes;
    #1 rst_n = 0;
    #2000;
    rst_n = 1;
    #1000;
    run = 1;
    nframes = 0;
    // BCR pulses of one 40 MHz period
    fork
      begin #3000; bcr = 1; #25000; bcr = 0; #500000; bcr = 1; #25000; bcr = 0; end
    join_none
    @(posedge clk);
    #1;
    while (nframes < 120) begin
      if (!frame_start) begin
        @(posedge clk);
        #1;
      end else begin
        // the frame that started last in the ADC models
        dt = $realtime - 1 - qt[qt.size() - 1];
        check(dt > 0.9 * TCLK && dt < 2.1 * TCLK, "frame_start delay");
        p = payload_of(qa[qa.size() - 1], qb[qb.size() - 1]);
        // The encoder registers the word at the end of the cycle: sample there.
        for (int w = 0; w < 8; w++) begin
          word_idx = 3'(w);
          #(TCLK - 20.0);
          if (w == 0)      exp_d = {8'h00, p[111:104]};
          else if (w == 7) exp_d = {8'h00, p[7:0]};
          else             exp_d = p[111 - 8 - 16*(w-1) -: 16];
          check(rd_data == exp_d, $sformatf("frame %0d word %0d: %h expected %h", nframes, w, rd_data, exp_d));
          @(posedge clk);
          #1;
          if (w < 7) check(!frame_start, "extra frame_start");
        end
        nframes++;
      end
    end
    check(n_bcr == 2, "bcr_sync count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
