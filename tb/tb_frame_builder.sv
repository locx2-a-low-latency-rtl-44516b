// tb_frame_builder: drives the frame builder with frame clock pulses every 8
// cycles (and once out of step), random BCID codes, CRCs and scrambled data,
// and checks against a cycle model kept in the testbench: the word index
// sequence, the 8/16-bit pattern, the PRBS/CRC/scrambler strobes, the
// registered word layout {1010, code, 8 bits} / 16 bits / {8 bits, CRC}, the
// idle output before alignment, the re-alignment flag and the BCR hold until
// the next frame.
module tb_frame_builder;
  logic clk = 0, rst_n = 1, frame_start = 0, bcr_sync = 0;
  logic [2:0] word_idx;
  logic prbs_en, prbs_bcr, crc_en, crc_first, two_bytes, scr_en, aligned, realign;
  logic [3:0] bcid_code;
  logic [7:0] crc;
  logic [15:0] scr_data, word_out;
  int checks = 0, failures = 0;
  int n_realign = 0, n_bcr = 0;

  frame_builder dut (.clk, .rst_n, .frame_start, .bcr_sync, .word_idx, .prbs_en, .prbs_bcr,
                     .bcid_code, .crc_en, .crc_first, .two_bytes, .crc, .scr_en, .scr_data,
                     .word_out, .aligned, .realign);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  initial begin
    int idx;
    logic [15:0] exp_word;
    logic exp_bcr, bcr_seen, model_aligned;
    bcid_code = 0; crc = 0; scr_data = 0;
    idx = -1; exp_word = 0; bcr_seen = 0; model_aligned = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      bcid_code = 4'($urandom); crc = 8'($urandom); scr_data = 16'($urandom);
      frame_start = (c >= 10) && (((c - 10) % 8 == 0 && c < 300) || (c >= 305 && (c - 305) % 8 == 0));
      bcr_sync = (c == 123) || (c == 400);
      #1;
      if (frame_start) idx = 0;
      else if (idx >= 0) idx = (idx + 1) % 8;
      if (bcr_sync) bcr_seen = 1;
      if (idx >= 0) begin
        check(word_idx == 3'(idx), "word_idx");
        check(two_bytes == (idx != 0 && idx != 7), "two_bytes");
        check(crc_first == (idx == 0) && crc_en && scr_en, "crc/scr strobes");
        check(prbs_en == (idx == 0), "prbs_en");
        exp_bcr = bcr_seen;
        if (idx == 0) begin
          check(prbs_bcr == exp_bcr, "prbs_bcr");
          if (exp_bcr) n_bcr++;
          bcr_seen = 0;
        end
        case (idx)
          0: exp_word = {4'b1010, bcid_code, scr_data[7:0]};
          7: exp_word = {scr_data[7:0], crc};
          default: exp_word = scr_data;
        endcase
      end else begin
        check(!prbs_en && !crc_en && !scr_en, "strobes before alignment");
        exp_word = 0;
      end
      @(posedge clk);
      #1;
      check(word_out == exp_word, "word_out");
      check(aligned == (idx >= 0), "aligned");
      check(realign == (c == 305), "realign");
      if (realign) n_realign++;
    end
    check(n_realign == 1 && n_bcr == 2, "mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
