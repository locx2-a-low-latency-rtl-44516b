// tb_crc_generator: feeds random 112-bit payloads in the frame pattern
// (8 bits, six times 16 bits, 8 bits) and compares the CRC at the last word
// with a bit-serial reference; frames follow each other back to back and
// with idle cycles, so the restart on 'first' is exercised.
module tb_crc_generator;
  import locic_ref_pkg::*;
  logic clk = 0, rst_n = 1, en = 0, first = 0, two_bytes = 0;
  logic [15:0] data = 0;
  logic [7:0] crc;
  int checks = 0, failures = 0;

  crc_generator dut (.clk, .rst_n, .en, .first, .two_bytes, .data, .crc);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [111:0] p;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 300; f++) begin
      for (int i = 0; i < 4; i++) p[i*32 +: 32] = $urandom;
      if (f == 5) p = '0;
      if (f == 6) p = '1;
      for (int w = 0; w < 8; w++) begin
        @(negedge clk);
        en = 1; first = (w == 0); two_bytes = (w != 0 && w != 7);
        if (w == 0)      data = {8'h00, p[111:104]};
        else if (w == 7) data = {8'h00, p[7:0]};
        else             data = p[111 - 8 - 16*(w-1) -: 16];
        if (w == 7) begin
          #1;
          checks++;
          if (crc !== crc_ref(p)) begin
            failures++;
            if (failures < 5) $display("frame %0d crc %h expected %h", f, crc, crc_ref(p));
          end
        end
      end
      @(negedge clk);
      en = 0;
      repeat (f % 2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
