// tb_scrambler: scrambles random payloads in the frame pattern (8, 6x16, 8
// bits per cycle, with idle cycles in between that must not disturb the
// state), then descrambles the output with the reference self-synchronous
// descrambler, which starts from a wrong (all-ones) state. After the first
// 58 bits the recovered data must equal the input; the scrambled stream must
// also differ from the input (the scrambler is not a wire).
module tb_scrambler;
  import locic_ref_pkg::*;
  logic clk = 0, rst_n = 1, en = 0, two_bytes = 0;
  logic [15:0] data = 0, scr;
  int checks = 0, failures = 0, differ = 0;

  scrambler dut (.clk, .rst_n, .en, .two_bytes, .data, .scr);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [111:0] p, s, d;
    logic [57:0] h;
    h = '1;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      for (int i = 0; i < 4; i++) p[i*32 +: 32] = $urandom;
      if (f == 3) p = '0;
      for (int w = 0; w < 8; w++) begin
        @(negedge clk);
        en = 1; two_bytes = (w != 0 && w != 7);
        if (w == 0)      data = {$urandom_range(255, 0), p[111:104]};
        else if (w == 7) data = {$urandom_range(255, 0), p[7:0]};
        else             data = p[111 - 8 - 16*(w-1) -: 16];
        #1;
        if (w == 0)      s[111:104] = scr[7:0];
        else if (w == 7) s[7:0] = scr[7:0];
        else             s[111 - 8 - 16*(w-1) -: 16] = scr;
        if (!two_bytes && scr[15:8] !== 8'h00) begin
          failures++;
          $display("upper byte not zero in 8-bit cycle");
        end
      end
      @(negedge clk);
      en = 0; data = $urandom;
      repeat (f % 3) @(negedge clk);
      d = descramble(h, s);
      if (s != p) differ++;
      if (f > 0) begin
        checks++;
        if (d !== p) begin
          failures++;
          if (failures < 5) $display("frame %0d: descrambled %h expected %h", f, d, p);
        end
      end
    end
    checks++;
    if (differ < 190) begin
      failures++;
      $display("scrambled output equals input in %0d frames", 200 - differ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
