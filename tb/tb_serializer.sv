// tb_serializer: runs the 16:1 serializer from a 2.56 GHz clock, loads a
// random 16-bit word on every rising edge of its own 320 MHz output clock and
// samples the serial output in the middle of every 195.3 ps bit. Checks that
// the serial stream is the words back to back, bit 15 first, with no gap
// (16 bits per 320 MHz cycle, i.e. 5.12 Gb/s), that the latency from loading
// a word to its first bit is the same for all words and below 6.25 ns, and
// that the divided clocks are 320 and 640 MHz.
module tb_serializer;
  timeunit 1ps;
  timeprecision 1fs;

  localparam real HALF = 25000.0 / 128.0;   // half period of 2.56 GHz

  logic rst_n = 1, clk_2g56 = 0;
  logic [15:0] din = 0;
  logic sout, clk_320, clk_640;
  int checks = 0, failures = 0;

  logic [15:0] words[$];
  realtime wtime[$];
  logic bits[$];
  realtime btime[$];
  int n320 = 0, n640 = 0;

  serializer dut (.rst_n, .clk_2g56, .din, .sout, .clk_320, .clk_640);

  always #(HALF) clk_2g56 = ~clk_2g56;

  always @(posedge clk_320) if (rst_n) begin
    din <= 16'($urandom);
    n320++;
  end
  always @(posedge clk_640) if (rst_n) n640++;
  // record the word as it is loaded
  always @(posedge clk_320) if (rst_n) begin
    #1;
    words.push_back(din);
    wtime.push_back($realtime - 1);
  end
  always @(clk_2g56) if (rst_n) begin
    #(HALF / 2.0);
    bits.push_back(sout);
    btime.push_back($realtime);
  end

  initial begin
    #5us;
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
    int off, w0;
    realtime lat, lat0;
    logic ok;
    #1 rst_n = 0;
    #3000;
    rst_n = 1;
    #1000ns;
    check(n640 == 2 * n320 || n640 == 2 * n320 + 1, "640 MHz vs 320 MHz edges");
    check(n320 > 315 && n320 < 325, $sformatf("320 MHz edges in 1 us: %0d", n320));
    // find where word 10 starts in the bit stream
    w0 = 10;
    off = -1;
    for (int o = 0; o < 200 && off < 0; o++) begin
      ok = 1;
      for (int i = 0; i < 4; i++)
        for (int n = 0; n < 16; n++)
          if (bits[o + 16*i + n] !== words[w0 + i][15 - n]) ok = 0;
      if (ok) off = o;
    end
    check(off >= 0, "word 10 found in serial stream");
    if (off >= 0) begin
      lat0 = btime[off] - HALF / 2.0 - wtime[w0];
      check(lat0 > 0 && lat0 < 6250.0, $sformatf("latency %0t", lat0));
      for (int i = 0; i < 250; i++) begin
        logic [15:0] got;
        for (int n = 0; n < 16; n++) got[15 - n] = bits[off + 16*i + n];
        check(got == words[w0 + i], $sformatf("word %0d: %h expected %h", i, got, words[w0 + i]));
        lat = btime[off + 16*i] - HALF / 2.0 - wtime[w0 + i];
        check(lat > lat0 - 1.0 && lat < lat0 + 1.0, "constant latency");
      end
      $display("serializer latency %0.1f ps", lat0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
