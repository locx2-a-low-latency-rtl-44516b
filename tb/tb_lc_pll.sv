// tb_lc_pll: checks the PLL model at 40 MHz (2.56 GHz out), at 30 MHz (1.92
// GHz, still inside the 1.86-2.98 GHz range) and at 50 MHz (3.2 GHz, outside
// it): lock after the lock time, exactly 64 output periods per reference
// period, output rising with the reference, and no lock out of range.
module tb_lc_pll;
  timeunit 1ps;
  timeprecision 1fs;

  logic rst_n = 1, refclk = 0;
  logic clk_out, locked;
  realtime ref_half = 12500.0;
  int checks = 0, failures = 0;
  int nout = 0;

  lc_pll dut (.rst_n, .refclk, .vco_band(2'd2), .lpf_3rd(1'b1), .cp_current(4'd8),
              .lpf_bw(4'd8), .clk_out, .locked);

  always #(ref_half) refclk = ~refclk;
  always @(posedge clk_out) nout++;

  initial begin
    #20us;
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

  task automatic measure(input int nref, input logic expect_lock, input string tag);
    int n0;
    repeat (20) @(posedge refclk);
    check(locked == expect_lock, {tag, ": lock state"});
    @(posedge refclk);
    n0 = nout;
    repeat (nref) @(posedge refclk);
    check(nout - n0 == (expect_lock ? 64 * nref : 0),
          $sformatf("%s: %0d output periods in %0d reference periods", tag, nout - n0, nref));
    if (expect_lock) begin
      #1;
      check(clk_out == 1'b1, {tag, ": output rises with reference"});
    end
  endtask

  initial begin
    #1 rst_n = 0;
    #30000;
    rst_n = 1;
    repeat (3) @(posedge refclk);
    check(!locked, "not locked right after reset");
    measure(10, 1'b1, "40 MHz");
    ref_half = 10000.0;           // 50 MHz -> 3.2 GHz, out of range
    measure(10, 1'b0, "50 MHz");
    ref_half = 25000.0 / 1.5;     // 30 MHz -> 1.92 GHz
    measure(10, 1'b1, "30 MHz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
