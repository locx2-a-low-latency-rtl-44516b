// lc_pll: behavioural model of the LOCx2 LC-tank PLL (not synthesizable).
//
// The real block is analog: a phase-frequency detector, a programmable charge
// pump, a 2nd/3rd-order loop filter, an LC VCO with four bands and a
// divide-by-64 feedback chain turn the 40 MHz reference into 2.56 GHz. This
// model keeps the ports and the behaviour seen by the digital logic: it
// measures the reference period on every rising edge; when the period is
// steady (within 1%) and MULT times the reference frequency lies inside the
// simulated tuning range of 1.86-2.98 GHz, it produces MULT output periods per
// reference period, phase aligned to the reference edge, and raises locked
// after LOCK_CYCLES steady reference periods. Outside the range the output
// stays low and locked stays low. The loop settings (VCO band, charge-pump
// current, filter bandwidth and order) are accepted but do not change the
// model: the paper gives their ranges, not their effect per setting.
module lc_pll #(
  parameter int  MULT        = 64,
  parameter int  LOCK_CYCLES = 16,
  parameter real FMIN_GHZ    = 1.86,
  parameter real FMAX_GHZ    = 2.98
) (
  input  logic       rst_n,
  input  logic       refclk,
  input  logic [1:0] vco_band,
  input  logic       lpf_3rd,
  input  logic [3:0] cp_current,
  input  logic [3:0] lpf_bw,
  output logic       clk_out,
  output logic       locked
);
  timeunit 1ps;
  timeprecision 1fs;

  realtime t_last, period, prev_period, t0, half;
  real     fghz, diff;
  int      stable;
  logic    running;

  initial begin
    clk_out     = 1'b0;
    locked      = 1'b0;
    running     = 1'b0;
    t_last      = 0;
    period      = 0;
    prev_period = 0;
    stable      = 0;
  end

  always @(posedge refclk or negedge rst_n) begin
    if (!rst_n) begin
      stable  = 0;
      running = 1'b0;
      t_last  = 0;
      locked  <= 1'b0;
    end else begin
      if (t_last > 0) begin
        period = $realtime - t_last;
        fghz   = MULT * 1000.0 / period;
        diff   = (period > prev_period) ? period - prev_period : prev_period - period;
        if (fghz >= FMIN_GHZ && fghz <= FMAX_GHZ && diff < period / 100.0)
          stable = stable + 1;
        else
          stable = 0;
        prev_period = period;
      end
      t_last  = $realtime;
      running = (stable > 0);
      locked  <= (stable >= LOCK_CYCLES);
    end
  end

  // VCO output: 2*MULT edges per reference period, starting at the reference edge.
  always begin
    @(posedge refclk);
    #0;
    if (running) begin
      t0      = $realtime;
      half    = period / (2.0 * MULT);
      clk_out = 1'b1;
      for (int k = 1; k < 2 * MULT; k++) begin
        #(t0 + k * half - $realtime);
        clk_out = ~clk_out;
      end
    end else begin
      clk_out = 1'b0;
    end
  end
endmodule
