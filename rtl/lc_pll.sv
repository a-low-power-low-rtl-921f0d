// lc_pll: behavioural model of the LOCx2 LC-tank phase-locked loop.
// This is a behavioural model, not synthesizable logic: the real part is an
// analog LC-PLL.
//
// The PLL multiplies the 40 MHz bunch-crossing reference by MULT = 64 to the
// 2.56 GHz clock shared by both serializers. The model measures the period of
// ref_clk_i over successive rising edges; once two consecutive periods agree
// to within 1 ps it starts an oscillator with period/MULT, phase aligned to a
// reference edge, and raises lock_o after LOCK_CYCLES further reference
// cycles. Each new reference edge re-aligns the oscillator phase, so the
// output stays phase locked as long as the reference is steady. A change of
// reference period by more than 1 ps drops lock and restarts acquisition.
// Times are kept as whole femtoseconds; the high phase is rounded down and
// the low phase takes the rest, so MULT periods add up to exactly one
// reference period whenever it is a multiple of MULT fs.
//
// cfg_i carries the loop settings from the I2C slave (charge pump, VCO band
// and the like); they act on analog circuits and are not modelled. The paper
// gives the multiplication (40 MHz to 2.56 GHz), the LC type and the shared
// use by both channels; lock detection and its timing are this model's.
module lc_pll #(
  parameter int unsigned MULT        = 64,
  parameter int unsigned LOCK_CYCLES = 4
) (
  input  logic       ref_clk_i,
  input  logic [7:0] cfg_i,
  output logic       clk_o,
  output logic       lock_o
);
  timeunit 1fs;
  timeprecision 1fs;

  // all times in femtoseconds
  time         last_edge, period, prev_period, t_hi, t_lo;
  int unsigned good;
  logic        run;

  initial begin
    clk_o       = 1'b0;
    lock_o      = 1'b0;
    run         = 1'b0;
    good        = 0;
    last_edge   = 0;
    period      = 0;
    prev_period = 0;
    t_hi        = 0;
    t_lo        = 0;
  end

  // Reference period measurement and lock detection.
  always @(posedge ref_clk_i) begin
    if (last_edge > 0) begin
      prev_period = period;
      period      = $time - last_edge;
      if (prev_period > 0 && period < prev_period + 1000 && prev_period < period + 1000) begin
        t_hi = period / time'(2 * MULT);
        t_lo = period / time'(MULT) - t_hi;
        run  = 1'b1;
        if (good < LOCK_CYCLES) good++;
      end else begin
        run  = 1'b0;
        good = 0;
      end
    end
    last_edge = $time;
    lock_o   <= (good >= LOCK_CYCLES);
  end

  // Oscillator: MULT cycles per reference period, restarted on every
  // reference edge.
  always @(posedge ref_clk_i) begin
    if (run) begin
      for (int unsigned i = 0; i < MULT; i++) begin
        clk_o = 1'b1;
        #(t_hi);
        clk_o = 1'b0;
        if (i != MULT - 1) #(t_lo);
      end
    end
  end

  // The loop settings are not modelled.
  logic unused_cfg;
  assign unused_cfg = ^cfg_i;
endmodule
