// tb_lc_pll: checks the behavioural PLL model.
//
// With a 40 MHz reference the output must, once lock_o is high, give exactly
// 64 rising edges per reference period (2.56 GHz), have a rising edge at
// every reference rising edge and a high time of half a period to within
// 1 fs. A step of the reference to 39 MHz must drop lock, which must come
// back with 64 edges per new period.
module tb_lc_pll;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;

  logic ref_clk = 1'b0;
  logic clk, lock;
  realtime ref_half = 12500.0;

  always #(ref_half) ref_clk = ~ref_clk;

  lc_pll dut (.ref_clk_i(ref_clk), .cfg_i(8'h00), .clk_o(clk), .lock_o(lock));

  int unsigned nedges = 0;
  realtime     t_rise = 0, t_high = 0;
  always @(posedge clk) begin
    nedges++;
    t_rise = $realtime;
  end
  always @(negedge clk) t_high = $realtime - t_rise;

  task automatic check_periods(input int n, input realtime period);
    repeat (n) begin
      @(posedge ref_clk);
      #1;
      nedges = 0;
      @(posedge ref_clk);
      #1;
      checks++;
      if (nedges != 64) begin
        failures++;
        $display("FAIL %0d edges per reference period", nedges);
      end
      checks++;
      if ($realtime - 1 - t_rise > 0.001) begin
        failures++;
        $display("FAIL output not aligned to reference: last rise %0t", t_rise);
      end
      checks++;
      if (t_high - period / 128.0 > 0.002 || period / 128.0 - t_high > 0.002) begin
        failures++;
        $display("FAIL high time %f ps", t_high);
      end
    end
  endtask

  int lost = 0;
  always @(negedge lock) lost++;

  initial begin
    wait (lock);
    check_periods(20, 25000.0);
    ref_half = 500_000.0 / 39.0;   // 39 MHz
    repeat (3) @(posedge ref_clk);
    checks++;
    if (lost == 0) begin
      failures++;
      $display("FAIL lock not dropped after a reference step");
    end
    wait (lock);
    check_periods(20, 1_000_000.0 / 39.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
