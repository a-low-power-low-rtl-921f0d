// tb_adc_rx: checks the Nevis ADC receiver against the ADC model.
//
// A 640 MHz bit clock gives 16 bit slots per 25 ns bunch crossing, 14 of them
// data. For every sample the model sends, the testbench waits for the toggle
// of sample_tgl_o, compares the four samples with the model's record and
// checks that the toggle comes at the clock edge that takes the last bit.
// A second phase uses 14 slots (no idle bits, 560 MHz) to check back-to-back
// samples.
module tb_adc_rx;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;

  logic bit_clk = 1'b0, rst_n = 1'b0, en16 = 1'b0, en14 = 1'b0;
  logic sel14 = 1'b0;
  logic adc_clk16, frame16, adc_clk14, frame14;
  logic [3:0] data16, data14;
  logic [3:0][13:0] sample;
  logic tgl;
  realtime half = 781.25;   // 640 MHz

  always #(half) bit_clk = ~bit_clk;

  nevis_adc_model #(.SLOTS(16)) u_adc16 (.bit_clk(bit_clk), .en(en16), .adc_clk(adc_clk16), .frame(frame16), .data(data16));
  nevis_adc_model #(.SLOTS(14)) u_adc14 (.bit_clk(bit_clk), .en(en14), .adc_clk(adc_clk14), .frame(frame14), .data(data14));

  adc_rx dut (
    .adc_clk      (bit_clk),
    .rst_n        (rst_n),
    .frame_i      (sel14 ? frame14 : frame16),
    .data_i       (sel14 ? data14 : data16),
    .sample_o     (sample),
    .sample_tgl_o (tgl)
  );

  task automatic check_samples(input int n, input bit use14);
    logic [3:0][13:0] exp;
    realtime          t_exp, t_tgl;
    t_tgl = $realtime;
    #1;   // let the model record the time of the last bit
    exp   = use14 ? u_adc14.hist[n % 256] : u_adc16.hist[n % 256];
    t_exp = use14 ? u_adc14.t_last[n % 256] : u_adc16.t_last[n % 256];
    checks++;
    if (sample !== exp) begin
      failures++;
      $display("FAIL sample %0d: got %h exp %h", n, sample, exp);
    end
    checks++;
    if (t_tgl != t_exp) begin
      failures++;
      $display("FAIL sample %0d: toggle at %0t, last bit at %0t", n, t_tgl, t_exp);
    end
  endtask

  initial begin
    #(100_000);
    rst_n = 1'b1;
    @(negedge bit_clk);
    en16 = 1'b1;
    for (int n = 0; n < 100; n++) begin
      @(tgl);
      check_samples(n, 1'b0);
    end
    // back-to-back samples, 14 slots per sample
    en16 = 1'b0;
    repeat (40) @(posedge bit_clk);
    @(negedge bit_clk);
    sel14 = 1'b1;
    en14  = 1'b1;
    for (int n = 0; n < 100; n++) begin
      @(tgl);
      check_samples(n, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
