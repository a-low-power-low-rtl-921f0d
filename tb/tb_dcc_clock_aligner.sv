// tb_dcc_clock_aligner: self-checking test of the duty-cycle correction and
// clock aligner model, and of the duty-cycle distortion it removes from the
// serial line.
//
// A source makes a 2.56 GHz clock CK with a chosen duty cycle and its
// complement CKb, whose edges can be delayed or advanced against CK (a phase
// error between the two). For each setting, after a few settling cycles,
// every cycle of ck_o is checked:
//   * its period equals the input period;
//   * its high time equals T/2 + 0.09 (H - T/2), two correction stages of
//     0.3 each, computed here in real arithmetic, and for the paper's 70 %
//     and 30 % cases lies within 3 % of 50 %;
//   * its rising edge comes 100 ps after the CK rise, moved by half the
//     change of the high time (the pulse keeps its centre) and by 0.4 of the
//     CKb phase error (the aligner leaves 20 % of the error, split about the
//     midpoint).
// Two 16:1 serializers sending 1010... show the distortion transfer: the one
// clocked by the distorted clock sends high bits as long as the clock's high
// phase; the one clocked by ck_o sends high bits of half a clock period, to
// within 3 % of a period.
module tb_dcc_clock_aligner;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;

  localparam realtime T = 390.625;    // 2.56 GHz, ps

  logic ck = 1'b0, ckb = 1'b1, ck_o, rst_n = 1'b1;
  logic [1:0] ser;
  logic [1:0] wclk;

  dcc_clock_aligner dut (.ck_i(ck), .ckb_i(ckb), .ck_o(ck_o));

  // serializer 0 on the distorted clock, serializer 1 on the corrected one
  serializer_16to1 u_ser_raw (.clk_fast(ck),   .rst_n(rst_n), .word_i(16'hAAAA),
                              .clk_word_o(wclk[0]), .ser_o(ser[0]));
  serializer_16to1 u_ser_dcc (.clk_fast(ck_o), .rst_n(rst_n), .word_i(16'hAAAA),
                              .clk_word_o(wclk[1]), .ser_o(ser[1]));

  // clock source
  realtime duty = 0.5;     // high fraction of CK
  realtime skew = 0.0;     // CKb edges later than the ideal complement, ps
  bit      run  = 1'b1;

  initial begin
    #(50);
    while (run) begin
      realtime h, s;
      h = duty * T;
      s = skew;
      fork
        begin
          ck = 1'b1;
          #(h) ck = 1'b0;
        end
        begin
          if (s >= 0) begin
            #(s) ckb = 1'b0;
            #(h) ckb = 1'b1;
          end else begin
            #(h + s) ckb = 1'b1;
          end
        end
      join_none
      if (s < 0) begin
        #(T + s) ckb = 1'b0;
        #(-s);
      end else #(T);
    end
  end

  // measurement of ck_o and of the serial lines
  realtime t_in_r, t_out_r, t_out_r_prev, t_out_f;
  realtime t_ser_r [2];
  realtime hi_ser [2];
  int      n_out = 0;
  bit      measure = 0;
  int      n_meas = 0;

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %0t: %s", $realtime, msg);
  endtask

  always @(posedge ck) t_in_r = $realtime;

  always @(posedge ck_o) begin
    t_out_r_prev = t_out_r;
    t_out_r      = $realtime;
    n_out++;
    if (measure) begin
      realtime h_in, h_out, exp_r;
      h_in  = duty * T;
      h_out = T / 2 + 0.09 * (h_in - T / 2);
      exp_r = t_in_r + 100.0 + (h_in - h_out) / 2 + 0.4 * skew;
      checks++;
      if (t_out_r - t_out_r_prev > T + 0.02 || t_out_r - t_out_r_prev < T - 0.02)
        fail($sformatf("ck_o period %0.3f ps", t_out_r - t_out_r_prev));
      checks++;
      if (t_out_r - exp_r > 0.05 || exp_r - t_out_r > 0.05)
        fail($sformatf("ck_o rise at %0.3f ps, expected %0.3f ps (skew %0.1f)", t_out_r, exp_r, skew));
    end
  end

  always @(negedge ck_o) begin
    t_out_f = $realtime;
    if (measure) begin
      realtime hi, exp_hi;
      hi     = t_out_f - t_out_r;
      exp_hi = T / 2 + 0.09 * (duty * T - T / 2);
      n_meas++;
      checks++;
      if (hi - exp_hi > 0.05 || exp_hi - hi > 0.05)
        fail($sformatf("ck_o high %0.3f ps, expected %0.3f ps (duty %0.2f)", hi, exp_hi, duty));
      if (skew == 0.0) begin
        checks++;
        if (hi > 0.53 * T || hi < 0.47 * T)
          fail($sformatf("ck_o duty %0.3f not within 3 %% of 50 %%", hi / T));
      end
    end
  end

  for (genvar i = 0; i < 2; i++) begin : g_ser
    always @(posedge ser[i]) t_ser_r[i] = $realtime;
    always @(negedge ser[i]) hi_ser[i] = $realtime - t_ser_r[i];
  end

  task automatic run_case(input realtime d, input realtime s);
    measure = 0;
    duty    = d;
    skew    = s;
    repeat (6) @(posedge ck);
    measure = 1;
    repeat (50) @(posedge ck);
    measure = 0;
    // distortion transfer on the serial lines (both send 1010...)
    checks++;
    if (hi_ser[0] - d * T > 0.05 || d * T - hi_ser[0] > 0.05)
      fail($sformatf("raw serial high bit %0.3f ps, clock high %0.3f ps", hi_ser[0], d * T));
    checks++;
    if (hi_ser[1] - T / 2 > 0.03 * T || T / 2 - hi_ser[1] > 0.03 * T)
      fail($sformatf("corrected serial high bit %0.3f ps, not within 3 %% of a period of T/2", hi_ser[1]));
    $display("duty %0.2f skew %5.1f ps: serial bit %0.1f ps raw, %0.1f ps corrected (unit interval %0.1f ps)",
             d, s, hi_ser[0], hi_ser[1], T / 2);
  endtask

  initial begin
    #(1);
    rst_n = 1'b0;
    #(10_000);
    rst_n = 1'b1;
    run_case(0.50, 0.0);
    run_case(0.70, 0.0);     // the paper's correction range
    run_case(0.30, 0.0);
    run_case(0.50, 40.0);    // CKb late
    run_case(0.50, -40.0);   // CKb early
    run_case(0.60, 25.0);
    run_case(0.43, -15.0);
    checks++;
    if (n_meas < 7 * 50 - 7) fail($sformatf("only %0d cycles measured", n_meas));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
