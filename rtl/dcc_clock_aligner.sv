// dcc_clock_aligner: behavioural model of the duty-cycle correction and
// clock alignment stages in front of a serializer's last 2:1 multiplexer.
// This is a behavioural model, not synthesizable logic: the real part is a
// chain of AC-coupled inverters with resistive feedback (duty-cycle
// correction) followed by inverter pairs cross-coupled by half-strength
// inverters (clock aligner), acting on the complementary CMOS clocks CK and
// CKb.
//
// Why it matters: the last multiplexer sends the odd bit while its clock is
// high and the even bit while it is low, so any duty-cycle distortion (DCD)
// of the 2.56 GHz clock turns directly into unequal bit widths on the
// 5.12 Gbps line.
//
// How the model works: it measures, every cycle, the period T, the high time
// of ck_i, and the edges of ckb_i relative to ck_i. It then rebuilds the next
// cycle of ck_o from these numbers, as the circuit would act on a steady
// clock:
//   * duty-cycle correction: each of the DCC_STAGES stages keeps the centre
//     of a pulse and cuts its width error from T/2 to DCC_RES_PERMILLE/1000
//     of what it was, for CK's high pulse and CKb's low pulse separately;
//   * clock aligner: each of the ALIGN_STAGES stages pulls every CK edge
//     towards the matching (opposite) CKb edge, leaving ALIGN_RES_PERMILLE/1000
//     of their distance, split evenly about the midpoint.
// All output edges come DELAY_FS after the input edge they are built from.
// Until two cycles have been measured, ck_o follows ck_i after DELAY_FS.
//
// Interface: ck_i and ckb_i are the complementary CMOS clocks from the
// CML-to-CMOS converter; ck_o is the corrected CK that selects the
// multiplexer. The corrected CKb is internal: the serializer in this design
// selects on one clock line, as the paper's multiplexer drawing shows.
//
// From the paper: the two-stage DCC followed by a two-stage clock aligner on
// CK and CKb; two DCC stages bringing a 70 % or 30 % duty cycle to within a
// few percent of 50 %; two aligner stages cutting the phase error between
// the complementary clocks to 20 %. This model's own choices: the per-stage
// factors (0.3 for the DCC, so 70 % becomes 51.8 %; 0.447 for the aligner,
// so two stages leave 20 %), centre-preserving correction, and the 100 ps
// insertion delay. Times are whole femtoseconds.
module dcc_clock_aligner #(
  parameter int unsigned DCC_STAGES         = 2,
  parameter int unsigned DCC_RES_PERMILLE   = 300,
  parameter int unsigned ALIGN_STAGES       = 2,
  parameter int unsigned ALIGN_RES_PERMILLE = 447,
  parameter longint      DELAY_FS           = 100_000
) (
  input  logic ck_i,
  input  logic ckb_i,
  output logic ck_o
);
  timeunit 1fs;
  timeprecision 1fs;

  // edge times of the inputs, femtoseconds
  longint t_ck_r, t_ck_f, t_ckb_r, t_ckb_f;
  int     n_rise;
  bit     seen_ck_f, seen_ckb_r, seen_ckb_f;
  bit     corrected;   // this cycle's falling edge comes from the model

  initial begin
    ck_o       = 1'b0;
    t_ck_r     = 0;
    t_ck_f     = 0;
    t_ckb_r    = 0;
    t_ckb_f    = 0;
    n_rise     = 0;
    seen_ck_f  = 0;
    seen_ckb_r = 0;
    seen_ckb_f = 0;
    corrected  = 0;
  end

  function automatic longint dcc(input longint err);
    for (int unsigned s = 0; s < DCC_STAGES; s++) err = err * longint'(DCC_RES_PERMILLE) / 1000;
    return err;
  endfunction

  function automatic longint align(input longint gap);
    for (int unsigned s = 0; s < ALIGN_STAGES; s++) gap = gap * longint'(ALIGN_RES_PERMILLE) / 1000;
    return gap;
  endfunction

  always @(negedge ck_i) begin
    t_ck_f    = longint'($time);
    seen_ck_f = 1;
    if (!corrected) begin
      fork
        begin #(DELAY_FS) ck_o = 1'b0; end
      join_none
    end
  end

  always @(posedge ckb_i) begin
    t_ckb_r    = longint'($time);
    seen_ckb_r = 1;
  end

  always @(negedge ckb_i) begin
    t_ckb_f    = longint'($time);
    seen_ckb_f = 1;
  end

  always @(posedge ck_i) begin
    longint t, per, hi, a, b, lo, c1, c2, h1, l2, r1, f1, f2, r2, m, r_out, f_out;
    t = longint'($time);
    corrected = 0;
    if (n_rise >= 2 && seen_ck_f && seen_ckb_r && seen_ckb_f) begin
      // last cycle, relative to its rising edge of CK
      per = t - t_ck_r;
      hi  = t_ck_f - t_ck_r;
      a   = t_ckb_f - t_ck_r;                  // CKb falls near the CK rise
      if (a > per / 2) a -= per;
      b   = t_ckb_r - t_ck_r;                  // CKb rises near the CK fall
      lo  = b - a;
      // duty-cycle correction, keeping the pulse centres
      c1 = hi / 2;
      h1 = per / 2 + dcc(hi - per / 2);
      r1 = c1 - h1 / 2;
      f1 = c1 + (h1 - h1 / 2);
      c2 = (a + b) / 2;
      l2 = per / 2 + dcc(lo - per / 2);
      f2 = c2 - l2 / 2;
      r2 = c2 + (l2 - l2 / 2);
      // clock aligner: CK rise meets CKb fall, CK fall meets CKb rise
      m     = (r1 + f2) / 2;
      r_out = m + align(r1 - m);
      m     = (f1 + r2) / 2;
      f_out = m + align(f1 - m);
      r_out += DELAY_FS;
      f_out += DELAY_FS;
      if (r_out < 0) r_out = 0;
      if (f_out <= r_out) f_out = r_out + 1;
      corrected = 1;
      fork
        automatic longint dr = r_out;
        automatic longint df = f_out;
        begin
          #(dr) ck_o = 1'b1;
          #(df - dr) ck_o = 1'b0;
        end
      join_none
    end else begin
      fork
        begin #(DELAY_FS) ck_o = 1'b1; end
      join_none
    end
    t_ck_r = t;
    if (n_rise < 2) n_rise++;
  end
endmodule
