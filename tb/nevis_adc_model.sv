// nevis_adc_model: behavioural model of a four-channel Nevis ADC output
// link, for testbenches only.
//
// Every SLOTS bit clocks (one bunch crossing) the model sends four new random
// 14-bit samples, one per data lane, most significant bit first, with the
// frame strobe high during the first bit, followed by SLOTS-14 zero bits.
// Outputs change on the falling edge of bit_clk, which is also the ADC clock
// sent to the receiver, so the receiver samples in the middle of each bit.
// Every sample sent is kept in hist[n % HIST] with n = count of samples
// sent before it, and t_last[n % HIST] holds the time of the rising clock
// edge at which the receiver takes its last bit.
module nevis_adc_model #(
  parameter int unsigned SLOTS = 16,
  parameter int unsigned HIST  = 256
) (
  input  logic            bit_clk,
  input  logic            en,
  output logic            adc_clk,
  output logic            frame,
  output logic [3:0]      data
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [3:0][13:0] hist   [HIST];
  realtime          t_last [HIST];
  int unsigned      nsent;
  logic [3:0][13:0] cur;
  int unsigned      slot;
  int unsigned      mark_idx;
  logic             mark = 1'b0;

  always @(posedge bit_clk) begin
    if (mark) begin
      t_last[mark_idx] = $realtime;
      mark = 1'b0;
    end
  end

  assign adc_clk = bit_clk;

  initial begin
    frame = 1'b0;
    data  = '0;
    nsent = 0;
    slot  = 0;
    cur   = '0;
  end

  always @(negedge bit_clk) begin
    if (!en) begin
      frame <= 1'b0;
      data  <= '0;
      slot  <= 0;
    end else begin
      if (slot == 0) begin
        for (int l = 0; l < 4; l++) cur[l] = 14'($urandom);
        hist[nsent % HIST] = cur;
      end
      frame <= (slot == 0);
      for (int l = 0; l < 4; l++) data[l] <= (slot < 14) ? cur[l][13 - slot] : 1'b0;
      if (slot == 13) begin
        // the receiver takes this bit at the next rising edge
        mark_idx = nsent % HIST;
        mark     = 1'b1;
        nsent <= nsent + 1;
      end
      slot <= (slot == SLOTS - 1) ? 0 : slot + 1;
    end
  end
endmodule
