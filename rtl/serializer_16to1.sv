// serializer_16to1: 16:1 serializer of one LOCx2 channel, 16-bit words at
// 320 MHz in, 5.12 Gbps serial data out.
//
// The 2.56 GHz PLL clock is divided by 8 to give the 320 MHz word clock
// (clk_word_o) that the encoder runs on. Once per word clock the serializer
// takes the encoder's word into a 16-bit register in the 2.56 GHz domain and
// shifts it out two bits per 2.56 GHz cycle: the odd bit (15, 13, ... 1) and
// the even bit (14, 12, ... 0) of each pair. The last stage is the one drawn
// in the paper: two flip-flops hold the even bit (In0) and the odd bit (In1)
// and a 2:1 multiplexer selected by the 2.56 GHz clock itself sends one
// during each clock phase, so the serial rate is twice the clock rate. The
// odd bit goes out while the clock is high, the even bit while it is low, so
// the word leaves most significant bit first. A duty cycle away from 50 %
// shortens one of the two bits, which is the distortion the paper analyses.
//
// The paper shows only the last stage; the shift register feeding it, the
// divide-by-8 word clock, the load phase and the bit order are this design's
// choices.
//
// Timing: the word present on word_i after a rising edge of the word clock
// is loaded at the fourth 2.56 GHz rising edge after the one that raised the
// word clock (where the divider wraps). Its first bit goes out in the high
// phase after the next rising edge; the whole word takes 8 fast cycles
// (3.125 ns). ser_o is driven combinationally by the
// clock; in silicon it drives the CML output driver.
module serializer_16to1
  import locx2_pkg::*;
(
  input  logic                 clk_fast,     // 2.56 GHz from the PLL
  input  logic                 rst_n,
  input  logic [WORD_BITS-1:0] word_i,
  output logic                 clk_word_o,   // 320 MHz word clock
  output logic                 ser_o         // 5.12 Gbps serial data
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned PAIRS = WORD_BITS / 2;   // fast cycles per word
  localparam int unsigned DW    = $clog2(PAIRS);

  logic [DW-1:0]        div;
  logic [WORD_BITS-1:0] shreg;
  logic                 in0_q, in1_q;    // even bit, odd bit (last stage flip-flops)

  always_ff @(posedge clk_fast or negedge rst_n) begin
    if (!rst_n) begin
      div        <= '0;
      clk_word_o <= 1'b0;
      shreg      <= '0;
      in0_q      <= 1'b0;
      in1_q      <= 1'b0;
    end else begin
      div        <= div + DW'(1);
      // word clock rises when div becomes PAIRS/2, falls when it wraps to 0
      clk_word_o <= ((div + DW'(1)) >= DW'(PAIRS / 2));
      if (div == DW'(PAIRS - 1)) begin
        shreg <= word_i;
      end else begin
        shreg <= shreg << 2;
      end
      in1_q <= shreg[WORD_BITS-1];
      in0_q <= shreg[WORD_BITS-2];
    end
  end

  // Last stage: 2:1 multiplexer selected by the 2.56 GHz clock.
  assign ser_o = clk_fast ? in1_q : in0_q;
endmodule
