// tb_serializer_16to1: checks the 16:1 serializer.
//
// A 2.56 GHz clock (period 390.625 ps) drives the serializer; on every rising
// edge of the 320 MHz word clock it produces, the testbench puts a new random
// word on word_i. The serial output is sampled in the middle of each clock
// phase, the high phase carrying the odd bit and the low phase the even bit.
// The bits of each word must appear most significant first, starting in the
// high phase after the fifth 2.56 GHz rising edge after the one that raised
// the word clock (load on the fourth), with no gaps between words
// (5.12 Gbps). The word clock must have a period
// of eight fast cycles and a 50 % duty cycle.
module tb_serializer_16to1;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] word = '0;
  logic clk_word, ser;

  // 390.625 ps period at 1 fs precision
  always begin
    #195.312 clk = 1'b1;
    #195.313 clk = 1'b0;
  end

  serializer_16to1 dut (.clk_fast(clk), .rst_n(rst_n), .word_i(word), .clk_word_o(clk_word), .ser_o(ser));

  longint unsigned nfast = 0;   // rising edges so far, counted by the receiver

  // words and the fast edge after which their first bit is due
  logic [15:0]     wq   [$];
  longint unsigned weq  [$];
  longint unsigned last_rise = 0, last_fall = 0;
  int              nwords = 0;
  bit              started = 0;

  always @(posedge clk_word) begin
    if (rst_n) begin
      if (started) begin
        checks++;
        if (nfast - last_rise != 8 || nfast - last_fall != 4) begin
          failures++;
          $display("FAIL word clock: period %0d, high %0d fast cycles", nfast - last_rise, nfast - last_fall);
        end
      end
      last_rise = nfast;
      word = 16'($urandom);
      wq.push_back(word);
      weq.push_back(nfast + 5);
      started = 1;
    end
  end
  always @(negedge clk_word) last_fall = nfast;

  // receiver
  logic [15:0] cur;
  int          bitpos = -1;
  int          nbits_ok = 0;

  always @(posedge clk) begin
    nfast++;
    if (bitpos < 0 && weq.size() > 0 && weq[0] == nfast) begin
      cur    = wq.pop_front();
      void'(weq.pop_front());
      bitpos = 15;
    end else if (bitpos < 0 && weq.size() > 0 && weq[0] < nfast) begin
      failures++;
      $display("FAIL word due at edge %0d missed", weq[0]);
      void'(wq.pop_front());
      void'(weq.pop_front());
    end
    if (bitpos >= 0) begin
      #97.6;
      checks++;
      if (ser !== cur[bitpos]) begin
        failures++;
        $display("FAIL bit %0d of word %h: got %b (high phase)", bitpos, cur, ser);
      end
      @(negedge clk);
      #97.6;
      checks++;
      if (ser !== cur[bitpos-1]) begin
        failures++;
        $display("FAIL bit %0d of word %h: got %b (low phase)", bitpos - 1, cur, ser);
      end
      bitpos = bitpos - 2;
      if (bitpos < 0) nwords++;
    end
  end

  initial begin
    #(5000);
    @(negedge clk);
    rst_n = 1'b1;
    wait (nwords == 500);
    @(posedge clk);
    checks++;
    if (wq.size() > 2) begin
      failures++;
      $display("FAIL %0d words pending", wq.size());
    end
    $display("words checked %0d", nwords);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
