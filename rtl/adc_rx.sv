// adc_rx: receiver for one Nevis ADC (four channels, one serial lane each).
//
// The ADC sends, for every sample, a frame strobe and four serial data lanes
// clocked by its own bit clock. The receiver shifts each lane in most
// significant bit first on the rising edge of adc_clk. The frame strobe is
// high during the first (most significant) bit of a sample; after ADC_BITS
// bits the four samples are copied to sample_o and sample_tgl_o toggles, so a
// reader in another clock domain can synchronize the toggle and then take the
// samples, which stay stable until the next sample completes (one bunch
// crossing later). Bits that arrive after the last bit of a sample and before
// the next strobe are ignored, so any bit clock with at least ADC_BITS bits
// per sample period works.
//
// The signal names (Frame, Data x 4, Clock) follow the LOCx2 block diagram;
// the strobe timing, bit order and the toggle handshake are this design's
// choices, as the paper does not describe the ADC link.
//
// Timing: sample_o and sample_tgl_o change on the rising edge of adc_clk
// that samples the last bit.
module adc_rx
  import locx2_pkg::*;
#(
  parameter int unsigned BITS = ADC_BITS,
  parameter int unsigned NLANE = LANES
) (
  input  logic                       adc_clk,
  input  logic                       rst_n,
  input  logic                       frame_i,
  input  logic [NLANE-1:0]           data_i,
  output logic [NLANE-1:0][BITS-1:0] sample_o,
  output logic                       sample_tgl_o
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned CW = $clog2(BITS + 1);

  logic [NLANE-1:0][BITS-1:0] shreg;
  logic [CW-1:0]              nbits;    // bits of the current sample received, 0 = idle

  always_ff @(posedge adc_clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg        <= '0;
      nbits        <= '0;
      sample_o     <= '0;
      sample_tgl_o <= 1'b0;
    end else begin
      for (int l = 0; l < int'(NLANE); l++) shreg[l] <= {shreg[l][BITS-2:0], data_i[l]};
      if (frame_i) begin
        nbits <= CW'(1);
      end else if (nbits == CW'(BITS - 1)) begin
        // this edge samples the last bit
        for (int l = 0; l < int'(NLANE); l++) sample_o[l] <= {shreg[l][BITS-2:0], data_i[l]};
        sample_tgl_o <= ~sample_tgl_o;
        nbits        <= '0;
      end else if (nbits != '0) begin
        nbits <= nbits + CW'(1);
      end
    end
  end
endmodule
