// locx2_pkg: constants and types shared by the LOCx2 digital blocks.
//
// One LOCx2 channel carries eight ADC channels (two four-channel Nevis ADCs)
// per 40 MHz bunch crossing in a frame of FRAME_BITS bits, sent as 16-bit
// words at 320 MHz through a 16:1 serializer at 5.12 Gbps. 5.12 Gbps / 40 MHz
// gives the 128-bit frame length. The 8-bit header (fixed "0101" followed by
// a 4-bit PRBS), the 12-bit data-mode payload with a 16-bit CRC and the
// 14-bit calibration-mode payload without CRC follow the frame description
// of the paper; the CRC polynomial, the PRBS polynomial and the placement of
// the fields inside the frame are this design's choices.
package locx2_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned N_ADC_CH   = 8;     // ADC channels per encoder
  localparam int unsigned LANES      = 4;     // serial data lanes per Nevis ADC
  localparam int unsigned ADC_BITS   = 14;    // Nevis ADC output bits
  localparam int unsigned DATA_BITS  = 12;    // ADC resolution (data mode)
  localparam int unsigned HDR_BITS   = 8;     // frame header
  localparam int unsigned PRBS_BITS  = 4;     // PRBS part of the header
  localparam int unsigned CRC_BITS   = 16;    // data-mode CRC
  localparam int unsigned WORD_BITS  = 16;    // serializer input width
  localparam int unsigned FRAME_BITS = 128;   // 5.12 Gbps / 40 MHz
  localparam logic [3:0]  HDR_FIXED  = 4'b0101;

  // Payload lengths: data mode 96 bits + 16-bit CRC, calibration mode 112
  // bits; either way 120 bits with the header.
  localparam int unsigned DATA_PAYLOAD_BITS = N_ADC_CH * DATA_BITS;  // 96
  localparam int unsigned CAL_PAYLOAD_BITS  = N_ADC_CH * ADC_BITS;   // 112

  // CRC-16 generator x^16 + x^12 + x^5 + 1 (CCITT), register preset to all
  // ones, payload fed most significant bit first.
  localparam logic [15:0] CRC_POLY = 16'h1021;
  localparam logic [15:0] CRC_INIT = 16'hFFFF;

  // PRBS-4 generator x^4 + x^3 + 1 (period 15) and its seed after reset or
  // a BCID reset.
  localparam logic [3:0]  PRBS_SEED = 4'b1111;

  typedef enum logic {
    MODE_DATA = 1'b0,   // 8 x 12-bit samples + CRC-16
    MODE_CAL  = 1'b1    // 8 x 14-bit samples, no CRC
  } mode_e;

  typedef logic [ADC_BITS-1:0] sample_t;

  // I2C register map (8-bit registers).
  localparam logic [7:0] REG_MODE   = 8'h00;  // [1:0] calibration mode per channel
  localparam logic [7:0] REG_PLL    = 8'h01;  // PLL settings
  localparam logic [7:0] REG_DRIVER = 8'h02;  // CML driver settings
  localparam logic [7:0] REG_STATUS = 8'h03;  // read only: [0] PLL lock
  localparam int unsigned N_REGS    = 4;

  // Next state of the PRBS-4 register.
  function automatic logic [3:0] prbs4_next(input logic [3:0] s);
    return {s[2:0], s[3] ^ s[2]};
  endfunction

  // CRC-16 over a 96-bit payload, most significant bit first.
  function automatic logic [15:0] crc16_96(input logic [DATA_PAYLOAD_BITS-1:0] d);
    logic [15:0] c;
    logic        fb;
    c = CRC_INIT;
    for (int i = DATA_PAYLOAD_BITS - 1; i >= 0; i--) begin
      fb = c[15] ^ d[i];
      c  = {c[14:0], 1'b0} ^ (fb ? CRC_POLY : 16'h0000);
    end
    return c;
  endfunction
endpackage
