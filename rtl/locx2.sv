// locx2: digital top level of the LOCx2 dual-channel serializer.
//
// Two identical channels each take the data of two four-channel Nevis ADCs
// (eight 14-bit samples per 40 MHz bunch crossing), pack them into one
// 128-bit frame in the LOCic encoder and send the frame as eight 16-bit words
// through a 16:1 serializer at 5.12 Gbps. One LC-PLL multiplies the 40 MHz
// reference to the 2.56 GHz clock used by both serializers; in front of each
// serializer a duty-cycle correction and clock alignment stage restores the
// 50 % duty cycle that the last 2:1 multiplexer needs for equal bit widths.
// Each serializer divides its clock by 8 to the 320 MHz word clock of its
// encoder. An I2C slave holds
// the configuration: the data or calibration mode of each channel, PLL and
// CML-driver settings.
//
//   ADC A, B --> adc_rx x2 --> locic_encoder --16 bit @320 MHz--> serializer_16to1 --> ser_o[0]
//   ADC C, D --> adc_rx x2 --> locic_encoder --16 bit @320 MHz--> serializer_16to1 --> ser_o[1]
//   ref_clk_i (40 MHz) --> lc_pll --2.56 GHz--> dcc_clock_aligner x2 --> serializers
//   SCL/SDA/address --> i2c_slave --> mode (encoders), PLL settings, driver settings
//
// The partition into encoders, 16:1 serializers, shared PLL, I2C slave and CML
// drivers, the ADC signal names and the clock frequencies follow the paper's
// block diagram; the duty-cycle correction and clock aligner follow the
// paper's revised clock distribution, one per serializer being this design's
// choice. The PLL and the correction stage are behavioural models of analog
// circuits. The CML output drivers are analog: ser_o is the logic-level
// serial stream they would send, and drv_cfg_o their I2C settings. The
// asynchronous active-low reset and the use of BCID_Reset to restart the
// header PRBS are this design's choices.
//
// Timing: the first header bit of the frame carrying a sample leaves on
// ser_o 8 to 11 ns after the ADC clock edge that delivers the sample's last
// bit, depending on the phase of that edge to the 320 MHz word clock: two to
// three word clocks of synchronization and frame load, then 1.56 ns through
// the serializer, plus the 0.1 ns insertion delay of the clock correction
// model. This excludes the ADC link itself and the analog output path.
module locx2
  import locx2_pkg::*;
(
  input  logic                       ref_clk_i,     // 40 MHz reference
  input  logic                       rst_n_i,
  input  logic                       bcid_reset_i,
  // Nevis ADCs A, B (channel 0) and C, D (channel 1)
  input  logic [3:0]                 adc_clk_i,
  input  logic [3:0]                 adc_frame_i,
  input  logic [3:0][LANES-1:0]      adc_data_i,
  // I2C
  input  logic [2:0]                 i2c_addr_i,
  input  logic                       scl_i,
  input  logic                       sda_i,
  output logic                       sda_oe_o,
  // to the CML drivers
  output logic [1:0]                 ser_o,
  output logic [7:0]                 drv_cfg_o,
  output logic                       pll_lock_o
);
  timeunit 1ps;
  timeprecision 1fs;

  logic       clk_fast, clk_fast_b;
  logic [7:0] pll_cfg;
  logic [1:0] cal_mode;

  lc_pll u_pll (
    .ref_clk_i (ref_clk_i),
    .cfg_i     (pll_cfg),
    .clk_o     (clk_fast),
    .lock_o    (pll_lock_o)
  );

  // complementary CMOS clocks as the CML-to-CMOS converter delivers them
  assign clk_fast_b = ~clk_fast;

  i2c_slave u_i2c (
    .clk        (ref_clk_i),
    .rst_n      (rst_n_i),
    .addr_i     (i2c_addr_i),
    .scl_i      (scl_i),
    .sda_i      (sda_i),
    .sda_oe_o   (sda_oe_o),
    .status_i   ({7'd0, pll_lock_o}),
    .cal_mode_o (cal_mode),
    .pll_cfg_o  (pll_cfg),
    .drv_cfg_o  (drv_cfg_o)
  );

  for (genvar ch = 0; ch < 2; ch++) begin : g_ch
    logic [1:0][LANES-1:0][ADC_BITS-1:0] sample;
    logic [1:0]                          tgl;
    logic [WORD_BITS-1:0]                word;
    logic                                clk_word;
    logic                                frame_start, aligned;
    logic                                clk_ser;

    // duty-cycle correction and clock alignment in front of the serializer
    dcc_clock_aligner u_dcc (
      .ck_i  (clk_fast),
      .ckb_i (clk_fast_b),
      .ck_o  (clk_ser)
    );

    for (genvar a = 0; a < 2; a++) begin : g_adc
      adc_rx u_rx (
        .adc_clk      (adc_clk_i[2*ch + a]),
        .rst_n        (rst_n_i),
        .frame_i      (adc_frame_i[2*ch + a]),
        .data_i       (adc_data_i[2*ch + a]),
        .sample_o     (sample[a]),
        .sample_tgl_o (tgl[a])
      );
    end

    locic_encoder u_enc (
      .clk           (clk_word),
      .rst_n         (rst_n_i),
      .mode_i        (mode_e'(cal_mode[ch])),
      .bcid_reset_i  (bcid_reset_i),
      .sample_a_i    (sample[0]),
      .tgl_a_i       (tgl[0]),
      .sample_b_i    (sample[1]),
      .tgl_b_i       (tgl[1]),
      .word_o        (word),
      .frame_start_o (frame_start),
      .aligned_o     (aligned)
    );

    serializer_16to1 u_ser (
      .clk_fast   (clk_ser),
      .rst_n      (rst_n_i),
      .word_i     (word),
      .clk_word_o (clk_word),
      .ser_o      (ser_o[ch])
    );
  end
endmodule
