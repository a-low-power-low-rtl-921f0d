// tb_locx2: end-to-end test of the LOCx2 digital top level at its default
// sizes.
//
// Four Nevis ADC models (A, B on channel 0; C, D on channel 1) send random
// 14-bit samples at 40 MHz over a 640 MHz bit clock. The 40 MHz reference
// drives the PLL model; the testbench samples each 5.12 Gbps serial output
// in the middle of each bit, timed by the corrected 2.56 GHz clock of that
// link's serializer. A deframer
// per channel finds the frame boundary from the 0101 header and the PRBS
// sequence, then checks every 128-bit frame: header, PRBS continuity, the
// eight samples against what the ADC models sent (in order, no bunch crossing
// lost), the CRC in data mode (computed here), zero padding, and the latency
// from the ADC clock edge that completes a sample to the first header bit of
// its frame on the serial line, which must be constant and within the
// 24.1-27.3 ns the LOCx2 chip was measured at.
//
// Through a bit-banged I2C master at 2 MHz it reads the PLL lock status,
// switches channel 0 and channel 1 between data and calibration mode and back,
// and writes the driver settings; it pulses BCID_Reset, which must restart
// the PRBS of both channels. Every one of these mechanisms is counted and a
// mechanism that never happened counts as a failure.
//
// Last, it stops the ADC clocks, resets the chip and restarts the ADC clocks
// at eight phases to the reference spread over one 320 MHz word clock. At
// each phase the deframers find the frames again and the latency must be
// constant and within the bounds the encoder's timing gives.
//
// Finally it replaces the PLL clock at the input of both duty-cycle
// correction stages by a copy with a 65 % duty cycle. The links must keep
// sending correct frames, the corrected clock must be within 3 % of 50 %,
// and no bit on the serial line may be shorter than 47 % of a clock period
// (without the correction the low-phase bits would last 35 %).
module tb_locx2;
  timeunit 1ps;
  timeprecision 1fs;
  import locx2_pkg::*;

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ DUT
  logic       ref_clk = 1'b0, rst_n = 1'b1, bcr = 1'b0;
  logic       bit_clk = 1'b0, adc_en = 1'b0;
  logic [3:0] adc_clk, adc_frame;
  logic [3:0][3:0] adc_data;
  logic       scl = 1'b1, m_sda_oe = 1'b0, s_sda_oe, sda;
  logic [1:0] ser;
  logic [7:0] drv_cfg;
  logic       pll_lock;

  always #12500 ref_clk = ~ref_clk;              // 40 MHz
  // 640 MHz ADC bit clock; it can be held low and restarted at a chosen
  // phase to the reference
  bit bclk_hold = 1'b0;
  initial begin
    #(300);                                      // ADC clock phase to the reference
    forever begin
      #781.25 bit_clk = ~bit_clk;
      if (bclk_hold && !bit_clk) wait (!bclk_hold);
    end
  end

  assign sda = ~(m_sda_oe | s_sda_oe);

  for (genvar a = 0; a < 4; a++) begin : g_adc
    nevis_adc_model u_adc (.bit_clk(bit_clk), .en(adc_en), .adc_clk(adc_clk[a]),
                           .frame(adc_frame[a]), .data(adc_data[a]));
  end

  locx2 dut (
    .ref_clk_i(ref_clk), .rst_n_i(rst_n), .bcid_reset_i(bcr),
    .adc_clk_i(adc_clk), .adc_frame_i(adc_frame), .adc_data_i(adc_data),
    .i2c_addr_i(3'd3), .scl_i(scl), .sda_i(sda), .sda_oe_o(s_sda_oe),
    .ser_o(ser), .drv_cfg_o(drv_cfg), .pll_lock_o(pll_lock));

  localparam logic [6:0] DEV = 7'h03;

  // ------------------------------------------------------------ reference
  function automatic logic [15:0] ref_crc(input logic [95:0] d);
    logic [15:0] c = 16'hFFFF;
    logic [15:0] n;
    logic        fb;
    for (int i = 95; i >= 0; i--) begin
      fb = c[15] ^ d[i];
      for (int j = 15; j > 0; j--) n[j] = c[j-1];
      n[0]  = fb;
      n[5]  = c[4] ^ fb;
      n[12] = c[11] ^ fb;
      c = n;
    end
    return c;
  endfunction

  function automatic logic [3:0] ref_prbs_next(input logic [3:0] s);
    return {s[2:0], s[3] ^ s[2]};
  endfunction

  function automatic logic [7:0][13:0] adc_samples(input int ch, input int n);
    logic [7:0][13:0] s;
    for (int c = 0; c < 4; c++) begin
      case (ch)
        0: begin s[c] = g_adc[0].u_adc.hist[n % 256][c]; s[4+c] = g_adc[1].u_adc.hist[n % 256][c]; end
        default: begin s[c] = g_adc[2].u_adc.hist[n % 256][c]; s[4+c] = g_adc[3].u_adc.hist[n % 256][c]; end
      endcase
    end
    return s;
  endfunction

  function automatic realtime adc_time(input int ch, input int n);
    return (ch == 0) ? g_adc[0].u_adc.t_last[n % 256] : g_adc[2].u_adc.t_last[n % 256];
  endfunction

  function automatic int adc_count(input int ch);
    return int'((ch == 0) ? g_adc[0].u_adc.nsent : g_adc[2].u_adc.nsent);
  endfunction

  // ------------------------------------------------------------ deframer
  mode_e       exp_mode  [2] = '{MODE_DATA, MODE_DATA};
  mode_e       prev_mode [2] = '{MODE_DATA, MODE_DATA};
  // frames since a mode write ended; -1 none pending, -2 write under way
  int          switch_wait [2] = '{-1, -1};
  int          bcr_wait [2] = '{-1, -1};
  bit          search_on = 0;

  logic [127:0] sh [2];
  realtime      tbit [2][128];
  longint       nbit [2] = '{0, 0};
  int           conf [2][128];
  logic [3:0]   lastp [2][128];
  bit           locked [2] = '{0, 0};
  int           phase [2];
  logic [3:0]   exp_prbs [2];
  int           next_n [2] = '{-1, -1};
  realtime      lat_min = 1e9, lat_max = 0;
  realtime      t_first [2], t_prev [2];
  bit           fresh [2] = '{1, 1};

  // mechanism counters
  int n_data [2] = '{0, 0}, n_cal [2] = '{0, 0}, n_switch [2] = '{0, 0};
  int n_seed [2] = '{0, 0}, n_crc [2] = '{0, 0}, n_frames [2] = '{0, 0};

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %0t: %s", $realtime, msg);
  endtask

  task automatic check_frame(input int ch, input realtime t0);
    logic [127:0] f = sh[ch];
    logic [3:0]   p = f[123:120];
    logic [7:0][13:0] s;
    logic [127:0] exp_d, exp_c;
    logic [95:0]  pl;
    bit           ok_d, ok_c;
    mode_e        m;
    n_frames[ch]++;

    // one 128-bit frame per 25 ns bunch crossing (5.12 Gbps)
    if (fresh[ch]) begin
      if (n_frames[ch] == 1) t_first[ch] = t0;
      fresh[ch] = 0;
    end else begin
      checks++;
      if (t0 - t_prev[ch] > 25_000.002 || t0 - t_prev[ch] < 24_999.998)
        fail($sformatf("ch%0d frame spacing %0.3f ps", ch, t0 - t_prev[ch]));
    end
    t_prev[ch] = t0;

    // header and PRBS
    checks++;
    if (f[127:124] != 4'b0101) fail($sformatf("ch%0d header %b", ch, f[127:124]));
    checks++;
    if (p != exp_prbs[ch]) begin
      if (bcr_wait[ch] >= 0 && p == PRBS_SEED) begin
        n_seed[ch]++;
        bcr_wait[ch] = -1;
      end else fail($sformatf("ch%0d PRBS %h expected %h", ch, p, exp_prbs[ch]));
    end else if (bcr_wait[ch] >= 0 && p == PRBS_SEED) begin
      n_seed[ch]++;
      bcr_wait[ch] = -1;
    end
    exp_prbs[ch] = ref_prbs_next(p);
    if (bcr_wait[ch] >= 0 && ++bcr_wait[ch] > 3) begin
      fail($sformatf("ch%0d PRBS not restarted after BCID reset", ch));
      bcr_wait[ch] = -1;
    end

    // find the bunch crossing of the first frame
    if (next_n[ch] < 0) begin
      for (int n = adc_count(ch) - 1; n >= 0 && n > adc_count(ch) - 8; n--) begin
        s = adc_samples(ch, n);
        for (int c = 0; c < 8; c++) pl[95 - 12*c -: 12] = s[c][13:2];
        if (f[119:24] == pl) next_n[ch] = n;
      end
      checks++;
      if (next_n[ch] < 0) begin
        fail($sformatf("ch%0d first frame matches no recent sample", ch));
        return;
      end
    end

    // expected frames in both modes
    s = adc_samples(ch, next_n[ch]);
    for (int c = 0; c < 8; c++) pl[95 - 12*c -: 12] = s[c][13:2];
    exp_d = {4'b0101, p, pl, ref_crc(pl), 8'h00};
    exp_c = {4'b0101, p, s[0], s[1], s[2], s[3], s[4], s[5], s[6], s[7], 8'h00};
    ok_d  = (f == exp_d);
    ok_c  = (f == exp_c);
    checks++;
    if (ok_d && exp_mode[ch] == MODE_DATA || ok_c && exp_mode[ch] == MODE_CAL) begin
      m = exp_mode[ch];
      if (switch_wait[ch] != -1) begin
        n_switch[ch]++;
        switch_wait[ch] = -1;
      end
    end else if (switch_wait[ch] != -1 && switch_wait[ch] < 3 &&
                 (ok_d && prev_mode[ch] == MODE_DATA || ok_c && prev_mode[ch] == MODE_CAL)) begin
      m = prev_mode[ch];
      if (switch_wait[ch] >= 0) switch_wait[ch]++;
    end else begin
      fail($sformatf("ch%0d frame %h, bunch crossing %0d, expected %h (%s)", ch, f, next_n[ch],
                     exp_mode[ch] == MODE_DATA ? exp_d : exp_c, exp_mode[ch].name()));
      m = exp_mode[ch];
    end
    if (m == MODE_DATA) begin
      n_data[ch]++;
      checks++;
      if (f[23:8] != ref_crc(f[119:24])) fail($sformatf("ch%0d CRC", ch));
      else n_crc[ch]++;
    end else n_cal[ch]++;

    // latency from the ADC edge that completed the sample to the first bit
    begin
      realtime lat = t0 - adc_time(ch, next_n[ch]);
      if (lat < lat_min) lat_min = lat;
      if (lat > lat_max) lat_max = lat;
      checks++;
      if (lat > 27_300.0 || lat < 0) fail($sformatf("ch%0d latency %0.1f ps", ch, lat));
    end
    next_n[ch]++;
  endtask

  task automatic rx_bit(input int ch, input logic b);
    int ph;
    sh[ch] = {sh[ch][126:0], b};
    tbit[ch][nbit[ch] % 128] = $realtime;
    ph = int'(nbit[ch] % 128);
    nbit[ch]++;
    if (!locked[ch]) begin
      if (!search_on) return;
      if (sh[ch][127:124] == 4'b0101 && sh[ch][123:120] == ref_prbs_next(lastp[ch][ph]))
        conf[ch][ph]++;
      else
        conf[ch][ph] = 0;
      lastp[ch][ph] = sh[ch][123:120];
      if (conf[ch][ph] >= 6) begin
        locked[ch]   = 1;
        phase[ch]    = ph;
        exp_prbs[ch] = ref_prbs_next(sh[ch][123:120]);
      end
    end else if (ph == phase[ch]) begin
      check_frame(ch, tbit[ch][(nbit[ch] - 128) % 128]);
    end
  endtask

  // sample both lines in the middle of each half period of the 2.56 GHz
  // clock; each serializer runs on its own corrected copy of the PLL clock
  always @(posedge dut.g_ch[0].clk_ser) begin
    #97.6;
    rx_bit(0, ser[0]);
  end
  always @(negedge dut.g_ch[0].clk_ser) begin
    #97.6;
    rx_bit(0, ser[0]);
  end
  always @(posedge dut.g_ch[1].clk_ser) begin
    #97.6;
    rx_bit(1, ser[1]);
  end
  always @(negedge dut.g_ch[1].clk_ser) begin
    #97.6;
    rx_bit(1, ser[1]);
  end

  // ------------------------------------------------------------ I2C master
  localparam realtime TQ = 125_000;   // 2 MHz SCL

  task automatic i2c_start();
    m_sda_oe = 1'b0; #(TQ);
    scl = 1'b1;      #(TQ);
    m_sda_oe = 1'b1; #(TQ);
    scl = 1'b0;      #(TQ);
  endtask
  task automatic i2c_stop();
    m_sda_oe = 1'b1; #(TQ);
    scl = 1'b1;      #(TQ);
    m_sda_oe = 1'b0; #(TQ);
  endtask
  task automatic i2c_bit_out(input logic b);
    m_sda_oe = ~b; #(TQ);
    scl = 1'b1;    #(2 * TQ);
    scl = 1'b0;    #(TQ);
  endtask
  task automatic i2c_bit_in(output logic b);
    m_sda_oe = 1'b0; #(TQ);
    scl = 1'b1;      #(TQ);
    b = sda;         #(TQ);
    scl = 1'b0;      #(TQ);
  endtask
  task automatic i2c_byte_out(input logic [7:0] d);
    logic b;
    for (int i = 7; i >= 0; i--) i2c_bit_out(d[i]);
    i2c_bit_in(b);
    checks++;
    if (b) fail("I2C byte not acknowledged");
  endtask
  task automatic i2c_write_reg(input logic [7:0] r, input logic [7:0] d);
    i2c_start();
    i2c_byte_out({DEV, 1'b0});
    i2c_byte_out(r);
    i2c_byte_out(d);
    i2c_stop();
  endtask
  task automatic i2c_read_reg(input logic [7:0] r, output logic [7:0] d);
    logic b;
    i2c_start();
    i2c_byte_out({DEV, 1'b0});
    i2c_byte_out(r);
    i2c_start();
    i2c_byte_out({DEV, 1'b1});
    for (int i = 7; i >= 0; i--) i2c_bit_in(d[i]);
    i2c_bit_out(1'b1);   // NACK
    i2c_stop();
  endtask

  task automatic set_modes(input logic [1:0] cal);
    for (int ch = 0; ch < 2; ch++) begin
      mode_e m = cal[ch] ? MODE_CAL : MODE_DATA;
      if (m != exp_mode[ch]) begin
        prev_mode[ch]   = exp_mode[ch];
        exp_mode[ch]    = m;
        switch_wait[ch] = -2;   // either mode while the write is under way
      end
    end
    i2c_write_reg(REG_MODE, {6'd0, cal});
    for (int ch = 0; ch < 2; ch++) if (switch_wait[ch] == -2) switch_wait[ch] = 0;
  endtask

  task automatic frames(input int n);
    #(n * 25_000);
  endtask

  // ------------------------------------------------------------ sequence
  logic [7:0] rd;
  int         n_lock = 0, n_status = 0, n_phase = 0;
  // the sweep steps the ADC clock phase over one 320 MHz word clock period;
  // the latency bounds follow from the receiver and the encoder: at least
  // two word clocks of synchronizer plus one of loading, at most one more
  localparam int      N_PHASE    = 8;
  localparam realtime PHASE_STEP = 3125.0 / N_PHASE;
  localparam realtime LAT_LO     = 7_500.0;
  localparam realtime LAT_HI     = 11_200.0;
  realtime    sweep_min = 1e9, sweep_max = 0;

  // clock distortion test
  localparam realtime TFAST = 390.625;   // 2.56 GHz period, ps
  logic       dcd_clk = 1'b0;
  bit         dcd_on = 1'b0, dcd_meas = 1'b0;
  int         n_dcd = 0, n_before;
  realtime    dcd_in_hi = 0, dcd_hi_min = 1e9, dcd_hi_max = 0, dcd_bit_min = 1e9;
  realtime    t_dcd_r, t_ser_r, t_ser_edge;

  // 64 cycles per reference period, in phase with the PLL clock
  always @(posedge ref_clk) begin
    if (dcd_on) begin
      for (int i = 0; i < 64; i++) begin
        dcd_clk = 1'b1;
        #(0.65 * TFAST);
        dcd_clk = 1'b0;
        if (i != 63) #(0.35 * TFAST);
      end
    end
  end
  always @(posedge dcd_clk) t_dcd_r = $realtime;
  always @(negedge dcd_clk) if (dcd_meas) dcd_in_hi = $realtime - t_dcd_r;
  always @(posedge dut.g_ch[0].clk_ser) t_ser_r = $realtime;
  always @(negedge dut.g_ch[0].clk_ser) begin
    if (dcd_meas) begin
      if ($realtime - t_ser_r < dcd_hi_min) dcd_hi_min = $realtime - t_ser_r;
      if ($realtime - t_ser_r > dcd_hi_max) dcd_hi_max = $realtime - t_ser_r;
    end
  end
  // shortest time between two changes of serial line 0 (changes less than
  // 1 ps apart are zero-time glitches of the zero-delay multiplexer, whose
  // select and data change at the same clock edge, not bits)
  always @(ser[0]) begin
    if (dcd_meas && $realtime - t_ser_edge >= 1.0 && $realtime - t_ser_edge < dcd_bit_min)
      dcd_bit_min = $realtime - t_ser_edge;
    t_ser_edge = $realtime;
  end

  initial begin
    #(1_000);
    rst_n = 1'b0;              // a falling edge, so the reset acts at once
    #(200_000);
    rst_n = 1'b1;
    #(100_000);
    adc_en = 1'b1;
    wait (pll_lock);
    n_lock++;
    frames(10);
    search_on = 1;
    frames(20);
    checks++;
    if (!locked[0] || !locked[1]) fail("deframers did not find the frames");

    i2c_read_reg(REG_STATUS, rd);
    checks++;
    if (rd != 8'h01) fail($sformatf("status %h", rd));
    else n_status++;

    set_modes(2'b01);          // channel 0 calibration, channel 1 data
    frames(20);
    bcr = 1'b1;
    bcr_wait = '{0, 0};
    #(50_000);
    bcr = 1'b0;
    frames(20);
    set_modes(2'b10);          // channel 0 data, channel 1 calibration
    frames(20);
    set_modes(2'b00);
    frames(20);
    i2c_write_reg(REG_DRIVER, 8'h5A);
    checks++;
    if (drv_cfg != 8'h5A) fail("driver settings");
    frames(5);

    // every mechanism must have happened
    for (int ch = 0; ch < 2; ch++) begin
      checks++;
      if (n_data[ch] == 0 || n_cal[ch] == 0 || n_switch[ch] < 2 || n_seed[ch] == 0 ||
          n_crc[ch] == 0 || n_frames[ch] < 30)
        fail($sformatf("ch%0d coverage: frames %0d data %0d cal %0d switches %0d seeds %0d crc %0d",
                       ch, n_frames[ch], n_data[ch], n_cal[ch], n_switch[ch], n_seed[ch], n_crc[ch]));
      $display("channel %0d: frames %0d, data %0d, calibration %0d, mode switches %0d, PRBS restarts %0d, CRC checked %0d",
               ch, n_frames[ch], n_data[ch], n_cal[ch], n_switch[ch], n_seed[ch], n_crc[ch]);
    end
    checks++;
    if (n_lock == 0 || n_status == 0) fail("PLL lock / status read not seen");
    for (int ch = 0; ch < 2; ch++)
      $display("channel %0d: %0d frames in %0.3f ns", ch, n_frames[ch], (t_prev[ch] - t_first[ch]) / 1000.0);
    checks++;
    if (lat_max - lat_min > 400.0) fail($sformatf("latency varies %0.1f to %0.1f ps", lat_min, lat_max));
    $display("latency ADC last bit -> first header bit: %0.1f to %0.1f ps", lat_min, lat_max);

    // latency against the phase of the ADC clocks to the reference: for each
    // phase the ADCs are stopped, the chip is reset, the ADC clocks restart
    // at the new phase and the deframers find the frames again
    for (int p = 0; p < N_PHASE; p++) begin
      adc_en    = 1'b0;
      bclk_hold = 1'b1;
      search_on = 0;
      #(20_000);
      rst_n = 1'b0;
      for (int ch = 0; ch < 2; ch++) begin
        locked[ch]   = 0;
        next_n[ch]   = -1;
        fresh[ch]    = 1;
        switch_wait[ch] = -1;
        bcr_wait[ch] = -1;
        exp_mode[ch] = MODE_DATA;   // the reset clears the mode register
        for (int i = 0; i < 128; i++) conf[ch][i] = 0;
      end
      @(posedge ref_clk);
      #(p * PHASE_STEP);
      bclk_hold = 1'b0;
      // release the reset at a fixed time to the reference, so that only
      // the ADC clocks move
      repeat (4) @(posedge ref_clk);
      #(100);
      rst_n  = 1'b1;
      #(50_000);
      adc_en = 1'b1;
      frames(10);
      lat_min   = 1e9;
      lat_max   = 0;
      search_on = 1;
      frames(20);
      checks++;
      if (!locked[0] || !locked[1] || lat_max == 0)
        fail($sformatf("phase %0d: deframers did not find the frames", p));
      else begin
        n_phase++;
        checks++;
        if (lat_max - lat_min > 1.0)
          fail($sformatf("phase %0d: latency varies %0.1f to %0.1f ps", p, lat_min, lat_max));
        checks++;
        if (lat_min < LAT_LO || lat_max > LAT_HI)
          fail($sformatf("phase %0d: latency %0.1f ps outside %0.1f to %0.1f ps", p, lat_min, LAT_LO, LAT_HI));
        if (lat_min < sweep_min) sweep_min = lat_min;
        if (lat_max > sweep_max) sweep_max = lat_max;
        $display("ADC clock phase %0.1f ps: latency %0.1f ps", p * PHASE_STEP, lat_min);
      end
    end
    checks++;
    if (n_phase != N_PHASE) fail($sformatf("only %0d of %0d ADC clock phases locked", n_phase, N_PHASE));
    $display("latency over %0d ADC clock phases: %0.1f to %0.1f ps", n_phase, sweep_min, sweep_max);

    // duty-cycle distortion: the PLL clock reaching the correction stages is
    // replaced by a copy with a 65 % duty cycle, as a mismatched clock buffer
    // chain would make it; the links must keep running and the serial bits
    // must stay close to half a clock period
    dcd_on = 1'b1;
    @(posedge ref_clk);
    #(1);
    force dut.clk_fast   = dcd_clk;
    force dut.clk_fast_b = ~dcd_clk;
    // the corrected clock steps once by a few ps; restart the spacing check
    // once the frames under check all started after the step
    #(30_000);
    fresh = '{1, 1};
    frames(4);
    n_before = n_frames[0];
    dcd_meas = 1'b1;
    frames(40);
    dcd_meas = 1'b0;
    checks++;
    if (n_frames[0] - n_before < 39) fail($sformatf("%0d frames under clock distortion", n_frames[0] - n_before));
    checks++;
    if (dcd_in_hi < 0.64 * TFAST || dcd_in_hi > 0.66 * TFAST)
      fail($sformatf("distorted clock high %0.1f ps", dcd_in_hi));
    checks++;
    if (dcd_hi_min < 0.47 * TFAST || dcd_hi_max > 0.53 * TFAST)
      fail($sformatf("corrected clock high %0.1f to %0.1f ps", dcd_hi_min, dcd_hi_max));
    checks++;
    if (dcd_bit_min < 0.47 * TFAST) fail($sformatf("serial bit of %0.1f ps", dcd_bit_min));
    else n_dcd++;
    $display("clock high %0.1f ps in, %0.1f ps after correction; shortest serial bit %0.1f ps (half period %0.1f ps)",
             dcd_in_hi, dcd_hi_max, dcd_bit_min, TFAST / 2);
    release dut.clk_fast;
    release dut.clk_fast_b;
    checks++;
    if (n_dcd == 0) fail("clock distortion never corrected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
