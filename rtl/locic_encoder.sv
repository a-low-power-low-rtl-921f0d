// locic_encoder: frame builder of one LOCx2 channel (the LOCic encoder).
//
// Once per bunch crossing the encoder packs the latest samples of two
// four-channel ADCs (eight channels) into one frame and sends it to the
// serializer as FRAME_W/WORD_W words, one per word clock (320 MHz for LOCx2).
// A frame is, most significant bit first:
//
//   data mode (mode_i = MODE_DATA):
//     0101 | PRBS[3:0] | ch0[13:2] ... ch7[13:2] (8 x 12 bit) | CRC-16 | pad
//   calibration mode (mode_i = MODE_CAL):
//     0101 | PRBS[3:0] | ch0[13:0] ... ch7[13:0] (8 x 14 bit)           | pad
//
// Header, the 96-bit data payload with its 16-bit CRC and the 112-bit
// calibration payload without CRC are the paper's frame description; the
// field order, the choice of the 12 most significant of the 14 ADC bits, the
// CRC-16-CCITT and PRBS-4 polynomials and the zero padding of the 8 bits by
// which a 128-bit LOCx2 frame exceeds the 120 described bits are this
// design's choices. With FRAME_W = 120 and WORD_W = 30 the same module gives
// the 120-bit frame sent through a 30:1 serializer at 4.8 Gbps.
//
// Samples arrive from adc_rx in their own clock domains: each toggle flag is
// synchronized by two flip-flops and the samples are taken on its change.
// Framing: after reset the encoder sends frames of zero samples until the
// first sample of ADC A arrives, then starts a frame carrying it on the same
// word clock that takes it in and keeps that frame phase, so each frame
// leaves as soon as its samples are in. This assumes the ADC clocks and the
// word clock are locked to the same 40 MHz reference, as in the experiment;
// ADC B is expected to deliver within the same word clock as ADC A.
// bcid_reset_i (any clock domain, pulse at least one word clock long)
// restarts the PRBS at PRBS_SEED in the next frame. mode_i is synchronized
// and takes effect at a frame boundary.
//
// Timing: word_o is a register output; frame_start_o is high while word_o
// holds the first word of a frame. A toggle that changes between two word
// clock edges puts its samples into the frame whose first word appears after
// the third edge (two synchronizer stages, then the frame load).
module locic_encoder
  import locx2_pkg::*;
#(
  parameter int unsigned WORD_W  = WORD_BITS,
  parameter int unsigned FRAME_W = FRAME_BITS
) (
  input  logic                              clk,          // word clock
  input  logic                              rst_n,
  input  mode_e                             mode_i,
  input  logic                              bcid_reset_i,
  input  logic [LANES-1:0][ADC_BITS-1:0]    sample_a_i,   // ADC A -> ch0..3
  input  logic                              tgl_a_i,
  input  logic [LANES-1:0][ADC_BITS-1:0]    sample_b_i,   // ADC B -> ch4..7
  input  logic                              tgl_b_i,
  output logic [WORD_W-1:0]                 word_o,
  output logic                              frame_start_o,
  output logic                              aligned_o
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NW     = FRAME_W / WORD_W;
  localparam int unsigned WCW    = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned BODY_W = HDR_BITS + CAL_PAYLOAD_BITS;   // 120

  // ---------------------------------------------------------------------------
  // Clock-domain crossing of the ADC toggles, BCID reset and mode
  // ---------------------------------------------------------------------------
  logic [2:0] sync_a, sync_b, sync_bcr;
  logic [1:0] sync_mode;
  logic       new_a, new_b, bcr_edge;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_a    <= '0;
      sync_b    <= '0;
      sync_bcr  <= '0;
      sync_mode <= '0;
    end else begin
      sync_a    <= {sync_a[1:0], tgl_a_i};
      sync_b    <= {sync_b[1:0], tgl_b_i};
      sync_bcr  <= {sync_bcr[1:0], bcid_reset_i};
      sync_mode <= {sync_mode[0], mode_i};
    end
  end

  assign new_a    = sync_a[2] ^ sync_a[1];
  assign new_b    = sync_b[2] ^ sync_b[1];
  assign bcr_edge = sync_bcr[1] & ~sync_bcr[2];

  // Latest samples of the eight channels; latest_d already holds the
  // samples taken in on this clock, so a frame loaded now carries them.
  sample_t [N_ADC_CH-1:0] latest, latest_d;

  always_comb begin
    latest_d = latest;
    for (int c = 0; c < int'(LANES); c++) begin
      if (new_a) latest_d[c]         = sample_a_i[c];
      if (new_b) latest_d[LANES + c] = sample_b_i[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) latest <= '0;
    else        latest <= latest_d;
  end

  // ---------------------------------------------------------------------------
  // Frame assembly
  // ---------------------------------------------------------------------------
  logic [PRBS_BITS-1:0] prbs_q, prbs_hdr;
  logic                 bcr_pending;
  logic [FRAME_W-1:0]   frame_next;

  assign prbs_hdr = bcr_pending ? PRBS_SEED : prbs_q;

  always_comb begin
    logic [DATA_PAYLOAD_BITS-1:0] payload;
    logic [CAL_PAYLOAD_BITS-1:0]  body;
    for (int c = 0; c < int'(N_ADC_CH); c++) begin
      payload[DATA_PAYLOAD_BITS - 1 - c*DATA_BITS -: DATA_BITS] = latest_d[c][ADC_BITS-1 -: DATA_BITS];
    end
    if (mode_e'(sync_mode[1]) == MODE_CAL) begin
      for (int c = 0; c < int'(N_ADC_CH); c++) begin
        body[CAL_PAYLOAD_BITS - 1 - c*ADC_BITS -: ADC_BITS] = latest_d[c];
      end
    end else begin
      body = {payload, crc16_96(payload)};
    end
    frame_next = '0;
    frame_next[FRAME_W-1 -: BODY_W] = {HDR_FIXED, prbs_hdr, body};
  end

  // ---------------------------------------------------------------------------
  // Word sequencing
  // ---------------------------------------------------------------------------
  logic [WCW-1:0]     wcnt;
  logic [FRAME_W-1:0] frame_sh;
  logic               load;

  // Load a new frame after the last word, or right away when the first
  // sample arrives and framing is not aligned yet.
  assign load = (wcnt == WCW'(NW - 1)) || (!aligned_o && new_a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt          <= WCW'(NW - 1);
      frame_sh      <= '0;
      frame_start_o <= 1'b0;
      aligned_o     <= 1'b0;
      prbs_q        <= PRBS_SEED;
      bcr_pending   <= 1'b0;
    end else begin
      if (load) begin
        wcnt          <= '0;
        frame_sh      <= frame_next;
        frame_start_o <= 1'b1;
        prbs_q        <= prbs4_next(prbs_hdr);
        bcr_pending   <= bcr_edge;
        if (new_a) aligned_o <= 1'b1;
      end else begin
        wcnt          <= wcnt + WCW'(1);
        frame_sh      <= frame_sh << WORD_W;
        frame_start_o <= 1'b0;
        if (bcr_edge) bcr_pending <= 1'b1;
      end
    end
  end

  assign word_o = frame_sh[FRAME_W-1 -: WORD_W];

  // ---------------------------------------------------------------------------
  // Checks
  // ---------------------------------------------------------------------------
  initial begin
    assert (FRAME_W % WORD_W == 0) else $error("frame must be a whole number of words");
    assert (FRAME_W >= BODY_W)      else $error("frame shorter than header and payload");
  end

  // Every frame starts with the fixed header code.
  a_header : assert property (@(posedge clk) disable iff (!rst_n)
                              frame_start_o |-> word_o[WORD_W-1 -: 4] == HDR_FIXED);
  // Once aligned, a frame is only loaded after the last word of the one
  // before, so frames follow each other every NW words.
  a_cadence : assert property (@(posedge clk) disable iff (!rst_n)
                               (aligned_o && load) |-> wcnt == WCW'(NW - 1));
endmodule
