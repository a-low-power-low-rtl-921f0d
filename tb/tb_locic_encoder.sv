// tb_locic_encoder: checks the LOCic frame builder.
//
// The testbench plays both ADC receivers: once per 25 ns bunch crossing it
// puts eight new random 14-bit samples on the inputs and flips the two toggle
// flags, at a fixed phase to the 320 MHz word clock. It collects the words of
// every frame and compares the frame with one it builds itself: header 0101,
// the PRBS-4 value (x^4 + x^3 + 1, seeded 1111 after reset and after a BCID
// reset), then in data mode the 12 most significant bits of each channel and
// a CRC-16-CCITT computed here bit by bit (its own code is checked first on
// the standard string "123456789"), in calibration mode all 14 bits. It also
// checks that each bunch crossing's samples start their frame on the third
// word clock edge after the toggle, that frames follow each other every
// eight words, and it exercises a mode switch and a BCID reset.
module tb_locic_encoder;
  timeunit 1ps;
  timeprecision 1fs;
  import locx2_pkg::*;

  localparam int unsigned WW = 16;
  localparam int unsigned FW = 128;
  localparam int unsigned NW = FW / WW;
  localparam realtime     TCLK = 25000.0 / NW;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, bcr = 1'b0;
  mode_e mode = MODE_DATA;
  logic [3:0][13:0] sa = '0, sb = '0;
  logic ta = 1'b0, tb = 1'b0;
  logic [WW-1:0] word;
  logic fstart, aligned;

  always #(TCLK / 2) clk = ~clk;

  locic_encoder dut (
    .clk(clk), .rst_n(rst_n), .mode_i(mode), .bcid_reset_i(bcr),
    .sample_a_i(sa), .tgl_a_i(ta), .sample_b_i(sb), .tgl_b_i(tb),
    .word_o(word), .frame_start_o(fstart), .aligned_o(aligned));

  // ---------------------------------------------------------------- reference
  function automatic logic [15:0] ref_crc(input logic [127:0] d, input int nbits);
    logic [15:0] c = 16'hFFFF;
    logic [15:0] n;
    logic        fb;
    for (int i = nbits - 1; i >= 0; i--) begin
      fb = c[15] ^ d[i];
      for (int j = 15; j > 0; j--) n[j] = c[j-1];
      n[0]  = fb;
      n[5]  = c[4] ^ fb;
      n[12] = c[11] ^ fb;
      c = n;
    end
    return c;
  endfunction

  function automatic logic [FW-1:0] ref_frame(input logic [3:0] prbs, input mode_e m,
                                               input logic [7:0][13:0] s);
    logic [FW-1:0] f = '0;
    logic [95:0]   p;
    int            pos = FW - 1;
    for (int i = 3; i >= 0; i--) f[pos--] = HDR_FIXED[i];
    for (int i = 3; i >= 0; i--) f[pos--] = prbs[i];
    if (m == MODE_CAL) begin
      for (int c = 0; c < 8; c++) for (int b = 13; b >= 0; b--) f[pos--] = s[c][b];
    end else begin
      for (int c = 0; c < 8; c++) for (int b = 13; b >= 2; b--) p[95 - c*12 - (13 - b)] = s[c][b];
      for (int i = 95; i >= 0; i--) f[pos--] = p[i];
      begin
        logic [15:0] crc = ref_crc({32'd0, p}, 96);
        for (int i = 15; i >= 0; i--) f[pos--] = crc[i];
      end
    end
    return f;
  endfunction

  function automatic logic [3:0] ref_prbs_next(input logic [3:0] s);
    logic [3:0] n;
    n[0] = s[3] ^ s[2];
    n[3:1] = s[2:0];
    return n;
  endfunction

  // ---------------------------------------------------------------- stimulus
  logic [7:0][13:0] bx_hist [1024];
  longint unsigned  bx_edge [1024];
  int unsigned      nbx = 0;
  longint unsigned  nedge = 0;
  bit               stim_on = 0;

  always @(posedge clk) nedge++;

  initial begin : stim
    wait (stim_on);
    forever begin
      // 1 ns after a word clock edge, one bunch crossing apart
      @(posedge clk);
      #1000;
      for (int c = 0; c < 4; c++) begin
        sa[c] = 14'($urandom);
        sb[c] = 14'($urandom);
      end
      bx_hist[nbx % 1024] = {sb, sa};
      bx_edge[nbx % 1024] = nedge;
      nbx++;
      ta = ~ta;
      tb = ~tb;
      repeat (NW - 1) @(posedge clk);
    end
  end

  // ---------------------------------------------------------------- monitor
  logic [3:0]    exp_prbs = PRBS_SEED;
  logic [FW-1:0] got;
  int            nw = -1;
  int            nframes = 0, ndata = 0, ncal = 0, nseed = 0, ntrunc = 0;
  bit            prev_aligned = 0;
  int            next_bx = -1;          // bunch crossing expected in the next aligned frame
  longint        last_start = -1;
  mode_e         mode_at_load = MODE_DATA;
  bit            bcr_at_load = 0;
  mode_e         frame_mode;
  bit            frame_seed;

  always @(negedge clk) begin
    if (rst_n && fstart) begin
      if (nw >= 0) begin
        // the frame cut short when framing aligned to the first samples
        exp_prbs = ref_prbs_next(frame_seed ? PRBS_SEED : exp_prbs);
        ntrunc++;
      end
      if (prev_aligned) begin
        checks++;
        if (nedge - last_start != NW) begin
          failures++;
          $display("FAIL frame spacing %0d words", nedge - last_start);
        end
      end
      prev_aligned = aligned;
      last_start = nedge;
      frame_mode = mode_at_load;
      frame_seed = bcr_at_load;
      bcr_at_load = 0;
      nw = 0;
    end
    if (nw >= 0) begin
      got[FW - 1 - nw*WW -: WW] = word;
      nw++;
      if (nw == NW) begin
        logic [7:0][13:0] s;
        logic [3:0]       hp;
        nw = -1;
        nframes++;
        hp = frame_seed ? PRBS_SEED : exp_prbs;
        if (frame_seed) nseed++;
        exp_prbs = ref_prbs_next(hp);
        if (!aligned) s = '0;
        else begin
          if (next_bx < 0) next_bx = 0;
          s = bx_hist[next_bx % 1024];
          // samples arrive 3 word clock edges before the frame starts
          checks++;
          if (last_start - longint'(bx_edge[next_bx % 1024]) != 3) begin
            failures++;
            $display("FAIL latency: bx %0d toggled at edge %0d, frame at edge %0d",
                     next_bx, bx_edge[next_bx % 1024], last_start);
          end
          next_bx++;
        end
        checks++;
        if (frame_mode == MODE_CAL) ncal++; else ndata++;
        if (got !== ref_frame(hp, frame_mode, s)) begin
          failures++;
          $display("FAIL frame %0d (%s): got %h exp %h", nframes, frame_mode.name(), got,
                   ref_frame(hp, frame_mode, s));
        end
      end
    end
  end

  // mode and BCID reset are changed right after a frame start, so they apply
  // to the next frame
  task automatic after_frame_start();
    @(negedge clk);
    while (!fstart) @(negedge clk);
    #100;
  endtask

  initial begin
    checks++;
    if (ref_crc({56'd0, "123456789"}, 72) != 16'h29B1) begin
      failures++;
      $display("FAIL reference CRC");
    end
    #(20000);
    rst_n = 1'b1;
    repeat (30) @(posedge clk);
    stim_on = 1;
    repeat (20 * NW) @(posedge clk);
    // switch to calibration mode
    after_frame_start();
    mode = MODE_CAL;
    mode_at_load = MODE_CAL;
    repeat (20 * NW) @(posedge clk);
    // BCID reset
    after_frame_start();
    bcr = 1'b1;
    bcr_at_load = 1;
    repeat (2) @(posedge clk);
    bcr = 1'b0;
    repeat (20 * NW) @(posedge clk);
    // back to data mode, two more BCID resets 17 frames apart (PRBS wraps)
    after_frame_start();
    mode = MODE_DATA;
    mode_at_load = MODE_DATA;
    repeat (5 * NW) @(posedge clk);
    after_frame_start();
    bcr = 1'b1;
    bcr_at_load = 1;
    repeat (2) @(posedge clk);
    bcr = 1'b0;
    repeat (20 * NW) @(posedge clk);
    checks++;
    if (ndata < 40 || ncal < 15 || nseed < 2 || ntrunc != 1) begin
      failures++;
      $display("FAIL coverage: data %0d cal %0d seed %0d", ndata, ncal, nseed);
    end
    $display("frames: data %0d, calibration %0d, BCID resets %0d", ndata, ncal, nseed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(50_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
