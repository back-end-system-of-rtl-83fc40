// fengine_top_tb: end-to-end test of the F/B-engine board, at a reduced FFT length
// (256 points, 64 channels per frame) and all other parameters at their
// defaults.
//
// Scenario: the weights are loaded as a diagonal matrix (beam b = 127 x
// antenna b) except that beam 5 takes -127 x antenna 3.  Antenna 3 alone
// receives a 14-bit tone centred on output channel C0; all other antennas
// receive zeros.  The board is started with the RESET / 1PPS / 1PPS sequence.
// Every packet is checked: header (frame counter, RESET time, first channel,
// sizes, board id, subband), length, subband order, and the data: beams other
// than 3 and 5 must be exactly zero; beam 3 must hold the tone (clipped to +-7
// in one part) at channel C0 and nothing but -1/0 truncation residue
// elsewhere; beam 5 must equal minus beam 3 to within the truncation step.
// The requantiser shift makes the tone clip.  Groups of frames must arrive
// every 4 frames.
//
// Mechanisms exercised and counted (a failure if one never happens): the
// PPS start sequence, requantiser clipping, link back-pressure, a corner-turn
// overflow (the link is stopped for 9 frames, so one group is dropped and
// the frame counter skips 4), a restart by RESET while running (the frame
// counter starts again at 0), and FFT saturation (scaling switched off at
// the end).
module fengine_top_tb;
  import fengine_pkg::*;
  localparam int unsigned NP   = 256;
  localparam int unsigned NCH  = NP / 4;
  localparam int unsigned NI   = 16, NB = 16, NSB = 8, FPP = 4;
  localparam int unsigned CPS  = NCH / NSB;
  localparam int unsigned BPP  = FPP * CPS / 4;     // payload beats per packet
  localparam int unsigned C0   = 37;              // tone channel (0 = 400 MHz)
  localparam int unsigned NGRP = 11;            // groups to receive
  localparam bit          FULL_MECH = 1'b1;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic pps = 1'b0, reset_cmd = 1'b0;
  logic [63:0] reset_time_in = 64'd1748000000;
  logic [7:0] board_id = 8'd9;
  logic [$clog2(NCH):0] fft_shift;
  logic [4:0] rq_shift;
  logic w_we = 1'b0;
  logic [3:0] w_beam = '0, w_ant = '0;
  logic [$clog2(NCH)-1:0] w_ch = '0;
  logic signed [WW-1:0] w_re = '0, w_im = '0;
  logic adc_valid = 1'b0;
  logic [NI-1:0][SPC-1:0][ADC_BITS-1:0] adc_data;
  logic tvalid, tready, tlast, sop;
  logic [511:0] tdata;
  logic [2:0] tdest;
  sync_state_t sync_state;
  logic [63:0] frame_count;
  logic fft_ovf, rq_clip, ct_overflow;

  fengine_top #(.POINTS(NP)) dut (
    .clk, .rst, .pps, .reset_cmd, .reset_time_in, .board_id, .fft_shift, .rq_shift,
    .w_we, .w_beam, .w_ant, .w_ch, .w_re, .w_im, .adc_valid, .adc_data,
    .tvalid, .tready, .tdata, .tlast, .tdest, .sop,
    .sync_state, .frame_count, .fft_ovf, .rq_clip, .ct_overflow
  );

  int checks = 0, failures = 0;
  task automatic fail(input string m);
    failures++;
    if (failures < 15) $display("FAIL: %s", m);
  endtask

  // ---------------- ADC: tone on antenna 3 ----------------
  longint cyc = 0;
  longint n_samp = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    for (int a = 0; a < int'(NI); a++)
      for (int r = 0; r < 4; r++) begin
        real ph;
        int  v;
        ph = 2.0 * 3.14159265358979 * real'(NCH + C0) * real'((n_samp * 4 + r) % NP) / real'(NP);
        v  = (a == 3) ? $rtoi(4000.0 * $cos(ph)) : 0;
        adc_data[a][r] <= ADC_BITS'(v);
      end
    n_samp <= n_samp + 1;
  end

  // ---------------- mechanism counters ----------------
  int n_armed = 0, n_trig = 0, n_clip = 0, n_fftovf = 0, n_ctovf = 0, n_stall = 0, n_restart = 0;
  sync_state_t prev_state = ST_IDLE;
  always @(posedge clk) if (!rst) begin
    if (sync_state == ST_ARMED && prev_state != ST_ARMED) n_armed++;
    if (sync_state == ST_TRIGGERED && prev_state != ST_TRIGGERED) n_trig++;
    prev_state <= sync_state;
    if (rq_clip) n_clip++;
    if (fft_ovf) n_fftovf++;
    if (ct_overflow) n_ctovf++;
    if (tvalid && !tready) n_stall++;
  end

  // ---------------- packet checker ----------------
  int beat = 0, pkt_sb = 0, ngroups = 0, n_pkts = 0;
  longint exp_frame = 0, grp_frame = -1;
  longint last_grp_cyc = -1;
  bit stalled_recently = 1'b0;
  bit hold_tone_check = 1'b0;
  int tone_hits = 0;
  int b3 [FPP][CPS][2];

  function automatic int nib(input logic [3:0] v);
    return int'($signed(v));
  endfunction

  always @(posedge clk) if (!rst && tvalid && tready) begin
    if (beat == 0) begin
      logic [511:0] h;
      longint fr;
      checks++;
      fr = longint'(tdata[63:0]);
      if (!sop) fail("header beat without sop");
      if (pkt_sb == 0) begin
        if (fr % FPP != 0) fail($sformatf("group frame %0d not a multiple of 4", fr));
        if (fr < exp_frame) fail($sformatf("group frame %0d, expected at least %0d", fr, exp_frame));
        if (fr > exp_frame && n_ctovf == 0) fail($sformatf("frames %0d..%0d missing without overflow", exp_frame, fr - 1));
        if (last_grp_cyc >= 0 && !stalled_recently && fr == exp_frame && cyc - last_grp_cyc != 4 * NCH)
          fail($sformatf("groups %0d clocks apart, expected %0d", cyc - last_grp_cyc, 4 * NCH));
        last_grp_cyc = cyc;
        stalled_recently = 1'b0;
        grp_frame = fr;
      end
      h = '0;
      h[63:0]    = 64'(grp_frame);
      h[127:64]  = reset_time_in;
      h[143:128] = 16'(pkt_sb * int'(CPS));
      h[159:144] = 16'(CPS);
      h[167:160] = 8'(FPP);
      h[175:168] = board_id;
      h[183:176] = 8'(NB);
      h[191:184] = 8'(pkt_sb);
      if (tdata != h) fail($sformatf("header of subband %0d: %h", pkt_sb, tdata[191:0]));
      if (tdest != 3'(pkt_sb)) fail("tdest");
      beat++;
    end else begin
      int f, g;
      f = (beat - 1) / int'(CPS / 4);
      g = (beat - 1) % int'(CPS / 4);
      if (sop) fail("sop on payload");
      if (tlast != (beat == int'(BPP))) fail($sformatf("tlast at beat %0d", beat));
      for (int l = 0; l < 4; l++) begin
        int c;
        c = pkt_sb * int'(CPS) + 4 * g + l;
        for (int b = 0; b < int'(NB); b++) begin
          logic [7:0] v;
          int re, im;
          v  = tdata[(l * NB + b) * 8 +: 8];
          re = nib(v[7:4]);
          im = nib(v[3:0]);
          checks++;
          if (b != 3 && b != 5) begin
            if (v != 8'h00) fail($sformatf("frame %0d ch %0d beam %0d = %h, expected 0", grp_frame + f, c, b, v));
          end else if (b == 3) begin
            b3[f][4 * g + l][0] = re;
            b3[f][4 * g + l][1] = im;
            // the filter bank is full from frame TAPS-1 = 3 on
            if (grp_frame + f >= 3 && !hold_tone_check) begin
              if (c == int'(C0)) begin
                if (re != 7 && re != -7 && im != 7 && im != -7)
                  fail($sformatf("frame %0d: tone channel %0d beam 3 = (%0d,%0d), expected a clipped value", grp_frame + f, c, re, im));
                else tone_hits++;
              end else if (re < -1 || re > 0 || im < -1 || im > 0)
                fail($sformatf("frame %0d ch %0d beam 3 = (%0d,%0d), expected residue only", grp_frame + f, c, re, im));
            end
          end else begin
            int dr, di;
            dr = re + b3[f][4 * g + l][0];
            di = im + b3[f][4 * g + l][1];
            if (dr < -1 || dr > 1 || di < -1 || di > 1)
              fail($sformatf("frame %0d ch %0d beam 5 (%0d,%0d) is not minus beam 3 (%0d,%0d)", grp_frame + f, c,
                             re, im, b3[f][4 * g + l][0], b3[f][4 * g + l][1]));
          end
        end
      end
      if (beat == int'(BPP)) begin
        beat = 0;
        n_pkts++;
        if (pkt_sb == int'(NSB) - 1) begin
          pkt_sb = 0;
          ngroups++;
          exp_frame = grp_frame + FPP;
        end else pkt_sb++;
      end else beat++;
    end
  end
  always @(posedge clk) if (tvalid && !tready) stalled_recently = 1'b1;

  // ---------------- stimulus ----------------
  task automatic pps_pulse();
    pps <= 1'b1;
    repeat (8) @(posedge clk);
    pps <= 1'b0;
    repeat (40) @(posedge clk);
  endtask

  task automatic start_board(input logic [63:0] t);
    @(posedge clk);
    reset_cmd <= 1'b1; reset_time_in <= t;
    @(posedge clk);
    reset_cmd <= 1'b0;
    repeat (NCH / 2) @(posedge clk);
    pps_pulse();
    checks++;
    if (sync_state != ST_ARMED) fail("not ARMED after the first PPS");
    pps_pulse();
    checks++;
    if (sync_state != ST_TRIGGERED) fail("not TRIGGERED after the second PPS");
  endtask

  initial begin
    fft_shift = '1;
    rq_shift  = 5'd16;
    tready    = 1'b1;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    adc_valid <= 1'b1;
    // weights
    for (int c = 0; c < int'(NCH); c++)
      for (int b = 0; b < int'(NB); b++)
        for (int a = 0; a < int'(NI); a++) begin
          w_we   <= 1'b1;
          w_beam <= 4'(b);
          w_ant  <= 4'(a);
          w_ch   <= ($bits(w_ch))'(c);
          w_re   <= (a == b) ? 8'sd127 : ((b == 5 && a == 3) ? -8'sd127 : 8'sd0);
          w_im   <= '0;
          @(posedge clk);
        end
    w_we <= 1'b0;
    // a PPS with no command does nothing
    pps_pulse();
    checks++;
    if (sync_state != ST_IDLE) fail("PPS without command left IDLE");
    start_board(reset_time_in);
    if (FULL_MECH) begin
      // run, then stop the link long enough to lose one group
      wait (ngroups == 3);
      tready <= 1'b0;
      repeat (9 * NCH) @(posedge clk);
      tready <= 1'b1;
      wait (ngroups == 5);
      // random back-pressure
      while (ngroups < 7) begin
        tready <= ($urandom_range(3) != 0);
        @(posedge clk);
      end
      tready <= 1'b1;
      // restart the board: RESET while running, halt, trigger
      @(posedge clk);
      reset_cmd <= 1'b1;
      @(posedge clk);
      reset_cmd <= 1'b0;
      pps_pulse();
      checks++;
      if (sync_state != ST_ARMED) fail("running board not ARMED after RESET and PPS");
      wait (tvalid == 1'b0);
      exp_frame = 0;
      last_grp_cyc = -1;
      n_restart++;
      pps_pulse();
      wait (ngroups == 9);
      // no FFT scaling: the tone must saturate the FFT
      hold_tone_check = 1'b1;
      fft_shift <= '0;
      wait (ngroups == int'(NGRP));
    end else begin
      wait (ngroups == int'(NGRP));
    end
    repeat (10) @(posedge clk);
    checks++;
    if (tone_hits == 0) fail("tone never seen");
    checks++;
    if (n_armed == 0 || n_trig == 0) fail("synchronisation sequence not seen");
    checks++;
    if (n_clip == 0) fail("requantiser clipping never happened");
    if (FULL_MECH) begin
      checks++;
      if (n_ctovf == 0) fail("corner-turn overflow never happened");
      checks++;
      if (n_fftovf == 0) fail("FFT saturation never happened");
      checks++;
      if (n_stall == 0) fail("link back-pressure never happened");
      checks++;
      if (n_restart == 0 || n_trig < 2) fail("restart never happened");
    end
    $display("fengine_top_tb: %0d packets, %0d groups; armed %0d, triggered %0d, restarts %0d, clip %0d, fft saturation %0d, corner-turn overflow %0d, stall cycles %0d",
             n_pkts, ngroups, n_armed, n_trig, n_restart, n_clip, n_fftovf, n_ctovf, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NB * NI * NCH + (NGRP * 4 + 30) * NCH + 2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
