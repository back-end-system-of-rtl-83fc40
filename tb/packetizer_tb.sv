// packetizer_tb: feeds the packetizer with 12 subband blocks of 128 random
// 64-byte beats (as the corner turn sends them) from a source with random
// gaps, into a sink with random back-pressure.  Each output packet must be
// one header beat (frame counter, RESET time, first channel, 128 channels,
// 4 frames, board id, 16 beams, subband; zero elsewhere) followed by the 128
// payload beats unchanged, tlast on the last, tdest = subband, sop on the
// header only: 129 beats = 8256 bytes.
module packetizer_tb;
  localparam int NPKT = 12, BEATS = 128;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [63:0] reset_time = 64'h0000_0000_6789_abcd;
  logic [7:0] board_id = 8'd5;
  logic in_valid, in_ready, in_first, in_last, tvalid, tready, tlast, sop;
  logic [511:0] in_data, tdata;
  logic [2:0] in_sb, tdest;
  logic [63:0] in_frame;

  packetizer dut (.*);

  int checks = 0, failures = 0;
  logic [511:0] pay [NPKT][BEATS];

  task automatic fail(input string m);
    failures++;
    if (failures < 12) $display("FAIL: %s", m);
  endtask

  initial begin
    for (int p = 0; p < NPKT; p++)
      for (int b = 0; b < BEATS; b++)
        for (int w = 0; w < 16; w++) pay[p][b][w*32 +: 32] = $urandom;
  end

  // source
  int sp = 0, sb_ = 0;
  initial begin
    in_valid = 1'b0; in_data = '0; in_first = 1'b0; in_last = 1'b0; in_sb = '0; in_frame = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    while (sp < NPKT) begin
      if (!in_valid || in_ready) begin
        // previous beat (if any) was taken: offer the next one or a gap
        if ($urandom_range(4) == 0) begin
          in_valid <= 1'b0;
        end else begin
          in_valid <= 1'b1;
          in_data  <= pay[sp][sb_];
          in_first <= sb_ == 0;
          in_last  <= sb_ == BEATS - 1;
          in_sb    <= 3'(sp % 8);
          in_frame <= 64'(4 * (sp / 8)) + 64'd1000;
          if (sb_ == BEATS - 1) begin sb_ = 0; sp++; end
          else sb_++;
        end
      end
      @(posedge clk);
    end
    while (in_valid && !in_ready) @(posedge clk);
    in_valid <= 1'b0;
  end

  always @(posedge clk) tready <= ($urandom_range(3) != 0);

  // sink checker
  int op = 0, ob = 0;
  always @(posedge clk) if (!rst && tvalid && tready) begin
    checks++;
    if (op >= NPKT) fail("extra beat");
    else if (ob == 0) begin
      logic [511:0] h;
      h = '0;
      h[63:0] = 64'(4 * (op / 8)) + 64'd1000;
      h[127:64] = reset_time;
      h[143:128] = 16'((op % 8) * 128);
      h[159:144] = 16'd128;
      h[167:160] = 8'd4;
      h[175:168] = board_id;
      h[183:176] = 8'd16;
      h[191:184] = 8'(op % 8);
      if (tdata != h) fail($sformatf("packet %0d header %h", op, tdata[191:0]));
      if (!sop || tlast) fail($sformatf("packet %0d header flags sop=%0b last=%0b", op, sop, tlast));
      if (tdest != 3'(op % 8)) fail("tdest");
      ob++;
    end else begin
      if (tdata != pay[op][ob-1]) fail($sformatf("packet %0d beat %0d data", op, ob));
      if (sop) fail("sop on payload");
      if (tlast != (ob == BEATS)) fail($sformatf("packet %0d beat %0d tlast=%0b", op, ob, tlast));
      if (tdest != 3'(op % 8)) fail("tdest");
      if (ob == BEATS) begin ob = 0; op++; end
      else ob++;
    end
  end

  // an offered beat must stay until taken
  logic [511:0] last_d;
  logic last_v = 1'b0, last_r = 1'b0;
  always @(posedge clk) begin
    if (!rst && last_v && !last_r) begin
      checks++;
      if (!tvalid || tdata != last_d) fail("output changed while stalled");
    end
    last_v <= tvalid; last_r <= tready; last_d <= tdata;
  end

  initial begin
    wait (op == NPKT);
    repeat (10) @(posedge clk);
    checks++;
    if (op != NPKT) fail("missing packets");
    $display("packetizer_tb: %0d packets of %0d bytes", op, (BEATS + 1) * 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPKT * BEATS * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
