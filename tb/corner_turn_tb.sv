// corner_turn_tb: streams 20 spectral frames (one channel per clock, channels
// in bit-reversed order as the FFT delivers them) into the default corner
// turn (1024 channels, 16 beams, 8 subbands, 4 frames per group) and reads
// the output stream with a randomly stalling consumer.  Every beat is checked
// against the expected order: subband, then frame, then 4 channels of 16
// beams, with first/last flags, the subband number and the group's first
// frame number.  During frames 10-15 the consumer stops, so the group of
// frames 12-15 must be dropped with one overflow pulse, and the groups of
// frames 0, 4, 8 and 16 must come out complete.  The read side must finish a
// group (1024 beats) well within the 4096 clocks of the next one.
module corner_turn_tb;
  localparam int unsigned NCH = 1024, NBM = 16, NSB = 8, FPP = 4, NFR = 20;
  localparam int unsigned BPS = FPP * NCH / NSB / 4;   // beats per subband

  logic clk = 1'b0, rst = 1'b1, clr = 1'b0;
  always #1 clk = ~clk;
  logic in_valid, out_valid, out_ready, out_first, out_last, overflow;
  logic [9:0] in_ch;
  logic [NBM*8-1:0] in_data;
  logic [511:0] out_data;
  logic [2:0] out_sb;
  logic [63:0] out_frame;

  corner_turn dut (.*);

  int checks = 0, failures = 0, n_ovf = 0;

  function automatic logic [7:0] val(input int f, input int c, input int b);
    int unsigned h;
    h = (f * 1103515245) ^ (c * 40503) ^ (b * 2654435761);
    return 8'(h >> 13);
  endfunction

  task automatic fail(input string m);
    failures++;
    if (failures < 12) $display("FAIL: %s", m);
  endtask

  int cur_frame = 0;
  initial begin
    in_valid = 1'b0; in_ch = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int f = 0; f < int'(NFR); f++) begin
      cur_frame = f;
      for (int t = 0; t < int'(NCH); t++) begin
        int c;
        c = 0;
        for (int i = 0; i < 10; i++) c |= ((t >> i) & 1) << (9 - i);
        in_valid <= 1'b1;
        in_ch <= 10'(c);
        for (int b = 0; b < int'(NBM); b++) in_data[b*8 +: 8] <= val(f, c, b);
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
  end

  // consumer: random stalls, stopped completely while frames 8..15 arrive
  always @(posedge clk) begin
    if (cur_frame >= 10 && cur_frame < 16) out_ready <= 1'b0;
    else                                   out_ready <= ($urandom_range(3) != 0);
  end

  // expected stream
  int groups [$] = '{0, 4, 8, 16};
  int gi = 0, sb = 0, fr = 0, g = 0;
  int beats = 0;
  always @(posedge clk) if (!rst) begin
    if (overflow) n_ovf++;
    if (out_valid && out_ready) begin
      checks++;
      if (gi >= groups.size()) fail("more groups than expected");
      else begin
        int base;
        base = groups[gi];
        if (out_frame != 64'(base)) fail($sformatf("group %0d frame %0d expected %0d", gi, out_frame, base));
        if (out_sb != 3'(sb)) fail($sformatf("subband %0d expected %0d", out_sb, sb));
        if (out_first != (fr == 0 && g == 0)) fail("first flag");
        if (out_last != (fr == int'(FPP) - 1 && g == int'(NCH / NSB / 4) - 1)) fail("last flag");
        for (int l = 0; l < 4; l++)
          for (int b = 0; b < int'(NBM); b++) begin
            int c;
            c = sb * int'(NCH / NSB) + 4 * g + l;
            if (out_data[(l*NBM + b)*8 +: 8] != val(base + fr, c, b)) begin
              fail($sformatf("group %0d sb %0d frame %0d ch %0d beam %0d: %h expected %h",
                             gi, sb, fr, c, b, out_data[(l*NBM + b)*8 +: 8], val(base + fr, c, b)));
            end
          end
        // advance
        beats++;
        if (g == int'(NCH / NSB / 4) - 1) begin
          g = 0;
          if (fr == int'(FPP) - 1) begin
            fr = 0;
            if (sb == int'(NSB) - 1) begin sb = 0; gi++; end
            else sb++;
          end else fr++;
        end else g++;
      end
    end
  end

  initial begin
    wait (!rst && in_valid == 1'b0 && cur_frame == int'(NFR) - 1);
    repeat (3000) @(posedge clk);
    checks++;
    if (gi != groups.size()) fail($sformatf("only %0d of %0d groups received", gi, groups.size()));
    checks++;
    if (n_ovf != 1) fail($sformatf("%0d overflow pulses, expected 1", n_ovf));
    checks++;
    if (beats != groups.size() * int'(NSB * BPS)) fail($sformatf("%0d beats", beats));
    $display("corner_turn_tb: %0d beats, %0d overflows", beats, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NFR + 8) * NCH) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
