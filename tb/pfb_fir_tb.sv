// pfb_fir_tb: checks the polyphase FIR front end against a reference model.
//
// Five frames of 14-bit samples are streamed four per clock into the default
// 4-tap, 4096-point filter.  Each output is compared exactly with
// sat((sum_t h[(3-t)*4096 + n] * x[n - t*4096]) >>> 13, 18), where the
// prototype h (Hamming-windowed sinc) is recomputed here and samples before
// the first frame count as zero.  The one-clock latency and the
// four-samples-per-clock rate are checked too.  Frame 0 is random; frames
// 1-4 are near full scale with signs matching the central taps, so that
// frame 4 exercises the output saturation.
module pfb_fir_tb;
  localparam int unsigned T = 4, NP = 4096, S = 4, IW = 14, OW = 18, CW = 18;
  localparam int unsigned NF = 5;

  logic clk = 1'b0, rst = 1'b1, clr = 1'b0;
  always #1 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [S-1:0][IW-1:0] in_data;
  logic signed [S-1:0][OW-1:0] out_data;

  pfb_fir dut (.*);

  int checks = 0, failures = 0;
  int x [NF * NP];
  int h [T * NP];
  int n_sat = 0;

  initial begin
    real pi, L, u, w;
    pi = 3.14159265358979323846;
    L = real'(T * NP);
    for (int i = 0; i < int'(T * NP); i++) begin
      u = (real'(i) - L / 2.0 + 0.5) / real'(NP);
      w = 0.54 - 0.46 * $cos(2.0 * pi * real'(i) / (L - 1.0));
      h[i] = $rtoi($sin(pi * u) / (pi * u) * w * 131071.0);
    end
    for (int n = 0; n < int'(NF * NP); n++)
      // frame 0 random; frames 1-4 full scale with the signs of the middle
      // of the prototype's four taps (-, +, +, -), which saturates frame 4
      case (n / int'(NP))
        0:       x[n] = int'($urandom_range(8000)) - 4000;
        1, 4:    x[n] = -8192 + int'($urandom_range(20));
        default: x[n] = 8191 - int'($urandom_range(20));
      endcase
  end

  function automatic int ref_y(input int n);
    longint acc;
    int nn;
    acc = 0;
    for (int t = 0; t < int'(T); t++) begin
      nn = n - t * int'(NP);
      if (nn >= 0) acc += longint'(h[(int'(T) - 1 - t) * int'(NP) + (n % int'(NP))]) * longint'(x[nn]);
    end
    acc = acc >>> 13;
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return int'(acc);
  endfunction

  int sent = 0, got = 0;
  longint cyc = 0, first_in = -1;

  initial begin
    in_valid = 1'b0;
    in_data = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int m = 0; m < int'(NF * NP / S); m++) begin
      in_valid <= 1'b1;
      for (int r = 0; r < int'(S); r++) in_data[r] <= IW'(x[S * m + r]);
      @(posedge clk);
      sent++;
    end
    in_valid <= 1'b0;
  end

  always @(posedge clk) begin
    if (in_valid && first_in < 0) first_in = cyc;
    if (!rst && out_valid) check_out();
    cyc++;
  end

  task automatic check_out();
    for (int r = 0; r < int'(S); r++) begin
      int g, e;
      g = $signed(out_data[r]);
      e = ref_y(S * got + r);
      checks++;
      if (e == 131071 || e == -131072) n_sat++;
      if (g != e) begin
        failures++;
        if (failures < 10) $display("FAIL sample %0d: got %0d expected %0d", S * got + r, g, e);
      end
    end
    checks++;
    if (cyc != first_in + longint'(got) + 1) begin
      failures++;
      if (failures < 10) $display("FAIL timing: output %0d at cycle %0d, first input at %0d", got, cyc, first_in);
    end
    got++;
  endtask

  initial begin
    wait (got == int'(NF * NP / S));
    repeat (3) @(posedge clk);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("pfb_fir_tb: %0d outputs, %0d saturated", got * S, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * NP) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
