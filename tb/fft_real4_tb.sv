// fft_real4_tb: checks the four-lane real FFT against a direct DFT.
//
// Three frames of 4096 real samples (two tones plus pseudo-random noise, one
// frame with a full-scale tone to force saturation with scaling off in the
// last stage) are streamed four samples per clock.  The first two output
// frames are compared bin by bin with X[1024+c]/4096 computed in floating
// point from the same samples, to within a few LSB of rounding.  Also checked:
// every channel index appears once per frame, and successive frames start
// exactly 1024 clocks apart (one spectral frame per 1024 clocks).
module fft_real4_tb;
  import fengine_pkg::*;
  localparam int unsigned NP = 4096;
  localparam int unsigned LP = NP / 4;
  localparam int TOL = 12;

  logic clk = 1'b0, rst = 1'b1, clr = 1'b0;
  always #1 clk = ~clk;

  logic [$clog2(LP):0] shift_sched;
  logic in_valid;
  logic signed [3:0][DW-1:0] in_data;
  logic out_valid, ovf;
  logic [$clog2(LP)-1:0] out_ch;
  cplx_t out_data;

  fft_real4 #(.POINTS(NP)) dut (.*);

  int checks = 0, failures = 0;
  int x [3][NP];
  int ovf_seen = 0;

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic fail(input string m);
    failures++;
    if (failures < 20) $display("FAIL: %s", m);
  endtask

  // expected value of channel c of frame f, scaled by 1/NP
  function automatic void dft(input int f, input int c, output real re, output real im);
    real pi;
    int k;
    pi = 3.14159265358979323846;
    k = int'(LP) + c;
    re = 0.0; im = 0.0;
    for (int n = 0; n < int'(NP); n++) begin
      int ph;
      ph = (k * n) % int'(NP);
      re += real'(x[f][n]) * $cos(2.0 * pi * real'(ph) / real'(NP));
      im -= real'(x[f][n]) * $sin(2.0 * pi * real'(ph) / real'(NP));
    end
    re /= real'(NP); im /= real'(NP);
  endfunction

  initial begin
    real pi;
    pi = 3.14159265358979323846;
    for (int f = 0; f < 3; f++)
      for (int n = 0; n < int'(NP); n++) begin
        real v;
        if (f < 2)
          v = 60000.0 * $cos(2.0 * pi * real'(1300 + 17 * f) * real'(n) / real'(NP))
            + 30000.0 * $sin(2.0 * pi * real'(1900) * real'(n) / real'(NP) + 0.3)
            + real'(int'($urandom_range(8000)) - 4000);
        else
          v = 131000.0 * $cos(2.0 * pi * real'(1500) * real'(n) / real'(NP));
        x[f][n] = $rtoi(v);
      end
  end

  // stimulus
  initial begin
    shift_sched = '1;
    in_valid = 1'b0;
    in_data = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int f = 0; f < 4; f++)
      for (int m = 0; m < int'(LP); m++) begin
        in_valid <= 1'b1;
        for (int r = 0; r < 4; r++) in_data[r] <= DW'(x[f % 3][4*m + r]);
        if (f == 3 && m == 100) shift_sched <= {1'b0, {($clog2(LP)){1'b1}}};
        @(posedge clk);
      end
    in_valid <= 1'b0;
  end

  // checker
  int nout = 0;
  longint t_first[3];
  longint cyc = 0;
  bit seen [2][LP];
  always @(posedge clk) cyc++;
  always @(posedge clk) if (!rst) begin
    if (ovf) ovf_seen++;
    if (out_valid) begin
      int f;
      f = nout / int'(LP);
      if (nout % int'(LP) == 0 && f < 3) t_first[f] = cyc;
      if (f < 2) begin
        real er, ei;
        int c, gr, gi;
        c = int'(out_ch);
        gr = out_data.re;
        gi = out_data.im;
        dft(f, c, er, ei);
        checks++;
        if (seen[f][c]) fail($sformatf("channel %0d repeated in frame %0d", c, f));
        seen[f][c] = 1'b1;
        if (fabs(real'(gr) - er) > TOL || fabs(real'(gi) - ei) > TOL)
          fail($sformatf("frame %0d ch %0d got (%0d,%0d) expected (%0.1f,%0.1f)", f, c,
                         gr, gi, er, ei));
      end
      nout++;
    end
  end

  initial begin
    repeat (5 * LP + 200) @(posedge clk);
    checks++;
    if (t_first[1] - t_first[0] != longint'(LP)) fail($sformatf("frame spacing %0d", t_first[1] - t_first[0]));
    checks++;
    if (nout < 2 * int'(LP)) fail($sformatf("only %0d outputs", nout));
    checks++;
    if (ovf_seen == 0) fail("full-scale tone with last-stage scaling off did not flag overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * LP) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
