// beamformer_tb: loads random 8-bit complex weights into every (beam,
// antenna, channel) location of the default 16 x 16 x 1024 beamformer, then
// streams one frame of random 18-bit antenna spectra in a scrambled channel
// order (as the FFT delivers them) and compares every beam output with
// sum_k W[b][k][ch] * V_k computed here in 64-bit integers.  Full-scale
// weights and data on some channels exercise the widest sums.  The latency
// (two clocks) and the one-channel-per-clock rate are checked.
module beamformer_tb;
  import fengine_pkg::*;
  localparam int unsigned NI = 16, NB = 16, NC = 1024;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic w_we;
  logic [3:0] w_beam, w_ant;
  logic [9:0] w_ch;
  logic signed [WW-1:0] w_re, w_im;
  logic in_valid, out_valid;
  logic [9:0] in_ch, out_ch;
  cplx_t in_data [NI];
  logic signed [BW-1:0] out_re [NB];
  logic signed [BW-1:0] out_im [NB];

  beamformer dut (.*);

  int checks = 0, failures = 0;
  int wr [NB][NI][NC];
  int wi [NB][NI][NC];
  int xr [NC][NI];
  int xi [NC][NI];
  longint cyc = 0;
  longint t_in [NC];

  initial begin
    for (int c = 0; c < int'(NC); c++) begin
      for (int b = 0; b < int'(NB); b++)
        for (int a = 0; a < int'(NI); a++) begin
          if (c < 4) begin        // extremes
            wr[b][a][c] = (c[0]) ? -128 : 127;
            wi[b][a][c] = (c[1]) ? -128 : 127;
          end else begin
            wr[b][a][c] = int'($urandom_range(255)) - 128;
            wi[b][a][c] = int'($urandom_range(255)) - 128;
          end
        end
      for (int a = 0; a < int'(NI); a++) begin
        if (c < 4) begin
          xr[c][a] = (c[1]) ? 131071 : -131072;
          xi[c][a] = (c[0]) ? -131072 : 131071;
        end else begin
          xr[c][a] = int'($urandom_range(262143)) - 131072;
          xi[c][a] = int'($urandom_range(262143)) - 131072;
        end
      end
    end
  end

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    w_we = 1'b0; in_valid = 1'b0;
    w_beam = '0; w_ant = '0; w_ch = '0; w_re = '0; w_im = '0; in_ch = '0;
    for (int a = 0; a < int'(NI); a++) in_data[a] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int c = 0; c < int'(NC); c++)
      for (int b = 0; b < int'(NB); b++)
        for (int a = 0; a < int'(NI); a++) begin
          w_we <= 1'b1; w_beam <= 4'(b); w_ant <= 4'(a); w_ch <= 10'(c);
          w_re <= WW'(wr[b][a][c]); w_im <= WW'(wi[b][a][c]);
          @(posedge clk);
        end
    w_we <= 1'b0;
    @(posedge clk);
    for (int t = 0; t < int'(NC); t++) begin
      int c;
      c = int'(bitrev(16'(t), 10));
      in_valid <= 1'b1;
      in_ch <= 10'(c);
      for (int a = 0; a < int'(NI); a++) begin
        in_data[a].re <= DW'(xr[c][a]);
        in_data[a].im <= DW'(xi[c][a]);
      end
      t_in[c] = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
  end

  int nout = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    int c;
    c = int'(out_ch);
    checks++;
    // t_in is taken one clock before the edge that samples the input,
    // so two register stages show up as 3 here
    if (cyc - t_in[c] != 3) begin
      failures++;
      if (failures < 10) $display("FAIL latency ch %0d: %0d", c, cyc - t_in[c]);
    end
    for (int b = 0; b < int'(NB); b++) begin
      longint er, ei, gr, gi;
      er = 0; ei = 0;
      for (int a = 0; a < int'(NI); a++) begin
        er += longint'(xr[c][a]) * wr[b][a][c] - longint'(xi[c][a]) * wi[b][a][c];
        ei += longint'(xr[c][a]) * wi[b][a][c] + longint'(xi[c][a]) * wr[b][a][c];
      end
      gr = out_re[b];
      gi = out_im[b];
      checks++;
      if (gr != er || gi != ei) begin
        failures++;
        if (failures < 10) $display("FAIL ch %0d beam %0d: got (%0d,%0d) expected (%0d,%0d)", c, b, gr, gi, er, ei);
      end
    end
    nout++;
  end

  initial begin
    wait (nout == int'(NC));
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NB * NI * NC + 4 * NC) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
