// fft_real4: POINTS-point real FFT fed SPC=4 samples per clock, keeping the
// upper half of the positive-frequency channels (400-800 MHz for a 1.6 GS/s
// input) and producing one channel per clock, i.e. one spectral frame of
// POINTS/4 channels every POINTS/4 clocks.
//
// The input x[n] arrives as lanes x_r[m] = x[4m+r].  Each lane goes through
// its own LP = POINTS/4 point complex FFT (fft_r2sdf, imaginary part zero),
// giving Y_r[k].  For the kept channels k = LP + c, c = 0..LP-1,
//
//     X[LP + c] = sum_r W^(r*(LP + c)) * Y_r[c],   W = exp(-2*pi*i/POINTS),
//
// which needs only one complex multiply per lane per clock.  The lane FFTs
// all run in step, so their outputs leave in the same bit-reversed order:
// the t-th output of a frame is channel c = bitrev(t).  shift_sched bits
// 0..log2(LP)-1 scale the lane stages; the top bit divides the four-term sum
// by 4.  Results saturate to DW bits and ovf flags saturation anywhere.
//
// The lane count is fixed at SPC = 4 (fengine_pkg): the formula above picks
// the second quarter of the bins, which is the upper half band only for 4.
//
// Interface: in_valid with SPC real DW-bit samples; out_valid with
// out_ch = c (0 = lowest kept channel) and the complex value.  The paper's
// FFT is a CASPER 18-bit real FFT with 2048 channels of which 1024 are
// output; this lane-split structure is this design's way of meeting the
// four-samples-per-clock rate.
module fft_real4
  import fengine_pkg::*;
#(
  parameter int unsigned POINTS = 4096,
  parameter int unsigned TWW    = 18
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic                                  clr,
  input  logic [$clog2(POINTS/SPC):0]           shift_sched,
  input  logic                                  in_valid,
  input  logic signed [SPC-1:0][DW-1:0]         in_data,
  output logic                                  out_valid,
  output logic [$clog2(POINTS/SPC)-1:0]         out_ch,
  output cplx_t                                 out_data,
  output logic                                  ovf
);
  localparam int unsigned LP  = POINTS / SPC;
  localparam int unsigned LB  = $clog2(LP);
  localparam int unsigned PB  = $clog2(POINTS);
  localparam int unsigned TWF = TWW - 2;

  // Combine twiddles W^i, i = 0..POINTS-1.
  logic signed [TWW-1:0] tw_re [POINTS];
  logic signed [TWW-1:0] tw_im [POINTS];
  initial begin
    real pi;
    pi = 3.14159265358979323846;
    for (int i = 0; i < int'(POINTS); i++) begin
      tw_re[i] = TWW'($rtoi($floor( $cos(2.0 * pi * real'(i) / real'(POINTS)) * real'(1 << TWF) + 0.5)));
      tw_im[i] = TWW'($rtoi($floor(-$sin(2.0 * pi * real'(i) / real'(POINTS)) * real'(1 << TWF) + 0.5)));
    end
  end

  logic        lv   [SPC];
  cplx_t       ly   [SPC];
  logic [SPC-1:0] lovf;

  for (genvar r = 0; r < SPC; r++) begin : g_lane
    cplx_t x;
    assign x.re = $signed(in_data[r]);
    assign x.im = '0;
    fft_r2sdf #(.N(LP), .TWW(TWW)) u_fft (
      .clk, .rst, .clr,
      .shift_sched(shift_sched[LB-1:0]),
      .in_valid   (in_valid),
      .in_data    (x),
      .out_valid  (lv[r]),
      .out_data   (ly[r]),
      .ovf        (lovf[r])
    );
  end

  logic [LB-1:0] t;     // output position within the frame
  logic [LB-1:0] c;
  assign c = LB'(bitrev(16'(t), LB));

  cplx_t z_c;
  logic  ovf_c;
  always_comb begin
    logic signed [DW+TWW+3:0] acc_re, acc_im, p;
    logic [PB-1:0]            idx;
    logic signed [63:0]       v;
    acc_re = '0;
    acc_im = '0;
    for (int r = 0; r < int'(SPC); r++) begin
      idx = PB'(r * (LP + int'(c)));
      p = (DW+TWW+4)'(ly[r].re) * (DW+TWW+4)'(tw_re[idx]) - (DW+TWW+4)'(ly[r].im) * (DW+TWW+4)'(tw_im[idx]);
      acc_re += p >>> TWF;
      p = (DW+TWW+4)'(ly[r].re) * (DW+TWW+4)'(tw_im[idx]) + (DW+TWW+4)'(ly[r].im) * (DW+TWW+4)'(tw_re[idx]);
      acc_im += p >>> TWF;
    end
    if (shift_sched[LB]) begin
      acc_re = acc_re >>> 2;
      acc_im = acc_im >>> 2;
    end
    v = sat(64'(acc_re), DW); ovf_c = (v != 64'(acc_re)); z_c.re = DW'(v);
    v = sat(64'(acc_im), DW); ovf_c |= (v != 64'(acc_im)); z_c.im = DW'(v);
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      t         <= '0;
      out_valid <= 1'b0;
      ovf       <= 1'b0;
    end else begin
      out_valid <= lv[0];
      ovf       <= (lv[0] && ovf_c) || (|lovf);
      if (lv[0]) t <= t + 1'b1;
    end
    if (lv[0]) begin
      out_ch   <= c;
      out_data <= z_c;
    end
  end

endmodule
