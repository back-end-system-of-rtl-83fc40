// pfb_fir: FIR front end of the polyphase filter bank for one antenna.
//
// The antenna stream arrives SPC samples per clock (x[SPC*m + r] on lane r).
// The filter bank feeds a POINTS-point FFT, so every tap is one whole frame
// (POINTS samples) apart.  Because POINTS is a multiple of SPC, each lane is an
// independent TAPS-tap FIR whose delay elements are LANE_PTS = POINTS/SPC
// samples long; they are held in circular memories addressed by the position
// within the frame.  For lane r at frame position a, with x_t the sample t
// frames old:
//
//     y = sat( (sum_t h[(TAPS-1-t)*POINTS + SPC*a + r] * x_t) >>> (COEF_W-1-(OUT_W-IN_W)), OUT_W )
//
// so a full-scale IN_W-bit input lands in the top of the OUT_W-bit word.  The
// prototype filter h is a sinc of one channel width under a Hamming window,
// TAPS*POINTS long, computed at elaboration and quantised to COEF_W bits
// (Q1.17, truncated toward zero).  After `clr` the history is treated as
// zero until TAPS-1 frames have been seen, so no memory needs clearing.
//
// The paper names the PFB and its place ahead of the FFT (from the CASPER
// library); the number of taps, the window and the scaling are this design's
// own choices.
//
// Interface: in_valid qualifies one group of SPC samples; out_valid follows
// one clock later with the SPC filtered samples.  Throughput: SPC samples
// per clock, no stalls.
module pfb_fir #(
  parameter int unsigned TAPS   = 4,
  parameter int unsigned POINTS = 4096,
  parameter int unsigned SPC    = 4,
  parameter int unsigned IN_W   = 14,
  parameter int unsigned OUT_W  = 18,
  parameter int unsigned COEF_W = 18
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           clr,       // restart frame alignment
  input  logic                           in_valid,
  input  logic signed [SPC-1:0][IN_W-1:0]  in_data,
  output logic                           out_valid,
  output logic signed [SPC-1:0][OUT_W-1:0] out_data
);
  localparam int unsigned LANE_PTS = POINTS / SPC;
  localparam int unsigned AW       = $clog2(LANE_PTS);
  localparam int unsigned SHIFT    = COEF_W - 1 - (OUT_W - IN_W);
  localparam int unsigned HW       = (TAPS > 1) ? TAPS - 1 : 1;
  localparam int unsigned ACC_W    = IN_W + COEF_W + $clog2(TAPS) + 1;

  // Prototype filter, one table per lane: coef[r][k][a] = h[k*POINTS + SPC*a + r].
  logic signed [COEF_W-1:0] coef [SPC][TAPS][LANE_PTS];
  initial begin
    real pi, L, u, s, w;
    int unsigned i;
    pi = 3.14159265358979323846;
    L  = real'(TAPS * POINTS);
    for (int k = 0; k < int'(TAPS); k++)
      for (int a = 0; a < int'(LANE_PTS); a++)
        for (int r = 0; r < int'(SPC); r++) begin
          i = k * POINTS + SPC * a + r;
          u = (real'(i) - L / 2.0 + 0.5) / real'(POINTS);
          s = $sin(pi * u) / (pi * u);
          w = 0.54 - 0.46 * $cos(2.0 * pi * real'(i) / (L - 1.0));
          coef[r][k][a] = COEF_W'($rtoi(s * w * real'((1 << (COEF_W - 1)) - 1)));
        end
  end

  // History of earlier frames: hist[r][t-1][a] holds the sample t frames old.
  logic signed [IN_W-1:0] hist [SPC][HW][LANE_PTS];

  logic [AW-1:0] addr;
  logic [$clog2(TAPS+1)-1:0] frames_seen; // saturates at TAPS-1

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      addr        <= '0;
      frames_seen <= '0;
    end else if (in_valid) begin
      addr <= addr + 1'b1;
      if (addr == AW'(LANE_PTS - 1) && frames_seen < ($bits(frames_seen))'(TAPS - 1))
        frames_seen <= frames_seen + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !clr && TAPS > 1) begin
      for (int r = 0; r < int'(SPC); r++) begin
        hist[r][0][addr] <= $signed(in_data[r]);
        for (int t = 1; t < int'(HW); t++)
          hist[r][t][addr] <= hist[r][t-1][addr];
      end
    end
  end

  // Multiply-accumulate over the taps, one lane at a time.
  logic signed [SPC-1:0][OUT_W-1:0] y_c;
  always_comb begin
    for (int r = 0; r < int'(SPC); r++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'($signed(in_data[r])) * ACC_W'(coef[r][TAPS-1][addr]);
      for (int t = 1; t < int'(TAPS); t++)
        if (t <= int'(frames_seen))
          acc += ACC_W'(hist[r][t-1][addr]) * ACC_W'(coef[r][TAPS-1-t][addr]);
      y_c[r] = OUT_W'(fengine_pkg::sat(64'(acc >>> SHIFT), OUT_W));
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr) out_valid <= 1'b0;
    else            out_valid <= in_valid;
    if (in_valid) out_data <= y_c;
  end

endmodule
