// fft_sdf_stage: one radix-2 single-delay-feedback (SDF) decimation-in-frequency
// stage of a streaming N-point complex FFT, one sample per clock.
//
// Stage STAGE works on blocks of 2D samples, D = N >> (STAGE+1).  During the
// first D samples of a block the inputs are parked in a D-deep circular
// memory while the memory's previous contents (the differences of the last
// block) leave, multiplied by the twiddle W_N^(j*2^STAGE), j = 0..D-1.  During
// the second D samples the parked value a and the new value b give a+b, which
// leaves at once, and a-b, which is parked.  With `shift` set the butterfly
// outputs are halved (floor); every result is saturated to DW bits and `ovf`
// pulses when saturation happened.  Twiddles are Q2.16 (1.0 = 65536),
// products are truncated toward minus infinity.
//
// Interface: in_valid/in_data, one sample per valid; out_valid follows one
// clock after an input valid once the stage holds a full block.  The first
// valid output of a stage is the first sum of its first block.  The stage and
// its scaling scheme are this design's; the paper only specifies an 18-bit
// FFT from the CASPER library.
module fft_sdf_stage
  import fengine_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned STAGE = 0,
  parameter int unsigned TWW   = 18
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  clr,
  input  logic  shift,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data,
  output logic  ovf
);
  localparam int unsigned D   = N >> (STAGE + 1);
  localparam int unsigned DB  = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned TWF = TWW - 2;   // fraction bits of the twiddles

  // Twiddles W_N^(j*2^STAGE) = exp(-i*2*pi*j/(2D)).
  logic signed [TWW-1:0] tw_re [D];
  logic signed [TWW-1:0] tw_im [D];
  initial begin
    real pi;
    pi = 3.14159265358979323846;
    for (int j = 0; j < int'(D); j++) begin
      tw_re[j] = TWW'($rtoi($floor( $cos(2.0 * pi * real'(j) / real'(2 * D)) * real'(1 << TWF) + 0.5)));
      tw_im[j] = TWW'($rtoi($floor(-$sin(2.0 * pi * real'(j) / real'(2 * D)) * real'(1 << TWF) + 0.5)));
    end
  end

  cplx_t         mem [D];
  localparam int unsigned CW = $clog2(2 * D);
  logic [CW-1:0] cnt;          // position within the 2D block
  logic          primed;
  logic          phase;
  logic [DB-1:0] j;
  assign phase = cnt[CW-1];
  if (D > 1) begin : g_j
    assign j = cnt[CW-2:0];
  end else begin : g_j1
    assign j = '0;
  end

  cplx_t park;
  assign park = mem[j];

  // Butterfly and twiddle multiply.
  cplx_t out_c, park_c;
  logic  ovf_c;
  always_comb begin
    logic signed [DW+1:0]        s_re, s_im, d_re, d_im;
    logic signed [DW+TWW:0]      p_re, p_im;
    logic signed [63:0]          v;
    ovf_c  = 1'b0;
    out_c  = park;
    park_c = in_data;
    s_re = (DW+2)'(park.re) + (DW+2)'(in_data.re);
    s_im = (DW+2)'(park.im) + (DW+2)'(in_data.im);
    d_re = (DW+2)'(park.re) - (DW+2)'(in_data.re);
    d_im = (DW+2)'(park.im) - (DW+2)'(in_data.im);
    if (shift) begin
      s_re = s_re >>> 1; s_im = s_im >>> 1;
      d_re = d_re >>> 1; d_im = d_im >>> 1;
    end
    p_re = (DW+TWW+1)'(park.re) * (DW+TWW+1)'(tw_re[j]) - (DW+TWW+1)'(park.im) * (DW+TWW+1)'(tw_im[j]);
    p_im = (DW+TWW+1)'(park.re) * (DW+TWW+1)'(tw_im[j]) + (DW+TWW+1)'(park.im) * (DW+TWW+1)'(tw_re[j]);
    p_re = p_re >>> TWF;
    p_im = p_im >>> TWF;
    if (phase) begin
      v = sat(64'(s_re), DW); ovf_c |= (v != 64'(s_re)); out_c.re  = DW'(v);
      v = sat(64'(s_im), DW); ovf_c |= (v != 64'(s_im)); out_c.im  = DW'(v);
      v = sat(64'(d_re), DW); ovf_c |= (v != 64'(d_re)); park_c.re = DW'(v);
      v = sat(64'(d_im), DW); ovf_c |= (v != 64'(d_im)); park_c.im = DW'(v);
    end else begin
      v = sat(64'(p_re), DW); ovf_c |= (v != 64'(p_re)); out_c.re  = DW'(v);
      v = sat(64'(p_im), DW); ovf_c |= (v != 64'(p_im)); out_c.im  = DW'(v);
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      cnt       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      ovf       <= 1'b0;
    end else begin
      out_valid <= in_valid && (phase || primed);
      ovf       <= in_valid && (phase || primed) && ovf_c;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (phase && j == DB'(D - 1)) primed <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem[j]   <= park_c;
      out_data <= out_c;
    end
  end

endmodule
