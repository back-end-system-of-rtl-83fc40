// fft_r2sdf: streaming N-point complex FFT, one sample per clock, built from
// log2(N) radix-2 SDF decimation-in-frequency stages (fft_sdf_stage).
//
// Input in natural order, output in bit-reversed order: the t-th valid
// output of a frame is bin bitrev(t).  shift_sched[s] halves the outputs of
// stage s (all ones gives an overall 1/N scaling that cannot overflow).
// Latency is about N samples plus one clock per stage; a frame's last
// outputs leave while the next frame enters (the stream is continuous).
// ovf is the OR of the stages' saturation pulses.
module fft_r2sdf
  import fengine_pkg::*;
#(
  parameter int unsigned N   = 1024,
  parameter int unsigned TWW = 18
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   clr,
  input  logic [$clog2(N)-1:0]   shift_sched,
  input  logic                   in_valid,
  input  cplx_t                  in_data,
  output logic                   out_valid,
  output cplx_t                  out_data,
  output logic                   ovf
);
  localparam int unsigned L = $clog2(N);

  logic  v [L+1];
  cplx_t d [L+1];
  logic [L-1:0] o;

  assign v[0] = in_valid;
  assign d[0] = in_data;

  for (genvar s = 0; s < L; s++) begin : g_stage
    fft_sdf_stage #(.N(N), .STAGE(s), .TWW(TWW)) u_stage (
      .clk, .rst, .clr,
      .shift    (shift_sched[s]),
      .in_valid (v[s]),
      .in_data  (d[s]),
      .out_valid(v[s+1]),
      .out_data (d[s+1]),
      .ovf      (o[s])
    );
  end

  assign out_valid = v[L];
  assign out_data  = d[L];
  assign ovf       = |o;

endmodule
