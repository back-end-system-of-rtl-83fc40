// beamformer: first-stage (X-direction) beamformer of one board.
//
// For every spectral channel the 16 antenna spectra V_k are multiplied by a
// 16x16 complex matrix F_mk to give 16 beam voltages B_m = sum_k F_mk V_k.
// The matrix is independent for every channel and fully programmable: it is
// the product of bandpass equalisation, delay compensation, beam steering
// and (optionally) an RFI-nulling matrix, all folded into one signed 8-bit
// complex weight per (beam, antenna, channel), as in the paper.  Weights sit
// in N_BEAMS*N_INPUTS memories of N_CH words (the paper's 256 1K-deep
// BRAMs), addressed by the channel number of the arriving spectra.
//
// Timing: one channel (all 16 antennas) per clock, no stalls; out_valid
// follows in_valid by two clocks (weight read, then multiply-accumulate).
// Products are full precision and the 16-term sum is kept at BW bits, so
// nothing is lost before the requantiser.  The weight write port is this
// design's choice (the paper loads the weights from the control computer
// without describing how); a write takes effect for spectra arriving two or
// more clocks later.
module beamformer
  import fengine_pkg::*;
#(
  parameter int unsigned NIN  = 16,
  parameter int unsigned NBM  = 16,
  parameter int unsigned NCH  = 1024
) (
  input  logic                         clk,
  input  logic                         rst,
  // weight write port
  input  logic                         w_we,
  input  logic [$clog2(NBM)-1:0]       w_beam,
  input  logic [$clog2(NIN)-1:0]       w_ant,
  input  logic [$clog2(NCH)-1:0]       w_ch,
  input  logic signed [WW-1:0]         w_re,
  input  logic signed [WW-1:0]         w_im,
  // antenna spectra, one channel per clock
  input  logic                         in_valid,
  input  logic [$clog2(NCH)-1:0]       in_ch,
  input  cplx_t                        in_data [NIN],
  // beam voltages
  output logic                         out_valid,
  output logic [$clog2(NCH)-1:0]       out_ch,
  output logic signed [BW-1:0]         out_re [NBM],
  output logic signed [BW-1:0]         out_im [NBM]
);
  typedef struct packed {
    logic signed [WW-1:0] re;
    logic signed [WW-1:0] im;
  } wt_t;

  wt_t wmem [NBM][NIN][NCH];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_beam][w_ant][w_ch] <= '{re: w_re, im: w_im};
  end

  // stage 1: read the weights of this channel, register the data
  wt_t                       wq [NBM][NIN];
  cplx_t                     xq [NIN];
  logic                      v1;
  logic [$clog2(NCH)-1:0]    ch1;
  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else     v1 <= in_valid;
    if (in_valid) begin
      ch1 <= in_ch;
      xq  <= in_data;
      for (int b = 0; b < int'(NBM); b++)
        for (int a = 0; a < int'(NIN); a++)
          wq[b][a] <= wmem[b][a][in_ch];
    end
  end

  // stage 2: complex multiply-accumulate
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v1;
    if (v1) begin
      out_ch <= ch1;
      for (int b = 0; b < int'(NBM); b++) begin
        logic signed [BW-1:0] sr, si;
        sr = '0;
        si = '0;
        for (int a = 0; a < int'(NIN); a++) begin
          sr += BW'(xq[a].re) * BW'(wq[b][a].re) - BW'(xq[a].im) * BW'(wq[b][a].im);
          si += BW'(xq[a].re) * BW'(wq[b][a].im) + BW'(xq[a].im) * BW'(wq[b][a].re);
        end
        out_re[b] <= sr;
        out_im[b] <= si;
      end
    end
  end

endmodule
