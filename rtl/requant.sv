// requant: requantises one beam voltage to 4-bit real + 4-bit imaginary.
//
// Each part is shifted right arithmetically by `shift` bits (truncation, as
// the paper says the beamformed voltage is "truncated" to 4+4 bits) and then
// saturated to the symmetric range -7..+7, so that the code -8 never occurs
// and the quantiser has no DC bias on clipping.  The byte sent on is
// {re[3:0], im[3:0]}, real part in the high nibble.  The shift amount, the
// symmetric clipping and the nibble order are this design's choices; the
// paper gives only the 4+4-bit output.
//
// Timing: registered, out_valid one clock after in_valid.  `clip` pulses when
// either part was clipped.
module requant
  import fengine_pkg::*;
#(
  parameter int unsigned IW = BW
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [4:0]           shift,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_re,
  input  logic signed [IW-1:0] in_im,
  output logic                 out_valid,
  output logic [7:0]           out_byte,
  output logic                 clip
);
  localparam int QMAX = (1 << (QW - 1)) - 1;   // 7

  function automatic logic [QW:0] q(input logic signed [IW-1:0] v, input logic [4:0] sh);
    logic signed [IW-1:0] s;
    logic                 c;
    s = v >>> sh;
    c = 1'b0;
    if (s > IW'(QMAX))  begin s = IW'(QMAX);  c = 1'b1; end
    if (s < -IW'(QMAX)) begin s = -IW'(QMAX); c = 1'b1; end
    return {c, s[QW-1:0]};
  endfunction

  logic [QW:0] qr, qi;
  assign qr = q(in_re, shift);
  assign qi = q(in_im, shift);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      clip      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      clip      <= in_valid && (qr[QW] || qi[QW]);
    end
    if (in_valid) out_byte <= {qr[QW-1:0], qi[QW-1:0]};
  end

endmodule
