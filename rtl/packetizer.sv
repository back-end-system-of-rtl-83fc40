// packetizer: turns each subband block from the corner turn into one UDP
// payload of HDR_BYTES + PAYLOAD_BYTES = 64 + 8192 = 8256 bytes, as a 512-bit
// (64-byte) stream towards the 100G Ethernet core, which adds the
// Ethernet/IP/UDP headers.  `tdest` carries the subband number, which
// selects the destination server node.
//
// The first beat of every payload is the 64-byte header; the paper says it
// holds the timestamps (the RESET time and the frame counter) and the
// frequency information.  Its layout here is this design's own
// (little-endian, byte offsets):
//   0..7   frame counter of the first spectral frame in the packet
//   8..15  RESET time (as given by the control computer, e.g. Unix seconds)
//   16..17 first channel of the subband (subband * channels per subband)
//   18..19 channels per subband   20 frames per packet   21 board id
//   22     beams                  23 subband number       24..63 zero
// The header beat is followed by the 128 data beats unchanged.
//
// Flow control: valid/ready on both sides; the input is held (in_ready low)
// while the header beat is offered.  Each packet costs one extra beat, so a
// 4096-clock group of 8 packets uses 8 x 129 = 1032 beats.
module packetizer
  import fengine_pkg::*;
#(
  parameter int unsigned NSB  = 8,
  parameter int unsigned CPS  = 128,   // channels per subband
  parameter int unsigned FPP  = 4,
  parameter int unsigned NBM  = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [63:0]            reset_time,
  input  logic [7:0]             board_id,
  // from the corner turn
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [511:0]           in_data,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic [$clog2(NSB)-1:0] in_sb,
  input  logic [63:0]            in_frame,
  // to the 100G core
  output logic                   tvalid,
  input  logic                   tready,
  output logic [511:0]           tdata,
  output logic                   tlast,
  output logic [$clog2(NSB)-1:0] tdest,
  output logic                   sop     // header beat (start of packet)
);
  logic in_payload;

  logic [511:0] hdr;
  always_comb begin
    hdr          = '0;
    hdr[63:0]    = in_frame;
    hdr[127:64]  = reset_time;
    hdr[143:128] = 16'(32'(in_sb) * CPS);
    hdr[159:144] = 16'(CPS);
    hdr[167:160] = 8'(FPP);
    hdr[175:168] = board_id;
    hdr[183:176] = 8'(NBM);
    hdr[191:184] = 8'(in_sb);
  end

  assign tvalid   = in_valid;
  assign tdata    = in_payload ? in_data : hdr;
  assign tlast    = in_payload && in_last;
  assign tdest    = in_sb;
  assign sop      = !in_payload;
  assign in_ready = in_payload && tready;

  always_ff @(posedge clk) begin
    if (rst) in_payload <= 1'b0;
    else if (tvalid && tready) begin
      if (!in_payload)  in_payload <= 1'b1;
      else if (in_last) in_payload <= 1'b0;
    end
  end

  // A packet must start at the first beat of a subband block.
  a_first: assert property (@(posedge clk) disable iff (rst) in_valid && !in_payload |-> in_first);

endmodule
