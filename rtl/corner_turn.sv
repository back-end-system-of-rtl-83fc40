// corner_turn: reorders the requantised beam data from "all channels of one
// spectral frame" to "one subband of several frames", the order in which it
// is packetised.
//
// Spectra arrive one channel per clock (NBM beams x 8 bits) in any channel
// order, tagged with their channel number.  They are written into one half
// of a double buffer, FPP frames deep.  When FPP frames are complete the half
// is handed to the read side, which sends NSB subbands of NCH/NSB channels;
// for each subband it sends FPP frames, each frame as its channels in
// increasing order, four channels (4 x 16 beams = 64 bytes) per beat.  One
// subband is therefore exactly one 8192-byte packet payload, and consecutive
// bytes within a channel are beams 0..15.  This order (frame, channel, beam)
// is this design's choice; the paper specifies the sizes (8 subbands of 128
// channels, 4 frames per packet) and that a corner turn is done.
//
// Flow control: the read side is a valid/ready stream.  Reading a half takes
// NSB*FPP*NCH/NSB/4 = 1024 beats against 4096 clocks for writing one, so
// with a 100G link that accepts most beats nothing is lost.  If the read side
// is still busy when the write side completes a half, that half is dropped
// (its FPP frames are not sent), `overflow` pulses and the write side reuses
// the same half.  out_frame is the number of the first frame of the group,
// counted from the last clear; it advances by FPP for every group, sent or
// dropped.  `clr` (board halted by the synchronisation logic) restarts the
// write side and the frame numbering; a group already being read is finished.
module corner_turn
  import fengine_pkg::*;
#(
  parameter int unsigned NCH = 1024,
  parameter int unsigned NBM = 16,
  parameter int unsigned NSB = 8,
  parameter int unsigned FPP = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       clr,
  input  logic                       in_valid,
  input  logic [$clog2(NCH)-1:0]     in_ch,
  input  logic [NBM*8-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [4*NBM*8-1:0]         out_data,
  output logic                       out_first,
  output logic                       out_last,
  output logic [$clog2(NSB)-1:0]     out_sb,
  output logic [63:0]                out_frame,
  output logic                       overflow
);
  localparam int unsigned CB  = $clog2(NCH);
  localparam int unsigned NG  = NCH / 4;          // 4-channel groups per frame
  localparam int unsigned GB  = $clog2(NG);
  localparam int unsigned GPS = NG / NSB;         // groups per subband
  localparam int unsigned SB  = $clog2(NSB);
  localparam int unsigned FB  = (FPP > 1) ? $clog2(FPP) : 1;
  localparam int unsigned GSB = (GPS > 1) ? $clog2(GPS) : 1;

  logic [NBM*8-1:0] mem [2][4][FPP][NG];

  // ---------------- write side ----------------
  logic          wbank;
  logic [CB-1:0] wcnt;
  logic [FB-1:0] wframe;
  logic [63:0]   wbase;        // number of the first frame in the half being written
  logic          handover;
  logic          rbusy;

  assign handover = in_valid && wcnt == CB'(NCH - 1) && wframe == FB'(FPP - 1);

  always_ff @(posedge clk) begin
    if (in_valid)
      mem[wbank][in_ch[1:0]][wframe][in_ch[CB-1:2]] <= in_data;
  end

  // ---------------- read side ----------------
  logic           rbank;
  logic [SB-1:0]  rsb;
  logic [FB-1:0]  rf;
  logic [GSB-1:0] rg;
  logic [63:0]    rbase;
  logic           rlast;

  assign rlast = rsb == SB'(NSB - 1) && rf == FB'(FPP - 1) && rg == GSB'(GPS - 1);

  // `clr` restarts the write side only: a group already handed to the read
  // side is still sent in full, so no packet is ever cut short.
  always_ff @(posedge clk) begin
    if (rst) begin
      wbank    <= 1'b0;
      rbusy    <= 1'b0;
      rbank    <= 1'b0;
      rsb      <= '0;
      rf       <= '0;
      rg       <= '0;
      rbase    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= 1'b0;
      // read progress
      if (rbusy && out_ready) begin
        if (rg == GSB'(GPS - 1)) begin
          rg <= '0;
          if (rf == FB'(FPP - 1)) begin
            rf  <= '0;
            rsb <= rsb + 1'b1;
          end else rf <= rf + 1'b1;
        end else rg <= rg + 1'b1;
        if (rlast) rbusy <= 1'b0;
      end
      // hand a completed half to the read side, or drop it
      if (handover && !clr) begin
        if (!rbusy || (out_ready && rlast)) begin
          rbusy <= 1'b1;
          rbank <= wbank;
          rbase <= wbase;
          rsb   <= '0;
          rf    <= '0;
          rg    <= '0;
          wbank <= ~wbank;
        end else begin
          overflow <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      wcnt   <= '0;
      wframe <= '0;
      wbase  <= '0;
    end else if (in_valid) begin
      wcnt <= wcnt + 1'b1;
      if (wcnt == CB'(NCH - 1))
        wframe <= (wframe == FB'(FPP - 1)) ? '0 : wframe + 1'b1;
      if (handover) wbase <= wbase + 64'(FPP);
    end
  end

  logic [GB-1:0] raddr;
  if (GPS > 1) begin : g_addr
    assign raddr = GB'({rsb, rg});
  end else begin : g_addr1
    assign raddr = GB'(rsb);
  end

  always_comb begin
    for (int l = 0; l < 4; l++)
      out_data[l*NBM*8 +: NBM*8] = mem[rbank][l][rf][raddr];
  end

  assign out_valid = rbusy;
  assign out_first = rf == '0 && rg == '0;
  assign out_last  = rf == FB'(FPP - 1) && rg == GSB'(GPS - 1);
  assign out_sb    = rsb;
  assign out_frame = rbase;

  // The stream must hold its beat while it is not accepted.
  a_hold: assert property (@(posedge clk) disable iff (rst)
                           out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_sb));

endmodule
