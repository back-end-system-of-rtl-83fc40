// fengine_top: one F/B-engine board of the array (16 antennas of one row).
//
// Data path, all at the 400 MHz board clock:
//   16 x ADC (4 x 14-bit samples per clock)
//     -> pfb_fir     4-tap polyphase FIR per antenna          (4 samples/clk)
//     -> fft_real4   4096-point real FFT per antenna, keeps channels
//                    1024..2047 (400-800 MHz), 1 channel/clk, 1 frame/1024 clk
//     -> beamformer  16x16 complex matrix per channel, 8-bit weights -> 16 beams
//     -> requant     16 x 4+4-bit requantiser
//     -> corner_turn regroup 4 frames into 8 subbands of 128 channels
//     -> packetizer  64-byte header + 8192-byte payload per subband, 512-bit stream
// sync_ctrl starts the whole path on a 1PPS edge after a RESET command; while
// the board is not running the path is held cleared and ADC samples are
// ignored.  Sustained rate: 16 bytes of beam data per clock = 51.2 Gb/s.
//
// The ADCs, the 100G Ethernet core and the control computer interface are
// outside this module: their signals are ports.  Weights are loaded through a
// simple write port, the FFT scaling schedule and requantiser shift are
// static inputs.  Status: the synchronisation state, the frame counter, and
// one-clock pulses for FFT saturation, requantiser clipping and corner-turn
// overflow (a dropped group of four frames).
module fengine_top
  import fengine_pkg::*;
#(
  parameter int unsigned NIN    = N_INPUTS,
  parameter int unsigned NBM    = N_BEAMS,
  parameter int unsigned POINTS = FFT_POINTS,
  parameter int unsigned TAPS   = PFB_TAPS,
  parameter int unsigned NSB    = N_SUBBANDS,
  parameter int unsigned FPP    = FRAMES_PER_PKT
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // timing and control
  input  logic                                  pps,
  input  logic                                  reset_cmd,
  input  logic [63:0]                           reset_time_in,
  input  logic [7:0]                            board_id,
  input  logic [$clog2(POINTS/SPC):0]           fft_shift,
  input  logic [4:0]                            rq_shift,
  input  logic                                  w_we,
  input  logic [$clog2(NBM)-1:0]                w_beam,
  input  logic [$clog2(NIN)-1:0]                w_ant,
  input  logic [$clog2(POINTS/SPC)-1:0]         w_ch,
  input  logic signed [WW-1:0]                  w_re,
  input  logic signed [WW-1:0]                  w_im,
  // ADC samples
  input  logic                                  adc_valid,
  input  logic [NIN-1:0][SPC-1:0][ADC_BITS-1:0] adc_data,
  // to the 100G Ethernet core
  output logic                                  tvalid,
  input  logic                                  tready,
  output logic [511:0]                          tdata,
  output logic                                  tlast,
  output logic [$clog2(NSB)-1:0]                tdest,
  output logic                                  sop,
  // status
  output sync_state_t                           sync_state,
  output logic [63:0]                           frame_count,
  output logic                                  fft_ovf,
  output logic                                  rq_clip,
  output logic                                  ct_overflow
);
  localparam int unsigned NCH = POINTS / SPC;   // channels kept per frame
  localparam int unsigned CB  = $clog2(NCH);

  // ---------------- synchronisation ----------------
  logic        run, dp_clr;
  logic [63:0] reset_time;

  sync_ctrl #(.FRAME_CLKS(NCH)) u_sync (
    .clk, .rst, .pps, .reset_cmd, .reset_time_in,
    .state(sync_state), .run, .dp_clr, 
    .reset_time, .frame_count, .pps_edge()
  );

  // ---------------- channelisers ----------------
  logic             pfb_v   [NIN];
  logic [SPC-1:0][DW-1:0] pfb_y [NIN];
  logic             fft_v   [NIN];
  logic [CB-1:0]    fft_ch  [NIN];
  cplx_t            fft_y   [NIN];
  logic [NIN-1:0]   fft_o;

  for (genvar a = 0; a < NIN; a++) begin : g_ant
    pfb_fir #(.TAPS(TAPS), .POINTS(POINTS), .SPC(SPC), .IN_W(ADC_BITS), .OUT_W(DW), .COEF_W(COEF_W)) u_pfb (
      .clk, .rst, .clr(dp_clr),
      .in_valid (adc_valid && run),
      .in_data  (adc_data[a]),
      .out_valid(pfb_v[a]),
      .out_data (pfb_y[a])
    );
    fft_real4 #(.POINTS(POINTS), .TWW(TW_W)) u_fft (
      .clk, .rst, .clr(dp_clr),
      .shift_sched(fft_shift),
      .in_valid (pfb_v[a]),
      .in_data  (pfb_y[a]),
      .out_valid(fft_v[a]),
      .out_ch   (fft_ch[a]),
      .out_data (fft_y[a]),
      .ovf      (fft_o[a])
    );
  end
  assign fft_ovf = |fft_o;

  // ---------------- beamformer ----------------
  logic                 bf_v;
  logic [CB-1:0]        bf_ch;
  logic signed [BW-1:0] bf_re [NBM];
  logic signed [BW-1:0] bf_im [NBM];

  beamformer #(.NIN(NIN), .NBM(NBM), .NCH(NCH)) u_bf (
    .clk, .rst,
    .w_we, .w_beam, .w_ant, .w_ch, .w_re, .w_im,
    .in_valid (fft_v[0]),
    .in_ch    (fft_ch[0]),
    .in_data  (fft_y),
    .out_valid(bf_v),
    .out_ch   (bf_ch),
    .out_re   (bf_re),
    .out_im   (bf_im)
  );

  // ---------------- requantisers ----------------
  logic [NBM-1:0]   rq_v, rq_c;
  logic [NBM*8-1:0] rq_data;
  logic [CB-1:0]    rq_ch;

  for (genvar b = 0; b < NBM; b++) begin : g_beam
    requant #(.IW(BW)) u_rq (
      .clk, .rst, .shift(rq_shift),
      .in_valid (bf_v),
      .in_re    (bf_re[b]),
      .in_im    (bf_im[b]),
      .out_valid(rq_v[b]),
      .out_byte (rq_data[b*8 +: 8]),
      .clip     (rq_c[b])
    );
  end
  always_ff @(posedge clk) if (bf_v) rq_ch <= bf_ch;
  assign rq_clip = |rq_c;

  // ---------------- corner turn and packetizer ----------------
  logic                   ct_v, ct_rdy, ct_first, ct_last;
  logic [511:0]           ct_data;
  logic [$clog2(NSB)-1:0] ct_sb;
  logic [63:0]            ct_frame;

  corner_turn #(.NCH(NCH), .NBM(NBM), .NSB(NSB), .FPP(FPP)) u_ct (
    .clk, .rst, .clr(dp_clr),
    .in_valid (&rq_v),      // all requantisers run in step
    .in_ch    (rq_ch),
    .in_data  (rq_data),
    .out_valid(ct_v),
    .out_ready(ct_rdy),
    .out_data (ct_data),
    .out_first(ct_first),
    .out_last (ct_last),
    .out_sb   (ct_sb),
    .out_frame(ct_frame),
    .overflow (ct_overflow)
  );

  packetizer #(.NSB(NSB), .CPS(NCH / NSB), .FPP(FPP), .NBM(NBM)) u_pkt (
    .clk, .rst, .reset_time, .board_id,
    .in_valid (ct_v),
    .in_ready (ct_rdy),
    .in_data  (ct_data),
    .in_first (ct_first),
    .in_last  (ct_last),
    .in_sb    (ct_sb),
    .in_frame (ct_frame),
    .tvalid, .tready, .tdata, .tlast, .tdest, .sop
  );

endmodule
