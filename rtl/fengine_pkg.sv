// fengine_pkg: constants and types shared by the F/B-engine blocks.
//
// One F/B-engine board digitises 16 antennas at 1.6 GS/s (four 14-bit samples
// per 400 MHz clock), channelises each with a 4-tap polyphase filter bank and a
// 4096-point real FFT, keeps the 1024 channels of the 400-800 MHz band, forms
// 16 beams with a per-channel 16x16 complex matrix, requantises each beam to
// 4+4 bits, and ships the result as 8256-byte UDP payloads (64-byte header and
// 4 frames x 128 channels x 16 beams of data), one payload per 128-channel
// subband.  The numbers below follow the paper's F-engine specification; the
// number of filter taps, the weight layout and the header layout are this
// design's own choices.
package fengine_pkg;

  // --- array and sampling ------------------------------------------------
  localparam int unsigned N_INPUTS        = 16;   // antennas per board
  localparam int unsigned N_BEAMS         = 16;   // X-beams per board
  localparam int unsigned ADC_BITS        = 14;   // ADC resolution
  localparam int unsigned SPC             = 4;    // samples per 400 MHz clock

  // --- channeliser -------------------------------------------------------
  localparam int unsigned FFT_POINTS      = 4096; // real FFT length: 2048 channels over 0-800 MHz
  localparam int unsigned LANE_POINTS     = FFT_POINTS / SPC; // 1024-point complex FFT per lane
  localparam int unsigned N_OUT_CH        = 1024; // channels kept (400-800 MHz)
  localparam int unsigned PFB_TAPS        = 4;    // assumed
  localparam int unsigned DW              = 18;   // FFT data width
  localparam int unsigned COEF_W          = 18;   // PFB coefficient width (Q1.17)
  localparam int unsigned TW_W            = 18;   // twiddle width (Q2.16)

  // --- beamformer and requantiser ---------------------------------------
  localparam int unsigned WW              = 8;    // weight width per real/imag part
  localparam int unsigned BW              = DW + WW + 1 + 4; // 16-term complex sum
  localparam int unsigned QW              = 4;    // requantised width per part

  // --- packets -----------------------------------------------------------
  localparam int unsigned N_SUBBANDS      = 8;    // one per server node
  localparam int unsigned CH_PER_SUBBAND  = N_OUT_CH / N_SUBBANDS; // 128
  localparam int unsigned FRAMES_PER_PKT  = 4;
  localparam int unsigned BUS_BYTES       = 64;   // 512-bit stream to the 100G core
  localparam int unsigned HDR_BYTES       = 64;
  localparam int unsigned PAYLOAD_BYTES   = FRAMES_PER_PKT * CH_PER_SUBBAND * N_BEAMS; // 8192

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  // Synchronisation states (Sec. "Synchronization" of the design notes).
  typedef enum logic [1:0] {
    ST_IDLE      = 2'd0,  // after power-up: halted, waiting for a RESET command
    ST_RESET_REQ = 2'd1,  // RESET received, waiting for the next 1PPS
    ST_ARMED     = 2'd2,  // halted, waiting for the following 1PPS
    ST_TRIGGERED = 2'd3   // processing
  } sync_state_t;

  // Saturate a wide signed value to W bits (W <= 62).
  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] mx, mn;
    mx = (64'sd1 <<< (w - 1)) - 64'sd1;
    mn = -(64'sd1 <<< (w - 1));
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic logic [15:0] bitrev(input logic [15:0] v, input int unsigned bits);
    logic [15:0] r;
    r = '0;
    for (int i = 0; i < 16; i++)
      if (i < int'(bits)) r[i] = v[int'(bits) - 1 - i];
    return r;
  endfunction

endpackage
