// sync_ctrl: starts the board's processing on a 1PPS edge so that all boards
// of a station produce spectral frames in step.
//
// Sequence (from the paper): a RESET command halts processing at the next
// 1PPS edge and the board is ARMED; at the following 1PPS edge it is
// TRIGGERED and processing starts, with the frame counter at zero.  Here a
// RESET command moves IDLE or TRIGGERED to RESET_REQ; the next PPS edge goes to
// ARMED, the one after that to TRIGGERED.  Processing runs only in TRIGGERED
// (and, for a board that was running, in RESET_REQ); `dp_clr` holds the
// datapath in its cleared state otherwise.  The board comes out of reset in
// IDLE, i.e. halted until the first RESET command (this design's choice).
//
// `pps` is asynchronous; it is passed through two flip-flops and its rising
// edge is used.  `reset_time` (e.g. the Unix second of the trigger, supplied
// by the control computer with the command) is latched with the command and
// goes into every packet header.  `frame_count` counts spectral frames of
// FRAME_CLKS clocks entering the channeliser since the trigger.
module sync_ctrl
  import fengine_pkg::*;
#(
  parameter int unsigned FRAME_CLKS = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        pps,            // asynchronous 1PPS
  input  logic        reset_cmd,      // one-clock RESET command
  input  logic [63:0] reset_time_in,
  output sync_state_t state,
  output logic        run,            // datapath processing enabled
  output logic        dp_clr,         // datapath held cleared
  output logic [63:0] reset_time,
  output logic [63:0] frame_count,
  output logic        pps_edge
);
  logic [2:0] pps_sr;
  logic [$clog2(FRAME_CLKS)-1:0] fclk;
  logic was_running;   // RESET_REQ was entered from TRIGGERED

  always_ff @(posedge clk) begin
    if (rst) pps_sr <= '0;
    else     pps_sr <= {pps_sr[1:0], pps};
  end
  assign pps_edge = pps_sr[1] && !pps_sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= ST_IDLE;
      reset_time  <= '0;
      frame_count <= '0;
      fclk        <= '0;
      was_running <= 1'b0;
    end else begin
      if (reset_cmd && (state == ST_IDLE || state == ST_TRIGGERED)) begin
        state       <= ST_RESET_REQ;
        reset_time  <= reset_time_in;
        was_running <= state == ST_TRIGGERED;
      end else if (pps_edge) begin
        case (state)
          ST_RESET_REQ: state <= ST_ARMED;
          ST_ARMED:     state <= ST_TRIGGERED;
          default:      ;
        endcase
      end
      if (state == ST_ARMED) begin
        frame_count <= '0;
        fclk        <= '0;
      end else if (run) begin
        fclk <= fclk + 1'b1;
        if (fclk == ($bits(fclk))'(FRAME_CLKS - 1)) frame_count <= frame_count + 1'b1;
      end
    end
  end

  assign run    = state == ST_TRIGGERED || (state == ST_RESET_REQ && was_running);
  assign dp_clr = !run;

endmodule
