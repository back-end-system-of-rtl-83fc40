// sync_ctrl_tb: walks the synchronisation state machine through its
// sequence with a 1PPS pulse that is several clocks wide and asynchronous to
// the clock: PPS alone does nothing in IDLE; RESET -> RESET_REQ (reset time
// latched) -> ARMED on the next PPS edge (halted) -> TRIGGERED on the one
// after (running, frame counter from zero, +1 every 1024 clocks); a RESET
// while running keeps the board running until the next PPS, which halts it
// and clears the frame counter.  Each PPS must act within 3 clocks of its
// rising edge and only once per pulse.
module sync_ctrl_tb;
  import fengine_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic pps = 1'b0, reset_cmd = 1'b0, run, dp_clr, pps_edge;
  logic [63:0] reset_time_in = '0, reset_time, frame_count;
  sync_state_t state;

  sync_ctrl dut (.*);

  int checks = 0, failures = 0, n_edges = 0;
  always @(posedge clk) if (pps_edge) n_edges++;

  task automatic expect_state(input sync_state_t s, input logic r, input string m);
    checks++;
    if (state != s || run != r || dp_clr != !r) begin
      failures++;
      $display("FAIL %s: state %s run %0b", m, state.name(), run);
    end
  endtask

  task automatic pulse_pps();
    #3 pps = 1'b1;
    repeat (23) @(posedge clk);
    #2 pps = 1'b0;
    repeat (5) @(posedge clk);
  endtask

  task automatic command(input logic [63:0] t);
    @(posedge clk);
    reset_cmd <= 1'b1; reset_time_in <= t;
    @(posedge clk);
    reset_cmd <= 1'b0;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [63:0] fc;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk); #1;
    expect_state(ST_IDLE, 1'b0, "after reset");
    pulse_pps();
    expect_state(ST_IDLE, 1'b0, "pps without command");
    command(64'd1700000000);
    expect_state(ST_RESET_REQ, 1'b0, "reset command from idle");
    checks++;
    if (reset_time != 64'd1700000000) begin failures++; $display("FAIL reset time"); end
    #3 pps = 1'b1;
    repeat (3) @(posedge clk); #1;
    expect_state(ST_ARMED, 1'b0, "first pps after reset");
    repeat (20) @(posedge clk);
    expect_state(ST_ARMED, 1'b0, "wide pps acts once");
    #2 pps = 1'b0;
    repeat (50) @(posedge clk);
    pulse_pps();
    expect_state(ST_TRIGGERED, 1'b1, "second pps");
    fc = frame_count;
    repeat (4 * 1024) @(posedge clk); #1;
    checks++;
    if (frame_count != fc + 4) begin failures++; $display("FAIL frame count %0d -> %0d", fc, frame_count); end
    command(64'd1700000100);
    expect_state(ST_RESET_REQ, 1'b1, "reset while running keeps running");
    pulse_pps();
    expect_state(ST_ARMED, 1'b0, "halted on pps");
    checks++;
    if (frame_count != 0) begin failures++; $display("FAIL frame count not cleared"); end
    pulse_pps();
    expect_state(ST_TRIGGERED, 1'b1, "retriggered");
    checks++;
    if (n_edges != 5) begin failures++; $display("FAIL %0d pps edges", n_edges); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
