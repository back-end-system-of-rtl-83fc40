// requant_tb: drives the requantiser with random 31-bit beam voltages and a
// sweep of shift amounts, including values far outside the 4-bit range, and
// checks each output byte against floor(v / 2^shift) clipped to -7..+7 (real
// part in the high nibble) and the clip flag, one clock after the input.
module requant_tb;
  import fengine_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [4:0] shift;
  logic in_valid, out_valid, clip;
  logic signed [BW-1:0] in_re, in_im;
  logic [7:0] out_byte;

  requant dut (.*);

  int checks = 0, failures = 0, nclip = 0;
  typedef struct { logic [7:0] b; bit c; longint t; } exp_t;
  exp_t exp_q [$];
  longint cyc = 0;

  // One register stage: stamped one clock before the sampling edge, the
  // result is seen two edges after the stamp.
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (out_byte != e.b || clip != e.c || cyc != e.t + 2) begin
          failures++;
          if (failures < 10) $display("FAIL: got %h clip %0b at %0d, expected %h clip %0b at %0d",
                                      out_byte, clip, cyc, e.b, e.c, e.t + 2);
        end
        if (e.c) nclip++;
      end
    end
    cyc++;
  end

  function automatic int qref(input longint v, input int sh, output bit c);
    longint s;
    s = v >>> sh;
    c = 0;
    if (s > 7)  begin s = 7;  c = 1; end
    if (s < -7) begin s = -7; c = 1; end
    return int'(s);
  endfunction

  initial begin
    longint vr, vi;
    int sh;
    in_valid = 1'b0; shift = '0; in_re = '0; in_im = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 20000; n++) begin
      sh = n % 24;
      vr = longint'($urandom_range(32'hFFFF)) - 32768;
      vi = longint'($urandom_range(32'hFFFF)) - 32768;
      vr = vr <<< (n % 12);
      vi = vi <<< ((n + 5) % 12);
      in_valid <= 1'b1;
      shift <= 5'(sh);
      in_re <= BW'(vr);
      in_im <= BW'(vi);
      begin
        bit cr, ci;
        int er, ei;
        er = qref(vr, sh, cr);
        ei = qref(vi, sh, ci);
        exp_q.push_back('{b: {4'(er), 4'(ei)}, c: cr || ci, t: cyc});
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (nclip == 0 || nclip == checks - 1) begin failures++; $display("FAIL: clipping not mixed"); end
    $display("requant_tb: %0d clipped", nclip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
