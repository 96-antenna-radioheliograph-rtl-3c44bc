// tb_iq_mixer: self-checking testbench of the I/Q mixer.
//
// Drives random samples and random cos/sin values (including the extreme
// -32768 that makes the Q product saturate) and compares I = x*cos >> 15 and
// Q = -x*sin >> 15, saturated to 16 bits, computed here with integers.
module tb_iq_mixer;
  import rx_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [15:0] in_data = '0, cos_in = '0, sin_in = '0;
  logic out_valid;
  logic signed [15:0] out_i, out_q;

  iq_mixer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic exp_v = 0;
  longint ei, eq;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic step(input logic v, input longint x, input longint c, input longint s);
    @(negedge clk);
    checks++;
    if (out_valid !== exp_v) begin
      failures++; $display("valid mismatch");
    end else if (exp_v && (out_i != 16'(ei) || out_q != 16'(eq))) begin
      failures++;
      if (failures < 10) $display("mismatch: got %0d,%0d exp %0d,%0d", out_i, out_q, ei, eq);
    end
    in_valid = v; in_data = 16'(x); cos_in = 16'(c); sin_in = 16'(s);
    exp_v = v;
    if (v) begin
      ei = sat16((x * c) >>> 15);
      eq = sat16((-(x * s)) >>> 15);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    step(1, -32768, 32767, -32768);     // Q = +32768 saturates
    step(1, -32768, -32768, 32767);     // I = +32768 saturates
    step(1, 1000, 32000, 0);
    for (int n = 0; n < 5000; n++)
      step($urandom_range(0, 5) != 0, longint'($signed(16'($urandom))),
           longint'($signed(16'($urandom))), longint'($signed(16'($urandom))));
    step(0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
