// tb_delay_line: self-checking testbench of the whole-sample delay.
//
// Feeds random samples with random gaps in the valid strobe and random delay
// values (including 0 and the maximum DEPTH-1, and single-step changes as
// delay tracking makes them); every output is compared with the sample
// applied 'delay' valid samples earlier, kept here in a history array.
module tb_delay_line;
  import rx_pkg::*;

  localparam int DEPTH = DLY_DEPTH;

  logic clk = 0, rst_n = 0;
  logic [7:0] delay = '0;
  logic in_valid = 0;
  logic signed [15:0] in_data = '0;
  logic out_valid;
  logic signed [15:0] out_data;

  delay_line dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int nsamp = 0;
  logic signed [15:0] hist [$];
  logic exp_valid = 0, exp_known = 0;
  logic signed [15:0] expv;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic v, input int d);
    logic signed [15:0] x;
    @(negedge clk);
    checks++;
    if (out_valid !== exp_valid) begin
      failures++; $display("valid mismatch");
    end else if (exp_valid && exp_known && out_data !== expv) begin
      failures++; $display("data mismatch: got %0d exp %0d (delay %0d)", out_data, expv, delay);
    end
    x = 16'($urandom);
    in_valid = v; in_data = x; delay = 8'(d);
    exp_valid = v;
    if (v) begin
      hist.push_front(x);
      exp_known = (d < hist.size());
      if (exp_known) expv = hist[d];
      if (hist.size() > DEPTH + 2) void'(hist.pop_back());
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) step(1, 0);
    for (int n = 0; n < 600; n++) step(1, DEPTH-1);
    for (int n = 0; n < 600; n++) step(1, 37);
    // tracking: one-sample steps up and down
    for (int d = 37; d < 60; d++) for (int r = 0; r < 5; r++) step(1, d);
    for (int d = 60; d > 20; d--) for (int r = 0; r < 3; r++) step(1, d);
    // random delays, random gaps
    for (int n = 0; n < 5000; n++) step($urandom_range(0, 4) != 0, (n % 50 < 25) ? 113 : $urandom_range(0, DEPTH-1));
    step(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
