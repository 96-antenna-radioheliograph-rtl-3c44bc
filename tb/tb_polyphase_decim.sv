// tb_polyphase_decim: self-checking testbench of the decimating polyphase
// low-pass filter.
//
// The reference is the plain full-rate convolution y = sum_k h[k] x[i-k],
// evaluated here only at the inputs that complete an output (every M-th,
// starting with the M-th after reset), using the same coefficient table.
// Checks every output value, that exactly one output comes per M inputs and
// one clock after the completing input, with random gaps in the input.
// Also checks the DC gain of the shipped table (2^15) and its rejection of
// a tone at 20 MHz (at a 100 MHz input rate), which would alias into the
// 25 MHz output band.
module tb_polyphase_decim;
  import rx_pkg::*;

  localparam int M = DECIM;
  localparam int N = LPF_TAPS;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [15:0] in_data = '0;
  logic out_valid;
  logic signed [31:0] out_data;

  polyphase_decim dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [15:0] h [N];
  longint x [$];
  int nin = 0;
  logic exp_v = 0;
  longint expv;
  longint last_out;
  real pk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic v, input longint xin);
    @(negedge clk);
    checks++;
    if (out_valid !== exp_v) begin
      failures++;
      if (failures < 10) $display("valid mismatch after input %0d", nin);
    end else if (exp_v && out_data != 32'(expv)) begin
      failures++;
      if (failures < 10) $display("data mismatch: got %0d exp %0d", out_data, expv);
    end
    if (out_valid) last_out = out_data;
    in_valid = v; in_data = 16'(xin);
    exp_v = 0;
    if (v) begin
      x.push_front(xin);
      if (x.size() > N) void'(x.pop_back());
      nin++;
      if (nin % M == 0) begin
        expv = 0;
        for (int k = 0; k < N && k < x.size(); k++) expv += longint'(h[k]) * x[k];
        exp_v = 1;
      end
    end
  endtask

  initial begin
    $readmemh("rtl/lpf_coefs.hex", h);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) step(1, longint'($signed(16'($urandom))));
    for (int n = 0; n < 4000; n++) step($urandom_range(0, 2) != 0, longint'($signed(16'($urandom))));
    // full-scale inputs: largest possible sums
    for (int n = 0; n < 200; n++) step(1, 32767);
    checks++;
    if (last_out < 32767 * 32700 || last_out > 32767 * 32800) begin
      failures++; $display("DC gain wrong: %0d", last_out);
    end
    for (int n = 0; n < 200; n++) step(1, -32768);
    // 20 MHz tone: must be rejected
    pk = 0;
    for (int n = 0; n < 800; n++) begin
      step(1, longint'($rtoi(20000.0 * $cos(6.283185307 * 0.2 * n))));
      if (n > 200 && out_valid && $itor(out_data) / 32768.0 > pk) pk = $itor(out_data) / 32768.0;
      if (n > 200 && out_valid && -$itor(out_data) / 32768.0 > pk) pk = -$itor(out_data) / 32768.0;
    end
    checks++;
    if (pk > 20000.0 * 0.03) begin
      failures++; $display("20 MHz tone not rejected: peak %f", pk);
    end
    $display("20 MHz tone of amplitude 20000: output peak %f", pk);
    step(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
