// tb_fir_bpf: self-checking testbench of the band-pass / fractional-delay FIR.
//
// Loads a random coefficient set through the shadow bank, commits it, and
// compares every output with a convolution computed here from the applied
// samples. A second set is then written while the filter runs (outputs must
// still follow the first set) and committed (outputs must follow the second
// from the next sample on). Also checks the one-clock latency, a pure
// fractional-delay style impulse response and saturation.
module tb_fir_bpf;
  import rx_pkg::*;

  localparam int TAPS = BPF_TAPS;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [11:0] in_data = '0;
  logic out_valid;
  logic signed [15:0] out_data;
  logic coef_we = 0, coef_commit = 0;
  logic [6:0] coef_addr = '0;
  logic signed [15:0] coef_data = '0;

  fir_bpf dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cycles = 0;
  longint ref_shadow [TAPS], ref_active [TAPS];
  longint hist [TAPS];
  longint expv;
  logic   exp_valid = 0;

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

  // one clock: check what the last edge produced, then apply new inputs
  task automatic step(input logic v, input logic signed [11:0] x,
                      input logic we = 0, input int addr = 0, input longint c = 0,
                      input logic commit = 0);
    @(negedge clk);
    cycles++;
    checks++;
    if (out_valid !== exp_valid) begin
      failures++;
      $display("valid mismatch at cycle %0d", cycles);
    end else if (exp_valid && out_data != expv[15:0]) begin
      failures++;
      $display("data mismatch at cycle %0d: got %0d expected %0d", cycles, out_data, expv);
    end
    in_valid = v; in_data = x;
    coef_we = we; coef_addr = 7'(addr); coef_data = 16'(c); coef_commit = commit;
    exp_valid = v;
    if (v) begin
      longint acc = 0;
      for (int k = TAPS-1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = x;
      for (int k = 0; k < TAPS; k++) acc += hist[k] * ref_active[k];
      expv = sat16(acc >>> 15);
    end
    if (commit) for (int k = 0; k < TAPS; k++) ref_active[k] = ref_shadow[k];
    if (we) ref_shadow[addr] = c;
  endtask

  initial begin
    for (int k = 0; k < TAPS; k++) begin ref_shadow[k] = 0; ref_active[k] = 0; hist[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1: random coefficient set A
    for (int k = 0; k < TAPS; k++) step(0, 0, 1, k, longint'($signed(16'($urandom_range(0, 65535)))) >>> 3);
    step(0, 0, 0, 0, 0, 1);
    for (int n = 0; n < 300; n++) step(1, 12'($urandom));
    // 2: write set B while running; set A stays active
    for (int k = 0; k < TAPS; k++) step(1, 12'($urandom), 1, k, longint'($signed(16'($urandom))));
    for (int n = 0; n < 100; n++) step(($urandom_range(0, 3) != 0), 12'($urandom));
    step(1, 12'($urandom), 0, 0, 0, 1);          // commit B
    for (int n = 0; n < 300; n++) step(1, 12'($urandom));
    // 3: impulse response = the coefficients (unit tap at 5 gives a 5-sample delay)
    for (int k = 0; k < TAPS; k++) step(0, 0, 1, k, (k == 5) ? 32767 : 0);
    step(0, 0, 0, 0, 0, 1);
    for (int n = 0; n < TAPS; n++) step(1, 0);
    step(1, 12'sd1000);
    for (int n = 0; n < 10; n++) step(1, 0);
    // 4: saturation with all taps at maximum
    for (int k = 0; k < TAPS; k++) step(0, 0, 1, k, 32767);
    step(0, 0, 0, 0, 0, 1);
    for (int n = 0; n < 80; n++) step(1, 12'sd2047);
    step(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
