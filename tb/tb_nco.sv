// tb_nco: self-checking testbench of the CORDIC numerically controlled
// oscillator.
//
// Runs the NCO at several frequency words and phase offsets, with gaps in
// the enable, and compares every cos/sin output with cos/sin of the phase
// the tb accumulates itself (real arithmetic), allowing 4 LSB of CORDIC
// error. The pipeline latency, ITER + 3 enables, is checked by that
// alignment: a wrong latency gives errors far above the tolerance.
module tb_nco;
  import rx_pkg::*;

  localparam int ITER = 16;
  localparam int LAT  = ITER + 3;
  localparam real AMP = 32000.0;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 0, rst_n = 0;
  logic en = 0;
  logic [31:0] freq_word = '0, phase_off = '0;
  logic signed [15:0] cos_out, sin_out;

  nco dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int max_err = 0;
  longint unsigned acc = 0;
  longint unsigned phq [$];    // phase of each enable, in order

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic e);
    @(negedge clk);
    en = e;
    if (e) begin
      // phase presented to the CORDIC for this enable: accumulator before
      // the enable plus the offset
      phq.push_back((acc + phase_off) & 64'hFFFF_FFFF);
      acc = (acc + freq_word) & 64'hFFFF_FFFF;
    end
  endtask

  // after each enabled edge, the output belongs to the enable LAT-1 earlier
  always @(posedge clk) if (rst_n && en && phq.size() >= LAT) begin
    real ph, ec, es;
    int dc, ds;
    ph = real'(phq[0]) / 4294967296.0 * TWO_PI;
    void'(phq.pop_front());
    #1;
    ec = AMP * $cos(ph);
    es = AMP * $sin(ph);
    dc = int'(real'(cos_out) - ec);
    ds = int'(real'(sin_out) - es);
    if (dc < 0) dc = -dc;
    if (ds < 0) ds = -ds;
    if (dc > max_err) max_err = dc;
    if (ds > max_err) max_err = ds;
    checks++;
    if (dc > 4 || ds > 4) begin
      failures++;
      if (failures < 10) $display("mismatch ph=%f cos %0d/%f sin %0d/%f", ph, cos_out, ec, sin_out, es);
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    freq_word = 32'd687194767;          // 16 MHz at 100 MHz
    repeat (2000) step(1);
    step(0);
    freq_word = 32'd123456789; phase_off = 32'h4000_0000;
    repeat (2000) step($urandom_range(0, 3) != 0);
    step(0);
    freq_word = 32'hF000_0000;          // negative frequency
    phase_off = 32'h9000_0001;
    repeat (2000) step(1);
    for (int n = 0; n < 20; n++) begin
      step(0);
      freq_word = $urandom; phase_off = $urandom;
      repeat (200) step($urandom_range(0, 1));
    end
    step(0);
    $display("largest error %0d LSB", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
