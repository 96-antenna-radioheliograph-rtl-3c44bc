// tb_workload_delay: delay tracking on the longest baseline in 0.1 ns steps.
//
// One antenna channel's delay path (fir_bpf followed by delay_line) at its
// default sizes is given the geometric delay of the 622.30 m East-West
// baseline, 2.0757 us = 207.57 samples at 100 MHz, as 207 whole samples in
// the delay line plus 0.57 sample in the band-pass coefficients. The delay
// is then stepped in 0.1 ns (0.01 sample) steps across a whole-sample
// boundary (the fraction wraps from 0.99 to 0.00 while the whole part goes
// up by one), the way a control processor tracks a moving source. For a
// 21.1 MHz tone the phase of the output must follow -2*pi*f*tau: every
// 0.1 ns step turns it by 0.760 degrees, and the absolute phase must match
// the programmed delay. Phases are measured by correlating 2000 outputs
// with a complex exponential.
module tb_workload_delay;
  import rx_pkg::*;

  localparam real PI  = 3.141592653589793;
  localparam real FT  = 0.211;                 // tone, cycles per sample
  localparam real TAU = 622.30 / 299792458.0 * 100.0e6;   // samples

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [11:0] in_data = '0;
  logic bpf_v, dly_v;
  logic signed [15:0] bpf_d, dly_d;
  logic coef_we = 0, coef_commit = 0;
  logic [6:0] coef_addr = '0;
  logic signed [15:0] coef_data = '0;
  logic [7:0] delay = '0;

  fir_bpf u_bpf (.clk, .rst_n, .in_valid, .in_data, .out_valid(bpf_v), .out_data(bpf_d),
                 .coef_we, .coef_addr, .coef_data, .coef_commit);
  delay_line u_dly (.clk, .rst_n, .delay, .in_valid(bpf_v), .in_data(bpf_d),
                    .out_valid(dly_v), .out_data(dly_d));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint n_in = 0, n_out = 0;
  real zr = 0, zi = 0;
  bit  acc_on = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC: a 21.1 MHz tone, one sample per clock
  always @(negedge clk) if (rst_n) begin
    in_valid = 1;
    in_data = 12'($rtoi(1500.0 * $cos(2.0 * PI * FT * real'(n_in))));
    n_in++;
  end

  // the j-th output of the delay path belongs to the j-th input
  always @(posedge clk) begin
    #1;
    if (rst_n && dly_v) begin
      if (acc_on) begin
      zr += real'(dly_d) * $cos(2.0 * PI * FT * real'(n_out));
      zi -= real'(dly_d) * $sin(2.0 * PI * FT * real'(n_out));
      end
      n_out++;
    end
  end

  task automatic load(input real frac);
    real h, w, k;
    for (int i = 0; i < BPF_TAPS; i++) begin
      k = real'(i) - 32.0 - frac;
      if (k == 0.0) h = 0.2;
      else h = ($sin(2.0 * PI * 0.27 * k) - $sin(2.0 * PI * 0.17 * k)) / (PI * k);
      w = 0.54 + 0.46 * $cos(PI * k / 33.0);
      @(negedge clk);
      coef_we = 1; coef_addr = 7'(i); coef_data = 16'($rtoi(h * w * 32768.0));
    end
    @(negedge clk);
    coef_we = 0;
    coef_commit = 1;
  endtask

  // set delay = whole + frac, wait for the pipeline, measure the phase (deg)
  task automatic measure(input int whole, input real frac, output real ph);
    load(frac);
    delay = 8'(whole);
    @(negedge clk);
    coef_commit = 0;
    repeat (300) @(negedge clk);
    zr = 0; zi = 0; acc_on = 1;
    repeat (2000) @(negedge clk);
    acc_on = 0;
    ph = $atan2(zi, zr) * 180.0 / PI;
  endtask

  function automatic real wrap(input real d);
    while (d > 180.0) d -= 360.0;
    while (d < -180.0) d += 360.0;
    return d;
  endfunction

  real ph, ph_prev, expd, step_deg, err;
  int whole;
  real frac;
  int n_wrap = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    whole = $rtoi(TAU);
    frac = TAU - real'(whole);
    frac = real'($rtoi(frac * 100.0 + 0.5)) / 100.0;
    $display("baseline delay %.4f samples -> %0d + %.2f", TAU, whole, frac);
    checks++;
    if (whole >= DLY_DEPTH) begin failures++; $display("delay memory too small"); end
    step_deg = 360.0 * FT * 0.01;
    for (int s = 0; s <= 50; s++) begin
      measure(whole, frac, ph);
      // expected: -2*pi*FT*(whole + frac + 32) (band-pass centre at tap 32)
      expd = wrap(-360.0 * FT * (real'(whole) + frac + 32.0));
      err = wrap(ph - expd);
      checks++;
      if (err > 1.0 || err < -1.0) begin
        failures++; $display("delay %0d+%.2f: phase %.3f, expected %.3f", whole, frac, ph, expd);
      end
      if (s > 0) begin
        checks++;
        if (wrap(ph_prev - ph - step_deg) > 0.15 || wrap(ph_prev - ph - step_deg) < -0.15) begin
          failures++;
          $display("0.1 ns step at %0d+%.2f turned the phase by %.3f deg, expected %.3f",
                   whole, frac, wrap(ph_prev - ph), step_deg);
        end
      end
      ph_prev = ph;
      // next 0.1 ns step; the fraction wraps into the whole-sample delay
      frac += 0.01;
      if (frac > 0.995) begin frac -= 1.0; whole++; n_wrap++; end
      if (frac < 0.0) frac = 0.0;
    end
    checks++;
    if (n_wrap == 0) begin failures++; $display("no whole-sample carry exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
