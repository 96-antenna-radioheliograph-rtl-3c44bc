// tb_dig_receiver: end-to-end testbench of the four-antenna digital
// receiver module at its full default size.
//
// The testbench plays the ADCs and the control processor. The ADC inputs
// are sums of tones in the 17-27 MHz IF1 band, each antenna's signal delayed
// by its own geometric delay (an exact real-valued delay, so fractional
// samples are possible). The processor role computes band-pass FIR
// coefficients (windowed sinc 17-27 MHz, shifted by a fraction of a sample),
// loads them through the shadow bank, and sets whole-sample delays and NCO
// frequencies. The correlator role decodes the 40-bit 8b/10b code groups
// with a reference decoder, checks the alignment words, the payload word
// counter and the word rate, and correlates the recovered 3-bit I/Q streams.
//
// Checked mechanisms, each counted and required at least once:
//   alignment commas after reset and after an alignment request,
//   coefficient bank swaps, integer delay tracking, fractional delay
//   tracking (correlation phase of a 7.3-sample delay compensated by
//   7 + 0.3 samples, compared with 7 + 0), frequency translation to IF2
//   (a 20 MHz tone must rotate at +4 MHz, 57.6 degrees per 25 MHz sample),
//   fringe stopping (a 48.8 kHz offset tone correlates only when its NCO
//   is offset by the same amount), and requantiser clipping.
module tb_dig_receiver;
  import rx_pkg::*;
  import tb_8b10b_pkg::*;

  localparam real FS = 100.0e6;
  localparam real PI = 3.141592653589793;
  localparam int  NA = N_ANT;
  localparam logic [31:0] F16 = 32'd687194767;        // 16 MHz
  localparam real FOFF = 48828.125;                  // fringe offset, Hz
  localparam logic [31:0] FOFF_W = 32'd2097152;      // FOFF * 2^32 / FS

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  logic signed [11:0] adc_data [NA];
  logic coef_we = 0;
  logic [1:0] coef_ant = '0;
  logic [6:0] coef_addr = '0;
  logic signed [15:0] coef_data = '0;
  logic [NA-1:0] coef_commit = '0;
  logic [7:0]  delay [NA];
  logic [31:0] nco_freq [NA];
  logic [31:0] nco_phase [NA];
  logic [4:0]  rq_shift [NA];
  logic align_req = 0;
  logic [NA-1:0] clip_i, clip_q;
  logic aligning;
  logic tx_valid;
  logic [39:0] tx_sym;
  logic tx_k_err;

  dig_receiver dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned ncyc = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- ADC model: tones with per-antenna delay ----------------
  real tone_f [3] = '{18.3e6, 21.1e6, 24.7e6};
  real tone_p [3] = '{0.3, 1.7, 4.1};
  real geo_delay [NA];          // samples
  real ant_freq [NA];           // 0: three-tone signal, else single tone at this frequency
  longint unsigned n_adc = 0;

  function automatic int adc_sample(int a, longint unsigned n);
    real t, v;
    t = (real'(n) - geo_delay[a]) / FS;
    v = 0.0;
    if (ant_freq[a] == 0.0) begin
      for (int i = 0; i < 3; i++) v += 500.0 * $cos(2.0 * PI * tone_f[i] * t + tone_p[i]);
    end else begin
      v = 1200.0 * $cos(2.0 * PI * ant_freq[a] * t + 0.5);
    end
    v += real'($urandom_range(0, 40)) - 20.0;      // a little ADC noise
    return $rtoi(v);
  endfunction

  always @(negedge clk) if (rst_n) begin
    adc_valid = 1'b1;
    for (int a = 0; a < NA; a++) adc_data[a] = 12'(adc_sample(a, n_adc));
    n_adc++;
  end

  // ------------- processor model: band-pass + fractional delay -------------
  int n_commit = 0;

  task automatic load_bpf(input int a, input real frac);
    real c, k, h, w;
    for (int i = 0; i < BPF_TAPS; i++) begin
      k = real'(i) - 32.0 - frac;
      if (k == 0.0) h = 2.0 * (27.0 - 17.0) / 100.0;
      else h = ($sin(2.0 * PI * 0.27 * k) - $sin(2.0 * PI * 0.17 * k)) / (PI * k);
      w = 0.54 + 0.46 * $cos(PI * k / 33.0);
      c = h * w * 32768.0 * 1.9;               // gain ~1.9 keeps the 12-bit signals large
      @(negedge clk);
      coef_we = 1; coef_ant = 2'(a); coef_addr = 7'(i); coef_data = 16'($rtoi(c));
    end
    @(negedge clk);
    coef_we = 0;
    coef_commit[a] = 1'b1;
    @(negedge clk);
    coef_commit = '0;
    n_commit++;
  endtask

  // ----------------- correlator model: decode the link --------------------
  dec8b10b dec = new();
  int n_words = 0, n_comma_words = 0, n_data_words = 0, bad_groups = 0;
  int exp_cnt = 0;
  int last_word_cycle = -1, bad_spacing = 0;
  bit  collecting = 0;
  int  zi [NA][$];
  int  zq [NA][$];
  int  n_clip = 0;

  always @(posedge clk) if (rst_n) begin
    ncyc++;
    if (clip_i != '0 || clip_q != '0) n_clip++;
  end

  always @(negedge clk) if (rst_n && tx_valid) begin
    int g [4];
    bit is_comma, is_data;
    if (last_word_cycle >= 0 && int'(ncyc) - last_word_cycle != DECIM) bad_spacing++;
    last_word_cycle = int'(ncyc);
    n_words++;
    for (int b = 0; b < 4; b++) begin
      g[b] = dec.decode(tx_sym[39 - 10*b -: 10]);
      if (g[b] < 0) bad_groups++;
    end
    is_comma = 1; is_data = 1;
    for (int b = 0; b < 4; b++) begin
      if (g[b] != 256 + 8'hBC) is_comma = 0;
      if (g[b] < 0 || g[b] >= 256) is_data = 0;
    end
    if (is_comma) begin
      n_comma_words++;
      exp_cnt = 0;
    end else if (is_data) begin
      int cnt;
      cnt = 0;
      n_data_words++;
      for (int a = 0; a < NA; a++) begin
        cnt |= ((g[a] >> 3) & 1) << (2*a);
        cnt |= ((g[a] >> 7) & 1) << (2*a + 1);
      end
      if (cnt != exp_cnt) begin
        failures++;
        if (failures < 10) $display("payload counter %0d, expected %0d", cnt, exp_cnt);
      end
      exp_cnt = (exp_cnt + 1) % 256;
      if (collecting)
        for (int a = 0; a < NA; a++) begin
          int ci, cq;
          ci = int'($signed(3'(g[a])));
          cq = int'($signed(3'(g[a] >> 4)));
          zi[a].push_back(2 * ci + 1);
          zq[a].push_back(2 * cq + 1);
        end
    end
  end

  // collect n words of 3-bit samples after letting the pipeline settle
  task automatic collect(input int n);
    for (int a = 0; a < NA; a++) begin zi[a].delete(); zq[a].delete(); end
    repeat (DECIM * 100) @(posedge clk);
    collecting = 1;
    wait (zi[0].size() >= n);
    collecting = 0;
  endtask

  // normalised complex correlation of antennas a and b: magnitude and phase (deg)
  task automatic corr(input int a, input int b, output real mag, output real ph);
    real re = 0, im = 0, pa = 0, pb = 0;
    int n = zi[a].size();
    for (int i = 0; i < n; i++) begin
      re += real'(zi[a][i] * zi[b][i] + zq[a][i] * zq[b][i]);
      im += real'(zq[a][i] * zi[b][i] - zi[a][i] * zq[b][i]);
      pa += real'(zi[a][i] * zi[a][i] + zq[a][i] * zq[a][i]);
      pb += real'(zi[b][i] * zi[b][i] + zq[b][i] * zq[b][i]);
    end
    mag = $sqrt(re * re + im * im) / $sqrt(pa * pb);
    ph = $atan2(im, re) * 180.0 / PI;
  endtask

  // mean phase step of one antenna's stream, degrees per output sample
  function automatic real rotation(input int a);
    real re = 0, im = 0;
    for (int i = 1; i < zi[a].size(); i++) begin
      re += real'(zi[a][i] * zi[a][i-1] + zq[a][i] * zq[a][i-1]);
      im += real'(zq[a][i] * zi[a][i-1] - zi[a][i] * zq[a][i-1]);
    end
    return $atan2(im, re) * 180.0 / PI;
  endfunction

  real m_nofrac, p_nofrac, m_frac, p_frac, m_nostop, p_nostop, m_stop, p_stop, m_nodly, p_nodly, rot;
  int n_delay_changes = 0, n_fringe = 0, n_align_req = 0;

  initial begin
    for (int a = 0; a < NA; a++) begin
      adc_data[a] = '0; delay[a] = '0; nco_freq[a] = F16; nco_phase[a] = '0; rq_shift[a] = 5'd23;
    end
    geo_delay = '{0.0, 7.3, 0.0, 0.0};
    ant_freq  = '{0.0, 0.0, 20.0e6, 20.0e6 + FOFF};
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++) load_bpf(a, 0.0);

    // ---- start-up alignment and link properties
    collect(400);
    check(n_comma_words == 16, $sformatf("%0d alignment words after reset, expected 16", n_comma_words));

    // ---- frequency translation: 20 MHz -> +4 MHz at IF2 = +57.6 deg/sample
    rot = rotation(2);
    $display("antenna 2: %.1f deg per output sample (expected +57.6)", rot);
    check(rot > 52.0 && rot < 63.0, "IF2 frequency / sideband of antenna 2");

    // ---- no delay compensation: 7.3-sample offset between antennas 0 and 1
    corr(0, 1, m_nodly, p_nodly);
    $display("ant0 x ant1, uncompensated:        |r| = %.3f  phase = %.1f deg", m_nodly, p_nodly);

    // ---- integer delay only (7 samples)
    delay[0] = 8'd7;
    n_delay_changes++;
    collect(2000);
    corr(0, 1, m_nofrac, p_nofrac);
    $display("ant0 x ant1, 7 whole samples:       |r| = %.3f  phase = %.1f deg", m_nofrac, p_nofrac);

    // ---- integer + fractional delay (7 + 0.3 samples, in the band-pass FIR)
    load_bpf(0, 0.3);
    collect(2000);
    corr(0, 1, m_frac, p_frac);
    $display("ant0 x ant1, 7.3 samples:           |r| = %.3f  phase = %.1f deg", m_frac, p_frac);
    check(m_nofrac > m_nodly + 0.1, "integer delay tracking raises the correlation");
    check(p_nofrac > 12.0 || p_nofrac < -12.0, "residual 0.3-sample delay shows as phase");
    check(p_frac < 4.0 && p_frac > -4.0, "fractional delay removes the residual phase");
    check(m_frac > 0.5, "compensated antennas correlate");

    // ---- fringe stopping between antennas 2 and 3
    corr(2, 3, m_nostop, p_nostop);
    nco_freq[3] = F16 + FOFF_W;
    n_fringe++;
    collect(2000);
    corr(2, 3, m_stop, p_stop);
    $display("ant2 x ant3, fringe not stopped:    |r| = %.3f", m_nostop);
    $display("ant2 x ant3, fringe stopped:        |r| = %.3f  phase = %.1f deg", m_stop, p_stop);
    check(m_nostop < 0.3, "fringing tone pair decorrelates over 80 us");
    check(m_stop > 0.6, "fringe stopping restores the correlation");

    // ---- alignment request in the middle of the stream
    @(negedge clk);
    align_req = 1;
    @(negedge clk);
    align_req = 0;
    n_align_req++;
    collect(200);
    check(n_comma_words == 32, $sformatf("%0d alignment words in total, expected 32", n_comma_words));

    // ---- requantiser clipping with a small step
    for (int a = 0; a < NA; a++) rq_shift[a] = 5'd20;
    collect(200);

    // ---- link and mechanism summary
    $display("words %0d (comma %0d, data %0d), clock cycles %0d, clipping cycles %0d",
             n_words, n_comma_words, n_data_words, ncyc, n_clip);
    check(bad_groups == 0, $sformatf("%0d invalid code groups", bad_groups));
    check(bad_spacing == 0, "one 40-bit word every 4 clocks (1 Gbit/s at 100 MHz)");
    check(n_comma_words + n_data_words == n_words, "every word is either alignment or data");
    check(!tx_k_err, "no invalid control character");
    check(n_commit >= 5, "coefficient bank swaps happened");
    check(n_delay_changes > 0, "delay tracking happened");
    check(n_fringe > 0, "fringe-rate change happened");
    check(n_align_req > 0, "alignment request happened");
    check(n_clip > 0, "requantiser clipping happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
