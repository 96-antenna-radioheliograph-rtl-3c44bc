// fir_bpf: the "FIR(t)" band-pass filter of one antenna channel.
//
// A 64th-order (65-tap) direct-form FIR on the 12-bit ADC samples. The same
// filter both forms the 17-27 MHz IF1 passband and applies the fractional-
// sample part of the delay-tracking delay (steps of 0.1 ns): the controlling
// processor computes a band-pass impulse response shifted by the wanted
// fraction of a sample and loads it here. The filter itself is therefore a
// plain programmable FIR; the "(t)" is the coefficient set changing with time.
//
// Coefficients are double-buffered (a choice of this design): the processor
// writes a shadow bank one tap at a time (coef_we/coef_addr/coef_data), then
// pulses coef_commit, and the whole new set becomes active between two
// samples, so no output is ever computed from a mix of old and new taps.
//
// Arithmetic: coefficients are signed Q1.15, products and sum are kept at full
// precision, and the output is sum >>> OUT_SHIFT saturated to OUT_W bits.
//
// Timing: one sample per clock when in_valid is high. out = sum_k c[k]*x[n-k]
// appears one clock after x[n] is presented (out_valid follows in_valid by
// one clock).
module fir_bpf
  import rx_pkg::*;
#(
  parameter int unsigned TAPS      = BPF_TAPS,
  parameter int unsigned IN_W      = ADC_W,
  parameter int unsigned CW        = COEF_W,
  parameter int unsigned OUT_W     = DATA_W,
  parameter int unsigned OUT_SHIFT = 15
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // sample stream
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_data,
  output logic                        out_valid,
  output logic signed [OUT_W-1:0]     out_data,
  // coefficient loading from the control processor
  input  logic                        coef_we,
  input  logic [$clog2(TAPS)-1:0]     coef_addr,
  input  logic signed [CW-1:0]        coef_data,
  input  logic                        coef_commit
);

  localparam int unsigned ACC_W = IN_W + CW + $clog2(TAPS);

  logic signed [CW-1:0]   shadow [TAPS];
  logic signed [CW-1:0]   active [TAPS];
  logic signed [IN_W-1:0] taps   [TAPS];   // taps[k] = x[n-k]

  // shadow bank writes and bank swap
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) begin
        shadow[k] <= '0;
        active[k] <= '0;
      end
    end else begin
      if (coef_we && 32'(coef_addr) < TAPS) shadow[coef_addr] <= coef_data;
      if (coef_commit) begin
        for (int k = 0; k < TAPS; k++) active[k] <= shadow[k];
      end
    end
  end

  // current sample joins the delay line combinationally so that the sum
  // uses x[n]..x[n-TAPS+1]
  logic signed [ACC_W-1:0] acc;
  always_comb begin
    acc = ACC_W'($signed(in_data)) * ACC_W'($signed(active[0]));
    for (int k = 1; k < TAPS; k++)
      acc += ACC_W'($signed(taps[k-1])) * ACC_W'($signed(active[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) taps[k] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        taps[0] <= in_data;
        for (int k = 1; k < TAPS; k++) taps[k] <= taps[k-1];
        out_data <= OUT_W'(sat_s(64'(acc >>> OUT_SHIFT), OUT_W));
      end
    end
  end

endmodule
