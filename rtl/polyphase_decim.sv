// polyphase_decim: the "Polyphase FIR 1-11 MHz" of one I or Q stream.
//
// A low-pass FIR of TAPS taps that decimates by M (100 MHz -> 25 MHz here),
// built in polyphase form: the impulse response h[k] is split into M branches
// h_p[j] = h[j*M + p], and an input commutator deals consecutive samples to
// branches M-1, M-2, ..., 0. Branch p therefore holds x[m*M - p - j*M] and
//   y[m] = sum_p sum_j h[j*M+p] * x[(m-j)*M - p] = sum_k h[k] * x[m*M - k],
// i.e. exactly the full-rate filter sampled every M-th output. Only one
// branch is evaluated per input sample (the one that just received a
// sample), so TAPS/M multipliers serve the whole filter, and the branch sums
// are accumulated until branch 0 completes an output.
//
// The passband is set by the fixed coefficient table (COEF_FILE, signed
// 16-bit, one hex word per line). The shipped table is a Hamming-windowed
// sinc with cutoff f_s/8 (12.5 MHz at 100 MHz), scaled to a DC gain of 2^15:
// it passes the 1-11 MHz IF2 band and removes what would alias at 25 MHz.
// The output is the full 32-bit sum (the width printed for this stage);
// with 16-bit input and this table it cannot overflow 32 bits.
//
// Branch count, tap count, coefficients and filter design are this design's
// choices; the receiver description gives the filter's band, its polyphase
// form and its 32-bit output.
//
// Timing: one input per clock at most; out_valid pulses once per M inputs,
// one clock after the input that completes the output (the sample dealt to
// branch 0). The first output comes after the M-th input after reset.
module polyphase_decim
  import rx_pkg::*;
#(
  parameter int unsigned W         = DATA_W,
  parameter int unsigned M         = DECIM,
  parameter int unsigned TAPS      = LPF_TAPS,
  parameter int unsigned CW        = COEF_W,
  parameter int unsigned OUT_W     = POLY_W,
  parameter string       COEF_FILE = "rtl/lpf_coefs.hex"
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [W-1:0]     in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);

  localparam int unsigned L     = TAPS / M;          // taps per branch
  localparam int unsigned ACC_W = W + CW + $clog2(TAPS) + 1;

  logic signed [CW-1:0] coef [TAPS];
  initial $readmemh(COEF_FILE, coef);

  logic signed [W-1:0]     line [M][L];
  logic [$clog2(M)-1:0]    cnt;       // commutator position
  logic [$clog2(M)-1:0]    br;        // branch receiving this sample
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] part;

  assign br = $clog2(M)'(M - 1) - cnt;

  // dot product of the selected branch with its new contents
  always_comb begin
    part = ACC_W'($signed(in_data)) * ACC_W'($signed(coef[int'(br)]));
    for (int j = 1; j < L; j++)
      part += ACC_W'($signed(line[br][j-1])) * ACC_W'($signed(coef[j*M + int'(br)]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < M; p++)
        for (int j = 0; j < L; j++) line[p][j] <= '0;
      cnt       <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        line[br][0] <= in_data;
        for (int j = 1; j < L; j++) line[br][j] <= line[br][j-1];
        cnt <= (cnt == $clog2(M)'(M - 1)) ? '0 : cnt + 1'b1;
        if (br == $clog2(M)'(M - 1)) acc <= part;
        else                         acc <= acc + part;
        if (br == '0) begin
          out_valid <= 1'b1;
          out_data  <= OUT_W'(sat_s((br == $clog2(M)'(M - 1)) ? 64'(part) : 64'(acc) + 64'(part), OUT_W));
        end
      end
    end
  end

endmodule
