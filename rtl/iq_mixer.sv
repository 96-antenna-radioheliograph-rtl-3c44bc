// iq_mixer: the "I/Q mixer" of one antenna channel.
//
// Multiplies each real IF1 sample by the NCO's cos and sin, giving the
// complex product x * exp(-j*phi): I = x*cos(phi), Q = -x*sin(phi). With the
// NCO running at 16 MHz this moves the 17-27 MHz band to the 1-11 MHz IF2
// band; the small offset the control processor adds to the NCO rate stops
// the fringes. Products are scaled back by 2^(TW-1) (cos/sin are Q1.15) and
// saturated to OUT_W bits. The sign convention (lower local oscillator,
// minus sign on Q) is this design's choice.
//
// Timing: out_* follow in_* by one clock.
module iq_mixer
  import rx_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned TW    = TRIG_W,
  parameter int unsigned OUT_W = DATA_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [W-1:0]     in_data,
  input  logic signed [TW-1:0]    cos_in,
  input  logic signed [TW-1:0]    sin_in,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_i,
  output logic signed [OUT_W-1:0] out_q
);

  localparam int unsigned PW = W + TW;

  logic signed [PW-1:0] pi, pq;
  always_comb begin
    pi = PW'(in_data) * PW'(cos_in);
    pq = -(PW'(in_data) * PW'(sin_in));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_i <= OUT_W'(sat_s(64'(pi >>> (TW-1)), OUT_W));
        out_q <= OUT_W'(sat_s(64'(pq >>> (TW-1)), OUT_W));
      end
    end
  end

endmodule
