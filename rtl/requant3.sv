// requant3: the "32bit -> 3bit" requantiser of one I or Q stream.
//
// Turns a 32-bit filter output into one of eight levels for the correlator.
// The eight levels are odd multiples of the step v = 2^shift,
// (2k+1)*v/2 for k = -4..3, so there is no zero level, as usual for
// multi-bit correlator inputs. The 3-bit code is k in two's complement:
// k = floor(x / 2^shift), clipped to -4..3. 'shift' sets the step and is
// meant to be set by the control processor from the measured signal power.
// 'clip' flags a sample that was clipped to the outermost level.
//
// The 3-bit output width is the receiver's; the level set, the code and the
// programmable step are choices of this design.
//
// Timing: out_* follow in_* by one clock.
module requant3
  import rx_pkg::*;
#(
  parameter int unsigned IN_W  = POLY_W,
  parameter int unsigned OUT_W = Q_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [$clog2(IN_W)-1:0]     shift,
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_data,
  output logic                        out_valid,
  output logic signed [OUT_W-1:0]     out_code,
  output logic                        clip
);

  localparam logic signed [IN_W-1:0] KMAX = IN_W'((1 << (OUT_W-1)) - 1);
  localparam logic signed [IN_W-1:0] KMIN = -IN_W'(1 << (OUT_W-1));

  logic signed [IN_W-1:0] k;
  assign k = in_data >>> shift;     // floor division by 2^shift

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_code  <= '0;
      clip      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (k >= KMAX) begin
          out_code <= OUT_W'(KMAX);
          clip     <= 1'b1;
        end else if (k <= KMIN) begin
          out_code <= OUT_W'(KMIN);
          clip     <= 1'b1;
        end else begin
          out_code <= OUT_W'(k);
          clip     <= 1'b0;
        end
      end
    end
  end

endmodule
