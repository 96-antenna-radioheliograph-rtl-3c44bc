// nco: the "NCO(t)" numerically controlled oscillator of one antenna channel.
//
// A PHASE_W-bit phase accumulator advances by freq_word on every enabled
// sample; phase_off is added to its value (both come from the control
// processor, which updates them as the fringe rate changes - the "(t)").
// The phase is turned into cos and sin by a pipelined CORDIC in rotation
// mode, so no sine table is stored. The phase is first folded into
// [-pi/2, pi/2) by subtracting pi and negating the start vector where needed;
// ITER micro-rotations by +-atan(2^-i) then follow, one per pipeline stage.
//
// Phase scaling: 2^PHASE_W is one full turn, so the output frequency is
// f = freq_word * f_sample / 2^PHASE_W (16 MHz at a 100 MHz sample clock is
// freq_word = 687194767). Output amplitude is AMP (about 0.98 of full scale),
// error within 2 LSB (4 guard bits inside the CORDIC).
//
// The whole NCO is this design's own construction; the receiver description
// gives only its role (downconversion and fringe stopping) and that it
// produces cos and sin.
//
// Timing: the pipeline moves only when 'en' is high. The cos/sin pair for
// the phase accumulated up to a given enable appears LATENCY enables later;
// since every channel uses the same NCO structure, this fixed offset is a
// constant phase common to all antennas.
module nco
  import rx_pkg::*;
#(
  parameter int unsigned PW   = PHASE_W,
  parameter int unsigned TW   = TRIG_W,
  parameter int unsigned ITER = 16,
  parameter int unsigned AMP  = 32000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [PW-1:0]         freq_word,
  input  logic [PW-1:0]         phase_off,
  output logic signed [TW-1:0]  cos_out,
  output logic signed [TW-1:0]  sin_out
);

  localparam int unsigned G  = 4;           // guard bits below the output LSB
  localparam int unsigned XW = TW + 2 + G;  // CORDIC x/y width with headroom

  // atan(2^-i) in units of 2^32 / (2*pi), rounded
  localparam logic [31:0] ATAN32 [16] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861
  };
  // start amplitude AMP * prod(1/sqrt(1+2^-2i)) = AMP * 0.607253
  localparam longint X0 = (longint'(AMP) * 64'd39797) >>> (16 - G);

  logic [PW-1:0] acc;
  logic [PW-1:0] phase;

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [PW-1:0] zs [ITER+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      phase <= '0;
    end else if (en) begin
      acc   <= acc + freq_word;
      phase <= acc + phase_off;
    end
  end

  // stage 0: fold into [-pi/2, pi/2)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
    end else if (en) begin
      ys[0] <= '0;
      if (phase[PW-1] ^ phase[PW-2]) begin
        xs[0] <= -XW'(X0);
        zs[0] <= $signed({~phase[PW-1], phase[PW-2:0]});
      end else begin
        xs[0] <= XW'(X0);
        zs[0] <= $signed(phase);
      end
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic [PW-1:0] ANG = PW'(ATAN32[i] >> (32 - PW));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
      end else if (en) begin
        if (!zs[i][PW-1]) begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - $signed(ANG);
        end else begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + $signed(ANG);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cos_out <= '0;
      sin_out <= '0;
    end else if (en) begin
      cos_out <= TW'(sat_s((64'(xs[ITER]) + 64'(1 << (G-1))) >>> G, TW));
      sin_out <= TW'(sat_s((64'(ys[ITER]) + 64'(1 << (G-1))) >>> G, TW));
    end
  end

endmodule
