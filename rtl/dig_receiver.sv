// dig_receiver: digital receiver module of the radioheliograph, serving four
// antennas (top level).
//
// Per antenna the 12-bit ADC samples of the first IF (IF1) pass through
//   fir_bpf        65-tap band-pass 17-27 MHz + fractional-sample delay
//   delay_line     whole-sample delay (delay tracking)
//   iq_mixer + nco complex downconversion to IF2 = 1-11 MHz and fringe
//                  stopping
//   polyphase_decim x2   I and Q low-pass, decimation 100 -> 25 MHz, 32 bit
//   requant3 x2    32 bit -> 3 bit
// and the 3-bit I and Q samples of all antennas are merged by 'serializer'
// into 32-bit words (3 data bits + 1 payload bit per sample) and 8b/10b
// encoded by 'transceiver' into 40-bit code groups, 1 Gbit/s per module.
//
// Everything runs on one clock, the ADC sample clock (100 MHz assumed),
// with adc_valid high on every sample. The control processor is outside:
// its settings (FIR coefficients, delays, NCO frequency and phase,
// requantiser steps, alignment request) are ports here, as is the ADC.
//
// Latency from an ADC sample to the code group that carries it is a fixed
// number of clocks (band-pass 1, delay 1 + the programmed delay, mixer 1,
// polyphase up to 4, requantiser 1, serializer 1, transceiver 1).
//
// The block chain, its order and the four-antenna grouping follow the
// receiver's published block diagram; the single clock, the control ports
// and all widths not listed in rx_pkg as given are this design's choices.
// Assertions check that the I and Q paths and all antennas stay in lock
// step; they are disabled during reset, which is why lint reports rst_n as
// used both synchronously and asynchronously.
module dig_receiver
  import rx_pkg::*;
#(
  parameter int unsigned NA        = N_ANT,
  parameter int unsigned BPF_N     = BPF_TAPS,
  parameter int unsigned LPF_N     = LPF_TAPS,
  parameter int unsigned M         = DECIM,
  parameter int unsigned DEPTH     = DLY_DEPTH,
  parameter int unsigned ALIGN_N   = 16,
  parameter string       COEF_FILE = "rtl/lpf_coefs.hex"
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ADC sample buses
  input  logic                          adc_valid,
  input  logic signed [ADC_W-1:0]       adc_data   [NA],
  // control processor: band-pass coefficients (per antenna, double-buffered)
  input  logic                          coef_we,
  input  logic [$clog2(NA)-1:0]         coef_ant,
  input  logic [$clog2(BPF_N)-1:0]      coef_addr,
  input  logic signed [COEF_W-1:0]      coef_data,
  input  logic [NA-1:0]                 coef_commit,
  // control processor: delay tracking and fringe stopping
  input  logic [$clog2(DEPTH)-1:0]      delay      [NA],
  input  logic [PHASE_W-1:0]            nco_freq   [NA],
  input  logic [PHASE_W-1:0]            nco_phase  [NA],
  input  logic [$clog2(POLY_W)-1:0]     rq_shift   [NA],
  input  logic                          align_req,
  // status to the control processor
  output logic [NA-1:0]                 clip_i,
  output logic [NA-1:0]                 clip_q,
  output logic                          aligning,
  // to the correlator
  output logic                          tx_valid,
  output logic [SYM_W-1:0]              tx_sym,
  output logic                          tx_k_err
);

  logic signed [Q_W-1:0] i_code [NA];
  logic signed [Q_W-1:0] q_code [NA];
  logic [NA-1:0]         rq_valid;

  for (genvar a = 0; a < NA; a++) begin : g_ant
    logic                       bpf_v, dly_v, mix_v, pi_v, pq_v, rqq_v;
    logic signed [DATA_W-1:0]   bpf_d, dly_d, mix_i, mix_q;
    logic signed [TRIG_W-1:0]   lo_cos, lo_sin;
    logic signed [POLY_W-1:0]   pi_d, pq_d;

    fir_bpf #(.TAPS(BPF_N)) u_bpf (
      .clk, .rst_n,
      .in_valid   (adc_valid),
      .in_data    (adc_data[a]),
      .out_valid  (bpf_v),
      .out_data   (bpf_d),
      .coef_we    (coef_we && (coef_ant == $clog2(NA)'(a))),
      .coef_addr,
      .coef_data,
      .coef_commit(coef_commit[a])
    );

    delay_line #(.DEPTH(DEPTH)) u_dly (
      .clk, .rst_n,
      .delay     (delay[a]),
      .in_valid  (bpf_v),
      .in_data   (bpf_d),
      .out_valid (dly_v),
      .out_data  (dly_d)
    );

    nco u_nco (
      .clk, .rst_n,
      .en        (dly_v),
      .freq_word (nco_freq[a]),
      .phase_off (nco_phase[a]),
      .cos_out   (lo_cos),
      .sin_out   (lo_sin)
    );

    iq_mixer u_mix (
      .clk, .rst_n,
      .in_valid  (dly_v),
      .in_data   (dly_d),
      .cos_in    (lo_cos),
      .sin_in    (lo_sin),
      .out_valid (mix_v),
      .out_i     (mix_i),
      .out_q     (mix_q)
    );

    polyphase_decim #(.M(M), .TAPS(LPF_N), .COEF_FILE(COEF_FILE)) u_lpf_i (
      .clk, .rst_n,
      .in_valid  (mix_v),
      .in_data   (mix_i),
      .out_valid (pi_v),
      .out_data  (pi_d)
    );

    polyphase_decim #(.M(M), .TAPS(LPF_N), .COEF_FILE(COEF_FILE)) u_lpf_q (
      .clk, .rst_n,
      .in_valid  (mix_v),
      .in_data   (mix_q),
      .out_valid (pq_v),
      .out_data  (pq_d)
    );

    requant3 u_rq_i (
      .clk, .rst_n,
      .shift     (rq_shift[a]),
      .in_valid  (pi_v),
      .in_data   (pi_d),
      .out_valid (rq_valid[a]),
      .out_code  (i_code[a]),
      .clip      (clip_i[a])
    );

    requant3 u_rq_q (
      .clk, .rst_n,
      .shift     (rq_shift[a]),
      .in_valid  (pq_v),
      .in_data   (pq_d),
      .out_valid (rqq_v),
      .out_code  (q_code[a]),
      .clip      (clip_q[a])
    );

    // I and Q paths of an antenna, and all antennas, run in lock step
    assert property (@(posedge clk) disable iff (!rst_n) pi_v == pq_v)
      else $error("I and Q polyphase filters out of step on antenna %0d", a);
    assert property (@(posedge clk) disable iff (!rst_n) rqq_v == rq_valid[a])
      else $error("I and Q requantisers out of step on antenna %0d", a);
    assert property (@(posedge clk) disable iff (!rst_n) rq_valid[a] == rq_valid[0])
      else $error("antenna %0d out of step with antenna 0", a);
  end

  logic     ser_v;
  tx_word_t ser_w;

  serializer #(.NA(NA), .ALIGN_WORDS(ALIGN_N)) u_ser (
    .clk, .rst_n,
    .align_req,
    .in_valid  (rq_valid[0]),
    .i_code,
    .q_code,
    .out_valid (ser_v),
    .out_word  (ser_w),
    .aligning
  );

  transceiver u_tx (
    .clk, .rst_n,
    .in_valid  (ser_v),
    .in_word   (ser_w),
    .sym_valid (tx_valid),
    .sym       (tx_sym),
    .k_err     (tx_k_err)
  );

endmodule
