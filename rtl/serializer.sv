// serializer: merges the 3-bit I and Q streams of the receiver's antennas
// into one word stream for the transceiver.
//
// Each 25 MHz sample instant gives 2*NA 3-bit samples (600 Mbit/s for four
// antennas). Every 3-bit sample travels in a 4-bit nibble whose top bit is a
// payload bit, which makes 800 Mbit/s, the rate quoted for the receiver.
// What the payload bits carry is this design's choice: together they form
// an 8-bit word counter, so the correlator can check that the streams of
// different receiver modules and antennas stay aligned.
//   byte a (antenna a) = { cnt[2a+1], q[a], cnt[2a], i[a] }
// Byte 0 is the first byte on the line.
//
// After reset, and after every pulse of align_req, the first ALIGN_WORDS word
// slots carry four K28.5 comma characters instead of data, so that the
// receiving transceiver can find the word boundary (the transceivers are used
// in their Basic mode, which has no link-layer protocol of its own). Data
// words then follow with the counter starting at zero.
//
// Timing: out_valid/out_word follow in_valid by one clock.
module serializer
  import rx_pkg::*;
#(
  parameter int unsigned NA          = N_ANT,
  parameter int unsigned ALIGN_WORDS = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     align_req,
  input  logic                     in_valid,
  input  logic signed [Q_W-1:0]    i_code [NA],
  input  logic signed [Q_W-1:0]    q_code [NA],
  output logic                     out_valid,
  output tx_word_t                 out_word,
  output logic                     aligning
);

  localparam int unsigned CW = $clog2(ALIGN_WORDS + 1);

  logic [CW-1:0]     align_left;
  logic [2*NA-1:0]   cnt;
  logic [WORD_W-1:0] packed_w;

  always_comb begin
    packed_w = '0;
    for (int a = 0; a < NA; a++) begin
      packed_w[8*a +: 4]     = {cnt[2*a],   i_code[a]};
      packed_w[8*a + 4 +: 4] = {cnt[2*a+1], q_code[a]};
    end
  end

  assign aligning = (align_left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      align_left <= CW'(ALIGN_WORDS);
      cnt        <= '0;
      out_valid  <= 1'b0;
      out_word   <= '0;
    end else begin
      out_valid <= in_valid;
      if (align_req) begin
        align_left <= in_valid ? CW'(ALIGN_WORDS - 1) : CW'(ALIGN_WORDS);
        cnt        <= '0;
      end else if (in_valid && aligning) begin
        align_left <= align_left - 1'b1;
      end else if (in_valid) begin
        cnt <= cnt + 1'b1;
      end
      if (in_valid) begin
        if (aligning || align_req) begin
          out_word.data <= {4{K28_5}};
          out_word.is_k <= 4'hF;
        end else begin
          out_word.data <= packed_w;
          out_word.is_k <= 4'h0;
        end
      end
    end
  end

endmodule
