// transceiver: transmit side of the link from the receiver module to the
// correlator, in the FPGA transceiver's "Basic" mode with 8b/10b coding.
//
// Each 32-bit serializer word is split into four bytes, byte 0 first, and
// each byte is 8b/10b encoded with the running disparity carried from one
// byte to the next and from word to word. The four code groups leave as one
// 40-bit group per word: at a 25 MHz word rate that is 1 Gbit/s on the
// line, the rate of one receiver module's cable (24 modules give the
// correlator's 24 Gbit/s for 96 antennas).
//
// This block is the coding layer only; the parallel-to-serial conversion
// and the line driver of the transceiver's physical layer are part of the
// FPGA's hard transceiver and are not modelled. Output: sym[39:30] is the
// code group of byte 0, bit 39 is the first bit on the line.
//
// The 8b/10b coding, the Basic mode and the 1 Gbit/s line rate follow the
// receiver description; the 32-bit word width and the byte order are this
// design's choices.
//
// Timing: sym/sym_valid follow in_word/in_valid by one clock. The running
// disparity starts negative after reset.
module transceiver
  import rx_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  tx_word_t           in_word,
  output logic               sym_valid,
  output logic [SYM_W-1:0]   sym,
  output logic               k_err
);

  logic       rd;
  logic [4:0] rdc;          // running disparity before each byte, and after the last
  logic [9:0] grp [4];
  logic [3:0] kerr_b;

  assign rdc[0] = rd;

  for (genvar b = 0; b < 4; b++) begin : g_byte
    enc8b10b u_enc (
      .data  (in_word.data[8*b +: 8]),
      .is_k  (in_word.is_k[b]),
      .rd_in (rdc[b]),
      .code  (grp[b]),
      .rd_out(rdc[b+1]),
      .k_err (kerr_b[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd        <= 1'b0;
      sym_valid <= 1'b0;
      sym       <= '0;
      k_err     <= 1'b0;
    end else begin
      sym_valid <= in_valid;
      if (in_valid) begin
        rd    <= rdc[4];
        sym   <= {grp[0], grp[1], grp[2], grp[3]};
        k_err <= |kerr_b;
      end
    end
  end

endmodule
