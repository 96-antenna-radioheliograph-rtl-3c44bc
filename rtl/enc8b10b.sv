// enc8b10b: combinational 8b/10b encoder for one byte (IBM/Widmer-Franaszek
// code, as used by the FPGA transceivers that carry the receiver data).
//
// The byte HGF EDCBA is split into a 5-bit part (EDCBA -> abcdei) and a 3-bit
// part (HGF -> fghj). Each part has a code for negative running disparity;
// for positive disparity the unbalanced codes (and the alternating D.07 and
// D.x.3) are sent complemented. D.x.7 uses the alternate A7 code where P7
// would make a run of five equal bits (x = 17, 18, 20 at negative,
// x = 11, 13, 14 at positive disparity). The control characters K28.0-7,
// K23.7, K27.7, K29.7 and K30.7 are supported; for them the positive-
// disparity code is the complement of the negative one. Any other byte with
// is_k set raises k_err and is sent as data.
//
// Output bit order: code[9:0] = a b c d e i f g h j, bit 9 (a) sent first.
// The receiver description only names 8b/10b coding; the tables are the
// standard ones, and the set of supported control characters and the k_err
// flag are this design's choice.
// rd_in/rd_out: running disparity, 1 = positive.
module enc8b10b (
  input  logic [7:0] data,
  input  logic       is_k,
  input  logic       rd_in,
  output logic [9:0] code,
  output logic       rd_out,
  output logic       k_err
);

  // 5b/6b codes at negative running disparity, abcdei with a in bit 5
  localparam logic [5:0] C6 [32] = '{
    6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
    6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
    6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
    6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011
  };
  // 3b/4b codes at negative running disparity, fghj with f in bit 3 (P7 for 7)
  localparam logic [3:0] C4 [8] = '{
    4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110
  };
  // K28.y, 3b/4b part at negative running disparity
  localparam logic [3:0] K28_4 [8] = '{
    4'b0100, 4'b1001, 4'b0101, 4'b0011, 4'b0010, 4'b1010, 4'b0110, 4'b1000
  };

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd6;
  logic       k_ok;

  assign x = data[4:0];
  assign y = data[7:5];

  always_comb begin
    k_ok = is_k && ((x == 5'd28) ||
                    (y == 3'd7 && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30)));
    k_err = is_k && !k_ok;

    if (k_ok) begin
      // control character: fixed RD- code, complemented at RD+
      c6 = (x == 5'd28) ? 6'b001111 : C6[x];
      c4 = (x == 5'd28) ? K28_4[y] : 4'b1000;
      code = rd_in ? ~{c6, c4} : {c6, c4};
      rd_out = rd_in ^ ($countones({c6, c4}) != 5);
      rd6 = rd_in;
    end else begin
      c6 = C6[x];
      if (rd_in && ($countones(c6) != 3 || x == 5'd7)) c6 = ~c6;
      rd6 = rd_in ^ ($countones(c6) != 3);

      if (y == 3'd7 && ((!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                        ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14))))
        c4 = 4'b0111;                                   // A7
      else
        c4 = C4[y];
      if (rd6 && ($countones(c4) != 2 || y == 3'd3 || y == 3'd7)) c4 = ~c4;
      rd_out = rd6 ^ ($countones(c4) != 2);
      code = {c6, c4};
    end
  end

endmodule
