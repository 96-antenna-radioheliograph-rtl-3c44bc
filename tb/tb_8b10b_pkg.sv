// tb_8b10b_pkg: reference 8b/10b encoder and decoder for the testbenches.
//
// The encoder is written from the two columns (negative and positive running
// disparity) of the 5b/6b and 3b/4b code tables; the decoder is the inverse
// lookup, built once from the encoder over all 256 data bytes, the twelve
// control characters and both disparities. Code groups are abcdei fghj with
// a in bit 9.
package tb_8b10b_pkg;

  localparam logic [5:0] T6N [32] = '{
    6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
    6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
    6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
    6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
  localparam logic [5:0] T6P [32] = '{
    6'b011000, 6'b100010, 6'b010010, 6'b110001, 6'b001010, 6'b101001, 6'b011001, 6'b000111,
    6'b000110, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b101000,
    6'b100100, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b000101,
    6'b001100, 6'b100110, 6'b010110, 6'b001001, 6'b001110, 6'b010001, 6'b100001, 6'b010100};
  localparam logic [3:0] T4N [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};
  localparam logic [3:0] T4P [8] = '{4'b0100, 4'b1001, 4'b0101, 4'b0011, 4'b0010, 4'b1010, 4'b0110, 4'b0001};
  localparam logic [3:0] K4N [8] = '{4'b0100, 4'b1001, 4'b0101, 4'b0011, 4'b0010, 4'b1010, 4'b0110, 4'b1000};
  localparam logic [3:0] K4P [8] = '{4'b1011, 4'b0110, 4'b1010, 4'b1100, 4'b1101, 4'b0101, 4'b1001, 4'b0111};

  // encode one byte; rd: 0 = negative running disparity, updated in place
  function automatic logic [9:0] ref_enc(input logic [7:0] d, input logic k, inout logic rd);
    logic [4:0] x;
    logic [2:0] y;
    logic [5:0] c6;
    logic [3:0] c4;
    logic rd6;
    x = d[4:0];
    y = d[7:5];
    if (k && x == 5'd28) begin
      c6 = rd ? 6'b110000 : 6'b001111;
      rd6 = ~rd;
      c4 = rd ? K4P[y] : K4N[y];
    end else begin
      c6 = rd ? T6P[x] : T6N[x];
      rd6 = ($countones(c6) == 3) ? rd : ~rd;
      if (y == 3'd7 && (k || (!rd6 && (x == 17 || x == 18 || x == 20)) ||
                            ( rd6 && (x == 11 || x == 13 || x == 14))))
        c4 = rd6 ? 4'b1000 : 4'b0111;
      else
        c4 = rd6 ? T4P[y] : T4N[y];
    end
    rd = ($countones(c4) == 2) ? rd6 : ~rd6;
    return {c6, c4};
  endfunction

  // decoder: code group -> {is_k, byte}; -1 for an invalid group
  class dec8b10b;
    int table_q [int];
    function new();
      logic rd;
      logic [9:0] c;
      for (int r = 0; r < 2; r++) begin
        for (int b = 0; b < 256; b++) begin
          rd = 1'(r);
          c = ref_enc(8'(b), 1'b0, rd);
          table_q[int'(c)] = b;
        end
        for (int y = 0; y < 8; y++) begin
          rd = 1'(r);
          c = ref_enc({3'(y), 5'd28}, 1'b1, rd);
          table_q[int'(c)] = 256 + ((y << 5) | 28);
        end
        for (int i = 0; i < 4; i++) begin
          int xs [4] = '{23, 27, 29, 30};
          rd = 1'(r);
          c = ref_enc({3'd7, 5'(xs[i])}, 1'b1, rd);
          table_q[int'(c)] = 256 + (224 | xs[i]);
        end
      end
    endfunction
    function int decode(input logic [9:0] c);
      if (table_q.exists(int'(c))) return table_q[int'(c)];
      return -1;
    endfunction
  endclass

endpackage
