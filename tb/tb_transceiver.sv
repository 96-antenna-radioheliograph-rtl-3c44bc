// tb_transceiver: self-checking testbench of the 8b/10b coding layer.
//
// The reference encoder (tb_8b10b_pkg) is written from the two columns
// (negative and positive running disparity) of the published 5b/6b and 3b/4b
// code tables, not from the complement rule the design uses. Every 40-bit output group is
// compared with it, for random data, the alignment comma K28.5 and the
// other control characters. Independently of any table, the line stream is
// checked for DC balance (running disparity stays within +-1 at group
// boundaries) and for runs of at most five equal bits, and known code
// groups (K28.5, D21.5, D0.0) are compared with their printed values.
// Unsupported control bytes must raise k_err.
module tb_transceiver;
  import rx_pkg::*;
  import tb_8b10b_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  tx_word_t in_word = '0;
  logic sym_valid;
  logic [39:0] sym;
  logic k_err;

  transceiver dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic ref_rd = 0;          // 0 = negative
  logic exp_v = 0;
  logic [39:0] expsym;
  logic exp_kerr;
  int line_disp = -1;        // ones minus zeros on the line, -1 = negative RD
  int run = 0;
  logic last_bit = 0;
  int n_comma = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic line_check(input logic [39:0] s);
    for (int b = 39; b >= 0; b--) begin
      line_disp += s[b] ? 1 : -1;
      if (s[b] == last_bit) run++; else run = 1;
      last_bit = s[b];
      if (run > 5) begin failures++; $display("run of %0d equal bits", run); end
      if ((b % 10) == 0 && (line_disp > 1 || line_disp < -1)) begin
        failures++; $display("running disparity %0d", line_disp);
      end
    end
    for (int g = 0; g < 4; g++)
      if (s[39-10*g -: 7] == 7'b0011111 || s[39-10*g -: 7] == 7'b1100000) n_comma++;
  endtask

  task automatic step(input logic v, input logic [31:0] d, input logic [3:0] k);
    @(negedge clk);
    checks++;
    if (sym_valid !== exp_v) begin
      failures++; $display("valid mismatch");
    end else if (exp_v) begin
      if (sym !== expsym || k_err !== exp_kerr) begin
        failures++;
        if (failures < 10) $display("mismatch: got %h exp %h (data %h k %b)", sym, expsym, in_word.data, in_word.is_k);
      end
      if (!exp_kerr) line_check(sym);
    end
    in_valid = v; in_word.data = d; in_word.is_k = k;
    exp_v = v;
    if (v) begin
      exp_kerr = 0;
      for (int b = 0; b < 4; b++) begin
        logic [7:0] by = d[8*b +: 8];
        logic kk = k[b] && (by[4:0] == 5'd28 || (by[7:5] == 3'd7 &&
                   (by[4:0] == 23 || by[4:0] == 27 || by[4:0] == 29 || by[4:0] == 30)));
        if (k[b] && !kk) exp_kerr = 1;
        expsym[39 - 10*b -: 10] = ref_enc(by, kk, ref_rd);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // printed code groups, starting at negative disparity
    step(1, 32'hBC_B5_00_BC, 4'b1001);   // K28.5(-) D0.0(+) D21.5 K28.5(+)
    step(0, 0, 0);
    checks++;
    if (sym[39:30] !== 10'b0011111010 || sym[29:20] !== 10'b0110001011 ||
        sym[19:10] !== 10'b1010101010 || sym[9:0] !== 10'b1100000101) begin
      failures++; $display("printed code groups wrong: %b", sym);
    end
    for (int n = 0; n < 64; n++) step(1, {4{K28_5}}, 4'hF);              // alignment
    for (int n = 0; n < 3000; n++) step($urandom_range(0, 3) != 0, $urandom, 4'h0);
    for (int n = 0; n < 2000; n++) begin                                  // mixed K / D
      logic [31:0] d = $urandom;
      logic [3:0]  k = 4'($urandom);
      for (int b = 0; b < 4; b++) if (k[b])
        d[8*b +: 8] = ($urandom_range(0, 1) != 0) ? {3'($urandom), 5'd28} :
                      {3'd7, ($urandom_range(0, 3) == 0) ? 5'd23 : ($urandom_range(0, 2) == 0) ? 5'd27 :
                             ($urandom_range(0, 1) == 0) ? 5'd29 : 5'd30};
      step(1, d, k);
    end
    step(1, 32'h0000_0001, 4'h1);                                         // K0.1 is not valid
    step(0, 0, 0);
    checks++;
    if (!k_err) begin failures++; $display("k_err not raised"); end
    checks++;
    if (n_comma < 256) begin failures++; $display("only %0d commas seen", n_comma); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
