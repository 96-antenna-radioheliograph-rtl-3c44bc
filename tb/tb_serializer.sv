// tb_serializer: self-checking testbench of the word packer.
//
// Checks that the first ALIGN_WORDS word slots after reset are K28.5
// alignment words, that data words then carry each antenna's I and Q codes
// in the documented nibble positions with the 8-bit word counter spread
// over the payload bits, and that an alignment request (with and without a
// word slot in the same clock) restarts exactly ALIGN_WORDS comma words and
// the counter. The data rate is checked too: one output word per input slot,
// 32 bits = 8 samples x 4 bits.
module tb_serializer;
  import rx_pkg::*;

  localparam int NA = N_ANT;
  localparam int AW = 16;

  logic clk = 0, rst_n = 0;
  logic align_req = 0;
  logic in_valid = 0;
  logic signed [2:0] i_code [NA];
  logic signed [2:0] q_code [NA];
  logic out_valid;
  tx_word_t out_word;
  logic aligning;

  serializer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int commas_left = AW;
  int cnt = 0;
  int n_comma = 0, n_data = 0, n_align = 0;
  logic exp_v = 0;
  tx_word_t expw;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic v, input logic req);
    @(negedge clk);
    checks++;
    if (out_valid !== exp_v) begin
      failures++; $display("valid mismatch");
    end else if (exp_v && out_word !== expw) begin
      failures++;
      if (failures < 10) $display("word mismatch: got %h/%h exp %h/%h", out_word.data, out_word.is_k, expw.data, expw.is_k);
    end
    in_valid = v; align_req = req;
    for (int a = 0; a < NA; a++) begin i_code[a] = 3'($urandom); q_code[a] = 3'($urandom); end
    exp_v = v;
    if (req) begin commas_left = AW; cnt = 0; n_align++; end
    if (v) begin
      if (commas_left > 0) begin
        expw.data = 32'hBCBC_BCBC; expw.is_k = 4'hF;
        commas_left--; n_comma++;
      end else begin
        expw.is_k = 4'h0;
        for (int a = 0; a < NA; a++) begin
          expw.data[8*a +: 8] = {1'((cnt >> (2*a+1)) & 1), q_code[a], 1'((cnt >> (2*a)) & 1), i_code[a]};
        end
        cnt = (cnt + 1) % 256;
        n_data++;
      end
    end
  endtask

  initial begin
    for (int a = 0; a < NA; a++) begin i_code[a] = '0; q_code[a] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4 * 400; n++) step(n % 4 == 3, 0);     // 25 MHz word slots
    step(0, 1);                                                 // request between slots
    for (int n = 0; n < 4 * 300; n++) step(n % 4 == 3, 0);
    step(1, 1);                                                 // request in a slot
    for (int n = 0; n < 3000; n++) step($urandom_range(0, 3) == 0, 0);
    step(0, 0);
    checks++;
    if (n_comma != 3 * AW || n_align != 2) begin
      failures++; $display("expected %0d comma words, saw %0d", 3 * AW, n_comma);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
