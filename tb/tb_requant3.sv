// tb_requant3: self-checking testbench of the 32-bit to 3-bit requantiser.
//
// For random inputs and every step setting, the expected code is computed
// here by integer division rounding toward minus infinity, clipped to
// -4..3, and the clip flag must be set exactly when the input lies outside
// the eight-level range. Level boundaries are probed explicitly.
module tb_requant3;
  import rx_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [4:0] shift = '0;
  logic in_valid = 0;
  logic signed [31:0] in_data = '0;
  logic out_valid;
  logic signed [2:0] out_code;
  logic clip;

  requant3 dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic exp_v = 0;
  longint ek;
  logic eclip;
  int hist [8];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic v, input longint x, input int sh);
    longint q, d;
    @(negedge clk);
    checks++;
    if (out_valid !== exp_v) begin
      failures++; $display("valid mismatch");
    end else if (exp_v && (longint'(out_code) != ek || clip !== eclip)) begin
      failures++;
      if (failures < 10) $display("mismatch: got %0d/%0b exp %0d/%0b", out_code, clip, ek, eclip);
    end
    if (exp_v) hist[int'(out_code) + 4]++;
    x = longint'($signed(32'(x)));     // what the 32-bit port carries
    in_valid = v; in_data = 32'(x); shift = 5'(sh);
    exp_v = v;
    if (v) begin
      d = longint'(1) << sh;
      q = x / d;
      if (q * d != x && x < 0) q = q - 1;   // floor
      eclip = (q >= 3) || (q <= -4);
      ek = (q > 3) ? 3 : (q < -4) ? -4 : q;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int sh = 0; sh < 32; sh++)
      for (longint b = -5; b <= 4; b++) begin
        step(1, (b << sh) & 64'hFFFF_FFFF_FFFF_FFFF, sh);
        if (sh > 0) step(1, (b << sh) - 1, sh);
      end
    for (int n = 0; n < 8000; n++) begin
      int sh = $urandom_range(0, 31);
      longint x = longint'($signed(32'($urandom))) >>> $urandom_range(0, 31);
      if (x < -(longint'(1) << 31)) x = -(longint'(1) << 31);
      step($urandom_range(0, 3) != 0, x, sh);
    end
    step(0, 0, 0);
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (hist[k] == 0) begin failures++; $display("code %0d never produced", k - 4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
