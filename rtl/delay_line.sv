// delay_line: the "Delay(t)" block of one antenna channel.
//
// Delay tracking is split in two: the band-pass FIR applies the fraction of a
// sample, and this block applies the whole number of samples. It is a
// circular buffer of DEPTH samples written once per valid input; the output
// is the sample written 'delay' samples earlier, so out[n] = in[n - delay]
// for delay in 0..DEPTH-1. A new delay value takes effect on the next sample
// (the controlling processor changes it one step at a time as the source
// moves; the step then shows as a one-sample slip, which is the intended
// behaviour of integer delay tracking).
//
// The depth is this design's choice: 256 samples at 100 MHz is 2.56 us, more
// than the 2.08 us geometric delay of the longest (622 m) baseline.
//
// Timing: out_valid/out_data follow in_valid/in_data by one clock.
module delay_line
  import rx_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned DEPTH = DLY_DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(DEPTH)-1:0]  delay,
  input  logic                      in_valid,
  input  logic signed [W-1:0]       in_data,
  output logic                      out_valid,
  output logic signed [W-1:0]       out_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic signed [W-1:0] mem [DEPTH];
  logic [AW-1:0]       wp;
  logic [AW-1:0]       rp;

  assign rp = wp - delay;

  // memory: one write, one read per sample; written in a reset-free block so
  // it maps to a RAM
  always_ff @(posedge clk) begin
    if (in_valid) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wp       <= wp + 1'b1;
        out_data <= (delay == '0) ? in_data : mem[rp];
      end
    end
  end

endmodule
