// First-order offset-cancelling high-pass filter, one per channel, at f_s.
//   u[n]   = (x[n] - x[n-1]) << 21            (11 -> 32 bits)
//   acc[n] = acc[n-1] + u[n] - (acc[n-1] >>> 16)
//   y[n]   = acc[n] >>> 9                      (32 -> 23 bits)
// H(z) = (1 - z^-1) / (1 - (1 - 2^-16) z^-1): a zero at DC and a pole just
// inside the unit circle, cut-off fs / (2*pi*2^16) = 7.46 Hz at 3.072 MHz.
// The pass-band gain is 2^12, so an 11-bit input fills the 23-bit output.
// No multiplier: the leak is a shift.
//
// Interface/timing: din sampled on clk_s; dout is the accumulator register
// (latency 2 f_s cycles from din to dout). Structure, shifts and widths
// follow the paper's offset-filter diagram; taking the output from the
// register is this design's choice.
`timescale 1ns / 1ps
module offset_hpf
  import cadc_pkg::*;
#(
  parameter int unsigned IN_W       = HPF_IN_W,
  parameter int unsigned ACC_W      = HPF_ACC_W,
  parameter int unsigned LEAK_SHIFT = 16,
  parameter int unsigned OUT_W      = CH_W
) (
  input  logic                    clk_s,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout
);
  logic signed [IN_W-1:0]  x_d;
  logic signed [IN_W-1:0]  dx;
  logic signed [ACC_W-1:0] u, acc;

  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n) begin
      x_d <= '0;
      dx  <= '0;
    end else begin
      x_d <= din;
      dx  <= din - x_d;
    end

  assign u = ACC_W'(dx) <<< (ACC_W - IN_W);

  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n) acc <= '0;
    else        acc <= acc + u - (acc >>> LEAK_SHIFT);

  assign dout = OUT_W'(acc >>> (ACC_W - OUT_W));
endmodule
